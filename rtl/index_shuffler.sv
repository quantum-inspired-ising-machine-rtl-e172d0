// index_shuffler: draws indices 0..L-1 without replacement by a partial
// Fisher-Yates shuffle.
//
// E-MVL forms the extracted set M_i(t) by picking n_i(t) of the L_i spins
// connected to spin i at random, and it visits the spins in a random order in
// each sweep. Both are "draw k distinct items uniformly from L". The block
// keeps a permutation of 0..L-1 in a table. A draw at position `pos` picks a
// random slot r in [pos, L-1], returns the entry at r and swaps the entries at
// pos and r. Draws at positions 0, 1, ..., k-1 then return k distinct
// indices. Because any permutation is a valid starting point, the table is set
// to the identity only once (`init_start`) and is never restored between
// draws sets.
//
// r = pos + floor(rnd * (L - pos) / 2^16) from a 16-bit random number `rnd`;
// the bias of this scaling is below (L - pos) / 2^16. The shuffle and the
// scaling are this design's choice; the paper only requires random extraction.
//
// Timing: init_start clears the table to the identity in L cycles while
// `busy` is high. A draw is accepted in any cycle with busy low; its index
// appears on `out_idx` with `out_valid` one cycle later. One draw per cycle.
module index_shuffler #(
  parameter int unsigned L  = 1600,
  parameter int unsigned IW = (L > 1) ? $clog2(L) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init_start,
  output logic          busy,
  input  logic          draw,
  input  logic [IW-1:0] pos,
  input  logic [15:0]   rnd,
  output logic [IW-1:0] out_idx,
  output logic          out_valid
);
  logic [IW-1:0] perm [L];
  logic [IW-1:0] init_cnt;
  logic          init_run;

  logic [IW:0]    span;      // L - pos, number of slots left
  logic [IW+16:0] scaled;    // rnd * span
  logic [IW-1:0]  r;         // chosen slot
  logic [IW-1:0]  a, b;

  always_comb begin
    span   = (IW+1)'(L) - {1'b0, pos};
    scaled = (IW+17)'(rnd) * (IW+17)'(span);
    r      = pos + IW'(scaled >> 16);
    a      = perm[pos];
    b      = perm[r];
  end

  assign busy = init_run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_run  <= 1'b0;
      init_cnt  <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (init_start) begin
        init_run <= 1'b1;
        init_cnt <= '0;
      end else if (init_run) begin
        init_cnt <= init_cnt + 1'b1;
        if (init_cnt == IW'(L - 1)) init_run <= 1'b0;
      end else if (draw) begin
        out_idx   <= b;
        out_valid <= 1'b1;
      end
    end
  end

  // Table writes: identity during initialisation, the swap on a draw.
  always_ff @(posedge clk) begin
    if (init_run) begin
      perm[init_cnt] <= init_cnt;
    end else if (draw && !init_start) begin
      perm[pos] <= b;
      perm[r]   <= a;
    end
  end

  a_pos_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    draw |-> (32'(pos) < L));
  a_no_draw_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    draw |-> !busy);

endmodule
