// emvl_controller: sequencer of the E-MVL algorithm (Algorithm 1).
//
// One run: load the seeds and the schedule, write a random initial spin
// configuration, then for t = 0 .. t_fin - 1 visit every spin once in a fresh
// random order and update it, advancing the sparsity schedule after each
// sweep. Updating spin i draws n(t) distinct indices k from 0..N-1 (the
// extracted set M_i(t); L_i = N for an all-to-all SK problem, counting i
// itself), reads J_ik and sigma_k for each, accumulates the internal signal
// and writes the decided spin straight back, so later spins of the same sweep
// see it (in-place, sequential update). The order of operations is the
// paper's; the pipeline, the in-place write and the cycle budget are this
// design's choices.
//
// Pipeline of one extraction (one per cycle, fully overlapped):
//   cycle 0  draw k from the extraction shuffler
//   cycle 1  read J[i*N + k] and sigma_k (synchronous memories)
//   cycle 2  accumulate in the majority vote unit
// Cycle budget: after `start`, N cycles write the initial spins and one cycle
// waits for the shufflers and scheduler; each spin then takes n(t) + 5 cycles
// (order draw, index latch, n(t) extraction draws, three to drain and decide)
// and each sweep one more to advance the schedule, so a run takes
//   1 + N + 1 + sum_t (N * (n(t) + 5) + 1)
// cycles from the `start` cycle to the first cycle with `done` high (for
// N >= 19, when the schedule divider is not the longer wait).
//
// Random numbers: the generators of the two shufflers advance once per draw
// (`ord_rnd_next`, `ext_rnd_next`); `spin_rnd_bit` gives the initial spin bits and the tie bit and
// advances once per initial spin and once per decision.
//
// The controller owns all memory addressing, so a few outputs are plain
// routes of inputs: the spin read address and J read enable follow the
// extraction shuffler's answer, the field address follows the order
// shuffler's answer, and the tie bit is the spin generator's bit.
module emvl_controller #(
  parameter int unsigned N  = 1600,
  parameter int unsigned NW = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned CW = $clog2(N + 1),
  parameter int unsigned AW = (N * N > 1) ? $clog2(N * N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // random sources
  output logic          rng_load,
  output logic          ord_rnd_next,
  output logic          ext_rnd_next,
  input  logic          spin_rnd_bit,
  output logic          spin_rnd_next,
  // sparsity schedule
  output logic          sched_start,
  input  logic          sched_ready,
  input  logic [CW-1:0] sched_n,
  input  logic          sched_last,
  output logic          sched_advance,
  // update-order and extraction shufflers
  output logic          shuf_init,
  input  logic          ord_busy,
  output logic          ord_draw,
  output logic [NW-1:0] ord_pos,
  input  logic [NW-1:0] ord_idx,
  input  logic          ord_valid,
  input  logic          ext_busy,
  output logic          ext_draw,
  output logic [NW-1:0] ext_pos,
  input  logic [NW-1:0] ext_idx,
  input  logic          ext_valid,
  // spin memory
  output logic          sp_we,
  output logic [NW-1:0] sp_waddr,
  output logic          sp_wdata,
  output logic [NW-1:0] sp_raddr,
  // coupling and field memories
  output logic          j_re,
  output logic [AW-1:0] j_raddr,
  output logic          h_re,
  output logic [NW-1:0] h_raddr,
  // majority vote
  output logic          mv_clear,
  output logic          mv_acc_en,
  output logic          mv_is_self,
  output logic          mv_tie_rnd,
  input  logic          mv_spin
);
  typedef enum logic [2:0] {
    C_IDLE, C_INIT, C_WAIT_RDY, C_SPIN, C_LATCH, C_EXTRACT, C_DRAIN, C_SWEEP_END
  } cstate_e;

  cstate_e       state;
  logic [NW-1:0] p;          // position in the update order
  logic [NW-1:0] k;          // extraction draw position
  logic [NW-1:0] cur_i;      // spin being updated
  logic [AW-1:0] row_base;   // cur_i * N
  logic          s2_valid;   // extraction term arrives at the vote unit
  logic          s2_self;
  logic          done_q;

  wire go = start && (state == C_IDLE);

  // Pipeline stage 1 -> 2: memory reads are in flight.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_self  <= 1'b0;
    end else begin
      s2_valid <= ext_valid;
      s2_self  <= (ext_idx == cur_i);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      p        <= '0;
      k        <= '0;
      cur_i    <= '0;
      row_base <= '0;
      done_q   <= 1'b0;
    end else begin
      unique case (state)
        C_IDLE: if (go) begin
          state  <= C_INIT;
          p      <= '0;
          done_q <= 1'b0;
        end
        C_INIT: begin
          p <= p + 1'b1;
          if (p == NW'(N - 1)) state <= C_WAIT_RDY;
        end
        C_WAIT_RDY: if (sched_ready && !ord_busy && !ext_busy) begin
          state <= C_SPIN;
          p     <= '0;
        end
        C_SPIN: state <= C_LATCH;
        C_LATCH: if (ord_valid) begin
          cur_i    <= ord_idx;
          row_base <= AW'(ord_idx) * AW'(N);
          k        <= '0;
          state    <= C_EXTRACT;
        end
        C_EXTRACT: begin
          k <= k + 1'b1;
          if (CW'(k) == sched_n - 1'b1) state <= C_DRAIN;
        end
        C_DRAIN: if (!ext_valid && !s2_valid) begin
          if (p == NW'(N - 1)) state <= C_SWEEP_END;
          else begin
            p     <= p + 1'b1;
            state <= C_SPIN;
          end
        end
        C_SWEEP_END: begin
          p <= '0;
          if (sched_last) begin
            state  <= C_IDLE;
            done_q <= 1'b1;
          end else begin
            state <= C_SPIN;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  wire decide = (state == C_DRAIN) && !ext_valid && !s2_valid;

  always_comb begin
    busy          = (state != C_IDLE);
    done          = done_q && (state == C_IDLE);
    rng_load      = go;
    sched_start   = go;
    shuf_init     = go;
    sched_advance = (state == C_SWEEP_END) && !sched_last;

    ord_draw      = (state == C_SPIN);
    ord_pos       = p;
    ord_rnd_next  = ord_draw;
    ext_draw      = (state == C_EXTRACT);
    ext_pos       = k;
    ext_rnd_next  = ext_draw;

    // Spin writes: random initial state, then the decided spins.
    sp_we         = (state == C_INIT) || decide;
    sp_waddr      = (state == C_INIT) ? p : cur_i;
    sp_wdata      = (state == C_INIT) ? spin_rnd_bit : mv_spin;
    spin_rnd_next = sp_we;
    mv_tie_rnd    = spin_rnd_bit;

    sp_raddr      = ext_idx;
    j_re          = ext_valid;
    j_raddr       = row_base + AW'(ext_idx);
    h_re          = (state == C_LATCH) && ord_valid;
    h_raddr       = ord_idx;

    mv_clear      = (state == C_LATCH);
    mv_acc_en     = s2_valid;
    mv_is_self    = s2_self;
  end

  // The shuffler positions must stay inside the table.
  a_ext_pos: assert property (@(posedge clk) disable iff (!rst_n)
    ext_draw |-> (32'(ext_pos) < N));
  // The order shuffler answers one cycle after a draw.
  a_ord_answer: assert property (@(posedge clk) disable iff (!rst_n)
    ord_draw |=> ord_valid);

endmodule
