// sparsity_scheduler: linear sparsity schedule P_s(t) and the extraction
// count n(t) of E-MVL.
//
// The paper's chosen schedule is linear,
//   P_s(t) = P_s_init - (P_s_init - P_s_fin) * t / (t_fin - 1),
// and the number of spins extracted for a spin with L connected spins is
//   n(t) = max(1, floor((1 - P_s(t)) * L)).
// Both formulas are the paper's. This block evaluates them exactly in 16-bit
// fixed point (P_s = ps / 2^16) without a per-iteration divider: on `start`
// a restoring divider (PS_W cycles) splits D = P_s_init - P_s_fin into
// q = D div (t_fin - 1) and rem = D mod (t_fin - 1). Each `advance` then
// subtracts q and carries the remainder Bresenham-style, so that
//   ps(t) = ps_init - floor(D * t / (t_fin - 1))
// holds bit-exactly at every t and ps(t_fin - 1) = ps_fin. Setting
// ps_init = ps_fin gives the fixed-sparsity mode the paper uses for its
// equilibrium measurements. Only decreasing schedules are supported
// (ps_init >= ps_fin), as in the paper; the exponential and reverse-exponential
// schedules the paper compares against are not built.
//
// Interface and timing: `start` loads the configuration and sets t = 0;
// `ready` rises PS_W + 2 cycles later (2 cycles when t_fin = 1). `ps`,
// `n_extract`, `t` and `last` (t = t_fin - 1) describe the current sweep;
// `advance` moves to the next one in a single cycle. n_extract is combinational from the ps register (one
// multiplier).
module sparsity_scheduler
  import emvl_pkg::*;
#(
  parameter int unsigned L  = 1600,
  parameter int unsigned NW = $clog2(L + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  ps_t           ps_init,
  input  ps_t           ps_fin,
  input  iter_t         t_fin,
  input  logic          advance,
  output logic          ready,
  output ps_t           ps,
  output logic [NW-1:0] n_extract,
  output iter_t         t,
  output logic          last
);
  typedef enum logic [1:0] {S_IDLE, S_DIV, S_RUN} state_e;
  state_e state;

  iter_t       m;        // t_fin - 1
  iter_t       rem_acc;  // running remainder (divider), then error term
  ps_t         quo;      // quotient bits (divider), then q
  ps_t         dnd;      // dividend shift register
  iter_t       rem;      // D mod (t_fin - 1)
  logic [4:0]  bitcnt;

  // Divider step: shift in the next dividend bit and try to subtract m.
  logic [T_W+1:0] trial;
  always_comb trial = {1'b0, rem_acc, dnd[PS_W-1]} - {2'b0, m};

  // Schedule step.
  logic [T_W:0] esum;
  logic         carry;
  always_comb begin
    esum  = {1'b0, rem_acc} + {1'b0, rem};
    carry = (esum >= {1'b0, m});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      m       <= '0;
      rem_acc <= '0;
      quo     <= '0;
      dnd     <= '0;
      rem     <= '0;
      bitcnt  <= '0;
      ps      <= PS_ONE;
      t       <= '0;
    end else if (start) begin
      state   <= S_DIV;
      m       <= (t_fin > 1) ? t_fin - 1'b1 : '0;
      rem_acc <= '0;
      quo     <= '0;
      dnd     <= ps_init - ps_fin;
      bitcnt  <= '0;
      ps      <= ps_init;
      t       <= '0;
    end else begin
      unique case (state)
        S_DIV: begin
          if (m == '0) begin
            // A single sweep: P_s(0) = P_s_init, nothing to divide.
            quo     <= '0;
            rem     <= '0;
            rem_acc <= '0;
            state   <= S_RUN;
          end else begin
            if (!trial[T_W+1]) begin
              rem_acc <= trial[T_W-1:0];
              quo     <= {quo[PS_W-2:0], 1'b1};
            end else begin
              rem_acc <= {rem_acc[T_W-2:0], dnd[PS_W-1]};
              quo     <= {quo[PS_W-2:0], 1'b0};
            end
            dnd    <= dnd << 1;
            bitcnt <= bitcnt + 1'b1;
            if (bitcnt == 5'(PS_W - 1)) state <= S_RUN;
          end
        end
        S_RUN: begin
          if (bitcnt == 5'(PS_W)) begin
            // First cycle after the division: keep the remainder, clear the
            // error term.
            rem     <= rem_acc;
            rem_acc <= '0;
            bitcnt  <= '0;
          end else if (advance && !last) begin
            ps      <= ps - quo - ps_t'(carry);
            rem_acc <= carry ? T_W'(esum - {1'b0, m}) : T_W'(esum);
            t       <= t + 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  // After the divider has finished, bitcnt == PS_W for one cycle while the
  // remainder moves into place; the schedule is ready after that.
  assign ready = (state == S_RUN) && (bitcnt != 5'(PS_W));
  assign last  = (t == m);

  // n = max(1, floor((1 - P_s) * L)).
  logic [PS_W+NW-1:0] prod;
  always_comb begin
    prod      = (PS_W+NW)'(PS_ONE - ps) * (PS_W+NW)'(L);
    n_extract = NW'(prod >> PS_FRAC);
    if (n_extract == '0) n_extract = NW'(1);
  end

  a_decreasing: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (ps_init >= ps_fin) && (ps_init <= PS_ONE) && (t_fin != '0));
  a_advance_ready: assert property (@(posedge clk) disable iff (!rst_n)
    advance |-> ready);

endmodule
