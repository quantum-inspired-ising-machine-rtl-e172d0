// majority_vote: internal signal and spin decision of E-MVL, Eqs. (5) and (6)
// of the algorithm.
//
// For the spin i being updated the block accumulates, over the extracted spins
// k of M_i(t), the internal signal
//   I_i = h_i                       if k = i (the spin itself was extracted)
//       + sum over k != i of J_ik * sigma_k.
// With sigma_k in {-1, +1} the product is +J_ik or -J_ik, so one adder and a
// negation suffice (no multiplier). The new spin is +1 when I_i > 0, -1 when
// I_i < 0, and the random bit `tie_rnd` when I_i = 0. Both rules are the
// paper's; the one-term-per-cycle accumulation and the widths are this
// design's choices.
//
// Interface and timing: `clear` zeroes the accumulator. In a cycle with
// `acc_en`, the term selected by `is_self` (h) or by `sigma` (+j / -j) is added
// at the clock edge. `spin_out`, `tie` and `acc` are combinational from the
// accumulator, so the decision is valid in the cycle after the last term.
module majority_vote #(
  parameter int unsigned JW = 10,
  parameter int unsigned HW = 10,
  parameter int unsigned N  = 1600,
  parameter int unsigned AW = ((JW > HW) ? JW : HW) + $clog2(N + 1) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 acc_en,
  input  logic                 is_self,
  input  logic signed [JW-1:0] j,
  input  logic signed [HW-1:0] h,
  input  logic                 sigma,
  input  logic                 tie_rnd,
  output logic signed [AW-1:0] acc,
  output logic                 tie,
  output logic                 spin_out
);
  logic signed [AW-1:0] term;

  always_comb begin
    if (is_self)    term = AW'(h);
    else if (sigma) term = AW'(j);
    else            term = -AW'(j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (clear)  acc <= '0;
    else if (acc_en) acc <= acc + term;
  end

  always_comb begin
    tie      = (acc == '0);
    spin_out = tie ? tie_rnd : !acc[AW-1];
  end

endmodule
