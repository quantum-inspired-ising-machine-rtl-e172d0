// coupling_memory: single-clock block RAM with one write port for the host and
// one synchronous read port for the update pipeline.
//
// In the E-MVL machine one instance holds the coupling matrix J, N x N words of
// WIDTH bits stored row-major (word i*N + k holds J_ik), and a second, N words
// deep, holds the fields h_i. The paper stores the 10-bit signed couplings of
// its SK-Gaussian instances in block RAM and reads them during the update;
// the row-major layout, the full (not triangular) matrix and the port set are
// this design's choices. The contents are raw two's-complement bits; the
// reader interprets the sign.
//
// Timing: a write (`we`, `waddr`, `wdata`) takes effect at the clock edge.
// A read issued with `re` and `raddr` delivers `rdata` after one clock edge;
// `rdata` holds its value while `re` is low. A read and a write to the same
// word in one cycle return the old word.
module coupling_memory #(
  parameter int unsigned DEPTH = 1600 * 1600,
  parameter int unsigned WIDTH = 10,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  a_waddr: assert property (@(posedge clk) we |-> (32'(waddr) < DEPTH));
  a_raddr: assert property (@(posedge clk) re |-> (32'(raddr) < DEPTH));

endmodule
