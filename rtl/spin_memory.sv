// spin_memory: the N spin bits of the Ising machine (1 = +1, 0 = -1).
//
// Spin decision logic maps the spin values {-1, +1} onto bits {0, 1}; this
// block stores them. It has one write port, used by the controller for the
// random initial configuration and for each decided spin, one synchronous read
// port for the extraction pipeline (the state of an extracted spin k) and a
// second synchronous read port for the host to read the solution. A register
// array is used so that both reads and the write can happen in one cycle.
//
// Timing: writes take effect at the clock edge; each read port returns the
// addressed bit one cycle after its address is presented (the read ports have
// no enable and follow their address every cycle). A read of the word being
// written returns the old value.
module spin_memory #(
  parameter int unsigned N  = 1600,
  parameter int unsigned NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [NW-1:0] waddr,
  input  logic          wdata,
  input  logic [NW-1:0] raddr_a,
  output logic          rdata_a,
  input  logic [NW-1:0] raddr_b,
  output logic          rdata_b
);
  logic [N-1:0] spin;

  always_ff @(posedge clk) begin
    if (we) spin[waddr] <= wdata;
    rdata_a <= spin[raddr_a];
    rdata_b <= spin[raddr_b];
  end

  a_waddr: assert property (@(posedge clk) we |-> (32'(waddr) < N));

endmodule
