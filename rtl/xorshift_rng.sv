// xorshift_rng: 32-bit xorshift pseudo-random generator.
//
// The E-MVL algorithm needs random numbers for the initial spin configuration,
// the random spin update order, the random choice of extracted spins and the
// random decision r when the internal signal is zero. The paper asks only for
// randomness; the xorshift32 generator (shifts 13, 17, 5) is this design's
// choice because it costs three XOR layers and one 32-bit register.
//
// Interface: `load` copies `seed` into the state (a zero seed, which would lock
// the generator at zero, is replaced by a fixed non-zero constant). `next`
// advances the state by one step. `value` is the current state and is valid
// in every cycle; a consumer uses `value` and pulses `next` in the same cycle.
module xorshift_rng #(
  parameter logic [31:0] SALT = 32'h0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [31:0] seed,
  input  logic        next,
  output logic [31:0] value
);
  import emvl_pkg::*;

  logic [31:0] state;
  logic [31:0] seeded;

  always_comb begin
    seeded = seed ^ SALT;
    if (seeded == 32'h0) seeded = 32'h2545_f491;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       state <= 32'h2545_f491 ^ SALT;
    else if (load)    state <= seeded;
    else if (next)    state <= xorshift32(state);
  end

  assign value = state;

  // A xorshift state of zero never leaves zero.
  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) state != 32'h0);

endmodule
