// emvl_pkg: constants and helpers shared by the E-MVL (extraction-type majority
// voting logic) Ising machine.
//
// Sparsity P_s is carried as an unsigned fixed-point number with 16 fraction
// bits, so 1.0 is PS_ONE = 65536 and P_s needs PS_W = 17 bits. The fixed-point
// format is this design's choice; the algorithm only needs 0 <= P_s <= 1.
//
// Spins are stored as single bits, 1 for +1 and 0 for -1, the mapping the
// spin-decision-logic family uses.
package emvl_pkg;

  localparam int unsigned PS_FRAC = 16;
  localparam int unsigned PS_W    = PS_FRAC + 1;
  localparam logic [PS_W-1:0] PS_ONE = PS_W'(1) << PS_FRAC;

  // Width of the iteration counter and of t_fin (up to 2^20 - 1 iterations).
  localparam int unsigned T_W = 20;

  typedef logic [PS_W-1:0] ps_t;
  typedef logic [T_W-1:0]  iter_t;

  // Run configuration written by the host before a start pulse.
  typedef struct packed {
    ps_t          ps_init;  // P_s at t = 0
    ps_t          ps_fin;   // P_s at t = t_fin - 1
    iter_t        t_fin;    // number of sweeps (>= 1)
    logic [31:0]  seed;     // seed of the random sources
  } emvl_cfg_t;

  // One xorshift32 step (Marsaglia, shifts 13, 17, 5).
  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

endpackage
