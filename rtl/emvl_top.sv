// emvl_top: E-MVL Ising machine for an N-spin, all-to-all (SK-type) problem.
//
// The machine searches for a low-energy spin configuration of
//   H = - sum_ij J_ij s_i s_j - sum_i h_i s_i.
// Instead of thermal noise it uses sparsification: when spin i is updated only
// n(t) randomly extracted spins out of its L = N connections (i itself stands
// for the field h_i) enter the internal signal, and the spin takes the sign of
// that partial sum. The sparsity P_s(t) falls linearly from P_s_init to
// P_s_fin over t_fin sweeps, so n(t) grows from few spins (large fluctuations,
// escape from local minima) to all of them (plain descent).
//
// Blocks: coupling RAM (J, N*N words of JW bits, row-major), field RAM (h),
// spin register file, three xorshift32 generators, two partial Fisher-Yates
// shufflers (spin update order and extracted set), the linear sparsity
// scheduler, the majority vote unit and the controller.
//
// Host interface (all synchronous to clk; this design's choice):
//   j_we/j_waddr/j_wdata   write J_ik at word i*N + k (the host writes both
//                          J_ik and J_ki of a symmetric problem)
//   h_we/h_waddr/h_wdata   write h_i
//   cfg                    ps_init, ps_fin (P_s * 2^16), t_fin, seed;
//                          sampled in the `start` cycle
//   start / busy / done    start a run when idle; done stays high from the
//                          end of a run until the next start
//   spin_raddr/spin_rdata  read spin i (1 = +1) one cycle after the address
//   cur_t, cur_ps, cur_n   sweep index, sparsity and extraction count
// The host must not write J or h while busy. Run length: see emvl_controller.
module emvl_top
  import emvl_pkg::*;
#(
  parameter int unsigned N  = 1600,
  parameter int unsigned JW = 10,
  parameter int unsigned HW = 10,
  parameter int unsigned NW = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned CW = $clog2(N + 1),
  parameter int unsigned AW = (N * N > 1) ? $clog2(N * N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          j_we,
  input  logic [AW-1:0] j_waddr,
  input  logic [JW-1:0] j_wdata,
  input  logic          h_we,
  input  logic [NW-1:0] h_waddr,
  input  logic [HW-1:0] h_wdata,
  input  emvl_cfg_t     cfg,
  input  logic          start,
  output logic          busy,
  output logic          done,
  input  logic [NW-1:0] spin_raddr,
  output logic          spin_rdata,
  output iter_t         cur_t,
  output ps_t           cur_ps,
  output logic [CW-1:0] cur_n
);
  // random sources
  logic        rng_load;
  logic [31:0] ord_rnd, ext_rnd, spin_rnd;
  logic        ord_rnd_next, ext_rnd_next, spin_rnd_next;
  // schedule
  logic        sched_start, sched_ready, sched_last, sched_advance;
  // shufflers
  logic          shuf_init, ord_busy, ext_busy;
  logic          ord_draw, ext_draw, ord_valid, ext_valid;
  logic [NW-1:0] ord_pos, ext_pos, ord_idx, ext_idx;
  // memories
  logic          sp_we, sp_wdata, sp_rdata;
  logic [NW-1:0] sp_waddr, sp_raddr;
  logic          j_re, h_re;
  logic [AW-1:0] j_raddr;
  logic [NW-1:0] h_raddr;
  logic [JW-1:0] j_rdata;
  logic [HW-1:0] h_rdata;
  // vote
  logic mv_clear, mv_acc_en, mv_is_self, mv_tie_rnd, mv_spin;

  xorshift_rng #(.SALT(32'h0000_0000)) u_rng_ord (
    .clk, .rst_n, .load(rng_load), .seed(cfg.seed), .next(ord_rnd_next), .value(ord_rnd));
  xorshift_rng #(.SALT(32'h9e37_79b9)) u_rng_ext (
    .clk, .rst_n, .load(rng_load), .seed(cfg.seed), .next(ext_rnd_next), .value(ext_rnd));
  xorshift_rng #(.SALT(32'h7f4a_7c15)) u_rng_spin (
    .clk, .rst_n, .load(rng_load), .seed(cfg.seed), .next(spin_rnd_next), .value(spin_rnd));

  sparsity_scheduler #(.L(N), .NW(CW)) u_sched (
    .clk, .rst_n, .start(sched_start), .ps_init(cfg.ps_init), .ps_fin(cfg.ps_fin),
    .t_fin(cfg.t_fin), .advance(sched_advance), .ready(sched_ready), .ps(cur_ps),
    .n_extract(cur_n), .t(cur_t), .last(sched_last));

  index_shuffler #(.L(N), .IW(NW)) u_order (
    .clk, .rst_n, .init_start(shuf_init), .busy(ord_busy), .draw(ord_draw),
    .pos(ord_pos), .rnd(ord_rnd[31:16]), .out_idx(ord_idx), .out_valid(ord_valid));

  index_shuffler #(.L(N), .IW(NW)) u_extract (
    .clk, .rst_n, .init_start(shuf_init), .busy(ext_busy), .draw(ext_draw),
    .pos(ext_pos), .rnd(ext_rnd[31:16]), .out_idx(ext_idx), .out_valid(ext_valid));

  coupling_memory #(.DEPTH(N * N), .WIDTH(JW), .AW(AW)) u_jmem (
    .clk, .we(j_we), .waddr(j_waddr), .wdata(j_wdata),
    .re(j_re), .raddr(j_raddr), .rdata(j_rdata));

  coupling_memory #(.DEPTH(N), .WIDTH(HW), .AW(NW)) u_hmem (
    .clk, .we(h_we), .waddr(h_waddr), .wdata(h_wdata),
    .re(h_re), .raddr(h_raddr), .rdata(h_rdata));

  spin_memory #(.N(N), .NW(NW)) u_spins (
    .clk, .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata),
    .raddr_a(sp_raddr), .rdata_a(sp_rdata), .raddr_b(spin_raddr), .rdata_b(spin_rdata));

  majority_vote #(.JW(JW), .HW(HW), .N(N)) u_vote (
    .clk, .rst_n, .clear(mv_clear), .acc_en(mv_acc_en), .is_self(mv_is_self),
    .j(j_rdata), .h(h_rdata), .sigma(sp_rdata), .tie_rnd(mv_tie_rnd),
    .acc(), .tie(), .spin_out(mv_spin));

  emvl_controller #(.N(N), .NW(NW), .CW(CW), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .rng_load, .ord_rnd_next, .ext_rnd_next,
    .spin_rnd_bit(spin_rnd[31]), .spin_rnd_next,
    .sched_start, .sched_ready, .sched_n(cur_n), .sched_last, .sched_advance,
    .shuf_init, .ord_busy, .ord_draw, .ord_pos, .ord_idx, .ord_valid,
    .ext_busy, .ext_draw, .ext_pos, .ext_idx, .ext_valid,
    .sp_we, .sp_waddr, .sp_wdata, .sp_raddr,
    .j_re, .j_raddr, .h_re, .h_raddr,
    .mv_clear, .mv_acc_en, .mv_is_self, .mv_tie_rnd, .mv_spin(mv_spin));

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(j_we || h_we));

endmodule
