// tb_emvl_controller: drives the E-MVL sequencer with simple stand-ins for
// the scheduler, the shufflers, the memories and the vote unit, and checks
// the command stream it produces: the start pulses, N initial spin writes
// with the random bit, one order draw per spin at positions 0..N-1, n(t)
// extraction draws at positions 0..n(t)-1, the coupling address i*N + k and
// spin address k for every extracted index, exactly n(t) accumulations with
// the self flag set only for k = i, one decision write per spin to address i
// carrying the vote result, t_fin - 1 schedule advances, and the run length
//   1 + N + 1 + sum_t (N (n(t) + 5) + 1).
// The stand-in shufflers return fixed permutations (affine maps modulo the
// prime N) so that the expected indices are known here.
`timescale 1ns/1ps
module tb_emvl_controller;
  localparam int N  = 23;
  localparam int NW = $clog2(N);
  localparam int CW = $clog2(N + 1);
  localparam int AW = $clog2(N * N);
  localparam int TF = 4;
  int n_of_t[TF] = '{1, 7, 15, 23};

  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0;
  logic busy, done, rng_load, ord_rnd_next, ext_rnd_next, spin_rnd_bit = 1'b0, spin_rnd_next;
  logic sched_start, sched_ready = 1'b0, sched_last, sched_advance;
  logic [CW-1:0] sched_n;
  logic shuf_init, ord_busy = 1'b0, ord_draw, ord_valid = 1'b0;
  logic ext_busy = 1'b0, ext_draw, ext_valid = 1'b0;
  logic [NW-1:0] ord_pos, ord_idx = '0, ext_pos, ext_idx = '0;
  logic sp_we, sp_wdata, j_re, h_re;
  logic [NW-1:0] sp_waddr, sp_raddr, h_raddr;
  logic [AW-1:0] j_raddr;
  logic mv_clear, mv_acc_en, mv_is_self, mv_tie_rnd, mv_spin = 1'b0;

  emvl_controller #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL @%0t: %s", $time, what); end
  endtask

  // Stand-in scheduler.
  int t_cur = 0, ready_cnt = 0;
  assign sched_n    = CW'(n_of_t[t_cur]);
  assign sched_last = (t_cur == TF - 1);
  function automatic int ord_map(int p, int t);  return (p * 7 + t * 3) % N; endfunction
  function automatic int ext_map(int k, int i, int t); return (k * 5 + i + 2 * t + 1) % N; endfunction

  int cur_spin = -1;
  int exp_ord_pos = 0, exp_ext_pos = 0, init_writes = 0, advances = 0, decisions = 0;
  int accs = 0, selfs = 0, exp_selfs = 0, shuf_cnt = 0;
  bit in_init = 0;
  logic [NW-1:0] ext_q[$];

  always @(posedge clk) begin
    // stand-ins respond
    ord_valid <= ord_draw;
    if (ord_draw) ord_idx <= NW'(ord_map(int'(ord_pos), t_cur));
    ext_valid <= ext_draw;
    if (ext_draw) ext_idx <= NW'(ext_map(int'(ext_pos), cur_spin, t_cur));
    if (sched_start) begin
      t_cur <= 0; ready_cnt <= 5; sched_ready <= 1'b0;
    end else if (ready_cnt > 1) ready_cnt <= ready_cnt - 1;
    else if (ready_cnt == 1) begin ready_cnt <= 0; sched_ready <= 1'b1; end
    if (sched_advance) t_cur <= t_cur + 1;
    if (shuf_init) begin shuf_cnt <= N; ord_busy <= 1'b1; ext_busy <= 1'b1; end
    else if (shuf_cnt > 1) shuf_cnt <= shuf_cnt - 1;
    else if (shuf_cnt == 1) begin shuf_cnt <= 0; ord_busy <= 1'b0; ext_busy <= 1'b0; end
    spin_rnd_bit <= 1'($urandom);
    mv_spin <= 1'($urandom);
  end

  // Monitor and scoreboard.
  always @(posedge clk) if (rst_n) begin
    if (sched_start) begin
      check(rng_load && shuf_init, "start pulses together");
      in_init <= 1'b1;
    end
    if (sp_we && in_init && init_writes < N) begin
      check(int'(sp_waddr) == init_writes, "initial spin address");
      check(sp_wdata == spin_rnd_bit && spin_rnd_next, "initial spin bit is random");
      init_writes <= init_writes + 1;
      if (init_writes == N - 1) in_init <= 1'b0;
    end
    if (ord_draw) begin
      check(!ord_busy, "order draw while busy");
      check(int'(ord_pos) == exp_ord_pos, $sformatf("order pos %0d, expected %0d", ord_pos, exp_ord_pos));
      check(ord_rnd_next, "order random advances");
      exp_ord_pos <= (exp_ord_pos == N - 1) ? 0 : exp_ord_pos + 1;
      exp_ext_pos <= 0;
    end
    if (h_re) begin
      check(int'(h_raddr) == ord_map((exp_ord_pos + N - 1) % N, t_cur), "field address");
      cur_spin <= int'(h_raddr);
      accs <= 0;
      selfs <= 0;
      exp_selfs <= 0;
    end
    if (ext_draw) begin
      check(int'(ext_pos) == exp_ext_pos, $sformatf("extract pos %0d, expected %0d", ext_pos, exp_ext_pos));
      check(ext_rnd_next, "extract random advances");
      exp_ext_pos <= exp_ext_pos + 1;
    end
    if (ext_valid) begin
      check(j_re && j_raddr == AW'(cur_spin * N + int'(ext_idx)), "coupling address i*N+k");
      check(sp_raddr == ext_idx, "spin address k");
      if (int'(ext_idx) == cur_spin) exp_selfs <= exp_selfs + 1;
    end
    if (mv_acc_en) begin
      accs <= accs + 1;
      if (mv_is_self) selfs <= selfs + 1;
    end
    if (sp_we && !in_init) begin
      check(int'(sp_waddr) == cur_spin, "decision written to spin i");
      check(sp_wdata == mv_spin, "decision carries the vote");
      check(mv_tie_rnd == spin_rnd_bit && spin_rnd_next, "tie bit is the random bit");
      check(accs == n_of_t[t_cur], $sformatf("%0d accumulations, expected %0d", accs, n_of_t[t_cur]));
      check(selfs == exp_selfs, "self flag only for k = i");
      decisions <= decisions + 1;
    end
    if (sched_advance) advances <= advances + 1;
  end

  initial begin
    longint t0, t1, exp;
    #1 rst_n = 1'b0;
    #20 rst_n = 1'b1;
    @(negedge clk);
    check(!busy && !done, "idle");
    start = 1'b1;
    @(posedge clk);
    t0 = $time;
    @(negedge clk);
    start = 1'b0;
    check(busy, "busy after start");
    while (!done) @(posedge clk);
    t1 = $time;
    exp = 64'd2 + longint'(N);
    for (int t = 0; t < TF; t++) exp += longint'(N) * (longint'(n_of_t[t]) + 64'd5) + 64'd1;
    check((t1 - t0) / 10 == exp, $sformatf("run took %0d cycles, expected %0d", (t1 - t0) / 10, exp));
    check(decisions == N * TF, $sformatf("%0d decisions", decisions));
    check(advances == TF - 1, $sformatf("%0d advances", advances));
    check(init_writes == N, "N initial writes");
    check(!busy, "idle at done");
    repeat (3) @(negedge clk);
    check(done, "done holds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * 100000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
