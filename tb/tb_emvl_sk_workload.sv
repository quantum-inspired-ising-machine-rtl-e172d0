// tb_emvl_sk_workload: the paper's benchmark in miniature. Small SK instances
// (N = 16, all-to-all, no fields) with bimodal (+/-1) and Gaussian-like
// 10-bit couplings are solved with the paper's preferred setting: a linear
// sparsity schedule from P_s_init = 0.3 to P_s_fin = 0 over t_fin = 1000
// sweeps, ten trials with different seeds per instance. The exact ground
// state energy is found here by exhaustive Gray-code enumeration of all 2^16
// configurations. Checks: at least one trial per instance reaches the exact
// ground state, the mean accuracy (energy / ground energy, the paper's
// measure) is at least 0.95, and no trial falls below 0.9. (At N = 16 one
// bimodal excitation already costs 5% of the energy, so the paper's 99%
// target is not a useful per-trial bound here.) A second part runs the
// Gaussian instance at fixed sparsities and checks that the settled energy
// rises with P_s, the sparsity-as-temperature behaviour the method rests on.
`timescale 1ns/1ps
module tb_emvl_sk_workload;
  import emvl_pkg::*;

  localparam int N  = 16;
  localparam int JW = 10;
  localparam int HW = 10;
  localparam int NW = $clog2(N);
  localparam int CW = $clog2(N + 1);
  localparam int AW = $clog2(N * N);
  localparam int TRIALS = 10;

  logic          clk = 1'b0;
  logic          rst_n = 1'b1;
  logic          j_we = 1'b0, h_we = 1'b0;
  logic [AW-1:0] j_waddr = '0;
  logic [JW-1:0] j_wdata = '0;
  logic [NW-1:0] h_waddr = '0;
  logic [HW-1:0] h_wdata = '0;
  emvl_cfg_t     cfg;
  logic          start = 1'b0;
  logic          busy, done;
  logic [NW-1:0] spin_raddr = '0;
  logic          spin_rdata;
  iter_t         cur_t;
  ps_t           cur_ps;
  logic [CW-1:0] cur_n;

  int checks = 0, failures = 0;
  longint J[N][N];
  bit s[N];

  emvl_top #(.N(N), .JW(JW), .HW(HW)) dut (
    .clk, .rst_n, .j_we, .j_waddr, .j_wdata, .h_we, .h_waddr, .h_wdata,
    .cfg, .start, .busy, .done, .spin_raddr, .spin_rdata, .cur_t, .cur_ps, .cur_n);

  always #2.5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint energy_of(input bit v[N]);
    longint e;
    e = 0;
    for (int i = 0; i < N; i++)
      for (int k = i + 1; k < N; k++)
        e -= (v[i] == v[k]) ? J[i][k] : -J[i][k];
    return e;
  endfunction

  // Exhaustive search with Gray-code order: flip one spin per step and update
  // the energy from its local field.
  function automatic longint ground_energy();
    bit v[N];
    longint e, best;
    foreach (v[i]) v[i] = 1'b0;
    e = energy_of(v);
    best = e;
    for (int g = 1; g < (1 << N); g++) begin
      int b;
      longint f;
      b = $countones((g ^ (g >> 1)) ^ ((g - 1) ^ ((g - 1) >> 1)) - 1);
      f = 0;
      for (int k = 0; k < N; k++)
        if (k != b) f += v[k] ? J[b][k] : -J[b][k];
      // Flipping spin b changes -s_b f by 2 s_b f.
      e += v[b] ? 2 * f : -2 * f;
      v[b] = !v[b];
      if (e < best) best = e;
    end
    return best;
  endfunction

  function automatic int gauss10();
    int acc;
    acc = 0;
    for (int u = 0; u < 12; u++) acc += int'($urandom_range(4095));
    acc = (acc - 6 * 4095) / 32;
    if (acc > 511)  acc = 511;
    if (acc < -512) acc = -512;
    return acc;
  endfunction

  // One run of the machine on the loaded instance; returns the final energy.
  task automatic run_once(input ps_t ps_init, input ps_t ps_fin, input int t_fin, output longint e);
    @(negedge clk);
    cfg.ps_init = ps_init;
    cfg.ps_fin  = ps_fin;
    cfg.t_fin   = iter_t'(t_fin);
    cfg.seed    = $urandom;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      spin_raddr = NW'(i);
      @(negedge clk);
      s[i] = spin_rdata;
    end
    e = energy_of(s);
  endtask

  task automatic solve_instance(input bit gaussian, input string name);
    longint eg, e, best;
    int hits;
    real acc_sum;
    acc_sum = 0.0;
    for (int i = 0; i < N; i++) begin
      J[i][i] = 0;
      for (int k = i + 1; k < N; k++) begin
        J[i][k] = gaussian ? longint'(gauss10()) : (($urandom_range(1) == 1) ? 64'sd1 : -64'sd1);
        J[k][i] = J[i][k];
      end
    end
    for (int i = 0; i < N; i++)
      for (int k = 0; k < N; k++) begin
        @(negedge clk);
        j_we = 1'b1; j_waddr = AW'(i * N + k); j_wdata = JW'(J[i][k]);
      end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      j_we = 1'b0; h_we = 1'b1; h_waddr = NW'(i); h_wdata = '0;
    end
    @(negedge clk);
    h_we = 1'b0;
    eg = ground_energy();
    hits = 0;
    best = 0;
    for (int tr = 0; tr < TRIALS; tr++) begin
      run_once(ps_t'(65536 * 3 / 10), '0, 1000, e);
      if (e < best) best = e;
      if (e == eg) hits++;
      acc_sum += real'(e) / real'(eg);
      check(real'(e) / real'(eg) >= 0.9, $sformatf("%s trial %0d: energy %0d, ground %0d", name, tr, e, eg));
    end
    check(hits > 0, $sformatf("%s: ground state never reached", name));
    check(acc_sum / TRIALS >= 0.95, $sformatf("%s: mean accuracy %f", name, acc_sum / TRIALS));
    $display("%s: ground energy %0d, best %0d, exact in %0d of %0d trials, mean accuracy %0.4f",
             name, eg, best, hits, TRIALS, acc_sum / TRIALS);
  endtask

  // Fixed sparsity (P_s_init = P_s_fin): the more connections are cut, the
  // higher the energy the machine settles at. On the instance loaded last,
  // the mean normalized energy E / E_GS after 200 sweeps must rise strictly
  // as P_s falls through 0.9, 0.6 and 0.3 (n = 1, 6 and 11 of 16), and the
  // spread between 0.9 and 0.3 must be clear. P_s = 0 is left out: started
  // from random spins it is a quench, not an equilibrium.
  task automatic fixed_sparsity(input string name);
    localparam int RUNS = 40;
    int   ps_pct[3] = '{90, 60, 30};
    real  mean[3];
    longint eg, e;
    eg = ground_energy();
    foreach (ps_pct[q]) begin
      mean[q] = 0.0;
      for (int r = 0; r < RUNS; r++) begin
        run_once(ps_t'(65536 * ps_pct[q] / 100), ps_t'(65536 * ps_pct[q] / 100), 200, e);
        mean[q] += real'(e) / real'(eg) / RUNS;
      end
      $display("%s fixed P_s = 0.%0d: mean E/E_GS %0.4f over %0d runs", name, ps_pct[q], mean[q], RUNS);
    end
    check(mean[0] < mean[1], $sformatf("%s: E/E_GS at P_s 0.9 (%f) not below 0.6 (%f)", name, mean[0], mean[1]));
    check(mean[1] < mean[2], $sformatf("%s: E/E_GS at P_s 0.6 (%f) not below 0.3 (%f)", name, mean[1], mean[2]));
    check(mean[2] - mean[0] > 0.2, $sformatf("%s: E/E_GS spread %f too small", name, mean[2] - mean[0]));
  endtask

  initial begin
    cfg = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    solve_instance(1'b0, "SK-bimodal N=16");
    solve_instance(1'b1, "SK-Gaussian N=16");
    fixed_sparsity("SK-Gaussian N=16");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(5 * 64'd40_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
