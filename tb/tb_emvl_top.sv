// tb_emvl_top: end-to-end test of the E-MVL machine at a reduced size (N = 24).
//
// The testbench loads symmetric problems through the host ports, runs the
// machine several times with different schedules and seeds, and after each
// run compares every spin with the reference model of emvl_ref_pkg, which
// repeats the algorithm with the same random streams. It also checks the run
// length against the cycle formula, the final sweep index, the final sparsity
// and extraction count, and counts, from the machine's own signals, each
// mechanism the design has: the field term (i in its own extracted set), a
// tie resolved at random, the n = 1 clamp at P_s = 1, the fully connected
// sweep at P_s = 0, the schedule's remainder carry, the fixed-sparsity mode,
// and energy-raising (uphill) flips. A mechanism that never happens is a
// failure.
`timescale 1ns/1ps
module tb_emvl_top;
  import emvl_pkg::*;
  import emvl_ref_pkg::*;

  localparam int N  = 24;
  localparam int JW = 10;
  localparam int HW = 10;
  localparam int NW = $clog2(N);
  localparam int CW = $clog2(N + 1);
  localparam int AW = $clog2(N * N);

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

  int checks = 0;
  int failures = 0;
  longint cyc = 0;

  emvl_top #(.N(N), .JW(JW), .HW(HW)) dut (
    .clk, .rst_n, .j_we, .j_waddr, .j_wdata, .h_we, .h_waddr, .h_wdata,
    .cfg, .start, .busy, .done, .spin_raddr, .spin_rdata, .cur_t, .cur_ps, .cur_n);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // Mechanism counters, taken from the machine's own signals.
  longint ev_self = 0, ev_tie = 0, ev_clamp = 0, ev_full = 0, ev_carry = 0;
  longint ev_fixed = 0, ev_uphill = 0, ev_flip = 0;
  always @(posedge clk) begin
    if (dut.u_vote.acc_en && dut.u_vote.is_self) ev_self++;
    if (dut.u_ctrl.decide && dut.u_vote.tie) ev_tie++;
    if (dut.u_ctrl.sched_advance && dut.u_sched.carry) ev_carry++;
    if (dut.u_ctrl.state == 3'd7) begin  // sweep end
      if (cur_ps == PS_ONE && cur_n == CW'(1)) ev_clamp++;
      if (cur_n == CW'(N)) ev_full++;
    end
  end

  emvl_model model;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load_problem(input bit gaussian, input bit with_field);
    for (int i = 0; i < N; i++) begin
      for (int k = i + 1; k < N; k++) begin
        int v;
        if (gaussian) v = int'($urandom_range(1023)) - 512;
        else          v = ($urandom_range(1) == 1) ? 1 : -1;
        model.J[i*N + k] = v;
        model.J[k*N + i] = v;
      end
      model.J[i*N + i] = 0;
      model.h[i] = with_field ? int'($urandom_range(6)) - 3 : 0;
    end
    for (int a = 0; a < N * N; a++) begin
      @(negedge clk);
      j_we = 1'b1; j_waddr = AW'(a); j_wdata = JW'(model.J[a]);
    end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      j_we = 1'b0;
      h_we = 1'b1; h_waddr = NW'(i); h_wdata = HW'(model.h[i]);
    end
    @(negedge clk);
    j_we = 1'b0; h_we = 1'b0;
  endtask

  task automatic run_and_check(input int unsigned ps_init, input int unsigned ps_fin,
                               input int t_fin, input int unsigned seed, input string name);
    longint t0, flips0, up0;
    int mismatches;
    flips0 = model.n_flip;
    up0 = model.n_uphill;
    @(negedge clk);
    cfg.ps_init = ps_t'(ps_init);
    cfg.ps_fin  = ps_t'(ps_fin);
    cfg.t_fin   = iter_t'(t_fin);
    cfg.seed    = seed;
    start = 1'b1;
    @(posedge clk);
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    model.run(ps_init, ps_fin, t_fin, seed);
    while (!done) @(posedge clk);
    check(cyc - t0 == model.cycles,
          $sformatf("%s: run took %0d cycles, expected %0d", name, cyc - t0, model.cycles));
    check(cur_t == iter_t'(t_fin - 1), $sformatf("%s: final t %0d", name, cur_t));
    check(cur_ps == ps_t'((t_fin == 1) ? ps_init : ps_fin), $sformatf("%s: final ps %0d", name, cur_ps));
    mismatches = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      spin_raddr = NW'(i);
      @(negedge clk);
      check(spin_rdata == model.spin[i],
            $sformatf("%s: spin %0d is %0d, model %0d", name, i, spin_rdata, model.spin[i]));
    end
    ev_flip   += model.n_flip - flips0;
    ev_uphill += model.n_uphill - up0;
    if (ps_init == ps_fin) ev_fixed++;
    $display("%s: energy %0d, flips %0d, uphill flips %0d, %0d cycles", name,
             model.energy(), model.n_flip - flips0, model.n_uphill - up0, cyc - t0);
  endtask

  initial begin
    model = new(N);
    cfg = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(!busy && !done, "idle after reset");
    // Bimodal couplings with small fields: ties and field terms occur.
    load_problem(1'b0, 1'b1);
    run_and_check(ONE, 0, 20, 32'h1234_5678, "bimodal Ps 1->0");
    run_and_check(ONE * 3 / 10, ONE * 3 / 10, 5, 32'hcafe_0001, "bimodal fixed Ps 0.3");
    run_and_check(ONE * 4 / 10, 0, 1, 32'h0, "bimodal single sweep");
    // 10-bit Gaussian-like couplings, no field.
    load_problem(1'b1, 1'b0);
    run_and_check(ONE * 4 / 10, 0, 30, 32'h0bad_f00d, "gaussian Ps 0.4->0");
    run_and_check(ONE, ONE / 10, 7, 32'h5555_aaaa, "gaussian Ps 1->0.1");

    check(ev_self  == model.n_self,  $sformatf("field terms %0d, model %0d", ev_self, model.n_self));
    check(ev_tie   == model.n_tie,   $sformatf("ties %0d, model %0d", ev_tie, model.n_tie));
    check(ev_carry == model.n_carry, $sformatf("carries %0d, model %0d", ev_carry, model.n_carry));
    $display("mechanisms: field term %0d, random tie %0d, n=1 clamp %0d, full sweep %0d, carry %0d, fixed-sparsity runs %0d, flips %0d, uphill flips %0d",
             ev_self, ev_tie, ev_clamp, ev_full, ev_carry, ev_fixed, ev_flip, ev_uphill);
    check(ev_self   > 0, "field term never used");
    check(ev_tie    > 0, "no tie decided at random");
    check(ev_clamp  > 0, "n = 1 clamp never used");
    check(ev_full   > 0, "no fully connected sweep");
    check(ev_carry  > 0, "schedule carry never happened");
    check(ev_fixed  > 0, "fixed-sparsity mode never run");
    check(ev_uphill > 0, "no energy-raising flip");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * 2_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
