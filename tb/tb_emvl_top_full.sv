// tb_emvl_top_full: one complete run of the E-MVL machine at its default size,
// N = 1600 spins with 10-bit couplings (the largest SK problem of the paper).
//
// The testbench writes a symmetric SK-Gaussian-like instance (approximately
// normal couplings, standard deviation 128, clipped to the signed 10-bit range
// -512..511, no fields), runs a two-sweep linear schedule P_s = 0.4 -> 0, and
// compares all 1600 spins, the run length in cycles and the final schedule
// state with the reference model. Two sweeps are enough to pass every part of
// the datapath at full size (n = 960 and n = 1600 extractions per spin); a
// paper-length run of 1000 sweeps would take about 2e9 cycles.
`timescale 1ns/1ps
module tb_emvl_top_full;
  import emvl_pkg::*;
  import emvl_ref_pkg::*;

  localparam int N  = 1600;
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

  emvl_top dut (
    .clk, .rst_n, .j_we, .j_waddr, .j_wdata, .h_we, .h_waddr, .h_wdata,
    .cfg, .start, .busy, .done, .spin_raddr, .spin_rdata, .cur_t, .cur_ps, .cur_n);

  always #2.5 clk = ~clk;  // 200 MHz, the paper's operating clock
  always @(posedge clk) cyc <= cyc + 1;

  emvl_model model;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Approximately normal integer: Irwin-Hall sum of 12 uniforms, scaled.
  function automatic int gauss10();
    int s;
    s = 0;
    for (int u = 0; u < 12; u++) s += int'($urandom_range(4095));
    s = (s - 6 * 4095) / 32;   // standard deviation about 128
    if (s > 511)  s = 511;
    if (s < -512) s = -512;
    return s;
  endfunction

  initial begin
    longint t0, e0;
    int unsigned ps_init;
    model = new(N);
    cfg = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++)
      for (int k = i + 1; k < N; k++) begin
        int v;
        v = gauss10();
        model.J[i*N + k] = v;
        model.J[k*N + i] = v;
      end
    for (int a = 0; a < N * N; a++) begin
      @(negedge clk);
      j_we = 1'b1; j_waddr = AW'(a); j_wdata = JW'(model.J[a]);
    end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      j_we = 1'b0;
      h_we = 1'b1; h_waddr = NW'(i); h_wdata = '0;
    end
    @(negedge clk);
    j_we = 1'b0; h_we = 1'b0;

    ps_init = ONE * 4 / 10;
    cfg.ps_init = ps_t'(ps_init);
    cfg.ps_fin  = '0;
    cfg.t_fin   = iter_t'(2);
    cfg.seed    = 32'h1600_2025;
    start = 1'b1;
    @(posedge clk);
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    model.run(ps_init, 0, 2, 32'h1600_2025);
    while (!done) @(posedge clk);
    check(cyc - t0 == model.cycles,
          $sformatf("run took %0d cycles, expected %0d", cyc - t0, model.cycles));
    check(cur_t == iter_t'(1), "final sweep index");
    check(cur_ps == '0 && cur_n == CW'(N), "final schedule P_s = 0, n = N");
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      spin_raddr = NW'(i);
      @(negedge clk);
      check(spin_rdata == model.spin[i], $sformatf("spin %0d differs from the model", i));
    end
    e0 = model.energy();
    $display("N=%0d: energy after 2 sweeps %0d, %0d flips, %0d cycles (%0.3f ms at 200 MHz)",
             N, e0, model.n_flip, cyc - t0, real'(cyc - t0) * 5.0e-6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(5 * 64'd20_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
