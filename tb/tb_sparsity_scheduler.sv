// tb_sparsity_scheduler: checks the linear sparsity schedule at the default
// L = 1600 against the closed forms
//   ps(t) = ps_init - floor((ps_init - ps_fin) t / (t_fin - 1)),
//   n(t)  = max(1, floor((2^16 - ps(t)) L / 2^16)),
// computed here with 64-bit integer arithmetic, for the paper's schedules
// (P_s 1 -> 0, 0.4 -> 0, 0.2 -> 0), a fixed sparsity, a single sweep and
// random ones. It also checks the `ready` latency and the `last` flag.
`timescale 1ns/1ps
module tb_sparsity_scheduler;
  import emvl_pkg::*;
  localparam int L  = 1600;
  localparam int NW = $clog2(L + 1);

  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0, advance = 1'b0;
  ps_t ps_init = '0, ps_fin = '0, ps;
  iter_t t_fin = '0, t;
  logic ready, last;
  logic [NW-1:0] n_extract;
  int checks = 0, failures = 0;

  sparsity_scheduler #(.L(L)) dut (.clk, .rst_n, .start, .ps_init, .ps_fin, .t_fin,
    .advance, .ready, .ps, .n_extract, .t, .last);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run(input int unsigned pi, input int unsigned pf, input int tf);
    int lat;
    longint d, m, eps, en;
    @(negedge clk);
    ps_init = ps_t'(pi); ps_fin = ps_t'(pf); t_fin = iter_t'(tf); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!ready) begin
      @(negedge clk);
      lat++;
    end
    check(lat == ((tf > 1) ? PS_W + 2 : 2), $sformatf("ready after %0d cycles", lat));
    d = longint'(pi) - longint'(pf);
    m = (tf > 1) ? longint'(tf) - 64'd1 : 64'd0;
    for (int tt = 0; tt < tf; tt++) begin
      eps = (m == 0) ? longint'(pi) : longint'(pi) - (d * longint'(tt)) / m;
      en  = ((65536 - eps) * L) >> 16;
      if (en < 1) en = 1;
      check(t == iter_t'(tt), "t");
      check(longint'(ps) == eps, $sformatf("tf=%0d t=%0d: ps %0d, expected %0d", tf, tt, ps, eps));
      check(longint'(n_extract) == en, $sformatf("t=%0d: n %0d, expected %0d", tt, n_extract, en));
      check(last == (tt == tf - 1), "last flag");
      if (tt != tf - 1) begin
        advance = 1'b1;
        @(negedge clk);
        advance = 1'b0;
        if ($urandom_range(1) != 0) @(negedge clk);
      end
    end
  endtask

  initial begin
    #1 rst_n = 1'b0;
    #20 rst_n = 1'b1;
    run(65536, 0, 1000);                 // P_s 1 -> 0 over 1000 sweeps
    run(65536 * 4 / 10, 0, 1000);        // optimum range 0.4 -> 0
    run(65536 * 2 / 10, 0, 50);          // 0.2 -> 0, short
    run(65536 * 3 / 10, 65536 * 3 / 10, 20);  // fixed sparsity
    run(65536, 65536, 3);                // P_s = 1: n clamps to 1
    run(13107, 0, 1);                    // single sweep
    run(65536, 6553, 7);
    for (int r = 0; r < 10; r++) begin
      int unsigned a, b;
      a = $urandom_range(65536);
      b = $urandom_range(a);
      run(a, b, int'($urandom_range(300, 2)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * 200000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
