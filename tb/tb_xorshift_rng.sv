// tb_xorshift_rng: checks the xorshift32 generator against a step-by-step
// software recomputation (shift-and-XOR written out here, not the package
// function), the seed load with salt, the zero-seed substitute and that the
// state holds while `next` is low.
`timescale 1ns/1ps
module tb_xorshift_rng;
  localparam logic [31:0] SALT = 32'h9e37_79b9;

  logic clk = 1'b0, rst_n = 1'b1, load = 1'b0, next = 1'b0;
  logic [31:0] seed = '0, value;
  int checks = 0, failures = 0;

  xorshift_rng #(.SALT(SALT)) dut (.clk, .rst_n, .load, .seed, .next, .value);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] step(input logic [31:0] x);
    logic [31:0] a, b, c;
    a = x ^ {x[18:0], 13'b0};
    b = a ^ {17'b0, a[31:17]};
    c = b ^ {b[26:0], 5'b0};
    return c;
  endfunction

  initial begin
    logic [31:0] exp;
    #1 rst_n = 1'b0;
    #20 rst_n = 1'b1;
    check(value == (32'h2545_f491 ^ SALT), "reset state");
    for (int s = 0; s < 4; s++) begin
      @(negedge clk);
      seed = (s == 0) ? SALT : $urandom;   // seed ^ SALT = 0 on the first pass
      load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      exp = seed ^ SALT;
      if (exp == 0) exp = 32'h2545_f491;
      check(value == exp, $sformatf("seed load %0d: %h vs %h", s, value, exp));
      for (int i = 0; i < 200; i++) begin
        next = ($urandom_range(3) != 0);
        @(negedge clk);
        if (next) exp = step(exp);
        check(value == exp, $sformatf("step %0d: %h vs %h", i, value, exp));
      end
      next = 1'b0;
    end
    // Known value: one step from 1 is 0x00042021.
    @(negedge clk);
    seed = 32'h1 ^ SALT; load = 1'b1;
    @(negedge clk);
    load = 1'b0; next = 1'b1;
    @(negedge clk);
    next = 1'b0;
    check(value == 32'h0004_2021, $sformatf("xorshift32(1) = %h", value));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
