// tb_coupling_memory: writes random 10-bit words to a 256-word instance,
// reads them back in random order and checks the one-cycle read latency, that
// rdata holds while re is low, and that a read of a word written in the same
// cycle returns the old word.
`timescale 1ns/1ps
module tb_coupling_memory;
  localparam int DEPTH = 256;
  localparam int WIDTH = 10;
  localparam int AW = $clog2(DEPTH);

  logic clk = 1'b0, we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model[DEPTH];
  int checks = 0, failures = 0;

  coupling_memory #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = WIDTH'($urandom); model[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int r = 0; r < 1000; r++) begin
      logic [WIDTH-1:0] held;
      @(negedge clk);
      re = 1'b1; raddr = AW'($urandom_range(DEPTH - 1));
      // Sometimes write the same word in the same cycle.
      if ($urandom_range(3) == 0) begin
        we = 1'b1; waddr = raddr; wdata = WIDTH'($urandom);
      end else we = 1'b0;
      @(negedge clk);
      check(rdata == model[raddr], $sformatf("read %0d: %h vs %h", raddr, rdata, model[raddr]));
      if (we) model[waddr] = wdata;
      we = 1'b0;
      held = rdata;
      re = 1'b0;
      raddr = AW'($urandom_range(DEPTH - 1));
      @(negedge clk);
      check(rdata == held, "rdata holds while re is low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
