// tb_spin_memory: random writes and reads on both read ports of a 40-spin
// instance, checked against a bit array; a read of the bit being written
// returns the old value.
`timescale 1ns/1ps
module tb_spin_memory;
  localparam int N  = 40;
  localparam int NW = $clog2(N);

  logic clk = 1'b0, we = 1'b0, wdata = 1'b0, rdata_a, rdata_b;
  logic [NW-1:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  bit model[N];
  int checks = 0, failures = 0;

  spin_memory #(.N(N)) dut (.clk, .we, .waddr, .wdata, .raddr_a, .rdata_a, .raddr_b, .rdata_b);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = NW'(i); wdata = 1'($urandom); model[i] = wdata;
    end
    for (int r = 0; r < 2000; r++) begin
      bit ea, eb;
      @(negedge clk);
      we = 1'($urandom); waddr = NW'($urandom_range(N - 1)); wdata = 1'($urandom);
      raddr_a = NW'($urandom_range(N - 1));
      raddr_b = ($urandom_range(3) == 0) ? waddr : NW'($urandom_range(N - 1));
      ea = model[raddr_a];
      eb = model[raddr_b];
      @(negedge clk);
      check(rdata_a == ea, $sformatf("port a spin %0d", raddr_a));
      check(rdata_b == eb, $sformatf("port b spin %0d", raddr_b));
      if (we) model[waddr] = wdata;
      we = 1'b0;
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
