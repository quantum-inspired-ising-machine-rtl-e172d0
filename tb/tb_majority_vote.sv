// tb_majority_vote: feeds random sets of extracted terms (couplings in the
// signed 10-bit range with random neighbour spins, and the field when the
// spin itself is extracted) and checks the internal signal and the decision
// of Eq. (6) against integer arithmetic here: +1 for I > 0, -1 for I < 0 and
// the random bit for I = 0. Bimodal (+/-1) sets make ties frequent.
`timescale 1ns/1ps
module tb_majority_vote;
  localparam int JW = 10, HW = 10, N = 1600;
  localparam int AW = JW + $clog2(N + 1) + 1;

  logic clk = 1'b0, rst_n = 1'b1, clear = 1'b0, acc_en = 1'b0, is_self = 1'b0;
  logic sigma = 1'b0, tie_rnd = 1'b0, tie, spin_out;
  logic signed [JW-1:0] j = '0;
  logic signed [HW-1:0] h = '0;
  logic signed [AW-1:0] acc;
  int checks = 0, failures = 0, ties = 0;

  majority_vote #(.JW(JW), .HW(HW), .N(N)) dut (.clk, .rst_n, .clear, .acc_en, .is_self,
    .j, .h, .sigma, .tie_rnd, .acc, .tie, .spin_out);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #1 rst_n = 1'b0;
    #20 rst_n = 1'b1;
    check(acc == 0, "reset");
    for (int set = 0; set < 600; set++) begin
      longint sum;
      int n;
      bit bimodal;
      bimodal = (set % 2 == 0);
      n = (set % 50 == 0) ? N : int'($urandom_range(40, 1));
      @(negedge clk);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      check(acc == 0, "clear");
      sum = 0;
      for (int k = 0; k < n; k++) begin
        longint jv, hv;
        jv = bimodal ? (($urandom_range(1) == 1) ? 64'sd1 : -64'sd1) : longint'($urandom_range(1023)) - 64'sd512;
        if (set % 50 == 0) jv = -512;           // extreme sum
        hv = longint'($urandom_range(1023)) - 64'sd512;
        acc_en  = 1'b1;
        is_self = ($urandom_range(n) == 0);
        sigma   = 1'($urandom);
        j = JW'(jv);
        h = HW'(hv);
        if (is_self) sum += hv;
        else sum += sigma ? jv : -jv;
        @(negedge clk);
        // An idle cycle between terms must not change the sum.
        if ($urandom_range(3) == 0) begin
          acc_en = 1'b0;
          @(negedge clk);
        end
      end
      acc_en = 1'b0;
      tie_rnd = 1'($urandom);
      #1;
      check(longint'(acc) == sum, $sformatf("set %0d: I = %0d, expected %0d", set, acc, sum));
      if (sum > 0)      check(spin_out == 1'b1 && !tie, "I > 0 gives +1");
      else if (sum < 0) check(spin_out == 1'b0 && !tie, "I < 0 gives -1");
      else begin
        ties++;
        check(tie && spin_out == tie_rnd, "I = 0 gives r");
        tie_rnd = !tie_rnd;
        #1;
        check(spin_out == tie_rnd, "I = 0 follows r");
      end
    end
    check(ties > 10, $sformatf("only %0d ties", ties));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * 2000000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
