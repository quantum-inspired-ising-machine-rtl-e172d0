// tb_index_shuffler: checks the partial Fisher-Yates shuffler against a
// software model of the same draw rule, that k draws return k distinct indices
// in range, that L draws return a permutation, that initialisation takes L
// cycles and restores the identity, and that single draws are close to
// uniform over 0..L-1.
`timescale 1ns/1ps
module tb_index_shuffler;
  localparam int L  = 37;
  localparam int IW = $clog2(L);

  logic clk = 1'b0, rst_n = 1'b1, init_start = 1'b0, draw = 1'b0;
  logic [IW-1:0] pos = '0, out_idx;
  logic [15:0] rnd = '0;
  logic busy, out_valid;
  int checks = 0, failures = 0;
  int model[L];

  index_shuffler #(.L(L)) dut (.clk, .rst_n, .init_start, .busy, .draw, .pos, .rnd,
                               .out_idx, .out_valid);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic init_and_check();
    int cycles;
    @(negedge clk);
    init_start = 1'b1;
    @(negedge clk);
    init_start = 1'b0;
    cycles = 0;
    while (busy) begin
      @(negedge clk);
      cycles++;
    end
    check(cycles == L, $sformatf("init took %0d cycles", cycles));
    for (int i = 0; i < L; i++) model[i] = i;
  endtask

  // Draws at positions 0..k-1, back to back; returns the indices.
  task automatic draw_set(input int k, output int got[$]);
    int exp[$];
    got = {};
    for (int p = 0; p < k; p++) begin
      int slot, a;
      @(negedge clk);
      draw = 1'b1;
      pos  = IW'(p);
      rnd  = 16'($urandom);
      slot = p + int'((longint'(rnd) * (longint'(L) - longint'(p))) >> 16);
      a = model[p];
      model[p] = model[slot];
      model[slot] = a;
      exp.push_back(model[p]);
      @(posedge clk);
      #1;
      check(out_valid, "out_valid after draw");
      got.push_back(int'(out_idx));
    end
    @(negedge clk);
    draw = 1'b0;
    @(negedge clk);
    check(!out_valid, "out_valid drops");
    foreach (exp[i]) check(got[i] == exp[i], $sformatf("draw %0d: %0d vs %0d", i, got[i], exp[i]));
  endtask

  initial begin
    int got[$];
    int hist[L];
    #1 rst_n = 1'b0;
    #20 rst_n = 1'b1;
    init_and_check();
    for (int round = 0; round < 60; round++) begin
      int k;
      bit seen[L];
      k = (round % 3 == 0) ? L : int'($urandom_range(L, 1));
      draw_set(k, got);
      foreach (seen[i]) seen[i] = 1'b0;
      foreach (got[i]) begin
        check(got[i] < L, "index in range");
        check(!seen[got[i]], $sformatf("index %0d drawn twice", got[i]));
        seen[got[i]] = 1'b1;
      end
    end
    // Back-to-back single draws at position 0: near uniform.
    init_and_check();
    foreach (hist[i]) hist[i] = 0;
    for (int r = 0; r < 37 * 200; r++) begin
      draw_set(1, got);
      hist[got[0]]++;
    end
    foreach (hist[i]) check(hist[i] > 120 && hist[i] < 280, $sformatf("index %0d drawn %0d times", i, hist[i]));
    // Re-initialisation returns the identity: drawing at pos with rnd = 0 picks slot pos.
    init_and_check();
    for (int p = 0; p < L; p++) begin
      @(negedge clk);
      draw = 1'b1; pos = IW'(p); rnd = '0;
      @(posedge clk);
      #1;
      check(int'(out_idx) == p, "identity after init");
    end
    @(negedge clk);
    draw = 1'b0;
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
