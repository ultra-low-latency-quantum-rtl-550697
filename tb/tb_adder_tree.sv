// tb_adder_tree: random vectors every cycle into a 4-input tree (1 cycle per level) and a
// 5-input tree (2 cycles per level, odd element carried), checking sums and latency
// (2 and 3 levels) and the hold while the enable is low.
module tb_adder_tree;
  logic clk = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  logic en;
  logic signed [15:0] d4 [4];
  logic signed [15:0] d5 [5];
  logic signed [17:0] s4;
  logic signed [18:0] s5;

  adder_tree #(.N_IN(4), .IN_W(16), .DT_DSP(1)) u4 (.clk, .en, .din(d4), .sum(s4));
  adder_tree #(.N_IN(5), .IN_W(16), .DT_DSP(2)) u5 (.clk, .en, .din(d5), .sum(s5));

  int e4 [$], e5 [$];

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    en = 1'b1;
    for (int c = 0; c < 200; c++) begin
      int t4, t5;
      t4 = 0; t5 = 0;
      for (int i = 0; i < 4; i++) begin
        d4[i] = (c == 0) ? 16'sh7fff : 16'($urandom); t4 += int'(d4[i]);
      end
      for (int i = 0; i < 5; i++) begin
        d5[i] = (c == 0) ? -16'sh8000 : 16'($urandom); t5 += int'(d5[i]);
      end
      e4.push_back(t4); e5.push_back(t5);
      @(posedge clk); #0.5;
      if (c >= 1) check(int'(s4), e4[c-1], $sformatf("N4 c%0d", c));   // 2 levels x 1
      if (c >= 5) check(int'(s5), e5[c-5], $sformatf("N5 c%0d", c));   // 3 levels x 2
    end
    en = 1'b0;
    repeat (4) @(posedge clk);
    #0.5;
    check(int'(s4), e4[198], "hold N4");
    check(int'(s5), e5[194], "hold N5");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
