// tb_fp_node: streams random samples, one per cycle, into Full Parallel nodes of shape
// D_IN=2/D_OUT=2 (the block diagram case, latency 4) and D_IN=4/D_OUT=3 (latency 6),
// with random pipeline stalls, and checks every output against the reference contraction
// and the exact cycle at which it appears.
module tb_fp_node;
  import tb_ttn_ref_pkg::*;
  logic clk = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, en;
  int stalls = 0;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  // ---- DUT A: 2 -> 2
  logic va, oa;
  logic signed [15:0] xa [2], ya [2], wa [8], za [2];
  fp_node #(.D_IN(2), .D_OUT(2)) ua (.clk, .rst_n, .en, .in_valid(va), .x(xa), .y(ya), .w(wa),
                                     .out_valid(oa), .z(za));
  // ---- DUT B: 4 -> 3
  logic vb, ob;
  logic signed [15:0] xb [4], yb [4], wb [48], zb [3];
  fp_node #(.D_IN(4), .D_OUT(3)) ub (.clk, .rst_n, .en, .in_valid(vb), .x(xb), .y(yb), .w(wb),
                                     .out_valid(ob), .z(zb));

  int qa [$][], qb [$][];     // expected outputs in order
  int ta [$], tb_ [$];        // enabled-cycle count at which each is due
  int ecyc = 0;               // enabled cycles so far

  initial begin
    int wai[], wbi[];
    rst_n = 1'b0; en = 1'b1; va = 0; vb = 0;
    wai = new[8]; wbi = new[48];
    foreach (wai[i]) begin wai[i] = rnd(12000); wa[i] = 16'(wai[i]); end
    foreach (wbi[i]) begin wbi[i] = rnd(8000);  wb[i] = 16'(wbi[i]); end
    repeat (3) @(posedge clk);
    #0.5 rst_n = 1'b1;
    for (int c = 0; c < 400; c++) begin
      // drive a new sample (only counted when the pipeline advances)
      int xi[], yi[], xbi[], ybi[], z[];
      xi = new[2]; yi = new[2]; xbi = new[4]; ybi = new[4];
      en = (c > 20 && $urandom_range(5) == 0) ? 1'b0 : 1'b1;
      va = (c < 380) && ($urandom_range(3) != 0);
      vb = (c < 380) && ($urandom_range(3) != 0);
      foreach (xi[i]) begin xi[i] = rnd(32767); xa[i] = 16'(xi[i]); end
      foreach (yi[i]) begin yi[i] = rnd(32767); ya[i] = 16'(yi[i]); end
      foreach (xbi[i]) begin xbi[i] = rnd(16384); xb[i] = 16'(xbi[i]); end
      foreach (ybi[i]) begin ybi[i] = rnd(16384); yb[i] = 16'(ybi[i]); end
      if (en) begin
        if (va) begin node(2, 2, xi, yi, wai, 14, 16, z);  qa.push_back(z); ta.push_back(ecyc + 4); end
        if (vb) begin node(4, 3, xbi, ybi, wbi, 14, 16, z); qb.push_back(z); tb_.push_back(ecyc + 6); end
      end else stalls++;
      @(posedge clk);
      if (en) ecyc++;
      #0.5;
      // outputs present now belong to samples due at ecyc (a stalled edge moves nothing)
      if (en) begin
      checks++;
      if (oa != (ta.size() > 0 && ta[0] == ecyc)) begin
        failures++; $display("FAIL A valid timing at enabled cycle %0d", ecyc);
      end
      if (oa && ta.size() > 0 && ta[0] == ecyc) begin
        for (int i = 0; i < 2; i++) check(int'(za[i]), qa[0][i], $sformatf("A z%0d", i));
        void'(qa.pop_front()); void'(ta.pop_front());
      end
      checks++;
      if (ob != (tb_.size() > 0 && tb_[0] == ecyc)) begin
        failures++; $display("FAIL B valid timing at enabled cycle %0d", ecyc);
      end
      if (ob && tb_.size() > 0 && tb_[0] == ecyc) begin
        for (int i = 0; i < 3; i++) check(int'(zb[i]), qb[0][i], $sformatf("B z%0d", i));
        void'(qb.pop_front()); void'(tb_.pop_front());
      end
      end
    end
    checks++;
    if (qa.size() != 0 || qb.size() != 0 || stalls == 0) begin
      failures++; $display("FAIL leftover %0d %0d stalls %0d", qa.size(), qb.size(), stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
