// tb_pp_node: runs random samples through Partial Parallel nodes of shape 2->2 (the
// block-diagram case, 7 cycles), 4->1 (18 cycles) and 2->4 with two cycles per step
// (2*(4+4+1) = 18 cycles), checking each result against the reference contraction, the
// exact start-to-out_valid cycle count, that start is ignored while busy, and that z
// holds after completion.
module tb_pp_node;
  import tb_ttn_ref_pkg::*;
  logic clk = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  logic sa, sb, sc, ba, bb, bc, oa, ob, oc;
  logic signed [15:0] xa [2], ya [2], wa [8],  za [2];
  logic signed [15:0] xb [4], yb [4], wb [16], zb [1];
  logic signed [15:0] xc [2], yc [2], wc [16], zc [4];
  pp_node #(.D_IN(2), .D_OUT(2)) ua (.clk, .rst_n, .start(sa), .x(xa), .y(ya), .w(wa),
                                     .busy(ba), .out_valid(oa), .z(za));
  pp_node #(.D_IN(4), .D_OUT(1)) ub (.clk, .rst_n, .start(sb), .x(xb), .y(yb), .w(wb),
                                     .busy(bb), .out_valid(ob), .z(zb));
  pp_node #(.D_IN(2), .D_OUT(4), .DT_DSP(2)) uc (.clk, .rst_n, .start(sc), .x(xc), .y(yc),
                                     .w(wc), .busy(bc), .out_valid(oc), .z(zc));

  // Run one sample on one DUT: returns the measured latency.
  task automatic run_a(input int n);
    for (int s = 0; s < n; s++) begin
      int xi[], yi[], wi[], z[]; int lat;
      xi = new[2]; yi = new[2]; wi = new[8];
      foreach (xi[i]) begin xi[i] = rnd(32767); xa[i] = 16'(xi[i]); end
      foreach (yi[i]) begin yi[i] = rnd(32767); ya[i] = 16'(yi[i]); end
      foreach (wi[i]) begin wi[i] = rnd(20000); wa[i] = 16'(wi[i]); end
      node(2, 2, xi, yi, wi, 14, 16, z);
      sa = 1'b1;
      @(posedge clk); #0.5;
      // change the inputs: the node must have captured x and y
      xa[0] = 16'(rnd(32767)); ya[1] = 16'(rnd(32767));
      sa = (s % 2 == 0);               // a start while busy must be ignored
      lat = 1;
      while (!oa && lat < 50) begin @(posedge clk); #0.5; lat++; sa = 1'b0; end
      check(lat, 7, "A latency");
      for (int i = 0; i < 2; i++) check(int'(za[i]), z[i], $sformatf("A z%0d", i));
      sa = 1'b0;
      @(posedge clk); #0.5;
      @(posedge clk); #0.5;
      for (int i = 0; i < 2; i++) check(int'(za[i]), z[i], $sformatf("A hold z%0d", i));
      check(int'(ba), 0, "A idle");
    end
  endtask

  task automatic run_b(input int n);
    for (int s = 0; s < n; s++) begin
      int xi[], yi[], wi[], z[]; int lat;
      xi = new[4]; yi = new[4]; wi = new[16];
      foreach (xi[i]) begin xi[i] = rnd(16384); xb[i] = 16'(xi[i]); end
      foreach (yi[i]) begin yi[i] = rnd(16384); yb[i] = 16'(yi[i]); end
      foreach (wi[i]) begin wi[i] = rnd(20000); wb[i] = 16'(wi[i]); end
      node(4, 1, xi, yi, wi, 14, 16, z);
      sb = 1'b1;
      @(posedge clk); #0.5; sb = 1'b0; lat = 1;
      while (!ob && lat < 80) begin @(posedge clk); #0.5; lat++; end
      check(lat, 18, "B latency");
      check(int'(zb[0]), z[0], "B z0");
      @(posedge clk); #0.5;
    end
  endtask

  task automatic run_c(input int n);
    for (int s = 0; s < n; s++) begin
      int xi[], yi[], wi[], z[]; int lat;
      xi = new[2]; yi = new[2]; wi = new[16];
      foreach (xi[i]) begin xi[i] = rnd(32767); xc[i] = 16'(xi[i]); end
      foreach (yi[i]) begin yi[i] = rnd(32767); yc[i] = 16'(yi[i]); end
      foreach (wi[i]) begin wi[i] = rnd(32767); wc[i] = 16'(wi[i]); end
      node(2, 4, xi, yi, wi, 14, 16, z);
      sc = 1'b1;
      @(posedge clk); #0.5; sc = 1'b0; lat = 1;
      while (!oc && lat < 80) begin @(posedge clk); #0.5; lat++; end
      check(lat, 18, "C latency");
      for (int i = 0; i < 4; i++) check(int'(zc[i]), z[i], $sformatf("C z%0d", i));
      @(posedge clk); #0.5;
    end
  endtask

  initial begin
    rst_n = 1'b0; sa = 0; sb = 0; sc = 0;
    repeat (3) @(posedge clk);
    #0.5 rst_n = 1'b1;
    fork
      run_a(40);
      run_b(20);
      run_c(20);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
