// tb_ttn_top_pp: end-to-end test of ttn_top as the Iris classifier: the [2,4,1] tree of Partial Parallel nodes.
//
// Loads random weights through AXI4-Lite (checking every write response), reads a few
// back, and provokes an out-of-range access (SLVERR). Then streams samples through
// AXI4-Stream: first with the output always ready, checking each prediction against the
// reference tree and its exact latency of 27 cycles; then with random input gaps and
// random output back-pressure, checking values and order. Counts each mechanism: weight
// writes, read-backs, SLVERR responses, back-to-back input beats (Full Parallel), input
// beats held off, back-pressure stalls and predictions; a mechanism that never happened counts as a failure.
module tb_ttn_top_pp;
  import ttn_pkg::*;
  import tb_ttn_ref_pkg::*;

  localparam int    N_LAYERS = 2;
  localparam chi_t  CHI      = '{2, 4, 1, 0, 0, 0, 0, 0, 0};
  localparam int    N  = 1 << N_LAYERS;
  localparam int    D  = CHI[0];
  localparam int    O  = CHI[N_LAYERS];
  localparam int    LAT_EXP = 27;
  localparam int    NS = 20;
  localparam bit    FP_TREE = 0;   // only a Full Parallel tree takes beats back to back

  function automatic int nweights();
    int t;
    t = 0;
    for (int l = 1; l <= N_LAYERS; l++) t += (N >> l) * CHI[l] * CHI[l-1] * CHI[l-1];
    return t;
  endfunction
  localparam int NW = nweights();
  localparam int AW = $clog2(4 * NW);

  logic clk = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  int cnt_wr = 0, cnt_rd = 0, cnt_err = 0, cnt_b2b = 0, cnt_stall = 0, cnt_pred = 0, cnt_wait = 0;

  logic rst_n;
  logic [N*D*16-1:0] s_axis_tdata;
  logic s_axis_tvalid, s_axis_tready;
  logic [O*16-1:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready;
  logic [AW-1:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;

  ttn_top #(.IMPL(IMPL_PP), .N_LAYERS(N_LAYERS), .CHI(CHI)) dut (
    .clk, .rst_n,
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tready,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready));

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic axil_write(input int addr, input logic [31:0] data, output logic [1:0] resp);
    awaddr = AW'(addr); wdata = data; wstrb = 4'hf; awvalid = 1'b1; wvalid = 1'b1; bready = 1'b1;
    @(negedge clk);
    while (!awready) @(negedge clk);
    @(posedge clk); #0.5;
    awvalid = 1'b0; wvalid = 1'b0;
    @(negedge clk);
    while (!bvalid) @(negedge clk);
    resp = bresp;
    @(posedge clk); #0.5;
    bready = 1'b0;
  endtask

  task automatic axil_read(input int addr, output logic [31:0] data, output logic [1:0] resp);
    araddr = AW'(addr); arvalid = 1'b1; rready = 1'b1;
    @(negedge clk);
    while (!arready) @(negedge clk);
    @(posedge clk); #0.5;
    arvalid = 1'b0;
    @(negedge clk);
    while (!rvalid) @(negedge clk);
    data = rdata; resp = rresp;
    @(posedge clk); #0.5;
    rready = 1'b0;
  endtask

  int chi_a [];
  int w_a [];
  int exp_q [$][];
  int t_q [$];
  int last_in = -10;

  task automatic new_sample();
    for (int e = 0; e < N*D; e++) s_axis_tdata[e*16 +: 16] = 16'(rnd(16384));
  endtask

  task automatic stream(input int ns, input bit pressure);
    int sent, got;
    sent = 0; got = 0;
    new_sample();
    while (got < ns) begin
      s_axis_tvalid = (sent < ns) && (!pressure || $urandom_range(3) != 0);
      m_axis_tready = !pressure || $urandom_range(2) != 0;
      @(negedge clk);
      if (s_axis_tvalid && s_axis_tready) begin
        int fa[], p[];
        fa = new[N*D];
        for (int e = 0; e < N*D; e++) fa[e] = int'($signed(s_axis_tdata[e*16 +: 16]));
        tree(chi_a, fa, w_a, 14, 16, p);
        exp_q.push_back(p); t_q.push_back(cyc);
        if (last_in == cyc - 1) cnt_b2b++;
        last_in = cyc;
        sent++;
      end
      if (m_axis_tvalid && !m_axis_tready) cnt_stall++;
      if (s_axis_tvalid && !s_axis_tready) cnt_wait++;
      if (m_axis_tvalid && m_axis_tready) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++; $display("FAIL unexpected prediction");
        end else begin
          for (int o = 0; o < O; o++)
            check(int'($signed(m_axis_tdata[o*16 +: 16])), exp_q[0][o],
                  $sformatf("prediction %0d component %0d", cnt_pred, o));
          if (!pressure) check(cyc - t_q[0], LAT_EXP, "latency");
          void'(exp_q.pop_front()); void'(t_q.pop_front());
        end
        cnt_pred++;
        got++;
      end
      @(posedge clk); #0.5;
      if (last_in == cyc - 1) new_sample();
    end
    s_axis_tvalid = 1'b0;
  endtask

  initial begin
    logic [1:0]  r;
    logic [31:0] d;
    rst_n = 1'b0; s_axis_tvalid = 1'b0; m_axis_tready = 1'b1; s_axis_tdata = '0;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = '0; araddr = '0; wdata = '0; wstrb = '0;
    chi_a = new[N_LAYERS + 1];
    foreach (chi_a[i]) chi_a[i] = int'(CHI[i]);
    w_a = new[NW];
    repeat (3) @(posedge clk);
    #0.5 rst_n = 1'b1;
    // weights
    foreach (w_a[i]) begin
      w_a[i] = rnd(7000);
      axil_write(4*i, 32'(w_a[i]), r);
      check(r, 0, "write response");
      cnt_wr++;
    end
    for (int k = 0; k < 8; k++) begin
      int i;
      i = $urandom_range(NW - 1);
      axil_read(4*i, d, r);
      check(r, 0, "read response");
      check(longint'($signed(d)), w_a[i], $sformatf("weight %0d read back", i));
      cnt_rd++;
    end
    axil_write(4*NW, 32'h1, r);
    if (r == 2'b10) cnt_err++;
    check(r, 2'b10, "SLVERR");
    // inference
    stream(NS, 1'b0);
    stream(NS, 1'b1);
    $display("mechanisms: weight writes %0d, read-backs %0d, SLVERR %0d, back-to-back beats %0d, input waits %0d, stalls %0d, predictions %0d",
             cnt_wr, cnt_rd, cnt_err, cnt_b2b, cnt_wait, cnt_stall, cnt_pred);
    check(cnt_wr > 0, 1, "weight writes happened");
    check(cnt_rd > 0, 1, "read-backs happened");
    check(cnt_err > 0, 1, "SLVERR happened");
    if (FP_TREE) check(cnt_b2b > 0, 1, "back-to-back input beats happened");
    check(cnt_wait > 0, 1, "input held off (tready low) happened");
    check(cnt_stall > 0, 1, "back-pressure stalls happened");
    check(cnt_pred, 2*NS, "all predictions delivered");
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
