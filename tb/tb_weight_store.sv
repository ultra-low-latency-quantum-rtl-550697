// tb_weight_store: AXI4-Lite writes and reads of the weight registers. Writes random
// values to every weight (address and data offered in either order, response stalled at
// random), reads them back through the bus and checks the parallel weight outputs, byte
// strobes, sign extension on read, SLVERR for out-of-range addresses, and that responses
// hold while not accepted.
module tb_weight_store;
  logic clk = 1'b0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NW = 40;
  localparam int AW = $clog2(4 * NW);
  logic rst_n;
  logic [AW-1:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic signed [15:0] weights [NW];

  weight_store #(.N_W(NW)) dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .weights);

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0h exp %0h", what, got, exp); end
  endtask

  task automatic axil_write(input int addr, input logic [31:0] data, input logic [3:0] strb,
                            output logic [1:0] resp);
    int guard;
    awaddr = AW'(addr); wdata = data; wstrb = strb;
    awvalid = 1'b1;
    if ($urandom_range(1)) begin @(posedge clk); #0.5; end   // data one cycle later
    wvalid = 1'b1;
    guard = 0;
    while (!(awready && wready) && guard < 20) begin @(posedge clk); #0.5; guard++; end
    @(posedge clk); #0.5;
    awvalid = 1'b0; wvalid = 1'b0;
    bready = 1'b0;
    repeat ($urandom_range(2)) begin
      @(posedge clk); #0.5;
      check(bvalid, 1, "bvalid held");
    end
    bready = 1'b1;
    while (!bvalid) begin @(posedge clk); #0.5; end
    resp = bresp;
    @(posedge clk); #0.5;
    bready = 1'b0;
  endtask

  task automatic axil_read(input int addr, output logic [31:0] data, output logic [1:0] resp);
    araddr = AW'(addr); arvalid = 1'b1; rready = 1'b0;
    while (!arready) begin @(posedge clk); #0.5; end
    @(posedge clk); #0.5;
    arvalid = 1'b0;
    repeat ($urandom_range(2)) begin
      @(posedge clk); #0.5;
      check(rvalid, 1, "rvalid held");
    end
    rready = 1'b1;
    while (!rvalid) begin @(posedge clk); #0.5; end
    data = rdata; resp = rresp;
    @(posedge clk); #0.5;
    rready = 1'b0;
  endtask

  initial begin
    logic [15:0] model [NW];
    logic [31:0] d;
    logic [1:0]  r;
    rst_n = 1'b0; awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = '0; araddr = '0; wdata = '0; wstrb = '0;
    repeat (3) @(posedge clk);
    #0.5 rst_n = 1'b1;
    for (int n = 0; n < NW; n++) check({48'b0, weights[n]}, 0, "reset value");
    for (int n = 0; n < NW; n++) begin
      model[n] = 16'($urandom);
      axil_write(4*n, {16'hdead, model[n]}, 4'hf, r);
      check(r, 2'b00, "write OKAY");
    end
    // byte strobe: only the low byte of weight 3
    axil_write(12, 32'h0000_00a5, 4'b0001, r);
    model[3][7:0] = 8'ha5;
    // out of range
    axil_write(4*NW, 32'h1234, 4'hf, r);
    check(r, 2'b10, "write SLVERR");
    for (int n = 0; n < NW; n++) check({48'b0, weights[n]}, {48'b0, model[n]}, $sformatf("weights[%0d]", n));
    for (int n = 0; n < NW; n++) begin
      axil_read(4*n, d, r);
      check(d, {{16{model[n][15]}}, model[n]}, $sformatf("read %0d", n));
      check(r, 2'b00, "read OKAY");
    end
    axil_read(4*NW + 4, d, r);
    check(r, 2'b10, "read SLVERR");
    check(d, 0, "read SLVERR data");
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
