// weight_store: the trained TTN weights, one register per weight, exposed to the host
// as an AXI4-Lite slave and to the contraction nodes as one parallel array.
//
// Address map: weight n lives at byte address 4*n, in bits DATA_W-1:0 of a 32-bit word.
// Writes honour WSTRB on the bytes that hold the weight; reads return the weight
// sign-extended to 32 bits. An address at or beyond 4*N_W answers SLVERR (write ignored,
// read data 0). A write is taken when AWVALID and WVALID are both high and no response is
// pending (one cycle later BVALID rises); a read is taken when ARVALID is high and no read
// data is pending (RVALID rises one cycle later). One transaction of each kind is in
// flight at a time. Reset (rst_n low, synchronous) clears every weight to zero.
// Readable and writable weight registers on AXI4-Lite follow the paper; the address map,
// the response rules and the use of registers instead of block RAM are this design's
// choices (a Full Parallel tree needs every weight in the same cycle).
module weight_store #(
  parameter int unsigned N_W    = 1792,
  parameter int unsigned DATA_W = 16,
  localparam int unsigned AW    = $clog2(4 * N_W)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // AXI4-Lite write address / data / response
  input  logic [AW-1:0]            s_axil_awaddr,
  input  logic                     s_axil_awvalid,
  output logic                     s_axil_awready,
  input  logic [31:0]              s_axil_wdata,
  input  logic [3:0]               s_axil_wstrb,
  input  logic                     s_axil_wvalid,
  output logic                     s_axil_wready,
  output logic [1:0]               s_axil_bresp,
  output logic                     s_axil_bvalid,
  input  logic                     s_axil_bready,
  // AXI4-Lite read address / data
  input  logic [AW-1:0]            s_axil_araddr,
  input  logic                     s_axil_arvalid,
  output logic                     s_axil_arready,
  output logic [31:0]              s_axil_rdata,
  output logic [1:0]               s_axil_rresp,
  output logic                     s_axil_rvalid,
  input  logic                     s_axil_rready,
  // weights to the tree
  output logic signed [DATA_W-1:0] weights [N_W]
);

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam int unsigned IW = (N_W > 1) ? $clog2(N_W) : 1;

  logic             wr_fire, rd_fire;
  logic [AW-3:0]    wr_word, rd_word;
  logic             wr_ok, rd_ok;

  assign s_axil_awready = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_wready  = s_axil_awready;
  assign wr_fire        = s_axil_awready;
  assign wr_word        = s_axil_awaddr[AW-1:2];
  assign wr_ok          = int'(wr_word) < int'(N_W);

  assign s_axil_arready = !s_axil_rvalid;
  assign rd_fire        = s_axil_arvalid && s_axil_arready;
  assign rd_word        = s_axil_araddr[AW-1:2];
  assign rd_ok          = int'(rd_word) < int'(N_W);

  // Weight registers, kept as one packed array; byte lanes follow WSTRB.
  logic [N_W-1:0][DATA_W-1:0] wq;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wq <= '0;
    end else if (wr_fire && wr_ok) begin
      for (int b = 0; b < DATA_W; b++)
        if (s_axil_wstrb[b / 8]) wq[IW'(wr_word)][b] <= s_axil_wdata[b];
    end
  end

  for (genvar n = 0; n < N_W; n++) begin : g_w
    assign weights[n] = wq[n];
  end

  // Write response.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0;
      s_axil_bresp  <= RESP_OKAY;
    end else if (wr_fire) begin
      s_axil_bvalid <= 1'b1;
      s_axil_bresp  <= wr_ok ? RESP_OKAY : RESP_SLVERR;
    end else if (s_axil_bready) begin
      s_axil_bvalid <= 1'b0;
    end
  end

  // Read data.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rresp  <= RESP_OKAY;
      s_axil_rdata  <= '0;
    end else if (rd_fire) begin
      s_axil_rvalid <= 1'b1;
      s_axil_rresp  <= rd_ok ? RESP_OKAY : RESP_SLVERR;
      s_axil_rdata  <= rd_ok ? 32'(signed'(wq[IW'(rd_word)])) : '0;
    end else if (s_axil_rready) begin
      s_axil_rvalid <= 1'b0;
    end
  end

  // AXI rule: a response, once offered, stays unchanged until it is taken.
  property p_hold(logic valid, logic ready, logic [33:0] payload);
    @(posedge clk) disable iff (!rst_n) valid && !ready |=> valid && $stable(payload);
  endproperty
  a_b_hold: assert property (p_hold(s_axil_bvalid, s_axil_bready, {s_axil_bresp, 32'b0}));
  a_r_hold: assert property (p_hold(s_axil_rvalid, s_axil_rready, {s_axil_rresp, s_axil_rdata}));

endmodule
