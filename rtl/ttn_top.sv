// ttn_top: Tree Tensor Network classifier accelerator.
//
// A host streams mapped samples in and reads predictions back; it loads the trained
// weights beforehand through a register interface. Three parts:
//  * s_axis (AXI4-Stream slave): one beat carries one whole sample, N features of D
//    components, element f*D + d (feature f, component d) in bits
//    (f*D+d)*DATA_W +: DATA_W, signed fixed point with FRAC fractional bits.
//  * m_axis (AXI4-Stream master): one beat per sample, output component o in bits
//    o*DATA_W +: DATA_W; predictions leave in the order samples arrived.
//  * s_axil (AXI4-Lite slave): weight n of the tree at byte address 4*n (see
//    weight_store and ttn_core for the order).
// Timing: with IMPL_FP a beat is taken on every clock and its prediction is offered
// exactly ttn_core LATENCY cycles later (26 cycles, 104 ns at 250 MHz for the default
// [2,4,8,8,2] tree); if m_axis_tready is low the pipeline holds and s_axis_tready falls.
// With IMPL_PP one sample is processed at a time (see ttn_core).
// The tree, its defaults and the two interface protocols follow the paper; beat format,
// address map and back-pressure are this design's choices. Weights must not be written
// while samples are in flight.
module ttn_top
  import ttn_pkg::*;
#(
  parameter impl_e       IMPL     = IMPL_FP,
  parameter int unsigned N_LAYERS = 4,
  parameter chi_t        CHI      = '{2, 4, 8, 8, 2, 0, 0, 0, 0},
  parameter int unsigned DATA_W   = 16,
  parameter int unsigned FRAC     = 14,
  parameter int unsigned DT_DSP   = 1,
  localparam int unsigned N       = 1 << N_LAYERS,
  localparam int unsigned D       = CHI[0],
  localparam int unsigned O       = CHI[N_LAYERS],
  localparam int unsigned NW      = n_weights(),
  localparam int unsigned AW      = $clog2(4 * NW)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // samples in
  input  logic [N*D*DATA_W-1:0] s_axis_tdata,
  input  logic                  s_axis_tvalid,
  output logic                  s_axis_tready,
  // predictions out
  output logic [O*DATA_W-1:0]   m_axis_tdata,
  output logic                  m_axis_tvalid,
  input  logic                  m_axis_tready,
  // weight registers
  input  logic [AW-1:0]         s_axil_awaddr,
  input  logic                  s_axil_awvalid,
  output logic                  s_axil_awready,
  input  logic [31:0]           s_axil_wdata,
  input  logic [3:0]            s_axil_wstrb,
  input  logic                  s_axil_wvalid,
  output logic                  s_axil_wready,
  output logic [1:0]            s_axil_bresp,
  output logic                  s_axil_bvalid,
  input  logic                  s_axil_bready,
  input  logic [AW-1:0]         s_axil_araddr,
  input  logic                  s_axil_arvalid,
  output logic                  s_axil_arready,
  output logic [31:0]           s_axil_rdata,
  output logic [1:0]            s_axil_rresp,
  output logic                  s_axil_rvalid,
  input  logic                  s_axil_rready
);

  function automatic int unsigned n_weights();
    int unsigned tot;
    tot = 0;
    for (int unsigned m = 1; m <= N_LAYERS; m++) tot += (N >> m) * node_weights(CHI[m-1], CHI[m]);
    return tot;
  endfunction

  logic signed [DATA_W-1:0] weights [NW];
  logic signed [DATA_W-1:0] feat [N][D];
  logic signed [DATA_W-1:0] pred [O];

  weight_store #(.N_W(NW), .DATA_W(DATA_W)) u_weights (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .weights);

  for (genvar f = 0; f < N; f++) begin : g_f
    for (genvar d = 0; d < D; d++) begin : g_d
      assign feat[f][d] = s_axis_tdata[(f*D+d)*DATA_W +: DATA_W];
    end
  end

  ttn_core #(.IMPL(IMPL), .N_LAYERS(N_LAYERS), .CHI(CHI), .DATA_W(DATA_W), .FRAC(FRAC),
             .DT_DSP(DT_DSP)) u_core (
    .clk, .rst_n,
    .in_valid(s_axis_tvalid), .in_ready(s_axis_tready), .feat, .weights,
    .out_valid(m_axis_tvalid), .out_ready(m_axis_tready), .pred);

  for (genvar o = 0; o < O; o++) begin : g_o
    assign m_axis_tdata[o*DATA_W +: DATA_W] = pred[o];
  end

endmodule
