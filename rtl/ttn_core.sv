// ttn_core: the Tree Tensor Network itself, a binary tree of contraction nodes.
//
// The tree has N_LAYERS layers and N = 2^N_LAYERS leaves (input features). Bond
// dimensions are CHI = [D, chi_1, ..., chi_{L-1}, O]: each feature arrives as a
// D-vector, layer l holds N/2^l nodes that each contract two CHI[l-1]-vectors into one
// CHI[l]-vector, and the single node of layer L returns the O-vector prediction.
// Node n of layer l takes outputs 2n (as x) and 2n+1 (as y) of layer l-1. CHI is a
// fixed-size array (ttn_pkg::chi_t); entries above N_LAYERS are ignored.
//
// Weights come as one flat array, layer 1 first, node by node, each node in the order
// (i*CHI[l-1] + j)*CHI[l-1] + k for output i, x index j, y index k (see w_offset()).
// Features: feat[f][d] is component d of feature f.
//
// IMPL selects the node type:
//  * IMPL_FP: Full Parallel nodes, fully pipelined. A sample is taken on every cycle
//    with in_valid && in_ready; its prediction appears LATENCY cycles later, where
//    LATENCY = sum_l DT_DSP*(2 + ceil(log2 CHI[l-1]^2))  (26 for [2,4,8,8,2]).
//    When out_valid is high and out_ready low the whole pipeline holds, and in_ready
//    is low (in_ready = pipeline enable).
//  * IMPL_PP: Partial Parallel nodes. One sample at a time: in_ready is high only when
//    the core is idle; the layers run one after the other and out_valid rises
//    LATENCY = sum_l DT_DSP*(CHI[l-1]^2 + CHI[l] + 1) cycles after the sample was taken,
//    then stays high with pred stable until out_ready.
// rst_n is active low and synchronous. The tree shape and both latencies follow the
// paper; the flow control, the weight order and the serial layer schedule of the PP tree
// are this design's choices.
module ttn_core
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
  localparam int unsigned NW      = w_offset(N_LAYERS + 1),
  localparam int unsigned LATENCY = core_latency()
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] feat [N][D],
  input  logic signed [DATA_W-1:0] weights [NW],
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [DATA_W-1:0] pred [O]
);

  // First weight of layer l (1-based); w_offset(N_LAYERS+1) is the total count.
  function automatic int unsigned w_offset(input int unsigned l);
    int unsigned off;
    off = 0;
    for (int unsigned m = 1; m < l; m++) off += (N >> m) * node_weights(CHI[m-1], CHI[m]);
    return off;
  endfunction

  function automatic int unsigned core_latency();
    int unsigned lat;
    lat = 0;
    for (int unsigned m = 1; m <= N_LAYERS; m++)
      lat += (IMPL == IMPL_FP) ? fp_node_latency(CHI[m-1], DT_DSP)
                               : pp_node_latency(CHI[m-1], CHI[m], DT_DSP);
    return lat;
  endfunction

  function automatic int unsigned chi_max();
    int unsigned mx;
    mx = 0;
    for (int unsigned m = 0; m <= N_LAYERS; m++) if (CHI[m] > mx) mx = CHI[m];
    return mx;
  endfunction

  localparam int unsigned CM = chi_max();

  // act[l][n] is the vector leaving node n of layer l (layer 0: the features).
  logic signed [DATA_W-1:0] act [N_LAYERS+1][N][CM];
  logic                     lvalid [N_LAYERS+1];   // layer output valid (PP: one-cycle pulse)
  logic                     en;                    // FP pipeline enable

  for (genvar f = 0; f < N; f++) begin : g_feat
    for (genvar d = 0; d < CM; d++) begin : g_d
      if (d < D) begin : g_used
        assign act[0][f][d] = feat[f][d];
      end else begin : g_pad
        assign act[0][f][d] = '0;
      end
    end
  end

  for (genvar l = 1; l <= N_LAYERS; l++) begin : g_layer
    localparam int unsigned DI   = CHI[l-1];
    localparam int unsigned DO   = CHI[l];
    localparam int unsigned NN   = N >> l;
    localparam int unsigned NWN  = node_weights(DI, DO);
    localparam int unsigned WOFF = w_offset(l);
    logic node_valid [NN];

    for (genvar n = 0; n < N; n++) begin : g_node
      if (n < NN) begin : g_real
        logic signed [DATA_W-1:0] xv [DI];
        logic signed [DATA_W-1:0] yv [DI];
        logic signed [DATA_W-1:0] wv [NWN];
        logic signed [DATA_W-1:0] zv [DO];
        for (genvar d = 0; d < DI; d++) begin : g_xy
          assign xv[d] = act[l-1][2*n][d];
          assign yv[d] = act[l-1][2*n+1][d];
        end
        for (genvar q = 0; q < NWN; q++) begin : g_w
          assign wv[q] = weights[WOFF + n*NWN + q];
        end
        if (IMPL == IMPL_FP) begin : g_fp
          fp_node #(.D_IN(DI), .D_OUT(DO), .DATA_W(DATA_W), .FRAC(FRAC), .DT_DSP(DT_DSP)) u_node (
            .clk, .rst_n, .en, .in_valid(lvalid[l-1]), .x(xv), .y(yv), .w(wv),
            .out_valid(node_valid[n]), .z(zv));
        end else begin : g_pp
          logic busy_unused;
          pp_node #(.D_IN(DI), .D_OUT(DO), .DATA_W(DATA_W), .FRAC(FRAC), .DT_DSP(DT_DSP)) u_node (
            .clk, .rst_n, .start(lvalid[l-1]), .x(xv), .y(yv), .w(wv),
            .busy(busy_unused), .out_valid(node_valid[n]), .z(zv));
        end
        for (genvar d = 0; d < CM; d++) begin : g_z
          if (d < DO) begin : g_used
            assign act[l][n][d] = zv[d];
          end else begin : g_pad
            assign act[l][n][d] = '0;
          end
        end
      end else begin : g_none
        for (genvar d = 0; d < CM; d++) begin : g_z
          assign act[l][n][d] = '0;
        end
      end
    end

    // All nodes of a layer run in lock step; node 0 speaks for the layer.
    assign lvalid[l] = node_valid[0];
  end

  for (genvar o = 0; o < O; o++) begin : g_pred
    assign pred[o] = act[N_LAYERS][0][o];
  end

  // ---------------------------------------------------------------- flow control
  if (IMPL == IMPL_FP) begin : g_fp_flow
    assign en        = !(lvalid[N_LAYERS] && !out_ready);
    assign in_ready  = en;
    assign lvalid[0] = in_valid && in_ready;
    assign out_valid = lvalid[N_LAYERS];
  end else begin : g_pp_flow
    logic busy_q, done_q;
    assign en        = 1'b1;
    assign in_ready  = !busy_q;
    assign lvalid[0] = in_valid && in_ready;
    assign out_valid = lvalid[N_LAYERS] || done_q;
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        busy_q <= 1'b0;
        done_q <= 1'b0;
      end else begin
        if (lvalid[0])                  busy_q <= 1'b1;
        else if (out_valid && out_ready) busy_q <= 1'b0;
        done_q <= out_valid && !out_ready;
      end
    end
  end

  // While a prediction waits, it must not change (AXI-Stream style rule).
  logic [O*DATA_W-1:0] pred_flat;
  for (genvar o = 0; o < O; o++) begin : g_flat
    assign pred_flat[o*DATA_W +: DATA_W] = pred[o];
  end
  a_pred_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(pred_flat));

endmodule
