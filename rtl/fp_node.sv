// fp_node: Full Parallel contraction of one Tree Tensor Network node,
//   z_i = sum_j sum_k x_j * y_k * V_ijk,   i < D_OUT, j,k < D_IN.
//
// The three-factor product is split over two multiplier stages. Stage M1 holds one
// multiplier per pair (j,k) and forms the cartesian product x_j*y_k (D_IN^2 multipliers).
// Stage M2 holds one multiplier per weight and multiplies each pair product by V_ijk
// (D_OUT*D_IN^2 multipliers). One adder tree per output i then sums its D_IN^2 terms.
// Every multiplication happens in parallel, so the node accepts a new sample on every
// enabled clock and has a fixed latency of
//   LAT = DT_DSP * (2 + ceil(log2 D_IN^2))      (4 cycles for D_IN = 2, DT_DSP = 1):
// out_valid and z appear LAT enabled clocks after in_valid, x, y were presented.
// Weights are indexed w[(i*D_IN + j)*D_IN + k] and must be stable while in use.
// en low freezes the whole pipeline (used for output back-pressure). rst_n (active
// low, synchronous) clears only the valid pipeline.
// Structure and latency follow the paper; the weight order, saturation of the adder-tree
// sum back to DATA_W bits and the reset are this design's choices.
module fp_node #(
  parameter int unsigned D_IN   = 2,
  parameter int unsigned D_OUT  = 2,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned FRAC   = 14,
  parameter int unsigned DT_DSP = 1,
  localparam int unsigned NW    = D_OUT * D_IN * D_IN,
  localparam int unsigned LAT   = ttn_pkg::fp_node_latency(D_IN, DT_DSP)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] x [D_IN],
  input  logic signed [DATA_W-1:0] y [D_IN],
  input  logic signed [DATA_W-1:0] w [NW],
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] z [D_OUT]
);

  localparam int unsigned D2     = D_IN * D_IN;
  localparam int unsigned LEVELS = ttn_pkg::clog2i(D2);
  localparam int unsigned SUM_W  = DATA_W + LEVELS;

  // Stage M1: cartesian product xy[j*D_IN+k] = x_j * y_k.
  logic signed [DATA_W-1:0] xy [D2];
  for (genvar j = 0; j < D_IN; j++) begin : g_m1j
    for (genvar k = 0; k < D_IN; k++) begin : g_m1k
      dsp_mul #(.DATA_W(DATA_W), .FRAC(FRAC), .DT_DSP(DT_DSP)) u_m1 (
        .clk, .en, .a(x[j]), .b(y[k]), .p(xy[j*D_IN+k]));
    end
  end

  // Stage M2 and adder trees: output i sums xy[p] * w[i*D2+p] over p.
  for (genvar i = 0; i < D_OUT; i++) begin : g_out
    logic signed [DATA_W-1:0] term [D2];
    logic signed [SUM_W-1:0]  sum;
    for (genvar p = 0; p < D2; p++) begin : g_m2
      dsp_mul #(.DATA_W(DATA_W), .FRAC(FRAC), .DT_DSP(DT_DSP)) u_m2 (
        .clk, .en, .a(xy[p]), .b(w[i*D2+p]), .p(term[p]));
    end
    adder_tree #(.N_IN(D2), .IN_W(DATA_W), .DT_DSP(DT_DSP)) u_at (
      .clk, .en, .din(term), .sum);
    assign z[i] = sat(sum);
  end

  function automatic logic signed [DATA_W-1:0] sat(input logic signed [SUM_W-1:0] v);
    localparam logic signed [SUM_W-1:0] MAXV = SUM_W'((1 << (DATA_W-1)) - 1);
    localparam logic signed [SUM_W-1:0] MINV = -SUM_W'(1 << (DATA_W-1));
    if (v > MAXV)      return MAXV[DATA_W-1:0];
    else if (v < MINV) return MINV[DATA_W-1:0];
    else               return v[DATA_W-1:0];
  endfunction

  // Valid travels beside the data through LAT registers.
  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk) begin
    if (!rst_n)  vpipe <= '0;
    else if (en) vpipe <= {vpipe[LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[LAT-1];

endmodule
