// pp_node: Partial Parallel contraction of one Tree Tensor Network node,
//   z_i = sum_j sum_k x_j * y_k * V_ijk,   i < D_OUT, j,k < D_IN,
// using D_IN^2 + 1 multipliers whatever D_OUT is.
//
// Work is organised in steps of DT_DSP clock cycles; step 0 is the cycle start is seen.
//   M1   : a single multiplier forms the D_IN^2 pair products serially; pair
//          p = j*D_IN + k is formed in step p and held in its output register in step p+1.
//   M2.p : one multiplier per pair. It keeps pair p and multiplies it by the weights
//          V_0p, V_1p, ... one per step: weight i in step 1+p+i, result held in step 2+p+i.
//   S_i  : one accumulator per output adds the M2 results for output i as they appear
//          (one per step, from M2.0 to M2.{D_IN^2-1}).
// The last sum is complete in step D_IN^2 + D_OUT + 1, so out_valid pulses for one cycle
// LAT = DT_DSP * (D_IN^2 + D_OUT + 1) clock cycles after start (7 for D_IN = D_OUT = 2).
// z then stays valid until the next start. The node takes one sample at a time: start is
// ignored while busy is high. x and y are captured at start; w must be stable while busy.
// rst_n (active low, synchronous) returns the node to idle.
// The multiplier counts, the serial scan of the weights and the latency follow the paper;
// the exact step at which each unit works, the one-sample-at-a-time policy and the
// saturation of the accumulators to DATA_W bits are this design's choices.
module pp_node #(
  parameter int unsigned D_IN   = 2,
  parameter int unsigned D_OUT  = 2,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned FRAC   = 14,
  parameter int unsigned DT_DSP = 1,
  localparam int unsigned NW    = D_OUT * D_IN * D_IN,
  localparam int unsigned LAT   = ttn_pkg::pp_node_latency(D_IN, D_OUT, DT_DSP)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [DATA_W-1:0] x [D_IN],
  input  logic signed [DATA_W-1:0] y [D_IN],
  input  logic signed [DATA_W-1:0] w [NW],
  output logic                     busy,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] z [D_OUT]
);

  localparam int unsigned D2       = D_IN * D_IN;
  localparam int unsigned LAST     = D2 + D_OUT + 1;      // step in which z is complete
  localparam int unsigned STEP_W   = $clog2(LAST + 1);
  localparam int unsigned PH_W     = (DT_DSP > 1) ? $clog2(DT_DSP) : 1;
  localparam int unsigned ACC_W    = DATA_W + ttn_pkg::clog2i(D2);

  // ---------------------------------------------------------------- step sequencer
  logic              accept;
  logic [STEP_W-1:0] step_q, step;     // step number, registered / as seen this cycle
  logic [PH_W-1:0]   ph_q, ph;         // cycle within the step
  logic              tick;             // last cycle of the current step

  assign accept = start && !busy;
  assign step   = accept ? '0 : step_q;
  assign ph     = accept ? '0 : ph_q;
  assign tick   = (accept || busy) && (ph == PH_W'(DT_DSP - 1));
  assign out_valid = busy && (step_q == STEP_W'(LAST)) && (ph_q == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      step_q <= '0;
      ph_q   <= '0;
    end else if (out_valid) begin
      busy   <= 1'b0;
    end else if (accept || busy) begin
      busy   <= 1'b1;
      ph_q   <= tick ? '0 : ph + 1'b1;
      if (tick) step_q <= step + 1'b1;
      else      step_q <= step;
    end
  end

  // ---------------------------------------------------------------- input capture
  logic signed [DATA_W-1:0] xr [D_IN];
  logic signed [DATA_W-1:0] yr [D_IN];
  always_ff @(posedge clk) begin
    if (accept) begin
      xr <= x;
      yr <= y;
    end
  end

  // ---------------------------------------------------------------- M1: serial pairs
  logic signed [DATA_W-1:0] m1_a, m1_b, m1_p;
  always_comb begin
    int unsigned p;
    p = (int'(step) < int'(D2)) ? int'(step) : 0;
    m1_a = accept ? x[p / D_IN] : xr[p / D_IN];
    m1_b = accept ? y[p % D_IN] : yr[p % D_IN];
  end
  dsp_mul #(.DATA_W(DATA_W), .FRAC(FRAC), .DT_DSP(1)) u_m1 (
    .clk, .en(tick), .a(m1_a), .b(m1_b), .p(m1_p));

  // ---------------------------------------------------------------- M2.p: weight scan
  logic signed [DATA_W-1:0] m2_p [D2];
  for (genvar p = 0; p < D2; p++) begin : g_m2
    logic signed [DATA_W-1:0] pair_q, a, b;
    int                       i;            // output index served in this step
    always_comb begin
      i = int'(step) - 1 - p;
      a = (i == 0) ? m1_p : pair_q;
      b = (i >= 0 && i < int'(D_OUT)) ? w[i*D2 + p] : '0;
    end
    always_ff @(posedge clk) begin
      if (tick && i == 0) pair_q <= m1_p;
    end
    dsp_mul #(.DATA_W(DATA_W), .FRAC(FRAC), .DT_DSP(1)) u_m2 (
      .clk, .en(tick), .a, .b, .p(m2_p[p]));
  end

  // ---------------------------------------------------------------- S_i: accumulators
  for (genvar i = 0; i < D_OUT; i++) begin : g_acc
    logic signed [ACC_W-1:0] acc;
    int                      p;              // pair whose M2 result is for output i now
    assign p = int'(step) - 2 - i;
    always_ff @(posedge clk) begin
      if (tick) begin
        if (step == '0)                  acc <= '0;
        else if (p >= 0 && p < int'(D2)) acc <= acc + ACC_W'(m2_p[p]);
      end
    end
    assign z[i] = sat(acc);
  end

  function automatic logic signed [DATA_W-1:0] sat(input logic signed [ACC_W-1:0] v);
    localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (DATA_W-1)) - 1);
    localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 << (DATA_W-1));
    if (v > MAXV)      return MAXV[DATA_W-1:0];
    else if (v < MINV) return MINV[DATA_W-1:0];
    else               return v[DATA_W-1:0];
  endfunction

endmodule
