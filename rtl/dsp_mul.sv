// dsp_mul: one two-factor fixed-point multiplication, the job of one FPGA DSP slice in
// the tensor contraction.
//
// p = sat((a * b) >>> FRAC), i.e. the 2*DATA_W-bit product is brought back to the
// operand format by an arithmetic right shift (rounding toward minus infinity) and
// saturated to the DATA_W range. The result passes through DT_DSP register stages, so
// p belongs to the a, b presented DT_DSP enabled clock edges earlier. All stages hold
// while en is low. No reset: the data path has none; validity travels beside it.
//
// The multiplier and its DT_DSP (1 to 4) internal registers follow the paper; the
// rescaling and saturation rule is this design's choice.
module dsp_mul #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned FRAC   = 14,
  parameter int unsigned DT_DSP = 1
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic signed [DATA_W-1:0] a,
  input  logic signed [DATA_W-1:0] b,
  output logic signed [DATA_W-1:0] p
);

  localparam logic signed [2*DATA_W-1:0] MAXV = (2*DATA_W)'((1 << (DATA_W-1)) - 1);
  localparam logic signed [2*DATA_W-1:0] MINV = -(2*DATA_W)'(1 << (DATA_W-1));

  logic signed [2*DATA_W-1:0] prod, scaled;
  logic signed [DATA_W-1:0]   res;
  logic signed [DATA_W-1:0]   pipe [DT_DSP];

  always_comb begin
    prod   = a * b;
    scaled = prod >>> FRAC;
    if (scaled > MAXV)      res = MAXV[DATA_W-1:0];
    else if (scaled < MINV) res = MINV[DATA_W-1:0];
    else                    res = scaled[DATA_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (en) begin
      pipe[0] <= res;
      for (int i = 1; i < DT_DSP; i++) pipe[i] <= pipe[i-1];
    end
  end

  assign p = pipe[DT_DSP-1];

  initial begin
    assert (DT_DSP >= 1 && DT_DSP <= 4) else $error("dsp_mul: DT_DSP must be 1..4");
  end

endmodule
