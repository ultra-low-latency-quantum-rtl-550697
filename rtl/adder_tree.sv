// adder_tree: pipelined binary adder tree (the "AT" of the Full Parallel contraction).
//
// Sums N_IN signed values that arrive together. Level v adds neighbouring pairs of
// level v-1 (an odd last element is carried forward unchanged), so there are
// LEVELS = ceil(log2 N_IN) levels. Each level is registered and followed by DT_DSP-1
// further delay registers, so sum belongs to the din presented LEVELS*DT_DSP enabled
// clock edges earlier (DT_DSP is the per-stage cycle count the paper uses for every
// arithmetic stage). The sum is kept at full precision, IN_W+LEVELS bits; the caller
// saturates it. All registers hold while en is low; there is no reset on the data.
// The tree and its per-level timing follow the paper; bit growth and the odd-element
// rule are this design's choices.
module adder_tree #(
  parameter int unsigned N_IN   = 4,
  parameter int unsigned IN_W   = 16,
  parameter int unsigned DT_DSP = 1,
  localparam int unsigned LEVELS = ttn_pkg::clog2i(N_IN),
  localparam int unsigned OUT_W  = IN_W + LEVELS
) (
  input  logic                    clk,
  input  logic                    en,
  input  logic signed [IN_W-1:0]  din [N_IN],
  output logic signed [OUT_W-1:0] sum
);

  // Element count of level v.
  function automatic int unsigned count(input int unsigned v);
    return (N_IN + (1 << v) - 1) >> v;
  endfunction

  // stage[v] holds the values of level v (level 0 = inputs), all at OUT_W bits.
  logic signed [OUT_W-1:0] stage [LEVELS+1][N_IN];

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    assign stage[0][i] = OUT_W'(din[i]);
  end

  for (genvar v = 1; v <= LEVELS; v++) begin : g_lvl
    localparam int unsigned NPREV = count(v - 1);
    localparam int unsigned NCUR  = count(v);
    logic signed [OUT_W-1:0] dly [DT_DSP][NCUR];

    always_ff @(posedge clk) begin
      if (en) begin
        for (int i = 0; i < NCUR; i++) begin
          if (2*i + 1 < NPREV) dly[0][i] <= stage[v-1][2*i] + stage[v-1][2*i+1];
          else                 dly[0][i] <= stage[v-1][2*i];
        end
        for (int s = 1; s < DT_DSP; s++) dly[s] <= dly[s-1];
      end
    end

    for (genvar i = 0; i < N_IN; i++) begin : g_out
      if (i < NCUR) begin : g_used
        assign stage[v][i] = dly[DT_DSP-1][i];
      end else begin : g_unused
        assign stage[v][i] = '0;
      end
    end
  end

  assign sum = stage[LEVELS][0];

endmodule
