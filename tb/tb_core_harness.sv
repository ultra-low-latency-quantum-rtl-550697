// tb_core_harness: drives one ttn_core with random weights and samples and checks it.
//
// Numbers are DATA_W-bit fixed point with FRAC fractional bits. Phase 1 streams NS samples with the output always ready and checks every prediction
// against the reference tree and its exact latency LAT_EXP (input handshake cycle to
// output handshake cycle). Phase 2 streams NS more with random gaps on the input and
// random back-pressure on the output and checks values and order. Counts how often the
// output was held by back-pressure (stalls) and how often back-to-back samples were taken
// (bursts). Reports through its output ports; done rises at the end.
module tb_core_harness
  import ttn_pkg::*;
  import tb_ttn_ref_pkg::*;
#(
  parameter impl_e       IMPL     = IMPL_FP,
  parameter int unsigned N_LAYERS = 2,
  parameter chi_t        CHI      = '{2, 4, 1, 0, 0, 0, 0, 0, 0},
  parameter int          LAT_EXP  = 18,
  parameter int          NS       = 30,
  parameter int unsigned DATA_W   = 16,
  parameter int unsigned FRAC     = 14,
  parameter string       NAME     = "core"
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   stalls,
  output int   bursts,
  output logic done
);
  localparam int N = 1 << N_LAYERS;
  localparam int D = CHI[0];
  localparam int O = CHI[N_LAYERS];

  function automatic int nweights();
    int t;
    t = 0;
    for (int l = 1; l <= N_LAYERS; l++) t += (N >> l) * CHI[l] * CHI[l-1] * CHI[l-1];
    return t;
  endfunction
  localparam int NW = nweights();

  logic rst_n, in_valid, in_ready, out_valid, out_ready;
  logic signed [DATA_W-1:0] feat [N][D];
  logic signed [DATA_W-1:0] weights [NW];
  logic signed [DATA_W-1:0] pred [O];

  ttn_core #(.IMPL(IMPL), .N_LAYERS(N_LAYERS), .CHI(CHI), .DATA_W(DATA_W), .FRAC(FRAC)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .feat, .weights, .out_valid, .out_ready, .pred);

  int chi_a [];
  int w_a [];
  int exp_q [$][];
  int t_q [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic new_sample();
    for (int f = 0; f < N; f++)
      for (int d = 0; d < D; d++) feat[f][d] = DATA_W'(rnd(1 << FRAC));
  endtask

  task automatic run(input int ns, input bit pressure);
    int sent, got;
    sent = 0; got = 0;
    new_sample();
    while (got < ns) begin
      in_valid  = (sent < ns) && (!pressure || $urandom_range(3) != 0);
      out_ready = !pressure || $urandom_range(2) != 0;
      @(negedge clk);
      if (in_valid && in_ready) begin
        int fa[], p[];
        fa = new[N*D];
        for (int f = 0; f < N; f++) for (int d = 0; d < D; d++) fa[f*D+d] = int'(feat[f][d]);
        tree(chi_a, fa, w_a, FRAC, DATA_W, p);
        exp_q.push_back(p); t_q.push_back(cyc);
        if (sent > 0 && t_q.size() >= 2 && t_q[t_q.size()-2] == cyc - 1) bursts++;
        sent++;
      end
      if (out_valid && !out_ready) stalls++;
      if (out_valid && out_ready) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++; $display("FAIL %s: unexpected output", NAME);
        end else begin
          for (int o = 0; o < O; o++) begin
            checks++;
            if (int'(pred[o]) != exp_q[0][o]) begin
              failures++;
              $display("FAIL %s: sample %0d out %0d got %0d exp %0d", NAME, got, o, pred[o], exp_q[0][o]);
            end
          end
          if (!pressure && cyc - t_q[0] != LAT_EXP) begin
            failures++;
            $display("FAIL %s: latency %0d expected %0d", NAME, cyc - t_q[0], LAT_EXP);
          end
          void'(exp_q.pop_front()); void'(t_q.pop_front());
        end
        got++;
      end
      @(posedge clk); #0.5;
      if (in_valid && t_q.size() > 0 && t_q[t_q.size()-1] == cyc - 1) new_sample();
    end
  endtask

  initial begin
    checks = 0; failures = 0; stalls = 0; bursts = 0; done = 1'b0;
    rst_n = 1'b0; in_valid = 1'b0; out_ready = 1'b1;
    chi_a = new[N_LAYERS + 1];
    foreach (chi_a[i]) chi_a[i] = int'(CHI[i]);
    w_a = new[NW];
    foreach (w_a[i]) begin w_a[i] = rnd(7000 >> (14 - FRAC)); weights[i] = DATA_W'(w_a[i]); end
    repeat (3) @(posedge clk);
    #0.5 rst_n = 1'b1;
    run(NS, 1'b0);
    run(NS, 1'b1);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL %s: back-pressure never happened", NAME); end
    $display("%s: %0d checks, %0d failures, %0d stalls, %0d back-to-back inputs",
             NAME, checks, failures, stalls, bursts);
    done = 1'b1;
  end
endmodule
