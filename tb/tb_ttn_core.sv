// tb_ttn_core: the TTN core in the four tree configurations evaluated for hardware,
// each against the reference tree, with exact latency checks:
//   Iris    [2,4,1]     Partial Parallel  27 cycles (108 ns at 250 MHz)
//   Titanic [2,4,8,1]   Full Parallel     18 cycles (72 ns)
//   Titanic [2,4,4,1]   Full Parallel     16 cycles (64 ns)
//   LHCb    [2,4,8,8,2] Full Parallel     26 cycles (104 ns)
// the LHCb tree built from Partial Parallel nodes (174 cycles), and the Titanic
// [2,4,8,1] tree quantised to 8-bit numbers with 6 fractional bits (18 cycles).
module tb_ttn_core;
  import ttn_pkg::*;
  logic clk = 1'b0;
  always #2 clk = ~clk;

  int c [6], f [6], s [6], b [6];
  logic d [6];

  tb_core_harness #(.IMPL(IMPL_PP), .N_LAYERS(2), .CHI('{2, 4, 1, 0, 0, 0, 0, 0, 0}), .LAT_EXP(27), .NAME("iris_pp"))
    h0 (.clk, .checks(c[0]), .failures(f[0]), .stalls(s[0]), .bursts(b[0]), .done(d[0]));
  tb_core_harness #(.IMPL(IMPL_FP), .N_LAYERS(3), .CHI('{2, 4, 8, 1, 0, 0, 0, 0, 0}), .LAT_EXP(18), .NAME("titanic_fp"))
    h1 (.clk, .checks(c[1]), .failures(f[1]), .stalls(s[1]), .bursts(b[1]), .done(d[1]));
  tb_core_harness #(.IMPL(IMPL_FP), .N_LAYERS(3), .CHI('{2, 4, 4, 1, 0, 0, 0, 0, 0}), .LAT_EXP(16), .NAME("titanic_2441_fp"))
    h2 (.clk, .checks(c[2]), .failures(f[2]), .stalls(s[2]), .bursts(b[2]), .done(d[2]));
  tb_core_harness #(.IMPL(IMPL_FP), .N_LAYERS(4), .CHI('{2, 4, 8, 8, 2, 0, 0, 0, 0}), .LAT_EXP(26), .NAME("lhcb_fp"))
    h3 (.clk, .checks(c[3]), .failures(f[3]), .stalls(s[3]), .bursts(b[3]), .done(d[3]));
  tb_core_harness #(.IMPL(IMPL_PP), .N_LAYERS(4), .CHI('{2, 4, 8, 8, 2, 0, 0, 0, 0}), .LAT_EXP(174), .NS(8),
                    .NAME("lhcb_pp"))
    h4 (.clk, .checks(c[4]), .failures(f[4]), .stalls(s[4]), .bursts(b[4]), .done(d[4]));
  tb_core_harness #(.IMPL(IMPL_FP), .N_LAYERS(3), .CHI('{2, 4, 8, 1, 0, 0, 0, 0, 0}), .LAT_EXP(18),
                    .DATA_W(8), .FRAC(6), .NAME("titanic_fp_q6"))
    h5 (.clk, .checks(c[5]), .failures(f[5]), .stalls(s[5]), .bursts(b[5]), .done(d[5]));

  initial begin
    int checks, failures;
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5]);
    checks = 0; failures = 0;
    for (int i = 0; i < 6; i++) begin checks += c[i]; failures += f[i]; end
    // the Full Parallel trees must have taken samples on consecutive cycles
    checks++;
    if (b[1] == 0 || b[3] == 0) begin failures++; $display("FAIL no back-to-back samples"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3] + c[4] + c[5],
             f[0] + f[1] + f[2] + f[3] + f[4] + f[5] + 1);
    $finish;
  end
endmodule
