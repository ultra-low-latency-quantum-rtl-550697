// tb_dsp_mul: checks the fixed-point multiplier against a reference product for random
// operands, the saturation corners and the register latency (1 and 3 stages), and that
// the output holds while the clock enable is low.
module tb_dsp_mul;
  import tb_ttn_ref_pkg::*;

  localparam int DW = 16, FR = 14;
  logic clk = 1'b0;
  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  logic en;
  logic signed [DW-1:0] a, b, p1, p3;

  dsp_mul #(.DATA_W(DW), .FRAC(FR), .DT_DSP(1)) u1 (.clk, .en, .a, .b, .p(p1));
  dsp_mul #(.DATA_W(DW), .FRAC(FR), .DT_DSP(3)) u3 (.clk, .en, .a, .b, .p(p3));

  int hist [$];   // expected products, newest last

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int cyc;
    en = 1'b1; a = '0; b = '0;
    // corners first, then random
    for (cyc = 0; cyc < 300; cyc++) begin
      case (cyc)
        0: begin a = -16'sd32768; b = -16'sd32768; end   // (-2)*(-2) = 4 -> saturates
        1: begin a = 16'sd32767;  b = -16'sd32768; end   // ~ -4 -> saturates low
        2: begin a = 16'sd16384;  b = 16'sd16384;  end   // 1*1 = 1
        3: begin a = -16'sd1;     b = 16'sd1;      end   // tiny negative -> -1 (floor)
        default: begin a = DW'($urandom); b = DW'($urandom); end
      endcase
      hist.push_back(fmul(int'(a), int'(b), FR, DW));
      @(posedge clk); #0.5;
      if (cyc >= 0) check(int'(p1), hist[cyc], $sformatf("DT=1 cycle %0d", cyc));
      if (cyc >= 2) check(int'(p3), hist[cyc-2], $sformatf("DT=3 cycle %0d", cyc));
    end
    // hold with en low
    en = 1'b0; a = 16'sd100; b = 16'sd100;
    repeat (3) @(posedge clk);
    #0.5;
    check(int'(p1), hist[299], "hold DT=1");
    check(int'(p3), hist[297], "hold DT=3");
    check(hist[0], 32767, "reference corner");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
