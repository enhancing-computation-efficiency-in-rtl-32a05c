// tb_dint_quantizer -- self-checking test of dint_quantizer.
//
// Two instances are tested, dINT4 (default) and dINT3, against a real-number reference model.
// Directed cases: the worked grid of a dINT4 with step 1.5 and zero-point 3 (uniform points
// -4.5 .. 15, specials at +/-0.75), every boundary of the special windows and rounding ties.
// Random cases: 20,000 values, steps and zero-points per instance. A watchdog ends the run.
module tb_dint_quantizer;
  import dint_pkg::*;
  import tb_dint_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [15:0] x;
  logic        [15:0] s;
  logic        [3:0]  z4;
  logic        [2:0]  z3;
  logic        [3:0]  code4;
  logic        [2:0]  code3;
  code_kind_e         kind4, kind3;
  logic               clamp4, clamp3;

  dint_quantizer #(.WBITS(4)) dut4 (.x_i(x), .step_i(s), .zp_i(z4), .code_o(code4), .kind_o(kind4), .clamped_o(clamp4));
  dint_quantizer #(.WBITS(3)) dut3 (.x_i(x), .step_i(s), .zp_i(z3), .code_o(code3), .kind_o(kind3), .clamped_o(clamp3));

  task automatic check4(int xv, int sv, int zv);
    int exp_code;
    x = 16'(xv); s = 16'(sv); z4 = 4'(zv);
    #1;
    exp_code = ref_quant(4, xv, sv, zv);
    checks++;
    if (int'(code4) != exp_code || clamp4 != ref_clamped(4, xv, sv, zv)) begin
      failures++;
      $display("FAIL dINT4 x=%0d s=%0d z=%0d: code %0d clamp %0b, expected %0d %0b",
               xv, sv, zv, code4, clamp4, exp_code, ref_clamped(4, xv, sv, zv));
    end
  endtask

  task automatic check3(int xv, int sv, int zv);
    int exp_code;
    x = 16'(xv); s = 16'(sv); z3 = 3'(zv);
    #1;
    exp_code = ref_quant(3, xv, sv, zv);
    checks++;
    if (int'(code3) != exp_code || clamp3 != ref_clamped(3, xv, sv, zv)) begin
      failures++;
      $display("FAIL dINT3 x=%0d s=%0d z=%0d: code %0d, expected %0d", xv, sv, zv, code3, exp_code);
    end
  endtask

  // Expected codes written out by hand for the step-1.5 grid (values in quarter units, s = 6).
  task automatic check_hand(int xv, int exp_code);
    x = 16'(xv); s = 16'd6; z4 = 4'd3;
    #1;
    checks++;
    if (int'(code4) != exp_code) begin
      failures++;
      $display("FAIL hand x=%0d: code %0d, expected %0d", xv, code4, exp_code);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sv;
    // Grid of the figure-style example: -4.5 -> 0, 0 -> 3, 15 -> 13, +0.75 -> C1, -0.75 -> C2.
    check_hand(-18, 0);
    check_hand(0, 3);
    check_hand(60, 13);
    check_hand(3, 14);
    check_hand(-3, 15);
    check_hand(1, 3);      // 0.25 -> still zero (window is open at s/4)
    check_hand(2, 14);     // 0.5  -> C1
    check_hand(4, 14);     // 1.0  -> still inside the C1 window (3s/4 = 1.125)
    check_hand(5, 4);      // 1.25 -> above 3s/4, rounds to 1
    check_hand(100, 13);   // far above the range -> clamped to P
    check_hand(-100, 0);   // far below -> clamped to 0
    // Boundaries of the special windows and rounding ties for several steps.
    for (int k = 1; k <= 40; k++) begin
      sv = 4 * k;
      for (int d = -2; d <= 2; d++) begin
        check4(sv / 4 + d, sv, 7);  check4(3 * sv / 4 + d, sv, 7);
        check4(-sv / 4 + d, sv, 7); check4(-3 * sv / 4 + d, sv, 7);
        check4(3 * sv / 2 + d, sv, 2); check4(-3 * sv / 2 + d, sv, 9);
      end
    end
    // Random sweep.
    for (int i = 0; i < 20000; i++) begin
      sv = 1 + ($urandom % 2000);
      check4($signed($urandom % 65536) - 32768 >>> ($urandom % 8), sv, $urandom % 14);
      check3($signed($urandom % 65536) - 32768 >>> ($urandom % 8), sv, $urandom % 6);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
