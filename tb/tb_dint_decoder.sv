// tb_dint_decoder -- self-checking test of dint_decoder.
//
// Exhaustive over every code and every legal zero-point, for dINT4 and dINT3: the half-step output
// must be twice the real-valued dequantized value of the reference model, and the kind flag must
// mark exactly the two special codes. A watchdog ends the run.
module tb_dint_decoder;
  import dint_pkg::*;
  import tb_dint_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        [3:0] code4, zp4;
  logic        [2:0] code3, zp3;
  logic signed [5:0] w4;
  logic signed [4:0] d4;
  logic signed [4:0] w3;
  logic signed [3:0] d3;
  code_kind_e        k4, k3;

  dint_decoder #(.WBITS(4)) dut4 (.code_i(code4), .zp_i(zp4), .w_o(w4), .diff_o(d4), .kind_o(k4));
  dint_decoder #(.WBITS(3)) dut3 (.code_i(code3), .zp_i(zp3), .w_o(w3), .diff_o(d3), .kind_o(k3));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real expv;
    for (int z = 0; z <= 13; z++)
      for (int c = 0; c < 16; c++) begin
        code4 = 4'(c); zp4 = 4'(z);
        #1;
        expv = 2.0 * ref_deq(4, c, z);
        checks++;
        if (real'(w4) != expv || ((k4 != CODE_UNIFORM) != (c >= 14))) begin
          failures++;
          $display("FAIL dINT4 code=%0d z=%0d: w=%0d kind=%0d, expected %0f", c, z, w4, k4, expv);
        end
      end
    for (int z = 0; z <= 5; z++)
      for (int c = 0; c < 8; c++) begin
        code3 = 3'(c); zp3 = 3'(z);
        #1;
        expv = 2.0 * ref_deq(3, c, z);
        checks++;
        if (real'(w3) != expv || ((k3 != CODE_UNIFORM) != (c >= 6))) begin
          failures++;
          $display("FAIL dINT3 code=%0d z=%0d: w=%0d, expected %0f", c, z, w3, expv);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
