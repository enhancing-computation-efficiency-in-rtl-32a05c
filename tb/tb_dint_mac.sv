// tb_dint_mac -- self-checking test of dint_mac (dINT4 x INT8, 32-bit accumulator), plus a
// dINT3 instance driven by the same stream.
//
// Drives random dot products of random length, with idle cycles between pairs, clear cycles with
// and without a pair, full-range activations (-128..127) and every weight code. After every clock
// edge the accumulator must equal twice the real-valued reference sum (the hardware counts in
// half steps) of everything accepted up to that edge: this checks the arithmetic, the one-cycle
// latency and the one-pair-per-cycle rate together. A watchdog ends the run.
module tb_dint_mac;
  import dint_pkg::*;
  import tb_dint_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_c1 = 0, n_c2 = 0, n_clear = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic              rst_n, clear, valid;
  logic        [3:0] code, zp;
  logic signed [7:0] act;
  logic signed [31:0] acc;
  logic              vq;
  code_kind_e        kq;

  dint_mac dut (.clk(clk), .rst_n(rst_n), .clear_i(clear), .in_valid_i(valid), .w_code_i(code),
                .w_zp_i(zp), .act_i(act), .acc_o(acc), .in_valid_q_o(vq), .kind_q_o(kq));

  // A dINT3 instance (W3A8) fed the same stream, with codes and zero-points folded into range.
  logic        [2:0]  code3, zp3;
  logic signed [31:0] acc3;
  logic               vq3;
  code_kind_e         kq3;
  assign code3 = code[2:0];
  assign zp3   = 3'(zp % 4'd6);
  dint_mac #(.WBITS(3)) dut3 (.clk(clk), .rst_n(rst_n), .clear_i(clear), .in_valid_i(valid),
                .w_code_i(code3), .w_zp_i(zp3), .act_i(act), .acc_o(acc3), .in_valid_q_o(vq3),
                .kind_q_o(kq3));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_sum, ref_sum3;
    int  cyc;
    rst_n = 1'b0; clear = 1'b0; valid = 1'b0; code = '0; zp = '0; act = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    checks++;
    if (acc !== 32'sd0) begin failures++; $display("FAIL accumulator not zero after reset"); end
    ref_sum = 0.0;
    ref_sum3 = 0.0;
    cyc = 0;
    // Worst-case pair first: C1/C2 and the largest uniform magnitudes with extreme activations.
    for (int i = 0; i < 60000; i++) begin
      @(negedge clk);
      clear = ($urandom % 50) == 0;
      valid = ($urandom % 5) != 0;
      code  = 4'($urandom % 16);
      zp    = 4'($urandom % 14);
      act   = 8'($urandom);
      if (i < 4) begin valid = 1'b1; clear = 1'b0; code = (i < 2) ? 4'd13 : 4'd0; zp = (i < 2) ? 4'd0 : 4'd13;
                       act = (i % 2 == 0) ? -8'sd128 : 8'sd127; end
      if (clear) begin ref_sum = 0.0; ref_sum3 = 0.0; n_clear++; end
      if (valid) begin
        ref_sum += ref_deq(4, int'(code), int'(zp)) * real'(act);
        ref_sum3 += ref_deq(3, int'(code[2:0]), int'(zp) % 6) * real'(act);
        if (code == 4'd14) n_c1++;
        if (code == 4'd15) n_c2++;
      end
      @(posedge clk); #1;
      checks++;
      if (real'(acc) != 2.0 * ref_sum || vq !== valid) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: acc=%0d expected %0f", i, acc, 2.0 * ref_sum);
      end
      checks++;
      if (real'(acc3) != 2.0 * ref_sum3 || vq3 !== valid) begin
        failures++;
        if (failures < 10) $display("FAIL dINT3 cycle %0d: acc=%0d expected %0f", i, acc3, 2.0 * ref_sum3);
      end
    end
    checks++;
    if (n_c1 == 0 || n_c2 == 0 || n_clear == 0) begin failures++; $display("FAIL coverage"); end
    $display("specials: C1=%0d C2=%0d clears=%0d", n_c1, n_c2, n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
