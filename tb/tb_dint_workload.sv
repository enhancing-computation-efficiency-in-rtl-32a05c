// tb_dint_workload -- dot-product lengths of the evaluated language models on dint_mac_top at its
// default parameters.
//
// Every output of a quantized fully-connected layer is one dot product over the layer's input
// channels; every output of the attention-times-Value product is one dot product over the tokens.
// This bench runs one dot product per length below through the unit, first with the worst-case
// operands (largest dINT4 magnitude 13 steps against activation -128, every cycle) to show that the
// 32-bit accumulator does not overflow, then with random operands and a mix of stored weights and
// on-the-fly quantized Values, checking the result against a real-number reference.
//   2048   calibration/evaluation sequence length (attention x Value over 2048 tokens)
//   4096   LLaMA-7B hidden size
//   8192   LLaMA-65B hidden size
//   22016  LLaMA-65B feed-forward inner size
//   36864  OPT-66B feed-forward inner size (4 x 9216), the longest reduction of these models
module tb_dint_workload;
  import dint_pkg::*;
  import tb_dint_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic               rst_n, valid, clear, src;
  logic        [3:0]  wcode, zp;
  logic signed [15:0] v;
  logic        [15:0] vstep;
  logic signed [7:0]  act;
  logic        [3:0]  qcode;
  logic               qclamp;
  logic signed [31:0] acc;
  logic               ovalid;
  code_kind_e         kind;

  dint_mac_top dut (
    .clk(clk), .rst_n(rst_n), .in_valid_i(valid), .clear_i(clear), .src_sel_i(src),
    .w_code_i(wcode), .zp_i(zp), .v_i(v), .v_step_i(vstep), .act_i(act),
    .q_code_o(qcode), .q_clamped_o(qclamp), .acc_o(acc), .out_valid_o(ovalid), .kind_o(kind));

  int cyc = 0;
  always @(posedge clk) cyc++;

  int lengths[5] = '{2048, 4096, 8192, 22016, 36864};

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int len, bit worst);
    real sum;
    int  x_int, s_int, code_used, t0, t1;
    sum = 0.0;
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      valid = 1'b1;
      clear = (i == 0);
      if (i == 0) t0 = cyc;
      if (worst) begin
        src = 1'b0; wcode = 4'd13; zp = 4'd0; act = -8'sd128;
        code_used = 13;
      end else begin
        src   = ($urandom % 2) == 0;
        wcode = 4'($urandom % 16);
        zp    = 4'($urandom % 14);
        s_int = 1 + ($urandom % 300);
        x_int = (int'($signed($urandom % 16384)) - 8192) >>> ($urandom % 10);
        v     = 16'(x_int);
        vstep = 16'(s_int);
        act   = 8'($urandom);
        code_used = src ? ref_quant(4, x_int, s_int, int'(zp)) : int'(wcode);
      end
      sum += ref_deq(4, code_used, int'(zp)) * real'(act);
    end
    @(negedge clk);
    valid = 1'b0; clear = 1'b0;
    // Last pair was sampled at the edge before this negedge; its sum appears one edge later.
    @(posedge clk); #1;
    t1 = cyc;
    checks++;
    if (real'(acc) != 2.0 * sum) begin
      failures++;
      $display("FAIL length %0d worst=%0b: acc=%0d expected %0f", len, worst, acc, 2.0 * sum);
    end
    // One pair per clock: len sampling edges, plus one edge for the accumulator stage.
    checks++;
    if (t1 - t0 != len + 1) begin
      failures++;
      $display("FAIL length %0d took %0d cycles", len, t1 - t0);
    end
    $display("length %0d worst=%0b: acc=%0d (half-step units)", len, worst, acc);
  endtask

  initial begin
    rst_n = 1'b0; valid = 1'b0; clear = 1'b0; src = 1'b0; wcode = '0; zp = '0;
    v = '0; vstep = 16'd1; act = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (lengths[k]) run(lengths[k], 1'b1);
    foreach (lengths[k]) run(lengths[k], 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
