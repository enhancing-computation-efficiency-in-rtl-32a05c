// tb_dint_mac_top -- end-to-end test of dint_mac_top at its default parameters
// (dINT4 weights, INT8 activations, 32-bit accumulator, 16-bit Value and step inputs).
//
// A random stream of 40,000 cycles mixes both operand sources: stored dINT4 weight codes and raw
// Values that the unit quantizes itself. Dot products of random length are separated by clear
// cycles; idle cycles are sprinkled in. A real-number reference model quantizes, dequantizes and
// accumulates independently of the RTL. Each cycle checks:
//   - q_code_o and q_clamped_o against the reference quantizer (combinational);
//   - acc_o and out_valid_o one edge after the edge that sampled the pair (the unit's two-stage
//     latency), so the one-pair-per-cycle rate is checked too.
// Every mechanism is counted and must occur at least once: stored C1 and C2 codes, quantized C1
// and C2, clamping at 0 and at P, clear, idle cycles and a switch of operand source.
module tb_dint_mac_top;
  import dint_pkg::*;
  import tb_dint_ref_pkg::*;

  localparam int N = 40000;

  int checks = 0, failures = 0;
  int n_st_c1 = 0, n_st_c2 = 0, n_q_c1 = 0, n_q_c2 = 0, n_clamp_lo = 0, n_clamp_hi = 0;
  int n_clear = 0, n_idle = 0, n_switch = 0;
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

  real  exp_acc [N];
  logic exp_vld [N];

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sum;
    int  code_used, expq, s_int, x_int;
    logic last_src;
    rst_n = 1'b0; valid = 1'b0; clear = 1'b0; src = 1'b0; wcode = '0; zp = '0;
    v = '0; vstep = 16'd1; act = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    sum = 0.0;
    last_src = 1'b0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      valid = ($urandom % 8) != 0;
      clear = (i == 0) || (($urandom % 64) == 0);
      src   = ($urandom % 3) == 0;
      if (i > 0 && src != last_src) n_switch++;
      last_src = src;
      wcode = 4'($urandom % 16);
      zp    = 4'($urandom % 14);
      s_int = 1 + ($urandom % 400);
      // Values spread from well inside the special windows to far outside the grid.
      x_int = int'($signed($urandom % 32768)) - 16384;
      x_int = x_int >>> ($urandom % 12);
      v     = 16'(x_int);
      vstep = 16'(s_int);
      act   = 8'($urandom);
      #1;
      expq = ref_quant(4, x_int, s_int, int'(zp));
      checks++;
      if (int'(qcode) != expq || qclamp != ref_clamped(4, x_int, s_int, int'(zp))) begin
        failures++;
        if (failures < 10) $display("FAIL quantizer x=%0d s=%0d z=%0d: %0d expected %0d", x_int, s_int, zp, qcode, expq);
      end
      code_used = src ? expq : int'(wcode);
      if (clear) sum = 0.0;
      if (valid) begin
        sum += ref_deq(4, code_used, int'(zp)) * real'(act);
        if (!src && code_used == 14) n_st_c1++;
        if (!src && code_used == 15) n_st_c2++;
        if (src && code_used == 14) n_q_c1++;
        if (src && code_used == 15) n_q_c2++;
        if (src && ref_clamped(4, x_int, s_int, int'(zp)) && code_used == 0)  n_clamp_lo++;
        if (src && ref_clamped(4, x_int, s_int, int'(zp)) && code_used == 13) n_clamp_hi++;
      end else n_idle++;
      if (clear) n_clear++;
      exp_acc[i] = 2.0 * sum;
      exp_vld[i] = valid;
      @(posedge clk); #1;
      if (i >= 1) begin
        checks++;
        if (real'(acc) != exp_acc[i-1] || ovalid !== exp_vld[i-1]) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d: acc=%0d expected %0f", i, acc, exp_acc[i-1]);
        end
      end
    end
    valid = 1'b0; clear = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (real'(acc) != exp_acc[N-1]) failures++;
    $display("stored C1=%0d C2=%0d quantized C1=%0d C2=%0d clamp lo=%0d hi=%0d clears=%0d idle=%0d switches=%0d",
             n_st_c1, n_st_c2, n_q_c1, n_q_c2, n_clamp_lo, n_clamp_hi, n_clear, n_idle, n_switch);
    checks++;
    if (n_st_c1 == 0 || n_st_c2 == 0 || n_q_c1 == 0 || n_q_c2 == 0 || n_clamp_lo == 0 ||
        n_clamp_hi == 0 || n_clear == 0 || n_idle == 0 || n_switch == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
