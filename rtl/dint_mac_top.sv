// dint_mac_top -- W4A8 compute unit: a dINT4 x INT8 multiply-accumulate fed either with stored
// dINT weight codes or with values quantized to dINT on the fly.
//
// In W4A8V4 inference both the layer weights and the cached attention Value are held in 4-bit
// dINT, while activations are 8-bit integers. Weights are quantized ahead of time, so they arrive
// here as codes; Value entries are produced during inference, so this unit can also take a raw
// fixed-point value with its step size and quantize it itself before multiplying. src_sel_i picks
// the weight operand for each pair:
//     SRC_CODE  (0): w_code_i is used as is (pre-quantized weight)
//     SRC_QUANT (1): v_i quantized with step v_step_i and zero-point zp_i (Value path)
// The quantized code is also returned on q_code_o so it can be written back to a Value cache.
//
// Structure: stage 1 registers the operands (and runs the quantizer for SRC_QUANT); stage 2 is
// dint_mac. The dINT format, the quantizer rule and the dINT x INT8 MAC follow the paper; the
// operand-select mux, the pipeline register and all interface conventions are this design's own.
//
// Timing: one pair per clock, no stalls. A pair sampled at clock edge k (stage 1) is added to
// acc_o at edge k+1 (stage 2); out_valid_o is high in the cycle that follows edge k+1.
// clear_i travels with its pair and starts a new sum there.
module dint_mac_top
  import dint_pkg::*;
#(
  parameter int unsigned WBITS = WBITS_DEFAULT,
  parameter int unsigned ABITS = ABITS_DEFAULT,
  parameter int unsigned ACCW  = ACCW_DEFAULT,
  parameter int unsigned XW    = 16,
  parameter int unsigned SW    = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid_i,
  input  logic                    clear_i,
  input  logic                    src_sel_i,
  input  logic        [WBITS-1:0] w_code_i,
  input  logic        [WBITS-1:0] zp_i,
  input  logic signed [XW-1:0]    v_i,
  input  logic        [SW-1:0]    v_step_i,
  input  logic signed [ABITS-1:0] act_i,
  output logic        [WBITS-1:0] q_code_o,
  output logic                    q_clamped_o,
  output logic signed [ACCW-1:0]  acc_o,
  output logic                    out_valid_o,
  output code_kind_e              kind_o
);

  localparam logic SRC_CODE  = 1'b0;
  localparam logic SRC_QUANT = 1'b1;

  code_kind_e             q_kind;
  logic                   s1_valid, s1_clear;
  logic [WBITS-1:0]       s1_code, s1_zp;
  logic signed [ABITS-1:0] s1_act;

  dint_quantizer #(.WBITS(WBITS), .XW(XW), .SW(SW)) u_quant (
    .x_i       (v_i),
    .step_i    (v_step_i),
    .zp_i      (zp_i),
    .code_o    (q_code_o),
    .kind_o    (q_kind),
    .clamped_o (q_clamped_o)
  );

  // Stage 1: operand select and register.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_clear <= 1'b0;
      s1_code  <= '0;
      s1_zp    <= '0;
      s1_act   <= '0;
    end else begin
      s1_valid <= in_valid_i;
      s1_clear <= clear_i;
      s1_code  <= (src_sel_i == SRC_CODE) ? w_code_i : q_code_o;
      s1_zp    <= zp_i;
      s1_act   <= act_i;
    end
  end

  // Stage 2: the MAC.
  dint_mac #(.WBITS(WBITS), .ABITS(ABITS), .ACCW(ACCW)) u_mac (
    .clk          (clk),
    .rst_n        (rst_n),
    .clear_i      (s1_clear),
    .in_valid_i   (s1_valid),
    .w_code_i     (s1_code),
    .w_zp_i       (s1_zp),
    .act_i        (s1_act),
    .acc_o        (acc_o),
    .in_valid_q_o (out_valid_o),
    .kind_q_o     (kind_o)
  );

  // The quantizer needs a non-zero step whenever it supplies the operand.
  always_ff @(posedge clk) begin
    if (rst_n && in_valid_i && src_sel_i == SRC_QUANT)
      assert (v_step_i != '0) else $error("dint_mac_top: zero step size on the Value path");
  end

  // q_kind is informational; it must agree with the code the quantizer produced.
  always_comb begin
    if (q_kind == CODE_C1) assert (q_code_o == WBITS'(dint_c1(WBITS)));
    if (q_kind == CODE_C2) assert (q_code_o == WBITS'(dint_c2(WBITS)));
  end

endmodule
