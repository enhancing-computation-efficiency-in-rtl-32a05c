// dint_quantizer -- quantizes a signed fixed-point value to a b-bit dINT code.
//
// Given a value x, a step size s (> 0) and a zero-point z (0 <= z <= P, P = 2^b-3), the code is
//     C1                          if  s/4 <  x <=  3s/4
//     C2                          if -3s/4 <= x <  -s/4
//     clamp(round(x/s) + z, 0, P) otherwise.
// The two special windows are compared without division, as s < 4x <= 3s and -3s <= 4x < -s.
// round() is round-to-nearest with ties away from zero, computed exactly on integers as
// sign(x) * floor((2|x| + s) / (2s)). x and s share one fixed-point scale, so only their ratio
// matters and the module is agnostic of where the binary point lies.
//
// The quantization rule, the P = 2^b-3 uniform range and the half-step specials follow the dINT
// definition; the tie-breaking rule, the integer input format, the code assignment of C1/C2 (see
// dint_pkg) and the clamp/special status outputs are choices of this design.
//
// Interface: purely combinational. x_i (XW-bit signed), step_i (SW-bit unsigned, must be non-zero),
// zp_i (WBITS-bit zero-point) -> code_o, plus kind_o (uniform / C1 / C2) and clamped_o, which is
// set when round(x/s)+z fell outside 0..P and was clamped.
module dint_quantizer
  import dint_pkg::*;
#(
  parameter int unsigned WBITS = WBITS_DEFAULT,
  parameter int unsigned XW    = 16,
  parameter int unsigned SW    = 16
) (
  input  logic signed [XW-1:0]    x_i,
  input  logic        [SW-1:0]    step_i,
  input  logic        [WBITS-1:0] zp_i,
  output logic        [WBITS-1:0] code_o,
  output code_kind_e              kind_o,
  output logic                    clamped_o
);

  localparam int unsigned P  = dint_pmax(WBITS);
  localparam int unsigned C1 = dint_c1(WBITS);
  localparam int unsigned C2 = dint_c2(WBITS);
  // Working width: wide enough for 4|x|, 3s and 2|x|+s without overflow, plus a sign bit.
  localparam int unsigned MW = ((XW > SW) ? XW : SW) + 3;

  logic        [MW-1:0] mag;      // |x|
  logic        [MW-1:0] s_ext;    // s
  logic        [MW-1:0] mag4;     // 4|x|
  logic        [MW-1:0] s3;       // 3s
  logic        [MW-1:0] q_mag;    // round(|x|/s)
  logic signed [MW:0]   q_z;      // round(x/s) + z
  logic                 neg;

  always_comb begin
    neg   = x_i[XW-1];
    mag   = neg ? MW'(-$signed({x_i[XW-1], x_i})) : MW'(x_i);
    s_ext = MW'(step_i);
    mag4  = mag << 2;
    s3    = s_ext + (s_ext << 1);
    q_mag = ((mag << 1) + s_ext) / (s_ext << 1);
    q_z   = (neg ? -$signed({1'b0, q_mag}) : $signed({1'b0, q_mag})) + $signed((MW+1)'(zp_i));

    clamped_o = 1'b0;
    if (!neg && (mag4 > s_ext) && (mag4 <= s3)) begin
      code_o = WBITS'(C1);
      kind_o = CODE_C1;
    end else if (neg && (mag4 > s_ext) && (mag4 <= s3)) begin
      code_o = WBITS'(C2);
      kind_o = CODE_C2;
    end else begin
      kind_o = CODE_UNIFORM;
      if (q_z < 0) begin
        code_o    = '0;
        clamped_o = 1'b1;
      end else if (q_z > $signed((MW+1)'(P))) begin
        code_o    = WBITS'(P);
        clamped_o = 1'b1;
      end else begin
        code_o = WBITS'(q_z);
      end
    end
  end

endmodule
