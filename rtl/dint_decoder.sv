// dint_decoder -- dequantizes a b-bit dINT code into a signed integer in units of half a step.
//
// Dequantization of dINT is (code - z) * s for the uniform codes and +/- s/2 for the two special
// codes. Expressed in units of s/2 every case is an integer:
//     code in 0..P :  w = 2 * (code - z)       (even, |w| <= 2P)
//     code == C1   :  w = +1
//     code == C2   :  w = -1
// so the step size itself never enters the datapath; it is applied once to the final sum,
// together with the activation scale, outside this unit. The half-step unit is what lets the
// special values be handled by a one-bit shift rather than a second multiplier.
//
// The dequantization rule follows the dINT definition; the half-step unit of the output and the
// C1/C2 code assignment (see dint_pkg) are choices of this design.
//
// Interface: purely combinational. code_i and zp_i (WBITS bits each, zp_i <= P) -> w_o, a signed
// (WBITS+2)-bit value; diff_o, the signed (WBITS+1)-bit difference code - z (valid for uniform
// codes); and kind_o, which tells uniform codes from C1 and C2.
module dint_decoder
  import dint_pkg::*;
#(
  parameter int unsigned WBITS = WBITS_DEFAULT
) (
  input  logic        [WBITS-1:0] code_i,
  input  logic        [WBITS-1:0] zp_i,
  output logic signed [WBITS+1:0] w_o,
  output logic signed [WBITS:0]   diff_o,
  output code_kind_e              kind_o
);

  localparam int unsigned C1 = dint_c1(WBITS);
  localparam int unsigned C2 = dint_c2(WBITS);

  always_comb begin
    diff_o = $signed({1'b0, code_i}) - $signed({1'b0, zp_i});
    if (code_i == WBITS'(C1)) begin
      kind_o = CODE_C1;
      w_o    = (WBITS+2)'(1);
    end else if (code_i == WBITS'(C2)) begin
      kind_o = CODE_C2;
      w_o    = -(WBITS+2)'(1);
    end else begin
      kind_o = CODE_UNIFORM;
      w_o    = {diff_o, 1'b0};
    end
  end

endmodule
