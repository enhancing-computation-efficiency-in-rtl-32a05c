// dint_mac -- multiply-accumulate unit for a dINT weight (default dINT4) and an INT8 activation.
//
// Each cycle with in_valid_i set, the unit adds the product of one dINT weight and one signed
// activation to its accumulator. The sum is kept in units of half a weight step (s/2) times the
// activation step, so that the two special dINT values are exact:
//     uniform code : acc += (2 * (code - z)) * a   -- a (WBITS+1) x ABITS multiplier, then a shift
//     C1           : acc += a                      -- no multiplier: the activation itself
//     C2           : acc -= a
// The multiplier only ever sees the (WBITS+1)-bit difference code - z, which is what makes a
// dINT4 x INT8 unit much smaller than an INT8 x INT8 one; the special values cost a multiplexer
// and a negation. The final real-valued result is acc * (s_w / 2) * s_a, applied outside.
//
// That the unit multiplies a 4-bit dINT operand by an INT8 operand, and that the special values
// are handled by bit shifts, follows the paper; its internal structure, the
// signed-activation convention (any activation zero-point correction is done outside), the
// accumulator width and the single-cycle timing below are choices of this design.
//
// Interface and timing: one operand pair per clock, no back-pressure. clear_i starts a new dot
// product: on a cycle with clear_i the accumulator loads the current product (or 0 when in_valid_i
// is low) instead of adding to it. acc_o is registered and reflects every pair accepted up to the
// previous clock edge (latency 1 cycle, throughput 1 MAC per cycle). Synchronous active-low reset.
// in_valid_q_o and kind_q_o report whether a pair was accumulated at the last edge, and of what
// kind its weight code was (uniform, C1 or C2).
module dint_mac
  import dint_pkg::*;
#(
  parameter int unsigned WBITS = WBITS_DEFAULT,
  parameter int unsigned ABITS = ABITS_DEFAULT,
  parameter int unsigned ACCW  = ACCW_DEFAULT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear_i,
  input  logic                    in_valid_i,
  input  logic        [WBITS-1:0] w_code_i,
  input  logic        [WBITS-1:0] w_zp_i,
  input  logic signed [ABITS-1:0] act_i,
  output logic signed [ACCW-1:0]  acc_o,
  output logic                    in_valid_q_o,
  output code_kind_e              kind_q_o
);

  localparam int unsigned PW = WBITS + 1 + ABITS + 1;  // product width in half-step units

  logic signed [WBITS+1:0] w_half;
  logic signed [WBITS:0]   diff;
  code_kind_e              kind;
  logic signed [PW-1:0]    prod;
  logic signed [PW-1:0]    mult;

  dint_decoder #(.WBITS(WBITS)) u_dec (
    .code_i (w_code_i),
    .zp_i   (w_zp_i),
    .w_o    (w_half),
    .diff_o (diff),
    .kind_o (kind)
  );

  // Uniform path: small signed multiplier on (code - z), then one left shift to half-step units.
  // Special path: the activation itself, or its negation. w_half is used only for the check below.
  always_comb begin
    mult = PW'(diff) * PW'(act_i);
    unique case (kind)
      CODE_C1:      prod = PW'(act_i);
      CODE_C2:      prod = -PW'(act_i);
      default:      prod = mult <<< 1;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_o        <= '0;
      in_valid_q_o <= 1'b0;
      kind_q_o     <= CODE_UNIFORM;
    end else begin
      in_valid_q_o <= in_valid_i;
      kind_q_o     <= kind;
      if (clear_i)
        acc_o <= in_valid_i ? ACCW'(prod) : '0;
      else if (in_valid_i)
        acc_o <= acc_o + ACCW'(prod);
    end
  end

  // The selected product must equal the dequantized weight (half-step units) times the activation.
  always_comb begin
    if (rst_n && in_valid_i)
      assert (prod == PW'(w_half) * PW'(act_i))
        else $error("dint_mac: product path disagrees with dequantized weight");
  end

  // The zero-point must lie on the uniform grid.
  always_ff @(posedge clk) begin
    if (rst_n && in_valid_i)
      assert (w_zp_i <= WBITS'(dint_pmax(WBITS)))
        else $error("dint_mac: zero-point %0d above P", w_zp_i);
  end

endmodule
