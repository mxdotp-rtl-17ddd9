// mxdotp_product_lane: one of the eight product lanes of the MXDOTP datapath.
//
// As drawn in the paper's datapath figure: the two 5-bit FP9 exponents are
// added, a 4x4-bit multiplier forms the significand product, the exponent sum
// is subtracted from the anchor to give a 6-bit shift amount, and the product
// is right-shifted into a 67-bit signed fixed-point frame whose LSB weighs
// 2^-34 (the anchor of 34 fractional bits). The anchor of the shift is the
// largest finite exponent sum (60), so the product of the two largest
// elements needs no shift and the product of two minimum-exponent elements
// is shifted by 58. The product is negated when the signs differ (the figure
// omits sign bits). Inf/NaN operands are flagged here and resolved in the
// unit; their significand bits still enter the sum and are ignored later.
// Purely combinational.
module mxdotp_product_lane
  import mxdotp_pkg::*;
(
  input  fp9_t                     a_i,
  input  fp9_t                     b_i,
  output logic signed [PROD_W-1:0] prod_o,
  output logic                     nonzero_o,  // both elements finite, non-zero
  output logic                     sign_o,     // sign of the product
  output logic                     inf_o,      // Inf times a non-zero number
  output logic                     nan_o       // NaN operand or Inf times zero
);

  logic [5:0]        exp_sum;
  logic [5:0]        shamt;
  logic [7:0]        sig_prod;
  logic [PROD_W-2:0] mag;

  always_comb begin
    exp_sum   = {1'b0, a_i.exp} + {1'b0, b_i.exp};
    sig_prod  = a_i.sig * b_i.sig;
    shamt     = 6'(PROD_EXP_MAX) - exp_sum;
    mag       = {sig_prod, {PROD_SH_MAX{1'b0}}} >> shamt;
    sign_o    = a_i.sign ^ b_i.sign;
    prod_o    = sign_o ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
    nan_o     = a_i.is_nan || b_i.is_nan ||
                (a_i.is_inf && b_i.is_zero) || (b_i.is_inf && a_i.is_zero);
    inf_o     = (a_i.is_inf || b_i.is_inf) && !nan_o;
    nonzero_o = !a_i.is_zero && !b_i.is_zero && !nan_o && !inf_o;
  end

endmodule
