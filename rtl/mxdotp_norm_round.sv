// mxdotp_norm_round: converts the 95-bit early-accumulation sum to FP32.
//
// The sum is a signed fixed-point number whose LSB weighs
// 2^-34 * 2^(XA+XB-254). The block takes its magnitude, finds the leading
// one at bit L, and forms the biased FP32 exponent L + XA + XB - 161, so the
// block scales are applied here as a plain exponent offset. The 24 bits below
// and including the leading one are kept (fewer for a subnormal result), the
// next bit is the guard bit and everything below it, together with the
// accumulator bits lost by the aligner, is the sticky bit. Rounding is
// roundTiesToEven, the only mode the paper implements. A carry out of the
// rounding step moves into the exponent field; results at or beyond 2^128
// become Inf.
//
// When the aligner truncated a negative-going accumulator (its sign differs
// from the sum's), the true magnitude is slightly below the truncated one;
// one LSB is taken off and the sticky bit set, which keeps the rounding
// exact. Special values (NaN, Inf, pass-through of C) are resolved in the
// unit, not here; an exact zero sum gives +0. Purely combinational.
module mxdotp_norm_round
  import mxdotp_pkg::*;
(
  input  logic signed [SUM_W-1:0] sum_i,
  input  logic                    acc_sticky_i,
  input  logic                    acc_neg_i,
  input  logic [8:0]              scale_sum_i,
  output logic [31:0]             res_o
);

  localparam int unsigned MW = SUM_W + 1;  // magnitude width with headroom

  logic                  neg;
  logic [MW-1:0]         mag;
  logic                  sticky_in;
  int                    lead;
  logic signed [12:0]    eres;
  logic signed [12:0]    lsb;
  logic [MW-1:0]         low_mask;
  logic [24:0]           man;
  logic                  guard;
  logic                  sticky;
  logic                  round_up;
  logic [39:0]           bits;
  logic [7:0]            lsb_u;

  always_comb begin
    neg       = sum_i[SUM_W-1];
    mag       = neg ? MW'(-sum_i) : MW'(sum_i);
    sticky_in = acc_sticky_i;
    if (acc_sticky_i) begin
      if (mag == '0) neg = acc_neg_i;
      else if (acc_neg_i != neg) mag = mag - 1'b1;
    end

    lead = 0;
    for (int i = 0; i < MW; i++) begin
      if (mag[i]) lead = i;
    end

    eres = 13'(lead) + $signed({4'b0, scale_sum_i}) - 13'sd161;
    lsb  = 13'(lead) - 13'sd23;
    if (eres < 13'sd1) lsb = lsb + (13'sd1 - eres);
    if (lsb > 13'sd96) lsb = 13'sd96;

    guard    = 1'b0;
    sticky   = sticky_in;
    low_mask = '0;
    lsb_u    = '0;
    if (lsb <= 0) begin
      man = 25'(mag << (-lsb));
    end else begin
      lsb_u    = 8'(lsb);
      man      = 25'(mag >> lsb_u);
      guard    = (lsb_u <= 8'(MW)) ? mag[lsb_u-1] : 1'b0;
      low_mask = (MW'(1) << (lsb_u - 1)) - 1'b1;
      sticky   = sticky_in || ((mag & low_mask) != '0);
    end
    round_up = guard && (sticky || man[0]);
    man      = man + 25'(round_up);

    bits = ((eres < 13'sd1) ? 40'd0 : (40'(eres) - 40'd1)) << 23;
    bits = bits + 40'(man);
    if (bits >= 40'h7F80_0000) bits = 40'h7F80_0000;
    res_o = {neg, bits[30:0]};
    if (mag == '0 && !sticky_in) res_o = 32'd0;   // exact zero: +0 under RNE
  end

endmodule
