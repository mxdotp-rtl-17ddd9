// mxdotp_acc_align: places the FP32 accumulator into the 95-bit sum frame.
//
// Early accumulation (after Lutz et al.) adds the accumulator to the products
// in fixed point. The products are left unscaled, so the accumulator is
// scaled the other way: its exponent is reduced by the sum of the two E8M0
// block scales. Following the paper's figure, an 8-bit adder sums X^A and
// X^B, a 10-bit subtraction forms the shift distance, and a bi-directional
// shifter moves the 24-bit significand into the 95-bit frame.
//
// With the frame LSB at 2^-34 * 2^(XA+XB-254), the accumulator's LSB lands on
// bit  sh = e_C + 138 - (XA + XB)  (e_C biased, 1 for a subnormal C).
//   0 <= sh <= 70 : shifted left by sh; exact.
//   sh < 0        : shifted right; the bits that fall off are ORed into
//                   sticky_o, the kept magnitude is truncated toward zero.
//   sh > 70       : the accumulator is at least 4x larger than the largest
//                   possible product sum in units of its own ULP, so the
//                   rounded result equals C; big_o tells the unit to pass C.
// The choice of what to do outside the frame is this design's own; the paper
// gives only the frame width. Purely combinational.
module mxdotp_acc_align
  import mxdotp_pkg::*;
(
  input  logic [31:0]             c_i,
  input  logic [7:0]              xa_i,
  input  logic [7:0]              xb_i,
  output logic signed [SUM_W-1:0] acc_o,
  output logic                    sticky_o,
  output logic                    neg_o,
  output logic                    big_o,
  output logic [8:0]              scale_sum_o
);

  logic [7:0]           ec;
  logic [ACC_SIG_W-1:0] sig;
  logic signed [9:0]    sh;
  logic [SUM_W-2:0]     mag;
  logic [ACC_SIG_W-1:0] lost_mask;
  logic [5:0]           rsh;

  always_comb begin
    scale_sum_o = {1'b0, xa_i} + {1'b0, xb_i};
    ec          = (c_i[30:23] == 8'd0) ? 8'd1 : c_i[30:23];
    sig         = {c_i[30:23] != 8'd0, c_i[22:0]};
    sh          = $signed({2'b00, ec}) + 10'sd138 - $signed({1'b0, scale_sum_o});
    neg_o       = c_i[31];
    big_o       = (sh > $signed(10'(ACC_MAX_SH))) && (sig != '0);
    mag         = '0;
    sticky_o    = 1'b0;
    rsh         = '0;
    lost_mask   = '0;
    if (sh >= 0) begin
      if (!big_o) mag = {{(SUM_W-1-ACC_SIG_W){1'b0}}, sig} << sh;
    end else begin
      rsh       = (sh < -10'sd24) ? 6'd24 : 6'(-sh);
      mag       = {{(SUM_W-1-ACC_SIG_W){1'b0}}, sig >> rsh};
      lost_mask = (rsh >= 6'd24) ? '1 : ((ACC_SIG_W'(1) << rsh) - 1'b1);
      sticky_o  = |(sig & lost_mask);
    end
    acc_o = neg_o ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  end

endmodule
