// mxdotp_fp8_decode: unpacks one FP8 element into the FP9 (E5M3) form used
// inside the MXDOTP datapath.
//
// Both OCP FP8 encodings are mapped onto one 5-bit exponent (bias 15) and a
// 4-bit significand (hidden bit + 3 fraction bits), so one multiplier and one
// aligner serve both formats, as the paper does with its FP9 intermediate.
//   E5M2 (bias 15): exponent kept, the 2 fraction bits get a zero appended.
//                   Exponent 31 encodes Inf (fraction 0) and NaN.
//   E4M3 (bias 7):  exponent rebiased by +8. S.1111.111 is NaN; no Inf.
// Subnormal inputs (exponent field 0) get exponent 1 and a clear hidden bit,
// which is exact and needs no normaliser. Purely combinational.
module mxdotp_fp8_decode
  import mxdotp_pkg::*;
(
  input  fp8_fmt_e   fmt_i,
  input  logic [7:0] val_i,
  output fp9_t       op_o
);

  logic [4:0] e5;
  logic [1:0] m2;
  logic [3:0] e4;
  logic [2:0] m3;

  always_comb begin
    e5 = val_i[6:2];
    m2 = val_i[1:0];
    e4 = val_i[6:3];
    m3 = val_i[2:0];
    op_o      = '0;
    op_o.sign = val_i[7];
    if (fmt_i == FMT_E5M2) begin
      op_o.exp     = (e5 == 5'd0) ? 5'd1 : e5;
      op_o.sig     = {e5 != 5'd0, m2, 1'b0};
      op_o.is_nan  = (e5 == 5'd31) && (m2 != 2'd0);
      op_o.is_inf  = (e5 == 5'd31) && (m2 == 2'd0);
      op_o.is_zero = (e5 == 5'd0) && (m2 == 2'd0);
    end else begin
      op_o.exp     = ((e4 == 4'd0) ? 5'd1 : {1'b0, e4}) + 5'd8;
      op_o.sig     = {e4 != 4'd0, m3};
      op_o.is_nan  = (e4 == 4'd15) && (m3 == 3'd7);
      op_o.is_inf  = 1'b0;
      op_o.is_zero = (e4 == 4'd0) && (m3 == 3'd0);
    end
  end

endmodule
