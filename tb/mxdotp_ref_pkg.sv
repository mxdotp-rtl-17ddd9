// mxdotp_ref_pkg: bit-exact reference model of the MXDOTP operation for the
// testbenches. It is written independently of the RTL: every term is placed
// into one 640-bit integer whose LSB weighs 2^-300, which holds any product,
// scale and FP32 accumulator exactly, and the total is rounded to FP32 once
// with roundTiesToEven. Special-value rules follow the RTL's documented
// behaviour (canonical NaN 7FC00000, Inf propagation, C passed unchanged
// when all products are zero).
package mxdotp_ref_pkg;

  localparam int BW  = 640;
  localparam int OFF = 300;   // bit position of weight 2^0

  typedef logic signed [BW-1:0] big_t;

  // FP8 element -> (sign, integer significand, exponent of its LSB, class)
  // class: 0 finite, 1 inf, 2 nan
  function automatic void fp8_split(input logic e4m3, input logic [7:0] v,
                                    output logic s, output int m, output int e,
                                    output int cls);
    int ef, mf;
    s   = v[7];
    cls = 0;
    if (!e4m3) begin
      ef = int'(v[6:2]); mf = int'(v[1:0]);
      if (ef == 31) cls = (mf == 0) ? 1 : 2;
      if (ef == 0) begin m = mf;       e = 1 - 15 - 2; end
      else         begin m = mf + 4;   e = ef - 15 - 2; end
    end else begin
      ef = int'(v[6:3]); mf = int'(v[2:0]);
      if (ef == 15 && mf == 7) cls = 2;
      if (ef == 0) begin m = mf;       e = 1 - 7 - 3; end
      else         begin m = mf + 8;   e = ef - 7 - 3; end
    end
  endfunction

  function automatic big_t place(input longint m, input int e);
    big_t t;
    t = big_t'(m);
    return t <<< (e + OFF);
  endfunction

  function automatic logic [31:0] round_fp32(input big_t v);
    logic        neg;
    big_t        mag;
    int          p, lsb;
    logic [31:0] r;
    longint      man;
    logic        g, st;
    neg = v[BW-1];
    mag = neg ? -v : v;
    if (mag == 0) return 32'd0;
    p = 0;
    for (int i = 0; i < BW; i++) if (mag[i]) p = i;
    lsb = p - 23;
    if (lsb < OFF - 149) lsb = OFF - 149;
    man = longint'(mag >> lsb);
    g   = (lsb > 0) ? mag[lsb-1] : 1'b0;
    st  = 1'b0;
    for (int i = 0; i < lsb - 1; i++) st |= mag[i];
    if (g && (st || man[0])) man++;
    // value = man * 2^(lsb-OFF); encode
    begin
      longint be;
      be = longint'(lsb - OFF + 150);   // biased exponent if man is in [2^23,2^24)
      if (man >= (64'd1 << 24)) begin man = man >> 1; be++; end
      if (man < (64'd1 << 23)) r = {neg, 8'd0, 23'(man)};
      else if (be >= 255)      r = {neg, 8'hFF, 23'd0};
      else                     r = {neg, 8'(be), 23'(man)};
    end
    return r;
  endfunction

  // skip_o: the exact result is below 2^-9 of the block-scale unit while the
  // accumulator has bits finer than the products' grid; the RTL's 95-bit
  // frame is documented to be only faithful (not always correctly rounded)
  // there.
  function automatic logic [31:0] mxdotp(input logic e4m3, input logic [63:0] a,
                                         input logic [63:0] b, input logic [63:0] opc,
                                         output logic skip_o);
    big_t   acc, psum;
    logic   sa, sb, all_zero, all_neg, pinf, ninf, nan;
    int     ma, mb, ea, eb, ca, cb, sc, ce, cm;
    logic [31:0] c;
    logic [7:0]  xa, xb;
    c  = opc[31:0];
    xb = opc[39:32];
    xa = opc[47:40];
    skip_o   = 1'b0;
    psum     = '0;
    all_zero = 1'b1;
    all_neg  = 1'b1;
    pinf = 1'b0; ninf = 1'b0; nan = 1'b0;
    sc = int'(xa) + int'(xb) - 254;
    for (int i = 0; i < 8; i++) begin
      fp8_split(e4m3, a[8*i +: 8], sa, ma, ea, ca);
      fp8_split(e4m3, b[8*i +: 8], sb, mb, eb, cb);
      if (ca == 2 || cb == 2) nan = 1'b1;
      else if (ca == 1 || cb == 1) begin
        if ((ca == 1 && cb == 0 && mb == 0) || (cb == 1 && ca == 0 && ma == 0)) nan = 1'b1;
        else if (sa ^ sb) ninf = 1'b1;
        else pinf = 1'b1;
      end else begin
        if (ma != 0 && mb != 0) all_zero = 1'b0;
        if (!(sa ^ sb)) all_neg = 1'b0;
        if (sa ^ sb) psum = psum - place(longint'(ma * mb), ea + eb + sc);
        else         psum = psum + place(longint'(ma * mb), ea + eb + sc);
      end
    end
    if (xa == 8'hFF || xb == 8'hFF) nan = 1'b1;
    if (c[30:23] == 8'hFF) begin
      if (c[22:0] != 0) nan = 1'b1;
      else if (c[31]) ninf = 1'b1;
      else pinf = 1'b1;
    end
    if (nan || (pinf && ninf)) return 32'h7FC0_0000;
    if (pinf) return 32'h7F80_0000;
    if (ninf) return 32'hFF80_0000;
    if (all_zero) begin
      if (c[30:0] == 0) return {c[31] & all_neg, 31'd0};
      return c;
    end
    ce = (c[30:23] == 0) ? 1 : int'(c[30:23]);
    cm = (c[30:23] == 0) ? int'(c[22:0]) : int'({1'b1, c[22:0]});
    acc = place(longint'(cm), ce - 150);
    if (c[31]) acc = -acc;
    acc = acc + psum;
    // accumulator bits below the grid 2^(-34+sc)?
    if (cm != 0 && (ce - 150) < (-34 + sc)) begin
      big_t m;
      m = acc < 0 ? -acc : acc;
      if ((m >> (OFF - 34 + sc + 25)) == 0) skip_o = 1'b1;
    end
    return round_fp32(acc);
  endfunction

endpackage
