// tb_mxdotp_acc_align: random accumulators and scales. The aligned value
// |acc| * 2^(-34+XA+XB-254) must equal |C| truncated to that grid, the sticky
// bit must flag exactly the truncated remainder, the sign must be C's, and
// big_o must be set exactly when the accumulator LSB lies above bit 70.
// The reference uses the wide-integer helpers of mxdotp_ref_pkg.
module tb_mxdotp_acc_align;
  import mxdotp_pkg::*;
  import mxdotp_ref_pkg::*;

  logic [31:0] c;
  logic [7:0]  xa, xb;
  logic signed [94:0] acc;
  logic sticky, neg, big;
  logic [8:0] ss;
  int checks = 0, failures = 0;

  mxdotp_acc_align dut (.c_i(c), .xa_i(xa), .xb_i(xb), .acc_o(acc), .sticky_o(sticky),
                        .neg_o(neg), .big_o(big), .scale_sum_o(ss));

  initial begin
    big_t exact, got, diff, unit;
    int   ce, cm, sc, lsb_pos;
    int   nbig = 0, nsticky = 0;
    for (int n = 0; n < 20000; n++) begin
      xa = 8'($urandom_range(0, 254));
      xb = 8'($urandom_range(0, 254));
      sc = int'(xa) + int'(xb) - 254;
      ce = 127 + sc + int'($urandom_range(0, 140)) - 70;
      if (ce < 0) ce = 0;
      if (ce > 254) ce = 254;
      c = {1'($urandom), 8'(ce), 23'($urandom)};
      #1;
      ce = (c[30:23] == 0) ? 1 : int'(c[30:23]);
      cm = (c[30:23] == 0) ? int'(c[22:0]) : int'({1'b1, c[22:0]});
      lsb_pos = ce - 150 + 34 - sc;
      checks++;
      if (ss != 9'(int'(xa) + int'(xb))) begin failures++; $display("FAIL scale sum"); end
      checks++;
      if (big != (lsb_pos > 70 && cm != 0)) begin failures++; $display("FAIL big c=%h", c); end
      if (big) begin
        nbig++;
        continue;
      end
      exact = place(longint'(cm), ce - 150);
      got   = big_t'(acc < 0 ? -acc : acc) <<< (OFF - 34 + sc);
      unit  = place(64'd1, -34 + sc);
      diff  = exact - got;
      checks++;
      if (diff < 0 || diff >= unit || sticky != (diff != 0)) begin
        failures++;
        if (failures < 10) $display("FAIL align c=%h xa=%0d xb=%0d", c, xa, xb);
      end
      if (sticky) nsticky++;
      checks++;
      if (neg != c[31] || (acc != 0 && (acc < 0) != c[31])) begin failures++; $display("FAIL sign"); end
    end
    checks++;
    if (nbig == 0 || nsticky == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
