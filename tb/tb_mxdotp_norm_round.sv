// tb_mxdotp_norm_round: random 95-bit sums and scale sums are rounded to
// FP32 and compared with the wide-integer reference (roundTiesToEven,
// subnormals, overflow to Inf). With the sticky input set, the reference
// value is the sum plus or minus half a unit in the accumulator's direction;
// those cases use sums of at least 2^26 units, where the result does not
// depend on the size of the lost fraction.
module tb_mxdotp_norm_round;
  import mxdotp_pkg::*;
  import mxdotp_ref_pkg::*;

  logic signed [94:0] sum;
  logic st, an;
  logic [8:0] ss;
  logic [31:0] res;
  int checks = 0, failures = 0;

  mxdotp_norm_round dut (.sum_i(sum), .acc_sticky_i(st), .acc_neg_i(an),
                         .scale_sum_i(ss), .res_o(res));

  initial begin
    big_t v;
    logic [31:0] expr;
    int w, sc;
    for (int n = 0; n < 20000; n++) begin
      w = int'($urandom_range(1, 93));
      sum = 95'({$urandom, $urandom, $urandom});
      sum[94] = 1'b0;
      sum = sum >> (94 - w);
      if ($urandom_range(0, 1)) sum = -sum;
      ss = 9'($urandom_range(0, 508));
      sc = int'(ss) - 254;
      st = 1'b0; an = 1'b0;
      if ($urandom_range(0, 3) == 0 && (sum > (95'sd1 <<< 26) || sum < -(95'sd1 <<< 26))) begin
        st = 1'b1;
        an = 1'($urandom);
      end
      if (n < 4) begin  // ties: exactly 2^24 + 1 and 2^24 + 3 at unit scale
        sum = (n < 2) ? 95'sd16777217 : 95'sd16777219;
        ss  = 9'd254 + 9'd34;
        st  = 1'b0;
      end
      sc = int'(ss) - 254;
      #1;
      if (st) begin
        v = (big_t'(sum) <<< 1) + (an ? -1 : 1);
        v = v <<< (OFF - 35 + sc);
      end else begin
        v = big_t'(sum) <<< (OFF - 34 + sc);
      end
      expr = round_fp32(v);
      checks++;
      if (res !== expr) begin
        failures++;
        if (failures < 10) $display("FAIL sum=%h ss=%0d st=%b got %h exp %h", sum, ss, st, res, expr);
      end
    end
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
