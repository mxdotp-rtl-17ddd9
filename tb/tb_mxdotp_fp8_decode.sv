// tb_mxdotp_fp8_decode: exhaustive check of the FP8 -> FP9 unpacker. For all
// 256 codes of both formats, the value sig * 2^(exp-18) of the output is
// compared with the value of the code worked out from the OCP FP8
// definitions, and the NaN / Inf / zero flags are checked.
module tb_mxdotp_fp8_decode;
  import mxdotp_pkg::*;

  fp8_fmt_e   fmt;
  logic [7:0] val;
  fp9_t       op;
  int checks = 0, failures = 0;

  mxdotp_fp8_decode dut (.fmt_i(fmt), .val_i(val), .op_o(op));

  logic nan, inf;
  function automatic real ref_val(input logic e4m3, input logic [7:0] v);
    int  e, m;
    real r;
    nan = 1'b0; inf = 1'b0;
    if (!e4m3) begin
      e = int'(v[6:2]); m = int'(v[1:0]);
      if (e == 31) begin nan = (m != 0); inf = (m == 0); end
      r = (e == 0) ? (m / 4.0) * (2.0 ** -14) : (1.0 + m / 4.0) * (2.0 ** (e - 15));
    end else begin
      e = int'(v[6:3]); m = int'(v[2:0]);
      nan = (e == 15 && m == 7);
      r = (e == 0) ? (m / 8.0) * (2.0 ** -6) : (1.0 + m / 8.0) * (2.0 ** (e - 7));
    end
    return v[7] ? -r : r;
  endfunction

  initial begin
    real expv, gotv;
    int  ex, sg;
    for (int f = 0; f < 2; f++) begin
      for (int c = 0; c < 256; c++) begin
        fmt = fp8_fmt_e'(f);
        val = 8'(c);
        #1;
        expv = ref_val(f[0], val);
        ex = op.exp;
        sg = op.sig;
        gotv = sg * (2.0 ** (ex - 18));
        if (op.sign) gotv = -gotv;
        checks++;
        if (op.is_nan != nan || op.is_inf != inf) begin
          failures++; $display("FAIL flags fmt=%0d code=%h", f, c);
        end
        checks++;
        if (!nan && !inf && gotv != expv) begin
          failures++; $display("FAIL value fmt=%0d code=%h got %f exp %f", f, c, gotv, expv);
        end
        checks++;
        if (op.is_zero != (!nan && !inf && expv == 0.0)) begin
          failures++; $display("FAIL zero flag fmt=%0d code=%h", f, c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
