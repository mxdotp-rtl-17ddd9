// tb_mxdotp_product_lane: random FP9 operand pairs; the aligned 67-bit
// product must equal +-(sig_a*sig_b) * 2^(exp_a+exp_b-2), i.e. the exact
// product in units of 2^-34, and the special-value flags must follow the
// operand classes.
module tb_mxdotp_product_lane;
  import mxdotp_pkg::*;

  fp9_t a, b;
  logic signed [66:0] prod;
  logic nz, sg, inf, nan;
  int checks = 0, failures = 0;

  mxdotp_product_lane dut (.a_i(a), .b_i(b), .prod_o(prod), .nonzero_o(nz),
                           .sign_o(sg), .inf_o(inf), .nan_o(nan));

  function automatic fp9_t rnd();
    fp9_t x;
    x = '0;
    x.sign = 1'($urandom);
    x.exp  = 5'($urandom_range(1, 30));
    x.sig  = {1'($urandom_range(0, 7) != 0), 3'($urandom)};
    x.is_zero = (x.sig == 0);
    case ($urandom_range(0, 15))
      0: begin x.is_nan = 1'b1; x.is_zero = 1'b0; end
      1: begin x.is_inf = 1'b1; x.is_zero = 1'b0; end
      default: ;
    endcase
    return x;
  endfunction

  initial begin
    logic signed [66:0] expp;
    logic enan, einf;
    for (int n = 0; n < 20000; n++) begin
      a = rnd(); b = rnd();
      #1;
      expp = 67'(a.sig * b.sig) <<< (int'(a.exp) + int'(b.exp) - 2);
      if (a.sign ^ b.sign) expp = -expp;
      enan = a.is_nan || b.is_nan || (a.is_inf && b.is_zero) || (b.is_inf && a.is_zero);
      einf = !enan && (a.is_inf || b.is_inf);
      checks++;
      if (prod !== expp) begin
        failures++;
        if (failures < 10) $display("FAIL prod %h exp %h", prod, expp);
      end
      checks++;
      if (nan !== enan || inf !== einf || sg !== (a.sign ^ b.sign) ||
          nz !== (!enan && !einf && !a.is_zero && !b.is_zero)) begin
        failures++; $display("FAIL flags");
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
