// tb_mxdotp_fmt_csr: random CSR accesses (write, set, clear, other
// addresses) against a one-bit model; checks read data, the hit flag and the
// format output one cycle after each access, and the reset value.
module tb_mxdotp_fmt_csr;
  import mxdotp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic v; logic [11:0] addr; csr_op_e op; logic [31:0] wd, rd; logic hit;
  fp8_fmt_e fmt;
  int checks = 0, failures = 0;

  mxdotp_fmt_csr dut (.clk_i(clk), .rst_ni(rst_n), .csr_valid_i(v), .csr_addr_i(addr),
                      .csr_op_i(op), .csr_wdata_i(wd), .csr_rdata_o(rd), .csr_hit_o(hit),
                      .fmt_o(fmt));
  always #5 clk = ~clk;

  initial begin
    logic model;
    v = 0; addr = 0; op = CSR_OP_WRITE; wd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    model = 1'b0;
    checks++;
    if (fmt != FMT_E5M2) begin failures++; $display("FAIL reset"); end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      v    = 1'($urandom);
      addr = ($urandom_range(0, 3) == 0) ? 12'($urandom) : 12'h800;
      op   = csr_op_e'($urandom_range(1, 3));
      wd   = $urandom;
      #1;
      checks++;
      if (hit != (v && addr == 12'h800)) begin failures++; $display("FAIL hit"); end
      checks++;
      if (hit && rd != {31'd0, model}) begin failures++; $display("FAIL rdata"); end
      if (hit) begin
        case (op)
          CSR_OP_WRITE: model = wd[0];
          CSR_OP_SET:   model = model | wd[0];
          CSR_OP_CLEAR: model = model & ~wd[0];
          default: ;
        endcase
      end
      @(posedge clk); #1;
      checks++;
      if (fmt != fp8_fmt_e'(model)) begin failures++; $display("FAIL fmt"); end
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
