// tb_mxdotp_decoder: assembles mxdotp words from random fields and checks
// that the decoder returns the same fields; other opcodes must not decode.
module tb_mxdotp_decoder;
  import mxdotp_pkg::*;
  logic [31:0] ins;
  mxdotp_instr_t d;
  int checks = 0, failures = 0;

  mxdotp_decoder dut (.instr_i(ins), .dec_o(d));

  initial begin
    logic [4:0] rd, r1, r2, r3;
    logic [1:0] sl;
    logic [6:0] opc;
    for (int n = 0; n < 2000; n++) begin
      rd = 5'($urandom); r1 = 5'($urandom); r2 = 5'($urandom); r3 = 5'($urandom);
      sl = 2'($urandom);
      opc = (n % 2 == 0) ? 7'b1110111 : 7'($urandom);
      ins = {r3, sl, r2, r1, 3'($urandom), rd, opc};
      #1;
      checks++;
      if (d.valid != (opc == 7'h77)) begin failures++; $display("FAIL valid %h", ins); end
      checks++;
      if (d.rd != rd || d.rs1 != r1 || d.rs2 != r2 || d.rs3 != r3 || d.sl != sl) begin
        failures++; $display("FAIL fields %h", ins);
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
