// tb_mxdotp_opc_merge: for random scale words, selectors and accumulators,
// the merged operand must hold the selected {X^A, X^B} pair and C in their
// fields and zeros above.
module tb_mxdotp_opc_merge;
  logic [63:0] sc, acc, opc;
  logic [1:0]  sl;
  int checks = 0, failures = 0;

  mxdotp_opc_merge dut (.scales_i(sc), .sl_i(sl), .acc_i(acc), .opc_o(opc));

  initial begin
    logic [7:0] exa, exb;
    for (int n = 0; n < 2000; n++) begin
      sc = {$urandom, $urandom}; acc = {$urandom, $urandom}; sl = 2'($urandom);
      #1;
      exa = 8'(sc >> (16 * sl + 8));
      exb = 8'(sc >> (16 * sl));
      checks++;
      if (opc !== {16'h0, exa, exb, acc[31:0]}) begin
        failures++; $display("FAIL sl=%0d got %h", sl, opc);
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
