// tb_mxdotp_fp_regfile: random writes and three simultaneous random reads
// per cycle against an array model; a read in the write cycle must return
// the old value.
module tb_mxdotp_fp_regfile;
  logic clk = 0, rst_n = 0;
  logic [4:0] ra [3]; logic [63:0] rdat [3];
  logic we; logic [4:0] wa; logic [63:0] wdat;
  int checks = 0, failures = 0;
  logic [63:0] model [32];

  mxdotp_fp_regfile dut (.clk_i(clk), .rst_ni(rst_n), .raddr_i(ra), .rdata_o(rdat),
                         .we_i(we), .waddr_i(wa), .wdata_i(wdat));
  always #5 clk = ~clk;

  initial begin
    we = 0; wa = 0; wdat = 0;
    for (int i = 0; i < 3; i++) ra[i] = 0;
    for (int i = 0; i < 32; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = 1'($urandom); wa = 5'($urandom); wdat = {$urandom, $urandom};
      for (int i = 0; i < 3; i++) ra[i] = (i == 0) ? wa : 5'($urandom);
      #1;
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (rdat[i] !== model[ra[i]]) begin failures++; $display("FAIL read %0d", i); end
      end
      @(posedge clk);
      if (we) model[wa] = wdat;
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
