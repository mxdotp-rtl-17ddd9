// tb_mxdotp_frep: sends plain instructions, then FREP bodies of random
// length and repetition count under random back-pressure, and checks that
// the output stream is the body repeated the requested number of times,
// that the input is held off during replay, and that instructions outside
// a body pass straight through.
module tb_mxdotp_frep;
  logic clk = 0, rst_n = 0;
  logic fv, fr; logic [3:0] mi; logic [15:0] mr;
  logic iv, ir; logic [31:0] ii;
  logic ov, orr; logic [31:0] oi; logic busy;
  int checks = 0, failures = 0;
  logic [31:0] expq [$];

  mxdotp_frep dut (.clk_i(clk), .rst_ni(rst_n), .frep_valid_i(fv), .frep_ready_o(fr),
                   .frep_max_inst_i(mi), .frep_max_rpt_i(mr), .in_valid_i(iv), .in_ready_o(ir),
                   .in_instr_i(ii), .out_valid_o(ov), .out_ready_i(orr), .out_instr_o(oi),
                   .busy_o(busy));
  always #5 clk = ~clk;

  // consumer with random back-pressure
  always @(posedge clk) begin
    if (rst_n && ov && orr) begin
      checks++;
      if (expq.size() == 0 || oi !== expq[0]) begin
        failures++; $display("FAIL out %h", oi);
      end
      if (expq.size() != 0) void'(expq.pop_front());
    end
  end
  always @(negedge clk) orr <= ($urandom_range(0, 3) != 0);

  task automatic send(input logic [31:0] w);
    @(negedge clk);
    iv = 1; ii = w;
    @(posedge clk);
    while (!ir) @(posedge clk);
    @(negedge clk); iv = 0;
  endtask

  initial begin
    logic [31:0] body [16];
    int nb, nr;
    fv = 0; mi = 0; mr = 0; iv = 0; ii = 0; orr = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      // a plain instruction
      ii = $urandom; expq.push_back(ii); send(ii);
      // an FREP body
      nb = int'($urandom_range(1, 16));
      nr = int'($urandom_range(1, 6));
      @(negedge clk);
      while (!fr) @(negedge clk);
      fv = 1; mi = 4'(nb - 1); mr = 16'(nr - 1);
      @(negedge clk); fv = 0;
      for (int i = 0; i < nb; i++) body[i] = $urandom;
      for (int r = 0; r < nr; r++) for (int i = 0; i < nb; i++) expq.push_back(body[i]);
      for (int i = 0; i < nb; i++) send(body[i]);
    end
    repeat (2000) @(posedge clk);
    checks++;
    if (expq.size() != 0 || busy) begin failures++; $display("FAIL %0d missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
