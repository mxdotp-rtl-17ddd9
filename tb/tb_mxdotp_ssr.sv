// tb_mxdotp_ssr: configures random 1- to 4-level affine streams, serves the
// SSR's memory requests with random grant delays (the word returned encodes
// its address) and pops data at random times. Every popped word must come
// from the next address of the nested-loop pattern worked out in the
// testbench, and the stream must end with busy low.
module tb_mxdotp_ssr;
  import mxdotp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic we; ssr_reg_e rg; logic [31:0] wd; logic busy;
  logic req; tcdm_req_t rq; logic gnt; logic rv; logic [63:0] rdat;
  logic dv; logic [63:0] dat; logic pop;
  int checks = 0, failures = 0;
  logic [31:0] expq [$];

  mxdotp_ssr dut (.clk_i(clk), .rst_ni(rst_n), .cfg_we_i(we), .cfg_reg_i(rg),
                  .cfg_wdata_i(wd), .busy_o(busy), .mem_req_o(req), .mem_req_data_o(rq),
                  .mem_gnt_i(gnt), .mem_rvalid_i(rv), .mem_rdata_i(rdat), .data_valid_o(dv),
                  .data_o(dat), .data_pop_i(pop));
  always #5 clk = ~clk;

  // memory: random grant, data one cycle after grant
  always @(negedge clk) begin
    gnt <= req && ($urandom_range(0, 2) != 0);
    pop <= ($urandom_range(0, 2) != 0);
  end
  always @(posedge clk) begin
    rv <= req && gnt;
    if (req && gnt) rdat <= {rq.addr, ~rq.addr};
    if (rst_n && pop && dv) begin
      checks++;
      if (expq.size() == 0 || dat !== {expq[0], ~expq[0]}) begin
        failures++;
        if (failures < 10) $display("FAIL data %h", dat);
      end
      if (expq.size() != 0) void'(expq.pop_front());
    end
  end

  task automatic cfg(input ssr_reg_e r, input logic [31:0] v);
    @(negedge clk); we = 1; rg = r; wd = v;
    @(negedge clk); we = 0;
  endtask

  initial begin
    int b [4]; int s [4]; int base;
    we = 0; rg = SSR_REG_BASE; wd = 0; rv = 0; rdat = 0; gnt = 0; pop = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      for (int d = 0; d < 4; d++) begin
        b[d] = (d < int'($urandom_range(1, 4))) ? int'($urandom_range(0, 4)) : 0;
        s[d] = int'($urandom_range(0, 64)) * 8 - 256;
        cfg(ssr_reg_e'(d), 32'(b[d]));
        cfg(ssr_reg_e'(4 + d), 32'(s[d]));
      end
      base = int'($urandom_range(0, 4095)) * 8 + 4096;
      for (int i3 = 0; i3 <= b[3]; i3++)
        for (int i2 = 0; i2 <= b[2]; i2++)
          for (int i1 = 0; i1 <= b[1]; i1++)
            for (int i0 = 0; i0 <= b[0]; i0++)
              expq.push_back(32'(base + i0 * s[0] + i1 * s[1] + i2 * s[2] + i3 * s[3]));
      cfg(SSR_REG_BASE, 32'(base));
      while (busy || expq.size() != 0) begin
        @(posedge clk);
        if (!busy && expq.size() != 0) begin
          failures++; $display("FAIL stream ended early, %0d left", expq.size());
          expq.delete();
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #5000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
