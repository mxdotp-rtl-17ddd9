// tb_mxdotp_tcdm: a reduced L1 (4 banks of 16 words, 6 masters) under random
// reads and byte-masked writes from all masters. Every read response is
// compared with a word-level model updated at each granted write, at most
// one master per bank may be granted per cycle, and bank conflicts must
// occur and be resolved (every request is eventually granted).
module tb_mxdotp_tcdm;
  import mxdotp_pkg::*;
  localparam int NP = 6, NB = 4, NW = 16;
  logic clk = 0, rst_n = 0;
  logic req [NP]; tcdm_req_t rq [NP]; logic gnt [NP]; logic rv [NP]; logic [63:0] rd [NP];
  logic [31:0] confl;
  int checks = 0, failures = 0, nconfl = 0, nreads = 0;
  logic [63:0] model [NB*NW];
  logic [63:0] pend_exp [NP];
  logic        pend [NP];
  logic        pgrant [NP];

  mxdotp_tcdm #(.NUM_PORTS(NP), .NUM_BANKS(NB), .WORDS_PER_BANK(NW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .req_data_i(rq), .gnt_o(gnt),
    .rvalid_o(rv), .rdata_o(rd), .conflicts_o(confl));
  always #5 clk = ~clk;

  function automatic int widx(input logic [31:0] a);
    return int'(a[3 +: 2]) * NW + int'(a[5 +: 4]);
  endfunction

  initial begin
    int phase;
    for (int p = 0; p < NP; p++) begin req[p] = 0; rq[p] = '0; pend[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise every word through port 0
    for (int i = 0; i < NB * NW; i++) begin
      @(negedge clk);
      req[0] = 1; rq[0].we = 1; rq[0].be = '1; rq[0].addr = 32'(i * 8);
      rq[0].wdata = {$urandom, $urandom};
      model[widx(rq[0].addr)] = rq[0].wdata;
      @(posedge clk);
    end
    @(negedge clk); req[0] = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        if (!req[p] && $urandom_range(0, 1)) begin
          req[p] = 1;
          rq[p].addr  = 32'($urandom_range(0, NB * NW - 1) * 8);
          rq[p].we    = ($urandom_range(0, 2) == 0);
          rq[p].be    = 8'($urandom);
          rq[p].wdata = {$urandom, $urandom};
        end
      end
      #1;
      begin
        int per_bank [NB];
        for (int b = 0; b < NB; b++) per_bank[b] = 0;
        for (int p = 0; p < NP; p++) if (gnt[p]) per_bank[rq[p].addr[4:3]]++;
        for (int b = 0; b < NB; b++) begin
          checks++;
          if (per_bank[b] > 1) begin failures++; $display("FAIL two grants on bank %0d", b); end
        end
        if (confl != 0) nconfl++;
      end
      // grants of this cycle: reads see writes of earlier cycles
      for (int p = 0; p < NP; p++) begin
        pgrant[p] = req[p] && gnt[p];
        if (req[p] && gnt[p] && !rq[p].we) begin
          pend[p] = 1'b1;
          pend_exp[p] = model[widx(rq[p].addr)];
        end
      end
      for (int p = 0; p < NP; p++) begin
        if (req[p] && gnt[p] && rq[p].we)
          for (int by = 0; by < 8; by++)
            if (rq[p].be[by]) model[widx(rq[p].addr)][8*by +: 8] = rq[p].wdata[8*by +: 8];
      end
      @(posedge clk);
      #1;
      // responses to the grants of the cycle before
      for (int p = 0; p < NP; p++) begin
        if (pend[p]) begin
          checks++;
          if (!rv[p] || rd[p] !== pend_exp[p]) begin
            failures++; $display("FAIL read port %0d got %h exp %h", p, rd[p], pend_exp[p]);
          end
          nreads++;
        end
        pend[p] = 1'b0;
      end
      for (int p = 0; p < NP; p++) if (pgrant[p]) req[p] = 0;
    end
    checks++;
    if (nconfl == 0 || nreads == 0) begin failures++; $display("FAIL no conflicts seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
