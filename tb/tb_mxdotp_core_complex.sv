// tb_mxdotp_core_complex: one core complex on a small L1 (4 masters,
// 32 banks of 64 words). B and the scales are stored column by column with a
// padded column stride of 72 bytes so that the three streams fall into
// different banks, as a kernel layout would arrange. Runs the MXDOTP kernel for a 1 x 8 output block with inner
// dimension 64 (eight accumulators, FREP body of eight mxdotp replayed eight
// times, A/B/scales streamed by SSR0/1/2) and checks the results against the
// reference model, then checks:
//   - steady-state rate: the 64 mxdotp must issue in at most 64 + 8 cycles
//     from the first issue (one per cycle once the streams run);
//   - result latency: three cycles from issue to register-file write;
//   - scales taken from a register (rs3 not streamed) with all four values
//     of sl selecting the four pairs of the register;
//   - read-after-write stall with a single accumulator;
//   - rejection of an mxdotp without a streamed operand.
module tb_mxdotp_core_complex;
  import mxdotp_pkg::*;
  import mxdotp_ref_pkg::*;

  localparam int K = 64, KW = 8;
  localparam int A_BASE = 0, B_BASE = 32'h40, S_BASE = 32'h4A0, NP = 4, CS = 72;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic iv, ir; logic [31:0] ins;
  logic fv, fr; logic [3:0] fmi; logic [15:0] fmr;
  logic cv; logic [11:0] ca; csr_op_e co; logic [31:0] cw, crd;
  logic sen; logic [2:0] swe; ssr_reg_e sreg; logic [31:0] swd; logic [2:0] sbusy;
  logic ewe, ewr; logic [4:0] ewa; logic [63:0] ewd; logic [4:0] era; logic erv; logic [63:0] erd;
  logic req [NP]; tcdm_req_t rq [NP]; logic gnt [NP]; logic rv [NP]; logic [63:0] rd [NP];
  logic busy; logic [31:0] issued, sts, str, uns, rej, confl;

  mxdotp_core_complex dut (
    .clk_i(clk), .rst_ni(rst_n), .instr_valid_i(iv), .instr_ready_o(ir), .instr_i(ins),
    .frep_valid_i(fv), .frep_ready_o(fr), .frep_max_inst_i(fmi), .frep_max_rpt_i(fmr),
    .csr_valid_i(cv), .csr_addr_i(ca), .csr_op_i(co), .csr_wdata_i(cw), .csr_rdata_o(crd),
    .ssr_en_i(sen), .ssr_cfg_we_i(swe), .ssr_cfg_reg_i(sreg), .ssr_cfg_wdata_i(swd),
    .ssr_busy_o(sbusy), .ext_we_i(ewe), .ext_wready_o(ewr), .ext_waddr_i(ewa),
    .ext_wdata_i(ewd), .ext_raddr_i(era), .ext_rvalid_o(erv), .ext_rdata_o(erd),
    .mem_req_o(req[0:2]), .mem_req_data_o(rq[0:2]), .mem_gnt_i(gnt[0:2]),
    .mem_rvalid_i(rv[0:2]), .mem_rdata_i(rd[0:2]), .busy_o(busy), .issued_o(issued),
    .stall_ssr_o(sts), .stall_raw_o(str), .unsupported_o(uns), .rejected_o(rej));

  mxdotp_tcdm #(.NUM_PORTS(NP), .NUM_BANKS(32), .WORDS_PER_BANK(64)) u_l1 (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .req_data_i(rq), .gnt_o(gnt), .rvalid_o(rv),
    .rdata_o(rd), .conflicts_o(confl));

  int checks = 0, failures = 0;
  logic [63:0] Aw [KW], Bw [8][KW], Sw [8][KW];
  int first_issue = -1, last_issue = -1;
  logic [31:0] issued_d;

  always @(posedge clk) begin
    issued_d <= issued;
    if (rst_n && dut.issue) begin
      if (first_issue < 0) first_issue = cycle;
      last_issue = cycle;
    end
  end

  // latency: every issue is followed by a result write three cycles later
  int lat_q [$];
  always @(posedge clk) if (rst_n) begin
    if (dut.issue) lat_q.push_back(cycle);
    if (dut.res_valid) begin
      checks++;
      if (lat_q.size() == 0 || cycle - lat_q[0] != 3) begin failures++; $display("FAIL latency"); end
      if (lat_q.size() != 0) void'(lat_q.pop_front());
    end
  end

  task automatic mem_write(input int addr, input logic [63:0] d);
    @(negedge clk);
    req[3] = 1; rq[3].addr = 32'(addr); rq[3].we = 1; rq[3].be = '1; rq[3].wdata = d;
    @(posedge clk); while (!gnt[3]) @(posedge clk);
    @(negedge clk); req[3] = 0;
  endtask
  task automatic ssr_cfg(input int k, input ssr_reg_e r, input int v);
    @(negedge clk); swe = 3'(1 << k); sreg = r; swd = 32'(v);
    @(negedge clk); swe = '0;
  endtask
  task automatic stream(input int k, input int base, input int b0, input int s0,
                        input int b1, input int s1);
    ssr_cfg(k, SSR_REG_BOUND0, b0); ssr_cfg(k, SSR_REG_STRIDE0, s0);
    ssr_cfg(k, SSR_REG_BOUND1, b1); ssr_cfg(k, SSR_REG_STRIDE1, s1);
    ssr_cfg(k, SSR_REG_BOUND2, 0);  ssr_cfg(k, SSR_REG_STRIDE2, 0);
    ssr_cfg(k, SSR_REG_BOUND3, 0);  ssr_cfg(k, SSR_REG_STRIDE3, 0);
    ssr_cfg(k, SSR_REG_BASE, base);
  endtask
  task automatic send(input logic [31:0] w);
    @(negedge clk); iv = 1; ins = w;
    @(posedge clk); while (!ir) @(posedge clk);
    @(negedge clk); iv = 0;
  endtask
  task automatic frep(input int ni, input int nr);
    @(negedge clk); while (!fr) @(negedge clk);
    fv = 1; fmi = 4'(ni - 1); fmr = 16'(nr - 1);
    @(negedge clk); fv = 0;
  endtask
  task automatic rfw(input int r, input logic [63:0] v);
    @(negedge clk); ewe = 1; ewa = 5'(r); ewd = v;
    @(posedge clk); while (!ewr) @(posedge clk);
    @(negedge clk); ewe = 0;
  endtask
  task automatic rfr(input int r, output logic [63:0] v);
    @(negedge clk); era = 5'(r); #1;
    while (!erv) begin @(negedge clk); #1; end
    v = erd;
  endtask
  function automatic logic [31:0] mx(input int d, input int s1, input int s2, input int s3,
                                     input int sl);
    return {5'(s3), 2'(sl), 5'(s2), 5'(s1), 3'b000, 5'(d), OPCODE_MXDOTP};
  endfunction
  function automatic logic [7:0] rnd_elem();
    logic [7:0] v;
    do v = 8'($urandom); while (v[6:2] == 5'd31);
    return v;
  endfunction

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] v;
    logic [31:0] e, acc;
    logic sk;
    int raw0;
    iv = 0; ins = 0; fv = 0; fmi = 0; fmr = 0; cv = 0; ca = 0; co = CSR_OP_WRITE; cw = 0;
    sen = 1; swe = 0; sreg = SSR_REG_BASE; swd = 0; ewe = 0; ewa = 0; ewd = 0; era = 0;
    req[3] = 0; rq[3] = '0;
    for (int kw = 0; kw < KW; kw++) begin
      for (int i = 0; i < 8; i++) Aw[kw][8*i +: 8] = rnd_elem();
      for (int n = 0; n < 8; n++) begin
        for (int i = 0; i < 8; i++) Bw[n][kw][8*i +: 8] = rnd_elem();
      end
    end
    for (int n = 0; n < 8; n++) for (int kw = 0; kw < KW; kw++)
      Sw[n][kw] = (kw % 4 == 0) ? {48'h0, 8'($urandom_range(117, 137)), 8'($urandom_range(117, 137))}
                                : Sw[n][kw-1];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int kw = 0; kw < KW; kw++) mem_write(A_BASE + 8 * kw, Aw[kw]);
    for (int n = 0; n < 8; n++) for (int kw = 0; kw < KW; kw++) begin
      mem_write(B_BASE + n * CS + 8 * kw, Bw[n][kw]);
      mem_write(S_BASE + n * CS + 8 * kw, Sw[n][kw]);
    end
    // E4M3
    @(negedge clk); cv = 1; ca = CSR_MXFMT_ADDR; co = CSR_OP_WRITE; cw = 1;
    @(negedge clk); cv = 0;

    // ---------------------------------------------------- kernel
    stream(0, A_BASE, 7, 0, KW - 1, 8);
    stream(1, B_BASE, 7, CS, KW - 1, 8);
    stream(2, S_BASE, 7, CS, KW - 1, 8);
    for (int u = 0; u < 8; u++) rfw(3 + u, 64'hFFFF_FFFF_0000_0000);
    repeat (10) @(posedge clk);   // let the streams fill
    frep(8, KW);
    for (int u = 0; u < 8; u++) send(mx(3 + u, 0, 1, 2, 0));
    while (issued < 64) @(posedge clk);
    repeat (5) @(posedge clk);
    $display("64 mxdotp issued in %0d cycles (%0d SSR stall cycles)", last_issue - first_issue + 1, sts);
    checks++;
    if (last_issue - first_issue + 1 > 64 + 8) begin failures++; $display("FAIL issue rate"); end
    for (int u = 0; u < 8; u++) begin
      acc = 0;
      for (int kw = 0; kw < KW; kw++)
        acc = mxdotp_ref_pkg::mxdotp(1'b1, Aw[kw], Bw[u][kw], {16'h0, Sw[u][kw][15:0], acc}, sk);
      rfr(3 + u, v);
      checks++;
      if (v !== {32'hFFFF_FFFF, acc}) begin failures++; $display("FAIL C[%0d] %h exp %h", u, v, acc); end
    end

    // ---------------------------------------------------- scales from a register, sl = 0..3
    rfw(20, {Sw[3][0][15:0], Sw[2][0][15:0], Sw[1][0][15:0], Sw[0][0][15:0]});
    stream(0, A_BASE, 3, 0, 0, 0);              // A word 0, four times
    stream(1, B_BASE, 3, CS, 0, 0);              // B word 0 of columns 0..3
    for (int u = 0; u < 4; u++) rfw(12 + u, 64'hFFFF_FFFF_3F80_0000);  // C = 1.0
    for (int u = 0; u < 4; u++) send(mx(12 + u, 0, 1, 20, u));
    repeat (10) @(posedge clk);
    for (int u = 0; u < 4; u++) begin
      e = mxdotp_ref_pkg::mxdotp(1'b1, Aw[0], Bw[u][0], {16'h0, Sw[u][0][15:0], 32'h3F80_0000}, sk);
      rfr(12 + u, v);
      checks++;
      if (v[31:0] !== e) begin failures++; $display("FAIL sl=%0d got %h exp %h", u, v, e); end
    end

    // ---------------------------------------------------- single accumulator
    raw0 = int'(str);
    stream(0, A_BASE, 0, 0, 3, 8);
    stream(1, B_BASE, 0, 0, 3, 8);
    stream(2, S_BASE, 0, 0, 3, 8);
    rfw(3, 64'hFFFF_FFFF_0000_0000);
    frep(1, 4);
    send(mx(3, 0, 1, 2, 0));
    while (issued < 64 + 4 + 4) @(posedge clk);
    repeat (6) @(posedge clk);
    acc = 0;
    for (int kw = 0; kw < 4; kw++)
      acc = mxdotp_ref_pkg::mxdotp(1'b1, Aw[kw], Bw[0][kw], {16'h0, Sw[0][kw][15:0], acc}, sk);
    rfr(3, v);
    checks++;
    if (v[31:0] !== acc) begin failures++; $display("FAIL chained %h exp %h", v, acc); end
    checks++;
    if (int'(str) - raw0 < 6) begin failures++; $display("FAIL expected RAW stalls, got %0d", int'(str) - raw0); end

    // ---------------------------------------------------- rejection
    sen = 0;
    send(mx(3, 4, 5, 6, 0));
    repeat (3) @(posedge clk);
    checks++;
    if (rej != 1 || issued != 72) begin failures++; $display("FAIL reject"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
