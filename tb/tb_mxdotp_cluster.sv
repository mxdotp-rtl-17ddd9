// tb_mxdotp_cluster: end-to-end test of the eight-core cluster at its
// default size (8 cores, 128 KiB L1 in 32 banks).
//
// A DMA-port preload places an MXFP8 matrix multiplication C = A x B in L1:
// A is 8 x 64 (one row per core), B is 64 x 16 (stored transposed), with one
// E8M0 scale per 32-element block of every row of A and column of B; the
// scale pairs are laid out as the kernel streams them (one pair per mxdotp,
// low 16 bits of each word). Every core then runs the MXDOTP kernel of the
// paper on its row: SSR0 streams A, SSR1 streams B, SSR2 the scales, an FREP
// body of eight mxdotp instructions with eight accumulators is replayed over
// the inner dimension, for each of the two blocks of eight output columns.
// Results are read back through the register-file port and compared with
// the bit-exact reference model, chained step by step like the hardware.
//
// Mechanisms that must each occur at least once: SSR stalls, L1 bank
// conflicts, FREP replay, an FP8 format switch (core 0 changes from E5M2 to
// E4M3 between its two column blocks; odd cores run E4M3), overflow to Inf
// (core 7 uses very large scales), a read-after-write stall (core 0 reruns
// one dot product with a single accumulator), a rejected mxdotp (no SSR
// operand), an unsupported instruction and an L1 access from a load/store
// port.
module tb_mxdotp_cluster;
  import mxdotp_pkg::*;
  import mxdotp_ref_pkg::*;

  localparam int NC = 8, K = 64, KW = K / 8, N = 16, NBLK = N / 8, KB = K / 32;
  localparam int A_BASE = 32'h0000, B_BASE = 32'h1000, S_BASE = 32'h4000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic        instr_valid [NC]; logic instr_ready [NC]; logic [31:0] instr [NC];
  logic        frep_valid [NC];  logic frep_ready [NC];
  logic [3:0]  frep_mi [NC];     logic [15:0] frep_mr [NC];
  logic        csr_valid [NC];   logic [11:0] csr_addr [NC]; csr_op_e csr_op [NC];
  logic [31:0] csr_wdata [NC];   logic [31:0] csr_rdata [NC];
  logic        ssr_en [NC];      logic [2:0] ssr_we [NC]; ssr_reg_e ssr_reg [NC];
  logic [31:0] ssr_wd [NC];      logic [2:0] ssr_busy [NC];
  logic        rf_we [NC];       logic rf_wready [NC]; logic [4:0] rf_waddr [NC];
  logic [63:0] rf_wdata [NC];    logic [4:0] rf_raddr [NC]; logic rf_rvalid [NC];
  logic [63:0] rf_rdata [NC];
  logic        busy [NC];
  logic [31:0] issued [NC], st_ssr [NC], st_raw [NC], unsup [NC], rej [NC];
  logic        lsu_req [NC];     tcdm_req_t lsu_rq [NC]; logic lsu_gnt [NC];
  logic        lsu_rv [NC];      logic [63:0] lsu_rd [NC];
  logic        dma_req;          tcdm_req_t dma_rq; logic dma_gnt, dma_rv; logic [63:0] dma_rd;
  logic [31:0] confl;

  mxdotp_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_instr_valid_i(instr_valid), .core_instr_ready_o(instr_ready), .core_instr_i(instr),
    .core_frep_valid_i(frep_valid), .core_frep_ready_o(frep_ready),
    .core_frep_max_inst_i(frep_mi), .core_frep_max_rpt_i(frep_mr),
    .core_csr_valid_i(csr_valid), .core_csr_addr_i(csr_addr), .core_csr_op_i(csr_op),
    .core_csr_wdata_i(csr_wdata), .core_csr_rdata_o(csr_rdata),
    .core_ssr_en_i(ssr_en), .core_ssr_cfg_we_i(ssr_we), .core_ssr_cfg_reg_i(ssr_reg),
    .core_ssr_cfg_wdata_i(ssr_wd), .core_ssr_busy_o(ssr_busy),
    .core_rf_we_i(rf_we), .core_rf_wready_o(rf_wready), .core_rf_waddr_i(rf_waddr),
    .core_rf_wdata_i(rf_wdata), .core_rf_raddr_i(rf_raddr), .core_rf_rvalid_o(rf_rvalid),
    .core_rf_rdata_o(rf_rdata), .core_busy_o(busy), .core_issued_o(issued),
    .core_stall_ssr_o(st_ssr), .core_stall_raw_o(st_raw), .core_unsupported_o(unsup),
    .core_rejected_o(rej),
    .lsu_req_i(lsu_req), .lsu_req_data_i(lsu_rq), .lsu_gnt_o(lsu_gnt), .lsu_rvalid_o(lsu_rv),
    .lsu_rdata_o(lsu_rd),
    .dma_req_i(dma_req), .dma_req_data_i(dma_rq), .dma_gnt_o(dma_gnt), .dma_rvalid_o(dma_rv),
    .dma_rdata_o(dma_rd), .l1_conflicts_o(confl)
  );

  int checks = 0, failures = 0, skipped = 0;
  int ndone = 0;
  int n_conflict_cycles = 0, n_inf = 0, n_fmt_switch = 0, n_frep = 0;

  always @(posedge clk) if (rst_n && confl != 0) n_conflict_cycles++;

  // ------------------------------------------------------------ data
  logic [7:0]  A  [NC][K];
  logic [7:0]  Bt [N][K];
  logic [7:0]  XA [NC][KB];
  logic [7:0]  XB [N][KB];
  logic        fmt_of [NC][NBLK];

  function automatic logic [7:0] rnd_elem();
    logic [7:0] v;
    do v = 8'($urandom); while (v[6:2] == 5'd31);
    return v;
  endfunction

  function automatic logic [63:0] a_word(input int m, input int kw);
    logic [63:0] w;
    for (int i = 0; i < 8; i++) w[8*i +: 8] = A[m][8*kw + i];
    return w;
  endfunction
  function automatic logic [63:0] b_word(input int n, input int kw);
    logic [63:0] w;
    for (int i = 0; i < 8; i++) w[8*i +: 8] = Bt[n][8*kw + i];
    return w;
  endfunction

  // reference dot product chain of row m, column n
  function automatic logic [31:0] ref_c(input int m, input int n, input logic f,
                                        output logic sk);
    logic [31:0] acc;
    logic        s;
    acc = 32'd0;
    sk  = 1'b0;
    for (int kw = 0; kw < KW; kw++) begin
      acc = mxdotp_ref_pkg::mxdotp(f, a_word(m, kw), b_word(n, kw),
                                   {16'h0, XA[m][kw/4], XB[n][kw/4], acc}, s);
      sk |= s;
    end
    return acc;
  endfunction

  // ------------------------------------------------------------ drivers
  task automatic dma_write(input int addr, input logic [63:0] d);
    @(negedge clk);
    dma_req = 1; dma_rq.addr = 32'(addr); dma_rq.we = 1; dma_rq.be = '1; dma_rq.wdata = d;
    @(posedge clk);
    while (!dma_gnt) @(posedge clk);
    @(negedge clk); dma_req = 0;
  endtask

  task automatic ssr_cfg(input int c, input int k, input ssr_reg_e r, input int v);
    @(negedge clk);
    ssr_we[c] = 3'(1 << k); ssr_reg[c] = r; ssr_wd[c] = 32'(v);
    @(negedge clk);
    ssr_we[c] = '0;
  endtask

  task automatic ssr_stream(input int c, input int k, input int base,
                            input int b0, input int s0, input int b1, input int s1,
                            input int b2, input int s2);
    ssr_cfg(c, k, SSR_REG_BOUND0, b0);  ssr_cfg(c, k, SSR_REG_STRIDE0, s0);
    ssr_cfg(c, k, SSR_REG_BOUND1, b1);  ssr_cfg(c, k, SSR_REG_STRIDE1, s1);
    ssr_cfg(c, k, SSR_REG_BOUND2, b2);  ssr_cfg(c, k, SSR_REG_STRIDE2, s2);
    ssr_cfg(c, k, SSR_REG_BOUND3, 0);   ssr_cfg(c, k, SSR_REG_STRIDE3, 0);
    ssr_cfg(c, k, SSR_REG_BASE, base);
  endtask

  task automatic set_fmt(input int c, input logic f);
    @(negedge clk);
    csr_valid[c] = 1; csr_addr[c] = CSR_MXFMT_ADDR; csr_op[c] = CSR_OP_WRITE;
    csr_wdata[c] = {31'd0, f};
    @(negedge clk);
    csr_valid[c] = 0;
  endtask

  task automatic send_instr(input int c, input logic [31:0] w);
    @(negedge clk);
    instr_valid[c] = 1; instr[c] = w;
    @(posedge clk);
    while (!instr_ready[c]) @(posedge clk);
    @(negedge clk); instr_valid[c] = 0;
  endtask

  task automatic send_frep(input int c, input int ninst, input int nrpt);
    @(negedge clk);
    while (!frep_ready[c]) @(negedge clk);
    frep_valid[c] = 1; frep_mi[c] = 4'(ninst - 1); frep_mr[c] = 16'(nrpt - 1);
    @(negedge clk); frep_valid[c] = 0;
    n_frep++;
  endtask

  task automatic rf_write(input int c, input int r, input logic [63:0] v);
    @(negedge clk);
    rf_we[c] = 1; rf_waddr[c] = 5'(r); rf_wdata[c] = v;
    @(posedge clk);
    while (!rf_wready[c]) @(posedge clk);
    @(negedge clk); rf_we[c] = 0;
  endtask

  task automatic rf_read(input int c, input int r, output logic [63:0] v);
    @(negedge clk);
    rf_raddr[c] = 5'(r);
    #1;
    while (!rf_rvalid[c]) begin @(negedge clk); #1; end
    v = rf_rdata[c];
  endtask

  function automatic logic [31:0] mx(input int rd, input int rs1, input int rs2,
                                     input int rs3, input int sl);
    return {5'(rs3), 2'(sl), 5'(rs2), 5'(rs1), 3'b000, 5'(rd), OPCODE_MXDOTP};
  endfunction

  task automatic wait_issued(input int c, input int n);
    while (issued[c] < 32'(n)) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  task automatic check_block(input int c, input int nb);
    logic [63:0] v;
    logic [31:0] e;
    logic        sk;
    for (int u = 0; u < 8; u++) begin
      rf_read(c, 3 + u, v);
      e = ref_c(c, 8 * nb + u, fmt_of[c][nb], sk);
      if (v[31:0] == 32'h7F80_0000 || v[31:0] == 32'hFF80_0000) n_inf++;
      if (sk) begin skipped++; continue; end
      checks++;
      if (v[31:0] !== e || v[63:32] !== 32'hFFFF_FFFF) begin
        failures++;
        $display("FAIL core %0d C[%0d][%0d] got %h exp %h", c, c, 8 * nb + u, v, e);
      end
    end
  endtask

  task automatic run_core(input int c);
    int sbase;
    sbase = S_BASE + c * 32'h800;
    set_fmt(c, fmt_of[c][0]);
    ssr_stream(c, 0, A_BASE + c * K, 7, 0, KW - 1, 8, NBLK - 1, 0);
    ssr_stream(c, 1, B_BASE,        7, K, KW - 1, 8, NBLK - 1, 8 * K);
    ssr_stream(c, 2, sbase,         7, KW * 8, KW - 1, 8, NBLK - 1, 8 * KW * 8);
    for (int nb = 0; nb < NBLK; nb++) begin
      if (nb > 0 && fmt_of[c][nb] != fmt_of[c][nb-1]) begin
        set_fmt(c, fmt_of[c][nb]);
        n_fmt_switch++;
      end
      for (int u = 0; u < 8; u++) rf_write(c, 3 + u, 64'hFFFF_FFFF_0000_0000);
      send_frep(c, 8, KW);
      for (int u = 0; u < 8; u++) send_instr(c, mx(3 + u, 0, 1, 2, 0));
      wait_issued(c, (nb + 1) * 8 * KW);
      check_block(c, nb);
    end
  endtask

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] v;
    logic [31:0] e;
    logic        sk;
    int          raw0;
    dma_req = 0; dma_rq = '0;
    for (int c = 0; c < NC; c++) begin
      instr_valid[c] = 0; instr[c] = 0; frep_valid[c] = 0; frep_mi[c] = 0; frep_mr[c] = 0;
      csr_valid[c] = 0; csr_addr[c] = 0; csr_op[c] = CSR_OP_WRITE; csr_wdata[c] = 0;
      ssr_en[c] = 1; ssr_we[c] = 0; ssr_reg[c] = SSR_REG_BASE; ssr_wd[c] = 0;
      rf_we[c] = 0; rf_waddr[c] = 0; rf_wdata[c] = 0; rf_raddr[c] = 0;
      lsu_req[c] = 0; lsu_rq[c] = '0;
    end
    // data
    for (int m = 0; m < NC; m++) for (int k = 0; k < K; k++) A[m][k] = rnd_elem();
    for (int n = 0; n < N; n++)  for (int k = 0; k < K; k++) Bt[n][k] = rnd_elem();
    for (int m = 0; m < NC; m++) for (int b = 0; b < KB; b++)
      XA[m][b] = (m == 7) ? 8'd250 : 8'(127 + int'($urandom_range(0, 20)) - 10);
    for (int n = 0; n < N; n++) for (int b = 0; b < KB; b++)
      XB[n][b] = 8'(127 + int'($urandom_range(0, 20)) - 10);
    for (int c = 0; c < NC; c++) begin
      fmt_of[c][0] = (c % 2 == 1);
      fmt_of[c][1] = (c % 2 == 1) || (c == 0);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // preload L1 through the DMA port
    for (int m = 0; m < NC; m++) for (int kw = 0; kw < KW; kw++)
      dma_write(A_BASE + m * K + 8 * kw, a_word(m, kw));
    for (int n = 0; n < N; n++) for (int kw = 0; kw < KW; kw++)
      dma_write(B_BASE + n * K + 8 * kw, b_word(n, kw));
    for (int c = 0; c < NC; c++) for (int n = 0; n < N; n++) for (int kw = 0; kw < KW; kw++)
      dma_write(S_BASE + c * 32'h800 + (n * KW + kw) * 8, {48'h0, XA[c][kw/4], XB[n][kw/4]});

    // load/store port of core 0 reads back one word of A
    @(negedge clk);
    lsu_req[0] = 1; lsu_rq[0].addr = A_BASE + 8; lsu_rq[0].we = 0; lsu_rq[0].be = '1;
    @(posedge clk); while (!lsu_gnt[0]) @(posedge clk);
    @(negedge clk); lsu_req[0] = 0;   // response is valid in the cycle after the grant
    checks++;
    if (!lsu_rv[0] || lsu_rd[0] !== a_word(0, 1)) begin failures++; $display("FAIL lsu read"); end

    // all cores run the kernel at the same time
    for (int c = 0; c < NC; c++) begin
      fork
        automatic int cc = c;
        begin
          run_core(cc);
          ndone++;
        end
      join_none
    end
    while (ndone < NC) @(posedge clk);

    // core 0: one dot product with a single accumulator (read-after-write)
    raw0 = int'(st_raw[0]);
    ssr_stream(0, 0, A_BASE, 0, 0, KW - 1, 8, 0, 0);
    ssr_stream(0, 1, B_BASE, 0, 0, KW - 1, 8, 0, 0);
    ssr_stream(0, 2, S_BASE, 0, 0, KW - 1, 8, 0, 0);
    rf_write(0, 3, 64'hFFFF_FFFF_0000_0000);
    send_frep(0, 1, KW);
    send_instr(0, mx(3, 0, 1, 2, 0));
    wait_issued(0, 2 * 8 * KW + KW);
    rf_read(0, 3, v);
    e = ref_c(0, 0, 1'b1, sk);
    if (!sk) begin
      checks++;
      if (v[31:0] !== e) begin failures++; $display("FAIL single-accumulator result %h exp %h", v, e); end
    end

    // core 1: an mxdotp without any streamed operand is rejected, an
    // instruction of the baseline FPU is not supported here
    ssr_en[1] = 0;
    send_instr(1, mx(3, 4, 5, 6, 0));
    send_instr(1, 32'h0020_F053);   // an OP-FP instruction
    repeat (5) @(posedge clk);
    checks++;
    if (rej[1] != 1 || unsup[1] != 1 || issued[1] != 32'(2 * 8 * KW)) begin
      failures++; $display("FAIL reject/unsupported counters %0d %0d", rej[1], unsup[1]);
    end

    // mechanisms
    begin
      int tot_ssr;
      tot_ssr = 0;
      for (int c = 0; c < NC; c++) tot_ssr += int'(st_ssr[c]);
      $display("SSR stall cycles %0d, L1 conflict cycles %0d, RAW stall cycles %0d, FREP %0d, fmt switches %0d, Inf results %0d, skipped %0d",
               tot_ssr, n_conflict_cycles, int'(st_raw[0]) - raw0, n_frep, n_fmt_switch, n_inf, skipped);
      checks++; if (tot_ssr == 0)           begin failures++; $display("FAIL no SSR stall"); end
      checks++; if (n_conflict_cycles == 0) begin failures++; $display("FAIL no bank conflict"); end
      checks++; if (int'(st_raw[0]) - raw0 == 0) begin failures++; $display("FAIL no RAW stall"); end
      checks++; if (n_frep == 0)            begin failures++; $display("FAIL no FREP"); end
      checks++; if (n_fmt_switch == 0)      begin failures++; $display("FAIL no format switch"); end
      checks++; if (n_inf == 0)             begin failures++; $display("FAIL no overflow"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
