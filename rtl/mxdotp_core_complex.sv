// mxdotp_core_complex: the floating-point side of one MXDOTP-extended core.
//
// Instructions sent by the integer core pass the FREP sequencer, are decoded
// and issued to the MXDOTP unit one per cycle. Operand fetch follows the
// paper's integration: with SSRs enabled, registers ft0, ft1 and ft2 read
// from SSR0, SSR1 and SSR2 instead of the register file. The register file
// has three read ports; port 2 always reads the accumulator rd, ports 0 and
// 1 read rs1 and rs2, or rs3 when rs1 or rs2 is streamed. An mxdotp whose
// four sources would need four register-file reads is rejected (the paper:
// at least one operand must come from an SSR). The scale word and the
// accumulator are merged into the third FPU operand (mxdotp_opc_merge), and
// the FP32 result is written back to rd, NaN-boxed to 64 bits.
//
// Issue stalls (own choice, the paper's kernels avoid them by using eight
// accumulators for a three-stage unit):
//   - a streamed operand whose SSR has no data yet;
//   - a register-file source or rd still being computed by the unit
//     (read-after-write on the accumulator).
// Instructions other than mxdotp belong to the baseline FPU, which is not
// part of this design: they are consumed and counted in unsupported_o.
//
// External ports stand for the parts of the core that are not built here:
// the integer core's CSR accesses, SSR configuration writes and the
// load/store path to the register file (ext_*). The external register-file
// write yields to result write-back (ext_wready_o); the external read uses
// read port 2 and is served in cycles without an mxdotp at the issue stage.
module mxdotp_core_complex
  import mxdotp_pkg::*;
#(
  parameter int unsigned FREP_DEPTH = 16,
  parameter int unsigned SSR_FIFO   = 4,
  localparam int unsigned FIW       = $clog2(FREP_DEPTH)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // instruction stream and FREP commands from the integer core
  input  logic              instr_valid_i,
  output logic              instr_ready_o,
  input  logic [31:0]       instr_i,
  input  logic              frep_valid_i,
  output logic              frep_ready_o,
  input  logic [FIW-1:0]    frep_max_inst_i,
  input  logic [15:0]       frep_max_rpt_i,
  // CSR access (format register)
  input  logic              csr_valid_i,
  input  logic [11:0]       csr_addr_i,
  input  csr_op_e           csr_op_i,
  input  logic [31:0]       csr_wdata_i,
  output logic [31:0]       csr_rdata_o,
  // SSR control
  input  logic              ssr_en_i,
  input  logic [2:0]        ssr_cfg_we_i,
  input  ssr_reg_e          ssr_cfg_reg_i,
  input  logic [31:0]       ssr_cfg_wdata_i,
  output logic [2:0]        ssr_busy_o,
  // load/store side of the register file
  input  logic              ext_we_i,
  output logic              ext_wready_o,
  input  logic [4:0]        ext_waddr_i,
  input  logic [63:0]       ext_wdata_i,
  input  logic [4:0]        ext_raddr_i,
  output logic              ext_rvalid_o,
  output logic [63:0]       ext_rdata_o,
  // SSR masters on the L1 interconnect
  output logic              mem_req_o      [3],
  output tcdm_req_t         mem_req_data_o [3],
  input  logic              mem_gnt_i      [3],
  input  logic              mem_rvalid_i   [3],
  input  logic [63:0]       mem_rdata_i    [3],
  // status
  output logic              busy_o,
  output logic [31:0]       issued_o,        // mxdotp instructions issued
  output logic [31:0]       stall_ssr_o,     // cycles stalled on an empty SSR
  output logic [31:0]       stall_raw_o,     // cycles stalled on a pending register
  output logic [31:0]       unsupported_o,   // instructions dropped
  output logic [31:0]       rejected_o       // mxdotp needing four RF reads
);

  // ------------------------------------------------------------ FREP
  logic        fp_valid, fp_ready, frep_busy;
  logic [31:0] fp_instr;

  mxdotp_frep #(.DEPTH(FREP_DEPTH)) u_frep (
    .clk_i, .rst_ni,
    .frep_valid_i, .frep_ready_o, .frep_max_inst_i, .frep_max_rpt_i,
    .in_valid_i (instr_valid_i),
    .in_ready_o (instr_ready_o),
    .in_instr_i (instr_i),
    .out_valid_o(fp_valid),
    .out_ready_i(fp_ready),
    .out_instr_o(fp_instr),
    .busy_o     (frep_busy)
  );

  // ------------------------------------------------------------ decode
  mxdotp_instr_t dec;
  mxdotp_decoder u_dec (.instr_i(fp_instr), .dec_o(dec));

  fp8_fmt_e fmt;
  mxdotp_fmt_csr u_csr (
    .clk_i, .rst_ni, .csr_valid_i, .csr_addr_i, .csr_op_i, .csr_wdata_i,
    .csr_rdata_o, .csr_hit_o(), .fmt_o(fmt)
  );

  // ------------------------------------------------------------ SSRs
  logic        ssr_valid [3];
  logic [63:0] ssr_data  [3];
  logic        ssr_pop   [3];

  for (genvar k = 0; k < 3; k++) begin : g_ssr
    mxdotp_ssr #(.FIFO_DEPTH(SSR_FIFO)) u_ssr (
      .clk_i, .rst_ni,
      .cfg_we_i      (ssr_cfg_we_i[k]),
      .cfg_reg_i     (ssr_cfg_reg_i),
      .cfg_wdata_i   (ssr_cfg_wdata_i),
      .busy_o        (ssr_busy_o[k]),
      .mem_req_o     (mem_req_o[k]),
      .mem_req_data_o(mem_req_data_o[k]),
      .mem_gnt_i     (mem_gnt_i[k]),
      .mem_rvalid_i  (mem_rvalid_i[k]),
      .mem_rdata_i   (mem_rdata_i[k]),
      .data_valid_o  (ssr_valid[k]),
      .data_o        (ssr_data[k]),
      .data_pop_i    (ssr_pop[k])
    );
  end

  // ------------------------------------------------------------ operands
  logic [4:0]  rf_raddr [3];
  logic [63:0] rf_rdata [3];
  logic        rf_we;
  logic [4:0]  rf_waddr;
  logic [63:0] rf_wdata;

  logic        map1, map2, map3;       // source streamed from an SSR
  logic [63:0] val1, val2, val3;
  logic        is_mx, illegal, ssr_ok, hazard, issue;
  logic [31:0] pending_q;
  logic [63:0] opc;

  function automatic logic streamed(input logic en, input logic [4:0] r);
    return en && (r < 5'd3);
  endfunction

  always_comb begin
    is_mx = fp_valid && dec.valid;
    map1  = streamed(ssr_en_i, dec.rs1);
    map2  = streamed(ssr_en_i, dec.rs2);
    map3  = streamed(ssr_en_i, dec.rs3);

    val1 = map1 ? ssr_data[dec.rs1[1:0]] : rf_rdata[0];
    val2 = map2 ? ssr_data[dec.rs2[1:0]] : rf_rdata[1];
    if (map3)      val3 = ssr_data[dec.rs3[1:0]];
    else if (map1) val3 = rf_rdata[0];
    else           val3 = rf_rdata[1];

    illegal = !map1 && !map2 && !map3;

    ssr_ok = 1'b1;
    if (map1 && !ssr_valid[dec.rs1[1:0]]) ssr_ok = 1'b0;
    if (map2 && !ssr_valid[dec.rs2[1:0]]) ssr_ok = 1'b0;
    if (map3 && !ssr_valid[dec.rs3[1:0]]) ssr_ok = 1'b0;

    hazard = pending_q[dec.rd] ||
             (!map1 && pending_q[dec.rs1]) ||
             (!map2 && pending_q[dec.rs2]) ||
             (!map3 && pending_q[dec.rs3]);

    issue    = is_mx && !illegal && ssr_ok && !hazard;
    fp_ready = issue || (fp_valid && (!dec.valid || illegal));

    for (int k = 0; k < 3; k++)
      ssr_pop[k] = issue && ((map1 && dec.rs1[1:0] == 2'(k)) ||
                             (map2 && dec.rs2[1:0] == 2'(k)) ||
                             (map3 && dec.rs3[1:0] == 2'(k)));
  end

  // read-port addresses (kept apart from the block above, which reads the data)
  assign rf_raddr[0] = streamed(ssr_en_i, dec.rs1) ? dec.rs3 : dec.rs1;
  assign rf_raddr[1] = streamed(ssr_en_i, dec.rs2) ? dec.rs3 : dec.rs2;
  assign rf_raddr[2] = (fp_valid && dec.valid) ? dec.rd : ext_raddr_i;

  mxdotp_opc_merge u_merge (
    .scales_i(val3), .sl_i(dec.sl), .acc_i(rf_rdata[2]), .opc_o(opc)
  );

  // ------------------------------------------------------------ unit
  logic        res_valid;
  logic [31:0] res;
  logic [4:0]  res_tag;

  mxdotp_unit #(.TAG_W(5)) u_mxdotp (
    .clk_i, .rst_ni,
    .valid_i(issue),
    .fmt_i  (fmt),
    .opa_i  (val1),
    .opb_i  (val2),
    .opc_i  (opc),
    .tag_i  (dec.rd),
    .valid_o(res_valid),
    .res_o  (res),
    .tag_o  (res_tag)
  );

  // ------------------------------------------------------------ write-back
  always_comb begin
    rf_we        = res_valid || ext_we_i;
    rf_waddr     = res_valid ? res_tag : ext_waddr_i;
    rf_wdata     = res_valid ? {32'hFFFF_FFFF, res} : ext_wdata_i;
    ext_wready_o = !res_valid;
    ext_rvalid_o = !is_mx;
    ext_rdata_o  = rf_rdata[2];
  end

  mxdotp_fp_regfile u_rf (
    .clk_i, .rst_ni,
    .raddr_i(rf_raddr), .rdata_o(rf_rdata),
    .we_i(rf_we), .waddr_i(rf_waddr), .wdata_i(rf_wdata)
  );

  // ------------------------------------------------------------ bookkeeping
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pending_q     <= '0;
      issued_o      <= '0;
      stall_ssr_o   <= '0;
      stall_raw_o   <= '0;
      unsupported_o <= '0;
      rejected_o    <= '0;
    end else begin
      logic [31:0] p;
      p = pending_q;
      if (res_valid) p[res_tag] = 1'b0;
      if (issue)     p[dec.rd]  = 1'b1;
      pending_q <= p;
      if (issue) issued_o <= issued_o + 1;
      if (is_mx && !illegal && !ssr_ok) stall_ssr_o <= stall_ssr_o + 1;
      if (is_mx && !illegal && ssr_ok && hazard) stall_raw_o <= stall_raw_o + 1;
      if (fp_valid && !dec.valid) unsupported_o <= unsupported_o + 1;
      if (is_mx && illegal) rejected_o <= rejected_o + 1;
    end
  end

  assign busy_o = frep_busy || fp_valid || (pending_q != '0) ||
                  ssr_busy_o[0] || ssr_busy_o[1] || ssr_busy_o[2];

  // An external write must not collide with a result write-back.
  assert property (@(posedge clk_i) disable iff (!rst_ni) ext_we_i && res_valid |-> !ext_wready_o);

endmodule
