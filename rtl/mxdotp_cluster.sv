// mxdotp_cluster: eight MXDOTP-extended core complexes sharing one L1.
//
// This is the paper's evaluation system reduced to what it designs and
// builds on: NUM_CORES core complexes (FP side with FREP, SSRs, register
// file and the MXDOTP unit) whose 3*NUM_CORES SSR masters, together with one
// load/store master per core and one DMA master, reach a 128 KiB, 32-bank
// shared scratchpad through a single-cycle crossbar. The integer cores, the
// instruction caches, the DMA engine and the cluster crossbars to the outside
// are not part of this RTL; their connection points are the ports below:
//   core_*  per-core instruction/FREP/CSR/SSR-configuration/register-file
//           ports, driven by what would be the integer core;
//   lsu_*   per-core L1 master (loads and stores of the integer core);
//   dma_*   one L1 master standing in for the DMA engine.
// L1 master port order: SSRk of core c is port 3*c+k, the LSU of core c is
// port 3*NUM_CORES+c, the DMA is the last port.
module mxdotp_cluster
  import mxdotp_pkg::*;
#(
  parameter int unsigned NUM_CORES      = 8,
  parameter int unsigned NUM_BANKS      = 32,
  parameter int unsigned WORDS_PER_BANK = 512,
  parameter int unsigned FREP_DEPTH     = 16,
  localparam int unsigned NUM_PORTS     = 4 * NUM_CORES + 1,
  localparam int unsigned FIW           = $clog2(FREP_DEPTH)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // per-core control (integer-core side)
  input  logic        core_instr_valid_i  [NUM_CORES],
  output logic        core_instr_ready_o  [NUM_CORES],
  input  logic [31:0] core_instr_i        [NUM_CORES],
  input  logic        core_frep_valid_i   [NUM_CORES],
  output logic        core_frep_ready_o   [NUM_CORES],
  input  logic [FIW-1:0] core_frep_max_inst_i [NUM_CORES],
  input  logic [15:0] core_frep_max_rpt_i [NUM_CORES],
  input  logic        core_csr_valid_i    [NUM_CORES],
  input  logic [11:0] core_csr_addr_i     [NUM_CORES],
  input  csr_op_e     core_csr_op_i       [NUM_CORES],
  input  logic [31:0] core_csr_wdata_i    [NUM_CORES],
  output logic [31:0] core_csr_rdata_o    [NUM_CORES],
  input  logic        core_ssr_en_i       [NUM_CORES],
  input  logic [2:0]  core_ssr_cfg_we_i   [NUM_CORES],
  input  ssr_reg_e    core_ssr_cfg_reg_i  [NUM_CORES],
  input  logic [31:0] core_ssr_cfg_wdata_i[NUM_CORES],
  output logic [2:0]  core_ssr_busy_o     [NUM_CORES],
  input  logic        core_rf_we_i        [NUM_CORES],
  output logic        core_rf_wready_o    [NUM_CORES],
  input  logic [4:0]  core_rf_waddr_i     [NUM_CORES],
  input  logic [63:0] core_rf_wdata_i     [NUM_CORES],
  input  logic [4:0]  core_rf_raddr_i     [NUM_CORES],
  output logic        core_rf_rvalid_o    [NUM_CORES],
  output logic [63:0] core_rf_rdata_o     [NUM_CORES],
  output logic        core_busy_o         [NUM_CORES],
  output logic [31:0] core_issued_o       [NUM_CORES],
  output logic [31:0] core_stall_ssr_o    [NUM_CORES],
  output logic [31:0] core_stall_raw_o    [NUM_CORES],
  output logic [31:0] core_unsupported_o  [NUM_CORES],
  output logic [31:0] core_rejected_o     [NUM_CORES],
  // per-core load/store master on L1
  input  logic        lsu_req_i      [NUM_CORES],
  input  tcdm_req_t   lsu_req_data_i [NUM_CORES],
  output logic        lsu_gnt_o      [NUM_CORES],
  output logic        lsu_rvalid_o   [NUM_CORES],
  output logic [63:0] lsu_rdata_o    [NUM_CORES],
  // DMA master on L1
  input  logic        dma_req_i,
  input  tcdm_req_t   dma_req_data_i,
  output logic        dma_gnt_o,
  output logic        dma_rvalid_o,
  output logic [63:0] dma_rdata_o,
  output logic [31:0] l1_conflicts_o
);

  logic        req    [NUM_PORTS];
  tcdm_req_t   req_d  [NUM_PORTS];
  logic        gnt    [NUM_PORTS];
  logic        rvalid [NUM_PORTS];
  logic [63:0] rdata  [NUM_PORTS];

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    logic        ssr_req    [3];
    tcdm_req_t   ssr_req_d  [3];
    logic        ssr_gnt    [3];
    logic        ssr_rvalid [3];
    logic [63:0] ssr_rdata  [3];

    mxdotp_core_complex #(.FREP_DEPTH(FREP_DEPTH)) u_cc (
      .clk_i, .rst_ni,
      .instr_valid_i  (core_instr_valid_i[c]),
      .instr_ready_o  (core_instr_ready_o[c]),
      .instr_i        (core_instr_i[c]),
      .frep_valid_i   (core_frep_valid_i[c]),
      .frep_ready_o   (core_frep_ready_o[c]),
      .frep_max_inst_i(core_frep_max_inst_i[c]),
      .frep_max_rpt_i (core_frep_max_rpt_i[c]),
      .csr_valid_i    (core_csr_valid_i[c]),
      .csr_addr_i     (core_csr_addr_i[c]),
      .csr_op_i       (core_csr_op_i[c]),
      .csr_wdata_i    (core_csr_wdata_i[c]),
      .csr_rdata_o    (core_csr_rdata_o[c]),
      .ssr_en_i       (core_ssr_en_i[c]),
      .ssr_cfg_we_i   (core_ssr_cfg_we_i[c]),
      .ssr_cfg_reg_i  (core_ssr_cfg_reg_i[c]),
      .ssr_cfg_wdata_i(core_ssr_cfg_wdata_i[c]),
      .ssr_busy_o     (core_ssr_busy_o[c]),
      .ext_we_i       (core_rf_we_i[c]),
      .ext_wready_o   (core_rf_wready_o[c]),
      .ext_waddr_i    (core_rf_waddr_i[c]),
      .ext_wdata_i    (core_rf_wdata_i[c]),
      .ext_raddr_i    (core_rf_raddr_i[c]),
      .ext_rvalid_o   (core_rf_rvalid_o[c]),
      .ext_rdata_o    (core_rf_rdata_o[c]),
      .mem_req_o      (ssr_req),
      .mem_req_data_o (ssr_req_d),
      .mem_gnt_i      (ssr_gnt),
      .mem_rvalid_i   (ssr_rvalid),
      .mem_rdata_i    (ssr_rdata),
      .busy_o         (core_busy_o[c]),
      .issued_o       (core_issued_o[c]),
      .stall_ssr_o    (core_stall_ssr_o[c]),
      .stall_raw_o    (core_stall_raw_o[c]),
      .unsupported_o  (core_unsupported_o[c]),
      .rejected_o     (core_rejected_o[c])
    );

    for (genvar k = 0; k < 3; k++) begin : g_port
      assign req[3*c+k]   = ssr_req[k];
      assign req_d[3*c+k] = ssr_req_d[k];
      assign ssr_gnt[k]    = gnt[3*c+k];
      assign ssr_rvalid[k] = rvalid[3*c+k];
      assign ssr_rdata[k]  = rdata[3*c+k];
    end

    assign req[3*NUM_CORES+c]   = lsu_req_i[c];
    assign req_d[3*NUM_CORES+c] = lsu_req_data_i[c];
    assign lsu_gnt_o[c]         = gnt[3*NUM_CORES+c];
    assign lsu_rvalid_o[c]      = rvalid[3*NUM_CORES+c];
    assign lsu_rdata_o[c]       = rdata[3*NUM_CORES+c];
  end

  assign req[NUM_PORTS-1]   = dma_req_i;
  assign req_d[NUM_PORTS-1] = dma_req_data_i;
  assign dma_gnt_o          = gnt[NUM_PORTS-1];
  assign dma_rvalid_o       = rvalid[NUM_PORTS-1];
  assign dma_rdata_o        = rdata[NUM_PORTS-1];

  mxdotp_tcdm #(
    .NUM_PORTS     (NUM_PORTS),
    .NUM_BANKS     (NUM_BANKS),
    .WORDS_PER_BANK(WORDS_PER_BANK)
  ) u_l1 (
    .clk_i, .rst_ni,
    .req_i(req), .req_data_i(req_d), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata),
    .conflicts_o(l1_conflicts_o)
  );

endmodule
