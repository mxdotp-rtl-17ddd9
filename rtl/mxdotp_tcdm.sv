// mxdotp_tcdm: the cluster's shared L1 scratchpad with its single-cycle
// interconnect.
//
// NUM_BANKS word-interleaved banks of 64-bit words (128 KiB in 32 banks by
// default, as in the paper's cluster) are reached by NUM_PORTS masters
// through a full crossbar. Address bits [3 +: log2(NUM_BANKS)] select the
// bank, the bits above select the row. Each bank grants one request per
// cycle; competing requests are served round-robin, and a master that is
// not granted keeps its request up (a bank-conflict stall). A granted read
// returns its data with rvalid in the next cycle; writes honour the byte
// enables. The paper gives the size, the bank count and the single-cycle
// latency; the arbitration policy and the interleaving are this design's
// choices. The banks are plain arrays (stand-ins for SRAM macros) and are
// not reset.
module mxdotp_tcdm
  import mxdotp_pkg::*;
#(
  parameter int unsigned NUM_PORTS      = 33,
  parameter int unsigned NUM_BANKS      = 32,
  parameter int unsigned WORDS_PER_BANK = 512,
  localparam int unsigned BW            = $clog2(NUM_BANKS),
  localparam int unsigned RW            = $clog2(WORDS_PER_BANK),
  localparam int unsigned PW            = $clog2(NUM_PORTS)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_i    [NUM_PORTS],
  input  tcdm_req_t   req_data_i [NUM_PORTS],
  output logic        gnt_o    [NUM_PORTS],
  output logic        rvalid_o [NUM_PORTS],
  output logic [63:0] rdata_o  [NUM_PORTS],
  output logic [31:0] conflicts_o   // requests held off this cycle
);

  logic [PW-1:0] rr_q [NUM_BANKS];

  logic [BW-1:0] bank_sel [NUM_PORTS];
  logic [RW-1:0] row_sel  [NUM_PORTS];

  logic          bank_req  [NUM_BANKS];
  logic [PW-1:0] bank_port [NUM_BANKS];
  logic [63:0]   bank_rdata [NUM_BANKS];

  logic          rvalid_q [NUM_PORTS];
  logic [BW-1:0] rbank_q  [NUM_PORTS];

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      bank_sel[p] = req_data_i[p].addr[3 +: BW];
      row_sel[p]  = req_data_i[p].addr[3 + BW +: RW];
      gnt_o[p]    = 1'b0;
    end
    conflicts_o = '0;
    // per bank: first requesting port at or after the round-robin pointer,
    // else the first requesting port below it
    for (int b = 0; b < NUM_BANKS; b++) begin
      bank_req[b]  = 1'b0;
      bank_port[b] = '0;
      for (int p = 0; p < NUM_PORTS; p++) begin
        if (!bank_req[b] && req_i[p] && (bank_sel[p] == BW'(b)) && (PW'(p) >= rr_q[b])) begin
          bank_req[b]  = 1'b1;
          bank_port[b] = PW'(p);
        end
      end
      for (int p = 0; p < NUM_PORTS; p++) begin
        if (!bank_req[b] && req_i[p] && (bank_sel[p] == BW'(b))) begin
          bank_req[b]  = 1'b1;
          bank_port[b] = PW'(p);
        end
      end
      if (bank_req[b]) gnt_o[bank_port[b]] = 1'b1;
    end
    for (int p = 0; p < NUM_PORTS; p++)
      if (req_i[p] && !gnt_o[p]) conflicts_o = conflicts_o + 1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int b = 0; b < NUM_BANKS; b++) rr_q[b] <= '0;
    end else begin
      for (int b = 0; b < NUM_BANKS; b++)
        if (bank_req[b])
          rr_q[b] <= (bank_port[b] == PW'(NUM_PORTS-1)) ? '0 : bank_port[b] + 1'b1;
    end
  end

  // One single-port bank per generate iteration: the winning request's row
  // is registered and read in the next cycle, writes honour byte enables.
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic [63:0]   mem [WORDS_PER_BANK];
    logic [RW-1:0] row_q;
    tcdm_req_t     win;

    assign win = req_data_i[bank_port[b]];

    always_ff @(posedge clk_i) begin
      if (bank_req[b]) begin
        row_q <= row_sel[bank_port[b]];
        if (win.we)
          for (int by = 0; by < 8; by++)
            if (win.be[by]) mem[row_sel[bank_port[b]]][8*by +: 8] <= win.wdata[8*by +: 8];
      end
    end
    assign bank_rdata[b] = mem[row_q];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        rvalid_q[p] <= 1'b0;
        rbank_q[p]  <= '0;
      end
    end else begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        rvalid_q[p] <= gnt_o[p] && !req_data_i[p].we;
        rbank_q[p]  <= bank_sel[p];
      end
    end
  end

  // The bank returns the word at its registered row; a read is routed back
  // to the port that was granted.
  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_rsp
    assign rvalid_o[p] = rvalid_q[p];
    assign rdata_o[p]  = bank_rdata[rbank_q[p]];
  end

endmodule
