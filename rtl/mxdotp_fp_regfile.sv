// mxdotp_fp_regfile: the floating-point register file of one core.
//
// 32 registers of 64 bits with three combinational read ports and one
// write port, as the paper states for the Snitch FP register file (the
// reason MXDOTP needs an SSR for its fourth operand). Writes take effect at
// the clock edge; a read in the same cycle returns the old value. All
// registers reset to zero (this design's choice).
module mxdotp_fp_regfile #(
  parameter int unsigned NREGS  = 32,
  parameter int unsigned DATA_W = 64,
  localparam int unsigned AW    = $clog2(NREGS)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [AW-1:0]     raddr_i [3],
  output logic [DATA_W-1:0] rdata_o [3],
  input  logic              we_i,
  input  logic [AW-1:0]     waddr_i,
  input  logic [DATA_W-1:0] wdata_i
);

  logic [DATA_W-1:0] regs [NREGS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we_i) begin
      regs[waddr_i] <= wdata_i;
    end
  end

  for (genvar p = 0; p < 3; p++) begin : g_rd
    assign rdata_o[p] = regs[raddr_i[p]];
  end

endmodule
