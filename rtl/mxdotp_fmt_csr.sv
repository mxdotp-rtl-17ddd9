// mxdotp_fmt_csr: control/status register that selects the FP8 element
// format (E5M2 or E4M3) of all following mxdotp instructions.
//
// The paper introduces a dedicated CSR for this; its address and access
// semantics are this design's choice: address 0x800 (custom user
// read/write range), bit 0 = format (0 E5M2, 1 E4M3), other bits read as 0.
// csr_op_i follows the RISC-V csrrw/csrrs/csrrc semantics. The read data is
// combinational and returns the value before the write; the new value is
// visible to fmt_o one cycle after the write. Reset value: E5M2.
module mxdotp_fmt_csr
  import mxdotp_pkg::*;
#(
  parameter logic [11:0] CSR_ADDR = CSR_MXFMT_ADDR
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        csr_valid_i,
  input  logic [11:0] csr_addr_i,
  input  csr_op_e     csr_op_i,
  input  logic [31:0] csr_wdata_i,
  output logic [31:0] csr_rdata_o,
  output logic        csr_hit_o,    // the access targets this register
  output fp8_fmt_e    fmt_o
);

  logic fmt_q, fmt_d;

  assign csr_hit_o   = csr_valid_i && (csr_addr_i == CSR_ADDR);
  assign csr_rdata_o = csr_hit_o ? {31'd0, fmt_q} : 32'd0;
  assign fmt_o       = fp8_fmt_e'(fmt_q);

  always_comb begin
    fmt_d = fmt_q;
    if (csr_hit_o) begin
      unique case (csr_op_i)
        CSR_OP_WRITE: fmt_d = csr_wdata_i[0];
        CSR_OP_SET:   fmt_d = fmt_q | csr_wdata_i[0];
        CSR_OP_CLEAR: fmt_d = fmt_q & ~csr_wdata_i[0];
        default:      fmt_d = fmt_q;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) fmt_q <= 1'b0;
    else         fmt_q <= fmt_d;
  end

endmodule
