// mxdotp_decoder: decodes the mxdotp instruction word.
//
//   mxdotp rd, rs1, rs2, rs3, sl
//   bits  31-27 rs3 (X^A & X^B) | 26-25 sl | 24-20 rs2 (P^B) | 19-15 rs1 (P^A)
//         14-12 unused          | 11-7 rd (C) | 6-0 opcode 1110111
// The field layout and opcode are the paper's. Bits 14-12 are left empty in
// the paper's encoding table; this decoder ignores them. Combinational.
module mxdotp_decoder
  import mxdotp_pkg::*;
(
  input  logic [31:0]   instr_i,
  output mxdotp_instr_t dec_o
);

  always_comb begin
    dec_o.valid = (instr_i[6:0] == OPCODE_MXDOTP);
    dec_o.rd    = instr_i[11:7];
    dec_o.rs1   = instr_i[19:15];
    dec_o.rs2   = instr_i[24:20];
    dec_o.sl    = instr_i[26:25];
    dec_o.rs3   = instr_i[31:27];
  end

endmodule
