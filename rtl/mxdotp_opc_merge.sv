// mxdotp_opc_merge: forms the third 64-bit FPU operand of an mxdotp.
//
// The FPU has only three 64-bit operand inputs but MXDOTP needs four values
// (P^A, P^B, the scales and C). The paper's solution, and the only change it
// makes to the core proper, is to merge the block scales with the FP32
// accumulator into the third operand. rs3 holds four scale pairs in one
// 64-bit word; the 2-bit sl field of the instruction picks pair sl, which
// sits at bits [16*sl+15 : 16*sl] as {X^A, X^B}. The result is
//   opc_o = {16'b0, X^A, X^B, C[31:0]}
// where C is the low word of the (NaN-boxed) accumulator register. The pair
// layout inside rs3 and the field positions in opc_o are this design's
// choice; the paper prints only the order X^A, X^B, C. Combinational.
module mxdotp_opc_merge
  import mxdotp_pkg::*;
(
  input  logic [63:0] scales_i,  // value of rs3
  input  logic [1:0]  sl_i,
  input  logic [63:0] acc_i,     // value of rd
  output logic [63:0] opc_o
);

  logic [15:0] pair;

  always_comb begin
    pair  = scales_i[16*sl_i +: 16];
    opc_o = '0;
    opc_o[OPC_XA_LSB +: 8] = pair[15:8];
    opc_o[OPC_XB_LSB +: 8] = pair[7:0];
    opc_o[OPC_C_LSB +: 32] = acc_i[31:0];
  end

endmodule
