// mxdotp_pkg: types and constants shared by the MXDOTP datapath and its
// integration into the FP side of a Snitch-style core.
//
// Numbers that come from the paper: eight FP8 lanes per 64-bit operand, FP9
// (E5M3) internal element format, 8-bit E8M0 block scales, FP32 accumulator,
// 67-bit aligned products, a 95-bit fixed-point sum anchored at 34 fractional
// bits, three pipeline stages, opcode 1110111 and the instruction field
// positions. Field positions of the merged third operand, the CSR address and
// the struct layouts are this design's own choices.
package mxdotp_pkg;

  // ---------------------------------------------------------------- formats
  typedef enum logic {
    FMT_E5M2 = 1'b0,
    FMT_E4M3 = 1'b1
  } fp8_fmt_e;

  localparam int unsigned LANES      = 8;   // FP8 elements per 64-bit operand
  localparam int unsigned FP9_EXP_W  = 5;   // E5M3 exponent
  localparam int unsigned FP9_SIG_W  = 4;   // 3 mantissa bits + hidden bit
  localparam int unsigned FP9_BIAS   = 15;
  localparam int unsigned PROD_W     = 67;  // signed aligned product
  localparam int unsigned SUM_W      = 95;  // signed early-accumulation sum
  localparam int unsigned ANCHOR     = 34;  // fractional bits of the sum
  localparam int unsigned ACC_SIG_W  = 24;  // FP32 significand incl. hidden bit
  // Highest position of the accumulator LSB that keeps its 24 bits inside
  // the magnitude part of the 95-bit sum.
  localparam int unsigned ACC_MAX_SH = SUM_W - 1 - ACC_SIG_W;  // 70
  // Largest biased FP9 exponent sum of two normal finite elements (30 + 30):
  // a product with this exponent sum needs no right shift.
  localparam int unsigned PROD_EXP_MAX = 60;
  // Largest alignment shift of a product: its LSB sits at 2^-34 when both
  // exponents are minimal (exponent sum 2).
  localparam int unsigned PROD_SH_MAX  = 58;
  localparam int unsigned PIPE_STAGES  = 3;

  localparam logic [31:0] FP32_QNAN = 32'h7FC0_0000;

  // One FP8 element unpacked into the common FP9 (E5M3) form. A subnormal
  // input keeps exponent 1 with a cleared hidden bit, so no normalisation is
  // needed before the multiplier.
  typedef struct packed {
    logic                 sign;
    logic [FP9_EXP_W-1:0] exp;
    logic [FP9_SIG_W-1:0] sig;
    logic                 is_nan;
    logic                 is_inf;
    logic                 is_zero;
  } fp9_t;

  // ------------------------------------------------------------ instruction
  localparam logic [6:0] OPCODE_MXDOTP = 7'b1110111;

  typedef struct packed {
    logic       valid;    // the word is an mxdotp instruction
    logic [4:0] rd;       // accumulator C (read and written)
    logic [4:0] rs1;      // P^A
    logic [4:0] rs2;      // P^B
    logic [4:0] rs3;      // X^A & X^B (four pairs per 64-bit register)
    logic [1:0] sl;       // which of the four scale pairs
  } mxdotp_instr_t;

  // Merged third FPU operand: {16 unused bits, X^A, X^B, C}.
  localparam int unsigned OPC_C_LSB  = 0;
  localparam int unsigned OPC_XB_LSB = 32;
  localparam int unsigned OPC_XA_LSB = 40;

  // ------------------------------------------------------------------- CSR
  localparam logic [11:0] CSR_MXFMT_ADDR = 12'h800;

  typedef enum logic [1:0] {
    CSR_OP_WRITE = 2'd1,
    CSR_OP_SET   = 2'd2,
    CSR_OP_CLEAR = 2'd3
  } csr_op_e;

  // -------------------------------------------------------------------- SSR
  localparam int unsigned SSR_DIMS = 4;

  // Configuration register indices of one stream semantic register.
  typedef enum logic [3:0] {
    SSR_REG_BOUND0  = 4'd0,
    SSR_REG_BOUND1  = 4'd1,
    SSR_REG_BOUND2  = 4'd2,
    SSR_REG_BOUND3  = 4'd3,
    SSR_REG_STRIDE0 = 4'd4,
    SSR_REG_STRIDE1 = 4'd5,
    SSR_REG_STRIDE2 = 4'd6,
    SSR_REG_STRIDE3 = 4'd7,
    SSR_REG_BASE    = 4'd8   // writing the base address starts the stream
  } ssr_reg_e;

  // ------------------------------------------------------------------- L1
  // One 64-bit request of a master on the shared L1 interconnect. A request
  // is held with req high until gnt; the read data returns with rvalid one
  // cycle after the grant.
  typedef struct packed {
    logic [31:0] addr;   // byte address, 8-byte aligned
    logic        we;
    logic [7:0]  be;
    logic [63:0] wdata;
  } tcdm_req_t;

endpackage
