// mxdotp_unit: the MXDOTP dot-product-accumulate datapath.
//
// Computes  C' = C + X^A * X^B * sum_{i=0..7} P^A_i * P^B_i
// for eight FP8 elements per 64-bit operand (E5M2 or E4M3, chosen by fmt_i),
// two E8M0 block scales and an FP32 accumulator, rounded once to FP32 with
// roundTiesToEven. Products and the aligned accumulator are summed exactly in
// a 95-bit fixed-point frame (early accumulation); the scales only move the
// accumulator before the sum and the exponent after it.
//
// Pipeline (three register levels, as in the paper):
//   stage 1: FP8 decode, eight product lanes, accumulator alignment, special
//            value detection                                     -> register
//   stage 2: 95-bit sum of the eight products and the accumulator -> register
//   stage 3: normalisation, rounding, special-value selection     -> register
// A new operation can enter every cycle; res_o appears NUM_PIPE_REGS cycles
// after the operation entered (valid_i high at edge k, valid_o high after
// edge k+NUM_PIPE_REGS). There is no back-pressure: the consumer must take
// every result. The paper calls the number of pipeline stages a parameter
// and evaluates three; NUM_PIPE_REGS defaults to 3, and each level above
// three adds an output register (a synthesis tool may retime it into the
// datapath). Fewer than three levels are not supported.
// tag_i travels with the operation (the destination register).
//
// Operand C in opc_i: {16 unused, X^A[47:40], X^B[39:32], C[31:0]}; the order
// X^A, X^B, C is the one printed in the paper's integration figure, the bit
// positions are this design's choice.
//
// Special values (own choices where the paper is silent): any NaN input, a
// scale of 0xFF (E8M0 NaN), Inf*0 or Inf terms of both signs give the
// canonical quiet NaN 7FC00000; otherwise any Inf gives Inf. When every
// product is zero, or C is so large that no product sum can change its
// rounded value, C itself is returned. An exact zero sum gives +0, except
// that -0 is kept when C is -0 and all products are -0. No exception flags
// are produced.
module mxdotp_unit
  import mxdotp_pkg::*;
#(
  parameter int unsigned TAG_W         = 5,
  parameter int unsigned NUM_PIPE_REGS = 3
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             valid_i,
  input  fp8_fmt_e         fmt_i,
  input  logic [63:0]      opa_i,   // P^A_7..0
  input  logic [63:0]      opb_i,   // P^B_7..0
  input  logic [63:0]      opc_i,   // merged X^A, X^B, C
  input  logic [TAG_W-1:0] tag_i,
  output logic             valid_o,
  output logic [31:0]      res_o,
  output logic [TAG_W-1:0] tag_o
);

  // ---------------------------------------------------------------- stage 1
  fp9_t                     a_dec [LANES];
  fp9_t                     b_dec [LANES];
  logic signed [PROD_W-1:0] prod  [LANES];
  logic [LANES-1:0]         lane_nz, lane_sign, lane_inf, lane_nan;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    mxdotp_fp8_decode u_dec_a (.fmt_i, .val_i(opa_i[8*i +: 8]), .op_o(a_dec[i]));
    mxdotp_fp8_decode u_dec_b (.fmt_i, .val_i(opb_i[8*i +: 8]), .op_o(b_dec[i]));
    mxdotp_product_lane u_lane (
      .a_i      (a_dec[i]),
      .b_i      (b_dec[i]),
      .prod_o   (prod[i]),
      .nonzero_o(lane_nz[i]),
      .sign_o   (lane_sign[i]),
      .inf_o    (lane_inf[i]),
      .nan_o    (lane_nan[i])
    );
  end

  logic [31:0]             c_val;
  logic [7:0]              xa, xb;
  logic signed [SUM_W-1:0] acc_al;
  logic                    acc_sticky, acc_neg, acc_big;
  logic [8:0]              scale_sum;

  assign c_val = opc_i[OPC_C_LSB +: 32];
  assign xb    = opc_i[OPC_XB_LSB +: 8];
  assign xa    = opc_i[OPC_XA_LSB +: 8];

  mxdotp_acc_align u_align (
    .c_i        (c_val),
    .xa_i       (xa),
    .xb_i       (xb),
    .acc_o      (acc_al),
    .sticky_o   (acc_sticky),
    .neg_o      (acc_neg),
    .big_o      (acc_big),
    .scale_sum_o(scale_sum)
  );

  logic c_nan, c_inf, c_zero;
  logic pos_inf, neg_inf;
  logic s0_nan, s0_inf, s0_inf_sign, s0_pass_c;
  logic [31:0] s0_pass_val;

  always_comb begin
    c_nan   = (c_val[30:23] == 8'hFF) && (c_val[22:0] != '0);
    c_inf   = (c_val[30:23] == 8'hFF) && (c_val[22:0] == '0);
    c_zero  = (c_val[30:0] == '0);
    pos_inf = |(lane_inf & ~lane_sign) || (c_inf && !c_val[31]);
    neg_inf = |(lane_inf & lane_sign)  || (c_inf &&  c_val[31]);
    s0_nan  = |lane_nan || c_nan || (xa == 8'hFF) || (xb == 8'hFF) || (pos_inf && neg_inf);
    s0_inf  = !s0_nan && (pos_inf || neg_inf);
    s0_inf_sign = neg_inf;
    s0_pass_c   = !s0_nan && !s0_inf && ((lane_nz == '0) || acc_big);
    if (c_zero && (lane_nz == '0))
      s0_pass_val = {c_val[31] && (&lane_sign), 31'd0};
    else
      s0_pass_val = c_val;
  end

  typedef struct packed {
    logic        nan;
    logic        inf;
    logic        inf_sign;
    logic        pass_c;
    logic [31:0] pass_val;
    logic        acc_sticky;
    logic        acc_neg;
    logic [8:0]  scale_sum;
    logic [TAG_W-1:0] tag;
  } side_t;

  side_t                    s0_side, s1_side, s2_side;
  logic                     s1_valid, s2_valid;
  logic signed [PROD_W-1:0] s1_prod [LANES];
  logic signed [SUM_W-1:0]  s1_acc;

  always_comb begin
    s0_side            = '0;
    s0_side.nan        = s0_nan;
    s0_side.inf        = s0_inf;
    s0_side.inf_sign   = s0_inf_sign;
    s0_side.pass_c     = s0_pass_c;
    s0_side.pass_val   = s0_pass_val;
    s0_side.acc_sticky = acc_sticky;
    s0_side.acc_neg    = acc_neg;
    s0_side.scale_sum  = scale_sum;
    s0_side.tag        = tag_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      s1_valid <= 1'b0;
      s1_side  <= '0;
      s1_acc   <= '0;
      for (int i = 0; i < LANES; i++) s1_prod[i] <= '0;
    end else begin
      s1_valid <= valid_i;
      if (valid_i) begin
        s1_side <= s0_side;
        s1_acc  <= acc_al;
        for (int i = 0; i < LANES; i++) s1_prod[i] <= prod[i];
      end
    end
  end

  // ---------------------------------------------------------------- stage 2
  logic signed [SUM_W-1:0] sum_d, s2_sum;

  always_comb begin
    sum_d = s1_acc;
    for (int i = 0; i < LANES; i++) sum_d = sum_d + SUM_W'(s1_prod[i]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      s2_valid <= 1'b0;
      s2_side  <= '0;
      s2_sum   <= '0;
    end else begin
      s2_valid <= s1_valid;
      if (s1_valid) begin
        s2_side <= s1_side;
        s2_sum  <= sum_d;
      end
    end
  end

  // ---------------------------------------------------------------- stage 3
  logic [31:0] rounded, res_d;

  mxdotp_norm_round u_norm (
    .sum_i       (s2_sum),
    .acc_sticky_i(s2_side.acc_sticky),
    .acc_neg_i   (s2_side.acc_neg),
    .scale_sum_i (s2_side.scale_sum),
    .res_o       (rounded)
  );

  always_comb begin
    if (s2_side.nan)                             res_d = FP32_QNAN;
    else if (s2_side.inf)                        res_d = {s2_side.inf_sign, 8'hFF, 23'd0};
    else if (s2_side.pass_c)                     res_d = s2_side.pass_val;
    else if (s2_sum == '0 && !s2_side.acc_sticky) res_d = 32'd0;
    else                                         res_d = rounded;
  end

  // level 0 is the stage-3 input; levels 1..NL-1 are the stage-3 register
  // and NUM_PIPE_REGS - 3 further output registers
  localparam int unsigned NL = NUM_PIPE_REGS - 1;
  logic             out_valid [NL];
  logic [31:0]      out_res   [NL];
  logic [TAG_W-1:0] out_tag   [NL];

  assign out_valid[0] = s2_valid;
  assign out_res[0]   = res_d;
  assign out_tag[0]   = s2_side.tag;

  for (genvar l = 1; l < NL; l++) begin : g_out
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        out_valid[l] <= 1'b0;
        out_res[l]   <= '0;
        out_tag[l]   <= '0;
      end else begin
        out_valid[l] <= out_valid[l-1];
        if (out_valid[l-1]) begin
          out_res[l] <= out_res[l-1];
          out_tag[l] <= out_tag[l-1];
        end
      end
    end
  end

  assign valid_o = out_valid[NL-1];
  assign res_o   = out_res[NL-1];
  assign tag_o   = out_tag[NL-1];

  initial assert (NUM_PIPE_REGS >= 3) else $error("NUM_PIPE_REGS must be at least 3");

endmodule
