// mxdotp_frep: floating-point repetition (FREP) sequencer.
//
// A loop such as the MXDOTP kernel's eight unrolled mxdotp instructions is
// sent once from the integer core and replayed here in hardware, so the
// integer core issues no branches while the FP side runs. After an FREP
// command (max_inst = instructions in the body - 1, max_rpt = iterations -
// 1), the next max_inst+1 instructions are forwarded and stored in a loop
// buffer at the same time; the buffer is then replayed max_rpt more times
// while the input is held off. Outside an FREP body instructions pass
// straight through. The paper names FREP and gives its function; the
// buffer depth, the "minus one" encoding of the counts and this handshake
// are this design's own choices (outer-loop repetition only).
//
// Interface: valid/ready handshakes on in_*, out_* and frep_*; a new FREP
// command is accepted only when the sequencer is idle. out_instr_o is
// combinational from the input while capturing or passing through.
module mxdotp_frep #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned RPT_W = 16,
  localparam int unsigned IW   = $clog2(DEPTH)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // FREP command
  input  logic             frep_valid_i,
  output logic             frep_ready_o,
  input  logic [IW-1:0]    frep_max_inst_i,
  input  logic [RPT_W-1:0] frep_max_rpt_i,
  // instructions from the integer core
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  logic [31:0]      in_instr_i,
  // instructions to the FP issue stage
  output logic             out_valid_o,
  input  logic             out_ready_i,
  output logic [31:0]      out_instr_o,
  output logic             busy_o
);

  typedef enum logic [1:0] {S_IDLE, S_CAPTURE, S_REPLAY} state_e;

  state_e           state_q;
  logic [31:0]      buf_q [DEPTH];
  logic [IW-1:0]    idx_q, max_inst_q;
  logic [RPT_W-1:0] rpt_q, max_rpt_q;

  always_comb begin
    frep_ready_o = (state_q == S_IDLE);
    busy_o       = (state_q != S_IDLE);
    if (state_q == S_REPLAY) begin
      out_valid_o = 1'b1;
      out_instr_o = buf_q[idx_q];
      in_ready_o  = 1'b0;
    end else begin
      out_valid_o = in_valid_i;
      out_instr_o = in_instr_i;
      in_ready_o  = out_ready_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= S_IDLE;
      idx_q      <= '0;
      rpt_q      <= '0;
      max_inst_q <= '0;
      max_rpt_q  <= '0;
      for (int i = 0; i < DEPTH; i++) buf_q[i] <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (frep_valid_i) begin
            state_q    <= S_CAPTURE;
            max_inst_q <= frep_max_inst_i;
            max_rpt_q  <= frep_max_rpt_i;
            idx_q      <= '0;
            rpt_q      <= '0;
          end
        end
        S_CAPTURE: begin
          if (in_valid_i && out_ready_i) begin
            buf_q[idx_q] <= in_instr_i;
            if (idx_q == max_inst_q) begin
              idx_q   <= '0;
              rpt_q   <= RPT_W'(1);
              state_q <= (max_rpt_q == '0) ? S_IDLE : S_REPLAY;
            end else begin
              idx_q <= idx_q + 1'b1;
            end
          end
        end
        S_REPLAY: begin
          if (out_ready_i) begin
            if (idx_q == max_inst_q) begin
              idx_q <= '0;
              if (rpt_q == max_rpt_q) state_q <= S_IDLE;
              else                    rpt_q   <= rpt_q + 1'b1;
            end else begin
              idx_q <= idx_q + 1'b1;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
