// mxdotp_ssr: one stream semantic register (read streams).
//
// An SSR turns a register read into a memory read: once configured with a
// base address and up to four (bound, stride) loop levels, it walks the
// affine address pattern
//     addr = base + i0*stride0 + i1*stride1 + i2*stride2 + i3*stride3,
//     0 <= id <= bound_d, innermost level 0,
// fetches one 64-bit word per address from L1 and queues it in a small
// FIFO. The FP side pops one word each time an instruction reads the
// register mapped to this SSR; an empty FIFO stalls that instruction. In
// the MXDOTP kernels SSR0 streams P^A, SSR1 P^B and SSR2 the merged scales.
//
// The paper gives the SSR's function (base, stride, bounds across up to four
// dimensions, data streamed directly into the core registers); the
// implementation here is this design's own: configuration writes through
// cfg_* (bound = iterations - 1, byte strides, signed), writing the base
// starts the stream, bounds and strides keep their values for the next
// stream. Requests are only issued while the FIFO has room for every
// outstanding read, so no response is ever dropped. Only reads are
// streamed; result write-back goes through the register file.
//
// Timing: a request may be issued in the cycle after the base write; data
// reaches the FIFO one cycle after the grant and can be popped in the
// following cycle.
module mxdotp_ssr
  import mxdotp_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned CNT_W      = 16
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // configuration
  input  logic        cfg_we_i,
  input  ssr_reg_e    cfg_reg_i,
  input  logic [31:0] cfg_wdata_i,
  output logic        busy_o,      // stream still fetching or data not consumed
  // L1 master port
  output logic        mem_req_o,
  output tcdm_req_t   mem_req_data_o,
  input  logic        mem_gnt_i,
  input  logic        mem_rvalid_i,
  input  logic [63:0] mem_rdata_i,
  // FP operand side
  output logic        data_valid_o,
  output logic [63:0] data_o,
  input  logic        data_pop_i
);

  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  logic [CNT_W-1:0] bound_q  [SSR_DIMS];
  logic [31:0]      stride_q [SSR_DIMS];
  logic [CNT_W-1:0] idx_q    [SSR_DIMS];
  logic [31:0]      off_q    [SSR_DIMS];
  logic [31:0]      base_q;
  logic             active_q;

  // FIFO
  logic [63:0]      fifo_q [FIFO_DEPTH];
  logic [PW-1:0]    wptr_q, rptr_q;
  logic [PW:0]      count_q;
  logic [PW:0]      outst_q;

  logic issue, last, push, pop;

  always_comb begin
    mem_req_data_o       = '0;
    mem_req_data_o.addr  = base_q + off_q[0] + off_q[1] + off_q[2] + off_q[3];
    mem_req_data_o.be    = '1;
    mem_req_o            = active_q && ((count_q + outst_q) < (PW+1)'(FIFO_DEPTH));
    issue                = mem_req_o && mem_gnt_i;
    last = 1'b1;
    for (int d = 0; d < SSR_DIMS; d++) last &= (idx_q[d] == bound_q[d]);
  end

  assign push         = mem_rvalid_i;
  assign pop          = data_pop_i && data_valid_o;
  assign data_valid_o = (count_q != '0);
  assign data_o       = fifo_q[rptr_q];
  assign busy_o       = active_q || (outst_q != '0) || (count_q != '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int d = 0; d < SSR_DIMS; d++) begin
        bound_q[d]  <= '0;
        stride_q[d] <= '0;
        idx_q[d]    <= '0;
        off_q[d]    <= '0;
      end
      base_q   <= '0;
      active_q <= 1'b0;
    end else begin
      if (cfg_we_i && !active_q) begin
        case (cfg_reg_i)
          SSR_REG_BOUND0, SSR_REG_BOUND1, SSR_REG_BOUND2, SSR_REG_BOUND3:
            bound_q[cfg_reg_i[1:0]] <= cfg_wdata_i[CNT_W-1:0];
          SSR_REG_STRIDE0, SSR_REG_STRIDE1, SSR_REG_STRIDE2, SSR_REG_STRIDE3:
            stride_q[cfg_reg_i[1:0]] <= cfg_wdata_i;
          SSR_REG_BASE: begin
            base_q   <= cfg_wdata_i;
            active_q <= 1'b1;
            for (int d = 0; d < SSR_DIMS; d++) begin
              idx_q[d] <= '0;
              off_q[d] <= '0;
            end
          end
          default: ;
        endcase
      end else if (issue) begin
        if (last) begin
          active_q <= 1'b0;
        end else begin
          // advance the lowest level that has not reached its bound,
          // restart all levels below it
          logic done;
          done = 1'b0;
          for (int d = 0; d < SSR_DIMS; d++) begin
            if (!done) begin
              if (idx_q[d] != bound_q[d]) begin
                idx_q[d] <= idx_q[d] + 1'b1;
                off_q[d] <= off_q[d] + stride_q[d];
                done = 1'b1;
              end else begin
                idx_q[d] <= '0;
                off_q[d] <= '0;
              end
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q  <= '0;
      rptr_q  <= '0;
      count_q <= '0;
      outst_q <= '0;
      for (int i = 0; i < FIFO_DEPTH; i++) fifo_q[i] <= '0;
    end else begin
      if (push) begin
        fifo_q[wptr_q] <= mem_rdata_i;
        wptr_q         <= (wptr_q == PW'(FIFO_DEPTH-1)) ? '0 : wptr_q + 1'b1;
      end
      if (pop) rptr_q <= (rptr_q == PW'(FIFO_DEPTH-1)) ? '0 : rptr_q + 1'b1;
      count_q <= count_q + (PW+1)'(push) - (PW+1)'(pop);
      outst_q <= outst_q + (PW+1)'(issue) - (PW+1)'(push);
    end
  end

  // A response without an outstanding request is a protocol error.
  assert property (@(posedge clk_i) disable iff (!rst_ni) mem_rvalid_i |-> outst_q != '0)
    else $error("SSR: read response without request");
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push && count_q == (PW+1)'(FIFO_DEPTH)))
    else $error("SSR: FIFO overflow");

endmodule
