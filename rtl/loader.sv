// loader: controller sub-unit that reads main memory into the input buffers
// or the AUX unit.
//
// A LOAD command describes a burst of count lines read from mm_addr,
// mm_addr+mm_stride, ...  Each line is written either to buffer chain
// position buf_idx, buf_idx+buf_stride, ... (individual load), pushed into
// the end of a chain of chain_len buffers (load & shift, for convolution), or
// handed to the AUX unit with operation aux_op.  With cont the burst starts
// where the previous one stopped, so that a loop of LOAD instructions walks
// through memory without the program recomputing addresses.
//
// Handshake: cmd_valid/cmd_ready; busy until the last line has been written.
// Timing: one read request per cycle while granted; each line is written the
// cycle its data returns (one cycle after the grant).  The command fields are
// this design's; single/burst reads with MM and buffer strides are the
// paper's.
//
// Lint note: rst_n is both the asynchronous reset of the flip-flops and the
// 'disable iff' of the assertions, which lint reports as a signal used both
// synchronously and asynchronously (SYNCASYNCNET); this is intended.
module loader
  import acortex_pkg::*;
#(
  parameter int AW   = $clog2(acortex_pkg::MM_LINES_DEF),
  parameter int IDXW = $clog2(2 * acortex_pkg::N_DEF * acortex_pkg::FOLD_DEF)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  input  load_cmd_t       cmd,
  output logic            cmd_ready,
  output logic            busy,
  // MM read through the router
  output logic            rd_req,
  output logic [AW-1:0]   rd_addr,
  input  logic            rd_gnt,
  input  logic            rd_rvalid,
  // buffer write
  output logic            buf_wr,
  output logic            buf_shift,
  output logic [IDXW-1:0] buf_idx,
  output logic [IDXW:0]   chain_len,
  // AUX
  output logic            aux_valid,
  output aux_op_e         aux_op
);
  logic [AW-1:0]   addr_q, stride_q;
  logic [6:0]      issue_left, ret_left;
  logic [IDXW-1:0] bptr_q, bstride_q;
  logic            shift_q, to_aux_q;

  assign busy      = (ret_left != '0);
  assign cmd_ready = !busy;
  assign rd_req    = (issue_left != '0);
  assign rd_addr   = addr_q;
  assign buf_wr    = rd_rvalid && !to_aux_q;
  assign buf_shift = shift_q;
  assign buf_idx   = bptr_q;
  assign aux_valid = rd_rvalid && to_aux_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_q     <= '0;
      stride_q   <= '0;
      issue_left <= '0;
      ret_left   <= '0;
      bptr_q     <= '0;
      bstride_q  <= '0;
      shift_q    <= 1'b0;
      to_aux_q   <= 1'b0;
      chain_len  <= '0;
      aux_op     <= AUX_COPY;
    end else if (cmd_valid && cmd_ready) begin
      if (!cmd.cont) addr_q <= AW'(cmd.mm_addr);
      stride_q   <= AW'(cmd.mm_stride);
      issue_left <= cmd.count;
      ret_left   <= cmd.count;
      bptr_q     <= IDXW'(cmd.buf_idx);
      bstride_q  <= IDXW'(cmd.buf_stride);
      shift_q    <= cmd.shift;
      to_aux_q   <= cmd.to_aux;
      chain_len  <= (IDXW+1)'(cmd.chain_len);
      aux_op     <= cmd.aux_op;
    end else begin
      if (rd_req && rd_gnt) begin
        addr_q     <= addr_q + stride_q;
        issue_left <= issue_left - 1'b1;
      end
      if (rd_rvalid && busy) begin
        ret_left <= ret_left - 1'b1;
        bptr_q   <= bptr_q + bstride_q;
      end
    end
  end

  // a read returns only for a request of the current burst
  assert property (@(posedge clk) disable iff (!rst_n) rd_rvalid |-> busy);
endmodule
