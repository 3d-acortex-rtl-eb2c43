// collector: controller sub-unit that writes results into main memory.
//
// A STORE command writes count lines to mm_addr, mm_addr+mm_stride, ...  The
// lines come from the output registers of IDU rows row_lo, row_lo+1, ...
// (row_sel selects the row; the row's word arrives on row_data in the same
// cycle) or, with from_aux, from the AUX register.  With cont the burst
// starts where the previous one stopped.
//
// Handshake: cmd_valid/cmd_ready; busy until the last write is granted.
// Timing: one line per granted cycle.  Single/burst writes with strides are
// the paper's; the command fields are this design's.
module collector
  import acortex_pkg::*;
#(
  parameter int AW = $clog2(acortex_pkg::MM_LINES_DEF),
  parameter int W  = acortex_pkg::K_DEF * acortex_pkg::P_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  input  store_cmd_t    cmd,
  output logic          cmd_ready,
  output logic          busy,
  output logic [4:0]    row_sel,
  input  logic [W-1:0]  row_data,
  input  logic [W-1:0]  aux_data,
  output logic          wr_req,
  output logic [AW-1:0] wr_addr,
  output logic [W-1:0]  wr_data,
  input  logic          wr_gnt
);
  logic [AW-1:0] addr_q, stride_q;
  logic [5:0]    left_q;
  logic [4:0]    row_q;
  logic          aux_q;

  assign busy      = (left_q != '0);
  assign cmd_ready = !busy;
  assign wr_req    = busy;
  assign wr_addr   = addr_q;
  assign row_sel   = row_q;
  assign wr_data   = aux_q ? aux_data : row_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_q   <= '0;
      stride_q <= '0;
      left_q   <= '0;
      row_q    <= '0;
      aux_q    <= 1'b0;
    end else if (cmd_valid && cmd_ready) begin
      if (!cmd.cont) addr_q <= AW'(cmd.mm_addr);
      stride_q <= AW'(cmd.mm_stride);
      left_q   <= cmd.count;
      row_q    <= cmd.row_lo;
      aux_q    <= cmd.from_aux;
    end else if (wr_req && wr_gnt) begin
      addr_q <= addr_q + stride_q;
      row_q  <= row_q + 1'b1;
      left_q <= left_q - 1'b1;
    end
  end
endmodule
