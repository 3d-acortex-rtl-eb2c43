// instr_mem: the controller's instruction memory (IM), 4 KB of SRAM holding
// 512 64-bit instructions.  Written by the host processor through wr_*;
// read by the main controller's fetch logic.
//
// Timing: rd_data is valid the cycle after rd_en.  Written as an array; a
// flow would map it onto an SRAM macro.
// The 4 KB size is the paper's; the 64-bit word (and so the depth) is this
// design's.
module instr_mem #(
  parameter int DEPTH = acortex_pkg::IM_DEPTH_DEF,
  parameter int W     = acortex_pkg::INSTR_W,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  logic [W-1:0]   wr_data,
  input  logic           rd_en,
  input  logic [AW-1:0]  rd_addr,
  output logic [W-1:0]   rd_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
