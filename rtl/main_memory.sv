// main_memory: the processor's main memory (MM), 1 MB holding the
// intermediate data of a network, with one K-word input (write) port and one
// K-word output (read) port.  The paper places it in eDRAM; here it is
// written as a plain array of LINES lines of K*P bits (32768 x 256 bits =
// 1 MB), which a flow would map onto its memory macro.
//
// Timing: a read issued with rd_en returns rd_data with rd_valid one cycle
// later; a write takes effect at the clock edge.  A read and a write to the
// same line in the same cycle return the old data.  eDRAM refresh is not
// modelled.
module main_memory #(
  parameter int LINES = acortex_pkg::MM_LINES_DEF,
  parameter int W     = acortex_pkg::K_DEF * acortex_pkg::P_DEF,
  localparam int AW   = $clog2(LINES)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           rd_en,
  input  logic [AW-1:0]  rd_addr,
  output logic [W-1:0]   rd_data,
  output logic           rd_valid,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  logic [W-1:0]   wr_data
);
  logic [W-1:0] mem [LINES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end
endmodule
