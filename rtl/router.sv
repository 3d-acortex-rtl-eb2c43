// router: connects the main memory's two ports to their users.
//
// The MM read port serves the loader and the host processor; the write port
// serves the collector and the host.  In each cycle at most one read and one
// write are granted, the on-chip unit taking priority over the host (a fixed
// priority of this design's choosing).  A granted read's data comes back one
// cycle later and is steered to whoever issued it (ld_rvalid or
// host_rvalid), the data itself being shared.  Because reads and writes use
// separate ports, the loader can fetch the next VMM's inputs while the
// collector writes back the previous results.
// Handshake: a requester holds req and its address/data until it sees gnt in
// the same cycle.
//
// Lint note: rst_n is both the asynchronous reset of the flip-flops and the
// 'disable iff' of the assertions, which lint reports as a signal used both
// synchronously and asynchronously (SYNCASYNCNET); this is intended.
module router #(
  parameter int AW = $clog2(acortex_pkg::MM_LINES_DEF),
  parameter int W  = acortex_pkg::K_DEF * acortex_pkg::P_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  // loader read
  input  logic          ld_req,
  input  logic [AW-1:0] ld_addr,
  output logic          ld_gnt,
  output logic          ld_rvalid,
  // host read
  input  logic          host_rd_req,
  input  logic [AW-1:0] host_rd_addr,
  output logic          host_rd_gnt,
  output logic          host_rvalid,
  output logic [W-1:0]  rdata,
  // collector write
  input  logic          col_req,
  input  logic [AW-1:0] col_addr,
  input  logic [W-1:0]  col_data,
  output logic          col_gnt,
  // host write
  input  logic          host_wr_req,
  input  logic [AW-1:0] host_wr_addr,
  input  logic [W-1:0]  host_wr_data,
  output logic          host_wr_gnt,
  // main memory
  output logic          mm_rd_en,
  output logic [AW-1:0] mm_rd_addr,
  input  logic [W-1:0]  mm_rd_data,
  input  logic          mm_rd_valid,
  output logic          mm_wr_en,
  output logic [AW-1:0] mm_wr_addr,
  output logic [W-1:0]  mm_wr_data
);
  logic tag_ld_q;   // 1: outstanding read belongs to the loader

  always_comb begin
    ld_gnt      = ld_req;
    host_rd_gnt = host_rd_req && !ld_req;
    mm_rd_en    = ld_gnt || host_rd_gnt;
    mm_rd_addr  = ld_req ? ld_addr : host_rd_addr;

    col_gnt     = col_req;
    host_wr_gnt = host_wr_req && !col_req;
    mm_wr_en    = col_gnt || host_wr_gnt;
    mm_wr_addr  = col_req ? col_addr : host_wr_addr;
    mm_wr_data  = col_req ? col_data : host_wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        tag_ld_q <= 1'b0;
    else if (mm_rd_en) tag_ld_q <= ld_gnt;
  end

  assign ld_rvalid   = mm_rd_valid &&  tag_ld_q;
  assign host_rvalid = mm_rd_valid && !tag_ld_q;
  assign rdata       = mm_rd_data;

  // at most one requester is granted per port
  assert property (@(posedge clk) disable iff (!rst_n) !(ld_gnt && host_rd_gnt));
  assert property (@(posedge clk) disable iff (!rst_n) !(col_gnt && host_wr_gnt));
endmodule
