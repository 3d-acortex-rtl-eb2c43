// tb_router: random read and write requests from the loader, collector and
// host; checks the fixed-priority grants, the memory port signals and that
// each read's data valid is returned to the requester that was granted.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (the sub-unit/host sharing from the paper; the priorities are this design's).
module tb_router;
  localparam int AW = 6, W = 16;
  logic clk = 0, rst_n = 0;
  logic ld_req = 0, ld_gnt, ld_rvalid, host_rd_req = 0, host_rd_gnt, host_rvalid;
  logic [AW-1:0] ld_addr = 0, host_rd_addr = 0, col_addr = 0, host_wr_addr = 0;
  logic col_req = 0, col_gnt, host_wr_req = 0, host_wr_gnt;
  logic [W-1:0] col_data = 0, host_wr_data = 0, rdata;
  logic mm_rd_en, mm_wr_en, mm_rd_valid;
  logic [AW-1:0] mm_rd_addr, mm_wr_addr;
  logic [W-1:0] mm_rd_data, mm_wr_data;
  int checks = 0, failures = 0;

  router #(.AW(AW), .W(W)) dut (.*);
  main_memory #(.LINES(64), .W(W)) u_mm (.clk, .rst_n, .rd_en(mm_rd_en), .rd_addr(mm_rd_addr),
    .rd_data(mm_rd_data), .rd_valid(mm_rd_valid), .wr_en(mm_wr_en), .wr_addr(mm_wr_addr), .wr_data(mm_wr_data));
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("fail: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic prev_ld, prev_host;
    prev_ld = 0; prev_host = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // data of the previous cycle's grant
      chk(ld_rvalid == prev_ld, "ld_rvalid steering");
      chk(host_rvalid == prev_host, "host_rvalid steering");
      ld_req = $urandom_range(0, 1); host_rd_req = $urandom_range(0, 1);
      col_req = $urandom_range(0, 1); host_wr_req = $urandom_range(0, 1);
      ld_addr = AW'($urandom); host_rd_addr = AW'($urandom);
      col_addr = AW'($urandom); host_wr_addr = AW'($urandom);
      col_data = W'($urandom); host_wr_data = W'($urandom);
      #1;
      chk(ld_gnt == ld_req, "loader read priority");
      chk(host_rd_gnt == (host_rd_req && !ld_req), "host read grant");
      chk(mm_rd_en == (ld_req || host_rd_req), "mm rd_en");
      if (ld_req) chk(mm_rd_addr == ld_addr, "mm rd addr loader");
      else if (host_rd_req) chk(mm_rd_addr == host_rd_addr, "mm rd addr host");
      chk(col_gnt == col_req, "collector write priority");
      chk(host_wr_gnt == (host_wr_req && !col_req), "host write grant");
      if (col_req) chk(mm_wr_addr == col_addr && mm_wr_data == col_data, "mm write collector");
      else if (host_wr_req) chk(mm_wr_addr == host_wr_addr && mm_wr_data == host_wr_data, "mm write host");
      chk(mm_wr_en == (col_req || host_wr_req), "mm wr_en");
      prev_ld = ld_gnt; prev_host = host_rd_gnt;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
