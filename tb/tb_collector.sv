// tb_collector: self-checking test of the collector: random STORE commands
// with random write grants; checks the written addresses and that each line
// carries the data of the right IDU row (or the AUX register).
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (single/burst writes with strides from the paper; command fields are this design's).
module tb_collector;
  import acortex_pkg::*;
  localparam int AW = 8, W = 16;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, busy;
  store_cmd_t cmd;
  logic [4:0] row_sel;
  logic [W-1:0] row_data, aux_data = 16'hA5C3, wr_data;
  logic wr_req, wr_gnt = 0;
  logic [AW-1:0] wr_addr;
  int checks = 0, failures = 0;

  collector #(.AW(AW), .W(W)) dut (.*);
  always #5 clk = ~clk;
  assign row_data = W'(row_sel) * 16'd977 + 16'd13;   // distinct per row

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("fail: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int next_addr;
    next_addr = 0;
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      store_cmd_t c;
      int a0, n;
      c = '0;
      c.cont = (t > 0) && ($urandom_range(0, 2) == 0);
      c.from_aux = ($urandom_range(0, 3) == 0);
      c.mm_addr = 15'($urandom_range(0, 255));
      c.mm_stride = 8'($urandom_range(0, 4));
      c.row_lo = 5'($urandom_range(0, 20));
      c.count = 6'($urandom_range(1, 11));
      a0 = c.cont ? next_addr : int'(c.mm_addr);
      @(negedge clk); cmd = c; cmd_valid = 1;
      @(negedge clk); cmd_valid = 0;
      n = 0;
      while (busy) begin
        wr_gnt = $urandom_range(0, 1);
        #1;
        chk(wr_req, "request while busy");
        if (wr_gnt) begin
          chk(int'(wr_addr) == (a0 + n * int'(c.mm_stride)) % 256, "write address");
          if (c.from_aux) chk(wr_data == aux_data, "aux data");
          else chk(wr_data == W'(int'(c.row_lo) + n) * 16'd977 + 16'd13, "row data");
          n++;
        end
        @(negedge clk);
      end
      wr_gnt = 0;
      chk(n == int'(c.count), "line count");
      next_addr = (a0 + n * int'(c.mm_stride)) % 256;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
