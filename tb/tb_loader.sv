// tb_loader: self-checking test of the loader.  A reference memory answers
// the loader's granted reads one cycle later; grants are random.  Checks the
// sequence of read addresses (start, stride, continuation), the buffer
// positions written (individual loads with stride), load&shift and AUX
// hand-over, and the busy/ready handshake.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (single/burst reads with MM and buffer strides from the paper; command fields are this design's).
module tb_loader;
  import acortex_pkg::*;
  localparam int AW = 8, IDXW = 6;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, busy;
  load_cmd_t cmd;
  logic rd_req, rd_gnt = 0, rd_rvalid = 0;
  logic [AW-1:0] rd_addr;
  logic buf_wr, buf_shift, aux_valid;
  logic [IDXW-1:0] buf_idx;
  logic [IDXW:0] chain_len;
  aux_op_e aux_op;
  int checks = 0, failures = 0;
  int exp_addr [$];
  int exp_idx [$];

  loader #(.AW(AW), .IDXW(IDXW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("fail: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // memory model: a granted read returns the next cycle
  always @(posedge clk) rd_rvalid <= rd_req && rd_gnt;

  initial begin
    int next_addr;
    next_addr = 0;
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int a0, cnt, st, bi, bs;
      load_cmd_t c;
      c = '0;
      c.cont = (t > 0) && ($urandom_range(0, 2) == 0);
      c.mm_addr = 15'($urandom_range(0, 255));
      c.mm_stride = 8'($urandom_range(0, 5));
      c.count = 7'($urandom_range(1, 9));
      c.buf_idx = 6'($urandom_range(0, 63));
      c.buf_stride = 6'($urandom_range(0, 4));
      c.shift = ($urandom_range(0, 3) == 0);
      c.to_aux = !c.shift && ($urandom_range(0, 3) == 0);
      c.aux_op = aux_op_e'($urandom_range(0, 3));
      c.chain_len = 7'($urandom_range(1, 64));
      a0 = c.cont ? next_addr : int'(c.mm_addr);
      cnt = c.count; st = c.mm_stride; bi = c.buf_idx; bs = c.buf_stride;
      for (int i = 0; i < cnt; i++) begin
        exp_addr.push_back((a0 + i * st) % 256);
        exp_idx.push_back((bi + i * bs) % 64);
      end
      next_addr = (a0 + cnt * st) % 256;
      @(negedge clk);
      chk(cmd_ready && !busy, "ready when idle");
      cmd = c; cmd_valid = 1;
      @(negedge clk);
      cmd_valid = 0;
      chk(busy && !cmd_ready, "busy after accept");
      while (busy) begin
        rd_gnt = $urandom_range(0, 1);
        #1;
        if (rd_req && rd_gnt) begin
          chk(exp_addr.size() > 0 && int'(rd_addr) == exp_addr[0], $sformatf("read address %0d", rd_addr));
          if (exp_addr.size() > 0) void'(exp_addr.pop_front());
        end
        if (rd_rvalid) begin
          if (c.to_aux) chk(aux_valid && !buf_wr && aux_op == c.aux_op, "aux hand-over");
          else begin
            chk(buf_wr && !aux_valid && buf_shift == c.shift, "buffer write");
            if (c.shift) chk(chain_len == 7'(c.chain_len), "chain length");
            else chk(int'(buf_idx) == exp_idx[0], $sformatf("buffer index %0d want %0d", buf_idx, exp_idx[0]));
          end
          void'(exp_idx.pop_front());
        end else chk(!buf_wr && !aux_valid, "no write without data");
        @(negedge clk);
      end
      rd_gnt = 0;
      chk(exp_addr.size() == 0 && exp_idx.size() == 0, "all lines transferred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
