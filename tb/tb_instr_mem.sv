// tb_instr_mem: writes every instruction word, then random reads against a
// reference array with one cycle of read latency.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (4 KB from the paper; word width and latency are this design's).
module tb_instr_mem;
  localparam int DEPTH = 32, W = 64;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [4:0] wr_addr = 0, rd_addr = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  logic [W-1:0] ref_m [DEPTH];
  int checks = 0, failures = 0;

  instr_mem #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 5'(a); wr_data = {$urandom, $urandom}; ref_m[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk); rd_en = 1; rd_addr = 5'($urandom);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== ref_m[rd_addr]) begin failures++; $display("addr %0d got %h", rd_addr, rd_data); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
