// tb_main_memory: random reads and writes against a reference array; checks
// the data and the one-cycle read latency (rd_valid).
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (1 MB size from the paper; latency is this design's).
module tb_main_memory;
  localparam int LINES = 64, W = 32;
  logic clk = 0, rst_n = 0, rd_en = 0, wr_en = 0, rd_valid;
  logic [5:0] rd_addr = 0, wr_addr = 0;
  logic [W-1:0] rd_data, wr_data = 0;
  logic [W-1:0] ref_m [LINES];
  int checks = 0, failures = 0;

  main_memory #(.LINES(LINES), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < LINES; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 6'(a); wr_data = $urandom; ref_m[a] = wr_data;
    end
    for (int i = 0; i < 3000; i++) begin
      logic [W-1:0] expect_d;
      @(negedge clk);
      wr_en = $urandom_range(0, 1); wr_addr = 6'($urandom); wr_data = $urandom;
      rd_en = $urandom_range(0, 1); rd_addr = 6'($urandom);
      expect_d = ref_m[rd_addr];            // old data on a same-cycle write
      if (wr_en) ref_m[wr_addr] = wr_data;
      @(negedge clk);
      checks++;
      if (rd_valid !== rd_en) begin failures++; $display("rd_valid wrong"); end
      if (rd_en) begin
        checks++;
        if (rd_data !== expect_d) begin failures++; $display("i=%0d addr %0d got %h want %h", i, rd_addr, rd_data, expect_d); end
      end
      wr_en = 0; rd_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
