// tb_tdc: self-checking test of the TDC accumulator against a reference
// count, with random clear, enable and up/down pulses.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (accumulating TDC from the paper; the sign bit and down-counting are this design's).
module tb_tdc;
  localparam int A = 6;
  logic clk = 0, rst_n = 0, clear = 0, en = 0, up = 0, down = 0;
  logic signed [A:0] acc;
  int ref_v = 0;
  int checks = 0, failures = 0;

  tdc #(.ACC_BITS(A)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      clear = ($urandom_range(0, 99) == 0);
      en = ($urandom_range(0, 3) != 0);
      up = $urandom_range(0, 1); down = $urandom_range(0, 1);
      if (clear) ref_v = 0;
      else if (en && up && !down) ref_v++;
      else if (en && down && !up) ref_v--;
      if (ref_v > 63) ref_v -= 128;
      if (ref_v < -64) ref_v += 128;
      @(posedge clk); #1;
      checks++;
      if (int'(acc) != ref_v) begin failures++; $display("i=%0d acc=%0d ref=%0d", i, acc, ref_v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
