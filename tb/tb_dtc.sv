// tb_dtc: self-checking test of the DTC.  Random words and column enables;
// checks, cycle by cycle over the 2**P-cycle window, that input i is high
// exactly for its first din[i] cycles, and that busy lasts 2**P cycles.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (shared counter, comparator and latch per input from the paper; input capture at start is this design's).
module tb_dtc;
  localparam int K = 8, P = 4, T = 1 << P;
  logic clk = 0, rst_n = 0, start = 0, en = 0, busy;
  logic [K-1:0][P-1:0] din;
  logic [K-1:0] pulse;
  int checks = 0, failures = 0;

  dtc #(.K(K), .P(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 200; trial++) begin
      logic [K-1:0][P-1:0] w;
      logic e;
      for (int i = 0; i < K; i++) w[i] = P'($urandom_range(0, T-1));
      if (trial == 0) for (int i = 0; i < K; i++) w[i] = P'(T-1);
      e = (trial % 7 != 3);
      @(negedge clk); din = w; en = e; start = 1;
      @(negedge clk); start = 0; din = '1;   // inputs captured; change them
      for (int t = 0; t < T; t++) begin
        checks++;
        if (!busy) begin failures++; $display("busy low at t=%0d", t); end
        for (int i = 0; i < K; i++) begin
          checks++;
          if (pulse[i] !== (e && (t < int'(w[i])))) begin
            failures++;
            $display("trial %0d t=%0d i=%0d w=%0d pulse=%b", trial, t, i, w[i], pulse[i]);
          end
        end
        @(negedge clk);
      end
      checks++;
      if (busy || pulse != '0) begin failures++; $display("window did not end"); end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
