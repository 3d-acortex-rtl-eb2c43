// tb_neuron: self-checking test of the differential neuron.  Random bit-line
// crossing times for the two columns; the positive (negative) output must be
// high exactly while only the positive (negative) column has crossed, one
// cycle after its bit line, and both must clear on reset.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (latch pair with AND/NOT gates from the paper; the flip-flop timing is this design's).
module tb_neuron;
  logic clk = 0, rst_n = 0, reset = 1, bl_pos = 0, bl_neg = 0, out_pos, out_neg;
  int checks = 0, failures = 0;

  neuron dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      int tp, tn, np, nn;
      tp = $urandom_range(0, 20); tn = $urandom_range(0, 20);   // 20 = never
      @(negedge clk); reset = 1;
      @(negedge clk); reset = 0;
      np = 0; nn = 0;
      for (int t = 0; t < 20; t++) begin
        bl_pos = (t >= tp); bl_neg = (t >= tn);
        @(negedge clk);
        // latches hold "crossed at or before t"
        checks++;
        if (out_pos !== ((t >= tp) && !(t >= tn)) || out_neg !== ((t >= tn) && !(t >= tp))) begin
          failures++; $display("trial %0d t=%0d tp=%0d tn=%0d pos=%b neg=%b", trial, t, tp, tn, out_pos, out_neg);
        end
        np += out_pos; nn += out_neg;
      end
      checks++;
      if (np - nn != ((tp < 20 ? 20 - tp : 0) - (tn < 20 ? 20 - tn : 0))) begin
        failures++; $display("trial %0d pulse-length difference wrong", trial);
      end
      bl_pos = 0; bl_neg = 0;
    end
    @(negedge clk); reset = 1; @(negedge clk);
    checks++; if (out_pos || out_neg) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
