// tb_idu: self-checking test of the IDU.  For each output a random number of
// steps is run; in each step the positive and negative bit lines cross
// threshold at random cycles of an 18-cycle phase II, as the time-domain
// scheme produces them.  After the last step the latched 4-bit output must
// equal activation(saturate((sum of pulse-length differences) >> shift)),
// computed here independently.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (neuron, TDC, shifter and activation sequence from the paper; up/down counting is this design's).
module tb_idu;
  import acortex_pkg::*;
  localparam int K = 4, P = 4, A = 6, T_OUT = 18;
  logic clk = 0, rst_n = 0, nrn_reset = 1, tdc_clear = 0, tdc_en = 0, out_latch = 0;
  logic [2*K-1:0] bl_high = 0;
  logic [2:0] shift = 0;
  act_e act = ACT_RELU;
  logic [K-1:0][P-1:0] out_word;
  int checks = 0, failures = 0;

  idu #(.K(K), .P(P), .ACC_BITS(A)) dut (.*);
  always #5 clk = ~clk;

  function automatic int act_ref(int v, act_e a);
    real r;
    unique case (a)
      ACT_RELU:    return (v < 0) ? 0 : v;
      ACT_LINEAR:  return ((v < -8) ? -8 : (v > 7) ? 7 : v) + 8;
      ACT_SIGMOID: begin r = 15.0 / (1.0 + $exp(-v / 4.0)); return int'($floor(r + 0.5)); end
      default:     begin r = 7.5 * (1.0 + $tanh(v / 4.0)); return int'($floor(r + 0.5)); end
    endcase
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int steps, sum [K], tp [K], tn [K];
      steps = $urandom_range(1, 4);
      shift = 3'($urandom_range(0, 2));
      act = act_e'($urandom_range(0, 3));
      for (int k = 0; k < K; k++) sum[k] = 0;
      @(negedge clk); tdc_clear = 1; @(negedge clk); tdc_clear = 0;
      for (int s = 0; s < steps; s++) begin
        // crossing cycle in phase II: pulse length = T_OUT - crossing (0..15)
        for (int k = 0; k < K; k++) begin
          tp[k] = T_OUT - $urandom_range(0, 15);
          tn[k] = T_OUT - $urandom_range(0, 15);
          sum[k] += (T_OUT - tp[k]) - (T_OUT - tn[k]);
        end
        nrn_reset = 1; bl_high = '0; @(negedge clk); nrn_reset = 0;
        for (int c = 0; c <= T_OUT; c++) begin
          tdc_en = (c >= 1);           // phase II delayed by the latch
          for (int k = 0; k < K; k++) begin
            bl_high[2*k]   = (c < T_OUT) && (c >= tp[k]);
            bl_high[2*k+1] = (c < T_OUT) && (c >= tn[k]);
          end
          @(negedge clk);
        end
        tdc_en = 0;
      end
      out_latch = 1; @(negedge clk); out_latch = 0;
      for (int k = 0; k < K; k++) begin
        int v;
        v = (sum[k] >= 0) ? (sum[k] >> shift) : -((-sum[k] + (1 << shift) - 1) >> shift);
        if (v > 15) v = 15;
        if (v < -15) v = -15;
        checks++;
        if (int'(out_word[k]) != act_ref(v, act)) begin
          failures++; $display("t=%0d k=%0d sum=%0d shift=%0d act=%0d got %0d want %0d", t, k, sum[k], shift, act, out_word[k], act_ref(v, act));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
