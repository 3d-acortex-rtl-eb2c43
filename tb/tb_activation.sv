// tb_activation: exhaustive test of the activation functions, with the
// reference computed from exp/tanh in real arithmetic.
//
// Timing: the block is combinational; each input is applied and the output
// checked one time unit later.  A watchdog ends the run with a failure if it
// hangs.  The expected behaviour is this
// design's reading of the paper (function set from the paper; scaling and rounding are this design's).
module tb_activation;
  import acortex_pkg::*;
  logic signed [4:0] v;
  act_e act;
  logic [3:0] y;
  int checks = 0, failures = 0;

  activation dut (.*);

  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < 4; a++) begin
      for (int x = -16; x < 16; x++) begin
        int want;
        real r;
        v = 5'(x); act = act_e'(a);
        #1;
        unique case (act_e'(a))
          ACT_RELU:    want = (x < 0) ? 0 : x;
          ACT_LINEAR:  want = ((x < -8) ? -8 : (x > 7) ? 7 : x) + 8;
          ACT_SIGMOID: begin r = 15.0 / (1.0 + $exp(-x / 4.0)); want = int'($floor(r + 0.5)); end
          default:     begin r = 7.5 * (1.0 + $tanh(x / 4.0)); want = int'($floor(r + 0.5)); end
        endcase
        checks++;
        if (int'(y) != want) begin failures++; $display("act=%0d v=%0d y=%0d want %0d", a, x, y, want); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
