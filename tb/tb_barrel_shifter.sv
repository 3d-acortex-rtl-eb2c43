// tb_barrel_shifter: exhaustive test of the barrel shifter: every accumulator
// value and shift amount against floor division by 2**shift and saturation
// to [-15, 15].
//
// Timing: the block is combinational; each input is applied and the output
// checked one time unit later.  A watchdog ends the run with a failure if it
// hangs.  The expected behaviour is this
// design's reading of the paper (shift from the paper; saturation range is this design's).
module tb_barrel_shifter;
  localparam int A = 6, P = 4;
  logic signed [A:0] acc;
  logic [2:0] shift;
  logic signed [P:0] y;
  int checks = 0, failures = 0;

  barrel_shifter #(.ACC_BITS(A), .P(P)) dut (.*);

  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = -64; a < 64; a++) begin
      for (int s = 0; s <= A; s++) begin
        int q;
        acc = (A+1)'(a); shift = 3'(s);
        #1;
        q = (a >= 0) ? a / (1 << s) : -((-a + (1 << s) - 1) / (1 << s));
        if (q > 15) q = 15;
        if (q < -15) q = -15;
        checks++;
        if (int'(y) != q) begin failures++; $display("a=%0d s=%0d y=%0d want %0d", a, s, y, q); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
