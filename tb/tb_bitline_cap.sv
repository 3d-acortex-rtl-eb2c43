// tb_bitline_cap: self-checking test of the O-Bus bit-line model: random
// per-PE currents and cap switches; the stored charge is tracked in the
// testbench and bl_high must equal charge >= T_OUT*IMAX*K*(caps switched in).
// Also checks the reset to Vreset when VMM_OP is low.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (charge integration and V_th threshold with C = M*Imax/V_th from the paper; integer charge is this design's).
module tb_bitline_cap;
  localparam int K = 2, N2 = 3, WBITS = 4, T_OUT = 18, P = 4, IMAX = 15, CUR_W = $clog2(K * IMAX + 1);
  logic clk = 0, rst_n = 0, vmm_op = 0;
  logic [N2-1:0] cap_on = 0;
  logic [N2-1:0][2*K-1:0][CUR_W-1:0] cur = '0;
  logic [2*K-1:0] bl_high;
  int q [2*K];
  int checks = 0, failures = 0, highs = 0;

  bitline_cap #(.K(K), .N2(N2), .WBITS(WBITS), .T_OUT(T_OUT), .P(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int j = 0; j < 2*K; j++) q[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int n;
      @(negedge clk);
      if (t % 40 == 0) vmm_op = 0; else vmm_op = 1;
      if (t % 40 == 1) cap_on = N2'($urandom_range(0, 7));
      for (int c = 0; c < N2; c++)
        for (int j = 0; j < 2*K; j++) cur[c][j] = CUR_W'($urandom_range(0, K * IMAX));
      n = $countones(cap_on);
      #1;
      for (int j = 0; j < 2*K; j++) begin
        checks++;
        if (bl_high[j] != (n != 0 && q[j] >= T_OUT * IMAX * K * n)) begin
          failures++; $display("t=%0d j=%0d q=%0d n=%0d high=%b", t, j, q[j], n, bl_high[j]);
        end
        highs += bl_high[j];
      end
      for (int j = 0; j < 2*K; j++) begin
        if (!vmm_op) q[j] = 0;
        else for (int c = 0; c < N2; c++) if (cap_on[c]) q[j] += int'(cur[c][j]);
      end
    end
    checks++; if (highs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
