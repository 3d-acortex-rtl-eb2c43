// tb_aux_unit: self-checking test of the AUX lanes: random lines and
// operations against a per-lane reference (copy, max, saturating add,
// scaled product).
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (operation set from the paper; register, saturation and scaling are this design's).
module tb_aux_unit;
  import acortex_pkg::*;
  localparam int K = 8, P = 4;
  logic clk = 0, rst_n = 0, in_valid = 0;
  aux_op_e op = AUX_COPY;
  logic [K-1:0][P-1:0] in_data = '0, r;
  int ref_r [K];
  int checks = 0, failures = 0;

  aux_unit #(.K(K), .P(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < K; k++) ref_r[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      op = aux_op_e'($urandom_range(0, 3));
      for (int k = 0; k < K; k++) in_data[k] = P'($urandom_range(0, 15));
      if (in_valid)
        for (int k = 0; k < K; k++) begin
          int x;
          x = int'(in_data[k]);
          unique case (op)
            AUX_COPY: ref_r[k] = x;
            AUX_MAX:  ref_r[k] = (x > ref_r[k]) ? x : ref_r[k];
            AUX_ADD:  ref_r[k] = (ref_r[k] + x > 15) ? 15 : ref_r[k] + x;
            default:  ref_r[k] = (ref_r[k] * x) / 16;
          endcase
        end
      @(posedge clk); #1;
      for (int k = 0; k < K; k++) begin
        checks++;
        if (int'(r[k]) != ref_r[k]) begin failures++; $display("i=%0d k=%0d r=%0d ref=%0d", i, k, r[k], ref_r[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
