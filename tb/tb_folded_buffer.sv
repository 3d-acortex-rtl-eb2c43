// tb_folded_buffer: self-checking test of the folded buffer chain.  Random
// individual loads and load&shift operations with random chain lengths are
// applied to the block and to a flat reference array; after each one every
// column output is compared for every fold level.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (load, load&shift, folding and step selector from the paper; the position order is this design's).
module tb_folded_buffer;
  localparam int K = 4, P = 4, N2 = 4, FOLD = 4, NB = N2 * FOLD;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_shift = 0;
  logic [3:0] wr_idx = 0;
  logic [4:0] chain_len = 0;
  logic [K-1:0][P-1:0] wr_data = '0;
  logic [1:0] fold_sel = 0;
  logic [N2-1:0][K-1:0][P-1:0] col_data;
  logic [K-1:0][P-1:0] ref_q [NB];
  int checks = 0, failures = 0, shifts = 0;

  folded_buffer #(.K(K), .P(P), .N2(N2), .FOLD(FOLD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int b = 0; b < NB; b++) ref_q[b] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 500; op++) begin
      @(negedge clk);
      wr_en    = 1;
      wr_shift = ($urandom_range(0, 2) == 0);
      wr_idx   = 4'($urandom_range(0, NB-1));
      chain_len = 5'($urandom_range(1, NB));
      wr_data  = K*P'($urandom);
      if (wr_shift) begin
        shifts++;
        for (int b = 0; b < int'(chain_len) - 1; b++) ref_q[b] = ref_q[b+1];
        ref_q[int'(chain_len) - 1] = wr_data;
      end else begin
        ref_q[wr_idx] = wr_data;
      end
      @(negedge clk);
      wr_en = 0;
      for (int f = 0; f < FOLD; f++) begin
        fold_sel = 2'(f);
        #1;
        for (int c = 0; c < N2; c++) begin
          checks++;
          if (col_data[c] !== ref_q[f * N2 + c]) begin
            failures++;
            $display("op %0d fold %0d col %0d: got %h want %h", op, f, c, col_data[c], ref_q[f*N2+c]);
          end
        end
      end
    end
    checks++; if (shifts == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
