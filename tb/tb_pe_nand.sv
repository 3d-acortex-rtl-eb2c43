// tb_pe_nand: self-checking test of the PE model.  Programs random weights,
// then checks: no current before the selected layer has settled for T_LS
// cycles or while the PE is not selected by both CS and RS; bit-line
// currents equal the sum of the selected layer's weights over the active
// inputs; with sweep on the sweep layer gives K*IMAX on every bit line; and
// the caps are switched in only when enabled and VMM_OP is high.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (PE structure, gating, sweep layer and T_LS from the paper; integer current levels are this design's).
module tb_pe_nand;
  localparam int K = 8, LAYERS = 4, WBITS = 4, T_LS = 5, IMAX = 15, CUR_W = $clog2(K * IMAX + 1);
  logic clk = 0, rst_n = 0, cs = 0, rs = 0, vmm_op = 0, sweep = 0, cap_on, layer_ready;
  logic [1:0] layer_sel = 0;
  logic [K-1:0] ibus = 0;
  logic [2*K-1:0][CUR_W-1:0] obus_cur;
  logic prog_en = 0;
  logic [1:0] prog_layer = 0;
  logic [2:0] prog_row = 0;
  logic [3:0] prog_col = 0;
  logic [3:0] prog_w = 0;
  int w [LAYERS][K][2*K];
  int checks = 0, failures = 0;

  pe_nand #(.K(K), .LAYERS(LAYERS), .WBITS(WBITS), .T_LS(T_LS)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("fail: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 1; l < LAYERS; l++)
      for (int i = 0; i < K; i++)
        for (int j = 0; j < 2*K; j++) begin
          w[l][i][j] = $urandom_range(0, IMAX);
          @(negedge clk);
          prog_en = 1; prog_layer = 2'(l); prog_row = 3'(i); prog_col = 4'(j); prog_w = 4'(w[l][i][j]);
        end
    @(negedge clk); prog_en = 0;
    for (int t = 0; t < 40; t++) begin
      int l;
      l = $urandom_range(1, LAYERS - 1);
      cs = ($urandom_range(0, 5) != 0); rs = ($urandom_range(0, 5) != 0);
      layer_sel = 2'(l); vmm_op = $urandom_range(0, 1); sweep = 0;
      for (int c = 0; c < T_LS + 3; c++) begin
        ibus = K'($urandom);
        #1;
        chk(cap_on == (cs && rs && vmm_op), "cap switch");
        chk(layer_ready == (cs && rs && c >= T_LS), $sformatf("settle c=%0d", c));
        for (int j = 0; j < 2*K; j++) begin
          int s;
          s = 0;
          if (cs && rs && c >= T_LS) for (int i = 0; i < K; i++) if (ibus[i]) s += w[l][i][j];
          chk(int'(obus_cur[j]) == s, $sformatf("current t=%0d c=%0d j=%0d got %0d want %0d", t, c, j, obus_cur[j], s));
        end
        @(negedge clk);
      end
      // phase II: sweep layer, all bit-select lines on
      layer_sel = 0; sweep = 1; ibus = '0;
      repeat (T_LS) @(negedge clk);
      #1;
      for (int j = 0; j < 2*K; j++)
        chk(int'(obus_cur[j]) == ((cs && rs) ? K * IMAX : 0), "sweep current");
      @(negedge clk); sweep = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
