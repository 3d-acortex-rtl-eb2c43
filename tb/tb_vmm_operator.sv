// tb_vmm_operator: checks the operator's timing against the elementary-step
// time 2*T_LS + T_int + T_out = 74 cycles per step at the default sizes:
// the command takes 74*steps + 2 cycles, phase I lasts 2**P cycles with
// VMM_OP high and DTC start in the cycle before, the sweep layer is selected
// for phase II (T_out cycles), the TDC window is phase II delayed by one,
// layers and folds advance per step, and the row/column masks match.
//
// Timing: a free-running clock with a 10-time-unit period; stimulus is
// driven away from the rising edge (mostly on the falling edge) and outputs
// are compared with the reference between edges.  A watchdog ends the run
// with a failure if it hangs.  The expected behaviour is this
// design's reading of the paper (step time 2*T_LS + T_int + T and the step order from the paper; exact cycle alignment is this design's).
module tb_vmm_operator;
  import acortex_pkg::*;
  localparam int M = 32, N2 = 16, T_LS = 20, T_OUT = 18, T_INT = 16;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, busy;
  vmm_cmd_t cmd;
  logic [N2-1:0] cs;
  logic [M-1:0] rs;
  logic vmm_op, sweep, dtc_start, nrn_reset, tdc_clear, tdc_en, out_latch;
  logic [5:0] layer_sel;
  logic [1:0] fold_sel;
  logic [2:0] shift;
  act_e act;
  int checks = 0, failures = 0;

  vmm_operator dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("fail: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      vmm_cmd_t c;
      int cyc, n_tdc, n_sweep, n_p1, n_start, n_latch, n_clear, stepn;
      c = '0;
      c.row_lo = 5'($urandom_range(0, 15)); c.row_hi = 5'(int'(c.row_lo) + $urandom_range(0, 16));
      c.col_lo = 4'($urandom_range(0, 7));  c.col_hi = 4'(int'(c.col_lo) + $urandom_range(0, 8));
      c.layer = 6'($urandom_range(1, 59));
      c.steps = 3'($urandom_range(1, 4));
      c.fold_base = 2'($urandom_range(0, 4 - int'(c.steps)));
      c.shift = 3'($urandom_range(0, 6)); c.act = act_e'($urandom_range(0, 3));
      @(negedge clk); cmd = c; cmd_valid = 1;
      @(negedge clk); cmd_valid = 0;
      cyc = 0; n_tdc = 0; n_sweep = 0; n_p1 = 0; n_start = 0; n_latch = 0; n_clear = 0;
      while (busy) begin
        // position within the current step
        int ps;
        stepn = cyc / 74; ps = cyc % 74;
        n_clear += tdc_clear;
        if (stepn < int'(c.steps)) begin
          chk(cs == N2'(((1 << (int'(c.col_hi) + 1)) - 1) & ~((1 << int'(c.col_lo)) - 1)), "column mask");
          for (int r = 0; r < M; r++) chk(rs[r] == (r >= int'(c.row_lo) && r <= int'(c.row_hi)), "row mask");
          chk(int'(fold_sel) == int'(c.fold_base) + stepn, "fold select");
          if (ps < T_LS + T_INT) chk(int'(layer_sel) == int'(c.layer) + stepn, "weight layer");
          else chk(int'(layer_sel) == SWEEP_LAYER, "sweep layer");
          chk(vmm_op == (ps >= T_LS), "VMM_OP");
          chk(dtc_start == (ps == T_LS - 1), "DTC start");
          chk(sweep == (ps >= 2 * T_LS + T_INT), "sweep");
          chk(nrn_reset == (ps < T_LS), "neuron reset");
        end
        chk(tdc_en == ((ps == 0 && stepn > 0) || (stepn < int'(c.steps) && ps > 2 * T_LS + T_INT)), "TDC window");
        n_tdc += tdc_en; n_sweep += sweep; n_p1 += (vmm_op && !sweep && (ps < T_LS + T_INT));
        n_start += dtc_start; n_latch += out_latch;
        @(negedge clk);
        cyc++;
      end
      chk(cyc == 74 * int'(c.steps) + 2, $sformatf("command took %0d cycles", cyc));
      chk(n_tdc == T_OUT * int'(c.steps), "TDC cycles");
      chk(n_sweep == T_OUT * int'(c.steps), "phase II cycles");
      chk(n_p1 == T_INT * int'(c.steps), "phase I cycles");
      chk(n_start == int'(c.steps) && n_latch == 1 && n_clear == 1, "DTC starts / latch / clear");
      chk(shift == c.shift && act == c.act, "output configuration");
      chk(cs == '0 && rs == '0, "PEs released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
