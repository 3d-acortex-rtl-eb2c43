// vmm_operator: controller sub-unit that sequences a VMM operation on the
// PE array.
//
// A VMM command names a block of PE rows and columns, a first weight layer,
// a number of steps (1..FOLD) and the output shift and activation.  For each
// step s the operator
//   1. selects weight layer layer+s and buffer fold fold_base+s, and holds the
//      neuron latches in reset and the load capacitors at Vreset (VMM_OP low)
//      for T_LS cycles while the word lines settle;
//   2. phase I, 2**P cycles: VMM_OP high, the DTCs (started in the last cycle
//      of 1) apply the time-domain inputs to the enabled PEs;
//   3. selects the sweep (top) layer, T_LS cycles, charge held on the caps;
//   4. phase II, T_OUT cycles: sweep turns on all bit-select lines, the bit
//      lines cross threshold and the TDCs count (tdc_en is phase II delayed by
//      one cycle, the neuron latch delay).
// Each step therefore takes 2*T_LS + T_int + T_out cycles (74 at the default
// sizes), the elementary-operation time of the paper.  The TDCs are cleared
// when the command is accepted and accumulate over all steps; after the last
// step one drain cycle finishes the count and out_latch stores the IDU
// outputs.  A command thus takes 74*steps + 2 cycles after acceptance.
//
// Column select (cs) and row select (rs) stay asserted for the enabled block
// during the whole command.  The order of the steps follows the paper; the
// exact cycle alignment and the command format are this design's.
//
// Lint note: rst_n is both the asynchronous reset of the flip-flops and the
// 'disable iff' of the assertions, which lint reports as a signal used both
// synchronously and asynchronously (SYNCASYNCNET); this is intended.
module vmm_operator
  import acortex_pkg::*;
#(
  parameter int M      = acortex_pkg::M_DEF,
  parameter int N2     = 2 * acortex_pkg::N_DEF,
  parameter int LAYERS = acortex_pkg::LAYERS_DEF,
  parameter int P      = acortex_pkg::P_DEF,
  parameter int FOLD   = acortex_pkg::FOLD_DEF,
  parameter int T_LS   = acortex_pkg::T_LS_DEF,
  parameter int T_OUT  = acortex_pkg::T_OUT_DEF,
  localparam int LW    = $clog2(LAYERS),
  localparam int FW    = (FOLD > 1) ? $clog2(FOLD) : 1,
  localparam int T_INT = 1 << P
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  input  vmm_cmd_t        cmd,
  output logic            cmd_ready,
  output logic            busy,
  output logic [N2-1:0]   cs,
  output logic [M-1:0]    rs,
  output logic            vmm_op,
  output logic [LW-1:0]   layer_sel,
  output logic            sweep,
  output logic            dtc_start,
  output logic [FW-1:0]   fold_sel,
  output logic            nrn_reset,
  output logic            tdc_clear,
  output logic            tdc_en,
  output logic            out_latch,
  output logic [2:0]      shift,
  output act_e            act
);
  typedef enum logic [2:0] {
    S_IDLE, S_SEL_LAYER, S_PHASE1, S_SEL_SWEEP, S_PHASE2, S_DRAIN, S_LATCH
  } state_e;

  state_e      state;
  logic [7:0]  cnt;
  logic [2:0]  step, steps_q;
  logic [LW-1:0] layer_q;

  assign busy      = (state != S_IDLE);
  assign cmd_ready = (state == S_IDLE);
  assign vmm_op    = (state == S_PHASE1) || (state == S_SEL_SWEEP) || (state == S_PHASE2);
  assign sweep     = (state == S_PHASE2);
  assign nrn_reset = (state == S_SEL_LAYER) || (state == S_IDLE);
  assign dtc_start = (state == S_SEL_LAYER) && (cnt == 8'(T_LS - 1));
  assign out_latch = (state == S_LATCH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      step      <= '0;
      steps_q   <= 3'd1;
      layer_q   <= '0;
      layer_sel <= LW'(SWEEP_LAYER);
      fold_sel  <= '0;
      cs        <= '0;
      rs        <= '0;
      shift     <= '0;
      act       <= ACT_LINEAR;
      tdc_clear <= 1'b0;
      tdc_en    <= 1'b0;
    end else begin
      tdc_clear <= 1'b0;
      tdc_en    <= (state == S_PHASE2);
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          for (int c = 0; c < N2; c++) cs[c] <= (c >= int'(cmd.col_lo)) && (c <= int'(cmd.col_hi));
          for (int r = 0; r < M;  r++) rs[r] <= (r >= int'(cmd.row_lo)) && (r <= int'(cmd.row_hi));
          steps_q   <= (cmd.steps == 3'd0) ? 3'd1 : cmd.steps;
          layer_q   <= LW'(cmd.layer);
          layer_sel <= LW'(cmd.layer);
          fold_sel  <= FW'(cmd.fold_base);
          shift     <= cmd.shift;
          act       <= cmd.act;
          step      <= '0;
          cnt       <= '0;
          tdc_clear <= 1'b1;
          state     <= S_SEL_LAYER;
        end
        S_SEL_LAYER: begin
          cnt <= cnt + 8'd1;
          if (cnt == 8'(T_LS - 1)) begin cnt <= '0; state <= S_PHASE1; end
        end
        S_PHASE1: begin
          cnt <= cnt + 8'd1;
          if (cnt == 8'(T_INT - 1)) begin
            cnt       <= '0;
            layer_sel <= LW'(SWEEP_LAYER);
            state     <= S_SEL_SWEEP;
          end
        end
        S_SEL_SWEEP: begin
          cnt <= cnt + 8'd1;
          if (cnt == 8'(T_LS - 1)) begin cnt <= '0; state <= S_PHASE2; end
        end
        S_PHASE2: begin
          cnt <= cnt + 8'd1;
          if (cnt == 8'(T_OUT - 1)) begin
            cnt <= '0;
            if (step + 3'd1 < steps_q) begin
              step      <= step + 3'd1;
              layer_sel <= layer_q + LW'(step) + LW'(1);
              fold_sel  <= fold_sel + FW'(1);
              state     <= S_SEL_LAYER;
            end else begin
              state <= S_DRAIN;
            end
          end
        end
        S_DRAIN: state <= S_LATCH;
        S_LATCH: begin
          cs    <= '0;
          rs    <= '0;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the sweep layer never carries weights
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_PHASE1) |-> (int'(layer_sel) != SWEEP_LAYER));
endmodule
