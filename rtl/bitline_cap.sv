// bitline_cap: behavioural model of the shared bit lines of one O-Bus row,
// with the load capacitors switched onto them, and of the threshold at which
// a bit-line voltage flips the neuron latch.  Analog; not synthesizable logic.
//
// Every PE of the row drives the 2K shared bit lines; bit line j collects, in
// each cycle, the charge sum_c cur[c][j] of the PEs.  Each PE whose caps are
// switched in (cap_on) adds K unit capacitors.  With VMM_OP low all caps sit
// at Vreset, which resets the stored charge.  The voltage of bit line j is
// q[j] / (K * n_on); it reaches the threshold V_th when
//     q[j] >= T_OUT * IMAX * K * n_on,
// i.e. the load capacitance C = M*Imax*T/V_th of the time-domain scheme,
// with the row's M = K * n_on inputs and a T_OUT-cycle output window: with
// q = 0 at the start of phase II the sweep current (K*IMAX per PE and cycle)
// reaches V_th exactly at the end of the window.  bl_high[j] compares the
// charge held at the start of the cycle.  The paper precharges the bit line
// and lets the cells discharge it; the model counts charge up instead.
module bitline_cap #(
  parameter int K     = acortex_pkg::K_DEF,
  parameter int N2    = 2 * acortex_pkg::N_DEF,
  parameter int WBITS = acortex_pkg::WBITS_DEF,
  parameter int T_OUT = acortex_pkg::T_OUT_DEF,
  parameter int P     = acortex_pkg::P_DEF,
  localparam int IMAX  = (1 << WBITS) - 1,
  localparam int CUR_W = $clog2(K * IMAX + 1),
  localparam int QW    = $clog2((T_OUT + (1 << P)) * N2 * K * IMAX + 1) + 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               vmm_op,
  input  logic [N2-1:0]                      cap_on,
  input  logic [N2-1:0][2*K-1:0][CUR_W-1:0]  cur,
  output logic [2*K-1:0]                     bl_high
);
  logic [2*K-1:0][QW-1:0] q;
  logic [QW-1:0]          vth_q;
  logic [QW-1:0]          n_on;

  always_comb begin
    n_on = '0;
    for (int c = 0; c < N2; c++) n_on = n_on + QW'(cap_on[c]);
    vth_q = QW'(T_OUT * IMAX * K) * n_on;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
    end else if (!vmm_op) begin
      q <= '0;
    end else begin
      for (int j = 0; j < 2*K; j++) begin
        logic [QW-1:0] s;
        s = q[j];
        for (int c = 0; c < N2; c++) if (cap_on[c]) s = s + QW'(cur[c][j]);
        q[j] <= s;
      end
    end
  end

  always_comb begin
    for (int j = 0; j < 2*K; j++) bl_high[j] = (n_on != '0) && (q[j] >= vth_q);
  end
endmodule
