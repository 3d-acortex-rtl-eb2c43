// idu: integrate-digitalize unit of one O-Bus row (K outputs).
//
// For each of the K differential outputs: a neuron (latch pair on the
// positive and negative bit line), a TDC accumulating the neuron's output
// pulses over all steps of a VMM, a barrel shifter selecting the upper bits
// and the activation function.  out_latch stores the K activation codes in
// the output register, from which the collector writes them to main memory.
//
// Control (from the operator): nrn_reset clears the neuron latches before each
// elementary step; tdc_clear clears the accumulators at the start of a VMM;
// tdc_en is the counting window; shift and act configure the outputs.
// Timing: out_word is registered, valid the cycle after out_latch.
// The sub-blocks and their order follow the paper; the output register is
// this design's choice.
module idu
  import acortex_pkg::*;
#(
  parameter int K        = acortex_pkg::K_DEF,
  parameter int P        = acortex_pkg::P_DEF,
  parameter int ACC_BITS = acortex_pkg::ACC_BITS_DEF,
  localparam int SW      = $clog2(ACC_BITS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2*K-1:0]       bl_high,
  input  logic                 nrn_reset,
  input  logic                 tdc_clear,
  input  logic                 tdc_en,
  input  logic [SW-1:0]        shift,
  input  act_e                 act,
  input  logic                 out_latch,
  output logic [K-1:0][P-1:0]  out_word
);
  logic [K-1:0]                     pos, neg;
  logic signed [K-1:0][ACC_BITS:0]  acc;
  logic signed [K-1:0][P:0]         shifted;
  logic [K-1:0][3:0]                act_y;

  for (genvar k = 0; k < K; k++) begin : g_out
    neuron u_nrn (
      .clk, .rst_n, .reset(nrn_reset),
      .bl_pos(bl_high[2*k]), .bl_neg(bl_high[2*k+1]),
      .out_pos(pos[k]), .out_neg(neg[k])
    );
    tdc #(.ACC_BITS(ACC_BITS)) u_tdc (
      .clk, .rst_n, .clear(tdc_clear), .en(tdc_en),
      .up(pos[k]), .down(neg[k]), .acc(acc[k])
    );
    barrel_shifter #(.ACC_BITS(ACC_BITS), .P(P)) u_bsh (
      .acc(acc[k]), .shift, .y(shifted[k])
    );
    activation u_act (.v(5'(shifted[k])), .act, .y(act_y[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         out_word <= '0;
    else if (out_latch) for (int k = 0; k < K; k++) out_word[k] <= P'(act_y[k]);
  end
endmodule
