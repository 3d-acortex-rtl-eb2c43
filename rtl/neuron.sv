// neuron: differential neuron block for one output (one pair of bit lines).
//
// Each bit line of the pair (positive and negative column) drives a set/reset
// latch whose set input is the bit-line level as seen by a logic gate, i.e.
// "V_C has reached V_th"; RESET clears both latches before each elementary
// VMM.  Gates combine the two latches so that out_pos is high while only the
// positive latch is set and out_neg while only the negative one is: since
// both output pulses end together at the end of phase II, their lengths
// differ by exactly the difference of the two columns' outputs.
//
// Timing: the latches are modelled as flip-flops, so an output follows its
// bit line by one cycle.  The latch pair and the AND/NOT combination follow
// the paper's neuron; clocking the latches is this design's choice.
module neuron (
  input  logic clk,
  input  logic rst_n,
  input  logic reset,     // RESET (active high here)
  input  logic bl_pos,    // positive bit line above threshold
  input  logic bl_neg,    // negative bit line above threshold
  output logic out_pos,
  output logic out_neg
);
  logic lat_pos, lat_neg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lat_pos <= 1'b0;
      lat_neg <= 1'b0;
    end else if (reset) begin
      lat_pos <= 1'b0;
      lat_neg <= 1'b0;
    end else begin
      lat_pos <= lat_pos | bl_pos;
      lat_neg <= lat_neg | bl_neg;
    end
  end

  assign out_pos = lat_pos & ~lat_neg;
  assign out_neg = lat_neg & ~lat_pos;
endmodule
