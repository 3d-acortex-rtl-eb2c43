// tdc: time-to-digital converter for one output.
//
// An adder and a register form an accumulator that counts clock cycles while
// the neuron's output pulse is high.  With the differential neuron the count
// goes up during a positive pulse and down during a negative one, so the
// register holds a signed value.  It is cleared once per VMM operation and
// keeps accumulating over the elementary steps of a multi-step VMM: ACC_BITS
// = 6 is the paper's 4-bit output plus 2 bits for 4 steps; one more bit holds
// the sign, which is this design's addition for the differential output.
//
// Interface: clear (synchronous, wins over counting), en (count window),
// up/down pulses.  acc is the register.
module tdc #(
  parameter int ACC_BITS = acortex_pkg::ACC_BITS_DEF
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        en,
  input  logic                        up,
  input  logic                        down,
  output logic signed [ACC_BITS:0]    acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  acc <= '0;
    else if (clear)              acc <= '0;
    else if (en && up && !down)  acc <= acc + 1'b1;
    else if (en && down && !up)  acc <= acc - 1'b1;
  end
endmodule
