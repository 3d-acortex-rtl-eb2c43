// barrel_shifter: selects the most significant part of a TDC accumulator.
//
// The accumulator of a multi-step VMM carries up to ACC_BITS magnitude bits;
// the output carries P.  The shifter moves the signed accumulator right by
// shift positions (arithmetic shift) and saturates the result to the signed
// range of P magnitude bits, [-(2**P-1), 2**P-1].  Purely combinational.
// Selecting the upper bits with a barrel shifter follows the paper; the
// saturation is this design's choice.
module barrel_shifter #(
  parameter int ACC_BITS = acortex_pkg::ACC_BITS_DEF,
  parameter int P        = acortex_pkg::P_DEF,
  localparam int SW      = $clog2(ACC_BITS + 1)
) (
  input  logic signed [ACC_BITS:0] acc,
  input  logic [SW-1:0]            shift,
  output logic signed [P:0]        y
);
  localparam logic signed [ACC_BITS:0] MAXS = (ACC_BITS+1)'((1 << P) - 1);
  localparam logic signed [ACC_BITS:0] MINS = -MAXS;
  logic signed [ACC_BITS:0] s;

  always_comb begin
    s = acc >>> shift;
    if (s > MAXS)      y = (P+1)'(MAXS);
    else if (s < MINS) y = (P+1)'(MINS);
    else               y = s[P:0];
  end
endmodule
