// activation: the nonlinear function applied to a shifted TDC output.
//
// Input: a signed value v in [-16, 15] (the barrel shifter gives [-15, 15]).
// Output: an unsigned 4-bit activation code, the word format of the main
// memory and of the DTC inputs.  Functions (act):
//   ACT_RELU    : y = clamp(v, 0, 15)
//   ACT_LINEAR  : y = clamp(v, -8, 7) + 8           (offset-binary code)
//   ACT_SIGMOID : y = floor(15 / (1 + exp(-v/4)) + 0.5)
//   ACT_TANH    : y = floor(7.5 * (1 + tanh(v/4)) + 0.5)  (offset-binary)
// The two tables below are these formulas evaluated for all 32 inputs.
// The set of functions (linear, ReLU, tanh, sigmoid) is the paper's; the
// scaling v/4, the code formats and the table form are this design's, which
// fixes the module to 4-bit activations.  Purely combinational.
module activation
  import acortex_pkg::*;
(
  input  logic signed [4:0] v,
  input  act_e              act,
  output logic [3:0]        y
);
  logic [3:0] sig_y, tanh_y;

  always_comb begin
    unique case (v)
        5'sb10000: sig_y = 4'd0;
        -5'sd15: sig_y = 4'd0;
        -5'sd14: sig_y = 4'd0;
        -5'sd13: sig_y = 4'd1;
        -5'sd12: sig_y = 4'd1;
        -5'sd11: sig_y = 4'd1;
        -5'sd10: sig_y = 4'd1;
        -5'sd9: sig_y = 4'd1;
        -5'sd8: sig_y = 4'd2;
        -5'sd7: sig_y = 4'd2;
        -5'sd6: sig_y = 4'd3;
        -5'sd5: sig_y = 4'd3;
        -5'sd4: sig_y = 4'd4;
        -5'sd3: sig_y = 4'd5;
        -5'sd2: sig_y = 4'd6;
        -5'sd1: sig_y = 4'd7;
         5'sd0: sig_y = 4'd8;
         5'sd1: sig_y = 4'd8;
         5'sd2: sig_y = 4'd9;
         5'sd3: sig_y = 4'd10;
         5'sd4: sig_y = 4'd11;
         5'sd5: sig_y = 4'd12;
         5'sd6: sig_y = 4'd12;
         5'sd7: sig_y = 4'd13;
         5'sd8: sig_y = 4'd13;
         5'sd9: sig_y = 4'd14;
         5'sd10: sig_y = 4'd14;
         5'sd11: sig_y = 4'd14;
         5'sd12: sig_y = 4'd14;
         5'sd13: sig_y = 4'd14;
         5'sd14: sig_y = 4'd15;
         5'sd15: sig_y = 4'd15;
      default: sig_y = 4'd0;
    endcase
  end

  always_comb begin
    unique case (v)
        5'sb10000: tanh_y = 4'd0;
        -5'sd15: tanh_y = 4'd0;
        -5'sd14: tanh_y = 4'd0;
        -5'sd13: tanh_y = 4'd0;
        -5'sd12: tanh_y = 4'd0;
        -5'sd11: tanh_y = 4'd0;
        -5'sd10: tanh_y = 4'd0;
        -5'sd9: tanh_y = 4'd0;
        -5'sd8: tanh_y = 4'd0;
        -5'sd7: tanh_y = 4'd0;
        -5'sd6: tanh_y = 4'd1;
        -5'sd5: tanh_y = 4'd1;
        -5'sd4: tanh_y = 4'd2;
        -5'sd3: tanh_y = 4'd3;
        -5'sd2: tanh_y = 4'd4;
        -5'sd1: tanh_y = 4'd6;
         5'sd0: tanh_y = 4'd8;
         5'sd1: tanh_y = 4'd9;
         5'sd2: tanh_y = 4'd11;
         5'sd3: tanh_y = 4'd12;
         5'sd4: tanh_y = 4'd13;
         5'sd5: tanh_y = 4'd14;
         5'sd6: tanh_y = 4'd14;
         5'sd7: tanh_y = 4'd15;
         5'sd8: tanh_y = 4'd15;
         5'sd9: tanh_y = 4'd15;
         5'sd10: tanh_y = 4'd15;
         5'sd11: tanh_y = 4'd15;
         5'sd12: tanh_y = 4'd15;
         5'sd13: tanh_y = 4'd15;
         5'sd14: tanh_y = 4'd15;
         5'sd15: tanh_y = 4'd15;
      default: tanh_y = 4'd0;
    endcase
  end

  always_comb begin
    unique case (act)
      ACT_RELU:    y = (v < 0) ? 4'd0 : v[3:0];
      ACT_LINEAR:  y = (v < -5'sd8) ? 4'd0 : (v > 5'sd7) ? 4'd15 : 4'(v + 5'sd8);
      ACT_SIGMOID: y = sig_y;
      ACT_TANH:    y = tanh_y;
      default:     y = 4'd0;
    endcase
  end
endmodule
