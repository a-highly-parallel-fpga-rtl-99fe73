// sat_mul: fixed-point multiplier that keeps the (12,3,8) format.
//
// The full 24-bit product (16 fractional bits) is shifted right by BF = 8 with
// truncation towards minus infinity and clipped to [-8, 8 - 2^-8]. The clipping
// follows the paper; truncation (rather than rounding) is this design's choice.
// Purely combinational: it maps onto one DSP multiplier.
module sat_mul
  import nn_pkg::*;
(
  input  fx_t a,
  input  fx_t b,
  output fx_t y
);
  logic signed [2*BW-1:0] p;
  logic signed [2*BW-BF-1:0] q;
  always_comb begin
    p = a * b;
    q = p[2*BW-1:BF];
    if (q > $signed({{(BW-BF+1){1'b0}}, {(BW-1){1'b1}}}))      y = FX_MAX;
    else if (q < $signed({{(BW-BF+1){1'b1}}, {(BW-1){1'b0}}})) y = FX_MIN;
    else                                                       y = q[BW-1:0];
  end
endmodule
