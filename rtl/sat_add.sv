// sat_add: fixed-point adder that keeps the (12,3,8) format.
//
// The exact sum of the two operands is formed one bit wider and then clipped
// to the most positive (+7.996) or most negative (-8) representable value, as
// the paper prescribes for all adders of the network. Purely combinational.
module sat_add
  import nn_pkg::*;
(
  input  fx_t a,
  input  fx_t b,
  output fx_t y
);
  logic signed [BW:0] s;
  always_comb begin
    s = {a[BW-1], a} + {b[BW-1], b};
    if (s > $signed({2'b00, {(BW-1){1'b1}}}))       y = FX_MAX;
    else if (s < $signed({2'b11, {(BW-1){1'b0}}}))  y = FX_MIN;
    else                                            y = s[BW-1:0];
  end
endmodule
