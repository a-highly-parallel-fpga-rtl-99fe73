// nn_pkg: shared types, constants and helper functions for the pre-defined
// sparse neural network trainer.
//
// Every computed value and trainable parameter (activation a, its derivative
// a-dot, delta, weight and bias) uses one signed fixed-point format with the
// bit triplet (BW, BN, BF) = (12, 3, 8): 1 sign bit, 3 integer bits and 8
// fractional bits, range [-8, 8 - 2^-8]. Arithmetic never widens the format:
// results that do not fit are clipped to the most positive or most negative
// value. The triplet (12,3,8) is the paper's choice; the rounding of products
// (truncation towards minus infinity) is this design's choice.
//
// The package also holds the hash used to build the clash-free interleaver
// tables and the Glorot-style initial weight values, so that the RTL and the
// testbenches derive them from one definition.
package nn_pkg;

  localparam int BW = 12;  // total bits
  localparam int BN = 3;   // integer bits
  localparam int BF = 8;   // fractional bits

  typedef logic signed [BW-1:0] fx_t;

  localparam fx_t FX_MAX = fx_t'({1'b0, {(BW-1){1'b1}}});
  localparam fx_t FX_MIN = fx_t'({1'b1, {(BW-1){1'b0}}});
  localparam fx_t FX_ONE = fx_t'(1 << BF);

  // Clip a wide signed value into the fx_t range.
  function automatic fx_t fx_clip(input logic signed [31:0] v);
    if (v > 32'sd2047)       return FX_MAX;
    else if (v < -32'sd2048) return FX_MIN;
    else                     return fx_t'(v);
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_clip(32'(a) + 32'(b));
  endfunction

  function automatic fx_t fx_sub(input fx_t a, input fx_t b);
    return fx_clip(32'(a) - 32'(b));
  endfunction

  // Product of two fx_t values, scaled back by 2^-(BF+extra) with truncation
  // towards minus infinity, then clipped. extra = 0 is the plain multiplier;
  // extra = log2(1/eta) folds the power-of-two learning rate into the shift.
  function automatic fx_t fx_mul_shr(input fx_t a, input fx_t b, input logic [2:0] extra);
    logic signed [31:0] p;
    p = 32'(a) * 32'(b);
    return fx_clip(p >>> (BF + 32'(extra)));
  endfunction

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    return fx_mul_shr(a, b, 3'd0);
  endfunction

  // 32-bit integer mixer (a variant of the "lowbias32" hash) used to derive
  // the hard-coded interleaver start vectors and sweep rotations.
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Start address of bank m in sweep s (value taken modulo the bank depth).
  function automatic logic [31:0] ilv_start(input int unsigned seed, input int unsigned s,
                                            input int unsigned m);
    return mix32(seed * 32'h9e3779b9 ^ (s << 16) ^ m ^ 32'h5bd1e995);
  endfunction

  // Lane-to-bank rotation of sweep s (value taken modulo the bank count).
  function automatic logic [31:0] ilv_rot(input int unsigned seed, input int unsigned s);
    return (s == 0) ? 32'd0 : mix32(seed * 32'h85ebca6b ^ (s << 8) ^ 32'hc2b2ae35);
  endfunction

  // Learning-rate schedule: eta = 2^-shift, 2^-3 for epochs 0 and 1, then
  // halved after every further 4 epochs down to 2^-7.
  function automatic logic [2:0] eta_shift_of(input logic [7:0] epoch);
    int unsigned e;
    e = 32'(epoch);
    if (e < 2) return 3'd3;
    else if (e >= 14) return 3'd7;
    else return 3'(4 + (e - 2) / 4);
  endfunction

endpackage
