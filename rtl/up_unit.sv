// up_unit: gradient-descent update arithmetic of one junction for one cycle.
//
//   w[p] <- w[p] - eta * a_left[p] * delta_right[p / DIN]   (Z lanes)
//   b[r] <- b[r] - eta * delta_right[r]                      (NPC = Z/DIN neurons)
// (eq. 3 of the paper). eta = 2^-eta_shift is a power of two, so the eta
// multiplication is a shift: the full product a*delta is shifted right by
// BF + eta_shift (truncating towards minus infinity) and clipped, then
// subtracted with clipping. Folding the shift into the product before
// truncation is this design's choice. Purely combinational.
module up_unit
  import nn_pkg::*;
#(
  parameter int Z   = 128,
  parameter int DIN = 64,
  localparam int NPC = Z / DIN
)(
  input  fx_t        w       [Z],
  input  fx_t        a_l     [Z],
  input  fx_t        delta_r [NPC],
  input  fx_t        b       [NPC],
  input  logic [2:0] eta_shift,
  output fx_t        w_new   [Z],
  output fx_t        b_new   [NPC]
);
  always_comb begin
    for (int p = 0; p < Z; p++)
      w_new[p] = fx_sub(w[p], fx_mul_shr(a_l[p], delta_r[p / DIN], eta_shift));
    for (int r = 0; r < NPC; r++)
      b_new[r] = fx_sub(b[r], fx_clip(32'(delta_r[r]) >>> eta_shift));
  end
endmodule
