// bp_unit: back-propagation arithmetic of one junction for one cycle.
//
// For weight lane p (right neuron r = p / DIN) it forms
//   t = adot_left[p] * (w[p] * delta_right[r])
// with two clipping multipliers, and adds t to the partial sum of the left
// neuron the lane is connected to (eq. 2b of the paper, with a-dot applied per
// term, which is why the paper counts 2 multipliers per lane). In the first
// sweep of a block cycle the partial sum is started (t is written as is); in
// later sweeps it is accumulated with a clipping adder. The partial sums live
// in the delta memories of the left layer (read-modify-write). Purely
// combinational.
module bp_unit
  import nn_pkg::*;
#(
  parameter int Z   = 32,
  parameter int DIN = 32,
  localparam int NPC = Z / DIN
)(
  input  fx_t  w         [Z],
  input  fx_t  delta_r   [NPC],
  input  fx_t  adot_l    [Z],
  input  fx_t  psum_in   [Z],
  input  logic first,
  output fx_t  psum_out  [Z]
);
  for (genvar p = 0; p < Z; p++) begin : g_lane
    fx_t wd, t, acc;
    sat_mul u_m1  (.a(w[p]),  .b(delta_r[p / DIN]), .y(wd));
    sat_mul u_m2  (.a(wd),    .b(adot_l[p]),        .y(t));
    sat_add u_acc (.a(psum_in[p]), .b(t),           .y(acc));
    assign psum_out[p] = first ? t : acc;
  end
endmodule
