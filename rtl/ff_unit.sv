// ff_unit: feedforward arithmetic of one junction for one cycle.
//
// Z weights and the Z left activations they connect to (already routed into
// weight-lane order) arrive together. Lanes [r*DIN, (r+1)*DIN) belong to right
// neuron r of the NPC = Z/DIN neurons of this cycle. Per neuron: DIN clipping
// multipliers, one adder tree of depth log2(DIN), one clipping bias adder and
// one sigmoid LUT giving a = sigma(s) and a-dot = sigma'(s), s = sum(w*a) + b
// (eq. 1 of the paper). Because Z >= DIN a neuron completes in one cycle and no
// feedforward partial sums are stored. Purely combinational (the arithmetic
// stage of the junction pipeline).
module ff_unit
  import nn_pkg::*;
#(
  parameter int Z   = 128,
  parameter int DIN = 64,
  localparam int NPC = Z / DIN
)(
  input  fx_t w    [Z],
  input  fx_t a    [Z],
  input  fx_t b    [NPC],
  output fx_t s    [NPC],   // sigmoid argument, for observation
  output fx_t act  [NPC],
  output fx_t adot [NPC]
);
  fx_t prod [Z];

  for (genvar p = 0; p < Z; p++) begin : g_mul
    sat_mul u_mul (.a(w[p]), .b(a[p]), .y(prod[p]));
  end

  for (genvar r = 0; r < NPC; r++) begin : g_neuron
    fx_t terms [DIN];
    fx_t tsum;
    for (genvar f = 0; f < DIN; f++) begin : g_t
      assign terms[f] = prod[r*DIN + f];
    end
    adder_tree #(.N(DIN)) u_tree (.x(terms), .sum(tsum));
    sat_add     u_bias (.a(tsum), .b(b[r]), .y(s[r]));
    sigmoid_lut u_sig  (.x(s[r]), .sig(act[r]), .dsig(adot[r]));
  end
endmodule
