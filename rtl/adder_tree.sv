// adder_tree: sums N fixed-point values in one cycle with a binary tree of
// clipping adders (sat_add) of depth log2(N).
//
// The feedforward unit uses one tree per right neuron processed in a cycle, so
// that all d_in products of a neuron are summed at once and no partial sums
// need storing. Level l adds pairs (2i, 2i+1) of level l-1; every adder clips.
// N must be a power of two. Purely combinational.
module adder_tree
  import nn_pkg::*;
#(
  parameter int N = 64
)(
  input  fx_t x [N],
  output fx_t sum
);
  localparam int LG = $clog2(N);

  // g_lvl[l].v[i]: output i of level l; level 0 holds the inputs.
  for (genvar l = 0; l <= LG; l++) begin : g_lvl
    fx_t v [N >> l];
    if (l == 0) begin : g_in
      assign v = x;
    end else begin : g_add
      for (genvar i = 0; i < (N >> l); i++) begin : g_node
        sat_add u_add (.a(g_lvl[l-1].v[2*i]), .b(g_lvl[l-1].v[2*i+1]), .y(v[i]));
      end
    end
  end

  assign sum = g_lvl[LG].v[0];

  initial assert ((1 << LG) == N) else $error("adder_tree: N must be a power of two");
endmodule
