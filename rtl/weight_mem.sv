// weight_mem: the weight+bias memory of one junction.
//
// Z weight banks of DEPTH = W/Z cells each, augmented with NPC = Z/DIN bias
// banks (the biases of the NPC right neurons whose weights sit in the same
// cell). In cycle k of a block cycle cell k of every bank is read; the updated
// values of cell k-1 are written through the second port in the same cycle,
// so the memory is simple dual-port (one read port, one write port), as in the
// paper. The read is asynchronous from a registered address, which together
// with the address register upstream behaves like a synchronous block RAM.
//
// Initial contents follow the paper: all weights and biases of the junction
// are initialised from the same set of DEPTH values, drawn from a normal
// distribution of variance 2/(DOUT+DIN) (Glorot normal); cell k of every bank
// holds value k. The values come from a fixed pseudo-random sequence
// (nn_pkg::mix32 with SEED, Box-Muller), which is this design's choice.
module weight_mem
  import nn_pkg::*;
#(
  parameter int Z     = 128,
  parameter int DIN   = 64,
  parameter int DOUT  = 4,
  parameter int DEPTH = 32,
  parameter int SEED  = 11,
  localparam int NPC  = Z / DIN,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
)(
  input  logic          clk,
  input  logic [AW-1:0] raddr,
  output fx_t           w_rd [Z],
  output fx_t           b_rd [NPC],
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fx_t           w_wr [Z],
  input  fx_t           b_wr [NPC]
);
  fx_t wmem [Z][DEPTH];
  fx_t bmem [NPC][DEPTH];

  // Glorot-normal value number k of this junction.
  function automatic fx_t init_value(input int k);
    real u1, u2, g, sigma;
    u1 = (real'(mix32(32'(SEED * 7919 + 2 * k)) >> 8) + 1.0) / 16777217.0;
    u2 = real'(mix32(32'(SEED * 7919 + 2 * k + 1)) >> 8) / 16777216.0;
    g  = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
    sigma = $sqrt(2.0 / real'(DOUT + DIN));
    return fx_clip(32'($rtoi(g * sigma * real'(1 << BF) + ((g >= 0.0) ? 0.5 : -0.5))));
  endfunction

  initial begin
    for (int k = 0; k < DEPTH; k++) begin
      for (int z = 0; z < Z; z++)   wmem[z][k] = init_value(k);
      for (int n = 0; n < NPC; n++) bmem[n][k] = init_value(k);
    end
  end

  always_ff @(posedge clk) begin
    if (we) begin
      for (int z = 0; z < Z; z++)   wmem[z][waddr] <= w_wr[z];
      for (int n = 0; n < NPC; n++) bmem[n][waddr] <= b_wr[n];
    end
  end

  always_comb begin
    for (int z = 0; z < Z; z++)   w_rd[z] = wmem[z][raddr];
    for (int n = 0; n < NPC; n++) b_rd[n] = bmem[n][raddr];
  end
endmodule
