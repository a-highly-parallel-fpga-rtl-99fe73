// interleaver: clash-free address generator (start vector + sweep shift).
//
// The left layer of a junction (NL neurons) is stored in Z banks of depth
// D = NL/Z: neuron n sits in bank n mod Z at address n / Z. Weights are
// numbered in natural order on the right side, Z per cycle, so a block cycle of
// W/Z cycles splits into DOUT sweeps of D cycles; in each sweep every left
// neuron is touched exactly once. In cycle c of sweep s, bank m is read at
// address (SV[s][m] + c) mod D, and weight lane p is connected to bank
// (p + ROT[s]) mod Z. Each bank is therefore accessed once per cycle (clash
// freedom), each left neuron gets exactly DOUT edges, and the DIN edges of a
// right neuron land in DIN different left neurons.
//
// The per-sweep start vectors SV and rotations ROT are pre-computed and
// hard-coded (ROM contents made at initialisation from nn_pkg::ilv_start /
// ilv_rot with parameter SEED). The paper uses the "SV+SS" interleaver family
// of its reference [Dey 2017]; it gives neither the vectors nor the exact
// family definition, so this start-vector-plus-rotation form is this design's
// choice within that idea. Combinational: sweep/cycle in, addresses out.
module interleaver
  import nn_pkg::*;
#(
  parameter int Z    = 128,   // banks = weights per cycle
  parameter int NL   = 1024,  // left neurons
  parameter int DOUT = 4,     // sweeps = fan-out of a left neuron
  parameter int SEED = 1,
  localparam int D   = NL / Z,
  localparam int AW  = (D > 1) ? $clog2(D) : 1,
  localparam int SW  = (DOUT > 1) ? $clog2(DOUT) : 1,
  localparam int ZW  = (Z > 1) ? $clog2(Z) : 1
)(
  input  logic [SW-1:0] sweep,
  input  logic [AW-1:0] cyc,
  output logic [AW-1:0] bank_addr [Z],
  output logic [ZW-1:0] rot
);
  logic [AW-1:0] sv_rom  [DOUT][Z];
  logic [ZW-1:0] rot_rom [DOUT];

  initial begin
    for (int s = 0; s < DOUT; s++) begin
      rot_rom[s] = ZW'(ilv_rot(SEED, s) % Z);
      for (int m = 0; m < Z; m++)
        sv_rom[s][m] = AW'(ilv_start(SEED, s, m) % D);
    end
  end

  always_comb begin
    rot = rot_rom[sweep];
    for (int m = 0; m < Z; m++)
      bank_addr[m] = (D > 1) ? AW'((32'(sv_rom[sweep][m]) + 32'(cyc)) % D) : '0;
  end

  initial begin
    assert (NL % Z == 0) else $error("interleaver: NL must be a multiple of Z");
    assert ((1 << AW) == D || D == 1) else $error("interleaver: NL/Z must be a power of two");
  end
endmodule
