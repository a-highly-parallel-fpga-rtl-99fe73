// bank_mem: banked layer memory for activations, a-dots or deltas.
//
// BANKS independent memories of DEPTH words hold one layer's values for one
// input; COPIES such sets hold the values of the different inputs that are in
// flight at once in the junction pipeline (input n is kept in copy
// n mod COPIES). Each bank has its own address on every port, so up to BANKS
// values in BANKS different banks are accessed per cycle (clash-free access).
//
// One write port and NRD read ports; each port selects one copy. Reads are
// asynchronous from registered addresses (block RAM with the address register
// upstream). All words start at 0, as in the paper. The paper makes a and
// a-dot memories single-port and delta memories true dual-port (read-modify-
// write); here the copies of a layer are modelled as one array with separate
// ports per copy, and the users never read and write the same copy of an a or
// a-dot memory in one cycle.
module bank_mem
  import nn_pkg::*;
#(
  parameter int BANKS  = 128,
  parameter int DEPTH  = 8,
  parameter int COPIES = 8,
  parameter int NRD    = 2,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int CW    = (COPIES > 1) ? $clog2(COPIES) : 1
)(
  input  logic          clk,
  // write port
  input  logic          we    [BANKS],
  input  logic [CW-1:0] wcopy,
  input  logic [AW-1:0] waddr [BANKS],
  input  fx_t           wdata [BANKS],
  // read ports
  input  logic [CW-1:0] rcopy [NRD],
  input  logic [AW-1:0] raddr [NRD][BANKS],
  output fx_t           rdata [NRD][BANKS]
);
  fx_t mem [BANKS][COPIES * DEPTH];

  initial begin
    for (int b = 0; b < BANKS; b++)
      for (int i = 0; i < COPIES * DEPTH; i++) mem[b][i] = '0;
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < BANKS; b++)
      if (we[b]) mem[b][int'(wcopy) * DEPTH + int'(waddr[b])] <= wdata[b];
  end

  always_comb begin
    for (int r = 0; r < NRD; r++)
      for (int b = 0; b < BANKS; b++)
        rdata[r][b] = mem[b][int'(rcopy[r]) * DEPTH + int'(raddr[r][b])];
  end

  initial begin
    assert ((1 << CW) == COPIES || COPIES == 1) else $error("bank_mem: COPIES must be a power of two");
    assert ((1 << AW) == DEPTH  || DEPTH == 1)  else $error("bank_mem: DEPTH must be a power of two");
  end
endmodule
