// label_mem: single-port memory of the ground-truth labels.
//
// One WORD-bit one-hot word per training input (WORD = 10 for the ten MNIST
// classes); the paper stores all 12544 labels of an epoch on chip this way and
// pads the word with zeros to the 32 outputs after reading (done here by the
// cost unit, which treats outputs at and above WORD as 0). One port, shared
// by writes (loading the labels before training) and registered reads
// (rdata is valid one clock after addr). All words start at 0.
module label_mem #(
  parameter int DEPTH = 12544,
  parameter int WORD  = 10,
  localparam int AW   = $clog2(DEPTH)
)(
  input  logic            clk,
  input  logic            we,
  input  logic [AW-1:0]   addr,
  input  logic [WORD-1:0] wdata,
  output logic [WORD-1:0] rdata
);
  logic [WORD-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end
endmodule
