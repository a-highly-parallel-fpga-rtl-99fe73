// input_loader: writes one received image into the layer-0 activation memory.
//
// Pixel n of an image (8-bit grayscale, n < NPIX) becomes activation
// a_0(n) = pixel/256 in the (12,3,8) format, written into bank n mod BANKS at
// address n / BANKS of copy `seq mod COPIES`, where seq counts the images
// loaded since `clear`. Neurons NPIX..N0-1 are the zero padding of the paper
// (784 pixels padded to 1024): they are never written and stay 0. After the
// NPIX-th pixel `loaded_seq` increments.
//
// Flow control (this design's choice, the paper is silent): the loader takes
// bytes only while `allow` is high and it is at most one image ahead of the
// pipeline (loaded_seq == fed_seq); `cts` tells the sender so. A byte that
// arrives while cts is low is dropped and counted in `dropped`.
module input_loader
  import nn_pkg::*;
#(
  parameter int NPIX   = 784,
  parameter int N0     = 1024,
  parameter int BANKS  = 128,
  parameter int COPIES = 8,
  localparam int DEPTH = N0 / BANKS,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int CW    = (COPIES > 1) ? $clog2(COPIES) : 1,
  localparam int PW    = $clog2(NPIX)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          allow,
  input  logic [7:0]    fed_seq,
  input  logic          byte_valid,
  input  logic [7:0]    byte_data,
  output logic          cts,
  output logic [7:0]    loaded_seq,
  output logic [15:0]   dropped,
  output logic          we    [BANKS],
  output logic [CW-1:0] wcopy,
  output logic [AW-1:0] waddr [BANKS],
  output fx_t           wdata [BANKS]
);
  logic [PW-1:0] pix;
  logic          take;

  assign cts  = allow && (loaded_seq == fed_seq);
  assign take = byte_valid && cts;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix <= '0; loaded_seq <= '0; dropped <= '0;
    end else if (clear) begin
      pix <= '0; loaded_seq <= '0;
    end else begin
      if (byte_valid && !cts) dropped <= dropped + 1'b1;
      if (take) begin
        if (int'(pix) == NPIX - 1) begin
          pix <= '0;
          loaded_seq <= loaded_seq + 1'b1;
        end else pix <= pix + 1'b1;
      end
    end
  end

  always_comb begin
    wcopy = CW'(loaded_seq);
    for (int b = 0; b < BANKS; b++) begin
      we[b]    = take && (int'(pix) % BANKS == b);
      waddr[b] = AW'(int'(pix) / BANKS);
      wdata[b] = fx_t'({4'b0000, byte_data});
    end
  end

  initial assert (NPIX <= N0 && N0 % BANKS == 0) else $error("input_loader: bad sizes");
endmodule
