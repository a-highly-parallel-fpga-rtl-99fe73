// tb_sparse_nn_full: the whole design at its default (paper) size, 1024-64-32
// neurons, z = 128/32, 784-pixel images over a 115200-baud UART at 15 MHz:
// one image trained (it passes FF, cost, BP and both UPs) and one inferred,
// checked bit for bit against the model of tb_top_body.svh.
module tb_sparse_nn_full;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N0 = 1024, N1 = 64, N2 = 32, DIN1 = 64, DIN2 = 32, Z1 = 128, Z2 = 32;
  localparam int NPIX = 784, NCLASS = 10, NTRAIN = 12544, CPB = 130;
  localparam int EPOCH_LEN = 1, EPOCHS = 1, INFER_N = 1;
  localparam int WATCHDOG = 3000000;

  `include "tb_top_body.svh"

  sparse_nn_top dut (.*);
endmodule
