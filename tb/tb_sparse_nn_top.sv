// tb_sparse_nn_top: end-to-end test of the whole design at reduced size
// (128-32-16 neurons, z = 32/8, 100-pixel images, fast UART): 3 epochs of 4
// images in training mode (learning rate changes after epoch 2), then 4
// images in inference mode, all checked bit for bit against a model.
module tb_sparse_nn_top;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N0 = 128, N1 = 32, N2 = 16, DIN1 = 16, DIN2 = 8, Z1 = 32, Z2 = 8;
  localparam int NPIX = 100, NCLASS = 10, NTRAIN = 16, CPB = 4;
  localparam int EPOCH_LEN = 4, EPOCHS = 3, INFER_N = 4;
  localparam int WATCHDOG = 2000000;

  `include "tb_top_body.svh"

  sparse_nn_top #(.N0(N0), .N1(N1), .N2(N2), .DIN1(DIN1), .DIN2(DIN2), .Z1(Z1), .Z2(Z2),
                  .NPIX(NPIX), .NCLASS(NCLASS), .NTRAIN(NTRAIN), .CLKS_PER_BIT(CPB)) dut (.*);
endmodule
