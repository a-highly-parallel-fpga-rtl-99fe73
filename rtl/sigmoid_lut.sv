// sigmoid_lut: look-up table of the sigmoid activation and its derivative.
//
// For every one of the 4096 possible 12-bit arguments x (format (12,3,8)) the
// table holds sigma(x) = 1/(1+exp(-x)) rounded to 8 fractional bits (range
// [0,1]) and sigma'(x) = sigma(x)(1-sigma(x)) rounded to 6 fractional bits
// (range [0,1/4]), both returned in the common (12,3,8) format. No
// interpolation is used. These accuracies are the paper's; the contents are
// computed when the memory is initialised (the ROM image of an FPGA), from the
// formula above. The read is combinational (asynchronous ROM / LUT).
module sigmoid_lut
  import nn_pkg::*;
(
  input  fx_t x,
  output fx_t sig,
  output fx_t dsig
);
  logic [BW-1:0] sig_rom  [1 << BW];
  logic [BW-1:0] dsig_rom [1 << BW];

  initial begin
    for (int i = 0; i < (1 << BW); i++) begin
      real xr, s, d;
      xr = real'($signed(BW'(i))) / real'(1 << BF);
      s  = 1.0 / (1.0 + $exp(-xr));
      d  = s * (1.0 - s);
      sig_rom[i]  = BW'($rtoi(s * real'(1 << BF) + 0.5));
      dsig_rom[i] = BW'($rtoi(d * 64.0 + 0.5) << (BF - 6));
    end
  end

  assign sig  = fx_t'(sig_rom[x]);
  assign dsig = fx_t'(dsig_rom[x]);
endmodule
