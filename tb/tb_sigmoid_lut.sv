// tb_sigmoid_lut: all 4096 arguments against sigma and sigma' computed with
// exp(), rounded to 8 and 6 fractional bits; plus a few hand values.
module tb_sigmoid_lut;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  fx_t x, sig, dsig;
  int checks = 0, failures = 0;
  sigmoid_lut dut (.x, .sig, .dsig);
  initial begin
    for (int i = -2048; i < 2048; i++) begin
      x = fx_t'(i); #1;
      checks++;
      if (int'(sig) != tb_ref_pkg::sig(i) || int'(dsig) != tb_ref_pkg::dsig(i)) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d sig=%0d/%0d dsig=%0d/%0d", i, sig, tb_ref_pkg::sig(i), dsig, tb_ref_pkg::dsig(i));
      end
    end
    x = 0;      #1; checks++; if (sig != 128 || dsig != 64) failures++;   // 0.5, 0.25
    x = 2047;   #1; checks++; if (sig != 256 || dsig != 0)  failures++;   // ~1, ~0
    x = -2048;  #1; checks++; if (sig != 0   || dsig != 0)  failures++;   // ~0, ~0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
