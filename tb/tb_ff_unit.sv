// tb_ff_unit: Z = 16 lanes, DIN = 8 (2 neurons per cycle): random weights,
// activations and biases against the reference products, pairwise clipped
// tree, bias add and exp()-based sigmoid and derivative.
module tb_ff_unit;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  localparam int Z = 16, DIN = 8, NPC = Z / DIN;
  fx_t w [Z];
  fx_t a [Z];
  fx_t b [NPC];
  fx_t s [NPC];
  fx_t act [NPC];
  fx_t adot [NPC];
  int checks = 0, failures = 0;
  ff_unit #(.Z(Z), .DIN(DIN)) dut (.*);
  initial begin
    int pr [];
    pr = new[DIN];
    for (int t = 0; t < 500; t++) begin
      int wr;
      wr = (t < 250) ? 160 : 2047;
      foreach (w[i]) w[i] = fx_t'(int'($urandom_range(0, 2 * wr)) - wr);
      foreach (a[i]) a[i] = fx_t'($urandom_range(0, 256));
      foreach (b[i]) b[i] = fx_t'(int'($urandom_range(0, 400)) - 200);
      #1;
      for (int r = 0; r < NPC; r++) begin
        int e;
        for (int f = 0; f < DIN; f++) pr[f] = mul(int'(w[r*DIN+f]), int'(a[r*DIN+f]));
        e = add(tree(pr, DIN), int'(b[r]));
        checks++;
        if (int'(s[r]) != e || int'(act[r]) != sig(e) || int'(adot[r]) != dsig(e)) begin
          failures++;
          $display("FAIL t%0d r%0d s=%0d/%0d a=%0d/%0d", t, r, s[r], e, act[r], sig(e));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
