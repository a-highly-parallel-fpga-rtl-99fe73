// tb_bp_unit: Z = 8, DIN = 4: checks adot * (w * delta) per lane, started in
// the first sweep and accumulated with clipping otherwise.
module tb_bp_unit;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  localparam int Z = 8, DIN = 4, NPC = Z / DIN;
  fx_t w [Z];
  fx_t delta_r [NPC];
  fx_t adot_l [Z];
  fx_t psum_in [Z];
  fx_t psum_out [Z];
  logic first;
  int checks = 0, failures = 0;
  bp_unit #(.Z(Z), .DIN(DIN)) dut (.*);
  initial begin
    for (int t = 0; t < 1000; t++) begin
      first = t[0];
      foreach (w[i]) w[i] = fx_t'(int'($urandom_range(0, 4095)) - 2048);
      foreach (delta_r[i]) delta_r[i] = fx_t'(int'($urandom_range(0, 4095)) - 2048);
      foreach (adot_l[i]) adot_l[i] = fx_t'($urandom_range(0, 64));
      foreach (psum_in[i]) psum_in[i] = fx_t'(int'($urandom_range(0, 4095)) - 2048);
      #1;
      for (int p = 0; p < Z; p++) begin
        int tt, e;
        tt = mul(mul(int'(w[p]), int'(delta_r[p / DIN])), int'(adot_l[p]));
        e  = first ? tt : add(int'(psum_in[p]), tt);
        checks++;
        if (int'(psum_out[p]) != e) begin
          failures++; $display("FAIL t%0d p%0d %0d/%0d", t, p, psum_out[p], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
