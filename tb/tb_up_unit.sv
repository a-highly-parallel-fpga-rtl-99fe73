// tb_up_unit: Z = 8, DIN = 4: checks w - eta*a*delta and b - eta*delta for
// every learning-rate shift 3..7 and random operands, including clipping.
module tb_up_unit;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  localparam int Z = 8, DIN = 4, NPC = Z / DIN;
  fx_t w [Z];
  fx_t a_l [Z];
  fx_t delta_r [NPC];
  fx_t b [NPC];
  logic [2:0] eta_shift;
  fx_t w_new [Z];
  fx_t b_new [NPC];
  int checks = 0, failures = 0;
  up_unit #(.Z(Z), .DIN(DIN)) dut (.*);
  initial begin
    for (int t = 0; t < 1000; t++) begin
      eta_shift = 3'(3 + t % 5);
      foreach (w[i]) w[i] = fx_t'(int'($urandom_range(0, 4095)) - 2048);
      foreach (a_l[i]) a_l[i] = fx_t'($urandom_range(0, 256));
      foreach (delta_r[i]) delta_r[i] = fx_t'(int'($urandom_range(0, 4095)) - 2048);
      foreach (b[i]) b[i] = fx_t'(int'($urandom_range(0, 4095)) - 2048);
      #1;
      for (int p = 0; p < Z; p++) begin
        int e;
        e = sub(int'(w[p]), mul(int'(a_l[p]), int'(delta_r[p / DIN]), int'(eta_shift)));
        checks++;
        if (int'(w_new[p]) != e) begin failures++; $display("FAIL w t%0d p%0d %0d/%0d", t, p, w_new[p], e); end
      end
      for (int r = 0; r < NPC; r++) begin
        int e;
        e = sub(int'(b[r]), mul(int'(delta_r[r]), 256, int'(eta_shift)));
        checks++;
        if (int'(b_new[r]) != e) begin failures++; $display("FAIL b t%0d r%0d %0d/%0d", t, r, b_new[r], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
