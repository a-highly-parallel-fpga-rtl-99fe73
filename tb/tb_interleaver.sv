// tb_interleaver: for Z = 8 banks, 32 left neurons and fan-out 4 checks
// clash freedom (every bank's D addresses covered once per sweep), that every
// left neuron gets exactly DOUT edges, that no right neuron (DIN = 4 lanes)
// connects twice to one left neuron, and agreement with the reference rule.
module tb_interleaver;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  localparam int Z = 8, NL = 32, DOUT = 4, DIN = 4, D = NL / Z, SEED = 5;
  logic [1:0] sweep;
  logic [1:0] cyc;
  logic [1:0] bank_addr [Z];
  logic [2:0] rot;
  int checks = 0, failures = 0;
  int deg [NL];
  int nrot = 0;
  interleaver #(.Z(Z), .NL(NL), .DOUT(DOUT), .SEED(SEED)) dut (.sweep, .cyc, .bank_addr, .rot);
  initial begin
    foreach (deg[i]) deg[i] = 0;
    for (int s = 0; s < DOUT; s++) begin
      int seen [Z][D];
      foreach (seen[m, a]) seen[m][a] = 0;
      for (int c = 0; c < D; c++) begin
        sweep = 2'(s); cyc = 2'(c); #1;
        if (rot != 3'd0) nrot = nrot + 1;
        for (int m = 0; m < Z; m++) seen[m][bank_addr[m]]++;
        for (int p = 0; p < Z; p++) begin
          int bank, n;
          bank = (p + int'(rot)) % Z;
          n = int'(bank_addr[bank]) * Z + bank;
          deg[n]++;
          checks++;
          if (n != left_of(SEED, Z, NL, s * D + c, p)) begin failures++; $display("FAIL s%0d c%0d p%0d n=%0d ref=%0d", s, c, p, n, left_of(SEED, Z, NL, s * D + c, p)); end
        end
        // the DIN lanes of each right neuron hit different left neurons
        for (int r = 0; r < Z / DIN; r++)
          for (int f = 0; f < DIN; f++)
            for (int g = f + 1; g < DIN; g++) begin
              checks++;
              if (((r*DIN + f + int'(rot)) % Z) == ((r*DIN + g + int'(rot)) % Z)) failures++;
            end
      end
      foreach (seen[m, a]) begin checks++; if (seen[m][a] != 1) begin failures++; $display("FAIL clash s%0d m%0d a%0d", s, m, a); end end
    end
    foreach (deg[i]) begin checks++; if (deg[i] != DOUT) begin failures++; $display("FAIL deg %0d", i); end end
    checks++; if (nrot == 0) begin failures++; $display("FAIL no rotation"); end   // sweeps after the first are rotated
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
