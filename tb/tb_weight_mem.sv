// tb_weight_mem: checks the Glorot-normal initial contents (cell k equal in
// every bank and bias bank, spread matching variance 2/(DOUT+DIN)), the
// simple dual-port behaviour (write cell k-1 while reading cell k) and
// that a disabled write changes nothing.
module tb_weight_mem;
  import nn_pkg::*;
  localparam int Z = 8, DIN = 4, DOUT = 4, DEPTH = 32, NPC = Z / DIN;
  logic clk = 0;
  logic [4:0] raddr, waddr;
  fx_t w_rd [Z];
  fx_t b_rd [NPC];
  fx_t w_wr [Z];
  fx_t b_wr [NPC];
  logic we;
  int checks = 0, failures = 0;
  int init0 [DEPTH];
  weight_mem #(.Z(Z), .DIN(DIN), .DOUT(DOUT), .DEPTH(DEPTH), .SEED(3)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    real sq; int nz;
    we = 0; waddr = 0; sq = 0.0; nz = 0;
    foreach (w_wr[i]) w_wr[i] = '0;
    foreach (b_wr[i]) b_wr[i] = '0;
    for (int k = 0; k < DEPTH; k++) begin
      raddr = 5'(k); #1;
      init0[k] = int'(w_rd[0]);
      sq += (real'(init0[k]) / 256.0) ** 2;
      if (init0[k] != 0) nz++;
      for (int z = 1; z < Z; z++) begin checks++; if (w_rd[z] != w_rd[0]) failures++; end
      for (int n = 0; n < NPC; n++) begin checks++; if (b_rd[n] != w_rd[0]) failures++; end
    end
    // sample standard deviation vs sqrt(2/(4+4)) = 0.5 (loose bound for 32 samples)
    checks++;
    if ($sqrt(sq / DEPTH) < 0.25 || $sqrt(sq / DEPTH) > 0.8) begin
      failures++; $display("FAIL std %f", $sqrt(sq / DEPTH));
    end
    checks++; if (nz < DEPTH / 2) failures++;
    // write cell k-1 while reading cell k
    @(negedge clk);
    for (int k = 1; k < DEPTH; k++) begin
      raddr = 5'(k); waddr = 5'(k - 1); we = 1;
      foreach (w_wr[i]) w_wr[i] = fx_t'(k * 16 + i);
      foreach (b_wr[i]) b_wr[i] = fx_t'(-k - i);
      #1; checks++; if (int'(w_rd[3]) != init0[k]) failures++;   // old value still read
      @(negedge clk);
    end
    we = 0;
    for (int k = 0; k < DEPTH - 1; k++) begin
      raddr = 5'(k); #1;
      foreach (w_rd[i]) begin checks++; if (int'(w_rd[i]) != (k + 1) * 16 + i) failures++; end
      foreach (b_rd[i]) begin checks++; if (int'(b_rd[i]) != -(k + 1) - i) failures++; end
    end
    raddr = 5'(DEPTH - 1); #1;
    checks++; if (int'(w_rd[0]) != init0[DEPTH - 1]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
