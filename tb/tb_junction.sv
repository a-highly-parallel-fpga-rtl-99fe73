// tb_junction: one junction with BP (16 left, 8 right neurons, d_in = 4,
// z = 8, so 4 weight cycles and 2 sweeps) driven by testbench-side layer
// memories. Two block cycles with FF, BP and UP all enabled are compared with
// a reference (outputs, delta partial sums, updated weights and biases), and
// the block cycle must take W/z + 2 clocks from start to ready.
module tb_junction;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  localparam int NL = 16, NR = 8, DIN = 4, Z = 8, CYC = NR * DIN / Z, D = NL / Z, NPC = Z / DIN;
  localparam int SEED = 3;
  logic clk = 0, rst_n = 0, start = 0, ff_en = 1, bp_en = 1, up_en = 1;
  logic [2:0] eta_shift = 3;
  logic ready, busy, ff_valid, bypass;
  logic [0:0] l_addr [Z];
  fx_t l_act_ff [Z], l_act_up [Z], l_adot [Z], l_dlt_rd [Z];
  logic l_dlt_we [Z];
  logic [0:0] l_dlt_waddr [Z];
  fx_t l_dlt_wdata [Z];
  logic [2:0] r_idx, ff_idx;
  fx_t r_dlt [NPC], ff_act [NPC], ff_adot [NPC];
  int checks = 0, failures = 0;

  junction #(.NL(NL), .NR(NR), .DIN(DIN), .Z(Z), .HAS_BP(1'b1), .SEED(SEED)) dut (.*);
  always #5 clk = ~clk;

  // testbench-side memories
  int act_ff [NL], act_up [NL], adot [NL], dlt [NL], dr [NR];
  int out_a [NR], out_d [NR];
  always_comb begin
    for (int m = 0; m < Z; m++) begin
      l_act_ff[m] = fx_t'(act_ff[int'(l_addr[m]) * Z + m]);
      l_act_up[m] = fx_t'(act_up[int'(l_addr[m]) * Z + m]);
      l_adot[m]   = fx_t'(adot[int'(l_addr[m]) * Z + m]);
      l_dlt_rd[m] = fx_t'(dlt[int'(l_addr[m]) * Z + m]);
    end
    for (int r = 0; r < NPC; r++) r_dlt[r] = fx_t'(dr[int'(r_idx) + r]);
  end
  always @(posedge clk) begin
    for (int m = 0; m < Z; m++) if (l_dlt_we[m]) dlt[int'(l_dlt_waddr[m]) * Z + m] = int'(l_dlt_wdata[m]);
    if (ff_valid) for (int r = 0; r < NPC; r++) begin
      out_a[int'(ff_idx) + r] = int'(ff_act[r]); out_d[int'(ff_idx) + r] = int'(ff_adot[r]);
    end
  end

  int nbypass = 0;
  always @(posedge clk) if (bypass) nbypass++;

  initial begin
    int w [CYC][Z]; int b [CYC][NPC]; int ew [CYC][Z]; int eb [CYC][NPC];
    int edl [NL]; int pr [];
    pr = new[DIN];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 2; blk++) begin
      int t0, len;
      for (int n = 0; n < NL; n++) begin
        act_ff[n] = int'($urandom_range(0, 256)); act_up[n] = int'($urandom_range(0, 256));
        adot[n] = int'($urandom_range(0, 64)); dlt[n] = 999;
      end
      for (int j = 0; j < NR; j++) dr[j] = int'($urandom_range(0, 400)) - 200;
      for (int k = 0; k < CYC; k++) begin
        for (int z = 0; z < Z; z++) w[k][z] = int'(dut.u_wmem.wmem[z][k]);
        for (int r = 0; r < NPC; r++) b[k][r] = int'(dut.u_wmem.bmem[r][k]);
      end
      // reference
      for (int k = 0; k < CYC; k++) begin
        for (int p = 0; p < Z; p++) begin
          int l, j, tt;
          l = left_of(SEED, Z, NL, k, p); j = k * NPC + p / DIN;
          tt = mul(mul(w[k][p], dr[j]), adot[l]);
          edl[l] = (k < D) ? tt : add(edl[l], tt);
          ew[k][p] = sub(w[k][p], mul(act_up[l], dr[j], 3));
        end
        for (int r = 0; r < NPC; r++) eb[k][r] = sub(b[k][r], mul(dr[k * NPC + r], 256, 3));
      end
      // run one block cycle
      @(negedge clk); start = 1; t0 = $time; @(negedge clk); start = 0;
      while (!ready) @(negedge clk);
      len = ($time - t0) / 10;
      checks++; if (len != CYC + 2) begin failures++; $display("FAIL block length %0d", len); end
      @(negedge clk);
      for (int k = 0; k < CYC; k++)
        for (int r = 0; r < NPC; r++) begin
          int s, j;
          j = k * NPC + r;
          for (int f = 0; f < DIN; f++) pr[f] = mul(w[k][r*DIN+f], act_ff[left_of(SEED, Z, NL, k, r*DIN+f)]);
          s = add(tree(pr, DIN), b[k][r]);
          checks++;
          if (out_a[j] != sig(s) || out_d[j] != dsig(s)) begin failures++; $display("FAIL ff %0d", j); end
        end
      for (int n = 0; n < NL; n++) begin
        checks++; if (dlt[n] != edl[n]) begin failures++; $display("FAIL delta %0d: %0d/%0d", n, dlt[n], edl[n]); end
      end
      for (int k = 0; k < CYC; k++) begin
        for (int z = 0; z < Z; z++) begin checks++; if (int'(dut.u_wmem.wmem[z][k]) != ew[k][z]) failures++; end
        for (int r = 0; r < NPC; r++) begin checks++; if (int'(dut.u_wmem.bmem[r][k]) != eb[k][r]) failures++; end
      end
    end
    $display("bypass events: %0d", nbypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
