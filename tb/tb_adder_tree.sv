// tb_adder_tree: 16-input clipping tree adder against a pairwise reference,
// with small values (no clipping) and large ones (clipping inside the tree).
module tb_adder_tree;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 16;
  fx_t x [N];
  fx_t sum;
  int checks = 0, failures = 0;
  adder_tree #(.N(N)) dut (.x, .sum);
  initial begin
    int v [];
    v = new[N];
    for (int t = 0; t < 600; t++) begin
      int range;
      range = (t < 300) ? 128 : 2048;
      for (int i = 0; i < N; i++) begin
        v[i] = int'($urandom_range(0, 2 * range - 1)) - range;
        x[i] = fx_t'(v[i]);
      end
      #1;
      checks++;
      if (int'(sum) != tree(v, N)) begin
        failures++; $display("FAIL t=%0d sum=%0d expected %0d", t, sum, tree(v, N));
      end
    end
    // all at the maximum: clipped to 2047
    for (int i = 0; i < N; i++) x[i] = FX_MAX;
    #1; checks++; if (sum != FX_MAX) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
