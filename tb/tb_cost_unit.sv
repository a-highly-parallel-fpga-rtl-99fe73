// tb_cost_unit: 16 outputs, 10 classes, 2 neurons per cycle. Random output
// activations and labels: checks delta = a - y written per neuron, the
// argmax prediction, the correct flag and the one-hot LEDs.
module tb_cost_unit;
  import nn_pkg::*;
  localparam int NOUT = 16, NCLASS = 10, NPC = 2;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [3:0] in_idx = 0;
  fx_t act [NPC];
  logic [NCLASS-1:0] label;
  logic d_we, result_valid, result_correct;
  logic [2:0] d_addr;
  fx_t d_data [NPC];
  logic [3:0] result_class;
  logic [NCLASS-1:0] led;
  int checks = 0, failures = 0;
  int dmem [NOUT];
  cost_unit #(.NOUT(NOUT), .NCLASS(NCLASS), .NPC(NPC)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (d_we) for (int r = 0; r < NPC; r++) dmem[int'(d_addr) * NPC + r] = int'(d_data[r]);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      int a [NOUT]; int c, best, bi;
      c = int'($urandom_range(0, NCLASS - 1));
      label = NCLASS'(1) << c;
      best = -1; bi = 0;
      for (int j = 0; j < NOUT; j++) begin
        a[j] = int'($urandom_range(0, 256));
        if (t % 5 == 0 && j < NCLASS) a[j] = 100;     // ties: first index wins
        if (j < NCLASS && a[j] > best) begin best = a[j]; bi = j; end
      end
      for (int k = 0; k < NOUT / NPC; k++) begin
        @(negedge clk);
        in_valid = 1; in_idx = 4'(k * NPC);
        for (int r = 0; r < NPC; r++) act[r] = fx_t'(a[k * NPC + r]);
      end
      @(negedge clk); in_valid = 0;
      checks++;
      if (!result_valid || int'(result_class) != bi || result_correct != (bi == c) || led != (NCLASS'(1) << bi)) begin
        failures++; $display("FAIL t%0d class %0d/%0d", t, result_class, bi);
      end
      for (int j = 0; j < NOUT; j++) begin
        checks++;
        if (dmem[j] != a[j] - ((j == c) ? 256 : 0)) begin failures++; $display("FAIL delta %0d", j); end
      end
      @(negedge clk);
      checks++; if (result_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
