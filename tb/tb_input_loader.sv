// tb_input_loader: 20-pixel images into 8 banks of a 32-neuron layer with 4
// copies. Checks bank/address/value of every write, loaded_seq counting, the
// one-image-ahead limit (cts), dropping of bytes sent against cts, and clear.
module tb_input_loader;
  import nn_pkg::*;
  localparam int NPIX = 20, N0 = 32, BANKS = 8, COPIES = 4, DEPTH = N0 / BANKS;
  logic clk = 0, rst_n = 0, clear = 0, allow = 1, byte_valid = 0, cts;
  logic [7:0] fed_seq = 0, byte_data = 0, loaded_seq;
  logic [15:0] dropped;
  logic we [BANKS];
  logic [1:0] wcopy;
  logic [1:0] waddr [BANKS];
  fx_t wdata [BANKS];
  int checks = 0, failures = 0;
  int mem [COPIES][N0];
  input_loader #(.NPIX(NPIX), .N0(N0), .BANKS(BANKS), .COPIES(COPIES)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    int nwe;
    nwe = 0;
    for (int b = 0; b < BANKS; b++) if (we[b]) begin
      nwe++;
      mem[wcopy][int'(waddr[b]) * BANKS + b] = int'(wdata[b]);
    end
    if (nwe > 1) begin failures++; $display("FAIL several banks written in one clock"); end
  end
  task automatic send(input logic [7:0] v);
    @(negedge clk); byte_valid = 1; byte_data = v; @(negedge clk); byte_valid = 0;
  endtask
  initial begin
    foreach (mem[c, n]) mem[c][n] = -1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int img = 0; img < 6; img++) begin
      #1; checks++; if (!cts) begin failures++; $display("FAIL no cts %0d %0d %0d", loaded_seq, fed_seq, allow); end
      for (int i = 0; i < NPIX; i++) send(8'(img * 30 + i));
      @(negedge clk);
      checks++; if (int'(loaded_seq) != img + 1) begin failures++; $display("FAIL loaded_seq"); end
      checks++; if (cts) begin failures++; $display("FAIL cts while one image ahead"); end
      send(8'hff);                                     // sent against cts: dropped
      checks++; if (int'(dropped) != img + 1) begin failures++; $display("FAIL dropped"); end
      for (int i = 0; i < N0; i++) begin
        checks++;
        if (mem[img % COPIES][i] != ((i < NPIX) ? img * 30 + i : -1)) begin
          failures++; $display("FAIL img %0d neuron %0d = %0d", img, i, mem[img % COPIES][i]);
        end
      end
      fed_seq = fed_seq + 1;                           // pipeline takes the image
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0; fed_seq = 0;
    #1; checks++; if (loaded_seq != 0 || !cts) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
