// tb_bank_mem: fills every copy/bank/address with a distinct value through
// the per-bank write port and reads it back through two read ports that
// select different copies and per-bank addresses; checks the zero start.
module tb_bank_mem;
  import nn_pkg::*;
  localparam int BANKS = 4, DEPTH = 4, COPIES = 4, NRD = 2;
  logic clk = 0;
  logic we [BANKS];
  logic [1:0] wcopy;
  logic [1:0] waddr [BANKS];
  fx_t wdata [BANKS];
  logic [1:0] rcopy [NRD];
  logic [1:0] raddr [NRD][BANKS];
  fx_t rdata [NRD][BANKS];
  int checks = 0, failures = 0;
  bank_mem #(.BANKS(BANKS), .DEPTH(DEPTH), .COPIES(COPIES), .NRD(NRD)) dut (.*);
  always #5 clk = ~clk;
  function automatic int val(int c, int b, int a); return c * 100 + b * 10 + a + 1; endfunction
  initial begin
    foreach (we[b]) we[b] = 0;
    rcopy[0] = 1; rcopy[1] = 2;
    foreach (raddr[r, b]) raddr[r][b] = 2'(b);
    #1; foreach (rdata[r, b]) begin checks++; if (rdata[r][b] != 0) failures++; end
    @(negedge clk);
    for (int c = 0; c < COPIES; c++)
      for (int a = 0; a < DEPTH; a++) begin
        wcopy = 2'(c);
        foreach (we[b]) begin
          we[b] = (b != 3 || a != 0);       // leave one word unwritten
          waddr[b] = 2'((a + b) % DEPTH);   // different address per bank
          wdata[b] = fx_t'(val(c, b, (a + b) % DEPTH));
        end
        @(negedge clk);
      end
    foreach (we[b]) we[b] = 0;
    for (int c1 = 0; c1 < COPIES; c1++)
      for (int a = 0; a < DEPTH; a++) begin
        rcopy[0] = 2'(c1); rcopy[1] = 2'(COPIES - 1 - c1);
        foreach (raddr[r, b]) raddr[r][b] = 2'((a + r + b) % DEPTH);
        #1;
        foreach (rdata[r, b]) begin
          int c, ad, exp;
          c = int'(rcopy[r]); ad = (a + r + b) % DEPTH;
          exp = (b == 3 && ad == 3) ? 0 : val(c, b, ad);
          checks++;
          if (int'(rdata[r][b]) != exp) begin
            failures++; $display("FAIL r%0d b%0d c%0d a%0d: %0d/%0d", r, b, c, ad, rdata[r][b], exp);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
