// tb_label_mem: writes one-hot labels at scattered addresses of a 12544-word
// memory and reads them back one clock later; unwritten words read 0.
module tb_label_mem;
  localparam int DEPTH = 12544, WORD = 10;
  logic clk = 0, we = 0;
  logic [13:0] addr = 0;
  logic [WORD-1:0] wdata = 0, rdata;
  int checks = 0, failures = 0;
  int ref_m [int];
  label_mem #(.DEPTH(DEPTH), .WORD(WORD)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int i = 0; i < 300; i++) begin
      int a;
      a = int'($urandom_range(0, DEPTH - 1));
      @(negedge clk); we = 1; addr = 14'(a); wdata = WORD'(1) << $urandom_range(0, WORD - 1);
      ref_m[a] = int'(wdata);
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 600; i++) begin
      int a;
      a = (i % 2 == 0) ? int'($urandom_range(0, DEPTH - 1)) : i * 20;
      @(negedge clk); addr = 14'(a);
      @(negedge clk);
      checks++;
      if (int'(rdata) != (ref_m.exists(a) ? ref_m[a] : 0)) begin failures++; $display("FAIL addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
