// tb_uart_rx: 200 random bytes at 8 clocks per bit (with idle gaps and a
// sender clock 3 % slow) must arrive intact; a frame with a broken stop bit
// must raise frame_err and deliver nothing.
module tb_uart_rx;
  localparam int CPB = 8;
  logic clk = 0, rst_n = 0, rxd = 1;
  logic valid, frame_err;
  logic [7:0] data;
  int checks = 0, failures = 0;
  int got [$];
  int nerr = 0;
  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (valid) got.push_back(int'(data));
    if (frame_err) nerr++;
  end
  task automatic send(input logic [7:0] v, input bit stop_ok, input int bit_ps);
    rxd = 0; #(bit_ps);
    for (int i = 0; i < 8; i++) begin rxd = v[i]; #(bit_ps); end
    rxd = stop_ok; #(bit_ps);
    rxd = 1; #(bit_ps);
  endtask
  initial begin
    int sent [$];
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      logic [7:0] v;
      v = 8'($urandom);
      sent.push_back(int'(v));
      send(v, 1'b1, (i % 2 == 0) ? CPB * 10 : CPB * 10 + 2);
      if (i % 7 == 0) #(CPB * 37);
    end
    #(CPB * 100);
    checks++; if (got.size() != sent.size()) begin failures++; $display("FAIL count %0d/%0d first %0d %0d", got.size(), sent.size(), got[0], sent[0]); end
    for (int i = 0; i < sent.size() && i < got.size(); i++) begin
      checks++; if (got[i] != sent[i]) begin failures++; $display("FAIL byte %0d", i); end
    end
    send(8'h5a, 1'b0, CPB * 10);
    #(CPB * 100);
    checks++; if (nerr != 1 || got.size() != sent.size()) begin failures++; $display("FAIL framing error"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (500000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
