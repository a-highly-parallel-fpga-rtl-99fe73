// tb_sat_add: checks the clipping adder against integer arithmetic, including
// both saturation limits.
module tb_sat_add;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  fx_t a, b, y;
  int checks = 0, failures = 0;
  sat_add dut (.a, .b, .y);
  task automatic check(input int x, input int z);
    a = fx_t'(x); b = fx_t'(z); #1;
    checks++;
    if (int'(y) != add(x, z)) begin
      failures++; $display("FAIL %0d + %0d -> %0d, expected %0d", x, z, y, add(x, z));
    end
  endtask
  initial begin
    check(2047, 1); check(-2048, -1); check(1000, 1047); check(-1000, -1049);
    check(2560 - 2048, 2000); check(0, 0);
    for (int i = 0; i < 2000; i++) check(int'($urandom_range(0, 4095)) - 2048, int'($urandom_range(0, 4095)) - 2048);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
