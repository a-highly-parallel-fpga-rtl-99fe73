// tb_sat_mul: checks the clipping multiplier (product scaled by 2^-8,
// truncated towards minus infinity, clipped) against integer arithmetic.
module tb_sat_mul;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  fx_t a, b, y;
  int checks = 0, failures = 0;
  sat_mul dut (.a, .b, .y);
  task automatic check(input int x, input int z);
    a = fx_t'(x); b = fx_t'(z); #1;
    checks++;
    if (int'(y) != mul(x, z)) begin
      failures++; $display("FAIL %0d * %0d -> %0d, expected %0d", x, z, y, mul(x, z));
    end
  endtask
  initial begin
    check(2047, 2047); check(-2048, -2048); check(-2048, 2047); check(256, 256);
    check(-1, 1); check(-3, 100); check(512, -300); check(2560 / 2, 3 * 256);
    for (int i = 0; i < 2000; i++) check(int'($urandom_range(0, 4095)) - 2048, int'($urandom_range(0, 4095)) - 2048);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
