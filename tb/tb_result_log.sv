// tb_result_log: self-checking test of result_log. Writes runs of random
// results (one-hot class and correct bit) with random gaps, clears between
// runs, and after every write reads back all entries through `sel`, comparing
// them and `count` with a queue-based model: entry j must hold the latest
// result of the run whose number is j mod DEPTH, entries not written since
// the last clear read zero,
// and the read data must appear exactly one clock after `sel` is applied.
module tb_result_log;
  localparam int DEPTH = 8, NCLASS = 10, AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0, clear = 0, wr_valid = 0, wr_correct = 0;
  logic [NCLASS-1:0] wr_led = '0;
  logic [AW-1:0] sel = '0;
  logic [NCLASS-1:0] show_led;
  logic show_correct;
  logic [AW:0] count;

  result_log #(.DEPTH(DEPTH), .NCLASS(NCLASS)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  int m_led [DEPTH];
  int m_cor [DEPTH];
  bit m_wr [DEPTH];
  int n_run;

  task automatic check_all();
    for (int j = 0; j < DEPTH; j++) begin
      @(negedge clk); sel = AW'(j);
      @(negedge clk);
      checks++;
      if (int'(show_led) != (m_wr[j] ? m_led[j] : 0) || int'(show_correct) != (m_wr[j] ? m_cor[j] : 0)) begin
        failures++;
        $display("FAIL entry %0d: led %b correct %0d, expected %b %0d", j, show_led, show_correct,
                 NCLASS'(m_wr[j] ? m_led[j] : 0), m_wr[j] ? m_cor[j] : 0);
      end
    end
    checks++;
    if (int'(count) != ((n_run < DEPTH) ? n_run : DEPTH)) begin
      failures++; $display("FAIL count %0d after %0d results", count, n_run);
    end
  endtask

  initial begin
    for (int j = 0; j < DEPTH; j++) m_wr[j] = 0;
    n_run = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check_all();
    for (int run = 0; run < 4; run++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      n_run = 0;
      for (int j = 0; j < DEPTH; j++) m_wr[j] = 0;
      check_all();
      for (int n = 0; n < 2 * DEPTH + 3; n++) begin
        int c, ok;
        c = int'($urandom_range(0, NCLASS - 1)); ok = int'($urandom_range(0, 1));
        @(negedge clk); wr_valid = 1; wr_led = NCLASS'(1) << c; wr_correct = ok[0];
        @(negedge clk); wr_valid = 0;
        m_led[n % DEPTH] = 1 << c; m_cor[n % DEPTH] = ok; m_wr[n % DEPTH] = 1;
        n_run++;
        repeat ($urandom_range(0, 2)) @(negedge clk);
        if (n % 5 == 0 || n < 3) check_all();
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
