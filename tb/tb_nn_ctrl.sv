// tb_nn_ctrl: the controller with a 5-clock stand-in for the junctions and
// an input source that is sometimes late. Checks the slot contents of every
// block cycle (input t in slot 0, t-1 .. t-3 behind), epoch/index counting,
// the learning-rate schedule, stalls, the drain and done, and inference mode.
module tb_nn_ctrl;
  import nn_pkg::*;
  localparam int L = 2, BLK = 5;
  logic clk = 0, rst_n = 0, start = 0, train_en = 1, jn_ready;
  logic [15:0] epoch_len = 3;
  logic [7:0] num_epochs = 8, loaded_seq = 0;
  logic busy, done, train_mode, clear, load_allow, stall, blk_start;
  logic [7:0] fed_seq;
  logic nx_v [2*L];
  logic [2:0] nx_eta [2*L];
  logic slot_v [2*L];
  logic [7:0] slot_seq [2*L];
  logic [15:0] slot_idx [2*L];
  logic [7:0] slot_epoch [2*L];
  int checks = 0, failures = 0;
  nn_ctrl #(.L(L)) dut (.*);
  always #5 clk = ~clk;

  int busy_cnt = 0;
  assign jn_ready = (busy_cnt == 0);
  always @(posedge clk) if (blk_start) busy_cnt <= BLK - 1; else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;

  // input source: next image ready some clocks after it may be loaded
  int delay = 0;
  always @(posedge clk) begin
    if (clear) begin loaded_seq <= 0; delay <= 0; end
    else if (load_allow && loaded_seq == fed_seq) begin
      if (delay >= 3 + int'(fed_seq % 4) * 4) begin loaded_seq <= loaded_seq + 1; delay <= 0; end
      else delay <= delay + 1;
    end
  end

  int t = 0, nstall = 0, total = 0;
  always @(posedge clk) if (rst_n) begin
    if (stall) nstall++;
    if (blk_start) begin
      for (int s = 0; s < 2*L; s++) begin
        int n;
        n = t - s;
        checks++;
        if (nx_v[s] != (n >= 0 && n < total)) begin failures++; $display("FAIL t%0d slot %0d valid", t, s); end
        else if (nx_v[s] && nx_eta[s] != eta_shift_of(8'(n / 3))) begin failures++; $display("FAIL eta"); end
      end
      t++;
    end
    #1;
    if (blk_start === 1'b0 && t > 0) ;
  end
  // registered slots hold the block's inputs
  always @(negedge clk) if (rst_n && busy && t > 0) begin
    for (int s = 0; s < 2*L; s++) begin
      int n;
      n = t - 1 - s;
      if (slot_v[s]) begin
        checks++;
        if (int'(slot_seq[s]) != n % 256 || int'(slot_idx[s]) != n % 3 || int'(slot_epoch[s]) != n / 3) begin
          failures++; $display("FAIL slot %0d of block %0d", s, t - 1);
        end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    total = 24;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    checks++; if (!train_mode) failures++;
    @(posedge done);
    checks++; if (t != total + 2*L - 1) begin failures++; $display("FAIL %0d blocks", t); end
    checks++; if (nstall == 0) begin failures++; $display("FAIL no stall"); end
    // inference run
    @(negedge clk); t = 0; total = 3; epoch_len = 3; num_epochs = 1; train_en = 0;
    start = 1; @(negedge clk); start = 0;
    checks++; if (train_mode) failures++;
    @(posedge done);
    checks++; if (t != total + 2*L - 1) failures++;
    @(negedge clk); checks++; if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
