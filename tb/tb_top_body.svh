// Shared body of the end-to-end testbenches of sparse_nn_top. The including
// module defines the sizes (N0, N1, N2, DIN1, DIN2, Z1, Z2, NPIX, NCLASS,
// NTRAIN, CPB), the run (EPOCH_LEN, EPOCHS, INFER_N), WATCHDOG and the `dut`
// instance with the signals declared below.
//
// The testbench keeps its own model of the network: the weights start from
// the values found in the weight memories at time 0, and each block cycle is
// replayed with the pipeline schedule (junction 1 FF on input t, junction 2
// FF + cost on t-1, junction 2 BP + UP on t-2, junction 1 UP on t-3; all
// reading the weights as they were at the start of the block cycle), with the
// reference arithmetic of tb_ref_pkg and the interleaver rule. Every result
// and, at the end, every weight and bias must match bit for bit. A second run
// in inference mode must leave all weights unchanged. After each run every
// entry of the result log is read back and compared with the results seen.

  localparam int W1 = N1 * DIN1, W2 = N2 * DIN2, CYC = W1 / Z1;
  localparam int NPC1 = Z1 / DIN1, NPC2 = Z2 / DIN2;
  localparam int NIN = EPOCH_LEN * EPOCHS;

  logic clk = 0, rst_n = 0;
  logic uart_rxd = 1, uart_cts;
  logic lbl_we = 0;
  logic [$clog2(NTRAIN)-1:0] lbl_addr = '0;
  logic [NCLASS-1:0] lbl_wdata = '0;
  logic start = 0, train_en = 0;
  logic [15:0] epoch_len = 16'(EPOCH_LEN);
  logic [7:0] num_epochs = 8'(EPOCHS);
  logic busy, done, result_valid, result_correct, rx_frame_err;
  logic [15:0] result_idx, rx_dropped;
  logic [$clog2(NCLASS)-1:0] result_class;
  logic [NCLASS-1:0] led;
  localparam int LOGD = 16;
  logic [$clog2(LOGD)-1:0] log_sel = '0;
  logic [NCLASS-1:0] log_led;
  logic log_correct;
  logic [$clog2(LOGD):0] log_count;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  // ---------------- model state ----------------
  int w1 [CYC][Z1];
  int b1 [CYC][NPC1];
  int w2 [CYC][Z2];
  int b2 [CYC][NPC2];
  int pix [EPOCH_LEN][N0];
  int cls [EPOCH_LEN];
  int a0 [NIN][N0];
  int a1 [NIN][N1];
  int ad1 [NIN][N1];
  int d1 [NIN][N1];
  int d2 [NIN][N2];
  int pred [$];
  int corr [$];
  int nclip = 0;

  function automatic int eta_of(int n);
    int e;
    e = n / EPOCH_LEN;
    if (e < 2) return 3;
    if (e >= 14) return 7;
    return 4 + (e - 2) / 4;
  endfunction

  // one block cycle t of the pipeline (inputs below 0 or >= nin are empty)
  task automatic model_block(input int t, input int nin, input bit train);
    int nw1 [CYC][Z1]; int nb1 [CYC][NPC1]; int nw2 [CYC][Z2]; int nb2 [CYC][NPC2];
    int pr1 [], pr2 [];
    pr1 = new[DIN1]; pr2 = new[DIN2];
    nw1 = w1; nb1 = b1; nw2 = w2; nb2 = b2;
    // junction 1 FF on t
    if (t >= 0 && t < nin)
      for (int k = 0; k < CYC; k++)
        for (int r = 0; r < NPC1; r++) begin
          int s;
          for (int f = 0; f < DIN1; f++)
            pr1[f] = mul(w1[k][r*DIN1+f], a0[t][left_of(1, Z1, N0, k, r*DIN1+f)]);
          s = add(tree(pr1, DIN1), b1[k][r]);
          if (s == 2047 || s == -2048) nclip++;
          a1[t][k*NPC1+r] = sig(s); ad1[t][k*NPC1+r] = dsig(s);
        end
    // junction 2 FF + cost on t-1
    if (t - 1 >= 0 && t - 1 < nin) begin
      int best, bi;
      best = -4096; bi = 0;
      for (int k = 0; k < CYC; k++)
        for (int r = 0; r < NPC2; r++) begin
          int s, j, a;
          j = k*NPC2 + r;
          for (int f = 0; f < DIN2; f++)
            pr2[f] = mul(w2[k][r*DIN2+f], a1[t-1][left_of(2, Z2, N1, k, r*DIN2+f)]);
          s = add(tree(pr2, DIN2), b2[k][r]);
          a = sig(s);
          d2[t-1][j] = sub(a, (j == cls[(t-1) % EPOCH_LEN]) ? 256 : 0);
          if (j < NCLASS && a > best) begin best = a; bi = j; end
        end
      pred.push_back(bi);
      corr.push_back(bi == cls[(t-1) % EPOCH_LEN]);
    end
    // junction 2 BP + UP on t-2
    if (train && t - 2 >= 0 && t - 2 < nin) begin
      int n;
      n = t - 2;
      for (int k = 0; k < CYC; k++)
        for (int p = 0; p < Z2; p++) begin
          int l, j, tt;
          l = left_of(2, Z2, N1, k, p); j = k*NPC2 + p / DIN2;
          tt = mul(mul(w2[k][p], d2[n][j]), ad1[n][l]);
          d1[n][l] = (k < N1 / Z2) ? tt : add(d1[n][l], tt);
          nw2[k][p] = sub(w2[k][p], mul(a1[n][l], d2[n][j], eta_of(n)));
          if (p % DIN2 == 0) nb2[k][p / DIN2] = sub(b2[k][p / DIN2], mul(d2[n][j], 256, eta_of(n)));
        end
    end
    // junction 1 UP on t-3
    if (train && t - 3 >= 0 && t - 3 < nin) begin
      int n;
      n = t - 3;
      for (int k = 0; k < CYC; k++)
        for (int p = 0; p < Z1; p++) begin
          int l, j;
          l = left_of(1, Z1, N0, k, p); j = k*NPC1 + p / DIN1;
          nw1[k][p] = sub(w1[k][p], mul(a0[n][l], d1[n][j], eta_of(n)));
          if (p % DIN1 == 0) nb1[k][p / DIN1] = sub(b1[k][p / DIN1], mul(d1[n][j], 256, eta_of(n)));
        end
    end
    w1 = nw1; b1 = nb1; w2 = nw2; b2 = nb2;
  endtask

  // ---------------- host side ----------------
  task automatic send_byte(input logic [7:0] v);
    uart_rxd = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin uart_rxd = v[i]; repeat (CPB) @(posedge clk); end
    uart_rxd = 1; repeat (CPB) @(posedge clk);
  endtask

  task automatic send_images(input int nin);
    for (int n = 0; n < nin; n++) begin
      while (!uart_cts) @(posedge clk);
      for (int i = 0; i < NPIX; i++) send_byte(8'(pix[n % EPOCH_LEN][i]));
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_bypass = 0, n_blocks = 0, n_short = 0, n_bad_gap = 0, n_eta_change = 0;
  int n_results = 0, n_inference_blocks = 0, last_start = -1, last_eta = 3;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.stall) n_stall++;
    if (dut.u_j2.bypass) n_bypass++;
    if (dut.u_ctrl.blk_start) begin
      n_blocks++;
      if (!dut.u_ctrl.train_mode) n_inference_blocks++;
      if (last_start >= 0) begin
        if (cycles - last_start == CYC + 2) n_short++;
        if (cycles - last_start < CYC + 2) n_bad_gap++;
      end
      last_start = cycles;
      if (dut.u_ctrl.nx_v[3] && int'(dut.u_ctrl.nx_eta[3]) != last_eta) begin
        n_eta_change++; last_eta = int'(dut.u_ctrl.nx_eta[3]);
      end
    end
  end

  int res_i = 0;
  int dut_class [$];
  int dut_corr [$];
  int dut_led_ok [$];
  always @(posedge clk) if (rst_n && result_valid) begin
    n_results++;
    dut_class.push_back(int'(result_class));
    dut_corr.push_back(int'(result_correct));
    dut_led_ok.push_back(led == (NCLASS'(1) << result_class));
  end

  // compare the results seen so far with the model's
  task automatic check_results();
    for (; res_i < dut_class.size(); res_i++) begin
      checks++;
      if (res_i >= pred.size() || dut_class[res_i] != pred[res_i] || dut_corr[res_i] != corr[res_i]
          || !dut_led_ok[res_i]) begin
        failures++;
        $display("FAIL result %0d: class %0d correct %0d, model %0d %0d", res_i, dut_class[res_i],
                 dut_corr[res_i], (res_i < pred.size()) ? pred[res_i] : -1,
                 (res_i < corr.size()) ? corr[res_i] : -1);
      end
    end
  endtask

  task automatic check_weights(input string what);
    int bad;
    bad = 0;
    for (int k = 0; k < CYC; k++) begin
      for (int z = 0; z < Z1; z++) if (int'(dut.u_j1.u_wmem.wmem[z][k]) != w1[k][z]) bad++;
      for (int r = 0; r < NPC1; r++) if (int'(dut.u_j1.u_wmem.bmem[r][k]) != b1[k][r]) bad++;
      for (int z = 0; z < Z2; z++) if (int'(dut.u_j2.u_wmem.wmem[z][k]) != w2[k][z]) bad++;
      for (int r = 0; r < NPC2; r++) if (int'(dut.u_j2.u_wmem.bmem[r][k]) != b2[k][r]) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d weights/biases differ from the model", what, bad); end
  endtask

  // the result log must hold the last LOGD results of the run just finished
  task automatic check_log(input int nin);
    int first, bad, k;
    first = dut_class.size() - nin;
    bad = 0;
    for (int j = 0; j < LOGD; j++) begin
      @(negedge clk); log_sel = $bits(log_sel)'(j);
      @(negedge clk);
      k = -1;
      for (int n = 0; n < nin; n++) if (n % LOGD == j) k = n;
      if (k < 0) begin
        if (log_led != '0) bad++;
      end else if (log_led != (NCLASS'(1) << dut_class[first + k])
                   || int'(log_correct) != dut_corr[first + k]) bad++;
    end
    checks++;
    if (bad != 0 || int'(log_count) != ((nin < LOGD) ? nin : LOGD)) begin
      failures++; $display("FAIL result log: %0d entries wrong, count %0d", bad, log_count);
    end
  endtask

  task automatic run(input int nin, input bit train);
    int blocks;
    blocks = nin + 3;
    train_en = train; epoch_len = 16'((nin < EPOCH_LEN) ? nin : EPOCH_LEN);
    num_epochs = 8'((nin + EPOCH_LEN - 1) / EPOCH_LEN);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      send_images(nin);
      begin @(posedge done); end
    join
    for (int t = 0; t < blocks; t++) model_block(t, nin, train);
    check_results();
    check_log(nin);
    repeat (5) @(posedge clk);
  endtask

  initial begin
    int nres, ntrained;
    int w1_0 [CYC][Z1];
    // data set: random pixels (zero beyond NPIX), random classes
    for (int n = 0; n < EPOCH_LEN; n++) begin
      cls[n] = int'($urandom_range(0, NCLASS - 1));
      for (int i = 0; i < N0; i++) pix[n][i] = (i < NPIX) ? int'($urandom_range(0, 255)) : 0;
    end
    for (int n = 0; n < NIN; n++) for (int i = 0; i < N0; i++) a0[n][i] = pix[n % EPOCH_LEN][i];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // weights as initialised
    for (int k = 0; k < CYC; k++) begin
      for (int z = 0; z < Z1; z++) w1[k][z] = int'(dut.u_j1.u_wmem.wmem[z][k]);
      for (int r = 0; r < NPC1; r++) b1[k][r] = int'(dut.u_j1.u_wmem.bmem[r][k]);
      for (int z = 0; z < Z2; z++) w2[k][z] = int'(dut.u_j2.u_wmem.wmem[z][k]);
      for (int r = 0; r < NPC2; r++) b2[k][r] = int'(dut.u_j2.u_wmem.bmem[r][k]);
    end
    w1_0 = w1;
    // labels
    for (int n = 0; n < EPOCH_LEN; n++) begin
      @(negedge clk); lbl_we = 1; lbl_addr = $bits(lbl_addr)'(n); lbl_wdata = NCLASS'(1) << cls[n];
    end
    @(negedge clk); lbl_we = 0;
    // training run
    run(NIN, 1'b1);
    check_weights("after training");
    ntrained = 0;
    for (int k = 0; k < CYC; k++) for (int z = 0; z < Z1; z++) if (w1[k][z] != w1_0[k][z]) ntrained++;
    checks++; if (ntrained == 0) begin failures++; $display("FAIL junction 1 weights never changed"); end
    // inference run: weights must stay
    if (INFER_N > 0) begin
      run(INFER_N, 1'b0);
      check_weights("after inference");
    end
    nres = NIN + INFER_N;
    checks++; if (n_results != nres) begin failures++; $display("FAIL %0d results, expected %0d", n_results, nres); end
    checks++; if (rx_frame_err || rx_dropped != 0) begin failures++; $display("FAIL UART errors"); end
    // every mechanism must have happened
    checks++; if (n_stall == 0)  begin failures++; $display("FAIL no stall"); end
    checks++; if (n_bypass == 0) begin failures++; $display("FAIL no BP bypass"); end
    checks++; if (n_short == 0)  begin failures++; $display("FAIL no back-to-back block cycle"); end
    checks++; if (n_bad_gap != 0) begin failures++; $display("FAIL block cycle shorter than W/z+2"); end
    checks++; if (EPOCHS > 2 && n_eta_change == 0) begin failures++; $display("FAIL no learning-rate change"); end
    checks++; if (INFER_N > 0 && n_inference_blocks == 0) begin failures++; $display("FAIL no inference block"); end
    $display("mechanisms: blocks=%0d stall_cycles=%0d bypass=%0d back_to_back=%0d eta_changes=%0d inference_blocks=%0d clipped_sums=%0d cycles=%0d",
             n_blocks, n_stall, n_bypass, n_short, n_eta_change, n_inference_blocks, nclip, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
