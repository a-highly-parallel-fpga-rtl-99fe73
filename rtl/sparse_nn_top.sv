// sparse_nn_top: on-chip training and inference of a pre-defined sparse
// neural network, 1024-64-32 neurons in the default configuration.
//
// Two junctions work in a pipeline (nn_ctrl): in one block cycle junction 1
// does feedforward on input t and update on input t-3, junction 2 does
// feedforward plus cost on t-1 and back-propagation plus update on t-2. Each
// junction processes Z weights per clock (Z1 = 128, Z2 = 32), so both finish
// their W/Z = 32 weight cycles together; a block cycle is 34 clocks.
//
// Layer memories between the junctions (bank_mem), with one copy per input
// in flight:
//   a_0      Z1 banks, 8 copies : written by the input loader, read by J1 FF/UP
//   a_1      Z2 banks, 4 copies : written by J1 FF, read by J2 FF/UP
//   adot_1   Z2 banks, 4 copies : written by J1 FF, read by J2 BP
//   delta_1  Z2 banks, 2 copies : partial sums of J2 BP, read by J1 UP
//   delta_2  NPC2 banks, 2 copies : written by the cost unit, read by J2 BP/UP
// Images arrive over a UART link (8-bit pixels, 784 per image, padded to 1024
// with zeros); their one-hot labels are written into label_mem before a run.
// The copy counts are what the pipeline needs (this design's choice).
//
// Interface: load labels through lbl_*, then pulse `start` with epoch_len
// images per epoch and num_epochs epochs; send the images over `uart_rxd`,
// one image at a time while `uart_cts` is high, repeating the data set every
// epoch. Each input's classification appears on result_* and `led`; `done`
// pulses when the pipeline has drained. train_en = 0 runs inference only.
// The results of the last LOG_DEPTH inputs of a run are kept in result_log
// and can be stepped through on log_led with log_sel (registered, one clock).
module sparse_nn_top
  import nn_pkg::*;
#(
  parameter int N0           = 1024,
  parameter int N1           = 64,
  parameter int N2           = 32,
  parameter int DIN1         = 64,
  parameter int DIN2         = 32,
  parameter int Z1           = 128,
  parameter int Z2           = 32,
  parameter int NPIX         = 784,
  parameter int NCLASS       = 10,
  parameter int NTRAIN       = 12544,
  parameter int CLKS_PER_BIT = 130,
  parameter int LOG_DEPTH    = 16,
  localparam int NPC1  = Z1 / DIN1,
  localparam int NPC2  = Z2 / DIN2,
  localparam int D0    = N0 / Z1,
  localparam int D1    = N1 / Z2,
  localparam int DD2   = N2 / NPC2,
  localparam int A0W   = (D0 > 1) ? $clog2(D0) : 1,
  localparam int A1W   = (D1 > 1) ? $clog2(D1) : 1,
  localparam int A2W   = (DD2 > 1) ? $clog2(DD2) : 1,
  localparam int R1W   = (N1 > 1) ? $clog2(N1) : 1,
  localparam int R2W   = (N2 > 1) ? $clog2(N2) : 1,
  localparam int LAW   = $clog2(NTRAIN),
  localparam int CLW   = $clog2(NCLASS),
  localparam int LGW   = $clog2(LOG_DEPTH)
)(
  input  logic              clk,
  input  logic              rst_n,
  // host link
  input  logic              uart_rxd,
  output logic              uart_cts,
  input  logic              lbl_we,
  input  logic [LAW-1:0]    lbl_addr,
  input  logic [NCLASS-1:0] lbl_wdata,
  // run control
  input  logic              start,
  input  logic              train_en,
  input  logic [15:0]       epoch_len,
  input  logic [7:0]        num_epochs,
  output logic              busy,
  output logic              done,
  // results
  output logic              result_valid,
  output logic [15:0]       result_idx,
  output logic [CLW-1:0]    result_class,
  output logic              result_correct,
  output logic [NCLASS-1:0] led,
  // stored results of the last LOG_DEPTH inputs, shown one at a time
  input  logic [LGW-1:0]    log_sel,
  output logic [NCLASS-1:0] log_led,
  output logic              log_correct,
  output logic [LGW:0]      log_count,
  output logic              rx_frame_err,
  output logic [15:0]       rx_dropped
);
  localparam int L = 2;

  // ---------------- control ---------------------------------------------------
  logic        j1_ready, j2_ready, j1_busy, j2_busy;
  logic        train_mode, clear, load_allow, stall, blk_start;
  logic [7:0]  fed_seq, loaded_seq;
  logic        nx_v [2*L];
  logic [2:0]  nx_eta [2*L];
  logic        slot_v [2*L];
  logic [7:0]  slot_seq [2*L];
  logic [15:0] slot_idx [2*L];
  logic [7:0]  slot_epoch [2*L];

  nn_ctrl #(.L(L)) u_ctrl (
    .clk, .rst_n, .start, .train_en, .epoch_len, .num_epochs,
    .loaded_seq, .jn_ready(j1_ready && j2_ready),
    .busy, .done, .train_mode, .clear, .load_allow, .fed_seq, .stall, .blk_start,
    .nx_v, .nx_eta, .slot_v, .slot_seq, .slot_idx, .slot_epoch);

  logic        result_valid_pre;

  // result index: the input whose FF/cost runs in junction 2 (slot 1)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) result_idx <= '0;
    else if (result_valid_pre) result_idx <= slot_idx[1];
  end

  // ---------------- input path -------------------------------------------------
  logic       rx_valid;
  logic [7:0] rx_data;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rxd(uart_rxd), .valid(rx_valid), .data(rx_data), .frame_err(rx_frame_err));

  logic          a0_we    [Z1];
  logic [2:0]    a0_wcopy;
  logic [A0W-1:0] a0_waddr [Z1];
  fx_t           a0_wdata [Z1];

  input_loader #(.NPIX(NPIX), .N0(N0), .BANKS(Z1), .COPIES(8)) u_load (
    .clk, .rst_n, .clear, .allow(load_allow), .fed_seq,
    .byte_valid(rx_valid), .byte_data(rx_data), .cts(uart_cts), .loaded_seq,
    .dropped(rx_dropped), .we(a0_we), .wcopy(a0_wcopy), .waddr(a0_waddr), .wdata(a0_wdata));

  logic [NCLASS-1:0] label;
  label_mem #(.DEPTH(NTRAIN), .WORD(NCLASS)) u_lbl (
    .clk, .we(lbl_we && !busy), .addr(busy ? LAW'(slot_idx[1]) : lbl_addr),
    .wdata(lbl_wdata), .rdata(label));

  // ---------------- layer 0 memory -----------------------------------------------
  logic [A0W-1:0] j1_laddr [Z1];
  logic [2:0]     a0_rcopy [2];
  logic [A0W-1:0] a0_raddr [2][Z1];
  fx_t            a0_rdata [2][Z1];

  always_comb begin
    a0_rcopy[0] = slot_seq[0][2:0];        // J1 FF
    a0_rcopy[1] = slot_seq[3][2:0];        // J1 UP
    a0_raddr[0] = j1_laddr;
    a0_raddr[1] = j1_laddr;
  end

  bank_mem #(.BANKS(Z1), .DEPTH(D0), .COPIES(8), .NRD(2)) u_a0 (
    .clk, .we(a0_we), .wcopy(a0_wcopy), .waddr(a0_waddr), .wdata(a0_wdata),
    .rcopy(a0_rcopy), .raddr(a0_raddr), .rdata(a0_rdata));

  // ---------------- junction 1 ---------------------------------------------------
  fx_t            zero_z1 [Z1];
  logic           j1_dwe [Z1];
  logic [A0W-1:0] j1_dwaddr [Z1];
  fx_t            j1_dwdata [Z1];
  logic [R1W-1:0] j1_ridx;
  fx_t            j1_rdlt [NPC1];
  logic           j1_ffv;
  logic [R1W-1:0] j1_ffidx;
  fx_t            j1_act [NPC1];
  fx_t            j1_adot [NPC1];
  logic           j1_bypass;

  always_comb for (int m = 0; m < Z1; m++) zero_z1[m] = '0;

  junction #(.NL(N0), .NR(N1), .DIN(DIN1), .Z(Z1), .HAS_BP(1'b0), .SEED(1)) u_j1 (
    .clk, .rst_n, .start(blk_start),
    .ff_en(nx_v[0]), .bp_en(1'b0), .up_en(nx_v[3] && train_mode), .eta_shift(nx_eta[3]),
    .ready(j1_ready), .busy(j1_busy),
    .l_addr(j1_laddr), .l_act_ff(a0_rdata[0]), .l_act_up(a0_rdata[1]),
    .l_adot(zero_z1), .l_dlt_rd(zero_z1),
    .l_dlt_we(j1_dwe), .l_dlt_waddr(j1_dwaddr), .l_dlt_wdata(j1_dwdata),
    .r_idx(j1_ridx), .r_dlt(j1_rdlt),
    .ff_valid(j1_ffv), .ff_idx(j1_ffidx), .ff_act(j1_act), .ff_adot(j1_adot),
    .bypass(j1_bypass));

  // ---------------- layer 1 memories ----------------------------------------------
  // J1 writes NPC1 consecutive neurons per clock in natural order:
  // neuron j -> bank j mod Z2, address j / Z2.
  logic           a1_we [Z2];
  logic [A1W-1:0] a1_waddr [Z2];
  fx_t            a1_wdata [Z2];
  fx_t            ad1_wdata [Z2];

  always_comb begin
    for (int b = 0; b < Z2; b++) begin
      a1_we[b] = 1'b0; a1_waddr[b] = '0; a1_wdata[b] = '0; ad1_wdata[b] = '0;
    end
    for (int r = 0; r < NPC1; r++) begin
      int j;
      j = int'(j1_ffidx) + r;
      a1_we[j % Z2]     = j1_ffv;
      a1_waddr[j % Z2]  = A1W'(j / Z2);
      a1_wdata[j % Z2]  = j1_act[r];
      ad1_wdata[j % Z2] = j1_adot[r];
    end
  end

  logic [A1W-1:0] j2_laddr [Z2];
  logic [1:0]     a1_rcopy [2];
  logic [A1W-1:0] a1_raddr [2][Z2];
  fx_t            a1_rdata [2][Z2];
  logic [1:0]     ad1_rcopy [1];
  logic [A1W-1:0] ad1_raddr [1][Z2];
  fx_t            ad1_rdata [1][Z2];

  always_comb begin
    a1_rcopy[0]  = slot_seq[1][1:0];       // J2 FF
    a1_rcopy[1]  = slot_seq[2][1:0];       // J2 UP
    a1_raddr[0]  = j2_laddr;
    a1_raddr[1]  = j2_laddr;
    ad1_rcopy[0] = slot_seq[2][1:0];       // J2 BP
    ad1_raddr[0] = j2_laddr;
  end

  bank_mem #(.BANKS(Z2), .DEPTH(D1), .COPIES(4), .NRD(2)) u_a1 (
    .clk, .we(a1_we), .wcopy(slot_seq[0][1:0]), .waddr(a1_waddr), .wdata(a1_wdata),
    .rcopy(a1_rcopy), .raddr(a1_raddr), .rdata(a1_rdata));

  bank_mem #(.BANKS(Z2), .DEPTH(D1), .COPIES(4), .NRD(1)) u_ad1 (
    .clk, .we(a1_we), .wcopy(slot_seq[0][1:0]), .waddr(a1_waddr), .wdata(ad1_wdata),
    .rcopy(ad1_rcopy), .raddr(ad1_raddr), .rdata(ad1_rdata));

  // delta_1: port 0 = J2 BP read-modify-write (permuted), port 1 = J1 UP (natural)
  logic           j2_dwe [Z2];
  logic [A1W-1:0] j2_dwaddr [Z2];
  fx_t            j2_dwdata [Z2];
  logic [0:0]     d1_rcopy [2];
  logic [A1W-1:0] d1_raddr [2][Z2];
  fx_t            d1_rdata [2][Z2];

  always_comb begin
    d1_rcopy[0] = slot_seq[2][0];          // J2 BP
    d1_rcopy[1] = slot_seq[3][0];          // J1 UP
    d1_raddr[0] = j2_laddr;
    for (int b = 0; b < Z2; b++) d1_raddr[1][b] = '0;
    for (int r = 0; r < NPC1; r++) begin
      int j;
      j = int'(j1_ridx) + r;
      d1_raddr[1][j % Z2] = A1W'(j / Z2);
    end
    for (int r = 0; r < NPC1; r++) j1_rdlt[r] = d1_rdata[1][(int'(j1_ridx) + r) % Z2];
  end

  bank_mem #(.BANKS(Z2), .DEPTH(D1), .COPIES(2), .NRD(2)) u_d1 (
    .clk, .we(j2_dwe), .wcopy(slot_seq[2][0]), .waddr(j2_dwaddr), .wdata(j2_dwdata),
    .rcopy(d1_rcopy), .raddr(d1_raddr), .rdata(d1_rdata));

  // ---------------- junction 2 ---------------------------------------------------
  logic [R2W-1:0] j2_ridx;
  fx_t            j2_rdlt [NPC2];
  logic           j2_ffv;
  logic [R2W-1:0] j2_ffidx;
  fx_t            j2_act [NPC2];
  fx_t            j2_adot [NPC2];
  logic           j2_bypass;

  junction #(.NL(N1), .NR(N2), .DIN(DIN2), .Z(Z2), .HAS_BP(1'b1), .SEED(2)) u_j2 (
    .clk, .rst_n, .start(blk_start),
    .ff_en(nx_v[1]), .bp_en(nx_v[2] && train_mode), .up_en(nx_v[2] && train_mode),
    .eta_shift(nx_eta[2]),
    .ready(j2_ready), .busy(j2_busy),
    .l_addr(j2_laddr), .l_act_ff(a1_rdata[0]), .l_act_up(a1_rdata[1]),
    .l_adot(ad1_rdata[0]), .l_dlt_rd(d1_rdata[0]),
    .l_dlt_we(j2_dwe), .l_dlt_waddr(j2_dwaddr), .l_dlt_wdata(j2_dwdata),
    .r_idx(j2_ridx), .r_dlt(j2_rdlt),
    .ff_valid(j2_ffv), .ff_idx(j2_ffidx), .ff_act(j2_act), .ff_adot(j2_adot),
    .bypass(j2_bypass));

  // ---------------- output layer: cost and delta_2 ----------------------------------
  logic           d2_we_c;
  logic [A2W-1:0] d2_waddr_c;
  fx_t            d2_wdata [NPC2];
  logic           d2_we [NPC2];
  logic [A2W-1:0] d2_waddr [NPC2];
  logic [0:0]     d2_rcopy [1];
  logic [A2W-1:0] d2_raddr [1][NPC2];
  fx_t            d2_rdata [1][NPC2];

  cost_unit #(.NOUT(N2), .NCLASS(NCLASS), .NPC(NPC2)) u_cost (
    .clk, .rst_n, .in_valid(j2_ffv), .in_idx(j2_ffidx), .act(j2_act), .label(label),
    .d_we(d2_we_c), .d_addr(d2_waddr_c), .d_data(d2_wdata),
    .result_valid(result_valid), .result_class, .result_correct, .led);

  result_log #(.DEPTH(LOG_DEPTH), .NCLASS(NCLASS)) u_log (
    .clk, .rst_n, .clear, .wr_valid(result_valid), .wr_led(led), .wr_correct(result_correct),
    .sel(log_sel), .show_led(log_led), .show_correct(log_correct), .count(log_count));

  assign result_valid_pre = j2_ffv && (int'(j2_ffidx) == N2 - NPC2);

  always_comb begin
    d2_rcopy[0] = slot_seq[2][0];          // J2 BP/UP
    for (int r = 0; r < NPC2; r++) begin
      d2_we[r]       = d2_we_c;
      d2_waddr[r]    = d2_waddr_c;
      d2_raddr[0][r] = A2W'(int'(j2_ridx) / NPC2);
      j2_rdlt[r]     = d2_rdata[0][r];
    end
  end

  bank_mem #(.BANKS(NPC2), .DEPTH(DD2), .COPIES(2), .NRD(1)) u_d2 (
    .clk, .we(d2_we), .wcopy(slot_seq[1][0]), .waddr(d2_waddr), .wdata(d2_wdata),
    .rcopy(d2_rcopy), .raddr(d2_raddr), .rdata(d2_rdata));

  // ---------------- structural checks ------------------------------------------------
  initial begin
    assert (N1 * DIN1 / Z1 == N2 * DIN2 / Z2)
      else $error("sparse_nn_top: both junctions must have the same block cycle W/z");
    assert (NPC1 <= Z2) else $error("sparse_nn_top: Z1/DIN1 must not exceed Z2");
    assert (N2 % NPC2 == 0) else $error("sparse_nn_top: bad output layer size");
  end
endmodule
