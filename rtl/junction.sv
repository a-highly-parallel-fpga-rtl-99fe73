// junction: one junction (layer pair) of the sparse network, doing
// feedforward (FF), back-propagation (BP) and update (UP) at the same time.
//
// The junction has W = NR*DIN weights, processed Z per cycle, so a block
// cycle holds CYC = W/Z weight cycles. In weight cycle k the Z weights of cell
// k of the weight memory are read once and shared by all three operations,
// each of which works on a different input (junction pipelining, chosen by the
// controller through the copy selects of the layer memories):
//   FF: a_i = sigma(sum w*a_{i-1} + b), natural order on the right side;
//   BP: delta_{i-1} partial sums += adot_{i-1} * w * delta_i (if HAS_BP);
//   UP: w -= eta*a_{i-1}*delta_i, b -= eta*delta_i; written back into cell k.
// Left-side values are accessed in the permuted order of the interleaver
// (Z banks, one address each, lanes rotated onto banks); right-side values in
// natural order (NPC = Z/DIN consecutive neurons per cycle).
//
// Every weight cycle takes three clock cycles, as in the paper: stage A
// computes the memory addresses (counter + interleaver, registered), stage B
// reads the memories and does all arithmetic (results registered), stage C
// writes the results (weight+bias cell k, left delta partial sums, FF outputs)
// at the registered addresses. Stages overlap, so a block cycle lasts
// CYC + 2 clock cycles from the first address cycle to the last write.
//
// Read-modify-write hazard: a BP partial sum read in stage B may be the one
// stage C is writing in the same clock (same bank and address, possible at a
// sweep boundary). The write data are then forwarded to stage B (bypass);
// this forwarding is this design's choice, the paper does not say how its
// pipeline resolves the hazard.
//
// Interface: `start` (one clock, only when `ready`) begins a block cycle with
// the enables and learning-rate shift given at that clock. `ready` rises in
// the clock the last stage-C write happens, so consecutive block cycles are
// CYC + 2 clocks apart.
module junction
  import nn_pkg::*;
#(
  parameter int NL     = 1024,  // left neurons
  parameter int NR     = 64,    // right neurons
  parameter int DIN    = 64,    // fan-in of a right neuron
  parameter int Z      = 128,   // degree of parallelism
  parameter bit HAS_BP = 1'b0,  // junction 1 has no BP (no delta_0)
  parameter int SEED   = 1,
  localparam int W     = NR * DIN,
  localparam int NPC   = Z / DIN,
  localparam int CYC   = W / Z,
  localparam int D     = NL / Z,
  localparam int DOUT  = W / NL,
  localparam int AW    = (D > 1) ? $clog2(D) : 1,
  localparam int KW    = (CYC > 1) ? $clog2(CYC) : 1,
  localparam int SW    = (DOUT > 1) ? $clog2(DOUT) : 1,
  localparam int ZW    = (Z > 1) ? $clog2(Z) : 1,
  localparam int RIW   = (NR > 1) ? $clog2(NR) : 1
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           ff_en,
  input  logic           bp_en,
  input  logic           up_en,
  input  logic [2:0]     eta_shift,
  output logic           ready,
  output logic           busy,
  // left layer, permuted order, one address per bank (stage B)
  output logic [AW-1:0]  l_addr      [Z],
  input  fx_t            l_act_ff    [Z],
  input  fx_t            l_act_up    [Z],
  input  fx_t            l_adot      [Z],
  input  fx_t            l_dlt_rd    [Z],
  output logic           l_dlt_we    [Z],
  output logic [AW-1:0]  l_dlt_waddr [Z],
  output fx_t            l_dlt_wdata [Z],
  // right layer, natural order
  output logic [RIW-1:0] r_idx,              // first neuron read in stage B
  input  fx_t            r_dlt       [NPC],  // delta_i of neurons r_idx..r_idx+NPC-1
  output logic           ff_valid,           // stage C: FF results of NPC neurons
  output logic [RIW-1:0] ff_idx,
  output fx_t            ff_act      [NPC],
  output fx_t            ff_adot     [NPC],
  output logic           bypass              // a BP partial sum was forwarded
);
  // ---------------- block control and address generation ------------------
  logic          run;
  logic [KW-1:0] k;
  logic          blk_ff, blk_bp, blk_up;
  logic [2:0]    blk_eta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; k <= '0;
      blk_ff <= 1'b0; blk_bp <= 1'b0; blk_up <= 1'b0; blk_eta <= '0;
    end else if (start) begin
      run <= 1'b1; k <= '0;
      blk_ff <= ff_en; blk_bp <= bp_en & HAS_BP; blk_up <= up_en; blk_eta <= eta_shift;
    end else if (run) begin
      if (int'(k) == CYC - 1) run <= 1'b0;
      k <= k + 1'b1;
    end
  end

  logic [SW-1:0] sweep;
  logic [AW-1:0] cyc;
  logic [AW-1:0] ilv_addr [Z];
  logic [ZW-1:0] ilv_rotv;

  always_comb begin
    sweep = SW'(32'(k) / D);
    cyc   = AW'(32'(k) % D);
  end

  interleaver #(.Z(Z), .NL(NL), .DOUT(DOUT), .SEED(SEED)) u_ilv (
    .sweep(sweep), .cyc(cyc), .bank_addr(ilv_addr), .rot(ilv_rotv));

  // ---------------- stage A registers (addresses) --------------------------
  logic          a_v, a_first;
  logic [KW-1:0] a_k;
  logic [AW-1:0] a_addr [Z];
  logic [ZW-1:0] a_rot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_v <= 1'b0; a_first <= 1'b0; a_k <= '0; a_rot <= '0;
      for (int m = 0; m < Z; m++) a_addr[m] <= '0;
    end else begin
      a_v     <= run;
      a_first <= (sweep == '0);
      a_k     <= k;
      a_rot   <= ilv_rotv;
      for (int m = 0; m < Z; m++) a_addr[m] <= ilv_addr[m];
    end
  end

  // ---------------- stage B: memory read and arithmetic --------------------
  fx_t w_rd [Z];
  fx_t b_rd [NPC];
  fx_t w_new [Z];
  fx_t b_new [NPC];

  // stage C registers, declared here for the bypass
  logic          c_v;
  logic [KW-1:0] c_k;
  logic [AW-1:0] c_addr [Z];
  fx_t           c_psum [Z];   // bank order
  fx_t           c_w [Z];
  fx_t           c_b [NPC];
  fx_t           c_act [NPC];
  fx_t           c_adot [NPC];

  assign l_addr = a_addr;
  assign r_idx  = RIW'(32'(a_k) * NPC);

  // lane p <-> bank (p + rot) mod Z
  function automatic int lane_bank(input int p, input logic [ZW-1:0] r);
    return (p + int'(r)) % Z;
  endfunction
  function automatic int bank_lane(input int m, input logic [ZW-1:0] r);
    return (m + Z - int'(r)) % Z;
  endfunction

  fx_t lane_act_ff [Z];
  fx_t lane_act_up [Z];
  fx_t lane_adot   [Z];
  fx_t lane_psum   [Z];
  fx_t bank_psum   [Z];
  logic [Z-1:0] fwd;

  always_comb begin
    for (int m = 0; m < Z; m++) begin
      fwd[m]       = c_v && blk_bp && (c_addr[m] == a_addr[m]);
      bank_psum[m] = fwd[m] ? c_psum[m] : l_dlt_rd[m];
    end
    for (int p = 0; p < Z; p++) begin
      lane_act_ff[p] = l_act_ff[lane_bank(p, a_rot)];
      lane_act_up[p] = l_act_up[lane_bank(p, a_rot)];
      lane_adot[p]   = l_adot[lane_bank(p, a_rot)];
      lane_psum[p]   = bank_psum[lane_bank(p, a_rot)];
    end
  end
  assign bypass = a_v && (|fwd);

  weight_mem #(.Z(Z), .DIN(DIN), .DOUT(DOUT), .DEPTH(CYC), .SEED(SEED + 100)) u_wmem (
    .clk(clk), .raddr(a_k), .w_rd(w_rd), .b_rd(b_rd),
    .we(c_v && blk_up), .waddr(c_k), .w_wr(c_w), .b_wr(c_b));

  fx_t ff_s [NPC];
  fx_t ff_a [NPC];
  fx_t ff_d [NPC];
  ff_unit #(.Z(Z), .DIN(DIN)) u_ff (
    .w(w_rd), .a(lane_act_ff), .b(b_rd), .s(ff_s), .act(ff_a), .adot(ff_d));

  up_unit #(.Z(Z), .DIN(DIN)) u_up (
    .w(w_rd), .a_l(lane_act_up), .delta_r(r_dlt), .b(b_rd), .eta_shift(blk_eta),
    .w_new(w_new), .b_new(b_new));

  fx_t lane_pout [Z];
  if (HAS_BP) begin : g_bp
    bp_unit #(.Z(Z), .DIN(DIN)) u_bp (
      .w(w_rd), .delta_r(r_dlt), .adot_l(lane_adot), .psum_in(lane_psum),
      .first(a_first), .psum_out(lane_pout));
  end else begin : g_nobp
    always_comb for (int p = 0; p < Z; p++) lane_pout[p] = '0;
  end

  // ---------------- stage C registers and writes ---------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_v <= 1'b0; c_k <= '0;
      for (int m = 0; m < Z; m++) begin c_addr[m] <= '0; c_psum[m] <= '0; c_w[m] <= '0; end
      for (int r = 0; r < NPC; r++) begin c_b[r] <= '0; c_act[r] <= '0; c_adot[r] <= '0; end
    end else begin
      c_v <= a_v;
      c_k <= a_k;
      for (int m = 0; m < Z; m++) begin
        c_addr[m] <= a_addr[m];
        c_psum[m] <= lane_pout[bank_lane(m, a_rot)];
        c_w[m]    <= blk_up ? w_new[m] : w_rd[m];
      end
      for (int r = 0; r < NPC; r++) begin
        c_b[r]    <= blk_up ? b_new[r] : b_rd[r];
        c_act[r]  <= ff_a[r];
        c_adot[r] <= ff_d[r];
      end
    end
  end

  always_comb begin
    for (int m = 0; m < Z; m++) begin
      l_dlt_we[m]    = c_v && blk_bp;
      l_dlt_waddr[m] = c_addr[m];
      l_dlt_wdata[m] = c_psum[m];
    end
  end

  assign ff_valid = c_v && blk_ff;
  assign ff_idx   = RIW'(32'(c_k) * NPC);
  assign ff_act   = c_act;
  assign ff_adot  = c_adot;

  assign ready = !run && !a_v;
  assign busy  = run || a_v || c_v;

  // ---------------- checks ---------------------------------------------------
  initial begin
    assert (Z % DIN == 0) else $error("junction: Z must be a multiple of DIN (z >= d_in)");
    assert (W % NL == 0)  else $error("junction: W must be a multiple of NL");
    assert (NL % Z == 0)  else $error("junction: NL must be a multiple of Z");
  end
  a_start_when_ready: assert property (@(posedge clk) disable iff (!rst_n) start |-> ready);
endmodule
