// cost_unit: output-layer cost and classification result.
//
// It takes the feedforward outputs of the last junction, NPC neurons per
// cycle in natural order, and forms delta_L = a_L - y (the derivative of the
// cross-entropy cost with a sigmoid output, eq. 2a of the paper), where y is
// the one-hot ground truth: bit j of the NCLASS-bit label for j < NCLASS and 0
// for the padding neurons up to NOUT. The deltas are written straight into
// the output-layer delta memory (NPC banks, neuron j in bank j mod NPC at
// address j / NPC) in the same clock as the outputs arrive.
//
// It also tracks the largest activation among the NCLASS real outputs
// (first index wins ties). After the last neuron of an input it pulses
// result_valid with the predicted class, whether it matches the label, and
// drives `led` one-hot with the prediction (the paper shows results on 10
// LEDs; the argmax rule is this design's choice).
module cost_unit
  import nn_pkg::*;
#(
  parameter int NOUT   = 32,
  parameter int NCLASS = 10,
  parameter int NPC    = 1,
  localparam int RIW   = (NOUT > 1) ? $clog2(NOUT) : 1,
  localparam int DEPTH = NOUT / NPC,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int CLW   = $clog2(NCLASS)
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [RIW-1:0]    in_idx,         // first neuron of this cycle
  input  fx_t               act    [NPC],
  input  logic [NCLASS-1:0] label,          // one-hot ground truth
  output logic              d_we,
  output logic [AW-1:0]     d_addr,
  output fx_t               d_data [NPC],
  output logic              result_valid,
  output logic [CLW-1:0]    result_class,
  output logic              result_correct,
  output logic [NCLASS-1:0] led
);
  fx_t            best_q;
  logic [CLW-1:0] best_idx_q;
  fx_t            best_n;
  logic [CLW-1:0] best_idx_n;
  logic           last;

  always_comb begin
    d_we   = in_valid;
    d_addr = AW'(32'(in_idx) / NPC);
    for (int r = 0; r < NPC; r++) begin
      int j;
      j = int'(in_idx) + r;
      d_data[r] = fx_sub(act[r], (j < NCLASS && label[j % NCLASS]) ? FX_ONE : fx_t'(0));
    end
    // running argmax, restarted at neuron 0
    best_n     = (in_idx == '0) ? FX_MIN : best_q;
    best_idx_n = (in_idx == '0) ? '0     : best_idx_q;
    for (int r = 0; r < NPC; r++) begin
      int j;
      j = int'(in_idx) + r;
      if (j < NCLASS && (act[r] > best_n || (j == 0))) begin
        best_n     = act[r];
        best_idx_n = CLW'(j);
      end
    end
    last = in_valid && (int'(in_idx) == NOUT - NPC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_q <= FX_MIN; best_idx_q <= '0;
      result_valid <= 1'b0; result_class <= '0; result_correct <= 1'b0; led <= '0;
    end else begin
      result_valid <= last;
      if (in_valid) begin
        best_q     <= best_n;
        best_idx_q <= best_idx_n;
      end
      if (last) begin
        result_class   <= best_idx_n;
        result_correct <= label[best_idx_n];
        led            <= NCLASS'(1) << best_idx_n;
      end
    end
  end

  initial assert (NOUT % NPC == 0 && NOUT >= NCLASS) else $error("cost_unit: bad sizes");
endmodule
