// nn_ctrl: block-cycle sequencer of the junction pipeline.
//
// With L junctions, 2L inputs are in flight: in every block cycle junction i
// (1-based) does FF on the input in slot i-1 and BP and UP on the input in
// slot 2L-i. For L = 2: junction 1 FF on input t, junction 2 FF and cost on
// t-1, junction 2 BP and UP on t-2, junction 1 UP on t-3 (the paper's Fig. 1).
// At each block start the slots shift by one and slot 0 takes the next input.
// A slot holds a valid bit, the input's sequence number (its layer memories
// are copy seq mod COPIES), its index within the epoch (label address) and its
// epoch (learning rate eta = 2^-eta_shift_of(epoch), the paper's schedule).
//
// A block cycle starts when all junctions are ready and, if a new input is
// due, that input has been fully loaded (loaded_seq != fed_seq); otherwise the
// controller stalls. After the last input of the last epoch it runs 2L-1 more
// block cycles to drain the pipeline, then pulses `done`. Training mode
// (BP and UP enabled) or inference mode (FF only) is taken from `train_en` at
// `start`.
//
// Timing: `blk_start` is combinational; the `nx_*` outputs give the slot
// contents of the block being started (for the junctions to latch with
// blk_start), the `slot_*` registers hold them for the whole block cycle.
module nn_ctrl
  import nn_pkg::*;
#(
  parameter int L = 2
)(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        train_en,
  input  logic [15:0] epoch_len,
  input  logic [7:0]  num_epochs,
  input  logic [7:0]  loaded_seq,
  input  logic        jn_ready,
  output logic        busy,
  output logic        done,
  output logic        train_mode,
  output logic        clear,          // start of a run: reset the loader
  output logic        load_allow,
  output logic [7:0]  fed_seq,
  output logic        stall,
  output logic        blk_start,
  output logic        nx_v       [2*L],
  output logic [2:0]  nx_eta     [2*L],
  output logic        slot_v     [2*L],
  output logic [7:0]  slot_seq   [2*L],
  output logic [15:0] slot_idx   [2*L],
  output logic [7:0]  slot_epoch [2*L]
);
  typedef enum logic [0:0] {S_IDLE, S_RUN} state_t;
  state_t      state;
  logic [15:0] idx;
  logic [7:0]  epoch;
  logic        more, in_ready, any_left;

  always_comb begin
    more     = (epoch < num_epochs);
    in_ready = (loaded_seq != fed_seq);
    any_left = more;
    for (int s = 0; s < 2*L - 1; s++) any_left = any_left || slot_v[s];
    blk_start = (state == S_RUN) && jn_ready && any_left && (!more || in_ready);
    stall     = (state == S_RUN) && jn_ready && more && !in_ready;
    nx_v[0]   = more;
    nx_eta[0] = eta_shift_of(epoch);
    for (int s = 1; s < 2*L; s++) begin
      nx_v[s]   = slot_v[s-1];
      nx_eta[s] = eta_shift_of(slot_epoch[s-1]);
    end
    busy       = (state != S_IDLE);
    load_allow = (state == S_RUN) && more;
    clear      = (state == S_IDLE) && start;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx <= '0; epoch <= '0; fed_seq <= '0; done <= 1'b0; train_mode <= 1'b0;
      for (int s = 0; s < 2*L; s++) begin
        slot_v[s] <= 1'b0; slot_seq[s] <= '0; slot_idx[s] <= '0; slot_epoch[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN; idx <= '0; epoch <= '0; fed_seq <= '0; train_mode <= train_en;
          for (int s = 0; s < 2*L; s++) slot_v[s] <= 1'b0;
        end
        S_RUN: begin
          if (!any_left && jn_ready) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (blk_start) begin
            slot_v[0] <= more; slot_seq[0] <= fed_seq; slot_idx[0] <= idx; slot_epoch[0] <= epoch;
            for (int s = 1; s < 2*L; s++) begin
              slot_v[s] <= slot_v[s-1]; slot_seq[s] <= slot_seq[s-1];
              slot_idx[s] <= slot_idx[s-1]; slot_epoch[s] <= slot_epoch[s-1];
            end
            if (more) begin
              fed_seq <= fed_seq + 1'b1;
              if (idx == epoch_len - 1'b1) begin idx <= '0; epoch <= epoch + 1'b1; end
              else idx <= idx + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
