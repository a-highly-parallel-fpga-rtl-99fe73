// result_log: keeps the classification results of the last DEPTH inputs of a
// run so that they can be shown one at a time on the 10 board LEDs.
//
// Each result (one-hot predicted class plus a "correct" bit) is written into
// entry (result number mod DEPTH) of a small memory; `clear` (start of a run)
// resets the write pointer, the count and the valid bits. After a run, entry
// j therefore holds the latest result whose number is j modulo DEPTH. `sel`
// picks the entry to show; `show_led` / `show_correct` follow one clock later
// (registered read, as from a block RAM). `count` is the number of valid
// entries, saturating at DEPTH.
//
// The published design stores the results of several training inputs and
// shows them on 10 LEDs, one per class; how many are stored and how one is
// selected is not given. DEPTH = 16 and the `sel` input are this design's
// choice.
module result_log #(
  parameter int DEPTH  = 16,
  parameter int NCLASS = 10,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              wr_valid,
  input  logic [NCLASS-1:0] wr_led,
  input  logic              wr_correct,
  input  logic [AW-1:0]     sel,
  output logic [NCLASS-1:0] show_led,
  output logic              show_correct,
  output logic [AW:0]       count
);
  logic [NCLASS:0] mem [DEPTH];
  logic [AW-1:0]   wptr;

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wptr] <= {wr_correct, wr_led};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; count <= '0;
    end else if (clear) begin
      wptr <= '0; count <= '0;
    end else if (wr_valid) begin
      wptr <= (32'(wptr) == DEPTH - 1) ? '0 : wptr + 1'b1;
      if (32'(count) < DEPTH) count <= count + 1'b1;
    end
  end

  // registered read; entries not written since the last clear read as zero
  logic [DEPTH-1:0] written;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) written <= '0;
    else if (clear) written <= '0;
    else if (wr_valid) written[wptr] <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      show_led <= '0; show_correct <= 1'b0;
    end else if (written[sel]) begin
      {show_correct, show_led} <= mem[sel];
    end else begin
      show_led <= '0; show_correct <= 1'b0;
    end
  end
endmodule
