// uart_rx: asynchronous serial receiver (8 data bits, no parity, 1 stop bit).
//
// The input images come from a PC over a UART link; the paper names the
// interface but not its insides, so this is a conventional receiver: the line
// is synchronised with two flip-flops, a falling edge starts a frame, each
// bit is sampled in the middle of its CLKS_PER_BIT-clock period, LSB first.
// A good stop bit pulses `valid` for one clock with the byte on `data`; a bad
// one pulses `frame_err` instead. CLKS_PER_BIT = 130 gives 115200 baud at the
// design's 15 MHz clock (baud rate chosen here).
module uart_rx #(
  parameter int CLKS_PER_BIT = 130,
  localparam int CW = $clog2(CLKS_PER_BIT + 1)
)(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data,
  output logic       frame_err
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_t;
  state_t        state;
  logic [CW-1:0] cnt;
  logic [2:0]    bitn;
  logic [7:0]    sh;
  logic          s1, s2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= 1'b1; s2 <= 1'b1;
      state <= S_IDLE; cnt <= '0; bitn <= '0; sh <= '0;
      valid <= 1'b0; data <= '0; frame_err <= 1'b0;
    end else begin
      s1 <= rxd; s2 <= s1;
      valid <= 1'b0; frame_err <= 1'b0;
      unique case (state)
        S_IDLE: if (!s2) begin state <= S_START; cnt <= '0; end
        S_START: begin
          if (int'(cnt) == CLKS_PER_BIT / 2 - 1) begin
            cnt <= '0;
            if (!s2) begin state <= S_DATA; bitn <= '0; end
            else state <= S_IDLE;               // glitch, not a start bit
          end else cnt <= cnt + 1'b1;
        end
        S_DATA: begin
          if (int'(cnt) == CLKS_PER_BIT - 1) begin
            cnt <= '0;
            sh  <= {s2, sh[7:1]};
            bitn <= bitn + 1'b1;
            if (bitn == 3'd7) state <= S_STOP;
          end else cnt <= cnt + 1'b1;
        end
        S_STOP: begin
          if (int'(cnt) == CLKS_PER_BIT - 1) begin
            cnt <= '0;
            state <= S_IDLE;
            if (s2) begin valid <= 1'b1; data <= sh; end
            else frame_err <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
