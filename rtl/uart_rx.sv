// uart_rx: serial receiver of the LDA <-> DIF and CCC links.
//
// The line passes a two-flop synchroniser.  A falling edge in idle starts a
// frame; the start bit is checked at its middle and each data bit (LSB first)
// is sampled in the middle of its CLKS_PER_BIT clocks.  The stop bit is
// checked one clock after it begins, and the receiver re-arms right after,
// so frames whose stop bit is only half a bit long (see uart_tx) are
// received back to back.  `valid` pulses for one clock with the byte;
// `frame_err` pulses instead if the stop bit is low.  The framing is this
// design's choice; the 10 MHz bit clock (4 clocks of 40 MHz) is the paper's.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 4,
  parameter int unsigned DATA_BITS    = 8
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 rxd,
  output logic [DATA_BITS-1:0] data,
  output logic                 valid,
  output logic                 frame_err
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_e;
  state_e state;
  logic [1:0] sync;
  logic [$clog2(DATA_BITS+1)-1:0] nbit;
  logic [$clog2(CLKS_PER_BIT+1)-1:0] cnt;
  logic [DATA_BITS-1:0] sh;
  logic line;

  assign line = sync[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      sync      <= 2'b11;
      state     <= S_IDLE;
      cnt       <= '0;
      nbit      <= '0;
      sh        <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rxd};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      unique case (state)
        S_IDLE: if (!line) begin
          cnt   <= 1;             // this clock is the first of the start bit
          state <= S_START;
        end
        S_START: if (cnt == CLKS_PER_BIT / 2) begin
          if (line) state <= S_IDLE;       // glitch, not a start bit
          else begin
            cnt   <= '0;
            nbit  <= '0;
            state <= S_DATA;
          end
        end else cnt <= cnt + 1'b1;
        S_DATA: if (cnt == CLKS_PER_BIT - 1) begin
          cnt <= '0;
          sh  <= {line, sh[DATA_BITS-1:1]};
          if (nbit == DATA_BITS - 1) state <= S_STOP;
          else nbit <= nbit + 1'b1;
        end else cnt <= cnt + 1'b1;
        S_STOP: if (cnt == CLKS_PER_BIT / 2) begin
          // one clock into the stop bit (sampling is half a bit late)
          cnt   <= '0;
          state <= S_IDLE;
          if (line) begin
            data  <= sh;
            valid <= 1'b1;
          end else frame_err <= 1'b1;
        end else cnt <= cnt + 1'b1;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
