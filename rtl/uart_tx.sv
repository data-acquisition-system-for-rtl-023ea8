// uart_tx: serial transmitter of the LDA <-> DIF link.
//
// A frame is one start bit (low), DATA_BITS data bits LSB first, and a stop
// bit (high) of STOP_CLKS clocks.  Each bit lasts CLKS_PER_BIT clocks.  With
// the 40 MHz system clock, CLKS_PER_BIT = 4 gives the 10 MHz serial clock of
// the paper; a half-length stop bit (STOP_CLKS = 2) makes an 8-bit frame 38
// clocks long, i.e. 40e6/38*8 = 8.42 Mbit/s, the bandwidth the paper quotes.
// The framing itself is this design's choice.
//
// Interface: valid/ready handshake on `data`; `txd` idles high.  A new frame
// starts the clock after the previous stop bit ends, so back-to-back frames
// take (1+DATA_BITS)*CLKS_PER_BIT + STOP_CLKS clocks each.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 4,
  parameter int unsigned STOP_CLKS    = 2,
  parameter int unsigned DATA_BITS    = 8
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [DATA_BITS-1:0] data,
  input  logic                 valid,
  output logic                 ready,
  output logic                 txd
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_e;
  state_e state;
  logic [DATA_BITS-1:0] sh;
  logic [$clog2(DATA_BITS+1)-1:0] nbit;
  logic [$clog2(CLKS_PER_BIT+STOP_CLKS+1)-1:0] cnt;

  logic stop_done;
  assign stop_done = (state == S_STOP) && (cnt == STOP_CLKS - 1);
  assign ready = (state == S_IDLE) || stop_done;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      txd   <= 1'b1;
      cnt   <= '0;
      nbit  <= '0;
      sh    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (valid) begin
          sh    <= data;
          txd   <= 1'b0;
          cnt   <= '0;
          state <= S_START;
        end
        S_START: if (cnt == CLKS_PER_BIT - 1) begin
          cnt   <= '0;
          txd   <= sh[0];
          sh    <= sh >> 1;
          nbit  <= '0;
          state <= S_DATA;
        end else cnt <= cnt + 1'b1;
        S_DATA: if (cnt == CLKS_PER_BIT - 1) begin
          cnt <= '0;
          if (nbit == DATA_BITS - 1) begin
            txd   <= 1'b1;
            state <= S_STOP;
          end else begin
            txd  <= sh[0];
            sh   <= sh >> 1;
            nbit <= nbit + 1'b1;
          end
        end else cnt <= cnt + 1'b1;
        S_STOP: if (stop_done) begin
          cnt <= '0;
          if (valid) begin          // next frame follows without a gap
            sh    <= data;
            txd   <= 1'b0;
            state <= S_START;
          end else state <= S_IDLE;
        end else cnt <= cnt + 1'b1;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
