// ccc_ctrl: interface of the LDA to the Clock and Control Card (CCC).
//
// Fast commands from the CCC (start and stop of acquisition,
// synchronisation) arrive as bytes on a serial line (uart_rx).  A known code
// is handed to all slave links in the same clock; each link sends it with
// top priority, so every slave receives it with the same fixed delay, as
// the paper requires.  Unknown codes are counted and dropped.
//
// Busy: the LDA busy sent to the CCC is the OR of the slaves' busy (each the
// OR of its connected DIFs) and of a buffer condition: the 256 KiB FIFO must
// have at least FREE_WORDS free words before the next acquisition may start.
// The paper says acquisition restarts once all data reached the LDAs and
// the LDAs have enough free space; the amount (default 180 kB, the largest
// data chunk of one DIF) is this design's choice.  The output is registered.
module ccc_ctrl
  import lda_pkg::*;
#(
  parameter int unsigned N_SLAVES     = 4,
  parameter int unsigned CLKS_PER_BIT = 4,
  parameter int unsigned FIFO_DEPTH   = 32768,
  parameter int unsigned FREE_WORDS   = 22500
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        ccc_rxd,
  output logic                        ccc_busy,
  // to / from the slave links
  output logic [7:0]                  fcmd,
  output logic [N_SLAVES-1:0]         fcmd_valid,
  input  logic [N_SLAVES-1:0]         slave_busy,
  input  logic [N_SLAVES-1:0]         slave_en,
  input  logic [$clog2(FIFO_DEPTH):0] fifo_count,
  // status
  output logic                        acq_running,
  output logic [7:0]                  bad_cmds
);
  logic [7:0] rx_data;
  logic       rx_valid;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT), .DATA_BITS(8)) u_rx (
    .clk, .rst, .rxd(ccc_rxd), .data(rx_data), .valid(rx_valid), .frame_err());

  logic low_space;
  assign low_space = (int'(fifo_count) + FREE_WORDS) > FIFO_DEPTH;

  always_ff @(posedge clk) begin
    if (rst) begin
      fcmd        <= '0;
      fcmd_valid  <= '0;
      ccc_busy    <= 1'b0;
      acq_running <= 1'b0;
      bad_cmds    <= '0;
    end else begin
      fcmd_valid <= '0;
      ccc_busy   <= (|(slave_busy & slave_en)) || low_space;
      if (rx_valid) begin
        if (fcmd_known(rx_data)) begin
          fcmd       <= rx_data;
          fcmd_valid <= slave_en;
          if (rx_data == FC_START) acq_running <= 1'b1;
          if (rx_data == FC_STOP)  acq_running <= 1'b0;
        end else bad_cmds <= bad_cmds + 1'b1;
      end
    end
  end
endmodule
