// dif_port: one HDMI port of the LDA towards a DIF (Detector InterFace).
//
// Upstream, the serial line from the DIF is received by uart_rx (10 MHz bit
// clock, 8-bit frames) and dif_rx builds complete ASIC packets in the
// port's block memory, announcing each finished one to the memory manager
// with a header.  Downstream, dif_tx sends the memory manager's words and
// the broadcast fast commands to the DIF.  The DIF's busy line is
// registered twice and masked with `enable`, so an unconnected port does
// not hold the LDA busy.  All logic runs in the 40 MHz domain, as in the
// paper.
module dif_port
  import lda_pkg::*;
#(
  parameter int unsigned SLOTS        = 4,
  parameter int unsigned SLOT_WORDS   = 512,
  parameter int unsigned TX_DEPTH     = 512,
  parameter int unsigned CLKS_PER_BIT = 4,
  parameter int unsigned STOP_CLKS    = 2,
  localparam int unsigned AW = $clog2(SLOTS * SLOT_WORDS)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          enable,
  // DIF side
  input  logic          dif_rxd,
  output logic          dif_txd,
  input  logic          dif_busy,
  output logic          busy,
  // to the memory manager
  output pkt_hdr_t      hdr,
  output logic          hdr_valid,
  input  logic          hdr_ready,
  input  logic [AW-1:0] rd_addr,
  output logic [63:0]   rd_data,
  input  logic          free_valid,
  input  logic [2:0]    free_slot,
  // from the memory manager
  input  logic [15:0]   s_tdata,
  input  logic          s_tvalid,
  output logic          s_tready,
  input  logic          s_tlast,
  // broadcast fast command
  input  logic [7:0]    fcmd,
  input  logic          fcmd_valid,
  // status
  output logic          overflow,
  output logic          frame_err
);
  logic [7:0] rx_data;
  logic       rx_valid;
  logic [1:0] busy_sync;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT), .DATA_BITS(8)) u_rx (
    .clk, .rst, .rxd(dif_rxd), .data(rx_data), .valid(rx_valid), .frame_err);

  dif_rx #(.SLOTS(SLOTS), .SLOT_WORDS(SLOT_WORDS)) u_build (
    .clk, .rst, .rx_data, .rx_valid(rx_valid && enable),
    .hdr, .hdr_valid, .hdr_ready, .rd_addr, .rd_data, .free_valid, .free_slot, .overflow);

  dif_tx #(.DEPTH(TX_DEPTH), .CLKS_PER_BIT(CLKS_PER_BIT), .STOP_CLKS(STOP_CLKS)) u_tx (
    .clk, .rst, .s_tdata, .s_tvalid, .s_tready, .s_tlast, .fcmd, .fcmd_valid, .txd(dif_txd));

  always_ff @(posedge clk) begin
    if (rst) busy_sync <= '0;
    else     busy_sync <= {busy_sync[0], dif_busy};
  end
  assign busy = busy_sync[1] && enable;
endmodule
