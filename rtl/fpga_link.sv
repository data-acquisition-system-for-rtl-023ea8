// fpga_link: one end of the dual-lane link between a Kintex slave FPGA and
// the central Zynq.
//
// Transmit: link_tx produces one two-lane symbol slot per 40 MHz clock;
// each lane is 8b/10b encoded (enc_8b10b) and serialised by link_ser, two
// bits per 200 MHz cycle (DDR), i.e. 400 Mbit/s per lane and 80 MB/s of
// payload per direction, the figures the paper reports.  Receive: each lane
// is deserialised and aligned on commas (link_deser), decoded (dec_8b10b)
// and handed to link_rx.  link_rx answers received packets through this
// end's link_tx (ACK/NAK) and passes the far end's ACK/NAK, status and fast
// commands back.  The same module sits at both ends, as drawn in the
// paper's block diagram.
//
// Clocks: clk_ser is the 200 MHz link clock, clk_sys = clk_ser / 5 with
// `phase` from clk_div5.  Symbols cross between the two at fixed phases.
module fpga_link
  import lda_pkg::*;
#(
  parameter int unsigned NPKT        = 8,
  parameter int unsigned PKT_WORDS   = 2048,
  parameter int unsigned MAX_RETRY   = 3,
  parameter int unsigned ACK_TIMEOUT = 1024,
  parameter int unsigned RX_DEPTH    = 8192
) (
  input  logic        clk_ser,
  input  logic [2:0]  phase,
  input  logic        clk_sys,
  input  logic        rst,
  // packets out over the link
  input  logic [15:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  input  logic        s_tlast,
  // packets received
  output logic [15:0] m_tdata,
  output logic        m_tvalid,
  input  logic        m_tready,
  output logic        m_tlast,
  // fast commands
  input  logic [7:0]  fcmd_in,
  input  logic        fcmd_in_valid,
  output logic [7:0]  fcmd_out,
  output logic        fcmd_out_valid,
  // busy status
  input  logic        busy_in,
  output logic        remote_busy,
  // serial lanes
  output logic [1:0]  tx_ddr [2],
  input  logic [1:0]  rx_ddr [2],
  // status and statistics
  output logic        locked,
  output logic        tx_done,
  output logic        tx_retry,
  output logic        tx_fail,
  output logic        pkt_good,
  output logic        pkt_bad
);
  sym_t tx_lane [2];
  sym_t rx_lane [2];
  logic [9:0] tx_sym [2];
  logic [9:0] rx_sym [2];
  logic [1:0] lane_locked, code_err, disp_err;

  logic ack_req, nak_req, rx_ack, rx_nak, remote_full, full;
  logic [7:0] req_seq, rx_seq;

  link_tx #(.NPKT(NPKT), .PKT_WORDS(PKT_WORDS), .MAX_RETRY(MAX_RETRY), .ACK_TIMEOUT(ACK_TIMEOUT)) u_tx (
    .clk(clk_sys), .rst,
    .s_tdata, .s_tvalid, .s_tready, .s_tlast,
    .fcmd(fcmd_in), .fcmd_valid(fcmd_in_valid),
    .ack_req, .nak_req, .req_seq, .rx_ack, .rx_nak, .rx_seq, .remote_full,
    .busy(busy_in), .full,
    .lane0(tx_lane[0]), .lane1(tx_lane[1]),
    .tx_done, .tx_retry, .tx_fail);

  for (genvar l = 0; l < 2; l++) begin : g_lane
    enc_8b10b u_enc (.clk(clk_sys), .rst, .en(1'b1), .din(tx_lane[l].d), .k(tx_lane[l].k),
                     .dout(tx_sym[l]), .rd());
    link_ser u_ser (.clk_ser, .rst, .phase, .sym(tx_sym[l]), .ddr(tx_ddr[l]));
    link_deser u_des (.clk_ser, .rst, .phase, .ddr(rx_ddr[l]), .sym(rx_sym[l]), .locked(lane_locked[l]));
    dec_8b10b u_dec (.clk(clk_sys), .rst, .en(1'b1), .din(rx_sym[l]), .dout(rx_lane[l].d), .k(rx_lane[l].k),
                     .code_err(code_err[l]), .disp_err(disp_err[l]));
  end

  assign locked = &lane_locked;

  link_rx #(.DEPTH(RX_DEPTH), .FULL_MARGIN(PKT_WORDS + 52)) u_rx (
    .clk(clk_sys), .rst,
    .lane0(rx_lane[0]), .lane1(rx_lane[1]),
    .sym_err(!locked || (|code_err) || (|disp_err)),
    .m_tdata, .m_tvalid, .m_tready, .m_tlast,
    .fcmd(fcmd_out), .fcmd_valid(fcmd_out_valid),
    .ack_req, .nak_req, .req_seq, .rx_ack, .rx_nak, .rx_seq,
    .remote_busy, .remote_full, .full,
    .pkt_good, .pkt_bad);
endmodule
