// kintex_lda: one Kintex-7 slave FPGA of the Wing-LDA.
//
// Serves N_PORTS (24) DIF ports.  Each dif_port builds ASIC packets from its
// DIF's fragments; mem_manager collects finished packets from all ports as a
// 64-bit AXI-stream (320 MB/s), axis_downsize narrows it to the 16-bit link
// word and fpga_link sends it to the Zynq (80 MB/s).  In the other direction
// the link delivers downstream packets (widened to 32 bit for mem_manager,
// which routes them to the ports) and fast commands, which bcast hands to
// all enabled ports at once.  The busy lines of the enabled DIFs are ORed
// and reported to the Zynq in the link's status word.
//
// Clocking: the Zynq forwards the 200 MHz link clock; clk_div5 derives the
// 40 MHz system clock from it.  `rst` is synchronous and must last at least
// ten 200 MHz cycles.  The input port_base (board straps; this design's
// choice) gives the global number of the FPGA's first port, so its ports
// carry the numbers port_base ... port_base+N_PORTS-1.
module kintex_lda
  import lda_pkg::*;
#(
  parameter int unsigned N_PORTS     = 24,
  parameter int unsigned SLOTS       = 4,
  parameter int unsigned SLOT_WORDS  = 512,
  parameter int unsigned LINK_NPKT   = 8,
  parameter int unsigned LINK_PKT_WORDS = 2048,
  parameter int unsigned LINK_RX_DEPTH  = 8192
) (
  input  logic               clk_ser,
  input  logic               rst,
  input  logic [7:0]         port_base,
  // DIF ports
  input  logic [N_PORTS-1:0] port_en,
  input  logic [N_PORTS-1:0] dif_rxd,
  output logic [N_PORTS-1:0] dif_txd,
  input  logic [N_PORTS-1:0] dif_busy,
  // link to the Zynq
  output logic [1:0]         tx_ddr [2],
  input  logic [1:0]         rx_ddr [2],
  // status
  output logic               clk_sys,
  output logic               link_locked,
  output logic               acq_running,
  output logic               busy,
  output logic [N_PORTS-1:0] port_overflow
);
  localparam int unsigned AW = $clog2(SLOTS * SLOT_WORDS);
  logic [2:0] phase;

  clk_div5 u_div (.clk_ser, .clk_sys, .phase);

  // ---- DIF ports ----
  pkt_hdr_t           hdr [N_PORTS];
  logic [N_PORTS-1:0] hdr_valid, hdr_ready, free_valid, port_busy;
  logic [AW-1:0]      rd_addr;
  logic [63:0]        rd_data [N_PORTS];
  logic [2:0]         free_slot;
  logic [15:0]        d_tdata;
  logic [N_PORTS-1:0] d_tvalid, d_tready, fc_valid;
  logic               d_tlast;
  logic [7:0]         fc;

  for (genvar p = 0; p < N_PORTS; p++) begin : g_port
    dif_port #(.SLOTS(SLOTS), .SLOT_WORDS(SLOT_WORDS)) u_port (
      .clk(clk_sys), .rst, .enable(port_en[p]),
      .dif_rxd(dif_rxd[p]), .dif_txd(dif_txd[p]), .dif_busy(dif_busy[p]), .busy(port_busy[p]),
      .hdr(hdr[p]), .hdr_valid(hdr_valid[p]), .hdr_ready(hdr_ready[p]),
      .rd_addr, .rd_data(rd_data[p]), .free_valid(free_valid[p]), .free_slot,
      .s_tdata(d_tdata), .s_tvalid(d_tvalid[p]), .s_tready(d_tready[p]), .s_tlast(d_tlast),
      .fcmd(fc), .fcmd_valid(fc_valid[p]),
      .overflow(port_overflow[p]), .frame_err());
  end

  always_ff @(posedge clk_sys) begin
    if (rst) busy <= 1'b0;
    else     busy <= |port_busy;
  end

  // ---- memory manager ----
  logic [63:0] up_tdata;
  logic        up_tvalid, up_tready, up_tlast;
  logic [31:0] dn_tdata;
  logic        dn_tvalid, dn_tready, dn_tlast;

  mem_manager #(.N_PORTS(N_PORTS), .SLOTS(SLOTS), .SLOT_WORDS(SLOT_WORDS)) u_mm (
    .clk(clk_sys), .rst, .port_base,
    .hdr, .hdr_valid, .hdr_ready, .rd_addr, .rd_data, .free_valid, .free_slot,
    .m_tdata(up_tdata), .m_tvalid(up_tvalid), .m_tready(up_tready), .m_tlast(up_tlast),
    .s_tdata(dn_tdata), .s_tvalid(dn_tvalid), .s_tready(dn_tready), .s_tlast(dn_tlast),
    .d_tdata, .d_tvalid, .d_tready, .d_tlast);

  // ---- width adaptation ----
  logic [15:0] lt_tdata, lr_tdata;
  logic        lt_tvalid, lt_tready, lt_tlast, lr_tvalid, lr_tready, lr_tlast;

  axis_downsize #(.W_IN(64), .W_OUT(16)) u_resize (
    .clk(clk_sys), .rst,
    .s_tdata(up_tdata), .s_tvalid(up_tvalid), .s_tready(up_tready), .s_tlast(up_tlast),
    .m_tdata(lt_tdata), .m_tvalid(lt_tvalid), .m_tready(lt_tready), .m_tlast(lt_tlast));

  axis_upsize #(.W_IN(16), .W_OUT(32)) u_widen (
    .clk(clk_sys), .rst,
    .s_tdata(lr_tdata), .s_tvalid(lr_tvalid), .s_tready(lr_tready), .s_tlast(lr_tlast),
    .m_tdata(dn_tdata), .m_tvalid(dn_tvalid), .m_tready(dn_tready), .m_tlast(dn_tlast));

  // ---- link to the Zynq ----
  logic [7:0] link_fc;
  logic       link_fc_valid;

  fpga_link #(.NPKT(LINK_NPKT), .PKT_WORDS(LINK_PKT_WORDS), .RX_DEPTH(LINK_RX_DEPTH)) u_link (
    .clk_ser, .phase, .clk_sys, .rst,
    .s_tdata(lt_tdata), .s_tvalid(lt_tvalid), .s_tready(lt_tready), .s_tlast(lt_tlast),
    .m_tdata(lr_tdata), .m_tvalid(lr_tvalid), .m_tready(lr_tready), .m_tlast(lr_tlast),
    .fcmd_in(8'h00), .fcmd_in_valid(1'b0),
    .fcmd_out(link_fc), .fcmd_out_valid(link_fc_valid),
    .busy_in(busy), .remote_busy(),
    .tx_ddr, .rx_ddr,
    .locked(link_locked), .tx_done(), .tx_retry(), .tx_fail(), .pkt_good(), .pkt_bad());

  bcast #(.N_PORTS(N_PORTS)) u_bcast (
    .clk(clk_sys), .rst, .fcmd_in(link_fc), .fcmd_in_valid(link_fc_valid), .port_en,
    .fcmd(fc), .fcmd_valid(fc_valid), .acq_running, .sync_count(), .bad_cmds());
endmodule
