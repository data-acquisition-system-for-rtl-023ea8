// zynq_lda: programmable-logic part of the central Zynq of the Wing-LDA.
//
// Holds one fpga_link per slave FPGA.  Received ASIC packets (16-bit link
// words) are widened to 64 bit, merged packet by packet by axis_join and
// stored in the 256 KiB axis_fifo, whose output is the stream the AXI DMA
// writes to the processor's DDR memory (320 MB/s at 40 MHz).  Downstream
// data from the DMA (32 bit) is routed to the slaves by tx_distrib.
// ccc_ctrl receives the CCC's fast commands and drives them into every link
// at once, and returns the combined busy to the CCC.
//
// Clocking: clk_ser is the 200 MHz link clock (from a PLL); it is also
// forwarded to the slaves.  clk_div5 derives the 40 MHz clk_sys, which is
// output for the DMA interface.  The DMA, processor and DDR memory are not
// part of this logic; their AXI-stream ports are brought out.
module zynq_lda
  import lda_pkg::*;
#(
  parameter int unsigned N_SLAVES        = 4,
  parameter int unsigned PORTS_PER_SLAVE = 24,
  parameter int unsigned FIFO_DEPTH      = 32768,
  parameter int unsigned FREE_WORDS      = 22500,
  parameter int unsigned LINK_NPKT       = 8,
  parameter int unsigned LINK_PKT_WORDS  = 2048,
  parameter int unsigned LINK_RX_DEPTH   = 8192
) (
  input  logic                        clk_ser,
  input  logic                        rst,
  output logic                        clk_sys,
  // links to the slaves
  output logic [1:0]                  tx_ddr [N_SLAVES][2],
  input  logic [1:0]                  rx_ddr [N_SLAVES][2],
  input  logic [N_SLAVES-1:0]         slave_en,
  // CCC
  input  logic                        ccc_rxd,
  output logic                        ccc_busy,
  // to the DMA (S2MM) and from it (MM2S)
  output logic [63:0]                 s2mm_tdata,
  output logic                        s2mm_tvalid,
  input  logic                        s2mm_tready,
  output logic                        s2mm_tlast,
  input  logic [31:0]                 mm2s_tdata,
  input  logic                        mm2s_tvalid,
  output logic                        mm2s_tready,
  input  logic                        mm2s_tlast,
  // status
  output logic [N_SLAVES-1:0]         link_locked,
  output logic [$clog2(FIFO_DEPTH):0] fifo_count,
  output logic                        acq_running,
  output logic [N_SLAVES-1:0]         tx_retry,
  output logic [N_SLAVES-1:0]         tx_fail
);
  logic [2:0] phase;
  clk_div5 u_div (.clk_ser, .clk_sys, .phase);

  logic [15:0] ln_tdata [N_SLAVES];
  logic [N_SLAVES-1:0] ln_tvalid, ln_tready, ln_tlast;
  logic [63:0] up_tdata [N_SLAVES];
  logic [N_SLAVES-1:0] up_tvalid, up_tready, up_tlast;
  logic [15:0] dn_tdata [N_SLAVES];
  logic [N_SLAVES-1:0] dn_tvalid, dn_tready, dn_tlast;
  logic [N_SLAVES-1:0] fc_valid, remote_busy;
  logic [7:0] fc;

  for (genvar s = 0; s < N_SLAVES; s++) begin : g_slave
    fpga_link #(.NPKT(LINK_NPKT), .PKT_WORDS(LINK_PKT_WORDS), .RX_DEPTH(LINK_RX_DEPTH)) u_link (
      .clk_ser, .phase, .clk_sys, .rst,
      .s_tdata(dn_tdata[s]), .s_tvalid(dn_tvalid[s]), .s_tready(dn_tready[s]), .s_tlast(dn_tlast[s]),
      .m_tdata(ln_tdata[s]), .m_tvalid(ln_tvalid[s]), .m_tready(ln_tready[s]), .m_tlast(ln_tlast[s]),
      .fcmd_in(fc), .fcmd_in_valid(fc_valid[s]),
      .fcmd_out(), .fcmd_out_valid(),
      .busy_in(1'b0), .remote_busy(remote_busy[s]),
      .tx_ddr(tx_ddr[s]), .rx_ddr(rx_ddr[s]),
      .locked(link_locked[s]), .tx_done(), .tx_retry(tx_retry[s]), .tx_fail(tx_fail[s]),
      .pkt_good(), .pkt_bad());

    axis_upsize #(.W_IN(16), .W_OUT(64)) u_up (
      .clk(clk_sys), .rst,
      .s_tdata(ln_tdata[s]), .s_tvalid(ln_tvalid[s]), .s_tready(ln_tready[s]), .s_tlast(ln_tlast[s]),
      .m_tdata(up_tdata[s]), .m_tvalid(up_tvalid[s]), .m_tready(up_tready[s]), .m_tlast(up_tlast[s]));
  end

  logic [63:0] j_tdata;
  logic        j_tvalid, j_tready, j_tlast;

  axis_join #(.N(N_SLAVES), .W(64)) u_join (
    .clk(clk_sys), .rst,
    .s_tdata(up_tdata), .s_tvalid(up_tvalid), .s_tready(up_tready), .s_tlast(up_tlast),
    .m_tdata(j_tdata), .m_tvalid(j_tvalid), .m_tready(j_tready), .m_tlast(j_tlast));

  axis_fifo #(.W(64), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk_sys), .rst,
    .s_tdata(j_tdata), .s_tvalid(j_tvalid), .s_tready(j_tready), .s_tlast(j_tlast),
    .m_tdata(s2mm_tdata), .m_tvalid(s2mm_tvalid), .m_tready(s2mm_tready), .m_tlast(s2mm_tlast),
    .count(fifo_count));

  tx_distrib #(.N_SLAVES(N_SLAVES), .PORTS_PER_SLAVE(PORTS_PER_SLAVE)) u_dist (
    .clk(clk_sys), .rst,
    .s_tdata(mm2s_tdata), .s_tvalid(mm2s_tvalid), .s_tready(mm2s_tready), .s_tlast(mm2s_tlast),
    .m_tdata(dn_tdata), .m_tvalid(dn_tvalid), .m_tready(dn_tready), .m_tlast(dn_tlast));

  ccc_ctrl #(.N_SLAVES(N_SLAVES), .FIFO_DEPTH(FIFO_DEPTH), .FREE_WORDS(FREE_WORDS)) u_ccc (
    .clk(clk_sys), .rst, .ccc_rxd, .ccc_busy,
    .fcmd(fc), .fcmd_valid(fc_valid), .slave_busy(remote_busy), .slave_en,
    .fifo_count, .acq_running, .bad_cmds());
endmodule
