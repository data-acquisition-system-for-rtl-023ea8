// wing_lda: the Wing-LDA (Link Data Aggregator) of the AHCAL DAQ.
//
// N_SLAVES (4) Kintex slave FPGAs serve N_PORTS (24) DIF ports each, 96 in
// all, and send the ASIC packets they build over one dual-lane 400 Mbit/s
// link each to the central Zynq, which merges them into a 256 KiB FIFO for
// the DMA to the processor memory.  Fast commands from the CCC go the other
// way, as do downstream packets for the DIFs; the busy of all connected
// DIFs, ORed per slave and again in the Zynq, is returned to the CCC.
//
// The board wiring is modelled directly: the Zynq's 200 MHz link clock is
// forwarded to every slave, and each link lane is a 2-bit DDR bus per
// 200 MHz cycle (input delay elements of the FPGAs are not modelled).
// DIF port p of the top is port p % 24 of slave p / 24.  The DMA's
// AXI-stream ports and the processor-side clock clk_sys (40 MHz) are top
// level ports.
module wing_lda
  import lda_pkg::*;
#(
  parameter int unsigned N_SLAVES = 4,
  parameter int unsigned N_PORTS  = 24,
  localparam int unsigned NP = N_SLAVES * N_PORTS
) (
  input  logic                clk_ser,
  input  logic                rst,
  output logic                clk_sys,
  // DIF ports (HDMI)
  input  logic [NP-1:0]       port_en,
  input  logic [NP-1:0]       dif_rxd,
  output logic [NP-1:0]       dif_txd,
  input  logic [NP-1:0]       dif_busy,
  // CCC
  input  logic                ccc_rxd,
  output logic                ccc_busy,
  // AXI DMA
  output logic [63:0]         s2mm_tdata,
  output logic                s2mm_tvalid,
  input  logic                s2mm_tready,
  output logic                s2mm_tlast,
  input  logic [31:0]         mm2s_tdata,
  input  logic                mm2s_tvalid,
  output logic                mm2s_tready,
  input  logic                mm2s_tlast,
  // status
  output logic [N_SLAVES-1:0] link_locked,
  output logic [N_SLAVES-1:0] slave_locked,
  output logic [N_SLAVES-1:0] slave_acq_running,
  output logic [N_SLAVES-1:0] slave_busy,
  output logic                acq_running,
  output logic [15:0]         fifo_count,
  output logic [N_SLAVES-1:0] tx_retry,
  output logic [N_SLAVES-1:0] tx_fail,
  output logic [NP-1:0]       port_overflow
);
  logic [1:0] z_tx [N_SLAVES][2];
  logic [1:0] z_rx [N_SLAVES][2];
  logic [N_SLAVES-1:0] slave_en;

  for (genvar s = 0; s < N_SLAVES; s++) begin : g_kintex
    assign slave_en[s] = |port_en[s*N_PORTS +: N_PORTS];
    kintex_lda #(.N_PORTS(N_PORTS)) u_kintex (
      .clk_ser, .rst, .port_base(8'(s * N_PORTS)),
      .port_en(port_en[s*N_PORTS +: N_PORTS]), .dif_rxd(dif_rxd[s*N_PORTS +: N_PORTS]),
      .dif_txd(dif_txd[s*N_PORTS +: N_PORTS]), .dif_busy(dif_busy[s*N_PORTS +: N_PORTS]),
      .tx_ddr(z_rx[s]), .rx_ddr(z_tx[s]),
      .clk_sys(), .link_locked(slave_locked[s]), .acq_running(slave_acq_running[s]),
      .busy(slave_busy[s]), .port_overflow(port_overflow[s*N_PORTS +: N_PORTS]));
  end

  logic [15:0] cnt;
  zynq_lda #(.N_SLAVES(N_SLAVES), .PORTS_PER_SLAVE(N_PORTS)) u_zynq (
    .clk_ser, .rst, .clk_sys,
    .tx_ddr(z_tx), .rx_ddr(z_rx), .slave_en,
    .ccc_rxd, .ccc_busy,
    .s2mm_tdata, .s2mm_tvalid, .s2mm_tready, .s2mm_tlast,
    .mm2s_tdata, .mm2s_tvalid, .mm2s_tready, .mm2s_tlast,
    .link_locked, .fifo_count(cnt), .acq_running, .tx_retry, .tx_fail);
  assign fifo_count = cnt;
endmodule
