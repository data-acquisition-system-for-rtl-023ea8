// tx_distrib: distributes downstream packets from the processor to the
// slave FPGAs.
//
// The DMA reads downstream data (configuration for the DIFs) from memory as
// a 32-bit AXI-stream.  Each packet starts with a word whose bits [7:0]
// give the global DIF port; the packet goes, whole and header included, to
// slave port / PORTS_PER_SLAVE, narrowed to the 16-bit link word by an
// axis_downsize per slave.  Packets addressed beyond the last slave are
// dropped.  The paper's block diagram names the block and its 32-bit input
// and 16-bit outputs; the header layout is this design's choice.
module tx_distrib #(
  parameter int unsigned N_SLAVES        = 4,
  parameter int unsigned PORTS_PER_SLAVE = 24
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [31:0]         s_tdata,
  input  logic                s_tvalid,
  output logic                s_tready,
  input  logic                s_tlast,
  output logic [15:0]         m_tdata  [N_SLAVES],
  output logic [N_SLAVES-1:0] m_tvalid,
  input  logic [N_SLAVES-1:0] m_tready,
  output logic [N_SLAVES-1:0] m_tlast
);
  localparam int unsigned IW = (N_SLAVES > 1) ? $clog2(N_SLAVES) : 1;
  logic          in_pkt, drop;
  logic [IW-1:0] dest, hdest;
  logic          hdrop;
  logic [N_SLAVES-1:0] w_tvalid, w_tready;

  // destination of a packet from its first word
  always_comb begin
    int unsigned s;
    s     = int'(s_tdata[7:0]) / PORTS_PER_SLAVE;
    hdrop = s >= N_SLAVES;
    hdest = IW'(s);
  end

  logic [IW-1:0] sel;
  logic          sel_drop;
  assign sel      = in_pkt ? dest : hdest;
  assign sel_drop = in_pkt ? drop : hdrop;

  always_comb begin
    w_tvalid = '0;
    if (s_tvalid && !sel_drop) w_tvalid[sel] = 1'b1;
  end
  assign s_tready = sel_drop || w_tready[sel];

  always_ff @(posedge clk) begin
    if (rst) begin
      in_pkt <= 1'b0;
      drop   <= 1'b0;
      dest   <= '0;
    end else if (s_tvalid && s_tready) begin
      if (!in_pkt) begin dest <= hdest; drop <= hdrop; end
      in_pkt <= !s_tlast;
    end
  end

  for (genvar i = 0; i < N_SLAVES; i++) begin : g_out
    axis_downsize #(.W_IN(32), .W_OUT(16)) u_ds (
      .clk, .rst,
      .s_tdata, .s_tvalid(w_tvalid[i]), .s_tready(w_tready[i]), .s_tlast,
      .m_tdata(m_tdata[i]), .m_tvalid(m_tvalid[i]), .m_tready(m_tready[i]), .m_tlast(m_tlast[i]));
  end
endmodule
