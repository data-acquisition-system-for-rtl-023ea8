// axis_fifo: the 256 KiB AXI-stream packet buffer in front of the DMA.
//
// The paper buffers ASIC packets in a 256 KiB FIFO from which the AXI DMA
// moves them into the processor's DDR memory.  This is a plain synchronous
// FIFO of DEPTH words of W data bits plus tlast (32768 x 64 bit = 256 KiB),
// with a registered read stage.  `count` is the number of words held; the
// CCC control uses it to hold the busy signal until there is room for the
// next readout cycle.
module axis_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 32768
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [W-1:0]           s_tdata,
  input  logic                   s_tvalid,
  output logic                   s_tready,
  input  logic                   s_tlast,
  output logic [W-1:0]           m_tdata,
  output logic                   m_tvalid,
  input  logic                   m_tready,
  output logic                   m_tlast,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W:0]  mem [DEPTH];
  logic [AW:0] wr, rd;

  assign s_tready = (wr - rd) != (AW+1)'(DEPTH);
  assign count    = (wr - rd) + (AW+1)'(m_tvalid);

  always_ff @(posedge clk) if (s_tvalid && s_tready) mem[wr[AW-1:0]] <= {s_tlast, s_tdata};

  always_ff @(posedge clk) begin
    if (rst) begin
      wr       <= '0;
      rd       <= '0;
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tlast  <= 1'b0;
    end else begin
      if (s_tvalid && s_tready) wr <= wr + 1'b1;
      if (!m_tvalid || m_tready) begin
        if (rd != wr) begin
          {m_tlast, m_tdata} <= mem[rd[AW-1:0]];
          m_tvalid <= 1'b1;
          rd       <= rd + 1'b1;
        end else m_tvalid <= 1'b0;
      end
    end
  end
endmodule
