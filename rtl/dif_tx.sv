// dif_tx: downstream (LDA -> DIF) transmitter of one DIF port.
//
// 16-bit words from the memory manager enter a FIFO of DEPTH words and are
// sent over uart_tx as two frames each, low byte first.  Frames are 9 bits
// wide: bit 8 = 0 is a data byte; bit 8 = 1 is a control frame, either a
// fast command broadcast from the CCC (code 0x01-0x03) or 0xFF marking the
// end of a downstream packet (after the word that carried tlast).  A fast
// command waits at most for the frame in progress and then goes ahead of
// all queued data, so all ports send it within one frame time (39 clocks)
// of each other.  The paper shows this path ("Tx" FIFO fed with 16-bit
// words, "Bcast") but does not describe its protocol; the framing is this
// design's choice.
module dif_tx #(
  parameter int unsigned DEPTH        = 512,
  parameter int unsigned CLKS_PER_BIT = 4,
  parameter int unsigned STOP_CLKS    = 2
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  input  logic        s_tlast,
  input  logic [7:0]  fcmd,
  input  logic        fcmd_valid,
  output logic        txd
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [16:0] mem [DEPTH];
  logic [AW:0] wr, rd;
  logic        hv;           // head word valid
  logic [16:0] head;         // {last, data}
  logic [1:0]  bsel;         // 0: low byte next, 1: high byte next, 2: end marker next
  logic        fc_pend;
  logic [7:0]  fc_code;

  assign s_tready = (wr - rd) != (AW+1)'(DEPTH);
  always_ff @(posedge clk) if (s_tvalid && s_tready) mem[wr[AW-1:0]] <= {s_tlast, s_tdata};

  logic [8:0] frame;
  logic       fvalid, fready, take_fc, take_data;
  always_comb begin
    take_fc   = fc_pend;
    take_data = !fc_pend && hv;
    fvalid    = take_fc || take_data;
    if (take_fc)          frame = {1'b1, fc_code};
    else if (bsel == 2'd0) frame = {1'b0, head[7:0]};
    else if (bsel == 2'd1) frame = {1'b0, head[15:8]};
    else                  frame = {1'b1, 8'hFF};
  end

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT), .STOP_CLKS(STOP_CLKS), .DATA_BITS(9)) u_uart (
    .clk, .rst, .data(frame), .valid(fvalid), .ready(fready), .txd);

  logic pop;
  assign pop = take_data && fready && (bsel == 2'd2 || (bsel == 2'd1 && !head[16]));

  always_ff @(posedge clk) begin
    if (rst) begin
      wr      <= '0;
      rd      <= '0;
      hv      <= 1'b0;
      head    <= '0;
      bsel    <= '0;
      fc_pend <= 1'b0;
      fc_code <= '0;
    end else begin
      if (s_tvalid && s_tready) wr <= wr + 1'b1;
      if (take_fc && fready) fc_pend <= 1'b0;
      if (fcmd_valid) begin fc_pend <= 1'b1; fc_code <= fcmd; end
      if (take_data && fready) bsel <= pop ? 2'd0 : bsel + 2'd1;
      if ((!hv || pop) && rd != wr) begin
        head <= mem[rd[AW-1:0]];
        hv   <= 1'b1;
        rd   <= rd + 1'b1;
      end else if (pop) hv <= 1'b0;
    end
  end
endmodule
