// link_rx: receive control of one end of the Kintex <-> Zynq FPGA link.
//
// Takes one decoded symbol slot per 40 MHz clock (two lanes of {K, byte}).
// Between SOP and EOP every data slot is a 16-bit word; they are written
// into a receive FIFO of DEPTH words behind a provisional write pointer and
// folded into a CRC-16.  The last word before EOP is the sender's CRC, so a
// good packet leaves a zero CRC remainder.  At EOP a good packet is committed
// (its last data word gets the tlast mark, the CRC word is dropped) and an
// ACK with its sequence number is requested from this end's link_tx; a
// packet with a CRC error, a symbol error or no room is rolled back and a
// NAK is requested.  A packet repeating the sequence number of the last
// committed one (its ACK was lost) is acknowledged again but not stored.
// Words are written two slots late so the tlast mark can be set on the last
// data word when EOP arrives.
//
// Control symbols outside packets are decoded as: K28.6 fast command (output
// `fcmd_valid` for one clock), K28.0 / K28.2 ACK / NAK from the far end (to
// link_tx), K28.3 far-end status {busy, full}.  `full` is high while fewer
// than FULL_MARGIN words are free, so the far end does not start a packet
// that might not fit.  The 16-bit output is an AXI-stream with a registered
// read stage.  This framing is this design's choice; the paper states that
// check-sums are checked, failed packets re-sent and that control words and
// fast commands travel as 8b10b control symbols.
module link_rx
  import lda_pkg::*;
#(
  parameter int unsigned DEPTH       = 8192,
  parameter int unsigned FULL_MARGIN = 2100
) (
  input  logic        clk,
  input  logic        rst,
  input  sym_t        lane0,
  input  sym_t        lane1,
  input  logic        sym_err,     // decoder error or lane not aligned
  // received packets
  output logic [15:0] m_tdata,
  output logic        m_tvalid,
  input  logic        m_tready,
  output logic        m_tlast,
  // fast command from the far end
  output logic [7:0]  fcmd,
  output logic        fcmd_valid,
  // to this end's link_tx
  output logic        ack_req,
  output logic        nak_req,
  output logic [7:0]  req_seq,
  output logic        rx_ack,
  output logic        rx_nak,
  output logic [7:0]  rx_seq,
  output logic        remote_busy,
  output logic        remote_full,
  output logic        full,
  // statistics
  output logic        pkt_good,
  output logic        pkt_bad
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [16:0]  mem [DEPTH];
  logic [AW:0]  wr_commit, wr_tmp, rd;
  logic [AW:0]  used;
  assign used = wr_tmp - rd;
  assign full = ((AW+1)'(DEPTH) - (wr_commit - rd)) < (AW+1)'(FULL_MARGIN);

  logic        in_pkt, bad, dup, have_last;
  logic [7:0]  pkt_seq, last_seq;
  logic [15:0] crc;
  logic [1:0]  held;
  logic [15:0] h1, h2;

  logic is_data, is_k;
  assign is_data = !lane0.k && !lane1.k && !sym_err;
  assign is_k    = lane0.k && !lane1.k && !sym_err;

  // memory write port
  logic          we;
  logic [AW-1:0] waddr;
  logic [16:0]   wdata;
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;

  always_comb begin
    we = 1'b0; waddr = wr_tmp[AW-1:0]; wdata = {1'b0, h2};
    if (in_pkt && !dup && held == 2'd2 && used < (AW+1)'(DEPTH)) begin
      if (is_data) we = 1'b1;
      else if (is_k && lane0.d == K29_7) begin we = 1'b1; wdata = {1'b1, h2}; end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_commit   <= '0;
      wr_tmp      <= '0;
      in_pkt      <= 1'b0;
      bad         <= 1'b0;
      dup         <= 1'b0;
      have_last   <= 1'b0;
      pkt_seq     <= '0;
      last_seq    <= '0;
      crc         <= 16'hFFFF;
      held        <= '0;
      h1          <= '0;
      h2          <= '0;
      fcmd        <= '0;
      fcmd_valid  <= 1'b0;
      ack_req     <= 1'b0;
      nak_req     <= 1'b0;
      req_seq     <= '0;
      rx_ack      <= 1'b0;
      rx_nak      <= 1'b0;
      rx_seq      <= '0;
      remote_busy <= 1'b0;
      remote_full <= 1'b1;     // until the far end reports
      pkt_good    <= 1'b0;
      pkt_bad     <= 1'b0;
    end else begin
      fcmd_valid <= 1'b0;
      ack_req    <= 1'b0;
      nak_req    <= 1'b0;
      rx_ack     <= 1'b0;
      rx_nak     <= 1'b0;
      pkt_good   <= 1'b0;
      pkt_bad    <= 1'b0;
      if (sym_err && in_pkt) bad <= 1'b1;

      if (is_data && in_pkt) begin
        crc <= crc16_step(crc, {lane1.d, lane0.d});
        h1  <= {lane1.d, lane0.d};
        h2  <= h1;
        if (held != 2'd2) held <= held + 1'b1;
        if (we) wr_tmp <= wr_tmp + 1'b1;
        else if (!dup && held == 2'd2) bad <= 1'b1;          // no room
      end

      if (is_k) unique case (lane0.d)
        K27_7: begin                                           // start of packet
          in_pkt  <= 1'b1;
          pkt_seq <= lane1.d;
          dup     <= have_last && lane1.d == last_seq;
          bad     <= 1'b0;
          crc     <= 16'hFFFF;
          held    <= '0;
          wr_tmp  <= wr_commit;                                // drop an unfinished packet
        end
        K29_7: if (in_pkt) begin                               // end of packet
          in_pkt  <= 1'b0;
          req_seq <= pkt_seq;
          if (dup) ack_req <= 1'b1;
          else if (!bad && crc == 16'h0000 && held == 2'd2 && lane1.d == pkt_seq && we) begin
            wr_commit <= wr_tmp + 1'b1;
            wr_tmp    <= wr_tmp + 1'b1;
            ack_req   <= 1'b1;
            have_last <= 1'b1;
            last_seq  <= pkt_seq;
            pkt_good  <= 1'b1;
          end else begin
            wr_tmp  <= wr_commit;
            nak_req <= 1'b1;
            pkt_bad <= 1'b1;
          end
        end
        K28_6: begin fcmd <= lane1.d; fcmd_valid <= 1'b1; end
        K28_0: begin rx_ack <= 1'b1; rx_seq <= lane1.d; end
        K28_2: begin rx_nak <= 1'b1; rx_seq <= lane1.d; end
        K28_3: begin remote_busy <= lane1.d[1]; remote_full <= lane1.d[0]; end
        default: ;
      endcase
    end
  end

  // registered read stage
  always_ff @(posedge clk) begin
    if (rst) begin
      rd       <= '0;
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tlast  <= 1'b0;
    end else if (!m_tvalid || m_tready) begin
      if (rd != wr_commit) begin
        {m_tlast, m_tdata} <= mem[rd[AW-1:0]];
        m_tvalid <= 1'b1;
        rd       <= rd + 1'b1;
      end else m_tvalid <= 1'b0;
    end
  end
endmodule
