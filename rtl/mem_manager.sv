// mem_manager: moves finished ASIC packets out of the DIF ports of one
// Kintex slave FPGA, and routes downstream data to them.
//
// Upstream: every DIF port announces a finished ASIC packet with a header
// (its "pointer": slot, ASIC, length).  The manager serves the ports round
// robin.  For the granted port it emits one 64-bit header word
// (lda_pkg::asic_hdr_t: magic 0xA5, global port number, ASIC, type, byte
// length, running packet count) and then reads the packet from the port's
// block memory, one 64-bit word per 40 MHz clock, i.e. the 320 MB/s internal
// rate the paper reports.  Reads are issued one word ahead so a stalled
// output does not lose a word; bytes beyond the length in the last word are
// zeroed.  After the last word the slot is returned to the port.  An
// end-of-transfer marker becomes a header-only packet of type PKT_EOT.
//
// Downstream: packets arrive as 32-bit words; the first word holds the
// global DIF port number in bits [7:0], the rest is payload, sent to that
// port's dif_tx as 16-bit words, low half first.  Packets for a port outside
// this FPGA are dropped.  Header layouts are this design's choice; the paper
// describes the pointer hand-over and the move to the large buffer.
module mem_manager
  import lda_pkg::*;
#(
  parameter int unsigned N_PORTS    = 24,
  parameter int unsigned SLOTS      = 4,
  parameter int unsigned SLOT_WORDS = 512,
  localparam int unsigned AW = $clog2(SLOTS * SLOT_WORDS)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [7:0]         port_base,  // global number of this FPGA's port 0
  // DIF port side
  input  pkt_hdr_t           hdr        [N_PORTS],
  input  logic [N_PORTS-1:0] hdr_valid,
  output logic [N_PORTS-1:0] hdr_ready,
  output logic [AW-1:0]      rd_addr,
  input  logic [63:0]        rd_data    [N_PORTS],
  output logic [N_PORTS-1:0] free_valid,
  output logic [2:0]         free_slot,
  // ASIC packets out
  output logic [63:0]        m_tdata,
  output logic               m_tvalid,
  input  logic               m_tready,
  output logic               m_tlast,
  // downstream packets in
  input  logic [31:0]        s_tdata,
  input  logic               s_tvalid,
  output logic               s_tready,
  input  logic               s_tlast,
  // downstream words to the ports
  output logic [15:0]        d_tdata,
  output logic [N_PORTS-1:0] d_tvalid,
  input  logic [N_PORTS-1:0] d_tready,
  output logic               d_tlast
);
  localparam int unsigned PW = $clog2(N_PORTS);
  localparam int unsigned SW = $clog2(SLOT_WORDS);

  // ---------------- upstream ----------------
  typedef enum logic [1:0] {M_IDLE, M_HDR, M_DATA} mstate_e;
  mstate_e     st;
  logic [PW-1:0] cur, nxt;
  logic          any;
  pkt_hdr_t      h;
  logic [15:0]   pkt_count;
  logic [12:0]   widx, nwords;
  logic          adv;

  always_comb begin
    nxt = cur; any = 1'b0;
    for (int i = N_PORTS; i >= 1; i--) begin
      int j;
      j = (int'(cur) + i) % N_PORTS;
      if (hdr_valid[j]) begin nxt = PW'(j); any = 1'b1; end
    end
  end

  always_comb begin
    hdr_ready = '0;
    if (st == M_IDLE && any) hdr_ready[nxt] = 1'b1;
  end

  // word being read: prefetched one clock ahead of the output
  logic [12:0] ridx;
  assign adv     = (st == M_DATA) && m_tready;
  assign ridx    = (st == M_DATA) ? (adv ? widx + 1'b1 : widx) : '0;
  assign rd_addr = AW'(AW'(h.slot) * AW'(SLOT_WORDS) + AW'(ridx));

  asic_hdr_t hw;
  assign hw = '{magic: HDR_MAGIC, port: port_base + 8'(cur), asic: h.asic,
                ptype: h.eot ? PKT_EOT : PKT_ASIC, len: h.len, count: pkt_count};

  logic [63:0] dmask;
  always_comb begin
    dmask = '1;
    if (widx + 1'b1 == nwords && h.len[2:0] != 3'd0)
      for (int b = 0; b < 8; b++) if (b >= int'(h.len[2:0])) dmask[8*b +: 8] = 8'h00;
  end

  always_comb begin
    m_tvalid = (st == M_HDR) || (st == M_DATA);
    m_tdata  = (st == M_HDR) ? hw : (rd_data[cur] & dmask);
    m_tlast  = (st == M_HDR) ? (nwords == '0) : (widx + 1'b1 == nwords);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st         <= M_IDLE;
      cur        <= '0;
      h          <= '0;
      pkt_count  <= '0;
      widx       <= '0;
      nwords     <= '0;
      free_valid <= '0;
      free_slot  <= '0;
    end else begin
      free_valid <= '0;
      unique case (st)
        M_IDLE: if (any) begin
          cur    <= nxt;
          h      <= hdr[nxt];
          nwords <= hdr[nxt].eot ? '0 : 13'((hdr[nxt].len + 16'd7) >> 3);
          st     <= M_HDR;
        end
        M_HDR: if (m_tready) begin
          widx      <= '0;
          pkt_count <= pkt_count + 1'b1;
          if (nwords == '0) begin
            st <= M_IDLE;
            if (!h.eot) begin free_valid[cur] <= 1'b1; free_slot <= h.slot; end
          end else st <= M_DATA;
        end
        M_DATA: if (m_tready) begin
          widx <= widx + 1'b1;
          if (widx + 1'b1 == nwords) begin
            st <= M_IDLE;
            free_valid[cur] <= 1'b1;
            free_slot       <= h.slot;
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  // ---------------- downstream ----------------
  logic          d_in_pkt, d_drop, d_half;
  logic [PW-1:0] d_port;
  logic [7:0]    d_glob;
  logic          d_sel_ready;

  assign d_glob      = s_tdata[7:0];
  assign d_sel_ready = d_tready[d_port];
  assign d_tdata     = d_half ? s_tdata[31:16] : s_tdata[15:0];
  assign d_tlast     = d_half && s_tlast;
  always_comb begin
    d_tvalid = '0;
    if (d_in_pkt && !d_drop && s_tvalid) d_tvalid[d_port] = 1'b1;
  end
  assign s_tready = !d_in_pkt || d_drop || (d_half && d_sel_ready);

  always_ff @(posedge clk) begin
    if (rst) begin
      d_in_pkt <= 1'b0;
      d_drop   <= 1'b0;
      d_half   <= 1'b0;
      d_port   <= '0;
    end else begin
      if (!d_in_pkt) begin
        if (s_tvalid) begin
          d_in_pkt <= !s_tlast;
          d_half   <= 1'b0;
          d_drop   <= !({1'b0, d_glob} >= {1'b0, port_base} && {1'b0, d_glob} < {1'b0, port_base} + 9'(N_PORTS));
          d_port   <= PW'(d_glob - port_base);
        end
      end else if (s_tvalid && (d_drop || d_sel_ready)) begin
        d_half <= d_drop ? 1'b0 : !d_half;
        if ((d_drop || d_half) && s_tlast) d_in_pkt <= 1'b0;
      end
    end
  end
endmodule
