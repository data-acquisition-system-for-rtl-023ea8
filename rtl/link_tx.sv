// link_tx: transmit control of one end of the Kintex <-> Zynq FPGA link.
//
// Packets arriving on the 16-bit AXI-stream input are stored in a circular
// buffer of NPKT (8) packet slots, as in the paper.  The oldest complete
// packet is sent as: SOP symbol with a sequence number, its 16-bit words,
// one CRC-16 word, EOP symbol.  The transmitter then waits for the far
// end's answer: ACK frees the slot; NAK (CRC failed) or no answer within
// ACK_TIMEOUT clocks sends the packet again, up to MAX_RETRY (3) times, after
// which the packet is dropped and `tx_fail` pulses.  A new packet is only
// started while the far end does not report its receive buffer full.
// Waiting for the answer before the next packet (stop-and-wait) is this
// design's choice; the paper gives only the buffer size and retry count.
//
// Every 40 MHz clock emits one symbol slot: a {K, byte} on each of the two
// lanes (lane 0 = low byte), i.e. 80 MB/s of payload.  The slot is given by
// priority: fast command (K28.6 + code) first, so a command always leaves
// in the next slot and its delay is constant; then a pending ACK (K28.0) or
// NAK (K28.2) for a packet received by this end's link_rx; then a STATUS
// word (K28.3 + {busy, full}) when the local status changed or every
// STATUS_PERIOD clocks; then the packet; otherwise the idle comma K28.5 on
// both lanes.  Control words may fall between any two words of a packet.
module link_tx
  import lda_pkg::*;
#(
  parameter int unsigned NPKT          = 8,
  parameter int unsigned PKT_WORDS     = 2048,
  parameter int unsigned MAX_RETRY     = 3,
  parameter int unsigned ACK_TIMEOUT   = 1024,
  parameter int unsigned STATUS_PERIOD = 256
) (
  input  logic        clk,
  input  logic        rst,
  // packets to send
  input  logic [15:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  input  logic        s_tlast,
  // fast command (highest priority)
  input  logic [7:0]  fcmd,
  input  logic        fcmd_valid,
  // from this end's receiver
  input  logic        ack_req,      // acknowledge a good packet
  input  logic        nak_req,      // reject a corrupted packet
  input  logic [7:0]  req_seq,
  input  logic        rx_ack,       // far end acknowledged
  input  logic        rx_nak,
  input  logic [7:0]  rx_seq,
  input  logic        remote_full,
  // local status to report
  input  logic        busy,
  input  logic        full,
  // symbol slot
  output sym_t        lane0,
  output sym_t        lane1,
  // statistics
  output logic        tx_done,
  output logic        tx_retry,
  output logic        tx_fail
);
  localparam int unsigned SW = $clog2(NPKT);
  localparam int unsigned WW = $clog2(PKT_WORDS);
  localparam int unsigned AW = SW + WW;

  // ---------------- circular packet buffer ----------------
  logic [15:0] mem [NPKT * PKT_WORDS];
  logic [WW:0] plen [NPKT];
  logic [SW:0] wslot, rslot;
  logic [WW:0] wpos;
  logic        buf_full, buf_empty;
  assign buf_full  = (wslot - rslot) == (SW+1)'(NPKT);
  assign buf_empty = (wslot == rslot);
  assign s_tready  = !buf_full;

  always_ff @(posedge clk) begin
    if (s_tvalid && s_tready && wpos < (WW+1)'(PKT_WORDS))
      mem[{wslot[SW-1:0], wpos[WW-1:0]}] <= s_tdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wslot <= '0;
      wpos  <= '0;
      for (int i = 0; i < NPKT; i++) plen[i] <= '0;
    end else if (s_tvalid && s_tready) begin
      if (s_tlast) begin
        plen[wslot[SW-1:0]] <= (wpos < (WW+1)'(PKT_WORDS)) ? wpos + 1'b1 : wpos;
        wslot <= wslot + 1'b1;
        wpos  <= '0;
      end else if (wpos < (WW+1)'(PKT_WORDS)) wpos <= wpos + 1'b1;
    end
  end

  // ---------------- packet sender ----------------
  typedef enum logic [2:0] {T_IDLE, T_SOP, T_DATA, T_CRC, T_EOP, T_WAIT} tstate_e;
  tstate_e st;
  logic [WW:0]  idx;
  logic [7:0]   seq;
  logic [1:0]   retries;
  logic [$clog2(ACK_TIMEOUT+1)-1:0] timer;
  logic [15:0]  crc, rdata;
  logic         pkt_slot;   // the packet FSM owns this slot
  logic         adv;        // a data word leaves in this slot

  // control word bookkeeping
  logic         ack_pend, nak_pend;
  logic [7:0]   ack_seq, nak_seq;
  logic [1:0]   last_status;
  logic [$clog2(STATUS_PERIOD+1)-1:0] stimer;
  logic         status_due;
  assign status_due = (last_status != {busy, full}) || (stimer == '0);

  // next read address: word idx, or idx+1 when the current word is sent now
  logic [WW:0] ridx;
  assign ridx = adv ? idx + 1'b1 : idx;
  always_ff @(posedge clk) rdata <= mem[{rslot[SW-1:0], ridx[WW-1:0]}];

  always_comb begin
    lane0 = '{k: 1'b1, d: K28_5};
    lane1 = '{k: 1'b1, d: K28_5};
    pkt_slot = 1'b0;
    adv      = 1'b0;
    if (fcmd_valid) begin
      lane0 = '{k: 1'b1, d: K28_6}; lane1 = '{k: 1'b0, d: fcmd};
    end else if (ack_pend) begin
      lane0 = '{k: 1'b1, d: K28_0}; lane1 = '{k: 1'b0, d: ack_seq};
    end else if (nak_pend) begin
      lane0 = '{k: 1'b1, d: K28_2}; lane1 = '{k: 1'b0, d: nak_seq};
    end else if (status_due) begin
      lane0 = '{k: 1'b1, d: K28_3}; lane1 = '{k: 1'b0, d: {6'b0, busy, full}};
    end else begin
      pkt_slot = 1'b1;
      unique case (st)
        T_SOP:  begin lane0 = '{k: 1'b1, d: K27_7}; lane1 = '{k: 1'b0, d: seq}; end
        T_DATA: begin lane0 = '{k: 1'b0, d: rdata[7:0]}; lane1 = '{k: 1'b0, d: rdata[15:8]}; adv = 1'b1; end
        T_CRC:  begin lane0 = '{k: 1'b0, d: crc[7:0]}; lane1 = '{k: 1'b0, d: crc[15:8]}; end
        T_EOP:  begin lane0 = '{k: 1'b1, d: K29_7}; lane1 = '{k: 1'b0, d: seq}; end
        default: ;
      endcase
    end
  end

  // packet check-sum: restarted with the SOP, fed with every data word sent
  crc16 u_crc (.clk, .clr(rst || (st == T_SOP && pkt_slot)), .en(adv), .data(rdata), .crc);

  always_ff @(posedge clk) begin
    if (rst) begin
      st          <= T_IDLE;
      idx         <= '0;
      seq         <= '0;
      retries     <= '0;
      timer       <= '0;
      rslot       <= '0;
      ack_pend    <= 1'b0;
      nak_pend    <= 1'b0;
      ack_seq     <= '0;
      nak_seq     <= '0;
      last_status <= 2'b00;
      stimer      <= '0;
      tx_done     <= 1'b0;
      tx_retry    <= 1'b0;
      tx_fail     <= 1'b0;
    end else begin
      tx_done  <= 1'b0;
      tx_retry <= 1'b0;
      tx_fail  <= 1'b0;

      // control words: latch requests, clear when their slot is used
      if (!fcmd_valid && ack_pend) ack_pend <= 1'b0;
      else if (!fcmd_valid && !ack_pend && nak_pend) nak_pend <= 1'b0;
      if (ack_req) begin ack_pend <= 1'b1; ack_seq <= req_seq; end
      if (nak_req) begin nak_pend <= 1'b1; nak_seq <= req_seq; end
      if (!fcmd_valid && !ack_pend && !nak_pend && status_due) begin
        last_status <= {busy, full};
        stimer      <= $bits(stimer)'(STATUS_PERIOD - 1);
      end else if (stimer != '0) stimer <= stimer - 1'b1;

      unique case (st)
        T_IDLE: if (!buf_empty && !remote_full) begin
          st  <= T_SOP;
          idx <= '0;
        end
        T_SOP: if (pkt_slot) begin
          st  <= (plen[rslot[SW-1:0]] == '0) ? T_CRC : T_DATA;
        end
        T_DATA: if (pkt_slot) begin
          idx <= idx + 1'b1;
          if (idx + 1'b1 == plen[rslot[SW-1:0]]) st <= T_CRC;
        end
        T_CRC: if (pkt_slot) st <= T_EOP;
        T_EOP: if (pkt_slot) begin
          st    <= T_WAIT;
          timer <= '0;
        end
        T_WAIT: begin
          timer <= timer + 1'b1;
          if (rx_ack && rx_seq == seq) begin
            st      <= T_IDLE;
            rslot   <= rslot + 1'b1;
            seq     <= seq + 1'b1;
            retries <= '0;
            tx_done <= 1'b1;
          end else if ((rx_nak && rx_seq == seq) || timer == $bits(timer)'(ACK_TIMEOUT)) begin
            if (retries == 2'(MAX_RETRY)) begin
              st      <= T_IDLE;
              rslot   <= rslot + 1'b1;
              seq     <= seq + 1'b1;
              retries <= '0;
              tx_fail <= 1'b1;
            end else begin
              st       <= T_SOP;
              idx      <= '0;
              retries  <= retries + 1'b1;
              tx_retry <= 1'b1;
            end
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  // a fast command never waits: it is sent in the slot where it is presented
  a_fcmd_first: assert property (@(posedge clk) disable iff (rst)
    fcmd_valid |-> (lane0.k && lane0.d == K28_6 && lane1.d == fcmd));
endmodule
