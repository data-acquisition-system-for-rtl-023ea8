// dif_rx: ASIC packet builder of one DIF port.
//
// A DIF sends each SPIROC's readout as a series of fragments of at most
// FRAG_BYTES (100) payload bytes.  This block parses the byte stream coming
// out of uart_rx and appends every fragment's payload to the packet slot
// that belongs to its ASIC, so that fragments of different ASICs may
// interleave.  A slot is taken from the free pool by the first fragment of an
// ASIC packet and closed by the fragment marked last; its header
// (slot, ASIC, byte length) then enters a small header queue, which is the
// "pointer" handed to the memory manager.  The memory manager reads the slot
// through the 64-bit read port and returns it with `free_valid`.
//
// Fragment format (this design's choice): type byte (lda_pkg::frag_type_e),
// ASIC index byte, payload length byte, payload.  An end-of-transfer marker
// (FRAG_EOT) carries no payload and is queued as a header with `eot` set.
// A fragment that finds no free slot, or that is longer than FRAG_BYTES, is
// dropped and `overflow` pulses; a slot that would exceed SLOT_WORDS*8 bytes
// drops the excess bytes the same way.
//
// Memory: SLOTS*SLOT_WORDS words of 64 bits, written one byte per clock via
// byte lanes (one UART byte needs 38 clocks), read with one clock latency.
module dif_rx
  import lda_pkg::*;
#(
  parameter int unsigned SLOTS      = 4,
  parameter int unsigned SLOT_WORDS = 512,
  parameter int unsigned FRAG_MAX   = 100,
  localparam int unsigned AW = $clog2(SLOTS * SLOT_WORDS)
) (
  input  logic          clk,
  input  logic          rst,
  // byte stream from the UART
  input  logic [7:0]    rx_data,
  input  logic          rx_valid,
  // finished packets towards the memory manager
  output pkt_hdr_t      hdr,
  output logic          hdr_valid,
  input  logic          hdr_ready,
  input  logic [AW-1:0] rd_addr,
  output logic [63:0]   rd_data,
  input  logic          free_valid,
  input  logic [2:0]    free_slot,
  // status
  output logic          overflow
);
  localparam int unsigned HQ = 8;   // header queue depth (>= SLOTS + EOT markers)

  typedef enum logic [1:0] {P_TYPE, P_ASIC, P_LEN, P_PAY} pstate_e;
  pstate_e pst;

  logic [7:0]  f_type, f_asic, f_left;
  logic        f_drop;
  logic [2:0]  cur;

  logic [SLOTS-1:0] s_busy, s_open;
  logic [7:0]       s_asic [SLOTS];
  logic [15:0]      s_len  [SLOTS];

  // header queue
  pkt_hdr_t hq [HQ];
  logic [$clog2(HQ):0] hq_wr, hq_rd;
  logic hq_full;
  assign hq_full   = (hq_wr - hq_rd) == ($clog2(HQ)+1)'(HQ);
  assign hdr_valid = (hq_wr != hq_rd);
  assign hdr       = hq[hq_rd[$clog2(HQ)-1:0]];

  // slot lookup for the ASIC byte being received
  logic       hit, has_free;
  logic [2:0] hit_slot, free_idx;
  always_comb begin
    hit = 1'b0; hit_slot = '0; has_free = 1'b0; free_idx = '0;
    for (int i = SLOTS - 1; i >= 0; i--) begin
      if (s_open[i] && s_asic[i] == rx_data) begin hit = 1'b1; hit_slot = 3'(i); end
      if (!s_busy[i]) begin has_free = 1'b1; free_idx = 3'(i); end
    end
  end

  // memory write of one payload byte
  logic          we;
  logic [AW-1:0] waddr;
  logic [2:0]    wlane;
  logic          room;
  assign room  = s_len[cur] < 16'(SLOT_WORDS * 8);
  assign we    = rx_valid && pst == P_PAY && !f_drop && room;
  assign waddr = AW'(AW'(cur) * AW'(SLOT_WORDS) + AW'(s_len[cur] >> 3));
  assign wlane = s_len[cur][2:0];

  logic [63:0] mem [SLOTS * SLOT_WORDS];
  always_ff @(posedge clk) begin
    if (we) mem[waddr][8*wlane +: 8] <= rx_data;
    rd_data <= mem[rd_addr];
  end

  // end of the current fragment: after its last payload byte or a zero length
  logic frag_end;
  always_comb begin
    frag_end = 1'b0;
    if (rx_valid) begin
      if (pst == P_LEN && (rx_data == 8'd0 || f_type == FRAG_EOT)) frag_end = 1'b1;
      if (pst == P_PAY && f_left == 8'd1) frag_end = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pst      <= P_TYPE;
      f_type   <= '0;
      f_asic   <= '0;
      f_left   <= '0;
      f_drop   <= 1'b0;
      cur      <= '0;
      s_busy   <= '0;
      s_open   <= '0;
      hq_wr    <= '0;
      hq_rd    <= '0;
      overflow <= 1'b0;
      for (int i = 0; i < SLOTS; i++) begin s_asic[i] <= '0; s_len[i] <= '0; end
    end else begin
      overflow <= 1'b0;
      if (hdr_valid && hdr_ready) hq_rd <= hq_rd + 1'b1;
      if (free_valid) s_busy[free_slot] <= 1'b0;

      if (rx_valid) begin
        unique case (pst)
          P_TYPE: begin
            f_type <= rx_data;
            if (rx_data == FRAG_DATA || rx_data == FRAG_LAST || rx_data == FRAG_EOT) pst <= P_ASIC;
            else overflow <= 1'b1;                    // not a fragment start: resynchronise
          end
          P_ASIC: begin
            f_asic <= rx_data;
            f_drop <= 1'b0;
            pst    <= P_LEN;
            if (f_type != FRAG_EOT) begin
              if (hit) cur <= hit_slot;
              else if (has_free) begin
                cur               <= free_idx;
                s_busy[free_idx]  <= 1'b1;
                s_open[free_idx]  <= 1'b1;
                s_asic[free_idx]  <= rx_data;
                s_len[free_idx]   <= '0;
              end else f_drop <= 1'b1;
            end
          end
          P_LEN: begin
            f_left <= rx_data;
            if (rx_data > 8'(FRAG_MAX) && f_type != FRAG_EOT) f_drop <= 1'b1;
            pst <= (rx_data == 8'd0 || f_type == FRAG_EOT) ? P_TYPE : P_PAY;
          end
          P_PAY: begin
            f_left <= f_left - 1'b1;
            if (we) s_len[cur] <= s_len[cur] + 1'b1;
            else if (!f_drop && !room) overflow <= 1'b1;
            if (f_left == 8'd1) pst <= P_TYPE;
          end
          default: pst <= P_TYPE;
        endcase

        if (frag_end) begin
          if (f_type == FRAG_EOT) begin
            if (!hq_full) begin
              hq[hq_wr[$clog2(HQ)-1:0]] <= '{slot: '0, asic: f_asic, len: '0, eot: 1'b1};
              hq_wr <= hq_wr + 1'b1;
            end else overflow <= 1'b1;
          end else if (f_drop) begin
            overflow <= 1'b1;
          end else if (f_type == FRAG_LAST) begin
            // slot count <= HQ, so a closed slot always finds a queue entry
            hq[hq_wr[$clog2(HQ)-1:0]] <= '{slot: cur, asic: f_asic,
                                          len: s_len[cur] + 16'(we), eot: 1'b0};
            hq_wr       <= hq_wr + 1'b1;
            s_open[cur] <= 1'b0;
          end
        end
      end
    end
  end

  initial assert (SLOTS <= HQ && SLOTS <= 8) else $error("dif_rx: SLOTS must be <= 8");
endmodule
