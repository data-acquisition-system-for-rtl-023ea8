// lda_pkg: types and constants shared by the Link Data Aggregator (LDA) firmware.
//
// Holds the DIF fragment type codes, the 8b/10b control symbols used on the
// Kintex <-> Zynq link, the fast-command codes, the ASIC packet header layout
// and the CRC-16 step function.  The paper names the mechanisms (100-byte
// DIF fragments, 8b10b control symbols for control words and fast commands,
// a CRC-16 per packet); every code value below is this design's choice.
package lda_pkg;

  // ---- DIF -> LDA fragment stream (byte oriented) -------------------------
  typedef enum logic [7:0] {
    FRAG_DATA = 8'hF0,  // fragment of an ASIC packet, more follow
    FRAG_LAST = 8'hF1,  // last fragment of an ASIC packet
    FRAG_EOT  = 8'hFE   // end-of-transfer marker of a readout cycle
  } frag_type_e;

  localparam int unsigned FRAG_BYTES = 100;   // maximum payload per fragment

  // Packet types in the header word written by the memory manager
  localparam logic [7:0] PKT_ASIC = 8'h00;
  localparam logic [7:0] PKT_EOT  = 8'h01;
  localparam logic [7:0] HDR_MAGIC = 8'hA5;

  // Header queued by a DIF port for every finished packet
  typedef struct packed {
    logic [2:0]  slot;   // packet slot in the port memory
    logic [7:0]  asic;   // SPIROC index on the DIF
    logic [15:0] len;    // payload bytes
    logic        eot;    // end-of-transfer marker, no payload
  } pkt_hdr_t;

  // 64-bit header word leading every ASIC packet on the AXI-stream
  typedef struct packed {
    logic [7:0]  magic;
    logic [7:0]  port;
    logic [7:0]  asic;
    logic [7:0]  ptype;
    logic [15:0] len;
    logic [15:0] count;
  } asic_hdr_t;

  // ---- Fast commands from the CCC --------------------------------------
  typedef enum logic [7:0] {
    FC_START = 8'h01,
    FC_STOP  = 8'h02,
    FC_SYNC  = 8'h03
  } fcmd_e;

  function automatic logic fcmd_known(input logic [7:0] c);
    return (c == FC_START) || (c == FC_STOP) || (c == FC_SYNC);
  endfunction

  // ---- 8b/10b control symbols (K28.x / K27.7 / K29.7) ----------------------
  localparam logic [7:0] K28_0 = 8'h1C;  // ACK  + sequence number
  localparam logic [7:0] K28_2 = 8'h5C;  // NAK  + sequence number
  localparam logic [7:0] K28_3 = 8'h7C;  // STATUS + {busy, full}
  localparam logic [7:0] K28_5 = 8'hBC;  // idle / comma
  localparam logic [7:0] K28_6 = 8'hDC;  // fast command + code
  localparam logic [7:0] K27_7 = 8'hFB;  // start of packet + sequence number
  localparam logic [7:0] K29_7 = 8'hFD;  // end of packet + sequence number

  // One symbol slot of the dual-lane link: a {k, byte} pair per lane
  typedef struct packed {
    logic       k;
    logic [7:0] d;
  } sym_t;

  // 10-bit comma patterns (abcdei fghj, a = bit 9) of K28.5
  localparam logic [9:0] COMMA_RDN = 10'b0011111010;
  localparam logic [9:0] COMMA_RDP = 10'b1100000101;

  // ---- CRC-16-CCITT (x^16 + x^12 + x^5 + 1), MSB first, 16 bits per step ---
  function automatic logic [15:0] crc16_step(input logic [15:0] crc, input logic [15:0] data);
    logic [15:0] c;
    c = crc;
    for (int i = 15; i >= 0; i--) begin
      if (c[15] ^ data[i]) c = {c[14:0], 1'b0} ^ 16'h1021;
      else                 c = {c[14:0], 1'b0};
    end
    return c;
  endfunction

  // ---- 8b/10b code tables (standard Widmer-Franaszek code) -----------------
  // 5b/6b code "abcdei" (a = bit 5) for a running disparity of -1.
  function automatic logic [5:0] enc6_rdm(input logic [4:0] x, input logic k28);
    logic [5:0] t [32];
    t = '{6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001, 6'b011001, 6'b111000,
          6'b111001, 6'b100101, 6'b010101, 6'b110100, 6'b001101, 6'b101100, 6'b011100, 6'b010111,
          6'b011011, 6'b100011, 6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b111010,
          6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110, 6'b011110, 6'b101011};
    return k28 ? 6'b001111 : t[x];
  endfunction

  // 3b/4b code "fghj" (f = bit 3) for a running disparity of -1.
  // kcode selects the K.x.y column; alt7 selects the alternate A7 code.
  function automatic logic [3:0] enc4_rdm(input logic [2:0] y, input logic kcode, input logic alt7);
    logic [3:0] d [8];
    logic [3:0] kk [8];
    d  = '{4'b1011, 4'b1001, 4'b0101, 4'b1100, 4'b1101, 4'b1010, 4'b0110, 4'b1110};
    kk = '{4'b1011, 4'b0110, 4'b1010, 4'b1100, 4'b1101, 4'b0101, 4'b1001, 4'b0111};
    if (kcode) return kk[y];
    if (y == 3'd7 && alt7) return 4'b0111;
    return d[y];
  endfunction

  function automatic logic signed [2:0] disp6(input logic [5:0] c);
    return 3'($countones(c)) - 3'sd3;
  endfunction
  function automatic logic signed [2:0] disp4(input logic [3:0] c);
    return 3'($countones(c)) - 3'sd2;
  endfunction

endpackage
