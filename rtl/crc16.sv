// crc16: CRC-16 generator/checker of the FPGA link, one 16-bit word per clock.
//
// The paper adds a CRC-16 check-sum to each packet on the Kintex <-> Zynq
// link and checks it on reception; it does not name the polynomial.  This
// block uses CRC-16-CCITT (x^16 + x^12 + x^5 + 1), initial value 0xFFFF, no
// final XOR, data MSB first (lda_pkg::crc16_step).  With these choices a
// packet followed by its own CRC word leaves a remainder of zero, which is
// how link_rx checks a packet.
//
// Interface: `clr` reloads 0xFFFF, `en` folds `data` in; `crc` is the
// register value (the CRC of all words folded in since the last clr).
module crc16
  import lda_pkg::*;
(
  input  logic        clk,
  input  logic        clr,
  input  logic        en,
  input  logic [15:0] data,
  output logic [15:0] crc
);
  always_ff @(posedge clk) begin
    if (clr)     crc <= 16'hFFFF;
    else if (en) crc <= crc16_step(crc, data);
  end
endmodule
