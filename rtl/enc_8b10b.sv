// enc_8b10b: 8b/10b encoder of one lane of the Kintex <-> Zynq link.
//
// The paper encodes the two bytes of every 16-bit link word with the 8b10b
// code and sends control words and fast commands as its control symbols.
// This is the standard code: the 5b/6b and 3b/4b sub-blocks come from
// lda_pkg, a sub-block of non-zero disparity (and D.x.7 / D.7 / x.3) takes
// its complement when the running disparity is positive, and the running
// disparity follows every unbalanced sub-block.  D.x.A7 is used where the
// standard requires it to avoid a run of five equal bits.
//
// Interface: `dout` is combinational from {k, din} and the running disparity
// register, which advances on the clock where `en` is high.  dout[9] is bit
// "a", sent first; dout[0] is bit "j".  Valid K symbols are K28.0-7, K23.7,
// K27.7, K29.7 and K30.7; any other K input is encoded as the data byte.
module enc_8b10b
  import lda_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       en,
  input  logic [7:0] din,
  input  logic       k,
  output logic [9:0] dout,
  output logic       rd      // running disparity after the last symbol (1 = +1)
);
  logic [4:0] x;
  logic [2:0] y;
  logic       k28, kx7, rd_mid, rd_next, alt7;
  logic [5:0] c6;
  logic [3:0] c4;

  assign x   = din[4:0];
  assign y   = din[7:5];
  assign k28 = k && x == 5'd28;
  assign kx7 = k && y == 3'd7 && (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30);

  always_comb begin
    c6 = enc6_rdm(x, k28);
    if (rd && (disp6(c6) != 0 || x == 5'd7)) c6 = ~c6;
    rd_mid = (disp6(c6) != 0) ? ~rd : rd;
    alt7 = (!rd_mid && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
           ( rd_mid && (x == 5'd11 || x == 5'd13 || x == 5'd14));
    c4 = enc4_rdm(y, k28 || kx7, alt7);
    if (rd_mid && (disp4(c4) != 0 || y == 3'd3 || k28 || kx7)) c4 = ~c4;
    rd_next = (disp4(c4) != 0) ? ~rd_mid : rd_mid;
    dout = {c6, c4};
  end

  always_ff @(posedge clk) begin
    if (rst)     rd <= 1'b0;
    else if (en) rd <= rd_next;
  end
endmodule
