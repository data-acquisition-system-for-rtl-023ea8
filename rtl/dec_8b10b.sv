// dec_8b10b: 8b/10b decoder of one lane of the Kintex <-> Zynq link.
//
// Decodes a 10-bit symbol (dout[9] = bit "a", first on the wire) back to a
// byte and a K flag.  The 6b and 4b sub-blocks are looked up by comparing
// them with both disparity variants of every entry of the encoder tables in
// lda_pkg, so encoder and decoder share one table.  `code_err` flags a
// sub-block that is in no table; `disp_err` flags a sub-block whose
// disparity is not allowed by the running disparity the decoder tracks.
// The running disparity register advances on the clock where `en` is high;
// outputs are combinational.
module dec_8b10b
  import lda_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       en,
  input  logic [9:0] din,
  output logic [7:0] dout,
  output logic       k,
  output logic       code_err,
  output logic       disp_err
);
  logic       rd, rd_mid, rd_next;
  logic [5:0] c6;
  logic [3:0] c4;
  logic [4:0] x;
  logic [2:0] y;
  logic       hit6, hit4, k28, kx7;

  assign c6 = din[9:4];
  assign c4 = din[3:0];

  always_comb begin
    logic [5:0] t6;
    logic [3:0] t4;
    hit6 = 1'b0; x = '0; k28 = 1'b0;
    for (int i = 0; i < 32; i++) begin
      t6 = enc6_rdm(5'(i), 1'b0);
      if (c6 == t6 || (c6 == ~t6 && (disp6(t6) != 0 || i == 7))) begin hit6 = 1'b1; x = 5'(i); end
    end
    if (c6 == 6'b001111 || c6 == 6'b110000) begin hit6 = 1'b1; x = 5'd28; k28 = 1'b1; end

    hit4 = 1'b0; y = '0; kx7 = 1'b0;
    for (int j = 0; j < 8; j++) begin
      // data column: y.3 and unbalanced codes have a complemented variant
      t4 = enc4_rdm(3'(j), 1'b0, 1'b0);
      if (!k28 && (c4 == t4 || (c4 == ~t4 && (disp4(t4) != 0 || j == 3)))) begin hit4 = 1'b1; y = 3'(j); end
      // K28 column: 001111 leaves RD+, so its 4b block is the complement
      t4 = enc4_rdm(3'(j), 1'b1, 1'b0);
      if (k28 && (c6 == 6'b001111 ? c4 == ~t4 : c4 == t4)) begin hit4 = 1'b1; y = 3'(j); end
    end
    // alternate x.7 code: K23/27/29/30.7 or D.x.A7
    if (!k28 && (c4 == 4'b0111 || c4 == 4'b1000)) begin
      hit4 = 1'b1; y = 3'd7;
      kx7 = (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30);
    end

    dout     = {y, x};
    k        = k28 || kx7;
    code_err = !hit6 || !hit4;

    // disparity: a +2 block is illegal after RD+, a -2 block after RD-
    rd_mid   = (disp6(c6) > 0) ? 1'b1 : (disp6(c6) < 0) ? 1'b0 : rd;
    disp_err = (disp6(c6) > 0 && rd) || (disp6(c6) < 0 && !rd) ||
               (disp4(c4) > 0 && rd_mid) || (disp4(c4) < 0 && !rd_mid);
    rd_next  = (disp4(c4) > 0) ? 1'b1 : (disp4(c4) < 0) ? 1'b0 : rd_mid;
  end

  always_ff @(posedge clk) begin
    if (rst)     rd <= 1'b0;
    else if (en) rd <= rd_next;
  end
endmodule
