// tb_enc_8b10b: checks enc_8b10b against published code points and the
// code's properties.  Fixed symbols (from the standard 8b/10b tables):
// K28.5 = 0011111010 / 1100000101, D21.5 = 1010101010, D0.0 (RD-) =
// 1001110100, D17.7 (RD-) = 1000110111, K23.7 (RD+) = 0001010111, K28.7 (RD+) = 1100000111.  Then a
// long random stream of data and K symbols must keep every symbol at
// disparity 0 or +-2 alternating in sign, and never run more than five equal
// bits.
module tb_enc_8b10b;
  logic clk = 0, rst = 1, en = 0, k = 0, rd;
  logic [7:0] din = 0;
  logic [9:0] dout;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  enc_8b10b dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // apply one symbol, return its code, advance the disparity
  task automatic put(input logic kk, input logic [7:0] d, output logic [9:0] code);
    k = kk; din = d; en = 1;
    #1 code = dout;
    @(posedge clk); #1 en = 0;
  endtask

  localparam logic [7:0] KS [12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC, 8'hDC, 8'hFC,
                                     8'hF7, 8'hFB, 8'hFD, 8'hFE};
  initial begin
    logic [9:0] c;
    int run, rsum;
    logic last;
    @(posedge clk); @(posedge clk); rst = 0; #1;
    put(1, 8'hBC, c); chk(c == 10'b0011111010, $sformatf("K28.5 RD- %b", c));
    put(1, 8'hBC, c); chk(c == 10'b1100000101, $sformatf("K28.5 RD+ %b", c));
    put(0, 8'hB5, c); chk(c == 10'b1010101010, $sformatf("D21.5 %b", c));
    chk(rd == 0, "RD- after K28.5 pair");
    put(0, 8'h00, c); chk(c == 10'b1001110100, $sformatf("D0.0 RD- %b", c));
    chk(rd == 0, "D0.0 is balanced");
    put(0, 8'hF1, c); chk(c == 10'b1000110111, $sformatf("D17.7 RD- %b", c));
    chk(rd == 1, "D17.7 (RD-) leaves RD+");
    put(1, 8'hF7, c); chk(c == 10'b0001010111, $sformatf("K23.7 RD+ %b", c));
    put(1, 8'hFC, c); chk(c == 10'b1100000111, $sformatf("K28.7 RD+ %b", c));
    put(0, 8'h4A, c); chk(c == 10'b0101010101, $sformatf("D10.2 %b", c));
    // random stream properties
    rsum = rd ? 1 : -1; run = 0; last = 0;
    for (int n = 0; n < 5000; n++) begin
      logic kk; logic [7:0] d; int ones;
      kk = ($urandom % 8) == 0;
      d  = kk ? KS[$urandom % 12] : 8'($urandom);
      put(kk, d, c);
      ones = $countones(c);
      chk(ones == 4 || ones == 5 || ones == 6, "symbol disparity");
      if (ones == 6) begin chk(rsum < 0, "+2 symbol only after RD-"); rsum = 1; end
      if (ones == 4) begin chk(rsum > 0, "-2 symbol only after RD+"); rsum = -1; end
      for (int b = 9; b >= 0; b--) begin
        if (c[b] == last) run++; else begin run = 1; last = c[b]; end
        if (run > 5) begin chk(0, $sformatf("run length > 5 at symbol %0d", n)); run = 0; end
      end
      chk(rd == (rsum > 0), "rd output");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
