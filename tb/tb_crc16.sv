// tb_crc16: compares crc16 with a bit-serial shift-register model written
// here (x^16 + x^12 + x^5 + 1, init 0xFFFF, MSB first), checks the standard
// check value 0x29B1 of the ASCII string "123456789" (CRC-16/CCITT-FALSE,
// fed as 16-bit words "12" "34" "56" "78" and the final byte handled by the
// model) and that appending the CRC word gives a zero remainder.
module tb_crc16;
  logic clk = 0, clr = 0, en = 0;
  logic [15:0] data = 0, crc;
  always #5 clk = ~clk;
  crc16 dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // serial model: one bit at a time through a 16-bit LFSR
  function automatic logic [15:0] model_bits(input logic [15:0] c, input logic [15:0] d, input int nbits);
    for (int i = nbits - 1; i >= 0; i--) begin
      logic fb;
      fb = c[15] ^ d[i];
      c = c << 1;
      if (fb) begin c[0] ^= 1; c[5] ^= 1; c[12] ^= 1; end
    end
    return c;
  endfunction

  task automatic word(input logic [15:0] w);
    data = w; en = 1; @(posedge clk); #1 en = 0;
  endtask

  initial begin
    logic [15:0] m;
    clr = 1; @(posedge clk); #1 clr = 0;
    chk(crc == 16'hFFFF, "init");
    word(16'h3132); word(16'h3334); word(16'h3536); word(16'h3738);
    m = model_bits(crc, 16'h0039, 8);
    chk(m == 16'h29B1, $sformatf("check value of \"123456789\": %h", m));
    for (int t = 0; t < 200; t++) begin
      int n;
      logic [15:0] w;
      n = 1 + $urandom % 40;
      m = 16'hFFFF;
      clr = 1; @(posedge clk); #1 clr = 0;
      for (int i = 0; i < n; i++) begin
        w = 16'($urandom);
        m = model_bits(m, w, 16);
        word(w);
      end
      chk(crc == m, $sformatf("random packet crc %h want %h", crc, m));
      word(crc);
      chk(crc == 16'h0000, "zero remainder after the CRC word");
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
