// tb_dec_8b10b: round trip through enc_8b10b and dec_8b10b for every data
// byte and every valid K symbol in random order, checking byte, K flag and
// absence of errors; then checks that fixed invalid symbols (000000 1111,
// 111111 0000) give code_err and that a K28.5 repeated with the wrong
// disparity gives disp_err.
module tb_dec_8b10b;
  logic clk = 0, rst = 1, en = 0;
  logic k_in = 0, rd;
  logic [7:0] d_in = 0, d_out;
  logic [9:0] sym, dsym;
  logic k_out, code_err, disp_err;
  logic use_raw = 0;
  logic [9:0] raw;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  enc_8b10b enc (.clk, .rst, .en, .din(d_in), .k(k_in), .dout(sym), .rd);
  assign dsym = use_raw ? raw : sym;
  dec_8b10b dut (.clk, .rst, .en, .din(dsym), .dout(d_out), .k(k_out), .code_err, .disp_err);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam logic [7:0] KS [12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC, 8'hDC, 8'hFC,
                                     8'hF7, 8'hFB, 8'hFD, 8'hFE};
  initial begin
    @(posedge clk); @(posedge clk); rst = 0; #1;
    for (int n = 0; n < 4000; n++) begin
      k_in = ($urandom % 6) == 0;
      d_in = k_in ? KS[$urandom % 12] : (n < 256 ? 8'(n) : 8'($urandom));
      en = 1; #1;
      chk(d_out == d_in && k_out == k_in, $sformatf("round trip %0d %02h -> %0d %02h", k_in, d_in, k_out, d_out));
      chk(!code_err && !disp_err, $sformatf("no error on %0d %02h (%b)", k_in, d_in, sym));
      @(posedge clk); #1;
    end
    en = 0; use_raw = 1;
    raw = 10'b0000001111; #1; chk(code_err, "000000 is not a code");
    raw = 10'b1111110000; #1; chk(code_err, "111111 is not a code");
    // bring RD to -, then send RD+ variant of K28.5 twice
    raw = (rd == 0) ? 10'b0011111010 : 10'b1100000101;
    #1;
    raw = dut.rd ? 10'b1100000101 : 10'b0011111010; #1;
    chk(!disp_err && !code_err && k_out && d_out == 8'hBC, "K28.5 with right disparity");
    raw = dut.rd ? 10'b0011111010 : 10'b1100000101; #1;
    chk(disp_err, "K28.5 with wrong disparity");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
