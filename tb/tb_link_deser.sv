// tb_link_deser: feeds a bit stream of idle commas and random symbols,
// delayed by a random number of bits (0..9), into link_deser and checks that
// it locks and then delivers exactly the transmitted symbols, for several
// offsets in turn (re-alignment after the offset changes).
module tb_link_deser;
  import lda_pkg::*;
  logic clk_ser = 0, rst = 1, clk_sys;
  logic [2:0] phase;
  logic [1:0] ddr = 0;
  logic [9:0] sym;
  logic locked;
  always #2.5 clk_ser = ~clk_ser;
  clk_div5 u_div (.clk_ser, .clk_sys, .phase);
  link_deser dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // bit source: symbols queued, shifted out two bits per cycle after `delay` bits
  logic bits[$];
  logic [9:0] sent[$];
  task automatic push_sym(input logic [9:0] s);
    for (int b = 9; b >= 0; b--) bits.push_back(s[b]);
    sent.push_back(s);
  endtask
  always @(posedge clk_ser) begin
    logic b1, b0;
    b1 = bits.size() ? bits.pop_front() : 1'b0;
    b0 = bits.size() ? bits.pop_front() : 1'b0;
    ddr <= {b1, b0};
  end

  initial begin
    repeat (20) @(posedge clk_ser);
    rst <= 0;
    for (int round = 0; round < 5; round++) begin
      int delay, matched;
      delay = (round == 0) ? 3 : $urandom % 10;
      sent = {};
      for (int i = 0; i < delay; i++) bits.push_back(1'b0);
      for (int i = 0; i < 6; i++) push_sym(i % 2 ? COMMA_RDP : COMMA_RDN);
      for (int i = 0; i < 60; i++) push_sym(i % 2 ? 10'b1010101010 : 10'b0101100101 ^ 10'(i & 3));
      for (int i = 0; i < 4; i++) push_sym(COMMA_RDN);
      // find the transmitted data sequence in the output
      matched = 0;
      for (int c = 0; c < 80; c++) begin
        @(posedge clk_sys); #0.1;
        if (sym == sent[6 + matched] && locked) matched++;
        else if (matched > 0 && matched < 60) begin chk(0, $sformatf("round %0d: symbol %0d wrong", round, matched)); matched = 60; end
        if (matched == 60) break;
      end
      chk(locked, "locked");
      chk(matched == 60, $sformatf("round %0d (offset %0d): all 60 symbols delivered in order", round, delay));
      wait (bits.size() == 0);
      repeat (4) @(posedge clk_sys);
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
