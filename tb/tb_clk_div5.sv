// tb_clk_div5: checks that clk_sys is the 200 MHz clock divided by five
// (one rising edge every five cycles, high for two cycles) and that the
// rising edge comes with phase 0, from a random start value.
module tb_clk_div5;
  logic clk_ser = 0, clk_sys;
  logic [2:0] phase;
  always #2.5 clk_ser = ~clk_ser;
  clk_div5 dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask
  initial begin
    int last_rise, highs;
    logic prev;
    repeat (10) @(posedge clk_ser);
    last_rise = -1; highs = 0; prev = clk_sys;
    for (int c = 0; c < 200; c++) begin
      @(posedge clk_ser); #0.1;
      chk(phase <= 3'd4, "phase in 0..4");
      if (clk_sys && !prev) begin
        chk(phase == 3'd0, "rising edge at phase 0");
        if (last_rise >= 0) chk(c - last_rise == 5, $sformatf("period %0d", c - last_rise));
        last_rise = c;
      end
      if (clk_sys) highs++;
      prev = clk_sys;
    end
    chk(highs == 80, $sformatf("duty 2/5 (%0d of 200)", highs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
