// tb_link_ser: checks that link_ser sends every 10-bit symbol bit 9 first,
// two bits per 200 MHz cycle (ddr[1] before ddr[0]), one symbol per five
// cycles, with the symbol taken from the 40 MHz domain at phase 0.
module tb_link_ser;
  logic clk_ser = 0, rst = 1, clk_sys;
  logic [2:0] phase;
  logic [9:0] sym = 0;
  logic [1:0] ddr;
  always #2.5 clk_ser = ~clk_ser;
  clk_div5 u_div (.clk_ser, .clk_sys, .phase);
  link_ser dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask
  logic [9:0] q[$];
  always @(posedge clk_sys) if (!rst) begin
    logic [9:0] v;
    v = 10'($urandom);
    sym <= v;
    q.push_back(v);
  end
  initial begin
    logic [9:0] got, e;
    repeat (20) @(posedge clk_ser);
    rst <= 0;
    // the symbol registered at a clk_sys edge is loaded at the end of phase 0
    @(posedge clk_sys);
    void'(q.pop_front());
    @(posedge clk_ser);  // end of phase 0: load
    for (int s = 0; s < 100; s++) begin
      got = '0;
      for (int c = 0; c < 5; c++) begin
        #0.1 got = {got[7:0], ddr};
        @(posedge clk_ser);
      end
      e = q.pop_front();
      chk(got == e, $sformatf("symbol %0d: %b want %b", s, got, e));
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
