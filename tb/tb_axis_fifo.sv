// tb_axis_fifo: the 32768 x 64-bit FIFO.  Random traffic with random
// valid/ready is checked in order with tlast; then the FIFO is filled until
// it refuses input (DEPTH words in memory plus one in the output register), `count` is checked on the way, and
// it is drained in order back to zero.
module tb_axis_fifo;
  localparam int DEPTH = 32768;
  logic clk = 0, rst = 1;
  logic [63:0] s_tdata = 0;
  logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic [63:0] m_tdata;
  logic m_tvalid, m_tready = 0, m_tlast;
  logic [15:0] count;
  always #5 clk = ~clk;
  axis_fifo dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask
  logic [64:0] exp_q[$];
  int rmode = 1, nin = 0;
  always @(negedge clk) m_tready <= (rmode == 2) || (rmode == 1 && $urandom % 3 != 0);
  always @(posedge clk) if (!rst && m_tvalid && m_tready) begin
    logic [64:0] e;
    if (exp_q.size() == 0) chk(0, "unexpected output");
    else begin
      e = exp_q.pop_front();
      if ({m_tlast, m_tdata} != e) chk(0, $sformatf("got %h want %h", {m_tlast, m_tdata}, e));
      else checks++;
    end
  end
  always @(posedge clk) if (!rst && s_tvalid && s_tready) nin++;
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      logic [63:0] d;
      bit l;
      @(negedge clk);
      d = {$urandom, $urandom}; l = ($urandom % 8 == 0);
      s_tdata <= d; s_tlast <= l; s_tvalid <= $urandom % 2;
      #1 if (s_tvalid && s_tready) exp_q.push_back({l, d});
    end
    @(negedge clk) s_tvalid <= 0;
    rmode = 2;
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    chk(count == 0, "empty after draining");
    // fill completely
    rmode = 0;
    repeat (3) @(posedge clk);
    nin = 0;
    for (int i = 0; i < DEPTH + 10; i++) begin
      logic [63:0] d;
      @(negedge clk);
      d = {32'(i), $urandom};
      s_tdata <= d; s_tlast <= (i % 100 == 99); s_tvalid <= 1;
      #1 if (s_tready) exp_q.push_back({i % 100 == 99, d});
    end
    @(negedge clk) s_tvalid <= 0;
    repeat (3) @(posedge clk);
    chk(nin == DEPTH + 1, $sformatf("accepted %0d words before full", nin));
    chk(!s_tready, "full: input refused");
    chk(int'(count) == DEPTH + 1, $sformatf("count %0d when full", count));
    rmode = 1;
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    chk(count == 0 && !m_tvalid, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
