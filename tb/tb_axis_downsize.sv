// tb_axis_downsize: random packets of 64-bit words with random input
// valid and output ready; checks that every word comes out as four 16-bit
// parts, low part first, tlast only on the last part of the last word, and
// that with both sides always ready one part leaves per clock.
module tb_axis_downsize;
  logic clk = 0, rst = 1;
  logic [63:0] s_tdata = 0;
  logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic [15:0] m_tdata;
  logic m_tvalid, m_tready = 0, m_tlast;
  always #5 clk = ~clk;
  axis_downsize dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask
  logic [16:0] exp_q[$];
  int rmode = 1, nout = 0;
  always @(negedge clk) m_tready <= (rmode == 2) || (rmode == 1 && $urandom % 3 != 0);
  always @(posedge clk) if (!rst && m_tvalid && m_tready) begin
    logic [16:0] e;
    nout++;
    if (exp_q.size() == 0) chk(0, "unexpected output");
    else begin
      e = exp_q.pop_front();
      chk({m_tlast, m_tdata} == e, $sformatf("got %h want %h", {m_tlast, m_tdata}, e));
    end
  end
  task automatic send(input logic [63:0] d, input bit last, input bit gaps);
    @(negedge clk);
    if (gaps) while ($urandom % 3 == 0) @(negedge clk);
    s_tdata <= d; s_tvalid <= 1; s_tlast <= last;
    for (int i = 0; i < 4; i++) exp_q.push_back({last && i == 3, d[16*i +: 16]});
    #1 while (!s_tready) begin @(negedge clk); #1; end
    @(posedge clk); #1 s_tvalid <= 0;
  endtask
  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int p = 0; p < 200; p++) begin
      int n;
      n = 1 + $urandom % 10;
      for (int w = 0; w < n; w++) send({$urandom, $urandom}, w == n - 1, 1);
    end
    rmode = 2;
    repeat (20) @(posedge clk);
    t0 = nout;
    fork
      for (int w = 0; w < 50; w++) send({$urandom, $urandom}, w == 49, 0);
      repeat (200) @(posedge clk);
    join
    chk(nout - t0 == 200, $sformatf("200 parts out, got %0d", nout - t0));
    chk(exp_q.size() == 0, "all parts delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
