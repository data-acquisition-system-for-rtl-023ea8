// tb_axis_upsize: random packets of 16-bit words with random valid and
// ready; checks that four words are packed per 64-bit output word, first
// word in the low part, that a short last group is padded with zeros and
// carries tlast.
module tb_axis_upsize;
  logic clk = 0, rst = 1;
  logic [15:0] s_tdata = 0;
  logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic [63:0] m_tdata;
  logic m_tvalid, m_tready = 0, m_tlast;
  always #5 clk = ~clk;
  axis_upsize dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask
  logic [64:0] exp_q[$];
  int n_pad = 0;
  always @(negedge clk) m_tready <= $urandom % 3 != 0;
  always @(posedge clk) if (!rst && m_tvalid && m_tready) begin
    logic [64:0] e;
    if (exp_q.size() == 0) chk(0, "unexpected output");
    else begin
      e = exp_q.pop_front();
      chk({m_tlast, m_tdata} == e, $sformatf("got %h want %h", {m_tlast, m_tdata}, e));
    end
  end
  task automatic send(input logic [15:0] d, input bit last);
    @(negedge clk);
    while ($urandom % 3 == 0) @(negedge clk);
    s_tdata <= d; s_tvalid <= 1; s_tlast <= last;
    #1 while (!s_tready) begin @(negedge clk); #1; end
    @(posedge clk); #1 s_tvalid <= 0;
  endtask
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int p = 0; p < 300; p++) begin
      int n;
      logic [63:0] acc;
      n = 1 + $urandom % 17;
      acc = '0;
      for (int w = 0; w < n; w++) begin
        logic [15:0] d;
        d = 16'($urandom);
        acc[16 * (w % 4) +: 16] = d;
        if (w % 4 == 3 || w == n - 1) begin
          exp_q.push_back({w == n - 1, acc});
          if (w % 4 != 3) n_pad++;
          acc = '0;
        end
        send(d, w == n - 1);
      end
    end
    repeat (20) @(posedge clk);
    chk(exp_q.size() == 0, "all words delivered");
    chk(n_pad > 0, "short last words seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
