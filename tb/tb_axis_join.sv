// tb_axis_join: four inputs send random packets with random valid; the
// output has random ready.  Checks that every packet arrives whole (no
// interleaving), in order per input, and that all inputs are served.
module tb_axis_join;
  localparam int N = 4;
  logic clk = 0, rst = 1;
  logic [63:0] s_tdata [N];
  logic [N-1:0] s_tvalid = 0, s_tready, s_tlast = 0;
  logic [63:0] m_tdata;
  logic m_tvalid, m_tready = 0, m_tlast;
  always #5 clk = ~clk;
  axis_join dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask
  // data word = {input, packet number, word number, last}
  int cur = -1, got_pkts [N], nextpkt [N], nextw;
  always @(negedge clk) m_tready <= $urandom % 4 != 0;
  always @(posedge clk) if (!rst && m_tvalid && m_tready) begin
    int src, pk, w;
    src = int'(m_tdata[63:56]); pk = int'(m_tdata[55:32]); w = int'(m_tdata[31:1]);
    if (cur < 0) begin
      chk(src < N && pk == nextpkt[src] && w == 0, $sformatf("packet start src %0d pkt %0d w %0d", src, pk, w));
      cur = src; nextw = 1;
    end else begin
      chk(src == cur && w == nextw, $sformatf("packet continues: src %0d (want %0d) w %0d (want %0d)", src, cur, w, nextw));
      nextw++;
    end
    chk(m_tlast == m_tdata[0], "tlast");
    if (m_tlast) begin nextpkt[cur]++; got_pkts[cur]++; cur = -1; end
  end
  for (genvar i = 0; i < N; i++) begin : g_src
    initial begin
      s_tdata[i] = 0;
      wait (!rst);
      for (int pk = 0; pk < 60; pk++) begin
        int n;
        n = 1 + $urandom % 12;
        for (int w = 0; w < n; w++) begin
          @(negedge clk);
          while ($urandom % 3 == 0) @(negedge clk);
          s_tdata[i] <= {8'(i), 24'(pk), 31'(w), w == n - 1};
          s_tlast[i] <= (w == n - 1);
          s_tvalid[i] <= 1;
          #1 while (!s_tready[i]) begin @(negedge clk); #1; end
          @(posedge clk); #1 s_tvalid[i] <= 0;
        end
      end
    end
  end
  initial begin
    for (int i = 0; i < N; i++) begin got_pkts[i] = 0; nextpkt[i] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (20000) @(posedge clk);
    for (int i = 0; i < N; i++) chk(got_pkts[i] == 60, $sformatf("input %0d: %0d packets", i, got_pkts[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
