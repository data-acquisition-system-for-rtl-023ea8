// tb_fpga_link: two fpga_link ends (A = Kintex side, B = Zynq side) wired
// back to back through their 2-bit DDR lanes, with bit errors injected on
// the A -> B lanes by the testbench.
// Checks:
//  - random packets both ways arrive complete and in order (scoreboard);
//  - a fast command reaches the far end with the same latency every time,
//    also while packets are flowing;
//  - single bit errors cause NAK and retransmission, no data is lost;
//  - a packet corrupted on every try is dropped after 1 + 3 attempts
//    (tx_fail) and the link then carries on;
//  - the busy status reaches the far end;
//  - throughput of 2.4 kB packets is >= 0.9 words per 40 MHz clock
//    (the paper reports nearly 80 MB/s = 1 word of 16 bit per clock).
module tb_fpga_link;
  import lda_pkg::*;
  logic clk_ser = 0, rst = 1, clk_sys;
  logic [2:0] phase;
  always #2.5 clk_ser = ~clk_ser;
  clk_div5 u_div (.clk_ser, .clk_sys, .phase);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // endpoints
  logic [15:0] a_s_tdata = 0, b_s_tdata = 0, a_m_tdata, b_m_tdata;
  logic a_s_tvalid = 0, a_s_tready, a_s_tlast = 0, b_s_tvalid = 0, b_s_tready, b_s_tlast = 0;
  logic a_m_tvalid, a_m_tlast, b_m_tvalid, b_m_tlast;
  logic a_m_tready = 1, b_m_tready = 1;
  logic [7:0] a_fc = 0, b_fc_out, a_fc_out;
  logic a_fc_valid = 0, b_fc_out_valid, a_fc_out_valid;
  logic a_busy = 0, b_remote_busy, a_remote_busy;
  logic [1:0] a_tx [2], b_tx [2], b_rx [2];
  logic a_locked, b_locked;
  logic a_done, a_retry, a_fail, b_done, b_retry, b_fail, a_good, a_bad, b_good, b_bad;
  logic [1:0] flip = 0;   // error mask on lane 0 of A -> B

  assign b_rx[0] = a_tx[0] ^ flip;
  assign b_rx[1] = a_tx[1];

  fpga_link dut_a (
    .clk_ser, .phase, .clk_sys, .rst,
    .s_tdata(a_s_tdata), .s_tvalid(a_s_tvalid), .s_tready(a_s_tready), .s_tlast(a_s_tlast),
    .m_tdata(a_m_tdata), .m_tvalid(a_m_tvalid), .m_tready(a_m_tready), .m_tlast(a_m_tlast),
    .fcmd_in(a_fc), .fcmd_in_valid(a_fc_valid), .fcmd_out(a_fc_out), .fcmd_out_valid(a_fc_out_valid),
    .busy_in(a_busy), .remote_busy(a_remote_busy),
    .tx_ddr(a_tx), .rx_ddr(b_tx), .locked(a_locked),
    .tx_done(a_done), .tx_retry(a_retry), .tx_fail(a_fail), .pkt_good(a_good), .pkt_bad(a_bad));

  fpga_link dut_b (
    .clk_ser, .phase, .clk_sys, .rst,
    .s_tdata(b_s_tdata), .s_tvalid(b_s_tvalid), .s_tready(b_s_tready), .s_tlast(b_s_tlast),
    .m_tdata(b_m_tdata), .m_tvalid(b_m_tvalid), .m_tready(b_m_tready), .m_tlast(b_m_tlast),
    .fcmd_in(8'h00), .fcmd_in_valid(1'b0), .fcmd_out(b_fc_out), .fcmd_out_valid(b_fc_out_valid),
    .busy_in(1'b0), .remote_busy(b_remote_busy),
    .tx_ddr(b_tx), .rx_ddr(b_rx), .locked(b_locked),
    .tx_done(b_done), .tx_retry(b_retry), .tx_fail(b_fail), .pkt_good(b_good), .pkt_bad(b_bad));

  // scoreboards: {last, data}
  logic [16:0] q_ab[$], q_ba[$];
  int n_ab = 0, n_ba = 0, n_retry = 0, n_fail = 0, n_bad = 0;

  always @(posedge clk_sys) if (!rst) begin
    if (b_m_tvalid && b_m_tready) begin
      if (q_ab.size() == 0) chk(0, "A->B: unexpected word");
      else begin
        logic [16:0] e;
        e = q_ab.pop_front();
        chk({b_m_tlast, b_m_tdata} == e, $sformatf("A->B word %h want %h", {b_m_tlast, b_m_tdata}, e));
      end
      n_ab++;
    end
    if (a_m_tvalid && a_m_tready) begin
      if (q_ba.size() == 0) chk(0, "B->A: unexpected word");
      else begin
        logic [16:0] e;
        e = q_ba.pop_front();
        chk({a_m_tlast, a_m_tdata} == e, $sformatf("B->A word %h want %h", {a_m_tlast, a_m_tdata}, e));
      end
      n_ba++;
    end
    if (a_retry) n_retry++;
    if (a_fail)  n_fail++;
    if (b_bad)   n_bad++;
  end

  task automatic send_a(input int len, input bit expect_it = 1);
    for (int i = 0; i < len; i++) begin
      logic [15:0] w;
      w = 16'($urandom);
      @(negedge clk_sys);
      a_s_tdata <= w; a_s_tlast <= (i == len - 1); a_s_tvalid <= 1;
      if (expect_it) q_ab.push_back({i == len - 1, w});
      #1;
      while (!a_s_tready) @(negedge clk_sys);   // accepted at the next rising edge
    end
    @(negedge clk_sys);
    a_s_tvalid <= 0;
  endtask

  task automatic send_b(input int len);
    for (int i = 0; i < len; i++) begin
      logic [15:0] w;
      w = 16'($urandom);
      @(negedge clk_sys);
      b_s_tdata <= w; b_s_tlast <= (i == len - 1); b_s_tvalid <= 1;
      q_ba.push_back({i == len - 1, w});
      #1;
      while (!b_s_tready) @(negedge clk_sys);   // accepted at the next rising edge
    end
    @(negedge clk_sys);
    b_s_tvalid <= 0;
  endtask

  task automatic wait_drained(input int max_cycles);
    int n = 0;
    while ((q_ab.size() != 0 || q_ba.size() != 0) && n < max_cycles) begin @(posedge clk_sys); n++; end
    chk(q_ab.size() == 0 && q_ba.size() == 0, $sformatf("drained (%0d/%0d words left)", q_ab.size(), q_ba.size()));
  endtask

  // first and last delivery at B while measuring throughput
  bit meas = 0;
  int t_first = -1, t_last = -1;
  always @(posedge clk_sys) if (meas && b_m_tvalid && b_m_tready) begin
    if (t_first < 0) t_first = cyc;
    t_last = cyc;
  end
  // fast command latency measurement
  int fc_sent_t = -1, fc_lat[$];
  logic [7:0] fc_code;
  int cyc = 0;
  always @(posedge clk_sys) cyc++;
  always @(posedge clk_sys) if (b_fc_out_valid) begin
    chk(b_fc_out == fc_code, "fast command code");
    fc_lat.push_back(cyc - fc_sent_t);
  end
  task automatic fast_cmd(input logic [7:0] c);
    @(posedge clk_sys);
    a_fc <= c; a_fc_valid <= 1; fc_code = c; fc_sent_t = cyc + 1;
    @(posedge clk_sys);
    a_fc_valid <= 0;
  endtask

  // inject a one-bit error into the next data symbol of A's transmitter
  task automatic inject_one();
    wait (dut_a.u_tx.st == 3'd2);   // T_DATA
    @(posedge clk_ser); flip <= 2'b01;
    @(posedge clk_ser); flip <= 2'b00;
  endtask

  initial begin
    repeat (100) @(posedge clk_ser);
    rst <= 0;
    wait (a_locked && b_locked);
    repeat (50) @(posedge clk_sys);
    chk(1, "links locked");

    // 1: random traffic both ways, with fast commands in between
    fork
      for (int p = 0; p < 20; p++) send_a(1 + $urandom % 200);
      for (int p = 0; p < 10; p++) send_b(1 + $urandom % 200);
      for (int f = 0; f < 6; f++) begin repeat (300 + $urandom % 500) @(posedge clk_sys); fast_cmd(8'(1 + f % 3)); end
    join
    wait_drained(50000);
    repeat (50) @(posedge clk_sys);
    chk(fc_lat.size() == 6, $sformatf("6 fast commands received (%0d)", fc_lat.size()));
    foreach (fc_lat[i]) chk(fc_lat[i] == fc_lat[0], $sformatf("constant fast command latency %0d vs %0d", fc_lat[i], fc_lat[0]));

    // 2: single bit errors -> retransmission, nothing lost
    fork
      for (int p = 0; p < 6; p++) send_a(50 + $urandom % 100);
      for (int e = 0; e < 3; e++) begin inject_one(); repeat (400) @(posedge clk_sys); end
    join
    wait_drained(50000);
    chk(n_retry >= 3, $sformatf("retransmissions after errors (%0d)", n_retry));
    chk(n_bad >= 1, $sformatf("CRC / symbol errors detected (%0d)", n_bad));
    chk(n_fail == 0, "no packet dropped by single errors");

    // 3: a packet corrupted on every attempt is dropped after 1 + 3 tries
    n_retry = 0;
    fork
      send_a(100, 0);
      begin
        repeat (4) begin
          wait (dut_a.u_tx.st == 3'd2);
          @(posedge clk_ser); flip <= 2'b01;
          @(posedge clk_ser); flip <= 2'b00;
          wait (dut_a.u_tx.st != 3'd2);
        end
      end
    join
    wait (n_fail == 1 || cyc > 2000000);
    chk(n_fail == 1, "packet dropped after retries");
    chk(n_retry == 3, $sformatf("three retransmissions before the drop (%0d)", n_retry));
    send_a(40);
    wait_drained(20000);

    // 4: busy status crosses the link
    a_busy <= 1;
    repeat (400) @(posedge clk_sys);
    chk(b_remote_busy, "busy seen at far end");
    a_busy <= 0;
    repeat (400) @(posedge clk_sys);
    chk(!b_remote_busy, "busy cleared at far end");

    // 5: throughput of long packets
    begin
      meas = 1;
      for (int p = 0; p < 8; p++) send_a(1200);   // 2.4 kB, a full SPIROC packet
      wait_drained(50000);
      $display("throughput: %0d words delivered in %0d clocks", 8 * 1200, t_last - t_first + 1);
      chk(real'(8 * 1200) / real'(t_last - t_first + 1) >= 0.9, "throughput >= 0.9 word/clock (72 MB/s)");
    end

    $display("retries=%0d fails=%0d bad=%0d fc latency=%0d", n_retry, n_fail, n_bad, fc_lat[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
