// tb_mem_manager: four DIF ports are modelled by the testbench (header
// queues and packet memories with one clock read latency).  Checks that
// every packet leaves as one 64-bit header word (magic, global port, ASIC,
// type, length, running count) followed by its payload words with the bytes
// past the length zeroed, tlast on the last word, the slot freed after it,
// the ports served round robin, one word per clock while the output is
// ready (320 MB/s at 40 MHz) and random output stalls losing nothing.
// Downstream: 32-bit packets addressed to ports of this slave come out as
// 16-bit words on the right port; a packet for another slave is dropped.
module tb_mem_manager;
  import lda_pkg::*;
  localparam int NP = 4, SLOTS = 4, SLOT_WORDS = 64, SLAVE = 2;
  localparam int AW = $clog2(SLOTS * SLOT_WORDS);
  logic clk = 0, rst = 1;
  always #12.5 clk = ~clk;

  pkt_hdr_t hdr [NP];
  logic [NP-1:0] hdr_valid, hdr_ready, free_valid;
  logic [AW-1:0] rd_addr;
  logic [63:0] rd_data [NP];
  logic [2:0] free_slot;
  logic [63:0] m_tdata; logic m_tvalid, m_tready = 1, m_tlast;
  logic [31:0] s_tdata = 0; logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic [15:0] d_tdata; logic [NP-1:0] d_tvalid, d_tready = '1; logic d_tlast;

  mem_manager #(.N_PORTS(NP), .SLOTS(SLOTS), .SLOT_WORDS(SLOT_WORDS)) dut (.*);
  logic [7:0] port_base;
  assign port_base = 8'(SLAVE * NP);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // port models
  logic [63:0] pmem [NP][SLOTS * SLOT_WORDS];
  always @(posedge clk) for (int p = 0; p < NP; p++) rd_data[p] <= pmem[p][rd_addr];
  pkt_hdr_t hq [NP][$];
  always_comb for (int p = 0; p < NP; p++) begin
    hdr_valid[p] = hq[p].size() != 0;
    hdr[p] = hdr_valid[p] ? hq[p][0] : '0;
  end
  always @(posedge clk) for (int p = 0; p < NP; p++) if (hdr_valid[p] && hdr_ready[p]) void'(hq[p].pop_front());

  // expected output words
  logic [64:0] exp_q[$];
  int exp_port[$];
  int n_free = 0, count = 0, words = 0;
  always @(posedge clk) if (!rst && |free_valid) n_free++;

  task automatic make_pkt(input int p, input int slot, input int asic, input int len, input bit eot);
    pkt_hdr_t h;
    asic_hdr_t a;
    int nw;
    h = '{slot: 3'(slot), asic: 8'(asic), len: 16'(len), eot: eot};
    nw = eot ? 0 : (len + 7) / 8;
    a = '{magic: 8'hA5, port: 8'(SLAVE * NP + p), asic: 8'(asic), ptype: eot ? 8'h01 : 8'h00,
          len: 16'(len), count: 16'(count)};
    count++;
    exp_q.push_back({nw == 0, 64'(a)});
    exp_port.push_back(p);
    for (int w = 0; w < nw; w++) begin
      logic [63:0] v, e;
      v = {$urandom, $urandom};
      pmem[p][slot * SLOT_WORDS + w] = v;
      e = v;
      for (int b = 0; b < 8; b++) if (w * 8 + b >= len) e[8*b +: 8] = 8'h00;
      exp_q.push_back({w == nw - 1, e});
    end
    hq[p].push_back(h);
  endtask

  int first_cycle = -1, last_cycle = 0, cyc = 0, stall = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (!rst && m_tvalid && m_tready) begin
    if (exp_q.size() == 0) chk(0, "unexpected word");
    else begin
      logic [64:0] e;
      e = exp_q.pop_front();
      chk({m_tlast, m_tdata} == e, $sformatf("word %h want %h", {m_tlast, m_tdata}, e));
    end
    if (first_cycle < 0) first_cycle = cyc;
    last_cycle = cyc;
    words++;
  end
  always @(negedge clk) if (stall) m_tready <= ($urandom % 3) != 0; else m_tready <= 1;

  // downstream
  logic [16:0] dq [NP][$];
  always @(posedge clk) if (!rst) for (int p = 0; p < NP; p++) if (d_tvalid[p] && d_tready[p]) begin
    if (dq[p].size() == 0) chk(0, $sformatf("unexpected downstream word on port %0d", p));
    else begin
      logic [16:0] e;
      e = dq[p].pop_front();
      chk({d_tlast, d_tdata} == e, $sformatf("downstream port %0d got %h want %h", p, {d_tlast, d_tdata}, e));
    end
  end
  task automatic down(input int glob, input int nw, input bit expect_it);
    @(negedge clk);
    s_tdata <= 32'(glob); s_tvalid <= 1; s_tlast <= (nw == 0);
    #1 while (!s_tready) @(negedge clk);
    for (int w = 0; w < nw; w++) begin
      logic [31:0] v;
      v = $urandom;
      @(negedge clk);
      s_tdata <= v; s_tlast <= (w == nw - 1);
      if (expect_it) begin
        dq[glob - SLAVE * NP].push_back({1'b0, v[15:0]});
        dq[glob - SLAVE * NP].push_back({w == nw - 1, v[31:16]});
      end
      #1 while (!s_tready) @(negedge clk);
    end
    @(negedge clk);
    s_tvalid <= 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    // round robin: one packet per port queued together -> ports 1,2,3,0 after reset (cur = 0)
    for (int p = 0; p < NP; p++) make_pkt(p, p, 10 + p, 8 * 40, 0);
    // reorder expectation: service starts from port 1
    begin
      logic [64:0] tmp[$];
      int per;
      per = 41;
      tmp = exp_q; exp_q = {};
      for (int k = 1; k <= NP; k++) begin
        int p;
        p = k % NP;
        for (int i = 0; i < per; i++) begin
          logic [64:0] w;
          w = tmp[p * per + i];
          // packet counts follow service order
          if (i == 0) w[15:0] = 16'(k - 1);
          exp_q.push_back(w);
        end
      end
    end
    count = NP;
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    $display("4 x 41 words in %0d clocks", last_cycle - first_cycle + 1);
    chk(last_cycle - first_cycle + 1 <= 4 * 41 + 4 * 2, "about one word per clock");
    chk(n_free == 4, "four slots freed");
    // random lengths, EOT markers and output stalls
    stall = 1;
    for (int i = 0; i < 40; i++) begin
      int p;
      p = $urandom % NP;
      wait (hq[p].size() == 0);
      if (i % 9 == 8) make_pkt(p, 0, 0, 0, 1);
      else make_pkt(p, $urandom % SLOTS, $urandom % 72, 1 + $urandom % (8 * SLOT_WORDS), 0);
      wait (exp_q.size() == 0);
    end
    repeat (20) @(posedge clk);
    stall = 0;
    // downstream
    down(SLAVE * NP + 1, 5, 1);
    down(SLAVE * NP + 3, 3, 1);
    down(0, 4, 0);                // port of another slave: dropped
    down(SLAVE * NP + 0, 2, 1);
    repeat (50) @(posedge clk);
    for (int p = 0; p < NP; p++) chk(dq[p].size() == 0, "downstream words delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
