// tb_dif_rx: drives the fragment byte stream of a DIF into dif_rx and plays
// the memory manager: pops headers, reads the packet words and frees the
// slot.  ASIC packets of random length (up to 2400 bytes, the largest
// SPIROC packet) are cut into fragments of at most 100 bytes and the
// fragments of up to SLOTS ASICs are interleaved.  Checks every header
// (ASIC, length) and every payload byte, the end-of-transfer marker, the
// overflow pulse when more ASICs are open than there are slots, and that an
// over-long fragment (101 bytes) is rejected.
module tb_dif_rx;
  import lda_pkg::*;
  localparam int SLOTS = 4, SLOT_WORDS = 512;
  localparam int AW = $clog2(SLOTS * SLOT_WORDS);
  logic clk = 0, rst = 1;
  always #12.5 clk = ~clk;
  logic [7:0] rx_data = 0;
  logic rx_valid = 0;
  pkt_hdr_t hdr;
  logic hdr_valid, hdr_ready = 0, free_valid = 0, overflow;
  logic [AW-1:0] rd_addr = 0;
  logic [63:0] rd_data;
  logic [2:0] free_slot = 0;

  dif_rx #(.SLOTS(SLOTS), .SLOT_WORDS(SLOT_WORDS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // expected packets, keyed by completion order
  typedef struct { int asic; bit eot; logic [7:0] data[$]; } pkt_t;
  pkt_t exp_q[$];
  int n_ovf = 0;
  always @(posedge clk) if (!rst && overflow) n_ovf++;

  task automatic put(input logic [7:0] b);
    rx_data <= b; rx_valid <= 1;
    @(posedge clk);
    rx_valid <= 0;
    repeat (2) @(posedge clk);     // bytes come much slower from the UART
  endtask

  // send ASIC packets for `n` ASICs interleaved fragment by fragment
  task automatic send_round(input int n, input int base_asic);
    logic [7:0] pay [8][$];
    int pos [8];
    int left;
    for (int a = 0; a < n; a++) begin
      int len;
      len = 1 + $urandom % 2400;
      pay[a] = {};
      for (int i = 0; i < len; i++) pay[a].push_back(8'($urandom));
      pos[a] = 0;
    end
    left = n;
    while (left > 0) begin
      for (int a = 0; a < n; a++) begin
        if (pos[a] < pay[a].size()) begin
          int fl;
          bit last;
          fl   = pay[a].size() - pos[a];
          if (fl > 100) fl = 1 + $urandom % 100;
          last = (pos[a] + fl == pay[a].size());
          put(last ? FRAG_LAST : FRAG_DATA);
          put(8'(base_asic + a));
          put(8'(fl));
          for (int i = 0; i < fl; i++) put(pay[a][pos[a] + i]);
          pos[a] += fl;
          if (last) begin
            pkt_t p;
            p.asic = base_asic + a; p.eot = 0; p.data = pay[a];
            exp_q.push_back(p);
            left--;
          end
        end
      end
    end
  endtask

  // memory manager model
  int n_pkts = 0;
  initial begin
    wait (!rst);
    forever begin
      @(posedge clk);
      if (hdr_valid) begin
        pkt_hdr_t h;
        pkt_t e;
        h = hdr;
        hdr_ready <= 1; @(posedge clk); hdr_ready <= 0;
        if (exp_q.size() == 0) chk(0, "unexpected header");
        else begin
          e = exp_q.pop_front();
          chk(h.eot == e.eot && int'(h.asic) == e.asic, $sformatf("header asic %0d eot %0d", h.asic, h.eot));
          chk(int'(h.len) == e.data.size(), $sformatf("length %0d want %0d", h.len, e.data.size()));
          for (int w = 0; w < (e.data.size() + 7) / 8; w++) begin
            rd_addr <= AW'(int'(h.slot) * SLOT_WORDS + w);
            @(posedge clk); @(posedge clk); #1;
            for (int b = 0; b < 8; b++)
              if (w * 8 + b < e.data.size())
                chk(rd_data[8*b +: 8] == e.data[w*8 + b], $sformatf("byte %0d", w * 8 + b));
          end
          if (!h.eot) begin
            free_slot <= h.slot; free_valid <= 1; @(posedge clk); free_valid <= 0;
          end
          n_pkts++;
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int r = 0; r < 3; r++) send_round(1 + r, 10 * r);
    // end of transfer marker
    begin pkt_t p; p.asic = 0; p.eot = 1; p.data = {}; exp_q.push_back(p); end
    put(FRAG_EOT); put(8'd0); put(8'd0);
    wait (exp_q.size() == 0);
    repeat (50) @(posedge clk);
    chk(n_pkts == 7, $sformatf("7 packets read (%0d)", n_pkts));
    chk(n_ovf == 0, "no overflow so far");
    // five ASICs open at once with four slots: the fifth is dropped
    for (int a = 0; a < 5; a++) begin put(FRAG_DATA); put(8'(40 + a)); put(8'd2); put(8'hAA); put(8'hBB); end
    chk(n_ovf == 1, $sformatf("overflow on fifth ASIC (%0d)", n_ovf));
    // an over-long fragment is rejected
    put(FRAG_LAST); put(8'd40); put(8'd101);
    for (int i = 0; i < 101; i++) put(8'h11);
    chk(n_ovf == 2, "101-byte fragment rejected");
    // close ASIC 40 properly: two earlier bytes plus one
    begin pkt_t p; p.asic = 40; p.eot = 0; p.data = '{8'hAA, 8'hBB, 8'hCC}; exp_q.push_back(p); end
    put(FRAG_LAST); put(8'd40); put(8'd1); put(8'hCC);
    wait (exp_q.size() == 0);
    repeat (50) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
