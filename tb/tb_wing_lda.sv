// tb_wing_lda: end-to-end test of the whole Wing-LDA (Kintex slaves, FPGA
// links and Zynq) at a reduced size of NS slaves with NPP DIF ports each.
//
// Models around the design:
//   * a DIF on every port: sends ASIC packets as 8-bit UART fragments
//     (10 Mbit/s), decodes the 9-bit downstream frames (data bytes, fast
//     commands, end-of-packet) and drives its busy line;
//   * the CCC: sends fast-command bytes on its serial line, watches busy;
//   * the DMA: receives the 64-bit S2MM stream with random stalls and sends
//     downstream packets on the 32-bit MM2S stream.
// Every ASIC packet and end-of-transfer marker sent by a DIF is checked
// word for word at the S2MM output (per port, in order); every downstream
// packet is checked byte for byte at its DIF.  Bit errors are forced onto
// both directions of slave 0's link while packets are on the wire.
//
// Each mechanism is counted and a failure is recorded if it never
// happened: link lock, fast-command broadcast (all enabled DIFs, equal
// delay), acquisition state, DIF busy to CCC busy (and a disabled port's
// busy ignored), packet-slot overflow, output stall, retransmission after a
// bit error in each direction, end-of-transfer markers, downstream routing
// and the invalid-destination drop, and the FIFO-space busy.
module tb_wing_lda;
  import lda_pkg::*;
  localparam int NS  = 2;
  localparam int NPP = 3;
  localparam int NP  = NS * NPP;
  localparam int FIFO_BUSY_LEVEL = 32768 - 22500;   // fifo_count above this -> busy

  logic clk_ser = 0, rst = 1, clk_sys;
  logic [NP-1:0] port_en, dif_rxd, dif_txd, dif_busy;
  logic ccc_rxd = 1, ccc_busy;
  logic [63:0] s2mm_tdata;
  logic s2mm_tvalid, s2mm_tready = 0, s2mm_tlast;
  logic [31:0] mm2s_tdata = 0;
  logic mm2s_tvalid = 0, mm2s_tready, mm2s_tlast = 0;
  logic [NS-1:0] link_locked, slave_locked, slave_acq_running, slave_busy, tx_retry, tx_fail;
  logic acq_running;
  logic [15:0] fifo_count;
  logic [NP-1:0] port_overflow;

  always #2.5 clk_ser = ~clk_ser;
  wing_lda #(.N_SLAVES(NS), .N_PORTS(NPP)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_pkt = 0, n_eot = 0, n_stall = 0, n_ovf = 0, n_up_retry = 0, n_dn_retry = 0, n_fail = 0;
  int n_fc_start = 0, n_fc_sync = 0, n_fc_stop = 0, n_busy_dif = 0, n_busy_fifo = 0;
  int n_down = 0, n_drop_ok = 0, n_inj_up = 0, n_inj_dn = 0, n_fc_equal = 0;

  // ---------------- DIF models: upstream ----------------
  typedef struct { bit eot; int asic; logic [7:0] data[$]; } xp_t;
  xp_t xq [NP][$];
  localparam realtime BIT = 100ns;     // 10 MHz UART bit

  task automatic dif_byte(input int p, input logic [7:0] b);
    dif_rxd[p] = 1'b0; #(BIT);
    for (int i = 0; i < 8; i++) begin dif_rxd[p] = b[i]; #(BIT); end
    dif_rxd[p] = 1'b1; #(BIT);
  endtask

  task automatic dif_frag(input int p, input logic [7:0] typ, input int asic, input logic [7:0] pay[$]);
    dif_byte(p, typ);
    dif_byte(p, 8'(asic));
    dif_byte(p, 8'(pay.size()));
    foreach (pay[i]) dif_byte(p, pay[i]);
  endtask

  // one complete ASIC packet of `len` bytes, sent in fragments of <= 100
  task automatic dif_packet(input int p, input int asic, input int len);
    xp_t x;
    logic [7:0] f[$];
    int pos, fl;
    x.eot = 0; x.asic = asic; x.data = {};
    for (int i = 0; i < len; i++) x.data.push_back(8'($urandom));
    pos = 0;
    while (pos < len) begin
      fl = len - pos;
      if (fl > 100) fl = 100;
      f = {};
      for (int i = 0; i < fl; i++) f.push_back(x.data[pos + i]);
      if (pos + fl == len) xq[p].push_back(x);   // announced when the last fragment starts
      dif_frag(p, (pos + fl == len) ? FRAG_LAST : FRAG_DATA, asic, f);
      pos += fl;
    end
  endtask

  task automatic dif_eot(input int p);
    xp_t x;
    logic [7:0] f[$];
    f = {};
    x.eot = 1; x.asic = 0; x.data = {};
    xq[p].push_back(x);
    dif_frag(p, FRAG_EOT, 0, f);
  endtask

  // ---------------- DMA model: S2MM checker ----------------
  bit   in_pkt = 0;
  int   cur_port, widx, nw;
  xp_t  cur;
  int   stall_mode = 1;   // 0: never ready, 1: random, 2: always ready
  always @(negedge clk_sys)
    s2mm_tready <= (stall_mode == 2) || (stall_mode == 1 && ($urandom % 4) != 0);
  always @(posedge clk_sys) if (!rst) begin
    if (s2mm_tvalid && !s2mm_tready) n_stall++;
    if (s2mm_tvalid && s2mm_tready) begin
      if (!in_pkt) begin
        asic_hdr_t h;
        h = asic_hdr_t'(s2mm_tdata);
        chk(h.magic == 8'hA5, $sformatf("header magic %h", h.magic));
        cur_port = int'(h.port);
        if (cur_port >= NP || xq[cur_port].size() == 0) begin
          chk(0, $sformatf("unexpected packet from port %0d", cur_port));
        end else begin
          cur = xq[cur_port].pop_front();
          chk(h.asic == 8'(cur.asic), $sformatf("port %0d asic %0d want %0d", cur_port, h.asic, cur.asic));
          chk(h.ptype == (cur.eot ? PKT_EOT : PKT_ASIC), "packet type");
          chk(int'(h.len) == cur.data.size(), $sformatf("port %0d length %0d want %0d", cur_port, h.len, cur.data.size()));
          nw = cur.eot ? 0 : (cur.data.size() + 7) / 8;
          chk(s2mm_tlast == (nw == 0), "tlast on header-only packet");
          if (cur.eot) n_eot++;
          if (nw == 0) n_pkt++;
          else begin in_pkt = 1; widx = 0; end
        end
      end else begin
        logic [63:0] e;
        for (int b = 0; b < 8; b++) e[8*b +: 8] = (widx*8 + b < cur.data.size()) ? cur.data[widx*8 + b] : 8'h00;
        chk(s2mm_tdata == e, $sformatf("port %0d word %0d: %h want %h", cur_port, widx, s2mm_tdata, e));
        chk(s2mm_tlast == (widx == nw - 1), "tlast position");
        widx++;
        if (widx == nw) begin in_pkt = 0; n_pkt++; end
      end
    end
  end

  // ---------------- DIF models: downstream receivers ----------------
  logic [7:0] dexp [NP][$][$];       // expected downstream packets per port
  logic [7:0] drx  [NP][$];
  realtime    fc_time [NP];
  int         fc_code [NP];
  int         fc_count [NP];
  for (genvar p = 0; p < NP; p++) begin : g_difrx
    initial begin
      logic [8:0] fr;
      fc_count[p] = 0;
      wait (rst == 1'b0);
      #(2us);
      forever begin
        @(negedge dif_txd[p]);
        #(BIT / 2);
        for (int i = 0; i < 9; i++) begin #(BIT); fr[i] = dif_txd[p]; end
        #(BIT / 2);
        if (fr[8]) begin
          if (fr[7:0] == 8'hFF) begin
            if (dexp[p].size() == 0) chk(0, $sformatf("unexpected downstream packet at port %0d", p));
            else begin
              logic [7:0] e[$];
              e = dexp[p].pop_front();
              chk(drx[p] == e, $sformatf("downstream packet at port %0d: %0d bytes, want %0d", p, drx[p].size(), e.size()));
              n_down++;
            end
            drx[p] = {};
          end else begin
            fc_time[p] = $realtime; fc_code[p] = fr[7:0]; fc_count[p]++;
          end
        end else drx[p].push_back(fr[7:0]);
      end
    end
  end

  // ---------------- CCC model ----------------
  task automatic ccc_byte(input logic [7:0] b);
    ccc_rxd = 1'b0; #(BIT);
    for (int i = 0; i < 8; i++) begin ccc_rxd = b[i]; #(BIT); end
    ccc_rxd = 1'b1; #(BIT);
  endtask

  // sends a fast command and checks that exactly the enabled DIFs got it,
  // all within one downstream frame time of each other
  task automatic fast_cmd(input logic [7:0] code, inout int counter);
    int cnt0 [NP];
    realtime tmin, tmax;
    bit all, dbg_done;
    dbg_done = 0;
    for (int p = 0; p < NP; p++) cnt0[p] = fc_count[p];
    ccc_byte(code);
    #(20us);
    all = 1; tmin = 1s; tmax = 0;
    for (int p = 0; p < NP; p++) begin
      if (port_en[p]) begin
        all &= (fc_count[p] == cnt0[p] + 1) && (fc_code[p] == int'(code));
        if (fc_time[p] < tmin) tmin = fc_time[p];
        if (fc_time[p] > tmax) tmax = fc_time[p];
      end else all &= (fc_count[p] == cnt0[p]);
      if (!all && !dbg_done) begin
        $display("port %0d: enabled %0d, %0d commands (before %0d), last code %0d", p, port_en[p], fc_count[p], cnt0[p], fc_code[p]);
        dbg_done = 1;
      end
    end
    chk(all, $sformatf("fast command %0d reached exactly the enabled DIFs", code));
    if (all) counter++;
    chk(tmax - tmin < 1000ns, $sformatf("fast command spread %0t", tmax - tmin));
    if (tmax - tmin < 1000ns) n_fc_equal++;
  endtask

  // ---------------- DMA model: MM2S sender ----------------
  task automatic down_pkt(input int glob, input int nwords, input bit valid_dest);
    logic [7:0] e[$];
    e = {};
    for (int w = 0; w <= nwords; w++) begin
      logic [31:0] v;
      v = (w == 0) ? 32'(glob) : $urandom;
      if (w > 0) for (int b = 0; b < 4; b++) e.push_back(v[8*b +: 8]);
      @(negedge clk_sys);
      mm2s_tdata <= v; mm2s_tvalid <= 1; mm2s_tlast <= (w == nwords);
      #1 while (!mm2s_tready) @(negedge clk_sys);
    end
    if (valid_dest) dexp[glob].push_back(e);
    @(negedge clk_sys);
    mm2s_tvalid <= 0; mm2s_tlast <= 0;
  endtask

  // ---------------- link bit-error injection ----------------
  // flips lane 0 of slave 0's link for one 200 MHz cycle while a packet's
  // data words are on the wire (upstream: slave -> Zynq, downstream: back)
  task automatic inject(input bit upstream);
    logic [1:0] v;
    if (upstream) begin
      wait (dut.g_kintex[0].u_kintex.u_link.u_tx.st == 3'd2);
      repeat (7) @(posedge clk_ser);
      v = dut.z_rx[0][0];
      force dut.z_rx[0][0] = ~v;
      @(posedge clk_ser);
      release dut.z_rx[0][0];
      n_inj_up++;
    end else begin
      wait (dut.u_zynq.g_slave[0].u_link.u_tx.st == 3'd2);
      repeat (7) @(posedge clk_ser);
      v = dut.z_tx[0][0];
      force dut.z_tx[0][0] = ~v;
      @(posedge clk_ser);
      release dut.z_tx[0][0];
      n_inj_dn++;
    end
  endtask

  always @(posedge clk_sys) if (!rst) begin
    if (|port_overflow) n_ovf += $countones(port_overflow);
    if (|tx_retry) n_dn_retry += $countones(tx_retry);
    if (|tx_fail) n_fail++;
    if (dut.g_kintex[0].u_kintex.u_link.tx_retry) n_up_retry++;
    if (dut.g_kintex[0].u_kintex.u_link.tx_fail) n_fail++;
  end

  // ---------------- test sequence ----------------
  int ovf_port = 0;
  logic [7:0] xq_pending [4][$];
  bit bulk_stop = 0;
  int active = 0;
  initial begin
    port_en = '1;
    port_en[NP-1] = 1'b0;          // one unconnected port
    dif_rxd = '1;
    dif_busy = '0;
    repeat (40) @(posedge clk_ser);
    rst = 0;

    // links come up
    #(5us);
    for (int t = 0; t < 500 && !(&link_locked && &slave_locked); t++) #(100ns);
    #(5us);
    chk(&link_locked && &slave_locked, "all links locked");

    // start of acquisition
    fast_cmd(FC_START, n_fc_start);
    chk(acq_running && &slave_acq_running, "acquisition running after START");

    // busy: an enabled DIF holds busy -> CCC busy; a disabled port is ignored
    #(10us);
    chk(!ccc_busy, "not busy when idle");
    dif_busy[1] = 1'b1;
    #(20us);
    chk(ccc_busy && slave_busy[0], "DIF busy reaches the CCC");
    dif_busy[1] = 1'b0;
    #(20us);
    chk(!ccc_busy, "busy released");
    if (ccc_busy === 1'b0) n_busy_dif++;
    dif_busy[NP-1] = 1'b1;
    #(20us);
    chk(!ccc_busy, "busy of a disabled port is ignored");
    dif_busy[NP-1] = 1'b0;

    // readout: every enabled DIF sends packets and an end-of-transfer
    // marker; port 0 first opens more ASIC packets than it has slots
    stall_mode = 1;
    fork
      begin
        logic [7:0] f[$];
        f = {};
        for (int a = 0; a < 4; a++) begin
          logic [7:0] g[$];
          g = {};
          for (int i = 0; i < 10; i++) g.push_back(8'($urandom));
          xq_pending[a] = g;
          dif_frag(ovf_port, FRAG_DATA, a, g);
        end
        for (int i = 0; i < 5; i++) f.push_back(8'(i));
        dif_frag(ovf_port, FRAG_LAST, 9, f);     // no free slot: dropped
        for (int a = 0; a < 4; a++) begin
          xp_t x;
          logic [7:0] g[$];
          g = {};
          for (int i = 0; i < 10; i++) g.push_back(8'($urandom));
          x.eot = 0; x.asic = a; x.data = xq_pending[a];
          foreach (g[i]) x.data.push_back(g[i]);
          xq[ovf_port].push_back(x);
          dif_frag(ovf_port, FRAG_LAST, a, g);
        end
      end
      for (int p = 1; p < NP - 1; p++) begin
        automatic int pp = p;
        active++;
        fork
          begin
            for (int k = 0; k < 3; k++) dif_packet(pp, k, 1 + $urandom % 600);
            active--;
          end
        join_none
      end
      begin
        inject(1);
        #(5us);
        inject(1);
      end
      begin
        #(20us);
        for (int k = 0; k < 6; k++) begin
          int port;
          port = (k * 5) % (NP - 1);
          down_pkt(port, 20 + $urandom % 60, 1);
          if (k == 1) inject(0);
          if (k == 3) begin
            down_pkt(NP + 3, 10, 0);      // no such port: dropped
          end
        end
      end
    join
    wait (active == 0);
    for (int p = 0; p < NP - 1; p++) begin
      automatic int pp = p;
      active++;
      fork begin dif_eot(pp); active--; end join_none
    end
    wait (active == 0);
    #(50us);
    chk(in_pkt == 0, "no packet left open");

    // FIFO space: the DMA stops reading; the DIFs keep sending until the
    // FIFO holds so much that the free space is below one DIF's data chunk
    stall_mode = 0;
    for (int p = 0; p < NP - 1; p++) begin
      automatic int pp = p;
      active++;
      fork
        begin
          while (!bulk_stop) dif_packet(pp, 7, 2000);
          active--;
        end
      join_none
    end
    for (int t = 0; t < 40000 && !ccc_busy; t++) #(1us);
    chk(ccc_busy && fifo_count > 16'(FIFO_BUSY_LEVEL - 300), $sformatf("busy at FIFO level %0d", fifo_count));
    if (ccc_busy) n_busy_fifo++;
    bulk_stop = 1;
    wait (active == 0);
    #(50us);
    stall_mode = 1;
    for (int t = 0; t < 20000 && !(fifo_count == 0 && !ccc_busy); t++) #(1us);
    chk(!ccc_busy, "busy released after the FIFO drained");

    fast_cmd(FC_SYNC, n_fc_sync);
    fast_cmd(FC_STOP, n_fc_stop);
    chk(!acq_running && !(|slave_acq_running), "acquisition stopped after STOP");

    stall_mode = 2;
    for (int t = 0; t < 10000; t++) begin
      int left;
      left = 0;
      for (int p = 0; p < NP; p++) left += xq[p].size() + dexp[p].size();
      if (left == 0) break;
      #(1us);
    end
    #(10us);

    // everything sent has arrived
    for (int p = 0; p < NP; p++) begin
      chk(xq[p].size() == 0, $sformatf("port %0d: %0d packets not delivered", p, xq[p].size()));
      chk(dexp[p].size() == 0, $sformatf("port %0d: %0d downstream packets missing", p, dexp[p].size()));
    end
    chk(n_fail == 0, "no packet given up by a link");

    // each mechanism happened
    chk(n_pkt > 3 * (NP - 2), $sformatf("ASIC packets delivered: %0d", n_pkt));
    chk(n_eot == NP - 1, $sformatf("end-of-transfer markers: %0d", n_eot));
    chk(n_stall > 0, "output stall");
    chk(n_ovf > 0, "slot overflow");
    chk(n_inj_up > 0 && n_up_retry > 0, $sformatf("upstream retransmission: %0d", n_up_retry));
    chk(n_inj_dn > 0 && n_dn_retry > 0, $sformatf("downstream retransmission: %0d", n_dn_retry));
    chk(n_fc_start == 1 && n_fc_sync == 1 && n_fc_stop == 1, "fast commands START, SYNC, STOP");
    chk(n_fc_equal == 3, "fast commands with equal delay at all DIFs");
    chk(n_busy_dif == 1, "DIF busy");
    chk(n_busy_fifo == 1, "FIFO-space busy");
    chk(n_down == 6, $sformatf("downstream packets routed: %0d", n_down));
    $display("mechanisms: pkt=%0d eot=%0d stall=%0d ovf=%0d up_retry=%0d dn_retry=%0d fc=%0d/%0d/%0d busy=%0d/%0d down=%0d",
             n_pkt, n_eot, n_stall, n_ovf, n_up_retry, n_dn_retry, n_fc_start, n_fc_sync, n_fc_stop,
             n_busy_dif, n_busy_fifo, n_down);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(100ms);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
