// axis_join: merges the packet streams of the slave links into one.
//
// N input AXI-streams (one per Kintex link) are served round robin; once an
// input is granted it keeps the output until its tlast, so packets never
// interleave.  The output goes to the 256 KiB FIFO and the DMA.  The
// paper's block diagram names the block ("AXIS join"); the arbitration
// policy is this design's choice.  Throughput: one word per clock.
module axis_join #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] s_tdata  [N],
  input  logic [N-1:0] s_tvalid,
  output logic [N-1:0] s_tready,
  input  logic [N-1:0] s_tlast,
  output logic [W-1:0] m_tdata,
  output logic         m_tvalid,
  input  logic         m_tready,
  output logic         m_tlast
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] cur, nxt;
  logic          locked;   // inside a packet of input `cur`
  logic          any;

  // next input with data, searching from cur+1 round robin
  always_comb begin
    nxt = cur; any = 1'b0;
    for (int i = N; i >= 1; i--) begin
      int j;
      j = (int'(cur) + i) % N;
      if (s_tvalid[j]) begin nxt = IW'(j); any = 1'b1; end
    end
  end

  logic [IW-1:0] sel;
  assign sel      = locked ? cur : nxt;
  assign m_tdata  = s_tdata[sel];
  assign m_tlast  = s_tlast[sel];
  assign m_tvalid = (locked || any) && s_tvalid[sel];
  always_comb begin
    s_tready = '0;
    s_tready[sel] = m_tready && (locked || any);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cur    <= '0;
      locked <= 1'b0;
    end else if (m_tvalid && m_tready) begin
      cur    <= sel;
      locked <= !m_tlast;
    end
  end
endmodule
