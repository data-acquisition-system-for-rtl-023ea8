// axis_downsize: AXI-stream width reduction by an integer ratio.
//
// Each W_IN-bit input word is sent as W_IN/W_OUT output words, low part
// first; tlast goes with the last part.  Used where the paper's block diagram
// narrows the stream: 64 -> 16 bit ("AXIS resize") in front of the link
// transmitter of a Kintex, and 32 -> 16 bit in the Zynq's TX distributor.
// Throughput is one output word per clock; the input is accepted together
// with its last part.
module axis_downsize #(
  parameter int unsigned W_IN  = 64,
  parameter int unsigned W_OUT = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [W_IN-1:0]  s_tdata,
  input  logic             s_tvalid,
  output logic             s_tready,
  input  logic             s_tlast,
  output logic [W_OUT-1:0] m_tdata,
  output logic             m_tvalid,
  input  logic             m_tready,
  output logic             m_tlast
);
  localparam int unsigned R = W_IN / W_OUT;
  logic [$clog2(R+1)-1:0] part;
  logic last_part;
  assign last_part = (part == $bits(part)'(R - 1));
  assign m_tdata   = s_tdata[W_OUT*part +: W_OUT];
  assign m_tvalid  = s_tvalid;
  assign m_tlast   = s_tlast && last_part;
  assign s_tready  = m_tready && last_part;

  always_ff @(posedge clk) begin
    if (rst) part <= '0;
    else if (m_tvalid && m_tready) part <= last_part ? '0 : part + 1'b1;
  end

  initial assert (W_IN % W_OUT == 0) else $error("axis_downsize: W_IN must be a multiple of W_OUT");
endmodule
