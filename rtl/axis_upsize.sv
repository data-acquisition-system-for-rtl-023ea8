// axis_upsize: AXI-stream width increase by an integer ratio.
//
// Collects W_OUT/W_IN input words, the first into the low part, and emits
// them as one output word.  A packet whose length is not a multiple of the
// ratio ends with a word whose unused upper parts are zero; tlast is kept.
// Used between the 16-bit FPGA link and the 32-bit downstream path of a
// Kintex and the 64-bit AXI-stream of the Zynq.  One input word per clock.
module axis_upsize #(
  parameter int unsigned W_IN  = 16,
  parameter int unsigned W_OUT = 64
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
  localparam int unsigned R = W_OUT / W_IN;
  logic [$clog2(R+1)-1:0] part;
  logic [W_OUT-1:0] acc;

  assign s_tready = !m_tvalid || m_tready;

  always_ff @(posedge clk) begin
    if (rst) begin
      part     <= '0;
      acc      <= '0;
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tlast  <= 1'b0;
    end else begin
      if (m_tvalid && m_tready) m_tvalid <= 1'b0;
      if (s_tvalid && s_tready) begin
        if (s_tlast || part == $bits(part)'(R - 1)) begin
          m_tdata  <= acc | (W_OUT'(s_tdata) << (W_IN * part));
          m_tlast  <= s_tlast;
          m_tvalid <= 1'b1;
          acc      <= '0;
          part     <= '0;
        end else begin
          acc  <= acc | (W_OUT'(s_tdata) << (W_IN * part));
          part <= part + 1'b1;
        end
      end
    end
  end

  initial assert (W_OUT % W_IN == 0) else $error("axis_upsize: W_OUT must be a multiple of W_IN");
endmodule
