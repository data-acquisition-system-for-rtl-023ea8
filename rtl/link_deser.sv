// link_deser: 1:10 deserialiser with symbol alignment for one link lane.
//
// Two bits arrive per 200 MHz cycle (ddr[1] first).  They shift into a
// 20-bit history.  Once per symbol period (phase 2 of clk_div5) all ten
// 10-bit windows of the history are compared with the two disparity forms of
// the K28.5 comma; a match fixes the window offset and sets `locked`.  The
// symbol in the chosen window is then registered on `sym` and stays stable
// across the next rising edge of the 40 MHz clock.  The transmitter sends
// commas whenever it has nothing else to send, so the receiver aligns after
// reset without any training sequence.  The paper shows 'CLK align' and
// input-delay blocks at this place without describing them; alignment by
// comma search is this design's choice.
module link_deser
  import lda_pkg::*;
(
  input  logic       clk_ser,
  input  logic       rst,
  input  logic [2:0] phase,
  input  logic [1:0] ddr,
  output logic [9:0] sym,
  output logic       locked
);
  logic [19:0] hist;
  logic [3:0]  off;
  logic        found;
  logic [3:0]  found_off;

  always_comb begin
    found = 1'b0; found_off = '0;
    for (int o = 0; o < 10; o++)
      if (hist[o +: 10] == COMMA_RDN || hist[o +: 10] == COMMA_RDP) begin
        found = 1'b1; found_off = 4'(o);
      end
  end

  always_ff @(posedge clk_ser) begin
    if (rst) begin
      hist   <= '0;
      off    <= '0;
      locked <= 1'b0;
      sym    <= '0;
    end else begin
      hist <= {hist[17:0], ddr};
      if (phase == 3'd2) begin
        if (found) begin
          off    <= found_off;
          locked <= 1'b1;
          sym    <= hist[found_off +: 10];
        end else sym <= hist[off +: 10];
      end
    end
  end
endmodule
