// clk_div5: derives the 40 MHz system clock from the 200 MHz link clock.
//
// The link serialises a 10-bit 8b/10b symbol per lane at 400 Mbit/s (200 MHz,
// both edges), i.e. one symbol every five 200 MHz cycles, and the rest of
// the LDA logic runs at 40 MHz; the paper's block diagram shows a divide-by-5
// for this.  `phase` counts 0..4; `clk_sys` is high in phases 0 and 1 and
// rises on the 200 MHz edge that starts phase 0.  The serialiser and
// deserialiser use `phase` to exchange symbols with the 40 MHz logic at a
// fixed point of its cycle.  On an FPGA this would be a clock buffer with a
// divider; here it is a free-running counter without reset.
module clk_div5 (
  input  logic       clk_ser,
  output logic       clk_sys,
  output logic [2:0] phase
);
  // free running, so the 40 MHz logic sees clock edges while in reset;
  // a start value above 4 wraps to 0 within three cycles
  always_ff @(posedge clk_ser) begin
    phase   <= (phase >= 3'd4) ? 3'd0 : phase + 3'd1;
    clk_sys <= (phase >= 3'd4) || (phase == 3'd0);
  end
endmodule
