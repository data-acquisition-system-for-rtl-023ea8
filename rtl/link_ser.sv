// link_ser: 10:1 serialiser of one lane of the FPGA link.
//
// The paper serialises the 8b/10b symbols in a 200 MHz clock domain in DDR
// mode, 400 Mbit/s per lane.  Here the two bits of one 200 MHz cycle appear
// as `ddr[1]` (rising edge, sent first) and `ddr[0]` (falling edge); the DDR
// output register of the FPGA would merge them onto one wire.  A symbol is
// loaded from the 40 MHz domain on the 200 MHz edge that ends phase 0 (see
// clk_div5), when it has been stable for a whole 200 MHz cycle, and is sent
// bit "a" (sym[9]) first over the next five cycles.
module link_ser (
  input  logic       clk_ser,
  input  logic       rst,
  input  logic [2:0] phase,
  input  logic [9:0] sym,
  output logic [1:0] ddr
);
  logic [9:0] sh;
  assign ddr = sh[9:8];
  always_ff @(posedge clk_ser) begin
    if (rst)              sh <= 10'b0011111010;   // a comma while reset
    else if (phase == 3'd0) sh <= sym;
    else                  sh <= {sh[7:0], 2'b00};
  end
endmodule
