// bcast: fast-command broadcast inside a Kintex slave FPGA.
//
// Fast commands from the CCC (start and stop of acquisition, synchronisation)
// reach the Kintex as control symbols on the FPGA link.  This block checks
// the code and, for a known command, drives it to every enabled DIF port in
// the same clock, so all ports see the command with the same delay.  Unknown
// codes are dropped and counted in `bad_cmds`.  It also keeps the state
// "acquisition running" (set by start, cleared by stop) and counts sync
// commands.  The paper names the blocks ("CCC", "Bcast") and the command
// kinds; the codes are this design's choice (lda_pkg::fcmd_e).
module bcast
  import lda_pkg::*;
#(
  parameter int unsigned N_PORTS = 24
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [7:0]         fcmd_in,
  input  logic               fcmd_in_valid,
  input  logic [N_PORTS-1:0] port_en,
  output logic [7:0]         fcmd,
  output logic [N_PORTS-1:0] fcmd_valid,
  output logic               acq_running,
  output logic [15:0]        sync_count,
  output logic [7:0]         bad_cmds
);
  always_ff @(posedge clk) begin
    if (rst) begin
      fcmd        <= '0;
      fcmd_valid  <= '0;
      acq_running <= 1'b0;
      sync_count  <= '0;
      bad_cmds    <= '0;
    end else begin
      fcmd_valid <= '0;
      if (fcmd_in_valid) begin
        if (fcmd_known(fcmd_in)) begin
          fcmd       <= fcmd_in;
          fcmd_valid <= port_en;
          if (fcmd_in == FC_START) acq_running <= 1'b1;
          if (fcmd_in == FC_STOP)  acq_running <= 1'b0;
          if (fcmd_in == FC_SYNC)  sync_count  <= sync_count + 1'b1;
        end else bad_cmds <= bad_cmds + 1'b1;
      end
    end
  end
endmodule
