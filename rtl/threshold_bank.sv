// threshold_bank -- the predefined detection thresholds, one per activation
// level, held in registers and selected by a multiplexer.
//
// Activating noise raises the mean power, so each activation level needs its
// own threshold to tell the next peak from the noise already added; the
// controller goes back to the initial threshold (level 0) when all noise is off.
//
// Interface: wr_en / wr_idx / wr_data load one threshold (from the host that
// configures the defense after the offline analysis), sel picks the level whose
// threshold drives thr.  Timing: a write takes effect on the next clock edge;
// thr follows sel combinationally.
//
// From the paper: four threshold registers, a multiplexer steered by the 2-bit
// level counter.  Own choices: the write port and the reset value (all ones, so
// no fluctuation is detected before the thresholds are loaded).
module threshold_bank
  import shield_pkg::*;
#(
  parameter int unsigned W = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_en,
  input  logic [LEVEL_W-1:0] wr_idx,
  input  logic [W-1:0]       wr_data,
  input  logic [LEVEL_W-1:0] sel,
  output logic [W-1:0]       thr
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [W-1:0] thr_q [NUM_LEVELS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_LEVELS; i++) thr_q[i] <= '1;
    end else if (wr_en) begin
      thr_q[wr_idx] <= wr_data;
    end
  end

  assign thr = thr_q[sel];
endmodule
