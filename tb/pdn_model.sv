// pdn_model -- behavioural model of the shared supply seen by the defense's
// rings: a resistive drop proportional to the current drawn.  The protected
// tenant's squarer and multiplier and every enabled noise set each pull the
// rail down by a fixed amount; with all sets on, the noise generator draws half
// of what the multiplier draws, the power budget the design aims for.
//
// Interface: sq_busy, mul_busy, set_en (one bit per noise set); vdd_mv is the
// resulting rail voltage in millivolts.  It reacts without delay.
module pdn_model #(
  parameter int unsigned NUM_SETS       = 7,
  parameter int unsigned VNOM_MV        = 1000,
  parameter int unsigned DROP_SQ_MV     = 20,
  parameter int unsigned DROP_MUL_MV    = 40,
  parameter int unsigned DROP_NOISE_MV  = 20   // all sets on
) (
  input  logic                sq_busy,
  input  logic                mul_busy,
  input  logic [NUM_SETS-1:0] set_en,
  output logic [15:0]         vdd_mv
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb begin
    int unsigned drop;
    drop = (sq_busy ? DROP_SQ_MV : 0) + (mul_busy ? DROP_MUL_MV : 0)
         + (DROP_NOISE_MV * $countones(set_en)) / NUM_SETS;
    vdd_mv = 16'(VNOM_MV - drop);
  end
endmodule
