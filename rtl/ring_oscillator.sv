// ring_oscillator -- BEHAVIOURAL MODEL, not synthesizable.  Models one
// enable-gated ring oscillator: an AND gate (enable, feedback) followed by an odd
// number of inverters whose last output is fed back to the AND gate.  On an FPGA
// this is a LUT loop placed by hand; in simulation the ring is replaced by a
// timed process.
//
// Frequency: every stage (the AND gate and each inverter) has a delay
// T_STAGE_PS at the nominal supply VNOM_MV, scaled by VNOM_MV / vdd_mv (whole
// picoseconds), so the
// frequency rises and falls with the local supply voltage as f_RO ~ k*V + f0
// predicts to first order.  A half period is (NUM_INV + 1) stage delays.
//
// Interface: en (high = oscillate), vdd_mv (local supply in millivolts; a
// stand-in for the shared power rail that the real part senses without a pin),
// ro_out (ring output, goes to the first T flip-flop).  With en low the AND
// output is 0 and the odd inverter chain holds ro_out at 1; after en rises the
// first falling edge comes one half period later.
//
// From the paper: AND-gated ring with an odd number of inverters, three
// inverters in the power-monitor ring.  Own choices: the stage delay, the
// voltage scaling law and the millivolt input.
module ring_oscillator #(
  parameter int unsigned NUM_INV    = 3,
  parameter int unsigned T_STAGE_PS = 400,
  parameter int unsigned VNOM_MV    = 1000
) (
  input  logic        en,
  input  logic [15:0] vdd_mv,
  output logic        ro_out
);
  timeunit 1ps;
  timeprecision 1ps;

  // Half period in picoseconds, rounded down.
  int unsigned half_period;

  always_comb begin
    if (vdd_mv == 16'd0)
      half_period = 1000000;  // no supply: effectively stopped
    else
      half_period = ((NUM_INV + 1) * T_STAGE_PS * VNOM_MV) / 32'(vdd_mv);
  end

  initial ro_out = 1'b1;

  always begin
    if (!en) begin
      ro_out = 1'b1;
      @(posedge en);
    end
    #(half_period);
    if (en) ro_out = ~ro_out;
  end

  initial begin
    if (NUM_INV % 2 != 1) $error("ring_oscillator: NUM_INV must be odd");
  end
endmodule
