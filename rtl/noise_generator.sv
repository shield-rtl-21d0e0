// noise_generator -- bank of N_RO small ring oscillators, split into NUM_SETS
// sets with one enable each.  An enabled ring and its toggle flip-flop switch
// continuously and draw dynamic power from the shared supply; this is the
// controlled noise that hides the protected circuit's quiet phases.
//
// Ring r belongs to set floor(r * NUM_SETS / N_RO), so the sets differ in size
// by at most one ring.  Each ring is an AND gate with NUM_INV inverters and a
// T flip-flop (T = 1) on its output.  The ring itself is still a
// combinational loop; the flip-flop gives the loop a registered load, which
// keeps FPGA tools' loop checks from flagging and removing it.  tff_q brings the flip-flop outputs out so that their
// activity can be observed; on an FPGA they are left unloaded and kept with a
// keep attribute.
//
// Interface: set_en (one per set), vdd_mv (supply of the ring models),
// tff_q (one bit per ring).  Timing: a ring starts toggling one half period
// after its set enable rises and stops when it falls.
//
// From the paper: seven sets, single-inverter rings with a T-FF, 8192 rings in
// the largest evaluated configuration (the one with the 166x result).  Own
// choices: equal split of the rings over the sets, NUM_INV = 1 and the model's
// stage delay.
module noise_generator #(
  parameter int unsigned N_RO       = 8192,
  parameter int unsigned NUM_SETS   = 7,
  parameter int unsigned NUM_INV    = 1,
  parameter int unsigned T_STAGE_PS = 400
) (
  input  logic [NUM_SETS-1:0] set_en,
  input  logic [15:0]         vdd_mv,
  output logic [N_RO-1:0]     tff_q
);
  timeunit 1ns;
  timeprecision 1ps;

  for (genvar r = 0; r < N_RO; r++) begin : g_ro
    localparam int unsigned SET = (r * NUM_SETS) / N_RO;
    (* keep *) logic ro_out;

    ring_oscillator #(.NUM_INV(NUM_INV), .T_STAGE_PS(T_STAGE_PS)) u_ring (
      .en    (set_en[SET]),
      .vdd_mv(vdd_mv),
      .ro_out(ro_out)
    );

    (* keep *) tff_ripple_counter #(.N(1)) u_tff (
      .clk_in(ro_out),
      .clr   (1'b0),
      .count (tff_q[r:r])
    );
  end
endmodule
