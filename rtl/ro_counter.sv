// ro_counter -- RO-based counter: one ring oscillator driving a chain of N
// toggle flip-flops.  Its count over a fixed window is proportional to the ring
// frequency, and so to the supply voltage at the ring's location.
//
// Interface: en (ring enable), clr (asynchronous counter clear), vdd_mv (local
// supply seen by the ring model), count (N-bit oscillation count).  Timing:
// count increments on each rising edge of the ring output; read it only while
// en is low and a few ring-stage delays have passed.
//
// From the paper: the structure (AND-gated ring of three inverters feeding a
// chain of n T-FFs).  Own choices: the clear input and the default N = 64,
// which is the 2048 flip-flops of the chosen monitor divided by its 32 counters.
module ro_counter #(
  parameter int unsigned N          = 64,
  parameter int unsigned NUM_INV    = 3,
  parameter int unsigned T_STAGE_PS = 400
) (
  input  logic         en,
  input  logic         clr,
  input  logic [15:0]  vdd_mv,
  output logic [N-1:0] count
);
  timeunit 1ns;
  timeprecision 1ps;

  (* keep *) logic ro_out;

  ring_oscillator #(.NUM_INV(NUM_INV), .T_STAGE_PS(T_STAGE_PS)) u_ring (
    .en    (en),
    .vdd_mv(vdd_mv),
    .ro_out(ro_out)
  );

  tff_ripple_counter #(.N(N)) u_count (
    .clk_in(ro_out),
    .clr   (clr),
    .count (count)
  );
endmodule
