// tff_ripple_counter -- chain of N toggle flip-flops counting rising edges of
// clk_in, as used behind a ring oscillator.
//
// Stage 0 toggles on every rising edge of clk_in; stage i toggles on every
// rising edge of the inverted output of stage i-1, i.e. when stage i-1 falls
// from 1 to 0.  The chain is therefore a binary up-counter whose bit i is
// count[i].  No stage runs faster than half the ring frequency, which is why a
// T-FF chain is used instead of a synchronous counter clocked by the ring.
//
// Interface: clk_in (ring output), clr (asynchronous, active high, clears every
// stage), count (N-bit value).  Timing: count is only stable some ripple delay
// after the last edge of clk_in, so it must be read while the ring is stopped.
//
// From the paper: T flip-flops with T tied to 1 in a chain of n stages.  Own
// choices: the inverted-output clocking between stages and the asynchronous
// clear.  Each stage has its own derived clock by construction.
module tff_ripple_counter #(
  parameter int unsigned N = 64
) (
  input  logic         clk_in,
  input  logic         clr,
  output logic [N-1:0] count
);
  timeunit 1ns;
  timeprecision 1ps;

  for (genvar i = 0; i < N; i++) begin : g_stage
    logic stage_clk;
    logic q;
    if (i == 0) begin : g_first
      assign stage_clk = clk_in;
    end else begin : g_next
      assign stage_clk = ~g_stage[i-1].q;
    end
    always_ff @(posedge stage_clk or posedge clr) begin
      if (clr) q <= 1'b0;
      else     q <= ~q;   // T = 1
    end
    assign count[i] = q;
  end
endmodule
