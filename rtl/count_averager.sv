// count_averager -- averages the M oscillation counts of one sampling window
// into a single power sample.  M is a power of two, so the division is a right
// shift by log2(M) of the sum.
//
// Interface: capture (the counts are stable and should be taken this cycle),
// counts (M values of W bits), avg (W-bit average, floor of the mean),
// avg_valid (one-cycle pulse).  Timing: avg and avg_valid appear one reference
// clock after capture.  Each value is registered at capture, so this block is
// also the register stage where the ripple counts enter the reference domain.
//
// From the paper: average of the m counters with m a power of two.  Own
// choices: one pipeline stage, truncating division.
module count_averager #(
  parameter int unsigned M = 32,
  parameter int unsigned W = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                capture,
  input  logic [M-1:0][W-1:0] counts,
  output logic [W-1:0]        avg,
  output logic                avg_valid
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned SHIFT = $clog2(M);
  localparam int unsigned SW    = W + SHIFT;

  logic [SW-1:0] sum;

  always_comb begin
    sum = '0;
    for (int unsigned i = 0; i < M; i++) sum += SW'(counts[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      avg       <= '0;
      avg_valid <= 1'b0;
    end else begin
      avg_valid <= capture;
      if (capture) avg <= W'(sum >> SHIFT);
    end
  end

  initial begin
    if ((1 << SHIFT) != M) $error("count_averager: M must be a power of two");
  end
endmodule
