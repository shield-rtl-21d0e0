// level_counter -- 2-bit modulo counter holding the activation level of the
// noise generator (0 = off, 1..3 = activation steps taken).  It also selects
// the threshold for the next comparison.
//
// Interface: inc adds one modulo 4, clr returns to 0 and wins over inc.
// Timing: the new level is visible one clock after inc or clr.
//
// From the paper: a 2-bit modulo counter driving the threshold multiplexer.
// Own choices: the clear input and its priority.
module level_counter
  import shield_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               inc,
  input  logic               clr,
  output logic [LEVEL_W-1:0] level
);
  timeunit 1ns;
  timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   level <= '0;
    else if (clr) level <= '0;
    else if (inc) level <= level + 1'b1;  // wraps 3 -> 0
  end
endmodule
