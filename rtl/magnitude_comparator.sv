// magnitude_comparator -- combinational unsigned comparator of a power sample
// (A) with the selected threshold (B), giving the three outputs A<B, A=B, A>B.
// Exactly one output is high.
//
// From the paper: a combinational comparator with outputs A<B, A=B and A>B.
// Own choices: which operand is A (the sample) and the W-bit unsigned width;
// the gate-level form is left to synthesis.
module magnitude_comparator
  import shield_pkg::*;
#(
  parameter int unsigned W = 64
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output cmp_t         cmp
);
  timeunit 1ns;
  timeprecision 1ps;

  always_comb begin
    cmp.lt = (a <  b);
    cmp.eq = (a == b);
    cmp.gt = (a >  b);
  end
endmodule
