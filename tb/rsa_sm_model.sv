// rsa_sm_model -- behavioural model of the protected tenant: an RSA modular
// exponentiation with the square-and-multiply loop, scanned from the least
// significant exponent bit.  Each loop iteration takes CYCLES_PER_BIT clocks;
// the squarer (S = S*S mod N) works in every iteration and the multiplier
// (R = R*S mod N) only when the exponent bit is 1, which is the power leak the
// defense hides.  The arithmetic uses a modulus below 2^32 so that plain 64-bit
// products suffice; the exponent may be as long as KEY_BITS.
//
// Interface: start (one-cycle pulse), base, modulus, exponent; sq_busy and
// mul_busy tell the supply model which unit draws current; bit_idx is the
// iteration in progress; done rises when result is valid.
module rsa_sm_model #(
  parameter int unsigned KEY_BITS       = 1024,
  parameter int unsigned CYCLES_PER_BIT = 24
) (
  input  logic                clk,
  input  logic                start,
  input  logic [31:0]         base,
  input  logic [31:0]         modulus,
  input  logic [KEY_BITS-1:0] exponent,
  output logic                sq_busy,
  output logic                mul_busy,
  output int unsigned         bit_idx,
  output logic                done,
  output logic [31:0]         result
);
  timeunit 1ns;
  timeprecision 1ps;

  longint unsigned r, s;
  logic running = 1'b0;
  int unsigned cyc;

  initial begin
    sq_busy = 1'b0; mul_busy = 1'b0; done = 1'b0; bit_idx = 0; result = '0; cyc = 0;
  end

  always @(posedge clk) begin
    if (start) begin
      r = 1; s = longint'(base) % longint'(modulus);
      running <= 1'b1; done <= 1'b0; bit_idx <= 0; cyc <= 0;
      sq_busy <= 1'b1; mul_busy <= exponent[0];
    end else if (running) begin
      if (cyc == CYCLES_PER_BIT - 1) begin
        // end of iteration bit_idx: commit its arithmetic
        if (exponent[bit_idx]) r = (r * s) % longint'(modulus);
        s = (s * s) % longint'(modulus);
        cyc <= 0;
        if (bit_idx == KEY_BITS - 1) begin
          running <= 1'b0; done <= 1'b1; result <= 32'(r);
          sq_busy <= 1'b0; mul_busy <= 1'b0;
        end else begin
          bit_idx <= bit_idx + 1;
          mul_busy <= exponent[bit_idx + 1];
        end
      end else cyc <= cyc + 1;
    end
  end
endmodule
