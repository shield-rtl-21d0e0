// sample_timer -- reference counter that defines the power monitor's sampling
// window.  The ROs run while the reference counter counts C_REF cycles of the
// reference clock; then they are stopped, their counts are read and the
// counters are cleared.  The count C_RO read from a counter then gives the
// ring frequency as f_RO = C_RO * f_ref / C_REF.
//
// One window is C_REF + SETTLE + 2 reference cycles:
//   PH_RUN     C_REF cycles, ro_en = 1
//   PH_SETTLE  SETTLE cycles, ro_en = 0, ripple chains settle
//   PH_CAPTURE 1 cycle, capture = 1 (counts are stable, safe to register)
//   PH_CLEAR   1 cycle, cnt_clr = 1
// cnt_clr is also held high during reset.  All outputs are flip-flops and
// change together with phase.
//
// From the paper: run until the reference counter reaches a predetermined
// C_ref, then read the counts.  Own choices: stopping the rings before reading
// (so the asynchronous ripple counts cross into the reference domain without a
// synchronizer), the settle and clear cycles, and C_REF = 4 (not given).
module sample_timer
  import shield_pkg::*;
#(
  parameter int unsigned C_REF  = 4,
  parameter int unsigned SETTLE = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          ro_en,
  output logic          cnt_clr,
  output logic          capture,
  output sample_phase_e phase
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned CW = $clog2((C_REF > SETTLE ? C_REF : SETTLE) + 1);

  sample_phase_e phase_d;
  logic [CW-1:0] cnt, cnt_d;

  always_comb begin
    phase_d = phase;
    cnt_d   = cnt + 1'b1;
    unique case (phase)
      PH_RUN:     if (cnt == CW'(C_REF - 1))  begin phase_d = PH_SETTLE;  cnt_d = '0; end
      PH_SETTLE:  if (cnt == CW'(SETTLE - 1)) begin phase_d = PH_CAPTURE; cnt_d = '0; end
      PH_CAPTURE: begin phase_d = PH_CLEAR; cnt_d = '0; end
      PH_CLEAR:   begin phase_d = PH_RUN;   cnt_d = '0; end
      default:    begin phase_d = PH_CLEAR; cnt_d = '0; end
    endcase
  end

  // The outputs are flip-flops of their own, decoded from the next phase, so
  // the asynchronous counter clear cannot glitch while the phase changes.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= PH_CLEAR;
      cnt     <= '0;
      ro_en   <= 1'b0;
      capture <= 1'b0;
      cnt_clr <= 1'b1;
    end else begin
      phase   <= phase_d;
      cnt     <= cnt_d;
      ro_en   <= (phase_d == PH_RUN);
      capture <= (phase_d == PH_CAPTURE);
      cnt_clr <= (phase_d == PH_CLEAR);
    end
  end

  initial begin
    if (C_REF < 1 || SETTLE < 1) $error("sample_timer: C_REF and SETTLE must be >= 1");
  end
endmodule
