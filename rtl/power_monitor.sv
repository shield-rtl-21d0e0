// power_monitor -- RO-based power monitor: M RO counters placed next to the
// protected circuit, sampled together over one window and averaged.  A low
// sample means the local supply dropped (the protected circuit draws more
// current); a high sample means it is quiet.
//
// Interface: clk (reference clock f_ref), rst_n, vdd_mv (supply at each RO, one
// per counter; model input only), sample (W-bit average count), sample_valid
// (one-cycle pulse, once per window), ro_en (rings running, for observation).
// Timing: one sample per C_REF + SETTLE + 2 reference cycles; sample_valid
// comes one cycle after the capture phase.
//
// From the paper: M = 32 counters (the chosen design point of the exploration),
// 3-inverter rings, a T-FF chain per counter, averaging with M a power of two.
// Own choices: N = 64 flip-flops per counter (2048 flip-flops / 32 counters),
// the window sequence of sample_timer and C_REF.
module power_monitor
  import shield_pkg::*;
#(
  parameter int unsigned M          = 32,
  parameter int unsigned N          = 64,
  parameter int unsigned NUM_INV    = 3,
  parameter int unsigned T_STAGE_PS = 400,
  parameter int unsigned C_REF      = 4,
  parameter int unsigned SETTLE     = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [M-1:0][15:0]   vdd_mv,
  output logic [N-1:0]         sample,
  output logic                 sample_valid,
  output logic                 ro_en
);
  timeunit 1ns;
  timeprecision 1ps;

  logic                cnt_clr;
  logic                capture;
  sample_phase_e       phase;
  logic [M-1:0][N-1:0] counts;

  sample_timer #(.C_REF(C_REF), .SETTLE(SETTLE)) u_timer (
    .clk    (clk),
    .rst_n  (rst_n),
    .ro_en  (ro_en),
    .cnt_clr(cnt_clr),
    .capture(capture),
    .phase  (phase)
  );

  for (genvar i = 0; i < M; i++) begin : g_ro
    ro_counter #(.N(N), .NUM_INV(NUM_INV), .T_STAGE_PS(T_STAGE_PS)) u_ro (
      .en    (ro_en),
      .clr   (cnt_clr),
      .vdd_mv(vdd_mv[i]),
      .count (counts[i])
    );
  end

  count_averager #(.M(M), .W(N)) u_avg (
    .clk      (clk),
    .rst_n    (rst_n),
    .capture  (capture),
    .counts   (counts),
    .avg      (sample),
    .avg_valid(sample_valid)
  );

  // The counts are read only while the rings are stopped.
  a_read_when_stopped: assert property (@(posedge clk) disable iff (!rst_n)
    capture |-> !ro_en);
endmodule
