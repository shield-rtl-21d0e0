// shield_top -- SHIELD: an RO-based power monitor, the run-time controller and
// an RO noise generator, placed between a protected tenant and the rest of a
// shared FPGA.
//
// The monitor's M rings sit next to the protected circuit and sense its supply;
// every window the controller compares the averaged count with the threshold
// of the current level and steps the noise generator up while the protected
// circuit stays quiet, and switches it off once the monitor sees the supply
// drop (the protected circuit is busy) or all sets have been on for a sample.
//
// Interface: clk (reference clock, 10 MHz in the chosen design point), rst_n,
// mon_vdd_mv / ng_vdd_mv (supply seen by the monitor rings and by the noise
// rings; inputs of the ring models, driven by a supply-network model in
// simulation), thr_wr_* (threshold loading, done by the host processor after
// the offline analysis), sample / sample_valid (the power trace, also read out
// by the host), set_en, level, state (for observation).
// Timing: one sample per C_REF + SETTLE + 2 reference cycles.
//
// From the paper: the three parts and their connection, M = 32 monitor
// counters, 7 noise sets, 8192 noise rings.  Own choices: see the blocks.  The
// noise flip-flop outputs are left unconnected here on purpose: the rings exist
// only to draw power.
module shield_top
  import shield_pkg::*;
#(
  parameter int unsigned M             = 32,
  parameter int unsigned N             = 64,
  parameter int unsigned MON_NUM_INV   = 3,
  parameter int unsigned C_REF         = 4,
  parameter int unsigned SETTLE        = 2,
  parameter int unsigned NG_RO         = 8192,
  parameter int unsigned NUM_SETS      = 7,
  parameter int unsigned NG_NUM_INV    = 1,
  parameter int unsigned T_STAGE_PS    = 400
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [M-1:0][15:0]  mon_vdd_mv,
  input  logic [15:0]         ng_vdd_mv,
  input  logic                thr_wr_en,
  input  logic [LEVEL_W-1:0]  thr_wr_idx,
  input  logic [N-1:0]        thr_wr_data,
  output logic [N-1:0]        sample,
  output logic                sample_valid,
  output logic [NUM_SETS-1:0] set_en,
  output logic [LEVEL_W-1:0]  level,
  output ctrl_state_e         state
);
  timeunit 1ns;
  timeprecision 1ps;

  logic mon_ro_en;
  cmp_t cmp;

  power_monitor #(
    .M(M), .N(N), .NUM_INV(MON_NUM_INV), .T_STAGE_PS(T_STAGE_PS),
    .C_REF(C_REF), .SETTLE(SETTLE)
  ) u_monitor (
    .clk         (clk),
    .rst_n       (rst_n),
    .vdd_mv      (mon_vdd_mv),
    .sample      (sample),
    .sample_valid(sample_valid),
    .ro_en       (mon_ro_en)
  );

  shield_controller #(.W(N), .NUM_SETS(NUM_SETS)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .sample      (sample),
    .sample_valid(sample_valid),
    .thr_wr_en   (thr_wr_en),
    .thr_wr_idx  (thr_wr_idx),
    .thr_wr_data (thr_wr_data),
    .set_en      (set_en),
    .level       (level),
    .state       (state),
    .cmp         (cmp)
  );

  noise_generator #(
    .N_RO(NG_RO), .NUM_SETS(NUM_SETS), .NUM_INV(NG_NUM_INV), .T_STAGE_PS(T_STAGE_PS)
  ) u_noise (
    .set_en(set_en),
    .vdd_mv(ng_vdd_mv),
    .tff_q ()
  );
endmodule
