// shield_pkg -- types and constants shared by the SHIELD power-obfuscation blocks.
//
// SHIELD watches the supply of a shared FPGA with ring-oscillator (RO) counters
// and switches sets of noise ROs on and off so that the power drawn by a
// protected tenant (an RSA core) stops showing its key bits.  This package holds
// the controller state encoding, the phases of the monitor's sampling window and
// the mapping from activation level to enabled noise sets.
//
// Follows the paper: four threshold levels picked by a 2-bit modulo counter,
// seven noise sets, the controller states of the run-time flow (sample, detect,
// enable, obfuscated?, disable).  Own choices: the state and phase encodings and
// the way the three activation steps are spread over the seven sets (1, 3, 7).
package shield_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  // Activation levels: level 0 = all noise off, levels 1..3 = one more step each.
  localparam int unsigned LEVEL_W    = 2;
  localparam int unsigned NUM_LEVELS = 1 << LEVEL_W;   // 4 threshold registers
  localparam int unsigned MAX_LEVEL  = NUM_LEVELS - 1; // "all ROs activated"

  // Run-time controller states (one per box of the run-time flow chart).
  typedef enum logic [2:0] {
    S_SAMPLE    = 3'd0,  // wait for a power sample with all noise off
    S_DETECT    = 3'd1,  // compare it with the initial threshold
    S_ENABLE    = 3'd2,  // switch on one more activation step
    S_OBF_CHECK = 3'd3,  // "Obfuscated?" on the next sample
    S_DISABLE   = 3'd4   // switch the whole noise generator off
  } ctrl_state_e;

  // Phases of one sampling window of the power monitor.
  typedef enum logic [1:0] {
    PH_RUN     = 2'd0,  // ROs enabled, counters counting
    PH_SETTLE  = 2'd1,  // ROs stopped, ripple counters settle
    PH_CAPTURE = 2'd2,  // counts copied into the reference-clock domain
    PH_CLEAR   = 2'd3   // counters cleared for the next window
  } sample_phase_e;

  // Result of the combinational comparator, A = power sample, B = threshold.
  typedef struct packed {
    logic lt;
    logic eq;
    logic gt;
  } cmp_t;

  // Number of noise sets switched on at a level: 2^level - 1, and all sets at
  // the top level, clipped to the number of sets that exist.
  function automatic int unsigned sets_at_level(input logic [LEVEL_W-1:0] level,
                                                input int unsigned num_sets);
    int unsigned n;
    n = (1 << level) - 1;
    if (level == LEVEL_W'(MAX_LEVEL)) n = num_sets;
    if (n > num_sets) n = num_sets;
    return n;
  endfunction

endpackage
