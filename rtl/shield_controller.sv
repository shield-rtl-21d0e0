// shield_controller -- run-time controller that turns power samples into
// noise-generator enables.
//
// With all noise off (level 0) it compares each sample with the initial
// threshold.  A sample above it means the protected circuit is quiet (its
// supply share is high, the rings run fast), so the controller switches on the
// first activation step.  On every following sample it asks "obfuscated?":
// while samples stay above the threshold of the current level it adds one more
// step; on the first sample not above the threshold, or on the first sample
// after all steps are on, it switches the whole noise generator off and starts
// over with the initial threshold.
//
//   S_SAMPLE --valid--> S_DETECT --above--> S_ENABLE --> S_OBF_CHECK
//      ^                   |not above                      | valid & above & level<3 -> S_ENABLE
//      +-------------------+                               | valid & (not above | level=3)
//      +---------------------- S_DISABLE <-----------------+
//
// Interface: sample / sample_valid from the power monitor (sample is held until
// the next pulse), threshold write port, set_en (one enable per noise set),
// level, state and cmp for observation.  Timing: a detecting sample turns on
// the first step two clocks after its sample_valid; the noise goes off two
// clocks after the deciding sample; set_en is registered.
//
// From the paper: the flow sample -> detect -> enable -> obfuscated? ->
// enable / disable, a threshold per level from registers chosen by a 2-bit
// modulo counter, increase on samples above the threshold, full switch-off on
// the first lower sample or after all ROs were active.  Own choices: the state
// encoding, "above" meaning strictly greater, and enabling 1, 3 and then all 7
// sets at levels 1, 2 and 3.
module shield_controller
  import shield_pkg::*;
#(
  parameter int unsigned W        = 64,
  parameter int unsigned NUM_SETS = 7
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [W-1:0]        sample,
  input  logic                sample_valid,
  input  logic                thr_wr_en,
  input  logic [LEVEL_W-1:0]  thr_wr_idx,
  input  logic [W-1:0]        thr_wr_data,
  output logic [NUM_SETS-1:0] set_en,
  output logic [LEVEL_W-1:0]  level,
  output ctrl_state_e         state,
  output cmp_t                cmp
);
  timeunit 1ns;
  timeprecision 1ps;

  ctrl_state_e  state_d;
  logic [W-1:0] thr;
  logic         lvl_inc, lvl_clr;

  threshold_bank #(.W(W)) u_thr (
    .clk    (clk),
    .rst_n  (rst_n),
    .wr_en  (thr_wr_en),
    .wr_idx (thr_wr_idx),
    .wr_data(thr_wr_data),
    .sel    (level),
    .thr    (thr)
  );

  magnitude_comparator #(.W(W)) u_cmp (
    .a  (sample),
    .b  (thr),
    .cmp(cmp)
  );

  level_counter u_level (
    .clk  (clk),
    .rst_n(rst_n),
    .inc  (lvl_inc),
    .clr  (lvl_clr),
    .level(level)
  );

  always_comb begin
    state_d = state;
    lvl_inc = 1'b0;
    lvl_clr = 1'b0;
    unique case (state)
      S_SAMPLE:    if (sample_valid) state_d = S_DETECT;
      S_DETECT:    state_d = cmp.gt ? S_ENABLE : S_SAMPLE;
      S_ENABLE: begin
        lvl_inc = 1'b1;
        state_d = S_OBF_CHECK;
      end
      S_OBF_CHECK: if (sample_valid) begin
        if (!cmp.gt || level == LEVEL_W'(MAX_LEVEL)) state_d = S_DISABLE;
        else                                         state_d = S_ENABLE;
      end
      S_DISABLE: begin
        lvl_clr = 1'b1;
        state_d = S_SAMPLE;
      end
      default: begin
        lvl_clr = 1'b1;
        state_d = S_SAMPLE;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_SAMPLE;
    else        state <= state_d;
  end

  // Registered decode of the level into set enables: sets 0 .. n-1 are on.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) set_en <= '0;
    else begin
      for (int unsigned s = 0; s < NUM_SETS; s++)
        set_en[s] <= (s < sets_at_level(level, NUM_SETS));
    end
  end

  a_noise_off_at_level0: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_SAMPLE && $past(state) == S_SAMPLE && level == '0) |-> set_en == '0);
  a_level_only_in_check: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_SAMPLE || state == S_DETECT) |-> level == '0);
endmodule
