// tb_shield_controller -- drives the controller with sample sequences, one
// sample every 8 cycles as the monitor delivers them, and compares the level
// and set enables with a reference model of the run-time rule:
//   level 0: sample > thr[0]             -> level 1
//   level k: sample > thr[k] and k < 3   -> level k+1
//            otherwise                   -> level 0 (all noise off)
// Sets on at levels 0..3: 0, 1, 3, 7.  Counts each mechanism (detection,
// step-up, switch-off on a low sample, switch-off after all sets were on) and
// checks the reaction latency from sample_valid to set_en.
module tb_shield_controller;
  timeunit 1ns;
  timeprecision 1ps;
  import shield_pkg::*;

  localparam int W = 16, NUM_SETS = 7;
  logic clk = 1'b0, rst_n;
  logic [W-1:0] sample, thr_wr_data;
  logic sample_valid, thr_wr_en;
  logic [1:0] thr_wr_idx, level;
  logic [NUM_SETS-1:0] set_en;
  ctrl_state_e state;
  cmp_t cmp;
  int checks = 0, failures = 0;
  int n_detect = 0, n_step = 0, n_off_low = 0, n_off_full = 0;

  shield_controller #(.W(W), .NUM_SETS(NUM_SETS)) dut (
    .clk(clk), .rst_n(rst_n), .sample(sample), .sample_valid(sample_valid),
    .thr_wr_en(thr_wr_en), .thr_wr_idx(thr_wr_idx), .thr_wr_data(thr_wr_data),
    .set_en(set_en), .level(level), .state(state), .cmp(cmp));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  int thr [4] = '{65535, 65535, 65535, 65535};
  int thr_cfg [4] = '{100, 90, 80, 70};
  int ref_level = 0;
  logic [6:0] masks [4] = '{7'b0000000, 7'b0000001, 7'b0000111, 7'b1111111};

  task automatic give_sample(input int s);
    int prev;
    @(negedge clk);
    sample = W'(s); sample_valid = 1'b1;
    @(negedge clk);
    sample_valid = 1'b0;
    prev = ref_level;
    if (ref_level == 0) begin
      if (s > thr[0]) begin ref_level = 1; n_detect++; end
    end else if (s > thr[ref_level] && ref_level < 3) begin
      ref_level++; n_step++;
    end else begin
      if (ref_level == 3 && s > thr[3]) n_off_full++; else n_off_low++;
      ref_level = 0;
    end
    // the new enables are in place within 4 cycles of the sample
    repeat (3) @(negedge clk);
    check(int'(level) == ref_level, $sformatf("sample %0d: level %0d expected %0d", s, level, ref_level));
    check(set_en == masks[ref_level], $sformatf("sample %0d: set_en %b expected %b", s, set_en, masks[ref_level]));
    repeat (3) @(negedge clk);   // 8 cycles per sample in all
  endtask

  initial begin
    rst_n = 1'b0; sample = '0; sample_valid = 1'b0;
    thr_wr_en = 1'b0; thr_wr_idx = '0; thr_wr_data = '0;
    #22 rst_n = 1'b1;
    // before the thresholds are loaded nothing is detected
    give_sample(16'hfff0);
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      thr_wr_en = 1'b1; thr_wr_idx = 2'(i); thr_wr_data = W'(thr_cfg[i]);
      thr[i] = thr_cfg[i];
    end
    @(negedge clk) thr_wr_en = 1'b0;
    // directed: off, detect, step, step, off after full, detect, off on low
    give_sample(50);  give_sample(120); give_sample(95); give_sample(85);
    give_sample(200); give_sample(120); give_sample(60); give_sample(100);
    // equal to the threshold is not above it
    give_sample(101); give_sample(90);
    // random
    for (int t = 0; t < 300; t++) give_sample($urandom_range(50, 130));
    check(n_detect > 0,   "detection happened");
    check(n_step > 0,     "step-up happened");
    check(n_off_low > 0,  "switch-off on a low sample happened");
    check(n_off_full > 0, "switch-off after all sets happened");
    $display("detect=%0d step=%0d off_low=%0d off_full=%0d", n_detect, n_step, n_off_low, n_off_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
