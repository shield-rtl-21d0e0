// tb_shield_top -- end-to-end run of the whole defense next to a modelled RSA
// tenant, at reduced size (4 monitor counters of 16 bits, 14 noise rings) and
// with a 1024-bit exponent.  The tenant (rsa_sm_model) exponentiates with a
// KEY_BITS-bit exponent, random from 64 bits up, otherwise the pattern 1,0,0,1
// repeated from bit 0 so that every mechanism occurs; a resistive supply model
// (pdn_model) turns its squarer, its multiplier and the enabled noise sets
// into the rail voltage seen by every ring.  The run has two phases with the
// same exponent:
//   A  thresholds left at their reset value: the noise never switches on, so
//      the monitor shows the unprotected trace;
//   B  the four thresholds loaded (each halfway between the quiet and the busy
//      count expected at that level): the defense runs.
// Checked: every sample lies between the counts of the lowest and the highest
// possible rail voltage; after every sample the level and set enables match a
// reference model of the run-time rule fed with the same samples; each
// mechanism (detection, step-up, switch-off on a low sample, switch-off after
// all sets were on) happens; quiet windows give lower samples under
// protection than without; the exponentiation result is correct.  The mean
// reaction time (samples from the start of a quiet bit until noise is on), the
// quiet-busy gap and the key bits a simple power analysis gets wrong are
// printed.
module tb_shield_top;
  timeunit 1ns;
  timeprecision 1ps;
  import shield_pkg::*;

  // design size (DUT parameters) and workload
  localparam int M = 4, N = 16, MON_NUM_INV = 3, C_REF = 4, SETTLE = 2;
  localparam int NG_RO = 14, NUM_SETS = 7;
  localparam int KEY_BITS = 1024;
  localparam int PERIOD = C_REF + SETTLE + 2;       // reference cycles per sample
  localparam int CYC_PER_BIT = 3 * PERIOD;          // three samples per key bit
  localparam int VNOM = 1000, D_SQ = 20, D_MUL = 40, D_NOISE = 40;

  logic clk = 1'b0, rst_n;
  logic [M-1:0][15:0] mon_vdd_mv;
  logic [15:0] vdd_mv;
  logic thr_wr_en;
  logic [LEVEL_W-1:0] thr_wr_idx;
  logic [N-1:0] thr_wr_data, sample;
  logic sample_valid;
  logic [NUM_SETS-1:0] set_en;
  logic [LEVEL_W-1:0] level;
  ctrl_state_e state;

  // tenant
  logic start;
  logic [31:0] base, modulus, result;
  logic [KEY_BITS-1:0] exponent;
  logic sq_busy, mul_busy, done;
  int unsigned bit_idx;

  always #50 clk = ~clk;   // 10 MHz reference clock, also the tenant's clock

  shield_top #(.M(M), .N(N), .MON_NUM_INV(MON_NUM_INV), .C_REF(C_REF), .SETTLE(SETTLE), .NG_RO(NG_RO), .NUM_SETS(NUM_SETS)) dut (
    .clk(clk), .rst_n(rst_n), .mon_vdd_mv(mon_vdd_mv), .ng_vdd_mv(vdd_mv),
    .thr_wr_en(thr_wr_en), .thr_wr_idx(thr_wr_idx), .thr_wr_data(thr_wr_data),
    .sample(sample), .sample_valid(sample_valid), .set_en(set_en), .level(level), .state(state));

  rsa_sm_model #(.KEY_BITS(KEY_BITS), .CYCLES_PER_BIT(CYC_PER_BIT)) u_rsa (
    .clk(clk), .start(start), .base(base), .modulus(modulus), .exponent(exponent),
    .sq_busy(sq_busy), .mul_busy(mul_busy), .bit_idx(bit_idx), .done(done), .result(result));

  pdn_model #(.NUM_SETS(NUM_SETS), .VNOM_MV(VNOM), .DROP_SQ_MV(D_SQ), .DROP_MUL_MV(D_MUL),
              .DROP_NOISE_MV(D_NOISE)) u_pdn (
    .sq_busy(sq_busy), .mul_busy(mul_busy), .set_en(set_en), .vdd_mv(vdd_mv));

  always_comb for (int i = 0; i < M; i++) mon_vdd_mv[i] = vdd_mv;

  int checks = 0, failures = 0;
  int n_samples = 0, n_detect = 0, n_step = 0, n_off_low = 0, n_off_full = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s @%0t", what, $time); end
  endtask

  // ---- expected counts -------------------------------------------------
  function automatic int cnt_at(int v_mv);
    real h; int k;
    h = real'(MON_NUM_INV + 1) * 0.4 * 1000.0 / v_mv;
    k = $rtoi(100.0 * C_REF / h);
    return (k + 1) / 2;
  endfunction

  function automatic int sets_on(int lvl);
    return (lvl == 0) ? 0 : (lvl == 1) ? 1 : (lvl == 2) ? 3 : NUM_SETS;
  endfunction

  function automatic int noise_mv(int lvl);
    return (D_NOISE * sets_on(lvl)) / NUM_SETS;
  endfunction

  function automatic logic [31:0] modexp_ltr(logic [31:0] b, logic [KEY_BITS-1:0] e, logic [31:0] n);
    longint unsigned acc;
    acc = 1;
    for (int i = KEY_BITS - 1; i >= 0; i--) begin
      acc = (acc * acc) % longint'(n);
      if (e[i]) acc = (acc * longint'(b)) % longint'(n);
    end
    return 32'(acc);
  endfunction

  // ---- reference model of the run-time rule ----------------------------
  int thr_model [4];
  int ref_level = 0;
  bit protect_phase = 0;

  // ---- per-window classification ---------------------------------------
  bit win_all_busy, win_all_quiet;
  real sum_q [2], sum_b [2];
  int  num_q [2], num_b [2];
  real bit_sum [2][KEY_BITS];
  int  bit_num [2][KEY_BITS];

  always @(posedge clk) begin
    if (dut.u_monitor.ro_en) begin
      if (mul_busy) win_all_quiet <= 1'b0; else win_all_busy <= 1'b0;
    end else if (dut.u_monitor.u_timer.phase == PH_CLEAR) begin
      win_all_busy <= 1'b1; win_all_quiet <= 1'b1;
    end
  end

  // reaction time: samples from the start of a quiet bit to noise on
  int react_sum = 0, react_num = 0, react_cnt = -1;

  always @(posedge clk) begin
    if (sample_valid && rst_n) begin
      int s, lo, hi, prev;
      s = int'(sample);
      n_samples++;
      // The very first window after reset may start from uncleared counters in
      // a two-state simulation (no clear edge at time zero); it is skipped.
      if (n_samples > 1) begin
      if (u_rsa.sq_busy) begin
        bit_sum[protect_phase][u_rsa.bit_idx] += s;
        bit_num[protect_phase][u_rsa.bit_idx]++;
      end
      lo = cnt_at(VNOM - D_SQ - D_MUL - D_NOISE) - 1;
      hi = cnt_at(VNOM) + 1;
      check(s >= lo && s <= hi, $sformatf("sample %0d outside [%0d,%0d]", s, lo, hi));
      if (u_rsa.sq_busy) begin
        if (win_all_quiet) begin sum_q[protect_phase] += s; num_q[protect_phase]++; end
        if (win_all_busy)  begin sum_b[protect_phase] += s; num_b[protect_phase]++; end
      end
      prev = ref_level;
      if (ref_level == 0) begin
        if (s > thr_model[0]) begin ref_level = 1; n_detect++; end
      end else if (s > thr_model[ref_level] && ref_level < 3) begin
        ref_level++; n_step++;
      end else begin
        if (ref_level == 3 && s > thr_model[3]) n_off_full++; else n_off_low++;
        ref_level = 0;
      end
      if (react_cnt >= 0) begin
        react_cnt++;
        if (ref_level != 0) begin react_sum += react_cnt; react_num++; react_cnt = -1; end
      end
      end
      fork
        begin
          int exp_lvl;
          exp_lvl = ref_level;
          repeat (4) @(negedge clk);
          check(int'(level) == exp_lvl, $sformatf("level %0d expected %0d", level, exp_lvl));
          check(int'($countones(set_en)) == sets_on(exp_lvl) && set_en == NUM_SETS'((1 << sets_on(exp_lvl)) - 1),
                $sformatf("set_en %b at level %0d", set_en, exp_lvl));
        end
      join_none
    end
  end

  // a quiet bit starts while the noise is off: start timing the reaction
  logic mul_busy_q;
  always @(posedge clk) begin
    mul_busy_q <= mul_busy;
    if (protect_phase && mul_busy_q && !mul_busy && ref_level == 0 && react_cnt < 0) react_cnt = 0;
  end

  task automatic run_exponentiation();
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    wait (done);
    check(result == modexp_ltr(base, exponent, modulus), "exponentiation result");
    repeat (2 * PERIOD) @(negedge clk);
  endtask

  initial begin
    real gap_a, gap_b, spa_thr;
    int  spa_err [2];
    rst_n = 1'b0; start = 1'b0;
    thr_wr_en = 1'b0; thr_wr_idx = '0; thr_wr_data = '0;
    for (int i = 0; i < 4; i++) thr_model[i] = 32'h7fffffff;   // reset value: above any sample
    for (int p = 0; p < 2; p++) begin
      sum_q[p] = 0; sum_b[p] = 0; num_q[p] = 0; num_b[p] = 0;
      for (int i = 0; i < KEY_BITS; i++) begin bit_sum[p][i] = 0; bit_num[p][i] = 0; end
    end
    // a random exponent; a short one gets the pattern 1,0,0,1,... (from bit 0)
    // so that every mechanism shows up
    for (int i = 0; i < KEY_BITS; i++)
      exponent[i] = (KEY_BITS < 64) ? (i % 4 == 0 || i % 4 == 3) : 1'($urandom_range(0, 1));
    exponent[0] = 1'b1;
    modulus = 32'hfffffffb;    // below 2^32, odd
    base = $urandom % modulus;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // phase A: unprotected
    protect_phase = 0;
    run_exponentiation();
    check(n_detect == 0, "no noise with thresholds at reset value");

    // phase B: load the thresholds and run again
    for (int l = 0; l < 4; l++) begin
      int cq, cb;
      cq = cnt_at(VNOM - D_SQ - noise_mv(l));
      cb = cnt_at(VNOM - D_SQ - D_MUL - noise_mv(l));
      @(negedge clk);
      thr_wr_en = 1'b1; thr_wr_idx = LEVEL_W'(l); thr_wr_data = N'((cq + cb) / 2);
      thr_model[l] = (cq + cb) / 2;
      $display("threshold[%0d] = %0d (quiet %0d, busy %0d)", l, (cq + cb) / 2, cq, cb);
    end
    @(negedge clk) thr_wr_en = 1'b0;
    protect_phase = 1;
    run_exponentiation();

    gap_a = sum_q[0] / num_q[0] - sum_b[0] / num_b[0];
    gap_b = sum_q[1] / num_q[1] - sum_b[1] / num_b[1];
    $display("samples=%0d detect=%0d step=%0d off_low=%0d off_full=%0d", n_samples, n_detect, n_step, n_off_low, n_off_full);
    $display("quiet-busy gap: unprotected %.2f, protected %.2f counts", gap_a, gap_b);
    if (react_num > 0) $display("mean reaction time %.2f samples over %0d quiet bits", real'(react_sum) / react_num, react_num);
    check(num_q[0] > 0 && num_b[0] > 0 && num_q[1] > 0 && num_b[1] > 0, "both kinds of window seen");
    // Simple power analysis as an attacker would do it: per key bit, the mean
    // sample compared with the midpoint of the unprotected quiet/busy means.
    spa_thr = (sum_q[0] / num_q[0] + sum_b[0] / num_b[0]) / 2.0;
    for (int p = 0; p < 2; p++) begin
      spa_err[p] = 0;
      for (int i = 0; i < KEY_BITS; i++)
        if (bit_num[p][i] > 0 && ((bit_sum[p][i] / bit_num[p][i] < spa_thr) != exponent[i])) spa_err[p]++;
    end
    $display("key bits guessed wrong by simple power analysis: unprotected %0d, protected %0d of %0d",
             spa_err[0], spa_err[1], KEY_BITS);
    check(sum_q[1] / num_q[1] < sum_q[0] / num_q[0], "noise lowers the samples of quiet windows");
    check(n_detect > 0,   "detection happened");
    check(n_step > 0,     "step-up happened");
    check(n_off_low > 0,  "switch-off on a low sample happened");
    check(n_off_full > 0, "switch-off after all sets happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * KEY_BITS * CYC_PER_BIT + 200 * PERIOD) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
