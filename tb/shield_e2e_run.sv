// shield_e2e_run -- one self-contained end-to-end run of the defense, sized by
// parameters, for sweeping the monitor size and the reference clock.  It holds
// a shield_top, a modelled RSA tenant (rsa_sm_model) on its own fixed 10 MHz
// clock, and the resistive supply model (pdn_model).  The reference clock of
// the defense has half period REF_HALF_NS, so the defense may sample faster
// than the tenant runs; each key bit lasts CYC_PER_BIT tenant cycles.
//
// Like tb_shield_top it exponentiates twice with the same random exponent:
// first with the thresholds at their reset value (unprotected), then with the
// four thresholds loaded halfway between the expected quiet and busy counts
// of each level.  It checks every sample against the counts of the lowest and
// highest rail voltage, checks level and set enables four reference edges
// after each sample against a reference model of the run-time rule, checks the
// exponentiation result and, if REQUIRE_ALL is set, that detection, step-up and
// both kinds of switch-off each happened.  It prints the mechanism counts, the
// mean reaction time in samples and the number of key bits a simple power
// analysis gets wrong with and without protection.
//
// Interface: no inputs; `finished` rises when both runs are over, with
// `checks` and `failures` final.  Ring timing follows the model in
// ring_oscillator (400 ps per stage at 1000 mV), which the expected counts
// below repeat independently.  Holding the tenant at 10 MHz while the
// reference clock changes follows the evaluation setup; the supply drops and
// the threshold choice are this bench's own.
module shield_e2e_run #(
  parameter int    M            = 32,
  parameter int    N            = 16,
  parameter int    NG_RO        = 14,
  parameter int    REF_HALF_NS  = 50,    // 10 MHz reference clock
  parameter int    KEY_BITS     = 256,
  parameter bit    REQUIRE_ALL  = 1'b1,
  parameter string NAME         = "run"
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  timeunit 1ns;
  timeprecision 1ps;
  import shield_pkg::*;

  localparam int MON_NUM_INV = 3, C_REF = 4, SETTLE = 2, NUM_SETS = 7;
  localparam int PERIOD = C_REF + SETTLE + 2;       // reference cycles per sample
  localparam int CYC_PER_BIT = 24;                  // tenant cycles per key bit
  localparam int VNOM = 1000, D_SQ = 20, D_MUL = 40, D_NOISE = 40;

  logic clk = 1'b0, rsa_clk = 1'b0, rst_n;
  logic [M-1:0][15:0] mon_vdd_mv;
  logic [15:0] vdd_mv;
  logic thr_wr_en;
  logic [LEVEL_W-1:0] thr_wr_idx;
  logic [N-1:0] thr_wr_data, sample;
  logic sample_valid;
  logic [NUM_SETS-1:0] set_en;
  logic [LEVEL_W-1:0] level;
  ctrl_state_e state;

  logic start;
  logic [31:0] base, modulus, result;
  logic [KEY_BITS-1:0] exponent;
  logic sq_busy, mul_busy, done;
  int unsigned bit_idx;

  always #(REF_HALF_NS) clk = ~clk;
  always #50 rsa_clk = ~rsa_clk;

  shield_top #(.M(M), .N(N), .MON_NUM_INV(MON_NUM_INV), .C_REF(C_REF), .SETTLE(SETTLE), .NG_RO(NG_RO), .NUM_SETS(NUM_SETS)) dut (
    .clk(clk), .rst_n(rst_n), .mon_vdd_mv(mon_vdd_mv), .ng_vdd_mv(vdd_mv),
    .thr_wr_en(thr_wr_en), .thr_wr_idx(thr_wr_idx), .thr_wr_data(thr_wr_data),
    .sample(sample), .sample_valid(sample_valid), .set_en(set_en), .level(level), .state(state));

  rsa_sm_model #(.KEY_BITS(KEY_BITS), .CYCLES_PER_BIT(CYC_PER_BIT)) u_rsa (
    .clk(rsa_clk), .start(start), .base(base), .modulus(modulus), .exponent(exponent),
    .sq_busy(sq_busy), .mul_busy(mul_busy), .bit_idx(bit_idx), .done(done), .result(result));

  pdn_model #(.NUM_SETS(NUM_SETS), .VNOM_MV(VNOM), .DROP_SQ_MV(D_SQ), .DROP_MUL_MV(D_MUL),
              .DROP_NOISE_MV(D_NOISE)) u_pdn (
    .sq_busy(sq_busy), .mul_busy(mul_busy), .set_en(set_en), .vdd_mv(vdd_mv));

  always_comb for (int i = 0; i < M; i++) mon_vdd_mv[i] = vdd_mv;

  int n_samples = 0, n_detect = 0, n_step = 0, n_off_low = 0, n_off_full = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s: %s @%0t", NAME, what, $time); end
  endtask

  // count of one ring over a window of C_REF reference cycles at v_mv
  function automatic int cnt_at(int v_mv);
    real h; int k;
    h = real'(MON_NUM_INV + 1) * 0.4 * 1000.0 / v_mv;
    k = $rtoi(2.0 * REF_HALF_NS * C_REF / h);
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

  int thr_model [4];
  int ref_level = 0;
  bit protect_phase = 0;

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

  int react_sum = 0, react_num = 0, react_cnt = -1;

  always @(posedge clk) begin
    if (sample_valid && rst_n) begin
      int s, lo, hi;
      s = int'(sample);
      n_samples++;
      // the first window after reset may start from uncleared counters
      if (n_samples > 1) begin
        if (sq_busy) begin
          bit_sum[protect_phase][bit_idx] += s;
          bit_num[protect_phase][bit_idx]++;
        end
        lo = cnt_at(VNOM - D_SQ - D_MUL - D_NOISE) - 1;
        hi = cnt_at(VNOM) + 1;
        check(s >= lo && s <= hi, $sformatf("sample %0d outside [%0d,%0d]", s, lo, hi));
        if (sq_busy) begin
          if (win_all_quiet) begin sum_q[protect_phase] += s; num_q[protect_phase]++; end
          if (win_all_busy)  begin sum_b[protect_phase] += s; num_b[protect_phase]++; end
        end
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
          check(set_en == NUM_SETS'((1 << sets_on(exp_lvl)) - 1),
                $sformatf("set_en %b at level %0d", set_en, exp_lvl));
        end
      join_none
    end
  end

  logic mul_busy_q;
  always @(posedge clk) begin
    mul_busy_q <= mul_busy;
    if (protect_phase && mul_busy_q && !mul_busy && ref_level == 0 && react_cnt < 0) react_cnt = 0;
  end

  task automatic run_exponentiation();
    @(negedge rsa_clk) start = 1'b1;
    @(negedge rsa_clk) start = 1'b0;
    wait (done);
    check(result == modexp_ltr(base, exponent, modulus), "exponentiation result");
    repeat (2 * PERIOD) @(negedge clk);
  endtask

  initial begin
    real spa_thr;
    int  spa_err [2];
    finished = 1'b0; checks = 0; failures = 0;
    rst_n = 1'b0; start = 1'b0;
    thr_wr_en = 1'b0; thr_wr_idx = '0; thr_wr_data = '0;
    for (int i = 0; i < 4; i++) thr_model[i] = 32'h7fffffff;
    for (int p = 0; p < 2; p++) begin
      sum_q[p] = 0; sum_b[p] = 0; num_q[p] = 0; num_b[p] = 0;
      for (int i = 0; i < KEY_BITS; i++) begin bit_sum[p][i] = 0; bit_num[p][i] = 0; end
    end
    for (int i = 0; i < KEY_BITS; i++) exponent[i] = 1'($urandom_range(0, 1));
    exponent[0] = 1'b1;
    modulus = 32'hfffffffb;
    base = $urandom % modulus;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    protect_phase = 0;
    run_exponentiation();
    check(n_detect == 0, "no noise with thresholds at reset value");

    for (int l = 0; l < 4; l++) begin
      int cq, cb;
      cq = cnt_at(VNOM - D_SQ - noise_mv(l));
      cb = cnt_at(VNOM - D_SQ - D_MUL - noise_mv(l));
      @(negedge clk);
      thr_wr_en = 1'b1; thr_wr_idx = LEVEL_W'(l); thr_wr_data = N'((cq + cb) / 2);
      thr_model[l] = (cq + cb) / 2;
    end
    @(negedge clk) thr_wr_en = 1'b0;
    protect_phase = 1;
    run_exponentiation();

    check(num_q[0] > 0 && num_b[0] > 0 && num_q[1] > 0 && num_b[1] > 0, "both kinds of window seen");
    spa_thr = (sum_q[0] / num_q[0] + sum_b[0] / num_b[0]) / 2.0;
    for (int p = 0; p < 2; p++) begin
      spa_err[p] = 0;
      for (int i = 0; i < KEY_BITS; i++)
        if (bit_num[p][i] > 0 && ((bit_sum[p][i] / bit_num[p][i] < spa_thr) != exponent[i])) spa_err[p]++;
    end
    $display("%s: M=%0d f_ref=%0d MHz quiet/busy count %0d/%0d samples=%0d detect=%0d step=%0d off_low=%0d off_full=%0d",
             NAME, M, 500 / REF_HALF_NS, cnt_at(VNOM - D_SQ), cnt_at(VNOM - D_SQ - D_MUL),
             n_samples, n_detect, n_step, n_off_low, n_off_full);
    $display("%s: reaction %.2f samples over %0d quiet bits; SPA wrong bits unprotected %0d, protected %0d of %0d",
             NAME, (react_num > 0) ? real'(react_sum) / react_num : -1.0, react_num, spa_err[0], spa_err[1], KEY_BITS);
    if (REQUIRE_ALL) begin
      check(n_detect > 0,   "detection happened");
      check(n_step > 0,     "step-up happened");
      check(n_off_low > 0,  "switch-off on a low sample happened");
      check(n_off_full > 0, "switch-off after all sets happened");
    end
    finished = 1'b1;
  end
endmodule
