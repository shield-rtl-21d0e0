// tb_power_monitor -- a 4-counter monitor with 16-bit counters at a 10 MHz
// reference clock.  The supply of every ring is set per window; the sample must
// match the oscillation count expected from the stage delays over a
// C_REF-cycle window (within one count), fall with the supply, and arrive once
// every C_REF + SETTLE + 2 cycles.
module tb_power_monitor;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int M = 4, N = 16, C_REF = 4, SETTLE = 2, PERIOD = C_REF + SETTLE + 2;
  logic clk = 1'b0, rst_n;
  logic [M-1:0][15:0] vdd_mv;
  logic [N-1:0] sample;
  logic sample_valid, ro_en;
  int checks = 0, failures = 0;

  power_monitor #(.M(M), .N(N), .NUM_INV(3), .T_STAGE_PS(400), .C_REF(C_REF), .SETTLE(SETTLE)) dut (
    .clk(clk), .rst_n(rst_n), .vdd_mv(vdd_mv), .sample(sample), .sample_valid(sample_valid), .ro_en(ro_en));

  always #50 clk = ~clk;   // 10 MHz reference

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int expected(int v_mv);
    real h; int k;
    h = 4.0 * 0.4 * 1000.0 / v_mv;
    k = $rtoi(100.0 * C_REF / h);
    return (k + 1) / 2;
  endfunction

  int volts [6] = '{1000, 950, 900, 1050, 980, 1000};

  initial begin
    int prev_t, e, s_hi, s_lo;
    rst_n = 1'b0;
    for (int i = 0; i < M; i++) vdd_mv[i] = 16'd1000;
    #250 rst_n = 1'b1;
    @(posedge sample_valid);           // drop the first, partial window
    prev_t = int'($time);
    for (int w = 0; w < 6; w++) begin
      // set the supply while the rings are stopped, before the next window
      for (int i = 0; i < M; i++) vdd_mv[i] = 16'(volts[w]);
      @(posedge sample_valid);
      check(int'($time) - prev_t == PERIOD * 100, $sformatf("sample period %0d ns", int'($time) - prev_t));
      prev_t = int'($time);
      e = expected(volts[w]);
      check(int'(sample) >= e - 1 && int'(sample) <= e + 1,
            $sformatf("%0d mV: sample %0d expected %0d", volts[w], sample, e));
      if (w == 0) s_hi = int'(sample);
      if (w == 2) s_lo = int'(sample);
    end
    check(s_lo < s_hi, "sample falls with the supply");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
