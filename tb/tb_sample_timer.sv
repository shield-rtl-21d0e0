// tb_sample_timer -- checks the window sequence of the sampling timer: clear
// held during reset, ro_en high for exactly C_REF cycles, then SETTLE idle
// cycles, one capture cycle and one clear cycle, repeating every
// C_REF + SETTLE + 2 cycles.
module tb_sample_timer;
  timeunit 1ns;
  timeprecision 1ps;
  import shield_pkg::*;

  localparam int C_REF = 5, SETTLE = 2, PERIOD = C_REF + SETTLE + 2;
  logic clk = 1'b0, rst_n;
  logic ro_en, cnt_clr, capture;
  sample_phase_e phase;
  int checks = 0, failures = 0;

  sample_timer #(.C_REF(C_REF), .SETTLE(SETTLE)) dut (
    .clk(clk), .rst_n(rst_n), .ro_en(ro_en), .cnt_clr(cnt_clr), .capture(capture), .phase(phase));

  always #50 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  initial begin
    int last_cap, t;
    rst_n = 1'b0;
    #5;
    check(cnt_clr && !ro_en && !capture, "reset: clear high, rings off");
    #200 @(negedge clk) rst_n = 1'b1;
    // find the first capture, then check the pattern over several windows
    last_cap = -1; t = 0;
    for (int c = 0; c < 6 * PERIOD; c++) begin
      @(posedge clk); #1;
      if (last_cap >= 0) begin
        int off;
        bit exp_clr, exp_run, exp_cap;
        off = t - last_cap;   // cycles since capture
        exp_clr = (off % PERIOD) == 1;
        exp_run = (off % PERIOD) >= 2 && (off % PERIOD) < 2 + C_REF;
        exp_cap = (off % PERIOD) == 0;
        check(cnt_clr == exp_clr, $sformatf("cnt_clr at offset %0d", off % PERIOD));
        check(ro_en == exp_run, $sformatf("ro_en at offset %0d", off % PERIOD));
        check(capture == exp_cap, $sformatf("capture at offset %0d", off % PERIOD));
        check(!(capture && ro_en), "capture only with rings stopped");
      end else if (capture) last_cap = t;
      t++;
    end
    check(last_cap >= 0 && last_cap <= PERIOD + 1, "first capture within one window");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
