// tb_ring_oscillator -- checks the ring-oscillator model: output held at 1
// while disabled, edge count over a fixed time at two supply voltages against
// the count worked out from the stage delay, and a lower frequency at the
// lower voltage.
module tb_ring_oscillator;
  timeunit 1ns;
  timeprecision 1ps;

  logic        en;
  logic [15:0] vdd_mv;
  logic        ro_out;
  int          checks = 0, failures = 0;
  int          rises;

  ring_oscillator #(.NUM_INV(3), .T_STAGE_PS(400)) dut (.en(en), .vdd_mv(vdd_mv), .ro_out(ro_out));

  always @(posedge ro_out) rises++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Rising edges seen in t_ns after enable: toggles happen every h ns starting
  // from 1; the forced return to 1 on disable adds an edge after an odd count.
  function automatic int expected_rises(real t_ns, int v_mv);
    real h; int k;
    h = 4.0 * 0.4 * 1000.0 / v_mv;
    k = $rtoi(t_ns / h);
    return (k + 1) / 2;
  endfunction

  task automatic run_window(input int v_mv, input real t_ns, output int r);
    vdd_mv = 16'(v_mv);
    #10;
    rises = 0;
    en = 1'b1;
    #(t_ns);
    en = 1'b0;
    #5;
    r = rises;
  endtask

  initial begin
    int r1, r2, e;
    en = 1'b0; vdd_mv = 16'd1000;
    #20;
    check(ro_out == 1'b1, "output held at 1 while disabled");
    rises = 0; #50;
    check(rises == 0, "no edges while disabled");

    run_window(1000, 801.0, r1);
    e = expected_rises(801.0, 1000);
    check(r1 >= e - 1 && r1 <= e + 1, $sformatf("1000 mV: %0d edges, expected %0d", r1, e));
    run_window(900, 801.0, r2);
    e = expected_rises(801.0, 900);
    check(r2 >= e - 1 && r2 <= e + 1, $sformatf("900 mV: %0d edges, expected %0d", r2, e));
    check(r2 < r1, "lower supply gives lower frequency");
    check(ro_out == 1'b1, "output back at 1 after disable");
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
