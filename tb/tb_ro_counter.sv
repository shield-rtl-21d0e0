// tb_ro_counter -- runs an RO counter for a fixed window at several supply
// voltages and compares the count with the oscillation count worked out from
// the stage delays; checks that the count holds while disabled and clears.
module tb_ro_counter;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int N = 16;
  logic         en, clr;
  logic [15:0]  vdd_mv;
  logic [N-1:0] count;
  int           checks = 0, failures = 0;

  ro_counter #(.N(N), .NUM_INV(3), .T_STAGE_PS(400)) dut (
    .en(en), .clr(clr), .vdd_mv(vdd_mv), .count(count));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int expected(real t_ns, int v_mv);
    real h; int k;
    h = 4.0 * 0.4 * 1000.0 / v_mv;
    k = $rtoi(t_ns / h);
    return (k + 1) / 2;
  endfunction

  initial begin
    int v, e;
    logic [N-1:0] held;
    en = 1'b0; clr = 1'b1; vdd_mv = 16'd1000;
    #10 clr = 1'b0;
    #10;
    for (int i = 0; i < 6; i++) begin
      v = (i == 0) ? 1000 : $urandom_range(850, 1050);
      vdd_mv = 16'(v);
      clr = 1'b1; #2 clr = 1'b0; #2;
      check(count == '0, "cleared");
      en = 1'b1; #401; en = 1'b0; #10;
      e = expected(401.0, v);
      check(int'(count) >= e - 1 && int'(count) <= e + 1,
            $sformatf("%0d mV: count %0d expected %0d", v, count, e));
      held = count; #50;
      check(count == held, "count holds while disabled");
    end
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
