// tb_magnitude_comparator -- exhaustive 6-bit and random 64-bit comparisons
// against the three expected outputs; exactly one output must be high.
module tb_magnitude_comparator;
  timeunit 1ns;
  timeprecision 1ps;
  import shield_pkg::*;

  logic [5:0]  a6, b6;
  cmp_t        c6, c64;
  logic [63:0] a64, b64;
  int checks = 0, failures = 0;

  magnitude_comparator #(.W(6))  dut6  (.a(a6),  .b(b6),  .cmp(c6));
  magnitude_comparator #(.W(64)) dut64 (.a(a64), .b(b64), .cmp(c64));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 64; i++) for (int j = 0; j < 64; j++) begin
      a6 = 6'(i); b6 = 6'(j); #1;
      check(c6 == {i < j, i == j, i > j}, $sformatf("%0d vs %0d", i, j));
    end
    for (int t = 0; t < 500; t++) begin
      a64 = {$urandom, $urandom};
      b64 = (t % 5 == 0) ? a64 : {$urandom, $urandom};
      if (t % 7 == 0) b64 = a64 + 64'd1;
      #1;
      check(c64.lt == (a64 < b64) && c64.eq == (a64 == b64) && c64.gt == (a64 > b64), "64-bit");
      check($countones(c64) == 1, "one-hot");
    end
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
