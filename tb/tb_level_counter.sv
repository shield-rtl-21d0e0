// tb_level_counter -- random increment/clear sequences against a reference
// modulo-4 count; clear has priority, 3 + 1 wraps to 0.
module tb_level_counter;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst_n, inc, clr;
  logic [1:0] level;
  int model, checks = 0, failures = 0, wraps = 0;

  level_counter dut (.clk(clk), .rst_n(rst_n), .inc(inc), .clr(clr), .level(level));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    rst_n = 1'b0; inc = 1'b0; clr = 1'b0; model = 0;
    #12 rst_n = 1'b1;
    check(level == 2'd0, "reset");
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      inc = ($urandom_range(0, 3) != 0);
      clr = ($urandom_range(0, 9) == 0);
      @(posedge clk); #1;
      if (clr) model = 0;
      else if (inc) begin
        if (model == 3) wraps++;
        model = (model + 1) % 4;
      end
      check(int'(level) == model, $sformatf("level %0d expected %0d", level, model));
    end
    check(wraps > 0, "wrap exercised");
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
