// tb_tff_ripple_counter -- drives random bursts of pulses into an 8-stage T-FF
// chain and compares the settled count with a reference count modulo 256;
// also checks the asynchronous clear.
module tb_tff_ripple_counter;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int N = 8;
  logic         clk_in, clr;
  logic [N-1:0] count;
  int           checks = 0, failures = 0;
  int unsigned  ref_cnt;

  tff_ripple_counter #(.N(N)) dut (.clk_in(clk_in), .clr(clr), .count(count));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    clk_in = 1'b0; clr = 1'b1; ref_cnt = 0;
    #5 clr = 1'b0; #5;
    check(count == '0, "cleared");
    for (int b = 0; b < 20; b++) begin
      int n;
      n = $urandom_range(1, 150);
      for (int i = 0; i < n; i++) begin
        #1 clk_in = 1'b1; #1 clk_in = 1'b0;
      end
      ref_cnt += n;
      #5;
      check(count == N'(ref_cnt), $sformatf("count %0d expected %0d", count, ref_cnt % 256));
      if (b == 10) begin
        clr = 1'b1; #2 clr = 1'b0; ref_cnt = 0; #2;
        check(count == '0, "clear in the middle");
      end
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
