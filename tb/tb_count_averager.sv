// tb_count_averager -- feeds random 64-bit counts to the 32-input averager and
// compares the result with a wide reference sum divided by 32; checks the
// one-cycle latency and that the output holds between captures.
module tb_count_averager;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int M = 32, W = 64;
  logic clk = 1'b0, rst_n, capture;
  logic [M-1:0][W-1:0] counts;
  logic [W-1:0] avg;
  logic avg_valid;
  int checks = 0, failures = 0;

  count_averager #(.M(M), .W(W)) dut (
    .clk(clk), .rst_n(rst_n), .capture(capture), .counts(counts), .avg(avg), .avg_valid(avg_valid));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [W+7:0] s;
    logic [W-1:0] e;
    rst_n = 1'b0; capture = 1'b0; counts = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(avg_valid == 1'b0 && avg == '0, "reset state");
    for (int t = 0; t < 40; t++) begin
      s = '0;
      for (int i = 0; i < M; i++) begin
        counts[i] = (t < 10) ? W'($urandom_range(0, 300)) : {$urandom, $urandom};
        s += {8'd0, counts[i]};
      end
      e = W'(s / M);
      capture = 1'b1;
      @(negedge clk);
      capture = 1'b0;
      check(avg_valid == 1'b1, "valid one cycle after capture");
      check(avg == e, $sformatf("avg %0h expected %0h", avg, e));
      counts = '0;
      @(negedge clk);
      check(avg_valid == 1'b0, "valid is a single pulse");
      check(avg == e, "avg holds");
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
