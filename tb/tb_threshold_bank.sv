// tb_threshold_bank -- checks the reset value (all ones), random writes and
// the read multiplexer against a reference array.
module tb_threshold_bank;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int W = 64;
  logic clk = 1'b0, rst_n, wr_en;
  logic [1:0] wr_idx, sel;
  logic [W-1:0] wr_data, thr;
  logic [W-1:0] model [4];
  int checks = 0, failures = 0;

  threshold_bank #(.W(W)) dut (.clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_idx(wr_idx),
                               .wr_data(wr_data), .sel(sel), .thr(thr));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; wr_idx = '0; wr_data = '0; sel = '0;
    #12 rst_n = 1'b1;
    for (int i = 0; i < 4; i++) begin
      model[i] = '1;
      sel = 2'(i); #1;
      check(thr == '1, "reset value");
    end
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      wr_en = ($urandom_range(0, 1) == 1);
      wr_idx = 2'($urandom_range(0, 3));
      wr_data = {$urandom, $urandom};
      @(posedge clk); #1;
      if (wr_en) model[wr_idx] = wr_data;
      wr_en = 1'b0;
      sel = 2'($urandom_range(0, 3)); #1;
      check(thr == model[sel], $sformatf("sel %0d", sel));
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
