// tb_noise_generator -- 14 rings in 7 sets (two per set).  For random set
// enable patterns it counts the toggles of every ring's flip-flop over 200 ns
// and checks that exactly the rings of the enabled sets run, at the expected
// rate, and that disabled rings stay still.
module tb_noise_generator;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int N_RO = 14, NUM_SETS = 7;
  logic [NUM_SETS-1:0] set_en;
  logic [15:0] vdd_mv;
  logic [N_RO-1:0] tff_q, last_q;
  int toggles [N_RO];
  int checks = 0, failures = 0;

  noise_generator #(.N_RO(N_RO), .NUM_SETS(NUM_SETS), .NUM_INV(1), .T_STAGE_PS(400)) dut (
    .set_en(set_en), .vdd_mv(vdd_mv), .tff_q(tff_q));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(tff_q) begin
    for (int r = 0; r < N_RO; r++) if (tff_q[r] != last_q[r]) toggles[r]++;
    last_q = tff_q;
  end

  initial begin
    // ring delay: 2 stages of 0.4 ns -> half period 0.8 ns, period 1.6 ns;
    // the flip-flop toggles once per period: 200 ns -> 125 toggles
    vdd_mv = 16'd1000;
    set_en = '0;
    #20;
    for (int t = 0; t < 12; t++) begin
      logic [NUM_SETS-1:0] pat;
      pat = (t == 0) ? 7'h7f : (t == 1) ? 7'h00 : (t == 2) ? 7'b0001000 : 7'($urandom);
      set_en = pat;
      #1;
      last_q = tff_q;
      for (int r = 0; r < N_RO; r++) toggles[r] = 0;
      #200;
      for (int r = 0; r < N_RO; r++) begin
        int set_of_r;
        set_of_r = r / 2;
        if (pat[set_of_r])
          check(toggles[r] >= 123 && toggles[r] <= 126, $sformatf("ring %0d set %0d: %0d toggles", r, set_of_r, toggles[r]));
        else
          check(toggles[r] == 0, $sformatf("ring %0d of disabled set %0d toggled", r, set_of_r));
      end
      set_en = '0;
      #10;
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
