// tb_shield_dse -- the defense at the monitor sizes and reference clocks of the
// design-space exploration: 16, 32 and 64 ring counters at a 10 MHz reference
// clock, and 32 counters at 50 and 100 MHz.  Each point is one shield_e2e_run
// (two exponentiations with a random 256-bit exponent, unprotected then
// protected, the tenant always at 10 MHz), all five running side by side.
// Every point must follow the run-time rule sample by sample and compute the
// right result.  The 10 and 50 MHz points must also show detection, step-up
// and both kinds of switch-off.  At 100 MHz a window of C_REF = 4 cycles holds
// only about 12 ring cycles, and a quiet and a busy window give the same
// count, so the monitor cannot see the tenant at all (even unprotected, a
// simple power analysis gets half the bits wrong) and the controller rarely
// acts; that point is checked for the rule and the result only.
// The sweep points are the ones the design-space exploration names; the
// counter width (16 bits), the noise size (14 rings) and the key length are
// reduced to keep the run short, and are this bench's own choice.
// The per-point lines report reaction time and key-bit errors; they depend on
// the supply model and are not checked.
module tb_shield_dse;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NPT = 5;
  logic [NPT-1:0] fin;
  int chk [NPT];
  int fail [NPT];

  shield_e2e_run #(.M(16), .REF_HALF_NS(50), .NAME("M16_10MHz"))  u_m16  (.finished(fin[0]), .checks(chk[0]), .failures(fail[0]));
  shield_e2e_run #(.M(32), .REF_HALF_NS(50), .NAME("M32_10MHz"))  u_m32  (.finished(fin[1]), .checks(chk[1]), .failures(fail[1]));
  shield_e2e_run #(.M(64), .REF_HALF_NS(50), .NAME("M64_10MHz"))  u_m64  (.finished(fin[2]), .checks(chk[2]), .failures(fail[2]));
  shield_e2e_run #(.M(32), .REF_HALF_NS(10), .NAME("M32_50MHz"))  u_f50  (.finished(fin[3]), .checks(chk[3]), .failures(fail[3]));
  shield_e2e_run #(.M(32), .REF_HALF_NS(5),  .REQUIRE_ALL(1'b0), .NAME("M32_100MHz")) u_f100 (.finished(fin[4]), .checks(chk[4]), .failures(fail[4]));

  initial begin
    int checks, failures;
    wait (&fin);
    checks = 0; failures = 0;
    for (int i = 0; i < NPT; i++) begin checks += chk[i]; failures += fail[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog: two 256-bit exponentiations at 2.4 us per bit take about 1.3 ms
  initial begin
    int checks, failures;
    #3ms;
    checks = 0; failures = 1;
    for (int i = 0; i < NPT; i++) begin checks += chk[i]; failures += fail[i]; end
    $display("FAIL: watchdog, finished %b", fin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
