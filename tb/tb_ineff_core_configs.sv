// tb_ineff_core_configs: the pivot-class and I-RS-size configurations.
//
// Three copies of `core_harness` run side by side on the same looping
// program: C pivots only, D pivots only (both with the default 128-entry
// I-RS), and CD pivots with a 64-entry I-RS. These are the configurations
// the design is evaluated in besides its default (CD, 128). Each copy checks
// the full set of end-to-end properties; a pivot class that is switched off
// must never be seen at commit, and without C pivots no Type-A rollback may
// happen. The I-pipe width is a package constant and is not varied here.
module tb_ineff_core_configs;
  int c_checks, c_fail, d_checks, d_fail, s_checks, s_fail;
  bit c_done, d_done, s_done;

  core_harness #(.PIVOT_C(1'b1), .PIVOT_D(1'b0), .NAME("C only"))
    u_c (.checks(c_checks), .failures(c_fail), .finished(c_done));
  core_harness #(.PIVOT_C(1'b0), .PIVOT_D(1'b1), .NAME("D only"))
    u_d (.checks(d_checks), .failures(d_fail), .finished(d_done));
  core_harness #(.IRS_N(64), .NAME("CD, I-RS 64"))
    u_s (.checks(s_checks), .failures(s_fail), .finished(s_done));

  initial begin : watchdog
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c_checks + d_checks + s_checks,
             c_fail + d_fail + s_fail + 1);
    $finish;
  end

  initial begin
    wait (c_done && d_done && s_done);
    $display("TB_RESULT checks=%0d failures=%0d", c_checks + d_checks + s_checks,
             c_fail + d_fail + s_fail);
    $finish;
  end
endmodule
