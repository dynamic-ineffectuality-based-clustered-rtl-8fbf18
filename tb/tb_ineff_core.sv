// tb_ineff_core: end-to-end test of the whole design at its default size.
//
// Runs `core_harness` in the default configuration (CD pivots, 128-entry
// I-RS), which instantiates the top with no parameter overrides, for 40,000
// cycles of a looping program. The harness describes the stand-ins for the
// base core and everything that is checked; every mechanism (commit,
// detection, tagging, I-pipe issue, C and D pivots, rename stalls, I-RS
// full, Type-A rollback, bottleneck flush, primary misprediction) must occur.
module tb_ineff_core;
  int checks, failures;
  bit finished;

  core_harness u_run (.checks, .failures, .finished);

  initial begin : watchdog
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
