// tb_irs_bottleneck: with a 64-cycle epoch and a threshold of 8, checks that
// 8 blocked cycles within an epoch raise one registered pulse (in the cycle
// after the 8th), that 7 per epoch never do, and that the count restarts.
module tb_irs_bottleneck;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic blocked, bottleneck;
  int pulses = 0;

  irs_bottleneck #(.EPOCH(64), .THRESH(8)) dut (.clk, .rst_n, .blocked, .bottleneck);

  always @(posedge clk) if (rst_n && bottleneck) pulses++;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blocked = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    // 7 blocked cycles per 64-cycle epoch, 5 epochs: never fires
    for (int e = 0; e < 5; e++)
      for (int c = 0; c < 64; c++) begin
        blocked = (c % 9 == 0) && (c < 63);
        @(negedge clk);
      end
    checks++;
    if (pulses != 0) begin failures++; $display("FAIL fired with 7 per epoch (%0d)", pulses); end
    blocked = 0;
    // align to an epoch start: wait until the internal tick wraps by running a full epoch idle
    repeat (64) @(negedge clk);
    // 8 consecutive blocked cycles: pulse one cycle after the 8th
    for (int c = 0; c < 8; c++) begin
      blocked = 1;
      @(negedge clk);
      checks++;
      if (bottleneck !== (c == 7)) begin failures++; $display("FAIL pulse at blocked cycle %0d: %b", c, bottleneck); end
    end
    blocked = 0;
    @(negedge clk);
    checks++;
    if (bottleneck || pulses != 1) begin failures++; $display("FAIL pulse length / count %0d", pulses); end
    // count restarted: 7 more blocked cycles do not fire
    for (int c = 0; c < 7; c++) begin blocked = 1; @(negedge clk); end
    blocked = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (pulses != 1) begin failures++; $display("FAIL count not restarted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
