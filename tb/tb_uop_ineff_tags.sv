// tb_uop_ineff_tags: checks the micro-op cache ineffectual bits against a
// software array: random sets and clears (clear wins in the same cycle),
// clear-all, reads on all 10 ports and the count of bits set.
module tb_uop_ineff_tags;
  import ineff_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [SLOT_W-1:0] rd_slot [REN_W];
  logic [REN_W-1:0]  rd_ineff;
  logic set_valid, clr_valid, clr_all;
  logic [SLOT_W-1:0] set_slot, clr_slot;
  logic [$clog2(UOPC_ENTRIES+1)-1:0] num_set;

  uop_ineff_tags dut (.clk, .rst_n, .rd_slot, .rd_ineff, .set_valid, .set_slot, .clr_valid,
                      .clr_slot, .clr_all, .num_set);

  bit m [UOPC_ENTRIES];
  int cnt;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    set_valid = 0; clr_valid = 0; clr_all = 0; set_slot = '0; clr_slot = '0;
    for (int l = 0; l < REN_W; l++) rd_slot[l] = '0;
    for (int i = 0; i < UOPC_ENTRIES; i++) m[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      for (int l = 0; l < REN_W; l++) rd_slot[l] = SLOT_W'($urandom_range(0, 63) + (l == 0 ? UOPC_ENTRIES - 64 : 0));
      #1;
      checks++;
      for (int l = 0; l < REN_W; l++)
        if (rd_ineff[l] !== m[rd_slot[l]]) begin failures++; $display("FAIL read %0d slot %0d", l, rd_slot[l]); end
      cnt = 0;
      for (int i = 0; i < UOPC_ENTRIES; i++) cnt += m[i];
      if (int'(num_set) != cnt) begin failures++; $display("FAIL count %0d vs %0d", num_set, cnt); end
      set_valid = $urandom_range(0, 1);
      set_slot  = SLOT_W'($urandom_range(0, 63) + ($urandom_range(0, 1) ? UOPC_ENTRIES - 64 : 0));
      clr_valid = $urandom_range(0, 3) == 0;
      clr_slot  = ($urandom_range(0, 1)) ? set_slot : SLOT_W'($urandom_range(0, 63));
      clr_all   = $urandom_range(0, 499) == 0;
      if (clr_all) for (int i = 0; i < UOPC_ENTRIES; i++) m[i] = 0;
      else begin
        if (set_valid) m[set_slot] = 1;
        if (clr_valid) m[clr_slot] = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
