// tb_mdre: checks the recovery engine against a cycle model.
//
// Portion status, the bottleneck request and Detection Buffer readiness are
// driven at random (biased so that every case occurs). The model decides,
// each cycle in run state, rollback (verified A and B with a
// misspeculation) before bottleneck (non-empty ROB) before commit (verified,
// clean, buffer ready); after a rollback it expects the 2W slots of A and B,
// captured at the rollback, to be cleared one per cycle in order and then a
// one-cycle restart at A's first pc; after a bottleneck, clear-all in the
// flush cycle and restart in the next one. `busy` must be high exactly while
// not in run state. Every output is compared every cycle.
module tb_mdre;
  import ineff_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int W = WIN;

  logic a_full, a_done, a_misspec, b_full, b_done, b_misspec, rob_empty, db_ready, bottleneck;
  logic [31:0] a_pc;
  logic [SLOT_W-1:0] ab_slot [2*W];
  logic commit, flush, clr_valid, clr_all, restart_valid, busy, ev_rollback, ev_bottleneck;
  logic [SLOT_W-1:0] clr_slot;
  logic [31:0] restart_pc;

  mdre #(.W(W)) dut (.*);

  // model
  int mstate = 0;                    // 0 run, 1 clearing, 2 restart
  int mci = 0;
  logic [SLOT_W-1:0] mslots [2*W];
  logic [31:0] mpc;
  int n_rb = 0, n_bn = 0, n_cm = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {a_full, a_done, a_misspec, b_full, b_done, b_misspec, rob_empty, db_ready, bottleneck} = '0;
    a_pc = '0;
    for (int k = 0; k < 2 * W; k++) ab_slot[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      bit ver, e_commit, e_flush, e_clrall, e_rb, e_bn;
      @(negedge clk);
      a_full = $urandom_range(0, 7) != 0; b_full = $urandom_range(0, 7) != 0;
      a_done = $urandom_range(0, 5) != 0; b_done = $urandom_range(0, 5) != 0;
      a_misspec = $urandom_range(0, 30) == 0; b_misspec = $urandom_range(0, 20) == 0;
      rob_empty = $urandom_range(0, 3) == 0; db_ready = $urandom_range(0, 3) != 0;
      bottleneck = $urandom_range(0, 40) == 0;
      a_pc = $urandom;
      for (int k = 0; k < 2 * W; k++) ab_slot[k] = SLOT_W'($urandom);
      #1;
      ver = a_full && b_full && a_done && b_done;
      e_rb = (mstate == 0) && ver && (a_misspec || b_misspec);
      e_bn = (mstate == 0) && !e_rb && bottleneck && !rob_empty;
      e_commit = (mstate == 0) && !e_rb && !e_bn && ver && db_ready;
      e_flush = e_rb || e_bn;
      e_clrall = e_bn;
      chk(commit == e_commit, "commit");
      chk(flush == e_flush, "flush");
      chk(clr_all == e_clrall, "clr_all");
      chk(ev_rollback == e_rb && ev_bottleneck == e_bn, "events");
      chk(busy == (mstate != 0), "busy");
      chk(clr_valid == (mstate == 1), "clr_valid");
      if (mstate == 1) chk(clr_slot == mslots[mci], $sformatf("clr_slot %0d", mci));
      chk(restart_valid == (mstate == 2), "restart_valid");
      if (mstate == 2) chk(restart_pc == mpc, "restart_pc");
      n_rb += e_rb; n_bn += e_bn; n_cm += e_commit;
      // next state
      case (mstate)
        0: if (e_rb) begin mslots = ab_slot; mpc = a_pc; mci = 0; mstate = 1; end
           else if (e_bn) begin mpc = a_pc; mstate = 2; end
        1: begin mci++; if (mci == 2 * W) mstate = 2; end
        default: mstate = 0;
      endcase
    end
    chk(n_rb > 5 && n_bn > 5 && n_cm > 100, "every decision exercised");
    $display("rollbacks=%0d bottlenecks=%0d commits=%0d", n_rb, n_bn, n_cm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
