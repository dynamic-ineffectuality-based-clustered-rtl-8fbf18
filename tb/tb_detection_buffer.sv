// tb_detection_buffer: checks the Detection Buffer with a stand-in engine.
//
// Random windows (random micro-op cache slots) are offered at random times.
// The testbench plays the Detection Engine: on `de_start` it checks that the
// three windows presented are the three oldest held, in order, then answers
// after a random 1..6 cycles with a random ineffectuality mask. A model
// queue of windows predicts: `wr_ready` (fewer than 4 windows held),
// `windows_held`, that the engine starts only with 3 or more windows, that
// the slots of the tagged entries come out one per cycle, lowest entry
// first, and that the oldest window is discarded after the last tag.
module tb_detection_buffer;
  import ineff_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int W = WIN;

  logic wr_valid, wr_ready, de_start, de_done, tag_valid;
  db_entry_t wr_window [W];
  db_entry_t de_entries [3*W];
  logic [3*W-1:0] de_mask;
  logic [SLOT_W-1:0] tag_slot;
  logic [$clog2(DB_WINDOWS+1)-1:0] windows_held;

  detection_buffer #(.W(W), .NW(DB_WINDOWS)) dut (.*);

  typedef logic [SLOT_W-1:0] win_t [W];
  win_t mq [$];
  int   mstate = 0, wait_c = 0;      // 0 idle, 1 analysing, 2 tagging
  logic [SLOT_W-1:0] exp_tags [$];
  int n_runs = 0, n_tags = 0, n_full = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; de_done = 0; de_mask = '0;
    for (int e = 0; e < W; e++) wr_window[e] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 8000; c++) begin
      @(negedge clk);
      wr_valid = $urandom_range(0, 2) == 0;
      for (int e = 0; e < W; e++) begin
        wr_window[e] = '0;
        wr_window[e].slot = SLOT_W'($urandom);
        wr_window[e].pc = $urandom;
      end
      de_done = 0;
      if (mstate == 1) begin
        if (wait_c == 0) begin
          de_done = 1;
          de_mask = {$urandom, $urandom};
          if ($urandom_range(0, 4) == 0) de_mask = '0;
        end
        wait_c--;
      end
      #4;
      chk(wr_ready == (mq.size() < DB_WINDOWS), "wr_ready");
      chk(int'(windows_held) == mq.size(), "windows_held");
      if (!wr_ready) n_full++;
      chk(de_start == (mstate == 0 && mq.size() >= 3), "de_start");
      if (de_start) begin
        bit same;
        same = 1;
        for (int w = 0; w < 3; w++)
          for (int e = 0; e < W; e++)
            if (de_entries[w*W+e].slot != mq[w][e]) same = 0;
        chk(same, "engine sees the three oldest windows");
        n_runs++;
      end
      chk(tag_valid == (mstate == 2 && exp_tags.size() > 0), "tag_valid");
      if (tag_valid && exp_tags.size() > 0) begin
        chk(tag_slot == exp_tags[0], "tag slot order");
        n_tags++;
      end
      // model update (at the edge)
      begin
        bit pop;
        pop = 0;
        case (mstate)
          0: if (mq.size() >= 3) begin mstate = 1; wait_c = $urandom_range(0, 5); end
          1: if (de_done) begin
               for (int k = 0; k < 3 * W; k++)
                 if (de_mask[k]) exp_tags.push_back(mq[k / W][k % W]);
               mstate = 2;
             end
          default: if (exp_tags.size() > 0) void'(exp_tags.pop_front());
                   else begin pop = 1; mstate = 0; end
        endcase
        if (wr_valid && wr_ready) begin
          win_t nw;
          for (int e = 0; e < W; e++) nw[e] = wr_window[e].slot;
          mq.push_back(nw);
        end
        if (pop) void'(mq.pop_front());
      end
    end
    chk(n_runs > 50 && n_tags > 500 && n_full > 0, "engine runs, tags and back-pressure exercised");
    $display("runs=%0d tags=%0d full_cycles=%0d", n_runs, n_tags, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
