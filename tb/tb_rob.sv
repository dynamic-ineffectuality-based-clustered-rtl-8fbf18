// tb_rob: checks the windowed ROB against a queue model.
//
// Each cycle a random prefix of up to 10 random micro-ops is allocated (when
// there is room), random in-flight entries receive RPM dead marks, primary
// completions (with or without a misprediction) and I-pipe completions
// (with or without a Type-A misspeculation); portion A is committed at
// random once it is full, and rare flushes empty the ROB. The model checks
// the tail index, free space and count, the full/done/misspeculation status
// of portions A and B, A's first pc and the A/B slots, and at every commit
// the ten presented entries with the pivot bit worked out from the C and D
// rules, the ineffectual bits and the physical tags.
module tb_rob;
  import ineff_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int W = WIN, R = REN_W, SZ = ROB_SIZE;

  logic [R-1:0] alloc_valid;
  uop_t alloc_uop [R];
  logic [PREG_W-1:0] alloc_ptag [R];
  logic [ROB_W-1:0] tail_idx;
  logic [$clog2(SZ+1)-1:0] free_entries, count;
  logic [2*R-1:0] mark_valid;
  logic [ROB_W-1:0] mark_idx [2*R];
  logic [PWB_PORTS-1:0] pwb_valid, pwb_mispred;
  logic [ROB_W-1:0] pwb_idx [PWB_PORTS];
  logic [IPIPE_W-1:0] iwb_valid, iwb_misspec;
  logic [ROB_W-1:0] iwb_idx [IPIPE_W];
  logic a_full, a_done, a_misspec, b_full, b_done, b_misspec, commit, flush;
  logic [31:0] a_pc;
  logic [SLOT_W-1:0] ab_slot [2*W];
  db_entry_t commit_window [W];
  logic [W-1:0] commit_ineff;
  logic [PREG_W-1:0] commit_ptag [W];

  rob dut (.*);

  typedef struct {
    uop_t u; logic [PREG_W-1:0] ptag; bit done, dd, df, mis, msp;
  } m_t;
  m_t m [SZ];
  int head = 0, n = 0;
  int n_commit = 0, n_cpiv = 0, n_dpiv = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic uop_t rnd_uop();
    uop_t u;
    int k;
    u = '0;
    k = $urandom_range(0, 7);
    case (k)
      0: u.op = OP_BR; 1: u.op = OP_JIND; 2: u.op = OP_CMOV; 3: u.op = OP_LD; 4: u.op = OP_ST;
      5: u.op = OP_CMP; default: u.op = OP_ADD;
    endcase
    u.pc = $urandom; u.slot = SLOT_W'($urandom);
    u.wr_dst = u.op inside {OP_ADD, OP_CMOV, OP_LD};
    u.wr_flags = u.op inside {OP_ADD, OP_CMP};
    u.dst = GPR_W'($urandom); u.src_a = GPR_W'($urandom); u.src_b = GPR_W'($urandom);
    u.rd_a = 1'($urandom_range(0, 1)); u.rd_b = 1'($urandom_range(0, 1)); u.rd_flags = u.op inside {OP_BR, OP_CMOV};
    u.pred_taken = 1'($urandom_range(0, 1));
    u.ineff = $urandom_range(0, 2) == 0;
    return u;
  endfunction

  initial begin : watchdog
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc_valid = '0; mark_valid = '0; pwb_valid = '0; pwb_mispred = '0; iwb_valid = '0; iwb_misspec = '0;
    commit = 0; flush = 0;
    for (int l = 0; l < R; l++) begin alloc_uop[l] = '0; alloc_ptag[l] = '0; end
    for (int k = 0; k < 2 * R; k++) mark_idx[k] = '0;
    for (int p = 0; p < PWB_PORTS; p++) pwb_idx[p] = '0;
    for (int p = 0; p < IPIPE_W; p++) iwb_idx[p] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 6000; c++) begin
      int na, used [int];
      @(negedge clk);
      // allocation
      na = $urandom_range(0, R);
      if (na > SZ - n) na = SZ - n;
      alloc_valid = '0;
      for (int l = 0; l < R; l++) begin
        alloc_valid[l] = (l < na);
        alloc_uop[l] = rnd_uop();
        alloc_ptag[l] = PREG_W'($urandom);
      end
      // marks, completions on distinct in-flight entries
      mark_valid = '0; pwb_valid = '0; iwb_valid = '0;
      used.delete();
      for (int k = 0; k < 2 * R; k++) if (n > 0 && $urandom_range(0, 3) == 0) begin
        mark_valid[k] = 1; mark_idx[k] = ROB_W'((head + $urandom_range(0, n - 1)) % SZ);
      end
      for (int p = 0; p < PWB_PORTS; p++) if (n > 0 && $urandom_range(0, 1) == 0) begin
        int i;
        i = (head + $urandom_range(0, n - 1)) % SZ;
        if (!used.exists(i)) begin
          used[i] = 1; pwb_valid[p] = 1; pwb_idx[p] = ROB_W'(i); pwb_mispred[p] = $urandom_range(0, 5) == 0;
        end
      end
      for (int p = 0; p < IPIPE_W; p++) if (n > 0 && $urandom_range(0, 1) == 0) begin
        int i;
        i = (head + $urandom_range(0, n - 1)) % SZ;
        if (!used.exists(i)) begin
          used[i] = 1; iwb_valid[p] = 1; iwb_idx[p] = ROB_W'(i); iwb_misspec[p] = $urandom_range(0, 7) == 0;
        end
      end
      flush = $urandom_range(0, 300) == 0;
      #1;
      // status
      begin
        bit ad, bd, am, bm;
        ad = 1; bd = 1; am = 0; bm = 0;
        for (int e = 0; e < W; e++) begin
          ad &= m[(head + e) % SZ].done; bd &= m[(head + W + e) % SZ].done;
          am |= m[(head + e) % SZ].msp;  bm |= m[(head + W + e) % SZ].msp;
          if (e < n)     chk(ab_slot[e] == m[(head + e) % SZ].u.slot, "ab_slot A");
          if (W + e < n) chk(ab_slot[W + e] == m[(head + W + e) % SZ].u.slot, "ab_slot B");
        end
        chk(a_full == (n >= W) && b_full == (n >= 2 * W), "full");
        if (n >= W) chk(a_done == ad && a_misspec == am && a_pc == m[head].u.pc, "portion A status");
        if (n >= 2 * W) chk(b_done == bd && b_misspec == bm, "portion B status");
        chk(int'(tail_idx) == (head + n) % SZ, "tail");
        chk(int'(count) == n && int'(free_entries) == SZ - n, "count / free");
      end
      commit = !flush && (n >= W) && $urandom_range(0, 3) == 0;
      #1;
      if (commit) begin
        n_commit++;
        for (int e = 0; e < W; e++) begin
          m_t x;
          bit cp, dp, piv;
          x = m[(head + e) % SZ];
          cp = x.done && !x.mis && (x.u.op inside {OP_BR, OP_JIND} || (x.u.op == OP_CMOV && !x.u.pred_taken));
          dp = (x.u.wr_dst || x.u.wr_flags) && (!x.u.wr_dst || x.dd) && (!x.u.wr_flags || x.df);
          piv = !(x.u.op inside {OP_LD, OP_ST}) && (cp || dp);
          if (piv && cp) n_cpiv++;
          if (piv && !cp) n_dpiv++;
          chk(commit_window[e].pivot == piv, $sformatf("pivot of entry %0d (op %0d)", e, x.u.op));
          chk(commit_window[e].pc == x.u.pc && commit_window[e].slot == x.u.slot &&
              commit_window[e].dst == x.u.dst && commit_window[e].wr_dst == x.u.wr_dst &&
              commit_window[e].is_mem == (x.u.op inside {OP_LD, OP_ST}), "committed fields");
          chk(commit_ineff[e] == x.u.ineff && commit_ptag[e] == x.ptag, "committed ineff / ptag");
        end
      end
      // model update at the edge
      if (flush) n = 0;
      else begin
        for (int k = 0; k < 2 * R; k++) if (mark_valid[k]) begin
          if (k % 2 == 0) m[mark_idx[k]].dd = 1; else m[mark_idx[k]].df = 1;
        end
        for (int p = 0; p < PWB_PORTS; p++) if (pwb_valid[p]) begin
          m[pwb_idx[p]].done = 1; m[pwb_idx[p]].mis = pwb_mispred[p];
        end
        for (int p = 0; p < IPIPE_W; p++) if (iwb_valid[p]) begin
          m[iwb_idx[p]].done = 1; m[iwb_idx[p]].msp = iwb_misspec[p];
        end
        for (int l = 0; l < na; l++)
          m[(head + n + l) % SZ] = '{u: alloc_uop[l], ptag: alloc_ptag[l], done: 0, dd: 0, df: 0, mis: 0, msp: 0};
        n += na;
        if (commit) begin head = (head + W) % SZ; n -= W; end
      end
    end
    chk(n_commit > 100 && n_cpiv > 0 && n_dpiv > 0, "commits and both pivot classes exercised");
    $display("commits=%0d c_pivots=%0d d_pivots=%0d", n_commit, n_cpiv, n_dpiv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
