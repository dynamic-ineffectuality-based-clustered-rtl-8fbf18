// core_harness: drives the whole design through a looping program and checks it.
//
// Used by the end-to-end testbenches; it is not a testbench by itself. It
// instantiates the top (with no parameter list in the default
// configuration) and plays the parts of the base core that are not in the
// design:
//   - front end: a fixed loop of 8 windows (80 micro-ops) in micro-op cache
//     slots 0..79, fetched 10 per cycle, with a last-outcome branch
//     predictor; fetch stops on a flush and resumes at `restart_pc`;
//   - base renamer free list: physical registers with reference counts,
//     released when a committed window overwrites their architectural
//     register, returned on a flush;
//   - primary cluster: every dispatched micro-op completes after a random
//     latency with the value of a golden in-order model of the program
//     (one load in 16 iterations misses and takes 300 cycles).
// The golden model runs at rename and is restored from a per-window snapshot
// when the design rolls back, so the harness knows the true value and branch
// outcome of every micro-op.
//
// Checked: dispatch carries the expected ROB index; commit is exactly the
// program order, window by window; every rollback is justified by an
// ineffectual micro-op in portion A or B whose prediction is really wrong,
// and restarts at the first micro-op of portion A; no ineffectual micro-op
// with a wrong prediction ever commits (so the I-pipe computed every value
// it used correctly); rename never accepts during a flush.
// Counted, and required to happen at least once: window commits, Detection
// Engine runs, ineffectual bits set, micro-ops issued in the I-pipe,
// ineffectual micro-ops committed, rename stalls, primary mispredictions,
// and, as the pivot configuration allows, control (C) and data (D) pivots,
// Type-A rollbacks, I-RS-full cycles and bottleneck flushes. A pivot class
// that is switched off must never appear, and without C pivots there must be
// no rollback.
//
// Interface: `checks`, `failures` and `finished` (set after CYCLES cycles).
// Parameters select the pivot classes and the I-RS size; NAME labels output.
module core_harness
  import ineff_pkg::*;
#(
  parameter bit          PIVOT_C = 1'b1,
  parameter bit          PIVOT_D = 1'b1,
  parameter int unsigned IRS_N   = ineff_pkg::IRS_SIZE,
  parameter string       NAME    = "CD"
) (
  output int checks,
  output int failures,
  output bit finished
);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int PLEN = 80;          // program length (8 windows)
  localparam int CYCLES = 40000;

  // ---------------------------------------------------------------- DUT
  logic [REN_W-1:0]     fe_valid, fe_accept;
  uop_t                 fe_uop [REN_W];
  logic                 restart_valid, flush;
  logic [31:0]          restart_pc;
  logic [PREG_W-1:0]    fl_ptag [REN_EFF];
  logic [$clog2(REN_EFF+1)-1:0] fl_count, fl_used;
  logic [REN_EFF-1:0]   disp_valid;
  uop_t                 disp_uop [REN_EFF];
  logic [ROB_W-1:0]     disp_rob_idx [REN_EFF];
  logic [PREG_W-1:0]    disp_ptag [REN_EFF];
  loc_t                 disp_loc_a [REN_EFF], disp_loc_b [REN_EFF], disp_loc_f [REN_EFF];
  logic [PWB_PORTS-1:0] pwb_valid, pwb_mispred, pwb_wr;
  logic [ROB_W-1:0]     pwb_idx [PWB_PORTS];
  logic [PREG_W-1:0]    pwb_ptag [PWB_PORTS];
  logic [XLEN-1:0]      pwb_data [PWB_PORTS];
  logic [FLAG_W-1:0]    pwb_flags [PWB_PORTS];
  logic                 commit_valid;
  db_entry_t            commit_window [WIN];
  logic [WIN-1:0]       commit_ineff;
  logic ev_rollback, ev_bottleneck, ev_irs_blocked, ev_tag_set, ev_de_done, de_busy;
  logic [IPIPE_W-1:0]   ev_ipipe_issue;
  logic [$clog2(DB_WINDOWS+1)-1:0] db_windows;
  logic [$clog2(UOPC_ENTRIES+1)-1:0] tags_held;

  // The default configuration is instantiated with no parameter list, so
  // that the full-size run uses the top exactly as delivered.
  if (PIVOT_C && PIVOT_D && IRS_N == ineff_pkg::IRS_SIZE) begin : g_default
    ineff_core dut (.*);
  end else begin : g_config
    ineff_core #(.PIVOT_C(PIVOT_C), .PIVOT_D(PIVOT_D), .IRS_N(IRS_N)) dut (.*);
  end

  // ---------------------------------------------------------------- program
  uop_t prog [PLEN];

  function automatic uop_t mk(int s, op_e op, int dst, int a, int b, logic [63:0] imm, cond_e c);
    uop_t u;
    u = '0;
    u.pc = 32'(s * 4); u.slot = SLOT_W'(s); u.op = op; u.cond = c; u.imm = imm;
    u.dst = GPR_W'(dst); u.src_a = GPR_W'(a); u.src_b = GPR_W'(b);
    u.wr_dst   = op inside {OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_ADDI, OP_MOVI, OP_LD};
    u.wr_flags = op inside {OP_ADD, OP_SUB, OP_AND, OP_CMP};
    u.rd_a     = op inside {OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_ADDI, OP_CMP, OP_JIND, OP_LD, OP_ST};
    u.rd_b     = op inside {OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_CMP, OP_ST};
    u.rd_flags = (op == OP_BR);
    return u;
  endfunction

  task automatic build_program();
    int s;
    s = 0;
    // window 0: loop counter, a branch taken once every 8 iterations,
    // a dead chain, an indirect jump with a fixed target
    prog[s] = mk(s, OP_ADDI, 1, 1, 0, 1, CC_AL); s++;
    prog[s] = mk(s, OP_MOVI, 7, 0, 0, 7, CC_AL); s++;
    prog[s] = mk(s, OP_AND,  2, 1, 7, 0, CC_AL); s++;
    prog[s] = mk(s, OP_CMP,  0, 2, 7, 0, CC_AL); s++;
    prog[s] = mk(s, OP_BR,   0, 0, 0, 0, CC_EQ); s++;
    prog[s] = mk(s, OP_MOVI, 5, 0, 0, 123, CC_AL); s++;
    prog[s] = mk(s, OP_ADD,  5, 5, 1, 0, CC_AL); s++;
    prog[s] = mk(s, OP_XOR,  6, 5, 1, 0, CC_AL); s++;
    prog[s] = mk(s, OP_MOVI, 9, 0, 0, 64'h400, CC_AL); s++;
    prog[s] = mk(s, OP_JIND, 0, 9, 0, 64'h400, CC_AL); s++;
    // window 1: a load (sometimes a long miss) feeding a dead chain
    prog[s] = mk(s, OP_LD,   3, 1, 0, 0, CC_AL); s++;
    prog[s] = mk(s, OP_ADD,  4, 3, 3, 0, CC_AL); s++;
    prog[s] = mk(s, OP_XOR,  4, 4, 1, 0, CC_AL); s++;
    prog[s] = mk(s, OP_ADD, 10, 1, 1, 0, CC_AL); s++;
    prog[s] = mk(s, OP_ST,   0, 10, 1, 0, CC_AL); s++;
    prog[s] = mk(s, OP_MOVI, 4, 0, 0, 0, CC_AL); s++;
    prog[s] = mk(s, OP_SUB, 12, 1, 7, 0, CC_AL); s++;
    prog[s] = mk(s, OP_OR,  13, 12, 1, 0, CC_AL); s++;
    prog[s] = mk(s, OP_ADD, 14, 13, 13, 0, CC_AL); s++;
    prog[s] = mk(s, OP_MOVI, 6, 0, 0, 9, CC_AL); s++;
    // windows 2..7: random arithmetic on r4..r15, mostly overwritten soon
    while (s < PLEN) begin
      int k;
      op_e op;
      k = $urandom_range(0, 9);
      case (k)
        0, 1: op = OP_ADD; 2: op = OP_SUB; 3: op = OP_XOR; 4: op = OP_OR; 5: op = OP_AND;
        6: op = OP_ADDI; 7: op = OP_MOVI; 8: op = OP_CMP; default: op = (s % 10 == 9) ? OP_ST : OP_ADD;
      endcase
      prog[s] = mk(s, op, $urandom_range(4, 15), ($urandom_range(0, 2) == 0) ? 1 : $urandom_range(4, 15),
                   ($urandom_range(0, 2) == 0) ? 7 : $urandom_range(4, 15), 64'($urandom), CC_AL);
      s++;
    end
  endtask

  // ---------------------------------------------------------------- golden model
  typedef struct {
    logic [XLEN-1:0] r [NUM_GPR];
    logic [3:0]      f;
  } arch_t;
  arch_t st;
  arch_t snap [int];
  bit    pred [PLEN];

  function automatic bit cnd(cond_e c, logic [3:0] f);
    case (c)
      CC_EQ: return f[0]; CC_NE: return !f[0]; CC_LT: return f[1] != f[3]; CC_GE: return f[1] == f[3];
      CC_CS: return f[2]; CC_CC: return !f[2]; CC_AL: return 1; default: return 0;
    endcase
  endfunction

  // executes u on st; returns value, flags and the true branch outcome
  task automatic iss(input uop_t u, output logic [XLEN-1:0] v, output logic [3:0] fo, output bit taken);
    logic [XLEN-1:0] a, b;
    logic [XLEN:0] w;
    bit ar, o;
    a = st.r[u.src_a]; b = st.r[u.src_b];
    w = '0; v = '0; ar = 0; o = 0; taken = 0;
    case (u.op)
      OP_ADD:  begin w = {1'b0, a} + {1'b0, b}; v = w[XLEN-1:0]; ar = 1;
                     o = (a[XLEN-1] == b[XLEN-1]) && (v[XLEN-1] != a[XLEN-1]); end
      OP_ADDI: begin w = {1'b0, a} + {1'b0, u.imm}; v = w[XLEN-1:0]; ar = 1;
                     o = (a[XLEN-1] == u.imm[XLEN-1]) && (v[XLEN-1] != a[XLEN-1]); end
      OP_SUB, OP_CMP: begin w = {1'b0, a} - {1'b0, b}; v = w[XLEN-1:0]; ar = 1;
                     o = (a[XLEN-1] != b[XLEN-1]) && (v[XLEN-1] != a[XLEN-1]); end
      OP_AND:  v = a & b;
      OP_OR:   v = a | b;
      OP_XOR:  v = a ^ b;
      OP_MOVI: v = u.imm;
      OP_LD:   v = (a * 64'h9E3779B97F4A7C15) ^ 64'h1234;
      OP_BR:   taken = cnd(u.cond, st.f);
      default: v = '0;
    endcase
    fo = {ar ? o : 1'b0, ar ? w[XLEN] : 1'b0, v[XLEN-1], v == '0};
    if (u.wr_dst) st.r[u.dst] = v;
    if (u.wr_flags) st.f = fo;
  endtask

  // ---------------------------------------------------------------- bookkeeping
  typedef struct {
    int  dyn;
    bit  ineff;
    bit  wrong;          // its prediction is wrong (branch)
    bit  alloc;
    logic [PREG_W-1:0] ptag;
  } rec_t;
  rec_t rec [ROB_SIZE];
  int rob_head = 0, rob_tail = 0, rob_n = 0;

  typedef struct {
    int rob; logic [PREG_W-1:0] ptag; bit wr; logic [XLEN-1:0] v; logic [3:0] f; bit mis; int t;
  } pend_t;
  pend_t pq [$];

  int free_q [$];
  int refc [NUM_PREG];
  int cmap [NUM_AREG];               // committed map: ptag or -1 (I-PRF)

  int dyn = 0, cwin = 0, cyc = 0;
  bit fetching = 1;

  // counters
  int n_commit = 0, n_de = 0, n_tagset = 0, n_iissue = 0, n_ineff_commit = 0, n_cpiv = 0, n_dpiv = 0;
  int n_stall = 0, n_blocked = 0, n_rollback = 0, n_bneck = 0, n_mispred = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [%s] @%0d: %s", NAME, cyc, msg);
    end
  endtask

  // drive the front end, the free list and the primary writebacks
  task automatic drive();
    for (int l = 0; l < REN_W; l++) begin
      int s;
      s = (dyn + l) % PLEN;
      fe_valid[l] = fetching;
      fe_uop[l] = prog[s];
      fe_uop[l].pred_taken = pred[s];
    end
    for (int a = 0; a < REN_EFF; a++) fl_ptag[a] = PREG_W'((a < free_q.size()) ? free_q[a] : 0);
    fl_count = ($clog2(REN_EFF+1))'((free_q.size() < REN_EFF) ? free_q.size() : REN_EFF);
    pwb_valid = '0; pwb_mispred = '0; pwb_wr = '0;
    for (int p = 0; p < PWB_PORTS; p++) begin
      pwb_idx[p] = '0; pwb_ptag[p] = '0; pwb_data[p] = '0; pwb_flags[p] = '0;
    end
    begin
      int p;
      p = 0;
      foreach (pq[i]) begin
        if (p < PWB_PORTS && pq[i].t <= cyc) begin
          pwb_valid[p] = 1; pwb_idx[p] = ROB_W'(pq[i].rob); pwb_ptag[p] = pq[i].ptag;
          pwb_wr[p] = pq[i].wr; pwb_data[p] = pq[i].v; pwb_flags[p] = pq[i].f; pwb_mispred[p] = pq[i].mis;
          pq[i].t = -1;          // mark as sent
          p++;
        end
      end
    end
  endtask

  task automatic do_flush();
    // return the registers of every uncommitted micro-op
    for (int k = 0; k < rob_n; k++) begin
      int i;
      i = (rob_head + k) % ROB_SIZE;
      if (rec[i].alloc) free_q.push_back(int'(rec[i].ptag));
    end
    rob_tail = rob_head; rob_n = 0;
    pq.delete();
    fetching = 0;
  endtask

  // sample just before the rising edge and update the model
  task automatic sample();
    int di, nacc;
    // commit
    if (commit_valid) begin
      n_commit++;
      chk(rob_n >= WIN, "commit with fewer than W micro-ops in flight");
      for (int e = 0; e < WIN; e++) begin
        int i, exp_dyn;
        i = (rob_head + e) % ROB_SIZE;
        exp_dyn = cwin * WIN + e;
        chk(rec[i].dyn == exp_dyn && commit_window[e].pc == prog[exp_dyn % PLEN].pc,
            $sformatf("commit order: entry %0d has pc %0h", e, commit_window[e].pc));
        chk(commit_ineff[e] == rec[i].ineff, "commit ineffectual bit");
        chk(!(rec[i].ineff && rec[i].wrong), "an ineffectual micro-op with a wrong prediction committed");
        if (rec[i].ineff) n_ineff_commit++;
        if (commit_window[e].pivot) begin
          if (prog[exp_dyn % PLEN].op inside {OP_BR, OP_JIND, OP_CMOV}) n_cpiv++; else n_dpiv++;
        end
        // release the previous committed mapping of each register written
        for (int d = 0; d < 2; d++) begin
          int ar;
          bit w;
          ar = (d == 0) ? int'(prog[exp_dyn % PLEN].dst) : FLAGS_AREG;
          w  = (d == 0) ? prog[exp_dyn % PLEN].wr_dst : prog[exp_dyn % PLEN].wr_flags;
          if (w) begin
            if (cmap[ar] >= 0) begin
              refc[cmap[ar]]--;
              if (refc[cmap[ar]] == 0) free_q.push_back(cmap[ar]);
            end
            if (rec[i].ineff) cmap[ar] = -1;
            else begin cmap[ar] = int'(rec[i].ptag); refc[rec[i].ptag]++; end
          end
        end
        if (rec[i].alloc && refc[rec[i].ptag] == 0) free_q.push_back(int'(rec[i].ptag));
      end
      snap.delete(cwin);
      cwin++;
      rob_head = (rob_head + WIN) % ROB_SIZE; rob_n -= WIN;
    end
    // rename
    nacc = 0;
    for (int l = 0; l < REN_W; l++) if (fe_accept[l]) nacc++;
    if (fe_valid != '0 && fe_accept != fe_valid) n_stall++;
    if (flush) chk(nacc == 0, "rename accepted during a flush");
    di = 0;
    for (int l = 0; l < nacc; l++) begin
      int s, i;
      uop_t u;
      logic [XLEN-1:0] v;
      logic [3:0] fo;
      bit tk, eff;
      s = dyn % PLEN;
      u = fe_uop[l];
      if (dyn % WIN == 0) snap[dyn / WIN] = st;
      iss(u, v, fo, tk);
      i = rob_tail;
      eff = (di < REN_EFF) && disp_valid[di] && (disp_uop[di].pc == u.pc);
      rec[i].dyn = dyn; rec[i].ineff = !eff; rec[i].alloc = 0; rec[i].ptag = '0;
      rec[i].wrong = (u.op == OP_BR) && (tk != u.pred_taken);
      if (u.op == OP_BR) begin
        if (tk != u.pred_taken && eff) n_mispred++;
        pred[s] = tk;
      end
      if (eff) begin
        int lat;
        chk(int'(disp_rob_idx[di]) == i, "dispatch ROB index");
        if (u.wr_dst || u.wr_flags) begin
          rec[i].alloc = 1; rec[i].ptag = disp_ptag[di];
        end
        lat = (u.op == OP_LD && (st.r[1] % 16 == 0)) ? 300 : $urandom_range(1, 4);
        pq.push_back('{rob: i, ptag: disp_ptag[di], wr: u.wr_dst || u.wr_flags, v: v, f: fo,
                       mis: rec[i].wrong, t: cyc + lat});
        di++;
      end
      rob_tail = (rob_tail + 1) % ROB_SIZE; rob_n++;
      dyn++;
    end
    chk(int'(fl_used) <= free_q.size(), "free list over-used");
    repeat (int'(fl_used)) void'(free_q.pop_front());
    // issued writebacks leave the queue
    for (int i = pq.size() - 1; i >= 0; i--) if (pq[i].t < 0) pq.delete(i);
    // recovery
    if (flush) begin
      if (ev_rollback) begin
        bit just;
        n_rollback++;
        just = 0;
        for (int k = 0; k < 2 * WIN && k < rob_n; k++)
          if (rec[(rob_head + k) % ROB_SIZE].ineff && rec[(rob_head + k) % ROB_SIZE].wrong) just = 1;
        chk(just, "rollback without an ineffectual misprediction in portions A/B");
      end
      if (ev_bottleneck) n_bneck++;
      do_flush();
    end
    if (restart_valid) begin
      chk(restart_pc == prog[(cwin * WIN) % PLEN].pc, "restart pc is not the start of portion A");
      dyn = cwin * WIN;
      st = snap[cwin];
      fetching = 1;
    end
    if (ev_de_done) n_de++;
    if (ev_tag_set) n_tagset++;
    if (ev_irs_blocked) n_blocked++;
    for (int l = 0; l < IPIPE_W; l++) if (ev_ipipe_issue[l]) n_iissue++;
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0;
    build_program();
    for (int s = 0; s < PLEN; s++) pred[s] = 0;
    for (int r = 0; r < NUM_GPR; r++) st.r[r] = '0;
    st.f = '0;
    for (int a = 0; a < NUM_AREG; a++) begin cmap[a] = a; end
    for (int p = 0; p < NUM_PREG; p++) begin
      refc[p] = (p < NUM_AREG) ? 1 : 0;
      if (p >= NUM_AREG) free_q.push_back(p);
    end
    fetching = 0;
    drive();
    repeat (3) @(negedge clk);
    rst_n = 1;
    fetching = 1;
    for (cyc = 0; cyc < CYCLES; cyc++) begin
      @(negedge clk);
      drive();
      #4;
      sample();
    end
    $display("[%s] commits=%0d de_runs=%0d tag_sets=%0d ipipe_issued=%0d ineff_committed=%0d",
             NAME, n_commit, n_de, n_tagset, n_iissue, n_ineff_commit);
    $display("[%s] c_pivots=%0d d_pivots=%0d rename_stalls=%0d irs_full=%0d rollbacks=%0d bottlenecks=%0d mispredicts=%0d",
             NAME, n_cpiv, n_dpiv, n_stall, n_blocked, n_rollback, n_bneck, n_mispred);
    chk(n_commit > 0, "no window committed");
    chk(n_de > 0, "Detection Engine never ran");
    chk(n_tagset > 0, "no ineffectual bit set");
    chk(n_iissue > 0, "nothing issued in the I-pipe");
    chk(n_ineff_commit > 0, "no ineffectual micro-op committed");
    chk(n_stall > 0, "rename never stalled");
    chk(n_mispred > 0, "no primary misprediction");
    // C pivots (and with them Type-A rollbacks) exist exactly when enabled
    chk(PIVOT_C ? n_cpiv > 0 : n_cpiv == 0, "control pivots do not match the configuration");
    chk(PIVOT_C ? n_rollback > 0 : n_rollback == 0, "rollbacks do not match the configuration");
    chk(PIVOT_D ? n_dpiv > 0 : n_dpiv == 0, "data pivots do not match the configuration");
    // the dead chain behind the slow load is found through D pivots only
    if (PIVOT_D) begin
      chk(n_blocked > 0, "I-RS never full");
      chk(n_bneck > 0, "no bottleneck flush");
    end
    finished = 1;
  end
endmodule
