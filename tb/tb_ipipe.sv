// tb_ipipe: checks the I-pipe against an in-order reference.
//
// A queue of random ineffectual micro-ops stands in for the I-RS. Their
// sources are in the I-PRF (an earlier ineffectual producer) or in M-PRF
// registers that the primary pipe writes at random later times. Checked:
// issue stays in order and never exceeds 4 per cycle; no micro-op issues
// before its M-PRF sources are written; the completion index and Type-A
// misspeculation flag of every micro-op; the final I-PRF contents; and the
// peak rate, 40 independent ready micro-ops in 10 cycles.
module tb_ipipe;
  import ineff_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic flush;
  logic [IPIPE_W-1:0] head_valid;
  irs_entry_t head_entry [IPIPE_W];
  logic [$clog2(IPIPE_W+1)-1:0] deq_count;
  logic [PWB_PORTS-1:0] pwb_valid;
  logic [PREG_W-1:0] pwb_ptag [PWB_PORTS];
  logic [XLEN-1:0] pwb_data [PWB_PORTS];
  logic [FLAG_W-1:0] pwb_flags [PWB_PORTS];
  logic [REN_EFF-1:0] alloc_en;
  logic [PREG_W-1:0] alloc_ptag [REN_EFF];
  logic [IPIPE_W-1:0] iwb_valid, iwb_misspec;
  logic [ROB_W-1:0] iwb_idx [IPIPE_W];

  ipipe dut (.clk, .rst_n, .flush, .head_valid, .head_entry, .deq_count, .pwb_valid, .pwb_ptag,
             .pwb_data, .pwb_flags, .alloc_en, .alloc_ptag, .iwb_valid, .iwb_idx, .iwb_misspec);

  localparam int NU = 400;
  localparam int NP = 32;            // M-PRF registers used
  irs_entry_t q [NU + 40];
  bit         exp_mis [NU + 40];
  logic [XLEN-1:0]   mval [NP];
  logic [FLAG_W-1:0] mflg [NP];
  bit                mwritten [NP];
  logic [XLEN-1:0]   ireg [NUM_GPR];
  logic [FLAG_W-1:0] iflg;
  int head = 0, total = 0, nexp = 0;

  function automatic logic [3:0] flags_of(logic [XLEN-1:0] r, bit arith, bit c, bit o);
    return {arith ? o : 1'b0, arith ? c : 1'b0, r[XLEN-1], r == '0};
  endfunction
  function automatic bit cnd(cond_e c, logic [3:0] f);
    case (c)
      CC_EQ: return f[0]; CC_NE: return !f[0]; CC_LT: return f[1] != f[3]; CC_GE: return f[1] == f[3];
      CC_CS: return f[2]; CC_CC: return !f[2]; CC_AL: return 1; default: return 0;
    endcase
  endfunction

  // reference execution of q[i]
  function automatic void ref_exec(int i);
    irs_entry_t e;
    logic [XLEN-1:0] a, b, r;
    logic [XLEN:0] w;
    logic [3:0] f, fo;
    bit c, o, ar, wr;
    e = q[i];
    a = e.loc_a.in_iprf ? ireg[e.src_a] : mval[e.loc_a.ptag];
    b = e.loc_b.in_iprf ? ireg[e.src_b] : mval[e.loc_b.ptag];
    f = e.loc_f.in_iprf ? iflg : mflg[e.loc_f.ptag];
    r = '0; c = 0; o = 0; ar = 0; wr = 1;
    exp_mis[i] = 0;
    case (e.op)
      OP_ADD: begin w = {1'b0, a} + {1'b0, b}; r = w[XLEN-1:0]; c = w[XLEN]; ar = 1;
                    o = (a[XLEN-1] == b[XLEN-1]) && (r[XLEN-1] != a[XLEN-1]); end
      OP_SUB, OP_CMP: begin w = {1'b0, a} - {1'b0, b}; r = w[XLEN-1:0]; c = w[XLEN]; ar = 1;
                    o = (a[XLEN-1] != b[XLEN-1]) && (r[XLEN-1] != a[XLEN-1]); end
      OP_XOR: r = a ^ b;
      OP_MOVI: r = e.imm;
      OP_BR: begin wr = 0; exp_mis[i] = cnd(e.cond, f) != e.pred_taken; end
      OP_JIND: begin wr = 0; exp_mis[i] = a != e.imm; end
      default: wr = 0;
    endcase
    fo = flags_of(r, ar, c, o);
    if (e.wr_dst && wr) ireg[e.dst] = r;
    if (e.wr_flags) iflg = fo;
  endfunction

  function automatic loc_t rloc(bit iprf_ok);
    loc_t l;
    l.in_iprf = iprf_ok && $urandom_range(0, 1);
    l.ptag = PREG_W'($urandom_range(0, NP - 1));
    return l;
  endfunction

  function automatic irs_entry_t rand_entry(int n, bit indep);
    irs_entry_t e;
    int k;
    e = '0;
    e.rob_idx = ROB_W'(n % ROB_SIZE);
    k = $urandom_range(0, 6);
    case (k)
      0: e.op = OP_ADD; 1: e.op = OP_SUB; 2: e.op = OP_XOR; 3: e.op = OP_MOVI;
      4: e.op = OP_CMP; 5: e.op = OP_BR;  default: e.op = OP_JIND;
    endcase
    e.cond = cond_e'($urandom_range(0, 7));
    e.rd_a = e.op inside {OP_ADD, OP_SUB, OP_XOR, OP_CMP, OP_JIND};
    e.rd_b = e.op inside {OP_ADD, OP_SUB, OP_XOR, OP_CMP};
    e.rd_flags = (e.op == OP_BR);
    e.src_a = GPR_W'($urandom_range(0, 7));
    e.src_b = GPR_W'($urandom_range(0, 7));
    e.loc_a = rloc(!indep); e.loc_b = rloc(!indep); e.loc_f = rloc(!indep);
    if (!e.rd_a) e.loc_a = '0;
    if (!e.rd_b) e.loc_b = '0;
    if (!e.rd_flags) e.loc_f = '0;
    e.wr_dst = e.op inside {OP_ADD, OP_SUB, OP_XOR, OP_MOVI};
    e.wr_flags = e.op inside {OP_ADD, OP_SUB, OP_CMP};
    e.dst = GPR_W'(indep ? 8 + (n % 8) : $urandom_range(0, 7));
    e.imm = ($urandom_range(0, 1)) ? {$urandom, $urandom} : XLEN'(n);
    e.pred_taken = $urandom_range(0, 1);
    return e;
  endfunction

  // drive the head window from the queue
  always_comb begin
    for (int l = 0; l < IPIPE_W; l++) begin
      head_valid[l] = (head + l < total);
      head_entry[l] = q[(head + l < total) ? head + l : 0];
    end
  end

  // check each issue
  always @(posedge clk) begin
    if (rst_n) begin
      int n;
      n = 0;
      for (int l = 0; l < IPIPE_W; l++) begin
        if (iwb_valid[l]) begin
          n++;
          checks++;
          if (l != n - 1 || int'(iwb_idx[l]) != int'(q[head + l].rob_idx)) begin
            failures++; $display("FAIL order lane %0d", l);
          end
          if (q[head + l].rd_a && !q[head + l].loc_a.in_iprf && !mwritten[q[head + l].loc_a.ptag] ||
              q[head + l].rd_b && !q[head + l].loc_b.in_iprf && !mwritten[q[head + l].loc_b.ptag] ||
              q[head + l].rd_flags && !q[head + l].loc_f.in_iprf && !mwritten[q[head + l].loc_f.ptag]) begin
            failures++; $display("FAIL issued %0d before its M-PRF source was written", head + l);
          end
          ref_exec(head + l);
          if (iwb_misspec[l] !== exp_mis[head + l]) begin
            failures++; $display("FAIL misspec of %0d: %b expected %b", head + l, iwb_misspec[l], exp_mis[head + l]);
          end
          if (exp_mis[head + l]) nexp++;
        end
      end
      if (int'(deq_count) != n) begin failures++; $display("FAIL deq_count"); end
      head <= head + n;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    flush = 0; pwb_valid = '0; alloc_en = '0;
    for (int p = 0; p < PWB_PORTS; p++) begin pwb_ptag[p] = '0; pwb_data[p] = '0; pwb_flags[p] = '0; end
    for (int a = 0; a < REN_EFF; a++) alloc_ptag[a] = '0;
    for (int r = 0; r < NP; r++) begin mval[r] = '0; mflg[r] = '0; mwritten[r] = 1; end
    for (int r = 0; r < NUM_GPR; r++) ireg[r] = '0;
    iflg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 1: peak rate on 40 independent, ready micro-ops
    for (int i = 0; i < 40; i++) q[i] = rand_entry(i, 1);
    @(negedge clk);
    total = 40;
    t0 = 0;
    while (head < 40) begin @(negedge clk); t0++; end
    checks++;
    if (t0 != 10) begin failures++; $display("FAIL 40 independent micro-ops took %0d cycles, expected 10", t0); end
    // phase 2: allocate the M-PRF registers (not ready), then random traffic
    @(negedge clk);
    for (int r = 0; r < NP; r += REN_EFF) begin
      for (int a = 0; a < REN_EFF; a++) begin
        alloc_en[a] = (r + a < NP);
        alloc_ptag[a] = PREG_W'((r + a) % NP);
        if (r + a < NP) mwritten[r + a] = 0;
      end
      @(negedge clk);
    end
    alloc_en = '0;
    for (int i = 40; i < 40 + NU; i++) q[i] = rand_entry(i, 0);
    total = 40 + NU;
    for (int c = 0; c < 400 && head < total; c++) begin
      for (int p = 0; p < PWB_PORTS; p++) begin
        int r;
        r = p * 4 + $urandom_range(0, 3);
        pwb_valid[p] = (p < 8) && ($urandom_range(0, 5) == 0);
        pwb_ptag[p] = PREG_W'(r);
        pwb_data[p] = ($urandom_range(0, 1)) ? {$urandom, $urandom} : XLEN'(40 + $urandom_range(0, NU));
        pwb_flags[p] = 4'($urandom);
      end
      @(negedge clk);
      for (int p = 0; p < PWB_PORTS; p++)
        if (pwb_valid[p]) begin
          mval[pwb_ptag[p]] = pwb_data[p]; mflg[pwb_ptag[p]] = pwb_flags[p]; mwritten[pwb_ptag[p]] = 1;
        end
    end
    pwb_valid = '0;
    repeat (200) @(negedge clk);
    checks++;
    if (head != total) begin failures++; $display("FAIL only %0d of %0d issued", head, total); end
    checks++;
    if (nexp == 0) begin failures++; $display("FAIL no misspeculation exercised"); end
    for (int r = 0; r < NUM_GPR; r++) begin
      checks++;
      if (dut.u_iprf.regs[r] !== ireg[r]) begin failures++; $display("FAIL I-PRF r%0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
