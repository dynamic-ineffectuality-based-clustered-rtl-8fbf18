// tb_rename_steer: checks renaming and steering against a sequential model.
//
// Each cycle 10 random micro-ops (random ineffectual bits, some memory
// operations) are offered with random limits: free physical registers
// (0..6), ROB space, I-RS space, stall and flush. The model walks the lanes
// in order and accepts the longest prefix that satisfies the limits (at most
// 6 effectual, 4 ineffectual, one free register per effectual writer, room
// in ROB and I-RS; memory operations always effectual). It keeps its own
// speculative and committed maps and checks: the accept vector, the
// compacted I-RS and dispatch lanes with their ROB indices, physical tags and
// source locations, free-list use, `irs_blocked`, and the map restore on a
// flush. Random committed windows update the committed map.
module tb_rename_steer;
  import ineff_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int R = REN_W, REFF = REN_EFF, IPW = IPIPE_W, W = WIN;

  logic stall, flush, irs_blocked, commit;
  logic [R-1:0] in_valid, accept, ren_valid;
  uop_t in_uop [R], ren_uop [R];
  logic [PREG_W-1:0] fl_ptag [REFF], ren_ptag [R], disp_ptag [REFF], alloc_ptag [REFF];
  logic [$clog2(REFF+1)-1:0] fl_count, fl_used;
  logic [$clog2(ROB_SIZE+1)-1:0] rob_free;
  logic [ROB_W-1:0] rob_tail, ren_rob_idx [R], disp_rob_idx [REFF];
  logic [$clog2(IRS_SIZE+1)-1:0] irs_free;
  logic [IPW-1:0] irs_valid;
  irs_entry_t irs_entry [IPW];
  logic [REFF-1:0] disp_valid, alloc_en;
  uop_t disp_uop [REFF];
  loc_t disp_loc_a [REFF], disp_loc_b [REFF], disp_loc_f [REFF];
  db_entry_t commit_window [W];
  logic [W-1:0] commit_ineff;
  logic [PREG_W-1:0] commit_ptag [W];

  rename_steer dut (.*);

  loc_t smap [NUM_AREG], cmap [NUM_AREG];
  int n_acc = 0, n_ineff = 0, n_block = 0, n_flush = 0;

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
    for (int a = 0; a < NUM_AREG; a++) begin
      smap[a] = '{in_iprf: 1'b0, ptag: PREG_W'(a)}; cmap[a] = smap[a];
    end
    stall = 0; flush = 0; commit = 0; in_valid = '0;
    for (int l = 0; l < R; l++) in_uop[l] = '0;
    for (int e = 0; e < W; e++) begin commit_window[e] = '0; commit_ineff[e] = 0; commit_ptag[e] = '0; end
    for (int a = 0; a < REFF; a++) fl_ptag[a] = '0;
    fl_count = '0; rob_free = '0; rob_tail = '0; irs_free = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 6000; c++) begin
      int ne, ni, na, nf, stop, ii, di;
      bit e_block;
      logic [R-1:0] e_acc;
      loc_t cmap_n [NUM_AREG];
      @(negedge clk);
      stall = $urandom_range(0, 15) == 0;
      flush = $urandom_range(0, 40) == 0;
      commit = $urandom_range(0, 3) == 0;
      for (int e = 0; e < W; e++) begin
        commit_window[e] = '0;
        commit_window[e].wr_dst = $urandom_range(0, 1);
        commit_window[e].dst = GPR_W'($urandom);
        commit_window[e].wr_flags = $urandom_range(0, 2) == 0;
        commit_ineff[e] = $urandom_range(0, 1);
        commit_ptag[e] = PREG_W'($urandom_range(0, NUM_PREG - 1));
      end
      in_valid = '0;
      for (int l = 0; l < R; l++) begin
        int k;
        in_valid[l] = (l < $urandom_range(4, R));
        in_uop[l] = '0;
        k = $urandom_range(0, 6);
        in_uop[l].op = (k == 0) ? OP_LD : (k == 1) ? OP_CMP : (k == 2) ? OP_BR : OP_ADD;
        in_uop[l].pc = $urandom; in_uop[l].imm = {$urandom, $urandom};
        in_uop[l].wr_dst = in_uop[l].op inside {OP_ADD, OP_LD};
        in_uop[l].wr_flags = in_uop[l].op inside {OP_ADD, OP_CMP};
        in_uop[l].rd_a = 1; in_uop[l].rd_b = $urandom_range(0, 1); in_uop[l].rd_flags = in_uop[l].op == OP_BR;
        in_uop[l].dst = GPR_W'($urandom); in_uop[l].src_a = GPR_W'($urandom); in_uop[l].src_b = GPR_W'($urandom);
        in_uop[l].ineff = $urandom_range(0, 1);
      end
      for (int a = 0; a < REFF; a++) fl_ptag[a] = PREG_W'($urandom_range(NUM_AREG, NUM_PREG - 1));
      fl_count = ($clog2(REFF+1))'($urandom_range(0, REFF));
      rob_free = ($clog2(ROB_SIZE+1))'(($urandom_range(0, 3) == 0) ? $urandom_range(0, 12) : 200);
      rob_tail = ROB_W'($urandom_range(0, ROB_SIZE - 1));
      irs_free = ($clog2(IRS_SIZE+1))'(($urandom_range(0, 2) == 0) ? $urandom_range(0, 5) : 100);
      #1;
      // model
      ne = 0; ni = 0; na = 0; nf = 0; stop = stall || flush; e_acc = '0; e_block = 0; ii = 0; di = 0;
      for (int l = 0; l < R; l++) begin
        bit ineff, needp, fits;
        loc_t la, lb, lf;
        int ridx;
        ineff = in_uop[l].ineff && in_uop[l].op != OP_LD;
        needp = !ineff && (in_uop[l].wr_dst || in_uop[l].wr_flags);
        if (ineff) fits = in_valid[l] && na < int'(rob_free) && ni < IPW && ni < int'(irs_free);
        else       fits = in_valid[l] && na < int'(rob_free) && ne < REFF && (!needp || nf < int'(fl_count));
        if (!stop && in_valid[l] && !fits && ineff && ni < IPW && ni >= int'(irs_free)) e_block = 1;
        if (stop || !fits) begin stop = 1; continue; end
        e_acc[l] = 1;
        ridx = (int'(rob_tail) + na) % ROB_SIZE;
        la = smap[in_uop[l].src_a]; lb = smap[in_uop[l].src_b]; lf = smap[FLAGS_AREG];
        chk(ren_rob_idx[l] == ROB_W'(ridx) && ren_uop[l].ineff == ineff, "ren lane");
        if (ineff) begin
          chk(irs_valid[ii] && irs_entry[ii].rob_idx == ROB_W'(ridx) && irs_entry[ii].loc_a == la &&
              irs_entry[ii].loc_b == lb && irs_entry[ii].loc_f == lf && irs_entry[ii].imm == in_uop[l].imm,
              $sformatf("I-RS lane %0d", ii));
          if (in_uop[l].wr_dst)   smap[in_uop[l].dst] = '{in_iprf: 1'b1, ptag: '0};
          if (in_uop[l].wr_flags) smap[FLAGS_AREG]    = '{in_iprf: 1'b1, ptag: '0};
          ii++; ni++;
        end else begin
          logic [PREG_W-1:0] p;
          p = needp ? fl_ptag[nf] : '0;
          chk(disp_valid[di] && disp_rob_idx[di] == ROB_W'(ridx) && disp_ptag[di] == p &&
              disp_uop[di].pc == in_uop[l].pc && disp_loc_a[di] == la && disp_loc_b[di] == lb &&
              disp_loc_f[di] == lf, $sformatf("dispatch lane %0d", di));
          if (needp) begin chk(alloc_en[nf] && alloc_ptag[nf] == p, "allocation"); nf++; end
          if (in_uop[l].wr_dst)   smap[in_uop[l].dst] = '{in_iprf: 1'b0, ptag: p};
          if (in_uop[l].wr_flags) smap[FLAGS_AREG]    = '{in_iprf: 1'b0, ptag: p};
          di++; ne++;
        end
        na++;
      end
      chk(accept == e_acc && ren_valid == e_acc, "accept vector");
      chk(int'(fl_used) == nf, "fl_used");
      chk(irs_blocked == e_block, "irs_blocked");
      for (int k = ii; k < IPW; k++) chk(!irs_valid[k], "extra I-RS lane");
      for (int k = di; k < REFF; k++) chk(!disp_valid[k], "extra dispatch lane");
      n_acc += na; n_ineff += ni; n_block += e_block; n_flush += flush;
      // committed map
      cmap_n = cmap;
      if (commit)
        for (int e = 0; e < W; e++) begin
          if (commit_window[e].wr_dst) cmap_n[commit_window[e].dst] = '{in_iprf: commit_ineff[e], ptag: commit_ptag[e]};
          if (commit_window[e].wr_flags) cmap_n[FLAGS_AREG] = '{in_iprf: commit_ineff[e], ptag: commit_ptag[e]};
        end
      cmap = cmap_n;
      if (flush) smap = cmap;
    end
    chk(n_acc > 1000 && n_ineff > 300 && n_block > 10 && n_flush > 10, "coverage");
    $display("accepted=%0d ineffectual=%0d blocked=%0d flushes=%0d", n_acc, n_ineff, n_block, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
