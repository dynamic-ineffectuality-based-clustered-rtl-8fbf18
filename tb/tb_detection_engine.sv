// tb_detection_engine: checks the Detection Engine against a direct,
// recursive rendering of the ineffectual-detection search.
//
// Part 1 runs the engine with windows of 5 on the worked example of the
// design documentation (micro-ops i5..i19: windows i-1, i, i+1), where i12
// (its r31 dies, overwritten by i15) and i14 (a correctly predicted branch)
// are pivots; the expected set is {i5, i8, i10, i12, i13, i14}. Register
// numbers r16, r18, r19 and r31 are renamed r12, r13, r14 and r15 to fit 16
// GPRs. Part 2 compares the engine with the recursive search on random
// windows (default size 10), and checks that it finishes within 3W+2 cycles.
module tb_detection_engine;
  import ineff_pkg::*;

  localparam int unsigned W1 = 5;
  localparam int unsigned W2 = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ----------------------------------------------------------- DUT 1 (W=5)
  logic start1, busy1, done1;
  db_entry_t ent1 [3*W1];
  logic [3*W1-1:0] mask1;
  detection_engine #(.W(W1)) dut1 (.clk, .rst_n, .start(start1), .entries(ent1),
                                   .busy(busy1), .done(done1), .ineff_mask(mask1));

  // ----------------------------------------------------------- DUT 2 (W=10)
  logic start2, busy2, done2;
  db_entry_t ent2 [3*W2];
  logic [3*W2-1:0] mask2;
  detection_engine dut2 (.clk, .rst_n, .start(start2), .entries(ent2),
                         .busy(busy2), .done(done2), .ineff_mask(mask2));

  function automatic db_entry_t mk(logic wd, int d, logic wf, logic ra, int a, logic rb, int b,
                                   logic rf, logic mem, logic piv);
    db_entry_t e;
    e = '0;
    e.wr_dst = wd; e.dst = GPR_W'(d); e.wr_flags = wf;
    e.rd_a = ra; e.src_a = GPR_W'(a); e.rd_b = rb; e.src_b = GPR_W'(b);
    e.rd_flags = rf; e.is_mem = mem; e.pivot = piv;
    return e;
  endfunction

  // ----------------------------------------------------------- reference
  db_entry_t rent [3*W2];
  int        rn;
  logic      rtag [3*W2];

  function automatic int pred_of(int j, int which);  // 0:a 1:b 2:flags
    int p;
    p = -1;
    for (int k = 0; k < j; k++) begin
      if (which == 0 && rent[k].wr_dst && rent[k].dst == rent[j].src_a) p = k;
      if (which == 1 && rent[k].wr_dst && rent[k].dst == rent[j].src_b) p = k;
      if (which == 2 && rent[k].wr_flags) p = k;
    end
    if (which == 0 && !rent[j].rd_a) p = -1;
    if (which == 1 && !rent[j].rd_b) p = -1;
    if (which == 2 && !rent[j].rd_flags) p = -1;
    if (p >= 0 && rent[p].is_mem) p = -1;   // getPred excludes memory operations
    return p;
  endfunction

  function automatic logic is_succ(int p, int s);
    int a, b, f;
    a = -1; b = -1; f = -1;
    for (int k = 0; k < s; k++) begin
      if (rent[k].wr_dst && rent[k].dst == rent[s].src_a) a = k;
      if (rent[k].wr_dst && rent[k].dst == rent[s].src_b) b = k;
      if (rent[k].wr_flags) f = k;
    end
    return (rent[s].rd_a && a == p) || (rent[s].rd_b && b == p) || (rent[s].rd_flags && f == p);
  endfunction

  function automatic logic analyze_olc(int p);
    logic od, of;
    for (int s = p + 1; s < rn; s++)
      if (is_succ(p, s) && !rtag[s]) return 1'b0;
    od = !rent[p].wr_dst;
    of = !rent[p].wr_flags;
    for (int o = p + 1; o < rn; o++) begin
      if (rent[o].wr_dst && rent[o].dst == rent[p].dst) od = 1'b1;
      if (rent[o].wr_flags) of = 1'b1;
    end
    return od && of && (rent[p].wr_dst || rent[p].wr_flags);
  endfunction

  function automatic void analyze_ilc(int inst);
    for (int w = 0; w < 3; w++) begin
      int p;
      p = pred_of(inst, w);
      if (p >= 0 && analyze_olc(p)) begin
        rtag[p] = 1'b1;
        analyze_ilc(p);
      end
    end
  endfunction

  function automatic void identify(int win);
    rn = 3 * win;
    for (int i = 0; i < rn; i++) rtag[i] = 1'b0;
    for (int i = 2 * win - 1; i >= win; i--) begin
      if (rent[i].pivot && !rent[i].is_mem) begin
        rtag[i] = 1'b1;
        analyze_ilc(i);
      end
    end
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    start1 = 0; start2 = 0;
    for (int i = 0; i < 3*W1; i++) ent1[i] = '0;
    for (int i = 0; i < 3*W2; i++) ent2[i] = '0;
    // i5..i19 of the worked example (GPR r16->12, r18->13, r19->14, r31->15; flags written by adds and cmp)
    ent1[0]  = mk(1, 5, 1, 1, 5, 0, 0, 0, 0, 0);   // i5:  r5 = r5 + 1
    ent1[1]  = mk(1, 6, 1, 1, 6, 0, 0, 0, 0, 0);   // i6:  r6 = r6 + 1
    ent1[2]  = mk(1, 7, 1, 1, 6, 0, 0, 0, 0, 0);   // i7:  r7 = r6 + 2
    ent1[3]  = mk(1, 8, 1, 1, 5, 1, 7, 0, 0, 0);   // i8:  r8 = r5 + r7
    ent1[4]  = mk(1, 9, 0, 0, 0, 0, 0, 0, 0, 0);   // i9:  r9 = 0
    ent1[5]  = mk(1, 10, 1, 1, 10, 0, 0, 0, 0, 0); // i10: r10 = r10 + 1
    ent1[6]  = mk(1, 11, 1, 1, 11, 0, 0, 0, 0, 0); // i11: r11 = r11 + 1
    ent1[7]  = mk(1, 15, 1, 1, 8, 1, 10, 0, 0, 1); // i12: r31 = r8 + r10   (RI pivot)
    ent1[8]  = mk(0, 0, 1, 1, 8, 1, 11, 0, 0, 0);  // i13: cmp r8, r11
    ent1[9]  = mk(0, 0, 0, 0, 0, 0, 0, 1, 0, 1);   // i14: beq .foo          (branch pivot)
    ent1[10] = mk(1, 15, 1, 1, 11, 0, 0, 0, 0, 0); // i15: r31 = r11 + 1
    ent1[11] = mk(1, 8, 1, 1, 15, 0, 0, 0, 0, 0);  // i16: r8 = r31 + 1
    ent1[12] = mk(1, 5, 1, 1, 8, 1, 7, 0, 0, 0);   // i17: r5 = r8 + r7
    ent1[13] = mk(1, 10, 1, 1, 12, 1, 11, 0, 0, 0);// i18: r10 = r16 + r11
    ent1[14] = mk(1, 14, 1, 1, 13, 0, 0, 0, 0, 0); // i19: r19 = r18 + 1
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start1 <= 1;
    @(posedge clk);
    start1 <= 0;
    cyc = 0;
    while (!done1) begin @(posedge clk); cyc++; end
    checks++;
    if (mask1 !== 15'b000001110101001) begin
      failures++;
      $display("FAIL example: mask %b expected %b", mask1, 15'b000001110101001);
    end
    // chain i14 <- i13 <- i8 <- i5 is 3 deep: load + 3 steps + 1 quiet step
    checks++;
    if (cyc > 6) begin
      failures++;
      $display("FAIL example: %0d cycles", cyc);
    end
    // a store reading r8 (inserted as i16's consumer) keeps i8 effectual
    ent1[11] = mk(0, 0, 0, 1, 8, 0, 0, 0, 1, 0);
    ent1[12] = mk(1, 8, 1, 1, 15, 0, 0, 0, 0, 0);
    @(posedge clk);
    start1 <= 1;
    @(posedge clk);
    start1 <= 0;
    @(posedge done1);
    @(negedge clk);
    checks++;
    if (mask1[3] !== 1'b0 || mask1[0] !== 1'b0 || mask1[9] !== 1'b1) begin
      failures++;
      $display("FAIL store consumer: mask %b", mask1);
    end

    // random windows against the recursive search
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < 3*W2; i++) begin
        db_entry_t e;
        int kind;
        e = '0;
        kind = $urandom_range(0, 9);
        e.is_mem   = (kind == 0);
        e.wr_dst   = (kind != 1) && ($urandom_range(0, 5) != 0);
        e.dst      = GPR_W'($urandom_range(0, 4));
        e.wr_flags = (kind == 1) || ($urandom_range(0, 2) == 0);
        e.rd_a     = $urandom_range(0, 3) != 0;
        e.src_a    = GPR_W'($urandom_range(0, 4));
        e.rd_b     = $urandom_range(0, 1);
        e.src_b    = GPR_W'($urandom_range(0, 4));
        e.rd_flags = (kind == 1) || ($urandom_range(0, 4) == 0);
        e.pivot    = $urandom_range(0, 3) == 0;
        ent2[i] = e;
        rent[i] = e;
      end
      identify(W2);
      @(posedge clk);
      start2 <= 1;
      @(posedge clk);
      start2 <= 0;
      cyc = 0;
      while (!done2) begin @(posedge clk); cyc++; end
      checks++;
      for (int i = 0; i < 3*W2; i++) begin
        if (mask2[i] !== rtag[i]) begin
          failures++;
          $display("FAIL random %0d: entry %0d engine %b reference %b", t, i, mask2[i], rtag[i]);
          break;
        end
      end
      checks++;
      if (cyc > 3*W2 + 2) begin
        failures++;
        $display("FAIL random %0d: %0d cycles", t, cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
