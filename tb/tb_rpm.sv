// tb_rpm: checks the Register Producer Map's dead-value (RI pivot) marks.
//
// First the worked example: i0..i19 renamed one per cycle with windows of 5;
// renaming i15 (r31 = r11 + 1) must mark i12 (r31 = r8 + r10, never read,
// previous window) as dead for its GPR. Then random rename groups of up to
// 10 micro-ops at the default sizes are compared with a software model of
// the map (last producer, read-since bit, current/previous window rule),
// including flushes.
module tb_rpm;
  import ineff_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int unsigned R = REN_W;

  logic             flush;
  logic [R-1:0]     in_valid;
  uop_t             in_uop [R];
  logic [ROB_W-1:0] in_rob_idx [R];
  logic [2*R-1:0]   mark_valid;
  logic [ROB_W-1:0] mark_idx [2*R];

  rpm dut (.clk, .rst_n, .flush, .in_valid, .in_uop, .in_rob_idx, .mark_valid, .mark_idx);

  // example instance, windows of 5
  logic [R-1:0]     ex_valid;
  uop_t             ex_uop [R];
  logic [ROB_W-1:0] ex_idx [R];
  logic [2*R-1:0]   ex_mark_valid;
  logic [ROB_W-1:0] ex_mark_idx [2*R];
  rpm #(.W(5)) dut5 (.clk, .rst_n, .flush(1'b0), .in_valid(ex_valid), .in_uop(ex_uop),
                     .in_rob_idx(ex_idx), .mark_valid(ex_mark_valid), .mark_idx(ex_mark_idx));

  // software model
  int  m_prod [NUM_AREG];
  bit  m_valid [NUM_AREG];
  bit  m_dep [NUM_AREG];

  function automatic bit near(int p, int c);
    int wp, wc;
    wp = p / WIN; wc = c / WIN;
    return (wp == wc) || (wp == (wc + ROB_WINDOWS - 1) % ROB_WINDOWS);
  endfunction

  function automatic uop_t rand_uop();
    uop_t u;
    u = '0;
    u.wr_dst   = $urandom_range(0, 3) != 0;
    u.dst      = GPR_W'($urandom_range(0, 5));
    u.wr_flags = $urandom_range(0, 1);
    u.rd_a     = $urandom_range(0, 2) != 0;
    u.src_a    = GPR_W'($urandom_range(0, 5));
    u.rd_b     = $urandom_range(0, 1);
    u.src_b    = GPR_W'($urandom_range(0, 5));
    u.rd_flags = $urandom_range(0, 3) == 0;
    return u;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int idx;
    int n_marks;
    flush = 0; in_valid = '0; ex_valid = '0;
    for (int l = 0; l < R; l++) begin
      in_uop[l] = '0; in_rob_idx[l] = '0; ex_uop[l] = '0; ex_idx[l] = '0;
    end
    for (int a = 0; a < NUM_AREG; a++) begin m_valid[a] = 0; m_dep[a] = 0; m_prod[a] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- worked example, one micro-op per cycle (only the r31 / r8 chain matters)
    for (int i = 0; i < 20; i++) begin
      uop_t u;
      u = '0;
      u.wr_dst = 1;
      case (i)
        8:  begin u.dst = 8; u.rd_a = 1; u.src_a = 5; u.rd_b = 1; u.src_b = 7; end
        12: begin u.dst = 15; u.rd_a = 1; u.src_a = 8; u.rd_b = 1; u.src_b = 10; end
        13: begin u.wr_dst = 0; u.wr_flags = 1; u.rd_a = 1; u.src_a = 8; u.rd_b = 1; u.src_b = 11; end
        14: begin u.wr_dst = 0; u.rd_flags = 1; end
        15: begin u.dst = 15; u.rd_a = 1; u.src_a = 11; end
        16: begin u.dst = 8; u.rd_a = 1; u.src_a = 15; end
        default: begin u.dst = GPR_W'(i % 16 == 8 || i % 16 == 15 ? 0 : i % 16); end
      endcase
      ex_valid <= '0;
      ex_valid[0] <= 1'b1;
      ex_uop[0] <= u;
      ex_idx[0] <= ROB_W'(i);
      #1;
      @(negedge clk);
      if (i == 15) begin
        checks++;
        if (!ex_mark_valid[0] || ex_mark_idx[0] != 12) begin
          failures++;
          $display("FAIL example: renaming i15 should mark i12 (valid %b idx %0d)", ex_mark_valid[0], ex_mark_idx[0]);
        end
      end else if (i == 16) begin
        // i8's r8 was read by i12 and i13: no mark
        checks++;
        if (ex_mark_valid[0]) begin
          failures++;
          $display("FAIL example: renaming i16 must not mark i8");
        end
      end
      @(posedge clk);
    end
    ex_valid <= '0;

    // ---- random groups against the model
    idx = 0;
    n_marks = 0;
    for (int c = 0; c < 3000; c++) begin
      int n;
      bit exp_v [2*R];
      int exp_i [2*R];
      uop_t g [R];
      @(negedge clk);
      if ($urandom_range(0, 99) == 0) begin
        flush = 1;
        in_valid = '0;
        for (int a = 0; a < NUM_AREG; a++) begin m_valid[a] = 0; m_dep[a] = 0; end
        @(negedge clk);
        flush = 0;
      end
      n = $urandom_range(0, R);
      in_valid = '0;
      for (int l = 0; l < R; l++) begin
        g[l] = rand_uop();
        in_uop[l] = g[l];
        in_rob_idx[l] = ROB_W'((idx + l) % ROB_SIZE);
        if (l < n) in_valid[l] = 1'b1;
      end
      for (int m = 0; m < 2*R; m++) begin exp_v[m] = 0; exp_i[m] = 0; end
      for (int l = 0; l < n; l++) begin
        int cur;
        cur = (idx + l) % ROB_SIZE;
        if (g[l].rd_a) m_dep[g[l].src_a] = 1;
        if (g[l].rd_b) m_dep[g[l].src_b] = 1;
        if (g[l].rd_flags) m_dep[FLAGS_AREG] = 1;
        if (g[l].wr_dst) begin
          if (m_valid[g[l].dst] && !m_dep[g[l].dst] && near(m_prod[g[l].dst], cur)) begin
            exp_v[2*l] = 1; exp_i[2*l] = m_prod[g[l].dst];
          end
          m_valid[g[l].dst] = 1; m_dep[g[l].dst] = 0; m_prod[g[l].dst] = cur;
        end
        if (g[l].wr_flags) begin
          if (m_valid[FLAGS_AREG] && !m_dep[FLAGS_AREG] && near(m_prod[FLAGS_AREG], cur)) begin
            exp_v[2*l+1] = 1; exp_i[2*l+1] = m_prod[FLAGS_AREG];
          end
          m_valid[FLAGS_AREG] = 1; m_dep[FLAGS_AREG] = 0; m_prod[FLAGS_AREG] = cur;
        end
      end
      #1;
      checks++;
      for (int m = 0; m < 2*R; m++) begin
        if (mark_valid[m] !== exp_v[m] || (exp_v[m] && int'(mark_idx[m]) != exp_i[m])) begin
          failures++;
          $display("FAIL cycle %0d mark %0d: got %b/%0d expected %b/%0d", c, m, mark_valid[m], mark_idx[m], exp_v[m], exp_i[m]);
          break;
        end
        if (exp_v[m]) n_marks++;
      end
      idx = (idx + n) % ROB_SIZE;
    end
    checks++;
    if (n_marks < 100) begin
      failures++;
      $display("FAIL: only %0d marks exercised", n_marks);
    end
    @(negedge clk);
    in_valid = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
