// tb_mprf: checks the M-PRF: mirrored writes from 10 primary writeback
// ports, reads with ready bits on 12 read ports, ready cleared by
// allocation and set by the write (a write wins over an allocation in the
// same cycle), against a software model.
module tb_mprf;
  import ineff_pkg::*;
  localparam int unsigned RP = 3 * IPIPE_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [PWB_PORTS-1:0] wr_en;
  logic [PREG_W-1:0]    wr_idx [PWB_PORTS];
  logic [XLEN-1:0]      wr_data [PWB_PORTS];
  logic [FLAG_W-1:0]    wr_flags [PWB_PORTS];
  logic [PREG_W-1:0]    rd_idx [RP];
  logic [XLEN-1:0]      rd_data [RP];
  logic [FLAG_W-1:0]    rd_flags [RP];
  logic [RP-1:0]        rd_ready;
  logic [REN_EFF-1:0]   alloc_en;
  logic [PREG_W-1:0]    alloc_idx [REN_EFF];

  mprf dut (.clk, .rst_n, .wr_en, .wr_idx, .wr_data, .wr_flags, .rd_idx, .rd_data, .rd_flags,
            .rd_ready, .alloc_en, .alloc_idx);

  logic [XLEN-1:0]   mv [NUM_PREG];
  logic [FLAG_W-1:0] mfl [NUM_PREG];
  bit                mr [NUM_PREG];
  int                n_notready = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = '0; alloc_en = '0;
    for (int p = 0; p < PWB_PORTS; p++) begin wr_idx[p] = '0; wr_data[p] = '0; wr_flags[p] = '0; end
    for (int p = 0; p < RP; p++) rd_idx[p] = '0;
    for (int a = 0; a < REN_EFF; a++) alloc_idx[a] = '0;
    for (int r = 0; r < NUM_PREG; r++) begin mv[r] = '0; mfl[r] = '0; mr[r] = 1; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int p = 0; p < RP; p++) rd_idx[p] = PREG_W'($urandom_range(0, 40));
      #1;
      checks++;
      for (int p = 0; p < RP; p++) begin
        if (rd_ready[p] !== mr[rd_idx[p]] || rd_data[p] !== mv[rd_idx[p]] || rd_flags[p] !== mfl[rd_idx[p]]) begin
          failures++; $display("FAIL read port %0d reg %0d", p, rd_idx[p]);
        end
        if (!rd_ready[p]) n_notready++;
      end
      // distinct write targets per cycle (one producer per register)
      for (int w = 0; w < PWB_PORTS; w++) begin
        wr_en[w]    = $urandom_range(0, 2) == 0;
        wr_idx[w]   = PREG_W'(w * 4 + $urandom_range(0, 3));
        wr_data[w]  = {$urandom, $urandom};
        wr_flags[w] = FLAG_W'($urandom);
      end
      for (int a = 0; a < REN_EFF; a++) begin
        alloc_en[a]  = $urandom_range(0, 1);
        alloc_idx[a] = PREG_W'($urandom_range(0, 40));
      end
      for (int a = 0; a < REN_EFF; a++) if (alloc_en[a]) mr[alloc_idx[a]] = 0;
      for (int w = 0; w < PWB_PORTS; w++)
        if (wr_en[w]) begin mv[wr_idx[w]] = wr_data[w]; mfl[wr_idx[w]] = wr_flags[w]; mr[wr_idx[w]] = 1; end
    end
    checks++;
    if (n_notready == 0) begin failures++; $display("FAIL ready never low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
