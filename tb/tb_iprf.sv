// tb_iprf: checks the I-PRF: per-lane writes of values and flags, the
// younger-lane-wins rule for same-cycle writes, and combinational reads on
// every lane, against a software register array.
module tb_iprf;
  import ineff_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [GPR_W-1:0]  rd_a_idx [IPIPE_W], rd_b_idx [IPIPE_W];
  logic [XLEN-1:0]   rd_a_data [IPIPE_W], rd_b_data [IPIPE_W];
  logic [FLAG_W-1:0] rd_flags;
  logic [IPIPE_W-1:0] wr_en, wr_flags_en;
  logic [GPR_W-1:0]  wr_idx [IPIPE_W];
  logic [XLEN-1:0]   wr_data [IPIPE_W];
  logic [FLAG_W-1:0] wr_flags [IPIPE_W];

  iprf dut (.clk, .rst_n, .rd_a_idx, .rd_a_data, .rd_b_idx, .rd_b_data, .rd_flags,
            .wr_en, .wr_idx, .wr_data, .wr_flags_en, .wr_flags);

  logic [XLEN-1:0]   m [NUM_GPR];
  logic [FLAG_W-1:0] mf;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = '0; wr_flags_en = '0;
    for (int l = 0; l < IPIPE_W; l++) begin
      rd_a_idx[l] = '0; rd_b_idx[l] = '0; wr_idx[l] = '0; wr_data[l] = '0; wr_flags[l] = '0;
    end
    for (int r = 0; r < NUM_GPR; r++) m[r] = '0;
    mf = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int l = 0; l < IPIPE_W; l++) begin
        rd_a_idx[l] = GPR_W'($urandom_range(0, NUM_GPR - 1));
        rd_b_idx[l] = GPR_W'($urandom_range(0, NUM_GPR - 1));
      end
      #1;
      checks++;
      for (int l = 0; l < IPIPE_W; l++) begin
        if (rd_a_data[l] !== m[rd_a_idx[l]] || rd_b_data[l] !== m[rd_b_idx[l]]) begin
          failures++; $display("FAIL read lane %0d", l);
        end
      end
      if (rd_flags !== mf) begin failures++; $display("FAIL flags"); end
      for (int l = 0; l < IPIPE_W; l++) begin
        wr_en[l]       = $urandom_range(0, 1);
        wr_idx[l]      = GPR_W'($urandom_range(0, 3));   // frequent same-register writes
        wr_data[l]     = {$urandom, $urandom};
        wr_flags_en[l] = $urandom_range(0, 1);
        wr_flags[l]    = FLAG_W'($urandom);
      end
      for (int l = 0; l < IPIPE_W; l++) begin
        if (wr_en[l]) m[wr_idx[l]] = wr_data[l];
        if (wr_flags_en[l]) mf = wr_flags[l];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
