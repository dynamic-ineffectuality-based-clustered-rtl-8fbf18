// tb_irs: checks the I-RS queue against a software FIFO: random writes of up
// to 4 entries and random dequeues of up to the available count, the head
// window, the free count, wrap-around of the 128 entries and flush.
module tb_irs;
  import ineff_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                   flush;
  logic [IPIPE_W-1:0]     enq_valid;
  irs_entry_t             enq_entry [IPIPE_W];
  logic [$clog2(IRS_SIZE+1)-1:0] free;
  logic [IPIPE_W-1:0]     head_valid;
  irs_entry_t             head_entry [IPIPE_W];
  logic [$clog2(IPIPE_W+1)-1:0] deq_count;

  irs dut (.clk, .rst_n, .flush, .enq_valid, .enq_entry, .free, .head_valid, .head_entry, .deq_count);

  int model [$];
  int serial = 0;
  int max_fill = 0;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flush = 0; enq_valid = '0; deq_count = '0;
    for (int l = 0; l < IPIPE_W; l++) enq_entry[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      int ne, nd, room;
      @(negedge clk);
      // check state
      checks++;
      if (int'(free) != IRS_SIZE - model.size()) begin
        failures++; $display("FAIL free %0d model %0d", free, IRS_SIZE - model.size());
      end
      for (int l = 0; l < IPIPE_W; l++) begin
        if (head_valid[l] !== (l < model.size())) begin
          failures++; $display("FAIL head_valid[%0d]", l);
        end else if (l < model.size() && int'(head_entry[l].imm) != model[l]) begin
          failures++; $display("FAIL head[%0d] %0d expected %0d", l, head_entry[l].imm, model[l]);
        end
      end
      if (model.size() > max_fill) max_fill = model.size();
      if ($urandom_range(0, 299) == 0) begin
        flush = 1; enq_valid = '0; deq_count = '0;
        model.delete();
        @(negedge clk);
        flush = 0;
        continue;
      end
      room = IRS_SIZE - model.size();
      // phases: fill up, then drain
      ne = $urandom_range(0, (c % 1000 < 600) ? IPIPE_W : 1);
      if (ne > room) ne = room;
      nd = $urandom_range(0, (c % 1000 < 600) ? 1 : IPIPE_W);
      if (nd > model.size()) nd = model.size();
      enq_valid = '0;
      for (int l = 0; l < ne; l++) begin
        enq_valid[l] = 1;
        enq_entry[l] = '0;
        enq_entry[l].imm = XLEN'(serial);
        serial++;
      end
      deq_count = ($clog2(IPIPE_W+1))'(nd);
      for (int l = 0; l < nd; l++) void'(model.pop_front());
      for (int l = 0; l < ne; l++) model.push_back(serial - ne + l);
    end
    checks++;
    if (max_fill != IRS_SIZE) begin
      failures++; $display("FAIL never filled (max %0d)", max_fill);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
