// irs: reservation station of the I-pipe, an in-order queue.
//
// The I-pipe issues in program order: only the oldest entries are ever
// considered, so the I-RS is a circular FIFO of SIZE entries. The renamer
// writes up to IPW entries per cycle (a prefix of `enq_valid`, oldest in
// lane 0); the I-pipe takes the first `deq_count` entries, which it sees on
// `head_entry[0..IPW-1]` with `head_valid`. `free` tells the renamer how many
// entries it may write this cycle. `flush` empties the queue.
//
// Follows the paper: one I-RS, oldest entry considered for execution,
// 128 entries (I-RS_size of the main design point), flushed on rollback.
// This design's choice: the FIFO organisation and the port counts.
module irs
  import ineff_pkg::*;
#(
  parameter int unsigned SIZE = ineff_pkg::IRS_SIZE,
  parameter int unsigned IPW  = ineff_pkg::IPIPE_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   flush,
  input  logic [IPW-1:0]         enq_valid,
  input  irs_entry_t             enq_entry [IPW],
  output logic [$clog2(SIZE+1)-1:0] free,
  output logic [IPW-1:0]         head_valid,
  output irs_entry_t             head_entry [IPW],
  input  logic [$clog2(IPW+1)-1:0] deq_count
);
  localparam int unsigned PW = $clog2(SIZE);
  localparam int unsigned CW = $clog2(SIZE + 1);

  irs_entry_t    q [SIZE];
  logic [PW-1:0] head, tail;
  logic [CW-1:0] cnt;

  int unsigned n_enq;
  always_comb begin
    n_enq = 0;
    for (int l = 0; l < IPW; l++) if (enq_valid[l]) n_enq++;
    for (int l = 0; l < IPW; l++) begin
      head_valid[l] = (int'(cnt) > l);
      head_entry[l] = q[PW'((int'(head) + l) % SIZE)];
    end
  end

  assign free = CW'(SIZE) - cnt;

  // Queue storage has no reset: an entry is written before it is counted.
  always_ff @(posedge clk)
    if (rst_n && !flush)
      for (int l = 0; l < IPW; l++)
        if (enq_valid[l]) q[PW'((int'(tail) + l) % SIZE)] <= enq_entry[l];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0;
      tail <= '0;
      cnt  <= '0;
    end else if (flush) begin
      head <= '0;
      tail <= '0;
      cnt  <= '0;
    end else begin
      tail <= PW'((int'(tail) + n_enq) % SIZE);
      head <= PW'((int'(head) + int'(deq_count)) % SIZE);
      cnt  <= cnt + CW'(n_enq) - CW'(deq_count);
    end
  end

  // The I-pipe never takes more than is there, the renamer never writes more
  // than there is room for.
  a_deq: assert property (@(posedge clk) disable iff (!rst_n || flush)
                          int'(deq_count) <= int'(cnt))
    else $error("irs: dequeue beyond count");
  a_enq: assert property (@(posedge clk) disable iff (!rst_n || flush)
                          n_enq <= int'(free))
    else $error("irs: enqueue beyond free space");

endmodule
