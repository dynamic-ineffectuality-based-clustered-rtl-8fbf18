// detection_buffer: circular buffer of recently committed micro-ops, 4 windows.
//
// Committed windows arrive whole, in program order (the commit stage retires
// one window at a time). The buffer holds DB_WINDOWS windows of W entries,
// 40 entries in all. When three windows are present and the Detection Engine
// is idle, it starts the engine on them (oldest first) and holds them still
// until the engine is done. It then writes the micro-op cache slot of every
// tagged entry to the ineffectual-bit store, one per cycle, and discards the
// oldest window. The fourth window slot lets commit go on while the engine
// works; when all four are occupied, `wr_ready` is low and commit waits.
//
// Interface: `wr_valid`/`wr_ready` with `wr_window` (W entries, oldest
// first); `de_start`/`de_entries` to the engine, `de_done`/`de_mask` back;
// `tag_valid`/`tag_slot` to the micro-op cache. `flush` is not needed: the
// buffer holds committed, hence correct, micro-ops only.
//
// Follows the paper: 40 entries as 4 windows of 10, analysis when the first
// three windows are full, oldest window discarded after tagging. This
// design's choice: whole-window writes, the one-tag-per-cycle write-out and
// the back-pressure on commit.
module detection_buffer
  import ineff_pkg::*;
#(
  parameter int unsigned W  = ineff_pkg::WIN,
  parameter int unsigned NW = ineff_pkg::DB_WINDOWS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_valid,
  input  db_entry_t         wr_window [W],
  output logic              wr_ready,
  output logic              de_start,
  output db_entry_t         de_entries [3*W],
  input  logic              de_done,
  input  logic [3*W-1:0]    de_mask,
  output logic              tag_valid,
  output logic [SLOT_W-1:0] tag_slot,
  output logic [$clog2(NW+1)-1:0] windows_held
);
  localparam int unsigned N  = 3 * W;
  localparam int unsigned HW = $clog2(NW);

  typedef enum logic [1:0] {S_IDLE, S_ANALYSE, S_TAG} state_e;
  state_e state;

  db_entry_t          buf_q [NW][W];
  logic [HW-1:0]      head;      // oldest window
  logic [$clog2(NW+1)-1:0] count;
  logic [N-1:0]       pending;   // tags still to write out

  assign wr_ready     = (count < NW[$clog2(NW+1)-1:0]);
  assign windows_held = count;

  always_comb begin
    for (int w = 0; w < 3; w++)
      for (int e = 0; e < W; e++)
        de_entries[w*W+e] = buf_q[HW'((int'(head) + w) % NW)][e];
  end

  assign de_start = (state == S_IDLE) && (count >= 3);

  // Lowest pending tag.
  logic [$clog2(N)-1:0] first;
  always_comb begin
    first = '0;
    for (int k = N - 1; k >= 0; k--)
      if (pending[k]) first = k[$clog2(N)-1:0];
  end
  assign tag_valid = (state == S_TAG) && (pending != '0);
  assign tag_slot  = de_entries[first].slot;

  logic push, pop;
  assign push = wr_valid && wr_ready;
  assign pop  = (state == S_TAG) && (pending == '0);

  // Window storage has no reset: a window is written before it is counted.
  always_ff @(posedge clk)
    if (push) buf_q[HW'((int'(head) + int'(count)) % NW)] <= wr_window;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      head    <= '0;
      count   <= '0;
      pending <= '0;
    end else begin
      case (state)
        S_IDLE:    if (de_start) state <= S_ANALYSE;
        S_ANALYSE: if (de_done) begin
                     pending <= de_mask;
                     state   <= S_TAG;
                   end
        S_TAG:     if (pending == '0) state <= S_IDLE;
                   else pending[first] <= 1'b0;
        default:   state <= S_IDLE;
      endcase
      if (pop) head <= HW'((int'(head) + 1) % NW);
      count <= count + ($clog2(NW+1))'(push) - ($clog2(NW+1))'(pop);
    end
  end

endmodule
