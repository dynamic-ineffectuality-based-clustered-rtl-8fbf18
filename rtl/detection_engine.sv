// detection_engine: finds the ineffectual micro-ops among three committed windows.
//
// Input is the oldest three windows of the Detection Buffer, entries 0..3W-1
// with entry 0 the oldest (windows i-1, i and i+1). Pivots are looked for
// only in the middle window (entries W..2W-1). The result is the set of
// entries tagged ineffectual.
//
// The paper gives this as a recursive search (tag a pivot, then walk back
// through its producers, tagging a producer when every consumer it has
// inside the three windows is already tagged and a later entry overwrites
// each register it writes). This block computes the same set as a parallel
// fixed point, which suits hardware better:
//   T0      = pivots in the middle window (memory operations excluded)
//   T(n+1)  = T(n) | { k : cand(k) and every consumer of k is in T(n) }
//   cand(k) = k is not a memory operation, k has at least one consumer in
//             the three windows, and each register k writes is written
//             again by a later entry of the three windows.
// The search re-examines a producer every time one of its consumers is
// tagged, so it tags a producer exactly when its last consumer has been
// tagged: that is the fixed point above. A producer is found only inside the
// three windows, as in the paper; a consumer that is a memory operation is
// never tagged, so its producers stay effectual.
//
// Timing: `start` for one cycle with `entries` stable until `done`. The
// first cycle loads T0, each further cycle is one step; `done` pulses in the
// cycle after the step that adds nothing, with `ineff_mask` valid from then
// until the next `start`. A chain of d producers takes d+2 cycles.
//
// Follows the paper: three windows analysed, pivots from the middle one,
// registers only, memory operations excluded, the tagging rule. This
// design's choice: the parallel formulation and the treatment of the flags
// register as a second destination (a micro-op is overwritten only when all
// of its destinations are).
module detection_engine
  import ineff_pkg::*;
#(
  parameter int unsigned W = ineff_pkg::WIN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  db_entry_t            entries [3*W],
  output logic                 busy,
  output logic                 done,
  output logic [3*W-1:0]       ineff_mask
);
  localparam int unsigned N = 3 * W;

  // succ[k][j]: entry j reads a register value produced by entry k.
  logic [N-1:0] succ [N];
  logic [N-1:0] cand;
  logic [N-1:0] pivots0;
  logic [N-1:0] tag_q, tag_next;

  always_comb begin
    for (int k = 0; k < N; k++) succ[k] = '0;
    for (int j = 0; j < N; j++) begin
      // Latest earlier writer of each source register of entry j.
      int pa, pb, pf;
      pa = -1; pb = -1; pf = -1;
      for (int k = 0; k < j; k++) begin
        if (entries[k].wr_dst && entries[k].dst == entries[j].src_a) pa = k;
        if (entries[k].wr_dst && entries[k].dst == entries[j].src_b) pb = k;
        if (entries[k].wr_flags) pf = k;
      end
      for (int k = 0; k < j; k++) begin
        if ((entries[j].rd_a && pa == k) || (entries[j].rd_b && pb == k) ||
            (entries[j].rd_flags && pf == k))
          succ[k][j] = 1'b1;
      end
    end
    for (int k = 0; k < N; k++) begin
      logic ovw_dst, ovw_flags;
      ovw_dst   = !entries[k].wr_dst;
      ovw_flags = !entries[k].wr_flags;
      for (int j = k + 1; j < N; j++) begin
        if (entries[j].wr_dst && entries[j].dst == entries[k].dst) ovw_dst = 1'b1;
        if (entries[j].wr_flags) ovw_flags = 1'b1;
      end
      cand[k] = !entries[k].is_mem && (entries[k].wr_dst || entries[k].wr_flags) &&
                ovw_dst && ovw_flags && (succ[k] != '0);
      pivots0[k] = (k >= W) && (k < 2 * W) && entries[k].pivot && !entries[k].is_mem;
    end
    tag_next = tag_q;
    for (int k = 0; k < N; k++)
      if (cand[k] && ((succ[k] & ~tag_q) == '0)) tag_next[k] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_q <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        tag_q <= pivots0;
        busy   <= 1'b1;
      end else if (busy) begin
        tag_q <= tag_next;
        if (tag_next == tag_q) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign ineff_mask = tag_q;

endmodule
