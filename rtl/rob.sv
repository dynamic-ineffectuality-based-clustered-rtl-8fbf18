// rob: windowed reorder buffer with the ineffectuality bookkeeping.
//
// 370 entries form 37 windows of 10; an entry's window ID is its index / W.
// Allocation is in program order, up to R micro-ops per cycle. Each entry
// keeps what the added mechanisms need: the `ineffectual_ROB_entry` bit (the
// micro-op went to the I-pipe), the register-ineffectual dead marks from the
// Register Producer Map, completion, the misprediction seen by the primary
// pipe and the Type-A misspeculation seen by the I-pipe.
//
// The oldest window is portion A, the next one portion B, the rest portion C.
// The ROB reports for A and B whether they are full and complete and
// whether B (or A) holds a misspeculation; the recovery engine decides. On
// `commit` the whole of portion A retires at once (commit width = window
// size) and is presented on `commit_window` for the Detection Buffer, with
// the pivot bit computed at that moment:
//   pivot = not memory and ( C: a branch or indirect jump predicted
//           correctly, or a predicated move predicted false correctly;
//           D: every register it writes was marked dead by the RPM ).
// On `flush` every entry is dropped (tail returns to head).
//
// Interface: alloc lanes (prefix of `alloc_valid`), `tail_idx` and
// `free_entries` for the renamer; RPM marks; PWB primary and IPW I-pipe
// completion ports; portion status and `commit`/`flush` from the recovery
// engine. Completion and marks take effect at the clock edge.
//
// Follows the paper: 370 entries / 37 windows, the ineffectual_ROB_entry and
// RI_pivot bits, portions A/B/C, window commit, pivot marking at commit, the
// C/D/CD pivot classes (parameters PIVOT_C, PIVOT_D; CD by default). This
// design's choice: the RI_pivot bit is kept as two dead marks (GPR and
// flags), allocation and commit only as whole windows of the index space.
module rob
  import ineff_pkg::*;
#(
  parameter int unsigned W       = ineff_pkg::WIN,
  parameter int unsigned NWIN    = ineff_pkg::ROB_WINDOWS,
  parameter int unsigned R       = ineff_pkg::REN_W,
  parameter int unsigned PWB     = ineff_pkg::PWB_PORTS,
  parameter int unsigned IPW     = ineff_pkg::IPIPE_W,
  parameter bit          PIVOT_C = 1'b1,
  parameter bit          PIVOT_D = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  // allocation
  input  logic [R-1:0]      alloc_valid,
  input  uop_t              alloc_uop [R],
  input  logic [PREG_W-1:0] alloc_ptag [R],
  output logic [ROB_W-1:0]  tail_idx,
  output logic [$clog2(W*NWIN+1)-1:0] free_entries,
  // RPM dead marks (even: GPR, odd: flags)
  input  logic [2*R-1:0]    mark_valid,
  input  logic [ROB_W-1:0]  mark_idx [2*R],
  // completion
  input  logic [PWB-1:0]    pwb_valid,
  input  logic [ROB_W-1:0]  pwb_idx [PWB],
  input  logic [PWB-1:0]    pwb_mispred,
  input  logic [IPW-1:0]    iwb_valid,
  input  logic [ROB_W-1:0]  iwb_idx [IPW],
  input  logic [IPW-1:0]    iwb_misspec,
  // portion status
  output logic              a_full,
  output logic              a_done,
  output logic              a_misspec,
  output logic              b_full,
  output logic              b_done,
  output logic              b_misspec,
  output logic [31:0]       a_pc,
  output logic [SLOT_W-1:0] ab_slot [2*W],
  // commit / flush
  input  logic              commit,
  input  logic              flush,
  output db_entry_t         commit_window [W],
  output logic [W-1:0]      commit_ineff,
  output logic [PREG_W-1:0] commit_ptag [W],
  output logic [$clog2(W*NWIN+1)-1:0] count
);
  localparam int unsigned SIZE = W * NWIN;
  localparam int unsigned CW   = $clog2(SIZE + 1);

  typedef struct packed {
    logic              done;
    logic              ineff;
    logic              dead_dst;
    logic              dead_flags;
    logic              mispred;
    logic              misspec;
    logic [PREG_W-1:0] ptag;
    uop_t              uop;
  } rob_entry_t;

  rob_entry_t        ent [SIZE];
  logic [ROB_W-1:0]  head, tail;
  logic [CW-1:0]     cnt;

  function automatic logic [ROB_W-1:0] wrap(int unsigned i);
    return ROB_W'(i % SIZE);
  endfunction

  assign tail_idx     = tail;
  assign count        = cnt;
  assign free_entries = CW'(SIZE) - cnt;

  // ---------------------------------------------------------------- status
  always_comb begin
    a_full    = (cnt >= CW'(W));
    b_full    = (cnt >= CW'(2 * W));
    a_done    = 1'b1;
    b_done    = 1'b1;
    a_misspec = 1'b0;
    b_misspec = 1'b0;
    for (int e = 0; e < W; e++) begin
      rob_entry_t ea, eb;
      ea = ent[wrap(int'(head) + e)];
      eb = ent[wrap(int'(head) + W + e)];
      a_done    &= ea.done;
      b_done    &= eb.done;
      a_misspec |= ea.misspec;
      b_misspec |= eb.misspec;
      ab_slot[e]     = ea.uop.slot;
      ab_slot[W + e] = eb.uop.slot;
    end
    a_pc = ent[head].uop.pc;
  end

  // ---------------------------------------------------------------- commit view
  always_comb begin
    for (int e = 0; e < W; e++) begin
      rob_entry_t x;
      logic c_piv, d_piv;
      x = ent[wrap(int'(head) + e)];
      c_piv = PIVOT_C && x.done && !x.mispred &&
              ((x.uop.op == OP_BR) || (x.uop.op == OP_JIND) ||
               ((x.uop.op == OP_CMOV) && !x.uop.pred_taken));
      d_piv = PIVOT_D && (x.uop.wr_dst || x.uop.wr_flags) &&
              (!x.uop.wr_dst || x.dead_dst) && (!x.uop.wr_flags || x.dead_flags);
      commit_window[e] = '{
        pc:       x.uop.pc,
        slot:     x.uop.slot,
        is_mem:   is_mem_op(x.uop.op),
        pivot:    !is_mem_op(x.uop.op) && (c_piv || d_piv),
        wr_dst:   x.uop.wr_dst,
        dst:      x.uop.dst,
        wr_flags: x.uop.wr_flags,
        rd_a:     x.uop.rd_a,
        src_a:    x.uop.src_a,
        rd_b:     x.uop.rd_b,
        src_b:    x.uop.src_b,
        rd_flags: x.uop.rd_flags
      };
      commit_ineff[e] = x.ineff;
      commit_ptag[e]  = x.ptag;
    end
  end

  // ---------------------------------------------------------------- update
  int unsigned n_alloc;
  always_comb begin
    n_alloc = 0;
    for (int l = 0; l < R; l++) if (alloc_valid[l]) n_alloc++;
  end

  // Entry storage has no reset: an entry is written at allocation before
  // anything reads it.
  always_ff @(posedge clk) begin
    if (rst_n && !flush) begin
      for (int l = 0; l < R; l++) begin
        if (alloc_valid[l]) begin
          ent[wrap(int'(tail) + l)] <= '{done: 1'b0, ineff: alloc_uop[l].ineff,
                                        dead_dst: 1'b0, dead_flags: 1'b0,
                                        mispred: 1'b0, misspec: 1'b0,
                                        ptag: alloc_ptag[l], uop: alloc_uop[l]};
        end
      end
      for (int m = 0; m < 2 * R; m++) begin
        if (mark_valid[m]) begin
          if (m % 2 == 0) ent[mark_idx[m]].dead_dst   <= 1'b1;
          else            ent[mark_idx[m]].dead_flags <= 1'b1;
        end
      end
      for (int p = 0; p < PWB; p++) begin
        if (pwb_valid[p]) begin
          ent[pwb_idx[p]].done    <= 1'b1;
          ent[pwb_idx[p]].mispred <= pwb_mispred[p];
        end
      end
      for (int p = 0; p < IPW; p++) begin
        if (iwb_valid[p]) begin
          ent[iwb_idx[p]].done    <= 1'b1;
          ent[iwb_idx[p]].misspec <= iwb_misspec[p];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0;
      tail <= '0;
      cnt  <= '0;
    end else if (flush) begin
      tail <= head;
      cnt  <= '0;
    end else begin
      tail <= wrap(int'(tail) + n_alloc);
      if (commit) begin
        head <= wrap(int'(head) + W);
        cnt  <= cnt + CW'(n_alloc) - CW'(W);
      end else begin
        cnt  <= cnt + CW'(n_alloc);
      end
    end
  end

endmodule
