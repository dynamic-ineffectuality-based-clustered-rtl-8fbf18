// ineff_core: the ineffectuality-based secondary cluster and its control.
//
// Top level of the additions that turn an out-of-order core into the
// asymmetric two-cluster design: micro-ops found ineffectual (they only
// feed correctly predicted branches, predicated moves and indirect jumps, or
// produce values nobody reads) are steered to a small in-order I-pipe, so the
// primary cluster executes effectual work only.
//
//   front end --> rename_steer --+--> primary cluster (ports: disp_*)
//                  |    |        +--> irs --> ipipe (I-PRF, M-PRF, ALUs)
//                  |    rpm --marks--> rob <-- completions (pwb_*, ipipe)
//                  |                    |
//   uop_ineff_tags <-- mdre <-- portion A/B status
//        ^                              | commit window
//        +-- detection_buffer <---------+
//                 <-> detection_engine
//
// Identification: at rename the RPM marks micro-ops whose register results
// die unread (RI pivots); at commit the ROB adds correctly predicted control
// micro-ops as pivots; committed windows enter the Detection Buffer, whose
// engine tags ineffectual micro-ops in the micro-op cache bits.
// Execution: micro-ops read from the cache with the bit set are renamed to
// the I-PRF and executed in the I-pipe, which reads effectual values from
// the M-PRF, a mirror of the PRF written by every primary writeback.
// Verification and recovery: the MDRE lets ROB portion A commit once portion
// B is complete and clean; a Type-A misspeculation or an I-pipe bottleneck
// flushes everything and restarts fetch at portion A (`restart_*`).
//
// Not inside (ports instead): the front end with the rest of the micro-op
// cache, the base renamer's free list, the primary cluster with its PRF and
// scheduler, the memory system. The front end presents up to 10 micro-ops
// per cycle on fe_* and sees `fe_accept`; the primary cluster takes
// `disp_*` and reports completions and results on `pwb_*`. Each micro-op's
// ineffectual bit is looked up here from its micro-op cache slot.
module ineff_core
  import ineff_pkg::*;
#(
  parameter int unsigned W       = ineff_pkg::WIN,
  parameter int unsigned NWIN    = ineff_pkg::ROB_WINDOWS,
  parameter int unsigned IRS_N   = ineff_pkg::IRS_SIZE,
  parameter int unsigned UOPC_N  = ineff_pkg::UOPC_ENTRIES,
  parameter int unsigned EPOCH   = 1024,
  parameter int unsigned THRESH  = 64,
  parameter bit          PIVOT_C = 1'b1,
  parameter bit          PIVOT_D = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // front end
  input  logic [REN_W-1:0]     fe_valid,
  input  uop_t                 fe_uop [REN_W],
  output logic [REN_W-1:0]     fe_accept,
  output logic                 restart_valid,
  output logic [31:0]          restart_pc,
  output logic                 flush,
  // base free list
  input  logic [PREG_W-1:0]    fl_ptag [REN_EFF],
  input  logic [$clog2(REN_EFF+1)-1:0] fl_count,
  output logic [$clog2(REN_EFF+1)-1:0] fl_used,
  // primary cluster dispatch
  output logic [REN_EFF-1:0]   disp_valid,
  output uop_t                 disp_uop [REN_EFF],
  output logic [ROB_W-1:0]     disp_rob_idx [REN_EFF],
  output logic [PREG_W-1:0]    disp_ptag [REN_EFF],
  output loc_t                 disp_loc_a [REN_EFF],
  output loc_t                 disp_loc_b [REN_EFF],
  output loc_t                 disp_loc_f [REN_EFF],
  // primary cluster writeback / completion
  input  logic [PWB_PORTS-1:0] pwb_valid,
  input  logic [ROB_W-1:0]     pwb_idx [PWB_PORTS],
  input  logic [PWB_PORTS-1:0] pwb_mispred,
  input  logic [PWB_PORTS-1:0] pwb_wr,
  input  logic [PREG_W-1:0]    pwb_ptag [PWB_PORTS],
  input  logic [XLEN-1:0]      pwb_data [PWB_PORTS],
  input  logic [FLAG_W-1:0]    pwb_flags [PWB_PORTS],
  // commit
  output logic                 commit_valid,
  output db_entry_t            commit_window [W],
  output logic [W-1:0]         commit_ineff,
  // observation
  output logic                 ev_rollback,
  output logic                 ev_bottleneck,
  output logic                 ev_irs_blocked,
  output logic                 ev_tag_set,
  output logic [IPIPE_W-1:0]   ev_ipipe_issue,
  output logic                 ev_de_done,
  output logic                 de_busy,
  output logic [$clog2(DB_WINDOWS+1)-1:0] db_windows,
  output logic [$clog2(UOPC_N+1)-1:0] tags_held
);
  localparam int unsigned RSZ = W * NWIN;

  // ---------------------------------------------------------------- tags
  logic [SLOT_W-1:0] tag_rd_slot [REN_W];
  logic [REN_W-1:0]  tag_rd_ineff;
  uop_t              fe_uop_t [REN_W];
  logic              tag_set_valid, tag_clr_valid, tag_clr_all;
  logic [SLOT_W-1:0] tag_set_slot, tag_clr_slot;

  always_comb begin
    for (int l = 0; l < REN_W; l++) begin
      tag_rd_slot[l]    = fe_uop[l].slot;
      fe_uop_t[l]       = fe_uop[l];
      fe_uop_t[l].ineff = tag_rd_ineff[l];
    end
  end

  uop_ineff_tags #(.ENTRIES(UOPC_N), .RD(REN_W)) u_tags (
    .clk, .rst_n, .rd_slot(tag_rd_slot), .rd_ineff(tag_rd_ineff),
    .set_valid(tag_set_valid), .set_slot(tag_set_slot),
    .clr_valid(tag_clr_valid), .clr_slot(tag_clr_slot), .clr_all(tag_clr_all),
    .num_set(tags_held)
  );

  // ---------------------------------------------------------------- rename
  logic              mdre_busy, irs_blocked, bottleneck, do_commit;
  logic [$clog2(RSZ+1)-1:0]   rob_free, rob_count;
  logic [ROB_W-1:0]  rob_tail;
  logic [$clog2(IRS_N+1)-1:0] irs_free;
  logic [REN_W-1:0]  ren_valid;
  uop_t              ren_uop [REN_W];
  logic [PREG_W-1:0] ren_ptag [REN_W];
  logic [ROB_W-1:0]  ren_rob_idx [REN_W];
  logic [IPIPE_W-1:0] irs_enq_valid;
  irs_entry_t        irs_enq_entry [IPIPE_W];
  logic [REN_EFF-1:0] alloc_en;
  logic [PREG_W-1:0] alloc_ptag [REN_EFF];
  logic [PREG_W-1:0] commit_ptag [W];

  rename_steer #(.R(REN_W), .REFF(REN_EFF), .IPW(IPIPE_W), .W(W), .RSZ(RSZ), .ISZ(IRS_N)) u_ren (
    .clk, .rst_n, .stall(mdre_busy), .flush,
    .in_valid(fe_valid), .in_uop(fe_uop_t), .accept(fe_accept),
    .fl_ptag, .fl_count, .fl_used,
    .rob_free, .rob_tail, .irs_free,
    .ren_valid, .ren_uop, .ren_ptag, .ren_rob_idx,
    .irs_valid(irs_enq_valid), .irs_entry(irs_enq_entry),
    .disp_valid, .disp_uop, .disp_rob_idx, .disp_ptag, .disp_loc_a, .disp_loc_b, .disp_loc_f,
    .alloc_en, .alloc_ptag, .irs_blocked,
    .commit(do_commit), .commit_window, .commit_ineff, .commit_ptag
  );

  logic [2*REN_W-1:0] mark_valid;
  logic [ROB_W-1:0]   mark_idx [2*REN_W];

  rpm #(.R(REN_W), .W(W), .NWIN(NWIN)) u_rpm (
    .clk, .rst_n, .flush, .in_valid(ren_valid), .in_uop(ren_uop), .in_rob_idx(ren_rob_idx),
    .mark_valid, .mark_idx
  );

  // ---------------------------------------------------------------- ROB
  logic [IPIPE_W-1:0] iwb_valid, iwb_misspec;
  logic [ROB_W-1:0]   iwb_idx [IPIPE_W];
  logic a_full, a_done, a_misspec, b_full, b_done, b_misspec;
  logic [31:0]        a_pc;
  logic [SLOT_W-1:0]  ab_slot [2*W];

  rob #(.W(W), .NWIN(NWIN), .R(REN_W), .PWB(PWB_PORTS), .IPW(IPIPE_W),
        .PIVOT_C(PIVOT_C), .PIVOT_D(PIVOT_D)) u_rob (
    .clk, .rst_n,
    .alloc_valid(ren_valid), .alloc_uop(ren_uop), .alloc_ptag(ren_ptag),
    .tail_idx(rob_tail), .free_entries(rob_free),
    .mark_valid, .mark_idx,
    .pwb_valid, .pwb_idx, .pwb_mispred,
    .iwb_valid, .iwb_idx, .iwb_misspec,
    .a_full, .a_done, .a_misspec, .b_full, .b_done, .b_misspec, .a_pc, .ab_slot,
    .commit(do_commit), .flush, .commit_window, .commit_ineff, .commit_ptag,
    .count(rob_count)
  );

  // ---------------------------------------------------------------- I-pipe
  logic [IPIPE_W-1:0] irs_head_valid;
  irs_entry_t         irs_head [IPIPE_W];
  logic [$clog2(IPIPE_W+1)-1:0] irs_deq;

  irs #(.SIZE(IRS_N), .IPW(IPIPE_W)) u_irs (
    .clk, .rst_n, .flush,
    .enq_valid(irs_enq_valid), .enq_entry(irs_enq_entry), .free(irs_free),
    .head_valid(irs_head_valid), .head_entry(irs_head), .deq_count(irs_deq)
  );

  ipipe #(.IPW(IPIPE_W), .PWB(PWB_PORTS), .NPR(NUM_PREG), .AP(REN_EFF)) u_ipipe (
    .clk, .rst_n, .flush,
    .head_valid(irs_head_valid), .head_entry(irs_head), .deq_count(irs_deq),
    .pwb_valid(pwb_valid & pwb_wr), .pwb_ptag, .pwb_data, .pwb_flags,
    .alloc_en, .alloc_ptag,
    .iwb_valid, .iwb_idx, .iwb_misspec
  );

  // ---------------------------------------------------------------- MDRE
  logic db_ready;

  irs_bottleneck #(.EPOCH(EPOCH), .THRESH(THRESH)) u_bneck (
    .clk, .rst_n, .blocked(irs_blocked), .bottleneck
  );

  mdre #(.W(W)) u_mdre (
    .clk, .rst_n,
    .a_full, .a_done, .a_misspec, .b_full, .b_done, .b_misspec, .a_pc, .ab_slot,
    .rob_empty(rob_count == '0), .db_ready, .bottleneck,
    .commit(do_commit), .flush,
    .clr_valid(tag_clr_valid), .clr_slot(tag_clr_slot), .clr_all(tag_clr_all),
    .restart_valid, .restart_pc, .busy(mdre_busy),
    .ev_rollback, .ev_bottleneck
  );

  // ---------------------------------------------------------------- detection
  logic              de_start, de_done;
  db_entry_t         de_entries [3*W];
  logic [3*W-1:0]    de_mask;

  detection_buffer #(.W(W), .NW(DB_WINDOWS)) u_db (
    .clk, .rst_n, .wr_valid(do_commit), .wr_window(commit_window), .wr_ready(db_ready),
    .de_start, .de_entries, .de_done, .de_mask,
    .tag_valid(tag_set_valid), .tag_slot(tag_set_slot), .windows_held(db_windows)
  );

  detection_engine #(.W(W)) u_de (
    .clk, .rst_n, .start(de_start), .entries(de_entries),
    .busy(de_busy), .done(de_done), .ineff_mask(de_mask)
  );

  assign commit_valid   = do_commit;
  assign ev_irs_blocked = irs_blocked;
  assign ev_tag_set     = tag_set_valid;
  assign ev_de_done     = de_done;
  always_comb
    for (int l = 0; l < IPIPE_W; l++) ev_ipipe_issue[l] = (int'(irs_deq) > l);

endmodule
