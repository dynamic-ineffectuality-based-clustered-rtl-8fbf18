// rename_steer: the renamer's additions, steering each micro-op to a cluster.
//
// Up to R = 10 micro-ops arrive per cycle in program order, each carrying
// the ineffectual bit of its micro-op cache entry. The renamer accepts the
// longest prefix that fits: at most REN_EFF (6) effectual and IPW (4)
// ineffectual micro-ops, a free physical register for each effectual one
// that writes a register, room in the ROB and, for ineffectual ones, in the
// I-RS. For each accepted micro-op, in order:
//   - sources are looked up in the map table, which says for every
//     architectural register whether its latest value is in the I-PRF (an
//     ineffectual producer) or in a physical register of the PRF / M-PRF;
//   - an effectual micro-op gets a physical register from the base core's
//     free list and is dispatched to the primary cluster; its flags, if it
//     writes them, live with that register;
//   - an ineffectual micro-op writes the I-PRF entry of its architectural
//     destination (no allocation) and is written into the I-RS;
//   - every micro-op gets a ROB entry and goes through the Register
//     Producer Map (done by the caller from the same outputs).
// `ren_uop` is the offered micro-op itself, with only its ineffectual bit
// recomputed (memory operations are never steered), so most of its bits are
// wires from the input; it saves the ROB and RPM a second copy of the lanes.
// When the first micro-op that could not be taken is ineffectual and the
// I-RS was full, `irs_blocked` is raised (input of the bottleneck monitor).
//
// A second map, updated when a window commits, holds the committed
// mapping; on `flush` (rollback to the start of ROB portion A, which is
// exactly the committed state) the speculative map is restored from it.
// This plays the part of the window-start checkpoint the paper keeps in the
// branch order buffer.
//
// Follows the paper: ≤ 6 effectual and ≤ I-pipe-width ineffectual renames
// per cycle, destination mapped to the PRF or the I-PRF, the ROB entry's
// ineffectual bit, the I-RS entry for ineffectual micro-ops. The base
// renamer (free list, register release) is not part of this block. This
// design's choice: the acceptance rule and the committed-map checkpoint.
module rename_steer
  import ineff_pkg::*;
#(
  parameter int unsigned R    = ineff_pkg::REN_W,
  parameter int unsigned REFF = ineff_pkg::REN_EFF,
  parameter int unsigned IPW  = ineff_pkg::IPIPE_W,
  parameter int unsigned W    = ineff_pkg::WIN,
  parameter int unsigned RSZ  = ineff_pkg::ROB_SIZE,
  parameter int unsigned ISZ  = ineff_pkg::IRS_SIZE
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   stall,
  input  logic                   flush,
  // from the front end
  input  logic [R-1:0]           in_valid,
  input  uop_t                   in_uop [R],
  output logic [R-1:0]           accept,
  // base free list
  input  logic [PREG_W-1:0]      fl_ptag [REFF],
  input  logic [$clog2(REFF+1)-1:0] fl_count,
  output logic [$clog2(REFF+1)-1:0] fl_used,
  // resources
  input  logic [$clog2(RSZ+1)-1:0] rob_free,
  input  logic [ROB_W-1:0]       rob_tail,
  input  logic [$clog2(ISZ+1)-1:0] irs_free,
  // to ROB and RPM (lane-aligned with the input)
  output logic [R-1:0]           ren_valid,
  output uop_t                   ren_uop [R],
  output logic [PREG_W-1:0]      ren_ptag [R],
  output logic [ROB_W-1:0]       ren_rob_idx [R],
  // to the I-RS (compacted)
  output logic [IPW-1:0]         irs_valid,
  output irs_entry_t             irs_entry [IPW],
  // to the primary cluster (compacted)
  output logic [REFF-1:0]        disp_valid,
  output uop_t                   disp_uop [REFF],
  output logic [ROB_W-1:0]       disp_rob_idx [REFF],
  output logic [PREG_W-1:0]      disp_ptag [REFF],
  output loc_t                   disp_loc_a [REFF],
  output loc_t                   disp_loc_b [REFF],
  output loc_t                   disp_loc_f [REFF],
  // allocations (clear M-PRF ready bits)
  output logic [REFF-1:0]        alloc_en,
  output logic [PREG_W-1:0]      alloc_ptag [REFF],
  output logic                   irs_blocked,
  // committed window
  input  logic                   commit,
  input  db_entry_t              commit_window [W],
  input  logic [W-1:0]           commit_ineff,
  input  logic [PREG_W-1:0]      commit_ptag [W]
);
  loc_t map_q [NUM_AREG];
  loc_t map_d [NUM_AREG];
  loc_t cmap_q [NUM_AREG];
  loc_t cmap_d [NUM_AREG];

  always_comb begin
    logic stop;
    int unsigned n_eff, n_ineff, n_all, n_fl;
    map_d       = map_q;
    stop        = stall || flush;
    n_eff       = 0;
    n_ineff     = 0;
    n_all       = 0;
    n_fl        = 0;
    accept      = '0;
    fl_used     = '0;
    irs_blocked = 1'b0;
    irs_valid   = '0;
    disp_valid  = '0;
    alloc_en    = '0;
    for (int i = 0; i < IPW; i++) irs_entry[i] = '0;
    for (int i = 0; i < REFF; i++) begin
      disp_uop[i] = '0; disp_rob_idx[i] = '0; disp_ptag[i] = '0;
      disp_loc_a[i] = '0; disp_loc_b[i] = '0; disp_loc_f[i] = '0;
      alloc_ptag[i] = '0;
    end
    for (int l = 0; l < R; l++) begin
      uop_t u;
      logic ineff, need_p, fits;
      loc_t la, lb, lf;
      logic [PREG_W-1:0] p;
      logic [ROB_W-1:0] ridx;
      la       = '0;
      p        = '0;
      lb       = '0;
      lf       = '0;
      u        = in_uop[l];
      ineff    = u.ineff && !is_mem_op(u.op);
      u.ineff  = ineff;
      need_p   = !ineff && (u.wr_dst || u.wr_flags);
      ridx     = ROB_W'((int'(rob_tail) + n_all) % RSZ);
      ren_uop[l]     = u;
      ren_rob_idx[l] = ridx;
      ren_ptag[l]    = '0;
      ren_valid[l]   = 1'b0;
      fits = in_valid[l] && (n_all < int'(rob_free)) &&
             (ineff ? (n_ineff < IPW && n_ineff < int'(irs_free))
                    : (n_eff < REFF && (!need_p || n_fl < int'(fl_count))));
      if (!stop && in_valid[l] && !fits && ineff && n_ineff < IPW &&
          n_ineff >= int'(irs_free))
        irs_blocked = 1'b1;
      if (!stop && fits) begin
        accept[l]    = 1'b1;
        ren_valid[l] = 1'b1;
        la = map_d[AREG_W'(u.src_a)];
        lb = map_d[AREG_W'(u.src_b)];
        lf = map_d[FLAGS_AREG];
        if (ineff) begin
          irs_valid[n_ineff] = 1'b1;
          irs_entry[n_ineff] = '{rob_idx: ridx, op: u.op, cond: u.cond,
                                 wr_dst: u.wr_dst, dst: u.dst, wr_flags: u.wr_flags,
                                 rd_a: u.rd_a, src_a: u.src_a, loc_a: la,
                                 rd_b: u.rd_b, src_b: u.src_b, loc_b: lb,
                                 rd_flags: u.rd_flags, loc_f: lf,
                                 imm: u.imm, pred_taken: u.pred_taken};
          if (u.wr_dst)   map_d[AREG_W'(u.dst)]      = '{in_iprf: 1'b1, ptag: '0};
          if (u.wr_flags) map_d[FLAGS_AREG] = '{in_iprf: 1'b1, ptag: '0};
          n_ineff++;
        end else begin
          p = need_p ? fl_ptag[n_fl] : '0;
          ren_ptag[l]          = p;
          disp_valid[n_eff]    = 1'b1;
          disp_uop[n_eff]      = u;
          disp_rob_idx[n_eff]  = ridx;
          disp_ptag[n_eff]     = p;
          disp_loc_a[n_eff]    = la;
          disp_loc_b[n_eff]    = lb;
          disp_loc_f[n_eff]    = lf;
          if (need_p) begin
            alloc_en[n_fl]   = 1'b1;
            alloc_ptag[n_fl] = p;
            n_fl++;
          end
          if (u.wr_dst)   map_d[AREG_W'(u.dst)]      = '{in_iprf: 1'b0, ptag: p};
          if (u.wr_flags) map_d[FLAGS_AREG] = '{in_iprf: 1'b0, ptag: p};
          n_eff++;
        end
        n_all++;
      end else begin
        stop = 1'b1;
      end
    end
    fl_used = ($clog2(REFF+1))'(n_fl);
  end

  always_comb begin
    cmap_d = cmap_q;
    if (commit) begin
      for (int e = 0; e < W; e++) begin
        if (commit_window[e].wr_dst)
          cmap_d[AREG_W'(commit_window[e].dst)] = '{in_iprf: commit_ineff[e], ptag: commit_ptag[e]};
        if (commit_window[e].wr_flags)
          cmap_d[FLAGS_AREG] = '{in_iprf: commit_ineff[e], ptag: commit_ptag[e]};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < NUM_AREG; a++) begin
        map_q[a]  <= '{in_iprf: 1'b0, ptag: PREG_W'(a)};
        cmap_q[a] <= '{in_iprf: 1'b0, ptag: PREG_W'(a)};
      end
    end else begin
      cmap_q <= cmap_d;
      if (flush) map_q <= cmap_d;
      else       map_q <= map_d;
    end
  end

endmodule
