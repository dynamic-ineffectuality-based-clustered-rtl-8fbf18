// rpm: Register Producer Map, finds register-ineffectual (RI) pivots at rename.
//
// One entry per architectural register (16 GPRs and the flags register)
// holds the ROB index of the micro-op that last wrote it and a
// `has_dependants` bit. For each micro-op renamed, in program order:
//   1. the entries of its source registers get has_dependants = 1;
//   2. for each register it writes, if the previous producer's value was
//      never read and that producer lies in the same window or the window
//      before (window = ROB index / W), the producer is reported as dead
//      for that register (a `mark`);
//   3. the entry then names this micro-op as producer, has_dependants = 0.
// A producer further back than the previous window is left alone, as the
// paper prescribes (conservative). All R lanes of a rename group are
// processed in one cycle, lane 0 oldest, so a producer and its overwriter may
// sit in the same group.
//
// Interface: `in_valid[l]`, `in_uop[l]`, `in_rob_idx[l]` for the micro-ops
// renamed this cycle; mark outputs 2*l (GPR destination dead) and 2*l+1
// (flags destination dead) go to the ROB in the same cycle. `flush` empties
// the map (it is flushed with the ROB on a rollback).
//
// Follows the paper: the two fields per entry, the three steps and the
// current/previous-window rule. This design's choice: the producer is named
// by its ROB index (from which the window ID follows), and the dead mark is
// given per destination, because a micro-op that writes a GPR and the flags
// is an RI pivot only when both values are dead (the ROB combines the two).
module rpm
  import ineff_pkg::*;
#(
  parameter int unsigned R  = ineff_pkg::REN_W,
  parameter int unsigned W  = ineff_pkg::WIN,
  parameter int unsigned NWIN = ineff_pkg::ROB_WINDOWS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  input  logic [R-1:0]      in_valid,
  input  uop_t              in_uop [R],
  input  logic [ROB_W-1:0]  in_rob_idx [R],
  output logic [2*R-1:0]    mark_valid,
  output logic [ROB_W-1:0]  mark_idx [2*R]
);
  typedef struct packed {
    logic             valid;
    logic             has_dep;
    logic [ROB_W-1:0] prod;
  } rpm_entry_t;

  rpm_entry_t map_q [NUM_AREG];
  rpm_entry_t map_d [NUM_AREG];

  function automatic int unsigned win_of(logic [ROB_W-1:0] idx);
    return int'(idx) / W;
  endfunction

  function automatic logic near(logic [ROB_W-1:0] prod, logic [ROB_W-1:0] cur);
    int unsigned wp, wc;
    wp = win_of(prod);
    wc = win_of(cur);
    return (wp == wc) || (wp == ((wc + NWIN - 1) % NWIN));
  endfunction

  always_comb begin
    map_d = map_q;
    mark_valid = '0;
    for (int m = 0; m < 2 * R; m++) mark_idx[m] = '0;
    for (int l = 0; l < R; l++) begin
      if (in_valid[l]) begin
        if (in_uop[l].rd_a)     map_d[AREG_W'(in_uop[l].src_a)].has_dep = 1'b1;
        if (in_uop[l].rd_b)     map_d[AREG_W'(in_uop[l].src_b)].has_dep = 1'b1;
        if (in_uop[l].rd_flags) map_d[FLAGS_AREG].has_dep      = 1'b1;
        if (in_uop[l].wr_dst) begin
          if (map_d[AREG_W'(in_uop[l].dst)].valid && !map_d[AREG_W'(in_uop[l].dst)].has_dep &&
              near(map_d[AREG_W'(in_uop[l].dst)].prod, in_rob_idx[l])) begin
            mark_valid[2*l] = 1'b1;
            mark_idx[2*l]   = map_d[AREG_W'(in_uop[l].dst)].prod;
          end
          map_d[AREG_W'(in_uop[l].dst)] = '{valid: 1'b1, has_dep: 1'b0, prod: in_rob_idx[l]};
        end
        if (in_uop[l].wr_flags) begin
          if (map_d[FLAGS_AREG].valid && !map_d[FLAGS_AREG].has_dep &&
              near(map_d[FLAGS_AREG].prod, in_rob_idx[l])) begin
            mark_valid[2*l+1] = 1'b1;
            mark_idx[2*l+1]   = map_d[FLAGS_AREG].prod;
          end
          map_d[FLAGS_AREG] = '{valid: 1'b1, has_dep: 1'b0, prod: in_rob_idx[l]};
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < NUM_AREG; a++) map_q[a] <= '0;
    end else if (flush) begin
      for (int a = 0; a < NUM_AREG; a++) map_q[a] <= '0;
    end else begin
      map_q <= map_d;
    end
  end

endmodule
