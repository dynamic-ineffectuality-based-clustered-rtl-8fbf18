// mdre: Misspeculation Detection and Recovery Engine.
//
// The MDRE stage sits between execution and commit. It looks at ROB portion
// B (the second-oldest window) once B is full and every micro-op in it has
// completed, in the primary pipe or in the I-pipe:
//   - no misspeculation in A or B: portion A may retire; `commit` is raised
//     for one cycle as soon as the Detection Buffer can take the window;
//   - a Type-A misspeculation (an ineffectual branch, indirect jump or
//     predicated move that the I-pipe found mispredicted): the whole pipeline
//     is flushed and fetch restarts at the first micro-op of portion A. The
//     ineffectual bits of the micro-ops of A and B are cleared in the
//     micro-op cache first, one per cycle (2W cycles), so the replay runs
//     them as effectual. Type-B misspeculations (an effectual consumer of an
//     ineffectual result) only follow a Type-A one and are covered by the
//     same rollback.
// It also performs the I-pipe bottleneck recovery: on `bottleneck` the
// pipeline is flushed, every ineffectual bit is cleared, and fetch restarts
// at portion A.
//
// Interface: portion status from the ROB; `commit`, `flush` (one cycle,
// combinational from the status), `clr_valid/clr_slot/clr_all` to the
// micro-op cache bits, `restart_valid/restart_pc` to fetch (one-cycle pulse
// when recovery is over), `busy` holds rename off during recovery.
//
// Follows the paper: verification of portion B, commit of portion A,
// rollback to the start of portion A for both misspeculation types, reset of
// the A and B ineffectual bits, flush-and-reset on a bottleneck. This
// design's choice: A must be complete and clean too (it always is, except
// for the first window after reset or a flush), the serial bit clearing, and
// the one-cycle flush pulse.
module mdre
  import ineff_pkg::*;
#(
  parameter int unsigned W = ineff_pkg::WIN
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              a_full,
  input  logic              a_done,
  input  logic              a_misspec,
  input  logic              b_full,
  input  logic              b_done,
  input  logic              b_misspec,
  input  logic [31:0]       a_pc,
  input  logic [SLOT_W-1:0] ab_slot [2*W],
  input  logic              rob_empty,
  input  logic              db_ready,
  input  logic              bottleneck,
  output logic              commit,
  output logic              flush,
  output logic              clr_valid,
  output logic [SLOT_W-1:0] clr_slot,
  output logic              clr_all,
  output logic              restart_valid,
  output logic [31:0]       restart_pc,
  output logic              busy,
  output logic              ev_rollback,
  output logic              ev_bottleneck
);
  typedef enum logic [1:0] {M_RUN, M_CLEAR, M_RESTART} mstate_e;
  mstate_e state;

  logic [SLOT_W-1:0]        slots_q [2*W];
  logic [$clog2(2*W+1)-1:0] ci;
  logic [31:0]              pc_q;

  logic verified;
  assign verified = a_full && b_full && a_done && b_done;

  always_comb begin
    commit        = 1'b0;
    flush         = 1'b0;
    clr_all       = 1'b0;
    ev_rollback   = 1'b0;
    ev_bottleneck = 1'b0;
    if (state == M_RUN) begin
      if (verified && (a_misspec || b_misspec)) begin
        flush       = 1'b1;
        ev_rollback = 1'b1;
      end else if (bottleneck && !rob_empty) begin
        flush         = 1'b1;
        clr_all       = 1'b1;
        ev_bottleneck = 1'b1;
      end else if (verified && db_ready) begin
        commit = 1'b1;
      end
    end
  end

  assign clr_valid     = (state == M_CLEAR);
  assign clr_slot      = slots_q[ci[$clog2(2*W)-1:0]];
  assign restart_valid = (state == M_RESTART);
  assign restart_pc    = pc_q;
  assign busy          = (state != M_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= M_RUN;
      ci    <= '0;
      pc_q  <= '0;
      for (int k = 0; k < 2 * W; k++) slots_q[k] <= '0;
    end else begin
      case (state)
        M_RUN: begin
          if (ev_rollback) begin
            slots_q <= ab_slot;
            pc_q    <= a_pc;
            ci      <= '0;
            state   <= M_CLEAR;
          end else if (ev_bottleneck) begin
            pc_q  <= a_pc;
            state <= M_RESTART;
          end
        end
        M_CLEAR: begin
          if (ci == ($clog2(2*W+1))'(2 * W - 1)) state <= M_RESTART;
          ci <= ci + 1'b1;
        end
        default: state <= M_RUN;
      endcase
    end
  end

endmodule
