// ipipe: the secondary cluster, a simple multi-issue in-order pipeline.
//
// Each cycle it looks at the IPW oldest I-RS entries and issues the longest
// in-order prefix whose operands are available, at most IPW micro-ops.
// Operands come from the I-PRF when their producer was ineffectual and from
// the M-PRF when it was effectual; there is no bypass network. A micro-op
// is held back when an M-PRF source is not yet ready, or when an older
// micro-op of the same issue group writes one of its I-PRF sources (it then
// issues next cycle, once the value is in the I-PRF). An issued micro-op
// reads its operands, executes in its lane's functional unit and writes the
// I-PRF at the end of the same cycle, and its completion (with the Type-A
// misspeculation flag) goes to the ROB at that edge: one cycle per
// micro-op.
//
// Contains the I-PRF, the M-PRF (written by the primary pipe's writeback
// ports) and one ipipe_alu per lane. `flush` stops issue in that cycle; the
// I-RS is flushed at the same edge.
//
// Follows the paper: in-order, multi-issue, oldest entries first, private
// functional units, I-PRF / M-PRF operand sourcing, no bypass, results to
// the I-PRF and completion to the ROB. This design's choice: the single
// execute cycle and the rule for dependences inside an issue group.
module ipipe
  import ineff_pkg::*;
#(
  parameter int unsigned IPW  = ineff_pkg::IPIPE_W,
  parameter int unsigned PWB  = ineff_pkg::PWB_PORTS,
  parameter int unsigned NPR  = ineff_pkg::NUM_PREG,
  parameter int unsigned AP   = ineff_pkg::REN_EFF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   flush,
  // I-RS head
  input  logic [IPW-1:0]         head_valid,
  input  irs_entry_t             head_entry [IPW],
  output logic [$clog2(IPW+1)-1:0] deq_count,
  // primary writeback, mirrored into the M-PRF
  input  logic [PWB-1:0]         pwb_valid,
  input  logic [PREG_W-1:0]      pwb_ptag [PWB],
  input  logic [XLEN-1:0]        pwb_data [PWB],
  input  logic [FLAG_W-1:0]      pwb_flags [PWB],
  // effectual destination allocations (clear M-PRF ready)
  input  logic [AP-1:0]          alloc_en,
  input  logic [PREG_W-1:0]      alloc_ptag [AP],
  // completion to the ROB
  output logic [IPW-1:0]         iwb_valid,
  output logic [ROB_W-1:0]       iwb_idx [IPW],
  output logic [IPW-1:0]         iwb_misspec
);
  localparam int unsigned RP = 3 * IPW;

  logic [PREG_W-1:0] m_rd_idx [RP];
  logic [XLEN-1:0]   m_rd_data [RP];
  logic [FLAG_W-1:0] m_rd_flags [RP];
  logic [RP-1:0]     m_rd_ready;

  logic [GPR_W-1:0]  i_rd_a [IPW], i_rd_b [IPW];
  logic [XLEN-1:0]   i_a_data [IPW], i_b_data [IPW];
  logic [FLAG_W-1:0] i_flags;

  logic [IPW-1:0]    issue;
  logic [XLEN-1:0]   opa [IPW], opb [IPW];
  logic [FLAG_W-1:0] opf [IPW];
  logic [XLEN-1:0]   res [IPW];
  logic [FLAG_W-1:0] res_flags [IPW];
  logic [IPW-1:0]    res_ok, mis;
  logic [IPW-1:0]    wr_en, wr_flags_en;
  logic [GPR_W-1:0]  wr_idx [IPW];

  mprf #(.NREG(NPR), .WP(PWB), .RP(RP), .AP(AP)) u_mprf (
    .clk, .rst_n,
    .wr_en(pwb_valid), .wr_idx(pwb_ptag), .wr_data(pwb_data), .wr_flags(pwb_flags),
    .rd_idx(m_rd_idx), .rd_data(m_rd_data), .rd_flags(m_rd_flags), .rd_ready(m_rd_ready),
    .alloc_en, .alloc_idx(alloc_ptag)
  );

  iprf #(.NREG(NUM_GPR), .IPW(IPW)) u_iprf (
    .clk, .rst_n,
    .rd_a_idx(i_rd_a), .rd_a_data(i_a_data),
    .rd_b_idx(i_rd_b), .rd_b_data(i_b_data), .rd_flags(i_flags),
    .wr_en, .wr_idx, .wr_data(res), .wr_flags_en, .wr_flags(res_flags)
  );

  // ---------------------------------------------------------------- issue
  always_comb begin
    for (int l = 0; l < IPW; l++) begin
      m_rd_idx[3*l]   = head_entry[l].loc_a.ptag;
      m_rd_idx[3*l+1] = head_entry[l].loc_b.ptag;
      m_rd_idx[3*l+2] = head_entry[l].loc_f.ptag;
      i_rd_a[l]       = head_entry[l].src_a;
      i_rd_b[l]       = head_entry[l].src_b;
    end
  end

  always_comb begin
    logic go;
    logic [NUM_GPR-1:0] grp_wr;
    logic               grp_wr_f;
    go       = !flush;
    grp_wr   = '0;
    grp_wr_f = 1'b0;
    deq_count = '0;
    for (int l = 0; l < IPW; l++) begin
      irs_entry_t e;
      logic ok;
      e = head_entry[l];
      ok = head_valid[l];
      if (e.rd_a)     ok &= e.loc_a.in_iprf ? !grp_wr[e.src_a] : m_rd_ready[3*l];
      if (e.rd_b)     ok &= e.loc_b.in_iprf ? !grp_wr[e.src_b] : m_rd_ready[3*l+1];
      if (e.rd_flags) ok &= e.loc_f.in_iprf ? !grp_wr_f        : m_rd_ready[3*l+2];
      go &= ok;
      issue[l] = go;
      if (go) begin
        deq_count = deq_count + 1'b1;
        if (e.wr_dst)   grp_wr[e.dst] = 1'b1;
        if (e.wr_flags) grp_wr_f      = 1'b1;
      end
      opa[l] = e.loc_a.in_iprf ? i_a_data[l] : m_rd_data[3*l];
      opb[l] = e.loc_b.in_iprf ? i_b_data[l] : m_rd_data[3*l+1];
      opf[l] = e.loc_f.in_iprf ? i_flags     : m_rd_flags[3*l+2];
    end
  end

  // ---------------------------------------------------------------- execute
  for (genvar l = 0; l < IPW; l++) begin : g_lane
    ipipe_alu u_alu (
      .op(head_entry[l].op), .cond(head_entry[l].cond),
      .a(opa[l]), .b(opb[l]), .flags_in(opf[l]), .imm(head_entry[l].imm),
      .pred_taken(head_entry[l].pred_taken),
      .result(res[l]), .flags_out(res_flags[l]), .result_ok(res_ok[l]), .misspec(mis[l])
    );
    assign wr_en[l]       = issue[l] && head_entry[l].wr_dst && res_ok[l];
    assign wr_flags_en[l] = issue[l] && head_entry[l].wr_flags;
    assign wr_idx[l]      = head_entry[l].dst;
    assign iwb_valid[l]   = issue[l];
    assign iwb_idx[l]     = head_entry[l].rob_idx;
    assign iwb_misspec[l] = issue[l] && mis[l];
  end

endmodule
