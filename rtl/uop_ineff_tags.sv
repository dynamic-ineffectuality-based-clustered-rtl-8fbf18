// uop_ineff_tags: the `ineffectual` bit kept with every micro-op cache entry.
//
// One bit per micro-op cache entry (2304). The Detection Buffer sets the bit
// of each micro-op the Detection Engine found ineffectual. The recovery
// engine clears the bits of the micro-ops of ROB portions A and B after a
// misspeculation, and clears every bit when the I-pipe has become a
// bottleneck. The renamer's micro-ops carry the bit read here for the cache
// slot they came from.
//
// Interface: RD read ports (combinational), one set port, one clear port and
// a clear-all input, all taking effect at the clock edge. Clearing wins over
// setting the same bit in the same cycle. Reset clears every bit.
//
// Follows the paper: one ineffectual bit per micro-op, set by detection,
// reset on misspeculation (portions A and B) and on an I-pipe bottleneck
// (all). The rest of the micro-op cache (tags, ways, the micro-ops
// themselves) belongs to the base core and is not modelled; the slot number
// is the cache's own entry index.
module uop_ineff_tags
  import ineff_pkg::*;
#(
  parameter int unsigned ENTRIES = ineff_pkg::UOPC_ENTRIES,
  parameter int unsigned RD      = ineff_pkg::REN_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [SLOT_W-1:0] rd_slot [RD],
  output logic [RD-1:0]     rd_ineff,
  input  logic              set_valid,
  input  logic [SLOT_W-1:0] set_slot,
  input  logic              clr_valid,
  input  logic [SLOT_W-1:0] clr_slot,
  input  logic              clr_all,
  output logic [$clog2(ENTRIES+1)-1:0] num_set
);
  logic [ENTRIES-1:0] bits;

  always_comb begin
    for (int r = 0; r < RD; r++)
      rd_ineff[r] = (32'(rd_slot[r]) < ENTRIES) ? bits[rd_slot[r]] : 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits <= '0;
    end else if (clr_all) begin
      bits <= '0;
    end else begin
      if (set_valid && 32'(set_slot) < ENTRIES) bits[set_slot] <= 1'b1;
      if (clr_valid && 32'(clr_slot) < ENTRIES) bits[clr_slot] <= 1'b0;
    end
  end

  always_comb begin
    num_set = '0;
    for (int i = 0; i < ENTRIES; i++) num_set += bits[i];
  end

endmodule
