// mprf: Mirrored physical register file (M-PRF) of the I-pipe.
//
// A copy of the primary cluster's integer PRF: every result the primary
// pipe writes to the PRF is also written here, so an ineffectual micro-op
// that reads an effectual producer's value finds it locally and never
// competes for the PRF's read ports or needs a bypass from the primary
// cluster. Each entry holds a 64-bit value and the 4 flag bits produced
// with it (the flags of a micro-op live with its result). A ready bit per
// entry is cleared when the renamer allocates the register to a new
// effectual producer and set when the primary pipe writes it; the I-pipe
// only issues a micro-op whose M-PRF sources are ready.
//
// Ports: WP write ports (the PRF's write ports, one per primary writeback
// lane), RP read ports with ready (combinational), AP allocation ports.
// Writes and allocations take effect at the clock edge; a write wins over
// an allocation of the same register in the same cycle. Reset makes every
// entry zero and ready.
//
// Follows the paper: as many entries (280) and write ports as the PRF,
// written with every PRF write, read only by the I-pipe. The paper gives it
// two read ports; here each I-pipe lane has its own pair plus a flags read.
// The vector half (224 entries) is not modelled.
module mprf
  import ineff_pkg::*;
#(
  parameter int unsigned NREG = ineff_pkg::NUM_PREG,
  parameter int unsigned WP   = ineff_pkg::PWB_PORTS,
  parameter int unsigned RP   = 3 * ineff_pkg::IPIPE_W,
  parameter int unsigned AP   = ineff_pkg::REN_EFF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [WP-1:0]           wr_en,
  input  logic [$clog2(NREG)-1:0] wr_idx [WP],
  input  logic [XLEN-1:0]         wr_data [WP],
  input  logic [FLAG_W-1:0]       wr_flags [WP],
  input  logic [$clog2(NREG)-1:0] rd_idx [RP],
  output logic [XLEN-1:0]         rd_data [RP],
  output logic [FLAG_W-1:0]       rd_flags [RP],
  output logic [RP-1:0]           rd_ready,
  input  logic [AP-1:0]           alloc_en,
  input  logic [$clog2(NREG)-1:0] alloc_idx [AP]
);
  logic [XLEN-1:0]   val [NREG];
  logic [FLAG_W-1:0] flg [NREG];
  logic [NREG-1:0]   rdy;

  always_comb begin
    for (int p = 0; p < RP; p++) begin
      rd_data[p]  = val[rd_idx[p]];
      rd_flags[p] = flg[rd_idx[p]];
      rd_ready[p] = rdy[rd_idx[p]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREG; r++) begin
        val[r] <= '0;
        flg[r] <= '0;
      end
      rdy <= '1;
    end else begin
      for (int a = 0; a < AP; a++)
        if (alloc_en[a]) rdy[alloc_idx[a]] <= 1'b0;
      for (int w = 0; w < WP; w++) begin
        if (wr_en[w]) begin
          val[wr_idx[w]] <= wr_data[w];
          flg[wr_idx[w]] <= wr_flags[w];
          rdy[wr_idx[w]] <= 1'b1;
        end
      end
    end
  end

endmodule
