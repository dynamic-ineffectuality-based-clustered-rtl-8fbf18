// iprf: Ineffectual physical register file (I-PRF) of the I-pipe.
//
// Holds the values produced by ineffectual micro-ops. It has as many
// registers as there are architectural integer registers (16), indexed by
// the architectural register number itself, so an ineffectual micro-op
// needs no physical register allocation. The flags written by ineffectual
// micro-ops go to one extra flags register.
//
// Ports: every I-pipe lane has two value read ports and one flags read port
// (combinational) and one value write port plus one flags write port
// (clock edge). When two lanes write the same register in one cycle the
// higher lane, the younger micro-op, wins. Reset clears it.
//
// Follows the paper: one I-PRF entry per architectural register, two read
// ports and one write port (taken here per I-pipe lane, since the I-pipe
// issues up to four micro-ops per cycle), written only by the I-pipe. This
// design's choice: the separate flags register and its ports. The vector
// half of the paper's I-PRF (32 entries) is not modelled.
module iprf
  import ineff_pkg::*;
#(
  parameter int unsigned NREG = ineff_pkg::NUM_GPR,
  parameter int unsigned IPW  = ineff_pkg::IPIPE_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [$clog2(NREG)-1:0] rd_a_idx [IPW],
  output logic [XLEN-1:0]         rd_a_data [IPW],
  input  logic [$clog2(NREG)-1:0] rd_b_idx [IPW],
  output logic [XLEN-1:0]         rd_b_data [IPW],
  output logic [FLAG_W-1:0]       rd_flags,
  input  logic [IPW-1:0]          wr_en,
  input  logic [$clog2(NREG)-1:0] wr_idx [IPW],
  input  logic [XLEN-1:0]         wr_data [IPW],
  input  logic [IPW-1:0]          wr_flags_en,
  input  logic [FLAG_W-1:0]       wr_flags [IPW]
);
  logic [XLEN-1:0]   regs [NREG];
  logic [FLAG_W-1:0] flags_q;

  always_comb begin
    for (int l = 0; l < IPW; l++) begin
      rd_a_data[l] = regs[rd_a_idx[l]];
      rd_b_data[l] = regs[rd_b_idx[l]];
    end
  end
  assign rd_flags = flags_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREG; r++) regs[r] <= '0;
      flags_q <= '0;
    end else begin
      for (int l = 0; l < IPW; l++) begin
        if (wr_en[l])       regs[wr_idx[l]] <= wr_data[l];
        if (wr_flags_en[l]) flags_q         <= wr_flags[l];
      end
    end
  end

endmodule
