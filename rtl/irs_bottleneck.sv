// irs_bottleneck: decides that the I-pipe has become the bottleneck.
//
// The renamer reports every cycle in which it had to stop because the I-pipe
// reservation station (I-RS) was full. Cycles are grouped into epochs of
// EPOCH cycles; when the blocked cycles within one epoch reach THRESH,
// `bottleneck` is raised for one cycle and the count starts again. The
// pulse is registered (one cycle after the THRESH-th blocked cycle). The
// recovery engine then flushes the pipeline and clears every ineffectual
// bit, so nothing goes to the I-pipe until detection tags micro-ops anew.
//
// Follows the paper: the trigger is the renamer finding the I-RS full
// "quite often". The paper gives no number: the epoch and the threshold are
// this design's choice.
module irs_bottleneck #(
  parameter int unsigned EPOCH  = 1024,
  parameter int unsigned THRESH = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic blocked,
  output logic bottleneck
);
  logic [$clog2(EPOCH)-1:0]    tick;
  logic [$clog2(THRESH+1)-1:0] hits;

  logic fire;
  assign fire = blocked && (hits == ($clog2(THRESH+1))'(THRESH - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick       <= '0;
      hits       <= '0;
      bottleneck <= 1'b0;
    end else begin
      bottleneck <= fire;
      if (fire || tick == ($clog2(EPOCH))'(EPOCH - 1)) begin
        hits <= '0;
        tick <= '0;
      end else begin
        tick <= tick + 1'b1;
        if (blocked) hits <= hits + 1'b1;
      end
    end
  end

endmodule
