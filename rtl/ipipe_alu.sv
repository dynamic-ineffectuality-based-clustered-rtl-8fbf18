// ipipe_alu: functional unit of one I-pipe lane (combinational).
//
// Executes the integer micro-ops the I-pipe can receive and checks the
// control-flow speculation that made them ineffectual:
//   - ALU operations give a 64-bit result and the flags {O,C,S,Z};
//   - a conditional branch evaluates its condition on the flags and reports
//     a Type-A misspeculation if the direction differs from the prediction;
//   - an indirect jump compares its target (operand a) with the predicted
//     target (carried in the immediate field);
//   - a predicated move (cmov) evaluates its predicate; it was sent here
//     because the predicate was predicted false, so a true predicate (or any
//     mismatch with the prediction) is a misspeculation. It writes its
//     result only when the predicate holds.
//
// Follows the paper: the I-pipe has its own functional units and detects
// Type-A misspeculations of branches, predicated instructions and indirect
// jumps. The operation set and the flag encoding are this design's own; the
// paper does not define an ISA.
module ipipe_alu
  import ineff_pkg::*;
(
  input  op_e               op,
  input  cond_e             cond,
  input  logic [XLEN-1:0]   a,
  input  logic [XLEN-1:0]   b,
  input  logic [FLAG_W-1:0] flags_in,
  input  logic [XLEN-1:0]   imm,
  input  logic              pred_taken,
  output logic [XLEN-1:0]   result,
  output logic [FLAG_W-1:0] flags_out,
  output logic              result_ok,
  output logic              misspec
);
  logic [XLEN:0] sum;
  logic          arith, ovf, c_true;

  always_comb begin
    sum       = '0;
    arith     = 1'b0;
    ovf       = 1'b0;
    result    = '0;
    result_ok = 1'b1;
    misspec   = 1'b0;
    c_true    = cond_true(cond, flags_in);
    case (op)
      OP_ADD:  begin sum = {1'b0, a} + {1'b0, b};   arith = 1'b1; end
      OP_ADDI: begin sum = {1'b0, a} + {1'b0, imm}; arith = 1'b1; end
      OP_SUB, OP_CMP: begin sum = {1'b0, a} - {1'b0, b}; arith = 1'b1; end
      default: sum = '0;
    endcase
    case (op)
      OP_ADD:  ovf = (a[XLEN-1] == b[XLEN-1])   && (sum[XLEN-1] != a[XLEN-1]);
      OP_ADDI: ovf = (a[XLEN-1] == imm[XLEN-1]) && (sum[XLEN-1] != a[XLEN-1]);
      OP_SUB, OP_CMP:  ovf = (a[XLEN-1] != b[XLEN-1]) && (sum[XLEN-1] != a[XLEN-1]);
      default:         ovf = 1'b0;
    endcase
    case (op)
      OP_ADD, OP_ADDI, OP_SUB, OP_CMP: result = sum[XLEN-1:0];
      OP_AND:  result = a & b;
      OP_OR:   result = a | b;
      OP_XOR:  result = a ^ b;
      OP_MOVI: result = imm;
      OP_CMOV: begin result = a; result_ok = c_true; misspec = (c_true != pred_taken); end
      OP_BR:   begin result_ok = 1'b0; misspec = (c_true != pred_taken); end
      OP_JIND: begin result_ok = 1'b0; misspec = (a != imm); end
      default: result_ok = 1'b0;
    endcase
    flags_out = {arith ? ovf : 1'b0, arith ? sum[XLEN] : 1'b0,
                 result[XLEN-1], result == '0};
  end

endmodule
