// ineff_pkg: shared constants and types of the ineffectuality-clustered core.
//
// The sizes are those of the main design point: windows of 10 micro-ops, a
// 370-entry ROB (37 windows), a 40-entry Detection Buffer (4 windows), a
// 4-wide I-pipe with a 128-entry I-RS, 6 effectual + 4 ineffectual renames per
// cycle, 280 integer physical registers (PRF and its mirror, the M-PRF) and a
// 2304-entry micro-op cache. Everything else here (the micro-op format, the
// flag encoding, the small ALU operation set) is this design's own choice: the
// front end and the ISA are not part of what is modelled.
//
// Micro-op model: at most one general-purpose destination (GPR, 16 of them)
// plus an optional write of the flags register, and up to two GPR sources
// plus an optional flags read. The flags register is architectural register
// FLAGS_AREG in the Register Producer Map and the rename map.
package ineff_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned WIN          = 10;   // window size (micro-ops)
  parameter int unsigned ROB_WINDOWS  = 37;   // window IDs 0..36
  parameter int unsigned ROB_SIZE     = WIN * ROB_WINDOWS;  // 370
  parameter int unsigned DB_WINDOWS   = 4;    // Detection Buffer: 4 windows
  parameter int unsigned NUM_GPR      = 16;   // integer architectural registers
  parameter int unsigned NUM_AREG     = NUM_GPR + 1;  // + flags register
  parameter int unsigned FLAGS_AREG   = NUM_GPR;
  parameter int unsigned NUM_PREG     = 280;  // integer PRF / M-PRF entries
  parameter int unsigned IPIPE_W      = 4;    // I-pipe width
  parameter int unsigned IRS_SIZE     = 128;  // I-RS entries
  parameter int unsigned REN_EFF      = 6;    // effectual renames per cycle
  parameter int unsigned REN_W        = REN_EFF + IPIPE_W;  // 10 renames per cycle
  parameter int unsigned PWB_PORTS    = 10;   // primary writeback ports (issue width)
  parameter int unsigned UOPC_ENTRIES = 2304; // micro-op cache entries
  parameter int unsigned XLEN         = 64;

  parameter int unsigned AREG_W  = $clog2(NUM_AREG);      // 5
  parameter int unsigned GPR_W   = $clog2(NUM_GPR);       // 4
  parameter int unsigned PREG_W  = $clog2(NUM_PREG);      // 9
  parameter int unsigned ROB_W   = $clog2(ROB_SIZE);      // 9
  parameter int unsigned SLOT_W  = $clog2(UOPC_ENTRIES);  // 12
  parameter int unsigned FLAG_W  = 4;                     // {O,C,S,Z}

  // ---------------------------------------------------------------- micro-op
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_ADD  = 4'd1,   // dst = a + b
    OP_SUB  = 4'd2,   // dst = a - b
    OP_AND  = 4'd3,
    OP_OR   = 4'd4,
    OP_XOR  = 4'd5,
    OP_ADDI = 4'd6,   // dst = a + imm
    OP_MOVI = 4'd7,   // dst = imm
    OP_CMP  = 4'd8,   // flags of a - b, no GPR result
    OP_BR   = 4'd9,   // conditional branch on flags
    OP_JIND = 4'd10,  // indirect jump, target = a
    OP_CMOV = 4'd11,  // predicated move: if cond(flags) dst = a
    OP_LD   = 4'd12,  // memory operations: never ineffectual
    OP_ST   = 4'd13
  } op_e;

  typedef enum logic [2:0] {
    CC_EQ = 3'd0, CC_NE = 3'd1, CC_LT = 3'd2, CC_GE = 3'd3,
    CC_CS = 3'd4, CC_CC = 3'd5, CC_AL = 3'd6, CC_NV = 3'd7
  } cond_e;

  // Decoded micro-op as delivered by the front end (decoder or micro-op cache).
  typedef struct packed {
    logic [31:0]       pc;
    logic [SLOT_W-1:0] slot;       // micro-op cache slot holding it
    op_e               op;
    cond_e             cond;
    logic              wr_dst;     // writes GPR dst
    logic [GPR_W-1:0]  dst;
    logic              wr_flags;   // writes the flags register
    logic              rd_a;
    logic [GPR_W-1:0]  src_a;
    logic              rd_b;
    logic [GPR_W-1:0]  src_b;
    logic              rd_flags;
    logic [XLEN-1:0]   imm;        // immediate, or predicted target of OP_JIND
    logic              pred_taken; // predicted direction of OP_BR
    logic              ineff;      // ineffectual bit read from the micro-op cache
  } uop_t;

  // Where a source operand lives.
  typedef struct packed {
    logic              in_iprf;    // 1: I-PRF (indexed by arch reg), 0: PRF/M-PRF
    logic [PREG_W-1:0] ptag;       // physical register when in_iprf = 0
  } loc_t;

  // Register-side record of a committed micro-op, as kept in the Detection Buffer.
  typedef struct packed {
    logic [31:0]       pc;
    logic [SLOT_W-1:0] slot;
    logic              is_mem;
    logic              pivot;
    logic              wr_dst;
    logic [GPR_W-1:0]  dst;
    logic              wr_flags;
    logic              rd_a;
    logic [GPR_W-1:0]  src_a;
    logic              rd_b;
    logic [GPR_W-1:0]  src_b;
    logic              rd_flags;
  } db_entry_t;

  // Entry of the I-pipe reservation station.
  typedef struct packed {
    logic [ROB_W-1:0]  rob_idx;
    op_e               op;
    cond_e             cond;
    logic              wr_dst;
    logic [GPR_W-1:0]  dst;
    logic              wr_flags;
    logic              rd_a;
    logic [GPR_W-1:0]  src_a;
    loc_t              loc_a;
    logic              rd_b;
    logic [GPR_W-1:0]  src_b;
    loc_t              loc_b;
    logic              rd_flags;
    loc_t              loc_f;
    logic [XLEN-1:0]   imm;
    logic              pred_taken;
  } irs_entry_t;

  function automatic logic is_mem_op(op_e op);
    return (op == OP_LD) || (op == OP_ST);
  endfunction

  function automatic logic is_ctrl_op(op_e op);
    return (op == OP_BR) || (op == OP_JIND) || (op == OP_CMOV);
  endfunction

  // Condition evaluation on flags {O,C,S,Z}.
  function automatic logic cond_true(cond_e c, logic [FLAG_W-1:0] f);
    logic z, s, cy, o;
    {o, cy, s, z} = f;
    case (c)
      CC_EQ:   return z;
      CC_NE:   return !z;
      CC_LT:   return s ^ o;
      CC_GE:   return !(s ^ o);
      CC_CS:   return cy;
      CC_CC:   return !cy;
      CC_AL:   return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

endpackage
