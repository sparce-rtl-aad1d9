// sparce_pkg: types and constants shared by the sparsity-aware core.
//
// What follows the published design: 32 architectural registers each with one
// Sparsity Register File (SpRF) entry, a 20-entry Sparsity Aware Skip Address
// (SASA) table whose entries hold {precedingPC, instsToSkip, SpRFCondition},
// and an SpRFCondition that is a Boolean combination of at most two SpRF
// entries (single, OR, AND), where an operand is either one lane bit of a
// vector register (SpRF[v8[0]]) or the whole register (SpRF[v12]).
//
// This design's own choices: the 32-bit instruction encoding, the opcode set
// (a small RISC-style set: at most two register sources plus the accumulator
// of MAC), integer lanes of XLEN bits instead of single-precision floats, the
// field widths of a SASA entry and its 64-bit image in memory.
//
// Instruction formats (opcode in [31:26]):
//   R-type : rd[25:21] rs1[20:16] rs2[15:11] lane[10:8]
//   I-type : rd[25:21] rs1[20:16] imm[15:0] (sign-extended)
//   ST     : data register in rd, address rs1.lane0 + imm
//   BNE    : compares lane 0 of rd and rs1, target = pc + 4*imm
//   SASA_LD: base address in rs1.lane0, number of entries in imm
//
// SASA entry image in memory (one 64-bit word, little-endian order of rows):
//   [59:28] precedingPC  [27:20] instsToSkip  [19:0] SpRFCondition
//   SpRFCondition = {op[19:18], a[17:9], b[8:0]}, operand = {idx[8:4], whole[3], lane[2:0]}
package sparce_pkg;

  parameter int unsigned XLEN         = 32;  // bits per SIMD lane
  parameter int unsigned PC_W         = 32;  // byte address of an instruction
  parameter int unsigned NREG         = 32;  // architectural registers = SpRF entries
  parameter int unsigned REG_AW       = 5;
  parameter int unsigned SASA_ENTRIES = 20;  // SASA table entries
  parameter int unsigned SKIP_W       = 8;   // width of instsToSkip
  parameter int unsigned INSTR_BYTES  = 4;
  parameter int unsigned SASA_IMG_W   = 64;  // bits of one SASA entry in memory
  parameter int unsigned CNT_W        = 32;  // performance counter width

  typedef logic [REG_AW-1:0] reg_idx_t;
  typedef logic [PC_W-1:0]   pc_t;

  // Boolean operator of an SpRFCondition.
  typedef enum logic [1:0] {
    COND_SINGLE = 2'd0,  // operand a alone
    COND_OR     = 2'd1,  // a | b
    COND_AND    = 2'd2,  // a & b
    COND_NEVER  = 2'd3   // reserved: never skip
  } cond_op_e;

  // One SpRF operand of a condition.
  typedef struct packed {
    reg_idx_t   idx;    // register index
    logic       whole;  // 1: every lane must be zero; 0: only lane 'lane'
    logic [2:0] lane;
  } sp_sel_t;

  typedef struct packed {
    cond_op_e op;
    sp_sel_t  a;
    sp_sel_t  b;
  } sprf_cond_t;

  typedef struct packed {
    pc_t               pc;    // precedingPC
    logic [SKIP_W-1:0] skip;  // instsToSkip
    sprf_cond_t        cond;  // SpRFCondition
  } sasa_entry_t;

  typedef enum logic [5:0] {
    OP_NOP     = 6'd0,
    OP_ADD     = 6'd1,   // rd = rs1 + rs2            (lane-wise)
    OP_SUB     = 6'd2,   // rd = rs1 - rs2            (lane-wise)
    OP_MUL     = 6'd3,   // rd = rs1 * rs2            (lane-wise)
    OP_ADDI    = 6'd4,   // rd = rs1 + imm            (lane-wise)
    OP_MAC     = 6'd5,   // rd = rd + rs1 * rs2[lane] (broadcast, like fmla)
    OP_LD      = 6'd6,   // rd = mem[rs1.lane0 + imm] (one full register)
    OP_ST      = 6'd7,   // mem[rs1.lane0 + imm] = rd
    OP_BNE     = 6'd8,   // if rd.lane0 != rs1.lane0: pc += 4*imm
    OP_SASA_LD = 6'd9,   // SASA-LD [rs1], #imm
    OP_HALT    = 6'd63
  } opcode_e;

  typedef enum logic [1:0] {ALU_ADD, ALU_SUB, ALU_PASS_B} alu_op_e;

  typedef struct packed {
    opcode_e    op;
    reg_idx_t   rd;
    reg_idx_t   rs1;
    reg_idx_t   rs2;
    logic [2:0] lane;
    logic [31:0] imm;
    logic       writes_rd;  // writes register rd at writeback
    logic       reads_rs1;
    logic       reads_rs2;
    logic       reads_rd;   // MAC accumulator, ST data, BNE operand
  } dec_t;

  function automatic dec_t decode(input logic [31:0] ins);
    dec_t d;
    d.op        = opcode_e'(ins[31:26]);
    d.rd        = ins[25:21];
    d.rs1       = ins[20:16];
    d.rs2       = ins[15:11];
    d.lane      = ins[10:8];
    d.imm       = {{16{ins[15]}}, ins[15:0]};
    d.writes_rd = 1'b0;
    d.reads_rs1 = 1'b0;
    d.reads_rs2 = 1'b0;
    d.reads_rd  = 1'b0;
    case (d.op)
      OP_ADD, OP_SUB, OP_MUL: begin d.writes_rd = 1'b1; d.reads_rs1 = 1'b1; d.reads_rs2 = 1'b1; end
      OP_ADDI, OP_LD:         begin d.writes_rd = 1'b1; d.reads_rs1 = 1'b1; end
      OP_MAC:                 begin d.writes_rd = 1'b1; d.reads_rs1 = 1'b1; d.reads_rs2 = 1'b1; d.reads_rd = 1'b1; end
      OP_ST, OP_BNE:          begin d.reads_rs1 = 1'b1; d.reads_rd = 1'b1; end
      OP_SASA_LD:             d.reads_rs1 = 1'b1;
      OP_NOP, OP_HALT:        ;
      default:                d.op = OP_NOP;  // unknown opcodes execute as NOP
    endcase
    return d;
  endfunction

  // Instruction builders, used by testbenches and handy for writing programs.
  function automatic logic [31:0] enc_r(opcode_e op, int rd, int rs1, int rs2, int lane = 0);
    return {op, 5'(rd), 5'(rs1), 5'(rs2), 3'(lane), 8'd0};
  endfunction

  function automatic logic [31:0] enc_i(opcode_e op, int rd, int rs1, int imm);
    return {op, 5'(rd), 5'(rs1), 16'(imm)};
  endfunction

  function automatic sp_sel_t sel_lane(int idx, int lane);
    return '{idx: REG_AW'(idx), whole: 1'b0, lane: 3'(lane)};
  endfunction

  function automatic sp_sel_t sel_reg(int idx);
    return '{idx: REG_AW'(idx), whole: 1'b1, lane: 3'd0};
  endfunction

  // Performance and event counters of the core.
  typedef struct packed {
    logic [CNT_W-1:0] cycles;
    logic [CNT_W-1:0] retired;         // instructions written back
    logic [CNT_W-1:0] sasa_hits;       // fetches that hit the SASA table
    logic [CNT_W-1:0] hit_skips;       // hits whose region was skipped at once
    logic [CNT_W-1:0] regions_marked;  // hits whose condition was not yet known
    logic [CNT_W-1:0] region_skips;    // marked regions later found redundant
    logic [CNT_W-1:0] region_execs;    // marked regions found not redundant
    logic [CNT_W-1:0] insts_skipped;   // instructions never fetched or dropped at fetch
    logic [CNT_W-1:0] squashed;        // in-flight instructions squashed
    logic [CNT_W-1:0] stalls;          // cycles decode held an instruction
    logic [CNT_W-1:0] branches_taken;
    logic [CNT_W-1:0] sasa_loads;      // SASA-LD instructions completed
  } perf_t;

endpackage
