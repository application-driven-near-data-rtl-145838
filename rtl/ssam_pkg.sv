// ssam_pkg: shared types and constants of the similarity-search processing unit.
//
// The processing unit runs one 32-bit instruction stream that drives both a scalar and a
// vector datapath. The instruction names are those of the processing unit's instruction set
// (arithmetic, bitwise/shift, control, stack, register move/memory, priority queue and fused
// xor-population count). The binary encoding below is this design's own choice, since no
// encoding is published:
//
//   [31:26] opcode   [25] V (vector form)   [24:20] rd   [19:15] rs1   [14:10] rs2
//   [14:0]  imm15, sign-extended (shares bits with rs2; I-type forms use imm)
//
// Branches compare R[rd] with R[rs1] and jump to pc + imm. J jumps to the absolute imm.
// Memory addresses are 32-bit word addresses: below SPAD_WORDS they select the scratchpad,
// at or above it the vault DRAM behind the memory interface.
package ssam_pkg;

  localparam int unsigned XLEN       = 32;
  localparam int unsigned NUM_SREGS  = 32;   // scalar registers
  localparam int unsigned NUM_VREGS  = 8;    // vector registers
  localparam int unsigned PQ_DEPTH   = 16;   // entries per priority queue

  typedef logic [XLEN-1:0] word_t;

  typedef enum logic [5:0] {
    OP_NOP       = 6'd0,
    OP_ADD       = 6'd1,
    OP_SUB       = 6'd2,
    OP_MULT      = 6'd3,
    OP_POPCOUNT  = 6'd4,
    OP_ADDI      = 6'd5,
    OP_SUBI      = 6'd6,
    OP_MULTI     = 6'd7,
    OP_OR        = 6'd8,
    OP_AND       = 6'd9,
    OP_NOT       = 6'd10,
    OP_XOR       = 6'd11,
    OP_ANDI      = 6'd12,
    OP_ORI       = 6'd13,
    OP_XORI      = 6'd14,
    OP_SR        = 6'd15,
    OP_SL        = 6'd16,
    OP_SRA       = 6'd17,
    OP_BNE       = 6'd18,
    OP_BGT       = 6'd19,
    OP_BLT       = 6'd20,
    OP_BE        = 6'd21,
    OP_J         = 6'd22,
    OP_POP       = 6'd23,
    OP_PUSH      = 6'd24,
    OP_SVMOVE    = 6'd25,
    OP_VSMOVE    = 6'd26,
    OP_MEM_FETCH = 6'd27,
    OP_LOAD      = 6'd28,
    OP_STORE     = 6'd29,
    OP_PQ_INSERT = 6'd30,
    OP_PQ_LOAD   = 6'd31,
    OP_PQ_RESET  = 6'd32,
    OP_FXP       = 6'd33,
    OP_HALT      = 6'd63
  } opcode_e;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_MUL, ALU_POPC, ALU_OR, ALU_AND, ALU_NOT, ALU_XOR,
    ALU_SRL, ALU_SLL, ALU_SRA, ALU_FXP, ALU_PASSB
  } alu_op_e;

  typedef enum logic [2:0] {
    WB_ALU, WB_MEM, WB_PQ, WB_STACK, WB_VSMOVE
  } wb_sel_e;

  typedef enum logic [2:0] {
    BR_NONE, BR_NE, BR_GT, BR_LT, BR_EQ, BR_JUMP
  } br_e;

  // Decoded control word of one instruction.
  typedef struct packed {
    logic    valid_op;   // opcode is defined
    logic    vec;        // vector form (V bit)
    alu_op_e alu_op;
    logic    use_imm;
    logic    s_we;       // writes scalar register rd
    logic    v_we;       // writes vector register rd
    wb_sel_e wb_sel;
    logic    load;
    logic    store;
    logic    fetch;      // MEM_FETCH prefetch
    br_e     br;
    logic    pq_insert;
    logic    pq_load;
    logic    pq_reset;
    logic    push;
    logic    pop;
    logic    svmove;
    logic    halt;
    logic [4:0] rd;
    logic [4:0] rs1;
    logic [4:0] rs2;
    word_t      imm;
  } ctrl_t;

  // One-cycle event pulses of a processing unit, for performance counters and tests.
  typedef struct packed {
    logic mem_stall;     // pipeline held for the memory interface
    logic fwd_scalar;    // scalar operand forwarded from write-back
    logic fwd_vector;    // vector operand forwarded from write-back (chaining)
    logic branch_taken;
    logic pq_insert;
    logic pq_chain;      // a tuple moved from one chained queue into the next
    logic pf_hit;        // LOAD served by a line brought in by MEM_FETCH
    logic push;
    logic pop;
    logic halt;
  } pu_events_t;

  // Assemble one instruction word (used by testbenches and for documentation).
  function automatic word_t enc(opcode_e op, logic v, int rd, int rs1, int rs2_or_imm);
    word_t w;
    w = '0;
    w[31:26] = op;
    w[25]    = v;
    w[24:20] = rd[4:0];
    w[19:15] = rs1[4:0];
    w[14:0]  = rs2_or_imm[14:0];
    return w;
  endfunction

  // Register form: rs2 sits in bits [14:10].
  function automatic word_t enc_r(opcode_e op, logic v, int rd, int rs1, int rs2);
    return enc(op, v, rd, rs1, rs2 << 10);
  endfunction

endpackage
