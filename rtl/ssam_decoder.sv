// ssam_decoder: turns one instruction word into the control word ctrl_t that steers the
// scalar datapath, the vector datapath, memory, the stack unit and the priority queue.
//
// Combinational. The instruction set is the paper's (arithmetic, bitwise/shift, control, stack,
// register-move/memory, priority queue and FXP instructions); its binary encoding, described in
// ssam_pkg, and HALT, which ends a program and signals the host, are this design's additions.
// Control, stack and priority-queue instructions exist only in scalar form; their V bit is
// ignored. For VSMOVE (vector lane to scalar) and SVMOVE (scalar into one lane) the lane number
// is the immediate. PQUEUE_LOAD returns the value when imm[0] = 1, else the id, of the entry at
// position R[rs1]. PQUEUE_RESET's immediate gives the number of chained queues to enable
// (0 = all).
module ssam_decoder
  import ssam_pkg::*;
(
  input  word_t instr,
  output ctrl_t c
);

  opcode_e op;
  logic    v;

  always_comb begin
    op = opcode_e'(instr[31:26]);
    v  = instr[25];
    c  = '0;
    c.rd      = instr[24:20];
    c.rs1     = instr[19:15];
    c.rs2     = instr[14:10];
    c.imm     = {{17{instr[14]}}, instr[14:0]};
    c.vec     = v;
    c.alu_op  = ALU_ADD;
    c.wb_sel  = WB_ALU;
    c.br      = BR_NONE;
    c.valid_op = 1'b1;
    unique case (op)
      OP_NOP:      ;
      OP_ADD:      begin c.alu_op = ALU_ADD;  c.s_we = !v; c.v_we = v; end
      OP_SUB:      begin c.alu_op = ALU_SUB;  c.s_we = !v; c.v_we = v; end
      OP_MULT:     begin c.alu_op = ALU_MUL;  c.s_we = !v; c.v_we = v; end
      OP_POPCOUNT: begin c.alu_op = ALU_POPC; c.s_we = !v; c.v_we = v; end
      OP_ADDI:     begin c.alu_op = ALU_ADD;  c.use_imm = 1'b1; c.s_we = !v; c.v_we = v; end
      OP_SUBI:     begin c.alu_op = ALU_SUB;  c.use_imm = 1'b1; c.s_we = !v; c.v_we = v; end
      OP_MULTI:    begin c.alu_op = ALU_MUL;  c.use_imm = 1'b1; c.s_we = !v; c.v_we = v; end
      OP_OR:       begin c.alu_op = ALU_OR;   c.s_we = !v; c.v_we = v; end
      OP_AND:      begin c.alu_op = ALU_AND;  c.s_we = !v; c.v_we = v; end
      OP_NOT:      begin c.alu_op = ALU_NOT;  c.s_we = !v; c.v_we = v; end
      OP_XOR:      begin c.alu_op = ALU_XOR;  c.s_we = !v; c.v_we = v; end
      OP_ANDI:     begin c.alu_op = ALU_AND;  c.use_imm = 1'b1; c.s_we = !v; c.v_we = v; end
      OP_ORI:      begin c.alu_op = ALU_OR;   c.use_imm = 1'b1; c.s_we = !v; c.v_we = v; end
      OP_XORI:     begin c.alu_op = ALU_XOR;  c.use_imm = 1'b1; c.s_we = !v; c.v_we = v; end
      OP_SR:       begin c.alu_op = ALU_SRL;  c.s_we = !v; c.v_we = v; end
      OP_SL:       begin c.alu_op = ALU_SLL;  c.s_we = !v; c.v_we = v; end
      OP_SRA:      begin c.alu_op = ALU_SRA;  c.s_we = !v; c.v_we = v; end
      OP_FXP:      begin c.alu_op = ALU_FXP;  c.s_we = !v; c.v_we = v; end
      OP_BNE:      begin c.br = BR_NE;   c.vec = 1'b0; end
      OP_BGT:      begin c.br = BR_GT;   c.vec = 1'b0; end
      OP_BLT:      begin c.br = BR_LT;   c.vec = 1'b0; end
      OP_BE:       begin c.br = BR_EQ;   c.vec = 1'b0; end
      OP_J:        begin c.br = BR_JUMP; c.vec = 1'b0; end
      OP_POP:      begin c.pop  = 1'b1; c.s_we = 1'b1; c.wb_sel = WB_STACK; c.vec = 1'b0; end
      OP_PUSH:     begin c.push = 1'b1; c.vec = 1'b0; end
      OP_SVMOVE:   begin c.svmove = 1'b1; c.v_we = 1'b1; c.vec = 1'b1; end
      OP_VSMOVE:   begin c.s_we = 1'b1; c.wb_sel = WB_VSMOVE; c.vec = 1'b1; end
      OP_MEM_FETCH:begin c.fetch = 1'b1; end
      OP_LOAD:     begin c.load  = 1'b1; c.s_we = !v; c.v_we = v; c.wb_sel = WB_MEM; end
      OP_STORE:    begin c.store = 1'b1; end
      OP_PQ_INSERT:begin c.pq_insert = 1'b1; c.vec = 1'b0; end
      OP_PQ_LOAD:  begin c.pq_load = 1'b1; c.s_we = 1'b1; c.wb_sel = WB_PQ; c.vec = 1'b0; end
      OP_PQ_RESET: begin c.pq_reset = 1'b1; c.vec = 1'b0; end
      OP_HALT:     begin c.halt = 1'b1; end
      default:     c.valid_op = 1'b0;
    endcase
  end

endmodule
