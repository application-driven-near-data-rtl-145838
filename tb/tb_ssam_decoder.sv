// tb_ssam_decoder: decodes every opcode in scalar and vector form and checks the control word
// against an expected table written out here (register writes, memory, branch, queue, stack).
`timescale 1ns/1ps
module tb_ssam_decoder;
  import ssam_pkg::*;
  word_t instr;
  ctrl_t c;
  int checks = 0, failures = 0;

  ssam_decoder dut (.instr, .c);

  task automatic expect_ctrl(opcode_e op, logic v, logic s_we, logic v_we, logic load,
                             logic store, br_e br, alu_op_e aop, logic imm);
    instr = enc(op, v, 9, 17, -3);
    #1;
    checks++;
    if (c.s_we != s_we || c.v_we != v_we || c.load != load || c.store != store || c.br != br ||
        (s_we|v_we) && c.wb_sel == WB_ALU && (c.alu_op != aop || c.use_imm != imm) ||
        c.rd != 5'd9 || c.rs1 != 5'd17 || c.imm != word_t'(-3) || !c.valid_op) begin
      failures++;
      $display("FAIL op %s v=%0d", op.name(), v);
    end
  endtask

  initial begin
    for (int v = 0; v < 2; v++) begin
      logic sv, vv;
      sv = (v == 0); vv = (v == 1);
      expect_ctrl(OP_ADD,  v, sv, vv, 0, 0, BR_NONE, ALU_ADD, 0);
      expect_ctrl(OP_SUB,  v, sv, vv, 0, 0, BR_NONE, ALU_SUB, 0);
      expect_ctrl(OP_MULT, v, sv, vv, 0, 0, BR_NONE, ALU_MUL, 0);
      expect_ctrl(OP_POPCOUNT, v, sv, vv, 0, 0, BR_NONE, ALU_POPC, 0);
      expect_ctrl(OP_ADDI, v, sv, vv, 0, 0, BR_NONE, ALU_ADD, 1);
      expect_ctrl(OP_SUBI, v, sv, vv, 0, 0, BR_NONE, ALU_SUB, 1);
      expect_ctrl(OP_MULTI, v, sv, vv, 0, 0, BR_NONE, ALU_MUL, 1);
      expect_ctrl(OP_OR,   v, sv, vv, 0, 0, BR_NONE, ALU_OR, 0);
      expect_ctrl(OP_AND,  v, sv, vv, 0, 0, BR_NONE, ALU_AND, 0);
      expect_ctrl(OP_NOT,  v, sv, vv, 0, 0, BR_NONE, ALU_NOT, 0);
      expect_ctrl(OP_XOR,  v, sv, vv, 0, 0, BR_NONE, ALU_XOR, 0);
      expect_ctrl(OP_ANDI, v, sv, vv, 0, 0, BR_NONE, ALU_AND, 1);
      expect_ctrl(OP_ORI,  v, sv, vv, 0, 0, BR_NONE, ALU_OR, 1);
      expect_ctrl(OP_XORI, v, sv, vv, 0, 0, BR_NONE, ALU_XOR, 1);
      expect_ctrl(OP_SR,   v, sv, vv, 0, 0, BR_NONE, ALU_SRL, 0);
      expect_ctrl(OP_SL,   v, sv, vv, 0, 0, BR_NONE, ALU_SLL, 0);
      expect_ctrl(OP_SRA,  v, sv, vv, 0, 0, BR_NONE, ALU_SRA, 0);
      expect_ctrl(OP_FXP,  v, sv, vv, 0, 0, BR_NONE, ALU_FXP, 0);
      expect_ctrl(OP_LOAD, v, sv, vv, 1, 0, BR_NONE, ALU_ADD, 0);
      expect_ctrl(OP_STORE, v, 0, 0, 0, 1, BR_NONE, ALU_ADD, 0);
      expect_ctrl(OP_BNE,  v, 0, 0, 0, 0, BR_NE, ALU_ADD, 0);
      expect_ctrl(OP_BGT,  v, 0, 0, 0, 0, BR_GT, ALU_ADD, 0);
      expect_ctrl(OP_BLT,  v, 0, 0, 0, 0, BR_LT, ALU_ADD, 0);
      expect_ctrl(OP_BE,   v, 0, 0, 0, 0, BR_EQ, ALU_ADD, 0);
      expect_ctrl(OP_J,    v, 0, 0, 0, 0, BR_JUMP, ALU_ADD, 0);
      expect_ctrl(OP_PUSH, v, 0, 0, 0, 0, BR_NONE, ALU_ADD, 0);
      expect_ctrl(OP_POP,  v, 1, 0, 0, 0, BR_NONE, ALU_ADD, 0);
      expect_ctrl(OP_PQ_LOAD, v, 1, 0, 0, 0, BR_NONE, ALU_ADD, 0);
      expect_ctrl(OP_VSMOVE, v, 1, 0, 0, 0, BR_NONE, ALU_ADD, 0);
      expect_ctrl(OP_SVMOVE, v, 0, 1, 0, 0, BR_NONE, ALU_ADD, 0);
    end
    instr = enc(OP_PQ_INSERT, 0, 0, 2, 0); #1; checks++;
    if (!c.pq_insert || c.s_we) begin failures++; $display("FAIL pq_insert"); end
    instr = enc(OP_PQ_RESET, 0, 0, 0, 1); #1; checks++;
    if (!c.pq_reset) begin failures++; $display("FAIL pq_reset"); end
    instr = enc(OP_MEM_FETCH, 0, 0, 3, 8); #1; checks++;
    if (!c.fetch || c.load) begin failures++; $display("FAIL mem_fetch"); end
    instr = enc(OP_PUSH, 0, 0, 3, 0); #1; checks++;
    if (!c.push || c.pop) begin failures++; $display("FAIL push"); end
    instr = enc(OP_POP, 0, 3, 0, 0); #1; checks++;
    if (!c.pop || c.wb_sel != WB_STACK) begin failures++; $display("FAIL pop"); end
    instr = enc(OP_HALT, 0, 0, 0, 0); #1; checks++;
    if (!c.halt) begin failures++; $display("FAIL halt"); end
    instr = 32'hE000_0000; #1; checks++;   // opcode 56 is undefined
    if (c.valid_op) begin failures++; $display("FAIL undefined opcode accepted"); end
    instr = enc_r(OP_ADD, 0, 1, 2, 3); #1; checks++;
    if (c.rs2 != 5'd3) begin failures++; $display("FAIL rs2 field"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
