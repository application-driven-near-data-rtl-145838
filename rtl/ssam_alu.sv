// ssam_alu: one 32-bit ALU lane, used once as the scalar ALU and VLEN times in the vector ALU.
//
// It computes add, subtract, multiply (low 32 bits), population count, or/and/not/xor, the
// logical and arithmetic shifts, and the fused xor-population count FXP: y = c + popcount(a ^ b),
// where c is the old value of the destination register, in the way a fused multiply-add adds
// to its destination. This lets a Hamming distance over binary vectors (32 dimensions per word)
// accumulate in one instruction per word. ALU_PASSB returns b (used for register moves).
// Purely combinational. The operation set follows the instruction set; the shift amount taken
// from b[4:0] and the unsigned popcount accumulation are this design's choices.
module ssam_alu
  import ssam_pkg::*;
(
  input  alu_op_e op,
  input  word_t   a,
  input  word_t   b,
  input  word_t   c,
  output word_t   y
);

  function automatic word_t popcount32(word_t x);
    word_t n;
    n = '0;
    for (int i = 0; i < 32; i++) n += word_t'(x[i]);
    return n;
  endfunction

  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_MUL:   y = a * b;
      ALU_POPC:  y = popcount32(a);
      ALU_OR:    y = a | b;
      ALU_AND:   y = a & b;
      ALU_NOT:   y = ~a;
      ALU_XOR:   y = a ^ b;
      ALU_SRL:   y = a >> b[4:0];
      ALU_SLL:   y = a << b[4:0];
      ALU_SRA:   y = word_t'($signed(a) >>> b[4:0]);
      ALU_FXP:   y = c + popcount32(a ^ b);
      ALU_PASSB: y = b;
      default:   y = '0;
    endcase
  end

endmodule
