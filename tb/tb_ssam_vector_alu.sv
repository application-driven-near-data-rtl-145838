// tb_ssam_vector_alu: random vectors through each operation of the 4-lane vector ALU, checked
// lane by lane against a scalar model, including the per-lane FXP accumulation.
`timescale 1ns/1ps
module tb_ssam_vector_alu;
  import ssam_pkg::*;
  localparam int VLEN = 4;
  alu_op_e op;
  logic [VLEN*32-1:0] a, b, c, y;
  int checks = 0, failures = 0;

  ssam_vector_alu #(.VLEN(VLEN)) dut (.op, .a, .b, .c, .y);

  function automatic word_t model(alu_op_e o, word_t x, word_t z, word_t w);
    case (o)
      ALU_ADD:  return x + z;
      ALU_SUB:  return x - z;
      ALU_MUL:  return word_t'(longint'(x) * longint'(z));
      ALU_POPC: return $countones(x);
      ALU_XOR:  return x ^ z;
      ALU_SRA:  return word_t'(int'(x) >>> (z % 32));
      ALU_FXP:  return w + $countones(x ^ z);
      default:  return 0;
    endcase
  endfunction

  alu_op_e ops[7] = '{ALU_ADD, ALU_SUB, ALU_MUL, ALU_POPC, ALU_XOR, ALU_SRA, ALU_FXP};

  initial begin
    for (int i = 0; i < 700; i++) begin
      op = ops[i % 7];
      for (int l = 0; l < VLEN; l++) begin
        a[l*32 +: 32] = $urandom; b[l*32 +: 32] = $urandom; c[l*32 +: 32] = $urandom;
      end
      #1;
      for (int l = 0; l < VLEN; l++) begin
        checks++;
        if (y[l*32 +: 32] !== model(op, a[l*32 +: 32], b[l*32 +: 32], c[l*32 +: 32])) begin
          failures++;
          $display("FAIL op=%0d lane %0d", op, l);
        end
      end
    end
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
