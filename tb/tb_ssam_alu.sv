// tb_ssam_alu: drives random operands through every ALU operation and compares with a model
// written from the instruction definitions (FXP: c + popcount(a ^ b)).
`timescale 1ns/1ps
module tb_ssam_alu;
  import ssam_pkg::*;
  alu_op_e op;
  word_t a, b, c, y;
  int checks = 0, failures = 0;

  ssam_alu dut (.op, .a, .b, .c, .y);

  function automatic word_t model(alu_op_e o, word_t x, word_t z, word_t w);
    case (o)
      ALU_ADD:   return x + z;
      ALU_SUB:   return x - z;
      ALU_MUL:   return word_t'(longint'(x) * longint'(z));
      ALU_POPC:  return $countones(x);
      ALU_OR:    return x | z;
      ALU_AND:   return x & z;
      ALU_NOT:   return ~x;
      ALU_XOR:   return x ^ z;
      ALU_SRL:   return x >> (z % 32);
      ALU_SLL:   return x << (z % 32);
      ALU_SRA:   return word_t'(int'(x) >>> (z % 32));
      ALU_FXP:   return w + $countones(x ^ z);
      ALU_PASSB: return z;
      default:   return 0;
    endcase
  endfunction

  initial begin
    for (int i = 0; i < 13 * 200; i++) begin
      op = alu_op_e'(i % 13);
      a = $urandom; b = $urandom; c = $urandom;
      if (i % 7 == 0) b = 32'hFFFF_FFFF;
      #1;
      checks++;
      if (y !== model(op, a, b, c)) begin
        failures++;
        $display("FAIL op=%0d a=%h b=%h c=%h y=%h", op, a, b, c, y);
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
