`timescale 1ns/1ps
// tb_alu_mac: drives every ALU/MAC operation with random operands and compares
// the result with a reference computed here from the operation's definition.
module tb_alu_mac;
  import gals_pkg::*;
  opcode_e op;
  word_t a, b, acc, y;
  int checks = 0, failures = 0;

  alu_mac dut (.*);

  function automatic word_t ref_y(opcode_e o, word_t x, word_t z, word_t c);
    int sx, sz;
    sx = int'($signed(x)); sz = int'(z);
    case (o)
      OP_MOV: return x;
      OP_ADD: return word_t'(int'(x) + sz);
      OP_SUB: return word_t'(int'(x) - sz);
      OP_MUL: return word_t'(int'(x) * sz);
      OP_MAC: return word_t'(int'(c) + int'(x) * sz);
      OP_AND: return x & z;
      OP_OR:  return x | z;
      OP_XOR: return x ^ z;
      OP_SHR: return word_t'(sx / (1 << (z % 16)) - ((sx < 0 && (sx % (1 << (z % 16))) != 0) ? 1 : 0));
      default: return '0;
    endcase
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      op  = opcode_e'($urandom_range(0, 13));
      a   = word_t'($urandom); b = word_t'($urandom); acc = word_t'($urandom);
      if (i % 7 == 0) b = word_t'($urandom_range(0, 15));
      #1;
      checks++;
      if (y !== ref_y(op, a, b, acc)) begin
        failures++;
        if (failures < 10) $display("FAIL op=%s a=%h b=%h acc=%h y=%h exp=%h", op.name(), a, b, acc, y, ref_y(op, a, b, acc));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
