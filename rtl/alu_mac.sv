`timescale 1ns/1ps
// alu_mac: the arithmetic unit of a processing element, named "ALU/MAC" in the
// design's PE diagram. It is purely combinational: given an opcode, two operands
// and the current accumulator it returns the result word. MUL and MAC keep the
// low DATA_W bits of the product; MAC adds the accumulator (acc + a*b). SHR is
// an arithmetic right shift of a by b[3:0]. MOV passes a. NOP and JMP return 0.
// The operation list is this design's choice: the description names the unit
// but does not list its operations.
module alu_mac
  import gals_pkg::*;
(
  input  opcode_e op,
  input  word_t   a,
  input  word_t   b,
  input  word_t   acc,
  output word_t   y
);
  word_t prod;
  assign prod = word_t'(a * b);

  always_comb begin
    unique case (op)
      OP_MOV:  y = a;
      OP_ADD:  y = a + b;
      OP_SUB:  y = a - b;
      OP_MUL:  y = prod;
      OP_MAC:  y = acc + prod;
      OP_AND:  y = a & b;
      OP_OR:   y = a | b;
      OP_XOR:  y = a ^ b;
      OP_SHR:  y = word_t'($signed(a) >>> b[3:0]);
      default: y = '0;
    endcase
  end
endmodule
