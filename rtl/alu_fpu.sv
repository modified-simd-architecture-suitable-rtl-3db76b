// alu_fpu: the arithmetic unit of one processing element.
//
// Combinational: y is a function of the broadcast operation and the two
// operands, read from the PE's register file (operand B may instead be the
// word broadcast by the group's buffer memory). Floating-point operations
// use 64-bit IEEE-754 doubles (fp_add, fp_mul); integer and logic operations
// treat the word as a 64-bit integer. The architecture names this unit
// "ALU/FPU" with two register-file operands and a result written back to the
// register file; the operation set is this design's choice, kept to what a
// pairwise-force or matrix-product inner loop needs. The unit is not
// pipelined, so an instruction's result can be used by the next one.
module alu_fpu
  import grape_pkg::*;
(
  input  alu_op_e op,
  input  word_t   a,
  input  word_t   b,
  output word_t   y
);

  word_t fsum, fprod, b_add;

  // Subtraction is addition of the operand with its sign flipped.
  assign b_add = (op == OP_FSUB) ? {~b[63], b[62:0]} : b;

  fp_add u_add (.a(a), .b(b_add), .y(fsum));
  fp_mul u_mul (.a(a), .b(b),     .y(fprod));

  always_comb begin
    unique case (op)
      OP_MOV:          y = a;
      OP_MOVB:         y = b;
      OP_FADD,
      OP_FSUB:         y = fsum;
      OP_FMUL:         y = fprod;
      OP_IADD:         y = a + b;
      OP_ISUB:         y = a - b;
      OP_AND:          y = a & b;
      OP_OR:           y = a | b;
      OP_XOR:          y = a ^ b;
      default:         y = '0;   // OP_NOP: result not written
    endcase
  end

endmodule
