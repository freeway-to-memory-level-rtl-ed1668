// alu: single-cycle integer unit for the core's two integer pipes.
//
// Computes ADD, SUB and ADDI; address generation for loads and stores uses the
// same adder (base + sign-extended offset). Combinational: the core writes the
// result into the physical register file at the end of the issue cycle. The
// operation set is this design's assumed ISA.
module alu
  import freeway_pkg::*;
(
  input  opcode_e op,
  input  word_t   a,
  input  word_t   b,
  input  word_t   imm,
  output word_t   y
);
  always_comb begin
    unique case (op)
      OP_ADD:  y = a + b;
      OP_SUB:  y = a - b;
      OP_ADDI, OP_LD, OP_ST: y = a + imm;
      default: y = '0;
    endcase
  end
endmodule
