// decoder: splits a 32-bit instruction word into its fields and classifies it.
//
// Purely combinational. Field layout and opcodes are this design's own ISA
// (see freeway_pkg); the immediate is sign extended from 16 bits. Outputs say
// which source registers are read, whether rd is written (never for
// stores and NOPs), and whether the instruction is a load or a store, which is
// what starts slice construction in the front end. Most output bits are
// the instruction's fields passed on unchanged (opcode, register numbers,
// immediate); the decoding logic is in the class and operand-use flags.
module decoder
  import freeway_pkg::*;
(
  input  logic [31:0] instr,
  output dec_t        dec
);
  opcode_e op;
  always_comb begin
    op           = opcode_e'(instr[31:28]);
    dec          = '0;
    dec.op       = op;
    dec.rd       = instr[27:24];
    dec.rs1      = instr[23:20];
    dec.rs2      = instr[19:16];
    dec.imm      = {{16{instr[15]}}, instr[15:0]};
    unique case (op)
      OP_ADD, OP_SUB: begin dec.use_s1 = 1'b1; dec.use_s2 = 1'b1; dec.wr_rd = 1'b1; end
      OP_ADDI:        begin dec.use_s1 = 1'b1; dec.wr_rd = 1'b1; end
      OP_LD:          begin dec.use_s1 = 1'b1; dec.wr_rd = 1'b1; dec.is_load = 1'b1; end
      OP_ST:          begin dec.use_s1 = 1'b1; dec.use_s2 = 1'b1; dec.is_store = 1'b1; end
      default:        begin dec.op = OP_NOP; end
    endcase
  end
endmodule
