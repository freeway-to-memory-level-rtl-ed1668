// tb_decoder: checks field extraction, sign extension and instruction
// classification of the decoder for every opcode and random field values,
// against an independently written table of the ISA.
module tb_decoder;
  import freeway_pkg::*;
  logic [31:0] instr;
  dec_t dec;
  int checks = 0, failures = 0;
  decoder dut (.instr, .dec);

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s instr=%h", w, instr); end
  endtask

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [3:0] op;
      logic [3:0] e_use, e_class; // {use1,use2,wr} / {ld,st}
      op = 4'(n % 8);
      instr = {op, 28'($urandom)};
      #1;
      chk(dec.rd == instr[27:24] && dec.rs1 == instr[23:20] && dec.rs2 == instr[19:16], "fields");
      chk(dec.imm == {{16{instr[15]}}, instr[15:0]}, "imm sign extension");
      case (op)
        4'd1, 4'd2: begin e_use = 4'b0111; e_class = 4'b0000; end // ADD SUB
        4'd3:       begin e_use = 4'b0101; e_class = 4'b0000; end // ADDI
        4'd4:       begin e_use = 4'b0101; e_class = 4'b0010; end // LD
        4'd5:       begin e_use = 4'b0110; e_class = 4'b0001; end // ST
        default:    begin e_use = 4'b0000; e_class = 4'b0000; end
      endcase
      chk({1'b0, dec.use_s1, dec.use_s2, dec.wr_rd} == e_use, $sformatf("operand use op %0d", op));
      chk({2'b0, dec.is_load, dec.is_store} == e_class, "class");
      chk(dec.op == ((op <= 5) ? opcode_e'(op) : OP_NOP), "opcode");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
