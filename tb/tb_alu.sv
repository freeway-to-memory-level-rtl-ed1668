// tb_alu: random operands for each ALU operation, compared with the
// arithmetic done in the testbench (including address generation for LD/ST).
module tb_alu;
  import freeway_pkg::*;
  opcode_e op; word_t a, b, imm, y;
  int checks = 0, failures = 0;
  alu dut (.op, .a, .b, .imm, .y);
  initial begin
    for (int n = 0; n < 3000; n++) begin
      word_t e;
      op = opcode_e'(n % 6); a = $urandom; b = $urandom; imm = word_t'($signed(16'($urandom)));
      #1;
      case (n % 6)
        1: e = a + b;
        2: e = a - b;
        3, 4, 5: e = a + imm;
        default: e = 0;
      endcase
      checks++;
      if (y !== e) begin failures++; if (failures < 10) $display("FAIL op %0d a=%h b=%h imm=%h y=%h exp %h", n % 6, a, b, imm, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
