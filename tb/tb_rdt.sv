// tb_rdt: random writes (producer PC and slice dependence bit), commit
// clears and reads of the Register Dependence Table on all ports, compared
// with a reference array. Checks that reset leaves all dependence and
// producer bits at zero, that a clear drops only the producer bit and keeps
// the dependence bit, that writes are seen from the next cycle, and that
// with two writes to the same register the higher port wins.
module tb_rdt;
  import freeway_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  preg_t [2*DW-1:0] rd_preg; logic [2*DW-1:0] rd_pv, rd_dep; pc_t [2*DW-1:0] rd_pc;
  logic [DW-1:0] wr_en, wr_dep, clr_en; preg_t [DW-1:0] wr_preg, clr_preg; pc_t [DW-1:0] wr_pc;
  int checks = 0, failures = 0;
  rdt dut (.*);

  logic m_pv [NUM_PREGS]; logic m_dep [NUM_PREGS]; pc_t m_pc [NUM_PREGS];

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", w); end
  endtask

  initial begin
    wr_en = 0; clr_en = 0; rd_preg = '0; wr_preg = '0; clr_preg = '0; wr_pc = '0; wr_dep = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < NUM_PREGS; r++) begin
      rd_preg[0] = preg_t'(r); #1;
      chk(!rd_pv[0] && !rd_dep[0], "reset clears");
      m_pv[r] = 0; m_dep[r] = 0; m_pc[r] = 0;
    end
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      for (int k = 0; k < DW; k++) begin
        wr_en[k] = 1'($urandom); wr_preg[k] = preg_t'($urandom % NUM_PREGS);
        wr_pc[k] = $urandom; wr_dep[k] = 1'($urandom);
        clr_en[k] = ($urandom % 4 == 0); clr_preg[k] = preg_t'($urandom % NUM_PREGS);
      end
      // a register is never cleared and rewritten in the same cycle
      for (int k = 0; k < DW; k++)
        for (int j = 0; j < DW; j++)
          if (clr_en[k] && wr_en[j] && clr_preg[k] == wr_preg[j]) clr_en[k] = 0;
      for (int k = 0; k < 2*DW; k++) rd_preg[k] = preg_t'($urandom % NUM_PREGS);
      #1;
      for (int k = 0; k < 2*DW; k++) begin
        chk(rd_pv[k] == m_pv[rd_preg[k]], "producer valid");
        chk(rd_dep[k] == m_dep[rd_preg[k]], "slice dependence bit");
        if (m_pv[rd_preg[k]]) chk(rd_pc[k] == m_pc[rd_preg[k]], "producer pc");
      end
      @(posedge clk);
      for (int k = 0; k < DW; k++) if (clr_en[k]) m_pv[clr_preg[k]] = 0;
      for (int k = 0; k < DW; k++)
        if (wr_en[k]) begin
          m_pv[wr_preg[k]] = 1; m_dep[wr_preg[k]] = wr_dep[k]; m_pc[wr_preg[k]] = wr_pc[k];
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
