// tb_rename: drives random two-instruction rename groups and in-order frees
// (a model of commit: each renamed destination's old mapping is freed some
// cycles later, in order, up to two per cycle). Random subsets of the
// present slots dispatch (always a prefix, as in the core). Checks source
// and old-destination lookups against a reference map table updated one
// instruction at a time (so the intra-group bypass is checked), that every
// allocated physical register is currently free and that the two slots of a
// group get different registers, that nfree equals the reference free count,
// and that reset maps r_i to p_i.
module tb_rename;
  import freeway_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic  [DW-1:0] rn_valid, rn_take, wr, free_en;
  areg_t [DW-1:0] rs1, rs2, rd;
  preg_t [DW-1:0] ps1, ps2, pd, old_pd, free_preg;
  logic  [$clog2(NUM_PREGS-NUM_AREGS+1)-1:0] nfree;
  int checks = 0, failures = 0;
  rename dut (.*);

  preg_t m_map [NUM_AREGS];
  preg_t t_map [NUM_AREGS];
  logic  m_busy [NUM_PREGS];
  int    m_free;
  preg_t pend [$];

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", w); end
  endtask

  initial begin
    rn_valid = '0; rn_take = '0; wr = '0; rs1 = '0; rs2 = '0; rd = '0; free_en = '0; free_preg = '0;
    for (int i = 0; i < NUM_PREGS; i++) m_busy[i] = (i < NUM_AREGS);
    for (int i = 0; i < NUM_AREGS; i++) m_map[i] = preg_t'(i);
    m_free = NUM_PREGS - NUM_AREGS;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int need, pi;
      @(negedge clk);
      for (int k = 0; k < DW; k++) begin
        rs1[k] = areg_t'($urandom % 6); rs2[k] = areg_t'($urandom % 6); rd[k] = areg_t'($urandom % 6);
        wr[k] = 1'($urandom);
      end
      // bursts: mostly renaming in the first half of each 400-cycle period
      rn_valid[0] = ((n % 400) < 200) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      rn_valid[1] = rn_valid[0] && 1'($urandom);
      rn_take[0]  = rn_valid[0] && ($urandom % 5 != 0);
      rn_take[1]  = rn_take[0] && rn_valid[1] && ($urandom % 5 != 0);
      // frees, in order, never more than pending
      pi = 0;
      for (int k = 0; k < DW; k++) begin
        free_en[k] = (pend.size() > pi) &&
                     (((n % 400) >= 200) ? ($urandom % 4 != 0) : ($urandom % 4 == 0));
        free_preg[k] = (pend.size() > pi) ? pend[pi] : '0;
        if (free_en[k]) pi++;
      end
      #1;
      chk(nfree == m_free, "nfree");
      // do not take more registers than are free
      need = 0;
      for (int k = 0; k < DW; k++) begin
        if (rn_take[k] && wr[k]) need++;
        if (need > m_free) begin
          for (int j = k; j < DW; j++) rn_take[j] = 1'b0;
          break;
        end
      end
      #1;
      for (int i = 0; i < NUM_AREGS; i++) t_map[i] = m_map[i];
      for (int k = 0; k < DW; k++)
        if (rn_valid[k]) begin
          chk(ps1[k] == t_map[rs1[k]] && ps2[k] == t_map[rs2[k]], $sformatf("source mapping slot %0d", k));
          chk(old_pd[k] == t_map[rd[k]], $sformatf("old mapping slot %0d", k));
          if (rn_take[k] && wr[k]) chk(!m_busy[pd[k]], "allocated register was free");
          if (wr[k]) t_map[rd[k]] = pd[k];
        end
      if (rn_take[0] && wr[0] && rn_take[1] && wr[1]) chk(pd[0] != pd[1], "distinct registers in a group");
      @(posedge clk);
      for (int k = 0; k < DW; k++)
        if (free_en[k]) begin m_busy[pend[0]] = 0; void'(pend.pop_front()); m_free++; end
      for (int k = 0; k < DW; k++)
        if (rn_take[k] && wr[k]) begin
          pend.push_back(m_map[rd[k]]); m_busy[pd[k]] = 1; m_map[rd[k]] = pd[k]; m_free--;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
