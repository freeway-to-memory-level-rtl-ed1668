// tb_scoreboard: allocates random instructions (some stores) in program
// order, up to two per cycle, completes their parts in random order on three
// completion ports and acknowledges commits (a random prefix of the offered
// slots). Compared with a reference window: slot k is offered for commit
// only if the k+1 oldest entries all have every part done, with the fields
// given at allocation; nfree counts down to 0 at 64 entries; sequence
// numbers count up modulo 128 and head_seq tracks the oldest entry.
module tb_scoreboard;
  import freeway_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [DW-1:0] al_valid, al_wr, al_store, cm_valid, cm_wr, cm_store, cm_ack; logic empty;
  pc_t [DW-1:0] al_pc, cm_pc; areg_t [DW-1:0] al_rd, cm_rd;
  preg_t [DW-1:0] al_pd, al_old_pd, cm_pd, cm_old_pd;
  seq_t [DW-1:0] al_seq; seq_t head_seq; logic [SEQ_W-1:0] nfree;
  logic [2:0] cp_valid, cp_part; seq_t [2:0] cp_seq;
  int checks = 0, failures = 0, n_commit = 0, n_full = 0, n_dual = 0;
  scoreboard #(.NCP(3)) dut (.*);

  typedef struct { int seq; pc_t pc; bit wr; areg_t rd; preg_t pd, opd; bit st; bit d0, d1; } e_t;
  e_t m [$];
  int next_seq;

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", w); end
  endtask

  initial begin
    al_valid = '0; cp_valid = 0; cp_part = 0; cp_seq = '0; cm_ack = '0;
    al_pc = '0; al_wr = '0; al_rd = '0; al_pd = '0; al_old_pd = '0; al_store = '0;
    next_seq = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 8000; n++) begin
      int pick [3];
      @(negedge clk);
      #1;
      chk(nfree == WINDOW - m.size(), "nfree");
      chk(empty == (m.size() == 0), "empty");
      for (int k = 0; k < DW; k++) chk(al_seq[k] == seq_t'(next_seq + k), "allocation sequence number");
      if (m.size() > 0) chk(head_seq == seq_t'(m[0].seq), "head sequence number");
      begin
        bit ok;
        ok = 1;
        for (int k = 0; k < DW; k++) begin
          ok = ok && (m.size() > k) && m[k].d0 && m[k].d1;
          chk(cm_valid[k] == ok, "commit only when the oldest entries are complete");
          if (ok)
            chk(cm_pc[k] == m[k].pc && cm_wr[k] == m[k].wr && cm_rd[k] == m[k].rd &&
                cm_pd[k] == m[k].pd && cm_old_pd[k] == m[k].opd && cm_store[k] == m[k].st,
                "commit fields");
        end
      end
      if (nfree == 0) n_full++;
      al_valid[0] = (((n / 300) % 2 == 0) ? ($urandom % 4 != 0) : ($urandom % 4 == 0));
      al_valid[1] = al_valid[0] && 1'($urandom);
      if (nfree < 2) al_valid[1] = 0;
      if (nfree < 1) al_valid[0] = 0;
      for (int k = 0; k < DW; k++) begin
        al_pc[k] = $urandom; al_wr[k] = 1'($urandom); al_rd[k] = areg_t'($urandom);
        al_pd[k] = preg_t'($urandom); al_old_pd[k] = preg_t'($urandom); al_store[k] = ($urandom % 4 == 0);
      end
      cm_ack[0] = cm_valid[0] && ($urandom % 4 != 0);
      cm_ack[1] = cm_ack[0] && cm_valid[1] && ($urandom % 3 != 0);
      cp_valid = 0;
      for (int c = 0; c < 3; c++) begin
        pick[c] = -1;
        if (m.size() > 0 && $urandom % 2) begin
          int i;
          bit dup;
          i = $urandom % m.size();
          dup = 0;
          for (int k = 0; k < c; k++) if (pick[k] == i) dup = 1;
          if (!dup) begin
            pick[c] = i; cp_valid[c] = 1; cp_seq[c] = seq_t'(m[i].seq);
            cp_part[c] = m[i].st ? $urandom : 1'b0;
          end
        end
      end
      @(posedge clk);
      for (int c = 0; c < 3; c++) if (cp_valid[c]) begin
        if (cp_part[c]) m[pick[c]].d1 = 1; else m[pick[c]].d0 = 1;
      end
      for (int k = 0; k < DW; k++) if (cm_ack[k]) begin void'(m.pop_front()); n_commit++; end
      if (cm_ack[1]) n_dual++;
      for (int k = 0; k < DW; k++)
        if (al_valid[k]) begin
          e_t e; e.seq = next_seq % 128; e.pc = al_pc[k]; e.wr = al_wr[k]; e.rd = al_rd[k];
          e.pd = al_pd[k]; e.opd = al_old_pd[k]; e.st = al_store[k]; e.d0 = 0; e.d1 = !al_store[k];
          m.push_back(e); next_seq = (next_seq + 1) % 128;
        end
    end
    chk(n_commit > 1000 && n_full > 0 && n_dual > 0, "commits, dual commits and full window exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (30000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
