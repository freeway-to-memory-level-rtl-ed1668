// tb_store_buffer: a reference model of in-flight stores drives the store
// buffer: stores are allocated in program order with 7-bit sequence numbers
// (up to two per cycle, with gaps for other instructions, and wrapping; a
// store that is present but not taken must not allocate), their addresses (from a
// small pool so aliasing is frequent) and data arrive in random order, and
// ready stores drain from the head. Each cycle two loads with random
// sequence numbers inside the window and random addresses are checked:
// ck_unres must be set iff an older store has no address yet, ck_alias iff
// an older store with a known address matches, and younger stores must be
// ignored. Also checks the free count and the head entry's address and data.
module tb_store_buffer;
  import freeway_pkg::*;
  localparam int ENTRIES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [DW-1:0] al_valid, al_take; logic sd_valid, hd_valid, hd_ready, drain;
  logic [1:0] sa_valid; sbidx_t [1:0] sa_idx; word_t [1:0] sa_addr;
  seq_t [DW-1:0] al_seq; sbidx_t [DW-1:0] al_idx; seq_t seq_head; sbidx_t sd_idx; word_t sd_data, hd_addr, hd_data;
  seq_t [1:0] ck_seq; word_t [1:0] ck_addr; logic [1:0] ck_ok, ck_unres, ck_alias;
  logic [$clog2(ENTRIES):0] free;
  int checks = 0, failures = 0, n_unres = 0, n_alias = 0, n_young = 0;
  store_buffer #(.ENTRIES(ENTRIES)) dut (.*);

  typedef struct { int seq; bit av; bit dv; word_t a; word_t d; sbidx_t idx; } st_t;
  st_t m [$];
  int next_seq, head;

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", w); end
  endtask

  initial begin
    al_valid = '0; al_take = '0; sa_valid = 0; sd_valid = 0; drain = 0; al_seq = '0; sa_idx = '0; sa_addr = '0;
    sd_idx = 0; sd_data = 0; seq_head = 0; ck_seq = '0; ck_addr = '0;
    next_seq = 0; head = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 8000; n++) begin
      int pa [2]; int pd;
      @(negedge clk);
      // oldest in-flight instruction: at or before the oldest store
      head = (m.size() > 0) ? m[0].seq - ($urandom % 3) : next_seq - ($urandom % 3);
      if (head < 0) head = 0;
      seq_head = seq_t'(head);
      #1;
      chk(free == ENTRIES - m.size(), "free");
      chk(hd_valid == (m.size() > 0), "head valid");
      if (m.size() > 0) begin
        chk(hd_ready == (m[0].av && m[0].dv), "head ready");
        if (m[0].av) chk(hd_addr == m[0].a, "head address");
        if (m[0].dv) chk(hd_data == m[0].d, "head data");
      end
      // load checks
      for (int c = 0; c < 2; c++) begin
        int ls; bit eu, ea, yng;
        ls = head + ($urandom % (next_seq - head + 2));
        if (ls - head > 63) ls = head + 63;
        ck_seq[c] = seq_t'(ls);
        ck_addr[c] = word_t'($urandom % 8);
        #1;
        eu = 0; ea = 0; yng = 0;
        foreach (m[i]) begin
          if (m[i].seq < ls) begin
            if (!m[i].av) eu = 1;
            else if (m[i].a == ck_addr[c]) ea = 1;
          end else if (m[i].av && m[i].a == ck_addr[c]) yng = 1;
        end
        chk(ck_unres[c] == eu, "unresolved older store");
        chk(ck_alias[c] == ea, "aliasing older store");
        chk(ck_ok[c] == (!eu && !ea), "load ok");
        if (eu) n_unres++;
        if (ea) n_alias++;
        if (yng && !eu && !ea) n_young++;
      end
      // stimulus
      for (int k = 0; k < DW; k++) begin
        al_valid[k] = ($urandom % 3 == 0) && (next_seq - head < 60);
        al_seq[k]   = seq_t'(next_seq + k);
      end
      // slots dispatch as a prefix; never more stores than free entries
      case ($urandom % 4)
        0:       al_take = '0;
        1:       al_take = al_valid & 2'b01;
        default: al_take = al_valid;
      endcase
      if ($countones(al_take) > free) al_take = '0;
      sa_valid = 0; sd_valid = 0;
      pa = '{-1, -1}; pd = -1;
      foreach (m[i]) begin
        if (!m[i].av && pa[0] < 0 && $urandom % 3 == 0) pa[0] = i;
        else if (!m[i].av && pa[1] < 0 && $urandom % 3 == 0) pa[1] = i;
        if (!m[i].dv && pd < 0 && $urandom % 3 == 0) pd = i;
      end
      for (int k = 0; k < 2; k++) if (pa[k] >= 0) begin
        sa_valid[k] = 1; sa_idx[k] = m[pa[k]].idx; sa_addr[k] = word_t'($urandom % 8);
      end
      if (pd >= 0) begin sd_valid = 1; sd_idx = m[pd].idx; sd_data = $urandom; end
      drain = hd_ready && ($urandom % 2 == 0);
      #1;
      @(posedge clk);
      for (int k = 0; k < 2; k++) if (sa_valid[k]) begin m[pa[k]].av = 1; m[pa[k]].a = sa_addr[k]; end
      if (sd_valid) begin m[pd].dv = 1; m[pd].d = sd_data; end
      if (drain) void'(m.pop_front());
      for (int k = 0; k < DW; k++)
        if (al_take[k]) begin
          st_t s; s.seq = next_seq + k; s.av = 0; s.dv = 0; s.a = 0; s.d = 0; s.idx = al_idx[k];
          m.push_back(s);
        end
      next_seq += ($urandom % 3 == 0) ? 1 : 0;
      if (al_take != 0) next_seq += DW;
    end
    chk(n_unres > 0 && n_alias > 0 && n_young > 0, "all check outcomes exercised");
    $display("unres=%0d alias=%0d younger-ignored=%0d", n_unres, n_alias, n_young);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (30000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
