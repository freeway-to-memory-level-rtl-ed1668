// tb_scheduler: random queue states (head and second entry of each queue:
// valid, ready, distinct ages with the second younger than its head, head a
// load or not, load port free) compared with a reference selection: the
// issued set is the oldest ready candidates, at most two, a second entry
// only together with its own head, at most one load (only with a free load
// port), slots ordered oldest first; plus directed cases.
module tb_scheduler;
  import freeway_pkg::*;
  logic [2:0] hd_valid, hd_ready, hd_is_ld, grant, grant2, nx_valid, nx_ready;
  seq_t [2:0] hd_age, nx_age; logic ld_port_free;
  logic [1:0] slot_v, slot_nx; queue_e [1:0] slot_q;
  int checks = 0, failures = 0, n_pair = 0;
  scheduler #(.ISSUE_W(2)) dut (.*);

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s v=%b r=%b l=%b nv=%b nr=%b g=%b g2=%b", w, hd_valid, hd_ready, hd_is_ld, nx_valid, nx_ready, grant, grant2); end
  endtask

  initial begin
    for (int n = 0; n < 20000; n++) begin
      int ages [6]; int cq [6]; bit cn [6]; int nc;
      logic [2:0] eg, eg2; int ns; bit ldu; queue_e eq [2]; bit en [2];
      hd_valid = 3'($urandom); hd_ready = 3'($urandom); hd_is_ld = 3'($urandom);
      nx_valid = 3'($urandom); nx_ready = 3'($urandom);
      ld_port_free = ($urandom % 4 != 0);
      // six distinct ages; per queue the smaller one is the head's
      for (int i = 0; i < 6; i++) begin
        bit dup;
        do begin
          ages[i] = $urandom % 64;
          dup = 0;
          for (int j = 0; j < i; j++) if (ages[j] == ages[i]) dup = 1;
        end while (dup);
      end
      for (int q = 0; q < 3; q++) begin
        hd_age[q] = seq_t'((ages[2*q] < ages[2*q+1]) ? ages[2*q] : ages[2*q+1]);
        nx_age[q] = seq_t'((ages[2*q] < ages[2*q+1]) ? ages[2*q+1] : ages[2*q]);
      end
      #1;
      // reference: walk all six candidates from oldest to youngest
      nc = 0;
      for (int q = 0; q < 3; q++) begin
        cq[nc] = q; cn[nc] = 0; nc++;
        cq[nc] = q; cn[nc] = 1; nc++;
      end
      for (int i = 0; i < 6; i++) for (int j = 0; j < 5; j++) begin
        int aj, ak;
        aj = cn[j]   ? nx_age[cq[j]]   : hd_age[cq[j]];
        ak = cn[j+1] ? nx_age[cq[j+1]] : hd_age[cq[j+1]];
        if (aj > ak) begin
          int tq; bit tn;
          tq = cq[j]; cq[j] = cq[j+1]; cq[j+1] = tq;
          tn = cn[j]; cn[j] = cn[j+1]; cn[j+1] = tn;
        end
      end
      eg = 0; eg2 = 0; ns = 0; ldu = 0;
      for (int i = 0; i < 6; i++) begin
        int q;
        q = cq[i];
        if (ns < 2) begin
          if (!cn[i] && hd_valid[q] && hd_ready[q] && !(hd_is_ld[q] && (ldu || !ld_port_free))) begin
            eg[q] = 1; eq[ns] = queue_e'(q); en[ns] = 0; ns++; if (hd_is_ld[q]) ldu = 1;
          end else if (cn[i] && eg[q] && nx_valid[q] && nx_ready[q]) begin
            eg2[q] = 1; eq[ns] = queue_e'(q); en[ns] = 1; ns++;
          end
        end
      end
      if (eg2 != 0) n_pair++;
      chk(grant == eg, "granted heads");
      chk(grant2 == eg2, "granted second entries");
      chk(slot_v == ((ns == 0) ? 2'b00 : (ns == 1) ? 2'b01 : 2'b11), "slot count");
      for (int s = 0; s < ns; s++) chk(slot_q[s] == eq[s] && slot_nx[s] == en[s], "slot order");
    end
    chk(n_pair > 0, "two issued from one queue");
    // directed: three ready ALU heads, Y oldest, then A; B youngest loses
    hd_valid = 3'b111; hd_ready = 3'b111; hd_is_ld = 3'b000; ld_port_free = 1; nx_valid = 3'b000;
    hd_age[0] = 5; hd_age[1] = 9; hd_age[2] = 1; #1;
    chk(grant == 3'b101 && slot_q[0] == Q_Y && slot_q[1] == Q_A, "directed oldest two");
    // directed: two loads ready, only one issues
    hd_is_ld = 3'b110; #1;
    chk(grant == 3'b101, "one load per cycle");
    // directed: A head and the entry behind it are the two oldest: both go
    hd_is_ld = 3'b000; nx_valid = 3'b001; nx_ready = 3'b001; nx_age[0] = 6; hd_age[2] = 20; #1;
    chk(grant == 3'b001 && grant2 == 3'b001 && slot_q[1] == Q_A && slot_nx == 2'b10, "two from the A-IQ");
    // directed: second entry not ready: the next oldest head goes instead
    nx_ready = 3'b000; #1;
    chk(grant == 3'b011 && grant2 == 3'b000, "second entry not ready");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
