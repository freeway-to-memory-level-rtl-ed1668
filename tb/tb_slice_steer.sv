// tb_slice_steer: exhaustive check of the dispatch decision over all input
// combinations against the rules written out independently here:
// non-slice -> A; independent slice -> B; dependent slice -> Y; store data
// -> A with its address part to B or Y by its address source only; the
// destination dependence bit is set by loads and by any dependent source;
// IBDA asks for the producers of address sources of memory instructions and
// of all sources of IST hits, if those producers are in flight.
module tb_slice_steer;
  import freeway_pkg::*;
  logic is_load, is_store, ist_hit, use_s1, use_s2, dep_s1, dep_s2, pv_s1, pv_s2;
  queue_e q_main, q_sta; logic sta_valid, dependent, dep_dst, ibda_s1, ibda_s2;
  int checks = 0, failures = 0;
  slice_steer dut (.*);

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s v=%b", w, {is_load, is_store, ist_hit, use_s1, use_s2, dep_s1, dep_s2, pv_s1, pv_s2}); end
  endtask

  initial begin
    for (int v = 0; v < 512; v++) begin
      bit any_dep, mem;
      {is_load, is_store, ist_hit, use_s1, use_s2, dep_s1, dep_s2, pv_s1, pv_s2} = 9'(v);
      if (is_load && is_store) continue;
      #1;
      any_dep = (use_s1 & dep_s1) | (use_s2 & dep_s2);
      mem = is_load | is_store;
      if (is_store) begin
        chk(q_main == Q_A, "store data to A-IQ");
        chk(sta_valid, "store address part");
        chk(q_sta == ((use_s1 & dep_s1) ? Q_Y : Q_B), "store address queue");
        chk(dependent == (use_s1 & dep_s1), "store dependence ignores data source");
      end else begin
        chk(!sta_valid, "no address part");
        if (is_load || ist_hit) chk(q_main == (any_dep ? Q_Y : Q_B), "slice queue");
        else                    chk(q_main == Q_A, "non-slice to A-IQ");
        chk(dependent == ((is_load || ist_hit) && any_dep), "dependent flag");
      end
      chk(dep_dst == (is_load | any_dep), "destination dependence bit");
      chk(ibda_s1 == ((mem | ist_hit) & use_s1 & pv_s1), "IBDA source 1");
      chk(ibda_s2 == (!mem & ist_hit & use_s2 & pv_s2), "IBDA source 2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
