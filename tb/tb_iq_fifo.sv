// tb_iq_fifo: random traffic on a queue of the B-IQ/Y-IQ size (32) with up to
// two pushes (any combination of the two dispatch ports) and up to two pops
// per cycle, compared with a reference queue: head and second entry contents
// in order (port 0 before port 1), empty/two/free, the full condition
// reached (pushes are limited to the free entries), double pops, and
// simultaneous push and pop.
module tb_iq_fifo;
  import freeway_pkg::*;
  localparam int DEPTH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [DW-1:0] push; logic pop, pop2, empty, two; uop_t [DW-1:0] push_data; uop_t head, second;
  logic [$clog2(DEPTH+1)-1:0] free;
  int checks = 0, failures = 0, n_full = 0, n_pop2 = 0;
  iq_fifo #(.DEPTH(DEPTH)) dut (.*);
  uop_t m [$];

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s size=%0d", w, m.size()); end
  endtask

  initial begin
    push = '0; pop = 0; pop2 = 0; push_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      #1;
      chk(empty == (m.size() == 0), "empty");
      chk(free == DEPTH - m.size(), "free");
      chk(two == (m.size() >= 2), "two");
      if (m.size() > 0) chk(head == m[0], "head order");
      if (m.size() > 1) chk(second == m[1], "second entry");
      if (free == 0) n_full++;
      // phases: fill, drain, mixed
      for (int k = 0; k < DW; k++)
        case ((n / 500) % 3)
          0:       push[k] = ($urandom % 3 != 0);
          1:       push[k] = ($urandom % 5 == 0);
          default: push[k] = 1'($urandom);
        endcase
      case ((n / 500) % 3)
        0: pop = ($urandom % 4 == 0);
        1: pop = ($urandom % 4 != 0);
        default: pop = 1'($urandom);
      endcase
      if (free == 0) push = '0;
      if (free == 1 && push == 2'b11) push[$urandom % 2] = 1'b0;
      if (empty) pop = 0;
      pop2 = pop && two && ($urandom % 3 == 0);
      if (pop2) n_pop2++;
      for (int k = 0; k < DW; k++) push_data[k] = uop_t'({$urandom, $urandom, $urandom, $urandom});
      @(posedge clk);
      if (pop) void'(m.pop_front());
      if (pop2) void'(m.pop_front());
      for (int k = 0; k < DW; k++) if (push[k]) m.push_back(push_data[k]);
    end
    chk(n_full > 0, "queue reached full");
    chk(n_pop2 > 0, "double pops exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
