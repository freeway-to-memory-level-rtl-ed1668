// tb_regfile: random writes on three ports, ready-bit clears and reads on
// six ports, compared with a reference array: data visible the cycle after
// a write, ready cleared by clr and set by a write, reset to zero and ready.
module tb_regfile;
  import freeway_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  preg_t [5:0] rd_addr; word_t [5:0] rd_data;
  logic [2:0] wr_en; preg_t [2:0] wr_addr; word_t [2:0] wr_data;
  logic [DW-1:0] clr_en; preg_t [DW-1:0] clr_addr; logic [NUM_PREGS-1:0] ready;
  int checks = 0, failures = 0;
  regfile #(.NRD(6), .NWR(3)) dut (.*);
  word_t m [NUM_PREGS]; logic mr [NUM_PREGS];

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", w); end
  endtask

  initial begin
    wr_en = 0; clr_en = 0; rd_addr = '0; wr_addr = '0; wr_data = '0; clr_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NUM_PREGS; i++) begin m[i] = 0; mr[i] = 1; end
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      for (int r = 0; r < 6; r++) rd_addr[r] = preg_t'($urandom % NUM_PREGS);
      for (int w = 0; w < 3; w++) begin
        wr_en[w] = ($urandom % 3 == 0); wr_addr[w] = preg_t'($urandom % NUM_PREGS); wr_data[w] = $urandom;
        for (int v = 0; v < w; v++) if (wr_en[v] && wr_addr[v] == wr_addr[w]) wr_en[w] = 0;
      end
      for (int c = 0; c < DW; c++) begin
        clr_en[c] = 1'($urandom); clr_addr[c] = preg_t'($urandom % NUM_PREGS);
        for (int w = 0; w < 3; w++) if (wr_en[w] && wr_addr[w] == clr_addr[c]) clr_en[c] = 0;
      end
      #1;
      for (int r = 0; r < 6; r++) chk(rd_data[r] == m[rd_addr[r]], "read data");
      for (int i = 0; i < NUM_PREGS; i++) chk(ready[i] == mr[i], "ready bit");
      @(posedge clk);
      for (int c = 0; c < DW; c++) if (clr_en[c]) mr[clr_addr[c]] = 0;
      for (int w = 0; w < 3; w++) if (wr_en[w]) begin m[wr_addr[w]] = wr_data[w]; mr[wr_addr[w]] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
