// tb_ist: inserts random PCs into the Instruction Slice Table (up to four per
// cycle) and looks up random PCs on both lookup ports, comparing hits with a direct-mapped
// reference model (index PC[8:2], tag PC[31:9] for 128 entries). Also checks
// that reset empties the table and that a lookup sees an insertion only
// from the next cycle on.
module tb_ist;
  import freeway_pkg::*;
  localparam int ENTRIES = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pc_t [DW-1:0] lk_pc; logic [DW-1:0] lk_hit; logic [2*DW-1:0] ins_valid; pc_t [2*DW-1:0] ins_pc;
  int checks = 0, failures = 0;
  ist #(.ENTRIES(ENTRIES)) dut (.*);

  logic        m_v [ENTRIES];
  logic [22:0] m_t [ENTRIES];
  pc_t pool [64];

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", w); end
  endtask

  initial begin
    for (int i = 0; i < 64; i++) pool[i] = {$urandom} & 32'h0000_7ffc;
    for (int i = 0; i < ENTRIES; i++) m_v[i] = 0;
    ins_valid = 0; ins_pc = '0; lk_pc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 64; i++) begin lk_pc[i%DW] = pool[i]; #1; chk(!lk_hit[i%DW], "empty after reset"); end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      ins_valid = (2*DW)'($urandom);
      for (int k = 0; k < 2*DW; k++) ins_pc[k] = pool[$urandom % 64];
      for (int k = 0; k < DW; k++) lk_pc[k] = pool[$urandom % 64];
      #1;
      for (int k = 0; k < DW; k++)
        chk(lk_hit[k] == (m_v[lk_pc[k][8:2]] && m_t[lk_pc[k][8:2]] == lk_pc[k][31:9]), "lookup");
      @(posedge clk);
      for (int k = 0; k < 2*DW; k++)
        if (ins_valid[k]) begin m_v[ins_pc[k][8:2]] = 1; m_t[ins_pc[k][8:2]] = ins_pc[k][31:9]; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
