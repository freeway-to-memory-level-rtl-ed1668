// tb_freeway_sweep: runs the test loop on the core in the configurations of
// the two sensitivity studies that a core of this size can hold.
//
//   queue size:   A-IQ/B-IQ/Y-IQ = 64/32/32 (default), 16/8/8 and 10/5/5,
//                 i.e. 128, 32 and 20 queue entries in a 2:1:1 ratio;
//   L1 latency:   data-memory hit latency of 2, 4, 6 and 8 cycles at the
//                 default queue sizes (misses stay at 30 cycles).
//
// Each configuration is one tb_core_run instance, so all runs proceed in
// parallel on the same clock. Every run must execute the whole program
// correctly (every commit and the final memory checked against a reference
// interpreter) with the slice mechanisms active. Across runs, a longer hit
// latency must not make the program finish sooner, and the smaller queues
// must not beat the default ones. The cycle counts are printed as a small
// sensitivity table. Watchdog: 200000 cycles.
module tb_freeway_sweep;
  import freeway_pkg::*;

  localparam int NCFG = 6;
  localparam int MAXCYC = 200000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NCFG-1:0] done;
  int c_checks [NCFG];
  int c_fail   [NCFG];
  int c_cyc    [NCFG];
  int checks = 0, failures = 0;

  // queue-size study (hit latency 4)
  tb_core_run #(.AIQ(64), .BIQ(32), .YIQ(32), .HIT_LAT(4)) r_q128 (
    .clk, .rst_n, .done(done[0]), .checks(c_checks[0]), .failures(c_fail[0]), .cycles(c_cyc[0]));
  tb_core_run #(.AIQ(16), .BIQ(8), .YIQ(8), .HIT_LAT(4)) r_q32 (
    .clk, .rst_n, .done(done[1]), .checks(c_checks[1]), .failures(c_fail[1]), .cycles(c_cyc[1]));
  tb_core_run #(.AIQ(10), .BIQ(5), .YIQ(5), .HIT_LAT(4)) r_q20 (
    .clk, .rst_n, .done(done[2]), .checks(c_checks[2]), .failures(c_fail[2]), .cycles(c_cyc[2]));
  // L1 hit-latency study (default queues; latency 4 is run r_q128)
  tb_core_run #(.AIQ(64), .BIQ(32), .YIQ(32), .HIT_LAT(2)) r_l2 (
    .clk, .rst_n, .done(done[3]), .checks(c_checks[3]), .failures(c_fail[3]), .cycles(c_cyc[3]));
  tb_core_run #(.AIQ(64), .BIQ(32), .YIQ(32), .HIT_LAT(6)) r_l6 (
    .clk, .rst_n, .done(done[4]), .checks(c_checks[4]), .failures(c_fail[4]), .cycles(c_cyc[4]));
  tb_core_run #(.AIQ(64), .BIQ(32), .YIQ(32), .HIT_LAT(8)) r_l8 (
    .clk, .rst_n, .done(done[5]), .checks(c_checks[5]), .failures(c_fail[5]), .cycles(c_cyc[5]));

  task automatic chk(bit c, string w);
    checks++; if (!c) begin failures++; $display("FAIL %s", w); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&done);
    @(posedge clk);
    for (int k = 0; k < NCFG; k++) begin
      checks   += c_checks[k];
      failures += c_fail[k];
    end
    $display("queue entries 128/32/20: cycles %0d / %0d / %0d", c_cyc[0], c_cyc[1], c_cyc[2]);
    $display("hit latency 2/4/6/8:     cycles %0d / %0d / %0d / %0d", c_cyc[3], c_cyc[0], c_cyc[4], c_cyc[5]);
    chk(c_cyc[3] <= c_cyc[0] && c_cyc[0] <= c_cyc[4] && c_cyc[4] <= c_cyc[5],
        "longer hit latency never finishes sooner");
    chk(c_cyc[0] <= c_cyc[1] && c_cyc[0] <= c_cyc[2], "smaller queues never beat the default ones");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog: done=%b", done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
