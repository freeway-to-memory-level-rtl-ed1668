// regfile: physical register file with per-register ready bits.
//
// NPREGS words of XLEN bits, NRD combinational read ports and NWR write
// ports. A ready bit per register records whether its value has been
// produced: rename clears the bit of each newly allocated destination
// (clr_en, one port per dispatch slot), and any write sets it. The scheduler reads the ready vector to decide
// whether the instruction at a queue head may issue (stall-on-use).
//
// Timing: a write at clock edge t is visible to reads and in the ready
// vector from the cycle after t, so a consumer can issue the cycle after
// its single-cycle producer. If clr and a write hit the same register in one
// cycle the write wins (cannot happen in the core: a freshly allocated
// register has no writer in flight). Reset zeroes all registers and marks
// them ready, so the initial architectural state is all zeros.
// The port counts are this design's choice; in the core the 8 read ports
// serve the two issue slots (4), the load-address checks of the B-IQ and
// Y-IQ heads (2) and the two-slot commit trace (2).
module regfile
  import freeway_pkg::*;
#(
  parameter int NPREGS = NUM_PREGS,
  parameter int NRD    = 8,
  parameter int NWR    = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  preg_t [NRD-1:0] rd_addr,
  output word_t [NRD-1:0] rd_data,
  input  logic  [NWR-1:0] wr_en,
  input  preg_t [NWR-1:0] wr_addr,
  input  word_t [NWR-1:0] wr_data,
  input  logic  [DW-1:0] clr_en,
  input  preg_t [DW-1:0] clr_addr,
  output logic  [NPREGS-1:0] ready
);
  word_t             rf_q [NPREGS];
  logic [NPREGS-1:0] rdy_q;

  assign ready = rdy_q;
  always_comb
    for (int r = 0; r < NRD; r++) rd_data[r] = rf_q[rd_addr[r]];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NPREGS; i++) rf_q[i] <= '0;
      rdy_q <= '1;
    end else begin
      for (int c = 0; c < DW; c++)
        if (clr_en[c]) rdy_q[clr_addr[c]] <= 1'b0;
      for (int w = 0; w < NWR; w++)
        if (wr_en[w]) begin
          rf_q[wr_addr[w]]  <= wr_data[w];
          rdy_q[wr_addr[w]] <= 1'b1;
        end
    end
  end
endmodule
