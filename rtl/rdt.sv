// rdt: Register Dependence Table with the Freeway slice dependence bit.
//
// One entry per physical register. Each entry holds:
//   * pv  - the register's producer is still in the instruction window,
//   * pc  - that producer's PC (used by IBDA to grow slices backwards),
//   * dep - the slice dependence bit: an instruction reading this register
//           belongs to a dependent slice.
// The rename/dispatch stage reads the entries of the two source registers
// of each of the DW instructions it handles per cycle (2*DW read ports) and
// writes the entry of each destination (DW write ports) (pv=1, its PC, and the
// dependence bit computed by slice_steer: 1 for a load or for any instruction
// with a source whose bit is 1, else 0). At commit the producer-valid bit of
// the committed destination is cleared; the dependence bit stays until the
// register is written again. Reset clears all bits, as the paper specifies.
//
// Timing: reads are combinational, writes land at the next clock edge. A read
// of a register written in the same cycle returns the old value; the
// dispatch stage forwards an older slot's new entry to a younger slot of the
// same group itself. DW clear ports serve DW commits per cycle.
module rdt
  import freeway_pkg::*;
#(
  parameter int NPREGS = NUM_PREGS
) (
  input  logic clk,
  input  logic rst_n,
  input  preg_t [2*DW-1:0] rd_preg,
  output logic  [2*DW-1:0] rd_pv,
  output pc_t   [2*DW-1:0] rd_pc,
  output logic  [2*DW-1:0] rd_dep,
  input  logic  [DW-1:0]   wr_en,
  input  preg_t [DW-1:0]   wr_preg,
  input  pc_t   [DW-1:0]   wr_pc,
  input  logic  [DW-1:0]   wr_dep,
  input  logic  [DW-1:0]   clr_en,
  input  preg_t [DW-1:0]   clr_preg
);
  logic [NPREGS-1:0] pv_q, dep_q;
  pc_t               pc_q [NPREGS];

  always_comb begin
    for (int k = 0; k < 2*DW; k++) begin
      rd_pv[k]  = pv_q[rd_preg[k]];
      rd_dep[k] = dep_q[rd_preg[k]];
      rd_pc[k]  = pc_q[rd_preg[k]];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pv_q  <= '0;
      dep_q <= '0;
    end else begin
      for (int k = 0; k < DW; k++)
        if (clr_en[k]) pv_q[clr_preg[k]] <= 1'b0;
      for (int k = 0; k < DW; k++)
        if (wr_en[k]) begin
          pv_q[wr_preg[k]]  <= 1'b1;
          dep_q[wr_preg[k]] <= wr_dep[k];
        end
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < DW; k++)
      if (wr_en[k]) pc_q[wr_preg[k]] <= wr_pc[k];
  end
endmodule
