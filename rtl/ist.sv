// ist: Instruction Slice Table.
//
// Remembers the PCs of instructions that produce load/store addresses, so the
// front end can send them to a slice queue the next time they are fetched.
// It is filled by iterative backward dependency analysis (IBDA): when a load,
// a store or an instruction already in the table is dispatched, the PCs of its
// in-flight producers are written here, so a slice grows backwards by one
// instruction per loop iteration. The table is PC indexed, as the paper
// states; its organisation (direct mapped, tagged, ENTRIES lines, PC[1:0]
// ignored) and size are this design's choice.
//
// DW lookup ports serve the DW instructions decoded per cycle.
// Timing: lookup is combinational; insertions take effect at the next clock
// edge. NINS insertions per cycle (one per source operand of each dispatched
// instruction); if two map to the same line the higher port wins. Reset
// invalidates every line.
module ist
  import freeway_pkg::*;
#(
  parameter int ENTRIES = 128,
  parameter int NINS    = 2 * DW
) (
  input  logic clk,
  input  logic rst_n,
  input  pc_t  [DW-1:0] lk_pc,
  output logic [DW-1:0] lk_hit,
  input  logic [NINS-1:0] ins_valid,
  input  pc_t  [NINS-1:0] ins_pc
);
  localparam int IDX_W = $clog2(ENTRIES);
  localparam int TAG_W = PC_W - 2 - IDX_W;

  logic [ENTRIES-1:0]   valid_q;
  logic [TAG_W-1:0]     tag_q [ENTRIES];

  always_comb
    for (int i = 0; i < DW; i++)
      lk_hit[i] = valid_q[lk_pc[i][2 +: IDX_W]] &&
                  (tag_q[lk_pc[i][2 +: IDX_W]] == lk_pc[i][PC_W-1 -: TAG_W]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else begin
      for (int k = 0; k < NINS; k++)
        if (ins_valid[k]) valid_q[ins_pc[k][2 +: IDX_W]] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < NINS; k++)
      if (ins_valid[k]) tag_q[ins_pc[k][2 +: IDX_W]] <= ins_pc[k][PC_W-1 -: TAG_W];
  end
endmodule
