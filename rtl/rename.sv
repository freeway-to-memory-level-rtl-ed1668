// rename: architectural-to-physical register renaming, DW instructions per
// cycle.
//
// rn_valid marks the instructions present (names are computed for them);
// rn_take marks those that actually dispatch this cycle (a subset; only
// they update the map and consume free registers). A slot that does not
// dispatch sees the same names again in a later cycle.
//
// A map table gives the current physical register of each architectural
// register; a circular free list holds the NPREGS-NAREGS registers not
// mapped. Slot 0 is the older instruction of the group. Each renamed
// instruction reads the physical names of rs1/rs2 and, if it writes rd,
// takes the next free register as its destination and reports the previous
// mapping (old_pd), which is returned to the free list when the instruction
// commits (free_en, up to DW per cycle). Within a group a younger slot sees
// the destinations of older slots (intra-group bypass), exactly as if they
// had been renamed one after the other. Renaming removes the false
// dependences between instructions that issue out of order from different
// queues.
//
// Reset maps architectural register i to physical register i and fills the
// free list with the rest. The front end delivers an already-resolved
// stream, so there is no misprediction recovery. nfree is the number of free
// registers; the dispatch stage must not allocate more (asserted).
//
// Timing: outputs are combinational in the same cycle; map and free list
// update at the next edge. A register freed in a cycle becomes allocatable
// from the following cycle.
module rename
  import freeway_pkg::*;
#(
  parameter int NAREGS = NUM_AREGS,
  parameter int NPREGS = NUM_PREGS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  [DW-1:0] rn_valid,
  input  logic  [DW-1:0] rn_take,
  input  areg_t [DW-1:0] rs1,
  input  areg_t [DW-1:0] rs2,
  input  areg_t [DW-1:0] rd,
  input  logic  [DW-1:0] wr,
  output preg_t [DW-1:0] ps1,
  output preg_t [DW-1:0] ps2,
  output preg_t [DW-1:0] pd,
  output preg_t [DW-1:0] old_pd,
  output logic  [$clog2(NPREGS-NAREGS+1)-1:0] nfree,
  input  logic  [DW-1:0] free_en,
  input  preg_t [DW-1:0] free_preg
);
  localparam int NFREE = NPREGS - NAREGS;
  localparam int FW    = $clog2(NFREE);
  localparam int CW    = $clog2(NFREE + 1);

  preg_t          map_q  [NAREGS];
  preg_t          fl_q   [NFREE];
  logic [FW-1:0]  fl_hd_q, fl_tl_q;
  logic [CW-1:0]  fl_cnt_q;
  logic [CW-1:0]  nalloc, ntake, nrel;

  function automatic logic [FW-1:0] add(logic [FW-1:0] p, int unsigned k);
    int unsigned s;
    s = int'(p) + k;
    return FW'((s >= NFREE) ? s - NFREE : s);
  endfunction

  assign nfree = fl_cnt_q;

  always_comb begin
    nalloc = '0;
    ntake  = '0;
    for (int i = 0; i < DW; i++) begin
      if (rn_take[i] && wr[i]) ntake = ntake + 1'b1;
      ps1[i]    = map_q[rs1[i]];
      ps2[i]    = map_q[rs2[i]];
      old_pd[i] = map_q[rd[i]];
      pd[i]     = fl_q[add(fl_hd_q, int'(nalloc))];
      for (int j = 0; j < i; j++)
        if (rn_valid[j] && wr[j]) begin
          if (rd[j] == rs1[i]) ps1[i]    = pd[j];
          if (rd[j] == rs2[i]) ps2[i]    = pd[j];
          if (rd[j] == rd[i])  old_pd[i] = pd[j];
        end
      if (rn_valid[i] && wr[i]) nalloc = nalloc + 1'b1;
    end
    nrel = '0;
    for (int i = 0; i < DW; i++) nrel = nrel + CW'(free_en[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NAREGS; i++) map_q[i] <= preg_t'(i);
      for (int i = 0; i < NFREE; i++)  fl_q[i]  <= preg_t'(NAREGS + i);
      fl_hd_q  <= '0;
      fl_tl_q  <= '0;
      fl_cnt_q <= CW'(NFREE);
    end else begin
      automatic int unsigned off = 0;
      for (int i = 0; i < DW; i++)
        if (rn_take[i] && wr[i]) map_q[rd[i]] <= pd[i];
      for (int i = 0; i < DW; i++)
        if (free_en[i]) begin
          fl_q[add(fl_tl_q, off)] <= free_preg[i];
          off++;
        end
      fl_hd_q  <= add(fl_hd_q, int'(ntake));
      fl_tl_q  <= add(fl_tl_q, int'(nrel));
      fl_cnt_q <= fl_cnt_q + nrel - ntake;
    end
  end

  a_no_alloc_empty: assert property (@(posedge clk) disable iff (!rst_n) ntake <= fl_cnt_q);
  a_take_valid:     assert property (@(posedge clk) disable iff (!rst_n) (rn_take & ~rn_valid) == '0);
endmodule
