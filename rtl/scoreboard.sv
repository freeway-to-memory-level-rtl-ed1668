// scoreboard: the instruction window and in-order commit.
//
// WINDOW entries kept as a circular queue in program order. Dispatch inserts
// up to DW instructions per cycle at the tail (al_*, slot 0 oldest; the
// valid bits must be a prefix) and receives their sequence numbers
// al_seq = {wrap bit, slot}, which travels with its micro-ops and is
// the program-order number the store buffer compares. Execution reports
// completion out of order (cp_*): part 0 is the instruction itself (for a
// store: its data part), part 1 the address part of a store (non-stores are
// inserted with part 1 already done). When the head entry has both parts
// done it is offered for commit (cm_*); the core acknowledges with cm_ack
// (for a store only once the cache has taken the write, so stores reach
// memory only as the oldest instruction). Commit updates architectural state
// in program order: the core frees the old physical register of rd and clears
// the RDT producer bit. Up to DW commits per cycle, matching the 2-wide
// machine of the paper; nfree is the number of free window entries.
//
// Timing: completion and commit are visible from the next cycle; head_seq is
// the sequence number of the oldest in-flight instruction, used for ages.
module scoreboard
  import freeway_pkg::*;
#(
  parameter int NCP = 3
) (
  input  logic   clk,
  input  logic   rst_n,
  // allocate
  input  logic  [DW-1:0] al_valid,
  input  pc_t   [DW-1:0] al_pc,
  input  logic  [DW-1:0] al_wr,
  input  areg_t [DW-1:0] al_rd,
  input  preg_t [DW-1:0] al_pd,
  input  preg_t [DW-1:0] al_old_pd,
  input  logic  [DW-1:0] al_store,
  output seq_t  [DW-1:0] al_seq,
  output logic  [SEQ_W-1:0] nfree,
  // completion
  input  logic [NCP-1:0] cp_valid,
  input  seq_t [NCP-1:0] cp_seq,
  input  logic [NCP-1:0] cp_part,
  // commit
  output logic  [DW-1:0] cm_valid,
  output pc_t   [DW-1:0] cm_pc,
  output logic  [DW-1:0] cm_wr,
  output areg_t [DW-1:0] cm_rd,
  output preg_t [DW-1:0] cm_pd,
  output preg_t [DW-1:0] cm_old_pd,
  output logic  [DW-1:0] cm_store,
  input  logic  [DW-1:0] cm_ack,
  output seq_t   head_seq,
  output logic   empty
);
  localparam int AW = SEQ_W - 1;
  localparam int N  = 1 << AW;

  logic [N-1:0] v_q, d0_q, d1_q;
  pc_t          pc_q    [N];
  logic [N-1:0] wr_q, st_q;
  areg_t        rd_q    [N];
  preg_t        pd_q    [N];
  preg_t        opd_q   [N];
  seq_t         hd_q, tl_q;
  seq_t         used;
  logic [SEQ_W-1:0] n_al, n_cm;

  assign used     = tl_q - hd_q;
  assign nfree    = SEQ_W'(N) - used;
  assign empty    = (hd_q == tl_q);
  assign head_seq = hd_q;

  always_comb begin
    logic ok;
    ok   = 1'b1;
    n_al = '0;
    n_cm = '0;
    for (int i = 0; i < DW; i++) begin
      automatic logic [AW-1:0] e = AW'(hd_q + seq_t'(i));
      al_seq[i]    = tl_q + seq_t'(i);
      ok           = ok && v_q[e] && d0_q[e] && d1_q[e];
      cm_valid[i]  = ok;
      cm_pc[i]     = pc_q[e];
      cm_wr[i]     = wr_q[e];
      cm_rd[i]     = rd_q[e];
      cm_pd[i]     = pd_q[e];
      cm_old_pd[i] = opd_q[e];
      cm_store[i]  = st_q[e];
      n_al = n_al + SEQ_W'(al_valid[i]);
      n_cm = n_cm + SEQ_W'(cm_ack[i]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q  <= '0;
      d0_q <= '0;
      d1_q <= '0;
      hd_q <= '0;
      tl_q <= '0;
    end else begin
      for (int c = 0; c < NCP; c++)
        if (cp_valid[c]) begin
          if (cp_part[c]) d1_q[cp_seq[c][AW-1:0]] <= 1'b1;
          else            d0_q[cp_seq[c][AW-1:0]] <= 1'b1;
        end
      for (int i = 0; i < DW; i++)
        if (cm_ack[i]) v_q[AW'(hd_q + seq_t'(i))] <= 1'b0;
      for (int i = 0; i < DW; i++)
        if (al_valid[i]) begin
          v_q[al_seq[i][AW-1:0]]  <= 1'b1;
          d0_q[al_seq[i][AW-1:0]] <= 1'b0;
          d1_q[al_seq[i][AW-1:0]] <= !al_store[i];
        end
      hd_q <= hd_q + n_cm;
      tl_q <= tl_q + n_al;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < DW; i++)
      if (al_valid[i]) begin
        pc_q[al_seq[i][AW-1:0]]  <= al_pc[i];
        wr_q[al_seq[i][AW-1:0]]  <= al_wr[i];
        st_q[al_seq[i][AW-1:0]]  <= al_store[i];
        rd_q[al_seq[i][AW-1:0]]  <= al_rd[i];
        pd_q[al_seq[i][AW-1:0]]  <= al_pd[i];
        opd_q[al_seq[i][AW-1:0]] <= al_old_pd[i];
      end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) n_al <= nfree);
  a_ack_valid:   assert property (@(posedge clk) disable iff (!rst_n) (cm_ack & ~cm_valid) == '0);
  a_al_prefix:   assert property (@(posedge clk) disable iff (!rst_n) !(al_valid[1] && !al_valid[0]));
  a_ack_prefix:  assert property (@(posedge clk) disable iff (!rst_n) !(cm_ack[1] && !cm_ack[0]));
endmodule
