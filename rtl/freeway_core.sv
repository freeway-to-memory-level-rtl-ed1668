// freeway_core: a slice-out-of-order core with dependence-aware slice
// scheduling (Freeway).
//
// The core is an in-order, stall-on-use pipeline with three in-order
// instruction queues. Memory access instructions and the instructions that
// compute their addresses ("slices") bypass the main queue, and slices that
// depend on an older slice's load are moved out of the way of independent
// slices, so that independent loads keep issuing while dependent ones wait.
//
// Pipeline (two-wide: up to two instructions enter, issue and commit per
// cycle):
//   D  decode + IST lookup with the PC (slice membership), latched as a pair.
//   R  rename (map table + free list, the younger slot seeing the older
//      slot's new mapping and RDT entry), RDT read of the sources (producer PC
//      and slice dependence bit), slice_steer picks the queue, the RDT entry
//      of the destination is written, IBDA writes producer PCs into the IST,
//      the instruction is inserted into the scoreboard; a store also gets a
//      store-buffer entry and is split into an address part (B-IQ / Y-IQ)
//      and a data part (A-IQ). Dispatch is in order: slot 1 goes only with
//      slot 0, and only if the resources for both are free; a slot left
//      behind moves down and goes alone in the next cycle. While the pair
//      latch is not empty the front end is stalled.
//   I/X the scheduler issues up to two instructions, oldest first, from the
//      queue heads; an ALU op right behind a head may issue together with
//      that head (two from one queue). ALU ops,
//      store address and store data complete in the same cycle (result
//      visible the next cycle). A load issues only if its base register is
//      ready and the store buffer reports no older store without an address
//      and no older store to the same address; it is then sent to the data
//      cache and completes when its data returns (any order, tag = sequence
//      number).
//   C  the two oldest scoreboard entries commit once complete: each frees
//      the previous physical register of rd and clears the RDT producer bit;
//      a store is written to the cache only here, as the oldest instruction
//      (one store per cycle: one cache write port).
//
// Interfaces: fe_* is a valid/ready stream of instruction pairs (PC + word
// per slot, slot 0 older, valid bits a prefix; a pair is taken in a cycle
// with fe_ready high) from a front end that has already resolved control
// flow (fetch, I-cache and branch prediction are not part of this block). ld_req_* / ld_resp_* and
// st_* connect to an L1 data cache: requests are accepted when valid and
// ready are high in the same cycle; responses need no ready. cm_* is a
// two-slot commit trace and ev a set of per-cycle event flags for
// performance counting.
//
// Follows the paper: the three FIFO queues and their 64/32/32 entries, the
// 64-entry scoreboard, 2-wide age-ordered issue from any combination of
// queues, the RDT
// slice dependence bit, the store split, store-buffer entries allocated at
// dispatch with 7-bit sequence numbers, commit-time stores and the two-wide
// superscalar width. This design's own choices: the ISA, the in-order pair
// dispatch rule, only ALU ops as the second instruction from one queue, one
// store commit per cycle, the merged pipeline stages, 80 physical registers,
// a 128-entry IST and a 16-entry store buffer.
module freeway_core
  import freeway_pkg::*;
#(
  parameter int AIQ_DEPTH   = 64,
  parameter int BIQ_DEPTH   = 32,
  parameter int YIQ_DEPTH   = 32,
  parameter int IST_ENTRIES = 128,
  parameter int SB_ENTRIES  = SB_MAX,
  parameter int ISSUE_W     = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  // instruction stream
  input  logic  [DW-1:0] fe_valid,
  output logic  fe_ready,
  input  pc_t   [DW-1:0] fe_pc,
  input  logic  [DW-1:0][31:0] fe_instr,
  // data cache: loads
  output logic  ld_req_valid,
  input  logic  ld_req_ready,
  output word_t ld_req_addr,
  output seq_t  ld_req_tag,
  input  logic  ld_resp_valid,
  input  seq_t  ld_resp_tag,
  input  word_t ld_resp_data,
  // data cache: committed stores
  output logic  st_valid,
  input  logic  st_ready,
  output word_t st_addr,
  output word_t st_data,
  // commit trace
  output logic  [DW-1:0] cm_valid,
  output pc_t   [DW-1:0] cm_pc,
  output logic  [DW-1:0] cm_wr,
  output areg_t [DW-1:0] cm_rd,
  output word_t [DW-1:0] cm_data,
  output logic  idle,
  output ev_t   ev
);
  // ---------------------------------------------------------------- decode
  // D latch: up to DW instructions (slot 0 oldest, valid bits a prefix).
  dec_t  [DW-1:0] fe_dec;
  logic  [DW-1:0] fe_ist_hit;
  logic  [DW-1:0] d_v_q, d_ist_q;
  dec_t  [DW-1:0] d_dec_q;
  pc_t   [DW-1:0] d_pc_q;
  logic  [DW-1:0] fire;          // slot dispatches this cycle (a prefix)

  logic [2*DW-1:0] ist_ins_v;
  pc_t  [2*DW-1:0] ist_ins_pc;

  for (genvar i = 0; i < DW; i++) begin : g_dec
    decoder u_dec (.instr(fe_instr[i]), .dec(fe_dec[i]));
  end

  ist #(.ENTRIES(IST_ENTRIES)) u_ist (
    .clk, .rst_n, .lk_pc(fe_pc), .lk_hit(fe_ist_hit),
    .ins_valid(ist_ins_v), .ins_pc(ist_ins_pc));

  // The latch takes a new group once every instruction in it dispatches. If
  // only slot 0 dispatches, slot 1 moves down and goes alone next cycle.
  assign fe_ready = ((d_v_q & ~fire) == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_v_q <= '0;
    end else if (fe_ready) begin
      d_v_q <= fe_valid;
    end else if (fire[0]) begin
      d_v_q <= {1'b0, d_v_q[DW-1:1]};
    end
  end
  always_ff @(posedge clk) begin
    if (fe_ready) begin
      d_dec_q <= fe_dec;
      d_pc_q  <= fe_pc;
      d_ist_q <= fe_ist_hit;
    end else if (fire[0]) begin
      d_dec_q[0] <= d_dec_q[1];
      d_pc_q[0]  <= d_pc_q[1];
      d_ist_q[0] <= d_ist_q[1];
    end
  end

  // -------------------------------------------------------- rename/dispatch
  preg_t [DW-1:0] rn_ps1, rn_ps2, rn_pd, rn_old_pd;
  logic  [$clog2(NUM_PREGS-NUM_AREGS+1)-1:0] rn_nfree;
  logic  [DW-1:0] d_wr;
  logic  [DW-1:0] cm_ack, sb_cm_valid, sb_cm_wr, sb_cm_store;
  preg_t [DW-1:0] sb_cm_pd, sb_cm_old_pd;
  areg_t [DW-1:0] sb_cm_rd;
  pc_t   [DW-1:0] sb_cm_pc;

  always_comb
    for (int i = 0; i < DW; i++) begin
      d_wr[i] = d_v_q[i] && d_dec_q[i].wr_rd;
    end

  rename u_ren (
    .clk, .rst_n, .rn_valid(d_v_q), .rn_take(fire),
    .rs1({d_dec_q[1].rs1, d_dec_q[0].rs1}), .rs2({d_dec_q[1].rs2, d_dec_q[0].rs2}),
    .rd({d_dec_q[1].rd, d_dec_q[0].rd}), .wr({d_dec_q[1].wr_rd, d_dec_q[0].wr_rd}),
    .ps1(rn_ps1), .ps2(rn_ps2), .pd(rn_pd), .old_pd(rn_old_pd), .nfree(rn_nfree),
    .free_en(cm_ack & sb_cm_wr), .free_preg(sb_cm_old_pd));

  logic  [2*DW-1:0] rdt_pv_raw, rdt_dep_raw;
  pc_t   [2*DW-1:0] rdt_pc_raw;
  logic  [DW-1:0][1:0] s_pv, s_dep;
  pc_t   [DW-1:0][1:0] s_pc;
  queue_e [DW-1:0] q_main, q_sta;
  logic  [DW-1:0] sta_v, st_dependent, dep_dst, ibda1, ibda2;

  rdt u_rdt (
    .clk, .rst_n, .rd_preg({rn_ps2[1], rn_ps1[1], rn_ps2[0], rn_ps1[0]}),
    .rd_pv(rdt_pv_raw), .rd_pc(rdt_pc_raw), .rd_dep(rdt_dep_raw),
    .wr_en(fire & d_wr), .wr_preg(rn_pd), .wr_pc(d_pc_q), .wr_dep(dep_dst),
    .clr_en(cm_ack & sb_cm_wr), .clr_preg(sb_cm_pd));

  // RDT view of each source; a source written by an older slot of the same
  // group takes that slot's new entry (producer in flight, its PC, its bit).
  always_comb begin
    for (int i = 0; i < DW; i++) begin
      s_pv[i]  = {rdt_pv_raw[2*i+1],  rdt_pv_raw[2*i]};
      s_pc[i]  = {rdt_pc_raw[2*i+1],  rdt_pc_raw[2*i]};
      s_dep[i] = {rdt_dep_raw[2*i+1], rdt_dep_raw[2*i]};
      for (int j = 0; j < i; j++)
        if (d_wr[j]) begin
          if (d_dec_q[j].rd == d_dec_q[i].rs1) begin
            s_pv[i][0] = 1'b1; s_pc[i][0] = d_pc_q[j]; s_dep[i][0] = dep_dst[j];
          end
          if (d_dec_q[j].rd == d_dec_q[i].rs2) begin
            s_pv[i][1] = 1'b1; s_pc[i][1] = d_pc_q[j]; s_dep[i][1] = dep_dst[j];
          end
        end
    end
  end

  for (genvar i = 0; i < DW; i++) begin : g_steer
    slice_steer u_steer (
      .is_load(d_dec_q[i].is_load), .is_store(d_dec_q[i].is_store), .ist_hit(d_ist_q[i]),
      .use_s1(d_dec_q[i].use_s1), .use_s2(d_dec_q[i].use_s2),
      .dep_s1(s_dep[i][0]), .dep_s2(s_dep[i][1]), .pv_s1(s_pv[i][0]), .pv_s2(s_pv[i][1]),
      .q_main(q_main[i]), .sta_valid(sta_v[i]), .q_sta(q_sta[i]),
      .dependent(st_dependent[i]), .dep_dst(dep_dst[i]),
      .ibda_s1(ibda1[i]), .ibda_s2(ibda2[i]));
  end

  always_comb
    for (int i = 0; i < DW; i++) begin
      ist_ins_v[2*i]    = fire[i] && ibda1[i];
      ist_ins_v[2*i+1]  = fire[i] && ibda2[i];
      ist_ins_pc[2*i]   = s_pc[i][0];
      ist_ins_pc[2*i+1] = s_pc[i][1];
    end

  // queues (push port i = dispatch slot i)
  localparam int QCW = 16;
  logic  [2:0][DW-1:0] q_push;
  uop_t  [2:0][DW-1:0] q_in;
  logic  [2:0][QCW-1:0] q_free;
  logic  [$clog2(AIQ_DEPTH+1)-1:0] a_free;
  logic  [$clog2(BIQ_DEPTH+1)-1:0] b_free;
  logic  [$clog2(YIQ_DEPTH+1)-1:0] y_free;
  logic  [2:0] q_empty, q_pop, q_pop2, q_two;
  uop_t  [2:0] q_head, q_next;
  uop_t  [DW-1:0] u_main, u_sta;

  logic   [$clog2(SB_ENTRIES):0] sb_free;
  sbidx_t [DW-1:0] sb_al_idx;
  seq_t   [DW-1:0] al_seq;
  seq_t   head_seq;
  logic   [SEQ_W-1:0] scb_free;
  logic   scb_empty;

  always_comb
    for (int i = 0; i < DW; i++) begin
      u_main[i]        = '0;
      u_main[i].kind   = d_dec_q[i].is_load ? U_LD : (d_dec_q[i].is_store ? U_STD : U_ALU);
      u_main[i].op     = d_dec_q[i].op;
      u_main[i].seq    = al_seq[i];
      u_main[i].ps1    = rn_ps1[i];
      u_main[i].ps2    = rn_ps2[i];
      u_main[i].pd     = rn_pd[i];
      u_main[i].use_s1 = d_dec_q[i].use_s1 && !d_dec_q[i].is_store;
      u_main[i].use_s2 = d_dec_q[i].use_s2;
      u_main[i].wr_d   = d_dec_q[i].wr_rd;
      u_main[i].imm    = d_dec_q[i].imm;
      u_main[i].sb_idx = sb_al_idx[i];
      u_main[i].pc     = d_pc_q[i];
      u_sta[i]         = u_main[i];
      u_sta[i].kind    = U_STA;
      u_sta[i].use_s1  = 1'b1;
      u_sta[i].use_s2  = 1'b0;
      u_sta[i].wr_d    = 1'b0;
    end

  // In-order dispatch: slot i goes only if all older slots go and the
  // resources for slots 0..i together are available.
  always_comb begin
    int unsigned n_scb, n_reg, n_sb;
    int unsigned n_q [3];
    logic ok;
    n_scb = 0; n_reg = 0; n_sb = 0;
    for (int q = 0; q < 3; q++) n_q[q] = 0;
    ok = 1'b1;
    for (int i = 0; i < DW; i++) begin
      n_scb++;
      if (d_dec_q[i].wr_rd) n_reg++;
      for (int q = 0; q < 3; q++) begin
        if (q_main[i] == queue_e'(q))             n_q[q]++;
        if (sta_v[i] && q_sta[i] == queue_e'(q)) n_q[q]++;
      end
      if (sta_v[i]) n_sb++;
      ok = ok && d_v_q[i] && (n_scb <= int'(scb_free)) && (n_reg <= int'(rn_nfree)) &&
           (n_sb <= int'(sb_free));
      for (int q = 0; q < 3; q++) ok = ok && (n_q[q] <= int'(q_free[q]));
      fire[i] = ok;
    end
    for (int q = 0; q < 3; q++)
      for (int i = 0; i < DW; i++) begin
        q_push[q][i] = 1'b0;
        q_in[q][i]   = u_main[i];
      end
    for (int i = 0; i < DW; i++)
      if (fire[i]) begin
        q_push[q_main[i]][i] = 1'b1;
        if (sta_v[i]) begin
          q_push[q_sta[i]][i] = 1'b1;
          q_in[q_sta[i]][i]   = u_sta[i];
        end
      end
  end

  assign q_free[Q_A] = QCW'(a_free);
  assign q_free[Q_B] = QCW'(b_free);
  assign q_free[Q_Y] = QCW'(y_free);

  iq_fifo #(.DEPTH(AIQ_DEPTH)) u_aiq (.clk, .rst_n, .push(q_push[Q_A]), .push_data(q_in[Q_A]),
    .free(a_free), .pop(q_pop[Q_A]), .pop2(q_pop2[Q_A]), .head(q_head[Q_A]), .second(q_next[Q_A]),
    .empty(q_empty[Q_A]), .two(q_two[Q_A]));
  iq_fifo #(.DEPTH(BIQ_DEPTH)) u_biq (.clk, .rst_n, .push(q_push[Q_B]), .push_data(q_in[Q_B]),
    .free(b_free), .pop(q_pop[Q_B]), .pop2(q_pop2[Q_B]), .head(q_head[Q_B]), .second(q_next[Q_B]),
    .empty(q_empty[Q_B]), .two(q_two[Q_B]));
  iq_fifo #(.DEPTH(YIQ_DEPTH)) u_yiq (.clk, .rst_n, .push(q_push[Q_Y]), .push_data(q_in[Q_Y]),
    .free(y_free), .pop(q_pop[Q_Y]), .pop2(q_pop2[Q_Y]), .head(q_head[Q_Y]), .second(q_next[Q_Y]),
    .empty(q_empty[Q_Y]), .two(q_two[Q_Y]));

  // -------------------------------------------------------------- issue
  localparam int NRD = 2 * ISSUE_W + 2 + DW;
  preg_t [NRD-1:0]  rf_ra;
  word_t [NRD-1:0]  rf_rd;
  logic  [2:0]      rf_we;
  preg_t [2:0]      rf_wa;
  word_t [2:0]      rf_wd;
  logic [NUM_PREGS-1:0] rf_ready;

  logic  [2:0] hd_ready, hd_is_ld, nx_ready;
  seq_t  [2:0] hd_age, nx_age;
  logic  [1:0] ck_ok, ck_unres, ck_alias;
  word_t [1:0] ck_addr;
  seq_t  [1:0] ck_seq;
  logic  [2:0] ops_ready;
  logic  [ISSUE_W-1:0] slot_v;
  queue_e [ISSUE_W-1:0] slot_q;
  logic  [ISSUE_W-1:0] slot_nx;

  always_comb begin
    for (int q = 0; q < 3; q++) begin
      ops_ready[q] = (!q_head[q].use_s1 || rf_ready[q_head[q].ps1]) &&
                     (!q_head[q].use_s2 || rf_ready[q_head[q].ps2]);
      hd_is_ld[q]  = (q_head[q].kind == U_LD);
      hd_age[q]    = seq_age(q_head[q].seq, head_seq);
      // the entry behind the head may issue with it if it is an ALU op whose
      // operands are ready (it cannot depend on the head: the head's result
      // is not ready yet)
      nx_ready[q]  = (q_next[q].kind == U_ALU) &&
                     (!q_next[q].use_s1 || rf_ready[q_next[q].ps1]) &&
                     (!q_next[q].use_s2 || rf_ready[q_next[q].ps2]);
      nx_age[q]    = seq_age(q_next[q].seq, head_seq);
    end
    // load address precheck for the two slice queue heads (B: port 0, Y: port 1)
    ck_seq[0]  = q_head[Q_B].seq;
    ck_seq[1]  = q_head[Q_Y].seq;
    ck_addr[0] = rf_rd[2*ISSUE_W]   + q_head[Q_B].imm;
    ck_addr[1] = rf_rd[2*ISSUE_W+1] + q_head[Q_Y].imm;
    hd_ready[Q_A] = ops_ready[Q_A] && !hd_is_ld[Q_A];
    hd_ready[Q_B] = ops_ready[Q_B] && (!hd_is_ld[Q_B] || ck_ok[0]);
    hd_ready[Q_Y] = ops_ready[Q_Y] && (!hd_is_ld[Q_Y] || ck_ok[1]);
  end

  scheduler #(.ISSUE_W(ISSUE_W)) u_sched (
    .hd_valid(~q_empty), .hd_ready(hd_ready), .hd_age(hd_age), .hd_is_ld(hd_is_ld),
    .nx_valid(q_two), .nx_ready(nx_ready), .nx_age(nx_age),
    .ld_port_free(ld_req_ready), .grant(q_pop), .grant2(q_pop2), .slot_v(slot_v),
    .slot_q(slot_q), .slot_nx(slot_nx));

  // ------------------------------------------------------------ execute
  uop_t  [ISSUE_W-1:0] x_uop;
  word_t [ISSUE_W-1:0] x_res;
  logic  [1:0]   sa_v;
  sbidx_t [1:0]  sa_idx;
  word_t [1:0]   sa_addr;
  logic          sd_v;
  sbidx_t        sd_idx;
  word_t         sd_data;
  logic  [2:0]   cp_v, cp_part;
  seq_t  [2:0]   cp_seq;
  preg_t         ld_pd_q [WINDOW];

  for (genvar s = 0; s < ISSUE_W; s++) begin : g_slot
    assign x_uop[s] = slot_nx[s] ? q_next[slot_q[s]] : q_head[slot_q[s]];
    alu u_alu (.op(x_uop[s].op), .a(rf_rd[2*s]), .b(rf_rd[2*s+1]), .imm(x_uop[s].imm), .y(x_res[s]));
  end

  always_comb begin
    for (int s = 0; s < ISSUE_W; s++) begin
      rf_ra[2*s]   = x_uop[s].ps1;
      rf_ra[2*s+1] = x_uop[s].ps2;
    end
    rf_ra[2*ISSUE_W]   = q_head[Q_B].ps1;
    rf_ra[2*ISSUE_W+1] = q_head[Q_Y].ps1;
    for (int i = 0; i < DW; i++) rf_ra[2*ISSUE_W+2+i] = sb_cm_pd[i];

    rf_we = '0; rf_wa = '0; rf_wd = '0;
    cp_v  = '0; cp_part = '0; cp_seq = '0;
    sa_v  = '0; sa_idx = '0; sa_addr = '0;
    sd_v  = 1'b0; sd_idx = '0; sd_data = '0;
    ld_req_valid = 1'b0; ld_req_addr = '0; ld_req_tag = '0;
    for (int s = 0; s < 2; s++) begin
      if (s < ISSUE_W && slot_v[s]) begin
        unique case (x_uop[s].kind)
          U_ALU: begin
            rf_we[s] = x_uop[s].wr_d; rf_wa[s] = x_uop[s].pd; rf_wd[s] = x_res[s];
            cp_v[s] = 1'b1; cp_seq[s] = x_uop[s].seq;
          end
          U_STA: begin
            sa_v[s] = 1'b1; sa_idx[s] = x_uop[s].sb_idx; sa_addr[s] = x_res[s];
            cp_v[s] = 1'b1; cp_part[s] = 1'b1; cp_seq[s] = x_uop[s].seq;
          end
          U_STD: begin
            sd_v = 1'b1; sd_idx = x_uop[s].sb_idx; sd_data = rf_rd[2*s+1];
            cp_v[s] = 1'b1; cp_seq[s] = x_uop[s].seq;
          end
          U_LD: begin
            ld_req_valid = 1'b1; ld_req_addr = x_res[s]; ld_req_tag = x_uop[s].seq;
          end
          default: ;
        endcase
      end
    end
    // load return
    if (ld_resp_valid) begin
      rf_we[2] = 1'b1; rf_wa[2] = ld_pd_q[ld_resp_tag[SEQ_W-2:0]]; rf_wd[2] = ld_resp_data;
      cp_v[2]  = 1'b1; cp_seq[2] = ld_resp_tag;
    end
  end

  always_ff @(posedge clk) begin
    for (int s = 0; s < ISSUE_W; s++)
      if (slot_v[s] && x_uop[s].kind == U_LD) ld_pd_q[x_uop[s].seq[SEQ_W-2:0]] <= x_uop[s].pd;
  end

  regfile #(.NRD(NRD), .NWR(3)) u_rf (
    .clk, .rst_n, .rd_addr(rf_ra), .rd_data(rf_rd), .wr_en(rf_we), .wr_addr(rf_wa),
    .wr_data(rf_wd), .clr_en(fire & d_wr), .clr_addr(rn_pd), .ready(rf_ready));

  logic sb_hd_valid, sb_hd_ready;
  store_buffer #(.ENTRIES(SB_ENTRIES)) u_sb (
    .clk, .rst_n, .al_valid(d_v_q & sta_v), .al_take(fire & sta_v), .al_seq(al_seq), .al_idx(sb_al_idx),
    .free(sb_free), .sa_valid(sa_v), .sa_idx(sa_idx), .sa_addr(sa_addr),
    .sd_valid(sd_v), .sd_idx(sd_idx), .sd_data(sd_data),
    .seq_head(head_seq), .ck_seq(ck_seq), .ck_addr(ck_addr), .ck_ok(ck_ok),
    .ck_unres(ck_unres), .ck_alias(ck_alias),
    .hd_valid(sb_hd_valid), .hd_ready(sb_hd_ready), .hd_addr(st_addr), .hd_data(st_data),
    .drain(st_valid && st_ready));

  // ------------------------------------------------------------- commit
  scoreboard #(.NCP(3)) u_scb (
    .clk, .rst_n, .al_valid(fire), .al_pc(d_pc_q),
    .al_wr({d_dec_q[1].wr_rd, d_dec_q[0].wr_rd}), .al_rd({d_dec_q[1].rd, d_dec_q[0].rd}),
    .al_pd(rn_pd), .al_old_pd(rn_old_pd), .al_store(sta_v),
    .al_seq(al_seq), .nfree(scb_free),
    .cp_valid(cp_v), .cp_seq(cp_seq), .cp_part(cp_part),
    .cm_valid(sb_cm_valid), .cm_pc(sb_cm_pc), .cm_wr(sb_cm_wr), .cm_rd(sb_cm_rd),
    .cm_pd(sb_cm_pd), .cm_old_pd(sb_cm_old_pd), .cm_store(sb_cm_store),
    .cm_ack(cm_ack), .head_seq(head_seq), .empty(scb_empty));

  // Up to DW commits per cycle, but only one store (one cache write port):
  // a store in slot 1 commits only if slot 0 is not a store.
  logic st0, st1;
  assign st0      = sb_cm_valid[0] && sb_cm_store[0];
  assign st1      = sb_cm_valid[0] && !sb_cm_store[0] && sb_cm_valid[1] && sb_cm_store[1];
  assign st_valid = st0 || st1;
  assign cm_ack[0] = sb_cm_valid[0] && (!sb_cm_store[0] || st_ready);
  assign cm_ack[1] = cm_ack[0] && !sb_cm_store[0] && sb_cm_valid[1] &&
                     (!sb_cm_store[1] || st_ready);
  assign cm_valid = cm_ack;
  assign cm_pc    = sb_cm_pc;
  assign cm_wr    = sb_cm_wr;
  assign cm_rd    = sb_cm_rd;
  always_comb
    for (int i = 0; i < DW; i++) cm_data[i] = rf_rd[2*ISSUE_W+2+i];
  assign idle     = scb_empty && (d_v_q == '0);

  // ------------------------------------------------------------- events
  always_comb begin
    ev               = '0;
    ev.issue_q       = q_pop;
    ev.y_bypass      = q_pop[Q_B] && !q_empty[Q_Y] && !hd_ready[Q_Y];
    for (int i = 0; i < DW; i++) begin
      if (fire[i] && (st_dependent[i] || q_main[i] == Q_Y)) ev.dep_dispatch = 1'b1;
      if (fire[i] && d_ist_q[i] && !d_dec_q[i].is_load && !d_dec_q[i].is_store)
        ev.ist_hit = 1'b1;
    end
    ev.ind_dispatch  = |q_push[Q_B];
    ev.ibda_insert   = |ist_ins_v;
    ev.sb_unresolved = (!q_empty[Q_B] && hd_is_ld[Q_B] && ops_ready[Q_B] && ck_unres[0]) ||
                       (!q_empty[Q_Y] && hd_is_ld[Q_Y] && ops_ready[Q_Y] && ck_unres[1]);
    ev.sb_alias      = (!q_empty[Q_B] && hd_is_ld[Q_B] && ops_ready[Q_B] && ck_alias[0]) ||
                       (!q_empty[Q_Y] && hd_is_ld[Q_Y] && ops_ready[Q_Y] && ck_alias[1]);
    ev.disp_stall    = (d_v_q & ~fire) != '0;
    ev.load_issue    = ld_req_valid;
    ev.dual_dispatch = fire[1];
    ev.dual_commit   = cm_ack[1];
    ev.same_q_issue  = |q_pop2;
  end

  a_store_ready: assert property (@(posedge clk) disable iff (!rst_n) st_valid |-> sb_hd_valid && sb_hd_ready);
  a_d_prefix:    assert property (@(posedge clk) disable iff (!rst_n) !(d_v_q[1] && !d_v_q[0]));
  a_one_load:    assert property (@(posedge clk) disable iff (!rst_n) ld_req_valid |-> ld_req_ready);
endmodule
