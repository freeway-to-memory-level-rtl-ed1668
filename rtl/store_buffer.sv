// store_buffer: program-ordered store buffer with Freeway's sequence numbers.
//
// Every store gets an entry when it is dispatched (in program order, so the
// buffer is a circular queue; up to DW per cycle, port 0 older; al_valid
// marks the stores present, for which entry numbers al_idx are computed,
// al_take those that actually dispatch and allocate), tagged with its 7-bit program-order sequence
// number. The store-address part later writes the address (sa_*, two ports
// because address parts may issue from both slice queues in one cycle), the
// store-data part the data (sd_*). When the store commits it is written to
// the data cache from the head entry and the entry is released (drain).
//
// Load disambiguation (ck_* ports, one per slice queue head that may hold a
// load): a load may issue only if no OLDER store (sequence number earlier
// than the load's, ages measured from the oldest in-flight instruction
// seq_head) is still without an address (ck_unres), and no older store with
// a known address matches the load's address (ck_alias). Younger stores are
// ignored, even with the same address: they cannot have written memory yet,
// because stores write only when they are the oldest instruction. This is
// the mechanism the paper adds to the LSC store buffer, which lets loads from
// the B-IQ safely pass stores whose address parts wait in the Y-IQ. There is
// no store-to-load forwarding: an aliasing load waits until the store has
// drained (as in the paper). Entry count and the full-address compare are
// this design's choices.
//
// Timing: checks are combinational; allocation, address/data writes and
// drain take effect at the next edge (one drain per cycle). Allocating more
// than `free` entries is an error.
module store_buffer
  import freeway_pkg::*;
#(
  parameter int ENTRIES = SB_MAX
) (
  input  logic   clk,
  input  logic   rst_n,
  // allocate at dispatch
  input  logic   [DW-1:0] al_valid,
  input  logic   [DW-1:0] al_take,
  input  seq_t   [DW-1:0] al_seq,
  output sbidx_t [DW-1:0] al_idx,
  output logic [$clog2(ENTRIES):0] free,
  // address and data from execution
  input  logic   [1:0] sa_valid,
  input  sbidx_t [1:0] sa_idx,
  input  word_t  [1:0] sa_addr,
  input  logic   sd_valid,
  input  sbidx_t sd_idx,
  input  word_t  sd_data,
  // load checks
  input  seq_t        seq_head,
  input  seq_t  [1:0] ck_seq,
  input  word_t [1:0] ck_addr,
  output logic  [1:0] ck_ok,
  output logic  [1:0] ck_unres,
  output logic  [1:0] ck_alias,
  // oldest store, written to the cache at commit
  output logic   hd_valid,
  output logic   hd_ready,
  output word_t  hd_addr,
  output word_t  hd_data,
  input  logic   drain
);
  localparam int AW = $clog2(ENTRIES);

  logic [ENTRIES-1:0] v_q, av_q, dv_q;
  seq_t               seq_q  [ENTRIES];
  word_t              addr_q [ENTRIES];
  word_t              data_q [ENTRIES];
  logic [AW-1:0]      hd_q, tl_q;
  logic [AW:0]        cnt_q;
  logic [AW:0]        n_al, n_take;
  logic [AW-1:0]      al_e [DW];

  function automatic logic [AW-1:0] add(logic [AW-1:0] p, int unsigned k);
    int unsigned t;
    t = int'(p) + k;
    return AW'((t >= ENTRIES) ? t - ENTRIES : t);
  endfunction

  assign free     = (AW+1)'(ENTRIES) - cnt_q;

  always_comb begin
    n_al   = '0;
    n_take = '0;
    for (int i = 0; i < DW; i++) begin
      n_take    = n_take + (AW+1)'(al_take[i]);
      al_e[i]   = add(tl_q, int'(n_al));
      al_idx[i] = sbidx_t'(al_e[i]);
      n_al      = n_al + (AW+1)'(al_valid[i]);
    end
  end
  assign hd_valid = v_q[hd_q];
  assign hd_ready = v_q[hd_q] && av_q[hd_q] && dv_q[hd_q];
  assign hd_addr  = addr_q[hd_q];
  assign hd_data  = data_q[hd_q];

  always_comb begin
    for (int c = 0; c < 2; c++) begin
      ck_unres[c] = 1'b0;
      ck_alias[c] = 1'b0;
      for (int e = 0; e < ENTRIES; e++) begin
        if (v_q[e] && (seq_age(seq_q[e], seq_head) < seq_age(ck_seq[c], seq_head))) begin
          if (!av_q[e])                    ck_unres[c] = 1'b1;
          else if (addr_q[e] == ck_addr[c]) ck_alias[c] = 1'b1;
        end
      end
      ck_ok[c] = !ck_unres[c] && !ck_alias[c];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q   <= '0;
      av_q  <= '0;
      dv_q  <= '0;
      hd_q  <= '0;
      tl_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (drain) begin
        v_q[hd_q] <= 1'b0;
        hd_q      <= add(hd_q, 1);
      end
      for (int i = 0; i < DW; i++)
        if (al_take[i]) begin
          v_q[al_e[i]]  <= 1'b1;
          av_q[al_e[i]] <= 1'b0;
          dv_q[al_e[i]] <= 1'b0;
        end
      tl_q <= add(tl_q, int'(n_take));
      for (int k = 0; k < 2; k++)
        if (sa_valid[k]) av_q[sa_idx[k][AW-1:0]] <= 1'b1;
      if (sd_valid) dv_q[sd_idx[AW-1:0]] <= 1'b1;
      cnt_q <= cnt_q + n_take - (AW+1)'(drain);
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < DW; i++)
      if (al_take[i]) seq_q[al_e[i]] <= al_seq[i];
    for (int k = 0; k < 2; k++)
      if (sa_valid[k]) addr_q[sa_idx[k][AW-1:0]] <= sa_addr[k];
    if (sd_valid) data_q[sd_idx[AW-1:0]] <= sd_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) n_take <= free);
  a_take_valid:  assert property (@(posedge clk) disable iff (!rst_n) (al_take & ~al_valid) == '0);
  a_drain_ready: assert property (@(posedge clk) disable iff (!rst_n) drain |-> hd_ready);
endmodule
