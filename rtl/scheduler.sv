// scheduler: issue selection over the fronts of the three in-order queues.
//
// Each queue (A, B, Y) offers its head and, behind it, its second entry. For
// the head the core supplies: valid, ready (operands available, and for a
// load also cleared by the store buffer), its age (sequence number minus the
// scoreboard head's sequence number, so 0 is the oldest in-flight
// instruction) and whether it is a load. For the second entry: valid, ready
// and age. The scheduler fills up to ISSUE_W slots with the oldest ready
// candidates (the paper's age-based policy), taking them from any
// combination of queues. A second entry may issue only in the same cycle as
// the head of its queue (each queue stays in order). At most one load issues
// per cycle (one load port), and only if the load port can accept
// (ld_port_free). Slots are filled in age order: slot 0 is the oldest issued
// instruction. Combinational.
//
// Outputs: grant[q] pops the head of queue q, grant2[q] its second entry as
// well; slot_q/slot_nx say which queue and which of its two entries feeds
// each slot.
//
// The load limit is this design's reading of the "1+1" load/store units of
// the evaluated core. Which second entries are offered (the core offers only
// ALU operations there) is the core's choice.
module scheduler
  import freeway_pkg::*;
#(
  parameter int ISSUE_W = 2
) (
  input  logic [2:0] hd_valid,
  input  logic [2:0] hd_ready,
  input  seq_t [2:0] hd_age,
  input  logic [2:0] hd_is_ld,
  input  logic [2:0] nx_valid,
  input  logic [2:0] nx_ready,
  input  seq_t [2:0] nx_age,
  input  logic       ld_port_free,
  output logic [2:0] grant,
  output logic [2:0] grant2,
  output logic [ISSUE_W-1:0] slot_v,
  output queue_e [ISSUE_W-1:0] slot_q,
  output logic [ISSUE_W-1:0] slot_nx
);
  logic [2:0] cand, cand2;
  logic       ld_used;
  int unsigned n;
  always_comb begin
    grant   = '0;
    grant2  = '0;
    slot_v  = '0;
    slot_q  = '{default: Q_A};
    slot_nx = '0;
    ld_used = 1'b0;
    n       = 0;
    for (int q = 0; q < 3; q++) begin
      cand[q]  = hd_valid[q] && hd_ready[q] && (!hd_is_ld[q] || ld_port_free);
      cand2[q] = hd_valid[q] && nx_valid[q] && nx_ready[q];
    end
    // Repeatedly take the oldest remaining candidate; a second entry becomes
    // a candidate once its head has been taken.
    for (int s = 0; s < ISSUE_W; s++) begin
      logic found, second;
      logic [1:0] best;
      seq_t best_age;
      found    = 1'b0;
      second   = 1'b0;
      best     = 2'd0;
      best_age = '0;
      for (int q = 0; q < 3; q++) begin
        if (cand[q] && !grant[q] && !(hd_is_ld[q] && ld_used) &&
            (!found || hd_age[q] < best_age)) begin
          found = 1'b1; second = 1'b0; best = 2'(q); best_age = hd_age[q];
        end
        if (cand2[q] && grant[q] && !grant2[q] &&
            (!found || nx_age[q] < best_age)) begin
          found = 1'b1; second = 1'b1; best = 2'(q); best_age = nx_age[q];
        end
      end
      if (found) begin
        if (second) grant2[best] = 1'b1;
        else        grant[best]  = 1'b1;
        slot_v[n]  = 1'b1;
        slot_q[n]  = queue_e'(best);
        slot_nx[n] = second;
        if (!second && hd_is_ld[best]) ld_used = 1'b1;
        n = n + 1;
      end
    end
  end
endmodule
