// slice_steer: Freeway's dependence-aware dispatch decision.
//
// Combinational logic in the rename/dispatch stage. Inputs are the
// instruction class, whether the IST says it belongs to a memory slice, and
// the RDT entries of its sources (slice dependence bit, producer-in-window).
//   * An instruction is a slice instruction if it is a load, a store or hits
//     in the IST. It is dependent if any source it reads has the dependence
//     bit set (for a store only the address source, rs1, counts).
//   * Independent slice instructions go to the B-IQ, dependent ones to the
//     Y-IQ, everything else to the A-IQ. A store is split: its address part
//     goes to B-IQ or Y-IQ by the rule above, its data part and the store
//     itself to the A-IQ (q_main).
//   * The destination's new dependence bit is 1 for a load and for any
//     dependent instruction, else 0 (this propagates dependence along a
//     slice, following the paper).
//   * IBDA: a load or store asks for the producer of its address register to
//     be added to the IST; an IST-hit instruction asks for the producers of
//     all the sources it reads; only producers still in the window count.
// All of this follows the paper's description; the signal encoding is this
// design's own.
module slice_steer
  import freeway_pkg::*;
(
  input  logic   is_load,
  input  logic   is_store,
  input  logic   ist_hit,
  input  logic   use_s1,
  input  logic   use_s2,
  input  logic   dep_s1,
  input  logic   dep_s2,
  input  logic   pv_s1,
  input  logic   pv_s2,
  output queue_e q_main,     // queue of the instruction (store: data part)
  output logic   sta_valid,  // store: an address part is dispatched as well
  output queue_e q_sta,      // queue of the store address part
  output logic   dependent,  // slice instruction classified as dependent
  output logic   dep_dst,    // new dependence bit of the destination
  output logic   ibda_s1,    // insert producer of rs1 into the IST
  output logic   ibda_s2     // insert producer of rs2 into the IST
);
  logic src_dep, addr_dep, slice;
  always_comb begin
    src_dep   = (use_s1 && dep_s1) || (use_s2 && dep_s2);
    addr_dep  = use_s1 && dep_s1;
    slice     = is_load || ist_hit;
    sta_valid = is_store;
    q_sta     = addr_dep ? Q_Y : Q_B;
    dependent = is_store ? addr_dep : (slice && src_dep);
    if (is_store)   q_main = Q_A;
    else if (slice) q_main = src_dep ? Q_Y : Q_B;
    else            q_main = Q_A;
    dep_dst   = is_load || src_dep;
    ibda_s1   = (is_load || is_store || ist_hit) && use_s1 && pv_s1;
    ibda_s2   = ist_hit && !is_load && !is_store && use_s2 && pv_s2;
  end
endmodule
