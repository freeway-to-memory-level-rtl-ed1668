// iq_fifo: in-order instruction queue (used for the A-IQ, B-IQ and Y-IQ).
//
// A circular buffer of DEPTH micro-ops. Dispatch writes up to NPUSH entries
// per cycle at the tail, in port order (port 0 is older). The scheduler sees
// the head and the entry behind it (`second`, valid when `two`); `pop`
// removes the head and `pop2` (only together with `pop`) also removes the
// second entry. Pushes and pops may happen in the same cycle; an entry
// pushed into an empty queue appears at the head in the next cycle. The
// queues are plain FIFOs, as in the paper (no CAM, no selection from inside
// the queue); the depth is a parameter
// (64/32/32 in the evaluated configuration) and need not be a power of two.
// The dispatch stage must not push more entries than `free` (asserted);
// popping an empty queue is an error (asserted). Reset empties the queue.
module iq_fifo
  import freeway_pkg::*;
#(
  parameter int DEPTH = 32,
  parameter int NPUSH = DW
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [NPUSH-1:0] push,
  input  uop_t [NPUSH-1:0] push_data,
  output logic [$clog2(DEPTH+1)-1:0] free,
  input  logic pop,
  input  logic pop2,
  output uop_t head,
  output uop_t second,
  output logic empty,
  output logic two
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH + 1);
  uop_t            mem_q [DEPTH];
  logic [AW-1:0]   hd_q, tl_q;
  logic [CW-1:0]   cnt_q;
  logic [CW-1:0]   npush;

  function automatic logic [AW-1:0] add(logic [AW-1:0] p, int unsigned k);
    int unsigned s;
    s = int'(p) + k;
    return AW'((s >= DEPTH) ? s - DEPTH : s);
  endfunction

  always_comb begin
    npush = '0;
    for (int k = 0; k < NPUSH; k++) npush = npush + CW'(push[k]);
  end

  assign empty = (cnt_q == 0);
  assign free  = CW'(DEPTH) - cnt_q;
  assign head  = mem_q[hd_q];
  assign second = mem_q[add(hd_q, 1)];
  assign two   = (cnt_q >= CW'(2));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hd_q  <= '0;
      tl_q  <= '0;
      cnt_q <= '0;
    end else begin
      tl_q  <= add(tl_q, int'(npush));
      hd_q  <= add(hd_q, int'(pop) + int'(pop2));
      cnt_q <= cnt_q + npush - CW'(pop) - CW'(pop2);
    end
  end

  always_ff @(posedge clk) begin
    int unsigned off;
    off = 0;
    for (int k = 0; k < NPUSH; k++)
      if (push[k]) begin
        mem_q[add(tl_q, off)] <= push_data[k];
        off++;
      end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) npush <= free);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
  a_pop2_order:   assert property (@(posedge clk) disable iff (!rst_n) pop2 |-> pop && two);
endmodule
