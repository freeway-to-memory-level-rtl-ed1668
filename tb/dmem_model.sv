// dmem_model: behavioural data-memory model for testbenches (not synthesizable
// logic of the core; it stands in for the L1 data cache and the levels below).
//
// Word-addressed memory of WORDS words (addresses wrap modulo WORDS). Loads
// are accepted while fewer than MAX_OUT are outstanding (the L1's miss status
// registers); data is read when the request is accepted and returned after
// HIT_LAT cycles if the address "hits" (word index not a multiple of
// MISS_EVERY) and MISS_LAT cycles otherwise. At most one response per cycle,
// the earliest due first, so responses can return out of order. Stores are
// always accepted and written at once. Counts the largest number of loads in
// flight at once (memory-level parallelism seen by the memory).
module dmem_model
  import freeway_pkg::*;
#(
  parameter int WORDS      = 1024,
  parameter int MAX_OUT    = 8,
  parameter int HIT_LAT    = 4,
  parameter int MISS_LAT   = 30,
  parameter int MISS_EVERY = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  ld_req_valid,
  output logic  ld_req_ready,
  input  word_t ld_req_addr,
  input  seq_t  ld_req_tag,
  output logic  ld_resp_valid,
  output seq_t  ld_resp_tag,
  output word_t ld_resp_data,
  input  logic  st_valid,
  output logic  st_ready,
  input  word_t st_addr,
  input  word_t st_data
);
  localparam int AW = $clog2(WORDS);
  word_t mem [WORDS];

  logic        p_v   [MAX_OUT];
  seq_t        p_tag [MAX_OUT];
  word_t       p_dat [MAX_OUT];
  int unsigned p_due [MAX_OUT];
  int unsigned now;
  int          n_out;
  int          max_inflight;
  int          pick;

  function automatic int unsigned lat_of(word_t a);
    return (a[AW-1:0] % MISS_EVERY == 0) ? MISS_LAT : HIT_LAT;
  endfunction

  always_comb begin
    n_out = 0;
    for (int i = 0; i < MAX_OUT; i++) if (p_v[i]) n_out++;
    ld_req_ready = (n_out < MAX_OUT);
    st_ready     = 1'b1;
    pick = -1;
    for (int i = 0; i < MAX_OUT; i++)
      if (p_v[i] && p_due[i] <= now && (pick < 0 || p_due[i] < p_due[pick])) pick = i;
    ld_resp_valid = (pick >= 0);
    ld_resp_tag   = (pick >= 0) ? p_tag[pick] : '0;
    ld_resp_data  = (pick >= 0) ? p_dat[pick] : '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_OUT; i++) p_v[i] <= 1'b0;
      now <= 0;
      max_inflight <= 0;
    end else begin
      now <= now + 1;
      if (pick >= 0) p_v[pick] <= 1'b0;
      if (ld_req_valid && ld_req_ready) begin
        automatic int slot = -1;
        for (int i = 0; i < MAX_OUT; i++) if (!p_v[i] && slot < 0) slot = i;
        p_v[slot]   <= 1'b1;
        p_tag[slot] <= ld_req_tag;
        p_dat[slot] <= mem[ld_req_addr[AW-1:0]];
        p_due[slot] <= now + lat_of(ld_req_addr) - 1;
        if (n_out + 1 > max_inflight) max_inflight <= n_out + 1;
      end
      if (st_valid) mem[st_addr[AW-1:0]] <= st_data;
    end
  end
endmodule
