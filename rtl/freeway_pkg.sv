// freeway_pkg: types and constants shared by the Freeway slice-out-of-order core.
//
// The core runs a small 32-bit register ISA (this design's own choice: the
// microarchitecture is ISA-neutral). Instruction word layout:
//   [31:28] opcode   [27:24] rd   [23:20] rs1   [19:16] rs2   [15:0] imm (signed)
//   ADD  rd = rs1 + rs2        SUB rd = rs1 - rs2      ADDI rd = rs1 + imm
//   LD   rd = M[rs1 + imm]     ST  M[rs1 + imm] = rs2  NOP
// Memory is word addressed. Sizes follow the evaluated configuration: a
// 64-entry instruction window (scoreboard), 2-wide dispatch, issue and
// commit, and a 7-bit program-order sequence number (window slot plus one
// wrap bit), which is the width the store buffer extension needs.
package freeway_pkg;

  localparam int XLEN      = 32;
  localparam int PC_W      = 32;
  localparam int NUM_AREGS = 16;
  localparam int AREG_W    = 4;
  localparam int WINDOW    = 64;                 // scoreboard entries
  localparam int DW        = 2;                  // rename/dispatch/commit width
  localparam int SEQ_W     = $clog2(WINDOW) + 1; // 7 bits
  localparam int NUM_PREGS = NUM_AREGS + WINDOW; // 80 physical registers
  localparam int PREG_W    = $clog2(NUM_PREGS);  // 7 bits
  localparam int SB_MAX    = 16;                 // store buffer entries
  localparam int SBI_W     = $clog2(SB_MAX);

  typedef logic [XLEN-1:0]   word_t;
  typedef logic [PC_W-1:0]   pc_t;
  typedef logic [AREG_W-1:0] areg_t;
  typedef logic [PREG_W-1:0] preg_t;
  typedef logic [SEQ_W-1:0]  seq_t;
  typedef logic [SBI_W-1:0]  sbidx_t;

  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_ADD  = 4'd1,
    OP_SUB  = 4'd2,
    OP_ADDI = 4'd3,
    OP_LD   = 4'd4,
    OP_ST   = 4'd5
  } opcode_e;

  // The three in-order instruction queues.
  typedef enum logic [1:0] {
    Q_A = 2'd0,   // main queue: non-slice work, store data + store operation
    Q_B = 2'd1,   // bypass queue: independent memory slices
    Q_Y = 2'd2    // yielding queue: dependent memory slices
  } queue_e;

  // Micro-operation kinds after dispatch. A store is split into a
  // store-address part (B-IQ or Y-IQ) and a store-data part (A-IQ).
  typedef enum logic [1:0] {
    U_ALU = 2'd0,
    U_LD  = 2'd1,
    U_STA = 2'd2,
    U_STD = 2'd3
  } ukind_e;

  typedef struct packed {
    opcode_e op;
    areg_t   rd;
    areg_t   rs1;
    areg_t   rs2;
    word_t   imm;      // sign extended
    logic    use_s1;
    logic    use_s2;
    logic    wr_rd;
    logic    is_load;
    logic    is_store;
  } dec_t;

  typedef struct packed {
    ukind_e  kind;
    opcode_e op;
    seq_t    seq;      // program order / scoreboard slot
    preg_t   ps1;
    preg_t   ps2;
    preg_t   pd;
    logic    use_s1;
    logic    use_s2;
    logic    wr_d;
    word_t   imm;
    sbidx_t  sb_idx;   // store buffer entry of a store
    pc_t     pc;
  } uop_t;

  // Per-cycle event flags reported by the core (for performance counting).
  typedef struct packed {
    logic [2:0] issue_q;       // an instruction issued from A, B, Y (bit = queue)
    logic       y_bypass;      // B-IQ issued while the Y-IQ head was stalled
    logic       dep_dispatch;  // a dependent slice instruction went to the Y-IQ
    logic       ind_dispatch;  // an independent slice instruction went to the B-IQ
    logic       ibda_insert;   // IBDA wrote a producer PC into the IST
    logic       ist_hit;       // a non-memory instruction hit in the IST
    logic       sb_unresolved; // a load head waited on an older unresolved store
    logic       sb_alias;      // a load head waited on an older aliasing store
    logic       disp_stall;    // dispatch held because a resource was full
    logic       load_issue;    // a load request was sent
    logic       dual_dispatch; // two instructions dispatched in one cycle
    logic       dual_commit;   // two instructions committed in one cycle
    logic       same_q_issue;  // two instructions issued from one queue
  } ev_t;

  // Age of a sequence number relative to the oldest in-flight instruction.
  function automatic seq_t seq_age(seq_t s, seq_t head);
    return seq_t'(s - head);
  endfunction

endpackage
