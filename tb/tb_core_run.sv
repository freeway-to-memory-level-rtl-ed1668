// tb_core_run: one complete run of the Freeway core on the test loop, with
// the queue sizes and the data-memory hit latency as parameters. It is the
// building block of the sensitivity testbench (tb_freeway_sweep), which
// instantiates it once per configuration.
//
// The run is the same as in tb_freeway_core: a loop body of 18 instructions
// (independent slices, a dependent load -> add -> load chain, stores with
// independent and dependent addresses, an aliasing load) replayed ITERS times
// at two instructions per cycle, every commit checked against an in-order
// reference interpreter and the final memory image compared word by word.
// Inputs: clk, rst_n. Outputs: done (run finished and checked), and the
// check, failure and cycle counts of this run, valid once done is high.
module tb_core_run
  import freeway_pkg::*;
#(
  parameter int AIQ     = 64,
  parameter int BIQ     = 32,
  parameter int YIQ     = 32,
  parameter int HIT_LAT = 4,
  parameter int ITERS   = 300
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   cycles
);

  localparam int BODY  = 18;
  localparam int TOTAL = ITERS * BODY;
  localparam int WORDS = 1024;

  logic [DW-1:0] fe_valid; logic fe_ready; pc_t [DW-1:0] fe_pc; logic [DW-1:0][31:0] fe_instr;
  logic ld_req_valid, ld_req_ready; word_t ld_req_addr; seq_t ld_req_tag;
  logic ld_resp_valid; seq_t ld_resp_tag; word_t ld_resp_data;
  logic st_valid, st_ready; word_t st_addr, st_data;
  logic [DW-1:0] cm_valid, cm_wr; logic idle; pc_t [DW-1:0] cm_pc;
  areg_t [DW-1:0] cm_rd; word_t [DW-1:0] cm_data;
  ev_t ev;

  freeway_core #(.AIQ_DEPTH(AIQ), .BIQ_DEPTH(BIQ), .YIQ_DEPTH(YIQ)) dut (.*);

  dmem_model #(.WORDS(WORDS), .HIT_LAT(HIT_LAT)) u_mem (
    .clk, .rst_n, .ld_req_valid, .ld_req_ready, .ld_req_addr, .ld_req_tag,
    .ld_resp_valid, .ld_resp_tag, .ld_resp_data, .st_valid, .st_ready, .st_addr, .st_data);

  function automatic logic [31:0] enc(opcode_e op, int rd, int rs1, int rs2, int imm);
    return {op, 4'(rd), 4'(rs1), 4'(rs2), 16'(imm)};
  endfunction

  logic [31:0] body [BODY];
  initial begin
    body[0]  = enc(OP_LD,   1, 7, 0, 0);    // ld   r1 = M[r7]      independent slice
    body[1]  = enc(OP_ADDI, 2, 1, 0, 1);    // addi r2 = r1 + 1     main flow
    body[2]  = enc(OP_ADDI, 8, 8, 0, 1);    // addi r8 = r8 + 1     address generation
    body[3]  = enc(OP_LD,   2, 8, 0, 0);    // ld   r2 = M[r8]      producer slice
    body[4]  = enc(OP_ADDI, 2, 2, 0, 1);    // addi r2 = r2 + 1     dependent slice
    body[5]  = enc(OP_LD,   3, 2, 0, 0);    // ld   r3 = M[r2]      dependent slice
    body[6]  = enc(OP_ADDI, 4, 3, 0, -1);   // addi r4 = r3 - 1     main flow
    body[7]  = enc(OP_LD,   4, 9, 0, 0);    // ld   r4 = M[r9]      independent slice
    body[8]  = enc(OP_ADDI, 1, 4, 0, 2);    // addi r1 = r4 + 2     main flow
    body[9]  = enc(OP_ADDI, 4, 4, 0, -1);   // addi r4 = r4 - 1     dependent slice
    body[10] = enc(OP_LD,   5, 4, 0, 0);    // ld   r5 = M[r4]      dependent slice
    body[11] = enc(OP_ST,   0, 10, 5, 2);   // st   M[r10+2] = r5   independent address
    body[12] = enc(OP_ADDI, 10, 10, 0, 1);  // addi r10 = r10 + 1
    body[13] = enc(OP_LD,   6, 10, 0, 0);   // ld   r6 = M[r10]     aliases last iteration's store
    body[14] = enc(OP_ST,   0, 3, 6, 5);    // st   M[r3+5] = r6    dependent address
    body[15] = enc(OP_LD,   11, 9, 0, 7);   // ld   r11 = M[r9+7]   behind unresolved store
    body[16] = enc(OP_SUB,  12, 11, 5, 0);  // sub  r12 = r11 - r5
    body[17] = enc(OP_ADDI, 9, 9, 0, 3);    // addi r9 = r9 + 3
  end

  // reference state
  word_t ref_r [NUM_AREGS];
  word_t ref_m [WORDS];
  int    ref_i;
  int    fe_i;
  longint cyc = 0;

  // event counters
  int n_issue [3];
  int n_bypass, n_dep, n_ind, n_ibda, n_isthit, n_unres, n_alias, n_dstall, n_loads, n_dual;
  int n_commit, n_ddisp, n_dcommit, n_sameq;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  function automatic word_t mi(word_t a);
    return word_t'(a[$clog2(WORDS)-1:0]);
  endfunction

  // front end
  always_comb
    for (int k = 0; k < DW; k++) begin
      fe_valid[k] = (fe_i + k < TOTAL);
      fe_pc[k]    = 32'h100 + 32'(4 * ((fe_i + k) % BODY));
      fe_instr[k] = body[(fe_i + k) % BODY];
    end


  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (fe_ready) fe_i <= fe_i + $countones(fe_valid);
    if (ev.dual_dispatch) n_ddisp++;
    if (ev.dual_commit)   n_dcommit++;
    if (ev.same_q_issue)  n_sameq++;
    chk(!(cm_valid[1] && !cm_valid[0]), "commit slots in order");
    for (int q = 0; q < 3; q++) if (ev.issue_q[q]) n_issue[q]++;
    if ($countones(ev.issue_q) == 2) n_dual++;
    if ($countones(ev.issue_q) > 2) begin checks++; failures++; end
    if (ev.y_bypass)      n_bypass++;
    if (ev.dep_dispatch)  n_dep++;
    if (ev.ind_dispatch)  n_ind++;
    if (ev.ibda_insert)   n_ibda++;
    if (ev.ist_hit)       n_isthit++;
    if (ev.sb_unresolved) n_unres++;
    if (ev.sb_alias)      n_alias++;
    if (ev.disp_stall)    n_dstall++;
    if (ev.load_issue)    n_loads++;
    // the program keeps every address inside the memory (values 1..1000)
    if (ld_req_valid && ld_req_ready) chk(ld_req_addr < WORDS, "load address in range");
    if (st_valid && st_ready) chk(st_addr < WORDS, "store address in range");
    for (int k = 0; k < DW; k++) if (cm_valid[k]) begin
      logic [31:0] w;
      dec_t d;
      word_t v;
      w = body[ref_i % BODY];
      d.op = opcode_e'(w[31:28]);
      v = '0;
      unique case (d.op)
        OP_ADD:  v = ref_r[w[23:20]] + ref_r[w[19:16]];
        OP_SUB:  v = ref_r[w[23:20]] - ref_r[w[19:16]];
        OP_ADDI: v = ref_r[w[23:20]] + {{16{w[15]}}, w[15:0]};
        OP_LD:   v = ref_m[mi(ref_r[w[23:20]] + {{16{w[15]}}, w[15:0]})];
        OP_ST:   ref_m[mi(ref_r[w[23:20]] + {{16{w[15]}}, w[15:0]})] = ref_r[w[19:16]];
        default: ;
      endcase
      chk(cm_pc[k] == 32'h100 + 32'(4 * (ref_i % BODY)), $sformatf("commit pc %h instr %0d", cm_pc[k], ref_i));
      chk(cm_wr[k] == (d.op != OP_ST && d.op != OP_NOP), "commit wr");
      if (d.op != OP_ST) begin
        chk(cm_rd[k] == w[27:24], "commit rd");
        chk(cm_data[k] == v, $sformatf("commit data instr %0d pc %h got %h exp %h", ref_i, cm_pc[k], cm_data[k], v));
        ref_r[w[27:24]] = v;
      end
      ref_i++;
      n_commit++;
    end
  end

  initial begin
    fe_i = 0; ref_i = 0; n_commit = 0; n_ddisp = 0; n_dcommit = 0; n_sameq = 0;
    n_issue = '{0, 0, 0};
    {n_bypass, n_dep, n_ind, n_ibda, n_isthit, n_unres, n_alias, n_dstall, n_loads, n_dual} = '0;
    for (int i = 0; i < NUM_AREGS; i++) ref_r[i] = '0;
    for (int i = 0; i < WORDS; i++) begin
      u_mem.mem[i] = word_t'((i * 37 + 11) % 1000 + 1);
      ref_m[i]     = word_t'((i * 37 + 11) % 1000 + 1);
    end
    checks = 0; failures = 0; done = 0;
    wait (rst_n);
    wait (fe_i == TOTAL && ref_i == TOTAL);
    repeat (5) @(posedge clk);
    chk(idle, "core idle at end");
    for (int i = 0; i < WORDS; i++) chk(u_mem.mem[i] == ref_m[i], $sformatf("memory word %0d", i));
    chk(n_ind > 0 && n_dep > 0 && n_isthit > 0 && n_bypass > 0 && n_sameq > 0,
        "slices steered to B-IQ and Y-IQ, IST learned, B-IQ bypassed Y-IQ");
    cycles = int'(cyc);
    $display("AIQ/BIQ/YIQ=%0d/%0d/%0d hit latency %0d: cycles=%0d IPC=%0.3f max_loads_in_flight=%0d y_bypass=%0d",
             AIQ, BIQ, YIQ, HIT_LAT, cyc, real'(n_commit) / real'(cyc), u_mem.max_inflight, n_bypass);
    done = 1;
  end
endmodule
