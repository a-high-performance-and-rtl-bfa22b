// dispatch_unit: dual-instruction fetch and issue.
//
// Two instruction containers, IF0 and IF1, let two independent instructions
// run at once on different function units. Every instruction enters IF0.
//   IF0: IDLE --valid--> WAIT; WAIT --ready1--> IDLE (the instruction moves to
//        IF1); WAIT --~ready1 && conflict--> WAIT; WAIT --~ready1 &&
//        ~conflict--> WORK (issued from IF0, alongside IF1); WORK --done0--> IDLE.
//   IF1: IDLE --~empty0--> WORK (takes the instruction waiting in IF0);
//        WORK --done1--> IDLE.
// ready1 means IF1 is idle, empty0 means IF0 holds no waiting instruction. So
// an instruction normally runs in IF1; a younger one may start from IF0 only
// while IF1 is busy and the two do not conflict. Instructions therefore start
// in program order, and a waiting instruction is checked only against the one
// running in IF1.
//
// Conflict detection: two instructions may overlap only if one is a hash
// instruction and the other a matrix instruction (MBR, MUL, MBW), and the hash
// one touches nothing the matrix one uses: an HIA that absorbs a row index and
// seed_A, or an HOS writing rows of A into a partition of the A buffer that
// the MUL does not read (a MAC pass reads partition p, an MA pass p and p+1).
// Everything else is serialised.
//
// Issue: a start pulse and the instruction go to the function unit of the
// opcode (six units: hash, MBR, MUL, MBW, EDU, CMP); each slot takes its
// done from the unit it started.
//
// The two containers, the two state machines with the transition conditions
// above and the six-function issue structure are taken from the processor's
// dispatch-unit figure; the conflict rules are this design's reading of the
// text (hash and matrix units share nothing but memory, and the A buffer is
// ping-ponged).
module dispatch_unit
  import frodo_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  // fetch side
  input  instr_t inst,
  input  logic   valid,
  output logic   ready,
  // function side
  output logic [N_FUNC-1:0] fun_start,
  output instr_t            fun_inst [N_FUNC],
  input  logic   [N_FUNC-1:0] fun_done,
  // status
  output logic   idle,
  output logic   dual           // both containers executing
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_WORK} st0_e;
  st0_e   st0, st1;
  instr_t i0, i1;
  func_e  f0, f1;
  logic   ready1, empty0, conflict, done0, done1;
  logic   go0, go1;                    // issue this clock from IF0 / IF1

  function automatic logic is_hash(opcode_e op);
    return op == OP_HIA || op == OP_HOS;
  endfunction
  function automatic logic is_mat(opcode_e op);
    return op == OP_MBR || op == OP_MUL || op == OP_MBW;
  endfunction

  // may hash instruction h run alongside matrix instruction m?
  function automatic logic compatible(instr_t h, instr_t m);
    logic uses_a, hits;
    if (h.op == OP_HIA) return h.fl[2];            // row index + seed_A only
    if (hos_dst_e'(h.fl[2:0]) != DST_A) return 1'b0;
    uses_a = (m.op == OP_MUL) && (m.fl[3] || m.fl[0]);   // MAC from A buffer, or MA
    hits   = uses_a && ((h.part == m.part) || (m.fl[0] && h.part == m.part + 2'd1));
    return !hits;
  endfunction

  always_comb begin
    conflict = 1'b1;
    if (is_hash(i0.op) && is_mat(i1.op)) conflict = !compatible(i0, i1);
    if (is_mat(i0.op) && is_hash(i1.op)) conflict = !compatible(i1, i0);
  end

  assign ready1 = (st1 == S_IDLE);
  assign empty0 = (st0 != S_WAIT);
  assign ready  = (st0 == S_IDLE);
  assign go1    = ready1 && !empty0;
  assign go0    = (st0 == S_WAIT) && !ready1 && !conflict;
  assign done0  = (st0 == S_WORK) && fun_done[f0];
  assign done1  = (st1 == S_WORK) && fun_done[f1];
  assign idle   = (st0 == S_IDLE) && (st1 == S_IDLE);
  assign dual   = (st0 == S_WORK) && (st1 == S_WORK);

  always_comb begin
    fun_start = '0;
    for (int f = 0; f < N_FUNC; f++) fun_inst[f] = i0;
    if (go1) begin
      fun_start[op_func(i0.op)] = 1'b1;
    end
    if (go0) begin
      fun_start[op_func(i0.op)] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st0 <= S_IDLE; st1 <= S_IDLE;
      i0 <= '0; i1 <= '0; f0 <= FN_HASH; f1 <= FN_HASH;
    end else begin
      // IF0
      case (st0)
        S_IDLE: if (valid) begin st0 <= S_WAIT; i0 <= inst; end
        S_WAIT: if (ready1) st0 <= S_IDLE;
                else if (!conflict) begin st0 <= S_WORK; f0 <= op_func(i0.op); end
        S_WORK: if (done0) st0 <= S_IDLE;
        default: st0 <= S_IDLE;
      endcase
      // IF1
      case (st1)
        S_IDLE: if (!empty0) begin st1 <= S_WORK; i1 <= i0; f1 <= op_func(i0.op); end
        S_WORK: if (done1) st1 <= S_IDLE;
        default: st1 <= S_IDLE;
      endcase
    end
  end

  // the two slots never drive the same function unit
  a_no_shared_unit: assert property (@(posedge clk) disable iff (!rst_n)
    !(st0 == S_WORK && st1 == S_WORK && f0 == f1));
endmodule
