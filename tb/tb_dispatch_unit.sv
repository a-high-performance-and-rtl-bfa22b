// tb_dispatch_unit: checks issue order, overlap and conflict handling.
//
// Six model function units accept a start with an instruction and answer done
// after a random 1..30 clocks. A program of 300 random instructions, biased
// towards the A-generation pattern (HIA with row index, HOS into a partition,
// MBR/MUL/MBW), is fed through the valid/ready port. Checked: every
// instruction starts exactly once and in program order; two instructions run
// together only if the rules allow it (recomputed here: hash with matrix, and
// an HOS into A never with a MUL reading that partition); overlapped
// execution actually happens, and a compatible HOS+MUL pair does run at once.
module tb_dispatch_unit;
  import frodo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  instr_t inst;
  logic   valid, ready, idle, dual;
  logic [N_FUNC-1:0] fun_start, fun_done;
  instr_t fun_inst [N_FUNC];
  int checks = 0, failures = 0;

  dispatch_unit dut (.*);

  localparam int NPROG = 300;
  instr_t prog [NPROG];
  int     started = 0;
  int     busy_cnt [N_FUNC];
  instr_t running [N_FUNC];
  logic   active [N_FUNC];
  int     dual_cycles = 0, hos_mul_overlap = 0, bad_pairs = 0;

  function automatic bit allowed(instr_t a, instr_t b);
    bit ah = (a.op == OP_HIA || a.op == OP_HOS);
    bit bh = (b.op == OP_HIA || b.op == OP_HOS);
    bit am = (a.op == OP_MBR || a.op == OP_MUL || a.op == OP_MBW);
    bit bm = (b.op == OP_MBR || b.op == OP_MUL || b.op == OP_MBW);
    instr_t h, m;
    if (ah && bm) begin h = a; m = b; end
    else if (bh && am) begin h = b; m = a; end
    else return 0;
    if (h.op == OP_HIA) return h.fl[2];
    if (h.fl[2:0] != 3'(DST_A)) return 0;
    if (m.op != OP_MUL || !(m.fl[3] || m.fl[0])) return 1;   // MA passes always read A
    if (h.part == m.part) return 0;
    if (m.fl[0] && h.part == 2'(m.part + 1)) return 0;
    return 1;
  endfunction

  // model function units
  always @(posedge clk) begin
    for (int f = 0; f < N_FUNC; f++) begin
      fun_done[f] <= 1'b0;
      if (fun_start[f]) begin
        checks++;
        if (active[f]) begin failures++; $display("unit %0d started while busy", f); end
        if (fun_inst[f] !== prog[started]) begin
          failures++; $display("instruction %0d out of order", started);
        end
        if (op_func(fun_inst[f].op) != func_e'(f)) begin
          failures++; $display("instruction sent to the wrong unit");
        end
        started++;
        active[f]   <= 1'b1;
        running[f]  <= fun_inst[f];
        busy_cnt[f] <= 1 + int'($urandom % 30);
      end else if (active[f]) begin
        if (busy_cnt[f] == 1) begin active[f] <= 1'b0; fun_done[f] <= 1'b1; end
        busy_cnt[f] <= busy_cnt[f] - 1;
      end
    end
  end

  // overlap monitor
  always @(negedge clk) if (rst_n) begin
    automatic int n = 0;
    for (int f = 0; f < N_FUNC; f++) if (active[f]) n++;
    if (n > 2) bad_pairs++;
    if (n == 2) dual_cycles++;
    for (int f = 0; f < N_FUNC; f++)
      for (int g = f + 1; g < N_FUNC; g++)
        if (active[f] && active[g]) begin
          if (!allowed(running[f], running[g])) bad_pairs++;
          if ((running[f].op == OP_HOS && running[g].op == OP_MUL) ||
              (running[g].op == OP_HOS && running[f].op == OP_MUL)) hos_mul_overlap++;
        end
  end

  initial begin
    for (int f = 0; f < N_FUNC; f++) begin active[f] = 0; busy_cnt[f] = 0; end
    fun_done = '0; valid = 0; inst = '0;
    for (int i = 0; i < NPROG; i++) begin
      automatic instr_t t = '0;
      automatic int r = $urandom % 10;
      t.op   = (r < 2) ? OP_HIA : (r < 5) ? OP_HOS : (r < 6) ? OP_MBR :
               (r < 8) ? OP_MUL : (r < 9) ? OP_MBW : opcode_e'(5 + $urandom % 3);
      t.fl   = 5'($urandom);
      if (t.op == OP_HOS && ($urandom % 4 != 0)) t.fl[2:0] = 3'(DST_A);
      if (t.op == OP_MUL && ($urandom % 4 != 0)) t.fl[3] = 1'b1;
      t.part = 2'($urandom);
      t.idx  = 12'(i);
      prog[i] = t;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NPROG; i++) begin
      inst = prog[i]; valid = 1;
      do @(posedge clk); while (!ready);
      #1;
      valid = 0;
      if ($urandom % 3 == 0) @(negedge clk);
    end
    valid = 0;
    while (!idle || started < NPROG) @(negedge clk);
    repeat (40) @(negedge clk);
    checks++;
    if (started != NPROG) begin failures++; $display("%0d of %0d started", started, NPROG); end
    checks++;
    if (bad_pairs != 0) begin failures++; $display("%0d forbidden overlaps", bad_pairs); end
    checks++;
    if (dual_cycles == 0) begin failures++; $display("no overlapped execution"); end
    checks++;
    if (hos_mul_overlap == 0) begin failures++; $display("HOS and MUL never overlapped"); end
    $display("overlap: %0d clocks with two units busy, %0d with HOS+MUL", dual_cycles, hos_mul_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
