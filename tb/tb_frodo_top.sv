// tb_frodo_top: end-to-end test of the processor at its default size.
//
// The top is instantiated with no parameter overrides (full-size banks) and
// runs FrodoKEM-640 KeyGen from random z and seedSE, fed as an instruction
// stream the way the instruction ROM would issue it:
//   seedA = SHAKE(z); S^T, E = sampled from SHAKE(0x5F || seedSE);
//   for every row pair of A: two rows generated by SHAKE128(i || seedA)
//   into a four-partition A buffer, overlapped with the MAC passes of the
//   previous row pair; B = A S + E; pkh = SHAKE(seedA || Pack(B)).
// Then a set of shorter programs exercises the remaining paths: transposed
// packing, Encode, a transposed MAC pass (S^T B + X), the identity-based
// block addition, Decode, an MA-mode pass (B += A^T S on one strip), sampling
// into the transposed E' layout, and CMP in both outcomes.
// Every result is read back through the host port and compared with the
// behavioural models of frodo_ref_pkg (SHAKE, sampler, packing, encoding).
//
// Mechanism counters: clocks with two instructions executing, clocks with
// a hash instruction and a matrix instruction executing together, stall
// clocks, MAC beats, MA beats, MAC<->MA switches, packed words, sampler
// outputs, transposed operand beats, Encode and Decode runs, CMP runs. A
// mechanism that never occurs counts as a failure.
module tb_frodo_top;
  import frodo_pkg::*;
  import frodo_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         rst_n;
  level_e       level;
  instr_t       inst;
  logic         inst_valid, inst_ready;
  logic         host_en, host_we, host_bank;
  logic [10:0]  host_addr;
  logic [127:0] host_wdata, host_rdata;
  logic         idle, dual, stall, cmp_eq;

  frodo_top dut (.*);

  int checks = 0, failures = 0;
  localparam level_e LV = LVL_640;
  localparam int N  = 640;
  localparam int CQ = N / 4;

  // aux area of bank 1 (word addresses of 128-bit rows)
  localparam int A_SEEDSE = 1344, A_Z = 1345, A_SEEDA = 1346, A_PKH = 1347,
                 A_PKHT = 1348, A_MU = 1349, A_MUDEC = 1350, A_SS = 1352;
  localparam int X_BASE = 2016, Y_BASE = 2024, Z_BASE = 2032;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ program
  instr_t prog [$];
  int     issued = 0;

  function automatic instr_t mk(opcode_e op, logic [4:0] fl, int part, int bank, int base,
                                int idx, int cnt);
    instr_t i;
    i.op = op; i.fl = fl; i.part = 2'(part); i.bank = 1'(bank); i.base = 11'(base);
    i.idx = 12'(idx); i.cnt = 14'(cnt);
    return i;
  endfunction

  always @(negedge clk) begin
    inst_valid = (prog.size() > 0);
    inst       = (prog.size() > 0) ? prog[0] : '0;
  end
  always @(posedge clk)
    if (rst_n && inst_valid && inst_ready) begin
      void'(prog.pop_front());
      issued++;
    end

  task automatic run_prog();
    int quiet = 0;
    while (quiet < 4) begin
      @(posedge clk);
      quiet = (prog.size() == 0 && idle) ? quiet + 1 : 0;
    end
  endtask

  // ---------------------------------------------------------- host port
  logic [127:0] img [2][2048];

  task automatic host_write(int bank, int addr, logic [127:0] d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_bank = 1'(bank); host_addr = 11'(addr); host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read_all();
    for (int b = 0; b < 2; b++) begin
      int depth = (b == 0) ? 2048 : 1536;
      for (int a = 0; a <= depth; a++) begin
        @(negedge clk);
        if (a > 0) img[b][a-1] = host_rdata;
        host_en = (a < depth); host_we = 0; host_bank = 1'(b); host_addr = 11'(a);
      end
      @(negedge clk);
      host_en = 0;
    end
  endtask

  // entry (R, c) of a matrix with C word columns per row pair
  function automatic logic [15:0] elem(int b, int base, int c_w, int r, int c);
    int u = r / 2, rr = r % 2, v = c / 4, h = (c / 2) % 2, e = c % 2;
    int m = 2 * rr + (h ^ (u & 1));
    return img[b][base + u * c_w + v][32*m + 16*e +: 16];
  endfunction
  function automatic logic [7:0] sbyte(int b, int addr, int m, int a);
    return img[b][addr][32*m + 8*a +: 8];
  endfunction
  function automatic logic [63:0] word(int b, int base, int w);
    return img[b][base + w/2][64*(w%2) +: 64];
  endfunction
  function automatic logic [127:0] row_of(bytes_t q, int off);
    logic [127:0] r = '0;
    for (int i = 0; i < 16; i++) r[8*i +: 8] = q[off + i];
    return r;
  endfunction

  // --------------------------------------------------- mechanism counters
  int cyc = 0, n_dual = 0, n_hash_mat = 0, n_stall = 0, n_mac = 0, n_ma = 0, n_switch = 0;
  int n_pack = 0, n_samp = 0, n_trans = 0, n_enc = 0, n_dec = 0, n_cmp = 0, n_ident = 0;
  int n_inject_busy = 0;
  int last_mode = -1;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dual) n_dual++;
    if (dut.u_ctrl.hs_act && dut.u_ctrl.ar_act) n_hash_mat++;
    if (stall) n_stall++;
    if (dut.m_valid && dut.m_acc) begin
      n_mac++;
      if (last_mode == 1) n_switch++;
      last_mode = 0;
    end
    if (dut.m_valid && !dut.m_upd && !dut.m_acc) begin
      n_ma++;
      if (last_mode == 0) n_switch++;
      last_mode = 1;
    end
    if (dut.m_valid && dut.m_acc && dut.u_ctrl.ar_i.fl[2]) n_trans++;
    if (dut.m_valid && dut.m_acc && dut.u_ctrl.ar_ident) n_ident++;
    if (dut.p_out_valid && dut.p_out_ready) n_pack++;
    if (dut.s_dout_valid) n_samp++;
    if (dut.e_done && !dut.u_ctrl.ed_dec) n_enc++;
    if (dut.e_done && dut.u_ctrl.ed_dec) n_dec++;
    if (dut.fun_done[FN_CMP]) n_cmp++;
    // a block enters the I/O buffer while the permutation runs
    if (dut.u_hash.perm_busy && dut.u_hash.take_word) n_inject_busy++;
  end

  // -------------------------------------------------------------- model
  bytes_t z, seedse, seeda, rs, pkh_ref, mu;
  int unsigned a_mat [N][N];
  int st [8][N];          // S^T
  int e_mat [N][8];
  logic [15:0] b_ref [N][8];

  task automatic build_model();
    bytes_t m, row;
    seeda = shake(168, z, 16);
    m = {8'h5F};
    foreach (seedse[i]) m.push_back(seedse[i]);
    rs = shake(168, m, 2 * 2 * N * 8);
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < N; c++) st[r][c] = sample(LV, {rs[2*(r*N+c)+1], rs[2*(r*N+c)]});
    for (int r = 0; r < N; r++)
      for (int c = 0; c < 8; c++) begin
        int k = 8 * N + 8 * r + c;
        e_mat[r][c] = sample(LV, {rs[2*k+1], rs[2*k]});
      end
    for (int i = 0; i < N; i++) begin
      m = {8'(i), 8'(i >> 8)};
      foreach (seeda[k]) m.push_back(seeda[k]);
      row = shake(168, m, 2 * N);
      for (int j = 0; j < N; j++) a_mat[i][j] = {row[2*j+1], row[2*j]};
    end
    for (int i = 0; i < N; i++)
      for (int c = 0; c < 8; c++) begin
        int unsigned acc = e_mat[i][c];
        for (int k = 0; k < N; k++) acc += a_mat[i][k] * st[c][k];
        b_ref[i][c] = 16'(acc);
      end
  endtask

  // ------------------------------------------------------------ programs
  task automatic gen_row(int r);
    prog.push_back(mk(OP_HIA, 5'b00111, 1, 1, A_SEEDA, r, 2));
    prog.push_back(mk(OP_HOS, 5'(DST_A) | (5'(r % 2) << 3), (r / 2) % 4, 1, 0, 0, CQ));
  endtask

  task automatic keygen_prog();
    prog.push_back(mk(OP_HIA, 5'b00011, 0, 1, A_Z, 0, 2));
    prog.push_back(mk(OP_HOS, 5'(DST_RAW), 0, 1, A_SEEDA, 0, 2));
    prog.push_back(mk(OP_HIA, 5'b01011, 0, 1, A_SEEDSE, 0, 2));
    prog.push_back(mk(OP_HOS, 5'(DST_S), 0, 0, S_BASE, 0, 2 * N));
    prog.push_back(mk(OP_HOS, 5'(DST_E), 0, 0, 0, 0, 2 * N));
    gen_row(0);
    gen_row(1);
    for (int u = 0; u < N / 2; u++) begin
      for (int j = 0; j < 2; j++) begin
        prog.push_back(mk(OP_MBR, 5'(j) << 4, 0, 0, 0, u, 1));
        prog.push_back(mk(OP_MUL, (5'(j) << 4) | 5'b01000, u % 4, 1, 0, 0, CQ));
        if (u + 1 < N / 2) gen_row(2 * u + 2 + j);
        prog.push_back(mk(OP_MBW, 5'(j) << 4, 0, 0, 0, u, 1));
      end
    end
    // pkh = SHAKE(seedA || Pack(B))
    prog.push_back(mk(OP_HIA, 5'b00001, 0, 1, A_SEEDA, 0, 2));
    prog.push_back(mk(OP_HIA, 5'b10010, 0, 0, 0, 0, 2 * N));
    prog.push_back(mk(OP_HOS, 5'(DST_RAW), 0, 1, A_PKH, 0, 2));
  endtask

  task automatic check_b(string tag);
    int bad = 0;
    for (int i = 0; i < N; i++)
      for (int c = 0; c < 8; c++) begin
        checks++;
        if (elem(0, 0, 2, i, c) !== b_ref[i][c]) begin
          bad++;
          failures++;
          if (bad < 5) $display("FAIL %s B[%0d][%0d] got %h exp %h", tag, i, c,
                                elem(0, 0, 2, i, c), b_ref[i][c]);
        end
      end
    $display("%s: B checked, %0d mismatches", tag, bad);
  endtask

  function automatic bytes_t pack_b(bit transposed);
    int unsigned vals[$];
    if (!transposed) begin
      for (int i = 0; i < N; i++) for (int c = 0; c < 8; c++) vals.push_back(b_ref[i][c] & 16'h7FFF);
    end else begin
      for (int c = 0; c < 8; c++) for (int i = 0; i < N; i++) vals.push_back(b_ref[i][c] & 16'h7FFF);
    end
    return pack(LV, vals);
  endfunction

  // --------------------------------------------------------------- main
  initial begin
    bytes_t m, hv;
    logic [15:0] x_ref [8][8];
    logic [15:0] y_ref [8][8];
    logic [127:0] ss [3];
    int t0;
    rst_n = 0; level = LV; host_en = 0; host_we = 0; host_bank = 0; host_addr = '0;
    host_wdata = '0; inst = '0; inst_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int i = 0; i < 16; i++) begin
      z.push_back(8'($urandom)); seedse.push_back(8'($urandom)); mu.push_back(8'($urandom));
    end
    build_model();
    host_write(1, A_SEEDSE, row_of(seedse, 0));
    host_write(1, A_Z, row_of(z, 0));
    host_write(1, A_MU, row_of(mu, 0));

    // ---------------- KeyGen
    t0 = cyc;
    keygen_prog();
    run_prog();
    $display("KeyGen-640 program: %0d instructions, %0d clocks", issued, cyc - t0);
    host_read_all();
    for (int i = 0; i < 16; i++)
      check(word(1, A_SEEDA, i / 8)[8*(i%8) +: 8] == seeda[i], "seedA");
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < N; c++)
        check(8'(st[r][c]) == sbyte(0, S_BASE + 2 * (c / 4) + r / 4, r % 4, c % 4), "S^T entry");
    check_b("KeyGen");
    m = seeda;
    hv = pack_b(0);
    foreach (hv[i]) m.push_back(hv[i]);
    pkh_ref = shake(168, m, 16);
    for (int i = 0; i < 16; i++)
      check(word(1, A_PKH, i / 8)[8*(i%8) +: 8] == pkh_ref[i], "pkh");

    // ---------------- transposed packing, Encode, transposed MAC, identity add, Decode
    prog.push_back(mk(OP_HIA, 5'b10011, 0, 0, 0, 1, 2 * N));
    prog.push_back(mk(OP_HOS, 5'(DST_RAW), 0, 1, A_PKHT, 0, 2));
    prog.push_back(mk(OP_ENC, 5'b00000, 0, 1, A_MU, X_BASE, 0));
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 2; j++) begin
        prog.push_back(mk(OP_MBR, (5'(j) << 4) | 5'b00100, 0, 0, X_BASE, i, 1));
        prog.push_back(mk(OP_MUL, (5'(j) << 4) | 5'b00100, 0, 0, 0, i, CQ));
        prog.push_back(mk(OP_MBW, (5'(j) << 4) | 5'b00100, 0, 0, Y_BASE, i, 1));
      end
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 2; j++) begin
        prog.push_back(mk(OP_MBR, 5'(j) << 4, 0, 0, Y_BASE, i, 1));
        prog.push_back(mk(OP_MUL, 5'(j) << 4, 0, 0, X_BASE, i, 1));
        prog.push_back(mk(OP_MBW, 5'(j) << 4, 0, 0, Z_BASE, i, 1));
      end
    prog.push_back(mk(OP_DEC, 5'b00000, 0, 0, X_BASE, A_MUDEC, 0));
    // ---------------- MA pass: B += A[632..635]^T * S[632..635][:]
    for (int j = 0; j < 2; j++) begin
      prog.push_back(mk(OP_MBR, (5'(j) << 4) | 5'b00001, 0, 0, 0, (N - 8) / 4, 1));
      prog.push_back(mk(OP_MUL, (5'(j) << 4) | 5'b00001, 0, 1, 0, 0, N / 2));
    end
    // back to MAC mode: redo one identity addition (same result)
    prog.push_back(mk(OP_MBR, 5'b00000, 0, 0, Y_BASE, 0, 1));
    prog.push_back(mk(OP_MUL, 5'b00000, 0, 0, X_BASE, 0, 1));
    prog.push_back(mk(OP_MBW, 5'b00000, 0, 0, Z_BASE, 0, 1));
    // ---------------- E' sampled into the transposed layout (bank 1)
    prog.push_back(mk(OP_HIA, 5'b01011, 0, 1, A_SEEDSE, 0, 2));
    prog.push_back(mk(OP_HOS, 5'(DST_ET), 0, 1, 0, 0, 2 * N));
    t0 = cyc;
    run_prog();
    $display("second program: %0d clocks", cyc - t0);
    host_read_all();

    m = pack_b(1);
    hv = shake(168, m, 16);
    for (int i = 0; i < 16; i++)
      check(word(1, A_PKHT, i / 8)[8*(i%8) +: 8] == hv[i], "hash of transposed pack");
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        x_ref[r][c] = 16'(encode_entry(LV, mu, 8 * r + c));
        check(elem(0, X_BASE, 2, r, c) == x_ref[r][c], "Encode");
      end
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        automatic int unsigned acc = x_ref[r][c];
        for (int k = 0; k < N; k++) acc += st[r][k] * b_ref[k][c];
        y_ref[r][c] = 16'(acc);
        check(elem(0, Y_BASE, 2, r, c) == y_ref[r][c], "S^T B + X (transposed MAC)");
        check(elem(0, Z_BASE, 2, r, c) == 16'(y_ref[r][c] + x_ref[r][c]), "identity add");
      end
    for (int i = 0; i < 16; i++)
      check(word(1, A_MUDEC, i / 8)[8*(i%8) +: 8] == mu[i], "Decode");
    for (int i = 0; i < N; i++)
      for (int c = 0; c < 8; c++) begin
        automatic int unsigned acc = b_ref[i][c];
        for (int a = 0; a < 4; a++) acc += a_mat[N - 8 + a][i] * st[c][N - 8 + a];
        b_ref[i][c] = 16'(acc);
      end
    check_b("MA pass");
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < N; c++)
        check(elem(1, 0, 2, c, r) == 16'(st[r][c]), "E' transposed layout");

    // ---------------- CMP, both outcomes
    for (int k = 0; k < 3; k++) ss[k] = {$urandom, $urandom, $urandom, $urandom};
    for (int trial = 0; trial < 2; trial++) begin
      logic [127:0] s2;
      s2 = (trial == 0) ? ss[0] : (ss[0] ^ 128'h1);
      host_write(1, A_SS, ss[0]);
      host_write(1, A_SS + 1, ss[1]);
      host_write(1, A_SS + 2, s2);
      prog.push_back(mk(OP_CMP, 5'b00000, 0, 1, A_SS, 0, 2));
      run_prog();
      host_read_all();
      check(cmp_eq == (trial == 0), "CMP flag");
      check(img[1][A_SS + 3] == ((trial == 0) ? ss[0] : ss[1]), "CMP selected string");
    end

    // ---------------- mechanisms
    $display("clocks %0d: dual %0d, hash||matrix %0d, stall %0d, MAC beats %0d, MA beats %0d,",
             cyc, n_dual, n_hash_mat, n_stall, n_mac, n_ma);
    $display("  mode switches %0d, packed words %0d, samples %0d, transposed beats %0d,",
             n_switch, n_pack, n_samp, n_trans);
    $display("  identity beats %0d, encode %0d, decode %0d, cmp %0d, absorb during permute %0d",
             n_ident, n_enc, n_dec, n_cmp, n_inject_busy);
    check(n_dual > 0, "overlapped (dual) execution");
    check(n_hash_mat > 0, "hash overlapped with matrix");
    check(n_stall > 0, "stall on conflict");
    check(n_mac > 0, "MAC mode");
    check(n_ma > 0, "MA mode");
    check(n_switch >= 2, "MAC/MA mode switch");
    check(n_pack > 0, "60-to-64 packing");
    check(n_samp > 0, "CDF sampling");
    check(n_trans > 0, "transposed operand access");
    check(n_ident > 0, "identity block addition");
    check(n_enc > 0, "Encode");
    check(n_dec > 0, "Decode");
    check(n_cmp == 2, "CMP");
    check(n_inject_busy > 0, "absorb overlapped with permutation");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d instructions issued, %0d left", issued, prog.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
