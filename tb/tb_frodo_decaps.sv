// tb_frodo_decaps: FrodoKEM-640 decapsulation on the default-size processor.
//
// A key pair (S, E sampled, B = A S + E) and a ciphertext (B', C from an
// encapsulation of a random u) are made by the behavioural models; the secret
// S, the public B and the ciphertext are loaded unpacked through the host
// port (the processor has no unpacker). The instruction stream runs the whole
// decapsulation:
//   M = C - B' S                 (MAC passes, B' read transposed, subtract)
//   u' = Decode(M); seedSE' || k' = SHAKE(pkh || u' || salt)
//   ss0 = SHAKE(Pack(B') || Pack(C) || salt || k')
//   ss1 = SHAKE(Pack(B') || Pack(C) || salt || s)
//   re-encryption as in encapsulation: S', E'^T (over B'), E'', Eu,
//   C' = S' B + Eu, B'' = S' A + E' (MA passes, A buffer in bank 0)
//   ss2 = SHAKE(Pack(B'') || Pack(C') || salt || k')
//   CMP: ss = (ss0 == ss2) ? ss0 : ss1
// Checks: u' (which is only right if M is), seedSE' || k', B'' and C' equal
// to the ciphertext, the CMP flag, and ss
// equal to the model's shared secret. The clocks taken are reported; clocks
// with two instructions executing and MA beats are counted and must occur.
// A watchdog ends the run after 1,000,000 clocks.
module tb_frodo_decaps;
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

  // bank 1 byte strings (128-bit rows)
  localparam int A_SEEDA = 1344, A_PKH = 1345, A_U = 1346, A_SALT = 1347,   // salt: 2 rows
                 A_S = 1353, A_UP = 1354,                                   // s, decoded u
                 A_SEK = 1349,                                              // seedSE || k: 2 rows
                 A_K = 1350, A_SS = 1360;                                  // ss0, ss1, ss2, ss: 4 rows
  // bank 0 small matrices
  localparam int X_BASE = 2016, Y_BASE = 2024, Z_BASE = 2032, C_BASE = 2040;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic instr_t mk(opcode_e op, logic [4:0] fl, int part, int bank, int base,
                                int idx, int cnt);
    instr_t i;
    i.op = op; i.fl = fl; i.part = 2'(part); i.bank = 1'(bank); i.base = 11'(base);
    i.idx = 12'(idx); i.cnt = 14'(cnt);
    return i;
  endfunction

  instr_t prog [$];
  always @(negedge clk) begin
    inst_valid = (prog.size() > 0);
    inst       = (prog.size() > 0) ? prog[0] : '0;
  end
  always @(posedge clk)
    if (rst_n && inst_valid && inst_ready) void'(prog.pop_front());

  int cyc = 0, n_dual = 0, n_ma = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dual) n_dual++;
    if (dut.m_valid && !dut.m_upd && !dut.m_acc) n_ma++;
  end

  task automatic run_prog();
    int quiet = 0;
    while (quiet < 4) begin
      @(posedge clk);
      quiet = (prog.size() == 0 && idle) ? quiet + 1 : 0;
    end
  endtask

  // ------------------------------------------------------------ host port
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

  // entry (R, c) of an n x 8 matrix (two words per row pair)
  function automatic logic [15:0] elem(int b, int base, int r, int c);
    int u = r / 2, rr = r % 2, v = c / 4, h = (c / 2) % 2, e = c % 2;
    int m = 2 * rr + (h ^ (u & 1));
    return img[b][base + u * 2 + v][32*m + 16*e +: 16];
  endfunction
  function automatic logic [7:0] sbyte(int b, int addr, int m, int a);
    return img[b][addr][32*m + 8*a +: 8];
  endfunction
  function automatic logic [63:0] word(int b, int base, int w);
    return img[b][base + w/2][64*(w%2) +: 64];
  endfunction
  function automatic logic [127:0] row_of(bytes_t q, int off);
    logic [127:0] r = '0;
    for (int i = 0; i < 16; i++) if (off + i < q.size()) r[8*i +: 8] = q[off + i];
    return r;
  endfunction

  // ------------------------------------------------------------ model
  bytes_t seeda, pkh, mu, salt, s_rej, sek, ss_ref;
  int st [8][N];                  // S^T (secret key)
  logic [15:0] b_pk [N][8];       // B = A S + E
  int sp [8][N];                  // S'
  logic [15:0] bp [8][N];         // B' = S' A + E'
  logic [15:0] c_ref [8][8];      // C = S' B + E'' + Encode(u)

  task automatic build_model();
    bytes_t m, row, rs;
    int unsigned vals[$];
    int unsigned acc_b [N][8];
    int unsigned acc_p [8][N];
    // key pair: S^T, E from a random seed
    m = {8'h5F};
    for (int i = 0; i < 16; i++) m.push_back(8'($urandom));
    rs = shake(168, m, 2 * 16 * N);
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < N; c++) st[r][c] = sample(LV, {rs[2*(r*N+c)+1], rs[2*(r*N+c)]});
    for (int i = 0; i < N; i++)
      for (int c = 0; c < 8; c++) begin
        int k = 8 * N + 8 * i + c;
        acc_b[i][c] = sample(LV, {rs[2*k+1], rs[2*k]});
      end
    // encapsulation of mu
    m = pkh;
    foreach (mu[i]) m.push_back(mu[i]);
    foreach (salt[i]) m.push_back(salt[i]);
    sek = shake(168, m, 32);
    m = {8'h5F};
    for (int i = 0; i < 16; i++) m.push_back(sek[i]);
    rs = shake(168, m, 2 * (16 * N + 64));
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < N; c++) begin
        int k = r * N + c;
        sp[r][c] = sample(LV, {rs[2*k+1], rs[2*k]});
        k = 8 * N + r * N + c;
        acc_p[r][c] = sample(LV, {rs[2*k+1], rs[2*k]});
      end
    for (int i = 0; i < N; i++) begin
      m = {8'(i), 8'(i >> 8)};
      foreach (seeda[k]) m.push_back(seeda[k]);
      row = shake(168, m, 2 * N);
      for (int c = 0; c < N; c++) begin
        automatic int unsigned a = {row[2*c+1], row[2*c]};
        for (int r = 0; r < 8; r++) begin
          acc_p[r][c] += sp[r][i] * a;
          acc_b[i][r] += a * st[r][c];
        end
      end
    end
    for (int i = 0; i < N; i++) for (int c = 0; c < 8; c++) b_pk[i][c] = 16'(acc_b[i][c] & 32'h7FFF);
    for (int r = 0; r < 8; r++) for (int c = 0; c < N; c++) bp[r][c] = 16'(acc_p[r][c] & 32'h7FFF);
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        automatic int k = 16 * N + 8 * r + c;
        automatic int unsigned acc = sample(LV, {rs[2*k+1], rs[2*k]});
        acc += encode_entry(LV, mu, 8 * r + c);
        for (int i = 0; i < N; i++) acc += sp[r][i] * b_pk[i][c];
        c_ref[r][c] = 16'(acc & 32'h7FFF);
      end
    // shared secret of a valid ciphertext: SHAKE(c1 || c2 || salt || k)
    for (int r = 0; r < 8; r++) for (int c = 0; c < N; c++) vals.push_back(bp[r][c]);
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) vals.push_back(c_ref[r][c]);
    m = pack(LV, vals);
    foreach (salt[i]) m.push_back(salt[i]);
    for (int i = 16; i < 32; i++) m.push_back(sek[i]);
    ss_ref = shake(168, m, 16);
  endtask

  // ------------------------------------------------------------ program
  task automatic gen_row(int r);
    prog.push_back(mk(OP_HIA, 5'b00111, 1, 1, A_SEEDA, r, 2));
    prog.push_back(mk(OP_HOS, 5'(DST_A) | (5'(r % 2) << 3), (r / 2) % 4, 0, 0, 0, CQ));
  endtask

  // SHAKE(Pack(B') || Pack(C) || salt || key) -> word pair dst of the ss area
  task automatic ct_hash(int c_base, int key_row, int dst);
    prog.push_back(mk(OP_HIA, 5'b10001, 0, 1, 0, 1, 2 * N));
    prog.push_back(mk(OP_HIA, 5'b10000, 0, 0, c_base, 0, 16));
    prog.push_back(mk(OP_HIA, 5'b00000, 0, 1, A_SALT, 0, 4));
    prog.push_back(mk(OP_HIA, 5'b00010, 0, 1, key_row, 0, 2));
    prog.push_back(mk(OP_HOS, 5'(DST_RAW), 0, 1, A_SS + dst, 0, 2));
  endtask

  task automatic decaps_prog();
    // M = C - B' S  (into X_BASE)
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 2; j++) begin
        prog.push_back(mk(OP_MBR, 5'(j) << 4, 0, 0, C_BASE, i, 1));
        prog.push_back(mk(OP_MUL, (5'(j) << 4) | 5'b00110, 0, 1, 0, i, CQ));
        prog.push_back(mk(OP_MBW, 5'(j) << 4, 0, 0, X_BASE, i, 1));
      end
    prog.push_back(mk(OP_DEC, 5'b00000, 0, 0, X_BASE, A_UP, 0));
    // seedSE' || k'
    prog.push_back(mk(OP_HIA, 5'b00001, 0, 1, A_PKH, 0, 2));
    prog.push_back(mk(OP_HIA, 5'b00000, 0, 1, A_UP, 0, 2));
    prog.push_back(mk(OP_HIA, 5'b00010, 0, 1, A_SALT, 0, 4));
    prog.push_back(mk(OP_HOS, 5'(DST_RAW), 0, 1, A_SEK, 0, 4));
    // ss0, ss1 while B' and C are still held
    ct_hash(C_BASE, A_K, 0);
    ct_hash(C_BASE, A_S, 1);
    // re-encryption: S', E'^T, E''
    prog.push_back(mk(OP_HIA, 5'b01011, 0, 1, A_SEK, 0, 2));
    prog.push_back(mk(OP_HOS, 5'(DST_S), 0, 0, S_BASE, 0, 2 * N));
    prog.push_back(mk(OP_HOS, 5'(DST_ET), 0, 1, 0, 0, 2 * N));
    prog.push_back(mk(OP_HOS, 5'(DST_E), 0, 0, Y_BASE, 0, 16));
    prog.push_back(mk(OP_ENC, 5'b00000, 0, 1, A_UP, X_BASE, 0));
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 2; j++) begin
        prog.push_back(mk(OP_MBR, 5'(j) << 4, 0, 0, Y_BASE, i, 1));
        prog.push_back(mk(OP_MUL, 5'(j) << 4, 0, 0, X_BASE, i, 1));
        prog.push_back(mk(OP_MBW, 5'(j) << 4, 0, 0, Z_BASE, i, 1));
      end
    // C' = S' B + Eu (over C)
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 2; j++) begin
        prog.push_back(mk(OP_MBR, (5'(j) << 4) | 5'b00100, 0, 0, Z_BASE, i, 1));
        prog.push_back(mk(OP_MUL, (5'(j) << 4) | 5'b00100, 0, 0, 0, i, CQ));
        prog.push_back(mk(OP_MBW, (5'(j) << 4) | 5'b00100, 0, 0, C_BASE, i, 1));
      end
    // B''^T = A^T S'^T + E'^T
    for (int r = 0; r < 4; r++) gen_row(r);
    for (int t = 0; t < N / 4; t++)
      for (int j = 0; j < 2; j++) begin
        prog.push_back(mk(OP_MBR, (5'(j) << 4) | 5'b00001, 0, 0, 0, t, 1));
        prog.push_back(mk(OP_MUL, (5'(j) << 4) | 5'b00001, (2 * t) % 4, 0, 0, 0, N / 2));
        if (t + 1 < N / 4) begin
          gen_row(4 * t + 4 + 2 * j);
          gen_row(4 * t + 5 + 2 * j);
        end
      end
    ct_hash(C_BASE, A_K, 2);
    prog.push_back(mk(OP_CMP, 5'b00000, 0, 1, A_SS, 0, 2));
  endtask

  // an n x 8 matrix in the interleaved layout, row-major source
  task automatic load_nx8(int bank, int base, bit from_bp);
    logic [127:0] rowv [N];
    for (int a = 0; a < N; a++) rowv[a] = '0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < 8; c++) begin
        int u = r / 2, rr = r % 2, v = c / 4, h = (c / 2) % 2, e = c % 2;
        int m = 2 * rr + (h ^ (u & 1));
        rowv[u * 2 + v][32*m + 16*e +: 16] = from_bp ? bp[c][r] : b_pk[r][c];
      end
    for (int a = 0; a < N; a++) host_write(bank, base + a, rowv[a]);
  endtask

  task automatic load_small();
    logic [127:0] rowv [8];
    for (int a = 0; a < 8; a++) rowv[a] = '0;
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        int u = r / 2, rr = r % 2, v = c / 4, h = (c / 2) % 2, e = c % 2;
        int m = 2 * rr + (h ^ (u & 1));
        rowv[u * 2 + v][32*m + 16*e +: 16] = c_ref[r][c];
      end
    for (int a = 0; a < 8; a++) host_write(0, C_BASE + a, rowv[a]);
  endtask

  // S^T: row r, columns 4t..4t+3 in RAM r%4 at S_BASE + 2t + r/4
  task automatic load_s();
    for (int a = 0; a < N / 2; a++) begin
      logic [127:0] v = '0;
      for (int m = 0; m < 4; m++)
        for (int b = 0; b < 4; b++)
          v[32*m + 8*b +: 8] = 8'(st[4 * (a % 2) + m][4 * (a / 2) + b]);
      host_write(0, S_BASE + a, v);
    end
  endtask

  initial begin
    int t0;
    rst_n = 0; level = LV; host_en = 0; host_we = 0; host_bank = 0; host_addr = '0;
    host_wdata = '0; inst = '0; inst_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int i = 0; i < 16; i++) begin
      seeda.push_back(8'($urandom)); pkh.push_back(8'($urandom)); mu.push_back(8'($urandom));
      s_rej.push_back(8'($urandom));
    end
    for (int i = 0; i < 32; i++) salt.push_back(8'($urandom));
    build_model();
    host_write(1, A_SEEDA, row_of(seeda, 0));
    host_write(1, A_PKH, row_of(pkh, 0));
    host_write(1, A_S, row_of(s_rej, 0));
    host_write(1, A_SALT, row_of(salt, 0));
    host_write(1, A_SALT + 1, row_of(salt, 16));
    load_nx8(0, 0, 1'b0);          // B
    load_nx8(1, 0, 1'b1);          // B'^T
    load_small();                  // C
    load_s();                      // S^T

    t0 = cyc;
    decaps_prog();
    run_prog();
    $display("Decaps-640: %0d clocks, %0d with two instructions executing, %0d MA beats",
             cyc - t0, n_dual, n_ma);
    host_read_all();
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++)
        check((elem(0, C_BASE, r, c) & 16'h7FFF) == c_ref[r][c], "C' == C (mod 2^15)");
    for (int i = 0; i < 16; i++)
      check(word(1, A_UP, i / 8)[8*(i%8) +: 8] == mu[i], "decoded u");
    for (int i = 0; i < 32; i++)
      check(word(1, A_SEK, i / 8)[8*(i%8) +: 8] == sek[i], "seedSE' || k'");
    begin
      automatic int bad = 0;
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < N; c++) begin
          check((elem(1, 0, c, r) & 16'h7FFF) == bp[r][c], "B'' == B' (mod 2^15)");
          if ((elem(1, 0, c, r) & 16'h7FFF) != bp[r][c]) bad++;
        end
      $display("B'' checked, %0d mismatches", bad);
    end
    check(cmp_eq, "CMP flag");
    for (int i = 0; i < 16; i++) begin
      check(word(1, A_SS, i / 8)[8*(i%8) +: 8] == ss_ref[i], "ss0");
      check(word(1, A_SS, 6 + i / 8)[8*(i%8) +: 8] == ss_ref[i], "ss");
    end
    check(n_dual > 0, "overlapped execution");
    check(n_ma > 0, "MA mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d instructions left", prog.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
