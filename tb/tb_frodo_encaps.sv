// tb_frodo_encaps: FrodoKEM-640 encapsulation on the default-size processor.
//
// The public key (seedA and an unpacked B, loaded through the host port as
// the processor has no unpacker), pkh, the message u and the salt are given.
// The instruction stream then runs the whole encapsulation:
//   seedSE || k = SHAKE(pkh || u || salt)
//   S', E'^T, E'' = Sample(SHAKE(0x5F || seedSE))   (S' into space S)
//   U = Encode(u); Eu = E'' + U (identity block addition)
//   C = S' B + Eu                (transposed MAC passes, computed first so
//                                 that B's rows can then hold the A buffer)
//   B'^T = A^T S'^T + E'^T       (MA passes: each group of four rows of A,
//                                 generated into two partitions of the A
//                                 buffer in bank 0 while the previous group
//                                 is consumed; partial sums in bank 1)
//   ss = SHAKE(Pack(B') || Pack(C) || salt || k)
// and checks seedSE, k, C, every entry of B' and ss against the behavioural
// models of frodo_ref_pkg, and reports the clocks taken. Counted: clocks with
// two instructions executing and MA beats; either never happening is a
// failure. A watchdog ends the run after 1,000,000 clocks.
module tb_frodo_encaps;
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
                 A_SEK = 1349,                                              // seedSE || k: 2 rows
                 A_K = 1350, A_SS = 1351;
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
  bytes_t seeda, pkh, mu, salt, sek, rs, ss_ref;
  logic [15:0] b_pk [N][8];       // B of the public key
  int sp [8][N];                  // S'
  int unsigned bp [8][N];         // B' = S' A + E'
  logic [15:0] c_ref [8][8];

  task automatic build_model();
    bytes_t m, row;
    int unsigned vals[$];
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
        bp[r][c] = sample(LV, {rs[2*k+1], rs[2*k]});
      end
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        automatic int k = 16 * N + 8 * r + c;
        automatic int unsigned acc = sample(LV, {rs[2*k+1], rs[2*k]});
        acc += encode_entry(LV, mu, 8 * r + c);
        for (int i = 0; i < N; i++) acc += sp[r][i] * b_pk[i][c];
        c_ref[r][c] = 16'(acc);
      end
    for (int i = 0; i < N; i++) begin
      m = {8'(i), 8'(i >> 8)};
      foreach (seeda[k]) m.push_back(seeda[k]);
      row = shake(168, m, 2 * N);
      for (int c = 0; c < N; c++) begin
        automatic int unsigned a = {row[2*c+1], row[2*c]};
        for (int r = 0; r < 8; r++) bp[r][c] += sp[r][i] * a;
      end
    end
    for (int r = 0; r < 8; r++) for (int c = 0; c < N; c++) vals.push_back(bp[r][c] & 32'h7FFF);
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) vals.push_back(c_ref[r][c] & 16'h7FFF);
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

  task automatic encaps_prog();
    // seedSE || k
    prog.push_back(mk(OP_HIA, 5'b00001, 0, 1, A_PKH, 0, 2));
    prog.push_back(mk(OP_HIA, 5'b00000, 0, 1, A_U, 0, 2));
    prog.push_back(mk(OP_HIA, 5'b00010, 0, 1, A_SALT, 0, 4));
    prog.push_back(mk(OP_HOS, 5'(DST_RAW), 0, 1, A_SEK, 0, 4));
    // S', E'^T, E''
    prog.push_back(mk(OP_HIA, 5'b01011, 0, 1, A_SEK, 0, 2));
    prog.push_back(mk(OP_HOS, 5'(DST_S), 0, 0, S_BASE, 0, 2 * N));
    prog.push_back(mk(OP_HOS, 5'(DST_ET), 0, 1, 0, 0, 2 * N));
    prog.push_back(mk(OP_HOS, 5'(DST_E), 0, 0, Y_BASE, 0, 16));
    // U = Encode(u); Eu = E'' + U
    prog.push_back(mk(OP_ENC, 5'b00000, 0, 1, A_U, X_BASE, 0));
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 2; j++) begin
        prog.push_back(mk(OP_MBR, 5'(j) << 4, 0, 0, Y_BASE, i, 1));
        prog.push_back(mk(OP_MUL, 5'(j) << 4, 0, 0, X_BASE, i, 1));
        prog.push_back(mk(OP_MBW, 5'(j) << 4, 0, 0, Z_BASE, i, 1));
      end
    // C = S' B + Eu
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 2; j++) begin
        prog.push_back(mk(OP_MBR, (5'(j) << 4) | 5'b00100, 0, 0, Z_BASE, i, 1));
        prog.push_back(mk(OP_MUL, (5'(j) << 4) | 5'b00100, 0, 0, 0, i, CQ));
        prog.push_back(mk(OP_MBW, (5'(j) << 4) | 5'b00100, 0, 0, C_BASE, i, 1));
      end
    // B'^T = A^T S'^T + E'^T, A buffer in bank 0 (space E, B is dead now)
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
    // ss = SHAKE(Pack(B') || Pack(C) || salt || k)
    prog.push_back(mk(OP_HIA, 5'b10001, 0, 1, 0, 1, 2 * N));
    prog.push_back(mk(OP_HIA, 5'b10000, 0, 0, C_BASE, 0, 16));
    prog.push_back(mk(OP_HIA, 5'b00000, 0, 1, A_SALT, 0, 4));
    prog.push_back(mk(OP_HIA, 5'b00010, 0, 1, A_K, 0, 2));
    prog.push_back(mk(OP_HOS, 5'(DST_RAW), 0, 1, A_SS, 0, 2));
  endtask

  // B in the interleaved n x 8 layout
  task automatic load_b();
    logic [127:0] rowv [N];
    for (int a = 0; a < N; a++) rowv[a] = '0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < 8; c++) begin
        int u = r / 2, rr = r % 2, v = c / 4, h = (c / 2) % 2, e = c % 2;
        int m = 2 * rr + (h ^ (u & 1));
        rowv[u * 2 + v][32*m + 16*e +: 16] = b_pk[r][c];
      end
    for (int a = 0; a < N; a++) host_write(0, a, rowv[a]);
  endtask

  initial begin
    int t0;
    rst_n = 0; level = LV; host_en = 0; host_we = 0; host_bank = 0; host_addr = '0;
    host_wdata = '0; inst = '0; inst_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int i = 0; i < 16; i++) begin
      seeda.push_back(8'($urandom)); pkh.push_back(8'($urandom)); mu.push_back(8'($urandom));
    end
    for (int i = 0; i < 32; i++) salt.push_back(8'($urandom));
    for (int r = 0; r < N; r++) for (int c = 0; c < 8; c++) b_pk[r][c] = 16'($urandom & 32'h7FFF);
    build_model();
    host_write(1, A_SEEDA, row_of(seeda, 0));
    host_write(1, A_PKH, row_of(pkh, 0));
    host_write(1, A_U, row_of(mu, 0));
    host_write(1, A_SALT, row_of(salt, 0));
    host_write(1, A_SALT + 1, row_of(salt, 16));
    load_b();

    t0 = cyc;
    encaps_prog();
    run_prog();
    $display("Encaps-640: %0d clocks, %0d with two instructions executing, %0d MA beats",
             cyc - t0, n_dual, n_ma);
    host_read_all();
    for (int i = 0; i < 32; i++)
      check(word(1, A_SEK, i / 8)[8*(i%8) +: 8] == sek[i], "seedSE || k");
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < N; c++)
        check(8'(sp[r][c]) == sbyte(0, S_BASE + 2 * (c / 4) + r / 4, r % 4, c % 4), "S' entry");
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++)
        check(elem(0, C_BASE, r, c) == c_ref[r][c], "C entry");
    begin
      automatic int bad = 0;
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < N; c++) begin
          check(elem(1, 0, c, r) == 16'(bp[r][c]), "B' entry");
          if (elem(1, 0, c, r) != 16'(bp[r][c])) begin
            bad++;
            if (bad < 5) $display("  B'[%0d][%0d] got %h exp %h", r, c, elem(1, 0, c, r), 16'(bp[r][c]));
          end
        end
      $display("B' checked, %0d mismatches", bad);
    end
    for (int i = 0; i < 16; i++)
      check(word(1, A_SS, i / 8)[8*(i%8) +: 8] == ss_ref[i], "ss");
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
