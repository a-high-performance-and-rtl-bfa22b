// frodo_keygen_run: one complete KeyGen on a default-size processor, for a
// security level given as a parameter.
//
// Used by tb_frodo_keygen_levels to run the key generation workload at the
// sizes the processor supports. It owns a frodo_top with no parameter
// overrides, loads z and seedSE through the host port, issues the KeyGen
// instruction stream and checks seedA, S^T, B and pkh against the behavioural
// models of frodo_ref_pkg:
//   seedA = SHAKE(z) (16 bytes); r = SHAKE(0x5F || seedSE); S^T, E = Sample(r);
//   row i of A = SHAKE128(LE16(i) || seedA); B = A S + E;
//   pkh = SHAKE(seedA || Pack(B)) (lensec bytes).
// SHAKE is SHAKE128 for n = 640 and SHAKE256 otherwise; seedSE and pkh are
// 16, 24 or 32 bytes (the FrodoKEM lengths). Rows of A are generated two at a
// time into the four-partition A buffer while the multiplier array consumes
// the previous pair, as in the processor's overlapped schedule.
//
// Interface: start (from the parent, after reset), done (level, result
// checks/failures and the clocks the KeyGen program took).
module frodo_keygen_run
  import frodo_pkg::*;
  import frodo_ref_pkg::*;
#(
  parameter level_e LV = LVL_976
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures,
  output int   clocks
);
  localparam int N   = (LV == LVL_640) ? 640 : (LV == LVL_976) ? 976 : 1344;
  localparam int CQ  = N / 4;
  localparam int SEC = (LV == LVL_640) ? 16 : (LV == LVL_976) ? 24 : 32;  // lensec bytes
  localparam int SW  = SEC / 8;                                            // in words

  // aux area of bank 1 (128-bit rows)
  localparam int A_SEEDSE = 1344, A_Z = 1346, A_SEEDA = 1347, A_PKH = 1348;

  level_e       level;
  instr_t       inst;
  logic         inst_valid, inst_ready;
  logic         host_en, host_we, host_bank;
  logic [10:0]  host_addr;
  logic [127:0] host_wdata, host_rdata;
  logic         idle, dual, stall, cmp_eq;

  frodo_top dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d: %s", N, what);
    end
  endtask

  function automatic instr_t mk(opcode_e op, logic [4:0] fl, int part, int bank, int base,
                                int idx, int cnt);
    instr_t i;
    i.op = op; i.fl = fl; i.part = 2'(part); i.bank = 1'(bank); i.base = 11'(base);
    i.idx = 12'(idx); i.cnt = 14'(cnt);
    return i;
  endfunction

  // ------------------------------------------------------------ program feed
  instr_t prog [$];
  always @(negedge clk) begin
    inst_valid = (prog.size() > 0);
    inst       = (prog.size() > 0) ? prog[0] : '0;
  end
  always @(posedge clk)
    if (rst_n && inst_valid && inst_ready) void'(prog.pop_front());

  int cyc = 0, n_dual = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dual) n_dual++;
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
    for (int i = 0; i < 16; i++) if (off + i < q.size()) r[8*i +: 8] = q[off + i];
    return r;
  endfunction

  // ------------------------------------------------------------ model
  bytes_t z, seedse, seeda, rs, pkh_ref;
  int st [8][N];
  logic [15:0] b_ref [N][8];

  task automatic build_model();
    bytes_t m, row;
    int rate = level_rate(LV, 1'b0);
    seeda = shake(rate, z, 16);
    m = {8'h5F};
    foreach (seedse[i]) m.push_back(seedse[i]);
    rs = shake(rate, m, 2 * 2 * N * 8);
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < N; c++) st[r][c] = sample(LV, {rs[2*(r*N+c)+1], rs[2*(r*N+c)]});
    for (int i = 0; i < N; i++) begin
      automatic int unsigned acc [8];
      for (int c = 0; c < 8; c++) begin
        int k = 8 * N + 8 * i + c;
        acc[c] = sample(LV, {rs[2*k+1], rs[2*k]});
      end
      m = {8'(i), 8'(i >> 8)};
      foreach (seeda[k]) m.push_back(seeda[k]);
      row = shake(168, m, 2 * N);
      for (int j = 0; j < N; j++) begin
        automatic int unsigned a = {row[2*j+1], row[2*j]};
        for (int c = 0; c < 8; c++) acc[c] += a * st[c][j];
      end
      for (int c = 0; c < 8; c++) b_ref[i][c] = 16'(acc[c]);
    end
    m = seeda;
    begin
      automatic int unsigned vals[$];
      automatic int unsigned mask = (LV == LVL_640) ? 32'h7FFF : 32'hFFFF;
      bytes_t hv;
      for (int i = 0; i < N; i++) for (int c = 0; c < 8; c++) vals.push_back(b_ref[i][c] & mask);
      hv = pack(LV, vals);
      foreach (hv[i]) m.push_back(hv[i]);
    end
    pkh_ref = shake(rate, m, SEC);
  endtask

  // ------------------------------------------------------------ program
  task automatic gen_row(int r);
    prog.push_back(mk(OP_HIA, 5'b00111, 1, 1, A_SEEDA, r, 2));
    prog.push_back(mk(OP_HOS, 5'(DST_A) | (5'(r % 2) << 3), (r / 2) % 4, 1, 0, 0, CQ));
  endtask

  task automatic keygen_prog();
    prog.push_back(mk(OP_HIA, 5'b00011, 0, 1, A_Z, 0, 2));
    prog.push_back(mk(OP_HOS, 5'(DST_RAW), 0, 1, A_SEEDA, 0, 2));
    prog.push_back(mk(OP_HIA, 5'b01011, 0, 1, A_SEEDSE, 0, SW));
    prog.push_back(mk(OP_HOS, 5'(DST_S), 0, 0, S_BASE, 0, 2 * N));
    prog.push_back(mk(OP_HOS, 5'(DST_E), 0, 0, 0, 0, 2 * N));
    gen_row(0);
    gen_row(1);
    for (int u = 0; u < N / 2; u++)
      for (int j = 0; j < 2; j++) begin
        prog.push_back(mk(OP_MBR, 5'(j) << 4, 0, 0, 0, u, 1));
        prog.push_back(mk(OP_MUL, (5'(j) << 4) | 5'b01000, u % 4, 1, 0, 0, CQ));
        if (u + 1 < N / 2) gen_row(2 * u + 2 + j);
        prog.push_back(mk(OP_MBW, 5'(j) << 4, 0, 0, 0, u, 1));
      end
    prog.push_back(mk(OP_HIA, 5'b00001, 0, 1, A_SEEDA, 0, 2));
    prog.push_back(mk(OP_HIA, 5'b10010, 0, 0, 0, 0, 2 * N));
    prog.push_back(mk(OP_HOS, 5'(DST_RAW), 0, 1, A_PKH, 0, SW));
  endtask

  initial begin
    int t0, bad;
    done = 0; checks = 0; failures = 0; clocks = 0;
    level = LV; host_en = 0; host_we = 0; host_bank = 0; host_addr = '0;
    host_wdata = '0; inst = '0; inst_valid = 0;
    for (int i = 0; i < SEC; i++) seedse.push_back(8'($urandom));
    for (int i = 0; i < 16; i++) z.push_back(8'($urandom));
    build_model();
    wait (start);
    host_write(1, A_SEEDSE, row_of(seedse, 0));
    host_write(1, A_SEEDSE + 1, row_of(seedse, 16));
    host_write(1, A_Z, row_of(z, 0));

    t0 = cyc;
    keygen_prog();
    run_prog();
    clocks = cyc - t0;
    $display("KeyGen-%0d: %0d clocks, %0d with two instructions executing", N, clocks, n_dual);
    host_read_all();
    for (int i = 0; i < 16; i++)
      check(word(1, A_SEEDA, i / 8)[8*(i%8) +: 8] == seeda[i], "seedA");
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < N; c++)
        check(8'(st[r][c]) == sbyte(0, S_BASE + 2 * (c / 4) + r / 4, r % 4, c % 4), "S^T entry");
    bad = 0;
    for (int i = 0; i < N; i++)
      for (int c = 0; c < 8; c++) begin
        check(elem(0, 0, 2, i, c) == b_ref[i][c], "B entry");
        if (elem(0, 0, 2, i, c) != b_ref[i][c]) bad++;
      end
    $display("KeyGen-%0d: B checked, %0d mismatches", N, bad);
    for (int i = 0; i < SEC; i++)
      check(word(1, A_PKH, i / 8)[8*(i%8) +: 8] == pkh_ref[i], "pkh");
    check(n_dual > 0, "overlapped execution never happened");
    done = 1;
  end
endmodule
