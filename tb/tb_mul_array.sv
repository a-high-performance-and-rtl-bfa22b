// tb_mul_array: checks both modes of the multiplier array.
//
// MAC: preload a random E block, stream K random A and S blocks with the
// accumulator selected, and compare the one result block with
// E + sum A*S computed here with plain signed arithmetic mod 2^16; done with
// and without sub_en (which must give E - sum A*S). MA: preload one S block,
// stream eight (A, E) pairs and compare each result block. S entries are drawn
// from [-12, 12]. The result must appear exactly three clocks after the beat
// that completes it, and no valid_o may appear during preloads.
module tb_mul_array;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic valid_i, upd_en, sub_en, acc_en, last_i, valid_o;
  logic [1:0][3:0][15:0] port_a, port_e, port_b;
  logic [3:0][3:0][4:0]  port_s;
  int checks = 0, failures = 0;
  int spurious = 0;

  mul_array dut (.*);

  typedef logic [1:0][3:0][15:0] blk_t;
  typedef int sblk_t [4][4];

  function automatic blk_t rnd_blk();
    blk_t b;
    for (int r = 0; r < 2; r++) for (int c = 0; c < 4; c++) b[r][c] = 16'($urandom);
    return b;
  endfunction

  task automatic drive(blk_t a, sblk_t s, blk_t e, bit v, bit u, bit sb, bit ac, bit l);
    @(negedge clk);
    port_a = a; port_e = e;
    for (int k = 0; k < 4; k++) for (int c = 0; c < 4; c++) port_s[k][c] = 5'(s[k][c]);
    valid_i = v; upd_en = u; sub_en = sb; acc_en = ac; last_i = l;
  endtask

  task automatic idle();
    @(negedge clk);
    valid_i = 0; upd_en = 0; acc_en = 0; last_i = 0; port_a = '0;
  endtask

  task automatic expect_blk(blk_t exp, string what);
    int lat = 0;
    idle();
    // the completing beat was sampled one edge ago
    lat = 1;
    while (!valid_o && lat < 10) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("%s latency %0d", what, lat); end
    checks++;
    if (port_b !== exp) begin failures++; $display("%s got %h exp %h", what, port_b, exp); end
  endtask

  task automatic mac(int K, bit sb);
    blk_t e = rnd_blk(), exp;
    blk_t a [256];
    sblk_t s [256];
    exp = e;
    for (int k = 0; k < K; k++) begin
      a[k] = rnd_blk();
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) s[k][i][j] = int'($urandom % 25) - 12;
      for (int r = 0; r < 2; r++) for (int c = 0; c < 4; c++) begin
        int acc = 0;
        for (int i = 0; i < 4; i++) acc += int'(a[k][r][i]) * s[k][i][c];
        exp[r][c] = sb ? 16'(int'(exp[r][c]) - acc) : 16'(int'(exp[r][c]) + acc);
      end
    end
    drive('0, s[0], e, 1, 1, sb, 0, 0);              // preload E
    for (int k = 0; k < K; k++) drive(a[k], s[k], '0, 1, 1, sb, 1, k == K - 1);
    expect_blk(exp, "MAC");
  endtask

  task automatic ma(int I);
    sblk_t s;
    blk_t a, e, exp;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) s[i][j] = int'($urandom % 25) - 12;
    drive('0, s, '0, 1, 1, 0, 0, 0);                 // preload S
    for (int it = 0; it < I; it++) begin
      a = rnd_blk(); e = rnd_blk();
      for (int r = 0; r < 2; r++) for (int c = 0; c < 4; c++) begin
        int acc = int'(e[r][c]);
        for (int i = 0; i < 4; i++) acc += int'(a[r][i]) * s[i][c];
        exp[r][c] = 16'(acc);
      end
      drive(a, '{default: '{default: 99}}, e, 1, 0, 0, 0, 0);   // PortS ignored
      expect_blk(exp, "MA");
    end
  endtask

  always @(negedge clk) if (valid_o && rst_n && !valid_expected) spurious++;
  logic valid_expected;

  initial begin
    valid_expected = 1;
    valid_i = 0; upd_en = 0; sub_en = 0; acc_en = 0; last_i = 0;
    port_a = '0; port_e = '0; port_s = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) mac(1 + $urandom % 40, t % 3 == 2);
    ma(8);
    mac(160, 0);
    // preloads alone must not raise valid_o
    idle(); idle();
    valid_expected = 0;
    drive('0, '{default: '{default: 1}}, rnd_blk(), 1, 1, 0, 0, 0);
    idle(); repeat (5) @(negedge clk);
    checks++;
    if (spurious != 0) begin failures++; $display("valid_o during preload"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
