// tb_hash_unit: checks the SHAKE sponge against known-answer vectors.
//
// Three messages are absorbed and squeezed: SHAKE128 of 18 bytes (50 words
// out, three squeeze blocks), SHAKE256 of 200 bytes (two absorb blocks) and
// SHAKE128 of exactly one rate block (168 bytes, so padding needs a block of
// its own). Message byte i is (7*i + 3) mod 256. The expected words were
// computed with an independent SHAKE implementation. The source answers
// din_req with one clock of latency, like a RAM read. The clocks taken to
// squeeze the 50 words are checked against the overlapped schedule:
// 24 clocks per block once the first block is out.
module tb_hash_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [63:0] EXP0 [50] = '{
    64'h83d477bea82ca697,
    64'h1b106f7572ce3a63,
    64'he6b9c48867a7ae32,
    64'h369cc1253c5f560d,
    64'h0cec6f5a31b4adce,
    64'h954b6ac69afae1f7,
    64'h754b04c580c7d148,
    64'h92547fbea7a8b36a,
    64'hff596282f4fd2c04,
    64'h2ad473e0c4b5b5fe,
    64'h3450be199fa717e7,
    64'hf6e70499030fedc0,
    64'hf9f8d8ebbfe7cd8f,
    64'h50d9ca45b13a345f,
    64'hce17190949c23668,
    64'ha3777a2b61d366cd,
    64'h10a896e2e43c4d79,
    64'he7311e574c6c54ef,
    64'hb1fa7ebab853b843,
    64'hf2075ffee974c167,
    64'h7236e6fd774241a4,
    64'h978316e30d1a46ed,
    64'h60898b0a4850f2f6,
    64'h4a04b506033d59e1,
    64'haa21537053add5be,
    64'hc1e643bce607a765,
    64'h4a109ef5582c2663,
    64'h5704c1dbf183a16c,
    64'hba17f399292ff852,
    64'h2c3727cb049569a3,
    64'he757e76c137c68d7,
    64'hf0029b44c31994c7,
    64'hb14f1619219fea82,
    64'h84e181def0f0f547,
    64'hc043afba1747ba81,
    64'h8b71a22f6ace5010,
    64'h38a6c64abdb6dca1,
    64'h97841e1d0440fc1d,
    64'ha6a03c67345e7ebb,
    64'ha8ab752889ddf9b2,
    64'hcf4f13975cb9797e,
    64'h8ece6bd4000970d4,
    64'h93c6061e6d2c7595,
    64'h88743ff4784d25a4,
    64'h0b72d67f02864f5e,
    64'he9f16b0ad27c0e9c,
    64'h4812a49f12c3321a,
    64'h7c64e7d0688f15b3,
    64'hb2632ada86629c9d,
    64'h41534a43203fec80};
  localparam logic [63:0] EXP1 [40] = '{
    64'h55ca8e6e2e4824cd,
    64'hf4c6fe6dad1cce6b,
    64'h0aeba0f632ac3bb5,
    64'hc1b38d0125afaa99,
    64'h907b2e4b30c13c59,
    64'hf3308563938af175,
    64'ha0cf82a92424d5df,
    64'hd02bda0b5849bf81,
    64'h7cce05e97f5805c6,
    64'ha8b563a9c8f48158,
    64'h0511bb9b0147bfce,
    64'h9ef8ec6233932a0a,
    64'hce9c605885b5ceac,
    64'h2de83578a7dd4fdd,
    64'hc95a1e41de90616f,
    64'hd1683f4dcaa146f2,
    64'h23386af8c2734465,
    64'hd9a6f5d72af6fc73,
    64'hefffcd76994c28df,
    64'h79ea399c5e87cffd,
    64'hd0826e4caec65490,
    64'hc5c606d25ae10295,
    64'h5117e112f809bc68,
    64'heb6330a7da2f7c4a,
    64'h3edb2ffb2ec62ef1,
    64'h29fe9858c1feb5f5,
    64'hc922bc8691318e0f,
    64'h729961bab0834b0f,
    64'hd4e3f04c68c65fc3,
    64'he6da04b92e20525c,
    64'hfe0bfcd01b1e1df0,
    64'h6dc532068b6d6617,
    64'h9a0933a6eebb94c6,
    64'hf8c998b2336f0c37,
    64'h3afb62a8558b8908,
    64'hc0cad2c74379da5b,
    64'h9bd33dbaed4ca299,
    64'h2ab4f4c55c320936,
    64'h1e2c522fce3566f2,
    64'h0383879a98967356};
  localparam logic [63:0] EXP2 [5] = '{
    64'hd0724b6c3b3ff7d4,
    64'h4477b5801fed455f,
    64'hbf02c26f33cff909,
    64'heefbd3a638ac42fa,
    64'h62d5fbc4ebdc8b3d};

  logic        start, shake256_i;
  logic [63:0] din;
  logic        din_valid, din_last, din_req;
  logic [3:0]  din_bytes;
  logic [63:0] dout;
  logic        dout_valid, dout_ready, absorbing;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  hash_unit dut (.*);

  function automatic logic [63:0] msg_word(int w, int len);
    logic [63:0] r = '0;
    for (int b = 0; b < 8; b++)
      if (8*w + b < len) r[8*b +: 8] = 8'((7*(8*w + b) + 3) & 255);
    return r;
  endfunction

  task automatic run(input bit s256, input int len, input int nw, input int k);
    int nwords = (len + 7) / 8;
    int sent = 0, got = 0, t0 = 0, t1 = 0;
    logic [63:0] e;
    @(negedge clk); start = 1; shake256_i = s256;
    @(negedge clk); start = 0;
    dout_ready = 1;
    while (got < nw) begin
      @(posedge clk);
      if (dout_valid) begin
        case (k)
          0: e = EXP0[got];
          1: e = EXP1[got];
          default: e = EXP2[got];
        endcase
        checks++;
        if (dout !== e) begin
          failures++;
          $display("case %0d word %0d: got %h exp %h", k, got, dout, e);
        end
        if (got == 0) t0 = cyc;
        if (got == nw - 1) t1 = cyc;
        got++;
      end
      // source: a word requested on this edge arrives on the next one
      #1;
      din_valid = 0;
      if (din_req && sent < nwords) begin
        din = msg_word(sent, len); din_valid = 1;
        din_last = (sent == nwords - 1);
        din_bytes = 4'((len - 8*sent) > 8 ? 8 : (len - 8*sent));
        sent++;
      end
    end
    din_valid = 0;
    dout_ready = 0;
    if (k == 0) begin
      // 50 words = 21 + 21 + 8: two more permutations after the first block
      checks++;
      $display("squeeze of 50 words: %0d clocks", t1 - t0);
      if (t1 - t0 > 2*24 + 8 + 2 || t1 - t0 < 49) begin
        failures++;
        $display("squeeze too slow: %0d clocks", t1 - t0);
      end
    end
  endtask

  initial begin
    start = 0; shake256_i = 0; din = '0; din_valid = 0; din_last = 0;
    din_bytes = 0; dout_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 18, 50, 0);
    run(1, 200, 40, 1);
    run(0, 168, 5, 2);
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
