// hash_unit: SHAKE128 / SHAKE256 sponge with overlapped I/O.
//
// A 1600-bit state register and one Keccak round (keccak_round) form a loop
// that runs one round per clock, 24 clocks per permutation. Next to it sits a
// 1344-bit I/O buffer, 21 64-bit words, that is loaded and drained one word
// per clock by register shifting. While the core permutes block k, the buffer
// collects block k+1 (absorb) or hands out block k-1 (squeeze); a full buffer
// is injected (XORed into the rate part) in the same clock as the first round
// of the next permutation, so back-to-back blocks cost 24 clocks each. The
// rate is 21 words for SHAKE128 and 17 words for SHAKE256; 64 divides both,
// so no word ever straddles two blocks.
//
// Interface
//   start     : clears the state and selects SHAKE256 (shake256_i = 1) or
//               SHAKE128 for the next message. Only given while idle.
//   din       : message words, little-endian bytes, pushed with din_valid into
//               a four-entry FIFO. din_req is high while the FIFO can take two
//               more words, so a source with one cycle of read latency may
//               issue one read per clock while din_req is high. din_last marks
//               the final word, din_bytes (1..8) its number of valid bytes.
//               Padding (0x1F ... 0x80) is added inside the unit.
//   dout      : squeezed words, valid/ready handshake; squeezing goes on for
//               as long as the consumer takes words.
//   absorbing : high from start until the last padded block is injected.
//
// The structure (state register, single round core, 1344-bit shared I/O
// buffer, 64-bit shifting port, input FIFO) follows the processor
// description; the FIFO depth, the handshakes and the padding-on-the-fly are
// this design's own choices. Reset is asynchronous, active low.
module hash_unit (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        shake256_i,
  input  logic [63:0] din,
  input  logic        din_valid,
  input  logic        din_last,
  input  logic [3:0]  din_bytes,
  output logic        din_req,
  output logic [63:0] dout,
  output logic        dout_valid,
  input  logic        dout_ready,
  output logic        absorbing
);
  localparam int unsigned BUF_WORDS = 21;

  typedef enum logic [2:0] {
    PH_IDLE, PH_ABSORB, PH_PAD, PH_FINAL, PH_SQWAIT, PH_SQUEEZE
  } phase_e;

  phase_e        phase;
  logic          sha256;
  logic [1599:0] state;
  logic [1599:0] round_in, round_out;
  logic [4:0]    rnd;
  logic          perm_busy;
  logic [63:0]   iobuf [BUF_WORDS];
  logic [4:0]    wcnt;           // words held in the buffer
  logic          pad_first;      // next pad word starts with 0x1F
  logic [4:0]    rate_words;

  // ---------------------------------------------------------------- FIFO
  typedef struct packed {
    logic [63:0] data;
    logic        last;
    logic [3:0]  bytes;
  } fifo_e;
  fifo_e       fifo [4];
  logic [1:0]  f_rd, f_wr;
  logic [2:0]  f_cnt;
  logic        f_pop;
  fifo_e       f_head;

  assign din_req = (f_cnt <= 3'd1) && (phase == PH_ABSORB);
  assign f_head  = fifo[f_rd];

  assign rate_words = sha256 ? 5'd17 : 5'd21;

  // ------------------------------------------------------------ core loop
  logic        inject, sq_load, perm_start;
  logic [1599:0] blk;

  always_comb begin
    blk = '0;
    for (int i = 0; i < BUF_WORDS; i++) begin
      if (sha256) begin
        if (i < 17) blk[64*i +: 64] = iobuf[i+4];
      end else begin
        blk[64*i +: 64] = iobuf[i];
      end
    end
  end

  // a full absorb buffer is injected as soon as the core is free
  assign inject  = (phase == PH_ABSORB || phase == PH_PAD || phase == PH_FINAL) &&
                   (wcnt == rate_words) && !perm_busy;
  // squeeze: empty buffer, idle core -> copy rate part out and permute again
  assign sq_load = (phase == PH_SQWAIT && !perm_busy) ||
                   (phase == PH_SQUEEZE && !perm_busy && wcnt == 5'd0);
  assign perm_start = inject || sq_load;

  assign round_in = inject ? (state ^ blk) : state;

  keccak_round u_round (
    .state_i (round_in),
    .round_i (perm_start ? 5'd0 : rnd),
    .state_o (round_out)
  );

  // ----------------------------------------------------------- next word
  logic        take_word;        // a message word enters the buffer
  logic        pad_word;         // a padding word enters the buffer
  logic [63:0] in_word;
  logic        at_last_pos;

  assign at_last_pos = (wcnt == rate_words - 5'd1);
  assign take_word   = (phase == PH_ABSORB) && (f_cnt != 3'd0) && (wcnt < rate_words);
  assign pad_word    = (phase == PH_PAD) && (wcnt < rate_words);
  assign f_pop       = take_word;

  always_comb begin
    in_word = '0;
    if (take_word) begin
      in_word = f_head.data;
      if (f_head.last) begin
        for (int b = 0; b < 8; b++)
          if (b >= int'(f_head.bytes)) in_word[8*b +: 8] = 8'h00;
        if (f_head.bytes != 4'd8) in_word[8*f_head.bytes[2:0] +: 8] = 8'h1F;
        if (f_head.bytes != 4'd8 && at_last_pos) in_word[63:56] = in_word[63:56] | 8'h80;
      end
    end else if (pad_word) begin
      if (pad_first) in_word[7:0] = 8'h1F;
      if (at_last_pos) in_word[63:56] = in_word[63:56] | 8'h80;
    end
  end

  assign dout       = iobuf[0];
  assign dout_valid = (phase == PH_SQUEEZE) && (wcnt != 5'd0);
  assign absorbing  = (phase == PH_ABSORB) || (phase == PH_PAD) || (phase == PH_FINAL);

  // ------------------------------------------------------------ registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= PH_IDLE;
      sha256    <= 1'b0;
      state     <= '0;
      rnd       <= '0;
      perm_busy <= 1'b0;
      wcnt      <= '0;
      pad_first <= 1'b0;
      f_rd      <= '0;
      f_wr      <= '0;
      f_cnt     <= '0;
      for (int i = 0; i < BUF_WORDS; i++) iobuf[i] <= '0;
      for (int i = 0; i < 4; i++) fifo[i] <= '0;
    end else if (start) begin
      phase     <= PH_ABSORB;
      sha256    <= shake256_i;
      state     <= '0;
      rnd       <= '0;
      perm_busy <= 1'b0;
      wcnt      <= '0;
      pad_first <= 1'b0;
      f_rd      <= '0;
      f_wr      <= '0;
      f_cnt     <= '0;
    end else begin
      // FIFO
      if (din_valid) begin
        fifo[f_wr] <= '{data: din, last: din_last, bytes: din_bytes};
        f_wr       <= f_wr + 2'd1;
      end
      if (f_pop) f_rd <= f_rd + 2'd1;
      f_cnt <= f_cnt + {2'b0, din_valid} - {2'b0, f_pop};

      // permutation
      if (perm_start) begin
        state     <= round_out;
        rnd       <= 5'd1;
        perm_busy <= 1'b1;
      end else if (perm_busy) begin
        state <= round_out;
        rnd   <= rnd + 5'd1;
        if (rnd == 5'd23) perm_busy <= 1'b0;
      end

      // buffer
      if (take_word || pad_word) begin
        for (int i = 0; i < BUF_WORDS - 1; i++) iobuf[i] <= iobuf[i+1];
        iobuf[BUF_WORDS-1] <= in_word;
        wcnt <= wcnt + 5'd1;
        if (pad_word) pad_first <= 1'b0;
        if (take_word && f_head.last) begin
          if (f_head.bytes == 4'd8) begin
            phase     <= PH_PAD;
            pad_first <= 1'b1;
          end else if (at_last_pos) begin
            phase <= PH_FINAL;
          end else begin
            phase     <= PH_PAD;
            pad_first <= 1'b0;
          end
        end
        if (pad_word && at_last_pos) phase <= PH_FINAL;
      end else if (inject) begin
        wcnt <= '0;
        if (phase == PH_FINAL) phase <= PH_SQWAIT;
      end else if (sq_load) begin
        for (int i = 0; i < BUF_WORDS; i++)
          iobuf[i] <= (i < int'(rate_words)) ? state[64*i +: 64] : 64'd0;
        wcnt  <= rate_words;
        phase <= PH_SQUEEZE;
      end else if (dout_valid && dout_ready) begin
        for (int i = 0; i < BUF_WORDS - 1; i++) iobuf[i] <= iobuf[i+1];
        iobuf[BUF_WORDS-1] <= '0;
        wcnt <= wcnt - 5'd1;
      end
    end
  end

  // the FIFO is never overrun by a source that honours din_req
  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(din_valid && f_cnt == 3'd4 && !f_pop));
endmodule
