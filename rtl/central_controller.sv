// central_controller: sequencers, address generators and data path selector.
//
// The dispatch unit hands one instruction at a time to each of six functions
// (hash, MBR, MUL, MBW, EDU, CMP); this module runs each instruction, drives
// the function unit and the two memory banks, and pulses fun_done when it is
// finished. Four sequencers exist: the hash sequencer (HIA, HOS), the array
// sequencer (MBR, MUL, MBW, which never run together), the EDU sequencer
// (ENC, DEC) and the CMP sequencer. Each one builds its memory requests
// combinationally from its counters (the address generators); the data path
// selector ORs the requests per bank port, and each sequencer picks its read
// data from the bank port it used one clock earlier. The hash sequencer reads
// through the second read port, so that its seed reads never meet the
// multiplier array's operand reads. The dispatch unit only
// lets a hash instruction overlap a matrix instruction when they use
// different memory ports, so the OR never mixes two live requests.
//
// Memory layout (see README): a matrix with C word columns per row pair keeps
// entry (R, c) in RAM 2*(R%2) + ((c/2)%2 ^ (R/2)%2), address base + (R/2)*C +
// c/4, half c%2. A 2x4 block is then one address in all four RAMs, and a 4x2
// block two addresses, so both the direct and the transposed operand of the
// multiplier array are read in one clock. S^T and S' keep 8-bit entries:
// row r, columns 4t..4t+3 in RAM r%4, address S_BASE + 2t + r/4. Byte
// strings use 64-bit words: word W at address base + W/2, RAM pair W%2.
//
// Instruction semantics (fields of instr_t):
//   HIA  absorb cnt words from (bank, base); fl[0] restart the sponge (part[0]
//        forces SHAKE128), fl[1] this is the end of the message, fl[2] put the
//        2-byte index idx in front, fl[3] put 0x5F in front, fl[4] read cnt
//        4-entry groups of a matrix and pack them (idx[0]: the matrix is
//        stored transposed, read its rows as columns).
//   HOS  squeeze cnt words; fl[2:0] destination (hos_dst_e), fl[3] odd A row,
//        part A partition. A rows go to (bank, base) with C = n/4.
//   MBR  preload: MAC mode (fl[0] = 0) block (idx, fl[4]) of the addend,
//        fl[2] read it transposed; MA mode the S block (idx, fl[4]).
//   MUL  MAC: cnt beats, left operand from the A buffer (fl[3]), a transposed
//        matrix (fl[2]) or a direct block times the identity; S block (k, fl[4]).
//        MA: cnt beats over i, A^T from partitions part, part+1 of (bank,
//        base), addend/result block (i, fl[4]) at idx in the other bank.
//        fl[1] subtracts the products.
//   MBW  write the result block (idx, fl[4]) to (bank, base), fl[2] transposed.
//   ENC  cnt is ignored: message words at (bank, base) -> 8x8 matrix at idx in
//        the other bank.  DEC: 8x8 matrix at (bank, base) -> words at idx.
//   CMP  strings of cnt words at (bank, base): ss0, ss1, ss2, result; result =
//        (ss0 == ss2) ? ss0 : ss1, flag cmp_eq.
//
// The functions, the memory organisation (two banks of four RAMs, 2x4 and 4x2
// block access, S stored with 8-bit entries) and the address generator /
// counter / data path selector split follow the processor description. The
// instruction fields, base addresses and exact sequencing are this design's.
module central_controller
  import frodo_pkg::*;
#(
  parameter int unsigned CAW = 11   // bank address width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  level_e               level,
  // dispatch unit
  input  logic [N_FUNC-1:0]    fun_start,
  input  instr_t               fun_inst [N_FUNC],
  output logic [N_FUNC-1:0]    fun_done,
  // hash unit and packer
  output logic                 h_start,
  output logic                 h_shake256,
  output logic [63:0]          h_din,
  output logic                 h_din_valid,
  output logic                 h_din_last,
  output logic [3:0]           h_din_bytes,
  input  logic                 h_din_req,
  input  logic [63:0]          h_dout,
  input  logic                 h_dout_valid,
  output logic                 h_dout_ready,
  output logic                 p_clear,
  output logic                 p_d16,
  output logic [63:0]          p_in,
  output logic                 p_in_valid,
  input  logic                 p_in_ready,
  input  logic [63:0]          p_out,
  input  logic                 p_out_valid,
  output logic                 p_out_ready,
  // sampler
  output logic [63:0]          s_din,
  output logic                 s_din_valid,
  input  logic [63:0]          s_dout,
  input  logic                 s_dout_valid,
  // multiplier array
  output logic                 m_valid,
  output logic                 m_upd,
  output logic                 m_sub,
  output logic                 m_acc,
  output logic                 m_last,
  output logic [1:0][3:0][15:0] m_a,
  output logic [3:0][3:0][4:0]  m_s,
  output logic [1:0][3:0][15:0] m_e,
  input  logic [1:0][3:0][15:0] m_b,
  input  logic                 m_valid_o,
  // encode/decode unit
  output logic                 e_start,
  output logic                 e_mode,
  input  logic                 e_rd_req,
  output logic [63:0]          e_rd_data,
  output logic                 e_rd_valid,
  input  logic [63:0]          e_out,
  input  logic                 e_out_valid,
  input  logic                 e_done,
  // memory banks [bank]
  output logic [1:0]                   b_rd0_en,
  output logic [1:0][3:0][CAW-1:0]      b_rd0_addr,
  input  logic [1:0][3:0][31:0]        b_rd0_data,
  output logic [1:0]                   b_rd1_en,
  output logic [1:0][3:0][CAW-1:0]      b_rd1_addr,
  input  logic [1:0][3:0][31:0]        b_rd1_data,
  output logic [1:0][3:0][1:0]         b_wr_en,
  output logic [1:0][3:0][CAW-1:0]      b_wr_addr,
  output logic [1:0][3:0][31:0]        b_wr_data,
  // host access (only while the processor is idle): one 128-bit bank row
  input  logic                 host_en,
  input  logic                 host_we,
  input  logic                 host_bank,
  input  logic [CAW-1:0]        host_addr,
  input  logic [127:0]         host_wdata,
  output logic [127:0]         host_rdata,
  // status
  output logic                 cmp_eq
);
  typedef logic [3:0][CAW-1:0] addr4_t;
  typedef logic [3:0][31:0]   data4_t;
  typedef struct packed {
    logic   en;
    addr4_t addr;
  } rd_t;
  typedef struct packed {
    logic [3:0][1:0] we;
    addr4_t          addr;
    data4_t          data;
  } wr_t;
  typedef logic [1:0][3:0][15:0] blk_t;

  localparam int unsigned NSRC = 5;   // host, hash, array, EDU, CMP
  localparam int unsigned SH = 0, SHS = 1, SAR = 2, SED = 3, SCM = 4;

  rd_t rd0 [NSRC][2];
  rd_t rd1 [NSRC][2];
  wr_t wr  [NSRC][2];

  logic [10:0] n_w;
  logic [8:0]  cq;       // n/4: word columns of an A buffer row pair
  assign n_w = level_n(level);
  assign cq  = n_w[10:2];

  // ------------------------------------------------------------------
  // address generators
  // ------------------------------------------------------------------
  // 4 consecutive entries of row R = 2u+rr, columns 4v..4v+3 at addr
  function automatic wr_t wr_quad(logic [CAW-1:0] addr, logic rr, logic p, logic [63:0] q);
    wr_t w;
    w = '0;
    w.we[{rr, p}]    = 2'b11;  w.addr[{rr, p}]  = addr;  w.data[{rr, p}]  = q[31:0];
    w.we[{rr, ~p}]   = 2'b11;  w.addr[{rr, ~p}] = addr;  w.data[{rr, ~p}] = q[63:32];
    return w;
  endfunction

  function automatic logic [63:0] rd_quad(data4_t d, logic rr, logic p);
    return {d[{rr, ~p}], d[{rr, p}]};
  endfunction

  // entries k = 0..3 of column r, rows 4t+k, of an n x 8 matrix (C = 2)
  function automatic logic [1:0] tq_ram(int unsigned k, logic [2:0] r);
    return {1'(k), r[1] ^ 1'(k >> 1)};
  endfunction
  function automatic logic [CAW-1:0] tq_addr(logic [CAW-1:0] base, logic [CAW-1:0] t, int unsigned k,
                                            logic [2:0] r);
    return base + ((2*t + CAW'(k >> 1)) << 1) + CAW'(r[2]);
  endfunction

  function automatic wr_t wr_quad_t(logic [CAW-1:0] base, logic [CAW-1:0] t, logic [2:0] r,
                                    logic [63:0] q);
    wr_t w;
    w = '0;
    for (int unsigned k = 0; k < 4; k++) begin
      w.we[tq_ram(k, r)][r[0]]      = 1'b1;
      w.addr[tq_ram(k, r)]          = tq_addr(base, t, k, r);
      w.data[tq_ram(k, r)]          = {q[16*k +: 16], q[16*k +: 16]};
    end
    return w;
  endfunction

  function automatic logic [63:0] rd_quad_t(data4_t d, logic [2:0] r);
    logic [63:0] q;
    for (int unsigned k = 0; k < 4; k++) q[16*k +: 16] = d[tq_ram(k, r)][16*r[0] +: 16];
    return q;
  endfunction

  // 2x4 block in row pair u: one address in all RAMs
  function automatic rd_t rd_all(logic [CAW-1:0] addr);
    rd_t r;
    r.en = 1'b1;
    for (int m = 0; m < 4; m++) r.addr[m] = addr;
    return r;
  endfunction

  function automatic blk_t blk_direct(data4_t d, logic p);
    blk_t b;
    for (int rr = 0; rr < 2; rr++)
      for (int h = 0; h < 2; h++)
        for (int e = 0; e < 2; e++)
          b[rr][2*h+e] = d[{1'(rr), 1'(h) ^ p}][16*e +: 16];
    return b;
  endfunction

  function automatic wr_t wr_block(logic [CAW-1:0] addr, logic p, blk_t b);
    wr_t w;
    for (int rr = 0; rr < 2; rr++)
      for (int h = 0; h < 2; h++) begin
        w.we[{1'(rr), 1'(h) ^ p}]   = 2'b11;
        w.addr[{1'(rr), 1'(h) ^ p}] = addr;
        w.data[{1'(rr), 1'(h) ^ p}] = {b[rr][2*h+1], b[rr][2*h]};
      end
    return w;
  endfunction

  // 4x2 block: rows 2*u0 .. 2*u0+3, columns 2i, 2i+1, C word columns
  function automatic logic [1:0] tb_ram(int unsigned k, logic [CAW-1:0] u0, logic [CAW-1:0] i);
    logic [CAW-1:0] u;
    u = u0 + CAW'(k >> 1);
    return {1'(k), i[0] ^ u[0]};
  endfunction

  function automatic rd_t rd_tblock(logic [CAW-1:0] base, logic [CAW-1:0] u0, logic [CAW-1:0] i,
                                    logic [CAW-1:0] c);
    rd_t r;
    r.en = 1'b1;
    r.addr = '0;
    for (int unsigned k = 0; k < 4; k++)
      r.addr[tb_ram(k, u0, i)] = base + (u0 + CAW'(k >> 1)) * c + (i >> 1);
    return r;
  endfunction

  // the transposed block as the array's left operand: out[e][k] = M[2u0+k][2i+e]
  function automatic blk_t blk_trans(data4_t d, logic [CAW-1:0] u0, logic [CAW-1:0] i);
    blk_t b;
    for (int unsigned k = 0; k < 4; k++)
      for (int e = 0; e < 2; e++)
        b[e][k] = d[tb_ram(k, u0, i)][16*e +: 16];
    return b;
  endfunction

  function automatic wr_t wr_tblock(logic [CAW-1:0] base, logic [CAW-1:0] u0, logic [CAW-1:0] i,
                                    blk_t b);
    wr_t w;
    w = '0;
    for (int unsigned k = 0; k < 4; k++) begin
      w.we[tb_ram(k, u0, i)]   = 2'b11;
      w.addr[tb_ram(k, u0, i)] = base + (u0 + CAW'(k >> 1)) * 2 + (i >> 1);
      w.data[tb_ram(k, u0, i)] = {b[1][k], b[0][k]};
    end
    return w;
  endfunction

  // 64-bit word W of a byte string
  function automatic rd_t rd_word(logic [CAW-1:0] base, logic [13:0] w);
    return rd_all(base + CAW'(w >> 1));
  endfunction
  function automatic logic [63:0] word_sel(data4_t d, logic odd);
    return odd ? {d[3], d[2]} : {d[1], d[0]};
  endfunction
  function automatic wr_t wr_word(logic [CAW-1:0] base, logic [13:0] w, logic [63:0] q);
    return wr_quad(base + CAW'(w >> 1), w[0], 1'b0, q);
  endfunction

  // ------------------------------------------------------------------
  // host port
  // ------------------------------------------------------------------
  logic host_bank_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_bank_q <= 1'b0;
    else        host_bank_q <= host_bank;
  end
  assign host_rdata = b_rd0_data[host_bank_q];

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      rd0[SH][b] = '0; rd1[SH][b] = '0; wr[SH][b] = '0;
    end
    if (host_en) begin
      rd0[SH][host_bank] = rd_all(host_addr);
      if (host_we) begin
        for (int m = 0; m < 4; m++) begin
          wr[SH][host_bank].we[m]   = 2'b11;
          wr[SH][host_bank].addr[m] = host_addr;
          wr[SH][host_bank].data[m] = host_wdata[32*m +: 32];
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // hash sequencer (HIA / HOS)
  // ------------------------------------------------------------------
  instr_t      hs_i;
  logic        hs_act;
  logic [13:0] hs_iss;        // reads issued / words taken
  logic [13:0] hs_push;       // words pushed to the hash (or packer)
  logic [13:0] hs_out;        // packed words forwarded
  logic        hs_rv;         // read data arrives this clock
  logic        hs_rodd;       // word parity of that read
  logic [CAW-1:0] hs_rt;       // transposed-pack column group of that read
  logic [2:0]  hs_rr;         // transposed-pack row of that read
  logic [63:0] hs_carry;
  logic [1:0]  hs_pre;        // prefix bytes
  logic [CAW-1:0] hs_t;        // column group counter
  logic [CAW-1:0] hs_r;        // row counter
  logic [13:0] hs_pk_words;   // packed words expected
  // HOS pending write
  logic        pw_v;
  hos_dst_e    pw_dst;
  logic [13:0] pw_w;
  logic [CAW-1:0] pw_t, pw_r;
  logic [63:0] pw_raw;

  logic hs_hia, hs_packed, hs_issue, hs_extra, hs_final, hs_take;
  logic [63:0] hs_word;
  hos_dst_e hs_dst;

  assign hs_hia    = (hs_i.op == OP_HIA);
  assign hs_packed = hs_i.fl[4];
  assign hs_dst    = hos_dst_e'(hs_i.fl[2:0]);

  assign h_start    = fun_start[FN_HASH] && fun_inst[FN_HASH].op == OP_HIA && fun_inst[FN_HASH].fl[0];
  assign h_shake256 = level_shake256(level) && !fun_inst[FN_HASH].part[0];
  assign p_clear    = fun_start[FN_HASH];
  assign p_d16      = (level_d(level) == 5'd16);

  // reads: one per clock while the consumer can take two more
  assign hs_issue = hs_act && hs_hia && (hs_iss < hs_i.cnt) &&
                    (hs_packed ? p_in_ready : h_din_req);
  assign hs_extra = hs_act && hs_hia && !hs_packed && (hs_pre != 2'd0) &&
                    (hs_push == hs_i.cnt) && !hs_rv && h_din_req;

  always_comb begin
    hs_word = word_sel(b_rd1_data[hs_i.bank], hs_rodd);
    case (hs_pre)
      2'd1:    h_din = (hs_word << 8)  | hs_carry;
      2'd2:    h_din = (hs_word << 16) | hs_carry;
      default: h_din = hs_word;
    endcase
    h_din_valid = 1'b0;
    h_din_last  = 1'b0;
    h_din_bytes = 4'd8;
    hs_final    = 1'b0;
    p_out_ready = hs_act && hs_hia && hs_packed && h_din_req;
    if (hs_act && hs_hia) begin
      if (hs_packed) begin
        if (p_out_valid && h_din_req) begin
          h_din       = p_out;
          h_din_valid = 1'b1;
          hs_final    = (hs_out == hs_pk_words - 14'd1);
          h_din_last  = hs_final && hs_i.fl[1];
        end
      end else if (hs_rv) begin
        h_din_valid = 1'b1;
        hs_final    = (hs_pre == 2'd0) && (hs_push == hs_i.cnt - 14'd1);
        h_din_last  = hs_final && hs_i.fl[1];
      end else if (hs_extra) begin
        h_din       = hs_carry;
        h_din_valid = 1'b1;
        h_din_bytes = {2'b0, hs_pre};
        hs_final    = 1'b1;
        h_din_last  = hs_i.fl[1];
      end
    end
  end

  always_comb begin
    p_in       = hs_i.idx[0] ? rd_quad_t(b_rd1_data[hs_i.bank], hs_rr)
                            : rd_quad(b_rd1_data[hs_i.bank], hs_rodd, hs_rt[0]);
    p_in_valid = hs_act && hs_hia && hs_packed && hs_rv;
  end

  // memory requests of the hash sequencer
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      rd0[SHS][b] = '0; rd1[SHS][b] = '0; wr[SHS][b] = '0;
    end
    if (hs_issue) begin
      if (!hs_packed)
        rd1[SHS][hs_i.bank] = rd_word(hs_i.base, hs_iss);
      else if (hs_i.idx[0]) begin
        rd1[SHS][hs_i.bank].en = 1'b1;
        for (int unsigned k = 0; k < 4; k++)
          rd1[SHS][hs_i.bank].addr[tq_ram(k, hs_r[2:0])] = tq_addr(hs_i.base, hs_t, k, hs_r[2:0]);
      end else
        // group q: row q/2, word column q%2
        rd1[SHS][hs_i.bank] = rd_all(hs_i.base + CAW'({hs_iss[13:2], hs_iss[0]}));
    end
    if (pw_v) begin
      case (pw_dst)
        DST_RAW: wr[SHS][hs_i.bank] = wr_word(hs_i.base, pw_w, pw_raw);
        DST_A:   wr[SHS][hs_i.bank] = wr_quad(hs_i.base + CAW'(hs_i.part) * CAW'(cq) + CAW'(pw_w),
                                              hs_i.fl[3], hs_i.part[0], pw_raw);
        DST_S: begin
          wr[SHS][hs_i.bank].we[pw_r[1:0]]   = 2'b11;
          wr[SHS][hs_i.bank].addr[pw_r[1:0]] = hs_i.base + (pw_t << 1) + (pw_r >> 2);
          wr[SHS][hs_i.bank].data[pw_r[1:0]] = {s_dout[55:48], s_dout[39:32], s_dout[23:16], s_dout[7:0]};
        end
        DST_E:   wr[SHS][hs_i.bank] = wr_quad(hs_i.base + ((pw_r >> 1) << 1) + pw_t,
                                              pw_r[0], pw_r[1], s_dout);
        default: wr[SHS][hs_i.bank] = wr_quad_t(hs_i.base, pw_t, pw_r[2:0], s_dout);
      endcase
    end
  end

  assign h_dout_ready = hs_act && !hs_hia && (hs_iss < hs_i.cnt);
  assign hs_take      = h_dout_ready && h_dout_valid;
  assign s_din        = h_dout;
  assign s_din_valid  = hs_take && (hs_dst == DST_S || hs_dst == DST_E || hs_dst == DST_ET);

  logic [CAW-1:0] hs_twrap;
  always_comb begin
    // columns groups per row: S^T, E' rows have n/4 groups, E rows 2
    hs_twrap = (hs_hia || hs_dst != DST_E) ? CAW'(cq) - CAW'(1) : CAW'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hs_i <= '0; hs_act <= 1'b0; hs_iss <= '0; hs_push <= '0; hs_out <= '0;
      hs_rv <= 1'b0; hs_rodd <= 1'b0; hs_rt <= '0; hs_rr <= '0; hs_carry <= '0; hs_pre <= '0;
      hs_t <= '0; hs_r <= '0; hs_pk_words <= '0;
      pw_v <= 1'b0; pw_dst <= DST_RAW; pw_w <= '0; pw_t <= '0; pw_r <= '0; pw_raw <= '0;
    end else begin
      if (fun_start[FN_HASH]) begin
        hs_i    <= fun_inst[FN_HASH];
        hs_act  <= 1'b1;
        hs_iss  <= '0; hs_push <= '0; hs_out <= '0; hs_t <= '0; hs_r <= '0;
        hs_rv   <= 1'b0;
        if (fun_inst[FN_HASH].fl[2]) begin
          hs_pre   <= 2'd2;
          hs_carry <= {48'd0, 4'd0, fun_inst[FN_HASH].idx};
        end else if (fun_inst[FN_HASH].fl[3]) begin
          hs_pre   <= 2'd1;
          hs_carry <= 64'h5F;
        end else begin
          hs_pre   <= 2'd0;
          hs_carry <= '0;
        end
        // 4*D bits per group: D = 16 -> one word, D = 15 -> 15/16 word
        hs_pk_words <= p_d16 ? fun_inst[FN_HASH].cnt
                             : fun_inst[FN_HASH].cnt - (fun_inst[FN_HASH].cnt >> 4);
      end else if (hs_act) begin
        // ---- HIA
        hs_rv <= hs_issue;
        if (hs_issue) begin
          hs_iss  <= hs_iss + 14'd1;
          hs_rodd <= hs_packed ? hs_iss[1] : hs_iss[0];
          hs_rt   <= hs_packed ? CAW'(hs_iss >> 2) : hs_t;
          hs_rr   <= hs_r[2:0];
          if (hs_t == CAW'(cq) - CAW'(1)) begin
            hs_t <= '0;
            hs_r <= hs_r + CAW'(1);
          end else
            hs_t <= hs_t + CAW'(1);
        end
        if (h_din_valid && !hs_packed) begin
          hs_push <= hs_push + 14'd1;
          case (hs_pre)
            2'd1:    hs_carry <= {56'd0, hs_word[63:56]};
            2'd2:    hs_carry <= {48'd0, hs_word[63:48]};
            default: hs_carry <= '0;
          endcase
        end
        if (h_din_valid && hs_packed) hs_out <= hs_out + 14'd1;
        // ---- HOS
        pw_v <= hs_take;
        if (hs_take) begin
          hs_iss <= hs_iss + 14'd1;
          pw_dst <= hs_dst;
          pw_w   <= hs_iss;
          pw_t   <= hs_t;
          pw_r   <= hs_r;
          pw_raw <= h_dout;
          if (hs_t == hs_twrap) begin
            hs_t <= '0;
            hs_r <= hs_r + CAW'(1);
          end else
            hs_t <= hs_t + CAW'(1);
        end
        if (hs_hia ? (h_din_valid && hs_final)
                   : (pw_v && hs_iss == hs_i.cnt && !hs_take))
          hs_act <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------------
  // array sequencer (MBR / MUL / MBW)
  // ------------------------------------------------------------------
  instr_t      ar_i;
  logic        ar_act;
  opcode_e     ar_op;
  logic [13:0] ar_k;          // beats issued
  logic [13:0] ar_w;          // MA results written
  logic        ar_rv;         // read data arrives this clock
  logic [13:0] ar_rk;         // its beat
  logic [CAW-1:0] ar_bi;       // block row of MBR/MBW/identity
  logic          ar_j;
  logic          ar_ma;       // MA mode
  logic          ar_ident;    // MAC pass with the identity as right operand
  logic          ar_issue;    // a MUL beat is issued this clock

  assign ar_ma   = ar_i.fl[0];
  assign ar_ident = !ar_i.fl[3] && !ar_i.fl[2];
  assign ar_bi    = CAW'(ar_i.idx);
  assign ar_j     = ar_i.fl[4];
  assign ar_issue = ar_act && (ar_op == OP_MUL) && (ar_k < ar_i.cnt);

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      rd0[SAR][b] = '0; rd1[SAR][b] = '0; wr[SAR][b] = '0;
    end
    if (ar_act && ar_op == OP_MBR && ar_k == 14'd0) begin
      if (ar_ma)
        rd1[SAR][0] = rd_all(S_BASE + (ar_bi << 1) + CAW'(ar_j));
      else if (ar_i.fl[2])
        rd0[SAR][ar_i.bank] = rd_tblock(ar_i.base, CAW'(ar_j) << 1, ar_bi, CAW'(2));
      else
        rd0[SAR][ar_i.bank] = rd_all(ar_i.base + (ar_bi << 1) + CAW'(ar_j));
    end
    if (ar_issue) begin
      if (ar_ma) begin
        rd0[SAR][ar_i.bank]  = rd_tblock(ar_i.base, CAW'(ar_i.part), CAW'(ar_k), CAW'(cq));
        rd0[SAR][!ar_i.bank] = rd_all(CAW'(ar_i.idx) + CAW'(ar_k << 1) + CAW'(ar_j));
      end else begin
        if (ar_i.fl[3])
          rd0[SAR][ar_i.bank] = rd_all(ar_i.base + CAW'(ar_i.part) * CAW'(cq) + CAW'(ar_k));
        else if (ar_i.fl[2])
          rd0[SAR][ar_i.bank] = rd_tblock(ar_i.base, CAW'(ar_k << 1), ar_bi, CAW'(2));
        else
          rd0[SAR][ar_i.bank] = rd_all(ar_i.base + (ar_bi << 1) + CAW'(ar_j));
        if (!ar_ident)
          rd1[SAR][0] = rd_all(S_BASE + CAW'(ar_k << 1) + CAW'(ar_j));
      end
    end
    if (ar_act && ar_op == OP_MBW) begin
      if (ar_i.fl[2])
        wr[SAR][ar_i.bank] = wr_tblock(ar_i.base, CAW'(ar_j) << 1, ar_bi, m_b);
      else
        wr[SAR][ar_i.bank] = wr_block(ar_i.base + (ar_bi << 1) + CAW'(ar_j), ar_bi[0], m_b);
    end
    if (ar_act && ar_op == OP_MUL && ar_ma && m_valid_o)
      wr[SAR][!ar_i.bank] = wr_block(CAW'(ar_i.idx) + CAW'(ar_w << 1) + CAW'(ar_j), ar_w[0], m_b);
  end

  // array inputs, from the data read one clock earlier
  always_comb begin
    m_valid = 1'b0; m_upd = 1'b0; m_sub = ar_i.fl[1]; m_acc = 1'b0; m_last = 1'b0;
    m_a = '0; m_s = '0; m_e = '0;
    for (int a = 0; a < 4; a++)
      for (int m = 0; m < 4; m++)
        m_s[a][m] = b_rd1_data[0][m][8*a +: 5];
    if (ar_act && ar_rv) begin
      m_valid = 1'b1;
      if (ar_op == OP_MBR) begin
        m_upd = 1'b1;
        if (!ar_ma)
          m_e = ar_i.fl[2] ? blk_trans(b_rd0_data[ar_i.bank], CAW'(ar_j) << 1, ar_bi)
                           : blk_direct(b_rd0_data[ar_i.bank], ar_bi[0]);
      end else if (ar_ma) begin
        m_a = blk_trans(b_rd0_data[ar_i.bank], CAW'(ar_i.part), CAW'(ar_rk));
        m_e = blk_direct(b_rd0_data[!ar_i.bank], ar_rk[0]);
      end else begin
        m_upd  = 1'b1;
        m_acc  = 1'b1;
        m_last = (ar_rk == ar_i.cnt - 14'd1);
        if (ar_i.fl[3])
          m_a = blk_direct(b_rd0_data[ar_i.bank], ar_i.part[0]);
        else if (ar_i.fl[2])
          m_a = blk_trans(b_rd0_data[ar_i.bank], CAW'(ar_rk << 1), ar_bi);
        else
          m_a = blk_direct(b_rd0_data[ar_i.bank], ar_bi[0]);
        if (ar_ident)
          for (int a = 0; a < 4; a++)
            for (int m = 0; m < 4; m++)
              m_s[a][m] = (a == m) ? 5'd1 : 5'd0;
      end
    end
  end

  logic ar_done;
  always_comb begin
    ar_done = 1'b0;
    if (ar_act) begin
      case (ar_op)
        OP_MBR:  ar_done = ar_rv;
        OP_MBW:  ar_done = 1'b1;
        default: ar_done = m_valid_o && (!ar_ma || ar_w == ar_i.cnt - 14'd1);
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_i <= '0; ar_act <= 1'b0; ar_op <= OP_MBR; ar_k <= '0; ar_w <= '0;
      ar_rv <= 1'b0; ar_rk <= '0;
    end else begin
      if (fun_start[FN_MBR] || fun_start[FN_MUL] || fun_start[FN_MBW]) begin
        ar_i   <= fun_start[FN_MBR] ? fun_inst[FN_MBR] :
                  fun_start[FN_MUL] ? fun_inst[FN_MUL] : fun_inst[FN_MBW];
        ar_op  <= fun_start[FN_MBR] ? OP_MBR : fun_start[FN_MUL] ? OP_MUL : OP_MBW;
        ar_act <= 1'b1;
        ar_k   <= '0;
        ar_w   <= '0;
        ar_rv  <= 1'b0;
      end else if (ar_act) begin
        ar_rv <= 1'b0;
        if (ar_op == OP_MBR && ar_k == 14'd0) begin
          ar_k  <= 14'd1;
          ar_rv <= 1'b1;
        end
        if (ar_issue) begin
          ar_k  <= ar_k + 14'd1;
          ar_rv <= 1'b1;
          ar_rk <= ar_k;
        end
        if (ar_op == OP_MUL && ar_ma && m_valid_o) ar_w <= ar_w + 14'd1;
        if (ar_done) ar_act <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------------
  // EDU sequencer (ENC / DEC)
  // ------------------------------------------------------------------
  instr_t      ed_i;
  logic        ed_act;
  logic [13:0] ed_rd, ed_wr;
  logic        ed_rv;
  logic [13:0] ed_rq;
  logic        ed_dec;

  assign ed_dec  = (ed_i.op == OP_DEC);
  assign e_start = fun_start[FN_EDU];
  assign e_mode  = (fun_inst[FN_EDU].op == OP_DEC);
  assign e_rd_valid = ed_act && ed_rv;
  assign e_rd_data  = ed_dec ? rd_quad(b_rd0_data[ed_i.bank], ed_rq[1], ed_rq[2])
                             : word_sel(b_rd0_data[ed_i.bank], ed_rq[0]);

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      rd0[SED][b] = '0; rd1[SED][b] = '0; wr[SED][b] = '0;
    end
    if (ed_act && e_rd_req)
      rd0[SED][ed_i.bank] = ed_dec ? rd_all(ed_i.base + CAW'({ed_rd[13:2], ed_rd[0]}))
                                   : rd_word(ed_i.base, ed_rd);
    if (ed_act && e_out_valid)
      wr[SED][!ed_i.bank] = ed_dec ? wr_word(CAW'(ed_i.idx), ed_wr, e_out)
                                   : wr_quad(CAW'(ed_i.idx) + CAW'({ed_wr[13:2], ed_wr[0]}),
                                             ed_wr[1], ed_wr[2], e_out);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ed_i <= '0; ed_act <= 1'b0; ed_rd <= '0; ed_wr <= '0; ed_rv <= 1'b0; ed_rq <= '0;
    end else begin
      if (fun_start[FN_EDU]) begin
        ed_i   <= fun_inst[FN_EDU];
        ed_act <= 1'b1;
        ed_rd  <= '0; ed_wr <= '0; ed_rv <= 1'b0;
      end else if (ed_act) begin
        ed_rv <= e_rd_req;
        if (e_rd_req) begin
          ed_rd <= ed_rd + 14'd1;
          ed_rq <= ed_rd;
        end
        if (e_out_valid) ed_wr <= ed_wr + 14'd1;
        if (e_done) ed_act <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------------
  // CMP sequencer
  // ------------------------------------------------------------------
  instr_t      cm_i;
  logic        cm_act, cm_ph;  // phase 0 compare, 1 copy
  logic [13:0] cm_w;
  logic        cm_rv, cm_rodd;
  logic [13:0] cm_rw;
  logic        cm_eq;

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      rd0[SCM][b] = '0; rd1[SCM][b] = '0; wr[SCM][b] = '0;
    end
    if (cm_act && cm_w < cm_i.cnt) begin
      if (!cm_ph) begin
        rd0[SCM][cm_i.bank] = rd_word(cm_i.base, cm_w);
        rd1[SCM][cm_i.bank] = rd_word(cm_i.base, cm_w + (cm_i.cnt << 1));
      end else
        rd0[SCM][cm_i.bank] = rd_word(cm_i.base, cm_eq ? cm_w : cm_w + cm_i.cnt);
    end
    if (cm_act && cm_ph && cm_rv)
      wr[SCM][cm_i.bank] = wr_word(cm_i.base, cm_rw + 14'(3 * cm_i.cnt),
                                   word_sel(b_rd0_data[cm_i.bank], cm_rodd));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cm_i <= '0; cm_act <= 1'b0; cm_ph <= 1'b0; cm_w <= '0; cm_rv <= 1'b0; cm_rodd <= 1'b0;
      cm_rw <= '0; cm_eq <= 1'b1; cmp_eq <= 1'b0;
    end else begin
      if (fun_start[FN_CMP]) begin
        cm_i   <= fun_inst[FN_CMP];
        cm_act <= 1'b1;
        cm_ph  <= 1'b0;
        cm_w   <= '0;
        cm_rv  <= 1'b0;
        cm_eq  <= 1'b1;
      end else if (cm_act) begin
        cm_rv <= (cm_w < cm_i.cnt);
        if (cm_w < cm_i.cnt) begin
          cm_w    <= cm_w + 14'd1;
          cm_rw   <= cm_w;
          cm_rodd <= cm_w[0] ^ (!cm_ph ? 1'b0 : (cm_eq ? 1'b0 : cm_i.cnt[0]));
        end
        if (!cm_ph && cm_rv &&
            word_sel(b_rd0_data[cm_i.bank], cm_rw[0]) !=
            word_sel(b_rd1_data[cm_i.bank], cm_rw[0] ^ 1'b0))
          cm_eq <= 1'b0;
        if (!cm_ph && !cm_rv && cm_w == cm_i.cnt) begin
          cm_ph <= 1'b1;
          cm_w  <= '0;
        end
        if (cm_ph && cm_rv && cm_rw == cm_i.cnt - 14'd1) begin
          cm_act <= 1'b0;
          cmp_eq <= cm_eq;
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // done pulses
  // ------------------------------------------------------------------
  always_comb begin
    fun_done = '0;
    fun_done[FN_HASH] = hs_act && !fun_start[FN_HASH] &&
                        (hs_hia ? (h_din_valid && hs_final)
                                : (pw_v && hs_iss == hs_i.cnt && !hs_take));
    fun_done[FN_MBR]  = ar_done && ar_op == OP_MBR;
    fun_done[FN_MUL]  = ar_done && ar_op == OP_MUL;
    fun_done[FN_MBW]  = ar_done && ar_op == OP_MBW;
    fun_done[FN_EDU]  = ed_act && e_done;
    fun_done[FN_CMP]  = cm_act && cm_ph && cm_rv && cm_rw == cm_i.cnt - 14'd1;
  end

  // ------------------------------------------------------------------
  // data path selector: OR of the requests of all sources
  // ------------------------------------------------------------------
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      b_rd0_en[b] = 1'b0; b_rd0_addr[b] = '0;
      b_rd1_en[b] = 1'b0; b_rd1_addr[b] = '0;
      b_wr_en[b]  = '0;   b_wr_addr[b]  = '0; b_wr_data[b] = '0;
      for (int s = 0; s < NSRC; s++) begin
        b_rd0_en[b]   |= rd0[s][b].en;
        b_rd0_addr[b] |= rd0[s][b].addr;
        b_rd1_en[b]   |= rd1[s][b].en;
        b_rd1_addr[b] |= rd1[s][b].addr;
        b_wr_en[b]    |= wr[s][b].we;
        b_wr_addr[b]  |= wr[s][b].addr;
        b_wr_data[b]  |= wr[s][b].data;
      end
    end
  end

  // two sources never use the same bank port in the same clock
  logic [1:0][2:0] n_rd0, n_rd1, n_wr;
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      n_rd0[b] = '0; n_rd1[b] = '0; n_wr[b] = '0;
      for (int s = 0; s < NSRC; s++) begin
        n_rd0[b] = n_rd0[b] + {2'b0, rd0[s][b].en};
        n_rd1[b] = n_rd1[b] + {2'b0, rd1[s][b].en};
        n_wr[b]  = n_wr[b]  + {2'b0, |wr[s][b].we};
      end
    end
  end
  a_one_user_per_bank_port: assert property (@(posedge clk) disable iff (!rst_n)
    n_rd0[0] <= 3'd1 && n_rd0[1] <= 3'd1 && n_rd1[0] <= 3'd1 && n_rd1[1] <= 3'd1 &&
    n_wr[0] <= 3'd1 && n_wr[1] <= 3'd1);
endmodule
