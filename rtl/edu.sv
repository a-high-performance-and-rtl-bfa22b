// edu: the Encode/Decode unit.
//
// Encode turns a 64*B-bit message into the 8x8 matrix Encode(u): each group of
// B message bits k becomes the entry k * q/2^B, i.e. k placed in the top B of
// the D bits. Decode is the inverse with rounding: an entry x (mod 2^D) gives
// ((x + 2^(D-B-1)) >> (D-B)) mod 2^B. Message bits are taken least significant
// first; entry 4t+i of the row-major matrix is the i-th entry of output t.
//
// Both directions run through one 72-bit shift register (18 four-bit segments).
// Encode: 64-bit message words are appended above the bits still held, and each
// clock 4B bits leave from the bottom as one 1x4 block of four entries. 64 is
// not a multiple of 12, so for B = 3 a word may arrive while up to eight bits
// are still held; the two segments beyond 64 bits absorb that and the flow
// never stalls. Decode: each clock one 1x4 block enters as 4B bits, and a
// 64-bit message word leaves whenever 64 bits are held. Sixteen blocks are
// processed either way; the shifting takes 16 clocks.
//
// Interface: start with mode (0 encode, 1 decode) and the level. rd_req asks
// for the next input (a message word or an entry block), rd_data/rd_valid must
// answer exactly one clock later. out_data/out_valid carry encoded blocks
// (four 16-bit entries) or decoded message words; done pulses with the last.
//
// The 72-bit register, the four-wide datapath and the shift of B segments per
// clock follow the processor description; the handshake is this design's.
module edu
  import frodo_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  level_e      level,
  input  logic        start,
  input  logic        mode,       // 0 encode, 1 decode
  output logic        rd_req,
  input  logic [63:0] rd_data,
  input  logic        rd_valid,
  output logic [63:0] out_data,
  output logic        out_valid,
  output logic        done,
  output logic        busy
);
  logic [71:0] sr;
  logic [6:0]  cnt;        // bits held
  logic [4:0]  nreq;       // inputs requested
  logic [4:0]  nout;       // entry blocks produced (encode) / consumed (decode)
  logic        run, dec;

  logic [2:0]  b;
  logic [4:0]  d;
  logic [6:0]  step;       // 4B
  assign b    = level_b(level);
  assign d    = level_d(level);
  assign step = {2'b0, b, 2'b0};

  logic [71:0] avail;
  logic [7:0]  availcnt;
  logic        emit;
  logic [15:0] dec_bits;
  logic        rd_valid_pending;   // an encode word read is in flight

  // decoded bits of one incoming block
  always_comb begin
    dec_bits = '0;
    for (int i = 0; i < 4; i++) begin
      logic [15:0] x, r;
      x = rd_data[16*i +: 16] & ((16'd1 << d) - 16'd1);
      r = (x + (16'd1 << (d - {2'b0, b} - 5'd1))) >> (d - {2'b0, b});
      r = r & ((16'd1 << b) - 16'd1);
      dec_bits = dec_bits | (r << (int'(b) * i));
    end
  end

  always_comb begin
    avail    = sr;
    availcnt = {1'b0, cnt};
    if (rd_valid) begin
      if (!dec) avail = sr | ({8'd0, rd_data} << cnt);
      else      avail = sr | ({56'd0, dec_bits} << cnt);
      availcnt = {1'b0, cnt} + (dec ? {1'b0, step} : 8'd64);
    end
    emit = run && (dec ? (availcnt >= 8'd64) : (availcnt >= {1'b0, step}));
  end

  logic [15:0] enc_k [4];
  always_comb begin
    out_data = '0;
    for (int i = 0; i < 4; i++) begin
      enc_k[i] = 16'(avail >> (int'(b) * i)) & ((16'd1 << b) - 16'd1);
      if (!dec) out_data[16*i +: 16] = enc_k[i] << (d - {2'b0, b});
    end
    if (dec) out_data = avail[63:0];
  end
  assign out_valid = emit;

  // encode: ask for a word while fewer than two blocks' worth of bits are held
  // decode: ask for a block every clock
  assign rd_req = run && !rd_valid_pending &&
                  (dec ? (nreq < 5'd16)
                       : (nreq < {2'b0, b} && cnt < {step[5:0], 1'b0}));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr <= '0; cnt <= '0; nreq <= '0; nout <= '0; run <= 1'b0; dec <= 1'b0;
      done <= 1'b0; rd_valid_pending <= 1'b0;
    end else begin
      done <= 1'b0;
      rd_valid_pending <= rd_req && !dec;
      if (start) begin
        sr <= '0; cnt <= '0; nreq <= '0; nout <= '0; run <= 1'b1; dec <= mode;
      end else if (run) begin
        if (rd_req) nreq <= nreq + 5'd1;
        if (emit) begin
          sr  <= dec ? (avail >> 64) : (avail >> step);
          cnt <= 7'(availcnt - (dec ? 8'd64 : {1'b0, step}));
        end else begin
          sr  <= avail;
          cnt <= availcnt[6:0];
        end
        if (dec ? rd_valid : emit) begin
          nout <= nout + 5'd1;
          if (nout == 5'd15) begin
            run  <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  assign busy = run;
endmodule
