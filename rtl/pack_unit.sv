// pack_unit: packs matrix entries into the byte stream that is hashed.
//
// FrodoKEM hashes public keys and ciphertexts in packed form: every entry is
// written with its D bits, most significant bit first, into one continuous bit
// string whose first bit is the most significant bit of the first byte. For
// D = 15 four entries give 60 bits, so four entries per clock do not fill a
// 64-bit word; this unit (the "60to64" converter in front of the hash I/O
// buffer) collects the bits in a 192-bit register and releases a 64-bit word,
// bytes in little-endian order as the hash unit expects, whenever 64 bits are
// available. For D = 16 it only reorders bytes.
//
// Interface: in_data holds four 16-bit entries, entry 0 in bits 15:0 (the
// first in the stream). in_ready is high while at most 64 bits are held, so a
// source with one clock of read latency may issue one read per clock while it
// is high. out_valid/out_ready is a plain handshake. Latency: a word is
// available the clock after the bits completing it arrive.
//
// The name and place of the converter come from the processor's hash unit
// figure; its buffer size and handshake are this design's own.
module pack_unit (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,       // drop any held bits
  input  logic        d16,         // 1: D = 16, 0: D = 15
  input  logic [63:0] in_data,
  input  logic        in_valid,
  output logic        in_ready,
  output logic [63:0] out_data,
  output logic        out_valid,
  input  logic        out_ready
);
  logic [191:0] acc;     // stream bits, first bit at 191
  logic [7:0]   cnt;     // bits held

  logic [63:0]  chunk;   // 4*D bits, left aligned
  logic [7:0]   clen;
  logic         take_out;
  logic [191:0] shifted;
  logic [7:0]   cnt_after;

  always_comb begin
    if (d16)
      chunk = {in_data[15:0], in_data[31:16], in_data[47:32], in_data[63:48]};
    else
      chunk = {in_data[14:0], in_data[30:16], in_data[46:32], in_data[62:48], 4'b0};
    clen = d16 ? 8'd64 : 8'd60;
  end

  assign out_valid = (cnt >= 8'd64);
  assign take_out  = out_valid && out_ready;
  assign in_ready  = (cnt <= 8'd64);

  always_comb begin
    for (int k = 0; k < 8; k++) out_data[8*k +: 8] = acc[191 - 8*k -: 8];
  end

  always_comb begin
    shifted   = take_out ? (acc << 64) : acc;
    cnt_after = take_out ? (cnt - 8'd64) : cnt;
    if (in_valid)
      shifted = shifted | (({chunk, 128'd0}) >> cnt_after);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      cnt <= '0;
    end else if (clear) begin
      acc <= '0;
      cnt <= '0;
    end else begin
      acc <= shifted;
      cnt <= cnt_after + (in_valid ? clen : 8'd0);
    end
  end
endmodule
