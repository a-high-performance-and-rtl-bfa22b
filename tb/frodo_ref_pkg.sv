// frodo_ref_pkg: behavioural reference models for the testbenches.
//
// A plain software-style SHAKE128/SHAKE256 (Keccak-f[1600] on 25 lanes,
// padding 0x1F ... 0x80) working on byte queues, the FrodoKEM CDF sampler
// rule, the matrix packing rule (D bits per entry, most significant bit
// first) and Encode/Decode. Written independently of the RTL (no shared code
// apart from the level tables of frodo_pkg) so that the end-to-end testbench
// can check the processor's results against it. Not synthesisable; used only
// in simulation.
package frodo_ref_pkg;
  import frodo_pkg::*;

  typedef byte unsigned bytes_t[$];

  function automatic logic [63:0] rol(logic [63:0] v, int s);
    return (s == 0) ? v : ((v << s) | (v >> (64 - s)));
  endfunction

  function automatic void keccak_f(ref logic [63:0] a[25]);
    logic [63:0] rc [24] = '{
      64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A,
      64'h8000000080008000, 64'h000000000000808B, 64'h0000000080000001,
      64'h8000000080008081, 64'h8000000000008009, 64'h000000000000008A,
      64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
      64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089,
      64'h8000000000008003, 64'h8000000000008002, 64'h8000000000000080,
      64'h000000000000800A, 64'h800000008000000A, 64'h8000000080008081,
      64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};
    int r_off [25] = '{0, 1, 62, 28, 27, 36, 44, 6, 55, 20, 3, 10, 43, 25, 39,
                       41, 45, 15, 21, 8, 18, 2, 61, 56, 14};
    logic [63:0] c [5];
    logic [63:0] b [25];
    for (int rnd = 0; rnd < 24; rnd++) begin
      for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
      for (int x = 0; x < 5; x++)
        for (int y = 0; y < 5; y++)
          a[x+5*y] ^= c[(x+4)%5] ^ rol(c[(x+1)%5], 1);
      for (int x = 0; x < 5; x++)
        for (int y = 0; y < 5; y++)
          b[y + 5*((2*x+3*y)%5)] = rol(a[x+5*y], r_off[x+5*y]);
      for (int x = 0; x < 5; x++)
        for (int y = 0; y < 5; y++)
          a[x+5*y] = b[x+5*y] ^ (~b[(x+1)%5+5*y] & b[(x+2)%5+5*y]);
      a[0] ^= rc[rnd];
    end
  endfunction

  // SHAKE with rate in bytes (168 = SHAKE128, 136 = SHAKE256)
  function automatic bytes_t shake(int rate, bytes_t msg, int outlen);
    logic [63:0] st [25];
    bytes_t m, out;
    m = msg;
    m.push_back(8'h1F);
    while (m.size() % rate != 0) m.push_back(8'h00);
    m[m.size()-1] = m[m.size()-1] | 8'h80;
    for (int i = 0; i < 25; i++) st[i] = '0;
    for (int blk = 0; blk < m.size() / rate; blk++) begin
      for (int i = 0; i < rate; i++)
        st[i/8][8*(i%8) +: 8] ^= m[blk*rate + i];
      keccak_f(st);
    end
    while (out.size() < outlen) begin
      for (int i = 0; i < rate && out.size() < outlen; i++) out.push_back(st[i/8][8*(i%8) +: 8]);
      if (out.size() < outlen) keccak_f(st);
    end
    return out;
  endfunction

  function automatic int level_rate(level_e l, bit force128);
    return (force128 || !level_shake256(l)) ? 168 : 136;
  endfunction

  // one sample from a 16-bit random value
  function automatic int sample(level_e l, logic [15:0] r);
    int e = 0;
    for (int z = 0; z < CDF_LEN; z++)
      if (int'(r[15:1]) > int'(cdf_entry(l, z))) e++;
    return r[0] ? -e : e;
  endfunction

  // Pack: entries of D bits, most significant first, into bytes
  function automatic bytes_t pack(level_e l, int unsigned vals[$]);
    bytes_t out;
    int unsigned d = level_d(l);
    logic [7:0] cur = '0;
    int nb = 0;
    foreach (vals[k])
      for (int bit_i = int'(d) - 1; bit_i >= 0; bit_i--) begin
        cur = {cur[6:0], 1'(vals[k] >> bit_i)};
        nb++;
        if (nb == 8) begin out.push_back(cur); nb = 0; cur = '0; end
      end
    return out;
  endfunction

  // Encode entry k of a message (B bits per entry, little-endian bit order)
  function automatic int unsigned encode_entry(level_e l, bytes_t mu, int k);
    int unsigned b = level_b(l);
    int unsigned v = 0;
    for (int i = 0; i < int'(b); i++) begin
      int bitpos = k * int'(b) + i;
      v |= ((mu[bitpos/8] >> (bitpos % 8)) & 1) << i;
    end
    return v << (level_d(l) - b);
  endfunction
endpackage
