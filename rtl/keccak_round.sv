// keccak_round: one round of the Keccak-f[1600] permutation, combinational.
//
// theta, rho, pi, chi and iota applied to a 1600-bit state in the usual lane
// order (lane x + 5*y occupies bits 64*(x+5y) +: 64, byte 0 of the absorbed
// string in the low byte of lane 0). The round index selects the iota round
// constant. The hash unit registers the output and feeds it back, so one
// round is computed per clock and a permutation takes 24 clocks. The round
// function is the FIPS 202 one; splitting it as one round per cycle follows
// the processor description.
module keccak_round (
  input  logic [1599:0] state_i,
  input  logic [4:0]    round_i,
  output logic [1599:0] state_o
);
  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A,
    64'h8000000080008000, 64'h000000000000808B, 64'h0000000080000001,
    64'h8000000080008081, 64'h8000000000008009, 64'h000000000000008A,
    64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089,
    64'h8000000000008003, 64'h8000000000008002, 64'h8000000000000080,
    64'h000000000000800A, 64'h800000008000000A, 64'h8000000080008081,
    64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};

  // rotation offsets r[x][y], stored as index x + 5*y
  localparam int ROT [25] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14};

  function automatic logic [63:0] rotl(logic [63:0] v, int s);
    return (s == 0) ? v : ((v << s) | (v >> (64 - s)));
  endfunction

  logic [63:0] a [25];
  logic [63:0] b [25];
  logic [63:0] c [5];
  logic [63:0] d [5];

  always_comb begin
    for (int i = 0; i < 25; i++) a[i] = state_i[64*i +: 64];
    // theta
    for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++) a[i] = a[i] ^ d[i%5];
    // rho and pi: B[y][2x+3y] = rot(A[x][y], r[x][y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x + 5*y], ROT[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    a[0] = a[0] ^ ((round_i < 5'd24) ? RC[round_i] : 64'd0);
    for (int i = 0; i < 25; i++) state_o[64*i +: 64] = a[i];
  end
endmodule
