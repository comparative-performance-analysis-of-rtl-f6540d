// keccak_round: one combinational round of the Keccak-f[1600] permutation
// (FIPS 202): theta, rho, pi, chi and iota.
//
// The 1600-bit state is a flat vector of 25 lanes of 64 bits; lane (x, y) sits
// at bits [64*(x+5y) +: 64], so byte i of a message absorbed into the state is
// bits [8i +: 8] (little-endian lanes, as in FIPS 202). round selects the
// iota round constant (0..23). The rotation offsets and round constants are
// the standard ones. Purely combinational: the sponge registers the state and
// applies this round once per clock, so a full permutation takes 24 cycles.
// The paper names a SHA-3/Keccak core; this round function is the standard
// one, and the one-round-per-cycle structure is this design's choice.
module keccak_round (
  input  logic [1599:0] state_in,
  input  logic [4:0]    round,
  output logic [1599:0] state_out
);

  localparam int unsigned ROT [25] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14
  };

  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008
  };

  function automatic logic [63:0] rotl(logic [63:0] v, int unsigned n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  logic [63:0] a [25];
  logic [63:0] c [5];
  logic [63:0] d [5];
  logic [63:0] b [25];
  logic [63:0] o [25];

  always_comb begin
    for (int i = 0; i < 25; i++) a[i] = state_in[64*i +: 64];
    // theta
    for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++) a[i] = a[i] ^ d[i%5];
    // rho and pi: B[y, 2x+3y] = rot(A[x, y], r[x, y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x + 5*y], ROT[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        o[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    o[0] = o[0] ^ RC[(round < 5'd24) ? round : 5'd0];
    for (int i = 0; i < 25; i++) state_out[64*i +: 64] = o[i];
  end

endmodule
