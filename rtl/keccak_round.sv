// keccak_round: one round of the Keccak-f[1600] permutation (FIPS 202),
// purely combinational: theta, rho, pi, chi and iota with the round
// constant of round `rnd` (0..23).
//
// The state is 25 lanes of 64 bits; lane (x, y) is state[x + 5*y], and
// byte k of the sponge input is bits 8k..8k+7 of lane k/8 (little-endian).
// The serial sponge in sha3_unit applies this once per clock cycle.
module keccak_round (
  input  logic [24:0][63:0] state_in,
  input  logic [4:0]        rnd,
  output logic [24:0][63:0] state_out
);

  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};

  // Rotation offsets, indexed x + 5*y.
  localparam int RHO [25] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14};

  function automatic logic [63:0] rotl(input logic [63:0] v, input int r);
    return (r == 0) ? v : ((v << r) | (v >> (64 - r)));
  endfunction

  logic [4:0][63:0]  c, d;
  logic [24:0][63:0] t, b;

  always_comb begin
    for (int x = 0; x < 5; x++)
      c[x] = state_in[x] ^ state_in[x+5] ^ state_in[x+10] ^ state_in[x+15] ^ state_in[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++)
      t[i] = state_in[i] ^ d[i%5];
    // rho and pi: B[y, 2x+3y] = rot(A[x, y], r[x, y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(t[x + 5*y], RHO[x + 5*y]);
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        state_out[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    state_out[0] = state_out[0] ^ RC[rnd];
  end

endmodule
