// keccak_round -- one round of the Keccak-f[1600] permutation (combinational).
//
// The 1600-bit state is 25 lanes of 64 bits, lane (x,y) at bits
// [64*(x+5y) +: 64]. The round applies theta (column parity), rho (lane
// rotations), pi (lane transposition), chi (the only non-linear step:
// a ^= ~b & c along rows) and iota (round constant into lane (0,0)), i.e. the
// shift / XOR / AND / NOT network of the PRNG's Permutation sub-unit. Round
// constants and rotation offsets are those of the SHA-3 standard.
module keccak_round (
  input  logic [1599:0] state_in,
  input  logic [4:0]    round,
  output logic [1599:0] state_out
);
  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};
  // rotation offset of lane (x,y), indexed [x][y]
  localparam int ROT [5][5] = '{
    '{ 0, 36,  3, 41, 18},
    '{ 1, 44, 10, 45,  2},
    '{62,  6, 43, 15, 61},
    '{28, 55, 25, 21, 56},
    '{27, 20, 39,  8, 14}};

  function automatic logic [63:0] rotl(input logic [63:0] v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  logic [63:0] a [5][5];
  logic [63:0] b [5][5];
  logic [63:0] c [5];
  logic [63:0] d [5];

  always_comb begin
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x][y] = state_in[64*(x+5*y) +: 64];
    // theta
    for (int x = 0; x < 5; x++)
      c[x] = a[x][0] ^ a[x][1] ^ a[x][2] ^ a[x][3] ^ a[x][4];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x][y] = a[x][y] ^ d[x];
    // rho and pi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y][(2*x+3*y)%5] = rotl(a[x][y], ROT[x][y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x][y] = b[x][y] ^ (~b[(x+1)%5][y] & b[(x+2)%5][y]);
    // iota
    a[0][0] = a[0][0] ^ RC[round];
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        state_out[64*(x+5*y) +: 64] = a[x][y];
  end
endmodule
