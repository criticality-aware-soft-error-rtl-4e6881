// keccak_pkg: types and step functions of the Keccak-f[1600] permutation
// (FIPS 202), shared by the round constant generator, the pipelined
// permutation and the SHA-3-512 sponge.
//
// The 1600-bit state is a flat vector; lane (x,y) occupies bits
// [64*(x+5*y) +: 64], which is also the byte order in which SHA-3 absorbs a
// message (lane 0 first, little-endian within a lane).
//
// The round is split, as in the sub-pipelined architecture this design
// follows, into Theta alone and Rho+Pi+Chi+Iota together, so that a register
// can sit between them.  Both halves are pure combinational functions.
package keccak_pkg;

  localparam int unsigned STATE_W = 1600;
  localparam int unsigned LANE_W  = 64;
  // SHA-3-512: capacity 1024, rate 576 bits = 18 words of 32 bits.
  localparam int unsigned RATE_W  = 576;
  localparam int unsigned DIGEST_W = 512;

  typedef logic [STATE_W-1:0] kstate_t;
  typedef logic [LANE_W-1:0]  lane_t;

  // Rho rotation offsets, indexed [x][y].
  localparam int RHO_OFS [5][5] = '{
    '{ 0, 36,  3, 41, 18},
    '{ 1, 44, 10, 45,  2},
    '{62,  6, 43, 15, 61},
    '{28, 55, 25, 21, 56},
    '{27, 20, 39,  8, 14}
  };

  function automatic lane_t rol64(lane_t v, int unsigned n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  // Theta: XOR every lane with the parities of two neighbouring columns.
  function automatic kstate_t theta(kstate_t a);
    lane_t   c [5];
    lane_t   d [5];
    kstate_t r;
    for (int x = 0; x < 5; x++)
      c[x] = a[64*x +: 64] ^ a[64*(x+5) +: 64] ^ a[64*(x+10) +: 64]
           ^ a[64*(x+15) +: 64] ^ a[64*(x+20) +: 64];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rol64(c[(x+1)%5], 1);
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++)
        r[64*(x+5*y) +: 64] = a[64*(x+5*y) +: 64] ^ d[x];
    return r;
  endfunction

  // Rho (lane rotation), Pi (lane permutation), Chi (non-linear row step)
  // and Iota (round constant into lane (0,0)).
  function automatic kstate_t rho_pi_chi_iota(kstate_t a, lane_t rc);
    lane_t   b [5][5];
    kstate_t r;
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y][(2*x+3*y)%5] = rol64(a[64*(x+5*y) +: 64], RHO_OFS[x][y]);
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++)
        r[64*(x+5*y) +: 64] = b[x][y] ^ (~b[(x+1)%5][y] & b[(x+2)%5][y]);
    r[63:0] = r[63:0] ^ rc;
    return r;
  endfunction

endpackage
