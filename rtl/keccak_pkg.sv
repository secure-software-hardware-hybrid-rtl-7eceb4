// keccak_pkg: state layout and round function of Keccak-f[1600] (FIPS 202),
// plus the byte-level constants of KMAC128 (NIST SP 800-185).
//
// The state is 25 lanes of 64 bits, lane (x,y) at index x+5*y. Packed as
// state_t, byte i of the state (the order in which message bytes are
// absorbed) sits in bits [8*i+7 : 8*i] of the flat 1600-bit vector.
package keccak_pkg;

  localparam int unsigned LANES      = 25;
  localparam int unsigned STATE_BITS = 1600;
  localparam int unsigned NROUNDS    = 24;

  typedef logic [63:0]            lane_t;
  typedef lane_t [LANES-1:0]      state_t;

  // Rate of KMAC128 / cSHAKE128: 1344 bits = 168 bytes (capacity 256 bits).
  localparam int unsigned KMAC128_RATE_BYTES = 168;

  // Rotation offsets of the rho step, indexed by x+5*y.
  localparam int unsigned RHO [LANES] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14
  };

  // Round constants of the iota step.
  localparam lane_t RC [NROUNDS] = '{
    64'h0000_0000_0000_0001, 64'h0000_0000_0000_8082,
    64'h8000_0000_0000_808A, 64'h8000_0000_8000_8000,
    64'h0000_0000_0000_808B, 64'h0000_0000_8000_0001,
    64'h8000_0000_8000_8081, 64'h8000_0000_0000_8009,
    64'h0000_0000_0000_008A, 64'h0000_0000_0000_0088,
    64'h0000_0000_8000_8009, 64'h0000_0000_8000_000A,
    64'h0000_0000_8000_808B, 64'h8000_0000_0000_008B,
    64'h8000_0000_0000_8089, 64'h8000_0000_0000_8003,
    64'h8000_0000_0000_8002, 64'h8000_0000_0000_0080,
    64'h0000_0000_0000_800A, 64'h8000_0000_8000_000A,
    64'h8000_0000_8000_8081, 64'h8000_0000_0000_8080,
    64'h0000_0000_8000_0001, 64'h8000_0000_8000_8008
  };

  function automatic lane_t rotl64(lane_t v, int unsigned n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  // One round: theta, rho, pi, chi, iota.
  function automatic state_t keccak_round(state_t a, logic [4:0] rnd);
    lane_t  c [5];
    lane_t  d [5];
    state_t b;
    state_t r;
    for (int x = 0; x < 5; x++)
      c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl64(c[(x+1)%5], 1);
    // theta, then rho and pi: B[y, 2x+3y] = rot(A[x,y] ^ D[x], RHO[x,y])
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl64(a[x+5*y] ^ d[x], RHO[x+5*y]);
    // chi
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++)
        r[x+5*y] = b[x+5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    r[0] = r[0] ^ RC[rnd];
    return r;
  endfunction

  // Number of bytes of the integer part of left_encode/right_encode.
  function automatic int unsigned enc_nbytes(int unsigned v);
    int unsigned n = 1;
    while (n < 4 && (v >> (8*n)) != 0) n++;
    return n;
  endfunction

endpackage
