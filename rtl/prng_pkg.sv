// prng_pkg: types, sizes and constants shared by the distributed PRNG engines.
//
// The engines turn a hash input string seed || q || id_seg into a segment of
// len words, each w bits wide, that are uniformly distributed modulo q. The
// sizes below are the example parameters of the scheme: a 288-bit seed, a
// 32-bit modulus field, a 16-bit segment index (336 input bits in all), a
// hash output of r = 1344 bits cut into t = 42 words of w = 32 bits.
//
// The hash is a member of the Keccak family: SHAKE128 (24 rounds) or
// KangarooTwelve (12 rounds, TurboSHAKE128 for a single short message).
// The round constants and rotation offsets are those of the Keccak standard.
//
// Bit and byte order (a choice of this design, not fixed by the scheme):
//  * the 336-bit input vector {seed, q, id_seg} is read as a byte string
//    most significant byte first, so byte 0 is seed[287:280];
//  * the Keccak state is a packed array of 25 64-bit lanes, lane x+5y at
//    bits [64(x+5y) +: 64]; byte j of the state is state[8j +: 8], which is
//    the little-endian lane convention of the standard;
//  * hash output word i is state[32i +: 32], bytes 4i..4i+3 little-endian.
package prng_pkg;

  localparam int unsigned W          = 32;          // coefficient word size
  localparam int unsigned R_BITS     = 1344;        // hash output length r
  localparam int unsigned T_WORDS    = R_BITS / W;  // t = floor(r/w) = 42
  localparam int unsigned SEED_W     = 288;
  localparam int unsigned Q_W        = 32;
  localparam int unsigned ID_W       = 16;
  localparam int unsigned MSG_W      = SEED_W + Q_W + ID_W;  // 336
  localparam int unsigned MSG_BYTES  = MSG_W / 8;            // 42
  localparam int unsigned RATE_BYTES = 168;                  // Keccak[256] rate

  // Hash function selected for a generation instruction.
  typedef enum logic {
    HASH_SHAKE128 = 1'b0,
    HASH_K12      = 1'b1
  } hash_mode_e;

  typedef logic [24:0][63:0] keccak_state_t;

  // What every engine of the array receives for one limb: the seed common to
  // all engines and limbs, the modulus of the limb and the hash function.
  typedef struct packed {
    logic [SEED_W-1:0] seed;
    logic [Q_W-1:0]    q;
    hash_mode_e        mode;
  } limb_cmd_t;

  // Rotation offsets of the rho step, indexed by lane x+5y.
  localparam int unsigned RHO [25] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14
  };

  // Round constants of the iota step, rounds 0..23.
  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A,
    64'h8000000080008000, 64'h000000000000808B, 64'h0000000080000001,
    64'h8000000080008081, 64'h8000000000008009, 64'h000000000000008A,
    64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089,
    64'h8000000000008003, 64'h8000000000008002, 64'h8000000000000080,
    64'h000000000000800A, 64'h800000008000000A, 64'h8000000080008081,
    64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008
  };

  function automatic logic [63:0] rotl64(input logic [63:0] v, input int unsigned n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  // One round of Keccak-p[1600]: theta, rho, pi, chi, iota.
  function automatic keccak_state_t keccak_round(input keccak_state_t a,
                                                 input logic [63:0] rc);
    logic [4:0][63:0] c, d;
    keccak_state_t    b, e;
    for (int x = 0; x < 5; x++)
      c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl64(c[(x+1)%5], 1);
    // theta, then rho and pi: B[y, 2x+3y] = rot(A[x,y] ^ D[x], RHO[x,y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl64(a[x + 5*y] ^ d[x], RHO[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        e[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    e[0] = e[0] ^ rc;
    return e;
  endfunction

endpackage
