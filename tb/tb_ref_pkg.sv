// tb_ref_pkg: reference model used by the testbenches.
//
// A plain, loop-based model of Keccak-p[1600], SHAKE128, KangarooTwelve
// (single-node case) and of the segment-generation function, written from
// the standards and the scheme's algorithm and deliberately different in
// form from the RTL: the state is a 5x5 array, the rho offsets are derived
// from the (x,y) -> (y, 2x+3y) walk and the round constants from the LFSR
// rc(t), instead of tables. self_test() checks the model against published
// test vectors (Keccak-f[1600] of the zero state, SHAKE128 and
// KangarooTwelve of the empty string) so that the model itself is trusted.
package tb_ref_pkg;

  typedef logic [63:0] lane_t;
  typedef lane_t       st5_t [5][5];   // [x][y]
  typedef byte unsigned bytes_t [$];

  function automatic lane_t rol(lane_t v, int n);
    n = n % 64;
    if (n == 0) return v;
    return (v << n) | (v >> (64 - n));
  endfunction

  // rc(t) of the Keccak standard: LFSR with polynomial x^8+x^6+x^5+x^4+1
  function automatic bit rc_bit(int t);
    logic [8:0] r;
    r = 9'h001;
    for (int i = 1; i <= t % 255; i++) begin
      r = r << 1;
      if (r[8]) r = r ^ 9'h171;
    end
    return r[0];
  endfunction

  function automatic lane_t round_const(int ir);
    lane_t c = '0;
    for (int j = 0; j <= 6; j++)
      c[(1 << j) - 1] = rc_bit(j + 7 * ir);
    return c;
  endfunction

  function automatic void rho_offsets(output int off [5][5]);
    int x, y, nx;
    foreach (off[i, j]) off[i][j] = 0;
    x = 1; y = 0;
    for (int t = 0; t < 24; t++) begin
      off[x][y] = ((t + 1) * (t + 2) / 2) % 64;
      nx = y;
      y  = (2 * x + 3 * y) % 5;
      x  = nx;
    end
  endfunction

  // Keccak-p[1600, nr]: rounds 24-nr .. 23
  function automatic void keccak_p(inout st5_t a, input int nr);
    lane_t c [5], d [5];
    st5_t  b;
    int    off [5][5];
    rho_offsets(off);
    for (int ir = 24 - nr; ir < 24; ir++) begin
      for (int x = 0; x < 5; x++) c[x] = a[x][0] ^ a[x][1] ^ a[x][2] ^ a[x][3] ^ a[x][4];
      for (int x = 0; x < 5; x++) d[x] = c[(x + 4) % 5] ^ rol(c[(x + 1) % 5], 1);
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) a[x][y] ^= d[x];
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) a[x][y] = rol(a[x][y], off[x][y]);
      // pi: A'[x][y] = A[(x + 3y) mod 5][x]
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) b[x][y] = a[(x + 3 * y) % 5][x];
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
        a[x][y] = b[x][y] ^ ((~b[(x + 1) % 5][y]) & b[(x + 2) % 5][y]);
      a[0][0] ^= round_const(ir);
    end
  endfunction

  // Conversions between the 5x5 model state and the RTL's packed lanes.
  function automatic st5_t from_flat(logic [1599:0] f);
    st5_t a;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) a[x][y] = f[64 * (x + 5 * y) +: 64];
    return a;
  endfunction

  function automatic logic [1599:0] to_flat(st5_t a);
    logic [1599:0] f;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) f[64 * (x + 5 * y) +: 64] = a[x][y];
    return f;
  endfunction

  // One-block sponge, rate 168 bytes: absorb msg || suffix, pad10*1,
  // permute, return the first 168 output bytes. msg must be < 167 bytes.
  function automatic bytes_t sponge1(bytes_t msg, byte unsigned suffix, int nr);
    byte unsigned blk [168];
    st5_t a;
    bytes_t out;
    foreach (blk[i]) blk[i] = 8'h00;
    foreach (msg[i]) blk[i] = msg[i];
    blk[msg.size()] ^= suffix;
    blk[167] ^= 8'h80;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) a[x][y] = '0;
    for (int i = 0; i < 168; i++) a[(i / 8) % 5][(i / 8) / 5][8 * (i % 8) +: 8] ^= blk[i];
    keccak_p(a, nr);
    for (int i = 0; i < 168; i++) out.push_back(a[(i / 8) % 5][(i / 8) / 5][8 * (i % 8) +: 8]);
    return out;
  endfunction

  function automatic bytes_t shake128_block(bytes_t msg);
    return sponge1(msg, 8'h1F, 24);
  endfunction

  // KangarooTwelve, empty customisation, |S| <= 8192: TurboSHAKE128(M||0x00, 0x07)
  function automatic bytes_t k12_block(bytes_t msg);
    bytes_t s = msg;
    s.push_back(8'h00);
    return sponge1(s, 8'h07, 12);
  endfunction

  // Hash input string seed || q || id as bytes, most significant first.
  function automatic bytes_t msg_bytes(logic [287:0] seed, logic [31:0] q, logic [15:0] id);
    logic [335:0] m = {seed, q, id};
    bytes_t b;
    for (int j = 0; j < 42; j++) b.push_back(m[335 - 8 * j -: 8]);
    return b;
  endfunction

  function automatic logic [1343:0] block_to_vec(bytes_t b);
    logic [1343:0] v;
    for (int i = 0; i < 168; i++) v[8 * i +: 8] = b[i];
    return v;
  endfunction

  function automatic logic [32:0] ref_thresh(logic [31:0] q);
    longint unsigned two32 = 64'h1_0000_0000;
    return 33'((two32 / q) * q);
  endfunction

  // GenSeg: words of the hash output below thresh, in order, at most len;
  // returns the number of accepted words (all of them, for the ok flag).
  function automatic int gen_seg(logic [1343:0] digest, logic [31:0] q, int len,
                                 output logic [31:0] seg [$]);
    logic [32:0] th = ref_thresh(q);
    int n = 0;
    seg.delete();
    for (int i = 0; i < 42; i++) begin
      logic [31:0] wd = digest[32 * i +: 32];
      if ({1'b0, wd} < th) begin
        n++;
        if (seg.size() < len) seg.push_back(wd);
      end
    end
    return n;
  endfunction

  function automatic logic [1343:0] ref_digest(logic [287:0] seed, logic [31:0] q,
                                               logic [15:0] id, bit k12);
    bytes_t m = msg_bytes(seed, q, id);
    return block_to_vec(k12 ? k12_block(m) : shake128_block(m));
  endfunction

  // Published vectors; returns the number of mismatches.
  function automatic int self_test();
    int bad = 0;
    st5_t a;
    bytes_t e, h;
    logic [255:0] shake_empty = 256'h7f9c2ba4e88f827d616045507605853ed73b8093f6efbc88eb1a6eacfa66ef26;
    logic [255:0] k12_empty   = 256'h1ac2d450fc3b4205d19da7bfca1b37513c0803577ac7167f06fe2ce1f0ef39e5;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) a[x][y] = '0;
    keccak_p(a, 24);
    if (a[0][0] != 64'hF1258F7940E1DDE7) bad++;
    h = shake128_block(e);
    for (int i = 0; i < 32; i++) if (h[i] != shake_empty[255 - 8 * i -: 8]) bad++;
    h = k12_block(e);
    for (int i = 0; i < 32; i++) if (h[i] != k12_empty[255 - 8 * i -: 8]) bad++;
    return bad;
  endfunction

endpackage
