// hash_core: single-block SHAKE128 / KangarooTwelve hash of the 336-bit
// engine input, producing r = 1344 output bits.
//
// The input string seed || q || id_seg (42 bytes) always fits in one Keccak
// rate block of 168 bytes, and the output length r = 1344 bits is exactly one
// rate block, so the sponge needs one absorb and no extra squeeze: the block
// builds the padded first state, runs the permutation once and presents the
// first 1344 bits of the result.
//
//  * SHAKE128: M || 0x1F, zero fill, last rate byte ^ 0x80; 24 rounds.
//  * KangarooTwelve with empty customisation: S = M || 0x00 (the length
//    encoding of an empty string), then TurboSHAKE128(S, D = 0x07):
//    S || 0x07, zero fill, last rate byte ^ 0x80; 12 rounds.
// The padding rules are the public standards'. The use of one squeeze block
// (r = 1344) and the two hash functions follow the scheme; the byte order of
// the input vector is described in prng_pkg.
//
// Timing: msg and mode are sampled with start (edge 0); done is high for one
// cycle after edge 24 (SHAKE128) or edge 12 (KangarooTwelve). digest is valid
// from done until the next start.
module hash_core
  import prng_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  hash_mode_e         mode,
  input  logic [MSG_W-1:0]   msg,      // {seed, q, id_seg}
  output logic               busy,
  output logic               done,
  output logic [R_BITS-1:0]  digest
);

  keccak_state_t init_state, perm_out;
  logic [4:0]    n_rounds;

  // Padded first state: message bytes, domain/padding bytes, zero capacity.
  always_comb begin
    init_state = '0;
    for (int j = 0; j < int'(MSG_BYTES); j++)
      init_state[j/8][8*(j%8) +: 8] = msg[MSG_W-1-8*j -: 8];
    if (mode == HASH_SHAKE128) begin
      init_state[MSG_BYTES/8][8*(MSG_BYTES%8) +: 8] = 8'h1F;
    end else begin
      // byte MSG_BYTES is the 0x00 length encoding, then the 0x07 suffix
      init_state[(MSG_BYTES+1)/8][8*((MSG_BYTES+1)%8) +: 8] = 8'h07;
    end
    init_state[(RATE_BYTES-1)/8][63:56] = init_state[(RATE_BYTES-1)/8][63:56] ^ 8'h80;
    n_rounds = (mode == HASH_SHAKE128) ? 5'd24 : 5'd12;
  end

  keccak_perm u_perm (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .n_rounds  (n_rounds),
    .state_in  (init_state),
    .busy      (busy),
    .done      (done),
    .state_out (perm_out)
  );

  assign digest = perm_out[R_BITS/64-1:0];

endmodule
