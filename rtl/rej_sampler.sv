// rej_sampler: rejection sampling and compaction of one hash output block.
//
// The r = 1344-bit hash output is cut into t = 42 words of w = 32 bits
// (word i = digest[32i +: 32]). Word i is accepted when it is below thresh
// (floor(2^w/q)*q). The first LEN accepted words, in word order, form the
// segment; later accepted words are dropped. This is the loop of the
// segment-generation algorithm unrolled into t comparators and a compaction
// network: the position of an accepted word in the segment is the number of
// accepted words before it (a prefix count), and every segment slot selects
// the word whose position equals the slot number. Accepted words are not
// reduced modulo q, as in the scheme (the downstream modular arithmetic
// takes unreduced w-bit inputs).
//
// ok is high when at least LEN words were accepted. A seed validated on the
// client side always gives ok = 1; ok = 0 flags a segment that the client
// would have rejected, whose missing slots are zero.
//
// Timing: one register stage. in_valid, digest and thresh sampled at an edge
// give out_valid, seg, ok and n_accept after that edge; outputs hold until
// the next in_valid.
module rej_sampler
  import prng_pkg::*;
#(
  parameter int unsigned LEN = 32   // segment length len = N / n_seg
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [R_BITS-1:0]         digest,
  input  logic [W:0]                thresh,
  output logic                      out_valid,
  output logic [LEN-1:0][W-1:0]     seg,
  output logic                      ok,
  output logic [$clog2(T_WORDS+1)-1:0] n_accept
);

  localparam int unsigned PW = $clog2(T_WORDS + 1);

  logic [T_WORDS-1:0]         acc;
  logic [T_WORDS-1:0][PW-1:0] pos;      // accepted words before word i
  logic [PW-1:0]              total;
  logic [LEN-1:0][W-1:0]      seg_c;

  always_comb begin
    logic [PW-1:0] run;
    run = '0;
    for (int i = 0; i < int'(T_WORDS); i++) begin
      acc[i] = ({1'b0, digest[W*i +: W]} < thresh);
      pos[i] = run;
      run    = run + PW'(acc[i]);
    end
    total = run;
  end

  always_comb begin
    seg_c = '0;
    for (int j = 0; j < int'(LEN); j++)
      for (int i = j; i < int'(T_WORDS); i++)
        if (acc[i] && pos[i] == PW'(j))
          seg_c[j] = seg_c[j] | digest[W*i +: W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      seg       <= '0;
      ok        <= 1'b0;
      n_accept  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        seg      <= seg_c;
        ok       <= (total >= PW'(LEN));
        n_accept <= total;
      end
    end
  end

endmodule
