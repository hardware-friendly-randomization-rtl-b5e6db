// prng_engine: local PRNG engine. Generates one segment of LEN words,
// uniformly distributed modulo q, from the hash input seed || q || id_seg.
//
// This is the per-engine operation of the distributed scheme: every engine
// runs the same segment-generation function on its own input string, which
// differs from its neighbours' only in the segment index id_seg. The engine
// needs no data from any other engine or from a central unit, so it can sit
// next to the compute resources it feeds, and any limb can be generated on
// demand by naming its modulus q (random access across RNS limbs).
//
// Inside, a start pulse launches in parallel
//   * hash_core on {seed, q, id_seg} with the selected hash function, and
//   * thresh_unit on q, which finishes before the hash does;
// when both are done, rej_sampler compacts the accepted words into the
// segment. The hash output length is fixed, so the latency is fixed and
// there is no back-pressure: seg_valid is a one-cycle strobe and seg holds
// its value until the next segment is written.
//
// Timing (start sampled at edge 0): seg_valid is high in the cycle after
// edge NR+1, where NR = 24 for SHAKE128 and 12 for KangarooTwelve, giving a
// start-to-segment latency of 25 and 13 clocks. A new start is accepted in
// the cycle seg_valid is high (one segment per NR+1 clocks). The engine's
// composition and the cycle counts are this design's choices; the scheme
// fixes only the function computed.
module prng_engine
  import prng_pkg::*;
#(
  parameter int unsigned LEN = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  limb_cmd_t                    cmd,
  input  logic [ID_W-1:0]              id_seg,
  output logic                         busy,
  output logic                         seg_valid,
  output logic [LEN-1:0][W-1:0]        seg,
  output logic                         seg_ok,
  output logic [$clog2(T_WORDS+1)-1:0] n_accept
);

  logic              h_busy, h_done, t_busy, t_done;
  logic [R_BITS-1:0] digest;
  logic [W:0]        thresh;
  logic              h_seen, t_seen, active;
  logic              samp_go;

  hash_core u_hash (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (start),
    .mode   (cmd.mode),
    .msg    ({cmd.seed, cmd.q, id_seg}),
    .busy   (h_busy),
    .done   (h_done),
    .digest (digest)
  );

  thresh_unit u_thresh (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (start),
    .q      (cmd.q),
    .busy   (t_busy),
    .done   (t_done),
    .thresh (thresh)
  );

  // Both results are kept (digest in the permutation state, thresh in the
  // threshold unit) until the next start; sample once both have arrived.
  assign samp_go = active && (h_seen || h_done) && (t_seen || t_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_seen <= 1'b0;
      t_seen <= 1'b0;
      active <= 1'b0;
    end else if (start) begin
      h_seen <= 1'b0;
      t_seen <= 1'b0;
      active <= 1'b1;
    end else if (samp_go) begin
      active <= 1'b0;
    end else begin
      h_seen <= h_seen | h_done;
      t_seen <= t_seen | t_done;
    end
  end

  rej_sampler #(.LEN(LEN)) u_samp (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (samp_go),
    .digest    (digest),
    .thresh    (thresh),
    .out_valid (seg_valid),
    .seg       (seg),
    .ok        (seg_ok),
    .n_accept  (n_accept)
  );

  assign busy = active | h_busy | t_busy;

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && active))
    else $error("prng_engine: start while a segment is in flight");

endmodule
