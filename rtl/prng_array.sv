// prng_array: distributed PRNG subsystem, the top of this design.
//
// An RNS limb of N coefficients is split into n_seg segments of LEN = N/n_seg
// words, and each segment is produced by its own local PRNG engine. The array
// holds N_ENG engines placed beside the compute resources they feed; only the
// short limb command (seed, modulus q, hash function) and a start strobe are
// broadcast, and each engine returns its segment over local wires. Engine i
// generates segment id_seg = seg_base + i. With the defaults (N = 2^16,
// LEN = 32, N_ENG = n_seg = 2048, seg_base = 0) one command generates a
// whole limb in parallel; a smaller array generates a limb in
// n_seg / N_ENG commands with seg_base stepping by N_ENG. Any limb can be
// generated at any time and in any order, since a limb depends only on the
// seed and its own modulus.
//
// The segments are returned in the engines' native order (engine i, word j
// is coefficient (seg_base+i)*LEN + j of the limb); matching this to the
// client's coefficient order is the client's layout permutation, so the
// array applies none.
//
// Interface: start samples cmd and seg_base; seg_valid strobes for one cycle
// 25 clocks later (SHAKE128) or 13 clocks later (KangarooTwelve), the same
// for all engines; seg[i] and seg_ok[i] then hold engine i's segment until
// the next command. all_ok is the AND of seg_ok (always 1 for a seed the
// client has validated). The per-engine split follows the scheme; the engine
// count, the seg_base offset and the timing are this design's choices.
module prng_array
  import prng_pkg::*;
#(
  parameter int unsigned LEN   = 32,     // segment length len
  parameter int unsigned N_ENG = 2048    // engines = n_seg for N = 2^16
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  limb_cmd_t                          cmd,
  input  logic [ID_W-1:0]                    seg_base,
  output logic                               busy,
  output logic                               seg_valid,
  output logic [N_ENG-1:0][LEN-1:0][W-1:0]   seg,
  output logic [N_ENG-1:0]                   seg_ok,
  output logic                               all_ok
);

  logic [N_ENG-1:0] eng_busy, eng_valid;

  for (genvar i = 0; i < int'(N_ENG); i++) begin : g_eng
    logic [$clog2(T_WORDS+1)-1:0] n_acc_unused;
    prng_engine #(.LEN(LEN)) u_eng (
      .clk       (clk),
      .rst_n     (rst_n),
      .start     (start),
      .cmd       (cmd),
      .id_seg    (seg_base + ID_W'(i)),
      .busy      (eng_busy[i]),
      .seg_valid (eng_valid[i]),
      .seg       (seg[i]),
      .seg_ok    (seg_ok[i]),
      .n_accept  (n_acc_unused)
    );
  end

  assign busy      = |eng_busy;
  assign seg_valid = eng_valid[0];
  assign all_ok    = &seg_ok;

  // Every engine has the same fixed latency, so all strobe together.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (eng_valid == '0) || (eng_valid == '1))
    else $error("prng_array: engines out of step");

endmodule
