// keccak_perm: iterative Keccak-p[1600, n_r] permutation, one round per clock.
//
// A pulse on start loads state_in. The block then applies rounds
// 24-n_rounds .. 23 of Keccak-f[1600], one per clock, so n_rounds = 24 gives
// the full Keccak-f[1600] used by SHAKE128 and n_rounds = 12 gives the
// 12-round Keccak-p used by TurboSHAKE128 / KangarooTwelve. The round
// function and its constants are the standard ones; the one-round-per-cycle
// iteration is this design's choice.
//
// Timing: with start sampled at clock edge 0, the last round is applied at
// edge n_rounds, done is high for the one cycle after that edge and
// state_out holds the result until the next start. busy is high from the
// edge after start until the edge of the last round. start while busy is a
// protocol error (asserted).
module keccak_perm
  import prng_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [4:0]    n_rounds,   // 1..24; 24 = Keccak-f, 12 = TurboSHAKE
  input  keccak_state_t state_in,
  output logic          busy,
  output logic          done,
  output keccak_state_t state_out
);

  keccak_state_t st;
  logic [4:0]    rnd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= '0;
      rnd  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        st   <= state_in;
        rnd  <= 5'd24 - n_rounds;
        busy <= 1'b1;
      end else if (busy) begin
        st  <= keccak_round(st, RC[rnd]);
        rnd <= rnd + 5'd1;
        if (rnd == 5'd23) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign state_out = st;

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy))
    else $error("keccak_perm: start while busy");

  a_rounds_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                      start |-> (n_rounds >= 5'd1 && n_rounds <= 5'd24))
    else $error("keccak_perm: n_rounds out of range");

endmodule
