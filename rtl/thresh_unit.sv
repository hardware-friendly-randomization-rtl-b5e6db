// thresh_unit: acceptance threshold thresh = floor(2^w / q) * q, w = 32.
//
// The rejection sampler accepts a w-bit word only if it is below thresh, the
// largest multiple of q not above 2^w. Since thresh = 2^w - (2^w mod q), the
// block computes 2^w mod q by doubling: starting from r = 1 it applies
// r <- 2r mod q (one conditional subtraction, as r < q) w times, STEPS
// doublings per clock, and returns 2^w - r as a (w+1)-bit number (2^w when q
// divides 2^w). No divider is needed. The formula is the scheme's; the
// serial doubling method is this design's choice, sized so that it finishes
// well within the 12 rounds of the faster hash.
//
// Timing: q is sampled with start (edge 0); done is high for one cycle after
// edge W/STEPS (8 with the defaults) and thresh holds until the next start.
// q must be at least 2 (the scheme's moduli are NTT-friendly primes).
module thresh_unit
  import prng_pkg::*;
#(
  parameter int unsigned STEPS = 4   // doublings per clock; must divide W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] q,
  output logic         busy,
  output logic         done,
  output logic [W:0]   thresh
);

  localparam int unsigned CYCLES = W / STEPS;
  localparam int unsigned CW     = $clog2(CYCLES + 1);

  logic [W-1:0]  q_r;
  logic [W-1:0]  r;
  logic [CW-1:0] cnt;
  logic [W-1:0]  r_next;

  // STEPS chained doublings modulo q_r
  always_comb begin
    logic [W:0] t;
    r_next = r;
    for (int s = 0; s < int'(STEPS); s++) begin
      t = {r_next, 1'b0};
      if (t >= {1'b0, q_r}) t = t - {1'b0, q_r};
      r_next = t[W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_r  <= '0;
      r    <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q_r  <= q;
        r    <= W'(1);
        cnt  <= CW'(CYCLES);
        busy <= 1'b1;
      end else if (busy) begin
        r   <= r_next;
        cnt <= cnt - CW'(1);
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign thresh = {1'b1, {W{1'b0}}} - {1'b0, r};

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy))
    else $error("thresh_unit: start while busy");

endmodule
