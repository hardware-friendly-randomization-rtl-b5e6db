// tb_prng_array: end-to-end testbench of the distributed PRNG array at a
// reduced size (N_ENG = 4 engines, a limb of N_SEG = 8 segments, so each
// limb takes two commands with seg_base = 0 and 4).
//
// It generates limbs of several moduli out of order and in both hash modes,
// regenerates an earlier limb and checks that it comes out identical
// (random access without generating the limbs in between), and drives a
// high-rejection modulus until a short segment appears and all_ok drops.
// Every segment is compared with the reference GenSeg, and the latency
// (25 / 13 clocks) is checked. Each mechanism is counted; one that never
// happens counts as a failure.
module tb_prng_array;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  localparam int LEN   = 32;
  localparam int N_ENG = 4;
  localparam int N_SEG = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  limb_cmd_t cmd = '0;
  logic [ID_W-1:0] seg_base = '0;
  logic busy, seg_valid, all_ok;
  logic [N_ENG-1:0][LEN-1:0][W-1:0] seg;
  logic [N_ENG-1:0] seg_ok;
  int checks = 0, failures = 0;
  int n_shake = 0, n_k12 = 0, n_mode_switch = 0, n_short = 0, n_random_access = 0, n_multi_cmd = 0;
  hash_mode_e last_mode = HASH_SHAKE128;

  always #5 clk = ~clk;

  prng_array #(.LEN(LEN), .N_ENG(N_ENG)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One command: engines generate segments base .. base+N_ENG-1.
  task automatic command(input limb_cmd_t c, input logic [15:0] base,
                         output logic [N_ENG-1:0][LEN-1:0][W-1:0] got, output bit any_short);
    int cyc = 0, nr;
    bit k12 = (c.mode == HASH_K12);
    nr = k12 ? 12 : 24;
    if (k12) n_k12++; else n_shake++;
    if (c.mode != last_mode) n_mode_switch++;
    last_mode = c.mode;
    if (base != 0) n_multi_cmd++;
    @(negedge clk);
    cmd = c; seg_base = base; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!seg_valid && cyc < 100) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != nr + 1) begin failures++; $display("latency %0d, expected %0d", cyc, nr + 1); end
    any_short = 0;
    for (int e = 0; e < N_ENG; e++) begin
      logic [31:0] exp_seg [$];
      int n;
      n = gen_seg(ref_digest(c.seed, c.q, base + 16'(e), k12), c.q, LEN, exp_seg);
      checks++;
      if (seg_ok[e] != (n >= LEN)) begin failures++; $display("engine %0d ok flag", e); end
      if (n < LEN) any_short = 1;
      for (int j = 0; j < exp_seg.size(); j++) begin
        checks++;
        if (seg[e][j] !== exp_seg[j]) begin failures++; $display("engine %0d word %0d mismatch", e, j); end
      end
    end
    checks++;
    if (all_ok != !any_short) begin failures++; $display("all_ok wrong"); end
    if (any_short) n_short++;
    got = seg;
  endtask

  // A whole limb of N_SEG segments, in native order.
  task automatic limb(input limb_cmd_t c, output logic [N_SEG-1:0][LEN-1:0][W-1:0] l);
    logic [N_ENG-1:0][LEN-1:0][W-1:0] got;
    bit s;
    for (int base = 0; base < N_SEG; base += N_ENG) begin
      command(c, 16'(base), got, s);
      for (int e = 0; e < N_ENG; e++) l[base + e] = got[e];
    end
  endtask

  initial begin
    limb_cmd_t c;
    logic [287:0] seed;
    logic [31:0] base_q [4] = '{32'hFFFC0001, 32'hFFF00001, 32'h7FFE0001, 32'h3FFF4001};
    logic [N_SEG-1:0][LEN-1:0][W-1:0] first [4];
    logic [N_SEG-1:0][LEN-1:0][W-1:0] again;
    int order [4] = '{2, 0, 3, 1};
    hash_mode_e mode_of [4];
    logic [N_ENG-1:0][LEN-1:0][W-1:0] got;
    bit s;
    for (int b = 0; b < 9; b++) seed[32*b +: 32] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // limbs in the order q2, q0, q3, q1, alternating hash modes
    foreach (order[k]) begin
      int qi;
      qi = order[k];
      c.seed = seed; c.q = base_q[qi];
      c.mode = (k % 2) ? HASH_K12 : HASH_SHAKE128;
      mode_of[qi] = c.mode;
      limb(c, again);
      first[qi] = again;
    end
    // random access: regenerate limb q1 alone and compare with the first run
    c.seed = seed; c.q = base_q[1]; c.mode = mode_of[1];
    limb(c, again);
    checks++;
    if (again !== first[1]) begin failures++; $display("regenerated limb differs"); end
    else n_random_access++;
    // a modulus that rejects about half the words: a client would reject the seed
    for (int k = 0; k < 20 && n_short == 0; k++) begin
      for (int b = 0; b < 9; b++) c.seed[32*b +: 32] = $urandom;
      c.q = 32'h80000001; c.mode = HASH_SHAKE128;
      command(c, 16'(k), got, s);
    end
    $display("mechanisms: shake=%0d k12=%0d mode_switch=%0d short_segment=%0d random_access=%0d multi_command_limb=%0d",
             n_shake, n_k12, n_mode_switch, n_short, n_random_access, n_multi_cmd);
    if (n_shake == 0) failures++;
    if (n_k12 == 0) failures++;
    if (n_mode_switch == 0) failures++;
    if (n_short == 0) failures++;
    if (n_random_access == 0) failures++;
    if (n_multi_cmd == 0) failures++;
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
