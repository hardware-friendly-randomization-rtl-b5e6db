// tb_prng_array_large: the array at a quarter of its default size (512
// engines, len = 32: a quarter of an N = 2^16 limb per command). A SHAKE128
// command and then a KangarooTwelve command are issued for random seeds and
// moduli; every one of the 16384 words is compared with the reference
// GenSeg, and the latency must be 25 and 13 clocks. The 2048-engine default
// behaves the same but takes far longer to compile for simulation.
module tb_prng_array_large;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  localparam int LEN   = 32;
  localparam int N_ENG = 512;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  limb_cmd_t cmd = '0;
  logic [ID_W-1:0] seg_base = '0;
  logic busy, seg_valid, all_ok;
  logic [N_ENG-1:0][LEN-1:0][W-1:0] seg;
  logic [N_ENG-1:0] seg_ok;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  prng_array #(.N_ENG(N_ENG)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    limb_cmd_t c;
    int cyc, nr, bad, n_short;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 2; m++) begin
      for (int b = 0; b < 9; b++) c.seed[32*b +: 32] = $urandom;
      c.q    = m ? 32'hFFF00001 : 32'hFFFC0001;
      c.mode = m ? HASH_K12 : HASH_SHAKE128;
      nr     = m ? 12 : 24;
      @(negedge clk);
      cmd = c; start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 0;
      while (!seg_valid && cyc < 100) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != nr + 1) begin failures++; $display("latency %0d, expected %0d", cyc, nr + 1); end
      bad = 0; n_short = 0;
      for (int e = 0; e < N_ENG; e++) begin
        logic [31:0] exp_seg [$];
        int n;
        n = gen_seg(ref_digest(c.seed, c.q, 16'(e), m == 1), c.q, LEN, exp_seg);
        if (n < LEN) n_short++;
        checks++;
        if (seg_ok[e] != (n >= LEN)) bad++;
        for (int j = 0; j < exp_seg.size(); j++) begin
          checks++;
          if (seg[e][j] !== exp_seg[j]) bad++;
        end
      end
      checks++;
      if (all_ok != (n_short == 0)) bad++;
      failures += bad;
      $display("limb %0d: %0d mismatches, %0d short segments", m, bad, n_short);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
