// tb_prng_engine: self-checking testbench of prng_engine.
// Issues generation commands with random seeds, moduli and segment indices
// in both hash modes and compares each segment, its accepted-word count and
// ok flag with the reference GenSeg. Checks the fixed latency (25 clocks for
// SHAKE128, 13 for KangarooTwelve), that a new command may start in the
// cycle seg_valid strobes, and that a high-rejection modulus gives a short
// segment flagged with ok = 0.
module tb_prng_engine;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  localparam int LEN = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  limb_cmd_t cmd = '0;
  logic [ID_W-1:0] id_seg = '0;
  logic busy, seg_valid, seg_ok;
  logic [LEN-1:0][W-1:0] seg;
  logic [$clog2(T_WORDS+1)-1:0] n_accept;
  int checks = 0, failures = 0;
  int n_short = 0, n_k12 = 0, n_shake = 0;

  always #5 clk = ~clk;

  prng_engine #(.LEN(LEN)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // start is driven at a negedge; returns after the negedge following seg_valid
  task automatic gen(input limb_cmd_t c, input logic [15:0] id, input bit back_to_back);
    logic [31:0] exp_seg [$];
    int n, cyc, nr;
    bit k12 = (c.mode == HASH_K12);
    nr = k12 ? 12 : 24;
    if (k12) n_k12++; else n_shake++;
    n = gen_seg(ref_digest(c.seed, c.q, id, k12), c.q, LEN, exp_seg);
    if (!back_to_back) @(negedge clk);
    cmd = c; id_seg = id; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cmd = '0; id_seg = '0;   // inputs are only needed with start
    cyc = 0;
    while (!seg_valid && cyc < 100) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != nr + 1) begin failures++; $display("latency %0d, expected %0d", cyc, nr + 1); end
    checks++;
    if (int'(n_accept) != n || seg_ok != (n >= LEN)) begin
      failures++; $display("accepted %0d ok %0b, expected %0d", n_accept, seg_ok, n);
    end
    if (n < LEN) n_short++;
    for (int j = 0; j < exp_seg.size(); j++) begin
      checks++;
      if (seg[j] !== exp_seg[j]) begin failures++; $display("word %0d: %h vs %h", j, seg[j], exp_seg[j]); end
    end
  endtask

  initial begin
    limb_cmd_t c;
    logic [31:0] qs [5] = '{32'hFFFFFFFB, 32'hFFFC0001, 32'hC0000001, 32'h0FFFC001, 32'h80000001};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 10; k++) begin
      for (int b = 0; b < 9; b++) c.seed[32*b +: 32] = $urandom;
      c.q    = qs[k % 5];
      c.mode = (k % 3 == 1) ? HASH_K12 : HASH_SHAKE128;
      gen(c, 16'($urandom % 2048), k > 4);
    end
    // q = 2^31 + 1 rejects about half of all words: repeat until a short segment shows
    for (int k = 0; k < 40 && n_short == 0; k++) begin
      for (int b = 0; b < 9; b++) c.seed[32*b +: 32] = $urandom;
      c.q = 32'h80000001;
      c.mode = HASH_K12;
      gen(c, 16'(k), 1'b0);
    end
    checks++;
    if (n_short == 0 || n_k12 == 0 || n_shake == 0) begin
      failures++; $display("mechanism not exercised: short %0d k12 %0d shake %0d", n_short, n_k12, n_shake);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
