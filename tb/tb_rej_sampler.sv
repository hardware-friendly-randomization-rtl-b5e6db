// tb_rej_sampler: self-checking testbench of rej_sampler.
// Feeds random digests with thresholds from moduli of very different
// rejection rates (near 0, about 1/4 and about 1/2), plus digests built so
// that exactly LEN-1, LEN or all words pass, and compares the segment, the
// accepted count and ok with the reference loop.
module tb_rej_sampler;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  localparam int LEN = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [R_BITS-1:0] digest = '0;
  logic [W:0] thresh = '0;
  logic out_valid;
  logic [LEN-1:0][W-1:0] seg;
  logic ok;
  logic [$clog2(T_WORDS+1)-1:0] n_accept;
  int checks = 0, failures = 0;
  int n_short = 0;

  always #5 clk = ~clk;

  rej_sampler #(.LEN(LEN)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [1343:0] d, input logic [31:0] q);
    logic [31:0] exp_seg [$];
    int n;
    n = gen_seg(d, q, LEN, exp_seg);
    @(negedge clk);
    digest = d; thresh = ref_thresh(q); in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (!out_valid) begin failures++; $display("out_valid missing"); end
    checks++;
    if (int'(n_accept) != n || ok != (n >= LEN)) begin
      failures++; $display("count %0d ok %0b, expected %0d", n_accept, ok, n);
    end
    if (n < LEN) n_short++;
    for (int j = 0; j < exp_seg.size(); j++) begin
      checks++;
      if (seg[j] !== exp_seg[j]) begin failures++; $display("slot %0d: %h vs %h", j, seg[j], exp_seg[j]); end
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("out_valid longer than one cycle"); end
  endtask

  initial begin
    logic [1343:0] d;
    logic [31:0] qs [4] = '{32'hFFFFFFFB, 32'hA0000001, 32'h80000001, 32'h00FFF001};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 40; k++) begin
      for (int i = 0; i < 42; i++) d[32*i +: 32] = $urandom;
      one(d, qs[k % 4]);
    end
    // exactly LEN-1 and exactly LEN accepted words with q = 2^31 + 1
    for (int want = LEN - 1; want <= LEN; want++) begin
      for (int i = 0; i < 42; i++) d[32*i +: 32] = 32'hFFFF0000 | 32'(i);   // all rejected
      for (int i = 0; i < want; i++) d[32*(41 - i) +: 32] = 32'(i * 7);      // accepted at the end
      one(d, 32'h80000001);
    end
    for (int i = 0; i < 42; i++) d[32*i +: 32] = 32'(i);                    // all accepted
    one(d, 32'h80000001);
    checks++;
    if (n_short == 0) begin failures++; $display("no short segment exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
