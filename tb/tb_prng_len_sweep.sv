// tb_prng_len_sweep: the segment lengths of the moduli-set trade-off
// (len = 4, 8, 16 beside the default 32) on engines built with those LEN
// values. For each length, one engine generates segments for random seeds,
// segment indices and 32-bit moduli in both hash modes; each is compared
// with the reference GenSeg, and a short segment at len = 16 with a
// high-rejection modulus must be flagged.
module tb_prng_len_sweep;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  limb_cmd_t cmd = '0;
  logic [ID_W-1:0] id_seg = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [2:0] busy, vld, ok;
  logic [5:0] nacc [3];
  logic [3:0][W-1:0]  seg4;
  logic [7:0][W-1:0]  seg8;
  logic [15:0][W-1:0] seg16;

  prng_engine #(.LEN(4))  u4  (.clk, .rst_n, .start, .cmd, .id_seg, .busy(busy[0]), .seg_valid(vld[0]),
                               .seg(seg4),  .seg_ok(ok[0]), .n_accept(nacc[0]));
  prng_engine #(.LEN(8))  u8  (.clk, .rst_n, .start, .cmd, .id_seg, .busy(busy[1]), .seg_valid(vld[1]),
                               .seg(seg8),  .seg_ok(ok[1]), .n_accept(nacc[1]));
  prng_engine #(.LEN(16)) u16 (.clk, .rst_n, .start, .cmd, .id_seg, .busy(busy[2]), .seg_valid(vld[2]),
                               .seg(seg16), .seg_ok(ok[2]), .n_accept(nacc[2]));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] word_of(int l, int j);
    case (l)
      0: return seg4[j];
      1: return seg8[j];
      default: return seg16[j];
    endcase
  endfunction

  initial begin
    limb_cmd_t c;
    int lens [3] = '{4, 8, 16};
    int n_short16 = 0, cyc;
    logic [31:0] qs [4] = '{32'hFFFC0001, 32'hC0000001, 32'h90000001, 32'h80000001};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 24; k++) begin
      logic [1343:0] d;
      logic [15:0] id;
      for (int b = 0; b < 9; b++) c.seed[32*b +: 32] = $urandom;
      c.q = qs[k % 4];
      c.mode = (k % 2) ? HASH_K12 : HASH_SHAKE128;
      id = 16'($urandom);
      @(negedge clk);
      cmd = c; id_seg = id; start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 0;
      while (!vld[0] && cyc < 100) begin @(negedge clk); cyc++; end
      checks++;
      if (vld != 3'b111 || cyc != ((k % 2) ? 13 : 25)) begin failures++; $display("strobe/latency"); end
      d = ref_digest(c.seed, c.q, id, k % 2 == 1);
      for (int l = 0; l < 3; l++) begin
        logic [31:0] exp_seg [$];
        int n;
        n = gen_seg(d, c.q, lens[l], exp_seg);
        if (l == 2 && n < 16) n_short16++;
        checks++;
        if (ok[l] != (n >= lens[l]) || int'(nacc[l]) != n) begin failures++; $display("len %0d flags", lens[l]); end
        for (int j = 0; j < exp_seg.size(); j++) begin
          checks++;
          if (word_of(l, j) !== exp_seg[j]) begin failures++; $display("len %0d word %0d", lens[l], j); end
        end
      end
    end
    // about 4.5% of segments fall short at len = 16 with q = 2^31 + 1: retry until one does
    for (int k = 0; k < 400 && n_short16 == 0; k++) begin
      logic [31:0] exp_seg [$];
      int n;
      for (int b = 0; b < 9; b++) c.seed[32*b +: 32] = $urandom;
      c.q = 32'h80000001; c.mode = HASH_K12;
      @(negedge clk);
      cmd = c; id_seg = 16'(k); start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 0;
      while (!vld[2] && cyc < 100) begin @(negedge clk); cyc++; end
      n = gen_seg(ref_digest(c.seed, c.q, 16'(k), 1'b1), c.q, 16, exp_seg);
      checks++;
      if (ok[2] != (n >= 16)) begin failures++; $display("len 16 ok flag"); end
      if (n < 16) n_short16++;
    end
    checks++;
    if (n_short16 == 0) begin failures++; $display("no short len-16 segment exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
