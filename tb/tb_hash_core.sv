// tb_hash_core: self-checking testbench of hash_core.
// Random 336-bit inputs in both modes are hashed and compared with the
// reference SHAKE128 / KangarooTwelve model (itself checked against the
// published empty-string vectors); the latency must be 24 clocks for
// SHAKE128 and 12 for KangarooTwelve.
module tb_hash_core;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  hash_mode_e mode = HASH_SHAKE128;
  logic [MSG_W-1:0] msg = '0;
  logic busy, done;
  logic [R_BITS-1:0] digest;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hash_core dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [287:0] seed;
    logic [31:0]  q;
    logic [15:0]  id;
    int cyc, nr;
    checks++;
    if (self_test() != 0) begin failures++; $display("reference model self-test failed"); end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 8; k++) begin
      for (int b = 0; b < 9; b++) seed[32*b +: 32] = $urandom;
      q  = $urandom;
      id = 16'($urandom);
      if (k == 0) begin seed = '0; q = '0; id = '0; end
      mode = (k % 2) ? HASH_K12 : HASH_SHAKE128;
      nr   = (k % 2) ? 12 : 24;
      @(negedge clk);
      msg = {seed, q, id}; start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 0;
      while (!done && cyc < 100) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != nr) begin failures++; $display("latency %0d, expected %0d", cyc, nr); end
      checks++;
      if (digest !== ref_digest(seed, q, id, k % 2 == 1)) begin
        failures++; $display("digest mismatch, case %0d", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
