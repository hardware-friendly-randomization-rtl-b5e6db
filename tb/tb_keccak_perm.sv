// tb_keccak_perm: self-checking testbench of keccak_perm.
// Checks the published Keccak-f[1600] result for the all-zero state, then
// random states with 24 and 12 rounds against the reference model, and that
// done arrives exactly n_rounds clocks after start.
module tb_keccak_perm;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  logic [4:0] n_rounds = 5'd24;
  keccak_state_t state_in = '0, state_out;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  keccak_perm dut (.*);

  task automatic run(input keccak_state_t s, input int nr);
    int cyc = 0;
    st5_t m;
    @(negedge clk);
    state_in = s; n_rounds = 5'(nr); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done && cyc < 100) begin @(negedge clk); cyc++; end
    // done is seen cyc+1 edges after the start edge
    checks++;
    if (cyc != nr) begin failures++; $display("latency %0d, expected %0d", cyc, nr); end
    m = from_flat(s);
    keccak_p(m, nr);
    checks++;
    if (state_out !== keccak_state_t'(to_flat(m))) begin
      failures++; $display("state mismatch, %0d rounds", nr);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    keccak_state_t s;
    checks++;
    if (self_test() != 0) begin failures++; $display("reference model self-test failed"); end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('0, 24);
    checks++;
    if (state_out[0] !== 64'hF1258F7940E1DDE7) begin failures++; $display("zero-state vector"); end
    for (int k = 0; k < 6; k++) begin
      for (int l = 0; l < 25; l++) s[l] = {$urandom, $urandom};
      run(s, (k % 2) ? 12 : 24);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
