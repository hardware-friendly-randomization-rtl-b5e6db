// tb_thresh_unit: self-checking testbench of thresh_unit.
// Compares thresh with floor(2^32/q)*q computed with 64-bit integer division
// for edge moduli and random ones, and checks the 8-clock latency.
module tb_thresh_unit;
  import prng_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  logic [W-1:0] q = 32'd3;
  logic busy, done;
  logic [W:0] thresh;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  thresh_unit dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [31:0] qq);
    int cyc = 0;
    @(negedge clk);
    q = qq; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done && cyc < 100) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 8) begin failures++; $display("latency %0d", cyc); end
    checks++;
    if (thresh !== ref_thresh(qq)) begin
      failures++; $display("q=%h thresh=%h expected %h", qq, thresh, ref_thresh(qq));
    end
  endtask

  initial begin
    logic [31:0] qs [8] = '{32'd2, 32'd3, 32'hFFFFFFFF, 32'h80000001,
                            32'hFFFC0001, 32'h7FFFFFFF, 32'h00100001, 32'h3FFFE001};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (qs[i]) one(qs[i]);
    for (int k = 0; k < 40; k++) one($urandom | 32'h2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
