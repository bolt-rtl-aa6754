// tb_bolt_rng -- self-checking test of the two-choice bin generator.
//
// A 37-bin instance is sampled every cycle for 20000 cycles. Each pair must lie in
// [0, 37) and the two choices must differ. Every bin must be drawn as first and as
// second choice, and each bin's share of first choices must stay within a factor of two
// of uniform. A watchdog stops a hung run; the last line is the TB_RESULT summary.
module tb_bolt_rng;
  import bolt_pkg::*;
  localparam int NB = 37;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bin_t p1, p2;
  int h1 [NB], h2 [NB];

  bolt_rng #(.NB(NB)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    $display("FAIL: watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lo, hi;
    foreach (h1[i]) begin h1[i] = 0; h2[i] = 0; end
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      check(32'(p1) < NB && 32'(p2) < NB, "choices inside the bin range");
      check(p1 != p2, "the two choices differ");
      if (32'(p1) < NB) h1[p1]++;
      if (32'(p2) < NB) h2[p2]++;
    end
    lo = 1 << 30; hi = 0;
    for (int i = 0; i < NB; i++) begin
      check(h1[i] > 0 && h2[i] > 0, "every bin drawn");
      if (h1[i] < lo) lo = h1[i];
      if (h1[i] > hi) hi = h1[i];
    end
    $display("INFO: first-choice counts min=%0d max=%0d (uniform %0d)", lo, hi, 20000 / NB);
    check(lo > 20000 / NB / 2 && hi < 2 * 20000 / NB, "first choice close to uniform");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
