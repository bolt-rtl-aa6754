// tb_bolt_count_list -- self-checking test of the on-chip per-bin load counters.
//
// A 50-bin instance is cleared, then receives random increments and decrements while
// two read ports watch random bins. A reference array applies the same updates with the
// same saturation (0 at the bottom, all ones at the top). Updates are only issued while
// busy is low, and a read returns the value one cycle after its address is presented.
// A watchdog stops a hung run; the last line is the TB_RESULT summary.
module tb_bolt_count_list;
  import bolt_pkg::*;
  localparam int NB = 50;
  localparam int CW = $clog2(LMAX + 1) + 1;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init_start = 1'b0, init_done, upd_valid = 1'b0, upd_dec = 1'b0, busy;
  bin_t rd_a = '0, rd_b = '0, upd_bin = '0;
  logic [CW-1:0] q_a, q_b;
  int ref_c [NB];
  int n_sat = 0;

  bolt_count_list #(.NB(NB)) dut (.*);

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
    foreach (ref_c[i]) ref_c[i] = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); init_start = 1'b1;
    @(negedge clk); init_start = 1'b0;
    wait (init_done);
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      upd_valid = 1'b0;
      // read both ports, compare one cycle later
      rd_a = bin_t'($urandom_range(NB-1));
      rd_b = bin_t'($urandom_range(3));   // small bins see many updates and saturate
      @(negedge clk);
      check(32'(q_a) == ref_c[rd_a], "port a matches the reference");
      check(32'(q_b) == ref_c[rd_b], "port b matches the reference");
      if (!busy) begin
        upd_bin   = bin_t'($urandom_range(99) < 50 ? $urandom_range(3) : $urandom_range(NB-1));
        upd_dec   = ($urandom_range(99) < (c < 3000 ? 25 : 75));
        upd_valid = 1'b1;
        if (upd_dec) ref_c[upd_bin] = (ref_c[upd_bin] == 0) ? 0 : ref_c[upd_bin] - 1;
        else if (ref_c[upd_bin] == (1 << CW) - 1) n_sat++;
        else ref_c[upd_bin] = ref_c[upd_bin] + 1;
        @(negedge clk);
        upd_valid = 1'b0;
        check(busy, "busy during the write-back cycle");
      end
    end
    check(n_sat > 0, "saturation at the top was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
