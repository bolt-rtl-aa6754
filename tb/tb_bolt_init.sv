// tb_bolt_init -- self-checking test of the start-up controller.
//
// The controller is connected to a 16-row map memory filled with garbage and to a
// small model of the HAC command port that accepts a command after a random delay and
// reports done a random number of cycles later. The sub-block "done" inputs are raised
// at different times. The test checks: one sweep_start pulse after reset, every map
// row written exactly once with all ones in the mask and all-zero data, every one of
// the 12 host pages written exactly once with the DUMMY operation, and done rising only
// after all of these and all three sweep-done inputs. A watchdog guards the run.
module tb_bolt_init;
  import bolt_pkg::*;
  localparam int ROWS = 16, NP = 12;
  localparam logic [1:0] HAC_DUMMY = 2'd2;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 1'b0, sweep_start, ring_done = 1'b0, cnt_done = 1'b0, ri_done = 1'b0;
  logic hac_valid, hac_ready = 1'b0, hac_done = 1'b0, done;
  logic [1:0] hac_op;
  bin_t hac_page;
  bolt_mem_if #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS)) pm (.clk, .rst_n);

  int row_wr [ROWS], page_wr [NP];
  int n_sweep = 0, bad_row = 0, bad_op = 0, pend = 0;

  bolt_init #(.ROWS(ROWS), .NPAGES(NP)) dut (.*);

  bolt_tb_mem #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS), .DEPTH(ROWS), .LAT(3), .STALL(1'b1)) u_pm (
    .clk, .req_valid(pm.req_valid), .req_ready(pm.req_ready), .req_we(pm.req_we),
    .req_addr(pm.req_addr), .req_wdata(pm.req_wdata), .req_wmask(pm.req_wmask),
    .rsp_valid(pm.rsp_valid), .rsp_rdata(pm.rsp_rdata));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // monitors
  always @(posedge clk) begin
    if (rst_n && sweep_start) n_sweep++;
    if (rst_n && pm.req_valid && pm.req_ready) begin
      if (!pm.req_we || pm.req_wmask != '1 || pm.req_wdata != '0 || 32'(pm.req_addr) >= ROWS) bad_row++;
      else row_wr[pm.req_addr]++;
    end
  end

  // HAC model: random accept delay, random completion delay
  initial begin
    forever begin
      @(negedge clk);
      hac_done = 1'b0;
      hac_ready = ($urandom_range(3) == 0);
      if (hac_valid && hac_ready) begin
        if (hac_op != HAC_DUMMY || 32'(hac_page) >= NP) bad_op++;
        else page_wr[hac_page]++;
        @(negedge clk);
        hac_ready = 1'b0;
        repeat ($urandom_range(1, 6)) @(negedge clk);
        hac_done = 1'b1;
      end
    end
  end

  initial begin
    repeat (100_000) @(posedge clk);
    $display("FAIL: watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (row_wr[i]) row_wr[i] = 0;
    foreach (page_wr[i]) page_wr[i] = 0;
    for (int i = 0; i < ROWS; i++) u_pm.mem[i] = {$urandom(), $urandom(), $urandom()};
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (20) @(negedge clk);
    check(!done, "not done while sub-blocks still sweep");
    ring_done = 1'b1;
    repeat (200) @(negedge clk);
    check(!done, "not done before the count list finished");
    cnt_done = 1'b1;
    repeat (50) @(negedge clk);
    check(!done, "not done before the reverse index finished");
    ri_done = 1'b1;
    wait (done);
    @(negedge clk);
    check(n_sweep == 1, "one sweep_start pulse");
    check(bad_row == 0 && bad_op == 0, "only clearing writes and DUMMY page writes");
    for (int i = 0; i < ROWS; i++) begin
      check(row_wr[i] == 1, "each map row cleared once");
      check(u_pm.mem[i] == '0, "map row is empty");
    end
    for (int i = 0; i < NP; i++) check(page_wr[i] == 1, "each host page written once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
