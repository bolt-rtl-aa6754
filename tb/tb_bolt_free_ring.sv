// tb_bolt_free_ring -- self-checking test of the free-address ring of the value store.
//
// A 64-line instance is preloaded, then all 64 lines are allocated one by one: each
// address must be new and inside the store, and the level must count down. A further
// request must come back with alloc_ok low. Random frees and allocations then follow,
// checked against a reference FIFO of free addresses (the ring hands lines back in the
// order they were freed). Stimulus changes on the falling edge; a watchdog guards the run.
module tb_bolt_free_ring;
  import bolt_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init_start = 1'b0, init_done, alloc_req = 1'b0, alloc_valid, alloc_ok;
  logic free_req = 1'b0;
  vptr_t alloc_addr, free_addr = '0;
  logic [VPTR_W:0] level;
  vptr_t free_q [$];
  bit used [DEPTH];

  bolt_free_ring #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic alloc(output bit ok, output vptr_t a);
    @(negedge clk); alloc_req = 1'b1;
    @(negedge clk); alloc_req = 1'b0;
    check(alloc_valid, "alloc_valid one cycle after the request");
    ok = alloc_ok; a = alloc_addr;
  endtask

  task automatic free(input vptr_t a);
    @(negedge clk); free_req = 1'b1; free_addr = a;
    @(negedge clk); free_req = 1'b0;
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    $display("FAIL: watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok; vptr_t a;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); init_start = 1'b1;
    @(negedge clk); init_start = 1'b0;
    wait (init_done);
    @(negedge clk);
    check(32'(level) == DEPTH, "full after preload");
    for (int i = 0; i < DEPTH; i++) begin
      alloc(ok, a);
      check(ok, "allocation succeeds while lines remain");
      check(32'(a) < DEPTH && !used[a], "allocated line is new and in range");
      if (32'(a) < DEPTH) used[a] = 1'b1;
      check(32'(level) == DEPTH - 1 - i, "level counts down");
    end
    alloc(ok, a);
    check(!ok, "allocation fails when the store is exhausted");
    check(level == '0, "level stays at zero");
    // random mix against a reference FIFO of freed lines
    for (int c = 0; c < 2000; c++) begin
      if (free_q.size() == 0 || (free_q.size() < DEPTH && $urandom_range(1))) begin
        int k, st;
        k = -1;
        st = $urandom_range(DEPTH-1);
        for (int j = 0; j < DEPTH; j++) if (k < 0 && used[(st + j) % DEPTH]) k = (st + j) % DEPTH;
        if (k >= 0) begin
          used[k] = 1'b0;
          free(VPTR_W'(k)); free_q.push_back(VPTR_W'(k));
        end
      end else begin
        alloc(ok, a);
        check(ok, "allocation succeeds after a free");
        check(a == free_q[0], "lines come back in freeing order");
        void'(free_q.pop_front());
        if (32'(a) < DEPTH) used[a] = 1'b1;
      end
      check(32'(level) == free_q.size(), "level equals the number of free lines");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
