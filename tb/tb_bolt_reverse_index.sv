// tb_bolt_reverse_index -- self-checking test of the page-to-map-slot reverse index.
//
// A 20-page instance is cleared and then exercised with random ADD, DEL, READ and CLR
// operations. A reference model keeps, per page, LMAX (valid, pointer) entries and
// applies the same rules: ADD fills the first empty entry and fails when the page
// already has LMAX entries, DEL removes the entries holding the given pointer, CLR
// empties the entry at a given index. Every operation reports the entry as it was
// before the operation; that row and the ok flag are compared with the model.
// One operation is in flight at a time; the result arrives two cycles after acceptance.
module tb_bolt_reverse_index;
  import bolt_pkg::*;
  localparam int NP = 20;
  localparam logic [1:0] RI_ADD = 2'd0, RI_DEL = 2'd1, RI_READ = 2'd2, RI_CLR = 2'd3;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init_start = 1'b0, init_done, op_valid = 1'b0, ready, done, ok;
  logic [1:0] op = '0;
  bin_t page = '0;
  pm_ptr_t ptr = '0;
  logic [$clog2(LMAX)-1:0] idx = '0;
  logic [LMAX-1:0] row_valid;
  pm_ptr_t [LMAX-1:0] row_ptr;

  bit      mv [NP][LMAX];
  pm_ptr_t mp [NP][LMAX];
  int n_full = 0, n_add = 0;

  bolt_reverse_index #(.NPAGES(NP)) dut (.*);

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
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); init_start = 1'b1;
    @(negedge clk); init_start = 1'b0;
    wait (init_done);
    for (int c = 0; c < 4000; c++) begin
      int pg, r;
      bit exp_ok, same;
      pg = $urandom_range(NP-1);
      r  = $urandom_range(99);
      @(negedge clk);
      while (!ready) @(negedge clk);
      op    = (r < 50) ? RI_ADD : (r < 75) ? RI_DEL : (r < 88) ? RI_READ : RI_CLR;
      page  = bin_t'(pg);
      ptr   = pm_ptr_t'($urandom_range(7));    // few distinct pointers so DEL finds them
      idx   = $urandom_range(LMAX-1);
      op_valid = 1'b1;
      @(negedge clk);
      op_valid = 1'b0;
      while (!done) @(negedge clk);
      // row before the operation
      same = 1'b1;
      for (int i = 0; i < LMAX; i++) begin
        if (row_valid[i] != mv[pg][i]) same = 1'b0;
        if (mv[pg][i] && row_ptr[i] != mp[pg][i]) same = 1'b0;
      end
      check(same, "reported row equals the entry before the operation");
      // apply to the model
      exp_ok = 1'b0;
      case (op)
        RI_ADD: begin
          n_add++;
          for (int i = 0; i < LMAX; i++)
            if (!exp_ok && !mv[pg][i]) begin mv[pg][i] = 1'b1; mp[pg][i] = ptr; exp_ok = 1'b1; end
          if (!exp_ok) n_full++;
        end
        RI_DEL: for (int i = 0; i < LMAX; i++)
                  if (mv[pg][i] && mp[pg][i] == ptr) begin mv[pg][i] = 1'b0; exp_ok = 1'b1; end
        RI_READ: exp_ok = 1'b1;
        RI_CLR: begin mv[pg][idx] = 1'b0; exp_ok = 1'b1; end
      endcase
      check(ok == exp_ok, "ok flag matches the model");
    end
    check(n_full > 0, "a full entry was reached");
    $display("INFO: adds=%0d rejected-full=%0d", n_add, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
