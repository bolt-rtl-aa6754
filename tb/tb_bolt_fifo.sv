// tb_bolt_fifo -- self-checking test of the ready/valid queue used for CMD Q and RES Q.
//
// A 16-bit, depth-4 instance is driven with random pushes and pops (both sides apply
// random stalls). A SystemVerilog queue is the reference: every popped word must equal
// the oldest pushed word, the count output must equal the reference length, in_ready
// must fall exactly when the queue holds DEPTH words and out_valid exactly when it is
// empty. Inputs are driven and outputs sampled on the falling clock edge.
// Ends with the TB_RESULT line; a watchdog stops a hung run.
module tb_bolt_fifo;
  localparam int DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [15:0] in_data = '0, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [15:0] ref_q [$];
  int n_push = 0, n_pop = 0;

  bolt_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200_000) @(posedge clk);
    $display("FAIL: watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      // outputs after the previous rising edge
      check(32'(count) == ref_q.size(), "count equals reference length");
      check(in_ready == (ref_q.size() < DEPTH), "in_ready exactly when not full");
      check(out_valid == (ref_q.size() > 0), "out_valid exactly when not empty");
      if (out_valid && ref_q.size() > 0) check(out_data == ref_q[0], "head equals oldest word");
      // account for the transfers that happen at the coming rising edge
      in_valid  = ($urandom_range(99) < (c < 2500 ? 70 : 30));
      out_ready = ($urandom_range(99) < (c < 2500 ? 30 : 70));
      in_data   = 16'($urandom());
      #1;
      if (out_valid && out_ready) begin void'(ref_q.pop_front()); n_pop++; end
      if (in_valid && in_ready)   begin ref_q.push_back(in_data); n_push++; end
    end
    check(n_push > 1000 && n_pop > 1000, "enough traffic in both directions");
    $display("INFO: pushes=%0d pops=%0d", n_push, n_pop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
