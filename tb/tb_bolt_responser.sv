// tb_bolt_responser -- self-checking test of the response formatter (RES).
//
// Random responses (status from the five codes, random 64-bit value) are offered with
// random gaps and the output is back-pressured at random. Each output word must carry
// the status in bits 127:120 and, for a GET hit only, the value in bits 63:0; all other
// bits are zero. Words must come out in order, and n_rsp must count the output
// handshakes. Stimulus is applied on the falling edge; a watchdog guards the run.
module tb_bolt_responser;
  import bolt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  rsp_t in_rsp = '0;
  logic [RSP_W-1:0] out_word;
  logic [31:0] n_rsp;
  logic [RSP_W-1:0] exp_q [$];
  int n_out = 0;
  status_e codes [5] = '{ST_GET_HIT, ST_GET_NULL, ST_PUT_OK, ST_DEL_OK, ST_FULL};

  bolt_responser dut (.*);

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
    bit acc;
    logic [RSP_W-1:0] w;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    acc = 1'b0;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      if (acc) in_valid = 1'b0;   // taken at the rising edge just passed
      out_ready = ($urandom_range(99) < 60);
      if (!in_valid) begin
        in_valid     = ($urandom_range(99) < 70);
        in_rsp.status = codes[$urandom_range(4)];
        in_rsp.value  = {$urandom(), $urandom()};
      end
      #1;
      acc = in_valid && in_ready;
      if (out_valid && out_ready) begin
        check(exp_q.size() > 0 && out_word == exp_q[0], "formatted word matches");
        if (exp_q.size() > 0) void'(exp_q.pop_front());
        n_out++;
      end
      if (acc) begin
        w = '0;
        w[RSP_W-1 -: 8] = in_rsp.status;
        if (in_rsp.status == ST_GET_HIT) w[0 +: VAL_W] = in_rsp.value;
        exp_q.push_back(w);
      end
    end
    @(negedge clk);
    check(32'(n_rsp) == n_out, "n_rsp counts output handshakes");
    check(n_out > 1000, "enough responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
