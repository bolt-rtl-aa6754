// tb_bolt_decoder -- self-checking test of the command decoder (DEC).
//
// Random 128-bit command words (opcode bit 96, key bits 95:64, payload bits 63:0) are
// streamed in with random valid gaps and random output back-pressure. A queue of
// expected decoded commands is compared in order with the output: GET clears the
// payload, a PUT whose payload is the all-ones tombstone becomes DELETE (payload cleared), any other
// PUT keeps key and payload. The three command counters are checked at the end.
module tb_bolt_decoder;
  import bolt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [CMD_W-1:0] in_word = '0;
  cmd_t out_cmd;
  logic [31:0] n_get, n_put, n_del;
  cmd_t exp_q [$];
  int eg = 0, ep = 0, ed = 0, n_out = 0;

  bolt_decoder dut (.*);

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
    cmd_t e;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    acc = 1'b0;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      if (acc) in_valid = 1'b0;   // taken at the rising edge just passed
      out_ready = ($urandom_range(99) < 60);
      if (!in_valid) begin
        // a new word is offered only once the previous one was taken
        in_valid = ($urandom_range(99) < 70);
        in_word  = {$urandom(), $urandom(), $urandom(), $urandom()};
        in_word[127:97] = '0;
        case ($urandom_range(2))
          0: in_word[96] = 1'b0;
          1: in_word[96] = 1'b1;
          default: begin in_word[96] = 1'b1; in_word[63:0] = TOMBSTONE; end
        endcase
      end
      #1;
      acc = in_valid && in_ready;
      if (out_valid && out_ready) begin
        check(exp_q.size() > 0 && out_cmd == exp_q[0], "decoded command matches");
        if (exp_q.size() > 0) void'(exp_q.pop_front());
        n_out++;
      end
      if (acc) begin
        e.key = in_word[64 +: KEY_W];
        if (!in_word[96])                   begin e.op = OP_GET; e.payload = '0; eg++; end
        else if (in_word[63:0] == TOMBSTONE) begin e.op = OP_DEL; e.payload = '0; ed++; end
        else                                 begin e.op = OP_PUT; e.payload = in_word[63:0]; ep++; end
        exp_q.push_back(e);
      end
    end
    @(negedge clk);
    check(32'(n_get) == eg && 32'(n_put) == ep && 32'(n_del) == ed, "command counters match");
    check(n_out > 1000, "enough commands decoded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
