// tb_bolt_hac -- self-checking test of the Host Access Controller (HAC).
//
// Eight host pages sit in a behavioural host memory (20-cycle latency, random request
// stalls) at base 0x2000_0000. The test preloads random tuples, then runs 300 random
// operations against a reference copy of host memory:
//   READ  page p into slot s  -> sp[s] must equal the reference page
//   tuple writes via tw_*     -> applied to the scratchpad reference
//   WRITE slot s to page p    -> host memory must equal the scratchpad
//   DUMMY page p              -> host memory page must be all zero (dummy tuples)
// It also checks the address translation (no out-of-range beat) and the page counters.
// Commands are issued on the falling edge; done is awaited before the next command.
module tb_bolt_hac;
  import bolt_pkg::*;
  localparam int NP = 8;
  localparam logic [63:0] HBASE = 64'h2000_0000;
  localparam logic [1:0] HAC_READ = 2'd0, HAC_WRITE = 2'd1, HAC_DUMMY = 2'd2;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 1'b0, cmd_ready, cmd_slot = 1'b0, done, tw_valid = 1'b0, tw_slot = 1'b0;
  logic [1:0] cmd_op = '0;
  bin_t cmd_page = '0;
  page_t [1:0] sp;
  logic [$clog2(LMAX)-1:0] tw_idx = '0;
  tuple_t tw_tuple = '0;
  logic [31:0] n_page_rd, n_page_wr;
  bolt_mem_if #(.AW(64), .DW(HTUP_W), .MW(1)) host (.clk, .rst_n);

  page_t ref_host [NP];
  page_t ref_sp [2];
  int e_rd = 0, e_wr = 0;

  bolt_hac dut (.clk, .rst_n, .host_base(HBASE), .cmd_valid, .cmd_ready, .cmd_op, .cmd_slot,
                .cmd_page, .done, .sp, .tw_valid, .tw_slot, .tw_idx, .tw_tuple, .host,
                .n_page_rd, .n_page_wr);

  bolt_tb_mem #(.AW(64), .DW(HTUP_W), .MW(1), .DEPTH(NP*LMAX), .LAT(20), .BASE(HBASE),
                .SHIFT(4), .STALL(1'b1)) u_host (
    .clk, .req_valid(host.req_valid), .req_ready(host.req_ready), .req_we(host.req_we),
    .req_addr(host.req_addr), .req_wdata(host.req_wdata), .req_wmask(host.req_wmask),
    .rsp_valid(host.rsp_valid), .rsp_rdata(host.rsp_rdata));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic tuple_t rnd_tuple();
    tuple_t t;
    t.valid = 1'($urandom());
    t.key   = $urandom();
    t.value = {$urandom(), $urandom()};
    return t;
  endfunction

  task automatic hac(input logic [1:0] op, input logic s, input int p);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_slot = s; cmd_page = bin_t'(p);
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!done) @(negedge clk);
  endtask

  function automatic bit host_page_is(input int p, input page_t pg);
    for (int i = 0; i < LMAX; i++)
      if (u_host.mem[p*LMAX + i] != HTUP_W'(pg[i])) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    repeat (500_000) @(posedge clk);
    $display("FAIL: watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p, s, r;
    for (int q = 0; q < NP; q++)
      for (int i = 0; i < LMAX; i++) begin
        ref_host[q][i] = rnd_tuple();
        u_host.mem[q*LMAX + i] = HTUP_W'(ref_host[q][i]);
      end
    ref_sp[0] = '0; ref_sp[1] = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 300; c++) begin
      p = $urandom_range(NP-1);
      s = $urandom_range(1);
      r = $urandom_range(99);
      if (r < 40) begin
        hac(HAC_READ, 1'(s), p);
        e_rd++;
        ref_sp[s] = ref_host[p];
        check(sp[s] == ref_sp[s], "scratchpad holds the page after READ");
        check(sp[1-s] == ref_sp[1-s], "other scratchpad untouched");
      end else if (r < 70) begin
        // modify a few tuples in place, then write the slot back
        repeat (3) begin
          @(negedge clk);
          tw_valid = 1'b1; tw_slot = 1'(s); tw_idx = $urandom_range(LMAX-1); tw_tuple = rnd_tuple();
          ref_sp[s][tw_idx] = tw_tuple;
          @(negedge clk);
          tw_valid = 1'b0;
        end
        check(sp[s] == ref_sp[s], "tuple writes land in the scratchpad");
        hac(HAC_WRITE, 1'(s), p);
        e_wr++;
        ref_host[p] = ref_sp[s];
        check(host_page_is(p, ref_host[p]), "host page equals scratchpad after WRITE");
      end else begin
        hac(HAC_DUMMY, 1'(s), p);
        ref_host[p] = '0;
        check(host_page_is(p, ref_host[p]), "host page is all dummy after DUMMY");
      end
    end
    repeat (30) @(negedge clk);
    check(u_host.n_oob == 0, "every beat inside the page region");
    check(32'(n_page_rd) == e_rd && 32'(n_page_wr) == e_wr, "page counters match");
    $display("INFO: reads=%0d writes=%0d", e_rd, e_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
