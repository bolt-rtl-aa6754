// tb_bolt_value_access -- self-checking test of the value-access stage (VAC).
//
// VAC is connected to a real host access controller, a behavioural host memory (8 pages,
// 12-cycle latency, random stalls) and a behavioural value store (32 lines, random
// stalls). K = 4, so bins 0-3 are HBM bins and bins 4-11 are host pages 0-7. Each of
// 600 rounds builds one scenario directly in the memories and offers one key-search
// result: a hit whose value lives in a host page, in an HBM line or in the stash, a hit
// whose page no longer holds the key ("lost"), or a miss with or without room in the
// map; the operation is a random GET, PUT or DELETE. The test checks the response
// (status and value), the result handed to remap (keep, is_new, value, page_rd, hit),
// that every host-page bin among (p1, p2) was read exactly once, that a found host tuple
// is removed from the scratchpad, that an HBM line is cleared and a stash line kept,
// and the lost-key counter. Both outputs see random back-pressure; a watchdog guards it.
module tb_bolt_value_access;
  import bolt_pkg::*;
  localparam int K = 4, NP = 8, VSL = 32;
  localparam logic [63:0] HBASE = 64'h4000_0000;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 1'b0, in_ready, rsp_valid, rsp_ready = 1'b0, out_valid, out_ready = 1'b0, busy;
  ks_res_t in_res = '0;
  rsp_t rsp;
  vac_res_t out_res;
  logic [31:0] n_lost, n_page_rd, n_page_wr;
  logic hac_valid, hac_ready, hac_slot, hac_done, tw_valid, tw_slot;
  logic [1:0] hac_op;
  bin_t hac_page;
  page_t [1:0] sp;
  logic [$clog2(LMAX)-1:0] tw_idx;
  tuple_t tw_tuple;
  bolt_mem_if #(.AW(64), .DW(HTUP_W), .MW(1)) host (.clk, .rst_n);
  bolt_mem_if #(.AW(VPTR_W), .DW(VAL_W), .MW(1)) vs (.clk, .rst_n);

  bolt_value_access #(.K(K)) dut (.*);

  bolt_hac u_hac (.clk, .rst_n, .host_base(HBASE), .cmd_valid(hac_valid), .cmd_ready(hac_ready),
                  .cmd_op(hac_op), .cmd_slot(hac_slot), .cmd_page(hac_page), .done(hac_done), .sp,
                  .tw_valid, .tw_slot, .tw_idx, .tw_tuple, .host, .n_page_rd, .n_page_wr);

  bolt_tb_mem #(.AW(64), .DW(HTUP_W), .MW(1), .DEPTH(NP*LMAX), .LAT(12), .BASE(HBASE),
                .SHIFT(4), .STALL(1'b1)) u_host (
    .clk, .req_valid(host.req_valid), .req_ready(host.req_ready), .req_we(host.req_we),
    .req_addr(host.req_addr), .req_wdata(host.req_wdata), .req_wmask(host.req_wmask),
    .rsp_valid(host.rsp_valid), .rsp_rdata(host.rsp_rdata));
  bolt_tb_mem #(.AW(VPTR_W), .DW(VAL_W), .MW(1), .DEPTH(VSL), .LAT(3), .STALL(1'b1)) u_vs (
    .clk, .req_valid(vs.req_valid), .req_ready(vs.req_ready), .req_we(vs.req_we),
    .req_addr(vs.req_addr), .req_wdata(vs.req_wdata), .req_wmask(vs.req_wmask),
    .rsp_valid(vs.rsp_valid), .rsp_rdata(vs.rsp_rdata));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // captured outputs
  rsp_t     got_rsp;
  vac_res_t got_out;
  bit       got_r, got_o;
  always @(posedge clk) begin
    if (rsp_valid && rsp_ready) begin got_rsp = rsp; got_r = 1'b1; end
    if (out_valid && out_ready) begin got_out = out_res; got_o = 1'b1; end
  end
  always @(negedge clk) begin
    rsp_ready = ($urandom_range(99) < 50);
    out_ready = ($urandom_range(99) < 50);
  end

  initial begin
    repeat (400_000) @(posedge clk);
    $display("FAIL: watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cnt [6];
  initial begin
    int sc, idx, rd0, lost0, lost_exp, s_found;
    logic [KEY_W-1:0] key;
    logic [VAL_W-1:0] v, exp_val;
    bit found;
    ks_res_t r;
    status_e est;
    bit ekeep, enew;
    lost_exp = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 600; c++) begin
      // fill every page with unrelated tuples
      for (int i = 0; i < NP*LMAX; i++) begin
        tuple_t t;
        t.valid = 1'($urandom()); t.key = $urandom() | 32'h8000_0000; t.value = {$urandom(), $urandom()};
        u_host.mem[i] = HTUP_W'(t);
      end
      key = $urandom() & 32'h7FFF_FFFF;
      v   = {$urandom(), $urandom()};
      r = '0;
      r.cmd.op = op_e'($urandom_range(2));
      r.cmd.key = key;
      r.cmd.payload = (r.cmd.op == OP_PUT) ? {$urandom(), $urandom()} : '0;
      r.p1 = bin_t'($urandom_range(K + NP - 1));
      do r.p2 = bin_t'($urandom_range(K + NP - 1)); while (r.p2 == r.p1);
      r.sel = 1'($urandom());
      r.vptr = vptr_t'($urandom_range(VSL-1));
      r.ptr = pm_ptr_t'($urandom());
      sc = $urandom_range(5);   // 0 host hit, 1 hbm hit, 2 stash hit, 3 lost, 4 miss+room, 5 miss full
      found = 1'b0; s_found = 0; idx = 0;
      case (sc)
        0, 3: begin
          // the bin of the item must be a host page
          if (r.sel) begin if (r.p2 < K) r.p2 = bin_t'(K + $urandom_range(NP-1)); if (r.p2 == r.p1) r.p1 = (r.p2 == K) ? bin_t'(K+1) : bin_t'(K); end
          else       begin if (r.p1 < K) r.p1 = bin_t'(K + $urandom_range(NP-1)); if (r.p1 == r.p2) r.p2 = (r.p1 == K) ? bin_t'(K+1) : bin_t'(K); end
          r.hit = 1'b1; r.loc = LOC_HOST;
          if (sc == 0) begin
            tuple_t t;
            idx = $urandom_range(LMAX-1);
            t.valid = 1'b1; t.key = key; t.value = v;
            u_host.mem[((r.sel ? r.p2 : r.p1) - K) * LMAX + idx] = HTUP_W'(t);
            found = 1'b1; s_found = r.sel;
          end
        end
        1, 2: begin
          r.hit = 1'b1; r.loc = (sc == 1) ? LOC_HBM : LOC_STASH;
          u_vs.mem[r.vptr] = v; found = 1'b1;
        end
        4: begin r.hit = 1'b0; r.can_ins = 1'b1; r.loc = LOC_HOST; end
        default: begin r.hit = 1'b0; r.can_ins = 1'b0; r.loc = LOC_HOST; end
      endcase
      cnt[sc]++;
      if (sc == 3) lost_exp++;
      // expected results
      exp_val = '0; ekeep = 1'b0; enew = 1'b0;
      case (r.cmd.op)
        OP_GET: begin est = found ? ST_GET_HIT : ST_GET_NULL; exp_val = found ? v : '0; ekeep = found; end
        OP_PUT: begin
          if (found) begin est = ST_PUT_OK; ekeep = 1'b1; end
          else if (!r.hit && r.can_ins) begin est = ST_PUT_OK; ekeep = 1'b1; enew = 1'b1; end
          else est = ST_FULL;
        end
        default: est = ST_DEL_OK;
      endcase
      rd0 = n_page_rd;
      got_r = 1'b0; got_o = 1'b0;
      @(negedge clk);
      in_res = r; in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      wait (got_r && got_o);
      @(negedge clk);
      check(got_rsp.status == est, "response status");
      check(got_rsp.value == exp_val, "response value");
      check(got_out.keep == ekeep && got_out.is_new == enew, "keep / is_new flags");
      check(got_out.value == ((r.cmd.op == OP_PUT) ? r.cmd.payload : (found ? v : '0)), "value handed to remap");
      check(got_out.page_rd == {r.p2 >= K, r.p1 >= K}, "page_rd marks the host-page bins");
      check(got_out.ks.hit == (r.hit && (sc != 3)), "lost key reported as not mapped");
      check(32'(n_page_rd) - rd0 == (r.p1 >= K) + (r.p2 >= K), "one page read per host-page bin");
      if (sc == 0) check(!sp[s_found][idx].valid, "found tuple removed from the scratchpad");
      if (sc == 1) check(u_vs.mem[r.vptr] == '0, "HBM line cleared after the read");
      if (sc == 2) check(u_vs.mem[r.vptr] == v, "stash line left in place");
    end
    check(32'(n_lost) == lost_exp, "lost-key counter");
    for (int i = 0; i < 6; i++) check(cnt[i] > 50, "every scenario exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
