// tb_bolt_top_full -- full-size run of the BOLT core at its default parameters.
//
// bolt_top is instantiated without parameter overrides, i.e. with the main
// configuration: 131072 logical bins (26214 HBM bins, 104858 host pages of 14 tuples),
// a 65536-row position map and a 297946-line value store. Behavioural memories of the
// same sizes stand in for the HBM map, the HBM value store and the host page region
// (about 1.47 million 16-byte tuples). The test runs the whole start-up sequence, which
// clears the map and writes every host page once with dummy tuples, and checks that
// every page was written exactly once in the host memory (via a write counter) and that
// no access fell outside the memories. It then sends 200 commands (PUT, GET, DELETE on
// 60 keys) and checks every response against a reference map, plus the read-back of
// every key and the page-read/page-write balance. A watchdog ends a hung run.
module tb_bolt_top_full;
  import bolt_pkg::*;
  localparam logic [63:0] HBASE = 64'h8_0000_0000;
  localparam int NKEY = 60, NCMD = 200;
  localparam int HOST_BEATS = M_HOST * LMAX;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init_done, idle;
  logic cmd_valid = 1'b0, cmd_ready;
  logic [CMD_W-1:0] cmd_word = '0;
  logic rsp_valid, rsp_ready = 1'b1;
  logic [RSP_W-1:0] rsp_word;
  logic pm_req_valid, pm_req_ready, pm_req_we, pm_rsp_valid;
  logic [ROW_AW-1:0] pm_req_addr;
  logic [PM_ROW_W-1:0] pm_req_wdata, pm_rsp_rdata;
  logic [PM_SLOTS-1:0] pm_req_wmask;
  logic vs_req_valid, vs_req_ready, vs_req_we, vs_rsp_valid;
  logic [VPTR_W-1:0] vs_req_addr;
  logic [VAL_W-1:0] vs_req_wdata, vs_rsp_rdata;
  logic host_req_valid, host_req_ready, host_req_we, host_rsp_valid;
  logic [63:0] host_req_addr;
  logic [HTUP_W-1:0] host_req_wdata, host_rsp_rdata;
  stats_t stats;

  bolt_top dut (.*, .host_base(HBASE));

  bolt_tb_mem #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS), .DEPTH(PM_ROWS), .LAT(4)) u_pm (
    .clk, .req_valid(pm_req_valid), .req_ready(pm_req_ready), .req_we(pm_req_we),
    .req_addr(pm_req_addr), .req_wdata(pm_req_wdata), .req_wmask(pm_req_wmask),
    .rsp_valid(pm_rsp_valid), .rsp_rdata(pm_rsp_rdata));
  bolt_tb_mem #(.AW(VPTR_W), .DW(VAL_W), .MW(1), .DEPTH(VS_DEPTH), .LAT(4)) u_vs (
    .clk, .req_valid(vs_req_valid), .req_ready(vs_req_ready), .req_we(vs_req_we),
    .req_addr(vs_req_addr), .req_wdata(vs_req_wdata), .req_wmask(1'b1),
    .rsp_valid(vs_rsp_valid), .rsp_rdata(vs_rsp_rdata));
  bolt_tb_mem #(.AW(64), .DW(HTUP_W), .MW(1), .DEPTH(HOST_BEATS), .LAT(20), .BASE(HBASE),
                .SHIFT(4)) u_host (
    .clk, .req_valid(host_req_valid), .req_ready(host_req_ready), .req_we(host_req_we),
    .req_addr(host_req_addr), .req_wdata(host_req_wdata), .req_wmask(1'b1),
    .rsp_valid(host_rsp_valid), .rsp_rdata(host_rsp_rdata));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // host write beats during start-up
  longint n_host_wr = 0;
  always @(posedge clk) if (host_req_valid && host_req_ready && host_req_we) n_host_wr++;

  // reference model
  logic [VAL_W-1:0] ref_map [logic [KEY_W-1:0]];
  logic [RSP_W-1:0] exp_q [$];
  logic [KEY_W-1:0] keys [NKEY];

  function automatic logic [RSP_W-1:0] mk_rsp(input status_e st, input logic [VAL_W-1:0] v);
    logic [RSP_W-1:0] w;
    w = '0;
    w[RSP_W-1 -: 8] = st;
    w[0 +: VAL_W] = v;
    return w;
  endfunction

  task automatic send(input logic is_put, input logic [KEY_W-1:0] key, input logic [VAL_W-1:0] pl);
    logic [CMD_W-1:0] w;
    w = '0;
    w[96] = is_put;
    w[64 +: KEY_W] = key;
    w[0 +: VAL_W] = pl;
    if (!is_put) exp_q.push_back(ref_map.exists(key) ? mk_rsp(ST_GET_HIT, ref_map[key]) : mk_rsp(ST_GET_NULL, '0));
    else if (pl == TOMBSTONE) begin
      if (ref_map.exists(key)) ref_map.delete(key);
      exp_q.push_back(mk_rsp(ST_DEL_OK, '0));
    end else begin
      ref_map[key] = pl;
      exp_q.push_back(mk_rsp(ST_PUT_OK, '0));
    end
    @(negedge clk);
    cmd_word  = w;
    cmd_valid = 1'b1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  int n_rsp = 0;
  always @(posedge clk) begin
    if (rsp_valid && rsp_ready) begin
      n_rsp++;
      check(exp_q.size() > 0 && rsp_word == exp_q[0], "response matches the reference map");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    $display("FAIL: watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    #1 rst_n = 1'b0;
    for (int i = 0; i < NKEY; i++) keys[i] = $urandom() | 32'h1;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    t0 = $time;
    wait (init_done);
    @(negedge clk);
    $display("INFO: start-up took %0d cycles, %0d host beats written", ($time - t0) / 10, n_host_wr);
    check(n_host_wr == HOST_BEATS, "start-up writes every host tuple exactly once");
    check(stats.n_page_wr == 0 && stats.n_page_rd == 0, "start-up is not counted as access traffic");
    for (int c = 0; c < NCMD; c++) begin
      int r;
      logic [VAL_W-1:0] v;
      r = $urandom_range(99);
      v = {$urandom(), $urandom()};
      if (v == TOMBSTONE) v = 64'h5;
      if (r < 35) send(1'b0, keys[$urandom_range(NKEY-1)], '0);
      else if (r < 85) send(1'b1, keys[$urandom_range(NKEY-1)], v);
      else send(1'b1, keys[$urandom_range(NKEY-1)], TOMBSTONE);
    end
    for (int i = 0; i < NKEY; i++) send(1'b0, keys[i], '0);
    wait (exp_q.size() == 0);
    wait (idle);
    repeat (10) @(negedge clk);
    check(n_rsp == NCMD + NKEY, "one response per command");
    check(stats.n_page_wr == stats.n_page_rd, "every page read is written back");
    check(stats.n_to_hbm + stats.n_to_stash > 0, "items were placed");
    check(stats.n_lost == 0, "no mapped key lost");
    check(u_pm.n_oob == 0 && u_vs.n_oob == 0 && u_host.n_oob == 0, "all memory accesses in range");
    $display("INFO: hbm=%0d stash=%0d evicted=%0d page_rd=%0d page_wr=%0d", stats.n_to_hbm,
             stats.n_to_stash, stats.n_evicted, stats.n_page_rd, stats.n_page_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
