// tb_bolt_top -- end-to-end test of the BOLT core at reduced table sizes.
//
// The core is connected to behavioural HBM (position map, value store) and host-memory
// models. After start-up, a stream of random GET / PUT / DELETE commands over a small
// key set is pushed through the command port while responses are compared, in order,
// with a reference key-value map kept by the testbench. Then every key is read back.
// Beyond correctness, the test checks that the mechanisms of the design were all
// exercised: insertion of new keys, GET of absent keys, deletion, placement in HBM bins
// and in the stash, power-of-two-choices picking the second bin, eviction of stashed
// items into pages, and that every page read is written back.
// Last, the same key is read NHOT times in a row and the host pages fetched meanwhile
// are counted: because every access re-places the key in fresh random bins, the reads
// must spread over all host pages (chi-square of the per-page counts against a uniform
// spread, threshold 60 for 25 degrees of freedom) instead of returning to one page.
// Finally up to NFILL new keys are inserted one by one until the map answers FULL; a
// refused key must then read back as absent and every accepted key as present.
module tb_bolt_top;
  import bolt_pkg::*;

  localparam int unsigned NB   = 32;
  localparam int unsigned K    = 6;
  localparam int unsigned ROWS = 16;
  localparam int unsigned VSL  = 512;
  localparam int unsigned NKEY = 120;
  localparam int unsigned NCMD = 3000;
  localparam longint unsigned HBASE = 64'h1000_0000;
  localparam int unsigned NHOT = 600;
  localparam int unsigned NFILL = 400;

  logic clk = 1'b0, rst_n = 1'b1;  // falls at time 1 so the asynchronous reset sees an edge
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic init_done, idle;
  logic cmd_valid = 1'b0, cmd_ready;
  logic [CMD_W-1:0] cmd_word = '0;
  logic rsp_valid, rsp_ready;
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

  bolt_top #(.NB(NB), .K(K), .ROWS(ROWS), .VS_LINES(VSL)) dut (.*, .host_base(HBASE));

  bolt_tb_mem #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS), .DEPTH(ROWS), .LAT(4)) u_pm (
    .clk, .req_valid(pm_req_valid), .req_ready(pm_req_ready), .req_we(pm_req_we),
    .req_addr(pm_req_addr), .req_wdata(pm_req_wdata), .req_wmask(pm_req_wmask),
    .rsp_valid(pm_rsp_valid), .rsp_rdata(pm_rsp_rdata));
  bolt_tb_mem #(.AW(VPTR_W), .DW(VAL_W), .MW(1), .DEPTH(VSL), .LAT(4), .STALL(1'b1)) u_vs (
    .clk, .req_valid(vs_req_valid), .req_ready(vs_req_ready), .req_we(vs_req_we),
    .req_addr(vs_req_addr), .req_wdata(vs_req_wdata), .req_wmask(1'b1),
    .rsp_valid(vs_rsp_valid), .rsp_rdata(vs_rsp_rdata));
  bolt_tb_mem #(.AW(64), .DW(HTUP_W), .MW(1), .DEPTH((NB-K)*LMAX), .LAT(20), .BASE(HBASE),
                .SHIFT(4), .STALL(1'b1)) u_host (
    .clk, .req_valid(host_req_valid), .req_ready(host_req_ready), .req_we(host_req_we),
    .req_addr(host_req_addr), .req_wdata(host_req_wdata), .req_wmask(1'b1),
    .rsp_valid(host_rsp_valid), .rsp_rdata(host_rsp_rdata));

  // ---------------- host page reads per page (first tuple of each page read) ----------------
  int pg_rd [NB-K];
  logic hot_on = 1'b0;
  always @(posedge clk)
    if (hot_on && host_req_valid && host_req_ready && !host_req_we) begin
      longint unsigned idx;
      idx = (host_req_addr - HBASE) >> 4;
      if (idx % LMAX == 0) pg_rd[idx / LMAX]++;
    end

  // ---------------- reference model and expected responses ----------------
  logic [VAL_W-1:0] ref_map [logic [KEY_W-1:0]];
  logic [KEY_W-1:0] keys [NKEY];
  logic [RSP_W-1:0] exp_q [$];
  int n_ins = 0, n_null = 0, n_hit = 0, n_del_hit = 0;
  logic [15:0] rsp_lfsr = 16'h1D2C;
  int n_sent = 0;
  bit allow_full = 1'b0;   // fill phase: a FULL answer may replace PUT_OK
  bit got_full = 1'b0;

  function automatic logic [RSP_W-1:0] mk_rsp(status_e st, logic [VAL_W-1:0] v);
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
    n_sent++;
    // expected result from the reference map
    if (!is_put) begin
      if (ref_map.exists(key)) begin exp_q.push_back(mk_rsp(ST_GET_HIT, ref_map[key])); n_hit++; end
      else begin exp_q.push_back(mk_rsp(ST_GET_NULL, '0)); n_null++; end
    end else if (pl == TOMBSTONE) begin
      if (ref_map.exists(key)) begin ref_map.delete(key); n_del_hit++; end
      exp_q.push_back(mk_rsp(ST_DEL_OK, '0));
    end else begin
      if (!ref_map.exists(key)) n_ins++;
      ref_map[key] = pl;
      exp_q.push_back(mk_rsp(ST_PUT_OK, '0));
    end
    // Drive on the falling edge and sample ready there, so the handshake at the
    // following rising edge is race-free.
    @(negedge clk);
    cmd_word  = w;
    cmd_valid = 1'b1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  // Response checker with random back-pressure.
  int n_rsp_seen = 0;
  assign rsp_ready = rsp_lfsr[0] | rsp_lfsr[3];
  always_ff @(posedge clk) begin
    rsp_lfsr <= {rsp_lfsr[14:0], rsp_lfsr[15] ^ rsp_lfsr[13] ^ rsp_lfsr[12] ^ rsp_lfsr[10]};
    if (rsp_valid && rsp_ready) begin
      n_rsp_seen <= n_rsp_seen + 1;
      checks <= checks + 1;
      if (exp_q.size() == 0) begin
        failures <= failures + 1;
        $display("FAIL: unexpected response %h", rsp_word);
      end else begin
        if (allow_full && rsp_word === mk_rsp(ST_FULL, '0) && exp_q[0] === mk_rsp(ST_PUT_OK, '0))
          got_full <= 1'b1;
        else if (rsp_word !== exp_q[0]) begin
          failures <= failures + 1;
          if (failures < 10) $display("FAIL: response %0d got %h exp %h", n_rsp_seen, rsp_word, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
    end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Watchdog.
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned r;
    int lat_max, t0;
    #1 rst_n = 1'b0;
    for (int i = 0; i < NKEY; i++) keys[i] = $urandom() | 32'h1;
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    wait (init_done);
    @(posedge clk);
    check(stats.n_page_rd == 0, "no page reads during start-up");

    // Random command mix: 40 % GET, 45 % PUT, 15 % DELETE.
    for (int c = 0; c < NCMD; c++) begin
      logic [KEY_W-1:0] key;
      logic [VAL_W-1:0] val;
      r   = $urandom_range(99);
      key = keys[$urandom_range(NKEY-1)];
      val = {$urandom(), $urandom()};
      if (val == TOMBSTONE) val = 64'h1234;
      if (r < 40)      send(1'b0, key, $urandom());    // GET with a dummy payload
      else if (r < 85) send(1'b1, key, val);
      else             send(1'b1, key, TOMBSTONE);
    end
    // Read every key back; absent ones must come back null.
    for (int i = 0; i < NKEY; i++) send(1'b0, keys[i], '0);
    // Single-command latency: one GET on an idle core.
    wait (exp_q.size() == 0);
    wait (idle);
    @(posedge clk);
    t0 = $time;
    send(1'b0, keys[0], '0);
    wait (exp_q.size() == 0);
    lat_max = ($time - t0) / 10;
    $display("INFO: one GET took %0d cycles from command to response", lat_max);
    check(lat_max < 400, "a single command completes in under 400 cycles");
    wait (idle);
    repeat (10) @(posedge clk);

    // One hot key, read over and over: page reads must look uniform.
    begin
      real chi, e;
      int tot, mn, mx;
      send(1'b1, keys[1], 64'h0BAD_CAFE);
      wait (exp_q.size() == 0);
      wait (idle);
      @(posedge clk);
      for (int i = 0; i < NB-K; i++) pg_rd[i] = 0;
      hot_on = 1'b1;
      for (int c = 0; c < NHOT; c++) send(1'b0, keys[1], '0);
      wait (exp_q.size() == 0);
      wait (idle);
      @(posedge clk);
      hot_on = 1'b0;
      tot = 0; mn = 1 << 30; mx = 0;
      for (int i = 0; i < NB-K; i++) begin
        tot += pg_rd[i];
        if (pg_rd[i] < mn) mn = pg_rd[i];
        if (pg_rd[i] > mx) mx = pg_rd[i];
      end
      e = real'(tot) / real'(NB-K);
      chi = 0.0;
      for (int i = 0; i < NB-K; i++) chi += (real'(pg_rd[i]) - e) ** 2 / e;
      $display("INFO: hot key: %0d page reads over %0d pages, min %0d max %0d chi-square %0.1f",
               tot, NB-K, mn, mx, chi);
      check(tot > NHOT, "the hot key caused page reads");
      check(mn > 0, "every host page was read while one key was accessed");
      check(chi < 60.0, "page reads of a single hot key are spread uniformly");
    end

    // Fill the map with new keys until it refuses one.
    begin
      logic [KEY_W-1:0] fk [$];
      int n_ok, n_full;
      n_ok = 0; n_full = 0;
      check(stats.n_ri_full == 0, "no reverse-index overflow at normal load");
      allow_full = 1'b1;
      for (int i = 0; i < NFILL && n_full < 5; i++) begin
        logic [KEY_W-1:0] key;
        key = 32'h8000_0000 | 32'(i * 7919 + 3);
        got_full = 1'b0;
        send(1'b1, key, 64'(key) * 3);
        wait (exp_q.size() == 0);
        @(negedge clk);
        if (got_full) begin
          ref_map.delete(key);
          n_full++;
        end else n_ok++;
        fk.push_back(key);
      end
      allow_full = 1'b0;
      foreach (fk[i]) send(1'b0, fk[i], '0);
      wait (exp_q.size() == 0);
      wait (idle);
      repeat (10) @(posedge clk);
      $display("INFO: fill: %0d keys accepted, %0d refused, %0d keys stored; page full %0d, ri full %0d",
               n_ok, n_full, ref_map.size(), stats.n_page_full, stats.n_ri_full);
      check(n_full > 0, "a full map refuses a new key with FULL");
      check(n_ok > 0, "new keys were accepted before the map filled");
    end

    $display("INFO: ins=%0d null=%0d hit=%0d del=%0d | hbm=%0d stash=%0d p2c_alt=%0d evict=%0d pgfull=%0d rd=%0d wr=%0d",
             n_ins, n_null, n_hit, n_del_hit, stats.n_to_hbm, stats.n_to_stash, stats.n_p2c_alt,
             stats.n_evicted, stats.n_page_full, stats.n_page_rd, stats.n_page_wr);
    check(n_rsp_seen == n_sent, "one response per command");
    check(stats.n_rsp == n_sent, "responser count matches");
    check(stats.n_get + stats.n_put + stats.n_del == n_sent, "decoder counted every command");
    check(n_ins > 0,             "new keys were inserted");
    check(n_null > 0,            "GET of an absent key happened");
    check(stats.n_deleted == n_del_hit, "every delete of a present key removed it");
    check(stats.n_to_hbm > 0,    "items were placed in HBM bins");
    check(stats.n_to_stash > 0,  "items were placed in the stash");
    check(stats.n_p2c_alt > 0,   "P2C chose the second candidate");
    check(stats.n_evicted > 0,   "stash items were evicted to pages");
    check(stats.n_page_rd > 0,   "host pages were read");
    check(stats.n_page_wr == stats.n_page_rd, "every page read was written back");
    check(stats.n_lost == 0,     "no mapped key was missing from its pages");
    check(stats.n_vs_full == 0, "no value-store overflow");
    if (u_pm.n_oob + u_vs.n_oob + u_host.n_oob != 0) $display("INFO: oob pm=%0d vs=%0d host=%0d", u_pm.n_oob, u_vs.n_oob, u_host.n_oob);
    check(u_pm.n_oob == 0 && u_vs.n_oob == 0 && u_host.n_oob == 0, "all memory accesses in range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
