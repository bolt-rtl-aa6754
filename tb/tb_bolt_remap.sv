// tb_bolt_remap -- self-checking test of the remap and eviction stage (RMP).
//
// RMP is surrounded by the real count list, reverse index, free ring and host access
// controller, plus behavioural map (8 rows), value-store (32 lines) and host (8 pages)
// memories; K = 4, so bins 0-3 are HBM bins and 4-11 host pages. The testbench plays
// the value-access stage: for each access it reads the host-page bins of the item into
// the scratchpads through the HAC, removes the item from its current place (clears the
// tuple or the HBM line) and hands RMP a value-access result. 700 accesses insert new
// keys, re-place existing keys (with an old or new value) and delete keys. A reference
// model tracks each key's map pointer, bin, location and value, the per-bin counts and
// the page contents, and after every access checks: the map slot (key, new p1/p2 from
// rnd_p1/p2, the P2C choice of the lighter bin with ties to p1, location), the value at
// its location (value-store line or host tuple), every bin count, that stashed keys of
// the pages read were evicted into them, the reverse-index entries of stashed keys, the
// number of free value-store lines and the page write-back count. A watchdog guards it.
module tb_bolt_remap;
  import bolt_pkg::*;
  localparam int K = 4, NP = 8, NB = K + NP, ROWS = 8, VSL = 32;
  localparam int CW = $clog2(LMAX + 1) + 1;
  localparam logic [63:0] HBASE = 64'h4000_0000;
  localparam logic [1:0] HAC_READ = 2'd0;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- DUT and environment ----------------
  logic in_valid = 1'b0, in_ready, busy;
  vac_res_t in_res = '0;
  bin_t rnd_p1 = '0, rnd_p2 = '0;
  bin_t cl_rd_a, cl_rd_b, cl_upd_bin;
  logic [CW-1:0] cl_q_a, cl_q_b;
  logic cl_upd_valid, cl_upd_dec, cl_busy;
  logic ri_valid, ri_ready, ri_done, ri_ok;
  logic [1:0] ri_op;
  bin_t ri_page;
  pm_ptr_t ri_ptr;
  logic [$clog2(LMAX)-1:0] ri_idx;
  logic [LMAX-1:0] ri_row_valid;
  pm_ptr_t [LMAX-1:0] ri_row_ptr;
  logic alloc_req, alloc_valid, alloc_ok, free_req;
  vptr_t alloc_addr, free_addr;
  logic [VPTR_W:0] level;
  logic r_hac_valid, r_hac_slot, hac_ready, hac_done, r_tw_valid, r_tw_slot;
  logic [1:0] r_hac_op;
  bin_t r_hac_page;
  logic [$clog2(LMAX)-1:0] r_tw_idx;
  tuple_t r_tw_tuple;
  page_t [1:0] sp;
  logic [31:0] n_to_hbm, n_to_stash, n_p2c_alt, n_evicted, n_page_full, n_ri_full, n_vs_full, n_deleted;
  logic [31:0] n_page_rd, n_page_wr;
  logic init_start = 1'b0, ring_done, cnt_done, ri_init_done;
  // testbench-side HAC / tuple-write access (plays the value-access stage)
  logic t_hac_valid = 1'b0, t_hac_slot = 1'b0, t_tw_valid = 1'b0, t_tw_slot = 1'b0;
  bin_t t_hac_page = '0;
  logic [$clog2(LMAX)-1:0] t_tw_idx = '0;

  bolt_mem_if #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS)) pm (.clk, .rst_n);
  bolt_mem_if #(.AW(VPTR_W), .DW(VAL_W), .MW(1)) vs (.clk, .rst_n);
  bolt_mem_if #(.AW(64), .DW(HTUP_W), .MW(1)) host (.clk, .rst_n);

  bolt_remap #(.K(K)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_res, .rnd_p1, .rnd_p2,
    .cl_rd_a, .cl_rd_b, .cl_q_a, .cl_q_b, .cl_upd_valid, .cl_upd_bin, .cl_upd_dec, .cl_busy,
    .ri_valid, .ri_op, .ri_page, .ri_ptr, .ri_idx, .ri_ready, .ri_done, .ri_ok, .ri_row_valid, .ri_row_ptr,
    .alloc_req, .alloc_valid, .alloc_ok, .alloc_addr, .free_req, .free_addr, .pm, .vs,
    .hac_valid(r_hac_valid), .hac_ready, .hac_op(r_hac_op), .hac_slot(r_hac_slot), .hac_page(r_hac_page),
    .hac_done, .sp, .tw_valid(r_tw_valid), .tw_slot(r_tw_slot), .tw_idx(r_tw_idx), .tw_tuple(r_tw_tuple),
    .busy, .n_to_hbm, .n_to_stash, .n_p2c_alt, .n_evicted, .n_page_full, .n_ri_full, .n_vs_full, .n_deleted);

  bolt_count_list #(.NB(NB)) u_cl (.clk, .rst_n, .init_start, .init_done(cnt_done), .rd_a(cl_rd_a),
    .rd_b(cl_rd_b), .q_a(cl_q_a), .q_b(cl_q_b), .upd_valid(cl_upd_valid), .upd_bin(cl_upd_bin),
    .upd_dec(cl_upd_dec), .busy(cl_busy));
  bolt_reverse_index #(.NPAGES(NP)) u_ri (.clk, .rst_n, .init_start, .init_done(ri_init_done),
    .op_valid(ri_valid), .op(ri_op), .page(ri_page), .ptr(ri_ptr), .idx(ri_idx), .ready(ri_ready),
    .done(ri_done), .ok(ri_ok), .row_valid(ri_row_valid), .row_ptr(ri_row_ptr));
  bolt_free_ring #(.DEPTH(VSL)) u_ring (.clk, .rst_n, .init_start, .init_done(ring_done), .alloc_req,
    .alloc_valid, .alloc_ok, .alloc_addr, .free_req, .free_addr, .level);
  bolt_hac u_hac (.clk, .rst_n, .host_base(HBASE),
    .cmd_valid(t_hac_valid | r_hac_valid), .cmd_ready(hac_ready),
    .cmd_op(t_hac_valid ? HAC_READ : r_hac_op), .cmd_slot(t_hac_valid ? t_hac_slot : r_hac_slot),
    .cmd_page(t_hac_valid ? t_hac_page : r_hac_page), .done(hac_done), .sp,
    .tw_valid(t_tw_valid | r_tw_valid), .tw_slot(t_tw_valid ? t_tw_slot : r_tw_slot),
    .tw_idx(t_tw_valid ? t_tw_idx : r_tw_idx), .tw_tuple(t_tw_valid ? tuple_t'('0) : r_tw_tuple),
    .host, .n_page_rd, .n_page_wr);

  bolt_tb_mem #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS), .DEPTH(ROWS), .LAT(4), .STALL(1'b1)) u_pm (
    .clk, .req_valid(pm.req_valid), .req_ready(pm.req_ready), .req_we(pm.req_we),
    .req_addr(pm.req_addr), .req_wdata(pm.req_wdata), .req_wmask(pm.req_wmask),
    .rsp_valid(pm.rsp_valid), .rsp_rdata(pm.rsp_rdata));
  bolt_tb_mem #(.AW(VPTR_W), .DW(VAL_W), .MW(1), .DEPTH(VSL), .LAT(3), .STALL(1'b1)) u_vs (
    .clk, .req_valid(vs.req_valid), .req_ready(vs.req_ready), .req_we(vs.req_we),
    .req_addr(vs.req_addr), .req_wdata(vs.req_wdata), .req_wmask(vs.req_wmask),
    .rsp_valid(vs.rsp_valid), .rsp_rdata(vs.rsp_rdata));
  bolt_tb_mem #(.AW(64), .DW(HTUP_W), .MW(1), .DEPTH(NP*LMAX), .LAT(10), .BASE(HBASE),
                .SHIFT(4), .STALL(1'b1)) u_host (
    .clk, .req_valid(host.req_valid), .req_ready(host.req_ready), .req_we(host.req_we),
    .req_addr(host.req_addr), .req_wdata(host.req_wdata), .req_wmask(host.req_wmask),
    .rsp_valid(host.rsp_valid), .rsp_rdata(host.rsp_rdata));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL: %s", what); end
  endtask

  // ---------------- reference model ----------------
  typedef struct {
    pm_ptr_t ptr;
    bin_t p1, p2;
    bit sel;
    loc_e loc;
    vptr_t vptr;
    logic [VAL_W-1:0] value;
  } item_t;
  item_t items [logic [KEY_W-1:0]];
  bit slot_used [ROWS][PM_SLOTS];
  int cnt [NB];
  int n_del = 0, n_new = 0, n_move = 0, n_ev = 0;

  function automatic bin_t bin_of(input item_t it);
    return it.sel ? it.p2 : it.p1;
  endfunction

  task automatic hac_read(input bit s, input bin_t b);
    @(negedge clk);
    while (!hac_ready) @(negedge clk);
    t_hac_valid = 1'b1; t_hac_slot = s; t_hac_page = b - bin_t'(K);
    @(negedge clk);
    t_hac_valid = 1'b0;
    while (!hac_done) @(negedge clk);
  endtask

  task automatic clear_tuple(input bit s, input int i);
    @(negedge clk);
    t_tw_valid = 1'b1; t_tw_slot = s; t_tw_idx = i;
    @(negedge clk);
    t_tw_valid = 1'b0;
  endtask

  function automatic int host_find(input bin_t b, input logic [KEY_W-1:0] k, output logic [VAL_W-1:0] v);
    tuple_t t;
    int n = 0;
    for (int i = 0; i < LMAX; i++) begin
      t = tuple_t'(u_host.mem[(b - K) * LMAX + i][$bits(tuple_t)-1:0]);
      if (t.valid && t.key == k) begin n++; v = t.value; end
    end
    return n;
  endfunction

  // one access: op 0 insert, 1 re-place, 2 delete
  task automatic access(input int op);
    logic [KEY_W-1:0] key;
    logic [KEY_W-1:0] ks [$];
    item_t it;
    vac_res_t v;
    bin_t a, b, dst;
    bit pr [2];
    int wr0;
    v = '0;
    if (op == 0) begin
      int row, sl;
      do key = $urandom(); while (items.exists(key));
      do begin row = $urandom_range(ROWS-1); sl = $urandom_range(PM_SLOTS-1); end while (slot_used[row][sl]);
      it.ptr.row = row_t'(row); it.ptr.slot = slot_idx_t'(sl);
      it.p1 = bin_t'($urandom_range(NB-1));
      do it.p2 = bin_t'($urandom_range(NB-1)); while (it.p2 == it.p1);
      v.ks.hit = 1'b0; v.ks.can_ins = 1'b1; v.ks.loc = LOC_HOST;
      v.ks.p1 = it.p1; v.ks.p2 = it.p2; v.ks.ptr = it.ptr;
      v.ks.cmd.op = OP_PUT; v.ks.cmd.key = key;
      v.keep = 1'b1; v.is_new = 1'b1; v.value = {$urandom(), $urandom()};
      it.value = v.value;
      slot_used[row][sl] = 1'b1;
    end else begin
      items.first(key);
      begin
        int skip = $urandom_range(items.size() - 1);
        repeat (skip) void'(items.next(key));
      end
      it = items[key];
      v.ks.hit = 1'b1; v.ks.p1 = it.p1; v.ks.p2 = it.p2; v.ks.sel = it.sel; v.ks.loc = it.loc;
      v.ks.vptr = it.vptr; v.ks.ptr = it.ptr; v.ks.cmd.key = key;
      v.ks.cmd.op = (op == 2) ? OP_DEL : OP_PUT;
      v.keep = (op != 2);
      v.value = ($urandom_range(1)) ? {$urandom(), $urandom()} : it.value;
    end
    // value-access part: read the host-page bins, take the item out
    pr[0] = (v.ks.p1 >= K); pr[1] = (v.ks.p2 >= K);
    if (pr[0]) hac_read(1'b0, v.ks.p1);
    if (pr[1]) hac_read(1'b1, v.ks.p2);
    v.page_rd = {pr[1], pr[0]};
    if (op != 0) begin
      if (it.loc == LOC_HOST) begin
        bit fnd = 1'b0;
        for (int s = 0; s < 2; s++)
          for (int i = 0; i < LMAX; i++)
            if (!fnd && pr[s] && sp[s][i].valid && sp[s][i].key == key) begin
              fnd = 1'b1; clear_tuple(1'(s), i);
            end
        check(fnd, "host item present in its page before the access");
      end else if (it.loc == LOC_HBM) u_vs.mem[it.vptr] = '0;
      cnt[bin_of(it)]--;
    end
    // new random bins and the expected P2C choice
    a = bin_t'($urandom_range(NB-1));
    do b = bin_t'($urandom_range(NB-1)); while (b == a);
    wr0 = n_page_wr;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    rnd_p1 = a; rnd_p2 = b;
    in_res = v; in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    // ---- update the model ----
    if (op == 2) begin
      items.delete(key);
      slot_used[it.ptr.row][it.ptr.slot] = 1'b0;
      n_del++;
    end else begin
      dst = (cnt[b] < cnt[a]) ? b : a;
      cnt[dst]++;
      it.p1 = a; it.p2 = b; it.sel = (dst == b); it.value = v.value;
      it.loc = (dst < K) ? LOC_HBM : LOC_STASH;
      items[key] = it;
      if (op == 0) n_new++; else n_move++;
    end
    // stash items whose page was read are now in that page
    foreach (items[k]) begin
      item_t x;
      x = items[k];
      if (x.loc == LOC_STASH && ((pr[0] && bin_of(x) == v.ks.p1) || (pr[1] && bin_of(x) == v.ks.p2))) begin
        x.loc = LOC_HOST; items[k] = x; n_ev++;
      end
    end
    check(32'(n_page_wr) - wr0 == pr[0] + pr[1], "every page read is written back");
    check_all();
  endtask

  task automatic check_all();
    int n_vs = 0;
    for (int i = 0; i < NB; i++) check(32'(u_cl.cnt[i]) == cnt[i], "bin count matches");
    foreach (items[k]) begin
      item_t x;
      pm_row_t row;
      pm_slot_t s;
      logic [VAL_W-1:0] hv;
      x = items[k];
      row = pm_row_t'(u_pm.mem[x.ptr.row]);
      s = row[x.ptr.slot];
      check(s.valid && s.key == k, "map slot holds the key");
      check(s.p1 == x.p1 && s.p2 == x.p2 && s.sel == x.sel, "map slot bins and P2C choice");
      check(s.loc == x.loc, "map slot location");
      if (x.loc == LOC_HOST) begin
        check(host_find(bin_of(x), k, hv) == 1 && hv == x.value, "value in its host page");
      end else begin
        n_vs++;
        check(u_vs.mem[s.vptr] == x.value, "value in its value-store line");
        if (x.loc == LOC_STASH) begin
          bit f = 1'b0;
          for (int i = 0; i < LMAX; i++)
            if (u_ri.tab[bin_of(x) - K].v[i] && u_ri.tab[bin_of(x) - K].p[i] == x.ptr) f = 1'b1;
          check(f, "stashed key listed in the reverse index of its page");
        end
      end
      x.vptr = s.vptr;      // the line is chosen by the free ring; track it
      items[k] = x;
    end
    for (int r = 0; r < ROWS; r++) begin
      pm_row_t rw;
      rw = pm_row_t'(u_pm.mem[r]);
      for (int s = 0; s < PM_SLOTS; s++)
        if (!slot_used[r][s]) check(!rw[s].valid, "unused slot empty");
    end
    check(32'(level) == VSL - n_vs, "free lines = store size - lines in use");
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    $display("FAIL: watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (cnt[i]) cnt[i] = 0;
    for (int i = 0; i < ROWS; i++) u_pm.mem[i] = '0;
    for (int i = 0; i < NP*LMAX; i++) u_host.mem[i] = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); init_start = 1'b1;
    @(negedge clk); init_start = 1'b0;
    wait (ring_done && cnt_done && ri_init_done);
    for (int c = 0; c < 700; c++) begin
      int r;
      r = $urandom_range(99);
      if (items.size() < 4 || (items.size() < 24 && r < 40)) access(0);
      else if (r < 80) access(1);
      else access(2);
    end
    check(n_to_hbm > 0 && n_to_stash > 0 && n_p2c_alt > 0 && n_evicted > 0, "all placement paths used");
    check(32'(n_deleted) == n_del, "delete counter");
    check(32'(n_evicted) == n_ev, "eviction counter");
    check(n_page_full == 0 && n_ri_full == 0 && n_vs_full == 0, "no overflow at this load");
    $display("INFO: new=%0d moved=%0d deleted=%0d evicted=%0d hbm=%0d stash=%0d p2c_alt=%0d",
             n_new, n_move, n_del, n_ev, n_to_hbm, n_to_stash, n_p2c_alt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
