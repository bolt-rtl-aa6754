// tb_bolt_key_search -- self-checking test of the key-search stage (KS).
//
// A 16-row position map is built in a behavioural memory (4-cycle latency, random
// stalls): rows get random fill levels, some are completely full, and 60 known keys are
// placed in one of their four hash rows with random bin/location/pointer fields.
// Queries for known keys must hit with the stored fields and the exact row/slot.
// Queries for absent keys must miss, carry the two random bins given on rnd_p1/p2 and
// location HOST, and point at the first free slot of the least-loaded of the four hash
// rows (first such row on a tie); can_ins must be low when all four rows are full.
// The test also checks that no command is taken while enable is low and that KS only
// reads the map. Results are taken with random back-pressure; a watchdog guards the run.
module tb_bolt_key_search;
  import bolt_pkg::*;
  localparam int ROWS = 16, RB = 4, NK = 60;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable = 1'b0, in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0, busy;
  cmd_t in_cmd = '0;
  bin_t rnd_p1 = '0, rnd_p2 = '0;
  ks_res_t out_res;
  bolt_mem_if #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS)) pm (.clk, .rst_n);

  pm_row_t tab [ROWS];
  logic [KEY_W-1:0] keys [NK];
  int n_hit = 0, n_miss = 0, n_noins = 0, n_wr = 0;

  bolt_key_search #(.ROWS(ROWS)) dut (.*);

  bolt_tb_mem #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS), .DEPTH(ROWS), .LAT(4), .STALL(1'b1)) u_pm (
    .clk, .req_valid(pm.req_valid), .req_ready(pm.req_ready), .req_we(pm.req_we),
    .req_addr(pm.req_addr), .req_wdata(pm.req_wdata), .req_wmask(pm.req_wmask),
    .rsp_valid(pm.rsp_valid), .rsp_rdata(pm.rsp_rdata));

  always @(posedge clk) if (pm.req_valid && pm.req_ready && pm.req_we) n_wr++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic pm_slot_t rnd_slot(input logic [KEY_W-1:0] k);
    pm_slot_t s;
    s.valid = 1'b1; s.key = k;
    s.p1 = bin_t'($urandom()); s.p2 = bin_t'($urandom()); s.sel = 1'($urandom());
    s.loc = loc_e'($urandom_range(2)); s.vptr = vptr_t'($urandom());
    return s;
  endfunction

  function automatic int load_of(input int r);
    int n = 0;
    for (int s = 0; s < PM_SLOTS; s++) if (tab[r][s].valid) n++;
    return n;
  endfunction

  // reference result
  function automatic ks_res_t model(input cmd_t c, input bin_t a, input bin_t b);
    ks_res_t e;
    int best, bl, l;
    bit found;
    e = '0; e.cmd = c; found = 1'b0; best = 0; bl = 1 << 20;
    for (int r = 0; r < D_HASH; r++) begin
      int row;
      row = hash_key(c.key, r, RB);
      for (int s = 0; s < PM_SLOTS; s++)
        if (!found && tab[row][s].valid && tab[row][s].key == c.key) begin
          found = 1'b1; e.hit = 1'b1;
          e.p1 = tab[row][s].p1; e.p2 = tab[row][s].p2; e.sel = tab[row][s].sel;
          e.loc = tab[row][s].loc; e.vptr = tab[row][s].vptr;
          e.ptr.row = row_t'(row); e.ptr.slot = slot_idx_t'(s);
        end
      l = load_of(row);
      if (l < bl) begin bl = l; best = row; end
    end
    if (!found) begin
      e.p1 = a; e.p2 = b; e.loc = LOC_HOST;
      e.can_ins = (bl < PM_SLOTS);
      e.ptr.row = row_t'(best);
      for (int s = PM_SLOTS - 1; s >= 0; s--) if (!tab[best][s].valid) e.ptr.slot = slot_idx_t'(s);
    end
    return e;
  endfunction

  task automatic query(input logic [KEY_W-1:0] k);
    ks_res_t e;
    @(negedge clk);
    in_cmd.op = op_e'($urandom_range(2)); in_cmd.key = k; in_cmd.payload = {$urandom(), $urandom()};
    in_valid = 1'b1;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 1'b0;
    rnd_p1 = bin_t'($urandom()); rnd_p2 = bin_t'($urandom());
    e = model(in_cmd, rnd_p1, rnd_p2);
    forever begin
      out_ready = ($urandom_range(99) < 40);
      #1;
      if (out_valid && out_ready) break;
      @(negedge clk);
    end
    @(negedge clk);      // the transfer happened at the rising edge just passed
    out_ready = 1'b0;
  endtask

  initial begin
    repeat (300_000) @(posedge clk);
    $display("FAIL: watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // check every transfer
  ks_res_t exp_res;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      exp_res = model(in_cmd, rnd_p1, rnd_p2);
      check(out_res == exp_res, "key-search result matches the reference");
      if (out_res.hit) n_hit++; else n_miss++;
      if (!out_res.hit && !out_res.can_ins) n_noins++;
    end
  end

  initial begin
    // build the map: random fill, rows 3 and 7 full
    for (int r = 0; r < ROWS; r++) begin
      int fill;
      fill = (r == 3 || r == 7) ? PM_SLOTS : $urandom_range(PM_SLOTS - 6);
      tab[r] = '0;
      for (int s = 0; s < PM_SLOTS; s++)
        if (s < fill) tab[r][s] = rnd_slot($urandom() | 32'h8000_0000);   // never a test key
    end
    for (int i = 0; i < NK; i++) begin
      int row, s;
      keys[i] = $urandom() & 32'h7FFF_FFFF;
      row = hash_key(keys[i], $urandom_range(D_HASH-1), RB);
      s = $urandom_range(PM_SLOTS-1);
      tab[row][s] = rnd_slot(keys[i]);
    end
    for (int r = 0; r < ROWS; r++) u_pm.mem[r] = tab[r];
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // enable low: no command may be taken
    in_valid = 1'b1; in_cmd = '0;
    repeat (20) begin
      @(negedge clk);
      check(!in_ready && !busy, "no command taken while disabled");
    end
    in_valid = 1'b0;
    enable = 1'b1;
    for (int c = 0; c < 800; c++) begin
      if ($urandom_range(1)) query(keys[$urandom_range(NK-1)]);
      else query(($urandom() & 32'h7FFF_FFFF) ^ 32'h0F0F_0000);
    end
    // absent keys whose four rows are all full (search until found)
    for (int t = 0; t < 200000 && n_noins < 3; t++) begin
      logic [KEY_W-1:0] k;
      bit full;
      k = $urandom() & 32'h7FFF_FFFF;
      full = 1'b1;
      for (int r = 0; r < D_HASH; r++) if (load_of(hash_key(k, r, RB)) < PM_SLOTS) full = 1'b0;
      if (full) query(k);
    end
    @(negedge clk);
    check(n_hit > 100 && n_miss > 100, "both hits and misses");
    check(n_noins > 0, "full-row case reached");
    check(n_wr == 0, "key search never writes the map");
    $display("INFO: hits=%0d misses=%0d no-room=%0d", n_hit, n_miss, n_noins);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
