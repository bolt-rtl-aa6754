// tb_bolt_hbm_manager -- self-checking test of the HBM manager (HM).
//
// Three position-map clients (remap, init, key search) and two value-store clients
// (remap, value access) issue random reads and masked writes at random times into
// behavioural memories with random stalls. A reference copy of each memory is updated
// at the moment the manager hands a request to the memory; every read response must
// reach the client that issued it, in that client's issue order, with the data the
// reference held when the read was accepted. The free-address ring inside the manager
// is initialised and must then hand out every value-store line once. Counts of grants
// per client show that every client was served. A watchdog guards the run.
module tb_bolt_hbm_manager;
  import bolt_pkg::*;
  localparam int ROWS = 16, VSL = 32;
  localparam int LANE = PM_ROW_W / PM_SLOTS;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bolt_mem_if #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS)) pmc [3] (.clk, .rst_n);
  bolt_mem_if #(.AW(VPTR_W), .DW(VAL_W), .MW(1)) vsc [2] (.clk, .rst_n);
  bolt_mem_if #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS)) pm_hbm (.clk, .rst_n);
  bolt_mem_if #(.AW(VPTR_W), .DW(VAL_W), .MW(1)) vs_hbm (.clk, .rst_n);

  logic init_start = 1'b0, ring_init_done, alloc_req = 1'b0, alloc_valid, alloc_ok, free_req = 1'b0;
  vptr_t alloc_addr, free_addr = '0;
  logic [VPTR_W:0] free_level;

  logic [PM_ROW_W-1:0] ref_pm [ROWS];
  logic [VAL_W-1:0]    ref_vs [VSL];
  int n_grant_pm [3], n_grant_vs [2], n_rd_pm [3], n_rd_vs [2];
  bit run = 1'b0;

  bolt_hbm_manager #(.VS_LINES(VSL)) dut (
    .clk, .rst_n, .pm_rmp(pmc[0]), .pm_init(pmc[1]), .pm_ks(pmc[2]),
    .vs_rmp(vsc[0]), .vs_vac(vsc[1]), .pm_hbm, .vs_hbm,
    .init_start, .ring_init_done, .alloc_req, .alloc_valid, .alloc_ok, .alloc_addr,
    .free_req, .free_addr, .free_level);

  bolt_tb_mem #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS), .DEPTH(ROWS), .LAT(5), .STALL(1'b1)) u_pm (
    .clk, .req_valid(pm_hbm.req_valid), .req_ready(pm_hbm.req_ready), .req_we(pm_hbm.req_we),
    .req_addr(pm_hbm.req_addr), .req_wdata(pm_hbm.req_wdata), .req_wmask(pm_hbm.req_wmask),
    .rsp_valid(pm_hbm.rsp_valid), .rsp_rdata(pm_hbm.rsp_rdata));
  bolt_tb_mem #(.AW(VPTR_W), .DW(VAL_W), .MW(1), .DEPTH(VSL), .LAT(3), .STALL(1'b1)) u_vs (
    .clk, .req_valid(vs_hbm.req_valid), .req_ready(vs_hbm.req_ready), .req_we(vs_hbm.req_we),
    .req_addr(vs_hbm.req_addr), .req_wdata(vs_hbm.req_wdata), .req_wmask(vs_hbm.req_wmask),
    .rsp_valid(vs_hbm.rsp_valid), .rsp_rdata(vs_hbm.rsp_rdata));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // ---------------- position-map clients ----------------
  for (genvar g = 0; g < 3; g++) begin : g_pm
    logic [PM_ROW_W-1:0] exp_q [$];
    bit acc = 1'b0;
    initial begin
      pmc[g].req_valid = 1'b0; pmc[g].req_we = 1'b0; pmc[g].req_addr = '0;
      pmc[g].req_wdata = '0; pmc[g].req_wmask = '0;
    end
    always @(posedge clk) begin
      acc <= pmc[g].req_valid && pmc[g].req_ready;
      if (pmc[g].req_valid && pmc[g].req_ready) begin
        n_grant_pm[g]++;
        if (pmc[g].req_we) begin
          for (int l = 0; l < PM_SLOTS; l++)
            if (pmc[g].req_wmask[l]) ref_pm[pmc[g].req_addr][l*LANE +: LANE] = pmc[g].req_wdata[l*LANE +: LANE];
        end else begin
          exp_q.push_back(ref_pm[pmc[g].req_addr]);
        end
      end
      if (pmc[g].rsp_valid) begin
        n_rd_pm[g]++;
        check(exp_q.size() > 0 && pmc[g].rsp_rdata == exp_q[0], "map read data to the right client in order");
        if (exp_q.size() > 0) void'(exp_q.pop_front());
      end
    end
    always @(negedge clk) begin
      if (acc) pmc[g].req_valid = 1'b0;
      if (run && !pmc[g].req_valid && $urandom_range(99) < 40) begin
        pmc[g].req_valid = 1'b1;
        pmc[g].req_we    = 1'($urandom());
        pmc[g].req_addr  = ROW_AW'($urandom_range(ROWS-1));
        for (int w = 0; w < PM_ROW_W; w += 32) pmc[g].req_wdata[w +: 32] = $urandom();
        pmc[g].req_wmask = PM_SLOTS'({$urandom()});
      end
    end
  end

  // ---------------- value-store clients ----------------
  for (genvar g = 0; g < 2; g++) begin : g_vs
    logic [VAL_W-1:0] exp_q [$];
    bit acc = 1'b0;
    initial begin
      vsc[g].req_valid = 1'b0; vsc[g].req_we = 1'b0; vsc[g].req_addr = '0;
      vsc[g].req_wdata = '0; vsc[g].req_wmask = '1;
    end
    always @(posedge clk) begin
      acc <= vsc[g].req_valid && vsc[g].req_ready;
      if (vsc[g].req_valid && vsc[g].req_ready) begin
        n_grant_vs[g]++;
        if (vsc[g].req_we) ref_vs[vsc[g].req_addr] = vsc[g].req_wdata;
        else exp_q.push_back(ref_vs[vsc[g].req_addr]);
      end
      if (vsc[g].rsp_valid) begin
        n_rd_vs[g]++;
        check(exp_q.size() > 0 && vsc[g].rsp_rdata == exp_q[0], "value read data to the right client in order");
        if (exp_q.size() > 0) void'(exp_q.pop_front());
      end
    end
    always @(negedge clk) begin
      if (acc) vsc[g].req_valid = 1'b0;
      if (run && !vsc[g].req_valid && $urandom_range(99) < 50) begin
        vsc[g].req_valid = 1'b1;
        vsc[g].req_we    = 1'($urandom());
        vsc[g].req_addr  = VPTR_W'($urandom_range(VSL-1));
        vsc[g].req_wdata = {$urandom(), $urandom()};
      end
    end
  end

  initial begin
    repeat (200_000) @(posedge clk);
    $display("FAIL: watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen [VSL];
    for (int i = 0; i < ROWS; i++) begin
      for (int w = 0; w < PM_ROW_W; w += 32) ref_pm[i][w +: 32] = $urandom();
      u_pm.mem[i] = ref_pm[i];
    end
    for (int i = 0; i < VSL; i++) begin ref_vs[i] = {$urandom(), $urandom()}; u_vs.mem[i] = ref_vs[i]; end
    #1 rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); init_start = 1'b1;
    @(negedge clk); init_start = 1'b0;
    wait (ring_init_done);
    @(negedge clk);
    check(32'(free_level) == VSL, "ring holds every value-store line");
    for (int i = 0; i < VSL; i++) begin
      @(negedge clk); alloc_req = 1'b1;
      @(negedge clk); alloc_req = 1'b0;
      check(alloc_valid && alloc_ok && 32'(alloc_addr) < VSL && !seen[alloc_addr], "each line handed out once");
      if (32'(alloc_addr) < VSL) seen[alloc_addr] = 1'b1;
    end
    run = 1'b1;
    repeat (20000) @(negedge clk);
    run = 1'b0;
    repeat (50) @(negedge clk);
    for (int g = 0; g < 3; g++) check(n_grant_pm[g] > 1000 && n_rd_pm[g] > 300, "every map client served");
    for (int g = 0; g < 2; g++) check(n_grant_vs[g] > 1000 && n_rd_vs[g] > 300, "every value client served");
    check(g_pm[0].exp_q.size() == 0 && g_pm[1].exp_q.size() == 0 && g_pm[2].exp_q.size() == 0 &&
          g_vs[0].exp_q.size() == 0 && g_vs[1].exp_q.size() == 0, "no read left unanswered");
    $display("INFO: pm grants %0d/%0d/%0d vs grants %0d/%0d", n_grant_pm[0], n_grant_pm[1], n_grant_pm[2],
             n_grant_vs[0], n_grant_vs[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
