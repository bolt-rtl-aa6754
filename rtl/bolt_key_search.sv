// bolt_key_search -- KS stage: finds the key of a command in the position map.
//
// The position map is a hash table of ROWS rows with PM_SLOTS slots each, kept in HBM.
// A key may live in any of the D_HASH rows chosen by D_HASH hash functions; on
// insertion it goes to the least loaded of them (power-of-d choices), which keeps rows
// short. KS hashes the key, reads the D_HASH rows through the HBM manager (one row per
// beat, all slots of a row arrive together because each slot column sits in its own
// bank), then compares every slot of every row with the key in parallel and picks the
// first match with a priority encoder. It returns the two bins p1/p2, the location and
// value pointer of the value, and the map pointer (row, slot) of the key.
// On a miss it returns two fresh random bins for the dummy accesses and the map pointer
// of the first free slot of the least loaded row (can_ins = 0 if all D_HASH rows are
// full). Latency: D_HASH request beats, the HBM read latency, then two cycles.
// A command is taken only while enable is high (the core processes one command at a
// time). The hash functions are this design's (multiplicative hashing); the paper only
// fixes d = 4 and rows = N/16.
module bolt_key_search
  import bolt_pkg::*;
#(
  parameter int unsigned ROWS = PM_ROWS
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      enable,
  input  logic      in_valid,
  output logic      in_ready,
  input  cmd_t      in_cmd,
  input  bin_t      rnd_p1,
  input  bin_t      rnd_p2,
  bolt_mem_if.client pm,
  output logic      out_valid,
  input  logic      out_ready,
  output ks_res_t   out_res,
  output logic      busy
);
  localparam int unsigned RB = $clog2(ROWS);
  localparam int unsigned DB = $clog2(D_HASH + 1);

  typedef enum logic [1:0] {K_IDLE, K_FETCH, K_SEARCH, K_OUT} kstate_e;
  kstate_e       state;
  cmd_t          cmd_q;
  row_t          hrow [D_HASH];
  pm_row_t       rows [D_HASH];
  logic [DB-1:0] n_req, n_rsp;

  assign in_ready = (state == K_IDLE) && enable;
  assign busy     = (state != K_IDLE);

  always_comb begin
    pm.req_valid = (state == K_FETCH) && (n_req < DB'(D_HASH));
    pm.req_we    = 1'b0;
    pm.req_addr  = hrow[n_req[$clog2(D_HASH)-1:0]];
    pm.req_wdata = '0;
    pm.req_wmask = '0;
  end

  // Parallel comparison, priority encoding and least-loaded-row choice.
  ks_res_t res_c;
  always_comb begin
    logic                found;
    logic [SLOT_AW:0]    load, best_load;
    int unsigned         best_r;
    res_c          = '0;
    res_c.cmd      = cmd_q;
    found          = 1'b0;
    best_load      = '1;
    best_r         = 0;
    for (int r = 0; r < D_HASH; r++) begin
      load = '0;
      for (int s = 0; s < PM_SLOTS; s++) begin
        if (rows[r][s].valid) load = load + 1'b1;
        if (!found && rows[r][s].valid && rows[r][s].key == cmd_q.key) begin
          found          = 1'b1;
          res_c.p1       = rows[r][s].p1;
          res_c.p2       = rows[r][s].p2;
          res_c.sel      = rows[r][s].sel;
          res_c.loc      = rows[r][s].loc;
          res_c.vptr     = rows[r][s].vptr;
          res_c.ptr.row  = hrow[r];
          res_c.ptr.slot = SLOT_AW'(s);
        end
      end
      if (load < best_load) begin
        best_load = load;
        best_r    = r;
      end
    end
    res_c.hit = found;
    if (!found) begin
      res_c.p1      = rnd_p1;
      res_c.p2      = rnd_p2;
      res_c.loc     = LOC_HOST;
      res_c.can_ins = (best_load < (SLOT_AW+1)'(PM_SLOTS));
      res_c.ptr.row = hrow[best_r];
      for (int s = PM_SLOTS - 1; s >= 0; s--)
        if (!rows[best_r][s].valid) res_c.ptr.slot = SLOT_AW'(s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= K_IDLE; cmd_q <= '0; n_req <= '0; n_rsp <= '0;
      out_valid <= 1'b0; out_res <= '0;
      for (int i = 0; i < D_HASH; i++) begin
        hrow[i] <= '0;
        rows[i] <= '0;
      end
    end else begin
      unique case (state)
        K_IDLE: if (in_valid && in_ready) begin
          cmd_q <= in_cmd;
          for (int i = 0; i < D_HASH; i++)
            hrow[i] <= row_t'(hash_key(in_cmd.key, i, RB));
          n_req <= '0; n_rsp <= '0;
          state <= K_FETCH;
        end
        K_FETCH: begin
          if (pm.req_valid && pm.req_ready) n_req <= n_req + 1'b1;
          if (pm.rsp_valid) begin
            rows[n_rsp[$clog2(D_HASH)-1:0]] <= pm_row_t'(pm.rsp_rdata);
            n_rsp <= n_rsp + 1'b1;
            if (n_rsp == DB'(D_HASH - 1)) state <= K_SEARCH;
          end
        end
        K_SEARCH: begin
          out_res   <= res_c;
          out_valid <= 1'b1;
          state     <= K_OUT;
        end
        K_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          state     <= K_IDLE;
        end
        default: state <= K_IDLE;
      endcase
    end
  end
endmodule
