// bolt_top -- the BOLT core: an oblivious key-value map engine that keeps metadata in
// on-package HBM and the bulk of the data as encrypted fixed-size pages in host memory.
//
// Dataflow (one command at a time, as in the paper's prototype):
//   command word -> DEC -> CMD Q -> KS -> VAC -> RMP
//                                         \-> RES Q -> RES -> response word
// KS looks the key up in the position map (HBM), VAC reads both of the key's bins (host
// pages through HAC, HBM/stash lines through HM) and executes the command, RMP moves
// the item to two fresh random bins with power-of-two choices, evicts stashed items
// into the pages just read and writes those pages back. The response leaves while RMP
// runs. HM arbitrates the HBM ports and owns the free-address ring; the count list and
// reverse index are on-chip tables of RMP. bolt_init clears everything after reset;
// init_done rises when commands may be sent.
//
// Ports are plain signals. The command and response words are the plaintext side of the
// isolation gateway (which decrypts/encrypts them and is not part of this RTL); the two
// HBM ports go to the HBM banks (position map: one row per beat with a per-column write
// mask; value store: one value line per beat); the host port goes, through the gateway
// that encrypts pages, to the pinned host memory region at host_base. All memory ports
// use valid/ready requests and in-order read responses without back-pressure.
// Parameters give the table sizes; the defaults are the paper's main configuration.
module bolt_top
  import bolt_pkg::*;
#(
  parameter int unsigned NB       = NBINS,      // logical bins K + M
  parameter int unsigned K        = K_HBM,      // HBM bins
  parameter int unsigned ROWS     = PM_ROWS,    // position-map rows
  parameter int unsigned VS_LINES = VS_DEPTH,   // value-store lines (HBM store + stash)
  parameter logic [63:0] SEED     = 64'h2545_F491_4F6C_DD1D
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [63:0]         host_base,
  output logic                init_done,
  // commands / responses (gateway plaintext side)
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  logic [CMD_W-1:0]    cmd_word,
  output logic                rsp_valid,
  input  logic                rsp_ready,
  output logic [RSP_W-1:0]    rsp_word,
  // HBM: position map
  output logic                pm_req_valid,
  input  logic                pm_req_ready,
  output logic                pm_req_we,
  output logic [ROW_AW-1:0]   pm_req_addr,
  output logic [PM_ROW_W-1:0] pm_req_wdata,
  output logic [PM_SLOTS-1:0] pm_req_wmask,
  input  logic                pm_rsp_valid,
  input  logic [PM_ROW_W-1:0] pm_rsp_rdata,
  // HBM: value store
  output logic                vs_req_valid,
  input  logic                vs_req_ready,
  output logic                vs_req_we,
  output logic [VPTR_W-1:0]   vs_req_addr,
  output logic [VAL_W-1:0]    vs_req_wdata,
  input  logic                vs_rsp_valid,
  input  logic [VAL_W-1:0]    vs_rsp_rdata,
  // host memory (through the gateway)
  output logic                host_req_valid,
  input  logic                host_req_ready,
  output logic                host_req_we,
  output logic [63:0]         host_req_addr,
  output logic [HTUP_W-1:0]   host_req_wdata,
  input  logic                host_rsp_valid,
  input  logic [HTUP_W-1:0]   host_rsp_rdata,
  // status
  output stats_t              stats,
  output logic                idle
);
  localparam int unsigned M  = NB - K;
  localparam int unsigned CW = $clog2(LMAX + 1) + 1;
  localparam int unsigned LW = $clog2(LMAX);

  // ---------------- memory bundles ----------------
  bolt_mem_if #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS)) pm_ks   (clk, rst_n);
  bolt_mem_if #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS)) pm_rmp  (clk, rst_n);
  bolt_mem_if #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS)) pm_init (clk, rst_n);
  bolt_mem_if #(.AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS)) pm_hbm  (clk, rst_n);
  bolt_mem_if #(.AW(VPTR_W), .DW(VAL_W),    .MW(1))        vs_vac  (clk, rst_n);
  bolt_mem_if #(.AW(VPTR_W), .DW(VAL_W),    .MW(1))        vs_rmp  (clk, rst_n);
  bolt_mem_if #(.AW(VPTR_W), .DW(VAL_W),    .MW(1))        vs_hbm  (clk, rst_n);
  bolt_mem_if #(.AW(64),     .DW(HTUP_W),   .MW(1))        host    (clk, rst_n);

  assign pm_req_valid    = pm_hbm.req_valid;
  assign pm_req_we       = pm_hbm.req_we;
  assign pm_req_addr     = pm_hbm.req_addr;
  assign pm_req_wdata    = pm_hbm.req_wdata;
  assign pm_req_wmask    = pm_hbm.req_wmask;
  assign pm_hbm.req_ready = pm_req_ready;
  assign pm_hbm.rsp_valid = pm_rsp_valid;
  assign pm_hbm.rsp_rdata = pm_rsp_rdata;

  assign vs_req_valid    = vs_hbm.req_valid;
  assign vs_req_we       = vs_hbm.req_we;
  assign vs_req_addr     = vs_hbm.req_addr;
  assign vs_req_wdata    = vs_hbm.req_wdata;
  assign vs_hbm.req_ready = vs_req_ready;
  assign vs_hbm.rsp_valid = vs_rsp_valid;
  assign vs_hbm.rsp_rdata = vs_rsp_rdata;

  assign host_req_valid  = host.req_valid;
  assign host_req_we     = host.req_we;
  assign host_req_addr   = host.req_addr;
  assign host_req_wdata  = host.req_wdata;
  assign host.req_ready  = host_req_ready;
  assign host.rsp_valid  = host_rsp_valid;
  assign host.rsp_rdata  = host_rsp_rdata;

  // ---------------- random bins ----------------
  bin_t rnd_p1, rnd_p2;
  bolt_rng #(.NB(NB), .SEED(SEED)) u_rng (.clk, .rst_n, .p1(rnd_p1), .p2(rnd_p2));

  // ---------------- DEC and CMD Q ----------------
  logic dec_valid, dec_ready;
  cmd_t dec_cmd;
  bolt_decoder u_dec (
    .clk, .rst_n, .in_valid(cmd_valid), .in_ready(cmd_ready), .in_word(cmd_word),
    .out_valid(dec_valid), .out_ready(dec_ready), .out_cmd(dec_cmd),
    .n_get(stats.n_get), .n_put(stats.n_put), .n_del(stats.n_del));

  logic cq_valid, cq_ready;
  cmd_t cq_cmd;
  logic [$clog2(5)-1:0] cq_count;
  bolt_fifo #(.T(cmd_t), .DEPTH(4)) u_cmd_q (
    .clk, .rst_n, .in_valid(dec_valid), .in_ready(dec_ready), .in_data(dec_cmd),
    .out_valid(cq_valid), .out_ready(cq_ready), .out_data(cq_cmd), .count(cq_count));

  // ---------------- KS ----------------
  logic    ks_valid, ks_ready, ks_busy, vac_busy, rmp_busy, ks_enable;
  ks_res_t ks_res;
  assign ks_enable = init_done && !vac_busy && !rmp_busy;
  bolt_key_search #(.ROWS(ROWS)) u_ks (
    .clk, .rst_n, .enable(ks_enable), .in_valid(cq_valid), .in_ready(cq_ready), .in_cmd(cq_cmd),
    .rnd_p1, .rnd_p2, .pm(pm_ks), .out_valid(ks_valid), .out_ready(ks_ready),
    .out_res(ks_res), .busy(ks_busy));

  // ---------------- HAC and its users ----------------
  logic        hac_valid, hac_ready, hac_slot, hac_done;
  logic [1:0]  hac_op;
  bin_t        hac_page;
  page_t [1:0] sp;
  logic        tw_valid, tw_slot;
  logic [LW-1:0] tw_idx;
  tuple_t      tw_tuple;

  logic v_hv, v_hs, v_tv, v_ts, r_hv, r_hs, r_tv, r_ts, i_hv;
  logic [1:0] v_ho, r_ho, i_ho;
  bin_t v_hp, r_hp, i_hp;
  logic [LW-1:0] v_ti, r_ti;
  tuple_t v_tt, r_tt;

  always_comb begin
    hac_valid = i_hv || r_hv || v_hv;
    if (i_hv)      begin hac_op = i_ho; hac_slot = 1'b0; hac_page = i_hp; end
    else if (r_hv) begin hac_op = r_ho; hac_slot = r_hs; hac_page = r_hp; end
    else           begin hac_op = v_ho; hac_slot = v_hs; hac_page = v_hp; end
    tw_valid = v_tv || r_tv;
    if (r_tv) begin tw_slot = r_ts; tw_idx = r_ti; tw_tuple = r_tt; end
    else      begin tw_slot = v_ts; tw_idx = v_ti; tw_tuple = v_tt; end
  end

  bolt_hac u_hac (
    .clk, .rst_n, .host_base, .cmd_valid(hac_valid), .cmd_ready(hac_ready), .cmd_op(hac_op),
    .cmd_slot(hac_slot), .cmd_page(hac_page), .done(hac_done), .sp,
    .tw_valid, .tw_slot, .tw_idx, .tw_tuple, .host,
    .n_page_rd(stats.n_page_rd), .n_page_wr(stats.n_page_wr));

  // ---------------- VAC and RES Q / RES ----------------
  logic     vrsp_valid, vrsp_ready, vout_valid, vout_ready;
  rsp_t     vrsp;
  vac_res_t vout;
  bolt_value_access #(.K(K)) u_vac (
    .clk, .rst_n, .in_valid(ks_valid), .in_ready(ks_ready), .in_res(ks_res),
    .hac_valid(v_hv), .hac_ready(hac_ready && !i_hv && !r_hv), .hac_op(v_ho), .hac_slot(v_hs),
    .hac_page(v_hp), .hac_done, .sp,
    .tw_valid(v_tv), .tw_slot(v_ts), .tw_idx(v_ti), .tw_tuple(v_tt),
    .vs(vs_vac), .rsp_valid(vrsp_valid), .rsp_ready(vrsp_ready), .rsp(vrsp),
    .out_valid(vout_valid), .out_ready(vout_ready), .out_res(vout), .busy(vac_busy),
    .n_lost(stats.n_lost));

  logic rq_valid, rq_ready;
  rsp_t rq_rsp;
  logic [$clog2(5)-1:0] rq_count;
  bolt_fifo #(.T(rsp_t), .DEPTH(4)) u_res_q (
    .clk, .rst_n, .in_valid(vrsp_valid), .in_ready(vrsp_ready), .in_data(vrsp),
    .out_valid(rq_valid), .out_ready(rq_ready), .out_data(rq_rsp), .count(rq_count));

  bolt_responser u_res (
    .clk, .rst_n, .in_valid(rq_valid), .in_ready(rq_ready), .in_rsp(rq_rsp),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_word(rsp_word), .n_rsp(stats.n_rsp));

  // ---------------- on-chip tables ----------------
  logic        sweep_start, ring_done, cnt_done, ri_done_init;
  bin_t        cl_rd_a, cl_rd_b, cl_upd_bin;
  logic [CW-1:0] cl_q_a, cl_q_b;
  logic        cl_upd_valid, cl_upd_dec, cl_busy;
  bolt_count_list #(.NB(NB), .CW(CW)) u_cnt (
    .clk, .rst_n, .init_start(sweep_start), .init_done(cnt_done),
    .rd_a(cl_rd_a), .rd_b(cl_rd_b), .q_a(cl_q_a), .q_b(cl_q_b),
    .upd_valid(cl_upd_valid), .upd_bin(cl_upd_bin), .upd_dec(cl_upd_dec), .busy(cl_busy));

  logic        ri_valid, ri_ready, ri_done, ri_ok;
  logic [1:0]  ri_op;
  bin_t        ri_page;
  pm_ptr_t     ri_ptr;
  logic [LW-1:0] ri_idx;
  logic [LMAX-1:0] ri_row_valid;
  pm_ptr_t [LMAX-1:0] ri_row_ptr;
  bolt_reverse_index #(.NPAGES(M)) u_ri (
    .clk, .rst_n, .init_start(sweep_start), .init_done(ri_done_init),
    .op_valid(ri_valid), .op(ri_op), .page(ri_page), .ptr(ri_ptr), .idx(ri_idx),
    .ready(ri_ready), .done(ri_done), .ok(ri_ok), .row_valid(ri_row_valid), .row_ptr(ri_row_ptr));

  // ---------------- HM ----------------
  logic  alloc_req, alloc_valid, alloc_ok, free_req;
  vptr_t alloc_addr, free_addr;
  logic [VPTR_W:0] free_level;
  bolt_hbm_manager #(.VS_LINES(VS_LINES)) u_hm (
    .clk, .rst_n, .pm_rmp, .pm_init, .pm_ks, .vs_rmp, .vs_vac, .pm_hbm, .vs_hbm,
    .init_start(sweep_start), .ring_init_done(ring_done),
    .alloc_req, .alloc_valid, .alloc_ok, .alloc_addr, .free_req, .free_addr, .free_level);

  // ---------------- RMP ----------------
  bolt_remap #(.K(K), .CW(CW)) u_rmp (
    .clk, .rst_n, .in_valid(vout_valid), .in_ready(vout_ready), .in_res(vout),
    .rnd_p1, .rnd_p2,
    .cl_rd_a, .cl_rd_b, .cl_q_a, .cl_q_b, .cl_upd_valid, .cl_upd_bin, .cl_upd_dec, .cl_busy,
    .ri_valid, .ri_op, .ri_page, .ri_ptr, .ri_idx, .ri_ready, .ri_done, .ri_ok,
    .ri_row_valid, .ri_row_ptr,
    .alloc_req, .alloc_valid, .alloc_ok, .alloc_addr, .free_req, .free_addr,
    .pm(pm_rmp), .vs(vs_rmp),
    .hac_valid(r_hv), .hac_ready(hac_ready && !i_hv), .hac_op(r_ho), .hac_slot(r_hs),
    .hac_page(r_hp), .hac_done, .sp,
    .tw_valid(r_tv), .tw_slot(r_ts), .tw_idx(r_ti), .tw_tuple(r_tt),
    .busy(rmp_busy),
    .n_to_hbm(stats.n_to_hbm), .n_to_stash(stats.n_to_stash), .n_p2c_alt(stats.n_p2c_alt),
    .n_evicted(stats.n_evicted), .n_page_full(stats.n_page_full), .n_ri_full(stats.n_ri_full),
    .n_vs_full(stats.n_vs_full), .n_deleted(stats.n_deleted));

  // ---------------- start-up ----------------
  bolt_init #(.ROWS(ROWS), .NPAGES(M)) u_init (
    .clk, .rst_n, .start(1'b0), .sweep_start, .ring_done, .cnt_done, .ri_done(ri_done_init),
    .pm(pm_init), .hac_valid(i_hv), .hac_ready, .hac_op(i_ho), .hac_page(i_hp), .hac_done,
    .done(init_done));

  assign idle = init_done && !ks_busy && !vac_busy && !rmp_busy && !cq_valid && !dec_valid &&
                !rq_valid && !rsp_valid;
endmodule
