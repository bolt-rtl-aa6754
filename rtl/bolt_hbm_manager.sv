// bolt_hbm_manager -- HM: the single gateway of the core's modules to on-package HBM.
//
// Two HBM regions are served, each on dedicated banks as the paper prescribes:
//   * the position map, one row per request, all PM_SLOTS columns in one beat (each
//     column lives in its own bank, so a row read is one parallel access; the write
//     mask has one bit per column, i.e. per bank);
//   * the value store, one VAL_W line per request, holding both the HBM bins and the
//     eviction stash.
// Position-map clients, highest priority first: remap, init, key search. Value-store
// clients: remap, value access. Each region has its own bolt_mem_arb. HM also owns the
// free-address ring of the value store (Fig. 6), which it exposes to the remap stage
// (alloc/free) and preloads on init_start. Timing: requests pass through in the same
// cycle; read latency is that of the HBM port.
module bolt_hbm_manager
  import bolt_pkg::*;
#(
  parameter int unsigned VS_LINES = VS_DEPTH
) (
  input  logic       clk,
  input  logic       rst_n,
  bolt_mem_if.server pm_rmp,
  bolt_mem_if.server pm_init,
  bolt_mem_if.server pm_ks,
  bolt_mem_if.server vs_rmp,
  bolt_mem_if.server vs_vac,
  bolt_mem_if.client pm_hbm,
  bolt_mem_if.client vs_hbm,
  input  logic       init_start,
  output logic       ring_init_done,
  input  logic       alloc_req,
  output logic       alloc_valid,
  output logic       alloc_ok,
  output vptr_t      alloc_addr,
  input  logic       free_req,
  input  vptr_t      free_addr,
  output logic [VPTR_W:0] free_level
);
  // ---------------- position map ----------------
  logic [2:0]          pc_valid, pc_we, pc_ready, pc_rsp;
  logic [ROW_AW-1:0]   pc_addr  [3];
  logic [PM_ROW_W-1:0] pc_wdata [3];
  logic [PM_SLOTS-1:0] pc_wmask [3];
  logic [PM_ROW_W-1:0] pc_rdata;

  assign pc_valid = {pm_ks.req_valid, pm_init.req_valid, pm_rmp.req_valid};
  assign pc_we    = {pm_ks.req_we,    pm_init.req_we,    pm_rmp.req_we};
  assign pc_addr[0]  = pm_rmp.req_addr;  assign pc_wdata[0] = pm_rmp.req_wdata;  assign pc_wmask[0] = pm_rmp.req_wmask;
  assign pc_addr[1]  = pm_init.req_addr; assign pc_wdata[1] = pm_init.req_wdata; assign pc_wmask[1] = pm_init.req_wmask;
  assign pc_addr[2]  = pm_ks.req_addr;   assign pc_wdata[2] = pm_ks.req_wdata;   assign pc_wmask[2] = pm_ks.req_wmask;
  assign pm_rmp.req_ready  = pc_ready[0]; assign pm_rmp.rsp_valid  = pc_rsp[0]; assign pm_rmp.rsp_rdata  = pc_rdata;
  assign pm_init.req_ready = pc_ready[1]; assign pm_init.rsp_valid = pc_rsp[1]; assign pm_init.rsp_rdata = pc_rdata;
  assign pm_ks.req_ready   = pc_ready[2]; assign pm_ks.rsp_valid   = pc_rsp[2]; assign pm_ks.rsp_rdata   = pc_rdata;

  bolt_mem_arb #(.NC(3), .AW(ROW_AW), .DW(PM_ROW_W), .MW(PM_SLOTS)) u_pm_arb (
    .clk, .rst_n,
    .c_valid(pc_valid), .c_we(pc_we), .c_addr(pc_addr), .c_wdata(pc_wdata), .c_wmask(pc_wmask),
    .c_ready(pc_ready), .c_rsp_valid(pc_rsp), .c_rsp_rdata(pc_rdata),
    .m_valid(pm_hbm.req_valid), .m_we(pm_hbm.req_we), .m_addr(pm_hbm.req_addr),
    .m_wdata(pm_hbm.req_wdata), .m_wmask(pm_hbm.req_wmask), .m_ready(pm_hbm.req_ready),
    .m_rsp_valid(pm_hbm.rsp_valid), .m_rsp_rdata(pm_hbm.rsp_rdata));

  // ---------------- value store ----------------
  logic [1:0]        vc_valid, vc_we, vc_ready, vc_rsp;
  logic [VPTR_W-1:0] vc_addr  [2];
  logic [VAL_W-1:0]  vc_wdata [2];
  logic [0:0]        vc_wmask [2];
  logic [VAL_W-1:0]  vc_rdata;

  assign vc_valid = {vs_vac.req_valid, vs_rmp.req_valid};
  assign vc_we    = {vs_vac.req_we,    vs_rmp.req_we};
  assign vc_addr[0] = vs_rmp.req_addr; assign vc_wdata[0] = vs_rmp.req_wdata; assign vc_wmask[0] = vs_rmp.req_wmask;
  assign vc_addr[1] = vs_vac.req_addr; assign vc_wdata[1] = vs_vac.req_wdata; assign vc_wmask[1] = vs_vac.req_wmask;
  assign vs_rmp.req_ready = vc_ready[0]; assign vs_rmp.rsp_valid = vc_rsp[0]; assign vs_rmp.rsp_rdata = vc_rdata;
  assign vs_vac.req_ready = vc_ready[1]; assign vs_vac.rsp_valid = vc_rsp[1]; assign vs_vac.rsp_rdata = vc_rdata;

  bolt_mem_arb #(.NC(2), .AW(VPTR_W), .DW(VAL_W), .MW(1)) u_vs_arb (
    .clk, .rst_n,
    .c_valid(vc_valid), .c_we(vc_we), .c_addr(vc_addr), .c_wdata(vc_wdata), .c_wmask(vc_wmask),
    .c_ready(vc_ready), .c_rsp_valid(vc_rsp), .c_rsp_rdata(vc_rdata),
    .m_valid(vs_hbm.req_valid), .m_we(vs_hbm.req_we), .m_addr(vs_hbm.req_addr),
    .m_wdata(vs_hbm.req_wdata), .m_wmask(vs_hbm.req_wmask), .m_ready(vs_hbm.req_ready),
    .m_rsp_valid(vs_hbm.rsp_valid), .m_rsp_rdata(vs_hbm.rsp_rdata));

  // ---------------- free-address ring ----------------
  bolt_free_ring #(.DEPTH(VS_LINES)) u_ring (
    .clk, .rst_n, .init_start, .init_done(ring_init_done),
    .alloc_req, .alloc_valid, .alloc_ok, .alloc_addr,
    .free_req, .free_addr, .level(free_level));
endmodule
