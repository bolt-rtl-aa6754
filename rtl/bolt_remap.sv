// bolt_remap -- RMP stage: re-places the accessed item in two fresh random bins with
// power-of-two-choices, then evicts stashed items into the pages just read and writes
// those pages back.
//
// Remapping (Alg. 1 lines 14-15, step 5): the item's old bin loses one count. Two new
// distinct random bins p1', p2' are drawn and their counts compared; the item goes to
// the lighter one (p1' on a tie) and that count grows by one. If the item already
// occupied a value-store line (HBM bin or stash) it keeps the line, otherwise a line is
// taken from the free ring. The value is written there. If the destination is an HBM
// bin the item is simply there (loc = HBM); if it is a host page the item is now in the
// stash (loc = STASH) and its map pointer is added to that page's reverse-index entry.
// The map slot is rewritten with {key, p1', p2', choice, loc, line}; the slot itself
// never moves, so the reverse index can point at it. A deleted item instead gets its
// slot cleared, its line freed and its reverse-index pointer removed.
//
// Eviction: for every bin of the access that was a host page (scratchpad 0 for p1,
// 1 for p2), the page's reverse-index entry is read; each pointed item is fetched (map
// slot, then value line), written into a free tuple of the scratchpad page, its line is
// returned to the ring, its slot marked loc = HOST and its pointer cleared. The page is
// then written back through the host access controller. An item that finds the page
// full stays in the stash (counted in n_page_full). Every access therefore writes back
// exactly the pages it read. Status and event counters are outputs.
// The procedure is the paper's; the order of the small steps and the tie rule are this
// design's. One memory operation is in flight at a time, so the stage is simple but
// takes tens of cycles plus the page write-backs, which matches the paper's finding
// that remap is the longest stage.
module bolt_remap
  import bolt_pkg::*;
#(
  parameter int unsigned K = K_HBM,
  parameter int unsigned CW = $clog2(LMAX + 1) + 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  vac_res_t    in_res,
  input  bin_t        rnd_p1,
  input  bin_t        rnd_p2,
  // count list
  output bin_t        cl_rd_a,
  output bin_t        cl_rd_b,
  input  logic [CW-1:0] cl_q_a,
  input  logic [CW-1:0] cl_q_b,
  output logic        cl_upd_valid,
  output bin_t        cl_upd_bin,
  output logic        cl_upd_dec,
  input  logic        cl_busy,
  // reverse index
  output logic        ri_valid,
  output logic [1:0]  ri_op,
  output bin_t        ri_page,
  output pm_ptr_t     ri_ptr,
  output logic [$clog2(LMAX)-1:0] ri_idx,
  input  logic        ri_ready,
  input  logic        ri_done,
  input  logic        ri_ok,
  input  logic [LMAX-1:0] ri_row_valid,
  input  pm_ptr_t [LMAX-1:0] ri_row_ptr,
  // free ring
  output logic        alloc_req,
  input  logic        alloc_valid,
  input  logic        alloc_ok,
  input  vptr_t       alloc_addr,
  output logic        free_req,
  output vptr_t       free_addr,
  // HBM
  bolt_mem_if.client  pm,
  bolt_mem_if.client  vs,
  // host access controller and scratchpads
  output logic        hac_valid,
  input  logic        hac_ready,
  output logic [1:0]  hac_op,
  output logic        hac_slot,
  output bin_t        hac_page,
  input  logic        hac_done,
  input  page_t [1:0] sp,
  output logic        tw_valid,
  output logic        tw_slot,
  output logic [$clog2(LMAX)-1:0] tw_idx,
  output tuple_t      tw_tuple,
  // status
  output logic        busy,
  output logic [31:0] n_to_hbm,      // items placed in an HBM bin
  output logic [31:0] n_to_stash,    // items placed in the stash
  output logic [31:0] n_p2c_alt,     // P2C picked p2' because it was lighter
  output logic [31:0] n_evicted,     // stash items written into pages
  output logic [31:0] n_page_full,   // eviction found the page full
  output logic [31:0] n_ri_full,     // reverse-index entry full
  output logic [31:0] n_vs_full,     // value store exhausted
  output logic [31:0] n_deleted
);
  localparam logic [1:0] RI_ADD = 2'd0, RI_DEL = 2'd1, RI_READ = 2'd2, RI_CLR = 2'd3;
  localparam int unsigned LW = $clog2(LMAX);

  typedef enum logic [4:0] {
    R_IDLE, R_DEC, R_DECW, R_CRD, R_CQ, R_INC, R_INCW, R_ALLOC, R_ALLOCW, R_VSWR,
    R_RIDEL, R_RIDELW, R_RIADD, R_RIADDW, R_PMWR,
    E_START, E_RIRD, E_RIRDW, E_SCAN, E_PMRD, E_PMW, E_VSRD, E_VSW, E_TW, E_FREE,
    E_PMWR, E_RICLR, E_RICLRW, E_WB, E_WBW
  } rstate_e;

  rstate_e   state;
  vac_res_t  r;
  bin_t      np1, np2, dest, old_bin;
  logic      had, old_in_vs, dest_page;
  vptr_t     line;
  logic      esl;                      // eviction scratchpad slot
  logic [LMAX-1:0] e_v;
  pm_ptr_t [LMAX-1:0] e_p;
  logic [LW:0] e_j;
  pm_slot_t  e_slot;
  logic [VAL_W-1:0] e_val;

  assign in_ready = (state == R_IDLE);
  assign busy     = (state != R_IDLE);

  // Free tuple in the scratchpad being evicted into.
  logic        sp_free;
  logic [LW-1:0] sp_free_idx;
  always_comb begin
    sp_free = 1'b0; sp_free_idx = '0;
    for (int i = LMAX - 1; i >= 0; i--)
      if (!sp[esl][i].valid) begin
        sp_free = 1'b1; sp_free_idx = LW'(i);
      end
  end

  // Drive outputs from the state.
  pm_slot_t new_slot;
  always_comb begin
    new_slot       = '0;
    new_slot.valid = r.keep;
    new_slot.key   = r.ks.cmd.key;
    new_slot.p1    = np1;
    new_slot.p2    = np2;
    new_slot.sel   = (dest == np2);
    new_slot.loc   = dest_page ? LOC_STASH : LOC_HBM;
    new_slot.vptr  = line;
  end

  pm_slot_t es;
  always_comb begin
    es      = e_slot;
    es.loc  = LOC_HOST;
    es.vptr = '0;
  end

  always_comb begin
    cl_rd_a = np1; cl_rd_b = np2;
    cl_upd_valid = 1'b0; cl_upd_bin = old_bin; cl_upd_dec = 1'b1;
    if (state == R_DEC) cl_upd_valid = 1'b1;
    if (state == R_INC) begin
      cl_upd_valid = 1'b1; cl_upd_bin = dest; cl_upd_dec = 1'b0;
    end

    ri_valid = 1'b0; ri_op = RI_READ; ri_page = '0; ri_ptr = r.ks.ptr; ri_idx = '0;
    unique case (state)
      R_RIDEL: begin ri_valid = 1'b1; ri_op = RI_DEL; ri_page = old_bin - BIN_W'(K); end
      R_RIADD: begin ri_valid = 1'b1; ri_op = RI_ADD; ri_page = dest - BIN_W'(K); end
      E_RIRD:  begin ri_valid = 1'b1; ri_op = RI_READ;
                     ri_page = (esl ? r.ks.p2 : r.ks.p1) - BIN_W'(K); end
      E_RICLR: begin ri_valid = 1'b1; ri_op = RI_CLR;
                     ri_page = (esl ? r.ks.p2 : r.ks.p1) - BIN_W'(K);
                     ri_idx  = e_j[LW-1:0]; end
      default: ;
    endcase

    alloc_req = (state == R_ALLOC);
    free_req  = 1'b0; free_addr = line;
    if (state == E_FREE) begin free_req = 1'b1; free_addr = e_slot.vptr; end
    if (state == R_PMWR && !r.keep && had && old_in_vs && pm.req_ready) free_req = 1'b1;

    pm.req_valid = 1'b0; pm.req_we = 1'b0; pm.req_addr = r.ks.ptr.row;
    pm.req_wdata = '0; pm.req_wmask = '0;
    if (state == R_PMWR) begin
      pm.req_valid = r.keep || had;
      pm.req_we    = 1'b1;
      pm.req_wdata[r.ks.ptr.slot*$bits(pm_slot_t) +: $bits(pm_slot_t)] = new_slot;
      pm.req_wmask[r.ks.ptr.slot] = 1'b1;
    end
    if (state == E_PMRD) begin
      pm.req_valid = 1'b1; pm.req_addr = e_p[e_j[LW-1:0]].row;
    end
    if (state == E_PMWR) begin
      pm.req_valid = 1'b1; pm.req_we = 1'b1; pm.req_addr = e_p[e_j[LW-1:0]].row;
      pm.req_wdata[e_p[e_j[LW-1:0]].slot*$bits(pm_slot_t) +: $bits(pm_slot_t)] = es;
      pm.req_wmask[e_p[e_j[LW-1:0]].slot] = 1'b1;
    end

    vs.req_valid = 1'b0; vs.req_we = 1'b0; vs.req_addr = line; vs.req_wdata = r.value;
    vs.req_wmask = '1;
    if (state == R_VSWR) begin vs.req_valid = 1'b1; vs.req_we = 1'b1; end
    if (state == E_VSRD) begin vs.req_valid = 1'b1; vs.req_addr = e_slot.vptr; end

    hac_valid = (state == E_WB); hac_op = 2'd1; hac_slot = esl;
    hac_page  = (esl ? r.ks.p2 : r.ks.p1) - BIN_W'(K);

    tw_valid = (state == E_TW); tw_slot = esl; tw_idx = sp_free_idx;
    tw_tuple.valid = 1'b1; tw_tuple.key = e_slot.key; tw_tuple.value = e_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= R_IDLE; r <= '0; np1 <= '0; np2 <= '0; dest <= '0; old_bin <= '0;
      had <= 1'b0; old_in_vs <= 1'b0; dest_page <= 1'b0; line <= '0; esl <= 1'b0;
      e_v <= '0; e_p <= '0; e_j <= '0; e_slot <= '0; e_val <= '0;
      n_to_hbm <= '0; n_to_stash <= '0; n_p2c_alt <= '0; n_evicted <= '0;
      n_page_full <= '0; n_ri_full <= '0; n_vs_full <= '0; n_deleted <= '0;
    end else begin
      unique case (state)
        R_IDLE: if (in_valid) begin
          r         <= in_res;
          np1       <= rnd_p1;
          np2       <= rnd_p2;
          had       <= in_res.ks.hit;
          old_bin   <= in_res.ks.sel ? in_res.ks.p2 : in_res.ks.p1;
          old_in_vs <= in_res.ks.hit && (in_res.ks.loc != LOC_HOST);
          line      <= in_res.ks.vptr;
          esl       <= 1'b0;
          state     <= in_res.ks.hit ? R_DEC : (in_res.keep ? R_CRD : E_START);
        end
        R_DEC:  if (!cl_busy) state <= R_DECW;
        R_DECW: if (!cl_busy) state <= r.keep ? R_CRD : R_RIDEL;
        R_CRD:  state <= R_CQ;       // count read addresses presented
        R_CQ: begin                  // counts available
          if (cl_q_b < cl_q_a) begin
            dest      <= np2;
            dest_page <= (np2 >= BIN_W'(K));
            n_p2c_alt <= n_p2c_alt + 1;
          end else begin
            dest      <= np1;
            dest_page <= (np1 >= BIN_W'(K));
          end
          state <= R_INC;
        end
        R_INC:  if (!cl_busy) state <= R_INCW;
        R_INCW: if (!cl_busy) state <= old_in_vs ? R_VSWR : R_ALLOC;
        R_ALLOC: state <= R_ALLOCW;
        R_ALLOCW: if (alloc_valid) begin
          if (alloc_ok) begin
            line  <= alloc_addr;
            state <= R_VSWR;
          end else begin
            n_vs_full <= n_vs_full + 1;
            r.keep    <= 1'b0;       // nowhere to keep it: the item is dropped
            state     <= R_PMWR;
          end
        end
        R_VSWR: if (vs.req_ready) begin
          if (dest_page) n_to_stash <= n_to_stash + 1;
          else           n_to_hbm   <= n_to_hbm + 1;
          state <= R_RIDEL;
        end
        R_RIDEL: begin
          if (!(had && r.ks.loc == LOC_STASH)) state <= (r.keep && dest_page) ? R_RIADD : R_PMWR;
          else if (ri_ready) state <= R_RIDELW;
        end
        R_RIDELW: if (ri_done) state <= (r.keep && dest_page) ? R_RIADD : R_PMWR;
        R_RIADD: if (ri_ready) state <= R_RIADDW;
        R_RIADDW: if (ri_done) begin
          if (!ri_ok) n_ri_full <= n_ri_full + 1;
          state <= R_PMWR;
        end
        R_PMWR: if (!pm.req_valid || pm.req_ready) begin
          if (!r.keep && had && r.ks.cmd.op == OP_DEL) n_deleted <= n_deleted + 1;
          state <= E_START;
          esl   <= 1'b0;
        end
        // ---------------- eviction into the pages read ----------------
        E_START: begin
          if (!r.page_rd[esl]) begin
            if (esl) state <= R_IDLE;
            else     esl   <= 1'b1;
          end else state <= E_RIRD;
        end
        E_RIRD:  if (ri_ready) state <= E_RIRDW;
        E_RIRDW: if (ri_done) begin
          e_v   <= ri_row_valid;
          e_p   <= ri_row_ptr;
          e_j   <= '0;
          state <= E_SCAN;
        end
        E_SCAN: begin
          if (e_j == (LW+1)'(LMAX)) state <= E_WB;
          else if (!e_v[e_j[LW-1:0]]) e_j <= e_j + 1'b1;
          else if (!sp_free) begin
            n_page_full <= n_page_full + 1;
            e_j         <= e_j + 1'b1;
          end else state <= E_PMRD;
        end
        E_PMRD: if (pm.req_ready) state <= E_PMW;
        E_PMW:  if (pm.rsp_valid) begin
          e_slot <= pm_slot_t'(pm.rsp_rdata[e_p[e_j[LW-1:0]].slot*$bits(pm_slot_t) +: $bits(pm_slot_t)]);
          state  <= E_VSRD;
        end
        E_VSRD: if (vs.req_ready) state <= E_VSW;
        E_VSW:  if (vs.rsp_valid) begin
          e_val <= vs.rsp_rdata;
          state <= E_TW;
        end
        E_TW:   state <= E_FREE;
        E_FREE: begin
          n_evicted <= n_evicted + 1;
          state     <= E_PMWR;
        end
        E_PMWR: if (pm.req_ready) state <= E_RICLR;
        E_RICLR: if (ri_ready) state <= E_RICLRW;
        E_RICLRW: if (ri_done) begin
          e_j   <= e_j + 1'b1;
          state <= E_SCAN;
        end
        E_WB:  if (hac_ready) state <= E_WBW;
        E_WBW: if (hac_done) begin
          if (esl) state <= R_IDLE;
          else begin
            esl   <= 1'b1;
            state <= E_START;
          end
        end
        default: state <= R_IDLE;
      endcase
    end
  end
endmodule
