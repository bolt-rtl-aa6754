// bolt_value_access -- VAC stage: reads both bins of the accessed key, takes the value
// out of wherever it lives and executes the GET/PUT/DELETE.
//
// Bins 0..K-1 are HBM bins, bins K..K+M-1 are host pages K..: every bin of (p1, p2) that
// is a host page is fetched through the host access controller into scratchpad slot 0
// (p1) or 1 (p2), whether or not it holds the key, so the host sees two page reads per
// access regardless of the key. HBM bins cost no host traffic. Then, for a key found in
// the map:
//   loc = HOST   the two scratchpads are scanned in parallel for the key and the tuple is
//                removed (its flag cleared) from the scratchpad;
//   loc = HBM    the value-store line is read and cleared;
//   loc = STASH  the value-store line is read (stash and HBM store share one store).
// The command is then executed: GET returns the value (or null), PUT replaces the value
// or inserts a new key, DELETE drops it. A response goes to the response queue at once
// (it overlaps with remapping) and the item to place goes to remap (keep = 1) unless it
// was deleted or never existed. The flow is the paper's (Alg. 1 lines 4-11, step 4);
// K is a parameter, and the status codes are this design's.
module bolt_value_access
  import bolt_pkg::*;
#(
  parameter int unsigned K = K_HBM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  ks_res_t     in_res,
  // host access controller
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
  // value store
  bolt_mem_if.client  vs,
  // outputs
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output rsp_t        rsp,
  output logic        out_valid,
  input  logic        out_ready,
  output vac_res_t    out_res,
  output logic        busy,
  output logic [31:0] n_lost          // map said HOST but the key was in neither page
);
  typedef enum logic [3:0] {V_IDLE, V_RD0, V_W0, V_RD1, V_W1, V_LOOK, V_VSRD, V_VSWAIT,
                            V_VSCLR, V_EXEC, V_OUT} vstate_e;
  vstate_e  state;
  ks_res_t  ks;
  logic [1:0] is_page;
  logic     found;
  logic [VAL_W-1:0] val;
  logic     rsp_pend, out_pend;

  assign in_ready = (state == V_IDLE);
  assign busy     = (state != V_IDLE);
  assign is_page[0] = (ks.p1 >= BIN_W'(K));
  assign is_page[1] = (ks.p2 >= BIN_W'(K));

  // HAC requests
  always_comb begin
    hac_valid = ((state == V_RD0) && is_page[0]) || ((state == V_RD1) && is_page[1]);
    hac_op    = 2'd0;                          // read
    hac_slot  = (state == V_RD1);
    hac_page  = (state == V_RD1) ? ks.p2 - BIN_W'(K) : ks.p1 - BIN_W'(K);
  end

  // Parallel scan of both scratchpads.
  logic        sc_hit;
  logic        sc_slot;
  logic [$clog2(LMAX)-1:0] sc_idx;
  always_comb begin
    sc_hit = 1'b0; sc_slot = 1'b0; sc_idx = '0;
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < LMAX; i++)
        if (!sc_hit && is_page[s] && sp[s][i].valid && sp[s][i].key == ks.cmd.key) begin
          sc_hit = 1'b1; sc_slot = 1'(s); sc_idx = ($clog2(LMAX))'(i);
        end
  end

  always_comb begin
    tw_valid = (state == V_LOOK) && ks.hit && ks.loc == LOC_HOST && sc_hit;
    tw_slot  = sc_slot;
    tw_idx   = sc_idx;
    tw_tuple = '0;
  end

  always_comb begin
    vs.req_valid = (state == V_VSRD) || (state == V_VSCLR);
    vs.req_we    = (state == V_VSCLR);
    vs.req_addr  = ks.vptr;
    vs.req_wdata = '0;
    vs.req_wmask = '1;
  end

  assign rsp_valid = (state == V_OUT) && rsp_pend;
  assign out_valid = (state == V_OUT) && out_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= V_IDLE; ks <= '0; found <= 1'b0; val <= '0;
      rsp <= '0; out_res <= '0; rsp_pend <= 1'b0; out_pend <= 1'b0; n_lost <= '0;
    end else begin
      unique case (state)
        V_IDLE: if (in_valid) begin
          ks <= in_res; found <= 1'b0; val <= '0;
          state <= V_RD0;
        end
        V_RD0: if (!is_page[0]) state <= V_RD1;
               else if (hac_ready) state <= V_W0;
        V_W0:  if (hac_done) state <= V_RD1;
        V_RD1: if (!is_page[1]) state <= V_LOOK;
               else if (hac_ready) state <= V_W1;
        V_W1:  if (hac_done) state <= V_LOOK;
        V_LOOK: begin
          if (!ks.hit) state <= V_EXEC;
          else if (ks.loc == LOC_HOST) begin
            found <= sc_hit;
            val   <= sc_hit ? sp[sc_slot][sc_idx].value : '0;
            if (!sc_hit) n_lost <= n_lost + 1;
            state <= V_EXEC;
          end else state <= V_VSRD;
        end
        V_VSRD: if (vs.req_ready) state <= V_VSWAIT;
        V_VSWAIT: if (vs.rsp_valid) begin
          found <= 1'b1;
          val   <= vs.rsp_rdata;
          state <= (ks.loc == LOC_HBM) ? V_VSCLR : V_EXEC;
        end
        V_VSCLR: if (vs.req_ready) state <= V_EXEC;
        V_EXEC: begin
          out_res.ks      <= ks;
          out_res.page_rd <= is_page;
          out_res.is_new  <= 1'b0;
          out_res.keep    <= 1'b0;
          out_res.value   <= val;
          rsp.value       <= '0;
          unique case (ks.cmd.op)
            OP_GET: begin
              rsp.status   <= found ? ST_GET_HIT : ST_GET_NULL;
              rsp.value    <= found ? val : '0;
              out_res.keep <= found;
            end
            OP_PUT: begin
              out_res.value <= ks.cmd.payload;
              if (found) begin
                rsp.status   <= ST_PUT_OK;
                out_res.keep <= 1'b1;
              end else if (!ks.hit && ks.can_ins) begin
                rsp.status     <= ST_PUT_OK;
                out_res.keep   <= 1'b1;
                out_res.is_new <= 1'b1;
              end else begin
                rsp.status <= ST_FULL;
              end
            end
            default: rsp.status <= ST_DEL_OK;
          endcase
          // A key the map holds but no page did is treated as lost and dropped.
          if (ks.hit && !found) out_res.ks.hit <= 1'b0;
          rsp_pend <= 1'b1;
          out_pend <= 1'b1;
          state    <= V_OUT;
        end
        V_OUT: begin
          if (rsp_valid && rsp_ready) rsp_pend <= 1'b0;
          if (out_valid && out_ready) out_pend <= 1'b0;
          if ((!rsp_pend || (rsp_valid && rsp_ready)) &&
              (!out_pend || (out_valid && out_ready))) state <= V_IDLE;
        end
        default: state <= V_IDLE;
      endcase
    end
  end
endmodule
