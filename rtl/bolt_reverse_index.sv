// bolt_reverse_index -- per-host-page list of position-map slots whose values wait in
// the eviction stash for that page (fast eviction with reverse index).
//
// One entry per host page holds up to LMAX pointers, each with a valid bit. Operations
// are issued with op_valid when ready is high and complete two cycles later with
// done (read in the first cycle, written back in the second):
//   RI_ADD  put ptr in the first free position      (ok = 0 if the entry was full)
//   RI_DEL  remove every position equal to ptr       (ok = 1 if one was found)
//   RI_READ return the entry on row                  (ok = 1)
//   RI_CLR  clear position idx of the entry
// row always returns the entry as it was before the operation. init_start empties all
// entries with a one-per-cycle sweep ending in init_done. The table and its use follow
// the paper; the operation set is this design's.
module bolt_reverse_index
  import bolt_pkg::*;
#(
  parameter int unsigned NPAGES = M_HOST
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      init_start,
  output logic      init_done,
  input  logic      op_valid,
  input  logic [1:0] op,
  input  bin_t      page,
  input  pm_ptr_t   ptr,
  input  logic [$clog2(LMAX)-1:0] idx,
  output logic      ready,
  output logic      done,
  output logic      ok,
  output logic [LMAX-1:0] row_valid,
  output pm_ptr_t [LMAX-1:0] row_ptr
);
  localparam logic [1:0] RI_ADD = 2'd0, RI_DEL = 2'd1, RI_READ = 2'd2, RI_CLR = 2'd3;

  typedef struct packed {
    logic    [LMAX-1:0] v;
    pm_ptr_t [LMAX-1:0] p;
  } ri_entry_t;

  ri_entry_t  tab [NPAGES];
  logic       initing;
  bin_t       init_idx;
  logic       s1;           // read done, write-back this cycle
  logic [1:0] s1_op;
  bin_t       s1_page;
  pm_ptr_t    s1_ptr;
  logic [$clog2(LMAX)-1:0] s1_idx;
  ri_entry_t  rd_q, wr_d;
  logic       wr_ok;

  assign ready = !initing && !s1;

  always_comb begin
    logic found;
    wr_d  = rd_q;
    wr_ok = 1'b0;
    found = 1'b0;
    unique case (s1_op)
      RI_ADD: begin
        for (int i = 0; i < LMAX; i++) begin
          if (!found && !rd_q.v[i]) begin
            found     = 1'b1;
            wr_d.v[i] = 1'b1;
            wr_d.p[i] = s1_ptr;
          end
        end
        wr_ok = found;
      end
      RI_DEL: begin
        for (int i = 0; i < LMAX; i++) begin
          if (rd_q.v[i] && rd_q.p[i] == s1_ptr) begin
            wr_d.v[i] = 1'b0;
            wr_ok     = 1'b1;
          end
        end
      end
      RI_READ: wr_ok = 1'b1;
      RI_CLR: begin
        wr_d.v[s1_idx] = 1'b0;
        wr_ok          = 1'b1;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      initing <= 1'b0; init_done <= 1'b0; init_idx <= '0;
      s1 <= 1'b0; done <= 1'b0; ok <= 1'b0;
      s1_op <= RI_READ; s1_page <= '0; s1_ptr <= '0; s1_idx <= '0;
      row_valid <= '0; row_ptr <= '0;
    end else begin
      done <= 1'b0;
      if (init_start) begin
        initing <= 1'b1; init_done <= 1'b0; init_idx <= '0;
      end else if (initing) begin
        init_idx <= init_idx + 1'b1;
        if (init_idx == BIN_W'(NPAGES - 1)) begin
          initing   <= 1'b0;
          init_done <= 1'b1;
        end
      end
      s1 <= op_valid && ready;
      if (op_valid && ready) begin
        s1_op <= op; s1_page <= page; s1_ptr <= ptr; s1_idx <= idx;
      end
      if (s1) begin
        done      <= 1'b1;
        ok        <= wr_ok;
        row_valid <= rd_q.v;
        row_ptr   <= rd_q.p;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (op_valid && ready) rd_q <= tab[page];
    if (initing)           tab[init_idx] <= '0;
    else if (s1)           tab[s1_page]  <= wr_d;
  end
endmodule
