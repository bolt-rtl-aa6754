// bolt_init -- start-up sequencer of the core (the paper's initialization step).
//
// After reset, or on start, it brings every structure to the empty state before the
// first command is accepted:
//   * starts the self-sweeps of the free-address ring (preload with all value-store
//     lines), the count list (all zero) and the reverse index (all empty);
//   * clears every position-map row in HBM (one full-row write per row);
//   * writes a dummy page (all flags clear) to each of the NPAGES host pages through the
//     host access controller, so host memory holds valid (encrypted) pages from the
//     start.
// The map clearing and the page writes proceed in parallel with the sweeps. done goes
// high once all parts have finished and stays high. The host is expected to have set the
// base address of its pinned region beforehand. Bulk loading of a data set that the
// data owner prepared offline is not done here; data enter through PUT commands.
module bolt_init
  import bolt_pkg::*;
#(
  parameter int unsigned ROWS   = PM_ROWS,
  parameter int unsigned NPAGES = M_HOST
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       sweep_start,
  input  logic       ring_done,
  input  logic       cnt_done,
  input  logic       ri_done,
  bolt_mem_if.client pm,
  output logic       hac_valid,
  input  logic       hac_ready,
  output logic [1:0] hac_op,
  output bin_t       hac_page,
  input  logic       hac_done,
  output logic       done
);
  typedef enum logic [1:0] {I_RESET, I_RUN, I_DONE} istate_e;
  istate_e     state;
  logic [ROW_AW:0] row_i;
  logic [BIN_W:0]  page_i;
  logic        pm_done, pg_done, pg_wait;

  assign sweep_start = (state == I_RESET);

  always_comb begin
    pm.req_valid = (state == I_RUN) && !pm_done;
    pm.req_we    = 1'b1;
    pm.req_addr  = row_t'(row_i);
    pm.req_wdata = '0;
    pm.req_wmask = '1;
    hac_valid    = (state == I_RUN) && !pg_done && !pg_wait;
    hac_op       = 2'd2;               // dummy page
    hac_page     = bin_t'(page_i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= I_RESET; row_i <= '0; page_i <= '0;
      pm_done <= 1'b0; pg_done <= 1'b0; pg_wait <= 1'b0; done <= 1'b0;
    end else begin
      unique case (state)
        I_RESET: begin
          row_i <= '0; page_i <= '0; pm_done <= 1'b0; pg_done <= (NPAGES == 0);
          pg_wait <= 1'b0; done <= 1'b0;
          state <= I_RUN;
        end
        I_RUN: begin
          if (pm.req_valid && pm.req_ready) begin
            row_i <= row_i + 1'b1;
            if (row_i == (ROW_AW+1)'(ROWS - 1)) pm_done <= 1'b1;
          end
          if (hac_valid && hac_ready) pg_wait <= 1'b1;
          if (pg_wait && hac_done) begin
            pg_wait <= 1'b0;
            page_i  <= page_i + 1'b1;
            if (page_i == (BIN_W+1)'(NPAGES - 1)) pg_done <= 1'b1;
          end
          if (pm_done && pg_done && ring_done && cnt_done && ri_done) begin
            done  <= 1'b1;
            state <= I_DONE;
          end
        end
        I_DONE: if (start) state <= I_RESET;
        default: state <= I_RESET;
      endcase
    end
  end
endmodule
