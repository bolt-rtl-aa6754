// bolt_count_list -- on-chip load counter of every logical bin, used by the remap
// stage for power-of-two-choices placement.
//
// NB counters of CW bits in one array. Two synchronous read ports (rd_a/rd_b -> q_a/q_b
// one cycle later) serve the P2C comparison of the two candidate bins. An update
// (upd_valid, upd_bin, upd_dec) is a read-modify-write: the counter is read in the cycle
// the update is accepted and written back incremented (or decremented) one cycle later;
// busy is high meanwhile and no new update may be issued. Counters saturate at both
// ends. init_start clears all counters by a one-per-cycle sweep ending with init_done.
// The count list itself is the paper's; its ports and the saturation are this design's.
module bolt_count_list
  import bolt_pkg::*;
#(
  parameter int unsigned NB = NBINS,
  parameter int unsigned CW = $clog2(LMAX + 1) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init_start,
  output logic          init_done,
  input  bin_t          rd_a,
  input  bin_t          rd_b,
  output logic [CW-1:0] q_a,
  output logic [CW-1:0] q_b,
  input  logic          upd_valid,
  input  bin_t          upd_bin,
  input  logic          upd_dec,
  output logic          busy
);
  logic [CW-1:0] cnt [NB];
  logic          initing;
  bin_t          init_idx;
  logic          wb_pend;
  logic          wb_dec;
  bin_t          wb_bin;
  logic [CW-1:0] wb_old;
  logic [CW-1:0] wb_new;

  assign busy = wb_pend || initing;

  always_comb begin
    if (wb_dec) wb_new = (wb_old == '0) ? '0 : wb_old - 1'b1;
    else        wb_new = (wb_old == '1) ? '1 : wb_old + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      initing <= 1'b0; init_done <= 1'b0; init_idx <= '0;
      wb_pend <= 1'b0; wb_dec <= 1'b0; wb_bin <= '0;
    end else begin
      if (init_start) begin
        initing <= 1'b1; init_done <= 1'b0; init_idx <= '0;
      end else if (initing) begin
        init_idx <= init_idx + 1'b1;
        if (init_idx == BIN_W'(NB - 1)) begin
          initing   <= 1'b0;
          init_done <= 1'b1;
        end
      end
      wb_pend <= upd_valid && !busy;
      if (upd_valid && !busy) begin
        wb_bin <= upd_bin;
        wb_dec <= upd_dec;
      end
    end
  end

  always_ff @(posedge clk) begin
    q_a <= cnt[rd_a];
    q_b <= cnt[rd_b];
    if (upd_valid && !busy) wb_old <= cnt[upd_bin];
    if (initing)      cnt[init_idx] <= '0;
    else if (wb_pend) cnt[wb_bin]   <= wb_new;
  end
endmodule
