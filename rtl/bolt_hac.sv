// bolt_hac -- Host Access Controller: moves whole host pages between the pinned host
// memory region and the two on-chip scratchpad page buffers.
//
// A page is LMAX tuples {flag, key, value}; each tuple travels as one HTUP_W-bit beat
// (zero padded) on the host port, so page p, tuple i lives at host byte address
//   host_base + (p * LMAX + i) * HTUP_W/8,
// which is the address translation the paper gives to the HAC (base of the pinned
// region plus page offset). Commands, accepted with cmd_valid when cmd_ready:
//   HAC_READ   fetch page into scratchpad slot; done pulses after the last beat returns
//   HAC_WRITE  write scratchpad slot back to the page; done after the last beat is sent
//   HAC_DUMMY  write an all-dummy page (used to populate host memory at start-up)
// The scratchpads are visible on sp (both slots) for the value-access and remap stages,
// which also modify single tuples through the tw_* port. Encryption of pages is done by
// the isolation gateway on the host port and is not part of this block. The beat format
// and port protocol are this design's; the prototype used PCIe host access through AXI4.
module bolt_hac
  import bolt_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic [63:0]   host_base,
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  logic [1:0]    cmd_op,
  input  logic          cmd_slot,
  input  bin_t          cmd_page,
  output logic          done,
  output page_t [1:0]   sp,
  input  logic          tw_valid,
  input  logic          tw_slot,
  input  logic [$clog2(LMAX)-1:0] tw_idx,
  input  tuple_t        tw_tuple,
  bolt_mem_if.client    host,
  output logic [31:0]   n_page_rd,
  output logic [31:0]   n_page_wr
);
  localparam logic [1:0] HAC_READ = 2'd0, HAC_WRITE = 2'd1, HAC_DUMMY = 2'd2;
  localparam int unsigned IW = $clog2(LMAX + 1);

  typedef enum logic [1:0] {H_IDLE, H_RD, H_WR} hstate_e;
  hstate_e     state;
  logic [1:0]  op_q;
  logic        slot_q;
  bin_t        page_q;
  logic [IW-1:0] n_sent, n_recv;
  logic [63:0] beat_addr;

  assign cmd_ready = (state == H_IDLE);
  assign beat_addr = host_base + ((64'(page_q) * 64'(LMAX) + 64'(n_sent)) << $clog2(HTUP_W/8));

  always_comb begin
    host.req_valid = 1'b0;
    host.req_we    = 1'b0;
    host.req_addr  = beat_addr;
    host.req_wdata = '0;
    host.req_wmask = '1;
    if (state == H_RD && n_sent < IW'(LMAX)) begin
      host.req_valid = 1'b1;
    end else if (state == H_WR && n_sent < IW'(LMAX)) begin
      host.req_valid = 1'b1;
      host.req_we    = 1'b1;
      if (op_q == HAC_WRITE) host.req_wdata = HTUP_W'(sp[slot_q][n_sent]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= H_IDLE; op_q <= HAC_READ; slot_q <= 1'b0; page_q <= '0;
      n_sent <= '0; n_recv <= '0; done <= 1'b0;
      n_page_rd <= '0; n_page_wr <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        H_IDLE: if (cmd_valid) begin
          op_q <= cmd_op; slot_q <= cmd_slot; page_q <= cmd_page;
          n_sent <= '0; n_recv <= '0;
          state <= (cmd_op == HAC_READ) ? H_RD : H_WR;
        end
        H_RD: begin
          if (host.req_valid && host.req_ready) n_sent <= n_sent + 1'b1;
          if (host.rsp_valid) begin
            n_recv <= n_recv + 1'b1;
            if (n_recv == IW'(LMAX - 1)) begin
              state <= H_IDLE; done <= 1'b1; n_page_rd <= n_page_rd + 1;
            end
          end
        end
        H_WR: begin
          if (host.req_valid && host.req_ready) begin
            n_sent <= n_sent + 1'b1;
            if (n_sent == IW'(LMAX - 1)) begin
              state <= H_IDLE; done <= 1'b1;
              if (op_q == HAC_WRITE) n_page_wr <= n_page_wr + 1;
            end
          end
        end
        default: state <= H_IDLE;
      endcase
    end
  end

  // Scratchpads: filled by page reads, edited tuple by tuple by VAC/RMP.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp <= '0;
    end else begin
      if (state == H_RD && host.rsp_valid)
        sp[slot_q][n_recv[$clog2(LMAX)-1:0]] <= tuple_t'(host.rsp_rdata[$bits(tuple_t)-1:0]);
      else if (tw_valid)
        sp[tw_slot][tw_idx] <= tw_tuple;
    end
  end
endmodule
