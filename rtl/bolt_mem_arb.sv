// bolt_mem_arb -- fixed-priority arbiter that shares one memory port among NC clients
// and returns read data to the client that asked for it.
//
// Client 0 has the highest priority. The granted client's request is forwarded in the
// same cycle (combinational grant, no added latency). For every accepted read the
// client number is pushed into an in-order tag queue of TAGQ entries; each returning
// read beat pops it and raises rsp_valid only for that client. Requests stall
// (ready low) while the tag queue is full. A request the memory has stalled keeps its
// grant until it is accepted, so the memory sees a stable request. Used by the HBM
// manager for the position-map and value-store ports; the arbitration policy is this
// design's.
module bolt_mem_arb #(
  parameter int unsigned NC   = 2,
  parameter int unsigned AW   = 32,
  parameter int unsigned DW   = 64,
  parameter int unsigned MW   = 1,
  parameter int unsigned TAGQ = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  // clients
  input  logic [NC-1:0] c_valid,
  input  logic [NC-1:0] c_we,
  input  logic [AW-1:0] c_addr  [NC],
  input  logic [DW-1:0] c_wdata [NC],
  input  logic [MW-1:0] c_wmask [NC],
  output logic [NC-1:0] c_ready,
  output logic [NC-1:0] c_rsp_valid,
  output logic [DW-1:0] c_rsp_rdata,
  // memory
  output logic          m_valid,
  output logic          m_we,
  output logic [AW-1:0] m_addr,
  output logic [DW-1:0] m_wdata,
  output logic [MW-1:0] m_wmask,
  input  logic          m_ready,
  input  logic          m_rsp_valid,
  input  logic [DW-1:0] m_rsp_rdata
);
  localparam int unsigned CW = (NC > 1) ? $clog2(NC) : 1;
  localparam int unsigned QW = $clog2(TAGQ);

  logic [CW-1:0] gnt;
  logic          any;
  logic [CW-1:0] tagq [TAGQ];
  logic [QW-1:0] q_wr, q_rd;
  logic [QW:0]   q_cnt;
  logic          q_full, push, pop;
  logic          locked;      // a stalled request keeps its grant until accepted
  logic [CW-1:0] lk_gnt;

  always_comb begin
    any = 1'b0;
    gnt = '0;
    for (int i = NC - 1; i >= 0; i--) begin
      if (c_valid[i]) begin
        any = 1'b1;
        gnt = CW'(i);
      end
    end
    if (locked) gnt = lk_gnt;
  end

  assign q_full  = (q_cnt == (QW+1)'(TAGQ));
  assign m_valid = any && !q_full;
  assign m_we    = c_we[gnt];
  assign m_addr  = c_addr[gnt];
  assign m_wdata = c_wdata[gnt];
  assign m_wmask = c_wmask[gnt];

  always_comb begin
    c_ready = '0;
    if (any && !q_full) c_ready[gnt] = m_ready;
  end

  assign push = m_valid && m_ready && !m_we;
  assign pop  = m_rsp_valid;

  always_comb begin
    c_rsp_valid = '0;
    if (m_rsp_valid) c_rsp_valid[tagq[q_rd]] = 1'b1;
  end
  assign c_rsp_rdata = m_rsp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_wr <= '0; q_rd <= '0; q_cnt <= '0;
      locked <= 1'b0; lk_gnt <= '0;
    end else begin
      locked <= m_valid && !m_ready;
      lk_gnt <= gnt;
      if (push) q_wr <= q_wr + 1'b1;
      if (pop)  q_rd <= q_rd + 1'b1;
      q_cnt <= q_cnt + (QW+1)'(push) - (QW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) tagq[q_wr] <= gnt;
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   m_rsp_valid |-> (q_cnt != '0));
endmodule
