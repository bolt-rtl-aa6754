// bolt_tb_mem -- behavioural memory for simulation: stands in for HBM banks or for the
// pinned host-memory region in the testbenches. Not synthesizable design content.
//
// Word-addressed array of DEPTH words of DW bits; word index = (addr - BASE) >> SHIFT.
// A write updates the lanes selected by wmask (MW lanes of DW/MW bits) at once; a read
// returns the word LAT cycles later on rsp_valid, in order. With STALL set, req_ready
// drops on a pseudo-random third of the cycles to exercise back-pressure. Requests
// outside the array are counted in n_oob.
module bolt_tb_mem #(
  parameter int unsigned AW    = 32,
  parameter int unsigned DW    = 64,
  parameter int unsigned MW    = 1,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned LAT   = 4,
  parameter longint unsigned BASE = 0,
  parameter int unsigned SHIFT = 0,
  parameter bit          STALL = 1'b0
) (
  input  logic          clk,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [AW-1:0] req_addr,
  input  logic [DW-1:0] req_wdata,
  input  logic [MW-1:0] req_wmask,
  output logic          rsp_valid,
  output logic [DW-1:0] rsp_rdata
);
  localparam int unsigned LANE = DW / MW;
  logic [DW-1:0] mem [DEPTH];
  logic          pv [LAT];
  logic [DW-1:0] pd [LAT];
  int unsigned   n_oob = 0;
  logic [15:0]   lfsr = 16'hACE1;
  longint unsigned idx;

  initial for (int i = 0; i < LAT; i++) pv[i] = 1'b0;

  assign req_ready = !STALL || (lfsr[1:0] != 2'b00);
  assign rsp_valid = pv[LAT-1];
  assign rsp_rdata = pd[LAT-1];
  assign idx = (longint'(req_addr) - BASE) >> SHIFT;

  always_ff @(posedge clk) begin
    lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
    for (int i = LAT - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    pv[0] <= 1'b0;
    if (req_valid && req_ready) begin
      if (idx >= DEPTH) begin
        n_oob <= n_oob + 1;
        pd[0] <= '0;
        pv[0] <= !req_we;
      end else if (req_we) begin
        for (int l = 0; l < MW; l++)
          if (req_wmask[l]) mem[idx][l*LANE +: LANE] <= req_wdata[l*LANE +: LANE];
      end else begin
        pv[0] <= 1'b1;
        pd[0] <= mem[idx];
      end
    end
  end
endmodule
