// bolt_free_ring -- free-address ring buffer of the HBM value store (dynamic HBM
// management, Fig. 6 of the paper).
//
// The ring holds the addresses of free value-store lines. After init_start it preloads
// itself with every address 0..DEPTH-1 (one per cycle, init_done rises when finished).
// alloc_req dequeues the address at the read index; the address appears on alloc_addr
// with alloc_valid one cycle later (alloc_ok low if the ring was empty). free_req
// enqueues free_addr at the write index in the same cycle. Read and write use separate
// ports of the same array (the paper's dual-port ring). The ring never holds more than
// DEPTH entries because only allocated addresses are freed.
module bolt_free_ring
  import bolt_pkg::*;
#(
  parameter int unsigned DEPTH = VS_DEPTH
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  init_start,
  output logic  init_done,
  input  logic  alloc_req,
  output logic  alloc_valid,
  output logic  alloc_ok,
  output vptr_t alloc_addr,
  input  logic  free_req,
  input  vptr_t free_addr,
  output logic [VPTR_W:0] level
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  vptr_t          ring [DEPTH];
  logic [AW-1:0]  rd_idx, wr_idx, init_idx;
  logic           initing;
  logic           do_alloc;

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  assign do_alloc = alloc_req && !initing && (level != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_idx <= '0; wr_idx <= '0; init_idx <= '0;
      initing <= 1'b0; init_done <= 1'b0; level <= '0;
      alloc_valid <= 1'b0; alloc_ok <= 1'b0;
    end else begin
      alloc_valid <= alloc_req && !initing;
      alloc_ok    <= do_alloc;
      if (init_start) begin
        initing <= 1'b1; init_done <= 1'b0; init_idx <= '0;
        rd_idx <= '0; wr_idx <= '0; level <= '0;
      end else if (initing) begin
        init_idx <= nxt(init_idx);
        level    <= level + 1'b1;
        if (init_idx == AW'(DEPTH-1)) begin
          initing   <= 1'b0;
          init_done <= 1'b1;
        end
      end else begin
        if (do_alloc) rd_idx <= nxt(rd_idx);
        if (free_req) wr_idx <= nxt(wr_idx);
        level <= level + (VPTR_W+1)'(free_req) - (VPTR_W+1)'(do_alloc);
      end
    end
  end

  // Array ports: one write (preload or free), one read (alloc).
  always_ff @(posedge clk) begin
    if (initing)       ring[init_idx] <= VPTR_W'(init_idx);
    else if (free_req) ring[wr_idx]   <= free_addr;
    if (do_alloc)      alloc_addr     <= ring[rd_idx];
  end

  a_no_overfill: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(free_req && !initing && level == (VPTR_W+1)'(DEPTH)));
endmodule
