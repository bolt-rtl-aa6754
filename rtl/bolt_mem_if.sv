// bolt_mem_if -- request/response bundle used for every memory-like port of the core:
// the position-map and value-store ports of the HBM manager (client and HBM side) and
// the host-memory port of the host access controller.
//
// A request is taken on a cycle with req_valid && req_ready. Writes (req_we) carry
// req_wdata and a per-lane write mask req_wmask (one lane per HBM column bank for the
// position map; a single lane elsewhere). Every read returns exactly one rsp_valid
// pulse with rsp_rdata, in request order; the client must accept it (no back-pressure).
// The handshake rules are checked by the assertions below. This protocol is this
// design's own choice; the prototype used AXI4 memory-mapped ports.
interface bolt_mem_if #(
  parameter int unsigned AW = 32,
  parameter int unsigned DW = 64,
  parameter int unsigned MW = 1
) (
  input logic clk,
  input logic rst_n
);
  logic          req_valid;
  logic          req_ready;
  logic          req_we;
  logic [AW-1:0] req_addr;
  logic [DW-1:0] req_wdata;
  logic [MW-1:0] req_wmask;
  logic          rsp_valid;
  logic [DW-1:0] rsp_rdata;

  modport client (output req_valid, req_we, req_addr, req_wdata, req_wmask,
                  input  req_ready, rsp_valid, rsp_rdata);
  modport server (input  req_valid, req_we, req_addr, req_wdata, req_wmask,
                  output req_ready, rsp_valid, rsp_rdata);

  // A pending request must stay stable until accepted.
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      (req_valid && !req_ready) |=> (req_valid && $stable(req_we) && $stable(req_addr));
  endproperty
  a_req_stable: assert property (p_req_stable);
endinterface
