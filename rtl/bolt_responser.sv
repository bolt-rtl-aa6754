// bolt_responser -- RES stage: formats each command result into a fixed-length response
// word for the isolation gateway, which encrypts it and writes it to the host-side
// result buffer.
//
// Word layout (this design's choice): [RSP_W-1:RSP_W-8] status code, [RSP_W-9:64] zero
// padding, [63:0] value. Only a GET hit carries a value; every other response carries
// zeros in the value field, so all responses have the same length and a PUT only holds
// its confirmation code, as the paper requires. One output register, valid/ready on both
// sides, one response per cycle. n_rsp counts responses sent.
module bolt_responser
  import bolt_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  rsp_t             in_rsp,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [RSP_W-1:0] out_word,
  output logic [31:0]      n_rsp
);
  logic [RSP_W-1:0] fmt;

  always_comb begin
    fmt = '0;
    fmt[RSP_W-1 -: 8] = in_rsp.status;
    if (in_rsp.status == ST_GET_HIT) fmt[0 +: VAL_W] = in_rsp.value;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_word  <= '0;
      n_rsp     <= '0;
    end else begin
      if (out_valid && out_ready) n_rsp <= n_rsp + 1;
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) out_word <= fmt;
      end
    end
  end
endmodule
