// bolt_decoder -- DEC stage: turns a fixed-length, already decrypted command word into
// a command for key search.
//
// Word layout (this design's choice; the paper fixes only the fields):
//   [CMD_W-1:97] padding, [96] opcode (0 = GET, 1 = PUT), [95:64] key, [63:0] payload.
// A PUT whose payload equals the reserved TOMBSTONE value becomes a delete. The payload
// of a GET is a dummy that only pads the command to the common length and is dropped
// (zeroed) here, as the paper describes. Streams are valid/ready; the stage holds one
// command in an output register, so a word is decoded in one cycle and back-to-back
// words flow at one per cycle. n_get/n_put/n_del count the decoded commands.
module bolt_decoder
  import bolt_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [CMD_W-1:0] in_word,
  output logic             out_valid,
  input  logic             out_ready,
  output cmd_t             out_cmd,
  output logic [31:0]      n_get,
  output logic [31:0]      n_put,
  output logic [31:0]      n_del
);
  cmd_t dec;

  always_comb begin
    dec.key     = in_word[64 +: KEY_W];
    dec.payload = in_word[0 +: VAL_W];
    if (!in_word[96]) begin
      dec.op      = OP_GET;
      dec.payload = '0;
    end else if (in_word[0 +: VAL_W] == TOMBSTONE) begin
      dec.op      = OP_DEL;
      dec.payload = '0;
    end else begin
      dec.op      = OP_PUT;
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_cmd   <= '0;
      n_get <= '0; n_put <= '0; n_del <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_cmd <= dec;
        unique case (dec.op)
          OP_GET:  n_get <= n_get + 1;
          OP_PUT:  n_put <= n_put + 1;
          default: n_del <= n_del + 1;
        endcase
      end
    end
  end
endmodule
