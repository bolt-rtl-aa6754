// bolt_rng -- random bin generator for remapping and for the dummy accesses of a miss.
//
// The paper requires two fresh, distinct, uniformly chosen logical bins per access but
// does not say how they are drawn; this design uses a free-running 64-bit xorshift
// generator (not cryptographic: a deployment would use a true/crypto RNG) and scales two
// 32-bit halves onto [0, NBINS) by multiply-high. When both land on the same bin the
// second is moved to the next bin, so p1 != p2 always holds. A new pair is available
// every cycle on p1/p2; the generator advances every cycle. SEED sets the start state.
module bolt_rng
  import bolt_pkg::*;
#(
  parameter int unsigned NB   = NBINS,
  parameter logic [63:0] SEED = 64'h2545_F491_4F6C_DD1D
) (
  input  logic clk,
  input  logic rst_n,
  output bin_t p1,
  output bin_t p2
);
  logic [63:0] s, s_n;
  logic [31:0] a, b;

  always_comb begin
    s_n = s;
    s_n = s_n ^ (s_n << 13);
    s_n = s_n ^ (s_n >> 7);
    s_n = s_n ^ (s_n << 17);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s <= (SEED == 64'd0) ? 64'd1 : SEED;
    else        s <= s_n;
  end

  always_comb begin
    a  = scale_rand(s[31:0],  32'(NB));
    b  = scale_rand(s[63:32], 32'(NB));
    p1 = BIN_W'(a);
    if (b == a) p2 = (a == 32'(NB - 1)) ? '0 : BIN_W'(a + 1);
    else        p2 = BIN_W'(b);
  end
endmodule
