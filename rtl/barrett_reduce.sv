// barrett_reduce: Mod(x, p) of the paper, z = x mod p for a double-word x,
// using the precomputed constant u = floor(2^(2W) / p) split into two words,
// R1 = u mod 2^W (low) and R2 = floor(u / 2^W) (high).
//
// The quotient estimate q = floor(x*u / 2^(2W)) is exact or one too small
// for any double-word x (the error x*(2^(2W)/p - u)/2^(2W) is below one), so
// one compare-and-subtract finishes the reduction, as in the single CMP of the
// paper's dyadic-core drawing (Figure 2). The paper gives the operation and
// the two-word constant; the exact partial-product arrangement of its DSP
// tree is not given, so this computes the full product.
//
// Pipeline: three register stages, latency 3 clocks, one result per clock.
module barrett_reduce
  import heax_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  dword_t x,
  input  word_t  r1,
  input  word_t  r2,
  input  word_t  p,
  output word_t  z
);
  localparam int unsigned XW = 2*W;
  // x * u, u = {r2, r1}: keep only the bits at or above 2^(2W)
  logic [4*W-1:0] xu;
  dword_t x1, q1;
  word_t  p1, z2, p2;

  assign xu = {{2*W{1'b0}}, x} * {{2*W{1'b0}}, r2, r1};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1 <= '0; q1 <= '0; p1 <= '0; z2 <= '0; p2 <= '0; z <= '0;
    end else begin
      // stage 1: quotient estimate
      q1 <= xu[4*W-1:XW];
      x1 <= x;
      p1 <= p;
      // stage 2: remainder estimate, in [0, 2p); computed in the low word
      z2 <= word_t'(x1 - dword_t'(q1 * dword_t'(p1)));
      p2 <= p1;
      // stage 3: final correction (CMP + subtract)
      z  <= (z2 >= p2) ? z2 - p2 : z2;
    end
  end
endmodule
