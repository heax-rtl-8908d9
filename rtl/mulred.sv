// mulred: modular multiplication z = x*y mod p with a precomputed companion
// y' = floor(y * 2^W / p) (Shoup's method), as in Algorithm 1 of the paper.
//
// Pipeline, three register stages (latency 3 clocks, one result per clock):
//   1  z  = low word of x*y          t = high word of x*y'
//   2  z  = z - (low word of t*p)    (single-word subtraction, result in [0, 2p))
//   3  z  = z - p if z >= p
// Requires x, y < p < 2^(W-2). The algorithm is the paper's; the split into
// three stages is this implementation's choice (the paper's cores are deeper
// and the remaining depth is added by the enclosing core).
module mulred
  import heax_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  word_t x,
  input  word_t y,
  input  word_t yp,
  input  word_t p,
  output word_t z
);
  word_t  z1, t1, p1;
  word_t  z2, p2;
  dword_t xy, xyp;

  assign xy  = dword_t'(x) * dword_t'(y);
  assign xyp = dword_t'(x) * dword_t'(yp);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z1 <= '0; t1 <= '0; p1 <= '0; z2 <= '0; p2 <= '0; z <= '0;
    end else begin
      // stage 1: lower word of x*y, upper word of x*y'
      z1 <= xy[W-1:0];
      t1 <= xyp[2*W-1:W];
      p1 <= p;
      // stage 2: subtract the estimate t*p (mod 2^W)
      z2 <= z1 - word_t'(dword_t'(t1) * dword_t'(p1));
      p2 <= p1;
      // stage 3: final correction
      z  <= (z2 >= p2) ? z2 - p2 : z2;
    end
  end
endmodule
