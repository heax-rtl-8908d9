// intt_core: Gentleman-Sande butterfly of the inverse NTT (paper Figure 3,
// "INTT Core"):
//   cout_a = (a + b) / 2 mod p        (MOD ADD, then add p if odd, shift right)
//   cout_b = MulRed(a - b, w_inv, wp_inv, p)
// The factor 1/2 that each inverse stage needs on its second output is folded
// into the twiddle: w_inv is psi^-k * 2^-1 mod p, so that log2(n) stages
// together divide by n and no final scaling pass is needed. The halving on
// cout_a (the LSB test, the 0/p multiplexer and the shift drawn in the figure)
// follows the paper; folding 1/2 into the twiddle is this design's reading of
// a figure that shows no halving on the cout_b path.
// Latency LAT clocks (Table 3: 49), one butterfly per clock.
module intt_core
  import heax_pkg::*;
#(
  parameter int unsigned LAT = 49
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t cin_a,
  input  word_t cin_b,
  input  word_t w_inv,
  input  word_t wp_inv,
  input  word_t p,
  output word_t cout_a,
  output word_t cout_b
);
  word_t sum0, dif0, p0;
  word_t half1, half3, v;
  logic [W:0] hsum;

  // stage 1: modular add and subtract
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum0 <= '0; dif0 <= '0; p0 <= '0;
    end else begin
      sum0 <= add_mod(cin_a, cin_b, p);
      dif0 <= sub_mod(cin_a, cin_b, p);
      p0   <= p;
    end
  end

  // halving: (s + (s odd ? p : 0)) >> 1
  assign hsum = {1'b0, sum0} + (sum0[0] ? {1'b0, p0} : '0);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) half1 <= '0;
    else        half1 <= word_t'(hsum >> 1);
  end

  // multiply the difference by the (pre-halved) inverse twiddle; the
  // twiddle operands are delayed one clock to meet the difference
  word_t w1, wp1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w1 <= '0; wp1 <= '0;
    end else begin
      w1 <= w_inv; wp1 <= wp_inv;
    end
  end
  mulred u_mul (.clk, .rst_n, .x(dif0), .y(w1), .yp(wp1), .p(p0), .z(v));

  // align the halved sum with the three-stage multiply
  pipe_delay #(.WIDTH(W), .DEPTH(2)) u_al (.clk, .rst_n, .d(half1), .q(half3));

  pipe_delay #(.WIDTH(2*W), .DEPTH(LAT-4)) u_dly (.clk, .rst_n, .d({half3, v}), .q({cout_a, cout_b}));

  initial assert (LAT >= 4) else $error("intt_core: LAT must be at least 4");
endmodule
