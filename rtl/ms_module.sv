// ms_module: the "Mult & Sub" (MS) module that ends modulus switching
// (paper Figure 5; Algorithm 4, lines 5-6): out = (c - r) * [p^-1]_pj mod pj,
// for NC coefficients per clock.
//
// c is the accumulated key-switch result for prime pj, r the special-prime
// part re-transformed to pj, and pinv the constant [p^-1]_pj. The
// subtraction takes one register stage, and the product with pinv uses a
// dyadic core (Barrett words r1/r2 of pj), as the figure draws the MS module
// with dyadic cores. Latency 1 + LAT clocks, one ME per clock.
module ms_module
  import heax_pkg::*;
#(
  parameter int unsigned NC  = 4,
  parameter int unsigned LAT = 23
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_v,
  input  word_t c    [NC],
  input  word_t r    [NC],
  input  word_t pinv,
  input  word_t p,
  input  word_t r1,
  input  word_t r2,
  output logic  out_v,
  output word_t out  [NC]
);
  word_t dif [NC];
  word_t pinv_q, p_q, r1_q, r2_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pinv_q <= '0; p_q <= '0; r1_q <= '0; r2_q <= '0;
      for (int l = 0; l < NC; l++) dif[l] <= '0;
    end else begin
      for (int l = 0; l < NC; l++) dif[l] <= sub_mod(c[l], r[l], p);
      pinv_q <= pinv; p_q <= p; r1_q <= r1; r2_q <= r2;
    end
  end

  for (genvar l = 0; l < NC; l++) begin : g_core
    dyadic_core #(.LAT(LAT)) u_core (.clk, .rst_n, .op1(dif[l]), .op2(pinv_q),
      .r1(r1_q), .r2(r2_q), .p(p_q), .res(out[l]));
  end
  pipe_delay #(.WIDTH(1), .DEPTH(LAT + 1)) u_vd (.clk, .rst_n, .d(in_v), .q(out_v));
endmodule
