// dyadic_core: one coefficient-wise modular product, Res = Op1*Op2 mod p,
// the building block of the MULT, DyadMult and MS modules (paper Figure 2).
//
// Inputs are the two coefficients Op1 and Op2 (< p), the two words R1 (low)
// and R2 (high) of the Barrett constant floor(2^(2W)/p), and the prime p.
// The full 2W-bit product is registered and then reduced by barrett_reduce.
// The remaining LAT-4 stages are a plain delay so the core has the depth the
// paper reports (Table 3: 23 stages); where the paper spreads those stages
// over its DSP tree is not given. Fully pipelined: one product per clock,
// result LAT clocks after the operands.
module dyadic_core
  import heax_pkg::*;
#(
  parameter int unsigned LAT = 23
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t op1,
  input  word_t op2,
  input  word_t r1,
  input  word_t r2,
  input  word_t p,
  output word_t res
);
  dword_t prod;
  word_t  r1_q, r2_q, p_q, red;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod <= '0; r1_q <= '0; r2_q <= '0; p_q <= '0;
    end else begin
      prod <= dword_t'(op1) * dword_t'(op2);
      r1_q <= r1; r2_q <= r2; p_q <= p;
    end
  end

  barrett_reduce u_red (.clk, .rst_n, .x(prod), .r1(r1_q), .r2(r2_q), .p(p_q), .z(red));

  pipe_delay #(.WIDTH(W), .DEPTH(LAT-4)) u_dly (.clk, .rst_n, .d(red), .q(res));

  initial assert (LAT >= 4) else $error("dyadic_core: LAT must be at least 4");
endmodule
