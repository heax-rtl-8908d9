// ntt_core: Cooley-Tukey butterfly of the forward negacyclic NTT
// (Algorithm 3, lines 4-6; paper Figure 3, "NTT Core"):
//   v = MulRed(b, w, wp, p);  cout_a = a + v mod p;  cout_b = a - v mod p.
// Inputs: the two coefficients cin_a, cin_b (< p), the twiddle factor w, its
// Shoup companion wp = floor(w*2^W/p), and the prime p.
// The multiply takes the three stages of mulred, the modular add and subtract
// one more; the last LAT-4 stages are a plain delay giving the 50-stage depth
// of Table 3 (where the paper places its stages is not given). One butterfly
// per clock, results LAT clocks after the inputs.
module ntt_core
  import heax_pkg::*;
#(
  parameter int unsigned LAT = 50
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t cin_a,
  input  word_t cin_b,
  input  word_t w,
  input  word_t wp,
  input  word_t p,
  output word_t cout_a,
  output word_t cout_b
);
  word_t v, a_d, p_d, oa, ob;
  logic [2*W-1:0] ap_d;

  mulred u_mul (.clk, .rst_n, .x(cin_b), .y(w), .yp(wp), .p(p), .z(v));
  pipe_delay #(.WIDTH(2*W), .DEPTH(3)) u_ap (.clk, .rst_n, .d({cin_a, p}), .q(ap_d));
  assign a_d = ap_d[2*W-1:W];
  assign p_d = ap_d[W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oa <= '0; ob <= '0;
    end else begin
      oa <= add_mod(a_d, v, p_d);
      ob <= sub_mod(a_d, v, p_d);
    end
  end

  pipe_delay #(.WIDTH(2*W), .DEPTH(LAT-4)) u_dly (.clk, .rst_n, .d({oa, ob}), .q({cout_a, cout_b}));

  initial assert (LAT >= 4) else $error("ntt_core: LAT must be at least 4");
endmodule
