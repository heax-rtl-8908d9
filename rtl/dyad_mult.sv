// dyad_mult: the DyadMult module of the KeySwitch datapath (paper Figure 5):
// NC dyadic cores followed by the modular adder that accumulates the product
// into a polynomial bank, acc + b (.) d mod p.
//
// The operands b and d enter with in_v; LAT+1 clocks later the products are
// registered and out_v is high, and in that clock the caller must present the
// matching accumulator words on acc_in (it reads them from its bank one clock
// earlier, when rd_v is high). out is then acc_in + product mod p, or the
// product alone when the acc_en captured with the operands was low (first
// contribution). The cores and the adder follow the paper's figure; the
// read-modify-write timing is this design's choice.
module dyad_mult
  import heax_pkg::*;
#(
  parameter int unsigned NC  = 8,
  parameter int unsigned LAT = 23
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_v,
  input  logic  acc_en,
  input  word_t b  [NC],
  input  word_t d  [NC],
  input  word_t p,
  input  word_t r1,
  input  word_t r2,
  output logic  rd_v,       // one clock before out_v: read the accumulator now
  input  word_t acc_in [NC],
  output logic  out_v,
  output word_t out [NC]
);
  word_t prod [NC], prod_q [NC];
  logic [1:0] ctl_d;
  logic       acc_en_q;
  word_t      p_d;

  for (genvar l = 0; l < NC; l++) begin : g_core
    dyadic_core #(.LAT(LAT)) u_core (.clk, .rst_n, .op1(b[l]), .op2(d[l]),
      .r1, .r2, .p, .res(prod[l]));
  end
  pipe_delay #(.WIDTH(2), .DEPTH(LAT)) u_vd (.clk, .rst_n, .d({in_v, acc_en}), .q(ctl_d));
  pipe_delay #(.WIDTH(W), .DEPTH(LAT + 1)) u_pd (.clk, .rst_n, .d(p), .q(p_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_v <= 1'b0; acc_en_q <= 1'b0;
      for (int l = 0; l < NC; l++) prod_q[l] <= '0;
    end else begin
      out_v    <= ctl_d[1];
      acc_en_q <= ctl_d[0];
      prod_q   <= prod;
    end
  end
  assign rd_v = ctl_d[1];

  always_comb
    for (int l = 0; l < NC; l++)
      out[l] = acc_en_q ? add_mod(acc_in[l], prod_q[l], p_d) : prod_q[l];
endmodule
