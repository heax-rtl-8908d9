// mult_module: homomorphic multiplication of two ciphertexts in RNS and NTT
// form, one RNS residue at a time (paper Section 3, Figure 2, Algorithm 2).
//
// For ct0 with ALPHA components and ct1 with BETA components, the result
// has ALPHA+BETA-1 components, c_k = sum over i+j=k of a_i (.) b_j mod p.
// Ciphertext-plaintext multiplication is the case BETA = 1.
//
// Storage: one residue of every component of both operands is held on chip,
// each polynomial spread over NC parallel memories that share one address,
// so one memory element (ME, NC consecutive coefficients) is read from each
// operand per clock (ME1 and ME2) and one result ME (ME3) is written per
// clock; this follows the paper. The control unit walks over the pairs
// (i, j) and, for each pair, over the N/NC rows; NC dyadic cores form the
// products. Products for a component reached by several pairs (c1 of a
// two-component product) are accumulated by a read-modify-write of the result
// memory after the cores; the paper forms Mod(a0 b1 + a1 b0) in one reduction,
// which gives the same residue. The accumulation order and the handshake are
// this design's choice.
//
// Timing: one product ME per clock, so ALPHA*BETA*N/NC clocks plus the core
// latency (LAT, 23 in the paper) and three register stages. Interface:
// load operands with ld_* while idle, pulse start with alpha, beta, p and
// the Barrett words r1/r2 of floor(2^(2W)/p); done pulses once every result
// ME is written; read results with rd_comp/rd_row (one clock latency).
module mult_module
  import heax_pkg::*;
#(
  parameter int unsigned N    = 8192,
  parameter int unsigned NC   = 16,
  parameter int unsigned MAXC = 2,
  parameter int unsigned LAT  = 23,
  localparam int unsigned CW = (MAXC > 1) ? $clog2(MAXC) : 1,
  localparam int unsigned NOUT = 2*MAXC - 1,
  localparam int unsigned OCW = (NOUT > 1) ? $clog2(NOUT) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // operand load
  input  logic                    ld_we,
  input  logic                    ld_which,     // 0: ct0, 1: ct1
  input  logic [CW-1:0]           ld_comp,
  input  logic [$clog2(N/NC)-1:0] ld_row,
  input  word_t                   ld_data [NC],
  // control
  input  logic                    start,
  input  logic [CW:0]             alpha,
  input  logic [CW:0]             beta,
  input  word_t                   p,
  input  word_t                   r1,
  input  word_t                   r2,
  output logic                    busy,
  output logic                    done,
  // result read
  input  logic [OCW-1:0]          rd_comp,
  input  logic [$clog2(N/NC)-1:0] rd_row,
  output word_t                   rd_data [NC]
);
  localparam int unsigned D   = N / NC;
  localparam int unsigned AW  = $clog2(D);

  word_t ct0 [MAXC][D][NC];
  word_t ct1 [MAXC][D][NC];
  word_t res [NOUT][D][NC];

  typedef struct packed {
    logic           v;
    logic           first;
    logic [OCW-1:0] comp;
    logic [AW-1:0]  row;
  } tag_t;

  // ---------------------------------------------------- control unit
  logic          run;
  logic [CW:0]   ci, cj, al_r, be_r;
  logic [AW:0]   row;
  logic [31:0]   wr_cnt, wr_total;
  word_t         p_r, r1_r, r2_r;
  tag_t          tag0, tag1, otag, wtag;

  always_comb begin
    int unsigned c, jfirst;
    c      = int'(ci) + int'(cj);
    jfirst = (c < int'(be_r) - 1) ? c : int'(be_r) - 1;
    tag0       = '0;
    tag0.v     = run && (ci < al_r);
    tag0.first = (int'(cj) == jfirst);
    tag0.comp  = OCW'(c);
    tag0.row   = row[AW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; ci <= '0; cj <= '0; row <= '0; al_r <= '0; be_r <= '0;
      p_r <= '0; r1_r <= '0; r2_r <= '0; wr_total <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run && start) begin
        run <= 1'b1; ci <= '0; cj <= '0; row <= '0;
        al_r <= alpha; be_r <= beta; p_r <= p; r1_r <= r1; r2_r <= r2;
        wr_total <= 32'(alpha) * 32'(beta) * D;
      end else if (run) begin
        // address logic: rows inner, ct1 components middle, ct0 components outer
        if (tag0.v) begin
          if (row == D - 1) begin
            row <= '0;
            if (cj == be_r - 1) begin cj <= '0; ci <= ci + 1'b1; end
            else cj <= cj + 1'b1;
          end else row <= row + 1'b1;
        end
        if (wtag.v && wr_cnt == wr_total - 1) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
  assign busy = run;

  // ---------------------------------------------------- ME1 / ME2 fetch
  word_t me1 [NC], me2 [NC];
  always_ff @(posedge clk) begin
    me1 <= ct0[ci[CW-1:0]][row[AW-1:0]];
    me2 <= ct1[cj[CW-1:0]][row[AW-1:0]];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tag1 <= '0;
    else        tag1 <= tag0;
  end

  // ---------------------------------------------------- dyadic cores
  word_t prod [NC];
  for (genvar l = 0; l < NC; l++) begin : g_core
    dyadic_core #(.LAT(LAT)) u_core (.clk, .rst_n, .op1(me1[l]), .op2(me2[l]),
      .r1(r1_r), .r2(r2_r), .p(p_r), .res(prod[l]));
  end
  pipe_delay #(.WIDTH($bits(tag_t)), .DEPTH(LAT)) u_tagd (.clk, .rst_n, .d(tag1), .q(otag));

  // ---------------------------------------------------- accumulate and ME3 write
  word_t prod_q [NC], acc_q [NC];
  always_ff @(posedge clk) begin
    prod_q <= prod;
    acc_q  <= res[otag.comp][otag.row];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wtag <= '0; wr_cnt <= '0;
    end else begin
      wtag <= otag;
      if (start && !run) wr_cnt <= '0;
      else if (wtag.v)   wr_cnt <= wr_cnt + 1;
    end
  end

  always_ff @(posedge clk) begin
    if (ld_we) begin
      if (ld_which) ct1[ld_comp][ld_row] <= ld_data;
      else          ct0[ld_comp][ld_row] <= ld_data;
    end
    if (wtag.v) begin
      for (int l = 0; l < NC; l++)
        res[wtag.comp][wtag.row][l] <= wtag.first ? prod_q[l] : add_mod(acc_q[l], prod_q[l], p_r);
    end
    rd_data <= res[rd_comp][rd_row];
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(ld_we && run)) else $error("mult_module: operand load while busy");
      assert (!(start && !run) || (alpha >= 1 && alpha <= MAXC && beta >= 1 && beta <= MAXC))
        else $error("mult_module: component count out of range");
    end
  end
  initial assert (D >= 2) else $error("mult_module: N must be at least 2*NC");
endmodule
