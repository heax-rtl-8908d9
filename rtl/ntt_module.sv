// ntt_module: number-theoretic transform of one length-N polynomial with NC
// butterfly cores (paper Section 4, Figures 3 and 4). With INVERSE = 1 the
// same datapath is the INTT module: inverse cores, stages in reverse order,
// and inverse twiddle factors in the twiddle memory.
//
// Memories. The data memory holds the polynomial as D = N/(2*NC) memory
// elements (MEs), each a row of 2*NC consecutive coefficients; all rows of
// one polynomial share one address, and every read and write is in place.
// The twiddle memory holds NPRIME tables (one per prime this module serves),
// each N/NC rows of NC twiddles and NC Shoup companions, table entry k being
// psi^bitrev(k) (forward) or psi^-bitrev(k) * 2^-1 (inverse). The last
// stage writes into a separate output memory.
//
// Stages. Stage s has butterfly distance t = N/2^(s+1). While t >= 2*NC
// (Type 1 stages) the two partners of a butterfly lie in two MEs t/(2*NC)
// rows apart: the address logic fetches the pair on consecutive clocks into
// ME_e and ME_o, the cores take the lower halves of both on the next clock
// and the upper halves on the one after (MUX3), and the two result MEs (ME4
// and ME5) are written back on two consecutive clocks. Once t < 2*NC (Type 2)
// both partners are in one ME: MUX1 moves the fetched ME into ME_s, and for
// each core input a small multiplexer (MUX2) with one input per possible Type 2
// stage picks its coefficient; MUX6/MUX7 put the results back in place. Either
// way one ME is read and one written per clock, so a stage takes D clocks of
// issue, and the transform computes N log N / (2 NC) butterfly-clocks.
//
// Departures. This implementation lets each stage drain (core latency LAT plus
// a few register stages) before the next stage starts reading, because the
// paper does not say how the in-place read-after-write hazard between stages
// is avoided. One transform therefore takes about log2(N) * (D + LAT + 6)
// clocks, against the paper's N log N / (2 NC). The twiddle multiplexer is a
// plain NC:1 selector per core (the paper says only that it is "designed in a
// similar manner" to the data multiplexers).
//
// Interface. Load coefficients with in_we/in_idx/in_data (PW coefficients at
// index in_idx, a multiple of PW) and twiddles with tw_we, while idle. Pulse
// start with the prime p and the twiddle table sel; done pulses for one clock
// when the result is in the output memory, read PW coefficients at a time
// through out_idx/out_data (one clock latency). The output is in bit-reversed
// order for the forward transform and expects bit-reversed input for the
// inverse one, as in the paper's Algorithm 3.
module ntt_module
  import heax_pkg::*;
#(
  parameter int unsigned N       = 8192,
  parameter int unsigned NC      = 16,
  parameter bit          INVERSE = 1'b0,
  parameter int unsigned LAT     = INVERSE ? 49 : 50,
  parameter int unsigned NPRIME  = 1,
  parameter int unsigned PW      = 2*NC,
  localparam int unsigned SELW = (NPRIME > 1) ? $clog2(NPRIME) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // twiddle factor load
  input  logic                   tw_we,
  input  logic [SELW-1:0]        tw_sel,
  input  logic [$clog2(N/NC)-1:0] tw_row,
  input  word_t                  tw_w  [NC],
  input  word_t                  tw_wp [NC],
  // coefficient load into the data memory
  input  logic                   in_we,
  input  logic [$clog2(N)-1:0]   in_idx,
  input  word_t                  in_data [PW],
  // control
  input  logic                   start,
  input  word_t                  p,
  input  logic [SELW-1:0]        sel,
  output logic                   busy,
  output logic                   done,
  // output memory read
  input  logic [$clog2(N)-1:0]   out_idx,
  output word_t                  out_data [PW]
);
  localparam int unsigned LOGN  = $clog2(N);
  localparam int unsigned LOGNC = $clog2(NC);
  localparam int unsigned R     = 2*NC;        // coefficients per ME
  localparam int unsigned LOGR  = LOGNC + 1;
  localparam int unsigned D     = N / R;       // MEs per polynomial
  localparam int unsigned AW    = $clog2(D);
  localparam int unsigned TR    = N / NC;      // twiddle rows per table
  localparam int unsigned TAW   = $clog2(TR);

  // ------------------------------------------------------------ memories
  word_t dmem [D][R];
  word_t omem [D][R];
  word_t twm  [NPRIME*TR][NC];
  word_t twpm [NPRIME*TR][NC];

  // ------------------------------------------------------------ control unit
  typedef enum logic [1:0] {S_IDLE, S_RUN} state_t;
  state_t state;
  logic [$clog2(LOGN)-1:0] st;        // stage counter
  logic [AW:0]             step;      // step counter (read issue)
  logic [AW:0]             wcnt;      // MEs written in this stage
  word_t                   p_r;
  logic [SELW-1:0]         sel_r;

  int unsigned s_alg, logt, logdr, m;
  logic        type1, last_stage;
  always_comb begin
    s_alg      = INVERSE ? (LOGN - 1 - int'(st)) : int'(st);
    logt       = LOGN - 1 - s_alg;          // log2 of butterfly distance
    type1      = (logt >= LOGR);
    logdr      = type1 ? (logt - LOGR) : 0; // log2 of ME distance (Type 1)
    m          = 1 << s_alg;                // first twiddle index of stage
    last_stage = (int'(st) == LOGN - 1);
  end

  // pipeline tag
  typedef struct packed {
    logic           v;
    logic           odd;
    logic [AW-1:0]  ra;     // row of the a-partners (Type 1) or the row (Type 2)
    logic [AW-1:0]  rb;     // row of the b-partners (Type 1)
    logic [LOGNC-1:0] lane; // twiddle lane (Type 1) or first lane (Type 2)
    logic           half;   // which half of the ME pair the cores hold (Type 1)
  } tag_t;

  // ------------------------------------------------------------ address logic
  tag_t            tag0;
  logic [AW-1:0]   raddr;
  logic [TAW+SELW-1:0] twaddr;
  always_comb begin
    int unsigned q, ra, rb, tidx;
    tag0   = '0;
    raddr  = '0;
    twaddr = '0;
    q = 0; ra = 0; rb = 0; tidx = 0;
    if (state == S_RUN && step < D) begin
      tag0.v   = 1'b1;
      tag0.odd = step[0];
      if (type1) begin
        q    = int'(step) >> 1;
        ra   = ((q >> logdr) << (logdr + 1)) | (q & ((1 << logdr) - 1));
        rb   = ra | (1 << logdr);
        tidx = m + (q >> logdr);
        raddr = step[0] ? AW'(rb) : AW'(ra);
      end else begin
        ra   = int'(step);
        tidx = m + (ra << (LOGNC - logt));
        raddr = AW'(ra);
      end
      tag0.ra   = AW'(ra);
      tag0.rb   = AW'(rb);
      tag0.lane = LOGNC'(tidx & (NC - 1));
      twaddr    = (TAW+SELW)'(int'(sel_r) * TR + (tidx >> LOGNC));
    end
  end

  // ------------------------------------------------------------ fetch
  word_t rdata [R];
  word_t twrd  [NC];
  word_t twprd [NC];
  tag_t  tag1, tag2, tag3;
  word_t me_e [R], me_o [R], me_s [R];
  word_t me_w [NC], me_wp [NC], me_ws [NC], me_wps [NC];
  word_t hi_e [NC], hi_o [NC];

  always_ff @(posedge clk) begin
    rdata <= dmem[raddr];
    twrd  <= twm[twaddr];
    twprd <= twpm[twaddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag1 <= '0; tag2 <= '0; tag3 <= '0;
      for (int i = 0; i < R; i++) begin me_e[i] <= '0; me_o[i] <= '0; me_s[i] <= '0; end
      for (int i = 0; i < NC; i++) begin
        me_w[i] <= '0; me_wp[i] <= '0; me_ws[i] <= '0; me_wps[i] <= '0;
      end
    end else begin
      tag1 <= tag0;
      tag2 <= tag1;
      tag3 <= tag2;
      // ME_e / ME_o: fetched MEs on even / odd read clocks
      if (tag1.v) begin
        if (tag1.odd) me_o <= rdata;
        else          me_e <= rdata;
        if (tag1.odd || !type1) begin
          me_w  <= twrd;
          me_wp <= twprd;
        end
      end
      // MUX1: the ME fetched last goes to ME_s (Type 2)
      if (tag2.v && !type1) begin
        me_s   <= tag2.odd ? me_o : me_e;
        me_ws  <= me_w;
        me_wps <= me_wp;
      end
    end
  end

  // ------------------------------------------------------------ MUX2: Type 2 selection
  // Core l, input a, at a stage with butterfly distance 2^s takes
  // ME_s[(l & (2^s-1)) + ((l >> s) << (s+1))] and input b the entry 2^s above.
  // Only LOGNC+1 values of s occur, so each core input has that many choices.
  word_t mux2_a [NC], mux2_b [NC], mux5_w [NC], mux5_wp [NC];
  always_comb begin
    for (int l = 0; l < NC; l++) begin
      mux2_a[l]  = me_s[0];
      mux2_b[l]  = me_s[1];
      for (int s = 0; s <= LOGNC; s++) begin
        if (logt == s) begin
          mux2_a[l] = me_s[(l & ((1 << s) - 1)) + ((l >> s) << (s + 1))];
          mux2_b[l] = me_s[(l & ((1 << s) - 1)) + ((l >> s) << (s + 1)) + (1 << s)];
        end
      end
      // MUX5 (Type 2): twiddle of core l's butterfly group
      mux5_w[l]  = me_ws[(int'(tag3.lane) + (l >> logt)) & (NC - 1)];
      mux5_wp[l] = me_wps[(int'(tag3.lane) + (l >> logt)) & (NC - 1)];
    end
  end

  // ------------------------------------------------------------ MUX3 / MUX4: core inputs
  word_t fa [NC], fb [NC], fw [NC], fwp [NC];
  tag_t  ftag;
  logic  pend_h1;
  tag_t  h1tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ftag <= '0; pend_h1 <= 1'b0; h1tag <= '0;
      for (int l = 0; l < NC; l++) begin
        fa[l] <= '0; fb[l] <= '0; fw[l] <= '0; fwp[l] <= '0; hi_e[l] <= '0; hi_o[l] <= '0;
      end
    end else begin
      ftag <= '0;
      if (type1) begin
        if (tag2.v && tag2.odd) begin
          // lower halves of the ME pair; keep the upper halves for the next clock
          for (int l = 0; l < NC; l++) begin
            fa[l]   <= me_e[l];
            fb[l]   <= me_o[l];
            fw[l]   <= me_w[tag2.lane];
            fwp[l]  <= me_wp[tag2.lane];
            hi_e[l] <= me_e[l + NC];
            hi_o[l] <= me_o[l + NC];
          end
          ftag      <= tag2;
          ftag.half <= 1'b0;
          h1tag     <= tag2;
          pend_h1   <= 1'b1;
        end else if (pend_h1) begin
          for (int l = 0; l < NC; l++) begin
            fa[l] <= hi_e[l];
            fb[l] <= hi_o[l];
          end
          ftag      <= h1tag;
          ftag.half <= 1'b1;
          pend_h1   <= 1'b0;
        end
      end else if (tag3.v) begin
        for (int l = 0; l < NC; l++) begin
          fa[l]  <= mux2_a[l];
          fb[l]  <= mux2_b[l];
          fw[l]  <= mux5_w[l];
          fwp[l] <= mux5_wp[l];
        end
        ftag <= tag3;
      end
    end
  end

  // ------------------------------------------------------------ cores
  word_t ca [NC], cb [NC];
  for (genvar l = 0; l < NC; l++) begin : g_core
    if (INVERSE) begin : g_inv
      intt_core #(.LAT(LAT)) u_core (.clk, .rst_n, .cin_a(fa[l]), .cin_b(fb[l]),
        .w_inv(fw[l]), .wp_inv(fwp[l]), .p(p_r), .cout_a(ca[l]), .cout_b(cb[l]));
    end else begin : g_fwd
      ntt_core #(.LAT(LAT)) u_core (.clk, .rst_n, .cin_a(fa[l]), .cin_b(fb[l]),
        .w(fw[l]), .wp(fwp[l]), .p(p_r), .cout_a(ca[l]), .cout_b(cb[l]));
    end
  end

  tag_t otag;
  pipe_delay #(.WIDTH($bits(tag_t)), .DEPTH(LAT)) u_tagd (.clk, .rst_n, .d(ftag), .q(otag));

  // ------------------------------------------------------------ MUX6 / MUX7: write-back
  word_t me4 [R], me4lo [NC], me5lo [NC], me5w [R];
  logic  me4_pend, me5_pend;
  logic [AW-1:0] me4_row, me5_row;
  word_t mux6 [R];

  always_comb begin
    for (int pos = 0; pos < R; pos++) begin
      mux6[pos] = ca[0];
      for (int s = 0; s <= LOGNC; s++) begin
        if (logt == s) begin
          if (((pos >> s) & 1) == 1)
            mux6[pos] = cb[(pos & ((1 << s) - 1)) | ((pos >> (s + 1)) << s)];
          else
            mux6[pos] = ca[(pos & ((1 << s) - 1)) | ((pos >> (s + 1)) << s)];
        end
      end
    end
  end

  logic          wr_en;
  logic [AW-1:0] wr_row;
  word_t         wr_data [R];
  always_comb begin
    wr_en  = 1'b0;
    wr_row = '0;
    for (int i = 0; i < R; i++) wr_data[i] = me4[i];
    if (type1 && otag.v && otag.half) begin
      // ME4: a-results of both halves, written as soon as the upper half is out
      wr_en  = 1'b1;
      wr_row = otag.ra;
      for (int i = 0; i < NC; i++) begin
        wr_data[i]      = me4lo[i];
        wr_data[i + NC] = ca[i];
      end
    end else if (me5_pend) begin
      wr_en  = 1'b1;
      wr_row = me5_row;
      wr_data = me5w;
    end else if (me4_pend) begin
      wr_en  = 1'b1;
      wr_row = me4_row;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      me4_pend <= 1'b0; me5_pend <= 1'b0; me4_row <= '0; me5_row <= '0;
      for (int i = 0; i < R; i++) begin me4[i] <= '0; me5w[i] <= '0; end
      for (int i = 0; i < NC; i++) begin me4lo[i] <= '0; me5lo[i] <= '0; end
    end else begin
      me4_pend <= 1'b0;
      me5_pend <= 1'b0;
      if (otag.v && type1 && !otag.half) begin
        me4lo <= ca;
        me5lo <= cb;
      end
      if (otag.v && type1 && otag.half) begin
        for (int i = 0; i < NC; i++) begin
          me5w[i]      <= me5lo[i];
          me5w[i + NC] <= cb[i];
        end
        me5_row  <= otag.rb;
        me5_pend <= 1'b1;
      end
      if (otag.v && !type1) begin
        me4      <= mux6;
        me4_row  <= otag.ra;
        me4_pend <= 1'b1;
      end
    end
  end

  // data memory: external load while idle, in-place write-back while running
  always_ff @(posedge clk) begin
    if (in_we) begin
      for (int i = 0; i < PW; i++)
        dmem[in_idx >> LOGR][(int'(in_idx) & (R - 1)) + i] <= in_data[i];
    end
    if (wr_en && !last_stage) dmem[wr_row] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (wr_en && last_stage) omem[wr_row] <= wr_data;
    for (int i = 0; i < PW; i++)
      out_data[i] <= omem[out_idx >> LOGR][(int'(out_idx) & (R - 1)) + i];
  end

  always_ff @(posedge clk) begin
    if (tw_we) begin
      twm [int'(tw_sel) * TR + int'(tw_row)] <= tw_w;
      twpm[int'(tw_sel) * TR + int'(tw_row)] <= tw_wp;
    end
  end

  // ------------------------------------------------------------ sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; st <= '0; step <= '0; wcnt <= '0; done <= 1'b0;
      p_r <= '0; sel_r <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_RUN; st <= '0; step <= '0; wcnt <= '0;
          p_r <= p; sel_r <= sel;
        end
        S_RUN: begin
          if (step < D) step <= step + 1'b1;
          if (wr_en) begin
            if (wcnt == D - 1) begin
              wcnt <= '0;
              step <= '0;
              if (last_stage) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                st <= st + 1'b1;
              end
            end else begin
              wcnt <= wcnt + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  assign busy = (state != S_IDLE);

  // rules of use
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(in_we && busy)) else $error("ntt_module: coefficient load while busy");
      assert (!(tw_we && busy)) else $error("ntt_module: twiddle load while busy");
    end
  end
  initial begin
    assert (N >= 4 * R) else $error("ntt_module: N must be at least 8*NC");
    assert ((R % PW) == 0) else $error("ntt_module: PW must divide 2*NC");
  end
endmodule
