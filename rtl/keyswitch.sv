// keyswitch: the KeySwitch module of HEAX (paper Section 5, Algorithms 4 and
// 5, Figure 5). It re-encrypts the second component c1 of a ciphertext under
// a key-switching key (relinearization or Galois key) in RNS and NTT form,
// and performs the modulus switch that divides by the special prime.
//
// Primes: index 0..K-1 are the ciphertext primes p_0..p_{K-1}, index K is
// the special prime p. Per residue i of c1 (held in the input-poly memory):
//   INTT0         a = INTT_{p_i}(c1_i)
//   Mod + NTT0    b_j = NTT_{p_j}(a mod p_j) for the K primes j != i, one NTT0
//                 module each (module m serves prime m if m < i, else m+1)
//   DyadMult      acc_s[j] += b_j (.) ksk_s[i][j] for s = 0, 1 and all K+1
//                 primes; a (K+1)-th DyadMult uses c1_i itself for j = i
// then, for each of the two key halves s in parallel (Algorithm 4):
//   INTT1         a = INTT_p(acc_s[K])
//   Mod + NTT1    r = NTT_{p_j}(a mod p_j), j = 0..K-1
//   MS            out_s[j] = (acc_s[j] - r) * [p^-1]_{p_j} mod p_j.
// The accumulators are two sets of K+1 polynomial banks; each bank has one
// writer per iteration, the DyadMult module whose prime it is.
// The result (out_0, out_1) is Floor(C''_0), Floor(C''_1) of Algorithm 5; the
// final addition to the input ciphertext (line 19) is left to the caller, as
// Figure 5 ends at "Output Poly 0/1".
//
// Module set and core counts follow Table 5 for Set-B (n = 2^13, k = 4):
// 1 x INTT(16) -> 4 x NTT(16) -> 5 x Dyad(8) -> 2 x INTT(4) -> 2 x NTT(16)
// -> 2 x MS(4). The number of NTT0 modules is fixed to K here (Table 5 has
// this for Set-A and Set-B).
//
// Departures: the phases run one after the other, each waiting for the last
// to finish; the paper overlaps them and successive key switches in one
// balanced pipeline (Figure 6), with f1 input buffers and f2 DyadMult output
// buffers to resolve its Data Dependencies 1 and 2. Those buffers are not
// built. Transfers between modules move XW (first half) or XW1 (modulus
// switch) coefficients per clock.
//
// Interface: load the per-prime constants (cfg_*), the twiddle tables of each
// transform module (tw_*; tw_mod 0 = INTT0, 1..K = NTT0, K+1..K+2 = INTT1,
// K+3..K+4 = NTT1), the key (ksk_*) and c1 (in_*) while idle, pulse start;
// done pulses when out_* can be read, XW1 coefficients at a time (one
// clock latency).
module keyswitch
  import heax_pkg::*;
#(
  parameter int unsigned N        = 8192,
  parameter int unsigned K        = 4,
  parameter int unsigned NC_INTT0 = 16,
  parameter int unsigned NC_NTT0  = 16,
  parameter int unsigned NC_DYD   = 8,
  parameter int unsigned NC_INTT1 = 4,
  parameter int unsigned NC_NTT1  = 16,
  parameter int unsigned NC_MS    = 4,
  parameter int unsigned LAT_NTT  = 50,
  parameter int unsigned LAT_INTT = 49,
  parameter int unsigned LAT_DYD  = 23,
  localparam int unsigned XW = NC_DYD,
  localparam int unsigned XW1 = NC_MS,
  localparam int unsigned M0 = K,
  localparam int unsigned KW = $clog2(K + 1),
  localparam int unsigned TMW = $clog2(K + 5),
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned TWL = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // per-prime constants
  input  logic                 cfg_we,
  input  logic [KW-1:0]        cfg_idx,
  input  word_t                cfg_p,
  input  word_t                cfg_r1,
  input  word_t                cfg_r2,
  input  word_t                cfg_pinv,
  // twiddle tables
  input  logic                 tw_we,
  input  logic [TMW-1:0]       tw_mod,
  input  logic [KW-1:0]        tw_sel,
  input  logic [LOGN-1:0]      tw_row,
  input  word_t                tw_w  [TWL],
  input  word_t                tw_wp [TWL],
  // key-switching key
  input  logic                 ksk_we,
  input  logic                 ksk_set,
  input  logic [KW-1:0]        ksk_i,
  input  logic [KW-1:0]        ksk_j,
  input  logic [LOGN-1:0]      ksk_idx,
  input  word_t                ksk_data [XW],
  // input polynomial c1
  input  logic                 in_we,
  input  logic [KW-1:0]        in_res,
  input  logic [LOGN-1:0]      in_idx,
  input  word_t                in_data [XW],
  // control
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // result
  input  logic                 out_set,
  input  logic [KW-1:0]        out_res,
  input  logic [LOGN-1:0]      out_idx,
  output word_t                out_data [XW1]
);
  localparam int unsigned B0   = N / XW;     // beats per polynomial, first half
  localparam int unsigned B1   = N / XW1;    // beats per polynomial, modulus switch

  // ------------------------------------------------------------ storage
  word_t pr   [K+1], br1 [K+1], br2 [K+1], pinv [K+1];
  // Polynomial memories are rows of XW (or XW1) coefficients; the key and the
  // accumulators are split into one memory per prime and key half so that
  // every memory has one read and one write port.
  localparam int unsigned LXW  = $clog2(XW);
  localparam int unsigned LXW1 = $clog2(XW1);
  typedef word_t xrow_t [XW];
  typedef word_t mrow_t [XW1];
  xrow_t inp [K][B0];                 // input poly c1, all residues

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      pr[cfg_idx] <= cfg_p; br1[cfg_idx] <= cfg_r1; br2[cfg_idx] <= cfg_r2; pinv[cfg_idx] <= cfg_pinv;
    end
  end

  // ------------------------------------------------------------ sequencer
  typedef enum logic [3:0] {
    PH_IDLE, PH_LOAD0, PH_INTT0, PH_XFER0, PH_NTT0, PH_DYAD,
    PH_LOAD1, PH_INTT1, PH_XFER1, PH_NTT1, PH_MS, PH_DONE
  } phase_t;
  phase_t      ph;
  logic [31:0] cnt;           // beat counter of a streaming phase
  logic        started;       // start pulse of a transform phase was given
  logic [KW-1:0] it;          // residue of c1 being processed (i)
  logic [KW-1:0] jp;          // prime being produced in the modulus switch (j)

  localparam int unsigned DR_LOAD = 2;
  localparam int unsigned DR_XFER = 5;
  localparam int unsigned DR_DYAD = LAT_DYD + 3;
  localparam int unsigned DR_MS   = LAT_DYD + 3;

  logic [31:0] beats, drain;
  always_comb begin
    beats = 0; drain = 0;
    case (ph)
      PH_LOAD0: begin beats = B0;     drain = DR_LOAD; end
      PH_XFER0: begin beats = B0;     drain = DR_XFER; end
      PH_DYAD:  begin beats = 2 * B0; drain = DR_DYAD; end
      PH_LOAD1: begin beats = B1;     drain = DR_LOAD; end
      PH_XFER1: begin beats = B1;     drain = DR_XFER; end
      PH_MS:    begin beats = B1;     drain = DR_MS;   end
      default:  ;
    endcase
  end
  wire stream_ph = (ph == PH_LOAD0) || (ph == PH_XFER0) || (ph == PH_DYAD) ||
                   (ph == PH_LOAD1) || (ph == PH_XFER1) || (ph == PH_MS);
  wire issue     = stream_ph && (cnt < beats);
  wire stream_end = stream_ph && (cnt == beats + drain - 1);

  // transform completion
  logic intt0_done, intt1_done_all, ntt0_done_all, ntt1_done_all;
  logic [M0-1:0] ntt0_done, ntt0_seen;
  logic [1:0]    intt1_done, intt1_seen, ntt1_done, ntt1_seen;
  assign ntt0_done_all  = &(ntt0_seen | ntt0_done);
  assign intt1_done_all = &(intt1_seen | intt1_done);
  assign ntt1_done_all  = &(ntt1_seen | ntt1_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= PH_IDLE; cnt <= '0; started <= 1'b0; it <= '0; jp <= '0; done <= 1'b0;
      ntt0_seen <= '0; intt1_seen <= '0; ntt1_seen <= '0;
    end else begin
      done <= 1'b0;
      if (stream_ph) cnt <= stream_end ? '0 : cnt + 1;
      case (ph)
        PH_IDLE:  if (start) begin ph <= PH_LOAD0; it <= '0; cnt <= '0; end
        PH_LOAD0: if (stream_end) begin ph <= PH_INTT0; started <= 1'b0; end
        PH_INTT0: begin
          started <= 1'b1;
          if (started && intt0_done) ph <= PH_XFER0;
        end
        PH_XFER0: if (stream_end) begin ph <= PH_NTT0; started <= 1'b0; ntt0_seen <= '0; end
        PH_NTT0: begin
          started   <= 1'b1;
          ntt0_seen <= ntt0_seen | ntt0_done;
          if (started && ntt0_done_all) ph <= PH_DYAD;
        end
        PH_DYAD: if (stream_end) begin
          if (it == K - 1) ph <= PH_LOAD1;
          else begin ph <= PH_LOAD0; it <= it + 1'b1; end
        end
        PH_LOAD1: if (stream_end) begin ph <= PH_INTT1; started <= 1'b0; intt1_seen <= '0; jp <= '0; end
        PH_INTT1: begin
          started    <= 1'b1;
          intt1_seen <= intt1_seen | intt1_done;
          if (started && intt1_done_all) ph <= PH_XFER1;
        end
        PH_XFER1: if (stream_end) begin ph <= PH_NTT1; started <= 1'b0; ntt1_seen <= '0; end
        PH_NTT1: begin
          started   <= 1'b1;
          ntt1_seen <= ntt1_seen | ntt1_done;
          if (started && ntt1_done_all) ph <= PH_MS;
        end
        PH_MS: if (stream_end) begin
          if (jp == K - 1) begin ph <= PH_IDLE; done <= 1'b1; end
          else begin ph <= PH_XFER1; jp <= jp + 1'b1; end
        end
        default: ph <= PH_IDLE;
      endcase
    end
  end
  assign busy = (ph != PH_IDLE);

  // beat -> coefficient index and key half
  logic [LOGN-1:0] idx0, idx1;
  logic            set0;
  always_comb begin
    idx0 = LOGN'((cnt % B0) * XW);
    set0 = (cnt >= B0);
    idx1 = LOGN'(cnt * XW1);
  end

  // prime served by NTT0 module m in iteration it, and the DyadMult that
  // writes accumulator bank t
  function automatic int tgt(int m, int i);
    return (m < i) ? m : m + 1;
  endfunction
  function automatic int writer(int t, int i);
    return (t == i) ? M0 : ((t < i) ? t : t - 1);
  endfunction

  // ------------------------------------------------------------ INTT0
  logic            i0_we, i0_done;
  logic [LOGN-1:0] i0_idx;
  word_t           i0_in [XW], i0_out [XW];
  logic            ld_v_q;
  logic [LOGN-1:0] ld_idx_q;
  xrow_t           inp_q;

  // LOAD0: input poly residue -> INTT0, one clock through the memory register;
  // the same read feeds the input-poly DyadMult
  always_ff @(posedge clk) inp_q <= inp[it][idx0 >> LXW];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin ld_v_q <= 1'b0; ld_idx_q <= '0; end
    else begin ld_v_q <= issue && (ph == PH_LOAD0); ld_idx_q <= idx0; end
  end
  assign i0_we  = ld_v_q;
  assign i0_idx = ld_idx_q;
  assign i0_in  = inp_q;

  word_t tw_w0 [NC_INTT0], tw_wp0 [NC_INTT0];
  always_comb for (int l = 0; l < NC_INTT0; l++) begin tw_w0[l] = tw_w[l]; tw_wp0[l] = tw_wp[l]; end

  ntt_module #(.N(N), .NC(NC_INTT0), .INVERSE(1'b1), .LAT(LAT_INTT), .NPRIME(K), .PW(XW)) u_intt0 (
    .clk, .rst_n,
    .tw_we(tw_we && tw_mod == 0), .tw_sel(tw_sel[$clog2(K)-1:0]),
    .tw_row(tw_row[$clog2(N/NC_INTT0)-1:0]), .tw_w(tw_w0), .tw_wp(tw_wp0),
    .in_we(i0_we), .in_idx(i0_idx), .in_data(i0_in),
    .start(ph == PH_INTT0 && !started), .p(pr[it]), .sel(it[$clog2(K)-1:0]),
    .busy(), .done(i0_done),
    .out_idx(idx0), .out_data(i0_out));
  assign intt0_done = i0_done;

  // ------------------------------------------------------------ Mod + NTT0
  logic [4:0]      x0_v;
  logic [LOGN-1:0] x0_idx [5];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x0_v <= '0;
      for (int s = 0; s < 5; s++) x0_idx[s] <= '0;
    end else begin
      x0_v <= {x0_v[3:0], issue && (ph == PH_XFER0)};
      x0_idx[0] <= idx0;
      for (int s = 1; s < 5; s++) x0_idx[s] <= x0_idx[s-1];
    end
  end

  word_t n0_out [M0][XW];
  for (genvar m = 0; m < M0; m++) begin : g_ntt0
    word_t red [XW];
    word_t twa [NC_NTT0], twpa [NC_NTT0];
    int    tg;
    assign tg = tgt(m, int'(it));
    for (genvar l = 0; l < XW; l++) begin : g_red
      barrett_reduce u_mod (.clk, .rst_n, .x(dword_t'(i0_out[l])), .r1(br1[tg]), .r2(br2[tg]),
        .p(pr[tg]), .z(red[l]));
    end
    always_comb for (int l = 0; l < NC_NTT0; l++) begin twa[l] = tw_w[l]; twpa[l] = tw_wp[l]; end
    ntt_module #(.N(N), .NC(NC_NTT0), .INVERSE(1'b0), .LAT(LAT_NTT), .NPRIME(2), .PW(XW)) u_ntt (
      .clk, .rst_n,
      .tw_we(tw_we && int'(tw_mod) == m + 1), .tw_sel(tw_sel[0]),
      .tw_row(tw_row[$clog2(N/NC_NTT0)-1:0]), .tw_w(twa), .tw_wp(twpa),
      .in_we(x0_v[3]), .in_idx(x0_idx[3]), .in_data(red),
      .start(ph == PH_NTT0 && !started), .p(pr[tg]), .sel(m < int'(it) ? 1'b0 : 1'b1),
      .busy(), .done(ntt0_done[m]),
      .out_idx(idx0), .out_data(n0_out[m]));
  end

  // ------------------------------------------------------------ DyadMult x (K+1)
  // operands: b from NTT0 module m (m < M0) or c1_i itself (m = M0), d from ksk
  logic            dy_v;
  logic            dy_set;
  logic [LOGN-1:0] dy_idx;
  xrow_t           kq [K+1];        // key row of prime j, read for the DyadMult serving j
  for (genvar j = 0; j <= K; j++) begin : g_ksk
    xrow_t mem [2][K][B0];          // key: half, decomposition index i, row
    always_ff @(posedge clk) begin
      if (ksk_we && int'(ksk_j) == j) mem[ksk_set][ksk_i[$clog2(K)-1:0]][ksk_idx >> LXW] <= ksk_data;
      kq[j] <= mem[set0][it[$clog2(K)-1:0]][idx0 >> LXW];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin dy_v <= 1'b0; dy_set <= 1'b0; dy_idx <= '0; end
    else begin dy_v <= issue && (ph == PH_DYAD); dy_set <= set0; dy_idx <= idx0; end
  end

  // set and index travel with the products
  logic [LOGN:0] dy_tag_rd, dy_tag_wr;
  pipe_delay #(.WIDTH(LOGN+1), .DEPTH(LAT_DYD)) u_dyt (.clk, .rst_n, .d({dy_set, dy_idx}), .q(dy_tag_rd));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dy_tag_wr <= '0;
    else        dy_tag_wr <= dy_tag_rd;
  end

  xrow_t bank_q [2][K+1];
  word_t dy_out [M0+1][XW];
  word_t dy_acc [M0+1][XW];
  logic  [M0:0] dy_rd_v, dy_out_v;
  for (genvar m = 0; m <= M0; m++) begin : g_dyad
    word_t bsrc [XW];
    int    tg;
    assign tg = (m == M0) ? int'(it) : tgt(m, int'(it));
    always_comb for (int l = 0; l < XW; l++) bsrc[l] = (m == M0) ? inp_q[l] : n0_out[(m == M0) ? 0 : m][l];
    dyad_mult #(.NC(XW), .LAT(LAT_DYD)) u_dyad (.clk, .rst_n, .in_v(dy_v), .acc_en(it != 0),
      .b(bsrc), .d(kq[tg]), .p(pr[tg]), .r1(br1[tg]), .r2(br2[tg]),
      .rd_v(dy_rd_v[m]), .acc_in(dy_acc[m]), .out_v(dy_out_v[m]), .out(dy_out[m]));
    // accumulator of this DyadMult's bank, read one clock before the write
    assign dy_acc[m] = bank_q[dy_tag_wr[LOGN]][tg];
  end

  // accumulator banks: set s, prime t; written by DyadMult writer(t, it),
  // read by the DyadMult (read-modify-write) or by the modulus switch
  logic [LOGN-LXW-1:0] bank_ra;
  assign bank_ra = (ph == PH_DYAD) ? dy_tag_rd[LOGN-1:LXW] : idx1[LOGN-1:LXW];
  for (genvar s = 0; s < 2; s++) begin : g_acc_s
    for (genvar t = 0; t <= K; t++) begin : g_acc_t
      xrow_t mem [B0];
      always_ff @(posedge clk) begin
        if (dy_out_v[0] && int'(dy_tag_wr[LOGN]) == s)
          mem[dy_tag_wr[LOGN-1:LXW]] <= dy_out[writer(t, int'(it))];
        bank_q[s][t] <= mem[bank_ra];
      end
    end
  end

  // ------------------------------------------------------------ modulus switch, two chains
  logic            l1_v;
  logic [LOGN-1:0] l1_idx;
  word_t           l1_q [2][XW1];
  logic [4:0]      x1_v;
  logic [LOGN-1:0] x1_idx [5];
  logic            ms_in_v;
  logic [LOGN-1:0] ms_idx_w;
  word_t           ms_c [2][XW1];
  word_t           i1_out [2][XW1], n1_out [2][XW1], ms_out [2][XW1];
  logic [1:0]      ms_out_v;

  // XW1-wide slices of the accumulator rows read in the previous clock
  always_comb begin
    for (int s = 0; s < 2; s++)
      for (int l = 0; l < XW1; l++) begin
        l1_q[s][l] = bank_q[s][K][(int'(l1_idx) & (XW - 1)) + l];
        ms_c[s][l] = bank_q[s][jp][(int'(l1_idx) & (XW - 1)) + l];
      end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1_v <= 1'b0; l1_idx <= '0; x1_v <= '0; ms_in_v <= 1'b0;
      for (int s = 0; s < 5; s++) x1_idx[s] <= '0;
    end else begin
      l1_v    <= issue && (ph == PH_LOAD1);
      l1_idx  <= idx1;   // also the index of the MS operands
      x1_v    <= {x1_v[3:0], issue && (ph == PH_XFER1)};
      x1_idx[0] <= idx1;
      for (int s = 1; s < 5; s++) x1_idx[s] <= x1_idx[s-1];
      ms_in_v <= issue && (ph == PH_MS);
    end
  end
  pipe_delay #(.WIDTH(LOGN), .DEPTH(LAT_DYD + 2)) u_mst (.clk, .rst_n, .d(idx1), .q(ms_idx_w));

  for (genvar s = 0; s < 2; s++) begin : g_ms
    word_t red [XW1];
    word_t twi [NC_INTT1], twpi [NC_INTT1], twn [NC_NTT1], twpn [NC_NTT1];
    always_comb begin
      for (int l = 0; l < NC_INTT1; l++) begin twi[l] = tw_w[l]; twpi[l] = tw_wp[l]; end
      for (int l = 0; l < NC_NTT1; l++)  begin twn[l] = tw_w[l]; twpn[l] = tw_wp[l]; end
    end
    ntt_module #(.N(N), .NC(NC_INTT1), .INVERSE(1'b1), .LAT(LAT_INTT), .NPRIME(1), .PW(XW1)) u_intt1 (
      .clk, .rst_n,
      .tw_we(tw_we && int'(tw_mod) == K + 1 + s), .tw_sel(1'b0),
      .tw_row(tw_row[$clog2(N/NC_INTT1)-1:0]), .tw_w(twi), .tw_wp(twpi),
      .in_we(l1_v), .in_idx(l1_idx), .in_data(l1_q[s]),
      .start(ph == PH_INTT1 && !started), .p(pr[K]), .sel(1'b0),
      .busy(), .done(intt1_done[s]),
      .out_idx(idx1), .out_data(i1_out[s]));
    for (genvar l = 0; l < XW1; l++) begin : g_red
      barrett_reduce u_mod (.clk, .rst_n, .x(dword_t'(i1_out[s][l])), .r1(br1[jp]), .r2(br2[jp]),
        .p(pr[jp]), .z(red[l]));
    end
    ntt_module #(.N(N), .NC(NC_NTT1), .INVERSE(1'b0), .LAT(LAT_NTT), .NPRIME(K), .PW(XW1)) u_ntt1 (
      .clk, .rst_n,
      .tw_we(tw_we && int'(tw_mod) == K + 3 + s), .tw_sel(tw_sel[$clog2(K)-1:0]),
      .tw_row(tw_row[$clog2(N/NC_NTT1)-1:0]), .tw_w(twn), .tw_wp(twpn),
      .in_we(x1_v[3]), .in_idx(x1_idx[3]), .in_data(red),
      .start(ph == PH_NTT1 && !started), .p(pr[jp]), .sel(jp[$clog2(K)-1:0]),
      .busy(), .done(ntt1_done[s]),
      .out_idx(idx1), .out_data(n1_out[s]));
    ms_module #(.NC(XW1), .LAT(LAT_DYD)) u_ms (.clk, .rst_n, .in_v(ms_in_v),
      .c(ms_c[s]), .r(n1_out[s]), .pinv(pinv[jp]), .p(pr[jp]), .r1(br1[jp]), .r2(br2[jp]),
      .out_v(ms_out_v[s]), .out(ms_out[s]));
  end

  // ------------------------------------------------------------ bank writes and host ports
  always_ff @(posedge clk) begin
    if (in_we) inp[in_res[$clog2(K)-1:0]][in_idx >> LXW] <= in_data;
  end

  // Output Poly 0/1
  mrow_t outq [2];
  logic  out_set_q;
  for (genvar s = 0; s < 2; s++) begin : g_out
    mrow_t mem [K][B1];
    always_ff @(posedge clk) begin
      if (ms_out_v[s]) mem[jp[$clog2(K)-1:0]][ms_idx_w >> LXW1] <= ms_out[s];
      outq[s] <= mem[out_res[$clog2(K)-1:0]][out_idx >> LXW1];
    end
  end
  always_ff @(posedge clk) out_set_q <= out_set;
  assign out_data = outq[out_set_q];

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!((in_we || ksk_we || tw_we || cfg_we) && busy))
        else $error("keyswitch: load while busy");
    end
  end
  initial begin
    assert ((2 * NC_INTT0) % XW == 0 && (2 * NC_NTT0) % XW == 0)
      else $error("keyswitch: XW must divide every first-half ME width");
    assert ((2 * NC_INTT1) % XW1 == 0 && (2 * NC_NTT1) % XW1 == 0)
      else $error("keyswitch: XW1 must divide every modulus-switch ME width");
    assert (NC_INTT0 <= TWL && NC_NTT0 <= TWL && NC_NTT1 <= TWL) else $error("keyswitch: too many cores for the twiddle port");
  end
endmodule
