// tb_heax_top: end-to-end testbench of the HEAX top at a reduced size
// (N = 64, k = 4 ciphertext primes plus one special prime, fewer cores per
// module). It multiplies two random ciphertexts residue by residue on the
// MULT module (Algorithm 6 / Table 1, ciphertext-ciphertext), checks the
// three output components, feeds the third component c2 into the KeySwitch
// module (relinearisation, Algorithm 5), checks both key-switch outputs and
// the relinearised ciphertext (c0 + f0, c1 + f1) that the host forms, and
// runs one ciphertext-plaintext product. Each mechanism (C-C product, C-P
// product, key switch, INTT0/NTT0 per residue, INTT1, NTT1 per prime, modulus
// switch writes) is counted; one that never happened is a failure.
module tb_heax_top;
  import heax_pkg::*;
  import heax_tb_pkg::*;
  localparam int unsigned N = 64, K = 4, NC_MULT = 4;
  localparam int unsigned NC_INTT0 = 4, NC_NTT0 = 4, NC_DYD = 4, NC_INTT1 = 2, NC_NTT1 = 4, NC_MS = 2;
  localparam int unsigned D = N / NC_MULT;

  localparam int unsigned KW   = $clog2(K + 1);
  localparam int unsigned TMW  = $clog2(K + 5);
  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned XW   = NC_DYD;
  localparam int unsigned XW1  = NC_MS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0, tw_we = 0, ksk_we = 0, ksk_set = 0, in_we = 0, ks_start = 0, out_set = 0;
  logic [KW-1:0] cfg_idx = '0, tw_sel = '0, ksk_i = '0, ksk_j = '0, in_res = '0, out_res = '0;
  logic [TMW-1:0] tw_mod = '0;
  logic [LOGN-1:0] tw_row = '0, ksk_idx = '0, in_idx = '0, out_idx = '0;
  word_t cfg_p = '0, cfg_r1 = '0, cfg_r2 = '0, cfg_pinv = '0;
  word_t tw_w [16], tw_wp [16], ksk_data [XW], in_data [XW], out_data [XW1];
  logic ks_busy, ks_done;

  int checks = 0, failures = 0;
  u64 pr [K+1], psi [K+1];
  u64 c1 [K][N];
  u64 d [2][K][K+1][N];
  u64 accr [2][K+1][N];
  u64 outr [2][K][N];

  task automatic load_table(int md, int sel, int nc, int pi, bit inv);
    for (int r = 0; r < N / nc; r++) begin
      @(negedge clk);
      tw_we = 1; tw_mod = TMW'(md); tw_sel = KW'(sel); tw_row = LOGN'(r);
      for (int l = 0; l < 16; l++) begin
        u64 w;
        w = (l < nc) ? twiddle(pr[pi], psi[pi], N, r*nc + l, inv) : 0;
        tw_w[l] = word_t'(w); tw_wp[l] = word_t'(shoup(w, pr[pi]));
      end
    end
    @(negedge clk); tw_we = 0;
  endtask

  // Setup: primes, constants, twiddle tables and a random key.
  task automatic ks_setup();
    for (int j = 0; j <= K; j++) begin
      pr[j] = find_prime(50, N, j);
      psi[j] = find_psi(pr[j], N);
    end
    for (int j = 0; j <= K; j++) begin
      u128 u;
      u = barrett_u(pr[j]);
      @(negedge clk);
      cfg_we = 1; cfg_idx = KW'(j); cfg_p = word_t'(pr[j]);
      cfg_r1 = u[W-1:0]; cfg_r2 = u[2*W-1:W];
      cfg_pinv = (j < K) ? word_t'(invmod(pr[K] % pr[j], pr[j])) : '0;
    end
    @(negedge clk); cfg_we = 0;
    for (int i = 0; i < K; i++) load_table(0, i, NC_INTT0, i, 1);
    for (int m = 0; m < K; m++) begin
      load_table(1 + m, 0, NC_NTT0, m, 0);
      load_table(1 + m, 1, NC_NTT0, m + 1, 0);
    end
    for (int s = 0; s < 2; s++) begin
      load_table(K + 1 + s, 0, NC_INTT1, K, 1);
      for (int j = 0; j < K; j++) load_table(K + 3 + s, j, NC_NTT1, j, 0);
    end
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < K; i++)
        for (int j = 0; j <= K; j++)
          for (int r = 0; r < N / XW; r++) begin
            @(negedge clk);
            ksk_we = 1; ksk_set = s[0]; ksk_i = KW'(i); ksk_j = KW'(j); ksk_idx = LOGN'(r*XW);
            for (int l = 0; l < XW; l++) begin
              d[s][i][j][r*XW+l] = u64'({$urandom, $urandom}) % pr[j];
              ksk_data[l] = word_t'(d[s][i][j][r*XW+l]);
            end
          end
    @(negedge clk); ksk_we = 0;
  endtask

  task automatic ks_load_c1();
    for (int i = 0; i < K; i++)
      for (int r = 0; r < N / XW; r++) begin
        @(negedge clk);
        in_we = 1; in_res = KW'(i); in_idx = LOGN'(r*XW);
        for (int l = 0; l < XW; l++) in_data[l] = word_t'(c1[i][r*XW+l]);
      end
    @(negedge clk); in_we = 0;
  endtask

  // Reference key switch: Algorithm 5 lines 1-18 with Algorithm 4 (Floor)
  task automatic ks_reference();
    u64 a[], b[], r[];
    for (int s = 0; s < 2; s++) for (int j = 0; j <= K; j++) for (int n = 0; n < N; n++) accr[s][j][n] = 0;
    for (int i = 0; i < K; i++) begin
      a = new[N];
      for (int n = 0; n < N; n++) a[n] = c1[i][n];
      ref_intt_direct(a, pr[i], psi[i]);
      for (int j = 0; j <= K; j++) begin
        b = new[N];
        if (j == i) for (int n = 0; n < N; n++) b[n] = c1[i][n];
        else begin
          for (int n = 0; n < N; n++) b[n] = a[n] % pr[j];
          ref_ntt(b, pr[j], psi[j]);
        end
        for (int s = 0; s < 2; s++)
          for (int n = 0; n < N; n++)
            accr[s][j][n] = addmod(accr[s][j][n], mulmod(b[n], d[s][i][j][n], pr[j]), pr[j]);
      end
    end
    for (int s = 0; s < 2; s++) begin
      a = new[N];
      for (int n = 0; n < N; n++) a[n] = accr[s][K][n];
      ref_intt_direct(a, pr[K], psi[K]);
      for (int j = 0; j < K; j++) begin
        u64 pinv;
        r = new[N];
        for (int n = 0; n < N; n++) r[n] = a[n] % pr[j];
        ref_ntt(r, pr[j], psi[j]);
        pinv = invmod(pr[K] % pr[j], pr[j]);
        for (int n = 0; n < N; n++) outr[s][j][n] = mulmod(submod(accr[s][j][n], r[n], pr[j]), pinv, pr[j]);
      end
    end
  endtask

  task automatic ks_run(output int cycles);
    @(negedge clk); ks_start = 1;
    @(negedge clk); ks_start = 0;
    cycles = 1;
    while (!ks_done) begin @(negedge clk); cycles++; end
  endtask

  logic mu_ld_we = 0, mu_ld_which = 0, mu_ld_comp = 0, mu_start = 0, mu_busy, mu_done;
  logic [$clog2(D)-1:0] mu_ld_row = '0, mu_rd_row = '0;
  logic [1:0] mu_alpha = '0, mu_beta = '0, mu_rd_comp = '0;
  word_t mu_ld_data [NC_MULT], mu_rd_data [NC_MULT];
  word_t mu_p = '0, mu_r1 = '0, mu_r2 = '0;

  heax_top #(.N(N), .K(K), .NC_MULT(NC_MULT), .NC_INTT0(NC_INTT0), .NC_NTT0(NC_NTT0), .NC_DYD(NC_DYD),
             .NC_INTT1(NC_INTT1), .NC_NTT1(NC_NTT1), .NC_MS(NC_MS)) dut (
    .clk, .rst_n,
    .mu_ld_we, .mu_ld_which, .mu_ld_comp, .mu_ld_row, .mu_ld_data, .mu_start, .mu_alpha, .mu_beta,
    .mu_p, .mu_r1, .mu_r2, .mu_busy, .mu_done, .mu_rd_comp, .mu_rd_row, .mu_rd_data,
    .ks_cfg_we(cfg_we), .ks_cfg_idx(cfg_idx), .ks_cfg_p(cfg_p), .ks_cfg_r1(cfg_r1), .ks_cfg_r2(cfg_r2),
    .ks_cfg_pinv(cfg_pinv), .ks_tw_we(tw_we), .ks_tw_mod(tw_mod), .ks_tw_sel(tw_sel), .ks_tw_row(tw_row),
    .ks_tw_w(tw_w), .ks_tw_wp(tw_wp), .ks_ksk_we(ksk_we), .ks_ksk_set(ksk_set), .ks_ksk_i(ksk_i),
    .ks_ksk_j(ksk_j), .ks_ksk_idx(ksk_idx), .ks_ksk_data(ksk_data), .ks_in_we(in_we), .ks_in_res(in_res),
    .ks_in_idx(in_idx), .ks_in_data(in_data), .ks_start(ks_start), .ks_busy(ks_busy), .ks_done(ks_done),
    .ks_out_set(out_set), .ks_out_res(out_res), .ks_out_idx(out_idx), .ks_out_data(out_data));

  // mechanism counters
  int n_cc = 0, n_cp = 0, n_ks = 0, n_intt0 = 0, n_ntt0 = 0, n_intt1 = 0, n_ntt1 = 0, n_msw = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ks.i0_done) n_intt0++;
    if (dut.u_ks.ntt0_done[0]) n_ntt0++;
    if (dut.u_ks.intt1_done[0]) n_intt1++;
    if (dut.u_ks.ntt1_done[0]) n_ntt1++;
    if (dut.u_ks.ms_out_v[0]) n_msw++;
    if (ks_done) n_ks++;
  end

  u64 x [2][N], y [2][N];
  u64 prod [K][3][N];

  task automatic mult_run(int pi, int al, int be, output int bad);
    u128 u;
    bad = 0;
    for (int w = 0; w < 2; w++)
      for (int c = 0; c < (w ? be : al); c++)
        for (int r = 0; r < D; r++) begin
          @(negedge clk);
          mu_ld_we = 1; mu_ld_which = w[0]; mu_ld_comp = c[0]; mu_ld_row = r[$clog2(D)-1:0];
          for (int l = 0; l < NC_MULT; l++) mu_ld_data[l] = word_t'(w ? y[c][r*NC_MULT+l] : x[c][r*NC_MULT+l]);
        end
    @(negedge clk); mu_ld_we = 0;
    u = barrett_u(pr[pi]);
    mu_p = word_t'(pr[pi]); mu_r1 = u[W-1:0]; mu_r2 = u[2*W-1:W];
    mu_alpha = 2'(al); mu_beta = 2'(be); mu_start = 1;
    @(negedge clk); mu_start = 0;
    while (!mu_done) @(negedge clk);
    for (int k = 0; k < al + be - 1; k++)
      for (int r = 0; r < D; r++) begin
        mu_rd_comp = 2'(k); mu_rd_row = r[$clog2(D)-1:0];
        @(negedge clk);
        for (int l = 0; l < NC_MULT; l++) begin
          u64 e;
          e = 0;
          for (int i = 0; i < al; i++)
            if (k - i >= 0 && k - i < be)
              e = addmod(e, mulmod(x[i][r*NC_MULT+l], y[k-i][r*NC_MULT+l], pr[pi]), pr[pi]);
          if (k < 3) prod[pi][k][r*NC_MULT+l] = e;
          checks++;
          if (u64'(mu_rd_data[l]) != e) begin
            failures++; bad++;
            if (failures < 8) $display("MULT mismatch prime %0d comp %0d idx %0d", pi, k, r*NC_MULT+l);
          end
        end
      end
  endtask

  initial begin
    int cycles, bad;
    for (int l = 0; l < 16; l++) begin tw_w[l] = '0; tw_wp[l] = '0; end
    for (int l = 0; l < XW; l++) begin ksk_data[l] = '0; in_data[l] = '0; end
    for (int l = 0; l < NC_MULT; l++) mu_ld_data[l] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    ks_setup();
    // ciphertext-ciphertext product, residue by residue; c2 goes to the key switch
    for (int i = 0; i < K; i++) begin
      for (int c = 0; c < 2; c++)
        for (int n = 0; n < N; n++) begin
          x[c][n] = u64'({$urandom, $urandom}) % pr[i];
          y[c][n] = u64'({$urandom, $urandom}) % pr[i];
        end
      mult_run(i, 2, 2, bad);
      if (bad == 0) n_cc++;
      for (int n = 0; n < N; n++) c1[i][n] = prod[i][2][n];
    end
    ks_load_c1();
    ks_reference();
    ks_run(cycles);
    $display("relinearisation key switch: %0d clocks", cycles);
    for (int s = 0; s < 2; s++)
      for (int j = 0; j < K; j++)
        for (int r = 0; r < N / XW1; r++) begin
          out_set = s[0]; out_res = KW'(j); out_idx = LOGN'(r*XW1);
          @(negedge clk);
          for (int l = 0; l < XW1; l++) begin
            int n;
            n = r*XW1 + l;
            checks += 2;
            if (u64'(out_data[l]) != outr[s][j][n]) begin
              failures++;
              if (failures < 8) $display("KS mismatch set %0d prime %0d idx %0d", s, j, n);
            end
            // relinearised ciphertext component s = c_s + f_s
            if (addmod(prod[j][s][n], u64'(out_data[l]), pr[j]) != addmod(prod[j][s][n], outr[s][j][n], pr[j]))
              failures++;
          end
        end
    // one ciphertext-plaintext product (alpha = 2, beta = 1) on prime 0
    for (int c = 0; c < 2; c++) for (int n = 0; n < N; n++) x[c][n] = u64'({$urandom, $urandom}) % pr[0];
    for (int n = 0; n < N; n++) y[0][n] = u64'({$urandom, $urandom}) % pr[0];
    mult_run(0, 2, 1, bad);
    if (bad == 0) n_cp++;
    $display("mechanisms: C-C %0d, C-P %0d, key switch %0d, INTT0 %0d, NTT0 %0d, INTT1 %0d, NTT1 %0d, MS writes %0d",
             n_cc, n_cp, n_ks, n_intt0, n_ntt0, n_intt1, n_ntt1, n_msw);
    checks += 8;
    if (n_cc != K)   failures++;
    if (n_cp != 1)   failures++;
    if (n_ks != 1)   failures++;
    if (n_intt0 != K) failures++;
    if (n_ntt0 != K) failures++;
    if (n_intt1 != 1) failures++;
    if (n_ntt1 != K) failures++;
    if (n_msw != K * N / XW1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
