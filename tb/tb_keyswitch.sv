// tb_keyswitch: self-checking testbench of the KeySwitch module at a reduced
// size (N = 64, k = 4 ciphertext primes plus the special prime, fewer cores).
// It draws primes p = 1 mod 2N, loads every twiddle table, a random
// key-switching key and a random c1, runs one key switch and compares both
// output polynomials, for every prime, with a software model of Algorithms 4
// and 5 (reference transforms written independently of the RTL). It also
// counts the phases the datapath went through.
module tb_keyswitch;
  import heax_pkg::*;
  import heax_tb_pkg::*;
  localparam int unsigned N = 64, K = 4;
  localparam int unsigned NC_INTT0 = 4, NC_NTT0 = 4, NC_DYD = 4, NC_INTT1 = 2, NC_NTT1 = 4, NC_MS = 2;

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

  keyswitch #(.N(N), .K(K), .NC_INTT0(NC_INTT0), .NC_NTT0(NC_NTT0), .NC_DYD(NC_DYD),
              .NC_INTT1(NC_INTT1), .NC_NTT1(NC_NTT1), .NC_MS(NC_MS)) dut (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_p, .cfg_r1, .cfg_r2, .cfg_pinv,
    .tw_we, .tw_mod, .tw_sel, .tw_row, .tw_w, .tw_wp,
    .ksk_we, .ksk_set, .ksk_i, .ksk_j, .ksk_idx, .ksk_data,
    .in_we, .in_res, .in_idx, .in_data, .start(ks_start), .busy(ks_busy), .done(ks_done),
    .out_set, .out_res, .out_idx, .out_data);

  int n_intt0 = 0, n_ntt0 = 0, n_intt1 = 0, n_ntt1 = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.i0_done) n_intt0++;
    if (dut.ntt0_done[0]) n_ntt0++;
    if (dut.intt1_done[0]) n_intt1++;
    if (dut.ntt1_done[0]) n_ntt1++;
  end

  initial begin
    int cycles;
    for (int l = 0; l < 16; l++) begin tw_w[l] = '0; tw_wp[l] = '0; end
    for (int l = 0; l < XW; l++) begin ksk_data[l] = '0; in_data[l] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    ks_setup();
    for (int i = 0; i < K; i++) for (int n = 0; n < N; n++) c1[i][n] = u64'({$urandom, $urandom}) % pr[i];
    ks_load_c1();
    ks_reference();
    ks_run(cycles);
    $display("key switch: %0d clocks", cycles);
    for (int s = 0; s < 2; s++)
      for (int j = 0; j < K; j++)
        for (int r = 0; r < N / XW1; r++) begin
          out_set = s[0]; out_res = KW'(j); out_idx = LOGN'(r*XW1);
          @(negedge clk);
          for (int l = 0; l < XW1; l++) begin
            checks++;
            if (u64'(out_data[l]) != outr[s][j][r*XW1+l]) begin
              failures++;
              if (failures < 8) $display("mismatch set %0d prime %0d idx %0d: got %0d want %0d", s, j, r*XW1+l, out_data[l], outr[s][j][r*XW1+l]);
            end
          end
        end
    // phase counts: K INTT0 runs, K NTT0 runs per module, 1 INTT1 and K NTT1 runs per chain
    checks += 4;
    if (n_intt0 != K) begin failures++; $display("INTT0 ran %0d times", n_intt0); end
    if (n_ntt0  != K) begin failures++; $display("NTT0 ran %0d times", n_ntt0); end
    if (n_intt1 != 1) begin failures++; $display("INTT1 ran %0d times", n_intt1); end
    if (n_ntt1  != K) begin failures++; $display("NTT1 ran %0d times", n_ntt1); end
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
