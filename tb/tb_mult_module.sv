// tb_mult_module: self-checking testbench of mult_module. Multiplies two
// random two-component ciphertexts (C-C, three result components) and then
// a two-component ciphertext by a plaintext (C-P, BETA = 1), comparing every
// result coefficient with c_k = sum_{i+j=k} a_i b_j mod p computed in the
// testbench, and checks that a run takes ALPHA*BETA*N/NC clocks plus at most
// the core latency and a few register stages.
module tb_mult_module;
  import heax_pkg::*;
  import heax_tb_pkg::*;
  localparam int unsigned N = 256, NC = 8, MAXC = 2, LAT = 23;
  localparam int unsigned D = N / NC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_we = 0, ld_which = 0, start = 0, busy, done;
  logic [0:0] ld_comp = '0;
  logic [$clog2(D)-1:0] ld_row = '0, rd_row = '0;
  logic [1:0] alpha = '0, beta = '0, rd_comp = '0;
  word_t ld_data [NC], rd_data [NC];
  word_t p = '0, r1 = '0, r2 = '0;

  mult_module #(.N(N), .NC(NC), .MAXC(MAXC)) dut (.*);

  int checks = 0, failures = 0;
  u64 a [MAXC][N], b [MAXC][N];

  task automatic run_case(int al, int be, u64 pp);
    int cycles;
    u128 u;
    for (int c = 0; c < al; c++) for (int i = 0; i < N; i++) a[c][i] = u64'({$urandom, $urandom}) % pp;
    for (int c = 0; c < be; c++) for (int i = 0; i < N; i++) b[c][i] = u64'({$urandom, $urandom}) % pp;
    a[0][0] = pp - 1; b[0][0] = pp - 1;
    for (int w = 0; w < 2; w++)
      for (int c = 0; c < (w ? be : al); c++)
        for (int r = 0; r < D; r++) begin
          @(negedge clk);
          ld_we = 1; ld_which = w[0]; ld_comp = c[0:0]; ld_row = r[$clog2(D)-1:0];
          for (int l = 0; l < NC; l++) ld_data[l] = word_t'(w ? b[c][r*NC+l] : a[c][r*NC+l]);
        end
    @(negedge clk);
    ld_we = 0;
    u = barrett_u(pp);
    p = word_t'(pp); r1 = u[W-1:0]; r2 = u[2*W-1:W];
    alpha = 2'(al); beta = 2'(be); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles < al*be*D || cycles > al*be*D + LAT + 6) begin
      failures++; $display("cycle count %0d out of range", cycles);
    end
    $display("alpha=%0d beta=%0d: %0d clocks, N/NC per pair = %0d", al, be, cycles, D);
    for (int k = 0; k < al + be - 1; k++)
      for (int r = 0; r < D; r++) begin
        rd_comp = 2'(k); rd_row = r[$clog2(D)-1:0];
        @(negedge clk);
        for (int l = 0; l < NC; l++) begin
          u64 e;
          e = 0;
          for (int i = 0; i < al; i++)
            if (k - i >= 0 && k - i < be) e = addmod(e, mulmod(a[i][r*NC+l], b[k-i][r*NC+l], pp), pp);
          checks++;
          if (u64'(rd_data[l]) != e) begin
            failures++;
            if (failures < 8) $display("mismatch comp %0d idx %0d: got %0d want %0d", k, r*NC+l, rd_data[l], e);
          end
        end
      end
  endtask

  initial begin
    for (int l = 0; l < NC; l++) ld_data[l] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run_case(2, 2, find_prime(52, N, 0));
    run_case(2, 1, find_prime(50, N, 1));
    run_case(1, 2, find_prime(36, N, 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
