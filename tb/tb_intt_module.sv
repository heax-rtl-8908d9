// tb_intt_module: self-checking testbench of ntt_module configured as the INTT
// module. Finds a 52-bit prime p = 1 mod 2N and a 2N-th root of unity, loads
// the twiddle table, transforms random polynomials and compares each output
// coefficient with a direct O(N^2) evaluation of the negacyclic transform
// (independent of the butterfly network). Also checks the clock count of a
// transform against the bound log2(N) * (N/(2 NC) + LAT + 8).
module tb_intt_module;
  import heax_pkg::*;
  import heax_tb_pkg::*;

  localparam int unsigned N   = 256;
  localparam int unsigned NC  = 4;
  localparam bit          INV = 1;
  localparam int unsigned LAT = INV ? 49 : 50;
  localparam int unsigned PW  = 2*NC;
  localparam int unsigned NPOLY = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tw_we = 0, in_we = 0, start = 0, busy, done;
  logic [0:0] tw_sel = '0, sel = '0;
  logic [$clog2(N/NC)-1:0] tw_row = '0;
  logic [$clog2(N)-1:0] in_idx = '0, out_idx = '0;
  word_t tw_w [NC], tw_wp [NC], in_data [PW], out_data [PW];
  word_t p;

  ntt_module #(.N(N), .NC(NC), .INVERSE(INV)) dut (.*);

  int checks = 0, failures = 0;
  int cycles;
  u64 pp, psi;
  u64 a[], ref_out[];

  initial begin
    for (int l = 0; l < NC; l++) begin tw_w[l] = '0; tw_wp[l] = '0; end
    for (int l = 0; l < PW; l++) in_data[l] = '0;
    pp = find_prime(52, N, 0);
    psi = find_psi(pp, N);
    p = word_t'(pp);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // twiddle table
    for (int r = 0; r < N/NC; r++) begin
      @(negedge clk);
      tw_we = 1; tw_row = r[$clog2(N/NC)-1:0];
      for (int l = 0; l < NC; l++) begin
        tw_w[l]  = word_t'(twiddle(pp, psi, N, r*NC + l, INV));
        tw_wp[l] = word_t'(shoup(u64'(tw_w[l]), pp));
      end
    end
    @(negedge clk); tw_we = 0;
    for (int poly = 0; poly < NPOLY; poly++) begin
      a = new[N]; ref_out = new[N];
      for (int i = 0; i < N; i++) a[i] = u64'({$urandom, $urandom}) % pp;
      if (poly == 0) a[0] = pp - 1;
      for (int r = 0; r < N/PW; r++) begin
        @(negedge clk);
        in_we = 1; in_idx = $clog2(N)'(r*PW);
        for (int l = 0; l < PW; l++) in_data[l] = word_t'(a[r*PW + l]);
      end
      @(negedge clk); in_we = 0;
      // reference
      ref_out = a;
      if (INV) ref_intt_direct(ref_out, pp, psi);
      else     ref_ntt_direct(ref_out, pp, psi);
      start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles > $clog2(N) * (N/(2*NC) + LAT + 8) || cycles < $clog2(N) * N/(2*NC)) begin
        failures++;
        $display("cycle count %0d out of range", cycles);
      end
      $display("transform %0d: %0d clocks (paper's N log N/(2 NC) = %0d)", poly, cycles, $clog2(N)*N/(2*NC));
      for (int r = 0; r < N/PW; r++) begin
        out_idx = $clog2(N)'(r*PW);
        @(negedge clk);
        for (int l = 0; l < PW; l++) begin
          checks++;
          if (u64'(out_data[l]) != ref_out[r*PW + l]) begin
            failures++;
            if (failures < 10) $display("mismatch poly %0d idx %0d: got %0d want %0d", poly, r*PW+l, out_data[l], ref_out[r*PW+l]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
