// tb_intt_core: self-checking testbench of intt_core (butterfly, 49 stages).
// Streams random operands into the unit, one set per clock, and compares
// every output with a value computed in the testbench from 128-bit integer
// arithmetic, exactly the unit's latency later (which checks the pipeline
// depth as well as the arithmetic).
module tb_intt_core;
  import heax_pkg::*;
  import heax_tb_pkg::*;
  localparam int LAT = 49;
  localparam int NV = 2000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  word_t cin_a = '0, cin_b = '0, w = '0, wp = '0, p = '0, cout_a, cout_b;
  intt_core dut (.clk, .rst_n, .cin_a, .cin_b, .w_inv(w), .wp_inv(wp), .p, .cout_a, .cout_b);
  int checks = 0, failures = 0;
  u64 exa [NV + LAT], exb [NV + LAT];
  u64 pr [3];
  initial begin
    pr[0] = find_prime(52, 8192, 0); pr[1] = find_prime(45, 4096, 2); pr[2] = 12289;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NV + LAT; i++) begin
      @(negedge clk);
      if (i >= LAT) begin
        checks += 2;
        if (u64'(cout_a) != exa[i-LAT]) failures++;
        if (u64'(cout_b) != exb[i-LAT]) failures++;
        if (failures > 0 && failures < 4) $display("mismatch %0d: got %0d %0d want %0d %0d", i-LAT, cout_a, cout_b, exa[i-LAT], exb[i-LAT]);
      end
      if (i < NV) begin
        u64 pp, a, b, ww;
        pp = pr[i % 3];
        a  = (i % 9 == 0) ? pp - 1 : u64'({$urandom, $urandom}) % pp;
        b  = (i % 13 == 0) ? pp - 1 : u64'({$urandom, $urandom}) % pp;
        ww = u64'({$urandom, $urandom}) % pp;
        cin_a = word_t'(a); cin_b = word_t'(b); w = word_t'(ww); p = word_t'(pp);
        wp = word_t'(shoup(ww, pp));
        // (a+b)/2 and (a-b)*w, w already holding the factor 1/2
        exa[i] = mulmod(addmod(a, b, pp), invmod(2, pp), pp);
        exb[i] = mulmod(submod(a, b, pp), ww, pp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
