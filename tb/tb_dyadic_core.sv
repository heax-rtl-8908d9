// tb_dyadic_core: self-checking testbench of dyadic_core (Barrett product, 23 stages).
// Streams random operands into the unit, one set per clock, and compares
// every output with a value computed in the testbench from 128-bit integer
// arithmetic, exactly the unit's latency later (which checks the pipeline
// depth as well as the arithmetic).
module tb_dyadic_core;
  import heax_pkg::*;
  import heax_tb_pkg::*;
  localparam int LAT = 23;
  localparam int NV = 2000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  word_t op1 = '0, op2 = '0, r1 = '0, r2 = '0, p = '0, res;
  dyadic_core dut (.*);
  int checks = 0, failures = 0;
  u64 ex [NV + LAT];
  u64 pr [4];
  initial begin
    pr[0] = find_prime(52, 4096, 0); pr[1] = find_prime(50, 8192, 3);
    pr[2] = find_prime(30, 8192, 1); pr[3] = 12289;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NV + LAT; i++) begin
      @(negedge clk);
      if (i >= LAT) begin
        checks++;
        if (u64'(res) != ex[i-LAT]) begin
          failures++;
          if (failures < 8) $display("mismatch %0d: got %0d want %0d", i-LAT, res, ex[i-LAT]);
        end
      end
      if (i < NV) begin
        u64 pp, a, b;
        u128 u;
        pp = pr[i % 4];
        a = (i % 5 == 0) ? pp - 1 : u64'({$urandom, $urandom}) % pp;
        b = (i % 5 == 0) ? pp - 1 : u64'({$urandom, $urandom}) % pp;
        u = barrett_u(pp);
        op1 = word_t'(a); op2 = word_t'(b); p = word_t'(pp);
        r1 = u[W-1:0]; r2 = u[2*W-1:W];
        ex[i] = mulmod(a, b, pp);
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
