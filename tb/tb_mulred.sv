// tb_mulred: self-checking testbench of mulred (Algorithm 1).
// Streams random operands into the unit, one set per clock, and compares
// every output with a value computed in the testbench from 128-bit integer
// arithmetic, exactly the unit's latency later (which checks the pipeline
// depth as well as the arithmetic).
module tb_mulred;
  import heax_pkg::*;
  import heax_tb_pkg::*;
  localparam int LAT = 3;
  localparam int NV = 2000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  word_t x = '0, y = '0, yp = '0, p = '0, z;
  mulred dut (.*);
  int checks = 0, failures = 0;
  u64 ex [NV + LAT];
  u64 pr [4];
  initial begin
    pr[0] = find_prime(52, 4096, 0); pr[1] = find_prime(50, 8192, 3);
    pr[2] = find_prime(40, 8192, 1); pr[3] = 65537;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NV + LAT; i++) begin
      @(negedge clk);
      if (i >= LAT) begin
        checks++;
        if (u64'(z) != ex[i-LAT]) begin
          failures++;
          if (failures < 8) $display("mismatch %0d: got %0d want %0d", i-LAT, z, ex[i-LAT]);
        end
      end
      if (i < NV) begin
        u64 pp, a, b;
        pp = pr[i % 4];
        a = (i % 7 == 0) ? pp - 1 : u64'({$urandom, $urandom}) % pp;
        b = (i % 11 == 0) ? pp - 1 : u64'({$urandom, $urandom}) % pp;
        x = word_t'(a); y = word_t'(b); p = word_t'(pp); yp = word_t'(shoup(b, pp));
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
