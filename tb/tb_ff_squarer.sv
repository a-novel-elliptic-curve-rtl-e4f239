// Self-checking test of ff_squarer at 256 bits: GF(2^256) squares (one
// cycle) and GF(p) squares (W+1 cycles) of random and edge operands against
// the reference product a*a, with the latency of each mode checked.
module tb_ff_squarer;
  import ecc_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, prime_mode = 0, busy, done;
  fe_t modulus, a, result;
  int checks = 0, failures = 0;

  ff_squarer #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic one(fe_t x);
    int n;
    fe_t e;
    a = x;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    n = 1;
    while (!done) begin @(negedge clk); n++; end
    e = f_mul(prime_mode, x, x, modulus);
    checks++; if (result !== e) begin failures++; $display("FAIL sqr %h = %h exp %h", x, result, e); end
    checks++; if (n != (prime_mode ? W + 1 : 1)) begin failures++; $display("FAIL latency %0d", n); end
  endtask

  initial begin
    a = 0; modulus = F256;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      prime_mode = m[0]; modulus = m ? P256 : F256;
      one(0); one(1); one(m ? P256 - 1 : '1);
      for (int i = 0; i < 20; i++) one(rand_fe(prime_mode, modulus));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
