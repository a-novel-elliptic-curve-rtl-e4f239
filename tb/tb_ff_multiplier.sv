// Self-checking test of ff_multiplier at 256 bits in both fields: random
// operands plus edge values (0, 1, p-1, all ones), compared with the
// reference product; also checks the latency of W+1 cycles from start to done.
module tb_ff_multiplier;
  import ecc_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, prime_mode = 0, busy, done;
  fe_t modulus, a, b, result;
  int checks = 0, failures = 0;

  ff_multiplier #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic one(fe_t x, fe_t y);
    int n;
    fe_t e;
    a = x; b = y;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    n = 1;
    while (!done) begin @(negedge clk); n++; end
    e = f_mul(prime_mode, x, y, modulus);
    checks++; if (result !== e) begin failures++; $display("FAIL mul %h*%h = %h exp %h", x, y, result, e); end
    checks++; if (n != W + 1) begin failures++; $display("FAIL latency %0d", n); end
  endtask

  initial begin
    a = 0; b = 0; modulus = F256;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      prime_mode = m[0]; modulus = m ? P256 : F256;
      one(0, rand_fe(prime_mode, modulus));
      one(1, rand_fe(prime_mode, modulus));
      one(m ? P256 - 1 : '1, m ? P256 - 1 : '1);
      for (int i = 0; i < 20; i++) one(rand_fe(prime_mode, modulus), rand_fe(prime_mode, modulus));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
