// Self-checking test of ff_inverter at 256 bits in both fields: for random
// and edge operands the result is compared with the Fermat inverse of the
// reference and a * result is checked to be 1; the cycle count must stay
// within 4W+4. The inverse of 0 must come back as 0.
module tb_ff_inverter;
  import ecc_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, prime_mode = 0, busy, done;
  fe_t modulus, a, result;
  int checks = 0, failures = 0;

  ff_inverter #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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
    e = (x == 0) ? '0 : f_inv(prime_mode, x, modulus);
    checks++; if (result !== e) begin failures++; $display("FAIL inv %h = %h exp %h", x, result, e); end
    if (x != 0) begin
      checks++;
      if (f_mul(prime_mode, x, result, modulus) != 1) begin failures++; $display("FAIL a*inv != 1"); end
    end
    checks++; if (n > 4 * W + 4) begin failures++; $display("FAIL latency %0d", n); end
  endtask

  initial begin
    a = 0; modulus = F256;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      prime_mode = m[0]; modulus = m ? P256 : F256;
      one(0); one(1); one(2); one(m ? P256 - 1 : '1);
      for (int i = 0; i < 12; i++) one(rand_fe(prime_mode, modulus));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
