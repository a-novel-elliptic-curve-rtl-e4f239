// Self-checking test of ff_adder at 256 bits: XOR in GF(2^256), and
// (a + b) mod p, (a - b) mod p for the P-256 prime with random operands and
// the wrap-around edges, each with its one-cycle latency.
module tb_ff_adder;
  import ecc_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, prime_mode = 0, sub = 0, done;
  fe_t modulus, a, b, result;
  int checks = 0, failures = 0;

  ff_adder #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic one(logic s, fe_t x, fe_t y);
    fe_t e;
    a = x; b = y; sub = s;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    e = s ? f_sub(prime_mode, x, y, modulus) : f_add(prime_mode, x, y, modulus);
    checks++; if (!done) begin failures++; $display("FAIL latency"); end
    checks++; if (result !== e) begin failures++; $display("FAIL %0d %h %h = %h exp %h", s, x, y, result, e); end
  endtask

  initial begin
    a = 0; b = 0; modulus = F256;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      prime_mode = m[0]; modulus = m ? P256 : F256;
      one(0, m ? P256 - 1 : '1, 1); one(1, 0, 1); one(1, 5, 5); one(0, 0, 0);
      for (int i = 0; i < 40; i++) one(i[0], rand_fe(prime_mode, modulus), rand_fe(prime_mode, modulus));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
