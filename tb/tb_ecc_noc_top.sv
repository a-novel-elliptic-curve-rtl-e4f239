// End-to-end test of the NoC elliptic-curve processor at its default size
// (256-bit fields, 4x3 mesh). For each field type it builds a random curve
// through a random point P, picks scalars k, runs Q = kP on the processor
// and compares Q with an independent affine double-and-add reference. It
// also checks that Q lies on the curve, that the numbers of point doublings
// and additions match the binary method, and that each mechanism of the
// design was exercised: both field modes, point doubling, point addition,
// affine conversion (inversion), both multipliers working at once,
// scoreboard stalls in the sequencers and back-pressure in the network.
module tb_ecc_noc_top;
  import ecc_ref_pkg::*;

  localparam int unsigned NRUNS_PER_MODE = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic prime_mode, start;
  fe_t  modulus, k, px, py, ca, cb;
  logic busy, done;
  fe_t  qx, qy;
  logic [31:0] n_double, n_add;

  int checks = 0, failures = 0;
  longint cycles = 0;
  longint both_mul_busy = 0, backpressure = 0;

  ecc_noc_top dut (.*, .curve_a(ca), .curve_b(cb));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (dut.u_mul0.st != dut.u_mul0.A_IDLE && dut.u_mul1.st != dut.u_mul1.A_IDLE) both_mul_busy++;
    for (int i = 0; i < 12; i++) if (dut.rx_valid[i] && !dut.rx_ready[i]) backpressure++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_one(input logic prime, input fe_t kk);
    fe_t rx, ry;
    logic bad;
    int nd, na;
    longint t0;
    logic [31:0] d0, a0;
    bad = 1'b1;
    while (bad) begin
      rand_curve(prime, modulus, ca, cb, px, py);
      ref_kp(prime, modulus, ca, kk, px, py, rx, ry, bad, nd, na);
    end
    k = kk;
    d0 = n_double; a0 = n_add;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    t0 = cycles;
    while (!done) @(negedge clk);
    $display("%s k=%h: %0d cycles, %0d doublings, %0d additions",
             prime ? "GF(p)  " : "GF(2^m)", kk, cycles - t0, n_double - d0, n_add - a0);
    check(qx == rx, $sformatf("qx %h expected %h", qx, rx));
    check(qy == ry, $sformatf("qy %h expected %h", qy, ry));
    check(on_curve(prime, modulus, ca, cb, qx, qy), "result not on curve");
    check(n_double - d0 == nd, "number of doublings");
    check(n_add - a0 == na, "number of additions");
  endtask

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fe_t kk;
    start = 1'b0; k = '0; px = '0; py = '0; ca = '0; cb = '0;
    prime_mode = 1'b0; modulus = F256;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 2; m++) begin
      prime_mode = (m == 1);
      modulus    = (m == 1) ? P256 : F256;
      @(negedge clk);
      run_one(prime_mode, fe_t'(1));
      run_one(prime_mode, fe_t'(2));
      for (int r = 0; r < NRUNS_PER_MODE; r++) begin
        kk = rand_fe(1'b0, '0);
        if (r == 0) kk = kk >> 240;         // short scalar
        kk[W-1] = (r == NRUNS_PER_MODE - 1); // last run: full 256-bit scalar
        if (kk == 0) kk = 3;
        run_one(prime_mode, kk);
      end
    end
    $display("mechanisms: seq stalls add=%0d dbl=%0d xy=%0d, both MULs busy=%0d cycles, backpressure=%0d, inversions=%0d",
             dut.seq_stalls[0], dut.seq_stalls[1], dut.seq_stalls[2], both_mul_busy, backpressure,
             dut.unit_ops[4]);
    check(dut.seq_stalls[0] > 0 && dut.seq_stalls[1] > 0, "scoreboard stall never happened");
    check(both_mul_busy > 0, "the two multipliers never worked in parallel");
    check(backpressure > 0, "network back-pressure never happened");
    check(dut.unit_ops[4] == 2 * (NRUNS_PER_MODE + 2), "one inversion per point multiplication");
    check(dut.unit_ops[3] > 0 && dut.unit_ops[0] > 0, "squarer and adder used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
