// Self-checking test of the three point_seq routines (doubling, mixed
// addition, conversion to affine) in both fields at 256 bits. The test
// bench stands in for the network, register banks and arithmetic units:
// an EXEC flit's operands are read from a model register file 1-3 or 12-40
// cycles after it leaves (as a bank would on its arrival), the result is computed
// with the reference arithmetic and written back after a further random
// delay of 1-2 or 1-40 cycles, so operations finish out of order, and only then
// is the ACK returned. Any scoreboard hole
// (an operation issued before its inputs are final, or overwriting a value
// a pending operation still has to read) therefore corrupts the result.
// Starting from P in projective form with a random Z, it checks 2P
// (doubling), 2P + P (addition) against the affine reference, the affine
// result of the conversion, that DONE comes only when nothing is pending,
// the number of operations of each routine, that several operations were
// in flight at once and that scoreboard stalls happened.
module tb_point_seq;
  import ecc_pkg::*;
  import ecc_ref_pkg::fe_t;
  import ecc_ref_pkg::f_add;
  import ecc_ref_pkg::f_sub;
  import ecc_ref_pkg::f_mul;
  import ecc_ref_pkg::f_inv;

  logic  clk = 0, rst_n = 0, prime_mode = 0;
  flit_t rx_flit [3], tx_flit [3];
  logic  rx_valid [3], rx_ready [3], tx_valid [3];
  logic [31:0] ops [3], stalls [3];
  fe_t   modulus;

  fe_t regs [NREGS];
  typedef struct { logic v; int rdelay; int delay; ff_op_e op; reg_addr_t rd, ra, rb; fe_t val; logic [TAGW-1:0] tag; int who; } pend_t;
  pend_t pend [32];
  int    npend = 0, max_pend = 0, done_seen [3];
  int checks = 0, failures = 0;

  point_seq #(.KIND(SEQ_ADD), .MAXO(4)) u_add (.clk, .rst_n, .prime_mode, .rx_flit(rx_flit[0]),
    .rx_valid(rx_valid[0]), .rx_ready(rx_ready[0]), .tx_flit(tx_flit[0]), .tx_valid(tx_valid[0]),
    .tx_ready(1'b1), .ops_issued(ops[0]), .hazard_stalls(stalls[0]));
  point_seq #(.KIND(SEQ_DBL), .MAXO(4)) u_dbl (.clk, .rst_n, .prime_mode, .rx_flit(rx_flit[1]),
    .rx_valid(rx_valid[1]), .rx_ready(rx_ready[1]), .tx_flit(tx_flit[1]), .tx_valid(tx_valid[1]),
    .tx_ready(1'b1), .ops_issued(ops[1]), .hazard_stalls(stalls[1]));
  point_seq #(.KIND(SEQ_XY), .MAXO(4)) u_xy (.clk, .rst_n, .prime_mode, .rx_flit(rx_flit[2]),
    .rx_valid(rx_valid[2]), .rx_ready(rx_ready[2]), .tx_flit(tx_flit[2]), .tx_valid(tx_valid[2]),
    .tx_ready(1'b1), .ops_issued(ops[2]), .hazard_stalls(stalls[2]));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic fe_t exec(ff_op_e op, fe_t a, fe_t b);
    case (op)
      OP_ADD:  return f_add(prime_mode, a, b, modulus);
      OP_SUB:  return f_sub(prime_mode, a, b, modulus);
      OP_MUL:  return f_mul(prime_mode, a, b, modulus);
      OP_SQR:  return f_mul(prime_mode, a, a, modulus);
      default: return f_inv(prime_mode, a, modulus);
    endcase
  endfunction

  // Network / bank / unit model.
  always @(posedge clk) begin
    logic acked [3];
    for (int w = 0; w < 3; w++) begin rx_valid[w] <= 1'b0; acked[w] = 1'b0; end
    // Finish pending operations (one ACK per sequencer per cycle).
    for (int i = 0; i < 32; i++) if (pend[i].v) begin
      if (pend[i].rdelay > 0) begin
        pend[i].rdelay--;
        if (pend[i].rdelay == 0) pend[i].val = exec(pend[i].op, regs[pend[i].ra], regs[pend[i].rb]);
      end else if (pend[i].delay > 0) pend[i].delay--;
      else if (!acked[pend[i].who]) begin
        regs[pend[i].rd] = pend[i].val;
        rx_flit[pend[i].who]      <= '0;
        rx_flit[pend[i].who].ptype <= PK_ACK;
        rx_flit[pend[i].who].tag  <= pend[i].tag;
        rx_valid[pend[i].who]     <= 1'b1;
        acked[pend[i].who] = 1'b1;
        pend[i].v = 1'b0;
        npend--;
      end
    end
    // Accept new operations.
    for (int w = 0; w < 3; w++) if (rst_n && tx_valid[w]) begin
      if (tx_flit[w].ptype == PK_DONE) begin
        done_seen[w]++;
        chk(npend == 0, "DONE while operations pending");
      end else begin
        int slot;
        slot = -1;
        for (int i = 31; i >= 0; i--) if (!pend[i].v) slot = i;
        chk(tx_flit[w].ptype == PK_EXEC && tx_flit[w].dst == bank_of(tx_flit[w].ra), "EXEC to bank of ra");
        pend[slot].v     = 1'b1;
        pend[slot].delay = $urandom_range(0, 1) ? $urandom_range(1, 2) : $urandom_range(1, 40);
        pend[slot].rd    = tx_flit[w].rd;
        pend[slot].tag   = tx_flit[w].tag;
        pend[slot].who   = w;
        pend[slot].rdelay = $urandom_range(0, 1) ? $urandom_range(1, 3) : $urandom_range(12, 40);
        pend[slot].op    = tx_flit[w].op;
        pend[slot].ra    = tx_flit[w].ra;
        pend[slot].rb    = tx_flit[w].rb;
        npend++;
        if (npend > max_pend) max_pend = npend;
      end
    end
  end

  task automatic run(int w);
    int d0;
    d0 = done_seen[w];
    @(negedge clk);
    // START arrives through the same rx port; wait for a cycle with no ACK.
    force_start[w] = 1'b1;
    @(negedge clk);
    force_start[w] = 1'b0;
    while (done_seen[w] == d0) @(negedge clk);
  endtask

  // START injection: a cycle in which the model sends nothing to that sequencer.
  logic force_start [3];
  always @(negedge clk) for (int w = 0; w < 3; w++) if (force_start[w] && npend == 0) begin
    rx_flit[w] = '0; rx_flit[w].ptype = PK_START; rx_flit[w].ret = N_CU0; rx_valid[w] = 1'b1;
  end

  initial begin
    fe_t ca, cb, x, y, z, x2, y2, x3, y3, zi;
    logic bad;
    int lens [2][3];
    lens[0] = '{23, 14, 4};   // GF(2^m): add, double, convert
    lens[1] = '{18, 23, 5};   // GF(p)
    for (int i = 0; i < 32; i++) pend[i].v = 0;
    for (int w = 0; w < 3; w++) begin done_seen[w] = 0; force_start[w] = 0; rx_valid[w] = 0; rx_flit[w] = '0; end
    for (int r = 0; r < NREGS; r++) regs[r] = '0;
    modulus = ecc_ref_pkg::F256;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 8; it++) begin
      logic [31:0] o0 [3];
      int m;
      m = it % 2;
      prime_mode = m[0];
      modulus = m ? ecc_ref_pkg::P256 : ecc_ref_pkg::F256;
      for (int w = 0; w < 3; w++) o0[w] = ops[w];
      ecc_ref_pkg::rand_curve(prime_mode, modulus, ca, cb, x, y);
      z = ecc_ref_pkg::rand_fe(prime_mode, modulus);
      regs[R_A] = ca; regs[R_B] = cb; regs[R_Z] = z;
      regs[R_X] = prime_mode ? f_mul(1, x, f_mul(1, z, z, modulus), modulus) : f_mul(0, x, z, modulus);
      regs[R_Y] = prime_mode ? f_mul(1, y, f_mul(1, z, f_mul(1, z, z, modulus), modulus), modulus)
                             : f_mul(0, y, f_mul(0, z, z, modulus), modulus);
      // Doubling.
      x2 = x; y2 = y; bad = 0;
      ecc_ref_pkg::pt_dbl(prime_mode, modulus, ca, x2, y2, bad);
      run(1);
      zi = f_inv(prime_mode, regs[R_Z], modulus);
      if (prime_mode) begin
        chk(f_mul(1, regs[R_X], f_mul(1, zi, zi, modulus), modulus) == x2, "GF(p) doubling x");
        chk(f_mul(1, regs[R_Y], f_mul(1, zi, f_mul(1, zi, zi, modulus), modulus), modulus) == y2, "GF(p) doubling y");
      end else begin
        chk(f_mul(0, regs[R_X], zi, modulus) == x2, "GF(2^m) doubling x");
        chk(f_mul(0, regs[R_Y], f_mul(0, zi, zi, modulus), modulus) == y2, "GF(2^m) doubling y");
      end
      // Addition 2P + P.
      regs[R_PX] = x; regs[R_PY] = y;
      x3 = x2; y3 = y2;
      ecc_ref_pkg::pt_add(prime_mode, modulus, ca, x3, y3, x, y, bad);
      run(0);
      // Conversion.
      run(2);
      chk(regs[R_X] == x3, $sformatf("mode %0d: affine x of 3P", m));
      chk(regs[R_Y] == y3, $sformatf("mode %0d: affine y of 3P", m));
      chk(!bad, "reference hit an exceptional case");
      for (int w = 0; w < 3; w++)
        chk(ops[w] - o0[w] == lens[m][w], $sformatf("mode %0d routine %0d: %0d operations", m, w, ops[w] - o0[w]));
    end
    chk(max_pend > 1, "operations never overlapped");
    chk(stalls[0] > 0 && stalls[1] > 0, "scoreboard never stalled");
    $display("point_seq: up to %0d operations in flight, stalls add=%0d dbl=%0d xy=%0d",
             max_pend, stalls[0], stalls[1], stalls[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
