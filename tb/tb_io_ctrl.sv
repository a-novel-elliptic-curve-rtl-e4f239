// Self-checking test of io_ctrl, the initialisation and read-out
// controller. The test bench plays the register banks and the scalar
// controller: it acknowledges WRITE flits (after random delays, so ACKs
// come back out of order), keeps the written values in a model register
// file, answers START with DONE and answers READ with RDATA from the model.
// It checks that the seven initialisation writes set Q = (px, py, 1), P, a
// and b in the right banks, that START carries k and comes only after every
// ACK, that qx/qy return the values read and that done pulses once.
module tb_io_ctrl;
  import ecc_pkg::*;

  logic  clk = 0, rst_n = 0, start = 0, busy, done;
  logic [FW-1:0] k, px, py, curve_a, curve_b, qx, qy;
  flit_t rx_flit, tx_flit;
  logic  rx_valid, rx_ready, tx_valid, tx_ready;
  logic [FW-1:0] model [NREGS];
  logic written [NREGS];
  int checks = 0, failures = 0, acks_out = 0, done_pulses = 0, start_seen = 0;
  typedef struct { int delay; flit_t f; } resp_t;
  resp_t q [$];

  io_ctrl dut (.*);
  always #5 clk = ~clk;
  assign tx_ready = 1'b1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [FW-1:0] rnd();
    logic [FW-1:0] v;
    for (int i = 0; i < FW / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  always @(posedge clk) begin
    rx_valid <= 1'b0;
    if (done) done_pulses++;
    if (rst_n && tx_valid) begin
      resp_t r;
      r.f = tx_flit;
      r.delay = $urandom_range(0, 10);
      chk(tx_flit.ret == N_CU1, "return address");
      case (tx_flit.ptype)
        PK_WRITE: begin
          chk(tx_flit.dst == bank_of(tx_flit.rd), "WRITE to the right bank");
          model[tx_flit.rd] = tx_flit.a; written[tx_flit.rd] = 1'b1;
          r.f.ptype = PK_ACK; acks_out++;
        end
        PK_START: begin
          chk(tx_flit.dst == N_CU0 && tx_flit.a == k, "START with k to scalar controller");
          chk(acks_out == 7 && q.size() == 0, "START only after all ACKs");
          r.f.ptype = PK_DONE; start_seen++;
        end
        PK_READ: begin
          chk(tx_flit.dst == bank_of(tx_flit.ra), "READ to the right bank");
          r.f.ptype = PK_RDATA; r.f.a = model[tx_flit.ra];
        end
        default: chk(0, "unexpected flit");
      endcase
      q.push_back(r);
    end
    foreach (q[i]) if (q[i].delay > 0) q[i].delay--;
    foreach (q[i]) if (q[i].delay == 0) begin
      rx_flit <= q[i].f; rx_valid <= 1'b1;
      q.delete(i);
      break;
    end
  end

  initial begin
    rx_valid = 0; rx_flit = '0;
    for (int r = 0; r < NREGS; r++) begin model[r] = '0; written[r] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      k = rnd(); px = rnd(); py = rnd(); curve_a = rnd(); curve_b = rnd();
      acks_out = 0; start_seen = 0; done_pulses = 0;
      @(negedge clk) start = 1; @(negedge clk) start = 0;
      chk(busy, "busy after start");
      // Stand-in for the point multiplication: once START is seen, put a
      // known result into X and Y before DONE returns.
      wait (start_seen == 1);
      model[R_X] = rnd(); model[R_Y] = rnd();
      while (!done) @(negedge clk);
      chk(model[R_Z] == FW'(1) && model[R_PX] == px && model[R_PY] == py, "Z = 1 and copy of P");
      chk(model[R_A] == curve_a && model[R_B] == curve_b, "curve coefficients");
      chk(qx == model[R_X] && qy == model[R_Y], "result read back");
      repeat (5) @(negedge clk);
      chk(done_pulses == 1 && !busy, "one done pulse, then idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
