// Self-checking test of reg_bank (bank 1, the odd registers). It writes
// random values into all its registers with WRITE and WB flits (checking
// each ACK's destination and tag), reads them back with READ, and sends
// EXEC flits whose operands are both, one or none in this bank: both
// present must become an OPER to the named unit carrying the values, a
// missing one must be forwarded to the other bank with the local one
// filled in. The output is drained with random ready to exercise the
// one-flit output register.
module tb_reg_bank;
  import ecc_pkg::*;

  logic  clk = 0, rst_n = 0;
  flit_t rx_flit, tx_flit;
  logic  rx_valid = 0, rx_ready, tx_valid, tx_ready;
  logic [FW-1:0] model [NREGS];
  int checks = 0, failures = 0;

  reg_bank #(.BANK(1'b1)) dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) tx_ready = ($urandom_range(0, 2) != 0);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [FW-1:0] rnd();
    logic [FW-1:0] v;
    for (int i = 0; i < FW / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // Send one flit and wait for the flit it produces.
  task automatic xfer(input flit_t f, output flit_t o);
    rx_flit = f; rx_valid = 1;
    do @(posedge clk); while (!rx_ready);
    @(negedge clk); rx_valid = 0;
    do @(posedge clk); while (!(tx_valid && tx_ready));
    o = tx_flit;
    @(negedge clk);
  endtask

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    flit_t f, o;
    coord_t req;
    req = '{x: 2'd0, y: 2'd1};
    rx_flit = '0; tx_ready = 1;
    for (int r = 0; r < NREGS; r++) model[r] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // Writes.
    for (int r = 1; r < NREGS; r += 2) begin
      f = '0; f.dst = N_REG1; f.ret = req; f.ptype = (r % 4 == 1) ? PK_WRITE : PK_WB;
      f.rd = reg_addr_t'(r); f.a = rnd(); f.tag = 3'(r);
      model[r] = f.a;
      xfer(f, o);
      chk(o.ptype == PK_ACK && o.dst == req && o.tag == 3'(r), $sformatf("ACK for r%0d", r));
    end
    // Reads.
    for (int r = 1; r < NREGS; r += 2) begin
      f = '0; f.dst = N_REG1; f.ret = req; f.ptype = PK_READ; f.ra = reg_addr_t'(r);
      xfer(f, o);
      chk(o.ptype == PK_RDATA && o.dst == req && o.a == model[r], $sformatf("READ r%0d", r));
    end
    // EXEC with operands in various banks.
    for (int i = 0; i < 40; i++) begin
      f = '0; f.dst = N_REG1; f.ret = req; f.ptype = PK_EXEC; f.op = OP_MUL; f.unit = N_MUL1;
      f.ra = reg_addr_t'($urandom_range(0, NREGS - 1));
      f.rb = reg_addr_t'($urandom_range(0, NREGS - 1));
      f.rd = reg_addr_t'($urandom_range(0, NREGS - 1));
      // An even operand may or may not have been filled in by bank 0 already.
      if (!f.ra[0] && $urandom_range(0, 1) == 1) begin f.have_a = 1; f.a = rnd(); end
      if (!f.rb[0] && $urandom_range(0, 1) == 1) begin f.have_b = 1; f.b = rnd(); end
      xfer(f, o);
      chk(o.have_a == (f.have_a || f.ra[0]) && o.have_b == (f.have_b || f.rb[0]), "operand flags");
      if (o.have_a) chk(o.a == (f.ra[0] ? model[f.ra] : f.a), "operand a");
      if (o.have_b) chk(o.b == (f.rb[0] ? model[f.rb] : f.b), "operand b");
      if (o.have_a && o.have_b)
        chk(o.ptype == PK_OPER && o.dst == N_MUL1 && o.rd == f.rd && o.ret == req, "OPER to unit");
      else
        chk(o.ptype == PK_EXEC && o.dst == N_REG0, "forward to bank 0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
