// Self-checking test of scalar_ctrl, the binary-method controller. The
// test bench plays the three point sequencers: every START the controller
// sends is logged as D (M-Double), A (M-Add) or X (M-XY) and answered
// with DONE after a random delay. For scalars of 1, 2, 3, small random
// values and full 256-bit values it checks that the sequence of routines is
// exactly the binary method (one D per bit below the leading one, an A
// after each D whose bit is one, then one X), that DONE goes back to the
// requester, and the doubling and addition counters.
module tb_scalar_ctrl;
  import ecc_pkg::*;

  logic  clk = 0, rst_n = 0;
  flit_t rx_flit, tx_flit;
  logic  rx_valid, rx_ready, tx_valid, tx_ready;
  logic [31:0] n_double, n_add;
  int checks = 0, failures = 0;
  string log_s;
  int pending_delay = -1;
  coord_t pending_to;
  logic finished;
  coord_t req = '{x: 2'd2, y: 2'd0};

  scalar_ctrl dut (.*);
  always #5 clk = ~clk;
  assign tx_ready = 1'b1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Sequencer model.
  always @(posedge clk) begin
    if (!inject) rx_valid <= 1'b0;
    if (rst_n && tx_valid) begin
      if (tx_flit.ptype == PK_START) begin
        chk(pending_delay < 0, "START while a routine runs");
        chk(tx_flit.ret == N_CU0, "return address");
        if (tx_flit.dst == N_MDBL) log_s = {log_s, "D"};
        else if (tx_flit.dst == N_MADD) log_s = {log_s, "A"};
        else if (tx_flit.dst == N_MXY) log_s = {log_s, "X"};
        else log_s = {log_s, "?"};
        pending_delay = $urandom_range(0, 6);
        pending_to = tx_flit.dst;
      end else if (tx_flit.ptype == PK_DONE) begin
        chk(tx_flit.dst == req, "DONE to requester");
        finished = 1'b1;
      end
    end
    if (pending_delay == 0) begin
      rx_flit <= '0; rx_flit.ptype <= PK_DONE; rx_flit.ret <= pending_to; rx_valid <= 1'b1;
      pending_delay = -1;
    end else if (pending_delay > 0) pending_delay--;
  end

  logic inject = 0;
  task automatic run(logic [FW-1:0] k);
    string exp_s;
    int top;
    logic [31:0] d0, a0;
    top = 0;
    for (int i = 0; i < FW; i++) if (k[i]) top = i;
    exp_s = "";
    for (int i = top - 1; i >= 0; i--) begin
      exp_s = {exp_s, "D"};
      if (k[i]) exp_s = {exp_s, "A"};
    end
    exp_s = {exp_s, "X"};
    log_s = ""; finished = 0; d0 = n_double; a0 = n_add;
    @(negedge clk);
    inject = 1; rx_flit = '0; rx_flit.ptype = PK_START; rx_flit.ret = req; rx_flit.a = k; rx_valid = 1;
    @(negedge clk);
    inject = 0; rx_valid = 0;
    while (!finished) @(negedge clk);
    chk(log_s == exp_s, $sformatf("k=%h: routines %s, expected %s", k, log_s, exp_s));
    chk(n_double - d0 == 32'(top), "doubling count");
    chk(n_add - a0 == 32'($countones(k) - 1), "addition count");
  endtask

  initial begin
    logic [FW-1:0] k;
    rx_valid = 0; rx_flit = '0; finished = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(1); run(2); run(3); run(5); run(8);
    for (int i = 0; i < 6; i++) begin
      for (int j = 0; j < FW / 32; j++) k[j*32 +: 32] = $urandom;
      if (i < 3) k = k >> (FW - 12);
      if (k == 0) k = 7;
      run(k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
