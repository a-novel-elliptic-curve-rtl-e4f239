// Self-checking test of the 4x3 noc_mesh. Every node injects random flits
// to random destinations (itself included) while every node drains its
// local port with random ready. Each flit carries its source and a
// serial number; the test checks that each flit reaches the node it was
// addressed to, exactly once, in order per source/destination pair, and
// that the number of flits delivered equals the number sent. It also
// checks the hop latency of a lone flit corner to corner: 2 cycles per
// router on the XY path (3 + 2 hops = 6 routers), plus the edge on which
// the destination core takes it: 13 cycles.
module tb_noc_mesh;
  import ecc_pkg::*;

  localparam int unsigned PER_NODE = 60;

  logic  clk = 0, rst_n = 0;
  flit_t core_tx_flit [NODES];
  logic  core_tx_valid [NODES], core_tx_ready [NODES];
  flit_t core_rx_flit [NODES];
  logic  core_rx_valid [NODES], core_rx_ready [NODES];
  logic  tx_ready_q [NODES];

  int checks = 0, failures = 0, sent = 0, received = 0;
  int unsigned last_id [NODES][NODES];
  logic lone = 0;
  int lone_t0 = 0, lone_lat = -1, cyc = 0;

  noc_mesh #(.DEPTH(2)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) for (int n = 0; n < NODES; n++) tx_ready_q[n] <= core_tx_ready[n];

  for (genvar n = 0; n < NODES; n++) begin : g_node
    initial begin
      int cnt;
      cnt = 0;
      core_tx_valid[n] = 0; core_tx_flit[n] = '0;
      @(posedge rst_n);
      wait (lone == 0 && lone_lat >= 0);
      forever begin
        @(negedge clk);
        if (core_tx_valid[n] && tx_ready_q[n]) core_tx_valid[n] = 0;
        if (!core_tx_valid[n] && cnt < PER_NODE && $urandom_range(0, 1) == 0) begin
          core_tx_flit[n]       = '0;
          core_tx_flit[n].dst.x = 2'($urandom_range(0, MESH_X - 1));
          core_tx_flit[n].dst.y = 2'($urandom_range(0, MESH_Y - 1));
          core_tx_flit[n].ret   = '{x: 2'(n % MESH_X), y: 2'(n / MESH_X)};
          core_tx_flit[n].a     = FW'(cnt + 1);
          core_tx_valid[n]      = 1;
          cnt++; sent++;
        end
      end
    end
  end

  always @(negedge clk) for (int n = 0; n < NODES; n++) core_rx_ready[n] = lone || ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NODES; n++) if (core_rx_valid[n] && core_rx_ready[n]) begin
      int unsigned s, id;
      s  = node_id(core_rx_flit[n].ret);
      id = int'(core_rx_flit[n].a);
      if (lone) lone_lat = cyc - lone_t0;
      else begin
        received++;
        checks++;
        if (node_id(core_rx_flit[n].dst) != n) begin failures++; $display("FAIL: flit for %0d reached %0d", node_id(core_rx_flit[n].dst), n); end
        checks++;
        if (id <= last_id[s][n]) begin failures++; $display("FAIL: order %0d->%0d", s, n); end
        last_id[s][n] = id;
      end
    end
  end

  initial begin
    for (int i = 0; i < NODES; i++) for (int j = 0; j < NODES; j++) last_id[i][j] = 0;
    for (int n = 0; n < NODES; n++) begin core_tx_valid[n] = 0; core_tx_flit[n] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Lone flit from node 0 (0,0) to node 11 (3,2).
    lone = 1;
    @(negedge clk);
    core_tx_flit[0] = '0; core_tx_flit[0].dst = '{x: 2'd3, y: 2'd2};
    core_tx_valid[0] = 1; lone_t0 = cyc;
    @(negedge clk); core_tx_valid[0] = 0;
    repeat (30) @(negedge clk);
    checks++; if (lone_lat != 13) begin failures++; $display("FAIL: corner-to-corner latency %0d, expected 13", lone_lat); end
    lone = 0;
    wait (sent == PER_NODE * NODES);
    repeat (300) @(negedge clk);
    checks++; if (received != sent) begin failures++; $display("FAIL: %0d of %0d delivered", received, sent); end
    $display("mesh: %0d flits delivered, lone flit latency %0d cycles", received, lone_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
