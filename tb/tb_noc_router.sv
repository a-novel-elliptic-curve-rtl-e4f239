// Self-checking test of one noc_router (the centre node x=1, y=1). Random
// flits enter all five ports at random times, with destinations that XY
// routing allows for the port they enter by; the output ports are drained
// with random ready. Each flit carries a serial number; the test checks
// that every flit leaves by the port XY routing picks, exactly once, in
// order per input/output pair, and that contention (several inputs wanting
// one output) and back-pressure both happened.
module tb_noc_router;
  import ecc_pkg::*;

  localparam logic [1:0] RX = 2'd1, RY = 2'd1;
  localparam int unsigned NFLITS = 600;

  logic  clk = 0, rst_n = 0;
  flit_t in_flit [NPORTS];
  logic  in_valid [NPORTS], in_ready [NPORTS];
  flit_t out_flit [NPORTS];
  logic  out_valid [NPORTS], out_ready [NPORTS];

  int checks = 0, failures = 0;
  int sent = 0, received = 0, contention = 0, stalls = 0;
  int unsigned last_seen [NPORTS][NPORTS];

  noc_router #(.X(RX), .Y(RY), .DEPTH(2)) dut (.*);
  always #5 clk = ~clk;

  function automatic int unsigned xy(coord_t d);
    if (d.x > RX) return P_EAST;
    if (d.x < RX) return P_WEST;
    if (d.y > RY) return P_SOUTH;
    if (d.y < RY) return P_NORTH;
    return P_LOCAL;
  endfunction

  // Destination a flit entering port p may legally have.
  function automatic coord_t legal_dst(int p);
    coord_t d;
    d.x = 2'($urandom_range(0, 3));
    d.y = 2'($urandom_range(0, 2));
    case (p)
      P_NORTH: begin d.x = RX; d.y = 2'($urandom_range(RY, 2)); end
      P_SOUTH: begin d.x = RX; d.y = 2'($urandom_range(0, RY)); end
      P_EAST:  d.x = 2'($urandom_range(0, RX));
      P_WEST:  d.x = 2'($urandom_range(RX, 3));
      default: ;
    endcase
    return d;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Drivers.
  for (genvar p = 0; p < NPORTS; p++) begin : g_drv
    initial begin
      in_valid[p] = 0; in_flit[p] = '0;
      @(posedge rst_n);
      forever begin
        @(negedge clk);
        if (in_valid[p] && in_ready_q[p]) in_valid[p] = 0;
        if (!in_valid[p] && sent < NFLITS && $urandom_range(0, 3) != 0) begin
          in_flit[p]      = '0;
          in_flit[p].dst  = legal_dst(p);
          in_flit[p].a    = FW'(sent);
          in_flit[p].b    = FW'(p);
          in_valid[p]     = 1;
          sent++;
        end
      end
    end
  end

  // Ready seen at the edge (sampled before the drivers change anything).
  logic in_ready_q [NPORTS];
  always @(posedge clk) for (int p = 0; p < NPORTS; p++) in_ready_q[p] <= in_ready[p];

  always @(negedge clk) for (int o = 0; o < NPORTS; o++) out_ready[o] = ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n) begin
    int want_cnt [NPORTS];
    for (int o = 0; o < NPORTS; o++) want_cnt[o] = 0;
    for (int i = 0; i < NPORTS; i++) if (dut.head_vld[i]) want_cnt[int'(dut.want[i])]++;
    for (int o = 0; o < NPORTS; o++) if (want_cnt[o] > 1) contention++;
    for (int o = 0; o < NPORTS; o++) begin
      if (out_valid[o] && !out_ready[o]) stalls++;
      if (out_valid[o] && out_ready[o]) begin
        int unsigned src, id;
        src = int'(out_flit[o].b);
        id  = int'(out_flit[o].a);
        received++;
        checks++;
        if (xy(out_flit[o].dst) != o) begin
          failures++; $display("FAIL: flit %0d left by port %0d, XY says %0d", id, o, xy(out_flit[o].dst));
        end
        checks++;
        if (last_seen[src][o] != 0 && id <= last_seen[src][o] - 1) begin
          failures++; $display("FAIL: flit %0d out of order", id);
        end
        last_seen[src][o] = id + 1;
      end
    end
  end

  initial begin
    for (int i = 0; i < NPORTS; i++) for (int o = 0; o < NPORTS; o++) last_seen[i][o] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (sent == NFLITS);
    repeat (200) @(negedge clk);
    checks++; if (received != NFLITS) begin failures++; $display("FAIL: %0d of %0d flits delivered", received, NFLITS); end
    checks++; if (contention == 0) begin failures++; $display("FAIL: no contention"); end
    checks++; if (stalls == 0) begin failures++; $display("FAIL: no back-pressure"); end
    $display("router: %0d flits, %0d contention cycles, %0d stalled cycles", received, contention, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
