// Five-port mesh router of the network-on-chip.
//
// Ports: 0 local core, 1 north (y-1), 2 east (x+1), 3 south (y+1),
// 4 west (x-1). Every packet is a single flit. Each input port has a FIFO
// (DEPTH flits); each output port has a one-flit output register and a
// round-robin arbiter among the inputs whose head flit routes to it.
// Routing is dimension-ordered XY (first along x, then along y), which is
// deadlock-free on a mesh and never sends a flit back out of the port it
// came in on.
//
// Timing: a flit spends at least one cycle in the input FIFO and one in the
// output register, so a hop costs two cycles without contention.
// Links use valid/ready: a flit moves on a clock edge where both are high,
// and out_valid/out_flit stay stable while out_ready is low.
// The paper gives the mesh topology only; the router microarchitecture, XY
// routing and buffer depth are this design's choices.
module noc_router #(
  parameter logic [1:0]  X     = 2'd0,
  parameter logic [1:0]  Y     = 2'd0,
  parameter int unsigned DEPTH = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  ecc_pkg::flit_t in_flit   [ecc_pkg::NPORTS],
  input  logic           in_valid  [ecc_pkg::NPORTS],
  output logic           in_ready  [ecc_pkg::NPORTS],
  output ecc_pkg::flit_t out_flit  [ecc_pkg::NPORTS],
  output logic           out_valid [ecc_pkg::NPORTS],
  input  logic           out_ready [ecc_pkg::NPORTS]
);
  import ecc_pkg::*;

  flit_t          head     [NPORTS];
  logic           head_vld [NPORTS];
  logic           pop      [NPORTS];
  port_e          want     [NPORTS];
  logic [2:0]     rr       [NPORTS];   // round-robin pointer per output
  logic           grant_v  [NPORTS];
  logic [2:0]     grant_i  [NPORTS];

  function automatic port_e route(coord_t d);
    if (d.x > X)      return P_EAST;
    else if (d.x < X) return P_WEST;
    else if (d.y > Y) return P_SOUTH;
    else if (d.y < Y) return P_NORTH;
    else              return P_LOCAL;
  endfunction

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    flit_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_flit(in_flit[i]), .in_valid(in_valid[i]), .in_ready(in_ready[i]),
      .out_flit(head[i]), .out_valid(head_vld[i]), .out_ready(pop[i])
    );
    assign want[i] = route(head[i].dst);
  end

  // Arbitration: output o is free when its register is empty or drains now.
  always_comb begin
    int i;
    i = 0;
    for (int n = 0; n < NPORTS; n++) pop[n] = 1'b0;
    for (int o = 0; o < NPORTS; o++) begin
      grant_v[o] = 1'b0;
      grant_i[o] = '0;
      if (!out_valid[o] || out_ready[o]) begin
        for (int k = 0; k < NPORTS; k++) begin
          i = (int'(rr[o]) + k) % NPORTS;
          if (!grant_v[o] && head_vld[i] && want[i] == port_e'(o)) begin
            grant_v[o] = 1'b1;
            grant_i[o] = 3'(i);
          end
        end
      end
      if (grant_v[o]) pop[grant_i[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NPORTS; o++) begin
        out_valid[o] <= 1'b0;
        rr[o]        <= '0;
      end
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        if (grant_v[o]) begin
          out_valid[o] <= 1'b1;
          rr[o]        <= (grant_i[o] == 3'(NPORTS - 1)) ? '0 : grant_i[o] + 1'b1;
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < NPORTS; o++)
      if (grant_v[o]) out_flit[o] <= head[grant_i[o]];
  end

  // XY routing never turns a flit back the way it came.
  for (genvar i = 1; i < NPORTS; i++) begin : g_chk
    a_no_uturn: assert property (@(posedge clk) disable iff (!rst_n)
      head_vld[i] |-> want[i] != port_e'(i));
  end
  for (genvar o = 0; o < NPORTS; o++) begin : g_hold
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_flit[o]));
  end
endmodule
