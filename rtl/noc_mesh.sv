// The 4x3 two-dimensional mesh network-on-chip that links the twelve cores
// of the processor (Figure 3 of the paper: 4 columns, 3 rows).
//
// Node n = y*MESH_X + x holds one router. Neighbouring routers are joined
// by a pair of opposite valid/ready links; ports on the mesh edge are tied
// off (nothing arrives, anything sent is dropped, which XY routing never
// does). Each node's local port is brought out as the arrays core_tx_*
// (core to network) and core_rx_* (network to core), indexed by node.
//
// The 4x3 mesh and the choice of a mesh topology are the paper's; the
// link protocol and router internals are this design's choices.
module noc_mesh #(
  parameter int unsigned DEPTH = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  ecc_pkg::flit_t core_tx_flit  [ecc_pkg::NODES],
  input  logic           core_tx_valid [ecc_pkg::NODES],
  output logic           core_tx_ready [ecc_pkg::NODES],
  output ecc_pkg::flit_t core_rx_flit  [ecc_pkg::NODES],
  output logic           core_rx_valid [ecc_pkg::NODES],
  input  logic           core_rx_ready [ecc_pkg::NODES]
);
  import ecc_pkg::*;

  flit_t ri_flit [NODES][NPORTS];
  logic  ri_vld  [NODES][NPORTS];
  logic  ri_rdy  [NODES][NPORTS];
  flit_t ro_flit [NODES][NPORTS];
  logic  ro_vld  [NODES][NPORTS];
  logic  ro_rdy  [NODES][NPORTS];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int N = y * MESH_X + x;

      noc_router #(.X(2'(x)), .Y(2'(y)), .DEPTH(DEPTH)) u_router (
        .clk, .rst_n,
        .in_flit(ri_flit[N]), .in_valid(ri_vld[N]), .in_ready(ri_rdy[N]),
        .out_flit(ro_flit[N]), .out_valid(ro_vld[N]), .out_ready(ro_rdy[N])
      );

      // Local port.
      assign ri_flit[N][P_LOCAL] = core_tx_flit[N];
      assign ri_vld[N][P_LOCAL]  = core_tx_valid[N];
      assign core_tx_ready[N]    = ri_rdy[N][P_LOCAL];
      assign core_rx_flit[N]     = ro_flit[N][P_LOCAL];
      assign core_rx_valid[N]    = ro_vld[N][P_LOCAL];
      assign ro_rdy[N][P_LOCAL]  = core_rx_ready[N];

      // North neighbour (y-1): its south output feeds my north input.
      if (y > 0) begin : g_n
        assign ri_flit[N][P_NORTH] = ro_flit[N-MESH_X][P_SOUTH];
        assign ri_vld[N][P_NORTH]  = ro_vld[N-MESH_X][P_SOUTH];
        assign ro_rdy[N][P_NORTH]  = ri_rdy[N-MESH_X][P_SOUTH];
      end else begin : g_n_edge
        assign ri_flit[N][P_NORTH] = '0;
        assign ri_vld[N][P_NORTH]  = 1'b0;
        assign ro_rdy[N][P_NORTH]  = 1'b1;
      end
      if (y < MESH_Y - 1) begin : g_s
        assign ri_flit[N][P_SOUTH] = ro_flit[N+MESH_X][P_NORTH];
        assign ri_vld[N][P_SOUTH]  = ro_vld[N+MESH_X][P_NORTH];
        assign ro_rdy[N][P_SOUTH]  = ri_rdy[N+MESH_X][P_NORTH];
      end else begin : g_s_edge
        assign ri_flit[N][P_SOUTH] = '0;
        assign ri_vld[N][P_SOUTH]  = 1'b0;
        assign ro_rdy[N][P_SOUTH]  = 1'b1;
      end
      if (x < MESH_X - 1) begin : g_e
        assign ri_flit[N][P_EAST] = ro_flit[N+1][P_WEST];
        assign ri_vld[N][P_EAST]  = ro_vld[N+1][P_WEST];
        assign ro_rdy[N][P_EAST]  = ri_rdy[N+1][P_WEST];
      end else begin : g_e_edge
        assign ri_flit[N][P_EAST] = '0;
        assign ri_vld[N][P_EAST]  = 1'b0;
        assign ro_rdy[N][P_EAST]  = 1'b1;
      end
      if (x > 0) begin : g_w
        assign ri_flit[N][P_WEST] = ro_flit[N-1][P_EAST];
        assign ri_vld[N][P_WEST]  = ro_vld[N-1][P_EAST];
        assign ro_rdy[N][P_WEST]  = ri_rdy[N-1][P_EAST];
      end else begin : g_w_edge
        assign ri_flit[N][P_WEST] = '0;
        assign ri_vld[N][P_WEST]  = 1'b0;
        assign ro_rdy[N][P_WEST]  = 1'b1;
      end
    end
  end
endmodule
