// Elliptic-curve point-multiplication processor on a 4x3 mesh NoC.
//
// Computes Q = kP on a curve over GF(2^FW) (prime_mode = 0, Lopez-Dahab
// coordinates, curve y^2 + xy = x^3 + ax^2 + b, reduction polynomial
// f(x) = x^FW + modulus) or over GF(p) (prime_mode = 1, Jacobian
// coordinates, curve y^2 = x^3 + ax + b, p = modulus) by the binary method.
// The twelve cores sit in the mesh as in the paper's Figure 3:
//
//     (0,0) M-Add     (1,0) Control  (2,0) Control   (3,0) Adder
//     (0,1) M-Double  (1,1) MUL      (2,1) MUL       (3,1) Squarer
//     (0,2) M-XY      (1,2) Registers(2,2) Registers (3,2) Inverter
//
// The control unit at (2,0) is the host interface and initialisation
// engine (io_ctrl); the one at (1,0) runs the binary method (scalar_ctrl).
// M-Add, M-Double and M-XY are point_seq instances holding the point
// addition, doubling and affine-conversion microprograms; they issue field
// operations to the arithmetic cores, whose operands and results travel
// through the two register banks.
//
// Host interface: with prime_mode and modulus held stable, pulse start for
// one cycle with k, px, py, curve_a and curve_b valid; busy stays high and
// done pulses when qx, qy hold the affine result. n_double and n_add count
// the point operations of the last runs.
module ecc_noc_top #(
  parameter int unsigned FIFO_DEPTH = 2,
  parameter int unsigned MAX_INFLIGHT = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   prime_mode,
  input  logic [ecc_pkg::FW-1:0] modulus,
  input  logic                   start,
  input  logic [ecc_pkg::FW-1:0] k,
  input  logic [ecc_pkg::FW-1:0] px,
  input  logic [ecc_pkg::FW-1:0] py,
  input  logic [ecc_pkg::FW-1:0] curve_a,
  input  logic [ecc_pkg::FW-1:0] curve_b,
  output logic                   busy,
  output logic                   done,
  output logic [ecc_pkg::FW-1:0] qx,
  output logic [ecc_pkg::FW-1:0] qy,
  output logic [31:0]            n_double,
  output logic [31:0]            n_add
);
  import ecc_pkg::*;

  flit_t tx_flit  [NODES];
  logic  tx_valid [NODES];
  logic  tx_ready [NODES];
  flit_t rx_flit  [NODES];
  logic  rx_valid [NODES];
  logic  rx_ready [NODES];

  noc_mesh #(.DEPTH(FIFO_DEPTH)) u_mesh (
    .clk, .rst_n,
    .core_tx_flit(tx_flit), .core_tx_valid(tx_valid), .core_tx_ready(tx_ready),
    .core_rx_flit(rx_flit), .core_rx_valid(rx_valid), .core_rx_ready(rx_ready)
  );

  localparam int unsigned I_MADD = node_id(N_MADD), I_CU0 = node_id(N_CU0);
  localparam int unsigned I_CU1 = node_id(N_CU1), I_ADDER = node_id(N_ADDER);
  localparam int unsigned I_MDBL = node_id(N_MDBL), I_MUL0 = node_id(N_MUL0);
  localparam int unsigned I_MUL1 = node_id(N_MUL1), I_SQR = node_id(N_SQR);
  localparam int unsigned I_MXY = node_id(N_MXY), I_REG0 = node_id(N_REG0);
  localparam int unsigned I_REG1 = node_id(N_REG1), I_INV = node_id(N_INV);

  logic [31:0] seq_ops [3];
  logic [31:0] seq_stalls [3];
  logic [31:0] unit_ops [5];

  io_ctrl u_io (
    .clk, .rst_n, .start, .k, .px, .py, .curve_a, .curve_b, .busy, .done, .qx, .qy,
    .rx_flit(rx_flit[I_CU1]), .rx_valid(rx_valid[I_CU1]), .rx_ready(rx_ready[I_CU1]),
    .tx_flit(tx_flit[I_CU1]), .tx_valid(tx_valid[I_CU1]), .tx_ready(tx_ready[I_CU1]));

  scalar_ctrl u_cu (
    .clk, .rst_n,
    .rx_flit(rx_flit[I_CU0]), .rx_valid(rx_valid[I_CU0]), .rx_ready(rx_ready[I_CU0]),
    .tx_flit(tx_flit[I_CU0]), .tx_valid(tx_valid[I_CU0]), .tx_ready(tx_ready[I_CU0]),
    .n_double, .n_add);

  point_seq #(.KIND(SEQ_ADD), .MAXO(MAX_INFLIGHT)) u_madd (
    .clk, .rst_n, .prime_mode,
    .rx_flit(rx_flit[I_MADD]), .rx_valid(rx_valid[I_MADD]), .rx_ready(rx_ready[I_MADD]),
    .tx_flit(tx_flit[I_MADD]), .tx_valid(tx_valid[I_MADD]), .tx_ready(tx_ready[I_MADD]),
    .ops_issued(seq_ops[0]), .hazard_stalls(seq_stalls[0]));

  point_seq #(.KIND(SEQ_DBL), .MAXO(MAX_INFLIGHT)) u_mdbl (
    .clk, .rst_n, .prime_mode,
    .rx_flit(rx_flit[I_MDBL]), .rx_valid(rx_valid[I_MDBL]), .rx_ready(rx_ready[I_MDBL]),
    .tx_flit(tx_flit[I_MDBL]), .tx_valid(tx_valid[I_MDBL]), .tx_ready(tx_ready[I_MDBL]),
    .ops_issued(seq_ops[1]), .hazard_stalls(seq_stalls[1]));

  point_seq #(.KIND(SEQ_XY), .MAXO(MAX_INFLIGHT)) u_mxy (
    .clk, .rst_n, .prime_mode,
    .rx_flit(rx_flit[I_MXY]), .rx_valid(rx_valid[I_MXY]), .rx_ready(rx_ready[I_MXY]),
    .tx_flit(tx_flit[I_MXY]), .tx_valid(tx_valid[I_MXY]), .tx_ready(tx_ready[I_MXY]),
    .ops_issued(seq_ops[2]), .hazard_stalls(seq_stalls[2]));

  alu_node #(.KIND(U_ADDER)) u_adder (
    .clk, .rst_n, .prime_mode, .modulus,
    .rx_flit(rx_flit[I_ADDER]), .rx_valid(rx_valid[I_ADDER]), .rx_ready(rx_ready[I_ADDER]),
    .tx_flit(tx_flit[I_ADDER]), .tx_valid(tx_valid[I_ADDER]), .tx_ready(tx_ready[I_ADDER]),
    .ops_done(unit_ops[0]));

  alu_node #(.KIND(U_MUL)) u_mul0 (
    .clk, .rst_n, .prime_mode, .modulus,
    .rx_flit(rx_flit[I_MUL0]), .rx_valid(rx_valid[I_MUL0]), .rx_ready(rx_ready[I_MUL0]),
    .tx_flit(tx_flit[I_MUL0]), .tx_valid(tx_valid[I_MUL0]), .tx_ready(tx_ready[I_MUL0]),
    .ops_done(unit_ops[1]));

  alu_node #(.KIND(U_MUL)) u_mul1 (
    .clk, .rst_n, .prime_mode, .modulus,
    .rx_flit(rx_flit[I_MUL1]), .rx_valid(rx_valid[I_MUL1]), .rx_ready(rx_ready[I_MUL1]),
    .tx_flit(tx_flit[I_MUL1]), .tx_valid(tx_valid[I_MUL1]), .tx_ready(tx_ready[I_MUL1]),
    .ops_done(unit_ops[2]));

  alu_node #(.KIND(U_SQR)) u_sqr (
    .clk, .rst_n, .prime_mode, .modulus,
    .rx_flit(rx_flit[I_SQR]), .rx_valid(rx_valid[I_SQR]), .rx_ready(rx_ready[I_SQR]),
    .tx_flit(tx_flit[I_SQR]), .tx_valid(tx_valid[I_SQR]), .tx_ready(tx_ready[I_SQR]),
    .ops_done(unit_ops[3]));

  alu_node #(.KIND(U_INV)) u_inv (
    .clk, .rst_n, .prime_mode, .modulus,
    .rx_flit(rx_flit[I_INV]), .rx_valid(rx_valid[I_INV]), .rx_ready(rx_ready[I_INV]),
    .tx_flit(tx_flit[I_INV]), .tx_valid(tx_valid[I_INV]), .tx_ready(tx_ready[I_INV]),
    .ops_done(unit_ops[4]));

  reg_bank #(.BANK(1'b0)) u_reg0 (
    .clk, .rst_n,
    .rx_flit(rx_flit[I_REG0]), .rx_valid(rx_valid[I_REG0]), .rx_ready(rx_ready[I_REG0]),
    .tx_flit(tx_flit[I_REG0]), .tx_valid(tx_valid[I_REG0]), .tx_ready(tx_ready[I_REG0]));

  reg_bank #(.BANK(1'b1)) u_reg1 (
    .clk, .rst_n,
    .rx_flit(rx_flit[I_REG1]), .rx_valid(rx_valid[I_REG1]), .rx_ready(rx_ready[I_REG1]),
    .tx_flit(tx_flit[I_REG1]), .tx_valid(tx_valid[I_REG1]), .tx_ready(tx_ready[I_REG1]));
endmodule
