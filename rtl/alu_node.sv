// Arithmetic core of the mesh: one finite-field unit with its network
// interface (the Adder, MUL, Squarer and Inverter nodes of Figure 3).
//
// KIND selects the unit: U_ADDER (ff_adder, OP_ADD / OP_SUB), U_MUL
// (ff_multiplier), U_SQR (ff_squarer) or U_INV (ff_inverter). The node
// accepts one OPER flit when idle, starts its unit on the operands carried
// in the flit, and when the unit is done sends a WB flit with the result to
// the register bank that holds the destination register rd, keeping tag and
// return address so that the bank can acknowledge the requester. It takes a
// new OPER only after its WB has left, so a busy unit pushes back on the
// network. prime_mode and modulus are the processor-wide field settings.
//
// The units and their placement are the paper's; the node protocol is this
// design's choice.
module alu_node #(
  parameter ecc_pkg::unit_kind_e KIND = ecc_pkg::U_MUL
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              prime_mode,
  input  logic [ecc_pkg::FW-1:0] modulus,
  input  ecc_pkg::flit_t    rx_flit,
  input  logic              rx_valid,
  output logic              rx_ready,
  output ecc_pkg::flit_t    tx_flit,
  output logic              tx_valid,
  input  logic              tx_ready,
  output logic [31:0]       ops_done
);
  import ecc_pkg::*;

  typedef enum logic [1:0] {A_IDLE, A_BUSY, A_SEND} astate_e;
  astate_e       st;
  flit_t         req;
  logic          start, u_done;
  logic [FW-1:0] u_result;

  assign rx_ready = (st == A_IDLE);
  assign start    = (st == A_IDLE) && rx_valid;

  if (KIND == U_ADDER) begin : g_add
    ff_adder #(.W(FW)) u_unit (
      .clk, .rst_n, .start, .prime_mode, .sub(rx_flit.op == OP_SUB), .modulus,
      .a(rx_flit.a), .b(rx_flit.b), .done(u_done), .result(u_result));
  end else if (KIND == U_MUL) begin : g_mul
    logic busy_unused;
    ff_multiplier #(.W(FW)) u_unit (
      .clk, .rst_n, .start, .prime_mode, .modulus,
      .a(rx_flit.a), .b(rx_flit.b), .busy(busy_unused), .done(u_done), .result(u_result));
  end else if (KIND == U_SQR) begin : g_sqr
    logic busy_unused;
    ff_squarer #(.W(FW)) u_unit (
      .clk, .rst_n, .start, .prime_mode, .modulus,
      .a(rx_flit.a), .busy(busy_unused), .done(u_done), .result(u_result));
  end else begin : g_inv
    logic busy_unused;
    ff_inverter #(.W(FW)) u_unit (
      .clk, .rst_n, .start, .prime_mode, .modulus,
      .a(rx_flit.a), .busy(busy_unused), .done(u_done), .result(u_result));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; req <= '0; tx_valid <= 1'b0; tx_flit <= '0; ops_done <= '0;
    end else begin
      unique case (st)
        A_IDLE: if (rx_valid) begin
          req <= rx_flit;
          st  <= A_BUSY;
        end
        A_BUSY: if (u_done) begin
          tx_flit       <= req;
          tx_flit.ptype <= PK_WB;
          tx_flit.dst   <= bank_of(req.rd);
          tx_flit.a     <= u_result;
          tx_valid      <= 1'b1;
          ops_done      <= ops_done + 1;
          st            <= A_SEND;
        end
        A_SEND: if (tx_ready) begin
          tx_valid <= 1'b0;
          st       <= A_IDLE;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  a_oper: assert property (@(posedge clk) disable iff (!rst_n)
    rx_valid |-> rx_flit.ptype == PK_OPER && rx_flit.have_a && rx_flit.have_b);
endmodule
