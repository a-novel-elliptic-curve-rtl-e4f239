// Register-bank core: one of the two "Registers" nodes of the mesh.
//
// The processor's 16 field registers are split over two banks by the low
// address bit (bank 0 holds the even registers, bank 1 the odd ones), so a
// bank holds NREGS/2 registers of FW bits. A bank serves four packets:
//   EXEC  - operands of a field operation. The bank fills in each operand
//           it owns (a from ra, b from rb). If both are now present it turns
//           the flit into an OPER and sends it to the arithmetic unit named
//           in the flit; otherwise it forwards it to the other bank.
//   WB / WRITE - write field a into register rd, then send an ACK with the
//           same tag back to the requester (ret).
//   READ  - send register ra back to the requester as RDATA.
// Each incoming flit produces exactly one outgoing flit; the bank accepts a
// new flit whenever its one-flit output register is empty or draining, so
// it handles one flit per cycle. Registers reset to zero.
//
// The paper says only that the register bank stores the values of each
// stage of the binary method and places two register cores in the mesh;
// the split by address bit and the packet protocol are this design's.
module reg_bank #(
  parameter logic BANK = 1'b0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  ecc_pkg::flit_t rx_flit,
  input  logic           rx_valid,
  output logic           rx_ready,
  output ecc_pkg::flit_t tx_flit,
  output logic           tx_valid,
  input  logic           tx_ready
);
  import ecc_pkg::*;

  localparam coord_t ME    = BANK ? N_REG1 : N_REG0;
  localparam coord_t OTHER = BANK ? N_REG0 : N_REG1;
  localparam int unsigned NB = NREGS / 2;

  logic [FW-1:0] regs [NB];
  flit_t         f_out;
  logic          accept;

  assign rx_ready = !tx_valid || tx_ready;
  assign accept   = rx_valid && rx_ready;

  always_comb begin
    f_out = rx_flit;
    unique case (rx_flit.ptype)
      PK_EXEC: begin
        if (rx_flit.ra[0] == BANK && !rx_flit.have_a) begin
          f_out.a = regs[rx_flit.ra[3:1]]; f_out.have_a = 1'b1;
        end
        if (rx_flit.rb[0] == BANK && !rx_flit.have_b) begin
          f_out.b = regs[rx_flit.rb[3:1]]; f_out.have_b = 1'b1;
        end
        if (f_out.have_a && f_out.have_b) begin
          f_out.ptype = PK_OPER;
          f_out.dst   = rx_flit.unit;
        end else begin
          f_out.dst = OTHER;
        end
      end
      PK_WB, PK_WRITE: begin
        f_out.ptype = PK_ACK;
        f_out.dst   = rx_flit.ret;
      end
      PK_READ: begin
        f_out.ptype = PK_RDATA;
        f_out.dst   = rx_flit.ret;
        f_out.a     = regs[rx_flit.ra[3:1]];
      end
      default: f_out.dst = rx_flit.ret;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_valid <= 1'b0;
      tx_flit  <= '0;
      for (int i = 0; i < NB; i++) regs[i] <= '0;
    end else begin
      if (accept) begin
        tx_valid <= 1'b1;
        tx_flit  <= f_out;
        if (rx_flit.ptype == PK_WB || rx_flit.ptype == PK_WRITE)
          regs[rx_flit.rd[3:1]] <= rx_flit.a;
      end else if (tx_ready) begin
        tx_valid <= 1'b0;
      end
    end
  end

  a_for_me: assert property (@(posedge clk) disable iff (!rst_n)
    rx_valid |-> rx_flit.dst == ME);
  a_known: assert property (@(posedge clk) disable iff (!rst_n)
    rx_valid |-> rx_flit.ptype inside {PK_EXEC, PK_WB, PK_WRITE, PK_READ});
  a_wb_mine: assert property (@(posedge clk) disable iff (!rst_n)
    rx_valid && rx_flit.ptype inside {PK_WB, PK_WRITE} |-> rx_flit.rd[0] == BANK);
endmodule
