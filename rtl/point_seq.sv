// Point-operation sequencer: the M-Add, M-Double and M-XY cores of the mesh
// (EC Add, EC Double and EC Convertor of the processor block diagram).
//
// KIND selects the routine held in the sequencer's microprogram:
//   SEQ_DBL  Q <- 2Q            (Jacobian in GF(p), Lopez-Dahab in GF(2^m))
//   SEQ_ADD  Q <- Q + P         (mixed: Q projective, P affine)
//   SEQ_XY   (X,Y,Z) -> affine  (one inversion)
// Each routine is a straight list of field operations rd = ra op rb on the
// register map of ecc_pkg. On a START flit the sequencer issues them in
// program order as EXEC flits: an EXEC goes to the bank that holds ra and
// names the arithmetic unit that is to run it (multiplications alternate
// between the two MUL cores). Up to MAXO operations are in flight at once,
// so independent multiplications, squarings and additions run in parallel
// on different cores. A scoreboard of the in-flight operations stalls an
// operation that reads or writes a register an earlier in-flight operation
// writes, or that writes a register an in-flight operation still reads.
// Each operation ends with an ACK from the bank that wrote its result;
// the ACK's tag frees its scoreboard slot. When all operations have been
// acknowledged, a DONE flit goes back to whoever sent START.
//
// Timing: at most one EXEC leaves per cycle; tx_valid/tx_flit hold until
// tx_ready. rx_ready is always high: every flit it receives (START, ACK) is
// taken in the cycle it arrives.
//
// The paper gives the three routines by name, the coordinate systems
// (Jacobian for GF(p), Lopez-Dahab for GF(2^m)) and that field operations
// run in parallel; the formulas are the standard ones for those coordinate
// systems, and the microprograms, scoreboard and packet protocol are this
// design's choices.
module point_seq #(
  parameter ecc_pkg::seq_kind_e KIND = ecc_pkg::SEQ_DBL,
  parameter int unsigned        MAXO = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           prime_mode,
  input  ecc_pkg::flit_t rx_flit,
  input  logic           rx_valid,
  output logic           rx_ready,
  output ecc_pkg::flit_t tx_flit,
  output logic           tx_valid,
  input  logic           tx_ready,
  output logic [31:0]    ops_issued,
  output logic [31:0]    hazard_stalls
);
  import ecc_pkg::*;

  localparam coord_t ME = (KIND == SEQ_ADD) ? N_MADD : (KIND == SEQ_DBL) ? N_MDBL : N_MXY;

  function automatic instr_t I(ff_op_e op, reg_addr_t rd, reg_addr_t ra, reg_addr_t rb);
    return '{op: op, rd: rd, ra: ra, rb: rb};
  endfunction

  // Program length for (routine, field).
  function automatic int unsigned prog_len(logic prime);
    unique case (KIND)
      SEQ_DBL: return prime ? 23 : 14;
      SEQ_ADD: return prime ? 18 : 23;
      default: return prime ? 5  : 4;
    endcase
  endfunction

  // Microprograms. Registers: X,Y,Z = Q; PX,PY = P; A,B = curve; T0..T8 temps.
  function automatic instr_t prog(logic prime, int unsigned pc);
    instr_t p [23];
    for (int i = 0; i < 23; i++) p[i] = I(OP_NOP, T0, T0, T0);
    if (KIND == SEQ_DBL && prime) begin
      // Jacobian doubling, any a: M = 3X^2 + aZ^4, S = 4XY^2,
      // X3 = M^2 - 2S, Y3 = M(S - X3) - 8Y^4, Z3 = 2YZ.
      p[0]  = I(OP_SQR, T0, R_X, R_X);   // XX
      p[1]  = I(OP_SQR, T1, R_Y, R_Y);   // YY
      p[2]  = I(OP_SQR, T2, R_Z, R_Z);   // ZZ
      p[3]  = I(OP_MUL, T3, R_X, T1);    // X*YY
      p[4]  = I(OP_SQR, T1, T1, T1);     // YYYY
      p[5]  = I(OP_SQR, T2, T2, T2);     // Z^4
      p[6]  = I(OP_ADD, T4, T0, T0);     // 2XX
      p[7]  = I(OP_MUL, T2, T2, R_A);    // a Z^4
      p[8]  = I(OP_ADD, T0, T4, T0);     // 3XX
      p[9]  = I(OP_ADD, T3, T3, T3);     // 2XYY
      p[10] = I(OP_ADD, T0, T0, T2);     // M
      p[11] = I(OP_ADD, T3, T3, T3);     // S
      p[12] = I(OP_MUL, R_Z, R_Y, R_Z);  // YZ
      p[13] = I(OP_SQR, T5, T0, T0);     // M^2
      p[14] = I(OP_ADD, T6, T3, T3);     // 2S
      p[15] = I(OP_ADD, R_Z, R_Z, R_Z);  // Z3
      p[16] = I(OP_SUB, R_X, T5, T6);    // X3
      p[17] = I(OP_ADD, T1, T1, T1);     // 2YYYY
      p[18] = I(OP_SUB, T7, T3, R_X);    // S - X3
      p[19] = I(OP_ADD, T1, T1, T1);     // 4YYYY
      p[20] = I(OP_MUL, T7, T0, T7);     // M(S - X3)
      p[21] = I(OP_ADD, T1, T1, T1);     // 8YYYY
      p[22] = I(OP_SUB, R_Y, T7, T1);    // Y3
    end else if (KIND == SEQ_DBL) begin
      // Lopez-Dahab doubling: Z3 = X^2 Z^2, X3 = X^4 + bZ^4,
      // Y3 = bZ^4 Z3 + X3 (aZ3 + Y^2 + bZ^4).
      p[0]  = I(OP_SQR, T0, R_X, R_X);   // X^2
      p[1]  = I(OP_SQR, T1, R_Z, R_Z);   // Z^2
      p[2]  = I(OP_SQR, T2, R_Y, R_Y);   // Y^2
      p[3]  = I(OP_MUL, R_Z, T0, T1);    // Z3
      p[4]  = I(OP_SQR, T0, T0, T0);     // X^4
      p[5]  = I(OP_SQR, T1, T1, T1);     // Z^4
      p[6]  = I(OP_MUL, T1, T1, R_B);    // bZ^4
      p[7]  = I(OP_ADD, R_X, T0, T1);    // X3
      p[8]  = I(OP_MUL, T3, R_A, R_Z);   // aZ3
      p[9]  = I(OP_MUL, T4, T1, R_Z);    // bZ^4 Z3
      p[10] = I(OP_ADD, T3, T3, T2);
      p[11] = I(OP_ADD, T3, T3, T1);
      p[12] = I(OP_MUL, T3, R_X, T3);
      p[13] = I(OP_ADD, R_Y, T4, T3);    // Y3
    end else if (KIND == SEQ_ADD && prime) begin
      // Jacobian + affine: U2 = x2 Z^2, S2 = y2 Z^3, H = U2 - X, r = S2 - Y,
      // X3 = r^2 - H^3 - 2XH^2, Y3 = r(XH^2 - X3) - YH^3, Z3 = ZH.
      p[0]  = I(OP_SQR, T0, R_Z, R_Z);   // ZZ
      p[1]  = I(OP_MUL, T1, R_PX, T0);   // U2
      p[2]  = I(OP_MUL, T2, R_Z, T0);    // Z^3
      p[3]  = I(OP_SUB, T1, T1, R_X);    // H
      p[4]  = I(OP_MUL, T2, R_PY, T2);   // S2
      p[5]  = I(OP_SQR, T3, T1, T1);     // HH
      p[6]  = I(OP_MUL, R_Z, R_Z, T1);   // Z3
      p[7]  = I(OP_SUB, T2, T2, R_Y);    // r
      p[8]  = I(OP_MUL, T4, T1, T3);     // HHH
      p[9]  = I(OP_MUL, T5, R_X, T3);    // V
      p[10] = I(OP_SQR, T6, T2, T2);     // r^2
      p[11] = I(OP_ADD, T7, T5, T5);     // 2V
      p[12] = I(OP_SUB, T6, T6, T4);     // r^2 - HHH
      p[13] = I(OP_MUL, T8, R_Y, T4);    // Y HHH
      p[14] = I(OP_SUB, R_X, T6, T7);    // X3
      p[15] = I(OP_SUB, T5, T5, R_X);    // V - X3
      p[16] = I(OP_MUL, T5, T2, T5);     // r(V - X3)
      p[17] = I(OP_SUB, R_Y, T5, T8);    // Y3
    end else if (KIND == SEQ_ADD) begin
      // Lopez-Dahab + affine: A = y2 Z^2 + Y, B = x2 Z + X, C = ZB,
      // D = B^2 (C + aZ^2), Z3 = C^2, E = AC, X3 = A^2 + D + E,
      // F = X3 + x2 Z3, G = (x2 + y2) Z3^2, Y3 = (E + Z3) F + G.
      p[0]  = I(OP_MUL, T0, R_Z, R_PX);  // x2 Z
      p[1]  = I(OP_SQR, T1, R_Z, R_Z);   // Z^2
      p[2]  = I(OP_ADD, T0, R_X, T0);    // B
      p[3]  = I(OP_MUL, T2, T1, R_PY);   // y2 Z^2
      p[4]  = I(OP_MUL, T3, R_Z, T0);    // C
      p[5]  = I(OP_ADD, T2, R_Y, T2);    // A
      p[6]  = I(OP_MUL, T1, R_A, T1);    // aZ^2
      p[7]  = I(OP_SQR, R_Z, T3, T3);    // Z3
      p[8]  = I(OP_MUL, T4, T3, T2);     // E
      p[9]  = I(OP_ADD, T1, T3, T1);     // C + aZ^2
      p[10] = I(OP_SQR, T5, T0, T0);     // B^2
      p[11] = I(OP_MUL, T5, T5, T1);     // D
      p[12] = I(OP_SQR, T6, T2, T2);     // A^2
      p[13] = I(OP_ADD, T5, T5, T6);
      p[14] = I(OP_ADD, R_X, T5, T4);    // X3
      p[15] = I(OP_MUL, T6, R_PX, R_Z);  // x2 Z3
      p[16] = I(OP_ADD, T6, T6, R_X);    // F
      p[17] = I(OP_SQR, T7, R_Z, R_Z);   // Z3^2
      p[18] = I(OP_ADD, T4, T4, R_Z);    // E + Z3
      p[19] = I(OP_MUL, T4, T4, T6);     // (E + Z3) F
      p[20] = I(OP_ADD, T8, R_PX, R_PY); // x2 + y2
      p[21] = I(OP_MUL, T8, T7, T8);     // G
      p[22] = I(OP_ADD, R_Y, T4, T8);    // Y3
    end else if (prime) begin
      // Jacobian to affine: x = X/Z^2, y = Y/Z^3.
      p[0] = I(OP_INV, T0, R_Z, R_Z);
      p[1] = I(OP_SQR, T1, T0, T0);
      p[2] = I(OP_MUL, R_X, R_X, T1);
      p[3] = I(OP_MUL, T1, T1, T0);
      p[4] = I(OP_MUL, R_Y, R_Y, T1);
    end else begin
      // Lopez-Dahab to affine: x = X/Z, y = Y/Z^2.
      p[0] = I(OP_INV, T0, R_Z, R_Z);
      p[1] = I(OP_MUL, R_X, R_X, T0);
      p[2] = I(OP_SQR, T1, T0, T0);
      p[3] = I(OP_MUL, R_Y, R_Y, T1);
    end
    return p[pc];
  endfunction

  typedef struct packed {
    logic      valid;
    reg_addr_t rd;
    reg_addr_t ra;
    reg_addr_t rb;
  } slot_t;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FINISH} sstate_e;

  sstate_e        st;
  logic [4:0]     pc;
  slot_t          slots [MAXO];
  coord_t         requester;
  logic           mul_sel;
  instr_t         cur;
  logic           hazard, have_slot, tx_free, issue, all_idle;
  logic [TAGW-1:0] free_slot;

  assign rx_ready = 1'b1;
  assign tx_free  = !tx_valid || tx_ready;
  assign cur      = prog(prime_mode, int'(pc));

  always_comb begin
    hazard    = 1'b0;
    have_slot = 1'b0;
    free_slot = '0;
    all_idle  = 1'b1;
    for (int s = MAXO - 1; s >= 0; s--) begin
      if (slots[s].valid) begin
        all_idle = 1'b0;
        if (slots[s].rd == cur.ra || slots[s].rd == cur.rb || slots[s].rd == cur.rd ||
            slots[s].ra == cur.rd || slots[s].rb == cur.rd)
          hazard = 1'b1;
      end else begin
        have_slot = 1'b1;
        free_slot = TAGW'(s);
      end
    end
  end

  assign issue = (st == S_RUN) && (32'(pc) < prog_len(prime_mode)) && !hazard && have_slot && tx_free;

  function automatic coord_t unit_for(ff_op_e op, logic sel);
    unique case (op)
      OP_MUL:  return sel ? N_MUL1 : N_MUL0;
      OP_SQR:  return N_SQR;
      OP_INV:  return N_INV;
      default: return N_ADDER;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pc <= '0; requester <= '0; mul_sel <= 1'b0;
      tx_valid <= 1'b0; tx_flit <= '0; ops_issued <= '0; hazard_stalls <= '0;
      for (int s = 0; s < MAXO; s++) slots[s] <= '0;
    end else begin
      if (tx_valid && tx_ready) tx_valid <= 1'b0;

      if (rx_valid && rx_flit.ptype == PK_ACK)
        slots[rx_flit.tag].valid <= 1'b0;

      unique case (st)
        S_IDLE: if (rx_valid && rx_flit.ptype == PK_START) begin
          st        <= S_RUN;
          pc        <= '0;
          requester <= rx_flit.ret;
        end
        S_RUN: begin
          if (issue) begin
            tx_flit        <= '0;
            tx_flit.dst    <= bank_of(cur.ra);
            tx_flit.ret    <= ME;
            tx_flit.unit   <= unit_for(cur.op, mul_sel);
            tx_flit.ptype  <= PK_EXEC;
            tx_flit.op     <= cur.op;
            tx_flit.rd     <= cur.rd;
            tx_flit.ra     <= cur.ra;
            tx_flit.rb     <= cur.rb;
            tx_flit.tag    <= free_slot;
            tx_valid       <= 1'b1;
            slots[free_slot] <= '{valid: 1'b1, rd: cur.rd, ra: cur.ra, rb: cur.rb};
            if (cur.op == OP_MUL) mul_sel <= !mul_sel;
            pc         <= pc + 1'b1;
            ops_issued <= ops_issued + 1;
          end else if (32'(pc) < prog_len(prime_mode) && hazard) begin
            hazard_stalls <= hazard_stalls + 1;
          end
          if (32'(pc) >= prog_len(prime_mode) && all_idle && !(rx_valid && rx_flit.ptype == PK_ACK))
            st <= S_FINISH;
        end
        S_FINISH: if (tx_free) begin
          tx_flit       <= '0;
          tx_flit.dst   <= requester;
          tx_flit.ret   <= ME;
          tx_flit.ptype <= PK_DONE;
          tx_valid      <= 1'b1;
          st            <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_ack_known: assert property (@(posedge clk) disable iff (!rst_n)
    rx_valid && rx_flit.ptype == PK_ACK |-> slots[rx_flit.tag].valid);
endmodule
