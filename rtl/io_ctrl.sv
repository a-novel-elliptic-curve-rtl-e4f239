// Initialisation and read-out controller: the second control unit of the
// mesh, the processor's host interface.
//
// On a start pulse it captures k, the base point P = (px, py) and the curve
// coefficients a and b, and performs the initialisation step of the point
// multiplication over the network: seven WRITE flits set Q = (px, py, 1),
// the copy of P, a and b in the register banks. When all seven ACKs are
// back it sends START with k to the scalar controller, waits for its DONE,
// then reads the affine result x = X and y = Y with two READ flits. When
// both RDATA flits have arrived, qx and qy hold the result and done pulses
// for one cycle. busy is high from start to done; a start while busy is
// ignored. rx_ready is always high: the controller only receives replies
// to flits it sent itself, and takes each in one cycle.
//
// The paper's control unit generates the initialisation and the conversion
// steps; placing them in the second control-unit node of Figure 3 and the
// host handshake are this design's choices.
module io_ctrl (
  input  logic                   clk,
  input  logic                   rst_n,
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
  input  ecc_pkg::flit_t         rx_flit,
  input  logic                   rx_valid,
  output logic                   rx_ready,
  output ecc_pkg::flit_t         tx_flit,
  output logic                   tx_valid,
  input  logic                   tx_ready
);
  import ecc_pkg::*;

  typedef enum logic [2:0] {I_IDLE, I_WRITE, I_WACK, I_RUN, I_WRUN, I_READ, I_WREAD} istate_e;

  istate_e       st;
  logic [FW-1:0] k_q, px_q, py_q, a_q, b_q;
  logic [2:0]    widx, acks;
  logic [1:0]    ridx, rcount;
  reg_addr_t     wreg;
  logic [FW-1:0] wval;

  assign rx_ready = 1'b1;

  always_comb begin
    unique case (widx)
      3'd0:    begin wreg = R_X;  wval = px_q;   end
      3'd1:    begin wreg = R_Y;  wval = py_q;   end
      3'd2:    begin wreg = R_Z;  wval = FW'(1); end
      3'd3:    begin wreg = R_PX; wval = px_q;   end
      3'd4:    begin wreg = R_PY; wval = py_q;   end
      3'd5:    begin wreg = R_A;  wval = a_q;    end
      default: begin wreg = R_B;  wval = b_q;    end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= I_IDLE; k_q <= '0; px_q <= '0; py_q <= '0; a_q <= '0; b_q <= '0;
      widx <= '0; acks <= '0; ridx <= '0; rcount <= '0;
      busy <= 1'b0; done <= 1'b0; qx <= '0; qy <= '0;
      tx_valid <= 1'b0; tx_flit <= '0;
    end else begin
      done <= 1'b0;
      if (tx_valid && tx_ready) tx_valid <= 1'b0;
      unique case (st)
        I_IDLE: if (start) begin
          k_q <= k; px_q <= px; py_q <= py; a_q <= curve_a; b_q <= curve_b;
          widx <= '0; acks <= '0; busy <= 1'b1;
          st <= I_WRITE;
        end
        I_WRITE: begin
          if (rx_valid && rx_flit.ptype == PK_ACK) acks <= acks + 1'b1;
          if (!tx_valid || tx_ready) begin
            tx_flit       <= '0;
            tx_flit.dst   <= bank_of(wreg);
            tx_flit.ret   <= N_CU1;
            tx_flit.ptype <= PK_WRITE;
            tx_flit.rd    <= wreg;
            tx_flit.a     <= wval;
            tx_flit.tag   <= widx;
            tx_valid      <= 1'b1;
            widx          <= widx + 1'b1;
            if (widx == 3'd6) st <= I_WACK;
          end
        end
        I_WACK: begin
          if (rx_valid && rx_flit.ptype == PK_ACK) acks <= acks + 1'b1;
          if (acks == 3'd7) st <= I_RUN;
        end
        I_RUN: if (!tx_valid || tx_ready) begin
          tx_flit       <= '0;
          tx_flit.dst   <= N_CU0;
          tx_flit.ret   <= N_CU1;
          tx_flit.ptype <= PK_START;
          tx_flit.a     <= k_q;
          tx_valid      <= 1'b1;
          st            <= I_WRUN;
        end
        I_WRUN: if (rx_valid && rx_flit.ptype == PK_DONE) begin
          ridx <= '0; rcount <= '0;
          st   <= I_READ;
        end
        I_READ: begin
          if (rx_valid && rx_flit.ptype == PK_RDATA) begin
            rcount <= rcount + 1'b1;
            if (rx_flit.tag == '0) qx <= rx_flit.a; else qy <= rx_flit.a;
          end
          if (ridx != 2'd2 && (!tx_valid || tx_ready)) begin
            tx_flit       <= '0;
            tx_flit.dst   <= bank_of(ridx[0] ? R_Y : R_X);
            tx_flit.ret   <= N_CU1;
            tx_flit.ptype <= PK_READ;
            tx_flit.ra    <= ridx[0] ? R_Y : R_X;
            tx_flit.tag   <= TAGW'(ridx);
            tx_valid      <= 1'b1;
            ridx          <= ridx + 1'b1;
          end
          if (ridx == 2'd2) st <= I_WREAD;
        end
        I_WREAD: begin
          if (rx_valid && rx_flit.ptype == PK_RDATA) begin
            if (rx_flit.tag == '0) qx <= rx_flit.a; else qy <= rx_flit.a;
            if (rcount == 2'd1) begin
              busy <= 1'b0; done <= 1'b1; st <= I_IDLE;
            end
            rcount <= rcount + 1'b1;
          end else if (rcount == 2'd2) begin
            busy <= 1'b0; done <= 1'b1; st <= I_IDLE;
          end
        end
        default: st <= I_IDLE;
      endcase
    end
  end
endmodule
