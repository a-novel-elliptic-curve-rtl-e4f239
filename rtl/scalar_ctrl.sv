// Scalar controller: the control unit that runs the binary (double-and-add)
// method, Q = kP, on the mesh.
//
// It waits for a START flit carrying the scalar k in field a. With k's
// leading one at bit l-1 and Q already set to P in the register banks, it
// walks the bits k_{l-2} .. k_0: for each bit it starts the M-Double core
// and waits for its DONE, and if the bit is one it then starts the M-Add
// core and waits for its DONE. Finally it starts the M-XY core for the
// conversion to affine coordinates and, when that is done, sends DONE to
// whoever sent START. For k = 1 only the conversion runs. k must be
// nonzero and below the order of P (the usual point-multiplication
// preconditions; the special cases of the group law are not handled).
//
// Timing: one START flit out per routine; rx_ready is always high.
// Counters n_double / n_add count the point doublings and additions.
// The binary method, and a control unit that sequences initialisation,
// point addition, doubling and conversion, are the paper's; splitting the
// routines over separate cores follows the paper's Figure 3; the packet
// protocol is this design's choice.
module scalar_ctrl (
  input  logic           clk,
  input  logic           rst_n,
  input  ecc_pkg::flit_t rx_flit,
  input  logic           rx_valid,
  output logic           rx_ready,
  output ecc_pkg::flit_t tx_flit,
  output logic           tx_valid,
  input  logic           tx_ready,
  output logic [31:0]    n_double,
  output logic [31:0]    n_add
);
  import ecc_pkg::*;

  localparam int unsigned IW = $clog2(FW);

  typedef enum logic [2:0] {C_IDLE, C_DBL, C_WDBL, C_ADD, C_WADD, C_XY, C_WXY, C_DONE} cstate_e;

  cstate_e       st;
  logic [FW-1:0] k;
  logic [IW-1:0] bit_i;
  coord_t        requester;
  logic [IW-1:0] msb;
  logic          got_done;

  assign rx_ready = 1'b1;
  assign got_done = rx_valid && rx_flit.ptype == PK_DONE;

  // Position of the leading one of the incoming scalar.
  always_comb begin
    msb = '0;
    for (int i = 0; i < FW; i++) if (rx_flit.a[i]) msb = IW'(i);
  end

  task automatic send_start(coord_t to);
    tx_flit       <= '0;
    tx_flit.dst   <= to;
    tx_flit.ret   <= N_CU0;
    tx_flit.ptype <= PK_START;
    tx_valid      <= 1'b1;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; k <= '0; bit_i <= '0; requester <= '0;
      tx_valid <= 1'b0; tx_flit <= '0; n_double <= '0; n_add <= '0;
    end else begin
      if (tx_valid && tx_ready) tx_valid <= 1'b0;
      unique case (st)
        C_IDLE: if (rx_valid && rx_flit.ptype == PK_START) begin
          k         <= rx_flit.a;
          requester <= rx_flit.ret;
          bit_i     <= msb - 1'b1;
          st        <= (msb == '0) ? C_XY : C_DBL;
        end
        C_DBL: if (!tx_valid) begin
          send_start(N_MDBL);
          n_double <= n_double + 1;
          st <= C_WDBL;
        end
        C_WDBL: if (got_done) begin
          if (k[bit_i])           st <= C_ADD;
          else if (bit_i == '0)   st <= C_XY;
          else begin bit_i <= bit_i - 1'b1; st <= C_DBL; end
        end
        C_ADD: if (!tx_valid) begin
          send_start(N_MADD);
          n_add <= n_add + 1;
          st <= C_WADD;
        end
        C_WADD: if (got_done) begin
          if (bit_i == '0) st <= C_XY;
          else begin bit_i <= bit_i - 1'b1; st <= C_DBL; end
        end
        C_XY: if (!tx_valid) begin
          send_start(N_MXY);
          st <= C_WXY;
        end
        C_WXY: if (got_done) st <= C_DONE;
        C_DONE: if (!tx_valid) begin
          tx_flit       <= '0;
          tx_flit.dst   <= requester;
          tx_flit.ret   <= N_CU0;
          tx_flit.ptype <= PK_DONE;
          tx_valid      <= 1'b1;
          st            <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
