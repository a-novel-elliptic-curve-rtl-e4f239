// Shared types and constants of the elliptic-curve point-multiplication
// processor built on a 4x3 mesh network-on-chip.
//
// The processor is a set of cores (control units, point-operation
// sequencers, field-arithmetic units and register banks) that talk only by
// single-flit packets over the mesh. This package fixes the field width, the
// mesh size, where each core sits in the mesh (the placement of the paper's
// Figure 3), the register map, the packet format and the field-operation
// encoding.
//
// Taken from the paper: the 4x3 mesh, the twelve cores and their placement,
// the set of field operations (add, square, invert, multiply) and the three
// point-level routines (addition, doubling, conversion to affine).
// Chosen here: the 256-bit field width, the packet format, the register map
// and the encodings.
package ecc_pkg;

  // Field width in bits. GF(2^FW) with f(x) = x^FW + (low part), or GF(p) with p < 2^FW.
  localparam int unsigned FW = 256;

  // Mesh size (columns x rows) and node coordinates, Figure 3.
  localparam int unsigned MESH_X = 4;
  localparam int unsigned MESH_Y = 3;
  localparam int unsigned NODES  = MESH_X * MESH_Y;

  typedef struct packed {
    logic [1:0] x;
    logic [1:0] y;
  } coord_t;

  localparam coord_t N_MADD  = '{x: 2'd0, y: 2'd0};
  localparam coord_t N_CU0   = '{x: 2'd1, y: 2'd0}; // scalar (binary-method) controller
  localparam coord_t N_CU1   = '{x: 2'd2, y: 2'd0}; // initialisation / read-out controller
  localparam coord_t N_ADDER = '{x: 2'd3, y: 2'd0};
  localparam coord_t N_MDBL  = '{x: 2'd0, y: 2'd1};
  localparam coord_t N_MUL0  = '{x: 2'd1, y: 2'd1};
  localparam coord_t N_MUL1  = '{x: 2'd2, y: 2'd1};
  localparam coord_t N_SQR   = '{x: 2'd3, y: 2'd1};
  localparam coord_t N_MXY   = '{x: 2'd0, y: 2'd2};
  localparam coord_t N_REG0  = '{x: 2'd1, y: 2'd2};
  localparam coord_t N_REG1  = '{x: 2'd2, y: 2'd2};
  localparam coord_t N_INV   = '{x: 2'd3, y: 2'd2};

  // Register map: 16 field registers, even ones in bank 0, odd ones in bank 1.
  localparam int unsigned NREGS = 16;
  typedef logic [3:0] reg_addr_t;
  localparam reg_addr_t R_X  = 4'd0;   // Q.X (projective)
  localparam reg_addr_t R_Y  = 4'd1;   // Q.Y
  localparam reg_addr_t R_Z  = 4'd2;   // Q.Z
  localparam reg_addr_t R_PX = 4'd3;   // base point x (affine)
  localparam reg_addr_t R_PY = 4'd4;   // base point y (affine)
  localparam reg_addr_t R_A  = 4'd5;   // curve coefficient a
  localparam reg_addr_t R_B  = 4'd6;   // curve coefficient b
  localparam reg_addr_t T0 = 4'd7,  T1 = 4'd8,  T2 = 4'd9,  T3 = 4'd10, T4 = 4'd11;
  localparam reg_addr_t T5 = 4'd12, T6 = 4'd13, T7 = 4'd14, T8 = 4'd15;

  function automatic coord_t bank_of(reg_addr_t r);
    return r[0] ? N_REG1 : N_REG0;
  endfunction

  // Field operations.
  typedef enum logic [2:0] {
    OP_ADD = 3'd0,  // a + b   (XOR in GF(2^m))
    OP_SUB = 3'd1,  // a - b   (XOR in GF(2^m))
    OP_MUL = 3'd2,  // a * b
    OP_SQR = 3'd3,  // a * a
    OP_INV = 3'd4,  // a^-1
    OP_NOP = 3'd7
  } ff_op_e;

  // Packet types.
  typedef enum logic [3:0] {
    PK_EXEC  = 4'd0,  // sequencer -> register bank: fetch operands of an operation
    PK_OPER  = 4'd1,  // register bank -> arithmetic unit: operation with operands
    PK_WB    = 4'd2,  // arithmetic unit -> register bank: result to write
    PK_ACK   = 4'd3,  // register bank -> requester: write done
    PK_WRITE = 4'd4,  // controller -> register bank: write a value
    PK_READ  = 4'd5,  // controller -> register bank: read a value
    PK_RDATA = 4'd6,  // register bank -> controller: value read
    PK_START = 4'd7,  // start a routine (scalar in field a for the scalar controller)
    PK_DONE  = 4'd8   // routine finished
  } pkt_type_e;

  localparam int unsigned TAGW = 3;

  // One packet is one flit.
  typedef struct packed {
    coord_t      dst;     // where the flit goes now
    coord_t      ret;     // who gets the ACK / RDATA / DONE
    coord_t      unit;    // arithmetic unit that executes an EXEC/OPER
    pkt_type_e   ptype;
    ff_op_e      op;
    reg_addr_t   rd;
    reg_addr_t   ra;
    reg_addr_t   rb;
    logic        have_a;
    logic        have_b;
    logic [TAGW-1:0] tag;
    logic [FW-1:0] a;
    logic [FW-1:0] b;
  } flit_t;

  // Router port numbering.
  typedef enum logic [2:0] {
    P_LOCAL = 3'd0, P_NORTH = 3'd1, P_EAST = 3'd2, P_SOUTH = 3'd3, P_WEST = 3'd4
  } port_e;
  localparam int unsigned NPORTS = 5;

  // One microinstruction of a point-operation routine: rd = ra op rb.
  typedef struct packed {
    ff_op_e    op;
    reg_addr_t rd;
    reg_addr_t ra;
    reg_addr_t rb;
  } instr_t;

  // Which routine a sequencer holds (Figure 3: M-Add, M-Double, M-XY).
  typedef enum logic [1:0] {SEQ_ADD = 2'd0, SEQ_DBL = 2'd1, SEQ_XY = 2'd2} seq_kind_e;

  // Kind of arithmetic unit behind an ALU node.
  typedef enum logic [1:0] {U_ADDER = 2'd0, U_MUL = 2'd1, U_SQR = 2'd2, U_INV = 2'd3} unit_kind_e;

  function automatic int unsigned node_id(coord_t c);
    return int'(c.y) * MESH_X + int'(c.x);
  endfunction

endpackage
