# Elliptic-curve point multiplication on a 4x3 network-on-chip

This design computes the elliptic-curve scalar product Q = kP, the core
operation of ECC key generation, with a 256-bit key. It works over a binary
field GF(2^256) or a prime field GF(p). The usual way is one processor
whose control unit drives a shared bus or multiplexer to its arithmetic
units. Here every functional unit is a separate core on a small mesh
network-on-chip instead: the point-operation sequencers, the field adder,
squarer, inverter, two field multipliers, two register banks and two
control units. The units exchange single-flit packets. Independent field
operations of a point doubling or addition run at the same time on
different cores. The cores that carry the most traffic, the multipliers,
sit in the middle of the mesh.

The architecture follows H. Javashi and R. Sabbaghi-Nadooshan, "A Novel
Elliptic curve cryptography Processor using NoC design". That publication
gives the block set, the 4x3 mesh, where each core sits, the binary
(double-and-add) method, and the coordinate systems: Jacobian for GF(p),
López–Dahab for GF(2^m). It gives no field size, no unit
architectures, no router and no protocol. All of those are this
implementation's own choices and are marked as such below and in each
file's header.

## Floor plan

Node (x, y): x is the column, y the row. Node number = 4y + x.

| y \ x | 0                      | 1                        | 2                        | 3                    |
|-------|------------------------|--------------------------|--------------------------|----------------------|
| 0     | M-Add (`point_seq`)    | Control: binary method (`scalar_ctrl`) | Control: init / read-out (`io_ctrl`) | Adder (`ff_adder`) |
| 1     | M-Double (`point_seq`) | MUL 0 (`ff_multiplier`)  | MUL 1 (`ff_multiplier`)  | Squarer (`ff_squarer`) |
| 2     | M-XY (`point_seq`)     | Registers, even (`reg_bank`) | Registers, odd (`reg_bank`) | Inverter (`ff_inverter`) |

The arithmetic units are wrapped by `alu_node`, their network interface.
The mesh is `noc_mesh`, made of twelve `noc_router`s. `ecc_noc_top` wires
everything together, and `ecc_pkg` holds the shared types and constants.

## How one point multiplication runs

1. **Initialisation (`io_ctrl`).** A host pulses `start` with k, P = (px, py)
   and the curve coefficients a and b. The controller sends seven WRITE
   packets. They set the working point Q = (px, py, 1), a copy of P, and a
   and b. When all seven ACKs are back, it sends START with k to the
   binary-method controller.
2. **Binary method (`scalar_ctrl`).** Let the leading one of k be bit l-1.
   For each lower bit, from l-2 down to 0, the controller starts M-Double
   and waits for its DONE. If the bit is one, it then starts M-Add and waits
   again. Finally it starts M-XY, which converts Q to affine coordinates,
   and sends DONE back to `io_ctrl`.
3. **Read-out.** `io_ctrl` reads the affine x and y with two READ packets,
   presents them on `qx`/`qy` and pulses `done`.

Each point routine is a straight list of field operations `rd = ra op rb`
on 16 registers. A field operation travels through the mesh like this:

```
sequencer --EXEC--> bank holding ra --(EXEC, if rb is in the other bank)--> other bank
          --OPER (both operands inside)--> arithmetic core
          --WB (result)--> bank holding rd --ACK (tag)--> sequencer
```

Each bank fills in the operands it owns. Once both operands are present,
the packet becomes an OPER and goes to the core named in it. The result goes
to the bank that holds the destination register, which writes it and sends
the sequencer an ACK carrying the operation's tag. Operands are read when
the EXEC reaches a bank, not when it is issued.

### Parallel issue and the scoreboard (`point_seq`)

A sequencer issues its operations in program order, at most one per cycle.
Up to `MAX_INFLIGHT` operations (default 4) can be in the network at once.
Each one holds a slot that records rd, ra and rb, and the slot number is
the packet's tag. The next operation waits if:

- it reads or writes a register that an operation in flight will write
  (RAW/WAW), or
- it writes a register that an operation in flight has still to read (WAR).
  This check is needed because operands are fetched late, on arrival at the
  bank.

Multiplications alternate between the two MUL cores. A squaring can run on
the squarer, an addition on the adder and two multiplications on the MUL
cores, all at the same time. In the end-to-end test both multipliers were busy
together in about one cycle in six. When every slot is
free after the last operation, the sequencer sends DONE.

### Routines

| Routine | GF(2^m), López–Dahab (x = X/Z, y = Y/Z²) | GF(p), Jacobian (x = X/Z², y = Y/Z³) |
|---|---|---|
| Double Q | 5 MUL, 5 SQR, 4 ADD (14 ops), any a and b | 4 MUL, 6 SQR, 13 ADD/SUB (23 ops), any a |
| Add Q + P (P affine) | 9 MUL, 5 SQR, 9 ADD (23 ops), any a | 8 MUL, 3 SQR, 7 ADD/SUB (18 ops) |
| To affine | 1 INV, 2 MUL, 1 SQR | 1 INV, 3 MUL, 1 SQR |

The curves are y² + xy = x³ + ax² + b over GF(2^256) and
y² = x³ + ax + b over GF(p). Small constant multiples such as 2S or 8Y⁴
are built from additions. The formulas are the standard ones for these
coordinate systems; each line of the microprogram is commented in
`point_seq.sv`.

## Field arithmetic

All units take `prime_mode` (0: GF(2^256), 1: GF(p)) and `modulus`, which is
p or the reduction polynomial f(x) without its x^256 term. The field degree
equals the datapath width FW, and p must be below 2^FW.

| Unit | Method | Cycles from start to done |
|---|---|---|
| `ff_adder` | XOR, or add/subtract followed by one conditional correction by p | 1 |
| `ff_multiplier` | bit-serial, MSB-first interleaved multiply and reduce | FW + 1 |
| `ff_squarer` | GF(2^m): spread the bits and reduce, all combinational; GF(p): like the multiplier | 1 / FW + 1 |
| `ff_inverter` | binary extended Euclid, one step per cycle | data-dependent, at most 4FW + 4 |

Operands must already be reduced (below p). The inverse of 0 is given as 0.

## Network

- **Routers (`noc_router`).** Each router has five ports: local, north,
  east, south and west. Each input has a 2-flit FIFO. Each output has a
  one-flit register and a round-robin arbiter. Routing is dimension-ordered
  XY: first along x, then along y. That is deadlock-free on a mesh, and an
  assertion checks that no flit is sent back the way it came.
- **Links.** Links use valid/ready. A flit moves on a clock edge where both
  are high, and an assertion checks that a stalled output stays stable.
- **Latency.** A hop costs two cycles without contention. A lone flit from
  corner (0,0) to corner (3,2) passes six routers and is taken by the
  destination core 13 cycles after it was sent.
- **Packets.** A packet is one 548-bit flit:
  - destination, return address and executing-unit coordinates;
  - type and field operation;
  - rd, ra and rb, with have-a/have-b flags;
  - a 3-bit tag;
  - two 256-bit operands.

Packet types: EXEC, OPER, WB, ACK, WRITE, READ, RDATA, START and DONE.
Traffic cannot deadlock the network. Each field operation is a single packet
at any moment, and at most four operations, plus a few control packets, are
in flight.

## Interface and timing of the top (`ecc_noc_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `prime_mode`, `modulus` | in | 1, 256 | field select and modulus; hold stable during a run |
| `start` | in | 1 | one-cycle pulse; `k`, `px`, `py`, `curve_a`, `curve_b` valid with it |
| `busy`, `done` | out | 1 | busy from start to done; `done` pulses when `qx`, `qy` are valid |
| `qx`, `qy` | out | 256 | affine result |
| `n_double`, `n_add` | out | 32 | running counts of point doublings and additions |

Measured with random 256-bit scalars: about 0.59–0.60 million cycles per
point multiplication in GF(2^256), and about 0.82 million in GF(p). GF(p) is
slower because squaring there is as slow as multiplication. Top-level
parameters are `FIFO_DEPTH` (2) and `MAX_INFLIGHT` (4). The field width FW
(256) and the mesh size are fixed in `ecc_pkg`.

## Where this implementation departs from, or adds to, the published description

- **Binary method rather than Table 1's counts.** The publication's
  operation-count table lists, for both coordinate systems, 2 ADD/4 MUL/1 SQR
  per point addition, 1 ADD/2 MUL/4 SQR per doubling and 6 ADD/10 MUL/1 INV/1 SQR
  for the conversion. Those are the counts of the López–Dahab Montgomery
  ladder. Its text, however, uses and prints the binary method with
  Jacobian and López–Dahab coordinates. This design follows the text, so its
  routines have the counts in the table above.
- **Two control units.** The floor plan shows two control units without
  saying how they differ. Here one runs the binary method and the other does
  initialisation and read-out.
- **Two register nodes.** The 16 registers are split between the two
  register nodes by the low address bit.
- **Fixed 256-bit field.** The publication gives no field size. 256 bits
  matches its remark that ECC reaches RSA-2048 security with a key one eighth
  as long. The binary-field degree is tied to the width, so GF(2^163) or
  GF(2^233) would need the width changed and the reduction polynomial
  given for that degree.
- **The bus multiplexer is gone.** The bus-based block diagram's multiplexer
  has no counterpart. Its job is done by the routers' arbitration.
- **Field settings are wired, not sent.** `prime_mode` and `modulus` go to
  every arithmetic core as wires, not over the network.
- **Group-law formulas.** The publication's affine GF(2^m) formulas contain
  an undefined term c. The reference model uses the standard formulas.

## Limits

- The special cases of the group law are not handled: Q = ±P during an
  addition, or the point at infinity. Use 1 ≤ k < order(P), where they
  cannot occur. k = 0 is not supported.
- The running time depends on k, and the inverter's time on its input. The
  design is not protected against timing or power side channels.
- In GF(2^256) mode f(x) must be irreducible, and in GF(p) mode p must be an
  odd prime below 2^256. Otherwise the inverter stops at its step limit
  and returns a meaningless value.

## Verification

Each block has a self-checking testbench in `tb/`. The reference arithmetic
in `tb/ecc_ref_pkg.sv` is written independently of the RTL:

- GF(p) uses full products and `%`;
- GF(2^m) uses a schoolbook carry-less product;
- inverses are computed with Fermat's theorem;
- points are combined in affine coordinates with chord-and-tangent formulas.

The test fields are the NIST P-256 prime and
f(x) = x^256 + x^10 + x^5 + x^2 + 1, an irreducible pentanomial. Test
curves are random. a and a point (x, y) are chosen at random and b is
solved for, so P lies on the curve without knowing the group order.

| Testbench | What it shows |
|---|---|
| `tb_ff_adder`, `tb_ff_multiplier`, `tb_ff_squarer`, `tb_ff_inverter` | results on random and edge operands in both fields, and the latencies above |
| `tb_noc_router` | every flit leaves by its XY port exactly once and in order, under contention and back-pressure |
| `tb_noc_mesh` | all-to-all random traffic is delivered correctly and in order; 13-cycle corner-to-corner latency |
| `tb_reg_bank` | writes with ACK, reads, and operand filling and forwarding of EXEC packets |
| `tb_point_seq` | all three routines in both fields against the affine reference, with operand reads and results delayed at random so operations complete out of order; checks operation counts, overlap and stalls |
| `tb_scalar_ctrl` | the sequence of doublings and additions is exactly the binary method for many scalars |
| `tb_io_ctrl` | initialisation writes, START only after all ACKs, result read-back |
| `tb_ecc_noc_top` | full design at its default size. Ten point multiplications (k = 1, 2, a 16-bit k and two 256-bit k, in each field) are checked against the reference, and the result must lie on the curve. Doubling and addition counts must match. It also requires both multipliers to have been busy together, scoreboard stalls, back-pressure at busy cores, and one inversion per multiplication. |

The end-to-end test takes about 2.9 million cycles, which is a little over
a minute of Verilator simulation. To run any testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/ecc_pkg.sv tb/ecc_ref_pkg.sv tb/tb_ecc_noc_top.sv --top-module tb_ecc_noc_top
obj_dir/Vtb_ecc_noc_top
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

## Changing the design

- **Field width.** Change `FW` in `ecc_pkg`. The packet width follows, and
  the units take their `W` parameter from it. The testbench reference
  package has its own `W` and test moduli, which would need the same change.
- **More parallelism.** Raise `MAX_INFLIGHT`, up to 8 with the 3-bit tag.
- **A third multiplier.** Add an `alu_node #(.KIND(U_MUL))` at a free mesh
  position (this means growing the mesh) and extend `unit_for` in
  `point_seq` to rotate over three MUL nodes.
- **Other formulas.** The microprograms are the `prog` function in
  `point_seq.sv`. Any sequence of ADD/SUB/MUL/SQR/INV on the 16 registers
  can be used; the scoreboard makes any order safe.
