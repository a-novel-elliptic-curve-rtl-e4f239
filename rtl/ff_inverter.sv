// Finite-field inverter, the INVERSION core of the processor.
//
// Computes a^-1 in GF(2^W) (prime_mode = 0, f(x) = x^W + modulus, which must
// be irreducible) or in GF(p) (prime_mode = 1, p = modulus, an odd prime).
// Both use the binary extended Euclidean algorithm, one step per clock:
// with u = a, v = modulus, g1 = 1, g2 = 0 and the invariants g1*a = u,
// g2*a = v (mod the modulus), each step either halves an even u (or v) and
// its g, or replaces the larger of u and v by u - v (XOR in GF(2^W)).
// When u or v reaches 1 its g is the inverse. Halving g means adding the
// modulus first when g is odd (g has a nonzero constant term). A plain
// numeric compare of u and v serves as the degree compare in GF(2^W).
//
// Timing: start loads a; done pulses once with result valid after a
// data-dependent number of cycles: every subtraction makes an operand even,
// so each two steps shorten u or v by a bit and a run takes at most 4W+2
// steps (about 2.5W for random operands at W = 256). The inverse of 0 is
// returned as 0 one cycle after start. A step limit of 4W+4 ends the run if
// the modulus is not prime/irreducible. The paper names the inverter and that
// only one inversion is needed per point multiplication; the algorithm is
// this design's choice.
module ff_inverter #(
  parameter int unsigned W = ecc_pkg::FW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         prime_mode,
  input  logic [W-1:0] modulus,
  input  logic [W-1:0] a,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] result
);
  localparam int unsigned CW = $clog2(4*W + 5);

  logic [W:0]    u, v, m;          // m: full modulus (p, or f with its x^W term)
  logic [W-1:0]  g1, g2;
  logic          prime_q;
  logic [CW-1:0] steps;

  function automatic logic [W-1:0] halve(logic [W-1:0] g, logic [W:0] md);
    logic [W:0] t;
    if (!g[0])            t = {1'b0, g};
    else if (prime_q)     t = {1'b0, g} + md;
    else                  t = {1'b0, g} ^ md;
    return t[W:1];
  endfunction

  function automatic logic [W-1:0] gsub(logic [W-1:0] x, logic [W-1:0] y, logic [W:0] md);
    logic [W:0] d;
    if (!prime_q) return x ^ y;
    d = {1'b0, x} - {1'b0, y};
    if (d[W]) d = d + md;
    return d[W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; v <= '0; m <= '0; g1 <= '0; g2 <= '0;
      prime_q <= 1'b0; steps <= '0;
      busy <= 1'b0; done <= 1'b0; result <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        if (a == '0) begin
          result <= '0;
          done   <= 1'b1;
        end else begin
          prime_q <= prime_mode;
          m  <= prime_mode ? {1'b0, modulus} : {1'b1, modulus};
          v  <= prime_mode ? {1'b0, modulus} : {1'b1, modulus};
          u  <= {1'b0, a};
          g1 <= W'(1);
          g2 <= '0;
          steps <= '0;
          busy  <= 1'b1;
        end
      end else if (busy) begin
        steps <= steps + 1'b1;
        if (u == (W+1)'(1) || steps == CW'(4*W + 4)) begin
          result <= g1; busy <= 1'b0; done <= 1'b1;
        end else if (v == (W+1)'(1)) begin
          result <= g2; busy <= 1'b0; done <= 1'b1;
        end else if (!u[0]) begin
          u  <= u >> 1;
          g1 <= halve(g1, m);
        end else if (!v[0]) begin
          v  <= v >> 1;
          g2 <= halve(g2, m);
        end else if (u > v) begin
          u  <= prime_q ? u - v : u ^ v;
          g1 <= gsub(g1, g2, m);
        end else begin
          v  <= prime_q ? v - u : v ^ u;
          g2 <= gsub(g2, g1, m);
        end
      end
    end
  end
endmodule
