// Reference arithmetic for the testbenches, written independently of the
// RTL: GF(p) with full-width products and the % operator, GF(2^W) with a
// schoolbook carry-less product and top-down reduction, inversion by
// Fermat's little theorem, and affine point doubling/addition with the
// textbook chord-and-tangent formulas. It also provides the test fields:
// the NIST P-256 prime and f(x) = x^256 + x^10 + x^5 + x^2 + 1, an
// irreducible pentanomial.
package ecc_ref_pkg;
  localparam int unsigned W = 256;
  typedef logic [W-1:0] fe_t;

  localparam fe_t P256 = 256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff;
  localparam fe_t F256 = 256'h425;  // x^10 + x^5 + x^2 + 1, with the implicit x^256

  // ---------------- GF(p) ----------------
  function automatic fe_t p_add(fe_t a, fe_t b, fe_t p);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return fe_t'(s % {1'b0, p});
  endfunction
  function automatic fe_t p_sub(fe_t a, fe_t b, fe_t p);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, p} - {1'b0, b};
    return fe_t'(s % {1'b0, p});
  endfunction
  function automatic fe_t p_mul(fe_t a, fe_t b, fe_t p);
    logic [2*W-1:0] t;
    t = {{W{1'b0}}, a} * {{W{1'b0}}, b};
    return fe_t'(t % {{W{1'b0}}, p});
  endfunction
  function automatic fe_t p_inv(fe_t a, fe_t p);
    fe_t r, e, base;
    r = 1; base = a; e = p - 2;
    for (int i = 0; i < W; i++) begin
      if (e[i]) r = p_mul(r, base, p);
      base = p_mul(base, base, p);
    end
    return r;
  endfunction

  // ---------------- GF(2^W), f = x^W + fl ----------------
  function automatic fe_t b_mul(fe_t a, fe_t b, fe_t fl);
    logic [2*W-1:0] t;
    t = '0;
    for (int i = 0; i < W; i++) if (b[i]) t = t ^ ({{W{1'b0}}, a} << i);
    for (int i = 2*W-1; i >= W; i--)
      if (t[i]) begin
        t[i] = 1'b0;
        t = t ^ ({{W{1'b0}}, fl} << (i - W));
      end
    return t[W-1:0];
  endfunction
  function automatic fe_t b_inv(fe_t a, fe_t fl);
    fe_t r, t;
    r = 1; t = a;
    for (int i = 1; i < W; i++) begin
      t = b_mul(t, t, fl);
      r = b_mul(r, t, fl);
    end
    return r;
  endfunction

  // Generic field helpers (prime selects the field).
  function automatic fe_t f_add(logic prime, fe_t a, fe_t b, fe_t m);
    return prime ? p_add(a, b, m) : a ^ b;
  endfunction
  function automatic fe_t f_sub(logic prime, fe_t a, fe_t b, fe_t m);
    return prime ? p_sub(a, b, m) : a ^ b;
  endfunction
  function automatic fe_t f_mul(logic prime, fe_t a, fe_t b, fe_t m);
    return prime ? p_mul(a, b, m) : b_mul(a, b, m);
  endfunction
  function automatic fe_t f_inv(logic prime, fe_t a, fe_t m);
    return prime ? p_inv(a, m) : b_inv(a, m);
  endfunction

  // ---------------- affine points ----------------
  // bad is set when an exceptional case of the group law is met.
  task automatic pt_dbl(input logic prime, input fe_t m, input fe_t ca,
                        inout fe_t x, inout fe_t y, inout logic bad);
    fe_t l, x3, y3;
    if (prime) begin
      if (y == 0) bad = 1'b1;
      l  = p_mul(p_add(p_mul(3, p_mul(x, x, m), m), ca, m), p_inv(p_add(y, y, m), m), m);
      x3 = p_sub(p_mul(l, l, m), p_add(x, x, m), m);
      y3 = p_sub(p_mul(l, p_sub(x, x3, m), m), y, m);
    end else begin
      if (x == 0) bad = 1'b1;
      l  = x ^ b_mul(y, b_inv(x, m), m);
      x3 = b_mul(l, l, m) ^ l ^ ca;
      y3 = b_mul(x, x, m) ^ b_mul(l ^ 1, x3, m);
    end
    x = x3; y = y3;
  endtask

  task automatic pt_add(input logic prime, input fe_t m, input fe_t ca,
                        inout fe_t x1, inout fe_t y1, input fe_t x2, input fe_t y2,
                        inout logic bad);
    fe_t l, x3, y3;
    if (x1 == x2) bad = 1'b1;
    if (prime) begin
      l  = p_mul(p_sub(y2, y1, m), p_inv(p_sub(x2, x1, m), m), m);
      x3 = p_sub(p_sub(p_mul(l, l, m), x1, m), x2, m);
      y3 = p_sub(p_mul(l, p_sub(x1, x3, m), m), y1, m);
    end else begin
      l  = b_mul(y1 ^ y2, b_inv(x1 ^ x2, m), m);
      x3 = b_mul(l, l, m) ^ l ^ x1 ^ x2 ^ ca;
      y3 = b_mul(l, x1 ^ x3, m) ^ x3 ^ y1;
    end
    x1 = x3; y1 = y3;
  endtask

  // Q = kP by double-and-add from the top bit.
  task automatic ref_kp(input logic prime, input fe_t m, input fe_t ca, input fe_t k,
                        input fe_t px, input fe_t py, output fe_t qx, output fe_t qy,
                        output logic bad, output int ndbl, output int nadd);
    int top;
    bad = 1'b0; ndbl = 0; nadd = 0;
    top = 0;
    for (int i = 0; i < W; i++) if (k[i]) top = i;
    qx = px; qy = py;
    for (int i = top - 1; i >= 0; i--) begin
      pt_dbl(prime, m, ca, qx, qy, bad); ndbl++;
      if (k[i]) begin pt_add(prime, m, ca, qx, qy, px, py, bad); nadd++; end
    end
  endtask

  // Random curve through a random point: choose a, x, y and solve for b.
  task automatic rand_curve(input logic prime, input fe_t m, output fe_t ca, output fe_t cb,
                            output fe_t x, output fe_t y);
    for (int i = 0; i < W / 32; i++) begin
      ca[i*32 +: 32] = $urandom; x[i*32 +: 32] = $urandom; y[i*32 +: 32] = $urandom;
    end
    if (prime) begin
      ca = ca % m; x = x % m; y = y % m;
      // b = y^2 - x^3 - a x
      cb = p_sub(p_sub(p_mul(y, y, m), p_mul(x, p_mul(x, x, m), m), m), p_mul(ca, x, m), m);
    end else begin
      // b = y^2 + xy + x^3 + a x^2
      cb = b_mul(y, y, m) ^ b_mul(x, y, m) ^ b_mul(x, b_mul(x, x, m), m) ^ b_mul(ca, b_mul(x, x, m), m);
    end
  endtask

  function automatic logic on_curve(logic prime, fe_t m, fe_t ca, fe_t cb, fe_t x, fe_t y);
    if (prime)
      return p_mul(y, y, m) == p_add(p_add(p_mul(x, p_mul(x, x, m), m), p_mul(ca, x, m), m), cb, m);
    return (b_mul(y, y, m) ^ b_mul(x, y, m)) ==
           (b_mul(x, b_mul(x, x, m), m) ^ b_mul(ca, b_mul(x, x, m), m) ^ cb);
  endfunction

  function automatic fe_t rand_fe(logic prime, fe_t m);
    fe_t v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return prime ? v % m : v;
  endfunction
endpackage
