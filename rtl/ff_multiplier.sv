// Bit-serial finite-field multiplier, one MUL core of the processor.
//
// Computes a*b in GF(2^W) (prime_mode = 0, reduction polynomial
// f(x) = x^W + modulus) or a*b mod p in GF(p) (prime_mode = 1, p = modulus,
// p < 2^W, a and b reduced). It is the MSB-first interleaved method: for each
// bit of b, from the top, the partial result is doubled (shifted by x in
// GF(2^W)) and reduced, then a is added if the bit is set and the sum
// reduced again. In GF(p) each reduction is a single conditional
// subtraction of p.
//
// Timing: the clock edge that samples start loads the operands; W more
// edges do the W steps, and done is high for one cycle after the last of
// them (W+1 cycles after start) with result valid until the next start.
// busy is high while it works; start while busy is ignored.
// The paper names the multipliers and their function (and that there can be
// several); the bit-serial interleaved architecture is this design's choice.
module ff_multiplier #(
  parameter int unsigned W = ecc_pkg::FW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         prime_mode,
  input  logic [W-1:0] modulus,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] result
);
  localparam int unsigned CW = $clog2(W + 1);

  logic [W-1:0]  acc, opa, opb;
  logic [CW-1:0] cnt;
  logic          prime_q;
  logic [W-1:0]  acc_next;

  // One step of the interleaved method.
  always_comb begin
    logic [W:0] dbl, dbl_r, sum;
    dbl = '0; dbl_r = '0; sum = '0;
    if (!prime_q) begin
      acc_next = {acc[W-2:0], 1'b0} ^ (acc[W-1] ? modulus : '0);
      if (opb[W-1]) acc_next = acc_next ^ opa;
    end else begin
      dbl   = {acc, 1'b0};
      dbl_r = (dbl >= {1'b0, modulus}) ? dbl - {1'b0, modulus} : dbl;
      sum   = dbl_r + (opb[W-1] ? {1'b0, opa} : '0);
      if (sum >= {1'b0, modulus}) sum = sum - {1'b0, modulus};
      acc_next = sum[W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; opa <= '0; opb <= '0; cnt <= '0;
      busy <= 1'b0; done <= 1'b0; prime_q <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        acc <= '0; opa <= a; opb <= b; prime_q <= prime_mode;
        cnt <= CW'(W); busy <= 1'b1;
      end else if (busy) begin
        acc <= acc_next;
        opb <= {opb[W-2:0], 1'b0};
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign result = acc;
endmodule
