// Finite-field squarer, the SQUARING core of the processor.
//
// In GF(2^W) (prime_mode = 0) squaring is linear: the bits of a are spread
// to the even positions of a 2W-1 bit polynomial, which is then reduced
// modulo f(x) = x^W + modulus from the top bit down. This is done in one
// clock cycle. In GF(p) (prime_mode = 1) squaring has no such shortcut; the
// unit runs the same MSB-first interleaved method as the multiplier with
// both operands equal to a, taking W+1 cycles.
//
// Timing: GF(2^W): done is high in the cycle after start was sampled.
// GF(p): done is high W+1 cycles after start was sampled. result holds until the next start; start while busy
// is ignored. The paper names the squarer and its function; both datapaths
// are this design's choice.
module ff_squarer #(
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
  localparam int unsigned CW = $clog2(W + 1);

  logic [W-1:0]  acc, opa, opb, sq_bin;
  logic [CW-1:0] cnt;
  logic [W-1:0]  acc_next;

  // GF(2^W) squaring: spread, then reduce bit W-1+i with x^(W+i) = x^i * (f - x^W).
  always_comb begin
    logic [2*W-1:0] s;
    s = '0;
    for (int i = 0; i < W; i++) s[2*i] = a[i];
    for (int i = 2*W-2; i >= W; i--)
      if (s[i]) s[i -: W+1] = s[i -: W+1] ^ {1'b1, modulus};
    sq_bin = s[W-1:0];
  end

  // GF(p) interleaved step.
  always_comb begin
    logic [W:0] dbl, sum;
    dbl = {acc, 1'b0};
    if (dbl >= {1'b0, modulus}) dbl = dbl - {1'b0, modulus};
    sum = dbl + (opb[W-1] ? {1'b0, opa} : '0);
    if (sum >= {1'b0, modulus}) sum = sum - {1'b0, modulus};
    acc_next = sum[W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; opa <= '0; opb <= '0; cnt <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        if (!prime_mode) begin
          acc  <= sq_bin;
          done <= 1'b1;
        end else begin
          acc <= '0; opa <= a; opb <= a;
          cnt <= CW'(W); busy <= 1'b1;
        end
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
