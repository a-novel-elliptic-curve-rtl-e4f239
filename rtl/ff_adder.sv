// Finite-field adder/subtractor, the ADDER core of the processor.
//
// In GF(2^W) mode (prime_mode = 0) addition and subtraction are both the
// bitwise XOR of the operands. In GF(p) mode (prime_mode = 1) it computes
// (a + b) mod p or (a - b) mod p with one W+1-bit add and one conditional
// correction by p; operands must already be reduced (a, b < p < 2^W).
//
// Timing: start is sampled on a rising clock edge; result is registered and
// done pulses high one cycle later (latency 1, one operation per cycle).
// The paper names the unit and its function; the one-cycle registered
// datapath is this design's choice.
module ff_adder #(
  parameter int unsigned W = ecc_pkg::FW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         prime_mode,
  input  logic         sub,
  input  logic [W-1:0] modulus,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         done,
  output logic [W-1:0] result
);
  logic [W:0] sum, diff, sum_red, diff_fix;
  logic [W-1:0] r_next;

  always_comb begin
    sum      = {1'b0, a} + {1'b0, b};
    sum_red  = sum - {1'b0, modulus};
    diff     = {1'b0, a} - {1'b0, b};
    diff_fix = diff + {1'b0, modulus};
    if (!prime_mode)       r_next = a ^ b;
    else if (!sub)         r_next = (sum >= {1'b0, modulus}) ? sum_red[W-1:0] : sum[W-1:0];
    else                   r_next = diff[W] ? diff_fix[W-1:0] : diff[W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done   <= 1'b0;
      result <= '0;
    end else begin
      done <= start;
      if (start) result <= r_next;
    end
  end
endmodule
