// Small synchronous FIFO of flits, used as the input buffer of each router
// port. Valid/ready on both sides: a flit is written when in_valid and
// in_ready are both high on a clock edge, and read when out_valid and
// out_ready are. in_ready is low only when the FIFO is full, so a full
// FIFO accepts a write in the same cycle as a read only on the next edge.
// The depth is this design's choice (the paper gives no router details).
module flit_fifo #(
  parameter int unsigned DEPTH = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  ecc_pkg::flit_t  in_flit,
  input  logic            in_valid,
  output logic            in_ready,
  output ecc_pkg::flit_t  out_flit,
  output logic            out_valid,
  input  logic            out_ready
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  ecc_pkg::flit_t mem [DEPTH];
  logic [AW-1:0]  rd_ptr, wr_ptr;
  logic [AW:0]    count;
  logic           do_wr, do_rd;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_flit  = mem[rd_ptr];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
    end else begin
      if (do_wr) wr_ptr <= incr(wr_ptr);
      if (do_rd) rd_ptr <= incr(rd_ptr);
      count <= count + (do_wr ? 1'b1 : 1'b0) - (do_rd ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_flit;
  end
endmodule
