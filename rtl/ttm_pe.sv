// ttm_pe: one processing element of the tensor-times-matrix (TTM) grid.
//
// The element multiplies a value from the tensor interface (an entry of Y)
// with a value from the matrix interface (an entry of U_N) and adds the
// product to its result buffer. A multiplexer in front of the adder feeds
// either the buffered partial sum or zero; it picks zero when new_batch is
// high, so the first product of a new dot product starts a fresh sum.
// Multiplier, New-Batch multiplexer, adder and result buffer follow the
// processing-element diagram of the design; the fixed-point arithmetic and the
// enable input are this design's own.
//
// Timing: when en is high the sum
//   acc <= (new_batch ? 0 : acc) + y_in * u_in
// is registered at the rising clock edge, so acc shows the new partial sum one
// cycle after the operands. With en low the buffer holds. Reset clears it.
module ttm_pe
  import tucker_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,         // operands valid this cycle
  input  logic new_batch,  // first term of a new dot product
  input  fx_t  y_in,       // tensor interface
  input  fx_t  u_in,       // matrix interface
  output fx_t  acc         // result buffer
);

  fx_t prod, addend;

  always_comb begin
    prod   = fx_mul(y_in, u_in);
    addend = new_batch ? '0 : acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= addend + prod;
  end

endmodule
