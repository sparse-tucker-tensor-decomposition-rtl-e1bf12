// kron_product: one row step of the Kronecker product of two row vectors.
//
// The Kronecker product of a (length R2) and b (length R3) is
//   c[R3*i + j] = a[i] * b[j].
// The outer loop over i is pipelined and the inner loop over j is unrolled,
// as in the design: every cycle with step_valid high the block takes one
// element a[i] (a_i, tagged with its position step_i) and the whole vector b,
// and R3 parallel multipliers form the segment c[R3*i .. R3*i + R3-1]. There
// are multipliers only, no adders. Feeding i = 0 .. R2-1 on consecutive
// cycles produces the whole product in R2 cycles.
//
// Timing: one register stage. c_valid, c_i and c_seg show the result of a
// step one cycle after the step is presented. Reset clears c_valid.
module kron_product
  import tucker_pkg::*;
#(
  parameter int unsigned R3 = 32,                   // length of b (unrolled)
  parameter int unsigned IW = 8                     // width of the step index
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          step_valid,
  input  logic [IW-1:0] step_i,
  input  fx_t           a_i,
  input  fx_t           b_vec [R3],
  output logic          c_valid,
  output logic [IW-1:0] c_i,
  output fx_t           c_seg [R3]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_valid <= 1'b0;
      c_i     <= '0;
    end else begin
      c_valid <= step_valid;
      c_i     <= step_i;
    end
  end

  // inner loop, unrolled: R3 multipliers
  always_ff @(posedge clk) begin
    if (step_valid)
      for (int j = 0; j < R3; j++) c_seg[j] <= fx_mul(a_i, b_vec[j]);
  end

endmodule
