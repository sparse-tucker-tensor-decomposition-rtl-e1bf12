// factor_buffer: on-chip store of the factor matrices U_1, U_2, U_3.
//
// U_n has up to I_MAX rows of R entries. A row U_n(i,:) is one memory word, so
// the Kronecker unit can select the rows named by a nonzero's indices in one
// access, and the TTM unit can read row t of U_3 (which is column t of U_3^T).
// The store has one write port, used by the host to load the factor matrices
// that the CPU's QR step produced, and two read ports, A and B. Both read
// ports have a latency of one cycle: data for (mode, row) presented with
// rd_en appears on the next cycle and holds until the next read.
// That the factor matrices are kept on chip in row-wide words is this
// implementation's choice; the design only shows a "Matrix" block delivering
// row values selected by the nonzero's index.
module factor_buffer
  import tucker_pkg::*;
#(
  parameter int unsigned I_MAX = 200,   // rows per factor matrix
  parameter int unsigned R     = 16,    // columns (rank) per factor matrix
  localparam int unsigned AW = $clog2(I_MAX)
) (
  input  logic          clk,
  // host write port
  input  logic          wr_en,
  input  logic [1:0]    wr_mode,        // 0..2 selects U_1..U_3
  input  logic [AW-1:0] wr_row,
  input  fx_t           wr_data [R],
  // read port A
  input  logic          a_rd_en,
  input  logic [1:0]    a_rd_mode,
  input  logic [AW-1:0] a_rd_row,
  output fx_t           a_rd_data [R],
  // read port B
  input  logic          b_rd_en,
  input  logic [1:0]    b_rd_mode,
  input  logic [AW-1:0] b_rd_row,
  output fx_t           b_rd_data [R]
);

  localparam int unsigned DEPTH = ORDER * I_MAX;
  localparam int unsigned DW    = $clog2(DEPTH);

  typedef logic [R*DATA_W-1:0] word_t;

  word_t mem [DEPTH];
  word_t a_q, b_q, wr_word;

  function automatic logic [DW-1:0] addr_of(input logic [1:0] mode, input logic [AW-1:0] row);
    return DW'(mode) * DW'(I_MAX) + DW'(row);
  endfunction

  always_comb begin
    for (int c = 0; c < R; c++) wr_word[c*DATA_W +: DATA_W] = wr_data[c];
  end

  always_ff @(posedge clk) begin
    if (wr_en)   mem[addr_of(wr_mode, wr_row)] <= wr_word;
    if (a_rd_en) a_q <= mem[addr_of(a_rd_mode, a_rd_row)];
    if (b_rd_en) b_q <= mem[addr_of(b_rd_mode, b_rd_row)];
  end

  always_comb begin
    for (int c = 0; c < R; c++) begin
      a_rd_data[c] = fx_t'(a_q[c*DATA_W +: DATA_W]);
      b_rd_data[c] = fx_t'(b_q[c*DATA_W +: DATA_W]);
    end
  end

endmodule
