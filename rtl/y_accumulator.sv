// y_accumulator: on-chip store of the unfolded power-iteration result Y(n).
//
// For mode n, Y(n) has one row per index i_n (up to I_MAX rows) and R*R
// columns, the Kronecker product of the two other modes' factor rows. The
// store keeps each row as R words of R entries: word (i_n*R + s) holds the
// columns s*R .. s*R + R-1. The Kronecker unit adds one scaled segment per
// cycle into a word (read-modify-write within one cycle, so back-to-back
// updates of the same word need no forwarding); nonzeros that share the index
// i_n therefore accumulate into the same row. After the last mode the same
// store is read as the R1R2 x I3 matrix Y of the core-tensor TTM: entry
// Y[r][t] sits in word t*R + r/R, lane r%R.
//
// Ports. clear_start zeroes the whole store, one word per cycle, while
// clear_busy is high (I_MAX*R cycles). acc_en adds acc_data into word
// acc_addr at the clock edge. rd_en reads word rd_addr; rd_data appears one
// cycle later. The accumulator's role follows the design's Kronecker data
// flow; the word layout, the sequential clear and the port timing are this
// implementation's own.
module y_accumulator
  import tucker_pkg::*;
#(
  parameter int unsigned I_MAX = 200,
  parameter int unsigned R     = 16,
  localparam int unsigned DEPTH = I_MAX * R,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear_start,
  output logic          clear_busy,
  input  logic          acc_en,
  input  logic [AW-1:0] acc_addr,
  input  fx_t           acc_data [R],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output fx_t           rd_data [R]
);

  typedef logic [R*DATA_W-1:0] word_t;

  word_t         mem [DEPTH];
  word_t         rd_q, acc_old, acc_new;
  logic [AW-1:0] clr_addr;

  always_comb begin
    acc_old = mem[acc_addr];
    for (int c = 0; c < R; c++)
      acc_new[c*DATA_W +: DATA_W] = acc_old[c*DATA_W +: DATA_W] + acc_data[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clear_busy <= 1'b0;
      clr_addr   <= '0;
    end else if (clear_start && !clear_busy) begin
      clear_busy <= 1'b1;
      clr_addr   <= '0;
    end else if (clear_busy) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == AW'(DEPTH - 1)) clear_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (clear_busy)  mem[clr_addr] <= '0;
    else if (acc_en) mem[acc_addr] <= acc_new;
    if (rd_en) rd_q <= mem[rd_addr];
  end

  always_comb begin
    for (int c = 0; c < R; c++) rd_data[c] = fx_t'(rd_q[c*DATA_W +: DATA_W]);
  end

  // the Kronecker unit must not write while the store is being cleared
  a_no_acc_in_clear: assert property (@(posedge clk) disable iff (!rst_n)
    clear_busy |-> !acc_en);

endmodule
