// tb_ttm_module: self-checking test of the TTM unit at its default sizes.
// The testbench holds Y (rows x I3) and U (R3 x I3) in arrays with one-cycle
// read latency, runs several shapes - including the 32x32x32 and 32x32x256
// tensor / 32x32 and 32x256 matrix cases of the module's evaluation - and
// compares every G entry with a reference computed here with 64-bit integer
// arithmetic. Without stalls it also checks the cycle count
// (rows/B) * (C + 2 + W) + 1 given in the module header; one run stalls the
// G port at random to exercise the handshake.
module tb_ttm_module;
  import tucker_pkg::*;

  localparam int B = 32, LY = 16, LU = 8;
  localparam int ROWS_MAX = 1024, T_MAX = 256, K_MAX = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic [10:0] cfg_rows;
  logic [8:0]  cfg_t;
  logic [5:0]  cfg_k;
  logic        y_rd_en, u_rd_en, g_valid, g_ready;
  logic [10:0] y_rd_row, g_row;
  logic [8:0]  y_rd_t, u_rd_t;
  logic [5:0]  u_rd_k, g_k;
  fx_t y_rd_data [LY];
  fx_t u_rd_data [LU];
  fx_t g_data [LY];

  fx_t Y [ROWS_MAX][T_MAX];
  fx_t U [K_MAX][T_MAX];
  fx_t G [ROWS_MAX][K_MAX];
  bit  Gw [ROWS_MAX][K_MAX];

  int checks = 0, failures = 0;
  int stall_pct;
  longint cyc;

  ttm_module dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // memories with one-cycle latency
  always_ff @(posedge clk) begin
    if (y_rd_en) for (int l = 0; l < LY; l++) y_rd_data[l] <= Y[int'(y_rd_row) + l][int'(y_rd_t)];
    if (u_rd_en) for (int m = 0; m < LU; m++) u_rd_data[m] <= U[int'(u_rd_k) + m][int'(u_rd_t)];
  end

  // G sink with optional random stalls
  always @(posedge clk) begin
    if (g_valid && g_ready)
      for (int l = 0; l < LY; l++) begin
        if (Gw[int'(g_row) + l][int'(g_k)]) begin
          failures++;
          $display("G[%0d][%0d] written twice", int'(g_row) + l, g_k);
        end
        G[int'(g_row) + l][int'(g_k)]  = g_data[l];
        Gw[int'(g_row) + l][int'(g_k)] = 1'b1;
      end
  end
  always @(negedge clk) g_ready <= (stall_pct == 0) || (($urandom % 100) >= stall_pct);

  function automatic int ref_mul(input int a, input int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 16);
  endfunction

  task automatic run(input int rows, input int tt, input int kk, input int stall);
    longint t0, lat, expect_lat;
    int bad;
    stall_pct = stall;
    for (int r = 0; r < rows; r++) for (int t = 0; t < tt; t++)
      Y[r][t] = fx_t'($urandom % 32'h0004_0000) - fx_t'(32'h0002_0000);
    for (int k = 0; k < kk; k++) for (int t = 0; t < tt; t++)
      U[k][t] = fx_t'($urandom % 32'h0002_0000) - fx_t'(32'h0001_0000);
    for (int r = 0; r < rows; r++) for (int k = 0; k < kk; k++) Gw[r][k] = 1'b0;
    @(negedge clk);
    cfg_rows = 11'(rows); cfg_t = 9'(tt); cfg_k = 6'(kk);
    start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    lat = cyc - t0;
    bad = 0;
    for (int r = 0; r < rows; r++)
      for (int k = 0; k < kk; k++) begin
        int s = 0;
        for (int t = 0; t < tt; t++) s += ref_mul(Y[r][t], U[k][t]);
        checks++;
        if (!Gw[r][k] || G[r][k] !== fx_t'(s)) begin
          failures++; bad++;
          if (bad < 4) $display("G[%0d][%0d] got %0d want %0d", r, k, G[r][k], s);
        end
      end
    if (stall == 0) begin
      expect_lat = longint'(rows) / longint'(B) * (longint'(kk) / longint'(LU) * (longint'(B) / longint'(LY)) * longint'(tt) + 64'sd2 + longint'(kk) * (longint'(B) / longint'(LY))) + 64'sd1;
      checks++;
      if (lat != expect_lat) begin
        failures++;
        $display("latency %0d, expected %0d", lat, expect_lat);
      end
    end
    $display("run rows=%0d I3=%0d R3=%0d stall=%0d%%: %0d cycles", rows, tt, kk, stall, lat);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; start = 0; stall_pct = 0; cfg_rows = '0; cfg_t = '0; cfg_k = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(64, 5, 16, 0);
    run(96, 1, 8, 30);
    run(1024, 32, 32, 0);    // 32x32x32 tensor, 32x32 matrix
    run(1024, 256, 32, 0);   // 32x32x256 tensor, 32x256 matrix
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
