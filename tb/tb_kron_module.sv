// tb_kron_module: self-checking test of the Kronecker module, together with
// the factor store and the Y(n) store it drives.
// Random factor matrices (200 x 16) are loaded, and for each of the three
// modes a pass over a random sparse tensor is run: the nonzero list contains
// runs that share the two "other" indices (Kronecker reuse) and nonzeros that
// share the row index (accumulation). Y(n) is read back word by word and
// compared with a reference computed here with 64-bit integer arithmetic.
// One pass per mode streams without gaps and checks the rate of R cycles per
// nonzero (done exactly NNZ*R + 2 cycles after the first nonzero is taken);
// another inserts random gaps in the stream. The number of reuse_hit pulses
// must match the number of nonzeros whose (i_a, i_b) repeat the previous one.
module tb_kron_module;
  import tucker_pkg::*;

  localparam int I_MAX = 200, R = 16, NNZ = 120;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done, reuse_hit;
  logic [1:0] mode;
  logic coo_valid, coo_ready, coo_last;
  coo_t coo_data;
  logic fa_rd_en, fb_rd_en, acc_en;
  logic [1:0] fa_rd_mode, fb_rd_mode;
  logic [7:0] fa_rd_row, fb_rd_row;
  fx_t fa_rd_data [R];
  fx_t fb_rd_data [R];
  logic [11:0] acc_addr;
  fx_t acc_data [R];

  // factor store write port and Y store ports
  logic wr_en; logic [1:0] wr_mode; logic [7:0] wr_row; fx_t wr_data [R];
  logic clear_start, clear_busy, rd_en; logic [11:0] rd_addr; fx_t rd_data [R];

  kron_module #(.I_MAX(I_MAX), .R(R)) dut (.*);

  factor_buffer #(.I_MAX(I_MAX), .R(R)) u_fb (
    .clk, .wr_en, .wr_mode, .wr_row, .wr_data,
    .a_rd_en(fa_rd_en), .a_rd_mode(fa_rd_mode), .a_rd_row(fa_rd_row), .a_rd_data(fa_rd_data),
    .b_rd_en(fb_rd_en), .b_rd_mode(fb_rd_mode), .b_rd_row(fb_rd_row), .b_rd_data(fb_rd_data));

  y_accumulator #(.I_MAX(I_MAX), .R(R)) u_y (
    .clk, .rst_n, .clear_start, .clear_busy, .acc_en, .acc_addr, .acc_data,
    .rd_en, .rd_addr, .rd_data);

  fx_t  U [3][I_MAX][R];
  int   nz_idx [NNZ][3];
  fx_t  nz_val [NNZ];
  fx_t  Yref [I_MAX*R][R];
  int   checks = 0, failures = 0, hits = 0;
  longint cyc;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (reuse_hit) hits++;

  function automatic int ref_mul(input int x, input int y);
    longint p;
    p = longint'(x) * longint'(y);
    return int'(p >>> 16);
  endfunction

  task automatic make_tensor();
    int k;
    k = 0;
    while (k < NNZ) begin
      int run, dv;
      int base [3];
      run = 1 + ($urandom % 3);
      dv  = $urandom % 3;
      for (int d = 0; d < 3; d++) base[d] = $urandom % I_MAX;
      for (int q = 0; q < run && k < NNZ; q++) begin
        for (int d = 0; d < 3; d++) nz_idx[k][d] = base[d];
        // within a run only one index changes, so runs give reuse in one mode
        if (q > 0) nz_idx[k][dv] = $urandom % 8;
        nz_val[k] = fx_t'($urandom % 32'h0004_0000) - fx_t'(32'h0002_0000);
        k++;
      end
    end
  endtask

  task automatic run_pass(input int n, input bit gaps);
    int ma, mb, expect_hits, k;
    longint t_first;
    bit first_taken;
    ma = (n == 0) ? 1 : 0;
    mb = (n == 2) ? 1 : 2;
    // reference
    for (int a = 0; a < I_MAX*R; a++) for (int c = 0; c < R; c++) Yref[a][c] = '0;
    expect_hits = 0;
    for (int z = 0; z < NNZ; z++) begin
      if (z > 0 && nz_idx[z][ma] == nz_idx[z-1][ma] && nz_idx[z][mb] == nz_idx[z-1][mb]) expect_hits++;
      for (int p = 0; p < R; p++)
        for (int q = 0; q < R; q++)
          Yref[nz_idx[z][n]*R + p][q] += fx_t'(ref_mul(nz_val[z], ref_mul(U[ma][nz_idx[z][ma]][p], U[mb][nz_idx[z][mb]][q])));
    end
    // clear Y
    @(negedge clk); clear_start = 1'b1; @(negedge clk); clear_start = 1'b0;
    while (clear_busy) @(negedge clk);
    hits = 0;
    start = 1'b1; mode = 2'(n);
    @(negedge clk); start = 1'b0;
    k = 0; first_taken = 0; t_first = 0;
    while (k < NNZ) begin
      coo_valid = !gaps || (($urandom % 4) != 0);
      for (int d = 0; d < 3; d++) coo_data.idx[d] = idx_t'(nz_idx[k][d]);
      coo_data.val = nz_val[k];
      coo_last = (k == NNZ - 1);
      @(posedge clk);
      if (coo_valid && coo_ready) begin
        if (!first_taken) begin t_first = cyc; first_taken = 1; end
        k++;
      end
      @(negedge clk);
    end
    coo_valid = 1'b0; coo_last = 1'b0;
    while (!done) @(posedge clk);
    if (!gaps) begin
      checks++;
      if (cyc - t_first != longint'(NNZ * R + 2)) begin
        failures++;
        $display("mode %0d: pass took %0d cycles after first nonzero, expected %0d", n + 1, cyc - t_first, NNZ*R + 2);
      end
    end
    checks++;
    if (hits != expect_hits) begin
      failures++;
      $display("mode %0d: %0d reuse hits, expected %0d", n + 1, hits, expect_hits);
    end
    @(negedge clk); @(negedge clk);
    for (int a = 0; a < I_MAX*R; a++) begin
      rd_en = 1'b1; rd_addr = 12'(a);
      @(negedge clk);
      rd_en = 1'b0;
      checks++;
      for (int c = 0; c < R; c++)
        if (rd_data[c] !== Yref[a][c]) begin
          failures++;
          if (failures < 6) $display("mode %0d word %0d lane %0d: got %0d want %0d", n + 1, a, c, rd_data[c], Yref[a][c]);
          break;
        end
    end
    $display("mode %0d pass (gaps=%0d): %0d reuse hits", n + 1, gaps, hits);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; start = 0; mode = '0; coo_valid = 0; coo_last = 0; coo_data = '0;
    wr_en = 0; wr_mode = '0; wr_row = '0; clear_start = 0; rd_en = 0; rd_addr = '0;
    for (int c = 0; c < R; c++) wr_data[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int m = 0; m < 3; m++)
      for (int r = 0; r < I_MAX; r++) begin
        for (int c = 0; c < R; c++) begin
          U[m][r][c] = fx_t'($urandom % 32'h0002_0000) - fx_t'(32'h0001_0000);
          wr_data[c] = U[m][r][c];
        end
        wr_en = 1'b1; wr_mode = 2'(m); wr_row = 8'(r);
        @(negedge clk);
      end
    wr_en = 1'b0;
    make_tensor();
    for (int n = 0; n < 3; n++) begin
      run_pass(n, 1'b0);
      run_pass(n, 1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
