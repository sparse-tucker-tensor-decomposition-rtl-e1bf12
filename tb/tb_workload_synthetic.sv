// tb_workload_synthetic: the synthetic benchmark, a random 200 x 200 x 200
// sparse tensor decomposed at rank 16 in every mode, run at two densities,
// 0.1 % (8,000 nonzeros, sparsity 0.999) and 1 % (80,000 nonzeros, sparsity
// 0.99). Each density gets one full power iteration (three Kronecker passes,
// three QR hand-offs and the core-tensor TTM) on the accelerator at its
// default parameters.
//
// Nonzero coordinates are spread uniformly and are all distinct: nonzero z
// sits at linear position (off + z * 2718281) mod 200^3, a stride coprime to
// 200^3. Values are random Q16.16 numbers in [-2, 2). As in the end-to-end
// test, a host model reads and checks every Y(n) word, writes pseudo-random
// factors in place of the CPU's QR result, and checks every entry of G
// against G = U_3^T Y(3) computed here. Gaps in the nonzero stream and
// back-pressure on G are random. Cycle counts per density are printed.
module tb_workload_synthetic;
  import tucker_pkg::*;

  localparam int I = 200, R = 16, LY = 16, NNZ_MAX = 80000, ITERS = 1;
  localparam int NCASES = 2;
  localparam int CASE_NNZ [NCASES] = '{8000, 80000};
  int NNZ;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic [7:0] cfg_iters, iter;
  logic [7:0] cfg_i3;
  logic kron_pass, coo_valid, coo_ready, coo_last, reuse_hit;
  logic [1:0] kron_mode, qrp_mode, u_wr_mode;
  coo_t coo_data;
  logic u_wr_en; logic [7:0] u_wr_row; fx_t u_wr_data [R];
  logic qrp_req, qrp_done, y_rd_en; logic [11:0] y_rd_addr; fx_t y_rd_data [R];
  logic g_valid, g_ready; logic [8:0] g_row; logic [4:0] g_k; fx_t g_data [LY];

  sparse_tucker_top dut (.*);

  fx_t U [3][I][R];
  int  nz_idx [NNZ_MAX][3];
  fx_t nz_val [NNZ_MAX];
  fx_t Yref [I*R][R];
  fx_t G [R*R][R];
  int  g_beats;

  int checks = 0, failures = 0;
  int n_reuse = 0, n_shared_row = 0, n_coo_gap = 0, n_coo_bp = 0, n_g_stall = 0;
  int n_qrp = 0, n_ttm = 0, n_mode_pass [3];
  longint cyc;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int ref_mul(input int x, input int y);
    longint p;
    p = longint'(x) * longint'(y);
    return int'(p >>> 16);
  endfunction

  // ---------------- DRAM-side COO streamer
  int  ptr;
  logic pass_q;
  always @(posedge clk) begin
    pass_q <= kron_pass;
    if (kron_pass && !pass_q) n_mode_pass[kron_mode]++;
    if (reuse_hit) n_reuse++;
    if (kron_pass && ptr < NNZ && coo_ready && !coo_valid) n_coo_gap++;
    if (coo_valid && !coo_ready) n_coo_bp++;
    if (!kron_pass) ptr <= 0;
    else if (coo_valid && coo_ready) ptr <= ptr + 1;
  end
  always @(negedge clk) begin
    coo_valid <= kron_pass && ptr < NNZ && (($urandom % 5) != 0);
    for (int d = 0; d < 3; d++) coo_data.idx[d] <= idx_t'(nz_idx[ptr < NNZ ? ptr : 0][d]);
    coo_data.val <= nz_val[ptr < NNZ ? ptr : 0];
    coo_last <= (ptr == NNZ - 1);
  end

  // ---------------- DRAM-side G sink
  always @(negedge clk) g_ready <= ($urandom % 4) != 0;
  always @(posedge clk) begin
    if (g_valid && !g_ready) n_g_stall++;
    if (g_valid && g_ready) begin
      for (int l = 0; l < LY; l++) G[int'(g_row) + l][int'(g_k)] = g_data[l];
      g_beats++;
    end
  end

  // ---------------- reference Y(n) for the current factors
  task automatic compute_yref(input int n);
    int ma, mb;
    ma = (n == 0) ? 1 : 0;
    mb = (n == 2) ? 1 : 2;
    for (int a = 0; a < I*R; a++) for (int c = 0; c < R; c++) Yref[a][c] = '0;
    for (int z = 0; z < NNZ; z++)
      for (int p = 0; p < R; p++)
        for (int q = 0; q < R; q++)
          Yref[nz_idx[z][n]*R + p][q] += fx_t'(ref_mul(nz_val[z], ref_mul(U[ma][nz_idx[z][ma]][p], U[mb][nz_idx[z][mb]][q])));
  endtask

  task automatic write_factor(input int m);
    for (int r = 0; r < I; r++) begin
      for (int c = 0; c < R; c++) begin
        U[m][r][c] = fx_t'($urandom % 32'h0002_0000) - fx_t'(32'h0001_0000);
        u_wr_data[c] = U[m][r][c];
      end
      u_wr_en = 1'b1; u_wr_mode = 2'(m); u_wr_row = 8'(r);
      @(negedge clk);
    end
    u_wr_en = 1'b0;
  endtask

  // ---------------- host CPU: QR hand-off
  task automatic serve_qrp();
    int n, bad;
    n = int'(qrp_mode);
    n_qrp++;
    compute_yref(n);
    bad = 0;
    for (int a = 0; a < I*R; a++) begin
      y_rd_en = 1'b1; y_rd_addr = 12'(a);
      @(negedge clk);
      y_rd_en = 1'b0;
      checks++;
      for (int c = 0; c < R; c++)
        if (y_rd_data[c] !== Yref[a][c]) begin
          failures++; bad++;
          if (bad < 4) $display("iter %0d Y(%0d) word %0d lane %0d: got %0d want %0d", iter, n + 1, a, c, y_rd_data[c], Yref[a][c]);
          break;
        end
    end
    write_factor(n);   // stands in for the CPU's QR result
    if (n == 2) compute_yref(2);   // Y(3) stays on chip for the TTM; keep its reference
    qrp_done = 1'b1;
    @(negedge clk);
    qrp_done = 1'b0;
  endtask

  task automatic check_g();
    int bad;
    bad = 0;
    for (int r = 0; r < R*R; r++)
      for (int k = 0; k < R; k++) begin
        int s;
        s = 0;
        for (int t = 0; t < I; t++) s += ref_mul(Yref[t*R + r/R][r%R], U[2][t][k]);
        checks++;
        if (G[r][k] !== fx_t'(s)) begin
          failures++; bad++;
          if (bad < 4) $display("G[%0d][%0d] got %0d want %0d", r, k, G[r][k], s);
        end
      end
  endtask

  task automatic make_tensor();
    int seen [I][3];
    longint off, lin;
    off = longint'($urandom) % longint'(I*I*I);
    for (int z = 0; z < NNZ; z++) begin
      lin = (off + longint'(z) * 64'sd2718281) % longint'(I*I*I);
      nz_idx[z][0] = int'(lin / longint'(I*I));
      nz_idx[z][1] = int'((lin / longint'(I)) % longint'(I));
      nz_idx[z][2] = int'(lin % longint'(I));
      nz_val[z] = fx_t'($urandom % 32'h0004_0000) - fx_t'(32'h0002_0000);
    end
    for (int r = 0; r < I; r++) for (int d = 0; d < 3; d++) seen[r][d] = 0;
    for (int z = 0; z < NNZ; z++) for (int d = 0; d < 3; d++) begin
      if (seen[nz_idx[z][d]][d] != 0) n_shared_row++;
      seen[nz_idx[z][d]][d]++;
    end
  endtask

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; start = 0; cfg_iters = 8'(ITERS); cfg_i3 = 8'(I);
    u_wr_en = 0; u_wr_mode = '0; u_wr_row = '0; qrp_done = 0; y_rd_en = 0; y_rd_addr = '0;
    g_beats = 0; ptr = 0;
    for (int c = 0; c < R; c++) u_wr_data[c] = '0;
    for (int d = 0; d < 3; d++) n_mode_pass[d] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int m = 0; m < 3; m++) write_factor(m);
    for (int cs = 0; cs < NCASES; cs++) begin
      longint c0;
      NNZ = CASE_NNZ[cs];
      make_tensor();
      c0 = cyc;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      for (int n = 0; n < 3; n++) begin
        while (!qrp_req) @(negedge clk);
        checks++;
        if (int'(qrp_mode) != n) begin failures++; $display("QR request for mode %0d, expected %0d", qrp_mode + 1, n + 1); end
        serve_qrp();
      end
      g_beats = 0;
      while (!(dut.ttm_done)) @(negedge clk);
      n_ttm++;
      checks++;
      if (g_beats != (R*R/LY) * R) begin failures++; $display("%0d G beats, expected %0d", g_beats, (R*R/LY)*R); end
      check_g();
      while (busy) @(negedge clk);
      $display("%0d nonzeros (sparsity %0d ppm zero): %0d cycles for one power iteration, host time included",
               NNZ, 1000000 - int'(longint'(NNZ) * 1000000 / longint'(I*I*I)), cyc - c0);
    end
    $display("cycles %0d; reuse %0d, shared rows %0d, stream gaps %0d, stream back-pressure %0d, G stalls %0d, QR hand-offs %0d, TTM runs %0d, passes %0d/%0d/%0d",
             cyc, n_reuse, n_shared_row, n_coo_gap, n_coo_bp, n_g_stall, n_qrp, n_ttm,
             n_mode_pass[0], n_mode_pass[1], n_mode_pass[2]);
        checks++; if (n_shared_row == 0) begin failures++; $display("no shared-row accumulation"); end
    checks++; if (n_coo_gap == 0)    begin failures++; $display("no stream gap"); end
    checks++; if (n_coo_bp == 0)     begin failures++; $display("no stream back-pressure"); end
    checks++; if (n_g_stall == 0)    begin failures++; $display("no G stall"); end
    checks++; if (n_qrp != 3*NCASES)  begin failures++; $display("%0d QR hand-offs", n_qrp); end
    checks++; if (n_ttm != NCASES)    begin failures++; $display("%0d TTM runs", n_ttm); end
    for (int d = 0; d < 3; d++) begin
      checks++;
      if (n_mode_pass[d] != NCASES) begin failures++; $display("mode %0d ran %0d passes", d + 1, n_mode_pass[d]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
