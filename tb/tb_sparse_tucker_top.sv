// tb_sparse_tucker_top: end-to-end test of the accelerator at its default
// sizes (200 x 200 x 200 tensor, rank 16 in every mode).
//
// The testbench plays the off-chip parts. A DRAM-side streamer replays the
// sparse tensor's COO list (with random gaps) whenever a Kronecker pass is
// running. A host model loads the initial factors, and on every QR request
// reads all of Y(n), compares it with a reference computed here, and writes
// a new factor U_n. The host model does not run QR with column pivoting: it
// writes fresh pseudo-random factors, which exercises the same data path.
// A DRAM-side sink takes the core tensor G with random back-pressure, and
// every G entry is compared with G = U_3^T Y(3) computed here.
//
// Two power iterations are run. The test counts how often each mechanism
// occurred and fails if one never did: Kronecker reuse, nonzeros
// accumulating into a shared row, stream gaps and stream back-pressure, G
// back-pressure, passes of every mode, QR hand-offs, TTM runs and
// iterations.
module tb_sparse_tucker_top;
  import tucker_pkg::*;

  localparam int I = 200, R = 16, LY = 16, NNZ = 300, ITERS = 2;

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
  int  nz_idx [NNZ][3];
  fx_t nz_val [NNZ];
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
    int k, seen [I][3];
    k = 0;
    while (k < NNZ) begin
      int run, dv;
      int base [3];
      run = 1 + ($urandom % 3);
      dv  = $urandom % 3;
      for (int d = 0; d < 3; d++) base[d] = $urandom % I;
      for (int q = 0; q < run && k < NNZ; q++) begin
        for (int d = 0; d < 3; d++) nz_idx[k][d] = base[d];
        if (q > 0) nz_idx[k][dv] = $urandom % I;
        nz_val[k] = fx_t'($urandom % 32'h0004_0000) - fx_t'(32'h0002_0000);
        k++;
      end
    end
    for (int r = 0; r < I; r++) for (int d = 0; d < 3; d++) seen[r][d] = 0;
    for (int z = 0; z < NNZ; z++) for (int d = 0; d < 3; d++) begin
      if (seen[nz_idx[z][d]][d] != 0) n_shared_row++;
      seen[nz_idx[z][d]][d]++;
    end
  endtask

  initial begin
    #200000000;
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
    make_tensor();
    for (int m = 0; m < 3; m++) write_factor(m);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int it = 0; it < ITERS; it++) begin
      for (int n = 0; n < 3; n++) begin
        while (!qrp_req) @(negedge clk);
        checks++;
        if (int'(qrp_mode) != n) begin failures++; $display("QR request for mode %0d, expected %0d", qrp_mode + 1, n + 1); end
        serve_qrp();
      end
      // TTM of this iteration
      g_beats = 0;
      while (!(dut.ttm_done)) @(negedge clk);
      n_ttm++;
      checks++;
      if (g_beats != (R*R/LY) * R) begin failures++; $display("%0d G beats, expected %0d", g_beats, (R*R/LY)*R); end
      check_g();
    end
    while (busy) @(negedge clk);
    $display("cycles %0d; reuse %0d, shared rows %0d, stream gaps %0d, stream back-pressure %0d, G stalls %0d, QR hand-offs %0d, TTM runs %0d, passes %0d/%0d/%0d",
             cyc, n_reuse, n_shared_row, n_coo_gap, n_coo_bp, n_g_stall, n_qrp, n_ttm,
             n_mode_pass[0], n_mode_pass[1], n_mode_pass[2]);
    checks++; if (n_reuse == 0)      begin failures++; $display("no Kronecker reuse"); end
    checks++; if (n_shared_row == 0) begin failures++; $display("no shared-row accumulation"); end
    checks++; if (n_coo_gap == 0)    begin failures++; $display("no stream gap"); end
    checks++; if (n_coo_bp == 0)     begin failures++; $display("no stream back-pressure"); end
    checks++; if (n_g_stall == 0)    begin failures++; $display("no G stall"); end
    checks++; if (n_qrp != 3*ITERS)  begin failures++; $display("%0d QR hand-offs", n_qrp); end
    checks++; if (n_ttm != ITERS)    begin failures++; $display("%0d TTM runs", n_ttm); end
    for (int d = 0; d < 3; d++) begin
      checks++;
      if (n_mode_pass[d] != ITERS) begin failures++; $display("mode %0d ran %0d passes", d + 1, n_mode_pass[d]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
