// kron_module: the Kronecker-product module of the power iteration.
//
// For mode n of an order-3 sparse tensor X it forms
//   Y(n)(i_n, :) += x * ( U_a(i_a, :) kron U_b(i_b, :) )
// for every nonzero x at (i_1, i_2, i_3), where a < b are the two modes other
// than n. Only nonzeros are visited, so the work is nnz * R row steps instead
// of a dense tensor-times-matrix chain.
//
// Data flow, per nonzero taken from the COO stream:
//  1. the indices i_a and i_b select the rows U_a(i_a,:) and U_b(i_b,:) from
//     the factor store (one-cycle read);
//  2. for i = 0 .. R-1, one i per cycle, kron_product multiplies a[i] by the
//     whole row b (R multipliers), giving columns R*i .. R*i+R-1 of the
//     Kronecker product;
//  3. the segment is multiplied by the nonzero's value x (R multipliers);
//  4. the scaled segment is added into word i_n*R + i of the Y(n) store.
// Steps 2-4 form a pipeline that accepts a new nonzero in the cycle its
// predecessor's last row step is issued, so a stream runs at R cycles per
// nonzero. If a nonzero has the same (i_a, i_b) as the one before it, its
// Kronecker product is taken from a reuse buffer holding the last product's
// R segments instead of being recomputed, and no factor rows are read;
// reuse_hit pulses for each such nonzero. The buffer is invalidated at the
// start of every pass.
//
// Interface. start begins a pass for mode (0..2 = modes 1..3). Nonzeros
// arrive on a valid/ready stream; coo_last marks the final one. done pulses
// one cycle after the last accumulation of the pass has been issued to the
// Y(n) store. The module owns read ports A and B of the factor store and
// the accumulate port of the Y(n) store.
// Which rows are selected, the kron order, the multiply-only product, the
// scaling by the nonzero and the accumulation of nonzeros sharing i_n follow
// the design. The pipeline depth, the stream handshake and the exact form of
// the reuse buffer (last product only) are this implementation's.
module kron_module
  import tucker_pkg::*;
#(
  parameter int unsigned I_MAX = 200,
  parameter int unsigned R     = 16,
  localparam int unsigned FW  = $clog2(I_MAX),
  localparam int unsigned YAW = $clog2(I_MAX * R),
  localparam int unsigned IW  = (R > 1) ? $clog2(R) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [1:0]     mode,
  output logic           busy,
  output logic           done,
  output logic           reuse_hit,
  // sparse tensor stream
  input  logic           coo_valid,
  output logic           coo_ready,
  input  coo_t           coo_data,
  input  logic           coo_last,
  // factor store, read ports A and B
  output logic           fa_rd_en,
  output logic [1:0]     fa_rd_mode,
  output logic [FW-1:0]  fa_rd_row,
  input  fx_t            fa_rd_data [R],
  output logic           fb_rd_en,
  output logic [1:0]     fb_rd_mode,
  output logic [FW-1:0]  fb_rd_row,
  input  fx_t            fb_rd_data [R],
  // Y(n) store, accumulate port
  output logic           acc_en,
  output logic [YAW-1:0] acc_addr,
  output fx_t            acc_data [R]
);

  logic       active, seen_last;
  logic [1:0] mode_q, ma, mb;

  // the two other modes, in increasing order
  always_comb begin
    unique case (mode_q)
      2'd0:    begin ma = 2'd1; mb = 2'd2; end
      2'd1:    begin ma = 2'd0; mb = 2'd2; end
      default: begin ma = 2'd0; mb = 2'd1; end
    endcase
  end

  // ---- stage F: accept a nonzero and fetch its factor rows
  logic    fire, fetch_pend, reuse_pend, running;
  logic    cache_ok;
  idx_t    cache_ia, cache_ib;
  coo_t    nz_q;
  logic    step_now, step_last, reuse_now;
  logic [IW-1:0] i_q, i_cur;
  fx_t     a_row [R];
  fx_t     b_row [R];
  fx_t     a_vec [R];
  fx_t     b_vec [R];
  fx_t     x_q;
  idx_t    rowidx_q;
  logic    nz_hits;

  always_comb begin
    step_now  = fetch_pend || running;
    i_cur     = fetch_pend ? '0 : i_q;
    step_last = step_now && (i_cur == IW'(R - 1));
    coo_ready = active && !seen_last && (!step_now || step_last);
    fire      = coo_valid && coo_ready;
    nz_hits   = cache_ok && coo_data.idx[ma] == cache_ia && coo_data.idx[mb] == cache_ib;
    fa_rd_en   = fire && !nz_hits;
    fa_rd_mode = ma;
    fa_rd_row  = FW'(coo_data.idx[ma]);
    fb_rd_en   = fire && !nz_hits;
    fb_rd_mode = mb;
    fb_rd_row  = FW'(coo_data.idx[mb]);
    for (int c = 0; c < R; c++) begin
      a_vec[c] = fetch_pend ? fa_rd_data[c] : a_row[c];
      b_vec[c] = fetch_pend ? fb_rd_data[c] : b_row[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      seen_last  <= 1'b0;
      mode_q     <= '0;
      fetch_pend <= 1'b0;
      reuse_pend <= 1'b0;
      running    <= 1'b0;
      i_q        <= '0;
      cache_ok   <= 1'b0;
      cache_ia   <= '0;
      cache_ib   <= '0;
      nz_q       <= '0;
      x_q        <= '0;
      rowidx_q   <= '0;
      reuse_now  <= 1'b0;
      reuse_hit  <= 1'b0;
    end else begin
      reuse_hit <= 1'b0;
      if (start && !active) begin
        active    <= 1'b1;
        seen_last <= 1'b0;
        mode_q    <= mode;
        cache_ok  <= 1'b0;
      end
      if (done) active <= 1'b0;

      fetch_pend <= fire;
      if (fire) begin
        nz_q       <= coo_data;
        reuse_pend <= nz_hits;
        reuse_hit  <= nz_hits;
        cache_ok   <= 1'b1;
        cache_ia   <= coo_data.idx[ma];
        cache_ib   <= coo_data.idx[mb];
        if (coo_last) seen_last <= 1'b1;
      end

      if (fetch_pend) begin
        // first row step of a new nonzero; keep its operands for the rest
        x_q       <= nz_q.val;
        rowidx_q  <= nz_q.idx[mode_q];
        reuse_now <= reuse_pend;
      end
      if (step_now) begin
        running <= !step_last;
        i_q     <= i_cur + 1'b1;
      end
    end
  end

  // factor rows of the current nonzero (data path, no reset)
  always_ff @(posedge clk) begin
    if (fetch_pend) begin
      a_row <= a_vec;
      b_row <= b_vec;
    end
  end

  // operands of the current step, including the first (taken from nz_q)
  fx_t  x_cur;
  idx_t row_cur;
  logic reuse_cur;
  always_comb begin
    x_cur     = fetch_pend ? nz_q.val : x_q;
    row_cur   = fetch_pend ? nz_q.idx[mode_q] : rowidx_q;
    reuse_cur = fetch_pend ? reuse_pend : reuse_now;
  end

  // ---- stage K: Kronecker row segment (computed, or taken from the reuse buffer)
  logic          k_valid, k_reuse;
  logic [IW-1:0] k_i;
  fx_t           k_seg [R];
  fx_t           kbuf_q [R];
  fx_t           k_x;
  idx_t          k_row;
  fx_t           kbuf [R][R];
  logic          kp_valid;     // equals k_valid && !k_reuse
  logic [IW-1:0] kp_i;         // equals k_i

  kron_product #(.R3(R), .IW(IW)) u_kron (
    .clk       (clk),
    .rst_n     (rst_n),
    .step_valid(step_now && !reuse_cur),
    .step_i    (i_cur),
    .a_i       (a_vec[i_cur]),
    .b_vec     (b_vec),
    .c_valid   (kp_valid),
    .c_i       (kp_i),
    .c_seg     (k_seg)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_valid <= 1'b0;
      k_reuse <= 1'b0;
      k_i     <= '0;
      k_x     <= '0;
      k_row   <= '0;
    end else begin
      k_valid <= step_now;
      k_reuse <= reuse_cur;
      k_i     <= i_cur;
      k_x     <= x_cur;
      k_row   <= row_cur;
    end
  end

  always_ff @(posedge clk) begin
    if (step_now) kbuf_q <= kbuf[i_cur];
    if (kp_valid) kbuf[kp_i] <= k_seg;
  end

  // ---- stage S: scale by the nonzero value; stage A: accumulate
  fx_t kron_seg [R];
  always_comb begin
    for (int c = 0; c < R; c++) kron_seg[c] = k_reuse ? kbuf_q[c] : k_seg[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_en   <= 1'b0;
      acc_addr <= '0;
    end else begin
      acc_en   <= k_valid;
      acc_addr <= YAW'(k_row) * YAW'(R) + YAW'(k_i);
    end
  end

  always_ff @(posedge clk) begin
    if (k_valid)
      for (int c = 0; c < R; c++) acc_data[c] <= fx_mul(k_x, kron_seg[c]);
  end

  // ---- end of pass: last nonzero taken and the pipeline empty
  always_comb begin
    busy = active;
    done = active && seen_last && !step_now && !k_valid && acc_en;
  end

  a_reuse_timing: assert property (@(posedge clk) disable iff (!rst_n)
    (k_valid && k_reuse) |-> cache_ok);

endmodule
