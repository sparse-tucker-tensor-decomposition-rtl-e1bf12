// sparse_tucker_top: FPGA side of a hybrid FPGA-CPU sparse Tucker accelerator.
//
// The accelerator runs the power iteration of a sparse Tucker decomposition
// of an order-3 tensor X (I1 x I2 x I3, given as a stream of COO nonzeros).
// For each mode n it builds the unfolded matrix
//   Y(n)(i_n, :) = sum over nonzeros x of x * (U_a(i_a,:) kron U_b(i_b,:))
// with the Kronecker module, hands Y(n) to the host CPU, which computes the
// new factor U_n by QR with column pivoting and writes it back, and after
// the last mode forms the core tensor G = U_3^T Y(3) with the TTM module.
//
// Blocks: controller (sequencing), kron_module (with kron_product inside),
// y_accumulator (the Y(n) store), factor_buffer (U_1..U_3), ttm_module
// (with its ttm_pe grid). Off-chip parts are reached through plain ports:
//  - coo_*   : nonzero stream from FPGA-side DRAM, replayed once per mode;
//              kron_pass/kron_mode tell the streamer when and for which mode;
//  - u_wr_*  : host writes of factor rows (initial factors and QR results);
//  - y_rd_*  : host reads of Y(n) while qrp_req is high (one-cycle latency;
//              word i_n*R + s holds Y(n)(i_n, s*R .. s*R+R-1));
//  - qrp_req/qrp_mode/qrp_done : QR hand-off to the CPU;
//  - g_*     : core tensor writes to DRAM, LANES_Y entries of one column of
//              G (rows g_row .. g_row+LANES_Y-1, column g_k) per beat.
// The factor store's read port A is shared by the Kronecker module and the
// TTM unit, and the Y(n) store's read port by the host and the TTM unit; the
// controller's phase decides the owner.
//
// Sizes: I_MAX = 200 and R = 16 are the synthetic benchmark's tensor size and
// rank; B = 32, LANES_Y = 16 and LANES_U = 8 are the TTM batch size and
// partition factors. All modes share one size I_MAX and one rank R (R1 = R2
// = R3), and R must be a multiple of LANES_Y and LANES_U.
module sparse_tucker_top
  import tucker_pkg::*;
#(
  parameter int unsigned I_MAX   = 200,
  parameter int unsigned R       = 16,
  parameter int unsigned B       = 32,
  parameter int unsigned LANES_Y = 16,
  parameter int unsigned LANES_U = 8,
  parameter int unsigned ITER_W  = 8,
  localparam int unsigned FW  = $clog2(I_MAX),
  localparam int unsigned YAW = $clog2(I_MAX * R),
  localparam int unsigned RW  = $clog2(R * R + 1),
  localparam int unsigned TW  = $clog2(I_MAX + 1),
  localparam int unsigned KW  = $clog2(R + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // run control
  input  logic              start,
  input  logic [ITER_W-1:0] cfg_iters,
  input  logic [TW-1:0]     cfg_i3,       // I3, length of mode 3
  output logic              busy,
  output logic              done,
  output logic [ITER_W-1:0] iter,
  // sparse tensor stream
  output logic              kron_pass,
  output logic [1:0]        kron_mode,
  input  logic              coo_valid,
  output logic              coo_ready,
  input  coo_t              coo_data,
  input  logic              coo_last,
  output logic              reuse_hit,
  // host: factor matrix writes
  input  logic              u_wr_en,
  input  logic [1:0]        u_wr_mode,
  input  logic [FW-1:0]     u_wr_row,
  input  fx_t               u_wr_data [R],
  // host: QR hand-off and Y(n) reads
  output logic              qrp_req,
  output logic [1:0]        qrp_mode,
  input  logic              qrp_done,
  input  logic              y_rd_en,
  input  logic [YAW-1:0]    y_rd_addr,
  output fx_t               y_rd_data [R],
  // core tensor writes
  output logic              g_valid,
  input  logic              g_ready,
  output logic [RW-1:0]     g_row,
  output logic [KW-1:0]     g_k,
  output fx_t               g_data [LANES_Y]
);

  // ---------------- controller
  logic       ttm_phase, clr_start, clr_busy, kron_start, kron_done;
  logic       ttm_start, ttm_done, ttm_busy;
  logic [1:0] mode;

  controller #(.ITER_W(ITER_W)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .cfg_iters (cfg_iters),
    .busy      (busy),
    .done      (done),
    .mode      (mode),
    .iter      (iter),
    .ttm_phase (ttm_phase),
    .clr_start (clr_start),
    .clr_busy  (clr_busy),
    .kron_start(kron_start),
    .kron_done (kron_done),
    .qrp_req   (qrp_req),
    .qrp_done  (qrp_done),
    .ttm_start (ttm_start),
    .ttm_done  (ttm_done)
  );
  assign qrp_mode  = mode;
  assign kron_mode = mode;

  // ---------------- factor store
  logic          fa_en, fb_en, ka_en;
  logic [1:0]    fa_mode, fb_mode, ka_mode;
  logic [FW-1:0] fa_row, fb_row, ka_row;
  fx_t           fa_data [R];
  fx_t           fb_data [R];

  factor_buffer #(.I_MAX(I_MAX), .R(R)) u_fbuf (
    .clk      (clk),
    .wr_en    (u_wr_en),
    .wr_mode  (u_wr_mode),
    .wr_row   (u_wr_row),
    .wr_data  (u_wr_data),
    .a_rd_en  (fa_en),
    .a_rd_mode(fa_mode),
    .a_rd_row (fa_row),
    .a_rd_data(fa_data),
    .b_rd_en  (fb_en),
    .b_rd_mode(fb_mode),
    .b_rd_row (fb_row),
    .b_rd_data(fb_data)
  );

  // ---------------- Y(n) store
  logic           acc_en, yrd_en;
  logic [YAW-1:0] acc_addr, yrd_addr;
  fx_t            acc_data [R];
  fx_t            yrd_data [R];

  y_accumulator #(.I_MAX(I_MAX), .R(R)) u_yacc (
    .clk        (clk),
    .rst_n      (rst_n),
    .clear_start(clr_start),
    .clear_busy (clr_busy),
    .acc_en     (acc_en),
    .acc_addr   (acc_addr),
    .acc_data   (acc_data),
    .rd_en      (yrd_en),
    .rd_addr    (yrd_addr),
    .rd_data    (yrd_data)
  );
  assign y_rd_data = yrd_data;

  // ---------------- Kronecker module
  kron_module #(.I_MAX(I_MAX), .R(R)) u_kron (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (kron_start),
    .mode      (mode),
    .busy      (kron_pass),
    .done      (kron_done),
    .reuse_hit (reuse_hit),
    .coo_valid (coo_valid),
    .coo_ready (coo_ready),
    .coo_data  (coo_data),
    .coo_last  (coo_last),
    .fa_rd_en  (ka_en),
    .fa_rd_mode(ka_mode),
    .fa_rd_row (ka_row),
    .fa_rd_data(fa_data),
    .fb_rd_en  (fb_en),
    .fb_rd_mode(fb_mode),
    .fb_rd_row (fb_row),
    .fb_rd_data(fb_data),
    .acc_en    (acc_en),
    .acc_addr  (acc_addr),
    .acc_data  (acc_data)
  );

  // ---------------- TTM module
  logic          t_y_en, t_u_en;
  logic [RW-1:0] t_y_row;
  logic [TW-1:0] t_y_t, t_u_t;
  logic [KW-1:0] t_u_k;
  fx_t           t_y_data [LANES_Y];
  fx_t           t_u_data [LANES_U];
  logic [RW-1:0] t_y_row_q;
  logic [KW-1:0] t_u_k_q;

  ttm_module #(
    .B(B), .LANES_Y(LANES_Y), .LANES_U(LANES_U),
    .ROWS_MAX(R * R), .T_MAX(I_MAX), .K_MAX(R)
  ) u_ttm (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (ttm_start),
    .cfg_rows (RW'(R * R)),
    .cfg_t    (cfg_i3),
    .cfg_k    (KW'(R)),
    .busy     (ttm_busy),
    .done     (ttm_done),
    .y_rd_en  (t_y_en),
    .y_rd_row (t_y_row),
    .y_rd_t   (t_y_t),
    .y_rd_data(t_y_data),
    .u_rd_en  (t_u_en),
    .u_rd_k   (t_u_k),
    .u_rd_t   (t_u_t),
    .u_rd_data(t_u_data),
    .g_valid  (g_valid),
    .g_ready  (g_ready),
    .g_row    (g_row),
    .g_k      (g_k),
    .g_data   (g_data)
  );

  // Y[r][t] of the TTM is word t*R + r/R, lane r%R of the Y(3) store;
  // U[k][t] is U_3(t, k), entry k of factor row t of mode 3.
  always_ff @(posedge clk) begin
    t_y_row_q <= t_y_row;
    t_u_k_q   <= t_u_k;
  end

  always_comb begin
    for (int l = 0; l < LANES_Y; l++)
      t_y_data[l] = yrd_data[(int'(t_y_row_q) % R) + l];
    for (int m = 0; m < LANES_U; m++)
      t_u_data[m] = fa_data[int'(t_u_k_q) + m];
  end

  // shared read ports: TTM during its phase, otherwise Kronecker / host
  always_comb begin
    if (ttm_phase) begin
      fa_en    = t_u_en;
      fa_mode  = 2'd2;
      fa_row   = FW'(t_u_t);
      yrd_en   = t_y_en;
      yrd_addr = YAW'(t_y_t) * YAW'(R) + YAW'(int'(t_y_row) / R);
    end else begin
      fa_en    = ka_en;
      fa_mode  = ka_mode;
      fa_row   = ka_row;
      yrd_en   = y_rd_en;
      yrd_addr = y_rd_addr;
    end
  end

  // build-time rules on the sizes
  if (R % LANES_Y != 0 || R % LANES_U != 0 || (R * R) % B != 0 || R < 2) begin : g_bad_size
    $error("R must be a multiple of LANES_Y and LANES_U, and R*R of B");
  end

  a_host_reads_in_qrp: assert property (@(posedge clk) disable iff (!rst_n)
    y_rd_en |-> !ttm_phase);
  a_ttm_busy: assert property (@(posedge clk) disable iff (!rst_n)
    ttm_busy |-> ttm_phase);

endmodule
