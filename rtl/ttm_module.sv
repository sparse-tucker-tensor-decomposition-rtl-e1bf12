// ttm_module: tensor-times-matrix unit, G(N) = U_N^T * Y(N).
//
// It computes the core tensor of a Tucker decomposition from the dense result
// Y of the last power-iteration step. Y is seen reshaped as a matrix of
// cfg_rows = R1*R2 rows and cfg_t = I3 columns, U as cfg_k = R3 rows by I3
// columns (U[k][t] = U_N(t,k)), and the result G has cfg_rows rows and cfg_k
// columns: G[r][k] = sum_t Y[r][t] * U[k][t].
//
// The rows are processed in batches of B (32). For each batch the unit runs
// the loop nest "for k, for row in batch, for t" with the k loop unrolled by
// LANES_U (8) and the row loop by LANES_Y (16), matching the cyclic
// partitioning of U by 8 and of Y and tmp by 16. That gives a grid of
// LANES_Y x LANES_U ttm_pe elements: in each cycle LANES_Y entries of one Y
// column are broadcast down the grid's columns and LANES_U entries of one U
// column along its rows, and every element accumulates one dot product over t.
// When t reaches its end, the grid's sums are copied into the tmp register
// file (B x K_MAX registers, kept in flip-flops as in the design). After the
// whole batch, tmp is written out to G, LANES_Y rows of one column per beat,
// in the order "for k, for row group". Then the next batch starts.
//
// Interfaces. Y and U are read through two single read ports with a fixed
// latency of one cycle (y_rd_row and u_rd_k are lane-group bases); G leaves
// through a write port with a valid/ready handshake (g_ready low stalls the
// write loop). start is sampled in idle; done pulses for one cycle after the
// last G beat.
//
// Timing, with g_ready always high: each batch takes
//   C = (cfg_k/LANES_U) * (B/LANES_Y) * cfg_t  compute cycles,
//   2 drain cycles, and
//   W = cfg_k * (B/LANES_Y) write cycles,
// and done rises (cfg_rows/B) * (C + 2 + W) + 1 cycles after start.
// Batch size, unroll factors and loop order follow the design; the port
// handshakes, the drain and the write-out width are this implementation's.
module ttm_module
  import tucker_pkg::*;
#(
  parameter int unsigned B        = 32,    // batch size b
  parameter int unsigned LANES_Y  = 16,    // cyclic factor of Y and tmp
  parameter int unsigned LANES_U  = 8,     // cyclic factor of U
  parameter int unsigned ROWS_MAX = 1024,  // largest R1*R2
  parameter int unsigned T_MAX    = 256,   // largest I3
  parameter int unsigned K_MAX    = 32,    // largest R3
  localparam int unsigned RW = $clog2(ROWS_MAX + 1),
  localparam int unsigned TW = $clog2(T_MAX + 1),
  localparam int unsigned KW = $clog2(K_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // control
  input  logic          start,
  input  logic [RW-1:0] cfg_rows,   // R1*R2, a multiple of B
  input  logic [TW-1:0] cfg_t,      // I3, at least 1
  input  logic [KW-1:0] cfg_k,      // R3, a multiple of LANES_U
  output logic          busy,
  output logic          done,
  // tensor interface: Y[y_rd_row + l][y_rd_t], l < LANES_Y, one cycle later
  output logic          y_rd_en,
  output logic [RW-1:0] y_rd_row,
  output logic [TW-1:0] y_rd_t,
  input  fx_t           y_rd_data [LANES_Y],
  // matrix interface: U[u_rd_k + m][u_rd_t], m < LANES_U, one cycle later
  output logic          u_rd_en,
  output logic [KW-1:0] u_rd_k,
  output logic [TW-1:0] u_rd_t,
  input  fx_t           u_rd_data [LANES_U],
  // result: G[g_row + l][g_k] = g_data[l]
  output logic          g_valid,
  input  logic          g_ready,
  output logic [RW-1:0] g_row,
  output logic [KW-1:0] g_k,
  output fx_t           g_data [LANES_Y]
);

  localparam int unsigned NG = B / LANES_Y;      // row groups per batch
  localparam int unsigned GW = (NG > 1) ? $clog2(NG) : 1;

  typedef enum logic [2:0] {S_IDLE, S_COMPUTE, S_DRAIN, S_WRITE} state_t;
  state_t state;

  logic [RW-1:0] ib;          // first row of the current batch
  logic [KW-1:0] kb;          // first k of the current lane group
  logic [GW-1:0] iog;         // row group within the batch
  logic [TW-1:0] t;
  logic [1:0]    drain_cnt;
  logic [KW-1:0] wk;          // write loop: column
  logic [GW-1:0] wg;          // write loop: row group

  // grid pipeline: stage 1 = operands arrive, stage 2 = sums complete
  logic          s1_valid, s1_first, s1_last;
  logic [GW-1:0] s1_g;
  logic [KW-1:0] s1_kb;
  logic          s2_last;
  logic [GW-1:0] s2_g;
  logic [KW-1:0] s2_kb;

  fx_t pe_acc [LANES_Y][LANES_U];
  fx_t tmp    [B][K_MAX];

  logic last_t, last_g, last_k, issue;
  always_comb begin
    last_t = (t == cfg_t - 1'b1);
    last_g = (iog == GW'(NG - 1));
    last_k = (kb + KW'(LANES_U) >= cfg_k);
    issue  = (state == S_COMPUTE);
  end

  // read requests
  always_comb begin
    y_rd_en  = issue;
    y_rd_row = ib + RW'(iog) * RW'(LANES_Y);
    y_rd_t   = t;
    u_rd_en  = issue;
    u_rd_k   = kb;
    u_rd_t   = t;
  end

  // control FSM and loop counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ib        <= '0;
      kb        <= '0;
      iog       <= '0;
      t         <= '0;
      drain_cnt <= '0;
      wk        <= '0;
      wg        <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_COMPUTE;
          ib    <= '0;
          kb    <= '0;
          iog   <= '0;
          t     <= '0;
        end
        S_COMPUTE: begin
          if (!last_t) t <= t + 1'b1;
          else begin
            t <= '0;
            if (!last_g) iog <= iog + 1'b1;
            else begin
              iog <= '0;
              if (!last_k) kb <= kb + KW'(LANES_U);
              else begin
                kb        <= '0;
                state     <= S_DRAIN;
                drain_cnt <= 2'd2;
              end
            end
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt - 1'b1;
          if (drain_cnt == 2'd1) begin
            state <= S_WRITE;
            wk    <= '0;
            wg    <= '0;
          end
        end
        S_WRITE: if (g_ready) begin
          if (wg != GW'(NG - 1)) wg <= wg + 1'b1;
          else begin
            wg <= '0;
            if (wk != cfg_k - 1'b1) wk <= wk + 1'b1;
            else if (ib + RW'(B) >= cfg_rows) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              ib    <= ib + RW'(B);
              state <= S_COMPUTE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb busy = (state != S_IDLE);

  // pipeline tags
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_g     <= '0;
      s1_kb    <= '0;
      s2_last  <= 1'b0;
      s2_g     <= '0;
      s2_kb    <= '0;
    end else begin
      s1_valid <= issue;
      s1_first <= issue && (t == '0);
      s1_last  <= issue && last_t;
      s1_g     <= iog;
      s1_kb    <= kb;
      s2_last  <= s1_valid && s1_last;
      s2_g     <= s1_g;
      s2_kb    <= s1_kb;
    end
  end

  // PE grid: element (l, m) handles row ib + g*LANES_Y + l and column kb + m
  for (genvar l = 0; l < LANES_Y; l++) begin : g_row_lane
    for (genvar m = 0; m < LANES_U; m++) begin : g_col_lane
      ttm_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .en       (s1_valid),
        .new_batch(s1_first),
        .y_in     (y_rd_data[l]),
        .u_in     (u_rd_data[m]),
        .acc      (pe_acc[l][m])
      );
    end
  end

  // tmp register file: finished dot products land here
  always_ff @(posedge clk) begin
    if (s2_last) begin
      for (int l = 0; l < LANES_Y; l++)
        for (int m = 0; m < LANES_U; m++)
          tmp[int'(s2_g) * LANES_Y + l][int'(s2_kb) + m] <= pe_acc[l][m];
    end
  end

  // write-out of one batch
  always_comb begin
    g_valid = (state == S_WRITE);
    g_row   = ib + RW'(wg) * RW'(LANES_Y);
    g_k     = wk;
    for (int l = 0; l < LANES_Y; l++)
      g_data[l] = tmp[int'(wg) * LANES_Y + l][int'(wk)];
  end

  // configuration rules
  property p_cfg_ok;
    @(posedge clk) disable iff (!rst_n)
      (start && state == S_IDLE) |->
        (cfg_rows != 0 && (int'(cfg_rows) % B) == 0 && cfg_t != 0 &&
         cfg_k != 0 && (int'(cfg_k) % LANES_U) == 0 &&
         int'(cfg_k) <= K_MAX && int'(cfg_rows) <= ROWS_MAX &&
         int'(cfg_t) <= T_MAX);
  endproperty
  a_cfg_ok: assert property (p_cfg_ok);

  // a G beat holds its data until accepted
  a_g_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (g_valid && !g_ready) |=> (g_valid && $stable(g_row) && $stable(g_k)));

endmodule
