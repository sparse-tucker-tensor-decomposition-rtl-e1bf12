// controller: sequencer of the sparse Tucker power iteration on the FPGA side.
//
// One iteration of the algorithm visits the modes n = 1, 2, 3 in turn. For
// each mode the controller
//   1. clears the Y(n) store,
//   2. runs a Kronecker pass of the sparse tensor for mode n (the nonzeros are
//      streamed in again for every pass),
//   3. hands Y(n) to the CPU, which computes the new factor U_n by QR with
//      column pivoting and writes it into the factor store, and waits until
//      the CPU reports completion on qrp_done.
// After mode 3 it runs the TTM unit once, G = U_3^T Y(3), which leaves the
// iteration's core tensor in off-chip memory. It repeats this cfg_iters
// times, then pulses done.
//
// Handshakes: start is taken in idle. Every sub-unit is started with a
// one-cycle pulse and reports back with a one-cycle done pulse, except the
// clear, which is watched through its busy level. qrp_req is a level that
// stays high, with qrp_mode valid, until qrp_done is seen. mode and
// state are outputs so the top level can steer the shared memory ports.
// The split of work between FPGA and CPU, the mode order and the one TTM
// per iteration follow the design; the state machine and its handshakes are
// this implementation's (the design names the controller without detailing
// it).
module controller #(
  parameter int unsigned ITER_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ITER_W-1:0] cfg_iters,   // power iterations, at least 1
  output logic              busy,
  output logic              done,
  output logic [1:0]        mode,        // 0..2 = modes 1..3
  output logic [ITER_W-1:0] iter,
  output logic              ttm_phase,   // TTM unit owns the shared read ports
  // Y(n) store clear
  output logic              clr_start,
  input  logic              clr_busy,
  // Kronecker module
  output logic              kron_start,
  input  logic              kron_done,
  // CPU QR step
  output logic              qrp_req,
  input  logic              qrp_done,
  // TTM module
  output logic              ttm_start,
  input  logic              ttm_done
);

  typedef enum logic [2:0] {
    C_IDLE, C_CLEAR, C_CLEAR_WAIT, C_KRON, C_QRP, C_TTM
  } cstate_t;
  cstate_t state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      mode       <= '0;
      iter       <= '0;
      done       <= 1'b0;
      clr_start  <= 1'b0;
      kron_start <= 1'b0;
      ttm_start  <= 1'b0;
    end else begin
      done       <= 1'b0;
      clr_start  <= 1'b0;
      kron_start <= 1'b0;
      ttm_start  <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          mode      <= '0;
          iter      <= '0;
          clr_start <= 1'b1;
          state     <= C_CLEAR;
        end
        // wait for the clear to be seen running
        C_CLEAR: if (clr_busy) state <= C_CLEAR_WAIT;
        C_CLEAR_WAIT: if (!clr_busy) begin
          kron_start <= 1'b1;
          state      <= C_KRON;
        end
        C_KRON: if (kron_done) state <= C_QRP;
        C_QRP: if (qrp_done) begin
          if (mode != 2'd2) begin
            mode      <= mode + 1'b1;
            clr_start <= 1'b1;
            state     <= C_CLEAR;
          end else begin
            ttm_start <= 1'b1;
            state     <= C_TTM;
          end
        end
        C_TTM: if (ttm_done) begin
          if (iter + 1'b1 < cfg_iters) begin
            iter      <= iter + 1'b1;
            mode      <= '0;
            clr_start <= 1'b1;
            state     <= C_CLEAR;
          end else begin
            done  <= 1'b1;
            state <= C_IDLE;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != C_IDLE);
    qrp_req   = (state == C_QRP);
    ttm_phase = (state == C_TTM);
  end

  a_iters: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == C_IDLE) |-> cfg_iters != 0);

endmodule
