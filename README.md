# Sparse Tucker decomposition accelerator: FPGA-side RTL

Tucker decomposition compresses a tensor X (here of order 3, size I1 x I2 x I3)
into a small core tensor G (R1 x R2 x R3) and three factor matrices U_n
(I_n x R_n). The usual way to compute it is the higher-order power
iteration. For each mode n it computes the tensor Y that results from
multiplying X by the transposed factors of all other modes. It then takes the
leading left singular vectors of the unfolded matrix Y(n) as the new U_n. For a
*sparse* X, a chain of dense tensor-times-matrix products wastes almost all of
its work on zeros.

This RTL implements the FPGA half of a hybrid FPGA-CPU accelerator that avoids
this waste. It follows "Sparse Tucker Tensor Decomposition on a Hybrid
FPGA-CPU Platform" (Jiang, Zhang, Lin, Xing, Zhang, IEEE TCAD). The design has
three ideas:

* **Kronecker products instead of tensor-times-matrix chains.** For mode 1,
  every nonzero x at (i, j, k) adds `x * (U_2(j,:) ⊗ U_3(k,:))` to row i of
  Y(1). The cost is one R2*R3-long row update per nonzero, no matter how large
  the tensor is. Modes 2 and 3 work the same way with the other two factors.
* **QR with column pivoting on the CPU.** The new factor U_n is taken from a
  QR decomposition with column pivoting of Y(n), not from an SVD. That step is
  sequential (a column-norm comparison at every step), so it stays in
  software. The RTL only provides the hand-off.
* **One small TTM at the end of each iteration.** After mode 3, the core
  tensor needs only `G = U_3^T Y(3)`. A batched grid of multiply-accumulate
  elements computes it.

Everything else in the system lies outside this RTL: the host CPU, its
memory, the PCIe link and the FPGA's DRAM. The top level reaches them through
plain ports.

## Block map

```
                   +-------------------- sparse_tucker_top -----------------------+
 COO stream  ----> | kron_module ---------------------------> y_accumulator       | --> y_rd_* (host)
 (from DRAM)       |   |  ^ kron_product (R multipliers)         (Y(n) store)      |
                   |   |  | reuse buffer                            |              |
                   |   v  |                                         v              |
 u_wr_* (host) --> | factor_buffer (U_1, U_2, U_3) ----------> ttm_module          | --> g_* (to DRAM)
                   |                                           (16 x 8 ttm_pe grid,|
                   |                                            tmp registers)     |
                   | controller: mode / pass / QR hand-off / TTM sequencing        | <-> qrp_req/qrp_done
                   +---------------------------------------------------------------+
```

| File | Role |
|---|---|
| `rtl/tucker_pkg.sv` | number format, COO record type, fixed-point multiply |
| `rtl/kron_product.sv` | one row step of a Kronecker product: `a[i] * b[:]`, multipliers only |
| `rtl/kron_module.sv` | per-nonzero row selection, Kronecker product, scaling, accumulation, reuse |
| `rtl/y_accumulator.sv` | on-chip Y(n), one-cycle read-modify-write, clear, read port |
| `rtl/factor_buffer.sv` | on-chip U_1..U_3, one write port, two read ports |
| `rtl/ttm_pe.sv` | multiply, New-Batch multiplexer, add, result buffer |
| `rtl/ttm_module.sv` | batched `G = U^T Y` with a 16 x 8 grid of `ttm_pe` |
| `rtl/controller.sv` | iteration / mode sequencer |
| `rtl/sparse_tucker_top.sv` | wiring and sharing of the memory read ports |

## One iteration, cycle by cycle

The host loads the initial U_1..U_3 (`u_wr_*`). It sets `cfg_iters` and
`cfg_i3`, then pulses `start`. For each mode n = 1, 2, 3 the controller does
three things:

1. **Clear.** It zeroes the Y(n) store, one word per cycle (I_MAX*R = 3200
   cycles at the defaults).
2. **Kronecker pass.** `kron_pass` goes high and `kron_mode` names the mode.
   The DRAM side must then stream *all* nonzeros once, with `coo_last` on the
   final one. Every pass reads the whole tensor again.
3. **QR hand-off.** `qrp_req` goes high with `qrp_mode`. The host reads Y(n)
   through `y_rd_*` (one-cycle latency) and computes the new U_n. It writes
   U_n with `u_wr_*` and pulses `qrp_done`.

After mode 3 the controller starts the TTM. The result G leaves on `g_*`, and
the DRAM side may stall it with `g_ready`. `done` pulses after the last
iteration. The accelerator does not test for convergence. The host chooses
the iteration count, or it runs one iteration at a time and inspects G.

The Y(3) store is not cleared before the TTM, which reads it in place. The
factor U_3 that the TTM uses is the one the host wrote during the mode-3
hand-off. That matches the algorithm, where G comes from the current Y and
the freshly updated U_N.

## The Kronecker datapath

This is the part of the design that does most of the work. Take a pass for
mode n, and let a < b be the other two modes. Mode 1 uses (a, b) = (2, 3),
mode 2 uses (1, 3) and mode 3 uses (1, 2). For each nonzero x at
(i_1, i_2, i_3):

```
   Y(n)(i_n, R*p + q) += x * U_a(i_a, p) * U_b(i_b, q)      p, q = 0..R-1
```

Hardware schedule for one nonzero (R = 16 at the defaults):

| cycle | stage |
|---|---|
| 0 | nonzero accepted (`coo_valid && coo_ready`); factor rows U_a(i_a,:) and U_b(i_b,:) requested |
| 1 .. R | row step p = 0..R-1: `kron_product` forms `U_a(i_a,p) * U_b(i_b,:)` (R multipliers) |
| +1 | the R-wide segment is multiplied by x (R more multipliers) |
| +2 | segment added into word `i_n*R + p` of the Y(n) store (read-modify-write in one cycle) |

The next nonzero is accepted in the cycle that issues the last row step of
the current one. Its rows arrive just in time for its own first step, so a
pass sustains **R cycles per nonzero**. The pass ends (`done`) NNZ*R + 2
cycles after the first nonzero is taken, if the stream has no gaps.

The accumulation is a single-cycle read-modify-write. So two nonzeros that
share the row index i_n, even back to back, add into the same row with no
hazard logic. This is the published design's "accumulate the multiplications
between these nonzero elements" for nonzeros that share an index.

**Kronecker reuse.** When a nonzero has the same (i_a, i_b) as the nonzero
just before it, its Kronecker product is the same. The module keeps the last
product (R segments of R values) in a reuse buffer. In that case it reads no
factor rows and leaves the first multiplier bank idle. `reuse_hit` pulses for
each such nonzero. Reuse saves memory reads and multiplier activity but not
cycles, because the R row steps still run for the scaling and the
accumulation. The buffer holds only the last product. A stream sorted by
(i_a, i_b) gets the most from it. The buffer is invalidated at the start of
each pass.

## The Y(n) store and how the TTM reads it

Y(n) has I_n rows and R*R columns. The store keeps each row as R words of R
values: word `i_n*R + s` holds columns `s*R .. s*R+R-1`. So one Kronecker row
step updates exactly one word.

The TTM wants Y reshaped as an R1R2 x I3 matrix, `Y[r][t] = Y(3)(t, r)`, with
the row index `r = R*r_1 + r_2`. That entry sits in word `t*R + r/R`, lane
`r%R`. Sixteen consecutive rows of one column, which is what one TTM cycle
needs, are one word (or part of one when R > 16). The TTM therefore reads the
store in place and no transposed copy exists. The top level translates the
TTM's (row, t) requests into this address during the TTM phase. In the other
phases the host owns the read port. Read port A of the factor store is shared
the same way: the Kronecker module uses it during passes and the TTM uses it
to read rows of U_3 (`U[k][t] = U_3(t,k)`).

## The TTM unit

`ttm_module` computes `G[r][k] = sum_t Y[r][t] * U[k][t]` for R1R2 rows, R3
columns and I3 terms. The loop nest is batched:

```
for each batch of B = 32 rows:
    for k in groups of 8:                     # unrolled x8
        for row in the batch, groups of 16:   # unrolled x16
            for t in 0 .. I3-1:               # one step per cycle
                PE(l, m) += Y[row+l][t] * U[k+m][t]
            copy the 16 x 8 sums into tmp
    write tmp to G: for k, for row group (16 values per beat)
```

The 16 x 8 grid of `ttm_pe` elements comes from partitioning Y and tmp
cyclically by 16 and U by 8. Each element is a multiplier, an adder and a
result register. A multiplexer before the adder selects 0 on the first term
of a sum ("New Batch") and the register's own value otherwise. The tmp array
(B x R3 values) is held in flip-flops.

Cycle count with no G back-pressure:

```
(R1R2/B) * ( (R3/8)*(B/16)*I3  +  2  +  R3*(B/16) ) + 1
```

At the defaults of the top (R = 16, I3 = 200) that is 8 * (1600 + 2 + 32) + 1
= 13,073 cycles. For the module's own defaults (R = 32, I3 = 256) it is 67,649
cycles. R1R2 must be a multiple of B and R3 a multiple of 8, and an assertion
checks both. Partial batches are not supported.

## Number format

All data are signed 32-bit fixed point with 16 fraction bits (Q16.16). A
product keeps the full 64-bit result, shifts it right arithmetically by 16
and keeps the low 32 bits. Sums wrap. The original design was written in
high-level synthesis and does not state its arithmetic. This choice is this
RTL's own. To change the format, edit `DATA_W`, `FRAC_W` and `fx_mul` in
`tucker_pkg`. The testbenches compute their references with the same
truncation rule in 64-bit integer arithmetic.

## Parameters and what fits

| Parameter | Default | Meaning |
|---|---|---|
| `I_MAX` | 200 | rows per factor matrix and Y(n) rows (all modes) |
| `R` | 16 | rank, the same in all modes |
| `B` | 32 | TTM batch size |
| `LANES_Y` / `LANES_U` | 16 / 8 | TTM grid size (cyclic partition factors) |

The defaults match the whole-accelerator experiment of the published design:
200 x 200 x 200 random sparse tensors with rank 16. The nonzeros are streamed,
so their number is unlimited. The on-chip stores hold 3*I_MAX*R factor values
and I_MAX*R*R Y values (51,200 words, 1.6 Mbit at the defaults).

Other evaluated workloads and their fit:

* **TTM alone, Y of 32x32xI3 with I3 up to 256, R3 = 32.** This fits the TTM
  module's own defaults.
* **NELL-2 (1000^3, R = 16).** This needs `I_MAX = 1000`: an 8.2 Mbit Y store.
* **Amazon (20000^3, R = 32).** Y would be 655 Mbit, so it cannot be kept on
  chip. A version for it would have to stream Y(n) to DRAM, which this RTL
  does not do.
* **Binary matrix-multiplication tensor (25^3, R = 5).** R is not a multiple
  of 16 and R*R is not a multiple of 32. The host would have to pad the rank.
* **Order-2 image (130 x 150, ranks 30 and 35).** This is not supported: the
  RTL is order-3 with one rank.

## Where this RTL departs from, or adds to, the published design

* The published design was described as Vivado HLS code, loop pragmas and
  data-flow figures. The RTL keeps its loop structure (batch of 32, unroll
  factors 8 and 16, pipelined outer and unrolled inner Kronecker loops,
  multiply-only Kronecker unit, tmp in registers). The pipelines, handshakes,
  latencies and memory organisation are this implementation's.
* Y(n) and the factors are held on chip, and the TTM reads Y(3) in place. The
  published design reads Y and U through tensor and matrix interfaces and
  writes G to DRAM. Only the G write and the nonzero stream go off chip here.
* Kronecker reuse covers consecutive nonzeros only.
* The controller's behaviour is not described in the source. The sequence
  here is taken from the algorithm: modes 1..3 with a QR hand-off each, then
  the TTM, repeated `cfg_iters` times.
* The published speed figures (e.g. 0.148 ms for the 32x32x32 TTM, 0.578 us
  for a 32-element Kronecker product) come from an FPGA clock that is not
  given for those runs. They are not reproduced. The testbenches check this
  RTL's own cycle counts instead.
* QR with column pivoting, the PCIe link and both DRAMs are not part of the
  RTL. In the end-to-end testbench the host writes pseudo-random new factors
  in place of a QR result.

## Simulating

Every testbench in `tb/` checks itself against references it computes on its
own. It prints `TB_RESULT checks=N failures=M` and has a watchdog. Example
with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/tucker_pkg.sv \
    tb/tb_sparse_tucker_top.sv --top-module tb_sparse_tucker_top
./obj_dir/Vtb_sparse_tucker_top
```

| Testbench | What it covers |
|---|---|
| `tb_ttm_pe` | random operand sequences, New-Batch marks and idle cycles |
| `tb_ttm_module` | four shapes up to 1024 x 256 x 32, every G entry, exact cycle counts, G back-pressure |
| `tb_kron_product` | full 32 x 32 products, R2-cycle throughput |
| `tb_kron_module` | three modes, with and without stream gaps, reuse count, R cycles per nonzero, all of Y(n) |
| `tb_y_accumulator` | clear time, back-to-back accumulation into one word, re-clear |
| `tb_factor_buffer` | dual-port reads against a shadow copy, data holding between reads |
| `tb_controller` | event order for 1 to 3 iterations against random response delays |
| `tb_sparse_tucker_top` | two full iterations at the default sizes: Y(n) checked at every hand-off, G checked after every TTM, and a count of each mechanism (reuse, shared-row accumulation, stream gaps and back-pressure, G stalls, passes per mode) |
| `tb_workload_synthetic` | the synthetic benchmark: a 200 x 200 x 200 tensor at rank 16 with 8,000 and with 80,000 distinct, uniformly spread nonzeros, one full power iteration each, all Y(n) and G values checked |

The end-to-end test uses 300 nonzeros and runs about 83,000 cycles, in well
under a second after a 15-second build. The synthetic-benchmark test runs
about 4.3 million cycles in a few seconds. At 80,000 nonzeros one power
iteration takes 3.93 million cycles: almost all of it is the three
Kronecker passes at R = 16 cycles per nonzero each.
