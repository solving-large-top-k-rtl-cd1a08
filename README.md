# Top-K sparse eigensolver: Lanczos + Jacobi systolic array

SystemVerilog (IEEE 1800-2017) model of an FPGA accelerator for the Top-K sparse
eigenproblem, after "Solving Large Top-K Graph Eigenproblems with a Memory and
Compute-optimized FPGA Design". Given a large sparse symmetric matrix `M` (n x n, values in
(-1, 1)) and a small `K` (up to 24), it computes the K x K tridiagonal matrix `T` and the
Lanczos vectors `V` with the Lanczos algorithm, then the eigenvalues and eigenvectors of `T`
with a Jacobi systolic array. No host action is needed between the two phases or between
Lanczos iterations.

```
            HBM (matrix partitions, vector replicas, SpMV results)        DDR (v1, V, w')
              |  burst   | 5 word reads  | 512-bit write                  |  2 rd, 1 wr
   +----------v----------v---------------v----------+                     |
   | spmv_cu x5: matrix fetch -> dense-vector fetch |                     |
   |             -> aggregation -> write-back       |                     |
   +------------------------+-----------------------+                     |
                            | (results in HBM)                            |
                      merge_unit --- w stream ---> lanczos_vector_unit <--+
                                                     | 25 replica writes (HBM)
          lanczos_core (sequencer: norm, sqrt, 1/beta, SpMV, Paige, re-orth)
                            | 3K-2 values of T
                       plram_buffer
                            |
          jacobi_core: K/2 diagonal PEs, (K/2)(K/2-1) off-diagonal PEs,
                       (K/2)^2 eigenvector PEs, interchange network
                            |
               eigenvalues, eigenvectors of T (read port)
```

## Files

| File | Module | Role |
|---|---|---|
| `rtl/eig_pkg.sv` | `eig_pkg` | widths, COO/partition types, Q1.31 and Q2.30 multiplies, 2x2 block type and rotations |
| `rtl/sync_fifo.sv` | `sync_fifo` | small synchronous FIFO used by the streaming units |
| `rtl/matrix_fetch_unit.sv` | `matrix_fetch_unit` | COO partition read in bursts of up to 256 beats, 5 non-zeros per beat |
| `rtl/dense_vector_fetch_unit.sv` | `dense_vector_fetch_unit` | 5 random reads of v per cycle, lane k from replica k |
| `rtl/aggregation_unit.sv` | `aggregation_unit` | products, summed per row inside a packet |
| `rtl/writeback_fsm.sv` | `writeback_fsm` | two 15-row buffers, 15 results per 512-bit write |
| `rtl/spmv_cu.sv` | `spmv_cu` | one SpMV compute unit (the four stages above) |
| `rtl/merge_unit.sv` | `merge_unit` | streams the partial results of all CUs as one vector w |
| `rtl/lanczos_vector_unit.sv` | `lanczos_vector_unit` | dot, scale (+ replica writes), Paige pass, axpy |
| `rtl/lanczos_core.sv` | `lanczos_core` | Lanczos sequencer with 5 CUs, merge unit and vector unit |
| `rtl/plram_buffer.sv` | `plram_buffer` | 70-word buffer carrying T to the Jacobi core |
| `rtl/jacobi_diag_pe.sv` | `jacobi_diag_pe` | rotation angle, cos/sin, R B R^T |
| `rtl/jacobi_offdiag_pe.sv` | `jacobi_offdiag_pe` | R_i B R_j^T |
| `rtl/jacobi_eigvec_pe.sv` | `jacobi_eigvec_pe` | V R_j^T |
| `rtl/jacobi_core.sv` | `jacobi_core` | PE array, interchange, convergence, result read port |
| `rtl/topk_eigensolver.sv` | `topk_eigensolver` | top level |

Each file starts with a comment giving what the module does, how, its interface and timing,
and which parts follow the paper and which are own choices.

## Number formats

* Lanczos side: Q1.31 (the matrix is scaled so that its values lie in (-1, 1), which bounds
  the vectors and T as well). Products are truncated (`>>> 31`). Dot products accumulate in 64
  bits. The reciprocal of beta is a 64-bit Q32.31 value, because 1/beta can exceed 1.
* Jacobi side: Q2.30, so that cos = 1.0 and the sums of the rotations fit. T is shifted right
  by one bit when it is loaded from the PLRAM. Eigenvalues and eigenvectors are read back in Q2.30.

## Memory layout and interfaces

Memories are modelled as word-addressed (32-bit word) ports, one address space per memory:

* **Matrix partition** (one per CU, in HBM): sorted by row, 5 non-zeros per 512-bit beat. Lane
  k uses words 3k (row), 3k+1 (column) and 3k+2 (value). Word 15 is unused. The unused lanes of
  the last beat are ignored.
* **Partition descriptor** `part_t`: `mat_base`, `nnz`, `row_start`, `row_end`, `vec_base`,
  `rep_stride`, `res_base`. The partitions cover rows 0..n-1 in order, each with at least one
  row. Replica r of CU c lives at `vec_base + r*rep_stride`, and lane r reads replica r. Row x of
  a result lives at `res_base + x - row_start`.
* **DDR**: `v1` at `v1_base`, the Lanczos vector V[i] at `v_base + (i-1)*n`, scratch w' at `wp_base`.
* **PLRAM**: alpha_1..alpha_K at 0..K-1. beta_2..beta_K at K..2K-2 (upper diagonal) and again
  at 2K-1..3K-3 (lower diagonal).
* **Port types**:
  * Burst reads use a reduced AXI read channel (`ar_valid/ready/addr/len`, `r_valid/ready/data/last`).
  * Word reads answer in order after a fixed latency `RD_LAT`, with no back-pressure.
  * Writes are 512-bit, with a 16-bit word strobe.
* **Results**: `res_rd_addr` returns the eigenvalue held in slot a (for a < K_MAX) or V[r][s]
  (at address K_MAX + r*K_MAX + s) one cycle later. `eig_valid[s]` marks the slots that hold one
  of the k real rows. The eigenvectors of `M` are the Lanczos vectors times the eigenvectors of
  T; the host forms this product.

## Operation and timing

`start` on `topk_eigensolver`, with `n`, `k` (2..24), the re-orthogonalisation mode
(`reorth`: 0 none, 1 every iteration, 2 every second iteration) and the descriptors.

Each Lanczos iteration i = 1..k runs these steps in order:

1. A DOT pass over x = v1 (for i = 1) or x = w'_{i-1}. Each pass streams one element per cycle
   and costs about n + RD_LAT + 4 cycles.
2. A bit-serial square root (32 cycles) and one division, giving beta_i and 1/beta_i.
3. A SCALE pass writes v_i to DDR and to the 25 dense-vector replicas in HBM.
4. All 5 CUs run the SpMV in parallel. In steady state each CU takes one 5-non-zero beat per cycle.
5. The merge unit streams w into the PAIGE pass: u = w - beta_i v_{i-1}, alpha_i = u.v_i.
6. An AXPY pass: w' = u - alpha_i v_i.
7. When re-orthogonalisation is enabled, a DOT and an AXPY pass for each j = 1..i.
8. alpha_i and beta_i go to the PLRAM.

When the Lanczos core finishes, the Jacobi core starts on its own:

1. It reads 3k-2 words from the PLRAM.
2. It loads B = T (padded with zero rows up to K_MAX) and V = I.
3. It repeats steps until all off-diagonal |B| < 2^-22, or for at most 12 sweeps of K_MAX-1 steps.
   One step takes 82 cycles:
   * 79 cycles for the diagonal PEs, which compute their angles in lock step;
   * 1 cycle in which every PE rotates;
   * 1 cycle for the row/column interchange;
   * 1 cycle for the convergence test.

The interchange is a round robin. The left slot of block 0 is fixed. The other slots move
one place per step along L1 -> ... -> L(M-1) -> R(M-1) -> ... -> R0 -> L1. So every pair of
rows meets in a diagonal block once every K-1 steps.

Measured in simulation:

* n = 240, K = 24, re-orthogonalisation every iteration, default parameters: 186,333 cycles in
  total, including 107 Jacobi steps (4.7 sweeps).
* n = 60, K = 8: 9,841 cycles with mode 1 and 7,633 cycles with mode 2.

## Parameters (defaults)

| Parameter | Default | Where |
|---|---|---|
| `NCU` / `NC` | 5 compute units | paper |
| `NREP` / `NR` | 5 replicas per CU (25 in all) | paper |
| `ENTRIES` | 5 non-zeros per 512-bit beat | paper |
| `BURST_LEN` | 256 beats | paper (AXI maximum) |
| write-back packet | 15 values | paper |
| `K_MAX` | 24 | largest K the paper evaluates |
| `RD_LAT` | 8 cycles | own |
| Jacobi `TOL`, `MAX_STEPS` | 2^-22 (256 in Q2.30), 12*(K_MAX-1) | own |

## Verification

Each block has a self-checking testbench in `tb/` (`tb_<module>.sv`). Every testbench has a
watchdog, checks cycle counts, and prints one line `TB_RESULT checks=N failures=M`. The shared
files are:

* `tb/mem_model.sv`: a behavioural HBM/DDR model with fixed-latency word reads, strobed writes
  and burst reads with optional stalls.
* `tb/lanczos_tb_harness.svh`: builds a random symmetric sparse matrix, its partitions and a
  double-precision reference Lanczos.
* `tb/eig_ref.svh`: a double-precision Jacobi eigenvalue reference.
* `tb/topk_tb_body.svh`: the end-to-end checks.

The end-to-end tests are:

* `tb_topk_eigensolver` runs the whole design (K_MAX = 8) twice, with re-orthogonalisation
  modes 1 and 2. It counts:
  * SpMV rounds, merge passes and re-orthogonalisation passes;
  * the Jacobi hand-over and PLRAM writes.

  It checks the eigenvalues against the reference within 2e-4 and the eigenvector residuals.
* `tb_topk_eigensolver_full` runs the default parameters (K = 24, n = 240) in about half a minute.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
          --top-module tb_topk_eigensolver rtl/eig_pkg.sv tb/tb_topk_eigensolver.sv
./obj_dir/Vtb_topk_eigensolver
```

## Capacity against the evaluated matrices

At default parameters, each matrix of the paper's Table II fits with K = 24. The largest is
wb-edu (9.84M rows, 57.15M non-zeros):

* HBM: COO at 64 B per 5 non-zeros = 0.68 GiB, plus 25 vector replicas = 0.92 GiB, plus
  results = 0.04 GiB, out of 8 GiB.
* DDR: 26 vectors = 0.95 GiB, out of 32 GiB.
* Addresses: all word addresses stay below 2^32.

The paper's 62.4M-row limit comes from placing each replica in one 256 MB HBM pseudo-channel.
This model uses one flat address space per memory and does not reproduce that limit.

## Differences from the paper, and what is not built

* **Number formats.** Fixed point throughout: Q1.31 for Lanczos, Q2.30 for Jacobi. The paper
  mentions switching to floating point "when required"; no floating-point path is built.
* **Jacobi cores.** One Jacobi core for K_MAX = 24 is built. It serves any k <= 24 by padding
  with zero rows, which it flags invalid. The paper places several Jacobi cores, each optimised
  for one K, on SLR1 and SLR2.
* **Interchange.** The paper's text gives the row/column interchange as "p_ij passes alpha,
  gamma to p_i,j+1 and beta, delta to p_i,j-1". Taken on its own, that rule is not a
  permutation, because two values would land in one slot. The round robin above keeps its fixed
  first slot and its nearest-neighbour moves. It runs in one cycle, as in the paper.
* **Angle series.** The diagonal PE uses atan with range reduction and a series up to u^11, and
  sin/cos series up to theta^7/theta^8. This gives about 1e-6 accuracy. The paper reports order 3
  at 1e-6, which a plain order-3 series cannot reach at pi/4.
* **Paige's reordering.** It is used as described: the beta term is subtracted before alpha is
  formed.
* **Memories.** HBM, DDR, the AXI interconnect and the host are not modelled in RTL. Their
  ports are brought out, and `tb/mem_model.sv` stands in for the memories. The pseudo-channel
  assignment (matrix on one channel per CU, replicas on their own channels) is left to the
  address map.
* **Final eigenvectors.** The product that gives the eigenvectors of M (V times the
  eigenvectors of T) is left to the host, as the paper describes the result without placing
  this product in hardware.
* **Not built:** clock-frequency and resource targets (225 MHz, SLR placement), the host-side
  COO partitioning, and the floating-point fallback.
