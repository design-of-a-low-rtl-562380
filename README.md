# A streaming one-sided Jacobi SVD engine

This RTL computes a singular value decomposition with a one-sided (Hestenes)
Jacobi method. It is built for matrices that arrive as a stream, one row after
another. The classic method orthogonalises *columns* of A by plane rotations.
Here the matrix is transposed first (W = A^T), so each column of A becomes a
row of W that arrives in one piece. The engine then orthogonalises pairs of
those rows. The same rotations are applied to the rows of an identity matrix,
which accumulates V. Once every row pair of W is orthogonal, row k of W equals
sigma_k times a unit vector. Its length is the singular value, and the unit
vector is column k of U.

The design follows the DSB-Jacobi architecture of Du et al., "Design of A
Low-Latency and Parallelizable SVD Dataflow Architecture on FPGA". That
architecture has:

- an array of P processing units (PUs), each holding one pair of rows;
- a cyclic schedule that moves rows between PUs so that all pairs of a block
  are visited;
- a "RAM sharing" PU in which the same four row buffers serve loading,
  rotating and final readout.

The paper fixes neither the number format nor how the angle is computed, nor
several smaller points. Those choices are this design's own. They are listed
in [Departures and open points](#departures-and-open-points).

## What is computed, exactly

Input: `i_cfg_rows` rows of W = A^T, each `i_cfg_cols` elements long (that is,
A column by column). Call these counts n and m.

The rows are processed in **blocks of 2P consecutive rows**. Inside a block,
one *sweep* rotates every one of the 2P(2P-1)/2 row pairs exactly once.
`i_cfg_sweeps` sweeps are run on the block, then its results are written out,
then the next block is loaded. For one pair (i, j):

    alpha = |w_i|^2,  beta = |w_j|^2,  gamma = w_i . w_j
    tan(2 theta) = 2 gamma / (beta - alpha),   |theta| <= pi/4
    w_i' = c w_i - s w_j,   w_j' = s w_i + c w_j      (c = cos theta, s = sin theta)

The same rotation is applied to rows i and j of V, which start as rows of the
n x n identity. After this rotation w_i' and w_j' are orthogonal.

Output for every row k: sigma_k = |w_k|, the normalised row w_k / sigma_k
(column k of U), and row k of the rotated identity (column k of V). Because
W was A^T and V collects the same rotations, A = U diag(sigma) V^T holds
exactly (up to rounding) after any number of sweeps.

**Rows in different blocks are never paired.** This follows the published
algorithm, whose loops pair rows only inside a block. The consequence:

- Exact SVD: only when the whole matrix is one block (n = 2P), or when the
  blocks happen to be mutually orthogonal.
- Otherwise: V is still orthogonal, because it is a product of rotations,
  and U diag(sigma) V^T still reproduces A. The testbenches check both. The
  columns of U are orthogonal only within a block, and only as far as the
  sweeps have converged. Columns from different blocks are not orthogonal to
  each other.

## The pair order and the row routing

This is the heart of the design and its least obvious part. Take P = 4 PUs and
one block of 8 rows (numbered 1..8). The published example gives the pairs
each PU holds in each step:

| step | PU1 | PU2 | PU3 | PU4 |
|------|-----|-----|-----|-----|
| 1 (load) | 1,5 | 2,6 | 3,7 | 4,8 |
| 2 | 1,6 | 2,7 | 3,8 | 4,5 |
| 3 | 1,7 | 2,8 | 3,5 | 4,6 |
| 4 | 1,8 | 2,5 | 3,6 | 4,7 |
| 5 | 1,3 | 2,4 | 5,7 | 6,8 |
| 6 | 1,4 | 2,3 | 5,8 | 6,7 |
| 7 | 1,2 | 3,4 | 5,6 | 7,8 |

The published figure groups these as four stages: the load (step 1), then
steps 2-4, 5-6 and 7.

The first four steps pair every row of the left half with every row of the
right half. The j rows shift by one PU each step. The next two steps do the
same inside each half, with two PUs per half. The last step does it inside
each quarter. In general there are log2(P)+1 *levels*:

- At level L the block splits into groups of G = 2P/2^L rows. Each group has
  H = G/2 PUs.
- In step r (0 <= r < H) of that level, PU q of a group pairs the group's
  left row q with its right row H + ((q + r) mod H).
- One sweep takes P + P/2 + ... + 1 = **2P-1 steps** and covers all
  P(2P-1) pairs.

P must therefore be a power of two.

`svd_pkg` has three functions for this order:

- `step_decode`: step number to (level, r);
- `pair_row`: which row PU k holds in slot i or j;
- `row_loc`: where a given row currently sits.

At the end of every step the rotated rows of all PUs leave at once, one element
per clock. Each must arrive at the PU and slot that holds it in the next step.
`svd_schedule` builds this as a crossbar with 2P outputs. Output slot d takes
its data from source `row_loc(current step, pair_row(next step, d))`. The 2P
selects are computed once per step, in the clock before the rotation stream
starts. Between sweeps, the routing takes the rows to their places for
step 1 of the next sweep. After the last step of the last sweep the rows are
not moved. That step pairs rows 2k and 2k+1, so row x is then in PU x/2,
slot x mod 2. This is the order in which the output phase reads them.

**Loading is step 1.** Rows 1..P are written, one after another, into slot i
of PU1..PUP. Rows P+1..2P go into slot j of the same PUs. While a j row
arrives, its PU reads the i row back from its own RAM at the same address. It
accumulates alpha, beta and gamma of the first pair as it goes. So the first
rotation can start as soon as the last row has arrived.

## Inside a processing unit

A PU (`processing_unit`) has three parts: `pu_ram_ctrl`, `param_gen` and
`update_matrix`.

**`pu_ram_ctrl`** holds four RAMs of MAX_LEN words: U row i, U row j, V row i
and V row j. These four RAMs serve every phase of the computation:

| phase | written | read |
|-------|---------|------|
| load | the incoming row | row i, as partner of an incoming j row |
| rotation step | the rows arriving from the crossbar (next pair) | the current pair, to `update_matrix` |
| output, first read | - | a U row, for its norm |
| output, second read | - | a U row and its V row, to be normalised / passed on |

During a rotation step a PU reads its pair and writes the next pair into the
same RAMs at the same time. This works because the write address always
trails the read address. A PU reads element e at clock t. The rotated element
arrives at its destination PU four clocks later (one clock for the RAM read,
two for `update_matrix`, one for the crossbar register). That PU is by then
reading element e+4. No word is overwritten before it has been read, so no
second set of buffers is needed.

**`param_gen`** is `norm_gen` (alpha, beta and gamma, accumulated as the pair
streams in) followed by `cossin_gen`, which derives the angle.

**`update_matrix`** rotates the U pair and the V pair element by element. It
has a two-stage pipeline: a multiply, then an add with rounding and
saturation.

All PUs run in lock-step. PU 0's "output valid", "tag" and "sin/cos done"
signals therefore stand for the whole array.

### The angle: CORDIC in two passes

`cossin_gen` computes the angle in four steps:

1. It forms the vector (beta - alpha, 2 gamma). If beta < alpha it negates
   both components, so the vector lies in the right half plane.
2. It shifts both components by a common amount so that the larger one fills
   a 34-bit word. Only their ratio matters.
3. A CORDIC in vectoring mode, 22 iterations, produces its angle, 2 theta.
4. The result is halved, and a CORDIC in rotation mode started from (1/K, 0)
   turns theta into (cos theta, sin theta).

The unit does one micro-rotation per clock, so the result is ready
2*22+3 = 47 clocks after the start. This is short compared with one rotation
stream of max(n, m) clocks.

## Final reads and normalisation

After the last sweep the block is read out in 2P+1 phases. In phase x:

- the U row x is streamed to `matrix_col_normalized` for its norm (the first
  read, "NormGen");
- at the same time, row x-1 is streamed again with its V row for the
  normalised output (the second read, "NormUpdate").

The two reads hit different RAMs, because row x and row x-1 always sit in
different slots. They therefore overlap completely.

`normalized_src_sel` picks the PU that is answering each read.
`matrix_col_normalized` works in three stages:

1. It sums the squares of row x exactly.
2. It takes the square root with 16 guard bits, giving sigma_x.
3. It forms one reciprocal 2^RF / sigma_x. Both the square root and the
   divider are iterative.

The next phase waits until this has finished, about 190 clocks. Each U element
of the second read is then multiplied by the reciprocal. V elements pass
through unchanged. A zero row gives sigma = 0 and a zero U column.

## Number formats

These are defined in `svd_pkg` and are this design's choice:

| quantity | format |
|----------|--------|
| matrix elements (A, U, V, sigma) | signed 32 bit, 20 fractional bits (range +-2048) |
| alpha, beta, gamma | signed 64 bit, 20 fractional bits. Each product is rounded before it is summed |
| sin, cos | signed 24 bit, 22 fractional bits |
| CORDIC angle | radians, 22 fractional bits |
| sum of squares for sigma | exact (40 fractional bits) |

Inputs should have magnitude well below 1 when rows are long. The length of a
row after rotation can reach the norm of its whole block, and results saturate
at +-2048.

## Interface and timing (`svd_kernel`)

| signal | dir | meaning |
|--------|-----|---------|
| `i_start` | in | pulse; samples `i_cfg_rows` (multiple of 2P, <= MAX_LEN), `i_cfg_cols` (<= MAX_LEN) and `i_cfg_sweeps` (>= 1) |
| `i_a_valid`, `i_a_data`, `o_a_ready` | in/in/out | W = A^T row by row; an element moves when valid and ready are both high |
| `o_row` | out | index k of the row being output |
| `o_s_valid`, `o_s_data` | out | sigma_k, one pulse per row |
| `o_u_valid`, `o_u_data`, `o_addr` | out | element `o_addr` of column k of U |
| `o_v_valid`, `o_v_data`, `o_addr` | out | element `o_addr` of column k of V |
| `o_done`, `o_busy` | out | end of the whole matrix; engine active |
| `o_level`, `o_sweep` | out | progress monitor: schedule level and sweep of the current step |

Outputs have no back-pressure. Reset is asynchronous and active low.

### Clock cycles

Let L = max(n, m). One block takes about

    2P (L + 1)               load
    + S (2P - 1)(L + 61)     S sweeps of rotation steps (angle, stream, drain)
    + (2P + 1)(L + 127)      output phases (stream, drain, sigma/reciprocal)

clocks. There are n / 2P blocks. The time therefore grows as roughly 3 n L
for a square matrix, almost independent of P. This matches the behaviour
reported for the original design.

Simulated at the default size (P = 32) with one sweep, without input gaps:

| matrix | clocks | at 200 MHz | published |
|--------|--------|------------|-----------|
| 128 x 128 | 73,520 | 0.37 ms | 0.537 ms |
| 256 x 256 | 245,344 | 1.23 ms | 1.565 ms |
| 512 x 512 | 883,904 | 4.42 ms | 5.095 ms |
| 1024 x 1024 | 3,340,672 | 16.7 ms | 18.055 ms |

The larger sizes were not simulated. For 2048 x 2048 the formula gives
13.0 M clocks, or 64.9 ms; the published figure is 67.6 ms. For 4096 x 4096 it
gives 51.1 M clocks, or 256 ms; the published figure is 261 ms.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `NUM_PU` | 32 | P, processing units; a power of two, >= 2. Block = 2P rows |
| `MAX_LEN` | 4096 | longest row (U) and largest n (V row length) |

The defaults are the largest configuration published: 32 PUs and matrices up
to 4096 x 4096. Storage is 4 x MAX_LEN x 32 bit per PU, which is 16 Mbit at
the default.

## Files

| file | role |
|------|------|
| `rtl/svd_pkg.sv` | formats, CORDIC constants, pair-order functions |
| `rtl/svd_kernel.sv` | top level |
| `rtl/matrix_gen_prepro.sv` | scheduler + PU array + output selector |
| `rtl/svd_schedule.sv` | sequencer and row-routing crossbar |
| `rtl/processing_unit.sv` | one PU |
| `rtl/pu_ram_ctrl.sv`, `rtl/pu_ram.sv` | the four row buffers and their ports |
| `rtl/param_gen.sv`, `rtl/norm_gen.sv`, `rtl/cossin_gen.sv` | alpha/beta/gamma and sin/cos |
| `rtl/update_matrix.sv` | the rotation datapath |
| `rtl/normalized_src_sel.sv` | PU selector for the final reads |
| `rtl/matrix_col_normalized.sv`, `rtl/seq_isqrt.sv`, `rtl/seq_div.sv` | sigma, reciprocal, normalisation |

## Verification

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog. The main ones:

- `tb_svd_schedule` replaces the PUs by a model that only remembers which row
  each slot holds. It checks that the hardware reproduces the 8-row / 4-PU
  table above exactly, over two sweeps and two blocks. It also checks the
  final read order and that each step streams one element per clock.
- `tb_svd_kernel` (P = 4, two blocks, three sweeps, random gaps on the input)
  compares sigma, U and V with a floating-point model that uses the same pair
  order. It also checks that V is orthogonal and that U diag(sigma) V^T
  reproduces the input (errors about 2e-5). It counts
  the mechanisms: input stalls, every schedule level, sweep changes, several
  blocks, and overlapped final reads.
- `tb_svd_kernel_full` runs the top at its default parameters. It
  decomposes 128 x 128, 256 x 256, 512 x 512 and 1024 x 1024 matrices back
  to back on the same instance, and checks each against its published run
  time. It then runs 128 x 128 again with six sweeps. After those, the U
  columns inside each block must be orthogonal to within 1e-3; the measured
  value is 4e-5. Element-wise comparison with the model is not meaningful at this
  size. A 64-row block of random
  data contains nearly degenerate pairs (beta close to alpha, gamma small),
  and their rotation angle depends on rounding. The engine and the model then
  follow different, equally valid paths. So this test checks properties that
  hold on any path:
  - V is orthogonal;
  - the input is reconstructed;
  - every U column has unit length;
  - each block keeps its Frobenius norm;
  - the row pairs rotated last are orthogonal.

  Orthogonality and reconstruction errors are below 1e-4.

To run a testbench with Verilator 5, list the package first. The RTL files
carry no timescale of their own, hence the option:

    verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal rtl/svd_pkg.sv \
        $(ls rtl/*.sv | grep -v svd_pkg) tb/tb_svd_kernel.sv \
        --top-module tb_svd_kernel -o sim && obj_dir/sim

The full-size testbench takes about 20 to 60 s to build and about a minute to run.

## Departures and open points

- **Block size.** The published pseudo-code pairs rows inside blocks of P rows
  and skips the last block. Its scheduling example pairs all rows inside
  blocks of 2P rows. This design follows the example, which also matches the
  published timing, and processes every block.
- **Singular value.** One passage defines sigma as b^T b, the pseudo-code as
  the norm of b. The norm is used.
- **Own choices.** The paper does not give these; they are this design's:
  - the fixed-point formats;
  - CORDIC for sin/cos, and the rotation sign convention;
  - the crossbar form of the routing;
  - the drain waits between steps;
  - the square root and reciprocal units;
  - the input orientation (W = A^T row by row);
  - the configuration inputs;
  - the valid/ready input with no output back-pressure.
- **Non-square matrices.** These are supported (U rows m long, V rows n long)
  but were only tested with m != n at small sizes.
- **The engine does not overlap work between blocks.** The next block is
  loaded only after the previous one has been written out.
- **Not included.** The clock generator, stimulus generator and result checker
  of the published simulation environment are test infrastructure, not
  hardware. The testbenches here take their place.
