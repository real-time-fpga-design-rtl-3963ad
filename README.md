# Real-time OMP reconstruction with a Hadamard sensing matrix

Compressed sensing recovers a signal from far fewer linear measurements than it has
samples. The reconstruction is usually done with Orthogonal Matching Pursuit (OMP). OMP
is greedy. Each iteration correlates the residual with every column of the sensing
matrix and adds the best column to an index set. It then solves a least-squares problem
on that set and updates the residual. In hardware the correlation means many
multiplications, and the least-squares step means a matrix inversion.

This design removes both costs by choosing the matrices. The measurement matrix is a 0/1
Hadamard matrix and the transform is the Walsh-Hadamard transform. Their product, the
sensing matrix, is almost empty. Because of that, the correlation becomes an
absolute-value-and-compare tree. The least-squares solve becomes one constant multiply
per iteration, looked up in a small table, plus adds and shifts. The image is cut into
8x8 blocks (N = 64 samples each), and each block is reconstructed from M = 16
measurements (sampling rate 0.25) with at most K = 8 iterations. Sixteen block engines
work side by side, so one run reconstructs a 1024-sample signal from 256 measurements.
A run takes at most 60 clock cycles. At 133.33 MHz that is enough for 8K (7680x4320)
video at 30 frames per second, with about half of the frame time to spare.

The design follows the published architecture "Real-time FPGA Design for OMP Targeting 8K
Image Reconstruction" (Xu, Fu, Zhang, Zhou). The paper gives the algorithm, the data flow
and the main parameters. The closed-form arithmetic, the word widths, the pipelining and
the control are worked out here and are marked as such below.

## 1. The sensing matrix

Let H be the N x N natural-order (Sylvester) Hadamard matrix. Its entry H(r,c) is +1 or
-1: it is -1 exactly when `r & c` has an odd number of one bits. Then:

* **Measurement matrix:** the first M rows of (1 + H)/2. Every entry is 0 or 1, so each
  measurement is a sum of pixels. Measurement 1 is the sum of all 64 pixels. Measurement
  i is the sum of the pixels where row i of H is +1.
* **Transform:** x = H * theta. Here theta is the block in the Walsh-Hadamard domain.

Because H*H = N*I, the sensing matrix A = Phi*H has only these non-zero entries
(V = N/2 = 32):

```
A(1,1) = 2V          A(i,1) = V,  A(i,i) = V   for 1 < i <= M          all else 0
```

Columns M+1 to N are zero, so OMP can never pick them. Each of the M useful columns
touches at most two measurements. For N = 16 and M = 4 the matrix is

```
16 0 0 0 0 ... 0
 8 8 0 0 0 ... 0
 8 0 8 0 0 ... 0
 8 0 0 8 0 ... 0
```

The design uses this form: the first *column* is non-zero. The paper's equation for A
puts the non-zero entries in the first *row* instead. Its example figure and its
dot-product equation both use the first-column form, and only that form follows from
the Hadamard construction above. The factor V appears in every product, so the design
drops it. All transform-domain values inside the design are V*theta.

Using Walsh-Hadamard in natural order on both sides is a choice made here. The paper
does not say which ordering it uses. Any ordering gives the same structure, provided
both matrices use the same one.

## 2. One OMP iteration in closed form

Write the index set as S = {1} + {j_1 ... j_k}. Column 1 is always in it: the
measurements are positive, so column 1 always wins the first correlation. The design
therefore skips the first dot product and starts with S = {1}.

**Least squares.** A_S^T A_S is V^2 times an "arrow" matrix: M+3 in the corner, 1 along
the rest of the first row, the first column and the diagonal. Its inverse depends only
on k. Working through (A_S^T A_S)^-1 A_S^T Y gives

```
u          = ( 2*y(1) + y(2) + ... + y(M)  -  sum_{j in S, j>1} y(j) ) / (M + 3 - k)
theta(1)   = u
theta(j)   = y(j) - u            for j in S, j > 1
theta(j)   = 0                   otherwise            (all values V*theta)
```

Read this as a least-squares fit. The estimate u of the DC term is a weighted mean of
the measurements that no other chosen column explains. y(1) enters twice and counts
four times in the denominator, because A(1,1) = 2V.

**Residual.** r = Y - A_S*theta becomes

```
r(1) = y(1) - 2u          r(j) = 0 for j in S          r(i) = y(i) - u otherwise
```

**Correlation.** Taking A^T r and dropping V leaves r(j) itself for columns 1 < j <= M.
Column 1 is already chosen. The next column is therefore argmax |r(j)| over the columns
not yet chosen.

**Fixed point.** 1/(M+3-k) is the only fraction. It is held with FRAC = 11 fractional
bits. Measurements are shifted left by 11 before the residual is formed. Results are
shifted back with round-half-up. The table (`inv_lut`) holds round(2^11/(19-k)):

| k (columns besides 1) | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| M+3-k | 19 | 18 | 17 | 16 | 15 | 14 | 13 | 12 |
| entry | 108 | 114 | 120 | 128 | 137 | 146 | 158 | 171 |

Each table entry is off by at most 0.4 %. For typical image blocks this error leaves a
residual of a few units. So the zero-residual exit fires mostly on flat or nearly flat
blocks.

**Reusing earlier work.** The term 2y(1) + y(2) + ... + y(M) is computed once per block.
Each later iteration subtracts the measurement of the newly chosen column (the "max
value"), which the store keeps as a running sum. No correlation or product is ever
recomputed from scratch.

**Quit condition.** The loop stops when the iteration index reaches K = 8, that is when
the set holds 8 columns. It also stops when every element of the residual, rounded to an
integer, is zero. Iteration count and sparsity are therefore not fixed per block: a
block uses between 1 and 8 columns, and a 16-block run up to 128.

## 3. Hardware structure

```
            +--------------------------- omp_core (x16 in omp_top) ---------------------------+
 y[16] ---> | lsp_unit -- finish? --yes--> inverse_transform ---------------------------------|--> x_hat[64]
            |    ^            |no                                                              |
            |    |            v                                                                |
            |    |       dot_product --Index_Max--> max_value_lut --> max_store                |
            |    +------------ count, running sum of max values, chosen mask <---+             |
            +----------------------------------------------------------------------------------+
```

| Module | Role | Latency |
|---|---|---|
| `lsp_unit` | A^T Y (once), table lookup, u, theta, A_S*theta, residual, quit test, output shift | 2 cycles |
| `inv_lut` | round(2^FRAC/(M+3-k)) for k = 0..K-1, built from the formula | combinational |
| `dot_product` | element 1 forced to 0, absolute values, tree of 2-to-1 comparisons | log2(M)+1 = 5 cycles |
| `max_value_lut` | y(Index_Max) | combinational |
| `max_store` | index set mask, count, running sum, ordered lists of indexes and values | 1 cycle |
| `inverse_transform` | x(n) = sum_j H(n,j)*theta(j) / V, signs from parity(n & j) | 1 cycle |
| `omp_core` | state machine of the loop for one 64-sample block | 8T - 5 cycles |
| `omp_top` | 16 cores, common start, done when the slowest finishes | 8T_max - 4 cycles |
| `omp_pkg` | defaults, widths, Walsh-Hadamard sign, table formula, rounding | |

`lsp_unit` has one output vector plus the `reconstruction_finish` flag, as in the
paper's flow. The vector holds the integer residual while the loop continues, and the
integer estimate V*theta when it finishes. `dot_product` ignores columns already in the
set, even when every remaining residual has rounded to zero. This way no column is ever
chosen twice. Ties go to the lower index.

### Schedule of one block

```
edge 0      start taken, measurements latched, store cleared to {1}
edge 1      LSP issue            edges 1-2   least squares (2 stages)
            not finished:  edges 3-7  dot product, edge 8 store write, edge 9 next LSP issue
            finished:      edge 3 transform, done high after edge 3
```

An iteration costs 8 cycles. The last one has no dot product. A block that runs T
iterations raises `done` 8T - 5 edges after the start edge: 3 to 59 cycles. `omp_top`
adds one cycle to gather the done flags, so a 1024-sample run takes at most 60 cycles.
The paper reports 0.818 us per 1024 samples at 133.33 MHz, which is about 109 cycles.
No clock frequency has been measured for this RTL: it has not been through FPGA place
and route. The widest combinational paths are the 64 sixteen-input add/subtract trees
in `inverse_transform`, and the subtract, rounding and zero test over 16 lanes in the
second LSP stage.

### Frame rates at 133.33 MHz

The worst case is 60 cycles per 16-block run. Blocks that stop early shorten a run only
when all sixteen of them stop early. The "simulated" column is for synthetic frames with
smooth, flat and textured regions, reconstructed whole in `tb_frame_workload`.

| Format | 8x8 blocks | 16-block runs | Worst case | Simulated | Budget |
|---|---|---|---|---|---|
| 1080p | 32 400 | 2 025 | 0.91 ms | 0.83 ms | 8.3 ms at 120 FPS |
| 4K | 129 600 | 8 100 | 3.6 ms | 3.33 ms | 8.3 ms at 120 FPS |
| 8K | 518 400 | 32 400 | 14.6 ms | 13.14 ms | 33.3 ms at 30 FPS |

These numbers count compute only. They assume the measurements for the next run are
ready as soon as `ready` returns: each run needs 256 x 16 bits.

## 4. Interfaces and number formats

`omp_core` (one block) and `omp_top` (16 blocks) share one protocol. Assert `start` for
one cycle while `ready` is high, with the measurements on `y`. Measurement i of a block
is the sum of its pixels n (0..63, row by row inside the 8x8 block) for which
parity(i & n) is even. `done` pulses for one cycle. The outputs then stay valid until
the next start.

| Signal | Format |
|---|---|
| `y` | unsigned 16 bit (max 64 x 255 = 16320) |
| `x_hat` | signed 16 bit reconstructed samples, not clamped to 0..255 |
| `theta` | signed 24 bit, V*theta rounded to an integer |
| `support` | M-bit mask of the final index set; bit 0 is the DC column |
| `n_iter` | iterations run, 1..K |
| `quit` | `QUIT_ZERO_RES` or `QUIT_SPARSITY` (`omp_pkg::quit_e`) |
| `sel_index`, `sel_value` (core) | chosen columns and their measurements, in order; the first n_iter-1 entries are used |

Parameters: `N = 64`, `M = 16`, `K = 8`, `FRAC = 11`, `NUM_BLOCKS = 16`. All come from
the paper. M is the sampling rate times N; the paper sets K to M/2. The word widths in
`omp_pkg` (`Y_W` 16, `R_W` 24, `FX_W` 40, `X_W` 16) are sized for N = 64 and 8-bit
pixels. Widen `Y_W` before raising N above 256. The RTL is written for any M (the
comparison tree pads to a power of two) and any K >= 2. Besides the defaults, M = 32
(K = 16) and M = 48 (K = 24) have been simulated. These are sampling rates 0.5 and 0.75.
With a dot-product latency L = log2(M)+1 (rounded up), a block takes (T-1)(L+3)+3
cycles.

## 5. What the paper gives and what is filled in here

Taken from the paper:

* the sensing-matrix structure and the value V;
* skipping the first dot product;
* the dot product as first-element-zero, absolute value and a 2-to-1 comparison tree;
* the least-squares step with its inverse read from a per-iteration table, and FRAC = 11;
* reusing A_S^T Y from earlier iterations, and storing the max values and indexes;
* both quit conditions, N/M/K, and sixteen blocks of 64 samples.

Chosen here:

* the 0/1 Hadamard and natural-order forms of the matrices;
* first column rather than first row, as discussed in section 1;
* the closed-form least squares and the single table constant per iteration;
* round-half-up shifts;
* the quit test on the integer residual, which the paper does not specify;
* reading "LUT of Max Value" as a lookup of y(Index_Max). The paper says the stored
  value is the "max value of residual". The least-squares update needs y(Index_Max),
  which differs from that residual by u, so the measurement is what gets stored;
* excluding chosen columns and the tie rule in the comparator;
* all word widths, all pipeline registers, the state machine, the start/ready/done
  handshake, and how the 16 blocks are started and gathered;
* no clamping of the output pixels.

The quality figures the paper reports come from its own floating-point model, with 26.3
dB PSNR at rate 0.25. This RTL has not been compared with those figures. The testbench
images are synthetic. Ramps with random texture give about 21 to 24 dB; the noise in
them is not compressible. The smoother frames of `tb_frame_workload` give about 32 dB.

## 6. Simulation

Every file in `rtl/` is one module or package. `omp_pkg.sv` must be read first. The
testbenches share the reference model `tb/omp_ref_pkg.sv`. The model builds A
explicitly and runs OMP with ordinary loops: correlation, argmax, the explicit arrow
inverse, the matrix-vector product. It uses the same fixed point, so the RTL must match
it bit for bit. Each testbench prints `TB_RESULT checks=<n> failures=<n>`.

```
verilator --binary --timing --assert --top-module tb_omp_top \
    rtl/omp_pkg.sv tb/omp_ref_pkg.sv rtl/inv_lut.sv rtl/lsp_unit.sv rtl/dot_product.sv \
    rtl/max_value_lut.sv rtl/max_store.sv rtl/inverse_transform.sv rtl/omp_core.sv \
    rtl/omp_top.sv tb/tb_omp_top.sv
./obj_dir/Vtb_omp_top
```

| Testbench | What it checks |
|---|---|
| `tb_inv_lut` | every table entry against a floating-point formula |
| `tb_dot_product` | 400 vectors against an argmax model, with ties, all-zero vectors and back-to-back inputs; 5-cycle latency |
| `tb_max_value_lut` | every index on random vectors |
| `tb_max_store` | mask, count, sum and lists after every write and clear |
| `tb_lsp_unit` | every set size on image and random measurements; output, flag, quit reason, 2-cycle latency; both quit reasons occur |
| `tb_inverse_transform` | random sparse and dense inputs against sum H*theta/32; 1-cycle latency |
| `tb_omp_core` | 80 blocks bit-exact against the model, latency 8T-5; 40 exactly sparse signals with 1 to 8 columns, where the block must find the true support, stop on a zero residual, and return theta and the signal to within rounding |
| `tb_frame_workload` | whole 1080p, 4K and 8K synthetic frames through the full design, bit-exact against the model, each within its frame budget (runs about a minute) |
| `tb_sampling_rates` | omp_core at M = 16, 32 and 48: exact sparse recovery and latency at each rate, and error falling as the rate rises |
| `tb_omp_top` | full default size (16 x 64): six 1024-sample images mixing black, flat and textured blocks, bit-exact against the model; run time against the slowest block and the 109-cycle bound; counts zero-residual and sparsity quits, uneven finishing, dot-product iterations and back-to-back runs |

Apart from `tb_frame_workload`, every testbench runs in a few seconds. The assertions in `max_store` and
`omp_core` catch a column written twice, an index set that overflows, and a start while
the block is busy.
