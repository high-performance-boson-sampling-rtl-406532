# A streaming fixed-point engine for the matrix permanent

Simulating boson sampling classically comes down to evaluating permanents of
complex matrices: every output probability of an n-photon interferometer is
|perm(A)|^2 for an n x n submatrix A of its unitary. The permanent has no
known polynomial algorithm, and the fastest exact formulas cost about
n * 2^n operations. This RTL is a hardware engine for one of them, the
Balasubramanian–Bax–Franklin–Glynn (BB/FG) formula, laid out as a data-flow
pipeline that produces four of the formula's 2^(n-1) addends on every clock
cycle. It uses fixed-point arithmetic whose width grows from 64 to 189 bits
along the product tree; engines built this way have been measured to give
relative errors below 1e-8 up to 40 x 40 matrices.

## The formula and why it streams

For an n x n matrix A = (a_ij),

    perm(A) = 1/2^(n-1) * sum over delta in {+1,-1}^n with delta_0 = +1 of
              (prod_i delta_i) * prod_j ( sum_i delta_i a_ij )

Each addend needs the n *column sums* c_j = sum_i delta_i a_ij and their
product. If the delta vectors are visited in binary reflected Gray-code order,
consecutive vectors differ in one row k only, so every column sum changes by
exactly +-2 a_kj. One addend then costs n complex additions (the update) and
n-1 complex multiplications (the product), and both can be done by a pipeline
that accepts a new addend every cycle.

Gray-code facts the control relies on: for step i (i = 1, 2, ...) the code is
g_i = i xor (i >> 1); the bit that changes is the lowest set bit p of i; its new
value is the complement of bit p+1 of i; and the parity of g_i (which gives
the sign prod delta_i) equals bit 0 of i.

## Four streams and four column quarters

The engine evaluates four delta vectors per cycle. Rows 0, 1 and 2 are taken
out of the Gray code: row 0 is always +1 (the formula requires it) and rows 1
and 2 are fixed per *stream* to the sign pairs ++, +-, -+ and -- (stream
s = 0..3; bit 1 of s is row 1, bit 0 is row 2, a set bit meaning delta = -1).
The Gray code runs over rows 3..n-1 only, and the same code step is applied to
all four streams, since they differ only in rows 1 and 2.

The columns are split the other way: four column-sum kernels each own
NMAX/4 = 10 adjacent columns and keep the sums of all four streams for them.
Four product kernels, one per stream, gather that stream's 40 column sums from
the four column-sum kernels and multiply them. A final sum-up kernel signs the
four products and accumulates them. On the FPGA this arrangement places one
column-sum kernel and one product kernel in each of the four dies of the
device, so that only column sums cross between dies.

    rows --> column_sum_kernel x4 --(cs[kernel][stream][col])--> product_kernel x4 --> sum_up_kernel --> result
                   ^    (10 columns each, 4 streams)              (one per stream,          (sign, add,
                   |                                               6-level tree)             accumulate)
             dfe_controller (load phase, Gray counter, tags)

## One matrix, tick by tick

A matrix of size n (3 <= n <= 40) takes n - 1 + 2^(n-3) ticks from its first
row to its last addend:

* **Load phase, n ticks.** One row per tick enters on `row_data`. The row is
  added to (or, with that stream's sign, subtracted from) all four streams'
  column sums; rows 3 and up are also written into a row memory in each
  column-sum kernel. The first row clears the sums, so matrices follow each
  other without a reset. After the last row the sums belong to Gray code 0
  (all rows 3.. at +1), and that tick already yields the first four addends.
* **Gray phase, 2^(n-3) - 1 ticks.** Each tick the Gray counter names a row;
  the kernels read it from their row memory and add or subtract twice its
  value to every column sum. Each tick yields four more addends. The Gray
  phase never stalls.

The controller tags every tick with (valid, Gray parity, last-of-matrix). The
tag follows the data through one register after the column sums, six in the
product tree and two in the sum-up kernel, so the result of a matrix appears
9 cycles after its last tick. For n = 20 that is 19 + 131072 + 9 cycles.

Matrices of a batch share n and run back to back: the load phase of the next
matrix starts on the tick after the previous one's last Gray step, while the
pipeline still drains the previous addends. Run time per matrix therefore
matches t = (n - 1 + 2^(n-3)) / f, plus a one-off host transfer delay per
batch; at 330 MHz a 40 x 40 permanent needs 2^37 ticks, about 416 s on one
engine.

### Matrices smaller than the circuit

The circuit always multiplies NMAX = 40 column sums. A smaller matrix is sent
as n rows of 40 columns, with the host putting 1 in row 0 and 0 in rows
1..n-1 of every column beyond n. Every such column sum is then exactly 1 for
every delta, so the product is unchanged and one circuit serves every
n <= 40 without rebuilding. Only n rows are streamed and only n - 3 Gray bits
are counted, so small matrices also run fast.

## Dual-engine mode

Two engines can share one permanent. With `cfg_dual` set, row 3 is fixed as
well: the engine with `cfg_dfe_id = 0` evaluates the half of the delta vectors
with delta_3 = +1, the one with `cfg_dfe_id = 1` the half with delta_3 = -1.
The Gray code then runs over rows 4..n-1, each engine needs n - 1 + 2^(n-4)
ticks, and the host adds the two results. A 40 x 40 permanent then takes
2^36 + 39 ticks, about 208 s at 330 MHz. Dual mode needs n >= 4. Both modes
are the same circuit; the mode is chosen per batch.

## Number formats

All values are two's-complement fixed point. "Qi.f" means i integer bits
(sign included) and f fraction bits.

| where                        | width | format   |
|------------------------------|-------|----------|
| matrix elements, column sums | 64    | Q2.62    |
| product tree, level 1        | 79    | Q2.77    |
| level 2                      | 79    | Q2.77    |
| level 3                      | 93    | Q2.91    |
| level 4                      | 110   | Q2.108   |
| level 5                      | 158   | Q2.156   |
| level 6 (stream product)     | 189   | Q2.187   |
| accumulator                  | 192   | Q6.186   |
| result `res_re`/`res_im`     | 128   | Q6.122   |

The product tree pairs neighbours: 40 -> 20 -> 10 -> 5 -> 3 -> 2 -> 1 values.
At a level with an odd count the last value is carried to the next level
unchanged, only re-aligned to the wider format (fraction bits appended). Each
complex multiplication uses three real products,

    k1 = c (a + b),  k2 = a (d - c),  k3 = b (c + d)
    (a + ib)(c + id) = (k1 - k3) + i (k1 + k2),

computed at full precision and then truncated (rounded toward minus infinity)
to the level's width. The four stream products are summed in the accumulator
width with one fraction bit dropped, and the accumulator is a single
add-and-register loop. The result is the top 128 bits of the accumulator.

Column sums are updated modulo 2^64, so an intermediate overflow while rows
are added does no harm: only the final column sums must lie in the Q2 range.

### What the host must do

The engine returns the raw sum S = 2^(n-1) perm(A'), where A' is what was sent.
The host

1. scales each column j of A by a positive factor s_j and converts it to
   Q2.62 (nearest integer to x * 2^62);
2. pads the matrix to n x 40 as described above;
3. computes perm(A) = S / 2^(n-1) / prod_j s_j, and in dual mode first adds
   the two engines' S.

Scaling is what keeps every stage in range. The published host rule bounds
every possible column sum by 1, which keeps the products inside Q2. Choosing
s_j so that the column's
sum of magnitudes, sum_i |a_ij| s_j, is at most 1/2 guarantees that every
column sum is at most 1/2 in magnitude, every product tree value stays well
inside Q2, every addend is at most 2^-n, and |S| <= 1/2 fits the accumulator
with room to spare. The 187 fraction bits of the tree leave the relative
precision of the result near the 64-bit input precision even after the
scaling. Matrices with n < 3 are refused by the engine (`start` is ignored);
they are trivial on the host.

## Interface of `perm_dfe_top`

| port                      | dir | meaning |
|---------------------------|-----|---------|
| `clk`, `rst_n`            | in  | clock, asynchronous active-low reset |
| `start`                   | in  | begin a batch (taken only while `busy` is low) |
| `cfg_n`                   | in  | matrix size n, 3..NMAX (4..NMAX in dual mode) |
| `cfg_batch`               | in  | number of matrices in the batch, >= 1 (16 bits) |
| `cfg_dual`, `cfg_dfe_id`  | in  | dual-engine mode and this engine's half |
| `busy`                    | out | high from the accepted start to the batch's last tick |
| `row_valid` / `row_ready` | in/out | row handshake; a row moves when both are high |
| `row_data[NMAX]`          | in  | one padded row, `cplx_t` {re, im}, Q2.62 each |
| `res_valid`               | out | one-cycle pulse per matrix, in batch order |
| `res_re`, `res_im`        | out | raw sum S in Q6.122 |

`row_ready` is high throughout the load phase of each matrix; if the source
lowers `row_valid`, the load phase waits. After the n-th row `row_ready`
drops for the 2^(n-3) - 1 ticks of the Gray phase.

## Modules

| file                     | role |
|--------------------------|------|
| `perm_pkg.sv`            | sizes, widths of the product tree, `cplx_t`, tick tag |
| `gray_code_counter.sv`   | Gray step generator: changed bit, its new value, parity, last step |
| `dfe_controller.sv`      | batch and matrix sequencing, row handshake, kernel control, tags |
| `column_sum_kernel.sv`   | row memory and column sums of 10 columns for all 4 streams |
| `complex_mult.sv`        | one registered complex multiply with 3 real products and truncation |
| `product_kernel.sv`      | 6-level product tree over 40 column sums, tag pipeline |
| `sum_up_kernel.sv`       | stream signs, accumulation, result |
| `perm_dfe_top.sv`        | wiring of one engine |

Each file begins with a description of its behaviour, interface and timing,
and of which parts follow the published design and which are choices made
here.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>` and stops itself through a watchdog if it
hangs.

* `tb_gray_code_counter` compares every step against i xor (i >> 1) for
  several code lengths at the full 37-bit counter width, including the step
  count and the `last` flag.
* `tb_dfe_controller` replays the controller's outputs against a model of the
  schedule, including stalls, batches, the n = 3 case without Gray phase,
  refused sizes and dual mode, and checks the tick counts.
* `tb_column_sum_kernel` keeps its own delta vectors and recomputes every
  column sum directly after each tick, with random rows and row flips, a
  restart by the next matrix and a run with row 3 fixed to -1.
* `tb_complex_mult` compares both used widths (64 -> 79, 158 -> 189) with the
  four-product formula bit for bit.
* `tb_product_kernel` compares the tree bit for bit with a fixed-point model
  for 40 and 7 columns, and against a double-precision product.
* `tb_sum_up_kernel` checks signs, accumulation over matrices of 1 to 40
  ticks, the restart from zero and the 2-cycle result latency.
* `tb_perm_dfe_top` (NMAX reduced to 8) and `tb_perm_dfe_top_full` (all
  defaults, NMAX = 40) model the host: random complex matrices, conversion,
  padding, the division by 2^(n-1), and comparison with Ryser's formula in
  double precision to a relative 1e-7. They also check the cycle at which each
  result appears, and count the mechanisms the design has (row stalls,
  batches, matrices without Gray phase, padded and full-size matrices, add and
  subtract updates, dual mode), failing if one never occurred. The full-size
  test runs n = 3, 12 (a batch of two), 16 (with stalls), 20 and 14 in dual
  mode, and takes about ten seconds.

A 40 x 40 permanent (2^37 ticks) is far beyond simulation; the largest size
simulated end to end is n = 20 at the full NMAX = 40.

To run a testbench with plain Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl rtl/perm_pkg.sv \
        tb/tb_perm_dfe_top_full.sv --top-module tb_perm_dfe_top_full -o simv
    ./obj_dir/simv

The same pattern works for every file in `tb/`.

## Where this RTL departs from the published engine

* **Maximum size.** NMAX = 40, the size of the main build (330 MHz). The same
  source mentions a layout for up to 48 x 48 at 300 MHz; set `NMAX` in
  `perm_pkg.sv` (a multiple of 4) to build that. The product tree's six levels
  and widths are fixed in the package and cover up to 64 columns.
* **Multipliers.** The wide multiplications are written as plain `*` and
  registered once per tree level. The published engine tiles them onto DSP
  blocks with Karatsuba splitting and deeper pipelines to reach 330 MHz. An
  FPGA build of this RTL needs the same retiming; the result does not change,
  but the 9-cycle result latency grows.
* **Row memory.** A register file read without a clock, as LUT RAM would be.
* **Handshakes and result format.** The row handshake, the batch
  configuration port, the tags and the choice of the top 128 accumulator bits
  as the result are this design's own. The host interface (PCIe streaming,
  driver) and the float <-> fixed conversion on the host are not part of the
  RTL.
* **Repeated rows.** The published work also has a separate engine variant for
  matrices with repeated rows (photons sharing an output mode). It replaces
  the binary Gray code with an n-ary one, weights each addend with products of
  binomial coefficients, and initialises the column sums with a staggered loop
  fed by data precomputed on the host. That variant is not included. The
  engine here computes such permanents correctly when the repeated rows are
  sent expanded, but without the reduction in the number of addends.
* **Scaling.** The published engine scales the columns on the host so that
  no column sum can exceed 1 in magnitude, which keeps every product inside
  Q2. The raw sum S can still reach 2^(n-1) times that bound, more than the
  accumulator's 6 integer bits hold, so this RTL recommends the stricter
  bound of 1/2 on the column's sum of magnitudes described above, which
  also bounds |S| by 1/2. The engine itself is the same for either rule.
