# A five-stage lattice-reduction pipeline for 4x4 MIMO detection

A linear MIMO detector such as zero forcing works much better when the
channel matrix it inverts is close to orthogonal. Lattice reduction (LR)
finds such a basis. It computes a unimodular integer matrix **T** such that
**H T** spans the same lattice of received points as **H** but has short,
nearly orthogonal columns. The detector then works in the reduced basis and
maps its decision back through **T**.

This RTL reduces a 4x4 complex channel given as its QR decomposition
**H = Q R**. It returns **Q̃**, **R̃** and **T** with **Q̃ R̃ = H T**. The
algorithm is a modified complex LLL (MLLL) with three changes that make it
suit hardware:

* **Fixed structure.** Each iteration sweeps the columns k = 2, 3, 4 once, in
  order, with no data-dependent step back.
* **Siegel test.** Two columns are swapped when 0.75·R(k-1,k-1)² > R(k,k)²,
  a cheaper test than the Lovász condition.
* **Fixed iteration count.** The algorithm stops after five iterations.

Five identical cores each run one iteration. They form a pipeline joined by
FIFO buffers, so five channel matrices are in flight at once, each in a
different iteration.

The design follows the paper "A Customized Lattice Reduction Multiprocessor for
MIMO Detection" (Shahabuddin, Janhunen, Khan, Juntti, Ghazi). It keeps the
paper's decomposition into cores, FIFOs, STREAM units and six special function
units. The paper's cores are programmable transport-triggered processors
running compiled C. Here each core has a fixed sequencer that issues the same
function-unit operations instead (see *Departures* below).

## Number format and streams

Every matrix element is one 32-bit word: the real part in bits [31:16] and
the imaginary part in bits [15:0]. Each part is a signed 16-bit fixed-point
number with 11 fraction bits (Q4.11, range −16 … +16, step 1/2048). Products
are rounded to nearest. Every result saturates at the range limits instead of
wrapping.

A basis travels as three word streams:

| stream | words | order |
|---|---|---|
| Q | 16 | column by column: Q(1,1), Q(2,1), …, Q(4,4) |
| R | 10 | upper triangle, column by column: R(1,1), R(1,2), R(2,2), R(1,3), …, R(4,4) |
| T | 16 | column by column, integers in Q4.11 (1.0 = 0x0800) |

The diagonal of R is real, and it stays real and may turn negative after a
rotation. The pipeline input takes only Q and R, because the first core starts
from T = I. The output delivers all three streams.

## Pipeline (`lr_multiprocessor`)

```
 q_in ─►[FIFO]─┐   ┌─►[FIFO Q]─┐        ┌─►[FIFO Q]─► q_out
 r_in ─►[FIFO]─┼►core 1 ─►[FIFO R]─┼►core 2 … core 5 ─►[FIFO R]─► r_out
               │  (T = I)  ─►[FIFO T]─┘        └─►[FIFO T]─► t_out
```

* Each link between two cores has three `lr_fifo`s, one per stream. Each
  FIFO holds 16 words by default.
* The edges of the pipeline use a valid/ready handshake. A word moves in a
  cycle where both are high.
* `core_busy[c]` is high while core c computes. `iter_done[c]` pulses when
  core c has written a result.
* Parameters are `NCORES` (5: the number of MLLL iterations) and `FIFO_DEPTH`
  (16).

A core starts reading its next basis as soon as it has stored the last one.
The next core can begin loading while the previous one is still storing, so
the stages overlap. In a 40-channel simulation one reduced basis came out
every 162 cycles in steady state, and up to four cores computed at the same
time.

## One iteration inside a core (`lr_core`)

A core loops over three phases.

1. **Load.** Three `stream_in` units fill the matrix store with Q, R and T in
   parallel, one word per cycle each. This takes about 18 cycles without
   stalls. A core built with `FIRST_CORE = 1` loads only Q and R and sets
   T = I.
2. **Compute.** This phase handles columns k = 2, 3, 4 in turn. The steps for
   one column are described below.
3. **Store.** Three `stream_out` units write the store to the next FIFOs. This
   takes about 18 cycles; a full FIFO stalls it.

### Compute steps for column k

**Size reduction.** For l = k−1 down to 1:

* The MU unit computes μ = round(R(l,k)/R(l,l)). μ is a Gaussian integer and
  each of its parts is clamped to [−4, 4].
* If μ is not zero, the SIZE REDUCE unit subtracts μ times column l from
  column k, one element per cycle. In R this covers rows 1..l; in T it covers
  all 4 rows.
* If μ is zero, the step is skipped. This is the common case: about three in
  four.

**Siegel test.** CMUL squares R(k−1,k−1)/4 and R(k,k)/4. The SIEGEL unit then
compares 0.75·p, built as (p>>1)+(p>>2), with q. The common factor 1/4 keeps
the squares inside Q4.11 and cancels in the comparison.

**Swap and rotation.** These run only if the Siegel test holds. The core swaps
columns k−1 and k of R and T. This leaves a non-zero entry below the diagonal,
R(k,k−1) = b (real), under a = R(k−1,k−1) (complex). A complex Givens rotation
removes it:

| step | unit | result |
|---|---|---|
| 1 | CORDIC on (Re a, Im a) | u = e^(−jφ) = a*/\|a\| |
| 2 | CMUL u·a | \|a\| (real) |
| 3 | CORDIC on (\|a\|, b) | (cos θ, −sin θ) with cos θ = \|a\|/n, sin θ = b/n, n = √(\|a\|²+b²) |
| 4 | ARRANGE ×3 | cos θ, β = sin θ, −β as complex words |
| 5 | CMUL u·cos θ | α* = a*/n |
| 6 | ARRANGE (conjugate) | α |

With Θ = [α*, β; −β, α], rows k−1 and k of R (columns k−1..4) become Θ·R,
and columns k−1 and k of Q become Q·Θᴴ. Θ is unitary, so **Q R** stays
unchanged and **Q R = H T** still holds. Each new element takes two CMUL
operations plus an accumulate add, four cycles per pair of elements.
R(k,k−1) is written as an exact zero, and the imaginary parts of the two new
diagonal entries are cleared.

Compute time, with k and l counted from 1:

    sum over k=2..4 of [ sum over l=k-1..1 of (1 + (μ≠0)·(l+4)) + 2 + swap_k·(31 + 4·(6−k)) ]

This is between 15 cycles (no reduction, no swap) and 178 cycles (every
reduction and every swap). The core testbench checks this count exactly.

## The special function units

All units are combinational unless stated otherwise. The core registers their
results, so each operation takes one cycle.

* **`cmul`** — complex multiply. It uses four 16×16 multipliers, one
  subtractor (real part) and one adder (imaginary part), then rounds and
  saturates.
* **`mu_calc`** — rounded division with no multiplier. For each part x it
  compares 2|x| with |d|, 3|d|, 5|d| and 7|d|, which are built from shifts
  and adds. The number of thresholds exceeded is |μ|, and the sign is
  sign(x) xor sign(d).
  * An exact half rounds toward zero.
  * A zero divisor gives μ = 0.
* **`size_reduce`** — computes a − μ·b without a multiplier, using shift-add
  multiples b, 2b and 4b.
* **`siegel`** — computes (p>>1)+(p>>2) > q.
* **`arrange`** — rearranges the halves of a word: conjugate, negate, keep
  real, move imaginary to real (with or without negation), swap halves.
* **`cordic_ms`** — master-slave CORDIC with 16 iterations and a latency of
  4 cycles.
  * The master runs in vectoring mode on (x, y). Each iteration turns the
    vector toward the positive real axis, in the direction given by the sign
    of y.
  * The slave starts from the unit vector and applies the same turns, so it
    ends at (cos φ, −sin φ). No angle is ever computed.
  * One datapath of four stages (shifts i…i+3) is used in four successive
    cycles, with a register that loads, iterates or holds.
  * The slave starts at 1/K = 0.60725 rather than 1, which cancels the CORDIC
    gain. A vector with x < 0 is negated first, which gives convergence in
    every quadrant.
  * The internal words are 20 bits wide. The master's magnitude output
    (K·|v|) is not used by the core.

The FIFO (`lr_fifo`) is first-word fall-through. It ignores a push when full
and a pop when empty; assertions flag both.

## Departures from the paper

* **Control.** The paper's core is a programmable processor built with the
  TCE toolset: eight move buses, sockets, a global control unit, instruction
  memory, load/store unit, ALU, ten register files and a Boolean register
  file, programmed in C. Neither the program nor the instruction format is
  published. This design replaces all of them with a fixed sequencer and a
  42-word register store. The function units and STREAM units are the
  paper's; the programmability is not.
* **Matrix size.** The paper does not print the matrix size. 4x4 follows from
  its operation counts: 84 STREAM operations = 2·(16+10+16), and 34 SIZE
  REDUCTION operations per iteration.
* **Rotation extent.** The paper's algorithm rotates only the 2x2 block
  R(k−1:k, k−1:k), and its count of 72 CMUL operations per iteration matches
  that. Here the rows are rotated to the last column, because otherwise
  **Q̃ R̃ = H T** is lost. This costs up to 12 extra CMUL operations per
  iteration.
* **Complex rotation.** The paper writes the rotation in its real-valued form,
  Θ = [α, β; −β, α] and Q·Θᵀ. Here the complex form, Θ = [α*, β; −β, α] and
  Q·Θᴴ, is used.
* **Cycle count.** The paper reports 187 cycles for its compiled program. This
  sequencer takes 15–178 compute cycles plus about 36 cycles of streaming per
  core. In steady state the pipeline delivered one basis every 162 cycles on
  random channels. The two numbers come from different control schemes.
* **Own choices.** The following were chosen here, not taken from the paper:
  * the Q4.11 format, rounding and saturation;
  * the μ rounding scheme;
  * the ARRANGE operation set;
  * the CORDIC gain compensation, quadrant handling and word width;
  * the FIFO depth;
  * the stream order;
  * the valid/ready handshake;
  * synchronous active-high reset.
* **Early termination** means the fixed limit of five iterations. No
  data-dependent early exit is built.
* **Operations per iteration, worst case.** This core issues per iteration
  (paper's counts in brackets):
  * STREAM 84 [84]; 68 in the first core, which reads no T;
  * SIZE REDUCTION 34 [34];
  * SIEGEL 3 [3];
  * CORDIC 6 [9];
  * ARRANGE 12 [18];
  * CMUL up to 96 [72].

  The extra CMUL operations are the squares for the Siegel test, the
  |a| and α* products, and the wider R rotation.
* **Timing and area.** No timing or area figure is claimed for this RTL. The
  paper's figures (210 MHz, 405 kgates in a 90 nm library) are for its own
  processors.

## Verification

Each module has a self-checking testbench in `tb/`, named after the module
with a `tb_` prefix. Each prints `TB_RESULT checks=N failures=M`.

Expected values come from `tb/lr_ref_pkg.sv`, a reference model written from
the definitions rather than from the RTL: integer products, real-valued
division for μ, and a plain CORDIC loop. It also contains a floating-point
Gram-Schmidt QR decomposition that builds random test channels.

* The CORDIC test also compares with real cos and sin (within 4 LSB) and
  checks the 4-cycle latency.
* `tb_lr_core` iterates a core five times per channel with random FIFO
  stalls. It checks:
  * every output word bit for bit;
  * the compute-cycle formula;
  * **Q̃ R̃ = H T** in real arithmetic.
* `tb_lr_multiprocessor` runs 40 channels through the default five-core
  pipeline. It checks them bit for bit and checks **Q̃ R̃ = H T**. It also
  checks that each of these happened at least once:
  * size reduction, both done and skipped;
  * swap and no swap;
  * input and output back-pressure;
  * more than one core computing at once.

`tb_lr_rayleigh` sends 200 Rayleigh-fading channels through the pipeline,
with unit-variance complex Gaussian entries. It checks them bit for bit and
checks **Q̃ R̃ = H T**. It also measures the orthogonality defect: log2 of the
product of the column norms divided by |det R|, which is 0 for an orthogonal
basis. The mean fell from 2.04 bits before reduction to 0.63 bits after, and
no basis got worse.

Not verified: BER performance of a detector using this output, and behaviour
on channels whose entries exceed the Q4.11 range.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/lr_pkg.sv tb/lr_ref_pkg.sv rtl/*.sv tb/tb_lr_multiprocessor.sv \
  --top-module tb_lr_multiprocessor -o sim && ./obj_dir/sim
```

Replace the testbench name to run another one. Every run finishes in well
under a second.

To change the matrix size, edit `N` in `rtl/lr_pkg.sv`. The 2-bit loop
counters in `lr_core` and the 5-bit stream lengths assume N = 4. To change
the number of iterations, set `NCORES` on `lr_multiprocessor`. To change the
fixed-point format, edit `FRAC` in `lr_pkg`, the rounding constant in `cmul`,
and the 1/K constant in `cordic_ms`.
