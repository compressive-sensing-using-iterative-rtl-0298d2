# QIHT streaming engine: iterative hard thresholding on low-precision data

Compressive sensing recovers a sparse signal `x` (length `N`) from far fewer
linear measurements `y = Phi x + e` (length `M`). Iterative hard thresholding
(IHT) does this by alternating a gradient step on `||y - Phi x||^2` with a
projection that keeps only the `s` largest entries. In real problems such as
radio-interferometric imaging or MRI, `Phi` is far too large to keep on chip. It has to be
streamed from main memory every iteration, so the iteration time is
`size(Phi) / memory bandwidth`. The idea behind this engine is to store `Phi`
and `y` stochastically quantized to a few bits. A 64-byte memory line then
carries more matrix entries, and a datapath wide enough to consume a whole line per cycle
finishes an iteration proportionally faster. Going from 32-bit to 4-bit entries
gives an 8x shorter iteration at the same bandwidth.

This RTL implements that engine as described in "Compressive Sensing Using
Iterative Hard Thresholding with Low Precision Data Representation: Theory and
Applications" (QIHT, quantized IHT). That work documents the engine as a block diagram plus a few
sentences, so much of the detail here (widths, stream format, control,
pipelining) is this implementation's own. The section
[Departures and choices](#departures-and-choices) lists every such choice.

## The iteration the hardware computes

With `x'` the current sparse estimate and `Q(.)` the quantized data, one
iteration (an *epoch*) is

```
x  <- x' - gamma * Q(Phi)^T (Q(Phi) x' - Q(y))      (gradient step, all M rows)
x' <- H_s(x)                                        (keep the s largest |x_i|)
x  <- x'
```

It proceeds row by row. For each row `m` of `Phi`:

1. **Dot product.** `d_m = Q(Phi_m) . x'`, computed while the row streams in.
2. **Residual and step.** `g_m = (d_m - y_m) * gamma`. `gamma = 2^-gamma_shift` is a
   power of two, so the multiplication is an arithmetic shift.
3. **Model update.** `x <- x - g_m * Q(Phi_m)`, applied to the on-chip model.

`x'` does not change during an epoch. Only `x` accumulates the gradient of all
rows, so after the last row `x` holds the full gradient step. This is
batch gradient descent, not the per-sample SGD the underlying FPGA framework
was built for. After the epoch, the hard-thresholding unit finds the threshold,
writes `H_s(x)` into both `x'` and `x`, and the next epoch starts.

The first epoch starts from `x = x' = 0`. It yields `x = gamma Phi^T y`, whose
thresholding is the usual IHT initialisation `H_s(Phi^T y)`.

The host may stream a fresh quantization realization of `Phi` and `y` each
epoch, as the QIHT algorithm prescribes. Within one epoch the same realization
feeds both the dot product and the update (see the departures section).

## Block structure

```
 64 B line stream ──► [line register] ──┬──► K multipliers ─► adder tree ─► accumulator ──┐  d_m
 (in_valid/in_ready)         │          │       ▲ x' word                                  │
                             │          │   [x' memory]                                    ▼
                  header ──► [y FIFO] ──┼────────────────────────────────────────► (d_m - y_m) >>> gamma_shift
                             │          │                                                  │  g_m
                 Phi lines ─►[Phi FIFO]─┴──► K multipliers (g_m * Phi) ◄──[residual queue]◄┘
                                                    │
                                      [x memory] ─► K subtractors ─► [x memory]
                                                    │
                          end of epoch:  hard_threshold (binary search) ─► x', x
```

| Module | Role |
|---|---|
| `qiht_top` | Wires everything together. Muxes the memory ports by phase. Holds the interface. |
| `qiht_ctrl` | Phase machine (IDLE, CLEAR, STREAM, DRAIN, THRESH, DONE). Labels each accepted line. Handles back-pressure. |
| `dot_product` + `adder_tree` | K multipliers, a pipelined K-input adder tree and a per-row accumulator. |
| `sync_fifo` | The Phi FIFO, the y FIFO and the residual queue. |
| `gradient_calc` | Residual, y alignment, gamma shift with saturation, and the K gradient multipliers. |
| `model_update` | Replays a row from the Phi FIFO and applies the K saturating subtractions to `x`. |
| `model_ram` | Memory for `x` and for `x'`: one K-wide word per line of a row. |
| `hard_threshold` | Bit-serial binary search for the threshold, then the apply pass. |
| `qiht_pkg` | Default sizes and the phase enum. |

## Number formats and scaling

This is the part to get right when preparing data for the engine.

**Quantized lanes.** For fixed-point hardware the quantizer uses an odd
number of levels, `2^(b-1)+1` for `b` bits, spaced `1/2^(b-2)` apart in
`[-1, 1]`. A lane therefore holds a signed integer `j` in `[-2^(b-2), 2^(b-2)]`
that means `j / 2^(b-2)`. For 4-bit `Phi` that is `j` in `[-4, 4]`, and for
8-bit `y` it is `j` in `[-64, 64]`. Two's complement holds these directly, so
no decoder is needed. The data must be scaled into `[-1, 1]` before
quantization; that scale is a global factor the host folds into `gamma`.

**Model.** `x` and `x'` are signed `X_BITS` = 32-bit integers with an implicit
binary point of `XF` fraction bits, chosen by the host.

**Dot product.** `d = sum j_Phi * x_int` is exact: a product has
`PHI_BITS + X_BITS` bits, the tree adds `log2 K` bits and the accumulator has
64 bits. One unit of `d` is worth `2^-(b_Phi-2) * 2^-XF`.

**Aligning y.** `y` is brought to the units of `d` by a left shift:

```
y_shift = XF + b_Phi - b_y          (e.g. 16 + 4 - 8 = 12)
```

**Step.** The residual `r = d - (y << y_shift)` is shifted right by
`gamma_shift` and saturated to 32 bits, giving `g`. The update subtracts
`j_Phi * g` from `x_int`. For a real step `gamma = 2^-k`:

```
gamma_shift = k + 2 * (b_Phi - 2)   (the two Phi level scales)
```

**Saturation.** `g` and every updated model entry saturate to the signed
32-bit range. `sat_event` reports when a model lane saturated. A step that
saturates the model means `gamma` is too large.

## Stream format and the row pipeline

The engine consumes a stream of 512-bit lines. For every row `m` of every
epoch:

```
line 0           : y_m in bits [Y_BITS-1:0] (rest ignored)
lines 1 .. L     : Phi_m[(l-1)*K + i] in bits [i*PHI_BITS +: PHI_BITS], i = 0..K-1
```

Here `L = cfg_lines = N / K`. Entry `l*K + i` of the model sits in lane `i`
of memory word `l`. One epoch is `cfg_rows * (L + 1)` lines. After `cfg_iters`
epochs the engine is done.

When a line is accepted (`in_valid && in_ready`):

* A header line goes into the y FIFO.
* A `Phi` line goes into the Phi FIFO unchanged. In the same cycle, word
  `l` of `x'` is read. One cycle later the line and the `x'` word enter the
  dot product.

The dot product produces `d_m` `2 + log2 K` cycles after the row's last line
(9 cycles for K = 128). At that moment `y_m` is at the head of the y FIFO. The
scalar stage forms `g_m` one cycle later and queues it.

The update engine takes `g_m` and replays the `L` lines of row `m` from the
Phi FIFO, one per cycle. For each replayed line it reads model word `l`,
multiplies the line by `g_m`, and writes back `x - g_m * Phi` one cycle later.

The dot product of row `m+1` runs while row `m` is being replayed. The Phi
FIFO therefore holds up to about one row plus the pipeline depth. At the
default depth of `2 * L_MAX` lines the stream never stalls, and an epoch takes
exactly `rows * (L + 1)` cycles, i.e. one 64-byte line per clock. That is the
whole point of the design: at 200 MHz, 64 B per cycle is the 12.8 GB/s memory
rate the reference platform sustains. A shallower FIFO works too; `in_ready`
then drops whenever it is full.

At the end of an epoch the controller waits until every FIFO is empty and
every pipeline stage has drained (DRAIN), then starts the thresholding.

## Hard thresholding by binary search

`H_s` needs the magnitude `T` that only the top `s` entries exceed. Sorting
65 536 entries in hardware is expensive. Instead the unit binary-searches `T`
one magnitude bit at a time, from the most significant bit down:

```
T = 0
for bit = X_BITS-1 downto 0:
    cand = T | (1 << bit)
    if count(|x_i| >= cand) > s:  T = cand        -- one pass over x memory
keep x_i if |x_i| > T, else 0                      -- apply pass, writes x' and x
```

`count` is a monotone function of `cand`, so the loop ends with
`T` = the largest value that more than `s` entries reach. That is exactly the
`(s+1)`-th largest magnitude. Entries strictly above `T` are kept, so at most
`s` survive. If several entries tie at `T`, fewer than `s` survive; when all
entries are equal, none do.

Each pass reads one K-wide word per cycle and adds a K-lane popcount. The
whole step takes `(X_BITS + 1) * (L + 1) + 1` cycles: 16 930 cycles for
`L = 512`. For the radio-astronomy size (1 800 real rows) this is under 2 % of
an epoch. `last_thresh`, `last_kept` and `th_passes` report the outcome.

## Interface and timing (`qiht_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | Clock. Asynchronous active-low reset of all control state. |
| `start` | in | 1 | One-cycle pulse in IDLE or DONE begins a run. |
| `cfg_rows` | in | 32 | `M`, rows per epoch. |
| `cfg_lines` | in | 10 | `L = N/K`, 1 .. `L_MAX`. |
| `cfg_iters` | in | 16 | `n*`, epochs (>= 1). |
| `cfg_s` | in | 32 | Sparsity `s`. |
| `cfg_y_shift`, `cfg_gamma_shift` | in | 6 | Scaling, see above. |
| `in_valid`, `in_ready`, `in_line` | in/out/in | 1/1/512 | Line stream. A line moves on a rising edge with both high. `in_ready` depends only on internal state. |
| `phase`, `iter`, `done` | out | 3/16/1 | Progress. `done` stays high until the next `start`. |
| `last_thresh`, `last_kept`, `th_passes` | out | 32/32/8 | Result of the last thresholding. |
| `sat_event` | out | 1 | A model lane saturated this cycle. |
| `phi_fifo_level` | out | 11 | Phi FIFO fill. |
| `rd_addr`, `rd_data` | in/out | 9/4096 | Read `x'` word `rd_addr` one cycle later, outside STREAM. |

The `cfg_*` inputs must be held while a run is in progress.

A run takes:

* CLEAR: `L` cycles.
* Per epoch: `rows*(L+1)` stream cycles (more if the source stalls), the
  drain (about 12 cycles), then `(X_BITS+1)*(L+1)+1` thresholding cycles.

## Parameters and sizes

| Parameter | Default | Origin |
|---|---|---|
| `K` | 128 | Values per 64 B line in the reference design (which lists 128, 64 and 32). |
| `PHI_BITS` | 4 | 512 / K. Use 8 with K = 64, or 16 with K = 32. |
| `Y_BITS` | 8 | 8-bit observations, as in the evaluated configurations. |
| `X_BITS` | 32 | Own choice. |
| `ACC_BITS` | 64 | Own choice; exact for any row of up to 2^27 lanes of 32-bit x. |
| `L_MAX` | 512 | 65 536 / 128: a 256 x 256 image. |
| `PHI_FIFO_DEPTH` | 1024 | Own choice: 2 rows, so the stream never stalls. |
| `Y_FIFO_DEPTH`, `G_FIFO_DEPTH` | 4 | Own choice. |

At the defaults the two model memories are 512 x 4096 bits each (4 Mbit in
total). The Phi FIFO is 1024 x 512 bits.

**Applications this size covers.**

* **Radio astronomy** (256 x 256 sky, 30 antennas): fits. The 900 complex
  visibilities become 1 800 real rows when the host stacks the real and
  imaginary parts.
* **Synthetic problems** (128 x 1024): fit.
* **MRI** (512 x 512 image, 12-bit `y`, 8-bit `Phi`): needs
  `L_MAX = 2048`, `Y_BITS = 12` and `PHI_BITS = 8` / `K = 64`. These are
  parameter changes, not design changes.

## Departures and choices

Followed from the reference design:

* The datapath blocks and how they connect: K multipliers, adder tree,
  accumulator, y and Phi FIFOs, subtract, bit-shift step, K multipliers, K
  subtractors.
* The 64 B line and K = 128.
* Keeping `x` on chip.
* Updating the model once per epoch.
* The binary search for the threshold.
* The odd-level fixed-point quantization grid.

Not as in the algorithm:

* **Fixed step.** The normalized-IHT step size `mu` and its shrinking loop
  (with constants `k`, `c`) are not implemented. They need divisions and
  extra passes over `Phi`, and the hardware diagram uses a fixed
  power-of-two `gamma` instead.
* **No double sampling.** The algorithm uses two independent quantizations
  of `Phi` for the two products. Here one streamed line feeds both, as in the
  diagram. A new realization can be streamed each epoch.
* **Real arithmetic only.** Complex data must be mapped to real rows by the
  host.
* **No quantizer on chip.** Data arrive already quantized; stochastic
  rounding happens where the data are produced or stored.

Own choices, all unspecified in the source:

* Widths `X_BITS`, `ACC_BITS`, `SHIFT_BITS`, and the saturation.
* The header-line stream format.
* The residual queue and the FIFO depths.
* The pipeline registers and latencies.
* The phase machine, the model clear and the read-back port.
* The bit-serial form of the binary search and its tie rule.

Not built:

* Main memory and its controller.
* The host processor.
* The stochastic quantizer.

The engine's port is a plain valid/ready line stream that such a memory
reader would drive.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares the
module against an independent model written as plain loops, and ends by
printing `TB_RESULT checks=N failures=F`.

| Testbench | What it establishes |
|---|---|
| `tb_sync_fifo` | Data order, flags and count under random traffic, with a depth that is not a power of two. |
| `tb_model_ram` | Read latency and read-before-write. |
| `tb_dot_product` | Exact row sums, including extreme operands, and the `2 + log2 K` latency. |
| `tb_gradient_calc` | Residual, shifts, saturation and the K products. |
| `tb_model_update` | Final model after 40 rows, with FIFO gaps and saturation. A row takes `L` cycles at full rate. |
| `tb_hard_threshold` | Threshold equals the `(s+1)`-th largest magnitude (by sorting). Checks the kept set, ties, all-zero models and the cycle count. |
| `tb_qiht_ctrl` | Line labelling, back-pressure, clear sweep, one thresholding per epoch, restart. |
| `tb_qiht_top` | End to end at K = 8: three runs checked word by word against a reference model. It forces FIFO back-pressure, stalls during thresholding, source bubbles, dot-product/update overlap, saturation and a restart, and counts each one. It also checks that an epoch takes exactly `rows*(L+1)` cycles. |
| `tb_qiht_full` | One complete run at the default size (K = 128, N = 65 536, 4 rows, 2 epochs). All 65 536 entries of `x'` are checked, and so is the one-line-per-cycle rate. |
| `tb_qiht_synthetic` | Sparse recovery on the standard Gaussian test problem: a 128 x 1024 matrix, noiseless, with s = 4, 8 and 12, on the default-size engine (8 lines per row). A fresh stochastic quantization (4-bit Phi, 8-bit y) is drawn each epoch, with a fixed step of 2^-5 and 60 epochs. The result must match the integer model bit for bit. Exactly s entries must remain, at least half of the true support must be found, and the relative error must stay below 0.5. Typical runs give errors of 0.10 to 0.20 and find all but the smallest entries. |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/qiht_pkg.sv \
          $(ls rtl/*.sv | grep -v qiht_pkg) tb/tb_qiht_top.sv --top-module tb_qiht_top -o sim
./obj_dir/sim
```

The package must come first and only once. Testbenches for single blocks
override the block's parameters to keep the simulation small.

Every testbench finishes in seconds. What has not been verified: behaviour on
an FPGA, timing closure at 200 MHz, and recovery quality on the radio-astronomy
and MRI data sets, and recovery at larger s or with noise. The testbenches check that the hardware matches its
integer model; they do not check that the model reproduces the published
image-quality results.
