# A KAN accelerator with low-bit B-spline tables in every PE

In a Kolmogorov-Arnold Network (KAN) layer, a learnable spline sits on every
edge in place of a weight. Each spline is a weighted sum of B-spline basis
functions:

    a_out[j] = sum_i sum_k  b_k(a_in[i]) * w[i,k,j]        k = 0 .. G+P-1

Here G is the number of grid intervals, P the spline degree, and w the learned
coefficients. In matrix form this is `B(A) x W`: evaluate the basis, then do an
ordinary matrix product. The basis is usually evaluated with the Cox-de Boor
recursion, which is slow and serial. On a uniform grid, though, every basis
function is a shifted copy of one bell-shaped curve, and that curve is
symmetric. So half of one curve, stored in a small table, gives every basis
value.

The KANtize study (Errabii, Sentieys, Traiola) shows that these basis values
survive very coarse quantization. Three bits per table entry are enough for
most models. The study then evaluates this effect on a KAN-SAs-style
weight-stationary systolic array, where every PE keeps its own copy of the
table: narrower table values make each PE smaller and faster. This repository
is a SystemVerilog implementation of such an accelerator. It uses the
configuration the study synthesizes: a 16 x 16 array, cubic splines (P = 3),
G = 5, 8-bit coefficients, 2^8 table entries per knot interval and 3-bit table
values.

The paper gives the table scheme and the array's configuration. It does not
describe the insides of the PE, the array wiring, the buffers or the control.
Those parts are this design's own. Each of them is marked as such below and
in the opening comment of its file.

## 1. What flows through the array: activation codes

A PE receives an activation code, not a number. The code is
`{j, f}`:

* `j` (4 bits) is the knot interval of the extended grid `[t_0, t_{G+2P})`.
  The default grid has 11 intervals, numbered 0..10.
* `f` (K_BITS = 8 bits) is the position inside that interval, in steps of
  1/256 of the knot spacing.

For an input in interval j at fraction f, only P+1 = 4 basis functions are
non-zero:

    b_{j-s}(x) = B(s + f),     s = 0..P

B is the canonical B-spline, with support [0, P+1]. Basis indices j-s that
fall outside 0..G+P-1 contribute nothing. A code with j >= G+2P (11..15) lies
outside the grid, and every basis function is zero there. The host uses
such codes to pad unused array rows.

The paper quantizes activations to `k = 8` bits and uses 2^k table entries per
knot interval. In this design those 8 bits are the fraction f. The 4-bit
interval index is an addition that makes the translation explicit. A
quantizer whose range is the grid bounds yields exactly this format: its step
is a power-of-two fraction of the knot spacing, so the code splits into an
interval index and a fraction.

## 2. The B-spline table (`bspline_lut`)

This is the core of the design, and it follows the paper's tabulation scheme.

**What is stored.** Only the rising half of B is stored: ceil((P+1)/2) = 2
knot intervals, with 2^K = 256 entries each. That makes 512 entries of
B_BITS = 3 bits, or 1536 bits per table.

**Translation.** The value B(s + f) lies at table position `u = s*256 + f`.
The four positions for s = 0..3 are read at the same time (four read ports on
one ROM), so a PE consumes one activation per cycle.

**Symmetry.** Positions in the second half (`u >= 512`) read the mirror
entry instead:

    addr = (u < 512) ? u : 1023 - u

**Mid-step sampling (this design's choice).** Entry u holds B sampled at the
middle of its step, `B((u + 1/2) / 256)`. With that choice the mirror of step
u is exactly step `(P+1)*2^K - 1 - u`, so no separate peak entry or rounding
of mirrored addresses is needed. The staircase in the paper's tabulation
figure matches mid-step values. The paper asks for boundary points to map to
exactly zero. That concern does not arise here: no entry sits on a boundary,
and values outside the support are never fetched.

**Value quantization (this design's choice).** min-max uniform quantization of
[0, peak of B] to `2^B_BITS - 1` levels, zero point 0, round to nearest:

    code(u) = round( B((u+1/2)/2^K) / B((P+1)/2) * (2^B_BITS - 1) )

The real scale `B((P+1)/2) / (2^B_BITS - 1)` is a common factor of every
product. It folds into the requantizer setting (section 5).

**How the table is built.** The ROM is not a data file. It is computed during
elaboration in `kan_pkg::bspline_code`, from the exact closed form

    B(x) = 1/P! * sum_{j=0}^{P+1} (-1)^j C(P+1,j) max(0, x-j)^P

This is evaluated in 64-bit integers on the numerator `x * 2^(K+1)`, where
the factor `1/(P! 2^((K+1)P))` cancels in the ratio. The arithmetic holds for
P <= 3, K_BITS <= 10 and B_BITS <= 16. Changing P, K_BITS or B_BITS
regenerates the table.

With the defaults, the 3-bit codes along the stored half rise from 0 to 7.
The highest code is reached just before the centre of B.

## 3. The processing element (`kan_pe`)

PE (r, c) owns one spline connection: input neuron r of the current tile to
output neuron c. It holds that connection's G+P = 8 coefficients (8 bits
each). Each cycle it does the following:

1. Looks up B(s+f) for s = 0..3 in its own table. The paper says each KAN-SAs
   PE has a local copy.
2. Multiplies each value with coefficient `w[j-s]` and drops the terms whose
   basis index is out of range or whose code is out of the grid.
3. Adds the four products to the partial sum from the PE above.
4. Registers the partial sum (downwards) and the activation code (to the
   right).

Only the P+1 non-zero basis values are ever multiplied. The zeros of the
sparse matrix `B(A)` are never formed; this is what the paper calls
sparsity management. How KAN-SAs does it internally is not described in the
paper. This design uses four parallel multipliers (8 x 4 bits, signed by
unsigned), which is the simplest form. Narrower table values shrink exactly
these multipliers, and that is where the paper's area and frequency gains
come from.

Coefficients are signed two's complement and table values unsigned. The
partial sums are 32-bit (ACC_BITS) and wrap on overflow. Sixteen rows of four
8 x 3-bit products cannot come near that limit, and neither can a
784-input layer accumulated over 49 tiles.

## 4. The array and its timing (`kan_systolic_array`, `kantize_top`)

The array is ROWS x COLS = 16 x 16 PEs and is weight-stationary. Activation
codes enter at the left edge and move one PE right per cycle. Partial sums
start at zero at the top and move one PE down per cycle.

* **Skew.** Row r of a sample must reach PE (r, c) in the same cycle as the
  partial sum from PE (r-1, c). The top module therefore delays row r of each
  activation vector by r cycles (`delay_line`). It also delays the result of
  column c by COLS-1-c cycles, so that all columns of one sample leave
  together. An assertion checks that alignment.
* **Latency.** An activation vector accepted in cycle t is written to the
  accumulator at the end of cycle `t + ROWS + COLS`, which is 32 cycles at the
  defaults. One vector is accepted per cycle.
* **Preload.** Each PE's coefficient bank forms a shift register down its
  column. Each accepted coefficient row shifts the banks down by one. A tile
  takes ROWS rows, sent in order from array row ROWS-1 to row 0.
* **No overlap.** As in the evaluated TPUv1-like system, coefficients are
  never preloaded while a batch is in the array. The paper notes that the
  area saved by narrow tables could pay for double-buffered preload; that is
  not built here.

## 5. Driving the accelerator (`kan_sa_ctrl`, `acc_buffer`, `requant`)

Everything in this section is this design's own. The paper only calls the
system "TPUv1-like" and does not describe its buffers or control.

**Protocol.** The controller has three states:

1. **IDLE.** Coefficient rows are accepted (`w_valid`/`w_ready`).
2. **STREAM.** A `start` pulse latches `batch_len`, `acc_base` and
   `accumulate`. Exactly `batch_len` activation vectors are then accepted
   (`act_valid`/`act_ready`). Gaps in `act_valid` leave bubbles in the array.
   Coefficient rows are refused.
3. **DRAIN.** The controller waits for the last result, pulses `done` and
   returns to IDLE.

**Accumulator buffer.** The n-th result of a batch goes to entry
`acc_base + n` of a 1024-entry buffer. Each entry holds COLS 32-bit sums. The
result overwrites the entry, or is added to it if `accumulate` was set at
`start`.

**Tiling.** The host (not part of this RTL) maps a layer of NIN inputs and
NOUT outputs onto the array:

    for each column tile ct (COLS outputs):
      for each input tile it (ROWS inputs):
        preload the ROWS x COLS coefficient tile
        start(batch_len = M, acc_base = ct*M, accumulate = (it > 0))
        stream M activation vectors (rows past NIN: code 15<<K)
    read entries 0 .. ceil(NOUT/COLS)*M - 1

**Read-out and requantization.** `rd_en`/`rd_addr` return the raw sums
(`rd_acc`) one cycle later, together with next-layer activation codes
(`rd_code`). The codes are produced by the uniform quantizer

    code = clip( ((acc * rq_mult + 2^(rq_shift-1)) >>> rq_shift) + rq_zero,
                 0, (G+2P)*2^K - 1 )

Here `rq_mult / 2^rq_shift` is the real factor 1/s, including the table's
value scale. `rq_zero` places the grid origin. Clipping to the grid loses
nothing, because every basis function is zero outside it. When all layers
share one grid, one setting serves the whole network, as the paper notes.

## 6. Parameters

| parameter | default | origin |
|---|---|---|
| ROWS x COLS | 16 x 16 | array size of the paper's FPGA clock-rate and ASIC comparisons |
| G, P | 5, 3 | the hardware experiments' grid and degree |
| K_BITS | 8 | 8-bit activations, 2^8 table entries per knot interval |
| B_BITS | 3 | the lowest table precision evaluated in hardware |
| W_BITS | 8 | coefficient width of the hardware experiments |
| ACC_BITS | 32 | own choice |
| ACC_DEPTH | 1024 | own choice |
| CNT_BITS | 16 | own choice (batch length counter) |

The paper also studies other table and coefficient widths:

* FPGA runs with B = 3..8 on arrays from 15 x 15 to 20 x 20;
* ASIC runs with B/W = 16/16 and 8..3/8.

Each of these is a setting of B_BITS, W_BITS and ROWS/COLS. The table
arithmetic holds up to B_BITS = 16.

A model trained with
G = 3 also runs unchanged on G = 5 hardware: on a uniform grid the basis is
defined relative to knot indices, so the host zeroes coefficients 6 and 7 and
keeps codes in intervals 0..8.

## 7. How far this follows the paper

Taken from the paper:

* half-table B-spline tabulation with translation and symmetry;
* 2^k entries per knot interval, with memory `2^k x ceil((P+1)/2) x h` bits;
* a local table in every PE;
* a weight-stationary array;
* preload and compute in sequence;
* the 16 x 16, B = 3, W = 8, G = 5, P = 3 configuration;
* the uniform quantizer used for requantization.

This design's own choices:

* reading the paper's "256-entry B-spline lookup tables" as 256 entries per
  knot interval. The paper's own size formula, `2^k x ceil((P+1)/2) x h` bits,
  then gives 512 entries for P = 3;
* the code format with an explicit interval index;
* mid-step sampling and min-max value scaling of the table;
* a PE that holds one connection's G+P coefficients and has P+1 parallel
  multipliers;
* the dataflow directions, skew and preload chain;
* the handshakes, the state machine, the accumulator buffer and the
  requantizer's fixed-point format.

Not built:

* the host, the DMA engine and the off-chip memory (the paper only mentions
  DMA overhead);
* the FPGA board and the ASIC library;
* the baselines the paper compares against: the Cox-de Boor evaluation and
  full spline tabulation;
* double-buffered preload, which the paper only mentions as a possible use of
  the saved area.

No timing or area figures are claimed for this RTL. The paper reports them
only for its own synthesis runs.

## 8. Simulation

Every testbench is self-checking. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The references are
independent of the RTL. B-spline values come from a floating-point,
degree-by-degree Cox-de Boor evaluation (`tb/kan_ref_pkg.sv`), not from the
integer closed form the RTL uses.

| testbench | what it covers |
|---|---|
| `bspline_lut_tb` | all 256 fractions x 4 positions against the reference, mirror symmetry, peak code |
| `kan_pe_tb` | random coefficients and codes, grid edges, out-of-grid codes, bubbles |
| `kan_systolic_array_tb` | 4 x 5 array: sums and per-column output cycle `issue + ROWS + c` |
| `requant_tb` | 20 000 random cases plus rounding corners, both clip sides |
| `kan_sa_ctrl_tb` | handshakes, refused rows during a batch, address wrap, `batch_len = 0` |
| `kantize_top_tb` | a [10, 5] layer, batch 6, on a 4 x 3 array. It tiles, accumulates, reads back, requantizes, checks latency `ROWS+COLS`, and counts every mechanism |
| `kantize_top_full_tb` | the same run at the default 16 x 16 configuration: a [20, 16] layer, batch 4 |
| `kan_mlp_workload_tb` | a complete two-layer KAN MLP [784, 32, 10] on an 8 x 8 array. Layer-1 codes are read back through the requantizer and fed to layer 2 |

Run any of them with plain Verilator, from the repository root:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        -Irtl -Itb rtl/kan_pkg.sv tb/kan_ref_pkg.sv tb/kantize_top_tb.sv \
        --top-module kantize_top_tb
    ./obj_dir/Vkantize_top_tb

The 16 x 16 build (`kantize_top_full_tb`) takes about three minutes to
compile and under a second to run.

## 9. Workloads

The paper evaluates the following workloads:

* MNIST-shaped KAN MLPs [784, n, 10], n from 32 to 256, batch 10 000, G = 5;
* KANMLP1 [784, 10] and KANMLP2 [784, 64, 10];
* the convolutional KANs LeKAN, CNN3, CNN4 and ResKAN18, with G = 3 or 5.

All of them run on this accelerator as sequences of 16 x 16 tiles:

* **Layer sizes.** The array has no limit on layer size. Only the tile loop
  grows: the first layer of [784, 64, 10] takes 49 x 4 tiles.
* **Batches.** The accumulator buffer holds 1024 sample results per column
  tile, so a batch of 10 000 is run in chunks of up to 1024.
* **Convolutions.** The host must lower convolutions to matrix form (im2col).
* **Coefficients.** Coefficients stream from off-chip memory one tile at a
  time, so ResKAN18's 67 M parameters never need to fit on chip.
