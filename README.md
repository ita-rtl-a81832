# ITA — an integer attention accelerator with a streaming softmax

ITA computes the layers of a transformer's multi-head attention in 8-bit
integers: the Q, K and V projections, the attention matrix `A = softmax(Q·Kᵀ)`,
the product `A·V`, and the output projection. Two ideas shape the hardware:

* **Wide dot products, weight stationary.** `N` processing engines (PEs) each
  take the dot product of two `M`-element int8 vectors. All PEs get the same
  input row in a cycle, and each PE keeps its own weight vector for `M`
  cycles. The weight port therefore needs only `N` bytes per cycle: while one
  bank of weights is in use, the next bank is loaded beside it.
* **A softmax that needs no exponential, no multiplier and no second pass
  over the data.** The scores are int8 values at a fixed scale. At that scale
  `e^x` becomes a power of two whose exponent is the top three bits of the
  distance to the row maximum. The denominator is accumulated while `Q·Kᵀ`
  is produced, tile by tile. It is inverted by two small serial dividers. The
  scores are normalised by a shift when they come back as the input of `A·V`.

The default size is the evaluated one: `N = 16` PEs, `M = 64` elements per
dot product (1024 MACs per cycle), and `D = 24`-bit accumulation. It is set
in `rtl/ita_pkg.sv` and can be overridden per instance.

This RTL was written from the published description of the architecture. The
datapath, the loop nest and the softmax arithmetic follow that description.
Some things are left open there: the memory interface, the handshakes, the
requantisation formula, the softmax constant, the FIFO depth and the divider
algorithm. For those this implementation makes its own choices, listed in
[Departures and choices](#departures-and-choices).

## Block diagram

```
             in (M x int8) ──┬───────────────────────────┐
                             │                           v
                             │        ┌────────── softmax EN (M lanes) <── MAX, SUM/INV buffers (M rows)
                             v        v                                        ^        ^
                         input mux (A x V: normalised A)                        │        │ 2 serial dividers (DI)
                             │ M x int8                                         │        │
weights (N x int8) ─> weight buffer: W1/W2, M bytes per PE                      │        │
                             │ M x int8 per PE                                  │        │
                             v                                                  │        │
                   N dot-product PEs (M mults + adder tree), D-bit, registered  │        │
                             │ N x D                                            │        │
partial sums in (N x D) ──> + <── bias (N x int8, last L tile)                  │        │
                             │──────────────> partial sums out (N x D, not last L tile)  │
                             v                                                  │        │
                      ReQuant x N (int8) ──────> softmax DA (N lanes, Q x K^T) ─┘────────┘
                             v
                      output FIFO (N x int8) ──> out
```

| Module | Role |
|---|---|
| `ita` | top level: pipeline, input multiplexer, stream ports |
| `ita_controller` | walks the loop nest and tags every input row |
| `ita_weight_buffer` | two `M`-byte banks per PE, filled at `N` bytes/cycle |
| `ita_dot_product` | one PE: `M` int8 products summed into `D` bits, output register |
| `ita_accumulator` | `N` adders: PE result + partial sum + bias |
| `ita_requant` | one lane of `D`-bit to int8 requantisation with clipping |
| `ita_softmax` | softmax buffers, DI scheduling and the two dividers |
| `ita_softmax_da` | denominator accumulation of one `N`-element chunk |
| `ita_softmax_en` | element normalisation of one `M`-element row chunk |
| `ita_serial_divider` | 16-cycle restoring divider |
| `ita_output_fifo` | output buffer |
| `ita_pkg` | sizes, softmax constants, configuration and tag types |

## The schedule

A matrix product `Out(I×J) = In(I×L) · W(L×J)` is cut into `M×M` tiles and
computed by this loop nest. `ita_controller` walks it one row per cycle.

```
for i in [0, I/M)          output row tile
  for j in [0, J/M)        output column tile
    for p in [0, L/M)      reduction tile: partial sums go out and come back
      for r in [0, M/N)    N output columns = one weight bank
        for s in [0, M)    one input row per cycle, shared by all PEs
          PE n: Out[iM+s][jM+rN+n] (+)= In[iM+s][pM .. pM+M) · W[pM .. pM+M)[jM+rN+n]
```

* **Weights.** A bank holds `M` bytes for each of the `N` PEs (column
  `jM+rN+n`, rows `pM..pM+M-1`). It is used for the `M` cycles of the `s`
  loop. It is loaded in `M` beats: beat `k` carries byte `k` of each PE's
  vector. The load overlaps the use of the previous bank, so in steady state
  the weight stream and the computation both run at one beat per cycle.
* **Partial sums.** For every issued row except on the first `p`, the
  accelerator reads `N` partial sums of `D` bits. For every row except on the
  last `p`, it writes `N` back. Memory has to return them in the same order.
* **Bias and requantisation.** On the last `p`, the `N` int8 biases are
  added, the sums are requantised to int8, and the `N` bytes go into the
  output FIFO.

The accelerator does not address memory. It expects each stream in exactly
this order, and a memory system or DMA outside it produces and consumes them.
`tb/tb_ita.sv` (task `push_matmul`) is a reference implementation of that
order.

### Attention

For one head, with sequence length `S` and projection size `P`, the host runs
Q, K and V as linear layers. It then starts one `MODE_ATTENTION` operation.
For every row tile `i` the controller runs two products back to back:

1. `Q·Kᵀ` with `(J, L) = (S, P)`. Weights are `Kᵀ`, so PE `n` gets a row of
   `K`. Every result row is requantised and written out (this is `A`). On the
   last `p` it also goes through **DA**.
2. `A·V` with `(J, L) = (P, S)`. The input rows are the `A` rows just
   written, read back from memory. On the way into the PEs they pass through
   **EN** and become probabilities. Weights are `V`.

The softmax buffers are cleared when the first row of each new `i` is issued.

## The integer softmax

This is the least obvious part of the design.

**Why shifts suffice.** Let the requantised score be `x_q` with scale `ε`.
Then `e^(εx_q) = 2^(ε'x_q)` with `ε' = ε·log₂e`. Training clips the scores so
that `ε' = B/2^B = 8/256`. A larger scale would only push more
probabilities to zero after quantisation. So

```
e^(x_i - max)  ->  2^-((max - x_i) >> 5)
```

and the exponent is the top 3 bits of the 8-bit distance `max - x_i`.
Numerator and denominator are scaled by a constant `C = 128` so they stay
integers:

```
term_i  = C >> ((max - x_i) >> 5)                 one of 128, 64, ..., 1
SUM     = Σ term_i                                15 bits, saturating
INV     = 2^14 / SUM                              16-bit serial division
p_i     = min(127, INV >> ((max - x_i) >> 5))     int8, 128 would be 1.0
```

**Denominator Accumulation (DA).** Scores arrive as chunks of `N` elements
of one row per cycle, in the loop order above. So a row is seen in `J/N`
pieces, and the next row comes on the next cycle. Per row, `ita_softmax_da`
keeps a running `MAX[s]` and `SUM[s]`. For each chunk:

```
new_max = max(MAX[s], max_n x_n)
SUM[s]  = (SUM[s] >> ((new_max - MAX[s]) >> 5)) + Σ_n C >> ((new_max - x_n) >> 5)
MAX[s]  = new_max
```

When the maximum rises, the existing sum is shifted down by the same 3-bit
rule instead of being recomputed. Rows start at `MAX = -128`, `SUM = 0`. Both
buffers have `M` entries, one per row of a tile. A worked example with
`N = 2`: the chunk `(10, -30)` gives max 10 and sum 128 + (128 >> 1) = 192.
The next chunk `(50, 49)` raises the max by 40, so the old sum is shifted by
40 >> 5 = 1 to 96, and 128 + 128 is added, giving 352.

**Denominator Inversion (DI).** The controller marks the last chunk of each
row (last `j`, last `r`, last `p`). That row is then queued for one of two
serial dividers. The quotient `2^14 / SUM[s]` overwrites `SUM[s]`, so the
same buffer holds the inverse.

**Element Normalisation (EN).** During `A·V`, the row `s` entering the PEs
is replaced by `min(127, INV[s] >> ((MAX[s] - a) >> 5))`. That is a
subtractor and a 3-bit shifter per lane, `M` lanes. A row whose inverse has
not arrived yet stalls the issue stage.

**Numerical behaviour.** The probabilities are 7-bit fractions. With long
rows of similar scores most of them quantise to 0, which is inherent to
8-bit probabilities. The 15-bit sum saturates only if more than 255 scores
lie within 32 steps of the row maximum.

## Pipeline and handshakes

Every stream is valid/ready. A beat moves when both signals are high.

| Port | Width | Beat |
|---|---|---|
| `in_*` | `M×8` | one input row (X, Q, or A), per issued row |
| `w_*` | `N×8` | byte `k` of the `N` weight vectors, `M` beats per bank |
| `b_*` | `N×8` | biases, per issued row of the last `p` |
| `psi_*` | `N×D` | partial sums in, per issued row except of the first `p` |
| `pso_*` | `N×D` | partial sums out, per issued row except of the last `p` |
| `out_*` | `N×8` | requantised results |

There are two stages. In the **issue** stage, the row tag, input row and
weight bank enter the PEs and are registered there. In the **result** stage,
the accumulation, requantisation and the FIFO push, partial-sum output or
DA happen.

The whole pipeline moves together (`adv`). It holds while the result stage
lacks a partial sum or bias, or while its sink is not ready (output FIFO full
or `pso_ready_i` low). A row is issued (`fire`) when the pipeline advances
and four things are true: an input row is valid, the current weight bank is
full, and in `A·V` the softmax has that row's inverse.

With every stream always ready, one row is issued per cycle after the first
bank has loaded (`M` cycles). That is `N·M` MACs per cycle, 1024 at the
default size.

`start_i` with `cfg_i` (an `ita_pkg::ita_cfg_t`) starts an operation:

* `mode`
* tile counts `tiles_i`, `tiles_j` and `tiles_l` (in units of `M`; for
  attention these are `S/M`, `S/M` and `P/M`)
* `rq_main`, the requantisation for linear layers and `Q·Kᵀ`
* `rq_av`, the requantisation for `A·V`

`done_o` pulses when the last result has left the FIFO. Requantisation
computes

```
y = clip(((x · mult) + 2^(shift-1)) >>> shift + add, -128, 127)
```

## Departures and choices

Departures from the published description:

* **Softmax stalls at the start of `A·V`.** The published description says
  two serial dividers compute the inverses without any stall. With the loop
  order above, every row of a tile completes during the last `M` cycles of
  `Q·Kᵀ`. About `M/2 × 17` cycles of division (≈ 544 at `M = 64`) then
  remain when `A·V` starts. EN waits for each row's inverse, so the result is
  correct but the first `A·V` pass loses up to that many cycles. In
  simulation, one 256-token head (`S = 256`, `P = 64`, all streams ready)
  takes 9942 cycles for 8192 issued rows. Most of the 1750 extra cycles are
  these stalls, about 430 per row tile `i`.
* **Memories and clock gating.** The weight, MAX and SUM buffers are
  flip-flop arrays. The evaluated chip uses clock-gated latch memories.
* **Zero padding.** Matrix dimensions must be multiples of `M`; the host pads
  them. Padded score columns would enter the softmax as real scores, so the
  attention sequence length must itself be a multiple of `M` (or be padded
  with very negative scores).

Choices where the description is silent:

* the requantisation formula
* the softmax constant `C = 128` and the dividend `2^14`
* the output scale, with 127 as the largest probability
* saturation of the 15-bit sum
* the restoring divider
* lowest-row-first assignment of rows to the dividers
* FIFO depth 4
* the valid/ready streams and their order
* the configuration record
* the two-stage pipeline

Not included: the memory system around the accelerator (the evaluated
"system" variant adds a 64 KiB SRAM that is not described), and any
multi-head or layer sequencing beyond one operation per `start_i`.

## Sizes and workloads

* `D = 24` holds any dot product of up to 256 int8 pairs
  (256·128·128 = 2²² < 2²³). An `A·V` product over `S = 256` therefore
  cannot overflow.
* A compact convolutional transformer with 256 tokens and a head size of 64
  (CCT-7/3x1 on 32×32 images) maps to `tiles_i = tiles_j = 4` and
  `tiles_l = 1`.
* Tile counts are 8-bit, so one operation covers dimensions up to
  255·`M` = 16320.

## Verification

Each module has a self-checking testbench in `tb/` that compares it with a
model written independently in the testbench. Each prints
`TB_RESULT checks=… failures=…`.

* `tb_ita` runs the top level at its default size and plays the memory
  system. It runs five operations:
  * a linear layer, with all streams always ready, checking one row per
    cycle;
  * a linear layer with three reduction tiles, random stream gaps and
    back-pressure;
  * fused attention with `S = 128`, `P = 64`, checking both `A` and `A·V`
    bit-exactly against an integer model;
  * a linear layer with `L = 256` and every operand at −128, the largest dot
    product the 24-bit accumulator is sized for;
  * one 256-token attention head (`S = 256`, `P = 64`).

  It also counts weight starvation, bank overlap, FIFO-full stalls,
  partial-sum back-pressure, softmax stalls, sum rescaling, clipping, softmax
  clears and row completions. A mechanism that never occurs counts as a
  failure.
* The softmax tests (`tb_ita_softmax`, `tb_ita_softmax_da`,
  `tb_ita_softmax_en`) cover rising maxima, saturation, negative-only rows
  and the DI completion time.
* The remaining testbenches check the divider latency (17 cycles), FIFO
  ordering and flags, weight-bank switching, and the controller's tag
  sequence against a nested-loop reference.

To simulate with Verilator, for example the top-level test:

```
verilator --binary --timing --assert -Irtl --top-module tb_ita \
    rtl/ita_pkg.sv rtl/*.sv tb/tb_ita.sv
./obj_dir/Vtb_ita
```

Replace `tb_ita` with any other testbench name to run that test. The
top-level test builds in about a quarter of a minute and runs in under a
second.
