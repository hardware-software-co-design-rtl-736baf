# DLWSS accelerator: deep-learning wideband spectrum sensing in programmable logic

A cognitive radio that watches a wide band (here 14 sub-bands) has to decide,
frame after frame, which sub-bands are occupied. Sampling the whole band at
Nyquist rate is too expensive, so the receiver uses a small number of slow
ADCs (K = 8 branches of a modulated wideband converter). Each branch mixes the
input with its own periodic pattern and samples it slowly; the relation
between the K branch outputs Y (K x Q complex samples) and the N per-band
spectra X (N x Q) is a known K x N complex sensing matrix A, Y = A X.

Instead of recovering X with an iterative sparse solver (orthogonal matching
pursuit), this design does two fixed-latency steps:

1. **Pre-processing** forms a *pseudo-recovered* spectrum
   X~ = (A^H A)^-1 A^H Y, splits it into real and imaginary planes and scales
   it into [-1, 1]. The result is a 2 x 14 x 299 tensor.
2. **A small CNN** (three 1-D convolution layers with ReLU and one fully
   connected layer) maps that tensor to 14 scores. A sigmoid and a threshold of
   0.5, done in software, turn the scores into the occupancy of the 14 bands.

The RTL covers the programmable-logic side of a Zynq-style system. It contains
the pre-processing unit, the three convolution layers and the FC layer. Each
is an independent accelerator with an AXI-Stream input, an AXI-Stream output
and start/busy/done control. A processor moves the data between the
accelerators and external memory through DMA engines; those parts (processor,
DMA, interconnect, DDR) are not included. The sigmoid and the final decision
also run on the processor.

## Files

| file | contents |
|---|---|
| `rtl/dlwss_pkg.sv` | number formats, fixed-point and complex arithmetic helpers |
| `rtl/dlwss_top.sv` | top level: one pre-processing unit, three `cnn_layer`s, one `fc_layer` |
| `rtl/preprocessing.sv` | X~ = (A^H A)^-1 A^H Y, planes, normalization, stream I/O |
| `rtl/cmat_conj_transpose.sv` | A^H |
| `rtl/cmat_mult.sv` | complex matrix product, one output element per cycle |
| `rtl/cmat_inv_lu.sv` | complex matrix inverse by LU with partial pivoting |
| `rtl/fx_div.sv` | serial restoring divider |
| `rtl/normalize.sv` | max-abs scaling into the activation format |
| `rtl/cnn_layer.sv` | tiled 1 x KW convolution + bias + ReLU |
| `rtl/relu.sv` | ReLU |
| `rtl/fc_layer.sv` | fully connected layer with on-chip weights |
| `tb/tb_<module>.sv` | self-checking testbench for each module |
| `tb/tb_dlwss_top.sv` | end-to-end test at reduced sizes, with stalls and gaps |
| `tb/tb_dlwss_full.sv` | end-to-end test at the default (full) sizes |

## Number formats

The notation <W,I> means a W-bit two's-complement word with I integer bits,
sign included.

* **CNN activations**: <25,9>, so 16 fraction bits and a range of ±256. This
  covers the stream into CV1 (the normalized spectrum), the outputs of every
  layer, and the biases.
* **CNN weights**: <16,2>, so 14 fraction bits and a range of ±2.
* **Accumulators**: 56 bits with 30 fraction bits. A product has 30 fraction
  bits, and every product of a layer is summed at full precision, across input
  groups as well. CV2 has the largest fan-in: 128 x 100 = 12,800 products.
  Only at the end is the sum shifted right by 14 (truncation toward minus
  infinity) and saturated to 25 bits.
* **Pre-processing**: complex numbers made of two Q16.16 words, 32 bits each.
  The real part is in the low half of a 64-bit stream word and the imaginary
  part in the high half. Complex products are formed at full width and then
  truncated and saturated back to Q16.16.

The <25,9>/<16,2> pair is the one the paper's word-length study recommends:
it keeps the accuracy of single-precision floating point. The Q16.16 format
of the pre-processing is this design's own choice, because the paper gives no
word length for that stage.

On the stream, every CNN value is a 32-bit word: activations and biases are
sign-extended from 25 bits, and weights sit in the low 16 bits, also
sign-extended.

## The tiled convolution layer (`cnn_layer`)

This is the part that needs the most care from whoever drives it.

One layer computes

    out[o][r][c] = relu( b[o] + sum_i sum_k in[i][r][c+k] * w[o][i][k] )

for o < CO output channels, r < H rows (bands), c < WO = WI - KW + 1
columns, i < CI input channels and k < KW taps. The kernels are 1 x KW,
stride 1, with no padding. A layer is too large to keep on chip: the CV2
weights alone are 128 x 256 x 100 words. So it is cut into tiles
<TO, TI, TR, TC>, which default to <20, 16, 20, 20>:

* an **output tile** is TO output channels x TR rows x TC columns;
* an **input group** is TI input channels.

Tiles at the edges are cut to whatever remains. With H = 14, TR = 20 means
one row tile that holds all 14 rows.

### Stream order

The layer has no address port. Everything arrives on `s_tdata` in one fixed
order, which the DMA descriptors on the host side must reproduce exactly.

    for each output-channel tile  (to0 = 0, TO, 2TO, ...)        outermost
      for each row tile           (tr0 = 0, TR, ...)
        for each column tile      (tc0 = 0, TC, ...)             innermost
          to_n biases                      b[to0 .. to0+to_n-1]
          for each input group    (ti0 = 0, TI, ...)
            weights  w[o][i][k]   o-major, then i, then k   (to_n*ti_n*KW words)
            inputs   in[i][r][c'] i-major, then r, then c'  (ti_n*tr_n*(tc_n+KW-1) words)
          -- the layer now streams the finished output tile --
          outputs  out[o][r][c]   o-major, then r, then c   (to_n*tr_n*tc_n words,
                                                             m_tlast on the last)

Here c' runs over the tc_n + KW - 1 input columns that the tile's outputs
depend on, starting at tc0. Tiles next to each other therefore share
KW - 1 input columns, and those columns are sent again. The testbenches
contain a reference implementation of this ordering; see the `run_layer` task and the stream
processes of the end-to-end testbench.

### Inside a tile

The on-chip buffers are:

* TI input banks, each holding one channel's TR x (TC+KW-1) window;
* TO x TI weight banks of KW words;
* TO accumulator banks of TR x TC words, 56 bits each.

All of them are read synchronously, so they map onto block RAM.

The MAC array has TO lanes. Each lane sums TI products per cycle, and lanes
for channels beyond the last input channel are masked. One output position is
finished for all TO channels in KW + 2 cycles: KW taps, one cycle of read
latency and one write-back. The biases are loaded into the accumulators
before the first group, and later groups add on top.

After the last group the tile is drained. Each accumulator is shifted,
saturated and passed through ReLU, and the results are sent at one word every
two cycles. Buffer reads are registered, so the drain takes two cycles per
word.

### Cycle count per output tile

With words arriving back to back and the output never stalled, a tile takes
about

    to_n + sum over groups [ to_n*ti_n*KW + ti_n*tr_n*(tc_n+KW-1) + tr_n*tc_n*(KW+2) ]
         + 2*to_n*tr_n*tc_n

cycles. In this sum, loading the weights and inputs costs about as much as
the arithmetic. Double-buffered tiles could overlap loading and computing, but the paper
does not describe them, and this design does not do it.

Measured in the full-size simulation with no stalls, CV1 at the defaults
takes 6,329,738 cycles.

### Handshake

* `start` is a one-cycle pulse that runs the whole layer.
* `busy` is high from `start` until `done`.
* `done` pulses when the last output word has been accepted.
* `s_tready` is high only while the layer is in a load state. A source that
  pauses (`s_tvalid` low) simply stalls the load.
* `m_tvalid`/`m_tdata` follow the AXI-Stream rule: once valid, a word holds
  until it is accepted. An assertion in the module checks this.

## Pre-processing (`preprocessing`)

Input, on one 64-bit stream:

* A, row by row (K*N words);
* then Y, one snapshot at a time (K words each, Q snapshots).

Y is kept in a K x Q buffer. The unit then runs five stages, one after the
other:

| stage | unit | cycles (approx.) |
|---|---|---|
| A^H | `cmat_conj_transpose`, combinational | 0 |
| A_sq = A^H A | `cmat_mult` (K parallel complex multipliers) | N*N + 2 |
| A_sq^-1 | `cmat_inv_lu` | ~N^3 + 81*N |
| A_pinv = A_sq^-1 A^H | `cmat_mult` (N parallel multipliers) | N*K + 2 |
| X~ = A_pinv Y | `cmat_mult` (K parallel multipliers) | N*Q + 2 |

While X~ is produced, the running maximum of all |re| and |im| is tracked.
One division then gives 1/max. The output is streamed as the real plane
X~[n][q] followed by the imaginary plane. Every value is multiplied by 1/max
and sent as a <25,9> word. The stream carries one word every two cycles, so
2*N*Q words in total. The output order is the channel, band, sample order
that CV1 expects, so a DMA can pass it straight through as CV1's input. CV1
also needs the data cut into tiles, so in practice the output goes to DDR and
is then re-read in tile order.

At the defaults (K = 8, N = 14, Q = 299) one frame takes 28,954 cycles, as
measured in the full-size simulation.

**Inversion method.** The inverse is computed from P A_sq = L D U:

* forward substitution of L y = P e_j for every column j;
* then back substitution through U, scaling by D^-1.

Pivoting chooses the row with the largest |re| + |im|, which avoids a
modulus. Each pivot's reciprocal is formed as conj(d) / |d|^2 with the
serial divider.

**Caveat: rank.** (A^H A)^-1 exists only if A has full column rank, which
needs K >= N. With the paper's 8 ADCs and 14 bands, A^H A has rank 8 and is
singular. The hardware runs the algorithm exactly as written, but the
inverter hits zero or near-zero pivots and saturates, so the resulting
X~ is not meaningful. A different pseudo-inverse, such as
A^H (A A^H)^-1, or a regularized one, would be needed for K < N. This design
does not substitute one, because it follows the algorithm as stated. The
tests that check values therefore use K >= N: the unit test uses K = 6,
N = 3, and the reduced end-to-end test uses K = 5, N = 4. The full-size test
runs K = 8, N = 14 for structure and timing only.

**Normalization** scales by the single largest magnitude in the frame. The
paper has a normalization step but does not say which rule it uses, so this
rule is this design's choice.

## Fully connected layer (`fc_layer`)

FC3 has 896 inputs (14 x 1 x 64 from CV3, flattened in [o][r][c] order,
which is the order CV3 streams it in) and 14 outputs. Its 14 x 896 weights
are small enough to stay on chip, so the layer is not tiled.

* A run started with `load_w` = 1 first takes 14 biases, then the weights
  (o-major). It keeps them for later runs.
* Every run then takes the 896 inputs. Each input word is multiplied against
  all 14 outputs in parallel.
* Two cycles after the last input, the 14 results (<25,9>, no activation)
  stream out at one word per cycle.

## Top level and the host's job (`dlwss_top`)

`dlwss_top` only instantiates the five accelerators. Each one keeps its own
ports, prefixed `pre_`, `cv1_`, `cv2_`, `cv3_` and `fc_`. This matches the
partitioning chosen in the paper, where every accelerator has its own DMA and
the processor runs them in turn through DDR.

Per frame, the host does the following:

1. Stream A and Y into `pre_`, pulse `pre_start`, and collect 2 x 14 x 299
   words.
2. For L = 1, 2, 3: pulse `cvL_start`, stream biases, weights and input
   windows in the tile order above, and collect the output tiles. The
   outputs must be scattered back to [o][r][c] before the next layer reads
   them in tile order.
3. Start `fc_`, with `load_w` set on the first frame, stream in the 896
   values, and collect 14 scores.
4. Compute sigmoid(score) > 0.5 per band.

The processor's register interface (an AXI-Lite map for start, busy and
done) is not defined here. The paper does not give one, so the control bits
are plain ports.

## Departures from the paper and choices of this design

* **Arithmetic.** The paper's hardware runs in floating point in one variant
  and in fixed point in another. Only the fixed-point variant with
  <25,9>/<16,2> is built. The pre-processing word length is this design's
  choice (Q16.16 complex).
* **Partitioning.** The paper's study of which parts to move to hardware also
  remarks that keeping everything except the convolutions in software is
  nearly as good. This design follows the architecture figure instead: the
  pre-processing, the convolutions and the FC layer are in hardware, and the
  sigmoid is in software.
* **Y dimensions.** The paper's algorithm text gives Y both as N x Q and as
  K x Q. This design uses K x Q (one row per ADC), the only size consistent
  with Y = A X.
* **Permutation.** The paper writes the inverse with P^-1. With P A = L D U
  the inverse is U^-1 D^-1 L^-1 P, and that is what is built.
* **Pseudo-inverse rank.** See the caveat above: the default K < N is
  singular.
* **Normalization rule, stream word orders, the `load_w` mode, tile
  traversal order, MAC array shape, divider, and pivot rule** are all choices
  of this design. The paper states the functions but not these details.
* **Buffer budget.** At the defaults the CNN layers hold about 2.58 Mbit of
  on-chip buffers: 1.07 input, 0.87 weight and 0.64 accumulator. The paper
  quotes 3.35 Mbit for the same tiling in single-precision floating point.
  The difference comes from the narrower words and from cutting TR = 20 to
  the 14 rows that exist.
* **Not built.** The sigmoid runs in software. The DMA engines, the AXI
  interconnect, the ARM processing system and the DDR memory are external
  parts. The OMP recovery used for comparison is a baseline, not part of this
  design.

## Verification

Every module has a self-checking testbench. Each one compares the outputs
with values computed independently inside the testbench, ends with a line
`TB_RESULT checks=<n> failures=<m>`, and has a watchdog.

| testbench | what is checked |
|---|---|
| `tb_relu` | extremes, zero, ±1 LSB, random words |
| `tb_cnn_layer` | H=3, WI=9, CI=5, CO=7, KW=3 with tiling <3,2,2,3> (several input groups, edge tiles); ReLU, saturation, input gaps and output back-pressure |
| `tb_fc_layer` | 40 -> 5; a weight-loading run, then a run that reuses the weights; 2-cycle latency |
| `tb_cmat_conj_transpose` | every element of M^H, saturating negation |
| `tb_cmat_mult` | 4x3 x 3x5, value and M*NC+2 cycle count |
| `tb_fx_div` | random operands, division by zero, quotient overflow, NW+1 cycle latency |
| `tb_cmat_inv_lu` | 5x5: A x inv close to I; pivoting must occur |
| `tb_normalize` | y = x / max within one LSB; 81-cycle reciprocal |
| `tb_preprocessing` | K=6, N=3, Q=7: Y built as A X; output equals X / max(X) |
| `tb_dlwss_top` | whole chain at reduced sizes (see below) |
| `tb_dlwss_full` | whole chain at the default sizes |

`tb_dlwss_top` runs the chain with K=5, N=4, Q=24, three small layers and
tiling <4,4,3,4>. Its source and sink engines insert random gaps and stalls.
It checks every layer's output against a reference model in the testbench and
prints the sigmoid decisions per band. It also counts the mechanisms the
design has and fails if any count is zero:

* row exchanges in the inversion;
* multi-group accumulation;
* edge tiles;
* ReLU clipping;
* output saturation;
* input starvation;
* output back-pressure.

`tb_dlwss_full` runs the same chain with the top at its default parameters,
on random data, with no gaps. It checks the CNN and FC values (638,284
checks). The pre-processing values are not checked, because K < N. One
complete frame takes about 34 M cycles, about 8.5 minutes of Verilator
simulation:

| stage | cycles |
|---|---|
| pre-processing | 28,954 (13 row exchanges in the inversion) |
| CV1 | 6,329,738 |
| CV2 | 26,900,931 |
| CV3 | 808,963 |
| FC (including loading the weights) | 13,472 |

Each count runs from start to done, with a source that never pauses and a
sink that never stalls. At 100 MHz one frame would take about 0.34 s. Almost all of that
time is spent loading tiles and running the serial tap loop of CV2.

### Simulating

With Verilator 5:

    verilator --binary --timing --assert -Irtl -Wno-fatal \
        rtl/dlwss_pkg.sv rtl/*.sv tb/tb_cnn_layer.sv --top-module tb_cnn_layer
    ./obj_dir/Vtb_cnn_layer

Replace `tb_cnn_layer` with any testbench name. Every testbench overrides the
parameters it needs, except `tb_dlwss_full`. The simulation prints
`TB_RESULT checks=... failures=...` and finishes.

### Changing sizes

Every size is a parameter of `dlwss_top`:

* `K`, `N`, `Q` for the pre-processing;
* `CO1`/`KW1`, `CO2`/`KW2`, `CO3`/`KW3` for the layers;
* `TO`, `TI`, `TR`, `TC` for the tiling.

The FC input size follows from these parameters. Word lengths are
localparams in `dlwss_pkg`. The accumulator width `ACC_W` must cover
log2(fan-in) + 30 + 9 bits.
