# LOREN: a code-rate adaptive neural receiver in SystemVerilog

A neural receiver is a small convolutional network. It turns the received
OFDM resource grid (14 symbols × 128 subcarriers) into log-likelihood ratios
(LLRs) for the channel decoder. Such a network is normally trained for one
code rate (CR). Supporting several code rates would then mean storing one
full set of weights per rate, about 442 k parameters per convolution layer
for each rate.

LOREN keeps a single shared base network W0. On a few convolution layers it
adds a per-code-rate low-rank correction:

    W(CR) = W0 + (alpha / r) · A(CR) · B(CR),   A: C×r,  B: r×C

The correction acts as a 1×1 convolution. At every grid cell the
C-channel feature vector is squeezed to r values by A and expanded back to
C values by B. With C = 128 and r = 4, one layer needs only
(128+128)·4 = 1024 words per code rate. Switching code rate means picking a
different (A, B) pair. The base weights never change.

This RTL implements the whole receiver datapath:
- input convolution;
- four residual blocks;
- output convolution;
- LayerNorm;
- the low-rank adapters;
- all weight SRAMs;
- activation buffers;
- a sequencer.

Default parameters give the 16-QAM configuration with three code rates
(0.5, 0.66, 0.75), two adapter layers, rank 4 and alpha 1.

## Network and data flow

```
grid (3 features/cell) -> CONV 3x3 (3->128)
  -> 4 x residual block:  x -> LN -> CONV 3x3 -> LN -> CONV 3x3 -> (+ x)
  -> CONV 3x3 (128->4) -> 4 LLRs per cell (16-QAM)
```

Every CONV 3x3 uses "same" zero padding and adds a bias per output channel.
There is no nonlinearity between layers: none is specified for this
network, so none is built.

The two adapter layers sit on the two convolutions of the last residual
block. This is set by `LOREN_MASK = 8'b1100_0000`: bit 2k is the first conv
of block k, bit 2k+1 the second. In a block that has an adapter, the
adapter output is added to the convolution sum before rounding. This is the
same as adding A·B to the centre tap of W0.

| module | role |
|---|---|
| `loren_top` | the receiver: stages, buffers, I/O SRAM, load bus, LLR port |
| `loren_ctrl` | runs the 6 stages in order, rotates the buffers, latches the CR, counts frames and CR switches |
| `res_block` | LN → CONV → LN → CONV → + skip, with the block's weight SRAMs |
| `conv2d_engine` | one 3×3 convolution layer, with optional adapter and skip add |
| `loren_adapter` | the low-rank 1×1 path for one cell |
| `layernorm_engine` | normalisation over the whole T×F×C tensor |
| `sram_sp` | single-port SRAM, 1-cycle read |
| `seq_div`, `seq_isqrt` | sequential divider and square root used by LayerNorm |
| `loren_pkg` | widths, fixed-point helpers, load-bus target codes |

## Number format

All activations, weights, biases, gamma/beta values and adapter entries are
16-bit two's complement Q7.8 (`FRAC = 8`). Products accumulate in 48 bits.
Every right shift is arithmetic (floor). Results are saturated back to
16 bits only where a value is stored: `sat16` in `loren_pkg`. The 16-bit
width is the paper's choice. The Q7.8 split, the floor rounding and the
saturation points are this design's own choices.

## Memories and their word layouts

The weight SRAM geometry follows the published memory table.

| memory | words × bits | count | word contents |
|---|---|---|---|
| residual conv kernel | 4096 × 144 | 4 per conv | one 3×3 kernel, tap k = 3·ky+kx in bits [16k+15:16k] |
| input+output conv kernel | 896 × 144 | 1 | words 0–383: input conv (3×128); 384–895: output conv (128×4) |
| LayerNorm gamma / beta | 4096 × 224 | 4 + 4 per LN | the 14 symbol values of one (subcarrier f, channel c), symbol t in bits [16t+15:16t] |
| adapter | 3072 × 16 | 1 per adapter layer | per CR: A[c][j] at c·r + j, then B[j][o] at r·C + o·r + j; CR block base = cr·r·2C |
| activation buffer | 1792 × 2048 | 3 | one cell (t·F + f), all 128 channels |

**Kernel banks.** Word `a` of bank `s` of a residual conv holds the kernel
for input channel `a % C` and output channel `(a / C)·4 + s`. Each cycle the
four banks therefore deliver kernels for four output channels at once. For
a 128×128 layer this is 4096 reads. The input and output convs have a
single bank, with word = cout·CIN + cin.

**LayerNorm banks.** The gamma word for index `i = f·C + c` is in gamma
bank `i / (F·C/4)` at address `i % (F·C/4)`: each bank holds a quarter of the
subcarriers. Beta uses the same layout in banks 4–7.

**Biases.** There is no bias SRAM in the memory table, so each conv keeps
its biases in a small register file. It is written over the same load bus.

**Adapter depth.** The adapter SRAM holds 3 CR × 4 × 256 = 3072 words. This
matches the parameter count given in the text, (128+128)·4·3. The memory
table lists 1536 words for rank 4; this design follows the text.

## Loading weights and data

The receiver is loaded over one bus while it is idle. The load ports are:
- `wl_stage`: 0 = input/output conv; 1–4 = residual block.
- `wl_target`: which memory within the stage. The codes are in `loren_pkg`:

| code | residual block (`wtarget_e`) | stage 0 |
|---:|---|---|
| 0 | conv1 kernels | I/O kernel SRAM |
| 1 | conv2 kernels | input-conv biases |
| 2 | LN1 | output-conv biases |
| 3 | LN2 | |
| 4 | conv1 biases | |
| 5 | conv2 biases | |
| 6 | adapter 1 | |
| 7 | adapter 2 | |

- `wl_bank`, `wl_addr`: the word's position. For LN, banks 0–3 are gamma
  and 4–7 are beta.
- `wl_data`: the word, 224 bits wide; narrower memories take the low bits.

An assertion flags a load that arrives while the receiver is busy.

The received grid is written cell by cell through `in_we/in_addr/in_data`.
The address is cell `t·F + f` and the data is 3 × 16-bit features. A frame
starts with a `start` pulse; `cr_sel` is sampled at that moment and held
for the whole frame. LLRs come out on `llr_valid/llr_addr/llr_data` while
the output conv runs. `done` pulses at the end of the frame. `frames` and
`cr_switches` count completed frames and frames whose code rate differed
from the previous frame.

## Schedule and timing

The six stages run one after another:
1. input conv;
2. blocks 1–4;
3. output conv.

Three buffers rotate their roles after every stage:
- input (rs), scratch (ra) and output (rb);
- the rotation is (rs, ra, rb) ← (rb, rs, ra);
- so each stage's output becomes the next stage's input.

Inside a residual block the data goes X→A (LN1), A→B (conv1), B→A (LN2),
then A→B (conv2 + X). The skip reads X, which is still intact.

**Convolution, per output cell:**
- 10 cycles read the 3×3 neighbourhood (zeros outside the grid).
- One cycle per kernel word group: CIN·COUT/NBANK cycles, so 4096 for a
  residual conv.
- If the layer has an adapter: CIN·r + COUT·r + 3 cycles (1027).
- Drain and write-back.

A residual conv takes T·F·(12 + 4096) + 1 = 7.36 M cycles, or 9.20 M with
an adapter. The 4096-cycle inner loop is the "read one layer's weights in
4096 cycles" figure. It is repeated for each of the 1792 cells, because
only one cell's accumulators exist. This is a compact schedule, not a fast
one.

**LayerNorm:**
1. One pass over all cells accumulates Σx and Σx² (one cell per cycle).
2. A sequential divider and square root give mean, variance and 1/σ:
   - mean = trunc(Σx/N);
   - var = max(Σx²/N − mean², 0) + EPS;
   - inv = 2^24 / isqrt(var).
3. A second pass writes y = sat(((x − mean)·inv >>> 16)·γ >>> 8 + β), at
   C + 3 cycles per cell.

**Whole frame:** about 66 M cycles at the default size, which is 0.33 s at
200 MHz. A code-rate change costs nothing extra: it only moves the adapter
SRAM base address. That is well within the 1 ms 5G NR subframe, which is
the switching budget the design has to meet. The frame time itself is not
real-time. A faster implementation would keep several cells' accumulators
and reuse each weight read across them. The memory organisation here would
allow that, but it is not built.

## Where this design departs from, or adds to, the published description

- **Adapter placement.** The block diagram shows adapter joints after the
  last residual conv and after the output conv. An adapter of (128+128)·r
  words only fits a 128→128 layer, and the output conv is 128→4. So both
  adapters sit on the last residual block's two convs. `LOREN_MASK` can move
  them or add more.
- **Adapter combine.** The diagram draws a multiply symbol where the adapter
  joins. The defining equation makes it an addition, which is what is built.
- **Adapter depth.** Sized by the text (3072 words for rank 4, 3 CRs), not
  by the table (1536).
- **No activation function** between layers, and "same" zero padding.
  Neither is specified.
- **LayerNorm axes.** Normalisation is over T×F×C with per-element γ/β.
  This is inferred from the stated 128·128·14 parameters per LN layer.
- **Input features.** 3 input features per cell, inferred from 896 = 3·128
  + 128·4 kernel words. Their meaning (e.g. real, imaginary, noise
  variance) is up to the front end.
- **Design-specific parts.** Q7.8 format, EPS = 64 (the variance carries 16
  fraction bits, so this is 64·2^-16 ≈ 0.001), the load bus, buffers, handshake, bias registers and schedule.
- **SRAMs.** Plain arrays with the published geometry, not foundry macros.
- **Not built.** The LDPC decoder after the receiver and the training flow
  are outside this design.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the RTL
bit for bit with a reference model written independently in
`tb/loren_ref_pkg.sv`. That model has plain loops for convolution,
adapter, LayerNorm and integer square root, using the same fixed-point
rules. Each testbench prints `TB_RESULT checks=N failures=M`.

| testbench | size | what it checks |
|---|---|---|
| `tb_sram_sp` | 64×144 | write/read, read latency, hold on idle |
| `tb_loren_adapter` | C 8→12, r 4, alpha 2, 3 CRs | delta for every CR, latency CIN·r+COUT·r+2 |
| `tb_conv2d_engine` | 4×5 grid, 8 ch, r 2 | conv + adapter + skip, saturation, exact frame cycle count |
| `tb_layernorm_engine` | 3×4 grid, 8 ch | every output value |
| `tb_res_block` | 3×4 grid, 8 ch, adapters on both convs | every output value |
| `tb_loren_ctrl` | 6 stages | stage order, buffer rotation, CR latch, counters |
| `tb_loren_top` | 14×16 grid, 16 ch, r 4, 3 CRs | 4 frames with CR 0,1,2,0 (264,893 cycles each): all LLRs, plus counts of CR switches, outputs that change with the CR, a repeated CR reproducing its output, border cells |

The largest size simulated end to end is the `tb_loren_top` size above. A
frame at the default size (14×128 grid, 128 channels) is about 66 M cycles
plus about 0.8 M cycles of weight loading. With the bit-exact reference
model alongside, that takes more than ten minutes in Verilator, so it is
not part of the regression. The default-size RTL is checked by lint and
synthesis only. The engines are fully parameterised, and the reduced sizes
exercise the same code paths, including 4-bank kernel SRAMs and rank 4
with three code rates.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_loren_top rtl/loren_pkg.sv tb/loren_ref_pkg.sv tb/tb_loren_top.sv
./obj_dir/Vtb_loren_top
```

The two packages are named first; the other modules are found by name in `rtl/` and `tb/`. Sizes are set by the `localparam`s at
the top of each testbench. The RTL needs no files other than those in
`rtl/`.
