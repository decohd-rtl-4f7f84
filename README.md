# DecoHD inference engine in SystemVerilog

A conventional hyperdimensional (HDC) classifier keeps one prototype
hypervector of D real numbers per class and predicts by taking the dot product
of the encoded query with each prototype. Its memory is C x D. With D = 10,000
and 26 classes that is 260,000 values, and it grows with every class.

DecoHD ("Decomposed Hyperdimensional Classification under Extreme Memory
Budgets", Yun, Oh, Masukawa and Imani) does not store the prototypes. It
composes them from a small bank of shared factor hypervectors called
**channels**:

* There are N **layers**. Layer i holds L_i channel hypervectors
  A^(i)_0 .. A^(i)_{L_i-1}, each with D elements.
* A **path** picks one channel in every layer, m = (m_1, ..., m_N). There are
  M = L_1 x L_2 x ... x L_N paths.
* The path hypervector binds (multiplies elementwise) the query with the
  chosen channels: Z_m(h) = h (x) A^(1)_{m_1} (x) ... (x) A^(N)_{m_N}.
* A small **bundling head** W (C x M) mixes the paths into classes. The score
  of class c is s_c = < sum_m W[c][m] Z_m(h) , h >. The prediction is
  argmax_c s_c.

Only sum_i L_i hypervectors and C x M scalars are stored. The configuration
built here by default is the method's hardware configuration: one layer of
10 channels, D = 10,000, C = 26 and 617 input features (the ISOLET speech
dataset). Its model takes 10 x 10,000 + 26 x 10 = 100,260 words. That is 0.386
of the prototype table, the "0.38x memory" reported for the method's ASIC.

This repository holds RTL for the inference side: a streaming engine that
takes a feature vector and returns the predicted class. Training is done
offline, by gradient descent on short latent vectors a (d elements). Each
channel is then A = a R, with R a fixed random d x D projector. The host
can load finished channels. It can also let the engine expand the latents
itself, with the same multiply-accumulate unit that encodes queries (see
"Materialising channels").

## Score-only streaming: how a query is computed

Summing the class bundles Y_c = sum_m W[c][m] Z_m first would need C
hypervectors of working memory. Because the dot product is linear, the score
can be taken apart path by path:

    s_c = sum_m W[c][m] * t_m,      t_m = < Z_m(h), h > = sum_d h_d * A^(1)_{m_1,d} * ... * A^(N)_{m_N,d} * h_d

So the engine visits the paths one after another:

1. **Encode.** h = x W_enc, a fixed random projection of the d_in input
   features to D elements.
2. **For each path m.** Sweep d = 0 .. D-1. Bind h_d with the selected
   element of every layer's channel, multiply by h_d again, and add the
   result to the running sum t_m. Z_m is never stored: each element is used
   as soon as it is made.
3. **Score update.** For every class c: s_c <- s_c + W[c][m] * t_m.
4. After the last path, **argmax** over the C scores.

Beyond the model itself, the only working storage is h (D words) and the C
scores. The operation order is fixed and is the order the testbenches use
in their reference models:

    z   = ((h_d * A1_d) * A2_d) ... * AN_d
    t_m = (((0 + z_0*h_0) + z_1*h_1) + ...)          d ascending
    h_d = (((0 + x_0*W_enc[0][d]) + x_1*W_enc[1][d]) + ...)   j ascending
    s_c = (((0 + W[c][0]*t_0) + W[c][1]*t_1) + ...)   m ascending

Paths are visited with the last layer's digit moving fastest. The linear
path index is therefore m = ((m_1*L_2 + m_2)*L_3 + m_3)..., and that index
addresses the head.

## Block structure

```
 host bus ──┬──────────────┬───────────────────┬───────────────┐
            v              v                   v               v
      ┌───────────┐   (x, W_enc)        ┌────────────┐   ┌───────────┐
      │hd_encoder │ h_d stream          │hd_channel_ │   │hd_head_mem│
      │ x·W_enc   │──────────┐          │bank (per   │   │  W  C x M │
      └───────────┘          v          │ layer)     │   └─────┬─────┘
                      ┌────────────┐    └─────┬──────┘         │ W[c][m]
                      │hd_query_buf│ h_d      │ A^(i)_{m_i,d}  v
                      │   h (D)    │────┐     │          ┌─────────────┐
                      └────────────┘    v     v          │hd_score_unit│
                                     ┌─────────────┐ t_m │ s_c += W·t  │
  ┌───────────────┐ m_1..m_N, m      │hd_path_     │────>│ (C scores)  │
  │hd_path_counter│─────────────────>│engine       │     └──────┬──────┘
  └───────────────┘   (to bank,head) │ bind, dot   │            v
                                     └─────────────┘      ┌──────────┐
        decohd_top: sequencer IDLE→ENCODE→(PATH→SCORE)×M→RESULT   │hd_argmax │
                                                          └──────────┘
```

| module | role |
|---|---|
| `decohd_pkg` | FP format defaults, host-bus target codes, sequencer states |
| `hd_fp_mul` | binding: floating-point multiply |
| `hd_fp_add` | bundling and accumulation: floating-point add |
| `hd_encoder` | feature buffer, W_enc memory, one multiply-accumulate per cycle |
| `hd_query_buf` | the query hypervector h |
| `hd_channel_bank` | one memory per layer, L_i x D words each |
| `hd_path_counter` | mixed-radix enumeration of paths |
| `hd_path_engine` | N+1 multipliers in a chain plus an accumulator; produces t_m |
| `hd_head_mem` | bundling head W, address c*M + m |
| `hd_score_unit` | C score registers, one multiply and one add shared over classes |
| `hd_argmax` | largest score, lowest index on ties |
| `decohd_top` | wiring, host-bus decode, sequencer for queries and for materialising channels |

When a channel is materialised, the encoder's h_d stream is steered into
the channel bank instead of `hd_query_buf`. The sequencer then goes
IDLE → MATERIAL → IDLE.

All memories have a synchronous write and a registered read with one cycle of
latency. This is the behaviour of a single-port-per-direction SRAM. They are
written as plain arrays, so a flow can map them onto SRAM macros.

## Number format

The method evaluates in 32-bit floating point by default, with fp16, bf16
and narrower formats as ablations. The datapath is floating point with a
parameterised layout: `EW` exponent bits and `MW` stored mantissa bits,
defaulting to binary32 (8, 23). The arithmetic rules are this design's own:

* Round to nearest, ties to even, on every multiply and add.
* Subnormal inputs are read as zero. A result whose rounded exponent falls
  below the normal range becomes a signed zero (flush to zero). Overflow
  gives a signed infinity. NaN is not produced or treated specially.
* An exact cancellation gives +0.

Within these rules the results are bit-exact. Every testbench checks the
datapath bit for bit against a reference that computes in double precision
and rounds back to the layout under test, binary32 unless stated
(`tb/fp_ref_pkg.sv`).

The whole engine is simulated in binary32, and also rebuilt as fp16
(`EW`=5, `MW`=10) and bfloat16 (8, 7) at a small size. The multiplier and
adder are checked on their own in those two layouts, and in the 8-bit
layouts E5M2 and E4M3 and the 4-bit layout E2M1. Every layout keeps the
IEEE-style codes: an all-ones exponent means infinity. So E5M2 is the common
8-bit format. E4M3, however, overflows to infinity above 240. The popular
variant that gives up infinities reaches 448. Any of these layouts is a
rebuild with other `EW`/`MW`. Running a narrow datapath is also not the same
as keeping narrow stored values and computing in a wider format. Scores
accumulate over `D` products, so a layout as short as fp16 can overflow
unless the stored values are scaled down.

## Using it

### Host bus

The host writes one word per clock while `wr_en` is high. `wr_tgt` picks the
memory (`decohd_pkg::wr_target_e`):

| `wr_tgt` | memory | `wr_addr` | `wr_layer` |
|---|---|---|---|
| `TGT_FEATURE` | input feature x_j | j | – |
| `TGT_ENC_W` | projection W_enc[j][d] | j*D + d | – |
| `TGT_CHANNEL` | channel element A^(i)_l[d] | l*D + d | i |
| `TGT_HEAD` | head weight W[c][m] | c*M + m | – |

Strides are the built sizes `D` and `M`, whatever runtime sizes are used
later. Writing while `busy` is high is an error, and an assertion catches it.

### Runtime sizes

`cfg_dim` (1..D), `cfg_feat` (1..D_IN) and `cfg_class` (1..C) let one build
serve smaller problems: a D = 1,000 model, a 5-class dataset, 10 input
features. Hold them stable from `start` to `done`. The number of layers and
of channels per layer is fixed when the design is built. A one-layer model
with fewer than L channels still runs on a build with L channels: load zeros
into the head columns of the unused paths. Their contribution, 0 * t_m, is
exactly zero.

### A query

Load the features, then pulse `start` for one cycle. `busy` stays high until
`done` pulses. `pred_class`, `pred_score` and the whole `scores` array then
hold the result until the next `start`. The model memories keep their
contents between queries, and the scores are cleared at each `start`.

### Materialising channels

A = a R is the same vector-matrix product as the query encoding
h = x W_enc. So the engine can build channels from their latents:

1. Load R into the projection memory as if it were W_enc
   (`TGT_ENC_W`, address j*D + d, j < d_lat).
2. Load the latent a into the feature buffer (`TGT_FEATURE`).
3. Set `cfg_feat` = d_lat and `cfg_dim` = the hypervector length.
4. Set `mat_layer` and `mat_chan` to the channel to be written.
5. Pulse `start_mat`.

The encoder runs as for a query. Its D outputs go into channel `mat_chan`
of layer `mat_layer`, not into the query buffer. `done` pulses when the
channel is complete. The result outputs keep the previous query's values.
The operation takes `1 + (dim*d_lat + 2)` cycles: 2,560,003 cycles for
D = 10,000 and d_lat = 256.

Every layer has its own projector, so load layer i's R before that layer's
channels. After the last channel, load W_enc back before running queries. The
latent length is limited by the feature buffer, d_lat <= `D_IN` (617 by
default). The method's d = 256 fits, but its 1,024 and 4,096 do not: such
channels must be expanded elsewhere and loaded finished.

### Timing

The time from the cycle in which `start` is high to the cycle in which
`done` is high is:

    1 + (dim*feat + 2) + M * ((dim + 2) + (cls + 2)) + 1   cycles

The encoder runs one multiply-accumulate per cycle. Each path takes dim+2
cycles for the sweep and cls+2 cycles for the score update. Each stage
starts in the cycle its predecessor reports done. At the default size that
is 1 + 6,170,002 + 10 x 10,030 + 1 = **6,270,304 cycles**. The encoder
accounts for 98% of them, because it is a single MAC over a 617 x 10,000
matrix. The DecoHD part (10 paths over 10,000 elements) takes 100,300
cycles. The method reports throughput and energy only relative to CPU, GPU
and a baseline ASIC, and gives no clock rate, lane count or cycle figures.
The one-element-per-cycle rate here is a simple choice, not a
reconstruction of that ASIC.

### Memory at the default size

| memory | words (32 bit) |
|---|---|
| channel bank | 10 x 10,000 = 100,000 |
| bundling head | 26 x 10 = 260 |
| query buffer | 10,000 |
| scores | 26 (registers) |
| encoder W_enc | 617 x 10,000 = 6,170,000 |
| feature buffer | 617 |

The encoder matrix dominates the silicon, but it is the same fixed encoder a
prototype-table classifier would need. The model-size comparison in the
method counts only channels and head.

### Changing the configuration

Parameters of `decohd_top`: `D`, `D_IN`, `C`, `N_LAYERS`, `L_CH` (an
unpacked array with one channel count per layer, each at most 255), `EW` and
`MW`. The method's depth study uses L_i = 10^(1/N). For two or three layers
that is not an integer, so the counts must be rounded: for example
`.N_LAYERS(2), .L_CH('{3,3})` or `.N_LAYERS(3), .L_CH('{2,2,2})`.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints one line,
`TB_RESULT checks=N failures=F`, and stops at a watchdog if the design
hangs. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/decohd_pkg.sv tb/fp_ref_pkg.sv tb/tb_decohd_top.sv --top-module tb_decohd_top
./obj_dir/Vtb_decohd_top
```

Substitute any other testbench name for `tb_decohd_top`.

* `tb_hd_fp_mul`, `tb_hd_fp_add`: about 25,000 random operations each, plus
  rounding ties, carries, cancellation, overflow and flush cases.
* `tb_hd_encoder`, `tb_hd_path_engine`, `tb_hd_score_unit`: results against
  the reference model, and the cycle count of each operation.
* `tb_hd_channel_bank`, `tb_hd_head_mem`, `tb_hd_query_buf`,
  `tb_hd_path_counter`, `tb_hd_argmax`: addressing, path order and wrap,
  ordering and ties.
* `tb_decohd_top`: end to end at a reduced size. Two layers of 3 and 2
  channels, D = 24, 6 classes, four queries, one of them with reduced runtime
  sizes. Before the later queries, two channels (one in each layer) are
  materialised on chip from 4-element latents. It checks all scores, the
  prediction and the cycle counts. It also counts encodings, path sweeps,
  score updates, carries between layer digits, score clears and
  materialisations.
* `tb_hd_fp_formats`: multiplier and adder in fp16, bfloat16, E5M2, E4M3
  and E2M1.
* `tb_decohd_latent`: the default build deployed from latents. It
  materialises all ten channels from 256-element latents and a
  256 x 10,000 projector, then classifies one query. Scores and latencies
  are bit-exact. About 35 seconds.
* `tb_decohd_precision`: the whole engine rebuilt as fp16 and as bfloat16
  (D = 128, 16 features, 8 classes, 4 channels). Three queries each, every
  score bit-exact against a reference rounded to that layout.
* `tb_decohd_datasets`: the default build running models shaped like the
  benchmark datasets through the runtime sizes. The shapes are
  261 features / 12 classes / 5 channels, 75 / 5 / 10, 10 / 5 / 3, and
  617 / 26 / 10 at D = 1,000. They take 2,710,164, 850,094, 200,094 and
  627,304 cycles.
* `tb_decohd_depth`: the deeper factorizations at full size, two layers of
  3 channels and three layers of 2, side by side. They take 6,260,274 and
  6,250,244 cycles.
* `tb_decohd_top_full`: one query at the default size, with a full
  617 x 10,000 random projection loaded over the bus. It runs in about 10
  seconds of simulation and checks every score bit-exactly, as well as the
  6,270,304-cycle latency.

The data are random (`$urandom`) normal numbers, not trained models, so the
tests check the arithmetic, not classification accuracy.

## What follows the method and what does not

From the method:

* the decomposed model (layers, channels, paths, bundling head)
* binding as elementwise product, bundling as weighted sum, dot-product
  scoring and argmax
* the fixed random-projection encoder
* materialising the channels from latents and fixed projectors, A = a R,
  at deployment
* path-by-path streaming with score-only accumulation, so that no path or
  class hypervector is stored
* the sizes of the default build (D, C, features, one layer of 10 channels)
* floating point as the number system

This design's own choices:

* the rounding and special-value rules
* one element per cycle, the pipeline and the memory organisation
* the path order
* the host bus, the address map and the runtime size inputs
* the sequencer and the timing
* the argmax tie rule
* binding all N layers of one element in the same cycle, with a chain of N
  multipliers
* materialising channels with the query encoder, with R passing through its
  memory

Where the results differ from the method's depth study:

* **Speed against depth.** The reported ASIC gets slower as layers are added
  (at about ten paths in each case). Here a path costs D + 2 cycles whatever
  N is, so one query takes 6,270,304, 6,260,274 and 6,250,244 cycles for 10,
  3 x 3 and 2 x 2 x 2 channels. Binding one layer per cycle would bring the
  slow-down back, at N times the path time.
* **Memory against depth.** The model here stores sum_i L_i channels, as the
  method's memory count says. That is 0.23 of the prototype table for 3 + 3
  or 2 + 2 + 2 channels. The method reports about 0.12 and 0.08 for two and
  three layers, which match one layer's worth of channels rather than the sum.
  The one-layer figure, 0.386, agrees.

Not built:

* **Class-bundle mode.** The method also describes accumulating
  Y_c = sum_m W[c][m] Z_m in C working hypervectors and taking C dot products
  at the end. It gives the same scores, up to rounding, with C x D more
  memory. Only the lower-memory score-only form is built. The method's
  overview figure draws the class vectors rebuilt one class at a time; the
  design instead streams path by path, as in the method's text, so that each
  query hypervector is read once per path rather than once per class and path.
* **Training.** It is an offline step.
* **Storage for the projectors R.** R passes through the projection memory
  while channels are materialised. It is not kept on chip.
* **Runtime change of the layer count.** The depth is a build parameter.
* **Fault injection** for the bit-flip robustness study. The host can emulate
  it by loading corrupted words.

The energy and speed figures reported for the method's ASIC depend on a
microarchitecture and technology that are not described. They are not
reproduced or modelled here.
