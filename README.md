# Reverse-looping deconvolution accelerator

This is the RTL of an accelerator for the deconvolution layers of generative
networks, also called transposed-convolution layers. It targets small edge FPGAs.
The usual way to compute a deconvolution is to scatter each input pixel over a
K x K patch of the output. Neighbouring patches overlap, so output pixels must be
read back and summed again. This design turns the loop around. Each output pixel
gathers the few input pixels that reach it. The output map can then be cut into
square tiles that need nothing from one another. Each tile is computed whole,
inside one compute unit (CU), and written to memory once.

The design has four parts:

- An array of identical CUs. There are 16 by default, each working on its own
  12 x 12 output tile.
- Two read stages, one for input feature maps and one for weights. Each feeds
  the CUs through FIFOs.
- A write stage that drains the finished tiles.
- A small offset cache. Once per layer it works out all the modulo arithmetic
  the gathering needs, so the CUs do no division or modulo.

Words are 32-bit fixed point (Q16.16). A layer whose weights are partly zero can
run with zero skipping. A weight tap that is zero then costs two cycles instead
of a full pass over the tile.

The design follows the architecture of *A Competitive Edge: Can FPGAs Beat GPUs
at DCNN Inference Acceleration in Resource-Limited Edge Computing Applications?*
That paper describes an HLS implementation. This is an independent register-level
version of the same design. Where it departs from the paper, the
[last section](#9-departures-from-the-source-design-and-limits) says so.

## 1. Gathering instead of scattering

A deconvolution with kernel size K, stride S and padding P links input row `i`,
tap `k` and output row `o` by

    o = i*S + k - P            (scatter: input -> output)
    i = (o + P - k) / S        (gather: output -> input)

The same holds for columns. The gather form gives a real input pixel only when
`o + P - k` is a multiple of S. For every other output row, tap k contributes
nothing. These rows are called stride holes. The first useful output row for tap
k inside a tile is

    f[k] = mod(S - mod(P - k, S), S)

After it, every S-th output row is useful. So a CU walking tap k visits

    o = S*j + f[k],   j = 0 .. T_O/S - 1

and the matching input row is `(S*j + f[k] + P - k)/S`. Here
`f[k] + P - k` is a multiple of S, so this row equals `j + (f[k] + P - k)/S`.
The division is exact, and it depends only on k.

**The offset cache** (`offset_cache.sv`) runs once per layer and makes these
numbers for every tap k < K:

| value | formula | used by |
|---|---|---|
| `f[k]` | `mod(S - mod(P-k, S), S)` | CU: first useful output row/column of tap k |
| `B` | `floor((K-1-P)/S)` | read stage: how far the input block reaches before the tile |
| `g[k]` | `(f[k] + P - k)/S + B` | CU: input row/column, local to the block, at j = 0 |
| `T_I` | `T_O/S + ceil(K/S)` | input block side |
| `J` | `T_O/S` | output steps per tap and dimension |
| `n_th`, `n_tw`, `n_tiles` | `ceil(OH/T_O)`, `ceil(OW/T_O)`, `OC*n_th*n_tw` | tile walkers |

The CU's index arithmetic therefore uses only adds and a multiply by the stride:

    y[S*jh + f[kh]][S*jw + f[kw]] += w[kh][kw] * x[jh + g[kh]][jw + g[kw]]

The input block of tile row `th` starts at input row `th*T_O/S - B`.
It is `T_I` rows high, and the same holds for columns. `B` moves the block up and
left just far enough that `g[k]` is never negative.

Take K = 3, S = 2, P = 1 as an example. Then B = 0, f = (1, 0, 1) and
g = (1, 0, 0). Tap 0 fills the odd output rows from input rows j+1. Tap 1 fills
the even rows from rows j. Tap 2 fills the odd rows from rows j.

The cache costs a few cycles per layer: `done` comes K + 3 cycles after `start`.
It also accepts or rejects the layer. The layer is rejected (`err`) unless all of
these hold:

- S >= 1
- 1 <= K <= K_MAX
- P < K
- T_O is a multiple of S

## 2. Tiles, groups and the pipeline

The output of a layer is `OC` channels of `n_th x n_tw` tiles. The tiles are
numbered in the order output channel, tile row, tile column. Tile `t` goes to
CU `t mod N_CU`. Consecutive runs of N_CU tiles make a *group*. A group is loaded,
computed and drained as one wave across the array.

Inside a group, each read stage serves the CUs one input channel at a time.
Each CU gets channel 0, then each CU gets channel 1, and so on. The other order,
where one CU gets every channel of its tile before the next CU gets any, would
let the first CU wait on its full FIFO while the rest sit idle. The CUs would
then run one after another, not together.

Per CU, the three FIFOs decouple the stages:

- **x FIFO.** Input blocks. The default depth is `(T_O+K_MAX)^2 = 400` words,
  which holds one whole block.
- **w FIFO.** The bias word, then the weight blocks. The default depth is
  `K_MAX^2+1 = 65` words.
- **y FIFO.** Output words, 16 deep.

The next channel's block can stream in while the CU is still busy with the
current one. The output of group g is written while group g+1 is loaded and
computed.

All three external ports carry one 32-bit word per transfer, with byte
addresses:

- one read port for inputs (`in_ar_*`/`in_r_*`)
- one read port for weights (`wt_ar_*`/`wt_r_*`)
- one write port for outputs (`out_aw_*`/`out_w_*`/`out_b_*`)

Each port follows AXI4-Lite valid/ready rules. The memory controller and
interconnect behind them are not part of this RTL.

### Memory layout

The host writes one `layer_cfg_t` (see `deconv_pkg.sv`) and pulses `start`. Data
are 32-bit Q16.16 words at these word offsets from the base addresses in the
struct:

| region | base | word offset |
|---|---|---|
| input map | `in_base` | `(ic*IH + ih)*IW + iw` |
| weights | `w_base` | `((oc*IC + ic)*K + kh)*K + kw` |
| bias | `b_base` | `oc` |
| output map | `out_base` | `(oc*OH + oh)*OW + ow` |

Heights, widths and channel counts are 12-bit fields, up to 4095. K, S and P are
4-bit fields. The output size is given, not derived. The hardware writes exactly
`OC x OH x OW` words, so any `OH <= (IH-1)*S + K - 2P` may be chosen. For
example, `output_padding` is expressed this way.

A multi-layer network is run layer by layer. The output region of one layer is
the input region of the next. No activation function is applied in hardware.

## 3. The compute unit

`compute_unit.sv` computes one tile and follows the loop nest in Section 1:

1. **IDLE.** Pop the bias from the w FIFO.
2. **LOAD.** For each input channel, copy the `T_I x T_I` input block into
   `x_buffer` and the `K x K` weight block into `w_buffer`. Both copies run at
   once. On the first channel, every `y_buffer` word is also set to the bias at
   the same time. This phase lasts `max(T_I^2, K^2, T_O^2 on the first channel)`
   cycles if the FIFOs keep up.
3. **WREAD/WCHK.** Read tap `(kh, kw)` and test it against zero. This takes
   2 cycles.
4. **MAC.** For all `J x J` steps, accumulate the product into `y_buffer`, one
   MAC per cycle. The pipeline has two stages:
   - A reads x and y;
   - B multiplies, adds and writes y.

   Within one tap no two steps touch the same y word. Taps are two cycles apart,
   so no forwarding is needed. An assertion (`a_no_raw`) checks this.
5. **FLUSH.** Runs once per channel, then the next channel loads.
6. **DRAIN.** After the last channel, stream `T_O^2` words row by row into the
   y FIFO.

Loops run over the weight space on the outside, so one weight is reused across
the whole tile. This order also makes zero skipping cheap.

- When `zero_skip` is set, a zero tap jumps from WCHK to the next tap.
- When it is clear, the loop runs and the `w != 0` multiplexer adds 0. The
  result is the same; only the time differs.

The product is full 64-bit, shifted right arithmetically by 16 and kept to
32 bits. The sum wraps. It does not saturate.

Cycles per tile when the FIFOs keep up:

    1 + sum over ic of [ max(T_I^2, K^2, T_O^2 if ic = 0) + 1
                         + sum over taps of (2 + J^2, or 2 if skipped) + 1 ]
      + T_O^2 + 1

The buffers are plain arrays with one write port and one registered read port
(`bram_sdp.sv`), so they map onto block RAM:

- `x_buffer`: `(T_O+K_MAX)^2` words
- `w_buffer`: `K_MAX^2` words
- `y_buffer`: `T_O^2` words

## 4. The memory stages

**Read engine** (`read_engine.sv`). The input and weight stages each own one read
engine. An address walker gives it one request per cycle. A request is either a
memory address tagged with the destination CU, or a *zero* request for a pixel
outside the input map (padding, or the ragged last tile). A tag FIFO of up to
`OUTST = 16` entries follows the requests in flight. Memory words and zeros
therefore leave in request order, and zeros never touch memory. A word leaves
only when its CU's FIFO has room. Otherwise `r_ready` drops and the engine
stalls.

**Input read** (`input_read.sv`). Walks group -> input channel -> CU of the group
-> block row -> block column. The walk works out the block origin
`th*T_O/S - B` and clips against `IH x IW`.

**Weight read** (`weight_read.sv`). Walks in the same group order. Each CU first
gets its tile's bias word, then one `K x K` block for each input channel. The
weights are re-read for every tile. They are not broadcast.

**Output write** (`output_write.sv`). Visits the CUs' y FIFOs in tile order.
Pixels of a tile that hang over the map's right or bottom edge are read and
dropped. The rest are written once each, with `aw` and `w` offered together.
Any number of writes may await their `b` response. The stage is done only when
every write has been answered.

## 5. Layer control

`layer_controller.sv` holds the configuration for the layer and runs in three
steps:

1. It starts the offset cache.
2. When the cache is done, it rejects the layer (`done` with `err`) or starts
   the three memory stages together.
3. It waits until all three report done.

`busy` stays high from `start` to `done`. `cycles` is the length of the last
layer, from the `start` cycle to the `done` cycle, both included. All resets are
synchronous and active low.

## 6. Parameters of `deconv_top`

| parameter | default | meaning |
|---|---|---|
| `N_CU` | 16 | compute units (the source design's count) |
| `T_O` | 12 | output tile side (the source design's choice for the MNIST network; it chose 24 for CelebA) |
| `K_MAX` | 8 | largest kernel the buffers hold (own choice) |
| `OUTST` | 16 | reads in flight per read port (own choice) |
| `XF_DEPTH` | `(T_O+K_MAX)^2` | x FIFO depth (one input block) |
| `WF_DEPTH` | `K_MAX^2+1` | w FIFO depth (bias + one weight block) |
| `YF_DEPTH` | 16 | y FIFO depth |

The stride must divide `T_O`, so at the default T_O = 12 it may be 1, 2, 3, 4, 6
or 12.

## 7. Simulation and tests

Every block has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M`. The end-to-end tests use:

- `tb/ddr_model.sv`: a behavioural memory with two read ports and one write
  port. It has a set latency and can stall at random.
- `tb/deconv_ref_pkg.sv`: a reference deconvolution written in the scatter form.
  It is deliberately the other formulation from the hardware, so it checks the
  offset arithmetic independently.

With Verilator 5, for example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
      rtl/deconv_pkg.sv tb/deconv_ref_pkg.sv tb/tb_deconv_top.sv \
      --top-module tb_deconv_top -Mdir obj_top
    ./obj_top/Vtb_deconv_top

For a block testbench, swap in its file and top module (for example
`tb/tb_compute_unit.sv`, `tb_compute_unit`). Add `tb/deconv_ref_pkg.sv` only for
the testbenches that import it.

| testbench | what it checks |
|---|---|
| `tb_stream_fifo`, `tb_bram_sdp` | FIFO order and full/empty behaviour; read-first block RAM against a model |
| `tb_offset_cache` | `f`, `g`, `B`, `T_I`, `J` and tile counts over every K <= 8, S <= 4, P < K with S dividing T_O (expected values found by search, not by the formulas), plus the reject rules for K up to 9 and S up to 5 |
| `tb_read_engine` | order of mixed memory and zero requests under random memory latency and FIFO back-pressure; one word per cycle without stalls |
| `tb_input_read`, `tb_weight_read` | every word each CU receives, against a model of the group order, with padding |
| `tb_compute_unit` | tiles against a gather-form model, the exact cycle count of the formula above, and zero skipping |
| `tb_output_write` | written addresses and data, each in-map pixel written once, edge drops, random memory back-pressure |
| `tb_layer_controller` | sequencing, reject path, cycle counter |
| `tb_deconv_top` | five layers (S = 1, 2, 3, with padding, ragged edges, more tiles than CUs) and a rejected layer, bit-exact against the reference, with random memory stalls; counts that each mechanism occurs and that zero skipping is faster |
| `tb_dcnn_workloads` | the two generator networks below at the default parameters, bit-exact layer by layer, and the MNIST pruning sweep |
| `tb_celeba_tile24` | the CelebA network on a build with 24 x 24 tiles, dense and 50 % pruned |

## 8. Results on two generator networks

`tb_dcnn_workloads` runs two generator networks on the default build
(16 CUs, T_O = 12). One makes 28 x 28 digits (MNIST). The other makes
45 x 45 x 3 faces (CelebA). The feature-map sizes are those of the source design.
The kernel, stride and padding of each layer are not given there. The values
below are the smallest that produce those sizes. The model memory answers one
read per port per cycle after a fixed latency.

| layer | shape | K S P | cycles |
|---|---|---|---|
| MNIST 1 | 1x1x10 -> 4x4x32 | 4 1 0 | 84,421 |
| MNIST 2 | 4x4x32 -> 12x12x32 | 3 3 0 | 27,713 |
| MNIST 3 | 12x12x32 -> 28x28x1 | 6 2 0 | 47,813 |
| **MNIST total** | | | **159,947** (1.28 ms at 125 MHz) |
| CelebA 1 | 1x1x128 -> 3x3x128 | 3 1 0 | 3,687,878 |
| CelebA 2 | 3x3x128 -> 5x5x128 | 3 1 0 | 3,687,878 |
| CelebA 3 | 5x5x128 -> 9x9x64 | 3 2 1 | 525,994 |
| CelebA 4 | 9x9x64 -> 21x21x32 | 5 2 0 | 665,613 |
| CelebA 5 | 21x21x32 -> 45x45x3 | 5 2 0 | 126,477 |
| **CelebA total** | | | **8,693,840** |

The MNIST network was also run with 10 % to 70 % of its weights set to zero at
random, with zero skipping on. The figures below are total cycles for the three
layers:

| pruned | 0 % | 10 % | 20 % | 30 % | 40 % | 50 % | 60 % | 70 % |
|---|---|---|---|---|---|---|---|---|
| cycles | 159,947 | 155,051 | 151,327 | 146,439 | 143,215 | 138,295 | 135,535 | 135,121 |
| speed-up | 1.00 | 1.03 | 1.06 | 1.09 | 1.12 | 1.16 | 1.18 | 1.18 |

Nearly all of the gain comes from layer 3, which is compute-bound. Layers 1
and 2 hardly change, because they are bound by reading the input. Above 60 % the
curve flattens: layer 3's computing shrinks until it no longer hides the input
reads.

`tb_celeba_tile24` runs the CelebA network again, on a build with 24 x 24 tiles
(`deconv_top #(.T_O(24))`). That is the tile size the source design chose for
this network. It takes 26,150,831 cycles, or 26,067,686 with 50 % pruning.
Layers 4 and 5 are about as fast as with 12 x 12 tiles, or faster. Layers 1 to 3
are three times slower: their whole output fits in a fraction of one tile, yet
each tile still reads a full 27 x 27 block per input channel.

The first CelebA layers show the main limit of one fixed tile size. A 3 x 3
output in a 12 x 12 tile at S = 1 still needs a 15 x 15 input block. Almost all of
that block is padding zeros, which take one cycle each through the read stage.
This repeats for each of the 128 input channels of each of the 128 tiles. The
source design picks one tile size per network for the same reason, and notes that
this cannot suit every layer.

## 9. Departures from the source design, and limits

- **Tile size.** The default is T_O = 12. The source design used 12 for the
  MNIST network and 24 for the CelebA network. Build with `T_O = 24` for the
  latter. `XF_DEPTH` and the buffers follow from it.
- **Division-free indexing.** The source design caches the offsets `f[k]` and
  still divides `(o + P - k + f)/S` in the kernel. This design also caches the
  exact quotient as `g[k]`, folded with the block origin. The CU only adds.
- **Input block size.** The source design sizes the block as
  `ceil(T_O/S) + ceil(K/S)`. This design requires S to divide T_O, so the first
  term is exact.
- **Padding.** Out-of-map pixels of a block are sent to the CU as zeros through
  the FIFO, with no memory read. The source design does not say how it handles
  the block border.
- **Buffering.** The CU's x and w buffers are single-buffered. Overlap comes from
  the FIFOs in front of them, which hold one whole input block. The HLS version
  may pipeline more finely.
- **Bus.** The external ports are single-beat, AXI4-Lite style. The source design
  uses vendor AXI interconnects and bursts. Those, the DDR controller and the host
  CPU are outside this RTL.
- **Arithmetic.** The source design states only 32-bit fixed point. The split
  into Q16.16, truncation of products and wrap-around sums are this design's
  choices.
- **Not included.** There is no activation function, batch normalisation or
  output nonlinearity. A layer is one deconvolution plus bias.
- **Not matched.** Resource use and power were not matched to the source design.
  No synthesis result for a particular FPGA is claimed here.
- **Verification.** The design has been simulated, not run on hardware. Every
  result above is checked bit for bit against the reference model. The cycle
  counts assume the ideal memory of the testbench.

## Files

| file | contents |
|---|---|
| `rtl/deconv_pkg.sv` | widths, `layer_cfg_t`, tile order, Q16.16 multiply, address helper |
| `rtl/deconv_top.sv` | top level: controller, offset cache, read/write stages, CU array with FIFOs |
| `rtl/layer_controller.sv` | layer sequencing, reject, cycle counter |
| `rtl/offset_cache.sv` | per-layer `f`, `g`, `B`, `T_I`, `J`, tile counts |
| `rtl/input_read.sv`, `rtl/weight_read.sv` | read stages |
| `rtl/read_engine.sv` | ordered read engine with zero requests |
| `rtl/compute_unit.sv` | one CU |
| `rtl/output_write.sv` | write stage |
| `rtl/stream_fifo.sv`, `rtl/bram_sdp.sv` | FIFO and simple dual-port RAM |
| `tb/*.sv` | testbenches, memory model, reference model |
