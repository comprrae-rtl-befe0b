# CompRRAE tile: an RRAM crossbar CNN tile that stops MACs early

A resistive (RRAM) crossbar computes a vector-matrix product in one analog
step, but only for a 1-bit input vector if the wordline DACs are single-bit.
A 16-bit convolution therefore runs as 16 crossbar passes, one per input bit,
and each pass ends with a series of ADC conversions, which cost most of the
energy and time. Feeding the bits MSB first means the accumulated result
(**Accu**) is nearly final after a few passes. So the tile asks, after each
pass and for each output channel, whether the remaining passes can still
matter:

* **ReLU bypass.** If the layer is followed by ReLU and Accu plus the largest
  value the remaining passes could add (**Max**) is still ≤ 0, the output
  will be clamped to 0. The channel stops and writes 0.
* **Adaptive approximation.** If |Max| and |Min| (Min is the most negative
  value the remaining passes could add) are both ≤ |Accu| × T, the rest is
  small compared with what is already known, and the channel stops with Accu
  as its result. T is a run-time threshold, e.g. 0.5 or 0.8.

Max and Min are not computed at run time. They are precomputed for every
channel and every pass from the kernel's weights and from measured input-bit
statistics, then stored in a small lookup table (LUT). A channel that stops
is removed from the ADC schedule of every later pass, so later passes get
shorter and the MAC finishes sooner.

This repository holds synthesizable SystemVerilog for one such tile. The
crossbars, sample-holds and ADCs are behavioural models. It also holds a
self-checking testbench for every block and for the whole tile.

## Organisation of a tile

```
 host ports ──► input memory (eDRAM, 2048 x 256 b) ──┐
 host ports ──► estimation LUT (256 x 160 b) ──────┐  │ input path, 256 b
                                                   │  ▼
                 ┌──────────── shared bus ─────────────────────────┐
                 │      IMA 0 … IMA 7 (N_IMA)                       │
                 │  ┌────────────────────────────────────────┐     │
                 │  │ local input buffer 64 x 256 b           │     │
                 │  │ IPU 0 … IPU 7 (N_IPU), each:            │     │
                 │  │   1-bit DACs ─► +/- crossbar pair 128²   │     │
                 │  │   ─► 128 sample-holds ─► one 8-bit ADC   │     │
                 │  │   ─► shift-add (8 slices → partial)      │     │
                 │  │ adder over the IPUs ─► local output buf  │     │
                 │  └────────────────────────────────────────┘     │
                 └──────────────── output path, 128 b ─────────────┘
                                         │
        tile accumulator (Accu per channel, shift by bit weight)
                                         │
        evaluation logic (adder; multiplier + comparators) ◄── LUT word
                                         │
        tile controller ── ends channels, schedules the ADCs
                                         │
        post-processing: ReLU, rescale, max pooling ──► output memory (64 x 128 b)
```

| File | Role |
|---|---|
| `rtl/comprrae_pkg.sv` | sizes, `cfg_t` configuration and `stats_t` counters |
| `rtl/rram_xbar_pair.sv` | behavioural differential crossbar pair, DACs folded in |
| `rtl/sample_hold.sv` | behavioural sample-hold bank |
| `rtl/adc_sar.sv` | behavioural 8-bit ADC with input multiplexer and saturation |
| `rtl/ipu_shift_add.sv` | combines the 8 slice codes of one channel |
| `rtl/ipu.sv` | one in-situ processing unit |
| `rtl/ima.sv` | IPUs in lockstep, local buffers, bit-plane fetch |
| `rtl/sram_1r1w.sv` | every buffer, memory and the LUT |
| `rtl/shared_bus.sv` | input and output paths between the tile and the IMAs |
| `rtl/tile_accumulator.sv` | Accu of each channel |
| `rtl/eval_logic.sv` | the two termination tests |
| `rtl/dpu_post.sv` | ReLU, output scaling, saturation, max pooling |
| `rtl/tile_ctrl.sv` | sequences one MAC operation |
| `rtl/comprrae_tile.sv` | top level |

## Mapping: weights on bitlines, inputs as bit planes

**Weights.** Each 16-bit weight takes 8 cells of 2 bits each. A positive
weight is written into the positive crossbar and a negative one, as its
magnitude, into the negative crossbar. The other crossbar holds 0. Channel c
of an IPU uses bitlines `c*8 … c*8+7`, and bitline `c*8+j` holds bits
`[2j+1:2j]` of |w|. A 128-bitline crossbar thus holds 16 output channels by
128 kernel rows. The crossbar pair outputs the signed difference of the two
bitline currents, in cell units. Because 2-bit cells times 128 rows can exceed
the 8-bit ADC's range, the ADC saturates at +127 / −128. A kernel is spread
over IPU `i` of IMA `m` as rows `(m*N_IPU + i)*128 …`. Every used IPU of every
used IMA holds the same 16 channels, and unused rows are programmed to 0. The
host programs one crossbar row per cycle through `prog_*`.

**Inputs.** The input memory keeps a MAC's inputs as bit planes. One 256-bit
word carries one input bit of 256 kernel rows, so it feeds two IPUs of 128
wordlines each. For N_IPU = 8, one bit plane of one IMA is 4 words (WPB), and
one MAC needs 16 × 4 = 64 words per IMA (IBW). Word `in_base + m*IBW + b*WPB + g`
holds bit `b` of the inputs of IPUs `2g` (bits 0–127) and `2g+1`
(bits 128–255) of IMA `m`. Each word is written unchanged into that IMA's
local input buffer at address `b*WPB + g`.

**Partial result.** In pass `k` (k = 0 is the MSB pass, input bit
b = 15 − k), an IPU converts channel c's 8 bitlines into codes `code_j` and
forms `Σ code_j × 4^j`. The IMA adds its IPUs' partials. The tile adds the
IMA partials and updates

```
Accu += partial × 2^b        (Accu −= partial × 2^b in the first pass for two's complement inputs)
```

## One MAC operation, cycle by cycle

At 1.28 GHz an ADC converts 8 bitlines, one output channel, in 8 cycles
(6.25 ns). An IPU has a single ADC, so a pass over 16 channels takes 128
cycles. The tile overlaps three stages on that 8-cycle beat:

1. **Convert.** The ADCs of all IPUs convert channel c of pass k in lockstep,
   from the sample-holds. Meanwhile the crossbars already compute pass k+1.
2. **Combine.** Shift-add in each IPU, then the IMA adder. The result goes
   into the local output buffer and is announced to the tile.
3. **Transfer, accumulate, evaluate.** The tile fetches channel c's partial
   from every used IMA over the output path, one bus beat per IMA. The tile
   accumulator sums the beats and updates Accu. The LUT word
   `{channel c, pass k}` is read with the last beat. It stays on the LUT
   output until the update arrives, even when the next channel's transfer
   has already begun. The evaluation logic then decides whether channel c
   ends.

The controller's phases are:

* **LOAD.** `num_ima × IBW` words are copied from the input memory to the
  local input buffers, one word per cycle.
* **PREP.** The MSB bit plane is fetched (WPB cycles), the DACs are loaded,
  the crossbars compute, and the sample-holds capture. This takes
  PREP = WPB + 2 cycles.
* **ITER.** Passes 0 to 15 run (8 to 15 with `act8`). Each pass converts only the channels that are
  still active, in ascending order, 8 cycles each, so a pass lasts 8 × (active
  channels) cycles. The next bit plane is fetched in the first cycle of a
  pass. The sample-holds are reloaded in the last conversion cycle of a pass,
  so passes follow each other without gaps.
* **DRAIN.** After the last pass, or once no channel is left, the pipeline
  empties (DRAIN = 8 + N_IMA + 4 cycles).
* **POST.** The results are written to the output memory.

There is one subtle point. A channel's termination is decided a few cycles
after its conversion. By then the next pass may already be converting
it, if few channels remain. Such a conversion is *discarded*: it causes no bus
transfer and no accumulation, and it is counted in `stats.discarded`. The
channel leaves the schedule from the next pass on. Other outcomes:

* A channel that runs all its passes (16, or 8 with `act8`) ends as *completed*.
* If every channel ends before pass 15, the MAC ends early, and `cur_iter`
  then shows the last pass reached.

Apart from the fixed LOAD, PREP, DRAIN and POST overhead, the MAC's length is
8 cycles per converted channel-pass. The end-to-end test checks this exact
figure.

## The estimation LUT

For channel c and pass k, the LUT holds the bounds on what passes
k+1 … 15 can still add. These are sums over the remaining bits `i`
(i = 0 is the LSB) of per-bit bounds:

```
max_i = 2^i × ( Σw+ · P(+1)max + Σ|w−| · P(−1)max  −  Σw+ · P(−1)min  + Σw− · P(+1)min )
min_i = 2^i × ( Σw+ · P(+1)min + Σ|w−| · P(−1)min  −  Σw+ · P(−1)max  + Σw− · P(+1)max )
```

Here `Σw+` and `Σw−` are the sums of the kernel's positive and negative
weights. `P(±1)max/min` are the largest and smallest observed probabilities
that input bit i is +1 or −1, measured over training data for that layer.
After ReLU, P(−1) = 0. For two's complement inputs, only the sign bit is
worth −1, and it is always the first pass, so all later bits are 0/1 as
well. The LUT is filled offline by the host.

**Word format.** Address `{c[3:0], k[3:0]}` holds Max in bits [79:0] and Min
in bits [159:80], each two's complement. Only the low 48 bits (ACC_W) are
used. There are N−1 = 15 useful entries per channel (7 with `act8`), and the word for
k = 15 is ignored: after the last pass a channel always ends as completed. Max, Min and Accu share one scale: the integer value of
the full-precision MAC result.

**Threshold.** `cfg.thr` is T in unsigned Q0.8, so T = thr / 256
(0.5 → 128, 0.8 → 205). The approximation test is
`|Max|·256 ≤ |Accu|·thr  and  |Min|·256 ≤ |Accu|·thr`. In hardware this is
one 48×8 multiplier and two comparators. The ReLU test is a single adder and
a sign check.

## Output, ReLU and pooling

When a MAC ends, `dpu_post` turns each channel's Accu into a 16-bit output:

* `v = Accu >>> out_shift`, then saturate to 16 bits.
* With ReLU enabled, a negative v or a ReLU-bypassed channel gives 0.

The 16 outputs are packed 8 per 128-bit word into output memory words
`out_addr` and `out_addr+1`. With `pool_first = 1` the words are overwritten.
Otherwise each stored 16-bit field is replaced only if the new value is
larger, which is a read-modify-write per word. The MACs of one max-pooling
window thus merge into one result: the first MAC sets `pool_first`, the rest
clear it. The host reads the output memory through `omem_*` while the tile is
idle.

## Configuration and counters

`cfg_t` is sampled at `start`:

| Field | Meaning |
|---|---|
| `num_ima` | IMAs the kernel occupies, 1 … N_IMA |
| `relu_en` | the layer is followed by ReLU: enables the ReLU bypass and the output clamp |
| `approx_en` | enables the adaptive approximation |
| `thr` | T, see above |
| `signed_in` | inputs are two's complement, e.g. a mean-subtracted first layer |
| `out_shift` | output scaling |
| `in_base` | first input memory word of this MAC |
| `out_addr` | output memory word for channels 0–7; channels 8–15 go to `out_addr+1` |
| `pool_first` | first MAC of a pooling window: overwrite |
| `act8` | 8-bit activations: only bits 7..0 are applied, in passes 8–15 |

`stats_t` holds the counters of the last MAC:

* `cycles`, start to done;
* the channel counts `relu_bypass`, `approx_bypass` and `completed`;
* `conversions`, the converted channel-passes (256 without any bypass);
* `discarded` conversions;
* `adc_sat`, saturated ADC codes;
* `pool_merges`, output words changed by a merge.

## What follows the paper and what does not

These parts follow the paper:

* the bit-serial MSB-first MAC, and both termination rules as stated;
* the Max/Min LUT with N−1 entries per channel, computed offline from the
  bit-probability bound;
* the IPU: 1-bit DACs, a differential pair of 128×128 crossbars of 2-bit
  cells, 128 sample-holds, one time-shared 8-bit ADC, and a shift-add;
* 16-bit weights as 8 cells, giving 16 channels per IPU;
* IMAs with local input and output buffers of 2 KB × 256 bit and
  256 B × 128 bit;
* a shared bus;
* tile-level accumulation, evaluation, ReLU and pooling;
* the pipeline timing of 8 cycles per channel at 1.28 GHz, with the first
  pass taking 16 × 6.25 ns and later passes shortening as channels stop.

These are this design's own choices:

* **IMAs per tile.** N_IMA = 8 follows the tile drawing, which shows eight
  IMAs; the text never states the number. Its parameter table is headed "80 MACs per tile", which
  could mean 80 IPUs (10 IMAs of 8); this design keeps 8, and its IMA select
  fields (`prog_ima`, the bus destination) are 3 bits wide.
* **Channels per MAC.** All IPUs of a tile work on the same 16 channels, and
  a kernel fills an IMA's IPUs before using the next IMA, as the paper
  prefers. One MAC therefore yields at most 16 outputs, with kernels of up to
  8192 rows.
* **Evaluation lanes.** There is one accumulation and evaluation lane,
  shared by the channels in time: the channels are converted one after
  another, so one result arrives per 8 cycles. The paper's table lists 8
  evaluation logics and 8 shift-adds per tile; their arrangement is not
  described.
* **ADC range.** A bitline sum outside the 8-bit range is clipped. The paper
  says nothing about overflow; `stats.adc_sat` counts it.
* **Bus protocol.** The input load is sequential, and the output transfer
  takes one beat per IMA. The bus protocol, the memory-to-IMA transfer and
  reset behaviour are not described in the paper.
* **Fixed-point formats.** The Q0.8 format of T and the accumulator width
  (48 bits) are this design's choices.
* **Pipeline details.** Discarding late conversions, and the PREP and DRAIN
  phases, are this design's way to keep the paper's pipeline running without
  stalls.
* **8-bit mode.** With `act8` the MAC applies only input bits 7..0, as
  passes 8–15, so it takes 8 passes; a two's complement sign is bit 7, which
  is subtracted in pass 8, and the LUT entries 8–14 are used. 8-bit weights
  keep the 16-bit cell layout (upper cells 0, still 16 channels per IPU). A
  denser 8-bit weight mapping is not built: the paper does not describe
  one. `ACT_BITS` and `W_BITS` stay package constants.
* **Not built: network and LUT generation.** There is no tile-to-tile
  network: the host ports stand in for it. The LUT contents are computed
  offline.
* **Analog models.** The analog parts are ideal integer models, with no
  noise, IR drop or conductance variation.

## Fit of the evaluated networks

One tile holds 16 output channels with kernels of up to
8 × 8 × 128 = 8192 rows. The layer sizes below are those of the usual Caffe
models, not taken from the paper:

* **CifarQuick.** Convolutions 5×5×3→32, 5×5×32→32 and 5×5×32→64, then fully
  connected 1024→64→10. The largest kernel has 1024 rows, one IMA. The whole
  network needs 13 tiles of 16 channels. The first layer's mean-subtracted
  inputs use `signed_in`.
* **LeNet-5.** Convolutions 5×5×1→20 and 5×5×20→50, then fully connected
  800→500→10. It needs 39 tiles. Its convolutions are not followed by ReLU,
  so only the approximation applies (`relu_en = 0`).

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
with an independent model, counts checks and failures, and ends with a
`TB_RESULT` line. A watchdog stops a hung run. The end-to-end environment
`tb/tile_env.sv` runs five MACs, each compared word for word with a
bit-serial model of the whole tile, including ADC clipping:

| MAC | Configuration |
|---|---|
| A | ReLU and approximation at T = 0.8, pooling start |
| B | new inputs, max-pooled into A |
| C | two's complement inputs, approximation at T = 0.5 |
| D | no bypass at all |
| E | 8-bit activations (`act8`), ReLU and approximation at T = 0.8 |

The environment works as follows:

* It programs random kernels: channels 0–5 mostly negative, 6–11 mostly
  positive, 12–15 mixed.
* It builds the LUT with the bound above.
* It checks the tile's counters against the model.
* It checks that each MAC costs exactly 8 cycles per conversion plus the same
  overhead.
* It fails if any of these never occurs: ReLU bypass, approximation,
  completion, a shortened pass, an early MAC end, a pooling merge that kept
  an older value, a signed MAC, an 8-bit MAC.

`tb_comprrae_tile` runs it with 2 IMAs of 2 IPUs. `tb_comprrae_tile_full`
runs it with the top at its default size, 8 IMAs of 8 IPUs; it needs well
under a minute to build and a second to run. Two more testbenches use the
full-size tile with layer-shaped kernels:

* `tb_cifarquick_conv2`: 800 rows (5×5×32), 7 IPUs of one IMA, ReLU layer.
* `tb_lenet5_conv2`: 500 rows (5×5×20), 4 IPUs of one IMA, no ReLU, so only
  the approximation ends channels.

Their weights and inputs are random, not those of trained networks. The
fractions of conversions they save (about 45 % at T = 0.8 in MACs A and B)
therefore say nothing about the savings on real data.

To simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/comprrae_pkg.sv \
    tb/tb_comprrae_tile.sv --top-module tb_comprrae_tile -Mdir obj
./obj/Vtb_comprrae_tile
```

Any other testbench runs the same way: replace the file and top names. The
simulator is two-state, so every register that is read is reset or
initialised. Sizes are parameters of the modules, with defaults from the
package. The top takes `N_IMA_P` and `N_IPU_P`, and the crossbar, buffer and
memory sizes follow from them.
