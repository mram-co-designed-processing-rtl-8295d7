# A 3x3-convolution engine with its weights in non-volatile MRAM

CNN inference needs two kinds of storage. The filter coefficients are large
and almost never change. The activations are smaller, but they are written
and read over and over while a network runs. This design puts the two in
different memories next to one compute array:

* **coefficient MRAM.** More than 40 MB of STT-MRAM. It is non-volatile, so
  several complete models can stay resident on the chip, with nothing to
  reload after power-up.
* **activation SRAM.** Holds the input image and the intermediate feature
  maps. It is fast and written many times.
* **Matrix Processing Engine (MPE).** A 42 x 42 array of multipliers. In one
  clock cycle it computes a 3x3 convolution at all 14 x 14 pixels of a tile.
* **control unit.** Runs one convolution layer at a time, as the host
  describes it.

The RTL follows the architecture of the MRAM co-designed processing-in-memory
CNN accelerator of Sun et al. (Gyrfalcon Technology, a 22 nm chip). That
publication describes the architecture only at block level. Everything below
block level here is this implementation's own design, and is marked as such.
See "How far this follows the original" at the end.

## Data layout

**Tiles.** The engine works on a tile of P x P = 14 x 14 pixels. One channel
of a tile is stored as P consecutive SRAM rows.

**SRAM rows.** A row holds P 9-bit activations, 126 bits. Lane i sits in bits
`[9*i +: 9]`. Channel c of a tile whose channel 0 starts at row B is in rows
`B + 14*c … B + 14*c + 13`.

**MRAM words.** A word holds one 3x3 filter: nine 15-bit coefficients, 135
bits. Tap (ky,kx) sits in bits `[15*(3*ky+kx) +: 15]`. A bias is a word of its
own, with the value in bits 14:0.

**Models and layers in the MRAM.** Each resident model has a base address in
a table of 8 entries, which the host writes. Within a model, a layer starts at
an offset `coef_off`. For output channel `oc` the layer stores `cin` filter
words, one per input channel, and then one bias word:

    filter(oc, ic) = base[model] + coef_off + oc*(cin+1) + ic      ic < cin
    bias(oc)       = base[model] + coef_off + oc*(cin+1) + cin

To switch models, start a layer with another `model` field. Nothing is copied.

## The MAC array

42 x 42 = 1764 = 14 x 14 x 9: the array holds one multiplier for every tap of
every pixel of a tile. The multiplier in row `r`, column `c` serves:

    pixel (y, x) = (r / 3, c / 3)        tap (ky, kx) = (r mod 3, c mod 3)

It multiplies coefficient (ky,kx) by input pixel (y+ky-1, x+kx-1). So each row
of 42 MACs takes the three coefficients of one kernel row, and each column
takes the input pixels of one tile column.

**Padding.** Input pixels that fall outside the 14 x 14 tile read as zero. A
tile therefore gives a 14 x 14 output. No data is exchanged with neighbouring
tiles, so a larger image split into tiles sees zero padding at every tile
border, not only at the image border.

**Accumulation.** Each pixel adds its nine products into a 32-bit
accumulator, `acc[y][x]`. With `mac_en`, the sum of one input channel is added
in one cycle. `clr` restarts the accumulation, so that a pixel's sum over
`cin` input channels takes `cin` MAC cycles. The filter word comes straight
from the MRAM read port and is broadcast to all rows.

## One layer, step by step

The host fills in a `layer_desc_t` (`mram_cnn_pkg.sv`) and pulses
`layer_start`. The descriptor fields are:

* `model` and `coef_off`: where the layer's coefficients are;
* `in_base` and `out_base`: the SRAM rows of channel 0 of the input and of
  the output;
* `cin` and `cout`: the number of input and output channels;
* `shift`, `relu_en`, `pool_en` and `quad`: the post-processing settings.

For every output channel the control unit does the following:

1. For each input channel, in `cin` rounds:
   * the input router reads the channel's 14 rows, one row per cycle;
   * at the same time the filter word is read from the MRAM;
   * in the cycle the last row arrives, the MPE accumulates. The first
     round clears the accumulators.
2. The bias word is read from the MRAM.
3. Post-processing produces the output tile, in one register stage.
4. The output router writes the tile to the SRAM, one row per cycle.

When the last output channel is written, `layer_done` pulses and `busy` falls.

**Cycle count.** A layer takes exactly

    1 + cout * (cin*(P+3) + R + 5)        R = 14 rows, or 7 when pooling

cycles from the start pulse to `layer_done`. Each input channel costs P+3 =
17 cycles: 1 to start, 14 to read rows, 1 of read latency and 1 to finish the
row. Only 1 of those 17 cycles uses the MAC array. Loading the tile is the
bottleneck. That is the first thing to change for throughput, for example by
double-buffering the tile register.

## Post-processing

Each accumulator value `a` becomes a 9-bit activation:

    v = (a + bias + 2^(shift-1)) >>> shift     (no rounding term when shift = 0)
    v = clamp(v, -256, 255)
    v = max(v, 0)                              if relu_en

**Pooling.** With `pool_en`, a 2x2 max pooling with stride 2 follows and
reduces the tile to 7 x 7.

**Quadrants.** The output router writes a pooled 7 x 7 result into one
quadrant of the destination tile:
* `quad[1]` selects the upper or lower 7 rows;
* `quad[0]` selects lanes 0-6 or 7-13, through the SRAM's per-lane write mask.

Four pooled 14 x 14 tiles thus build one full 14 x 14 tile of the next
layer's input. The other quadrants are left untouched.

**Number formats.** The original chip uses its own 9-bit and 15-bit
floating-point formats, whose layout is not published. Here both are plain
two's-complement integers of the same widths, and the shift-and-saturate step
stands in for the format conversion.

## Host interface (`mram_cnn_top`)

| Ports | Use |
|---|---|
| `host_mram_we/addr/wdata` | Write one 135-bit filter or bias word. Allowed at any time, even while a layer runs: the MRAM has a separate write port. |
| `host_model_we/id/base` | Set the MRAM base address of model 0..7. |
| `host_sram_en/we/wmask/addr/wdata`, `host_sram_rdata` | Read or write one SRAM row while `busy`=0. Read data arrives one cycle after the request. Accesses while `busy`=1 are ignored. |
| `layer_start`, `layer_desc`, `busy`, `layer_done` | Run one layer. |

A typical session, matching the chip's four-step flow:
1. Write the models' coefficients and set the model bases.
2. Write the image tile's channels into the SRAM.
3. Run the layers one after another, pointing each layer's `in_base` at the
   previous layer's `out_base`.
4. Read the result rows.

The logic reset clears the control state and the model table, but not the
MRAM array. After a reset, the host only needs to rewrite the 8 base
addresses.

## Files

| File | Contents |
|---|---|
| `rtl/mram_cnn_pkg.sv` | Sizes, types, `layer_desc_t`, row and filter packing functions |
| `rtl/mac_unit.sv` | One 9 x 15-bit signed multiplier |
| `rtl/mpe.sv` | The 42 x 42 MAC array, zero padding, 14 x 14 accumulators |
| `rtl/input_router.sv` | SRAM rows to the tile register |
| `rtl/post_proc.sv` | Bias, rounding shift, saturation, ReLU, 2x2 max pooling |
| `rtl/output_router.sv` | Tile to SRAM rows, with quadrant placement of pooled tiles |
| `rtl/control_unit.sv` | Layer sequencer and model base table |
| `rtl/coef_mram.sv` | Coefficient memory, an array model of the MRAM |
| `rtl/act_sram.sv` | Activation SRAM with per-lane write mask |
| `rtl/mram_cnn_top.sv` | Top level and SRAM port arbitration |
| `tb/tb_<module>.sv` | One self-checking testbench per module |
| `tb/tb_workload_224.sv` | Whole-image workload: a 3 → 64 channel layer on a 224 x 224 image |

**Parameters** (defaults):

| Parameter | Value |
|---|---|
| `MRAM_DEPTH` | 2,485,514 words, about 40 MB |
| `SRAM_DEPTH` | 262,144 rows, about 4 MB |
| `N_MODELS` | 8 |

The tile size P = 14 and the data widths are package constants.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example, with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
        --top-module tb_mram_cnn_top rtl/mram_cnn_pkg.sv tb/tb_mram_cnn_top.sv -o sim
    obj_dir/sim

Replace the top module and testbench file to run another test. The block
testbenches take a few seconds. The end-to-end test `tb_mram_cnn_top` runs at
full size, with the 40 MB array, and takes well under a minute. It:
* loads two models, one of them while a layer runs;
* runs three layers: 3→4 channels with ReLU, 4→2 channels pooled into quadrant
  3, and a second model pooled into quadrant 1 of the same tiles;
* resets the logic and reruns a layer from the retained MRAM contents;
* compares every output row with a reference model in the testbench;
* checks each layer's cycle count against the formula above;
* checks that a host write during a layer is ignored;
* counts that every mechanism occurred: multi-channel accumulation, pooling on
  and off, ReLU on and off, saturation, a model switch, quadrant placement,
  loading during a run, a blocked host access, and persistence over reset.

`tb_workload_224` runs a whole-image workload, also at full size, in about
half a minute. The workload is the first layer of a VGG-style classifier,
3 → 64 channels, on a 3 x 224 x 224 image:
* all 256 tiles are processed, with the input (10,752 rows) and the complete
  output (229,376 rows) resident in the SRAM together;
* every output pixel is checked;
* the run takes 256 x (1 + 64 x (3 x 17 + 19)) = 1,147,136 cycles, which is
  92 ms at 12.5 MHz.

The block testbenches compare each module against independent reference
arithmetic:
* `mpe`: a direct zero-padded convolution;
* `post_proc`: a rescale/ReLU/pool reference;
* the routers: memory models in the testbench;
* `control_unit`: the exact event sequence and cycle count.

Each testbench has a watchdog.

## How far this follows the original

**Taken from the original description:**
* the four parts (MRAM for coefficients, SRAM for activations, MAC array,
  control) and the four-step flow;
* several models at different MRAM addresses;
* a 3x3 convolution at all P x P = 14 x 14 pixel positions at once, with
  padding, optional bias, a nonlinear activation and 2x2 max pooling that
  shrinks the output four times;
* 9-bit activations and 15-bit coefficients;
* an MPE of 42 rows of 42 MACs, between an input router and an output router,
  with an MRAM block beside each row;
* more than 40 MB of MRAM.

**This implementation's own choices:**
* the mapping of MACs to pixels and taps, which is what reconciles "14" with
  "42 x 42";
* integer arithmetic instead of the unpublished floating-point formats;
* ReLU as the activation;
* the shift-and-saturate rescale;
* pooling as a per-layer option;
* zero padding at every tile edge;
* all widths beyond 9/15 bits, memory latencies, the SRAM size, the
  descriptor, the coefficient layout, the loop order and all timing;
* the router behaviour and quadrant placement;
* the 8-entry model table.

The diagram of the original draws a separate MRAM block beside every MAC row.
Here one MRAM is read and its word broadcast to all rows. Rows that use the
same kernel row would hold identical data, so the function is the same.

**Not modelled:**
* the STT-MRAM bit cell and macro circuitry. The MRAM is a plain array that
  keeps its contents over reset;
* the clock-skew link between several engines. The original mentions it
  without describing it, or how many engines the chip has, so this design has
  one engine;
* power behaviour: leakage, standby and the efficiency figures.

**Throughput.** The original reports 35 frames/s at 12.5 MHz on 224 x 224 RGB
images. One engine of this design cannot reach that for a VGG-sized network:
even at one MAC cycle per clock, it needs about 8.7 M cycles per frame,
against the 357 k cycles available. The first layer alone, as built, takes
1.15 M cycles. The published figure therefore implies
more engines, or a dataflow that is not described.
