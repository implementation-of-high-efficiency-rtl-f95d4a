# A single-time-step residual spiking network processor

This RTL classifies a 32×32 RGB image with a spiking ResNet-10 in which
every neuron fires at most once. With a single time step there is no membrane
state to carry between time steps, so a LIF neuron is just a comparison against
a threshold. A spike is one bit. A convolution over spikes then needs no
multipliers: each weight is either added or skipped. The network uses grouped
convolutions (4 groups), which cuts it to about 0.69 M 8-bit parameters. All
parameters and all intermediate maps stay in on-chip block RAM. Every layer
has its own engine, and all the engines work on the same image at once, row
by row.

The design follows a published FPGA residual-SNN processor: ResNet-10,
T = 1, g = 4, 8-bit QAT parameters with batch norm folded in, a ZCU216 board
at 100 MHz, 3.98 ms per image. The network shape, the PE array sizes, the
split between spike adders and DSP multipliers, the grouped reuse of the PE
array, the four-step convolution pipeline and the storage of everything on
chip are taken from that work. The publication does not give the data
widths, thresholds, scaling shifts, memory layouts, handshakes, loading
interface or cycle-level schedule. Those are this design's own choices, and
they are listed under "Where this design departs or decides".

## The network as built

| stage | operation | input → output | engine |
|---|---|---|---|
| Conv1 | 3×3 conv, encoding (multi-bit input) | 3×32×32 (8-bit) → 64×32×32 | `encode_conv`, 3×64 DSP array |
| Block 1 | LIF, 3×3 g4 conv, LIF, 3×3 g4 conv, + 1×1-conv shortcut | 64 → 128, 32×32 | `res_block` (2× `spike_conv`) |
| Block 2 | same, direct-mapping shortcut | 128 → 128, 32×32 | `res_block` |
| Block 3 | same, stride 2 in the first conv and the shortcut, 1×1-conv shortcut | 128 → 256, 32×32 → 16×16 | `res_block` |
| Block 4 | same, direct mapping | 256 → 256, 16×16 | `res_block` |
| Pool | LIF, then per-channel spike count over 16×16 | 256 counts | `spike_pool` |
| FC | 256×10, 8-bit weights | 10 scores (32-bit) | `fc_layer` |
| Output | argmax | class 0–9 | `classifier` |

This adds up to 690,368 weights and 1,994 biases, 692,362 parameters in all.
The published total is 0.69 M.

A block's output is a 16-bit membrane map, not a spike map. The next block
thresholds it twice: its main path sees spikes, and its shortcut sees the
multi-bit value. That is why the shortcut needs DSP multipliers and the main
path does not:

    X' = conv_b( LIF( conv_a( LIF(X) ) ) ) + shortcut(X)
    shortcut(X) = X                                     (direct mapping)
                = sat16( (b + Σ w·X) >>> SC_SHIFT )     (1×1 convolution)
    LIF(u) = 1 if u > THRESH else 0

## The spiking convolution engine (`spike_conv`)

This is the core of the design. Each residual block contains two of these
engines, so there are eight in total. Each engine has three stages that
overlap in time.

**Fetch.** The engine visits output pixels in raster order. For each one it
reads the nine input words of the 3×3 window, one per clock. Positions
outside the map read as zero (padding). It also reads one word of the block
input at the same position for the shortcut. The words go into a fill
buffer. The first convolution of a block thresholds the 16-bit words on the
fly as they arrive.

**Compute.** The filled window is handed to the 8×8 PE array. Each PE core
holds 9 PEs, one per kernel tap, and each PE is a spike-gated adder. One use
of the array yields partial sums for 8 output channels over 8 input
channels. A group with more than 8 input channels is covered by reusing the
array:

    NPASS  = (CIN / 4) / 8     array uses per 8-channel output chunk
    NCHUNK = COUT / 8          chunks per pixel
    clocks per pixel = NCHUNK × NPASS

For each chunk, the partial sums of its NPASS passes are added on top of the
bias. Each pass reads one weight word: 8 outputs × 8 inputs × 9 taps × 8 bits
= 4,608 bits, at address `chunk*NPASS + pass`. The window stays in place
while all chunks of the pixel are computed, so each input is fetched once per
pixel. Meanwhile the next window is fetched (10 clocks, at least as short as
one pixel's compute). This is the double buffering between the
padding/input steps and the compute/output steps.

For a 1×1-convolution shortcut, the 64×8 DSP array runs in the same clocks as
the first `SC_CIN/64` passes of each chunk. Each pass reads a shortcut weight
word of 8 outputs × 64 inputs × 8 bits.

**Output.** For each chunk, 8 channels are written to the output map. The
first convolution writes spikes (1 bit per channel). The second writes
`sat16(acc + shortcut)`.

**Row handshake between layers.** Each engine publishes `rows_done`. Before
fetching output row r, a consumer waits until its producer has finished
input row `min(H_IN−1, r·S+1)`, i.e. `rows_done ≥ min(H_IN, r·S+2)`. The
clocks spent waiting are counted in `stall_cycles`. Because of this rule, all
layers start together and follow each other about two rows apart. Nothing
stops a producer from running ahead, because every map has a full-frame
buffer. A new image may start only after `done`.

Engine rates at the defaults:

| engine | NCHUNK × NPASS | pixels | compute clocks |
|---|---|---|---|
| Conv1 | 9 clocks/pixel (tap-serial) | 1024 | 9,216 |
| B1 conv_a / conv_b | 16×2 / 16×4 | 1024 | 32,768 / 65,536 |
| B2 conv_a / conv_b | 16×4 / 16×4 | 1024 | 65,536 / 65,536 |
| B3 conv_a / conv_b | 32×4 / 32×8 | 256 | 32,768 / 65,536 |
| B4 conv_a / conv_b | 32×8 / 32×8 | 256 | 65,536 / 65,536 |

The engines are balanced at 65,536 clocks each. The whole image takes
103,375 clocks, as measured by the full-size testbench. The extra clocks come
from pipeline fill and the row dependencies between stages. At 100 MHz this
is 1.03 ms, against the 3.98 ms reported for the published processor. The
publication does not give its schedule, so the two cannot be compared clock
for clock.

## Memories and the parameter load bus

- `param_ram` holds one parameter memory per layer and kind: main weights,
  main biases, shortcut weights, shortcut biases. Each memory is one word
  wide, and a word is exactly what one array use consumes. The read is
  registered (one clock). Words are written 64 bits at a time.
- `fmap_ram` holds each feature map, one word per pixel with all channels,
  16 bits per channel for membrane maps and 1 bit for spike maps. It has one
  write port, which writes an 8-channel slice, and two registered read ports.
  The next layer's main path and its shortcut read the same map at the same
  time.
- The load bus `param_ld_t` (see `snn_pkg`) is
  `{we, layer[3:0], sel[1:0], addr[15:0], lane[7:0], data[63:0]}`.
  - `layer`: 0 = Conv1, 1–8 = B1A, B1B, …, B4B, 9 = FC.
  - `sel`: weights, biases, shortcut weights, shortcut biases.
  - `lane` selects the 64-bit slice of the word.
- Word layouts (byte n = bits 8n+7:8n):
  - Main conv, word `k*NPASS+p`: byte `(o*8+i)*9+t` = w[8k+o][8p+i][tap t]. The
    input index is within the group. Taps run in raster order, top-left first.
  - Main bias, word `k`: byte `o` = b[8k+o].
  - Shortcut, word `k*NSC+p`: byte `o*64+i` = w[8k+o][64p+i].
  - Conv1, word 0: byte `(o*3+i)*9+t`. Its bias is word 0, byte `o`.
  - FC, word `i`: byte `j` = w[class j][input i]. Its bias is word 0, byte `j`.
- The image memory holds 1,024 pixels × 3 signed bytes and is written through
  `img_we/img_addr/img_data`.

Storage at the defaults is about 5.5 Mbit of parameters plus about 7.7 Mbit
of maps.

## Arithmetic

- Weights and biases are signed 8-bit. A bias is added at accumulator scale.
  BN folding and quantization scales are assumed to be baked into the weights
  and the threshold.
- Conv1: `X0 = sat16((Σ img·w + b) >>> ENC_SHIFT)`, with `ENC_SHIFT = 4`.
- Main-path accumulators are 24 bits, which is more than the worst case for
  64 inputs × 9 taps × 128. Block outputs are saturated to 16 bits.
- Shortcut: 32-bit sums, then `>>> SC_SHIFT` (6), then saturation.
- Threshold: `THRESH = 64`, the same for every LIF. It is a parameter of the
  top.
- Pool: counts of 0–256 per channel (9 bits). This is the global average
  times 256; the 1/256 is left to the FC weights.
- FC: `score[j] = b[j] + Σ cnt[i]·w[j][i]`, 32-bit. Ties in the argmax go
  to the lowest class index.

## Control and timing

`snn_controller` raises `busy` and launches all stage engines together on a
one-clock `start`. It collects the six stage `done` pulses (Conv1, four
blocks, pool) and starts the FC one clock after the last of them. When the
FC finishes, it pulses `done` and registers the result. `cycles` is the
latency in clocks from `start` to `done`.

The FC takes NIN+2 = 258 clocks. The pool counts one pixel per clock as rows
become ready and finishes NPIX+1 clocks after start if the map is already
complete. Conv1 produces one pixel every 9 clocks.

## Where this design departs or decides

- **Stride of block 3.** The published network figure shows the channels
  growing from 128 to 256 at Conv3_x, but no stride. This design halves the
  map there (32×32 → 16×16), as ResNet stages normally do.
- **Numeric formats.** Map width (16 bits), accumulator widths, the two
  shifts and the threshold value are not given in the publication. With
  trained weights they would come from the quantization scales. Here they
  are parameters.
- **Conv1 rate.** Conv1 is tap-serial (9 clocks per pixel) on a 3×64
  multiplier array. This is enough because the blocks behind it are slower.
- **Pool.** The publication names a pooling module that feeds a 256×10 FC
  layer. This design uses a global spike count, which is an average pool
  without the divide.
- **Latency.** It differs from the published figure, as explained above.
- **Not built:** the board-level parts, namely clocking, the host link and
  the power measurement. The publication names the board and clock but does
  not describe them. Parameters and the image enter through plain write
  ports instead.
- **Resources.** The published utilisation (about 135 k LUT, 342 k FF,
  674.5 BRAM36, 3,008 DSP) is for the authors' own RTL and has not been
  reproduced. In this design the DSP count is set by the multipliers:
  3×64×9 = 1,728 in Conv1 and 64×8 = 512 in each of the two shortcut arrays.

## Files

| file | content |
|---|---|
| `rtl/snn_pkg.sv` | sizes, widths, layer ids, the load-bus struct, saturation |
| `rtl/pe_core.sv`, `rtl/pe_array.sv` | 9-PE spike-adder core; 8×8 array with per-row partial sums |
| `rtl/dsp_pe_array.sv` | multiply-add array (Conv1 3×64×9, shortcut 64×8×1) |
| `rtl/lif_neuron.sv` | single-step LIF (threshold compare) |
| `rtl/param_ram.sv`, `rtl/fmap_ram.sv` | parameter and feature-map memories |
| `rtl/encode_conv.sv` | Conv1 engine |
| `rtl/spike_conv.sv` | grouped spiking convolution engine with shortcut |
| `rtl/res_block.sv` | two engines, middle spike map, output map |
| `rtl/spike_pool.sv`, `rtl/fc_layer.sv`, `rtl/classifier.sv` | tail |
| `rtl/snn_controller.sv`, `rtl/snn_top.sv` | scheduler and top |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Each testbench generates its own random data and compares it with a
behavioural model written inside the testbench. At the end it prints
`TB_RESULT checks=N failures=M`. For example:

    verilator --binary --timing --assert -Irtl rtl/snn_pkg.sv tb/tb_snn_top.sv \
        --top-module tb_snn_top -Mdir obj && ./obj/Vtb_snn_top

`tb_snn_top` runs one full-size inference (about 40 s to build, 10 s to run).
It compares Conv1's map, the middle and output maps of every block, the pool
counts, the ten scores and the class with the model. It also checks that:

- every layer finished rows while its producer was still running;
- every engine stalled on its producer;
- padding taps, both spike values, grouped reuse and both shortcut kinds
  occurred;
- the latency lies between the busiest engine's 65,536 clocks and 398,000.

The unit testbenches (for example `tb_spike_conv`, `tb_res_block`) use small
maps and odd channel counts, and they release input rows slowly so that the
row handshake stalls.
