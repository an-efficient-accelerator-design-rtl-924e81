# A tile engine for deformable convolution with a bounded receptive field

A deformable convolutional layer (DCL) does not sample its input on the fixed
K×K grid of an ordinary convolution. A first convolution predicts a 2-D offset
for every kernel tap of every output pixel. The input is then sampled at the
shifted, fractional positions by bilinear interpolation, and a second
convolution runs on those samples. The positions depend on the data. An
accelerator therefore cannot know in advance which input pixels a tile will
touch, and with unbounded offsets it ends up making random DRAM accesses and
stalling.

The design here follows the accelerator of *"An Efficient Accelerator Design
Methodology for Deformable Convolutional Networks"* (Ahn, Chang, Kang). Its
central idea is to bound the offsets during training with a regulariser on
the largest offset magnitude. Once every |offset| is at most `O_MAX`, the
pixels one output tile can reach form a small window of known size. The
window is `RF = K_C + 2·O_MAX` rows high and `STRIDE·T_W + RF − STRIDE`
columns wide. The accelerator loads that window once into an on-chip input
buffer and does everything from there: it computes the offsets, samples, and
interpolates. It then runs the second convolution on the interpolated values.
No data-dependent DRAM address is ever issued.

This repository gives synthesizable SystemVerilog for that engine: the
systolic PE array, the input, output and weight buffers, the sampling
controller (sampling position and bilinear coefficients) and a tile sequencer.
It also contains self-checking testbenches, including one that runs a whole
tile at the full default size against an independent reference model.

## Design point

| quantity | value | origin |
|---|---|---|
| kernel `K_C` | 3 | published design |
| tile: input channels `T_N`, output channels `T_M`, rows `T_H`, pixels `T_W` | 512, 64, 1, 8 | published design |
| offset bound `O_MAX` | 2, so `RF` = 7 | chosen here. The trained network's largest offsets sit just under 2.5, and its buffer efficiency reaches 100% at a 7×7 window. |
| stride `STRIDE` | 1 | chosen here |
| input buffer | RF·(S·T_W+RF−S)·T_N = 7·14·512 = 50,176 words | published formula |
| output buffer | T_W·T_N·2·K_C² = 73,728 words | published formula |
| PE array | 64 rows × 8 columns (T_M × T_W) | chosen here |
| data / accumulator | 16-bit fixed point with 8 fraction bits (Q8.8) / 40 bits | chosen here. The original used single-precision floating point. |

All of these are parameters of `dcl_accelerator` or constants in `dcn_pkg`.
The values taken from the published design are the defaults.

## One tile, four phases

`dcl_accelerator` processes one tile on each `start` pulse. A tile is `T_W`
consecutive output pixels of one output row, `n_ch` input channels
(`n_ch ≤ T_N`, a multiple of `T_W`) and `m_ch ≤ T_M` output channels. The
host sequences the loops over rows, pixel groups and output-channel groups.
One PE array does all the arithmetic, and the phases share it one after
another. The `phase` output shows the current phase.

1. **`PH_OFFCONV`: offset generation.** An ordinary 3×3 convolution of the
   window with the offset weights `w_o` gives `2·K_C² = 18` offset channels
   for the 8 pixels. Channel `2k` is dy and channel `2k+1` is dx of tap
   `k = ky·3+kx`. PE row x computes channel x and PE column y computes pixel
   y. The convolution streams `n_ch·9` reduction steps. Only 18 of the 64
   rows are used in this phase.
2. **`PH_SAMPLE`: sampling and interpolation.** There are 72 sampling points
   in a tile (8 pixels × 9 taps). For each one, the sampling controller reads
   dy and dx back from the output buffer and clamps each to ±O_MAX. It adds
   them to the regular grid position and splits the result into an integer
   neighbour (y0, x0) and fractions (fy, fx). From the fractions it forms the
   four bilinear weights. It then sends the PE array 8 channels at a time:
   each column gets the absolute input-buffer address of one channel's
   neighbour j, and row 0 gets coefficient j, for j = 0..3. Column c of row 0
   ends up holding Σⱼ cⱼ·pixelⱼ, the interpolated value of that channel. The
   same window serves phases 1 and 2, and the input buffer is not written
   while they run.
3. **`PH_XFER`: round trip of the interpolated inputs.** The accelerator
   raises `xfer_req`. The memory side copies output-buffer words
   `0 … T_W·9·T_N−1` (its `ext_rd_*` port) to the same addresses of the input
   buffer (`in_wr_*`), possibly by way of DRAM, and then pulses `xfer_done`.
4. **`PH_DCONV`: deformable convolution.** The second convolution reduces,
   for every pixel and output channel, over `n_ch` channels × 9 taps of the
   interpolated inputs, using the weights `w_deform`. Results go to the output
   buffer. Then `done` pulses.

Measured at the default size for one tile with N = 512 and M = 64
(`dcl_accelerator_full_tb`):

| phase | cycles | formula |
|---|---|---|
| offset convolution | 4,654 | N·9 streaming + drain (≤ 2·T_M + T_W + 8) |
| sampling / interpolation | 18,449 | T_W·9·4·N/8 beats + start-up and drain |
| deformable convolution | 4,746 | N·9 + drain |

The sampling pass dominates. During it only row 0 of the array does useful
work (8 of 512 PEs), because the pixels each output needs are specific to its
own sampling point. See "Where this departs" below.

## The processing element and the systolic timing

`pe` follows the published PE diagram:

* The feature-map operand comes from the PE above and is passed on downwards.
* The weight comes from the PE on the left and is passed on to the right.
* The product goes into the accumulator `OUT(x,y)`.
* A separate output register, behind a 2-way mux, takes either this PE's
  finished sum or the output register of the PE below. Results therefore
  shift up the column and leave the array at row 0. Meanwhile the
  accumulator is already working on the next sum.

The diagram shows no control, so control is this design's own. A 3-bit tag
`{valid, first, last}` travels with the weight:

* `first` restarts the accumulator (`acc = a·b` instead of `acc + a·b`).
* One cycle after `last`, the mux loads the finished sum into the output
  register, tagged with the PE's row number (`result_t`).

`computation_engine` puts the skew registers inside: column y is delayed by y
cycles and row x by x cycles. A caller therefore presents all operands of one
reduction step in the same cycle. If row x's `last` is presented in cycle T,
column y delivers row x's result at cycle

    T + 2x + y + 2

Rows finish one cycle apart, while the shift chain also moves one row per
cycle, so results leave a column every other cycle, each marked with its row.
The chain needs 2·ROWS cycles to empty. A row must not see another `last`
sooner than that when all rows are busy. Both convolutions easily meet this
(4,608 steps per sum). In the interpolation phase only row 0 works, so a sum
may finish every 4 cycles.

`result_collector` turns each leaving result into a write into the output
buffer. It requantises the result (arithmetic shift right by 8, then
saturate) and writes it to bank y, at an address chosen by the phase. For
interpolation it counts the results of each column in arrival order, because
they carry no address.

## Memory maps and the memory-side interface

Before `start`, the memory side writes:

* **Input window.** Channel n, window row r, window column c goes to word
  `(n·RF + r)·W_WIN + c`. Window row 0 is image row `oy·S − PAD − O_MAX`, and
  column 0 is likewise offset by `PAD + O_MAX` from the tile's first pixel.
  Where the window leaves the image, the memory side writes zeros.
* **Weights.** Bank = output channel (= PE row). Word
  `(n·3 + ky)·3 + kx` in region 0 holds `w_o`, and the same word plus
  `T_N·9` (region 1) holds `w_deform`. This weight store is not in the
  published block diagram. See below.

The output buffer is addressed logically. Word a is in bank `a mod 8`:

| region | logical word | contents |
|---|---|---|
| interpolated inputs | `(y·9 + k)·T_N + n` | sample of channel n, pixel y, tap k |
| offsets | `T_W·9·T_N + ch·T_W + y` | offset channel ch of pixel y |
| outputs | `T_W·9·T_N + 18·T_W + m·T_W + y` | output channel m of pixel y |

The deformable convolution reads the refilled input buffer with the
interpolation-region layout, so the transfer phase is a plain copy. All reads
(input, weight and output buffers) have one cycle of latency.

## Sampling arithmetic

Offsets are Q8.8 values. For pixel y and tap (ky, kx):

    py = (O_MAX + ky)·256 + clamp(dy, ±O_MAX·256)
    px = (y·S + O_MAX + kx)·256 + clamp(dx, ±O_MAX·256)
    y0 = py >> 8, fy = py & 255   (x likewise)
    y1 = min(y0+1, RF−1), x1 = min(x0+1, W_WIN−1)
    c = ((256−fy)(256−fx), (256−fy)fx, fy(256−fx), fy·fx) >> 8
        for neighbours (y0,x0), (y0,x1), (y1,x0), (y1,x1)

With the clamp, every neighbour lies inside the buffered window. When a
neighbour is limited to the window edge, its weight is zero. `clamp_cnt`
reports how many points of the last tile needed the clamp. For the network
the method targets, that count should be zero. The published design relies
on training and says nothing about out-of-range offsets.

## Where this departs from the published accelerator

* **Arithmetic.** 16-bit fixed point instead of single-precision floating
  point. Results differ from a float model by the quantisation. Saturation
  hides overflow.
* **Interpolation uses one PE row.** The published text says the computation
  engine performs the interpolation but not how. This mapping is simple and
  correct, but it leaves 63 of 64 rows idle during the longest phase.
* **Phases run one after another.** The original is described as fully
  pipelined. Here, within a tile only each phase streams. Inside the sampling
  pass, a fetch unit reads and converts the offsets of the next point while
  the current one streams (5 cycles per point), so there are no gaps when
  N ≥ 16. With N = 8 the 4-beat stream cannot hide the fetch, and each point
  takes 5 cycles.
* **A weight buffer was added**, one bank per PE row, holding both weight
  sets of a tile. The published block diagram shows none.
* **Offsets are clamped** to ±O_MAX.
* **DRAM and its interconnect are outside.** The top has plain buffer ports
  and a request/acknowledge handshake for the transfer of interpolated inputs.
  DMA, burst formats and the DRAM bandwidth are not modelled.
* **Output buffer.** Only about half of the formula's capacity is used. The
  regions above fill 36,864 + 144 + 512 words of 73,728.
* **Tiling loops.** The host drives the loops over rows, pixel groups and
  output-channel groups. Layers with more than 64 output channels take
  several tiles, each of which recomputes the offsets.

Workloads: for the ResNet-50 DCLs the method is evaluated on (N = 128, 256
and 512 input channels), a tile of N channels fits the default buffers,
N = 512 exactly. With an untrained-for-hardware network (maximum offsets up
to about 27), the required window would be about 59 rows high. This design
cannot hold it, and it would clamp those offsets.

## Files

* `rtl/dcn_pkg.sv`: constants, `data_t`/`acc_t`, the tag and result structs,
  the phase enum, and `requant()`.
* `rtl/pe.sv`, `rtl/computation_engine.sv`, `rtl/delay_line.sv`: the PE array.
* `rtl/input_buffer.sv`, `rtl/output_buffer.sv`, `rtl/weight_buffer.sv`:
  on-chip memories, written as arrays.
* `rtl/sampling_position.sv`, `rtl/sampling_coeff.sv`,
  `rtl/sampling_controller.sv`: the sampling controller.
* `rtl/conv_feeder.sv`: the address and tag generator for both convolutions.
* `rtl/result_collector.sv`: requantises and writes engine results.
* `rtl/dcl_accelerator.sv`: the top and the phase sequencer.
* `tb/*_tb.sv`: one self-checking testbench per block.
  `dcl_accelerator_tb` runs two tiles back to back at T_N = 16, T_M = 20.
  `dcl_accelerator_s2_tb` runs the same size with stride 2.
  `dcl_accelerator_full_tb` runs one N = 512, M = 64 tile with every
  parameter at its default.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself
through a watchdog. With Verilator 5, for example:

    verilator --binary --timing --assert -Wno-fatal -y rtl rtl/dcn_pkg.sv \
        tb/dcl_accelerator_full_tb.sv --top-module dcl_accelerator_full_tb -o sim
    ./obj_dir/sim

`-y rtl` lets Verilator find every module by its file name. The package is
named explicitly because it is imported, not instantiated. `-Wno-fatal` keeps
style warnings (mainly in the testbenches) from stopping the build. The
full-size run takes about a minute to build and a few seconds to simulate.
The end-to-end testbenches contain an independent reference model of the
layer in the same fixed-point format. They check every offset, every
interpolated input and every output word. They also check:

* that no input-buffer write happens during the input sampling stage;
* that offset clamping and fractional sampling actually occurred;
* that every phase ran.

To change the size, override the parameters of `dcl_accelerator`. `T_M` must
be at least 2·K_C², `T_N` must be a multiple of `T_W`, and the interpolated
inputs (`T_W·K_C²·T_N`) must fit in the input buffer. Initial assertions in
the top enforce these rules.
