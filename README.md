# Depthwise deformable 3×3 convolution engine with bounded square offsets

A deformable convolution moves each of its nine 3×3 taps by a learned,
per-pixel offset. On hardware this is costly. The offsets are fractional, so
every sample needs bilinear interpolation. They are unbounded, so any input
pixel may be needed at any time. And they are irregular, so all nine samples
may sit in the same on-chip memory bank. The engine here computes a
restricted deformable convolution that avoids all three problems:

* **Rounded.** The offset is rounded to an integer, so a sample is a single
  input pixel and needs no interpolation.
* **Bounded.** The offset is clamped to `[0, N]`, with `N = 7`. Every sample
  of output row `y` then lies in rows `y-N … y+N`. A circular buffer of
  `2N+1 = 15` image lines holds everything the convolution can touch, so
  each input pixel is read from memory exactly once.
* **Square.** One number `d` per output pixel places the nine taps on a
  square of half-side `d` around the pixel:

      tap(i, j) = input[y + (i-1)·d][x + (j-1)·d],   i, j ∈ {0, 1, 2}

  The nine taps occupy exactly three rows (`y-d`, `y`, `y+d`), which live in
  three different line-buffer banks. Three independent read ports therefore
  fetch one column of the window per cycle, three samples at a time.
* **Depthwise.** Each channel is convolved with its own 3×3 kernel. The
  multiplier array has 16 channel lanes × 9 taps.

This is the convolution engine from "Algorithm-hardware Co-design for
Deformable Convolution" (Huang, Wang et al., EMC² workshop at NeurIPS 2019),
in its main configuration: bounded, square-shaped, multi-ported, depthwise.
That paper gives the algorithm, the block diagram and the main sizes. The
widths, handshakes, schedules and control written here are this
implementation's own choices. They are marked as such below and at the top
of every source file.

## What one layer computes

For a feature map of `h × w` pixels and `c` channels (`c` a multiple of 16):

    d[y][x]      = clamp(floor(offset[y][x] + 0.5), 0, 7)
    res[ch][y][x] = Σ_{i,j=0..2} wt[ch][3i+j] · act[ch][y+(i-1)d][x+(j-1)d]

Samples that fall outside the image count as zero. One offset per output
pixel is shared by all channels. `d = 1` gives an ordinary 3×3 depthwise
convolution, and `d = 0` multiplies the centre pixel by the sum of the
kernel.

Number formats (all this implementation's choice):

| quantity    | format                                                               |
|-------------|----------------------------------------------------------------------|
| activation  | signed 8 bit                                                         |
| weight      | signed 8 bit                                                         |
| offset in   | signed 8 bit fixed point, 4 fraction bits (−8.0 … +7.9375)           |
| offset kept | 3-bit unsigned integer 0…7                                           |
| result      | signed 20 bit, exact (nine 16-bit products), no bias, no requantisation |

## Structure

```
   offsets (HP) ──► offset_buffer ──── d ──────────┐
                     round, clamp, h·w map          │
                                                    ▼
   pixels (ACP) ──► line_buffer ══ 15 banks ══► multiport_sel ══ 3 ports ══► deform_m2s ──► dw_conv3x3 ──► results (HP)
                     15 lines × W × 16 ch           bank select            window packer   16 × 9 MACs
                          ▲                                                 │    │               ▲
                          └──────── cur_row (flow control) ─────────────────┘    │ group         │
   weights (HP) ──► weight_buffer ───────────────────────────────────────────────┴──► 16×9 weights┘
```

`dcn_engine` is the top. It holds the layer registers (`h`, `w`, `c`), the
start/busy/done control and the wiring. The processor side of the system is
not part of this RTL: the ARM processing system, its 1 MB last-level cache,
the DDR controller and the AXI ports and interconnect. Its four memory
streams appear as plain valid/ready ports:

| port group | direction | width per beat      | content and order                                           |
|------------|-----------|---------------------|-------------------------------------------------------------|
| `off_*`    | in        | 8                   | `h·w` offsets, row-major                                    |
| `wt_*`     | in        | 9 × 8               | one channel per beat, channels 0…c-1; tap `3i+j` at bits `8(3i+j)` |
| `act_*`    | in        | 16 × 8              | one pixel of 16 channels; order: channel group, row, column |
| `res_*`    | out       | 16 × 20, `res_last` | same order as `act_*`; `res_last` marks the layer's last beat |

In the source system the pixels come through the cache-coherent ACP port and
the rest through an HP port. The port names keep that association.

### Layer control

While `busy` is low, pulse `start` with `cfg_h`, `cfg_w` and `cfg_c` valid.
The engine latches the sizes, clears all buffer counters and then accepts
all four streams, which may arrive in any interleaving. Sampling begins
once the last offset and the last weight are stored. `done` pulses for one
cycle after the beat carrying `res_last` is accepted.

## The line buffer and its flow control

This is the part that takes most care to understand.

The layer is processed one 16-channel group at a time: every row of group 0,
then every row of group 1, and so on. The line buffer numbers rows
globally across groups: row `r` of group `g` is global row `g·h + r`. Global
row `R` is written to bank `R mod 15`. The sampler (`deform_m2s`) publishes
`cur_row`, the global index of the output row it is working on. The line
buffer publishes `rows_written`.

* **Writer rule:** global row `R` may be written only while
  `R ≤ cur_row + N`. Row `R` overwrites row `R − 15`. No output row from
  `cur_row` on needs that row, since output row `Y` reads at most row
  `Y − N`.
* **Reader rule:** output row `y` of group `g` starts only when
  `rows_written > g·h + min(y + N, h − 1)`, that is, once every row it can
  touch is in the buffer.

Global numbering makes the group boundary seamless. While the last rows of
group `g` are being computed, the first rows of group `g+1` already flow
into the banks those rows no longer need. The sampler never reads a row of
the wrong group, because rows outside `0…h−1` of the current group are
masked to zero and never read.

With exactly `2N+1` lines, loading and computing alternate at each row.
When output row `y` finishes, `cur_row` advances, and only then may row
`y + N + 1` enter the bank that row `y − N` occupied. Each output row
therefore costs its 3·w sampling cycles plus the time to stream in one
new line. An extra line would let the two overlap. The source design
draws 15 lines, so this implementation keeps 15.

Each bank is a simple dual-port memory: one write port and one read port
with a one-cycle read latency. All three ports read the same column in a
given cycle. Each bank therefore needs only one read address (`rd_col`),
plus an enable bit, and `multiport_sel` routes the three wanted bank outputs
to the three ports. When `d = 0` all three rows are the same row. The one
enabled bank is read once, and all three ports receive its word.

## The sampler (`deform_m2s`)

Each output pixel takes three cycles, R0, R1 and R2. In phase `j` the
sampler reads column `x + (j−1)·d` through all three ports: port 0 reads
row `y−d`, port 1 row `y` and port 2 row `y+d`. Each port's bank is
`bank(y) ± d`, wrapped modulo 15. A tap whose row or column lies outside
the image is not read and is captured as zero. One cycle after each read,
the three returned words fill the next column of the 3×3 window. After R2
the complete window (9 taps × 16 lanes), its channel group and a last flag
go into a 2-entry FIFO.

* The next pixel's offset is requested during R2, so that it is ready in
  the following R0. Pixels therefore follow each other back to back, one
  every three cycles.
* A new pixel is issued only when a FIFO slot is reserved for it (credit
  counting), so backpressure from the MAC array never drops a window.
* Before the first pixel of each output row, the sampler spends at least
  one cycle checking the reader rule above.

## The MAC array (`dw_conv3x3`)

The array has 16 lanes × 9 signed 8×8 multipliers. Each lane multiplies its
nine window samples by the nine weights of its channel. The weight buffer
supplies those weights combinationally, selected by the group tag that
travels with the window. The array is a two-stage pipeline (products, then
nine-input sums) with a two-cycle latency and one beat per cycle. It stalls
as a whole when its output is held. The sums are exact at 20 bits.

## Timing

* Steady state: one result beat (16 channels of one pixel) every 3 cycles
  inside a row. This is the rate three ports allow; one port would need 9.
* Per output row: one or more cycles to check the reader rule, plus the
  time to load the next line (see above).
* Offsets must be completely loaded before the first pixel, which costs
  `h·w` cycles at one offset per cycle.
* Measured in simulation at the default sizes: a 64 × 64 × 16 layer with no
  stalls takes 20 039 cycles from `start` to the last result, 4 096 of them
  for the offset load. A 64 × 64 × 256 layer, with random gaps on the
  inputs and random backpressure, took 280 983 cycles.

## Parameters

| parameter | default | meaning                                  | origin                                   |
|-----------|---------|------------------------------------------|------------------------------------------|
| `N_BOUND` | 7       | largest offset; lines = `2·N_BOUND + 1`  | source design (N = 7; 15 lines drawn)    |
| `H_MAX`   | 64      | largest layer height                     | source design's benchmark layer          |
| `W_MAX`   | 64      | largest layer width (line length)        | source design's benchmark layer          |
| `C_MAX`   | 256     | largest channel count                    | source design's benchmark layer          |
| `PC`, `TAPS`, `NPORTS` (package) | 16, 9, 3 | lanes, taps, read ports | source design (16×9 MACs, 3 ports) |
| `DATA_W`, `ACC_W`, `OFF_IN_W`, `OFF_FRAC` (package) | 8, 20, 8, 4 | number formats | this implementation |

The top's parameters `N_BOUND`, `H_MAX`, `W_MAX` and `C_MAX` may be changed
per instance. The lane count and the number formats are in `dcn_pkg` and are
shared by all modules. At the default sizes the engine holds about 166 kbit
of memory: 123 kbit of line buffer, 12 kbit of offsets, 18 kbit of weights
and the sampler FIFO.

## Where this departs from, or goes beyond, the source design

* **Line count.** The source text says `2N` lines are stored, while its
  diagram shows lines 1 to 15 (`2N+1` for N = 7). This implementation uses
  `2N+1`, the number needed to hold rows `y−N … y+N` at once.
* **Fill policy, loop order and overlap** (channel group outer, then row,
  then column; global row numbering; no overlap of line loading with
  sampling inside a group) are this implementation's choices. The source
  describes none of them.
* **Rounding and clamping in hardware.** The source rounds offsets at
  inference and bounds them with a ReLU6-style layer during training. Here
  the offset buffer rounds half up and clamps, so out-of-range inputs are
  safe.
* **Number formats and handshakes** are not given by the source. The source
  only states that the network is to be quantised to low precision.
* **Not included.**
  * The direct, unbuffered paths from the memory ports into the sampler. In
    the source these serve the baseline and cache-only variants, which
    fetch each sample from DRAM or the cache.
  * The full 3×3 convolution configuration with 8×8×9 MACs. It sums over
    input channels, and this array does not.
  * 1×1 convolutions and the other layers of a complete network.
  * Original deformable offsets: fractional, negative, or eighteen per
    pixel.
  * The processor system, its cache, the DDR controller and the AXI
    infrastructure. These are vendor hard blocks in the source system; this
    engine presents streams where they would connect.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog.

| testbench            | what it checks                                                                 |
|----------------------|--------------------------------------------------------------------------------|
| `tb_offset_buffer`   | rounding of negative, half and out-of-range offsets; load count; one-cycle read; clear |
| `tb_weight_buffer`   | channel → (group, lane) placement, load count, reload                           |
| `tb_line_buffer`     | writer rule, row count, row → bank mapping, parallel reads, read enable (5-line build) |
| `tb_multiport_sel`   | bank selection on all three ports, including all ports on one bank              |
| `tb_deform_m2s`      | every window against a reference, using models of its neighbours; row waits; 3-cycle rate |
| `tb_dw_conv3x3`      | sums including −128 operands, backpressure, last flag, 2-cycle latency          |
| `tb_dcn_engine`      | end to end on a 16×16×32 build (N = 7, 15 lines); five layers, one of them with every offset 1.0; mechanism counts |
| `tb_dcn_engine_full` | end to end at the default parameters: a 64×64×256 layer, a full-rate 64×64×16 layer, and a 64×64×256 layer with every offset 1.0 (an ordinary depthwise 3×3 convolution) |

The end-to-end tests derive their reference results from the formula above,
using real arithmetic for the offset rounding. They drive the streams with
random gaps and apply random backpressure. They also count result
backpressure, a full line buffer, the sampler waiting for rows, exact-half
rounding, clamping at both ends, `d = 0`, zero padding, channel-group
changes and `done`, and fail if any of these never occurs. All testbenches
pass. A deliberately broken copy of each module makes its testbench fail.

To simulate with Verilator 5 (from the folder that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl rtl/dcn_pkg.sv rtl/dcn_fifo.sv \
  rtl/offset_buffer.sv rtl/weight_buffer.sv rtl/line_buffer.sv rtl/multiport_sel.sv \
  rtl/deform_m2s.sv rtl/dw_conv3x3.sv rtl/dcn_engine.sv tb/tb_dcn_engine.sv \
  --top-module tb_dcn_engine -o sim
./obj_dir/sim
```

Use `tb_dcn_engine_full` for the full-size run, which finishes in about a
second. Use the matching `tb_<module>.sv` for a single block. Only the
package and the modules that block instantiates need to be listed.

## How far to trust it

The engine's arithmetic, addressing, padding and flow control are checked
against an independent reference on random data, at the full default size
and at a reduced one. It has not been built for an FPGA or timed against
a clock, and the 15 single-read banks with a combinational 15-way port
multiplexer are untested for timing closure. The numbers it produces
follow the restricted convolution defined above. They match a trained
network only if that network was trained with the same rounding, bound
and square shape.
