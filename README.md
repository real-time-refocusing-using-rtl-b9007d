# Switch-driven FIR refocusing for a standard plenoptic camera

A standard plenoptic camera puts a micro lens array one focal length in front
of the sensor. Behind every micro lens the sensor records a small micro image
of M x M pixels. Each pixel in a micro image looks at the same scene point
from a different direction. An ordinary photograph focused on some chosen
plane is obtained after capture by adding up, for each output pixel, one
pixel from each of M neighbouring micro images. Which pixels go together
depends only on the synthetic focus `a`.

The design in this repository computes that sum in streaming hardware, one
pixel per clock. Its central idea is to treat refocusing as an FIR filter
whose taps are switched on and off pixel by pixel:

* each incoming pixel is scaled by 1/M (a 256-entry table, not a multiplier);
* the scaled pixel is broadcast to a row of adder/register cells;
* a switch in front of each cell decides whether the pixel joins the sum that
  is passing through that cell;
* the switch pattern repeats every M pixels and is read from a small table,
  the *switch matrix*. Changing `a` means loading a different matrix; the
  datapath stays the same.

Refocusing is separable. One bank of these 1-D processors therefore works on
the rows, and a second bank works on the columns of the row results. The
output has as many pixels as the input: where a plain integral projection
would return one pixel per micro image, the filter repeats or interleaves its
sums, so the image is upsampled by M.

All RTL is SystemVerilog (IEEE 1800-2017) in `rtl/`. Self-checking
testbenches are in `tb/`.

## 1. The arithmetic

Number the pixels of one sensor row `x[0], x[1], ...`. Pixel `k` belongs to
micro image `j = k / M` and sits at position `u = k mod M` inside it.
Refocusing one row to plane `a` gives

    E'[k] = sum over the M pixels x[k - d] selected for position k of round(x[k - d] / M)

Two settings show the range of behaviour:

* `a = 1/M`: the M most recent pixels, `x[k] + x[k-1] + ... + x[k-M+1]`,
  which is a moving sum. Every output pixel differs from its neighbour.
* `a = 0`: all M pixels of one micro image. The sum is complete at the last
  pixel of the micro image and is then **held** for M outputs. This is
  nearest-neighbour upsampling.

Larger `a` picks pixels further apart, one from each of M successive micro
images. This widens the filter. For M = 3 and `a = 2/3` the filter is five
cells long, and the pixels `x[k]`, `x[k-2]` and `x[k-4]` are summed when
`k` is the first pixel of a micro image.

Worked example, M = 3, one row of nine pixels:

| k       | 0 | 1  | 2  | 3  | 4  | 5  | 6   | 7  | 8   |
|---------|---|----|----|----|----|----|-----|----|-----|
| x[k]    | 7 | 26 | 63 | 30 | 17 | 54 | 121 | 48 | 231 |
| x[k]/3, rounded | 2 | 9 | 21 | 10 | 6 | 18 | 40 | 16 | 77 |

With `a = 0/3` micro image 1 (k = 3..5) gives 10 + 6 + 18 = **34**. With
`a = 2/3` the output at k = 6 is the green ray of micro image 0, the yellow
ray of micro image 1 and the blue ray of micro image 2:
21 + 6 + 40 = **67**. `processor_1d_tb` checks both numbers.

The quotient table rounds to nearest, halves up: `entry(v) = (v + M/2) / M`
in integer arithmetic. Sums are at most 8 bits wide whenever at most M
switches are closed. This holds for every matrix in this document. Any excess
saturates at 255 and raises `clip`.

## 2. The switch-driven filter (`switch_fir`, `switch_lut`)

The filter has `TAPS` cells, numbered `w = 0 .. TAPS-1`. The default is
`TAPS = 5`. On every valid pixel `x` (already scaled):

    chain[0] <= s[0] ? x : 0
    chain[w] <= chain[w-1] + (s[w] ? x : 0)          (w = 1 .. TAPS-1)
    if (we)  out <= min(chain[TAPS-1], 255)           else out keeps its value

A pixel that enters cell `w` reaches the end of the chain `TAPS-1-w` pixels
later. Closing switch `w` on pixel n therefore adds `x[n]` into the sum that
leaves the chain at pixel `n + TAPS-1-w`. Once all M contributions are in, the
write-enable switch `we` copies the finished sum to the output register. For
`a = 0` the switch stays open on the other M-1 pixels, and the register holds
the value in between.

The switch bits for a pixel come from row `p` of the switch matrix. Row `p`
is used for the pixel at position `p` of its micro image: rows are taken in
turn, and row 0 is used again on the first pixel of each line. A LUT row is
`{we, s[TAPS-1], ..., s[0]}`. Matrices with 3 columns sit on the last three
cells, so all settings have the same latency. The matrices for M = 3 are in
`refocus_pkg`:

| row p | a = 0/3 (s0..s4, we) | a = 1/3 | a = 2/3 |
|-------|----------------------|---------|---------|
| 0 | 0 0 1 0 0, we 0 | 0 0 1 1 1, we 1 | 0 0 1 1 1, we 1 |
| 1 | 0 0 0 1 0, we 0 | 0 0 1 1 1, we 1 | 0 1 1 1 0, we 1 |
| 2 | 0 0 0 0 1, we 1 | 0 0 1 1 1, we 1 | 1 1 1 0 0, we 1 |

Here is how to read the `a = 2/3` column. Take the sum that leaves the chain
at a pixel in position 0. It contains:

* that pixel, through cell 4, row 0;
* the pixel two earlier, in position 1, through cell 2, row 1;
* the pixel four earlier, in position 2, through cell 0, row 2.

At positions 1 and 2 the same matrix gives three consecutive pixels. The
output thus alternates between the wide sum and a narrower one. This is the
interleaving that gives `a` values that are not whole numbers their higher
effective resolution.

Where this filter departs from a literal reading of the original
arrangement:

* **Single clock.** The original description shifts and adds on a doubled
  pixel clock. In the transposed chain above each register does exactly one
  add per pixel, so a single pixel clock gives the same sums. No PLL is
  needed.
* **Line restart.** The chain starts from zero, and the LUT from row 0, on
  the first pixel of every line. Lines therefore never mix. A line must start
  on a micro-image boundary; calibration and cropping guarantee this.
* **Write enable in the LUT.** The `we` pattern is stored as a seventh column
  of the matrix, not generated separately.
* **Reset.** After reset the LUT holds the `a = 1/M` matrix.
* **Switch matrices for other `a`.** Only the three M = 3 matrices above are
  given in closed form. Any other setting is a matter of writing a matrix
  through `cfg_we / cfg_row / cfg_data`, provided it fits in `TAPS` cells.
  Extrapolating the pattern, `a = a'/M` needs about `a'(M-1)+1` cells; this
  has not been checked for `a' > 2`.

## 3. The 2-D module array (`module_array_2d`)

```
 row l pixels ─► processor_1d (row) ─► l skew regs ─► demux ─┐
                                                   count ──┘  │  (count - l) mod K
                                 ┌────────────────────────────┘
 column c ◄── K-1-c skew regs ◄── processor_1d (column c) ◄── from every row
```

* **Input.** A frame of L rows and K columns enters as L parallel streams.
  Column 0 of every row arrives in the same clock, then one column per clock.
* **Row stage.** L identical `processor_1d` units produce E'.
* **Skew.** Row l is delayed by l clocks (`skew_delay`).
* **Counter.** `pixel_counter` restarts at 0 when the first pixel of row 0
  leaves its processor. It then counts modulo K, so it always names the
  column that row 0 is presenting.
* **Demultiplexers.** The demultiplexer of row l (`row_demux`) sends its
  pixel to column processor `(count - l) mod K`. As a result column processor
  c receives `E'[c, row 0]`, `E'[c, row 1]`, ... on consecutive clocks, with
  `first` set on row 0. This is a normal 1-D line, and the same processor
  refocuses it vertically.
* **De-skew.** Column c is delayed by K-1-c clocks, so each clock delivers
  one complete output row with all K columns side by side.

A single counter serves all rows. Consecutive frames must therefore either
follow each other directly (one frame every K clocks) or leave at least L
idle clocks between them. An assertion in `module_array_2d` reports two frames
meeting in one column processor. Rows and columns use the same switch matrix,
so the same `a` applies in both directions.

**Timing.** Each processor has three register stages: the table read, the
chain, and the output. Take column 0 of a frame at clock edge 0. Output row l
is then valid after edge `K + l + 4`, and the whole frame is out after edge
`K + L + 3`.

For the original benchmark size (K = L = 3201, 100 MHz) this array would
need 6405 clocks, 64 µs, from first pixel in to last pixel out. It would
accept a new frame every K clocks. The original analysis estimates
`2(1+M) + 2(K-1) + L-1` = 9624 clocks (96.2 µs) for the first frame and
6400 clocks for each further frame. The gap is the extra K-1 term and the M
clocks per pass in that estimate. Here the skew overlaps the two passes, and
each processor finishes a sum one clock after its last pixel.

## 4. Around the array: row buffers and the system

A camera or HDMI link delivers a frame as one serial raster stream, not as L
parallel rows. `refocus_top` closes this gap with two on-chip buffers per
colour channel:

* `row_buffer_in` writes the raster frame into one of two banks. When the
  bank is full, it replays the bank as L parallel rows, one column per clock.
* `row_buffer_out` collects the K-wide output rows and streams the frame out
  again in raster order.

Both use two banks. One frame is captured while the previous one is replayed.
Take the last input pixel of a frame at edge t. Pixel 0 of the refocused
frame then appears after edge `t + K + L + 7`, and the frame streams out in
L·K clocks.

The buffers turn the design into a drop-in filter for a serial video stream,
but they also limit it. With serial input a frame takes L·K clocks, whatever
the array could do. Real-time rates at full sensor size need a sensor or
memory that delivers rows in parallel.

`refocus_top` carries CHANNELS (default 3) identical pipelines in lock step,
one per colour channel. They share the configuration port.

Not included, because they are standard or vendor parts: the HDMI (TMDS)
receiver and transmitter, colour conversion, the off-chip frame memory and
its controller, and the PLL. Micro-image calibration and cropping is not
included either; it must happen before the data enters. `in_*` and `out_*`
of `refocus_top` are where these parts connect.

## 5. Parameters and sizes

| parameter | default | meaning |
|-----------|---------|---------|
| `PIX_W` (package) | 8 | bits per colour channel |
| `M` | 3 | micro image size; divisor of the quotient table, rows of the matrix |
| `TAPS` | 5 | filter cells; the largest M = 3 matrix (`a = 2/3`) needs 5 |
| `L`, `K` | 3, 3 | rows and columns processed in parallel (one frame) |
| `CHANNELS` | 3 | colour channels |

The defaults are the small 3 x 3 array used to explain the architecture. The
RTL is fully parameterised. Full parallelism for a real frame means `L` =
image height and `K` = image width, that is L + K processors and an L x K
demultiplexer network. Fit against the evaluated settings:

* A 3 x 3 array with M = 3 and `a` in {0/3, 1/3, 2/3} runs at the defaults.
* The 843 x 561, M = 3 captures need L = 561 and K = 843. Focus settings
  beyond 2/3 (for example 5/3) need more than 5 cells.
* The 3201 x 3201, M = 11 benchmark needs L = K = 3201, M = 11 and at least
  11 cells.
* The M = 5 captures shown with linear interpolation cannot be reproduced:
  only nearest-neighbour upsampling is built.
* The single `a = 1/5` filter runs with `M = 5`, as in `refocus_workload_tb`.

## 6. Module map

| file | role |
|------|------|
| `refocus_pkg.sv` | `pix_t` stream type, the M = 3 switch matrices |
| `stored_product_rom.sv` | 1/M quotient table, one-clock read |
| `switch_lut.sv` | switch matrix storage, row sequencing, write port |
| `switch_fir.sv` | broadcast, switches, adder/register chain, write-enable output |
| `processor_1d.sv` | table + LUT + filter: one row or column processor |
| `skew_delay.sv` | skew registers |
| `pixel_counter.sv` | column counter for the demultiplexers |
| `row_demux.sv` | per-row demultiplexer to the column processors |
| `module_array_2d.sv` | the 2-D array |
| `row_buffer_in.sv`, `row_buffer_out.sv` | serial/parallel frame buffers |
| `refocus_top.sv` | per-channel pipeline and configuration port |

All stream interfaces use `pix_t`: `{valid, first, data[7:0]}`. `first`
marks the first pixel of a line, meaning a row line or a column line
depending on the stage. At the top level it marks pixel 0 of a frame.
Reset `rst_n` is active low and asynchronous.

## 7. Simulating

Each testbench prints `TB_RESULT checks=N failures=F`. It also has a
watchdog. Example with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/refocus_pkg.sv tb/refocus_ref_pkg.sv rtl/*.sv tb/refocus_top_tb.sv \
  --top-module refocus_top_tb -o sim && ./obj_dir/sim
```

For the other benches, swap in the testbench name. Add
`tb/module_array_2d_harness.sv` for `module_array_2d_tb`, and
`tb/refocus_top_harness.sv` for `refocus_workload_tb`.

The reference model, `tb/refocus_ref_pkg.sv`, is written differently from
the RTL on purpose:

* it divides with real arithmetic;
* it evaluates the filter in direct form, summing `s[TAPS-1-d](row of pixel n-d) * x[n-d]` over delays d;
* it refocuses a frame as rows first, then columns, each processor keeping
  its own held output.

What the benches cover:

* `stored_product_rom_tb`: every table entry for M = 3, 5 and 11, plus the
  read latency.
* `switch_lut_tb`: the reset matrix, row order, holding while idle, restart
  on a first pixel, and rewriting.
* `switch_fir_tb`: the three matrices, 40 random matrices, saturation, line
  restart, and latency.
* `processor_1d_tb`: the worked example above. It also checks the moving
  sums 30 35 46 33 50 67 84 for the row 90 16 33 50 67 84 ... at `a = 1/3`,
  and the held sums 46 and 67 at `a = 0/3`.
* `module_array_2d_tb`: 3 x 3 and 6 x 9 arrays, frames back to back and with
  gaps, matrix changes, and output timing to the clock.
* `row_buffer_in_tb`, `row_buffer_out_tb`: ordering, bank alternation, and
  timing.
* `refocus_top_tb`: the whole pipeline at the default parameters over 24
  frames and four focus settings. It counts matrix changes,
  nearest-neighbour holds, open switches, back-to-back and gapped frames, and
  use of both buffer banks, and it checks the latency of every frame.
* `refocus_workload_tb`: the whole pipeline at 12 x 18 (M = 3, three
  channels, including saturation), 10 x 10 (M = 5) and 22 x 22 (M = 11,
  11 cells).
* `refocus_row_workload_tb`: whole lines at the full evaluated widths and
  heights, through single processors. It runs 843 and 561 pixels at M = 3,
  1405 and 935 pixels at M = 5, and 3201 pixels at M = 11. It also checks
  the first-pixel latency and one output per clock. A fully parallel array
  at those sizes would need L x K demultiplexer outputs (0.47 to 10
  million) and is not simulated.

## 8. Departures from the original design, in one list

* One pixel clock drives everything. The original filter ran its chain on
  a doubled clock. The sums are the same, and the latency is given in
  section 3.
* The processor's three register stages and the `K + L + 3` array latency
  belong to this RTL. They differ from the original step count (section 3).
* The write-enable column is part of the LUT. The chain and the row counter
  restart on each line start.
* Sums saturate at 255 and raise `clip`. The original design avoided
  overflow by assuming underexposed input.
* The quotient table rounds to nearest. This matches every scaled value the
  original shows.
* Only the row-then-column result leaves the design. The horizontally
  refocused intermediate image, which the original displays for inspection,
  has no output port.
* Linear interpolation of micro images and switch matrices for `a > 2/3` are
  not included.
* The HDMI link, colour conversion, frame memory, PLL and calibration are
  not included.
* The row buffers follow the original test set-up: a serial stream is
  turned into parallel rows and back. Their double-bank organisation is this
  design's choice.

## 9. Limits

* Timing closure and FPGA resources have not been evaluated. Long broadcast
  wires in wide filters may need extra pipeline registers on the broadcast
  net; this makes the array fully systolic.
* Only nearest-neighbour upsampling is built. Linear interpolation of micro
  images before the filter is not part of this RTL.
* Matrices for `a` other than 0/3, 1/3 and 2/3 must be supplied by the user.
  The tests use only those three, the all-closed `a = 1/M`, and the
  nearest-neighbour `a = 0/M` for M = 5 and 11.
