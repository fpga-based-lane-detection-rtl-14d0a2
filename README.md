# Streaming lane detector with light and climate control over I2C

A camera frame enters as an AXI4-Stream of 24-bit RGB pixels, one per clock. At the end of each
frame the chip reports how many lanes it sees on the road, which of them the vehicle is in, and
the columns of that lane's left and right markings. A lane-keeping or cruise-control unit can
steer from these numbers. The chip does not store a frame. Each filter keeps only two image rows,
so a 416 × 416 frame is decided about 850 cycles after its last pixel arrives.

Two small supervisory units sit beside the vision pipeline:

- A **light control unit** reads an I2C ambient-light sensor and switches the headlights on when
  it gets dark.
- A **temperature control unit** reads an I2C temperature sensor and drives an air conditioner
  towards 25 °C.

The RTL follows a published FPGA design: a five-stage Sobel lane detector with I2C light and
temperature units, run at 150 MHz on 416 × 416 frames. That source describes some parts only by
what they do. Where it is silent, this implementation makes its own choices, and the section
"Where this RTL departs from or extends the source" lists each one.

## Data path

```
RGB AXI4-Stream ─► rgb2gray ─► avg_filter ─► [avr_sobel FIFO, 8 bit] ─► sobel_filter ─► [decision_sobel FIFO, 1 bit] ─► lane_decision ─► lane outputs
                   (1 cycle)   (W+6 cycles)                             (W+6, + threshold)                           (per frame)
```

| Stage | Module | What it does |
|---|---|---|
| gray conversion | `rgb2gray` | gray = (77·R + 150·G + 29·B) >> 8. These are the weights 0.2989/0.587/0.114 in 8-bit fixed point, summing to 256. R is `tdata[23:16]` and B is `tdata[7:0]`. The result is registered, so latency is 1 cycle. |
| noise filter | `avg_filter` | 3 × 3 mean. The sum of the nine pixels is multiplied by 7282 and shifted right by 16. For every possible sum (0…2295) this equals integer division by 9. |
| FIFO | `sync_fifo` | 512 deep, with the wr/rd/ack/full/empty/data_count signal set. `rd_data` and `rd_ack` come one cycle after `rd_en`. `almost_full` (8 free places left) is the back-pressure signal for the stage that writes the FIFO. |
| edge filter | `sobel_filter` + `sobel_threshold` | Gx and Gy use the standard Sobel kernels. A pixel is an edge when Gx² + Gy² > 22500 (no square root). Each pixel leaves as one bit. |
| decision | `lane_decision` | Lane counting on the binary image. See below. |

`lane_detector` is this chain by itself. `ldv_top` adds the two control units.

### The sliding window (`window3x3`)

Both filters share `window3x3`, and it holds most of the timing subtlety.

Two single-port-style line buffers, each W pixels long, delay the stream by one row and by two
rows. Each arriving pixel, together with the two buffered pixels above it, forms a three-pixel
column, and that column shifts into a 3 × 3 register window. The window centred on pixel (r, c) is
complete only once pixel (r+1, c+1) has arrived. So the output stream trails the input by W+1
pixels, and every input pixel gets exactly one window: stride 1, with output the same size as the
input.

Missing rows or columns at the frame edge are filled by **replicating** the centre row or column.
After the last pixel of a frame, the window injects W+1 padding pixels of its own to drain the
final windows. It accepts no new input while it does this, which costs W+1 cycles of stall per
frame at each filter.

The pipeline registers are:

1. input register
2. line-buffer read
3. column shift
4. border selection
5. the filter's own compute register

The first output therefore leaves **W+6 cycles** after the first input pixel, which is 422 cycles
at W = 416. This matches the latency quoted for both filters. The unit testbenches measure it.

Flow control is by credit, not a stall chain. The window takes a pixel only when the downstream
FIFO reports room for everything still in flight. Once a pixel is inside, it never stops.

- The average filter pulls from `rgb2gray` through a valid/ready handshake.
- The Sobel filter pulls from the 8-bit FIFO by asserting `rd_en`.
- `tready` on the AXI input drops only when the average filter is injecting padding, or when the
  average→Sobel FIFO is almost full.

### Frame timing

One frame of 416 × 416 pixels takes 173 056 input cycles. On top of that come 417 padding cycles in
each filter and the W+6 fill latencies. At 150 MHz the full-size simulation measures **173 905
cycles (1.159 ms)** from the first pixel to the frame's decision. The published figure is one
decision per 1.17 ms.

## Lane decision

`lane_decision` reads the 1-bit image in raster order and keeps a row and column counter. Along one
row:

- A run of edge pixels is a marking. Two consecutive edge pixels with **at least `GAP_TH` = 40**
  non-edge pixels between them enclose a lane.
- Narrower gaps count as the inside of a marking. This absorbs the double edge that Sobel produces
  on both sides of a painted line.
- The vehicle is assumed to sit at column `CENTER_COL` = W/2, which is the camera on the car's axis.
- The lane containing that column gives `current_lane`, its 1-based index from the left.
- The two edge pixels that enclose that lane give `current_lane_left_boundary` and
  `current_lane_right_boundary`.
- `number_of_lanes` counts all lanes in the row and saturates at 15, because it is a 4-bit output.

A frame yields many rows, but the outputs are a single set. This design reports the **lowest row
of the frame that contains at least one lane**, because that row is nearest to the vehicle.

- If no row has a lane, all outputs are 0.
- `decision_out_valid` pulses once per frame, two cycles after the frame's last bit leaves the FIFO.
- If the centre lies on a marking or outside every lane, `current_lane` and the boundaries are 0.

The field widths come from the published simulation waveform: 4-bit counts and 10-bit columns.
The 40-pixel gap threshold comes from the same source.

Capacity follows from the gap rule. With one-pixel edges, a 416-column row holds at most
⌊414 / 42⌋ = 9 lanes of 40 columns or more. The published evaluation includes synthetic roads with
13 lanes. Those roads need `GAP_TH` ≤ 29 (13·29 + 14·2 = 405 ≤ 416), which is a parameter change. `tb_lane_many` runs such a road, with 14 markings 31 columns apart, through two pipelines. At the default gap it finds 0 lanes. With `GAP_TH` = 20 it finds all 13.

## Light control unit

`light_control_unit` chains three blocks:

- `clk_divider`: 150 MHz / 376 gives 398.9 kHz.
- `i2c_sensor_master`
- `light_comparator`

The I2C master uses four controller ticks per SCL bit, so SCL runs at 99.7 kHz (standard mode).
After reset, and while `LS_ON` is high, it:

1. writes the sensor's configuration register once (register 0x01 ← 0xC410, device address 0x44),
2. reads the 16-bit result register 0x00 every 40 000 ticks (about 100 ms),
3. reads at once when the sensor pulls its active-low `INT`.

The master releases SDA and SCL as open-drain lines. `SDA_oe` and `SCL_oe` pull low, and `SDA_i`
reads the bus. There is no clock stretching. A missing acknowledge raises `ack_error`, and that
reading is dropped.

`valid` crosses from the divided clock to the system clock through a two-flop synchroniser with
edge detection (`slow_valid_sync`). The comparator then:

- drops the four low bits, so `DAC_out` is the brightness at 12-bit scale;
- raises `ON` (and lowers `OFF`) when that value is below `THRESHOLD` = 256.

The outputs change three system clocks after the synchronised valid edge.

The address, register map and threshold are this design's defaults. They fit a common
ambient-light sensor and can all be changed through parameters.

## Temperature control unit

`tcu_wrapper` reuses the same divider and I2C master with no configuration write. It reads
register 0x00 of a sensor at address 0x48.

`temp_calc` forms Temperature = sensor_out × resolution:

- `sensor_out` is the 12-bit two's-complement field in the upper bits of the word.
- The resolution is 0.0625 °C, held as the Q0.8 value 16.
- The result is a signed Q12.8 temperature, so 25.0 °C reads as 6400.

`temp_controller` compares the temperature with 25 °C:

| Output | Meaning |
|---|---|
| `on_off` | 1 when \|T − 25 °C\| exceeds the 1.0 °C noise band |
| `increase_decrease_temp` | 1 = heat (the cabin is colder than 25 °C), 0 = cool |
| `Control_unit_out` | 12-bit DAC code proportional to the deviation: \|T − 25\| in 1/256 °C, saturating at 4095 (16 °C) |
| `data_valid` | one-cycle pulse per new reading |

## Top level (`ldv_top`)

The top level has one clock (150 MHz) and one active-low asynchronous reset.

| Ports | Purpose |
|---|---|
| `s_axi_video_*` | AXI4-Stream RGB input |
| `number_of_lanes`, `current_lane`, `current_lane_left/right_boundary`, `decision_out_valid` | lane outputs to the lane-keeping unit |
| `*_fifo_data_count`, `*_fifo_full` | FIFO status, for observation |
| `ls_*`, `light_*` | light sensor bus and headlight/DAC outputs |
| `ts_*`, `ac_*` | temperature sensor bus and air-conditioner outputs |

The I2C pads, the sensors, the DACs and the lane-keeping controller are outside the chip.

Parameters and their defaults:

| Parameter | Default | Meaning |
|---|---|---|
| `W`, `H` | 416, 416 | frame size |
| `FIFO_DEPTH` | 512 | depth of both FIFOs |
| `CLK_DIV` | 376 | I2C controller clock divider |
| `POLL_TICKS` | 40000 | sensor poll period, in controller ticks |

Shared constants are in `lane_pkg`: the gray weights, the Sobel threshold 22500, the gap threshold
40, and the output field widths.

## Where this RTL departs from or extends the source

- **Non-maximum suppression is not built.** The source mentions such a unit after the Sobel filter.
  But it does not say what the unit computes, and its data path writes the thresholded one-bit
  pixels straight into the decision FIFO. That leaves no gradient direction to suppress along.
- The following are this design's own choices, because the source does not give them:
  - edge replication at the borders;
  - W+1 padding pixels per frame;
  - the FIFO depth and almost-full margin;
  - the rule for which row is reported;
  - the centre column as the vehicle position;
  - the lane count saturating at 15;
  - the I2C sensor addresses, registers, configuration word, poll period and interrupt use;
  - the light threshold 256;
  - the 1 °C noise band and the meaning of the DAC code;
  - the polarity of `increase_decrease_temp`.
- Fixed-point rounding: the gray weights are truncated to 8 bits, and the mean filter output is
  truncated. A gray value can differ by one step from a floating-point computation.
- The published resource figures (about 11.5 k LUTs, 25 k flip-flops, 14 DSPs) are not reproduced
  and are not comparable. Here the line buffers and FIFOs are memory arrays, which a synthesis tool
  maps to block RAM.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares against reference models
written independently in `tb_ref_pkg`: gray conversion, the bordered mean and Sobel, per-row lane
counting, and synthetic road images with adjustable marking count, spacing, width, slope and blank
rows. Stimulus uses `$urandom`, including random valid gaps. Filter latencies are checked in
cycles.

`i2c_slave_model` is a behavioural I2C sensor. It oversamples the bus, acknowledges its address,
stores register writes and returns a programmable 16-bit value.

| Testbench | Runs |
|---|---|
| `tb_ldv_top` | Small frames (200 × 10) with fast I2C parameters. It counts input stalls, multi-lane frames, frames with the vehicle inside a lane, light on/off, an interrupt-triggered read, and heating, cooling and AC off. Each must happen at least once. |
| `tb_lane_many` | The 13-lane road at full width 416, at the default gap and at a gap of 20. |
| `tb_ldv_full` | `ldv_top` at its defaults: one 416 × 416 road frame at 150 MHz with real I2C timing. It checks the decision, the 1.17 ms bound, and one reading from each sensor. It takes about 3–4 minutes in Verilator. |

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/lane_pkg.sv tb/tb_ref_pkg.sv tb/tb_ldv_top.sv --top-module tb_ldv_top -o sim
obj_dir/sim +verilator+rand+reset+2
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`, and has a watchdog that
counts a failure if the test hangs.
