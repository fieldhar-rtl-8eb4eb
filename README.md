# FieldHAR RTL: sensor-to-label human activity recognition in one clocked design

This design recognises human activities (ten kitchen activities) directly in
hardware. It reads four different sensors over their own buses at each
sensor's own rate, aligns their samples in a 20-step sliding window, and
classifies each window with a small branched convolutional network in 11-bit
fixed point. One clock domain, no processor and no vendor IP are involved. A
host sees only a UART: it sends `S` to start, and it receives one activity ID
per window, or the raw window rows if it asks for them.

The network fuses its inputs at the feature level. Every sensor gets its own
small 1-D CNN branch: three convolutions followed by a global max over time.
The branch outputs are concatenated into 16 features, and two dense layers
pick the class. A single convolution engine and a single dense engine run the
14 layer steps one after the other. That takes 13,359 cycles per window,
0.134 ms at 100 MHz. The window it works on needs 168 ms to fill.

The SystemVerilog follows the block structure of the FieldHAR framework, an FPGA design published with block diagrams and resource figures but
without its trained model. Where the publication gives no detail, the choices
are this design's own. They are listed in
[Departures and open points](#departures-and-open-points).

## Block structure

```
 sensors            sensor interfaces (x4)               top controller                    inference block
 ───────            ─────────────────────                ──────────────                    ───────────────
 IMU  ──SPI──► spi_master ◄─► sensor_wr_ctrl ─► FIFO ─┐
 ToF  ──I2C──► i2c_master ◄─► sensor_wr_ctrl ─► FIFO ─┤  data_stream_controller ─► sensor_data_ram ─► conv_layer ─┐
 Opt. ──I2C──► i2c_master ◄─► sensor_wr_ctrl ─► FIFO ─┤        ▲      │ win_ready     (20 x 20)     dense_layer ─┤
 Mag. ──SPI──► spi_master ◄─► sensor_wr_ctrl ─► FIFO ─┘        │      ▼                              weight_rom   │
                    ▲ start (per sensor rate)        sensor_controller  interface_controller ─► start  feature_ram  │
                    └────────────────────────────────── frame_tick        │ ▲ lock, label ◄──────────────────────┘
                                                                           ▼ │
                                                                          uart ◄──► host
```

| File | Role |
|---|---|
| `har_pkg.sv` | All shared constants and types: sensor table, register programs, network shape, memory maps, layer descriptors, placeholder weights, UART command codes |
| `i2c_master.sv`, `spi_master.sv` | Peripheral drivers: register read and write transactions of any length |
| `sensor_wr_ctrl.sv` | Sensor driver: a transaction state machine and a register state machine that runs the sensor's register program |
| `sync_fifo.sv` | Sample FIFO, 20 samples deep |
| `sensor_interface.sv` | One lane: bus master, sensor driver and FIFO |
| `sensor_controller.sv` | Start pulses at 119/50/20/20 Hz, all in phase, plus a frame tick at the fastest rate |
| `data_stream_controller.sv` | Merges the FIFOs into one normalised row per frame and keeps the 20-row ring |
| `sensor_data_ram.sv` | 400 × 11-bit window memory, one write port and two read ports |
| `interface_controller.sv`, `uart.sv` | Host commands, inference trigger and RAM lock, result and data output |
| `inference_block.sv` | Inference state machine, architecture controller, both engines and their memories |
| `inference_fsm.sv`, `nn_arch_controller.sv` | Walk the 14 layer steps; give each step's layer descriptor |
| `conv_layer.sv`, `dense_layer.sv` | The two compute engines |
| `weight_rom.sv`, `feature_ram.sv` | 1040 weights; activations |
| `fieldhar_top.sv` | Connects everything |

## Sensor lanes

Each lane has three levels.

1. **Bus master.** It executes one register transaction from a command
   {write, register, byte count}. Bytes to write are requested one at a time,
   and read bytes come out one at a time.
   - The I2C master runs at 400 kHz. It uses four quarter-bit phases per
     symbol and a repeated START for reads. Its pins are open drain
     (`*_low` pulls a line low).
   - The SPI master runs mode 3 at 5 MHz. Its first byte is
     `{read, address[6:0]}`.
2. **Sensor driver** (`sensor_wr_ctrl`). After reset it writes the sensor's
   configuration registers. On each `start` it polls the status register
   until the data-ready bits are set (at most 8 reads). It then reads one or
   two data bursts, assembles the channels (16 bits each, little- or
   big-endian per sensor) and pushes one sample into the FIFO.
   - A `start` that arrives while a read is still running counts in
     `miss_cnt`.
   - A sample that finds the FIFO full is dropped and counts in `drop_cnt`.
3. **FIFO.** It holds 20 whole samples (one window's worth), first-word
   fall-through.

The register programs live in `har_pkg::sensor_prog()`. Adding a sensor means
adding an entry there and a channel count in `sensor_ch()`.

| Lane | Sensor | Bus | Channels | Rate | Status reg / mask | Data bursts |
|---|---|---|---|---|---|---|
| 0 | LSM9DS1 accel + gyro | SPI | 6 | 119 Hz | 0x17 / 0x03 | 0x18 ×6, 0x28 ×6 |
| 1 | VL53L0X time of flight | I2C 0x29 | 1 | 50 Hz | 0x13 / 0x07 | 0x1E ×2, big-endian |
| 2 | AS7431 optical spectrum | I2C 0x39 | 10 | 20 Hz | 0xA3 / 0x40 | 0x95 ×20 |
| 3 | LSM9DS1 magnetometer | SPI | 3 | 20 Hz | 0x27 / 0x08 | 0x68 ×6 |

The register addresses and configuration values are the usual ones for these
parts. They are not taken from the publication, and the start-up sequences of
the ToF and spectral sensors are cut down to one or two writes. Before use
with real chips, check them against the data sheets.

## Keeping four sample rates in one window

This part is the least obvious, because the sensors do not run at the same
rate.

**Common time base.** `sensor_controller` keeps one counter per sensor with
period `CLK_HZ / rate`. It clears all the counters in the cycle in which
acquisition starts, so every sensor's first read and the first frame tick
fall in the same cycle, and their phases stay fixed after that. The frame
tick runs at the fastest rate (119 Hz, every 840,336 cycles).

**One row per frame.** On every frame tick `data_stream_controller` empties
every FIFO and keeps the newest sample of each sensor. A sensor without a new
sample keeps its previous value, so the slow sensors are resampled by zero-order
hold. It then writes one row of 20 channels into the window RAM, one word
per cycle. Each value is normalised to signed Q1.10 with a per-sensor offset
and arithmetic shift:
`sat11((raw - offset) >>> shift)`.

| Sensor | raw format | offset | shift |
|---|---|---|---|
| IMU, magnetometer | signed 16 bit | 0 | 5 |
| ToF range | unsigned mm | 16384 | 4 |
| Spectral counts | unsigned | 32768 | 5 |

These constants are placeholders that map the useful range of each sensor onto ±1. A
trained model comes with its own scaling, and these constants must be
replaced to match it.

**Ring and window.** The RAM holds 20 rows (row `r`, channel `j` at address
`20·r + j`; channels in lane order: 0–5 IMU, 6 ToF, 7–16 spectral, 17–19
magnetometer). When 20 rows are present, `win_ready` pulses every `STEP`
rows together with `win_row0`, the oldest row. The default `STEP = 20` gives
non-overlapping windows. A smaller `STEP` gives a sliding window with
overlap, and no other change is needed. The inference engine reads row
`(win_row0 + t) mod 20` for time step `t`.

**Lock and stall.** The next row would overwrite the oldest row of the window
being classified, so the interface controller raises `lock` from inference
start to inference done. A frame tick that comes during the lock still
happens, but its row write waits (`stall_cnt`). The FIFOs keep buffering in
the meantime, so no sensor sample is lost. If a second tick arrives while a
row is still waiting, it is counted in `lost_frames`. At the real rates this
cannot happen: inference takes 13k cycles and a frame lasts 840k. It happens
only in the speeded-up simulation.

## The network

| Step | Layer | Input | Output |
|---|---|---|---|
| 0–11 | conv K=3, F=4, valid, stride 1, ReLU; branch b = step/3 | 20×C_b → 18×4 → 16×4 | 14×4, then global max → 4 |
| 12 | dense 16 → 16, ReLU | concatenated features | hidden |
| 13 | dense 16 → 10, arg-max | hidden | class index |

Here C_b = 6, 1, 10, 3. No layer has a bias. Class `i` is reported as
activity ID `i + 1`.

**Why these sizes.** The publication states the Set D sensors, three conv
layers per branch with global max pooling, two dense layers and ten classes.
It does not print the filter count or the kernel size. Four filters per
branch fit its own features count (28 features for seven sensors). A kernel
of 3 and a 16-unit hidden layer then give exactly 1040 weights. That matches
its Set D parameter count, and 1040 × 11 bit = 11,440 bits matches its
serial 11-bit inference memory. The text also says that a branch outputs
1×8 features, which contradicts the features count; the 4-per-branch reading
is used here.

**Fixed point.** Activations and weights are signed 11-bit Q1.10. Products
are summed exactly in a 32-bit accumulator. The Q stage shifts right
arithmetically by 10 (`desc.shift`), applies ReLU (not on the last layer) and
saturates to 11 bits. The arg-max compares the raw accumulators of the last
layer; on a tie the lower index wins.

**Weights.** `weight_rom` reads `WEIGHT_FILE` with `$readmemh` (1040 hex
words) when a file is given. Without one it fills itself with a fixed
pseudo-random pattern, `har_pkg::weight_init`. The trained weights were never
published, so the labels produced by default have no meaning. Everything
else (data flow, timing, arithmetic) is exercised all the same. Layout:

- conv layer: `w_base + (c·K + k)·F + f`;
- dense layer: `w_base + o·nin + i`.

Branches are stored in order (conv0, conv1, conv2 of each), then dense 1 at
624 and dense 2 at 880.

**Feature RAM map** (192 words):

| Words | Contents |
|---|---|
| 0–71 | conv0 output |
| 72–143 | conv1 output |
| 144–159 | concatenated pooled features (branch b at 144 + 4b) |
| 160–175 | hidden layer |
| 176–185 | output layer |

Conv2 reads 72.. and writes only its pooled maxima, so the concatenation
costs nothing.

## The engines

**Convolution engine.** The K taps and the F filters are computed in
parallel (12 multipliers). Input channels and time steps are walked one
after the other, so the time for a layer grows linearly with its input
channels. For each output step `t` and input channel `c`:

1. **Load.** The weight read machine fetches the channel's 12 weights, one
   per cycle from the single-port ROM. Meanwhile the feature read machine
   fetches `x[t..t+2][c]`, from the window RAM for the first layer or from
   the feature RAM for the others.
2. **MAC.** Adds the 12 products into 4 accumulators.

After the last channel:

- **Q** requantises into a register.
- A multiplexer (Maxpool_En) sends the result either straight to the
  shift-out stage S or through the comparators M. M does kernel max pooling
  (window 3, stride 3) or global max pooling over all steps.
- S writes the 4 results to the feature RAM, one per cycle, at
  `dst + C·4 + f`. C counts the results written.

An output step costs `cin·14 + 3` cycles, or `cin·14 + 2 + F` when it
writes. A layer pass costs the sum of its steps plus 3.

**Dense engine.** It works through the inputs in groups of 8 (8
multipliers). For each group it loads 8 weights and 8 inputs in 9 cycles,
then accumulates them in one cycle. Inputs past `nin` count as zero. Each
output costs `ceil(nin/8)·10 + 1` cycles, and a pass costs that sum plus 3.

**Schedule and latency.** `inference_fsm` issues the 14 steps in order.
`nn_arch_controller` turns the step number into a layer descriptor (source,
sizes, addresses, pooling, shift). At most one engine is active, and the
active engine owns the ROM and the feature RAM.

| Steps | Cycles |
|---|---|
| conv0 of the four branches | 1623 + 363 + 2631 + 867 |
| conv1 (each branch) | 995 |
| conv2 + global max (each branch) | 832 |
| dense 16→16 / 16→10 | 339 / 213 |
| step hand-over | 15 |
| **total** | **13,359 (0.134 ms at 100 MHz)** |

The published serial design needs 0.54 ms, so this one is well inside that
figure. The 20 multipliers (12 + 8) match the published count for the serial
design: 20 at 9 bit, and 40 at 11 bit, where two 9×9 FPGA multipliers make
one 11-bit product.

## Host interface

UART 8N1 at 115,200 baud (`CLKS_PER_BIT = 868`).

| Byte | Command |
|---|---|
| `S` (0x53) | start acquisition (clears and aligns the sampling counters) |
| `E` (0x45) | stop acquisition |
| `R` (0x52) | result mode (default): one byte, activity ID 1–10, per window |
| `D` (0x44) | data mode: every newly written row is sent as 20 words, each sign-extended to 16 bits, low byte first |

In data mode a row takes 40 bytes (3.5 ms), far less than a frame. A row that
arrives while the previous one is still being sent is skipped and counted
(`skipped_rows`). Labels are always available on `label`/`label_valid`.

## Departures and open points

- **Trained model missing.** The weights are placeholders (see above), and
  so are the normalisation constants. The class output is only meaningful
  after loading a trained, quantised 1040-word model with the layout above
  and adapting `norm_offset`/`norm_shift`.
- **Network shape inferred.** F = 4 and K = 3 are derived from the
  published parameter and memory counts, not stated. The published text
  itself contains the 1×8 versus 4-features conflict.
- **Feature fusion only.** The framework is described as also supporting a
  data-fusion network (all channels in one branch). That network appears
  only as a baseline and is not built here.
- **Serial schedule only.** The parallel schedule (all branches at once,
  0.25 ms) is an alternative in the publication and is not built.
- **9-bit variant.** Only the 11-bit precision is built. `DW` is a package
  constant; 9-bit weights are representable as they are.
- **Other sensor sets.** Seven, six or five sensors (with the 768-pixel
  thermal camera) do not fit the four lanes, 20 channels and four branches.
  A three-sensor set would need edits to `har_pkg`.
- **Resampling, normalisation, lock, command codes, bus speeds, register
  programs** are this design's choices. The publication states only that
  the rates are merged into one RAM, that each sensor is normalised to ±1,
  and that the UART takes start/stop commands and returns results or data.
- **Latency.** 13,359 cycles here against the published 0.54 ms. The source
  of the published figure's larger overhead is not described.
- **Idle outputs.** Each lane carries both an I2C and an SPI pin set. The
  unused set is tied idle, which gives ten constant outputs on the top and
  some unused inputs.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. Shared
testbench parts:

- `har_ref_pkg`: an independent integer model of the whole network;
- `i2c_sensor_model`, `spi_sensor_model`: register-file sensors whose data
  bytes follow a formula and which answer "not ready" on every fourth status
  read;
- `sensor_board_model`: the four sensors wired to the top's pins;
- `uart_host_model`: the host end of the UART.

Build and run one, for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fieldhar_top \
  rtl/har_pkg.sv $(ls rtl/*.sv | grep -v har_pkg) \
  tb/har_ref_pkg.sv tb/i2c_sensor_model.sv tb/spi_sensor_model.sv \
  tb/sensor_board_model.sv tb/uart_host_model.sv tb/tb_fieldhar_top.sv -Mdir obj -o sim
./obj/sim
```

- **`tb_fieldhar_top`** runs the whole system with shortened time
  constants: sampling periods ÷500, 8 cycles per UART bit.
  - Each label is compared with the reference model on the RAM image that
    the inference actually read.
  - The UART result bytes and a streamed row are checked.
  - The test fails if any of these never happened: polling retries,
    zero-order hold, windows, inferences, RAM stalls, lost frames, skipped
    streamed rows, data streaming.
- **`tb_fieldhar_full`** runs the top with all parameters at their defaults:
  100 MHz, real sample rates, 400 kHz I2C, 115,200 baud. It takes 16.8 M
  cycles, about 25 s with Verilator.
  - The first window is complete 159.7 ms after start (19 frame periods).
  - Inference takes 13,359 cycles, and the label matches the reference.
  - No sample is dropped.
- **`tb_conv_layer`, `tb_dense_layer`, `tb_inference_block`** compare
  against `har_ref_pkg` and check the cycle formulas above.

The testbenches also pass when every register starts at a random value
(`--x-assign unique` when building, `+verilator+rand+reset+2` when running).
Their monitors count events only after reset is released. The sensor models
are cleared while reset is held, so bus activity before reset is not counted.

Parameters that only exist to shorten simulation:

- top: `SENSOR_DIV`, `I2C_QUARTER`, `SPI_HALF`, `CLKS_PER_BIT`;
- `sensor_controller`: `CLK_FREQ`.

The network shape, memory sizes and sensor table are package constants in
`har_pkg`.
