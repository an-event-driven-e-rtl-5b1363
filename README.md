# Event-driven tactile skin: binary scan search, spike encoding and a spiking digit classifier

A resistive tactile array is usually read like a camera: every taxel, every
frame. But a touch covers only a few taxels, and between touches nothing
changes. This design reads a 16x16 piezoresistive crossbar so that ADC
conversions go only where the skin is being pressed. It then turns those
readings into sparse ternary spikes, and classifies a handwritten digit
(1..9) traced on the skin with a convolutional spiking network that does
arithmetic only for spikes that actually occur.

The idea rests on an electrical property of the crossbar. An unpressed taxel
has a resistance in the gigaohm range; a pressed one drops to kiloohms. If
many rows are switched onto a column amplifier at once, the column reads
near zero unless at least one of those taxels is pressed. A single
conversion can therefore ask "is anything pressed in this group of rows?".
A sequence of such questions finds a touch in a number of conversions that
grows with sqrt(N) + log2(N), not with N.

Everything below is synthesizable SystemVerilog for the FPGA part of the
system. The sensor film, row switches, amplifiers, voltage reference and
ADC are external parts; the FPGA drives the row register, the ADC's SPI
port and the reference's I2C port. They are reached through the top-level ports, and
the testbenches contain a behavioural model of them.

## Signal chain

```
 120 Hz frame tick
        |
  cfg_vref_code ---------> i2c_vref_master --(scl, sda)--> adjustable Vref generator

  scan_controller --rows--> row_reg_driver --(ser, srclk, rclk)--> row register + switches
        |         --chan--> adc_spi_master --(cs_n, sclk, mosi, miso)--> 16-ch 8-bit ADC
        |                                                              (one channel per column)
   samples (x, y, value) + frame_done
        |
  delta_modulator --address events--> aer_encoder --32-bit words, valid/ready--> host
        |
   16x16 ternary spike frame
        |
  snn_core: conv1 -> pool -> conv2 -> pool -> FC1 -> output (9)  --> result_class, counts
```

`eskin_top` wires these together. It also derives the frame tick from the
clock (CLK_HZ / FRAME_HZ = 416,666 cycles at the default 50 MHz). The
shared types live in `eskin_pkg`: ADC code, 5-bit weight, 16-bit membrane,
event struct and layer select.

## Finding a touch (scan_controller)

The controller is idle most of the time and has two modes.

**Monitoring, 20 Hz.** On every sixth tick (MON_DIV = 6), the controller:

1. Loads the row register with all ones, so every row is selected.
2. Waits SETTLE cycles.
3. Converts columns 0, 1, 2, ... in order.

The first column whose code reaches `cfg_thr_event` is taken as the touched
column. If no column reaches it, the frame ends with no samples, and the
ticks in between do nothing.

**Binary search.** Within the flagged column, the candidate rows lo..hi
start as 0..15. At each step:

1. Only rows lo..mid are selected and the column is converted again.
2. A code at or above the threshold keeps lo..mid; otherwise mid+1..hi is
   kept.

After four conversions one row remains. It becomes the hotspot,
`event_start` pulses, and the controller switches to tracking.

A touch in column x therefore costs x+1+4 conversions. For a uniformly
placed touch that averages 8.5 + 4 = 12.5 conversions, against 128 for
reading taxels one by one until the touch is found (N/2). Two published
estimates exist for this strategy's average:

- 1/2(sqrt(N) + log2 N) = 12;
- 1/2(sqrt(N) + 1/2 log2 N) = 10, which goes with a 12.8x reduction.

The 12.5 of this implementation is close to the first. The unit testbench
places a touch at each of the 256 positions in turn. It counts 3,200
localisation conversions in total, an average of exactly 12.5.

**Tracking, 120 Hz.** Every tick, each row of the 3x3 window around the
hotspot is selected alone, and the window's three columns are converted.
Rows and columns outside the array are skipped. Each of the (up to) nine
results leaves on the sample port as (x, y, value). The hotspot then moves
to the largest of the nine, so the window follows a moving finger or pen
("refocus"). If none of the nine reaches the threshold, the touch is over:
`event_end` pulses and monitoring resumes.

A tick that arrives while a frame is still being scanned is counted in
`tick_overruns`. A tracking frame needs about 2,100 cycles: 9 conversions of
204 cycles each plus 3 row loads. The worst monitoring-plus-search frame
stays well under 10,000 cycles, far below one frame period.

## Driving the external parts: row register, ADC and reference

**Row register (row_reg_driver).** The row switches are driven by an
external register. It is driven here as a serial-in, parallel-out shift
register with an output latch:

- the word is shifted MSB first on `row_ser`/`row_srclk` (12.5 MHz at
  HALF = 2);
- `row_rclk` then latches it;
- bit r = 1 grounds row r, which selects it.

A load takes 67 cycles.

**ADC (adc_spi_master).** The ADC is a 16-channel, 8-bit SAR part in
manual-channel mode. Each SPI frame is 16 SCLK periods:

- MOSI carries {0001, 1, channel[3:0], range, 000000};
- MISO returns {channel[3:0], code[7:0], 0000}.

The part answers a channel selection two frames later. A request therefore
sends the same command for three frames (NFRAMES) and takes the third reply.
The channel tag of that reply is compared with the request, and
`adc_addr_err` is raised if they differ. A frame is 68 cycles (0.74
Msample/s), so one conversion costs 204 cycles. This framing follows that
ADC family's usual protocol. If a different ADC is used, this is the module
to replace.

**Reference voltage (i2c_vref_master).** The reference that feeds the row
switches and the amplifiers comes from a low-noise source followed by an
adjustable divider, which the FPGA sets over I2C. A pulse on
`cfg_vref_write` sends one standard-mode (100 kHz) write:

```
START, {DEV_ADDR = 0x2C, W}, ACK, CMD = 0x00, ACK, cfg_vref_code, ACK, STOP
```

The outputs are open-drain enables. A missing acknowledge sets `vref_nack`.
A write takes (4 + 27*4 + 4) = 116 quarter-bit phases of 2.5 us, about 0.29
ms. The address and command byte are placeholders, because the divider part
is not named; change the two parameters for the actual device. Clock
stretching and retries are not supported.

## From samples to spikes (delta_modulator)

Each taxel has an 8-bit reference level. At `frame_done` the modulator
sweeps all 256 taxels in order p = y*16 + x. The input is the value sampled
this frame, or 0 if the taxel was not sampled. The rule is:

- input >= ref + Delta: a positive spike, and ref += Delta;
- input <= ref - Delta: a negative spike, and ref -= Delta;
- otherwise no spike.

Delta comes from `cfg_delta`; 6 is the intended operating point.

A taxel fires at most once per frame, so a hard press yields a run of
positive spikes over several frames as the reference climbs. Because
unsampled taxels count as 0, taxels the tracking window has left behind
are treated as released. They discharge their reference through negative
spikes, which gives the spike stream both the "pen arrives" and the "pen
leaves" edges. `cfg_ref_clear` zeroes all references.

Each spike goes two ways:

- into a 16x16 positive/negative spike frame, presented with a one-cycle
  `frame_valid` when the sweep ends;
- as an address event to the AER encoder.

The sweep is 256 cycles, plus one cycle for each cycle the event output is
blocked.

**Address events (aer_encoder).** Events are packed as

```
[31:16] timestamp = frame number   [15:9] 0   [8] polarity (1 = positive)
[7:4]   row y                      [3:0]  column x
```

and queued in a 16-entry FIFO towards the host on a valid/ready port. A
full FIFO stalls the sweep rather than dropping events. The stall is counted
in `aer_stall_cycles`, and the time spent full in `aer_full_cycles`.

## The spiking classifier (snn_core)

### Network

| layer | input | operation | output |
|---|---|---|---|
| conv1 | 16x16x1, ternary | 3x3 conv, zero padding, LIF, 2x2 pool | 8x8x16 |
| conv2 | 8x8x16, binary | 3x3 conv, zero padding, LIF, 2x2 pool | 4x4x32 = 512 |
| FC1 | 512 | fully connected, LIF | 128 |
| output | 128 | fully connected, LIF | 9 (digits 1..9) |

Weights are 5-bit two's complement, and there are no biases. That gives
144 + 4,608 + 65,536 + 1,152 = 71,440 weights, or 44,650 bytes at 5 bits.
The hidden width of 128 is the value at which this total comes out exactly
at the weight-memory size reported for the network. The hidden width itself
is not stated.

The network runs one time step per spike frame. A classification window is
240 steps, i.e. 2 s at 120 frames/s. It opens when the scanner localises a
touch. Membranes carry over between steps and are cleared when a window
opens. Each output neuron's spikes are counted over the window, and the
class is the neuron with the most spikes. On a tie the lower digit wins.
`result_valid` then pulses with `result_class` and the nine counts.

### LIF neuron (every layer)

During a step, each input spike adds its weight to the membrane (a negative
input spike subtracts it), saturating at 16 bits. At the end of the step:

```
fire = (v >= VTH)          VTH = 16
v    = fire ? 0 : v - (v >>> 4)
```

The threshold and the leak are this design's choice. Only the use of the
same LIF setting throughout is given.

### Event-driven layers

**Convolution (snn_conv_layer).** This layer does not slide the kernel over
output positions. It walks the input spike map one position per cycle.
For each active input it spends nine cycles, one per kernel tap, and
scatters the weight of that tap into the membrane of the output position it
reaches, for all output channels at once. A membrane row holds every
channel of one position (16 or 32 lanes of 16 bits), so each tap is one
read-modify-write. Positions without a spike cost one cycle and no
arithmetic.

A FIRE pass of H*W cycles then applies the LIF rule and ORs each 2x2 block
of output spikes. For binary spikes, OR is the same as max pooling.

Step time is CIN*H*W + 10*(input spikes) + H*W cycles.

**Fully connected (snn_fc_layer).** This layer walks its input vector and,
for each spike, adds the whole weight row (all outputs in parallel) in one
cycle. Step time is NIN + 1 cycles.

The layers run strictly one after the other. For a typical tracking frame
(a few input spikes) a step is about 2,500 cycles. With every input of both
convolutions active, it is about 15,000 cycles. Either way this is far
below the 416,666-cycle frame period. A spike frame that nevertheless
arrives while a step is running is dropped and counted in `frames_dropped`.
`syn_ops` counts the weight additions actually performed.

### Loading weights

Weights are written one per cycle through `w_we`, `w_layer`, `w_row`,
`w_col` and `w_data` while the network is idle:

| layer | w_row | w_col |
|---|---|---|
| conv1 | ky*3 + kx | output channel |
| conv2 | ci*9 + ky*3 + kx | output channel |
| FC1 | input index (c*4 + y)*4 + x of the pooled conv2 map | hidden neuron |
| output | hidden neuron | class (0 = digit 1) |

Trained weights are not part of this release. The testbenches load random
weights and compare against a reference model of the same arithmetic.

## Where the design fills in or departs from the source description

- **Clock and serial rates are chosen here.** The clock is 50 MHz; the row
  shift clock is 12.5 MHz; the SPI clock is 12.5 MHz with 4 idle cycles
  between frames; the row settle delay is 16 cycles.
- **First active column, not strongest.** The monitor stops at the first
  active column. One threshold, `cfg_thr_event`, serves detection, the
  binary search and end-of-event.
- **Which network description was followed.** The network is described
  once as "two convolutional layers followed by a fully connected layer",
  while its diagram shows a hidden FC layer and a 9-neuron output layer.
  The diagram is followed.
- **Derived sizes.** The input channel count (1) and the hidden width (128)
  are derived from the reported weight memory. The LIF constants, the spike
  counting and the tie rule are this design's own.
- **Delta modulation details are this design's interpretation.** These are
  the one-spike-per-frame limit, the reference step of exactly Delta, and
  treating unsampled taxels as 0.
- **The AER word layout and FIFO depth are this design's.**
- **Search in the detecting frame.** The scan flow switches to 120 Hz
  scanning once a touch is seen, then searches. Here the binary search runs
  in the same frame as the monitor scan that found the column, and the
  first 3x3 window is sampled in that frame too.
- **Window start.** The 240-step classification window opens at the
  localisation of a touch. Where a window starts is not given.
- **What cannot be reproduced here.** The reported accuracy, compression
  ratio and sparsity depend on recorded handwriting and trained weights,
  which are not available. The RTL provides the network shape, the number
  formats and the event counters (`spikes_pos`, `spikes_neg`, `syn_ops`)
  needed to measure them.
- **The scan cost formula.** This design averages 12.5 conversions at
  N = 256, between the two published averages (12 and 10).
- **I2C write format is assumed.** The reference generator is set over
  I2C, but its device, address and register layout are not given; the
  three-byte write is a placeholder format.
- **Host link.** The host link is a plain valid/ready port; no physical
  interface (UART, USB, Ethernet) is built, since none is named.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| tb_row_reg_driver | latched word for random and corner-case words; outputs unchanged until the latch pulse; exact load time |
| tb_adc_spi_master | code against the column sum for random pressures and row sets; channel tag; 3 SPI frames per request; latency; frame length within the ADC's rate |
| tb_scan_controller | idle 20 Hz monitor (16 conversions every 6th tick); exact localisation with x+1+4 conversions; 3x3 windows at the array edges; refocus; end of event; overruns; a touch at all 256 positions (12.5 conversions on average) |
| tb_i2c_vref_master | START/STOP, bytes received by a slave model, SCL high time, write time, SDA stable while SCL high, NACK on a wrong address |
| tb_delta_modulator | spike frames and every address event against a reference model, for random windows under random back-pressure; counters; sweep time; clear |
| tb_aer_encoder | word packing and order under random valid/ready; no loss when full; level bound; fall-through latency |
| tb_snn_conv_layer | pooled spikes against a gather-form reference convolution, ternary input, reduced 8x8, 2->4 channels; step time; clear |
| tb_snn_fc_layer | output spikes over many steps against a reference (reduced 64->12), including strongly negative membranes; step time; clear |
| tb_snn_core | full-size network against a reference model, every layer at every step, over two 30-step windows; counts and class; dropped frames; window restart |
| tb_eskin_top | end-to-end run (see below) |
| tb_eskin_top_full | the same run at default parameters |

`afe_adc_model` stands in for the analog side: the row register, the
crossbar, the amplifiers and the ADC with its two-frame pipeline. A column
reads the sum of the pressures of its selected taxels, saturated at 255.

**End-to-end run.** The end-to-end testbench draws a pen stroke shaped like
a "5" on the model array:

1. The pen comes down over several frames.
2. It moves one taxel every two frames.
3. It lifts off.

The host side applies random back-pressure. The testbench records every AER
word and rebuilds the spike frames from them. It feeds those frames
through an independent model of the network and requires identical class
counts. It also checks that:

- the reference setting is written once over I2C and acknowledged;
- every event lies on a taxel that was pressed;
- the event counts match;
- the frame counter agrees;
- nothing overran or was dropped;
- monitoring, localisation, tracking, refocus, end of event, both spike
  polarities, FIFO back-pressure and a finished classification each
  happened at least once.

`tb_eskin_top` uses a 2.4 MHz clock parameter and a 60-step window to keep
the run short. `tb_eskin_top_full` uses every default: 50 MHz, 240 steps,
about 105 million cycles. It takes under two minutes in Verilator.

**Simulating with Verilator**, for example the full system:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_eskin_top_full \
  rtl/eskin_pkg.sv rtl/row_reg_driver.sv rtl/adc_spi_master.sv rtl/i2c_vref_master.sv rtl/scan_controller.sv \
  rtl/delta_modulator.sv rtl/aer_encoder.sv rtl/snn_conv_layer.sv rtl/snn_fc_layer.sv \
  rtl/snn_core.sv rtl/eskin_top.sv tb/afe_adc_model.sv tb/tb_eskin_top_full.sv
./obj_dir/Vtb_eskin_top_full
```

For a single block, list `rtl/eskin_pkg.sv`, the block and the modules it
instantiates, `tb/afe_adc_model.sv` if the testbench uses it, and the
testbench.

The simulation is two-state. Control state is reset explicitly. Storage
arrays are not reset: weights are written before use, membranes are cleared
when a window opens, and the delta references are cleared after reset; FIFO
and sample storage is read only where it has been written.

**Lint notes.** Two kinds of Verilator lint warning remain, and neither
comes from the logic:

- `rst_n` appears both as an asynchronous reset and inside the assertions'
  `disable iff`;
- some package constants are unused by a given module.
