# Real-time acquisition core for a micro-strip SAXS ionisation chamber

This is a one-dimensional X-ray detector for small-angle scattering (SAXS).
Its anode is cut into 1280 strips with a 150 µm pitch. Twenty readout ASICs
(called JAMEX) integrate the strip currents, 64 strips per ASIC. Each ASIC
multiplexes its 64 strips onto one output, and a 14-bit ADC running at
10 MHz digitises that output. A measurement produces an **image**: one row
for each time slot ("time frame") and one 32-bit column for each strip.

The published detector left the processing to DSP software. This RTL does it
in hardware, as a synchronous core clocked by the 10 MHz ADC clock. The core:

* times the ASICs in fixed **JAMEX cycles** of 128 µs, which is 1280 clocks;
* groups the cycles into up to 2048 **time frames**, each of a programmable
  length;
* dark-subtracts, gain-normalises and sums every strip's samples over each
  frame, and writes finished image rows to an external image memory;
* runs the whole thing from a small **user command set**, under a
  three-state machine (IDLE, READY, RUN).

The analog front end, the ADCs, the ASICs, the image memory and the serial
link to the ASIC control board are outside the core. They appear as ports.

## 1. Time structure of a measurement

```
JAMEX cycle    = 128 us = 1280 clocks = 64 multiplexer slots x 20 clocks
time frame i   = TFC(i) consecutive JAMEX cycles        (TFC(i): 32-bit, >= 1)
measurement    = n_frames time frames                    (n_frames <= 2048)
image          = n_frames rows x 1280 pixels x 32 bit    (<= 10 Mbyte)
```

The table **TFCycles** holds one 32-bit cycle count per frame, so the length
of each frame can be chosen freely. At one extreme, every frame is a single
cycle: 2048 frames then take 262 ms. At the other, a 32-bit count per frame
would allow a measurement lasting thousands of years. In every case the image
stays at most 2048 rows.

## 2. The image equation and its datapath (`frame_integrator`)

For pixel *j* and time frame *i*:

```
Image[i, j] = sum over the TFC(i) cycles k of frame i of
              ( (x(k, j) - Dark(j)) * Norm(j) ) >>> 14
```

* `x(k, j)` is the ADC sample of strip *j* in cycle *k*.
* `Dark(j)` is the dark-current offset, in ADC counts (14 bit).
* `Norm(j)` is the gain normalisation: unsigned, 16 bit, with 14 fraction
  bits, so 1.0 = 16384.
* `>>> 14` is an arithmetic shift, so it rounds towards minus infinity.
* The sum is a signed 32-bit value. It **saturates** rather than wrapping.

The formula (dark subtraction, then normalisation, then summing over the
frame's cycles) is the detector's own. The fixed-point formats, the shift and
the saturation are this design's choices. The original system computed in
32-bit DSP arithmetic, and these choices stand in for it.

**Pixel numbering.** ASIC *c* carries strips `64c .. 64c+63`. During
multiplexer slot *m*, every ASIC presents its strip *m*, so pixel
`j = 64*c + m`.

**How samples enter.** `jamex_timing` pulses `sample_strobe` on the last
clock of each 20-clock slot. On that clock the integrator latches all 20 ADC
words, plus the cycle information (frame number, first cycle, last cycle)
from the sequencer.

**Throughput.** It then works through the 20 latched words, one per clock,
in a three-stage pipeline:

| stage | work |
|---|---|
| P0 | read `Dark(j)`, `Norm(j)` and the running sum of pixel *j* (synchronous RAMs) |
| P1 | `term = ((x - Dark) * Norm) >>> 14`; on the first cycle of a frame the sum is loaded with `term`, otherwise `term` is added (with saturation); the sum is written back; on the frame's last cycle the sum is also written to the image port and to the "last vector" RAM |
| P2 | registered image write: `img_addr = i*1280 + j`, `img_data` |

With 20 ASICs and 20-clock slots, the datapath is busy on every clock of a
measurement. It handles exactly the 1280 pixels of each 1280-clock cycle.
This is why the slot can be no shorter than the number of ASICs. If strobes
arrive closer together than that, `err_overrun` is flagged.

**Why the row needs no clearing.** Loading the sum on the first cycle of a
frame, instead of adding to it, removes any need for a clearing pass between
rows.

**Timing of the last row.** An image word leaves at most `N_CHIPS + 3`
clocks after the strobe that carried its last sample. As a result, the final
row of a measurement finishes a few clocks *after* the state machine has
already returned to IDLE.

`frame_done` pulses with the last pixel of each row. When real-time
transmission is enabled, it appears at the top as `vec_ready` / `vec_frame`,
so the host can fetch the new row.

## 3. Frame sequencing and triggers (`tf_sequencer`, `jamex_timing`)

`jamex_timing` runs continuously from reset, because the ASICs need their
clocks all the time. It outputs:

* `cycle_start`;
* the multiplexer address `mux_addr` and its step pulse `mux_step`;
* `sample_strobe`.

The ASICs' real clock waveforms are not published. Splitting the cycle
evenly into slots, and keeping the last sample of each slot, are assumptions
of this design.

`tf_sequencer` starts on START and always lines up with a cycle boundary.
For every cycle it publishes `cyc = {active, first, last, frame}`. After the
last cycle of frame *i* it moves to frame *i+1*. When the cycle following
the last frame's last cycle begins, it raises `meas_done`, the natural end of
the measurement. A STOP ends the measurement at once. In that case the row
in progress is discarded, and rows already written stay in memory.

TFC values come from a 2048 × 32 RAM with a one-clock read latency. The
sequencer prefetches them: TFC(0) at START, TFC(1) right after it, and
TFC(i+2) as frame *i+1* begins. The next count is therefore always ready,
even when frames are a single cycle long. A TFC of 0 runs as one cycle and
reports `ERR_TFC_ZERO`.

External trigger modes (this design's encoding):

| mode value | SET TRIG IN | SET TRIG OUT |
|---|---|---|
| 0 `TRIG_NONE`  | no waiting | no pulse |
| 1 `TRIG_START` | wait for `trig_in` before frame 0 | pulse `trig_out` when frame 0 begins |
| 2 `TRIG_FRAME` | wait for `trig_in` before every frame | pulse when every frame begins |

After a trigger, the frame begins at the next JAMEX cycle. With `TRIG_FRAME`
on the input, the frames therefore need not be consecutive cycles. Without
it, frame *i* starts exactly at the cycle offset `TFC(0)+…+TFC(i-1)` from
the first frame.

## 4. Detector states and user commands (`detector_fsm`, `command_unit`)

```
IDLE  --(INIT complete)--> READY --START--> RUN
  ^                          |               |
  +----------STOP------------+               |
  +------STOP or natural end of the run------+
```

IDLE is the state after reset.

**Command port.** Commands arrive as beats on a valid/ready port carrying
`cmd_code`, `cmd_addr` (24 bit), `cmd_data` (32 bit) and `cmd_last`. A
table-loading command sends one beat per entry and flags its final beat with
`cmd_last`. Every beat gets exactly one answer (`rsp_valid`, `rsp_data`,
`rsp_err`):

* one clock after acceptance for most commands;
* three clocks after acceptance for GET IMAGE and GET VECTOR, which read a
  memory. `cmd_ready` is low in the meantime.

| code | command | beat contents | allowed in |
|---|---|---|---|
| 0 | START | – | READY |
| 1 | STOP | – | READY, RUN |
| 2 | SET INTTIME | addr = frame *i*, data = TFC(i); the last beat sets n_frames = i+1 | IDLE, READY |
| 3 | SET TRIG OUT | data[1:0] = mode | IDLE, READY |
| 4 | SET TRIG IN | data[1:0] = mode | IDLE, READY |
| 5 | SET JAMEX CONFIG | configuration words, forwarded on `jcfg_*` | IDLE, READY |
| 6 | SET PGA GAINS | addr = ADC 0..19, data[2:0] = gain code (-22 dB to +20 dB in 6 dB steps) | IDLE, READY |
| 7 | SET AUTO OFFSET | pulses `auto_offset_start` | IDLE, READY |
| 8 | SET COMP OFFSET | addr = pixel, data[13:0] = Dark(j) | IDLE, READY |
| 9 | SET COMP NORM | addr = pixel, data[15:0] = Norm(j) | IDLE, READY |
| 10 | SET REALTIME TX | data[0] enables `vec_ready` | IDLE, READY |
| 11 | SET TESTMODE | data[0] drives `testmode` (the board's test signal source) | IDLE, READY |
| 12 | GET IMAGE | addr = i*1280 + j; read through `img_rd_*` | any |
| 13 | GET VECTOR | addr = j; the last completed row | any |
| 14 | GET ACTUAL LOOP | addr 0: frame in progress, 1: its cycles started, 2: state | any |
| 15 | GET ERR MESS | returns and clears the first error code | any |

**When INIT is complete.** The INIT phase counts as complete once each
command in the parameter mask `REQUIRED_SET` has sent its last beat. By
default the mask holds SET INTTIME, SET COMP OFFSET and SET COMP NORM. The
other settings keep their previous values, or their reset values if never
set. START and STOP clear this record, so every measurement needs a fresh
INIT. The published command list does not define what makes an INIT
sequence "valid", so this rule is this design's.

**Errors.** The error register keeps the *first* error until GET ERR MESS
reads it. The codes are in `saxs_pkg::err_e`:

* a command not allowed in the current state;
* an unknown code;
* an index out of range;
* a zero TFC;
* a saturated image word;
* a sample overrun.

The published command set also has debug "WRITE" commands, but lists none,
so none are built.

## 5. Top-level interface (`saxs_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | 10 MHz ADC sample clock; asynchronous active-low reset |
| `cmd_*`, `rsp_*` | | command port (section 4) |
| `adc_data[20]` | in | 14-bit sample of each ADC on the current clock |
| `jamex_cycle_start`, `jamex_mux_addr[5:0]`, `jamex_mux_step` | out | ASIC timing, sent to the ASIC control board |
| `trig_in`, `trig_out` | in / out | external triggers (synchronous, one clock wide) |
| `img_we`, `img_addr[21:0]`, `img_data[31:0]` | out | image memory write port |
| `img_rd_en`, `img_rd_addr`, `img_rd_data` | out / out / in | image memory read port, data one clock after `img_rd_en` |
| `pga_gain[20][2:0]`, `jcfg_*`, `auto_offset_start`, `testmode` | out | settings for the analog board |
| `vec_ready`, `vec_frame` | out | a row is complete (when real-time transmission is on) |
| `state`, `err_code` | out | detector state, first error |

Parameters, with defaults that match the detector: `N_CHIPS = 20`,
`N_MUX = 64`, `N_FRAMES = 2048`, `CYCLE_CLKS = 1280`, `NORM_BITS = 16`,
`NORM_FRAC = 14`. `CYCLE_CLKS` must be `N_MUX` times a slot of at least
`N_CHIPS` (and at least 2) clocks.

## 6. What the defaults can hold

* **Largest image (2048 × 1280 words):** fits. The 22-bit image address
  covers 2,621,440 words. The image itself lives in external memory. The
  on-chip storage is:
  * the TFC table: 2048 × 32 bit;
  * the Dark and Norm tables: 1280 × 14 and 1280 × 16 bit;
  * the running sums and the last row: 2 × 1280 × 32 bit.
* **Highest time resolution (one cycle per frame):** fits. The datapath
  handles 1280 pixels in the 1280 clocks of a cycle.
* **Longest frames (2^32 cycles):** the count fits. The 32-bit image word
  saturates after about 32,768 cycles of the largest possible term, which is
  the same bound a 32-bit DSP word has.
* **Input rate:** all 20 ADCs are sampled on every strobe. That is
  20 × 14 bit × 10 MHz = 2.8 Gbit/s of sample bits, or 3.2 Gbit/s counted as
  16-bit words.
* **10 kHz frame rate:** does **not** fit. The detector's summary quotes
  acquisition rates "reaching 10 kHz". It also gives 128 µs as the ASIC's
  minimum integration time, which is 7.8 kHz, and this design follows the
  128 µs figure. With one datapath shared by 20 ASICs, a slot cannot be
  shorter than 20 clocks, so a cycle cannot be shorter than 128 µs at
  10 MHz.

## 7. Where this RTL departs from the published detector

* **Hardware instead of software.** Image integration, command
  interpretation and frame sequencing were DSP and FPGA firmware in the
  original system, and that firmware was never published. The function
  (equation, command set, state machine, TFCycles) is the detector's. The
  hardware structure is this design's.
* **Number formats** of Dark, Norm and the sum, and saturation: this
  design's (section 2).
* **ASIC timing:** the slot division and the choice of sample are
  assumptions. The ADCs' pipeline latency is not modelled: `adc_data` is
  taken to belong to the current multiplexer address.
* **Only 20 ADC inputs are used.** The original acquisition boards had 24;
  the other 4 served monitoring and debugging.
* **Triggers.** Trigger modes, the INIT completion rule, command encoding and
  error codes are this design's.
* **Not built** (no logic published, or analog):
  * the serial link to the ASIC control board;
  * the control board's CPLD logic;
  * the automatic offset calibration algorithm (only its start pulse
    exists);
  * the PGAs, DACs, LVDS drivers and test signal generator;
  * the embedded PC and the DSP and FPGA boards themselves.

## 8. Files

| file | contents |
|---|---|
| `rtl/saxs_pkg.sv` | constants, state / command / error / trigger types, cycle-info struct |
| `rtl/saxs_top.sv` | top level |
| `rtl/command_unit.sv` | command interpreter and configuration registers |
| `rtl/detector_fsm.sv` | IDLE / READY / RUN |
| `rtl/jamex_timing.sv` | JAMEX cycle and multiplexer timing |
| `rtl/tf_sequencer.sv` | time frames, triggers, natural end |
| `rtl/frame_integrator.sv` | image datapath |
| `rtl/ram_1r1w.sv` | synchronous RAM (TFC, Dark, Norm, sums, last row) |
| `tb/tb_<block>.sv` | self-checking test for each block |
| `tb/tb_saxs_top.sv` | end-to-end test at reduced size (4 × 4 pixels, 8 frames, 20-clock cycles) |
| `tb/tb_saxs_full.sv` | end-to-end test at full size: a complete 2048-frame measurement, every image word checked |
| `tb/saxs_tb_body.svh` | environment shared by the two end-to-end tests (ADC model, image memory model, reference image) |

## 9. Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops by itself.
Each also has a watchdog. For example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_saxs_full \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/saxs_pkg.sv tb/tb_saxs_full.sv
./obj_dir/Vtb_saxs_full
```

Replace `tb_saxs_full` with any other `tb_*` module. The full-size run
covers 5.3 million clocks and takes a few seconds.

**What the end-to-end tests check:**

* every image word against a reference computed in the testbench from the
  sample function, the loaded tables and the trigger schedule;
* all state transitions: INIT, START, STOP from READY, STOP from RUN, and
  the natural end;
* trigger in and out, real-time row notices, frames of several cycles, a
  zero TFC, and every GET command.

Each mechanism is counted, and a mechanism that never happens counts as a
failure.

**What the block tests add:** they check the cycle and slot timing (for
example, that a JAMEX cycle lasts 128 µs at 10 MHz), saturation, overrun,
and address-range errors.
