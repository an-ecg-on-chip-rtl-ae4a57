# ECG-on-Chip: digital core in SystemVerilog

A wearable heart monitor spends most of its energy on the radio and on the
host processor, not on sensing. This design moves the signal processing next
to the sensor: a single chip amplifies and digitises the ECG at 256 samples/s,
finds every QRS complex (the sharp spike of each heartbeat) with a very small
morphological filter, measures the R-R interval and the heart rate, and
buffers the raw samples in an 8 Kb on-chip FIFO. The host CPU can sleep while
the FIFO fills and is woken by an interrupt only when there is a batch to
collect over SPI.

This RTL covers the digital half of that chip: the successive-approximation
(SAR) logic of the 12-bit ADC, the QRS detector with its own read-out port,
the central control unit (CCU) with the asynchronous FIFO and its state
machine, and the duplex SPI slave to the host. The analog half (the
low-noise amplifier with programmable gain, the ADC's sample-and-hold,
comparator and capacitive DAC, the crystal oscillator and the level shifters
between the 1 V analog and 3.3 V digital supplies) is outside the RTL; its
control and data signals are ports of the top module `ecg_soc`.

The structure, the main sizes (256 Hz, 12 bits, a 25-sample morphological
window, a 512-sample training period, a 0.3125 threshold factor, a 60 s
heart-rate window updated every 10 s, a 512 x 16 buffer in two 256 x 16
dual-port banks, Gray-coded FIFO pointers, the Empty/Ready/Critical/Full
state machine) follow the published description of the chip. Encodings,
handshakes, word layouts and several small sizes were not published and are
this design's own; they are listed in the section "Choices made here".

## Block structure and clocks

```
              afe_rst, pga_gain                       irq
   analog  <---------------------+                     ^
   front end                     |                     |
                          +------+---------------------+------+    spi_sclk/cs_n/mosi
   S/H, DAC <-- adc_sample|  ccu: sample strobe, framing,     |<-----------------+
   comparator  dac_code   |  control register, ccu_fsm,       |    tx / cmd words |
      |        +--------+ |  async_fifo (2 x dpsram 256x16)   |<--> spi_slave <---+--> spi_miso
      +------->|sar_logic|-+--------------+------------------+
   adc_comp    +--------+   code, done    | code      ^ qrs_pulse, heart rate
                                          v           |
                          +----------------------------------+
                          | qrs_detector: morph_filter ->    |   qspi_sclk/cs_n
                          | abs_mavg -> adaptive_threshold ->|<-----------------
                          | rr_hr ;  qrs_spi read-out        |---> qspi_miso
                          +----------------------------------+
```

Three clocks:

* `clk`, the crystal clock. Everything that runs at the sample rate lives
  here. `DIV` clocks make one sample period; the default 128 corresponds to a
  32.768 kHz watch crystal. The SAR conversion takes 14 of those 128 clocks.
* `spi_sclk`, the host's SPI clock. The read side of the FIFO, the command
  decoder and the control register are clocked by it directly: the SPI clock
  *is* the CCU's read clock, so the host paces the FIFO read-out and nothing
  runs on that side while the host sleeps.
* `qspi_sclk`, the clock of the QRS detector's own read-only SPI port.

`rst_n` is an asynchronous active-low reset for all domains. The two SPI
ports are also cleared, asynchronously, while their chip select is high.

## The QRS detector

The detector (`qrs_detector`) processes one sample per strobe and is built
from four stages.

### Morphological filter (`morph_de`, `morph_filter`)

Mathematical morphology treats the signal as a shape. A *dilation* replaces
each sample by the maximum of its neighbourhood, an *erosion* by the minimum.
Erosion followed by dilation (an opening) cuts off peaks narrower than the
window; dilation followed by erosion (a closing) fills valleys narrower than
the window. With a window about as long as a QRS complex, both leave the slow
parts of the ECG (baseline wander, P and T waves) nearly untouched and remove
or flatten the QRS. Averaging the two and subtracting the average from the
input therefore cancels the baseline and keeps the sharp QRS.

Each operator (`morph_de`) is a 25-stage shift register of 11-bit samples,
an adder (dilation) or subtractor (erosion) per stage for the structure
element g(k), and a max or min comparator tree. 25 samples is 0.1 s at
256 Hz, the upper end of a QRS duration. The structure element is a
parameter (`G`), flat (all zeros) by default, so the operators are plain
sliding max and min; sums are clamped to the 11-bit range.

`morph_filter` has two branches of two operators each, dilation-then-erosion
and erosion-then-dilation, averages their outputs, and subtracts the average
from the input delayed by 24 samples. The delay matters: each causal
operator's output describes the sample at the centre of its window, 12
samples back, so two in series look 24 samples back. The output is a signed
12-bit value. The filter takes the 11 most significant bits of the 12-bit ADC
code (11 bits is the width of the comparator trees).

### Enhancement (`abs_mavg`)

The filtered signal is rectified and smoothed by an 8-sample moving average
to suppress impulse noise. The average is a running sum: add the new sample,
subtract the one leaving the window, shift right by 3.

### Adaptive threshold (`adaptive_threshold`)

For the first 512 samples (2 s) the detector only learns: a register keeps
the largest smoothed value seen. The threshold is that maximum times 0.3125,
computed exactly as `(5*max) >> 4`. After training, a QRS is reported (one
clock `qrs_pulse`) when the signal first rises above the threshold. At each
detection the stored maximum restarts from the current sample and then
follows the new peak up, so the threshold always refers to the most recent
beat. This makes it follow gradual changes in amplitude in both directions,
one beat at a time.

### R-R interval and heart rate (`rr_hr`)

A counter counts sample strobes between detections; each detection latches
it as the R-R interval (units of 1/256 s, 12 bits, saturating). The heart
rate is the number of beats in the last 60 s, recomputed every 10 s: beats
are counted into 10 s bins (2560 samples), and at the end of each bin the
sum of the last six bins becomes the rate. During the first minute the rate
covers only the time elapsed.

### Latency

A beat's spike enters the filter and comes out 24 samples later; the moving
average and the threshold add a few samples more. In the end-to-end test a
spike at sample n is flagged at sample n + 25. All latencies are fixed, so
R-R intervals are exact.

### QRS read-out port (`qrs_spi`)

A read-only SPI port, separate from the host port, shifts out a 48-bit frame
captured on the first clock of a transfer: heart rate, R-R interval and the
latest filtered ECG sample, 16 bits each, MSB first. A master may stop after
16 or 32 bits.

## The sample buffer and the CCU

### Framing

Every finished conversion is written into the FIFO as one 16-bit word, and
every heart-rate update as another:

| bits      | ECG word                         | heart-rate word   |
|-----------|----------------------------------|-------------------|
| 15        | an R peak was detected since the previous ECG word | 0 |
| 14:12     | `000`                            | `001`             |
| 11:0      | raw 12-bit ADC code              | beats in last 60 s|

Because the flag travels with the sample stream, the host can place each
detected beat within the raw ECG (it lags the spike by the fixed detector
latency).

### Asynchronous FIFO (`async_fifo`, `dpsram`)

512 words in two 256 x 16 dual-port SRAM banks; the top address bit picks the
bank. Read and write pointers are binary counters, one bit wider than the
address. Each is converted to Gray code in its own domain, registered, and
passed through two flip-flops into the other domain. Since successive Gray
values differ in one bit, a pointer caught mid-change is seen as either its
old or its new value, so the "used" count each side computes can be stale
but never wrong: the writer never overruns and the reader never underruns.
Each side reports its own flags: full and nearly full (above 75 %) on the
write side, empty and nearly empty (below 25 %) on the read side. Writes to
a full FIFO and reads from an empty one are ignored.

### State machine (`ccu_fsm`)

The CCU watches FIFO usage on the write side:

| state    | entered when                   | leaves                                   | outputs |
|----------|--------------------------------|------------------------------------------|---------|
| Empty    | reset, or soft reset           | to Ready when usage > 25 %               | none |
| Ready    | usage > 25 % (from Empty), < 75 % (from Critical) | to Critical when usage > 75 %; to Empty on soft reset | interrupt |
| Critical | usage > 75 %                   | to Full at 100 %; to Ready below 75 %; to Empty on soft reset | interrupt |
| Full     | usage = 100 %                  | to Empty on soft reset                   | interrupt, writes locked |

Ready does not fall back to Empty on its own when the host drains the FIFO:
the host acknowledges with a soft reset after reading. In Full the CCU locks
writes, so samples arriving until the soft reset are dropped; the stream
resumes after it.

### Host protocol

The host SPI port works in 16-bit frames while `spi_cs_n` is low. In each
frame the host sends a command on MOSI and receives, on MISO, the word that
the *previous* command selected. MOSI is sampled on the rising edge of
`spi_sclk`; MISO changes after the rising edge and is read by the host on the
falling edge. Commands, in bits 15:12:

| code | command | effect |
|------|---------|--------|
| 0    | NOP     | next frame returns the status word |
| 1    | RDFIFO  | pops one word; the next frame returns it. If the FIFO was empty, the next frame returns the status word instead |
| 2    | RDSTAT  | next frame returns the status word |
| 3    | WRCTRL  | control register <= bits 11:0 |
| 4    | SRST    | soft reset of the state machine |

Status word: `{3'b111, empty, nearly_empty, full, used[9:0]}` as seen from
the read side. Its top bits can never occur in a FIFO word, so a host that
issues RDFIFO in every frame reads until it gets a status word and then knows
the FIFO is empty. Control register: bits 2:0 PGA gain code, bit 3 close the
front-end settling switches, bit 4 acquisition enable, bit 5 QRS detector
enable (reset value: acquisition and detection on, gain 0).

A typical service routine: on the interrupt, send RDFIFO frames until a
status word comes back, then send SRST.

### Front end and ADC control

After reset the CCU closes the amplifier's settling switches (`afe_rst`) for
256 samples (1 s); the host can close them again through the control
register. `sar_logic` runs one conversion per sample strobe: one clock with
the sample-and-hold closed, then twelve clocks of binary search, MSB first,
each setting a trial bit in `adc_dac_code` and keeping it if `adc_comp`
reports that the held input is at or above the DAC level. `done` follows
14 clocks after `start`.

## Parameters

| module | parameter | default | meaning |
|--------|-----------|---------|---------|
| ecg_soc, ccu | DIV | 128 | crystal clocks per sample (32.768 kHz / 256 Hz) |
| ecg_soc, ccu, async_fifo | DEPTH | 512 | FIFO words |
| ecg_soc, ccu | AFE_RST_TICKS | 256 | samples of amplifier settling after reset |
| ecg_soc, qrs_detector, morph_* | N | 25 | morphological window |
| qrs_detector, abs_mavg | L | 8 | moving-average length (power of two) |
| ecg_soc, qrs_detector, adaptive_threshold | TRAIN | 512 | training samples |
| ecg_soc, qrs_detector, rr_hr | SEG | 2560 | samples per heart-rate update (10 s) |
| qrs_detector, rr_hr | NSEG | 6 | bins in the heart-rate window |
| morph_de | G | 0 | structure element, 11 bits per tap |
| sar_logic | ADC_W | 12 | resolution |

Shared constants and types (word tags, command codes, control register,
state encoding) are in `rtl/ecg_pkg.sv`.

## Choices made here

The published description gives the blocks, their order and the main sizes.
The following are this design's own:

* Clocking: a 32.768 kHz crystal (DIV = 128); the host side of the FIFO
  clocked by the SPI clock; one clock per SAR bit.
* Polarity of the operators: max for dilation and min for erosion. The
  published text once states the opposite, its figure states this; the
  filter output does not depend on it because the two branches are averaged.
* The 11 high bits of the ADC code feed the morphological filter.
* Moving-average length 8; rising-crossing detection with no refractory
  period; threshold updated only at detections (the threshold does not decay
  if beats stop).
* Heart rate as six 10 s bins, which meets both "updated every 10 s" and
  "beats in the last 60 s".
* FIFO word format, SPI frame, command codes, status word, control register,
  the 1 s settling time at startup, and the use of soft reset to leave Ready
  and Full.
* Flag thresholds of the FIFO (nearly full > 75 %, nearly empty < 25 %) and
  the open boundaries of the state machine (exactly 25 % stays in Empty,
  exactly 75 % keeps the current state).
* The "mode selection" input of the ADC has no published function and is not
  modelled.

## Verification

Each module has a self-checking testbench in `tb/` that compares its outputs
with a model written independently in the testbench and prints
`TB_RESULT checks=N failures=M`:

| testbench | what it establishes |
|-----------|---------------------|
| tb_sar_logic | codes equal the held input over random inputs; 14-clock conversion; S/H one clock; start ignored when busy |
| tb_morph_de | sliding max/min, with flat and ramp structure elements and clamping |
| tb_morph_filter | every output against a max/min model; 3-clock latency; a drifting baseline removed |
| tb_abs_mavg | rectification (incl. the most negative code) and the running average |
| tb_adaptive_threshold | threshold value every sample, training, one pulse per crossing, re-basing after smaller beats |
| tb_rr_hr | R-R values, saturation, heart rate against a 60 s model at every update |
| tb_qrs_spi | frame contents, sign extension, short reads |
| tb_qrs_detector | synthetic ECG with wander and T waves at two heart rates, full sizes: one detection per beat, exact R-R, heart rate |
| tb_qrs_range | full-size detector from 30 to 250 beats/min with 50 Hz hum, breathing wander, muscle noise, a baseline jump and varying beat size: one detection per beat at a fixed delay, R-R, heart rate |
| tb_dpsram, tb_async_fifo | storage; FIFO order across unrelated clocks, full/empty, dropped writes, flags |
| tb_ccu_fsm | every transition and boundary of the state machine |
| tb_spi_slave | command words, MISO data, aborted frames |
| tb_ccu | sample strobe, settling, control writes, framing, status, Ready/Critical/Full, write lock, soft reset, acquisition off |
| tb_ecg_soc | the whole core at its default sizes with an ADC model and a host whose SPI clock runs 31 times the crystal clock (a 1 MHz host): 70 s of ECG at exactly 128 crystal clocks per sample, every FIFO word checked against the sample given to the ADC, beats flagged 200 samples apart, heart-rate words (the one after 70 s equal to the 76.8 beats/min of the input), QRS port, then the FIFO left to fill to Full and recovered with soft reset |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -Itb \
    rtl/ecg_pkg.sv tb/tb_ecg_soc.sv --top-module tb_ecg_soc
./obj_dir/Vtb_ecg_soc
```

Replace `tb_ecg_soc` with any other testbench name. The end-to-end test at
full size takes a few seconds.

The simulator is two-state, and a flip-flop with an asynchronous clear only
reacts to an edge of that clear. The testbenches therefore start with
`rst_n` and the chip selects high and pull them to their reset levels after
1 time unit, so the clears see an edge. In silicon the clears are levels and
this does not arise.

## Limits

* Nothing here has been checked against recorded ECG databases; detection
  quality is shown only on synthetic signals with baseline wander, T waves,
  50 Hz hum, varying beat size, uniform broadband noise standing in for
  muscle noise and a baseline jump standing in for a motion artifact.
* The QRS read-out frame and the control register cross clock domains
  without a handshake; the frame is captured from registers that change once
  per sample, so a capture that coincides with a change can mix old and new
  fields of one frame.
* Soft reset does not empty the FIFO; it only returns the state machine to
  Empty.
* `dpsram` is an array model of the SRAM macro; a real implementation would
  replace it by the foundry's dual-port SRAM with the same ports.
