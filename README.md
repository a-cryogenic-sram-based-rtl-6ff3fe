# SRAM-based RF arbitrary waveform generator: digital core

Spin qubits are driven with short microwave bursts whose envelope, amplitude,
duration, spacing and phase have to be set freely for each gate. This design
avoids the usual local oscillator and mixer entirely. The RF waveform itself,
carrier included, is stored sample by sample in on-chip SRAM. A fast 8-bit DAC
then plays it out at the full sample rate, which is twice the incoming clock
(14 GS/s from a 7 GHz clock). Whatever can be written as a list of samples can
be played: Gaussian or raised-cosine pulses, several tones at once for
frequency-multiplexed control of several qubits, a DC ramp, or a data pattern
that is pre-distorted to cancel cable losses (feed-forward equalization, FFE).
The pre-distortion is part of the stored data, so it needs no extra hardware.

The chip has two halves:

* a **pattern generator**: 32 KB of SRAM, a controller, a data path that can
  rotate a line of samples, and a 2:1 serializer, loaded over a three-wire
  serial interface; and
* the **digital part of a single-ended source-series-terminated (SST)
  transmitter**: the clock dividers, an input register, nine 32:4 serializers
  and nine 4:1 multiplexers. These drive the nine weights of the DAC output
  stage.

This RTL covers everything on the chip that is logic. The analog parts are
not modelled: the duty-cycle correctors, the pre-drivers, the SST output
stages, the clock receiver, the T-coil and the ESD. The top module,
`awg_top`, ends where those parts begin.

## Data flow and rates

Everything is counted in samples. One sample is one unit interval (UI) at the
output, which is half a period of the input clock C2.

```
 serial pins ─► serial_if ─► ctrl_fsm ──► 4 × sram_512x16b ─(512 b = 64 samples)─►
       datapath_rot ─(512 b)─► pg_serializer ─(256 b = 32 samples)─►
       dac_capture_encoder ─(9 × 32 b)─► 9 × ser32to4 ─(9 × 4 b)─► 9 × mux4_seg ─► seg_bits[8:0]
```

| clock | derived from | period (UI) | at C2 = 7 GHz | drives |
|---|---|---|---|---|
| C2 | input (half rate) | 2 | 7 GHz | DIV2 |
| C4I, C4Q | C2 ÷ 2, in quadrature | 4 | 3.5 GHz | 32:4 serializers, 4:1 muxes |
| C8, C16 | C4I ÷ 2, ÷ 4 | 8, 16 | 1.75 GHz, 875 MHz | 32:4 serializer stages |
| C32 | C4I ÷ 8 | 32 | 437.5 MHz | transmitter input register, first serializer stage |
| CK32 | inverted C32 | 32 | | pattern-generator serializer |
| CK64 | CK32 ÷ 2 | 64 | 218.75 MHz | controller, SRAM, data path, serial interface |

Each stage's width matches its rate. The SRAM delivers 64 samples per CK64
cycle, the pattern-generator serializer 32 samples per CK32 cycle, each 32:4
serializer 4 bits per C4 cycle, and each multiplexer 1 bit per UI. Nothing in
the path stalls or buffers. Once playback starts, the output is a continuous
stream at the full rate.

A sample is 8 bits. In every 256-bit pattern and 512-bit line, sample *j*
sits in bits `[8j+7:8j]`, and sample 0 is played first. The memory is
byte-addressed: byte address *a* is row `a[14:6]`, instance `a[5:4]`, byte
`a[3:0]`. A row is therefore 64 consecutive samples across the four instances.

## The transmitter path: segmentation, serialization, multiplexing

This is the part with the most timing subtlety.

**Segmentation.** The 8-bit code is not sent to eight binary-weighted
drivers. The six low bits drive binary weights 1, 2, 4, 8, 16 and 32. The two
most significant bits are thermometer-coded into three equal weights of 64
each. Thermometer bit *i* is set when `code[7:6] > i`. There are thus nine
weights in total, summing to 255. Thermometer coding keeps the largest weight
small, which helps linearity and keeps the fan-out of the weights similar.
`dac_capture_encoder` registers the pattern on the rising edge of C32 and does
this encoding. Output word `seg[w]` holds weight *w* of all 32 samples, with
bit *j* belonging to sample *j*.

**32:4 serialization.** Each of the nine weight words goes to its own
`ser32to4`. This is a tree of three 2:1 stages, and each stage is clocked by
one of the sub-rate clocks:

| stage | clocked by | width |
|---|---|---|
| 1 | C16 | 32 → 16 |
| 2 | C8 | 16 → 8 |
| 3 | C4I | 8 → 4 |

Each stage looks at the next slower clock just before its own edge. If that
clock is high, the slower stage has just presented a new word. The stage then
takes the lower half and keeps the upper half for its following edge.

The dividers are a ripple chain of toggle flip-flops, so every slower clock
changes right after an edge of the faster one. That makes this rule hold at
every level. The 4-bit words leave in the order bits `[3:0]`, `[7:4]`, …,
`[31:28]`, one per C4 period, with no gap between patterns.

**4:1 multiplexing.** C4Q lags C4I by one UI. C4I toggles on the rising edge
of C2, and C4Q copies C4I on the falling edge. The four combinations of the
two clock levels mark the four UIs of a C4 period:

| (C4I, C4Q) | 1,0 | 1,1 | 0,1 | 0,0 |
|---|---|---|---|---|
| bit sent | d[0] | d[1] | d[2] | d[3] |

Each weight has its own multiplexer. This costs clock load, but every weight
then sees the same full-rate loading, which keeps the timing the same across
weights. The nine outputs, `seg_bits`, go to the pre-drivers.

**Latency.** Sample 0 of a pattern captured at a C32 rising edge appears on
`seg_bits` seven C4 periods (28 UI) after that edge. The stages load 4, 6 and
7 C4I edges after it. The other samples follow at one per UI. `tb_dac_tx`
checks this to the UI.

In silicon, the multiplexers need retiming so that each data bit is stable
around its slot. In this model, the quarter-rate word changes right after the
C4I edge and is selected from then on. That is the correct logical function,
but the model makes no claim about circuit timing.

## Pattern generator

### Memory

There are four `sram_512x16b` instances, each 512 words of 16 bytes. All four
share one address, so a read returns one 512-bit line. A read has one cycle
of latency. Writes use per-byte enables. This gives 32 KB, or 32768 samples:
about 2.3 µs of waveform at 14 GS/s. The array is written behaviourally and
stands for a foundry SRAM macro. The port list is an assumption about that
macro.

### Controller and register map

`ctrl_fsm` runs on CK64. Its registers are accessed through the serial
interface, with 6-bit addresses and 16-bit data:

| addr | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | W | bit 0 start, bit 1 stop (both one-shot); bit 2 loop (stored, readable) |
| 0x01 | STATUS | R / W1C | bit 0 playing, bit 1 write pending, bit 2 write overflow (write 1 to clear) |
| 0x02 | START_ROW | R/W | first row played |
| 0x03 | END_ROW | R/W | last row played (wraps past row 511 to 0) |
| 0x04 | ROT | R/W | byte rotation applied to every line of the next playback |
| 0x05 | IDLE | R/W | code output while not playing, reset value 0x80 (mid-scale) |
| 0x06 | MEM_ADDR | R/W | byte pointer for loading; bit 0 is ignored |
| 0x07 | MEM_DATA | W | stores `data[7:0]` at the pointer and `data[15:8]` at pointer+1, then adds 2 to the pointer |
| 0x3F | ID | R | constant 0xA7C5 |

**Playback.** A start command latches START_ROW and ROT. The controller then
reads one row per CK64 cycle up to END_ROW. In loop mode it goes back to
START_ROW without a gap. Because the lines are back to back, a looped
waveform is seamless only if its period is a whole number of 64-sample lines.
For example, a 127-bit PRBS needs 127 lines. Stop ends playback at the next
cycle. Outside playback, every sample of the output is the IDLE code.

**Loading while running.** The SRAM has a single port, and playback reads it
on every cycle. A host write therefore waits in a one-entry buffer and is
performed in the first cycle without a playback read. This is immediate when
idle, and right after playback stops or ends otherwise. The serial link is
much slower than CK64, so the buffer is almost always empty by the time the
next write arrives. The exception is long looped playback. A write that
arrives while the buffer is still full is dropped, and the sticky overflow bit
is set. Poll STATUS bit 1 before writing during playback. Two assertions
guard this rule: the SRAM is never written during a playback read, and a
pending write drains once playback has stopped.

### Data path with barrel shifter

`datapath_rot` registers each line and rotates it by ROT whole samples:
output sample *k* = input sample (*k* + ROT) mod 64. It is built as a
logarithmic barrel shifter of six stages. With it, a stored waveform can be
advanced in time by whole samples without reloading it.

### 2:1 serializer

`pg_serializer` runs on CK32. CK64 is CK32 divided by two, so the serializer
can read the CK64 level to tell which half of the line to send. At the CK32
edge where CK64 is about to rise, it sends samples 0..31 of the line that has
been stable for a full CK64 cycle, and keeps samples 32..63. At the next CK32
edge it sends the kept half.

The pattern generator runs on CK32, the inverse of C32. The transmitter
captures on the rising edge of C32, so it samples each pattern half a C32
period after the pattern changed. The hand-over between the two halves of the
chip is thus timed by construction.

### Serial interface

The interface uses three pins: SCK, SDI and SDO. There is no chip select.
A frame is a start bit `1`, then a R/W bit (1 = write), a 6-bit address and
16 data bits, all MSB first. SDI is sampled on SCK rising edges and idles
low. For a read, the device drives the register value on SDO during the 16
data slots, changing on SCK falling edges. The host samples SDO on the rising
edges. SCK and SDI are oversampled in the CK64 domain through two-flop
synchronizers, so SCK must be no faster than CK64 / 8. That is about 27 MHz
at C2 = 7 GHz. Loading the whole memory takes 16384 frames.

## Relation to the published design

These parts follow the published architecture:

* the 8-bit single-ended SST DAC;
* four 512 × 16 B SRAMs (32 KB);
* the controller FSM, the data path with byte rotation, the 512 → 256
  serializer and the CK32 → CK64 divider;
* the 256-bit (8 × 32 b) interface captured on C32, with the pattern
  generator on the opposite clock phase;
* six binary weights plus thermometer-coded MSB and MSB-1;
* nine 32:4 serializers to quarter rate;
* one 4:1 multiplexer per weight, driven by the quadrature C4I/C4Q;
* DIV2 after duty-cycle correction of the half-rate clock;
* C8, C16 and C32 derived from C4I.

The rest is this design's own choice, because the published description says
nothing about it:

* the serial frame format and the oversampling of the serial pins;
* the register map, the start/stop/loop playback and the IDLE code;
* the one-entry write buffer that makes loading during playback safe;
* the direction of rotation;
* the order of halves, samples and multiplexer slots;
* the bit assignment of the thermometer code;
* the internal structure of the serializers (a tree of 2:1 stages on C16,
  C8 and C4I) and of the dividers (toggle flip-flops);
* the SRAM port list;
* an asynchronous active-low reset, `rst_n`, shared by all flip-flops.

The published description is inconsistent on one point. The text says the
SRAM is clocked by C32 in opposite phase, while the block diagram shows the
SRAM, controller and data path on CK64 = CK32 / 2. This design follows the
diagram. The line width of 512 bits against the 256-bit pattern only balances
at half the C32 rate.

The block diagram draws the serial interface next to the pattern generator.
Here it is instantiated inside `pattern_generator` for convenience. The
wiring is the same.

## Not included

* Duty-cycle correction of C2 and of each quadrature clock. This is an
  AC-coupled, trip-point-biased inverter with programmable bleed current, used
  for duty-cycle and quadrature-error correction. It is analog, and its
  control inputs are not specified. `c2` is taken as already corrected.
* The pre-drivers and the SST output stages of the nine weights, and the
  single-ended output network. `seg_bits` is their input. The ideal output
  voltage is proportional to the sum of the weights whose bit is 1, divided
  by 255.
* The clock receiver, the T-coil and the ESD.
* Lowering the SRAM supply while it holds its data (a power measure, not
  logic).

## Verification

Each module has a self-checking testbench, `tb/tb_<module>.sv`. It compares
against a reference computed in the testbench and prints
`TB_RESULT checks=N failures=M`. Each also has a watchdog. The tests that
matter most:

* `tb_dac_tx` runs random patterns through the whole transmitter path. It
  rebuilds each code from the nine weight bits in the middle of every UI and
  checks the code. It also checks the 28-UI latency and that C32 has a period
  of 32 UI.
* `tb_ctrl_fsm` checks the following:
  * the row sequence of single and looped playback, including the wrap past
    row 511;
  * one line per cycle;
  * the alignment of `rd_valid` and `rot`;
  * the deferred write and the overflow flag.
* `tb_awg_top` exercises the full-size core through its pins. It covers:
  * a serial read;
  * a DC ramp through all 256 codes;
  * rotation;
  * loop with stop;
  * a write deferred during playback, plus a dropped one;
  * the IDLE code around each burst.

  It counts each of these mechanisms and fails if any of them never happened.
* `tb_awg_workloads` loads and plays three waveforms of the kind this AWG is
  meant for, at a 14 GS/s sample rate, and checks every sample:
  * a 200 ns two-tone raised-cosine pulse at 5.1 and 5.3 GHz (2800 samples);
  * a train of three Gaussian-envelope 5 GHz pulses with different amplitude,
    length and spacing;
  * a PRBS7 pattern with 2-tap FFE pre-distortion, looped seamlessly over
    127 rows.
* `tb_awg_fullmem` fills all 32768 samples of the memory through the serial
  pins, plays rows 0..511 once and checks the whole run in order.

Each testbench was also checked against a deliberately broken copy of its
module, and it reported failures.

The tests cover logical function and cycle timing only. They cover neither
analog behaviour nor the circuit timing of the full-rate multiplexers.

## Simulating and changing it

All files are SystemVerilog 2017. The package `rtl/awg_pkg.sv` has to be read
first. It holds the sizes, the register map and the request/command structs.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/awg_pkg.sv tb/tb_awg_top.sv \
          --top-module tb_awg_top -Mdir obj_top
obj_top/Vtb_awg_top
```

Any other testbench builds the same way with its own name (`-Wno-fatal` keeps
the style warnings of the testbenches from stopping the build). Modules are found
through `-Irtl` by file name. `tb_awg_top` runs in about a second,
`tb_awg_workloads` in about half a minute and `tb_awg_fullmem` in a little
over a minute.

The testbenches pulse `rst_n` low at time 1. Every divider is held in reset,
so no derived clock runs during reset. The asynchronous resets therefore need
a real falling edge to take effect.

To change the sizes, edit `awg_pkg`:

* `ROWS` sets the memory depth. It can go up to 1024 rows before the byte
  pointer outgrows the 16-bit MEM_ADDR register.
* `WBYTES` and `NINST` set the line width. The pattern is always half a line.
* `SAMPLE_W` and the segmentation constants are tied to the 8-bit, nine-weight
  DAC. Changing them also means changing `dac_capture_encoder` and the
  transmitter's 32-sample framing.

The register map and the serial frame are defined in the same package. Their
behaviour is in `ctrl_fsm` and `serial_if`.
