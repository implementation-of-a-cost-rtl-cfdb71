# Eight-input photon coincidence counter

Quantum-optics experiments need to know how often two or more single-photon
detectors fire *together*, within a few nanoseconds. This counter does that
without a time-to-amplitude or time-to-digital converter. Each detector pulse
is first reshaped to a known width. A set of selected pulses then counts as a
coincidence when all of them are high at once, which is just an AND gate.
Eight counters count such events over a fixed integration time, and the counts
go out over a serial radio link to a computer.

This repository gives synthesizable SystemVerilog for the whole logic chain of
such a counter, which in the published device is split between discrete
74F-series gates and an FPGA:

- eight detector inputs, each with a pulse shaper of selectable width;
- eight coincidence channels; each can take any subset of the inputs, so it
  counts singles or 2- to 8-fold coincidences;
- eight 16-bit counters read out once per integration window
  (2 µs to 1 s);
- a frame packer and a UART that drive a serial radio module.

Everything runs from one 250 MHz clock (4 ns per cycle). The published device
does the shaping and the coincidence AND in asynchronous discrete gates. Here
those gates are modelled as logic sampled at that clock. This is the largest
departure from the original; see "Departures from the published device".

## Signal path

```
ttl_in[7:0] ─► sync_2ff ─► pulse_shaper ×8 ─► shaped[7:0] ──┬─► test_out[7:0]
                            (width_sel[i])                  │
                                                            ▼
                         coincidence_gate ×8  (chan_switches[c]) ─► coinc[7:0] ─► test_out[15:8]
                                                            │
                  integration_timer ─► window_end ─►  count_bank (8 × 16 bit)
                                                            │ snapshot per window
                                                            ▼
                                                     frame_sender ─► uart_tx ─► txd ─► radio module
```

The latency from a rising edge on `ttl_in` to the counter increment is
7 cycles (28 ns) with the defaults:

- 2 cycles in the synchroniser;
- `INT_DELAY + 1` = 3 cycles in the shaper;
- 1 cycle in the coincidence register;
- 1 cycle for the edge detector.

## Pulse shaping

A detector pulse can be long, up to milliseconds for a square-wave test
signal. If such pulses were ANDed directly, coincidences would be set by the
input pulse lengths and not by when the pulses arrive. The shaper therefore
replaces each rising edge with a pulse of a chosen, short width.

The input is split into two paths that meet in one gate:

- The **upper path** is a fixed "internal delay" of `INT_DELAY` = 2 gate
  delays. In the original this is a double inverter.
- The **lower path** is a chain of unit delays. A 4-to-1 multiplexer picks
  one of its taps. The selector is the pair of switches `{B,A}` (`width_sel`):

| B A | width      | cycles (default) | ns  |
|-----|------------|------------------|-----|
| 0 0 | short      | `SHORT_W` = 4    | 16  |
| 0 1 | medium     | `MEDIUM_W` = 8   | 32  |
| 1 0 | long       | `LONG_W` = 12    | 48  |
| 1 1 | same as input | –             | –   |

The output is `upper AND NOT lower`, registered:

```
shaped(t) = in(t-INT_DELAY-1) & ~in(t-INT_DELAY-1-W)      (BA = 00, 01, 10)
shaped(t) = in(t-INT_DELAY-1)                             (BA = 11)
```

So the output rises with the input, 3 cycles later, and stays high for `W`
cycles, or for the length of the input pulse if that is shorter. Two
consequences follow from the gate equation, as they would from the real gates:

- An input that goes low and high again within `W` cycles gives a shortened
  or no second pulse. This is the shaper's dead time.
- Changing `width_sel` while an input is high can create or cut a pulse.
  Change the selectors only while the inputs are quiet.

The short width of 16 ns is the whole number of cycles nearest to the ~15 ns
measured on the original hardware in setting 00. The medium and long widths
are this design's choice. They grow in equal steps, one for each of the three
chained buffer gates that form the original lower path.

## Coincidence channels

Each channel is a row of OR gates followed by one wide AND:

```
coinc[c] = AND over i of ( shaped[i] OR chan_switches[c][i] )
```

A switch at **1 removes** its input from the channel, because the OR output is
then always high. A switch at **0 selects** it. Useful settings:

- One input selected: the channel counts that detector's singles.
- Several inputs selected: the channel counts their coincidences. The
  coincidence window is set by the shaped widths. Two pulses that overlap by
  at least one sampled cycle count as one coincidence.
- All eight selected: the channel counts eight-fold coincidences.
- No input selected (all switches 1): the output is held high and the counter
  sees a single edge after reset. This follows from the gates; avoid it.

The eight channels have independent switch sets. For example, one run can
count the singles of four detectors on four channels and four different pair
coincidences on the other four. The gate output is registered once. In the
original it is purely combinational.

## Integration windows and counters

`integration_timer` divides time into windows of `integ_cycles` clock cycles.
It raises `window_end` in the last cycle of each window.

- The length is clamped to `[MIN_CYCLES, MAX_CYCLES]`, which is 500 to
  250,000,000 cycles (2 µs to 1 s) by default, and `integ_clamped` reports
  the clamp.
- A new length is taken at the start of the next window.
- With `run` low, the timer waits at the start of a window.

`count_bank` counts rising edges of each channel's `coinc`:

- An edge in the cycle where `window_end` is high still belongs to the window
  that is closing.
- In that cycle the eight counts are copied to a snapshot and the counters
  restart from zero, so no edge is lost between windows.
- A counter that reaches 65,535 stays there, and the channel's saturation
  flag is set in the snapshot.

Sixteen bits are few for fast inputs. A 5 MHz input fills a counter in
13.1 ms, and a 15 MHz input in 4.3 ms. Keep the window short enough for the
expected rate, or read the saturation flag.

## Frames and the radio link

When a snapshot is ready and the link is free, `frame_sender` latches it and
sends a 19-byte frame through `uart_tx` (8N1, 9600 baud by default):

| byte   | content                                                 |
|--------|---------------------------------------------------------|
| 0      | `0xA5` sync                                             |
| 1–16   | counts of channels 0–7, two bytes each, high byte first |
| 17     | saturation flags, channel 0 in bit 0                    |
| 18     | XOR of bytes 0–17                                       |

At 9600 baud a frame takes 190 bits × 26,041 cycles = 19.8 ms. The
integration time should be at least that long. A snapshot that arrives while
a frame is still going out is discarded:

- `frame_dropped` pulses for one cycle;
- counting itself goes on undisturbed;
- `link_busy` is high while a frame is being sent.

The radio module itself (a commercial serial-to-radio module) and the
receiving computer are outside this RTL. `txd` goes to the radio module's
serial input.

## Top-level ports (`ccm_top`)

| port            | dir | width    | meaning |
|-----------------|-----|----------|---------|
| `clk`, `rst_n`  | in  | 1        | 250 MHz clock, synchronous active-low reset |
| `ttl_in`        | in  | 8        | detector pulses, asynchronous |
| `width_sel`     | in  | 8 × 2    | `{B,A}` per input (`ccm_pkg::width_sel_e`) |
| `chan_switches` | in  | 8 × 8    | per channel, per input: 1 = ignore the input |
| `run`           | in  | 1        | start and keep running the integration windows |
| `integ_cycles`  | in  | 28       | integration time in clock cycles |
| `txd`           | out | 1        | serial data to the radio module |
| `test_out`      | out | 16       | shaped pulses [7:0], channel coincidence levels [15:8] |
| `window_end`    | out | 1        | last cycle of each window |
| `link_busy`     | out | 1        | a frame is being sent |
| `frame_dropped` | out | 1        | a window's counts were discarded |
| `integ_clamped` | out | 1        | `integ_cycles` is out of range |

The parameters and their defaults are `N_INPUTS` = 8, `N_CHANNELS` = 8,
`COUNT_W` = 16, `CLK_HZ` = 250,000,000, `BAUD` = 9600, `INT_DELAY` = 2,
`SHORT_W`/`MEDIUM_W`/`LONG_W` = 4/8/12, and `MIN_CYCLES`/`MAX_CYCLES` =
500/250,000,000. The frame layout above assumes 8 channels of 16 bits. For
other sizes the frame has `1 + N·ceil(COUNT_W/8) + ceil(N/8) + 1` bytes.

## What the published device fixes, and what this RTL chooses

These features follow the original:

- eight inputs;
- the shaper's two paths with a two-gate internal delay;
- a tapped lower path chosen by a 4-to-1 multiplexer under switches B and A,
  with the table short / medium / long / same as input;
- OR-with-switch followed by a wide AND for each coincidence channel;
- eight channel counters of 16 bits;
- integration times of 2 µs to 1 s;
- frames of counts sent over a wireless serial link;
- 16 testing outputs;
- the 250 MHz operating frequency.

These are this design's own choices:

- one gate delay is one clock cycle;
- the medium and long widths;
- the `upper AND NOT lower` form of the joining gate;
- the input synchroniser;
- registering the coincidence output;
- counting rising edges, saturating counters, and the window boundary rule;
- the clamp on the integration time;
- the frame layout, checksum and drop rule;
- UART framing and 9600 baud;
- what the testing outputs carry;
- active-high coincidence output (the part used in the original is a NAND,
  but the device is described in terms of an AND).

## Departures from the published device

- **Sampled instead of asynchronous logic.** The original shapes and ANDs the
  pulses in 74F gates with nanosecond delays. Here they are sampled every
  4 ns. Two pulses therefore coincide when they overlap in at least one
  sample, so the coincidence resolution is quantised to 4 ns.
- **Highest input rate.** A square wave needs at least two samples per period
  to be counted, so the limit is 125 MHz. The original claims operation up to
  150 MHz, and its FPGA accepts up to 153 MHz. Those rates would need a faster
  sampling clock, or counters clocked directly by the coincidence signal.
- **Analog behaviour is not modelled.** The original's amplitude gain,
  rounded edges and ringing on the shaped pulses have no counterpart here.
  The measured ratio of counted to input rate was 0.956 ± 0.021. The RTL
  counts every edge, so its ratio is exactly 1 below 125 MHz.
- **Clock source.** The 250 MHz clock is taken as given. How it is generated
  on the FPGA board is not part of this RTL.

## Files

| file | content |
|------|---------|
| `rtl/ccm_pkg.sv` | sizes, `width_sel_e`, integration limits, frame sync byte |
| `rtl/sync_2ff.sv` | two-flop input synchroniser |
| `rtl/delay_line.sv` | tapped unit-delay chain (internal delay, lower path) |
| `rtl/pulse_shaper.sv` | two-path shaper with 4-to-1 width selection |
| `rtl/coincidence_gate.sv` | OR-with-switch / AND coincidence channel |
| `rtl/integration_timer.sv` | window timer with clamp |
| `rtl/count_bank.sv` | eight saturating edge counters with snapshot |
| `rtl/frame_sender.sv` | frame packer, valid/ready byte stream |
| `rtl/uart_tx.sv` | 8N1 serial transmitter |
| `rtl/ccm_top.sv` | the complete counter |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/ccm_env.sv` | stimulus, frame decoder and reference model for the top |
| `tb/ccm_top_tb.sv` | end-to-end test, fast serial link and short windows |
| `tb/ccm_full_tb.sv` | end-to-end test with every parameter at its default |
| `tb/ccm_rate_tb.sv` | counting rate against square-wave input frequency |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. Each one has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ccm_pkg.sv tb/ccm_top_tb.sv --top-module ccm_top_tb -o sim
./obj_dir/sim
```

Replace `ccm_top_tb` with any other testbench name. `ccm_top_tb` takes well
under a second and `ccm_rate_tb` about 12 s. `ccm_full_tb` simulates about 20.5 million cycles (82 ms of
device time) in roughly 20 s.

## How far it has been checked

Each module's testbench compares the module with a model written
independently in the testbench:

- **delay_line:** every tap, against a history of the input.
- **pulse_shaper:** the gate equation, checked on random input; output width
  and 3-cycle latency measured for all four selector settings.
- **coincidence_gate:** directed singles, pair and eight-fold cases, plus
  random patterns.
- **integration_timer:** the window spacing in both clamps, a length change
  mid-window, and the default 2 µs lower limit.
- **count_bank:** random windows against an unlimited reference count,
  including 4-bit and 16-bit saturation.
- **frame_sender:** byte-exact frames, random back-pressure, drops, and a
  second channel and width configuration.
- **uart_tx:** decoded bytes, the start and stop bits, and the 10-bit-time
  busy period at the default and at a fast baud rate.

At the top level, `ccm_env` applies random coincidence events with randomly
redrawn switches and widths. It decodes every frame from `txd`, checks its
checksum, and compares every count and flag with its own reference. It also
counts how often each mechanism occurs. In `ccm_top_tb` every one occurs:

- singles;
- 2- to 7-fold and 8-fold coincidences;
- partial coincidences that must not count;
- all four width settings;
- window clamping;
- dropped frames;
- a saturated 16-bit counter.

`ccm_full_tb` runs the unchanged design through three windows and three
frames at 9600 baud. For each module a deliberately broken copy (for example
wrapping counters, inverted switch polarity, or a one-cycle-short bit time)
was run against its testbench, and each was caught.

`ccm_rate_tb` repeats the original device's rate measurement. A square wave
drives inputs 0 and 1, asynchronous to the clock, at 10 kHz, 50 kHz,
500 kHz, 5 MHz, and 1 to 16 MHz. This is done in the short (00) and
pass-through (11) settings. Each 1 ms window must report f × 1 ms edges,
within one count, both as singles and as a two-fold coincidence. The ratio
of counted to input rate comes out at 1.000 at every point.

Nothing here has been checked against the original hardware. The tests show
that the RTL does what this document describes, not that it matches the
device's analog timing.
