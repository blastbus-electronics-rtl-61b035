# BLASTbus: a synchronous readout and control bus for balloon payloads

A balloon gondola needs hundreds of slow, very precise analog channels
(bolometers, thermometers), a few dozen analog outputs (bias, motor commands),
and a pile of digital sensors and switches. All of it must run on little power
and stay in step with one data frame. BLASTbus solves this with one clock that
drives everything. A single controller sends that clock down a half-duplex
serial line to up to seven motherboards in a crate. The line carries commands
and answers, and its clock also paces the ADC conversions on each board.
Every sample, every DAC update and every frame is therefore an exact number of
bus clocks:

| quantity | bus clocks | at 4 MHz |
|---|---|---|
| one bus word (32 bits) | 32 (+1 idle) | 8 us |
| one register read (request + response) | 64 (+ turnaround) | 16 data bits -> 1 Mbit/s |
| one ADC conversion | 384 | 10.42 kHz |
| one frame = 104 conversions | 39936 | 100.16 Hz |
| one reference cycle = 52 conversions | 19968 | 200.3 Hz |

This RTL describes that system in SystemVerilog. The top, `bbus_system`,
holds the bus controller (with its radio downlink encoder) and `N_NODES`
motherboard FPGAs (`bbus_node`). Each node holds:

- the bus interface;
- the readout of 50 ADC channels;
- a sine reference and a multi-channel digital lock-in with a 4-stage boxcar
  anti-aliasing filter;
- six 8-bit digital groups, a quadrature decoder and PWM outputs;
- the link to an external 32-channel DAC system;
- the supply watchdog.

Analog parts, vendor chips and processors have no RTL here. They are the
converters, DACs, transceivers, preamplifiers, the DSP and the PCI/soft-core
host logic. They appear as ports of the top. The converter also has a
behavioural model in `tb/` so that the design can be simulated.

## Clocking

All logic runs on one fast clock `clk`. The board FPGA runs at 80 MHz, and the
testbenches use that rate. The bus clock is not used as a clock anywhere:

- The controller (`bus_master`) makes the bus clock by dividing `clk` by
  `CLK_DIV` = 20, which gives 4 MHz. When `ext_clk_sel` is set it forwards an
  external clock instead. This is the strongly synchronised mode, where the
  clock of a TES readout system (5 MHz) replaces the internal one. The switch
  happens only between frames, so a word is never cut in half. The external
  clock is sampled by `clk` and must be slower than `clk`/4.
- Each node synchronises the bus clock with two flip-flops. Each rising edge it
  sees becomes a one-`clk` pulse, `tick`. All bus, ADC and DAC timing counts
  ticks.

This choice puts the whole design in one clock domain. The cost is a latency
of a few `clk` cycles between a bus-clock edge and the node's reaction, which
is small next to the 20 clocks of one bus bit.

## The bus word and the line protocol

Every word is 32 bits, sent MSB first, one bit per bus clock. The idle line is
low, so the leading `start` bit marks the beginning of a word. The 16 data bits
are fixed. How the other 16 bits are split is this design's choice:

```
 31     30          29   28..26   25..16    15..0
start  frame_sync   rd   node     addr      data       (bb_pkg::bus_word_t)
```

- `node` selects one of seven motherboards. The value 7 is a broadcast: every
  node performs the write and none answers.
- `frame_sync` is set in the first word of every frame. Nodes use it to lock
  their reference phase and their filter decimation to the frame.
- A write (`rd` = 0) is one word. The node performs the write when the last
  bit arrives.
- A read request (`rd` = 1) makes the addressed node read its register and
  drive a response word on the same line: `start`=1, `rd`=1, its own node
  number, the address and the data. The controller stops driving after its
  last bit, and the node starts on the next tick (a one-tick turnaround).
  `bbus_system` asserts that at most one driver is on at any time
  (`a_one_driver`).

`bus_slave` is the node side. A shift register fills from `bus_rx` on each
tick. It decodes the word and, for a read, pulses `reg_re`. It then takes
`reg_rdata` one `clk` later and shifts the response out with `bus_oe` high for
exactly 32 ticks.

## The controller and its frame

The controller holds a frame table of up to `N_ENTRIES` = 256 bus words. The
host writes the table, then sets `frame_len` and `frame_period` (in bus clocks,
normally 39936, one frame of 104 conversions) and raises `enable`. Every
`frame_period` ticks, `bus_master` sends the table in order:

- Writes take 33 ticks, and reads take 64 ticks plus the turnaround.
- Each answer goes into a response memory at the index of its table entry,
  together with an ok flag. The host reads it through `resp_addr`, `resp_data`
  and `resp_ok`.
- Each answer is also emitted as a stream (`rsp_valid`, `rsp_idx`,
  `rsp_data`).

Two conditions are counted rather than hidden:

- **timeout**: a read whose response start bit has not come after
  `RESP_TIMEOUT` = 8 bus clocks. Its entry is marked not ok and the frame goes
  on.
- **overrun**: a frame comes due while the previous one is still on the bus.
  That frame is skipped, so a frame is never cut short.

A full frame can carry about 600 reads (39936 / 64). This is the budget that
decides how many channels a bus can report; see the last section.

### Radio downlink

The response stream goes through a FIFO (`sync_fifo`, 512 words) into
`biphase_enc`. The encoder sends each 16-bit word MSB first as biphase-mark at
`BIT_CLKS` = 80 clocks per bit, which is 1 Mbit/s. This matches the bus data
rate. The line toggles at the start of every bit cell, and again mid-cell for a
1. An idle link sends zeros, which toggle once per cell and keep the receiver
locked. A new word is taken only at a cell boundary. If the radio falls behind,
the FIFO drops the newest words and counts them in `downlink_overflows`. The
downlink adds no framing: the word order is the frame table's order.

## A motherboard node

`bbus_node` maps everything onto 16-bit registers with 10-bit addresses.

| address | register |
|---|---|
| `0x000 + 2c`, `+1` | in-phase lock-in result of channel c, top 32 bits, high half then low half |
| `0x100 + 2c`, `+1` | quadrature result (only when `QUAD` = 1, otherwise 0) |
| `0x200 + 2c`, `+1` | latest raw sample of channel c: `[23:8]`, then `[7:0]` in the top byte |
| `0x300` | control: bit 0 lock reference to frames, bit 1 send bias on DAC 0, bit 2 realign decimation on frame_sync |
| `0x301`, `0x302` | reference phase increment per sample, high and low (reset 82595525 = 2 cycles per 104 samples) |
| `0x303` | lock-in phase offset, 1024 steps per cycle |
| `0x304` | bias amplitude, unsigned Q1.15 (reset 0.5) |
| `0x305`..`0x309` | counters: frames, lock-in results, missed ADC data, dropped DAC updates, watchdog power cycles |
| `0x310+g`, `0x318+g`, `0x320+g` | digital group g (0..5): direction (1 = output), output value, synchronised input |
| `0x328`, `0x329`, `0x32A` | quadrature count high and low, quadrature errors |
| `0x330`, `0x331`, `0x338+i` | PWM period (bus clocks), PWM enable mask, duty of channel i |
| `0x340+d` | value of DAC d (0..31) |

A 32-bit quantity is read high half first. That read latches the low half in a
shadow register, so a pair of reads always returns one consistent value, even
if a new result arrives between them. The map and the shadowing are this
design's own.

### ADC readout

Each analog daughter board carries 25 24-bit sigma-delta converters. All of
them run on the bus clock and convert once every 384 bus clocks. A node
defaults to two analog boards (`N_ADC` = 50) and one digital board; a
motherboard takes three daughter boards. Because every converter shares the
clock and starts together, one data-ready line and one serial clock serve all
of them. Each converter keeps its own data line, and `adc_reader` shifts in all
of them in parallel.

After `drdy`, each of the 24 bits takes 4 ticks in this order: SCLK high,
sample DOUT, SCLK low, count. `sample_valid` rises 97 ticks after `drdy`, well
inside the 384-tick period. A conversion that arrives during a readout is
counted in `missed`. The serial timing is chosen to suit the ADS1251
(data shifted out on the falling SCLK edge) but is not a datasheet-exact
interface.

### Reference and bias

`ref_gen` is a phase accumulator with a 1024-entry sine table. The table is
computed at elaboration as `round(32767 * sin(2*pi*k/1024))`, and no data file
is needed. The accumulator advances by `phase_inc` on each sample. Its top 10
bits index the table three times:

- `bias = amplitude * sin(theta)`, for the bias DAC (DAC 0 when control bit 1
  is set);
- `ref_i = sin(theta + offset)`, for the mixer;
- `ref_q = sin(theta + offset + 1/4 cycle)`, for the quadrature mixer.

The bias should run at exactly twice the frame rate, 2 cycles in 104 samples.
The increment for that is 2^32 * 2 / 104, which is not an integer. Setting
control bit 0 therefore resets the accumulator on every frame_sync, so the
phase error never exceeds one frame's rounding. The increment is a register,
so the bias frequency is commandable. Housekeeping thermistors use this to run
at 10-100 Hz.

### The lock-in and the boxcar cascade

This is the heart of the readout and the least obvious part.

**Mixing.** On every `sample_valid`, `lockin` latches the 50 samples and the
current references. It then streams the channels one per `clk` through a
registered signed multiplier: 24 x 16 gives 40 bits. With `QUAD` = 1 it uses a
second multiplier for the quadrature reference. 50 channels take 50 of the
7680 clocks between samples, so a single multiplier and a single adder per
stage serve the whole board. The assertion `a_no_overrun` checks that a stream
has finished before the next sample.

**Filtering.** The mixer output contains the wanted DC term plus a term at
twice the bias frequency. `boxcar_filter` removes the second term and
band-limits the DC term before decimating by 104. It is four moving-sum
(boxcar) stages in series, with lengths

    L_k = round(104 * 2^(1 - k/3)),  k = 0..3   ->   208, 165, 131, 104

A boxcar of length L has its first null at fs/L. With these lengths the four
first nulls are spaced evenly on a log scale. They run from fs/208, the Nyquist
frequency of the decimated output, to fs/104, the output rate. Compared with a
4-stage CIC of equal lengths, the passband droops less and the sidelobes are
lower. Because the bias is exactly 2 cycles per frame, the 2f term sits at
fs/26. That is a null of the 208 and 104 stages, so it is removed completely,
not just attenuated.

Each stage keeps a running sum and a delay line per channel:

    acc[ch] <- acc[ch] + x - x_{n-L}[ch]

This is the CIC's add and subtract without the integrator overflow trick, so
every stage must keep all L past inputs. For 50 channels the four delay lines
hold 608 x 50 words, each wider than the last. Every stage grows the word by
`clog2(L)` bits, so nothing is rounded inside the cascade: 40 bits in, 71 bits
out by default. The delay lines are arrays with one write and one
asynchronous read per clock. They start "empty" through a fill flag per stage
instead of being cleared, so until a stage has seen L samples it subtracts
zero. The first outputs after reset are therefore the step response of the
cascade. A full, settled output needs 605 samples, about six frames.

**Decimation.** A counter picks every 104th sample at the output. With control
bit 2 set it restarts on each frame_sync, so the output phase is tied to the
frame. The node registers the top 32 of the 71 bits for every channel.
`out_valid` arrives 4 clocks after a channel enters the cascade, and 6 clocks
after `sample_valid` for channel 0.

**Gain.** For a constant input V and a constant reference R, the settled
in-phase result is

    I = V * R * 208*165*131*104 >> 39.

The full-size testbench checks exactly this (R = 32767).

For the bolometer configuration (`QUAD` = 0) only the in-phase product is
filtered, and the phase offset register is tuned so that it carries the whole
signal. This halves the filter memory and the bus traffic. `QUAD` = 1 adds the
second filter for housekeeping, where channels are few and the phase need not
be tuned.

### Digital groups, encoder, PWM

- Each of the six 8-bit groups has a per-bit direction register. Inputs pass
  through two synchronising flip-flops.
- `quad_decoder` decodes x4 from group 0 bits 0 (A) and 1 (B). It counts up
  when (A,B) steps 00, 01, 11, 10. A jump of both bits at once is counted as an
  error and does not move the position. The inputs must stay stable for at
  least two clocks.
- `pwm_gen` drives up to eight outputs from one shared counter. Channel i is
  high while `cnt < duty[i]`, and a period of 0 turns all channels off. When
  enabled, PWM replaces the output bits of group `PWM_GROUP` (5). It serves
  for heater power, and at 50% duty for square-wave LED bias. The counter
  advances once per bus clock, so the PWM is synchronous with the rest of
  the data: a 1 kHz LED bias is period 4000, duty 2000 at 4 MHz.

### DAC link

The DAC system is a separate box of 32 16-bit DACs fed through one extra 8-bit
group. On every ADC sample, `dac_link` latches the 32 DAC registers and sends
them DAC 0 first, four nibbles each, most significant nibble first. Each nibble
takes two ticks:

```
grp[7] strobe (0 then 1, receiver latches on the rising edge)
grp[6] start  (1 on the first nibble of DAC 0)
grp[5:4] nibble index (3 = most significant)
grp[3:0] nibble
```

One update takes 256 ticks, inside the 384-tick sample period. An update
requested while one is in progress is dropped and counted. The framing is this
design's own, because the real DAC system's format is not public.

### Watchdog

The DSP has to toggle `wdt_toggle`. If the line has not changed for `TIMEOUT`
clocks (1 s by default), `power_off` goes high for `OFF_TIME` clocks (100 ms)
and the cycle is counted. Both times are assumed.

## Sizes and parameters

All defaults live in `bb_pkg` or in the module headers, and the full-size
testbench runs them unchanged:

- 6 nodes;
- 50 channels per node;
- in-phase only;
- 256 table entries;
- bus clock divide 20;
- filter lengths 208/165/131/104 with decimation 104;
- 512-word downlink FIFO.

Up to 7 nodes share one bus. The register map holds up to 128 channels per
node.

The defaults cover 300 analog channels. A 375-channel bolometer crate on six
motherboards needs three analog boards on some of them: set `N_ADC` = 75. The
bus budget also limits such a crate. One frame carries about 600 reads, so
375 channels fit only with one 16-bit word each, not two. This is why the
in-phase-only mode matters.

## What is not built

- The DSP. On the real boards it runs the filtering and the lock-in in
  software. Here the lock-in is logic in the node, which the board FPGA could
  also hold.
- The host PCI interface and its soft processor. They are reduced to the table
  and response ports.
- The asynchronous sync-data mode for an external readout system. Only the
  clock-replacement mode is built.
- Gyroscope decoders.
- The ground-side biphase receiver.
- A second bus on the same controller board. A second `bbus_system` instance
  would serve for that.
- All analog circuitry.

A word breakdown of the bus, the converter and DAC serial formats, the
register map, counter widths, timeouts and watchdog times are this design's
choices, not published values.

## Simulating

The package must come first; the other files are found by name:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl \
    --top-module tb_bbus_system rtl/bb_pkg.sv tb/tb_bbus_system.sv -Mdir obj -o sim
./obj/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself, with a
watchdog timer in every one. Testbenches that check bit-exact timing drive
registers from clocked models rather than tasks, to avoid races on the same
edge.

| testbench | what it checks |
|---|---|
| `tb_boxcar_filter` | cascade output against a direct-sum model, multi-channel, decimation phase, resync |
| `tb_ref_gen` | accumulator, table values, I/Q offset, bias scaling, frame lock |
| `tb_lockin` | products and filter against a model, I and Q, output timing |
| `tb_adc_reader` | 24-bit words from converter models, SCLK timing, 97-tick latency, missed count |
| `tb_bus_slave` | writes, broadcast, reads with the response word bit by bit, frame_sync |
| `tb_bus_master` | words on the line, 33/64-tick timing, response memory, timeout, overrun, external clock |
| `tb_biphase_enc` | decoded bit stream, cell timing, idle cells |
| `tb_dac_link` | decoded nibbles for random values, 256-tick update, drops |
| `tb_quad_decoder`, `tb_pwm_gen`, `tb_watchdog` | counts, duty/period, timeout and power-cycle length |
| `tb_bbus_node` | register map over the bus, lock-in result, DAC bias, DIO, encoder, PWM, watchdog |
| `tb_bbus_system` | reduced crate end to end: every mechanism happens and is counted (frames, timeouts, overruns, clock switch, downlink overflow, lock-in results, DAC updates, power cycles) |
| `tb_housekeeping_quadrature` | one node with `QUAD` = 1 and the full filter: 50 sines at the reference frequency with phases 2*pi*i/50; magnitude within 0.1 % and phase within 0.01 rad for every channel, with no phase tuning |
| `tb_bbus_system_full` | the default crate (6 x 50 channels, full filter) for 8 frames; settled lock-in results and raw samples of every node read over the bus; no timeouts or overruns |

`tb_bbus_system_full` simulates 80 ms of flight time in about 20 s.
`tb/ads1251_model.sv` is the behavioural converter used by the node- and
system-level benches. It presents a fixed value on each conversion, shifting on
falling SCLK.
