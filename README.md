# FPGA command engine for a 64-channel source-meter instrument

The instrument is a bench-top tester with 64 analogue channels. Each channel
can source a voltage, measure a current or a voltage, take current from a
shared precision source, or deliver high-speed pulses. It also has two banks
of 32 digital pins. The analogue side of every channel is a set of switches
around a programmable-gain transimpedance amplifier (TIA). The FPGA decides
which switches are closed, what the data converters are set to, and when
they convert. The host PC thinks in terms of operations: "make channels 0–31
current meters and read them 32 times". The board needs serial frames for
switch ICs, DAC writes, ADC conversions and driver timing.

The RTL here is the FPGA part in between. It turns a small instruction set
into those frames and sends the measurements back. Everything runs at
100 MHz on 32-bit words, so each direction of the PC link carries up to
3.2 Gb/s.

The code follows the published description of the instrument's digital
interface: its blocks, their order, the channel and cluster counts, the
converter resolutions, the switch names and the timing limits. The
description names the instructions but does not specify them. The command
encoding, the serial frame layouts and the handshakes are this design's own
and are marked as such below and in each file's header.

## Data path

```
PC --USB 3.0 core-->  cmd_fifo  -->  transmission_layer  -->  control_layer  --> serial trunk,
      (external)     (1 package)     (package decoding)       (execution)        drivers, pins
PC <--USB 3.0 core--  uplink_ram <-- transmission_layer  <--  control_layer  <-- ADC readings
      (external)     (1024+1 words)
```

`arc_fpga_top` holds this chain. The USB 3.0 core and its controller chip
are third-party parts and are not included. The top therefore exposes two
32-bit valid/ready streams where that core would connect:
- `dl_*`: PC to instrument.
- `ul_*`: instrument to PC, with `ul_level` showing how many result words
  are waiting.

Every stream in the design follows one rule: a word moves on a clock edge
where both `valid` and `ready` are high. Data must stay stable while a word
is offered but refused, and assertions check this. The reset `rst_n` is
asynchronous and active low.

- **cmd_fifo**: a three-word register FIFO, which holds exactly one
  instruction package of the largest size. That matches the instrument as
  described: its downlink FIFO "fits one instruction package". Raise
  `DEPTH` to buffer more. A full FIFO still accepts a word in the same cycle
  as one leaves.
- **transmission_layer**: collects a header and its payload words into one
  decoded command (`cmd_t`). It offers the command to the control layer and
  does not read the downlink while the command waits. That back-pressure is
  how the PC is throttled. Results pass through this layer unchanged on
  their way up.
- **control_layer**: executes one command at a time.
- **uplink_ram**: a 1024-word block memory with a registered read port and
  an output register, so it holds 1025 words. It runs first-word-fall-through:
  the oldest word is always presented on `ul_data`. When it is full, the
  control layer stalls rather than losing readings.

## Instruction packages

A package is a header word followed by 0–2 payload words:

| header bits | field |
|---|---|
| [31:24] | opcode |
| [23:16] | number of payload words that follow |
| [15:0]  | argument |

Payload words beyond the second are read and dropped. An unknown opcode runs
as a no-operation and raises `bad_cmd` for one cycle.

| op | name | argument | payload 0 | payload 1 | result words |
|---|---|---|---|---|---|
| 0 | NOP | – | – | – | 0 |
| 1 | CFG_CH | [6:4] mode, [3:1] range resistors, [0] shunt capacitor | channel mask 31..0 | channel mask 63..32 | 0 |
| 2 | SET_DAC | [6:4] cluster, [3:0] DAC address | [15:0] code | – | 0 |
| 3 | READ | [2:0] log2 of the number of readings averaged (limited to 5) | channel mask 31..0 | channel mask 63..32 | one per masked channel |
| 4 | PULSE | [7:0] cluster mask | [15:0] width, [31:16] gap (cycles) | [15:0] count | 0 |
| 5 | SET_CURRENT | [15:0] code for the shared current source | – | – | 0 |
| 6 | SET_SEL | – | 32 selector states | – | 0 |
| 7 | SET_LOGIC | – | 32 output values | 32 output enables | 0 |
| 8 | READ_LOGIC | – | – | – | one (the 32 synchronised inputs) |

A read result is `{channel[5:0], 8'b0, code[17:0]}`, where the code is the
signed 18-bit ADC value after averaging. Channels come out in ascending
order. A host can thus launch a whole-array read with one package and sort
the results by the channel number in each word.

## Channel modes and the switch frame

Each channel has ten switches. `channel_switch_decoder` sets them from the
channel's mode:

| mode | closed switches |
|---|---|
| FLOAT (0, reset) | none |
| VSOURCE (1) | RANGE by-pass, RANGE CONNECT: the TIA follows its DAC+ reference and drives the line |
| GROUND (2) | DC GND |
| IMETER (3) | RANGE CONNECT and the feedback resistors chosen in `range_sel` (bit 0 = 820 Ω, 1 = 110 kΩ, 2 = 15 MΩ) |
| VMETER (4) | ADC GND: the line is read directly |
| ISOURCE (5) | CURRENT SOURCE CONNECT |
| PULSE (6) | HS CONNECT: the line follows the cluster's high-speed driver |

The shunt capacitor switch (AC GND) is set separately and may be added in
any mode. Voltage-source, ground, current-meter and voltage-meter modes are
as published. The current-source and pulse modes each close only their own
switch. That is this design's reading, because the description shows those
switches but not what the others do at the same time.

## Clusters and the serial trunk

Channels are grouped in eight clusters of eight. Each cluster shares:
- one 8-channel, 18-bit, simultaneous-sampling ADC
- one 16-channel, 16-bit DAC
- one daisy chain of switch ICs
- one set of high-speed driver controls

The serial lines of all clusters form the "serial trunk". `cluster_ctrl` has
one engine for each of these parts. All serial traffic uses one shifter,
`serial_shifter`:
- MSB first.
- `cs_n` low for the whole frame.
- `sclk` at `clk/(2*HALF_DIV)`, 25 MHz with the default `HALF_DIV = 2`.
- Data changes while `sclk` is low and is sampled on the rising edge.
- A frame of W bits takes `4W+2` cycles, including a latch pause with
  `cs_n` high.

| frame | bits | layout (this design's choice) | cycles |
|---|---|---|---|
| switch chain | 80 | channel 7's ten switches first, channel 0's last | 322 |
| DAC write | 24 | `{4'h3 write-and-update, address[3:0], code[15:0]}`; address 2k = DAC+ of channel k, 2k+1 = DAC- | 98 |
| ADC read | 144 | 8 × 18 bits, channel 0 first, after `convst` and the fall of `busy` | 578 + conversion |
| selector bank | 32 | selector 31 first | 130 |

Each channel has two DAC outputs. DAC+ is its TIA reference and source
level, and also one pulse level. DAC- is the second pulse level. All eight
clusters convert and read out together, so a read of all 64 channels costs
the same time as a read of one. With 32 readings averaged, each reading
takes about 10 µs, assuming a 4 µs ADC conversion. A full 32 × 32 array
(32 READ packages, one per row) then reads in about 10.3 ms. That is within
the 50 ms claimed for the real instrument.

## Pulses

The high-speed driver of each channel switches its line between two DAC
levels. All channels of a cluster share the driver control, so one
`pulse_gen` per cluster times it:
- `count` pulses of `width` cycles each, separated by `gap` cycles.
- Resolution 10 ns.
- Width and gap are raised to at least 4 cycles (40 ns, the published
  minimum), so the fastest train is 12.5 MHz.
- A count of 0 gives one pulse.

PULSE starts the generators of the clusters in its mask and returns at once.
Later commands, including pulses on other clusters, run while the pulse
plays out. That is how clusters pulse asynchronously. A PULSE aimed at a
cluster that is still pulsing waits for it, and `pulse_wait` shows when it
does. The PC sets the pulse levels with SET_DAC and puts the target
channels in PULSE mode with CFG_CH first.

## Averaging

READ sums 2^n conversions per channel, n ≤ 5, in 23-bit accumulators. It
then returns the sum shifted arithmetically right by n. This is the
32-reading average used for array reads, done in the FPGA so that only one
word per channel crosses the link. Rounding is towards minus infinity.

## Digital pin banks

- **selector_bank**: 32 output-only pins for selector-transistor gates. The
  board's level drivers set their HI and LO voltages. The FPGA sends a
  32-bit serial frame and keeps the current state. A write that changes
  nothing is skipped. One update, from the request to `done`, takes 131
  cycles (1.31 µs) at the default divider. That agrees with the roughly 1.3 µs minimum selector pulse reported for the
  instrument, which is limited by exactly this serial write.
- **logic_bank**: 32 bidirectional pins with separate output values and
  enables (`logic_o`, `logic_oe`). The inputs pass through a two-flop
  synchroniser before READ_LOGIC samples them. After reset every pin is an
  input.

## Files and simulation

`rtl/arc_pkg.sv` holds the shared constants, the opcode and mode enums, and
the command, configuration and switch structs. Each other `rtl/` file is one
module with a header describing its interface and timing. `tb/` has one
self-checking testbench per module, plus behavioural stand-ins:
- `adc_model`: an ADC with `convst`/`busy` and a serial read-out.
- `spi_capture`: captures serial frames.

These whole-system testbenches run at the default sizes:
- `tb_arc_fpga_top`: every command, every stall and the uplink overflow
  path.
- `tb_crossbar_read`: a 32 × 32 resistor array read row by row with
  32-reading averages.
- `tb_iv_sweep`: a ±2 V, 4 mV-step sweep of a 10 MΩ resistor, then an nFET
  transfer curve driven and read on three channels at once.
- `tb_dac_dnl`: the transfer curve and DNL of an 8-bit DAC driven from the
  logic bank.
- `tb_noise_floor`: 10,000 back-to-back single readings while the host
  holds the uplink off, so the uplink memory fills and the read path
  stalls without losing a reading.

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -Itb \
    rtl/arc_pkg.sv tb/tb_arc_fpga_top.sv --top-module tb_arc_fpga_top -Mdir obj
obj/Vtb_arc_fpga_top
```

Replace the testbench name to run another; the include paths find every
other module. Sizes are parameters:
- `arc_pkg`: channel counts and converter widths, set to the published
  values.
- `arc_fpga_top`: `UL_DEPTH` (uplink words), `HALF_DIV` (serial clock
  divider) and `CONV_CYCLES` (length of the ADC `convst` pulse). These are
  this design's choices; `HALF_DIV = 2` is picked to match the published
  selector update time.

Synthesised at the defaults, the top is about 3.5 k cells and 6.4 k flip-flop
bits, plus the 32 Kbit uplink memory.

## Departures and open points

- The command format, frame layouts, DAC address map, ADC handshake,
  averaging shift and every stall rule are assumptions. The published
  description lists only the kinds of command (select channels, pulse, read,
  set current, digital pins).
- The description says the modules are joined by AXI. Here they are joined
  by plain valid/ready streams with the same transfer rule. The PC link is
  cut at the USB core's stream.
- The precision voltage reference can be switched to a channel to calibrate
  the ADC. No command controls it here, because how it is controlled is not
  described. Likewise, SET_CURRENT only outputs a 16-bit code and a load
  strobe (`isrc_code`, `isrc_load`) for the shared current source.
- Current biasing by successive approximation through the TIA is left to the
  host: it is a sequence of SET_DAC and READ commands.
- The ADC conversion time is not given. The testbenches assume 4 µs for the
  array-read timing and shorter times elsewhere. The FPGA waits on the ADC's
  `busy`, so the actual value only changes the read time.
- Readings of 10,000 samples, as used for noise measurements, do not fit in
  the uplink memory at once. They work because every READ returns at most 64
  words and the PC drains the uplink while it issues the next command.
