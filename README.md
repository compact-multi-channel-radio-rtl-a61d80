# Eight-channel RF pulse-sequence controller for AD9910 synthesisers

Cold-atom interferometers steer their lasers with acousto-optic modulators,
and each modulator is driven by an RF signal whose frequency and amplitude
must change at precise moments: a few microseconds for a Raman pulse,
milliseconds for a cooling ramp. A DDS (direct digital synthesiser) can make
such signals. But if a controller rewrites the DDS registers over a serial
port at every change, each switch takes tens of microseconds.

This controller avoids that. **Every parameter of a whole pulse sequence is
written into the DDS chips before the sequence starts.** While the sequence
runs, the controller only moves a few control pins of each DDS:

* `PROFILE[2:0]` picks one of the eight preloaded profile registers;
* `DRCTL` and `DRHOLD` steer and pause the DDS's digital ramp generator.

A pin change reaches the DDS one clock after the step timer expires. No
serial traffic is involved.

The RTL is the FPGA logic of such a generator. One FPGA serves eight AD9910
DDS chips. It takes parameters from a host over a UART, preloads each DDS over
its serial port, and on an external trigger plays eight pin sequences that
start on the same clock edge.

## What happens in one shot

1. **Programming.** The host sends 10-byte packets. They fill, per channel:
   * an image of the DDS control registers;
   * an image of the DDS waveform RAM;
   * a table of timed pin states.
2. **Preload.** A preload command makes each channel write its images into its
   AD9910 and then pulse `IO_UPDATE`, so that the DDS applies them. All eight
   channels preload in parallel, each on its own serial port. A trigger that
   arrives during a preload is ignored. This keeps the channels from
   starting apart.
3. **Trigger.** A rising edge on `trigger_in` starts every channel's table on
   the same clock edge, three clocks after the edge is first sampled.
4. **Play.** Each step drives its pins for exactly its programmed number of
   clock cycles. The next step's pins appear on the edge where the timer
   expires. After the last step, the pins return to the channel's idle state
   and the channel waits for the next trigger. A trigger during a sequence is
   ignored and reported on `trig_missed`.

A sequence also ends at the first step that has not been written since
reset. A channel whose step 0 has never been written ignores triggers and
keeps its idle state.

Steps 3 and 4 repeat for every experimental shot, with no host traffic.

## Host packets

Ten UART characters (8N1) make one packet. The first byte is sent first.

| byte | content |
|------|---------|
| 1    | channel 0..7, or `0xFF` for all channels |
| 2    | address (table below) |
| 3..10 | 64-bit data, most significant byte first |

| address | meaning of the data |
|---------|---------------------|
| `0x00`..`0x15` | image of AD9910 register with this number, right-aligned |
| `0x16` | one RAM word: index in bits 47:32, word in bits 31:0 |
| `0x40`..`0x4F` | sequencer step 0..15 (format below) |
| `0x50` | idle pin state: bits 4:2 `PROFILE`, bit 1 `DRCTL`, bit 0 `DRHOLD` |
| `0x51` | per-shot duration increment, in clock cycles (see *Scans*) |
| `0x60` | command: preload the DDS |
| `0x61` | command: clear the per-shot offset |

Step format, bits 38:0 of the data:

| bits | field |
|------|-------|
| 38 | `last`: the sequence ends after this step |
| 37 | `grow`: the step lengthens every shot |
| 36:34 | `PROFILE[2:0]` |
| 33 | `DRCTL` |
| 32 | `DRHOLD` |
| 31:0 | duration in clock cycles (0 counts as 1) |

Some packets are reported on `pkt_err` and otherwise dropped:

* a channel above 7 that is not `0xFF`;
* an address not in the table above.

If a packet stops short, the bytes received so far are dropped once the line
has been idle for `IDLE_TIMEOUT` clocks (10 ms by default). This is reported on
`pkt_resync`, and framing starts again with the next byte.

## Preloading a DDS

The register numbers are the AD9910's own: the eight profile registers are
`0x0E`..`0x15` and the RAM is `0x16`. The controller keeps every register
image the host has written since reset. On a preload it sends each of them in
ascending address order, one serial transfer per register:

* an instruction byte (the address, write bit 0);
* then the register's bytes, MSB first.

The register widths follow the AD9910 data sheet:

* 2 bytes: `0x08`;
* 8 bytes: `0x0B`, `0x0C` and `0x0E`..`0x15`;
* 4 bytes: all other registers;
* never sent: `0x05` and `0x06`, which are reserved.

If any RAM word was written, one more transfer follows. It holds instruction
`0x16` and then words 0..N−1, where N is one more than the highest index
written. `IO_UPDATE` is pulsed for 4 clocks once the serial port is idle.

The AD9910 writes its RAM into the address range of the RAM profile selected
by the `PROFILE` pins at that moment. During a preload the pins show the idle
state. **So the host picks the RAM profile by setting the idle state first.**

The serial port runs at clk/4 (12.5 MHz at 50 MHz). `SDIO` changes while
`SCLK` is low, and `CS_N` is held low for a whole transfer. A 64-bit register
takes about 300 clocks. A full 1024-word RAM takes about 140 000 clocks
(2.8 ms). The host link is the slow part: at 115200 baud one packet takes
0.87 ms, so loading 1024 RAM words takes about 0.9 s.

## Pulse tables, with two examples

A channel's table has 16 entries. The two examples below are those of the
original generator. In single-tone mode each profile register holds one
frequency, amplitude and phase. A Raman channel then uses the table below.
The RF is parked at a frequency outside the modulator's band (profile 6) and
visits the state-selection, π/2, π and π/2 pulses:

| step | PROFILE | register | purpose |
|------|---------|----------|---------|
| idle | 110 | 0x14 | off-band, before and after |
| 0 | 100 | 0x12 | state selection pulse |
| 1 | 000 | 0x0E | off-band |
| 2 | 001 | 0x0F | π/2 |
| 3 | 000 | 0x0E | off-band |
| 4 | 010 | 0x10 | π |
| 5 | 110 | 0x14 | off-band |
| 6 | 111 | 0x15 | π/2, `last` |

Each transition flips exactly one `PROFILE` pin. This means that skew between
the three pins cannot select a wrong profile for a moment. The Raman tests
check this property of the table.

The 3D-cooling channel uses RAM mode. The RAM holds up to 1024 frequencies,
played out at a rate set in the RAM profile. Its table runs through profiles
110, 100, 000, 001, 011, 001, 101 and 111. Profiles 001 (`0x0F`) and 111
(`0x15`) hold the same off-band setting. The amplitude ramp of the cooling
stage comes from the digital ramp generator, which `DRCTL` drives.

Durations are in clock cycles. At 50 MHz, an 8 µs π/2 pulse is 400 cycles.
The 32-bit timer reaches 85 s, so a 30 ms interrogation time fits easily.

## Scans: one ramp step per shot

Two kinds of experiment step a DRG sweep once per shot:

* finding a two-photon resonance: the Raman frequency moves one step per shot;
* scanning a fringe: the Raman phase moves one step per shot.

The DDS's ramp generator moves while `DRCTL` is high and freezes while
`DRHOLD` is high. So the controller keeps `DRCTL` high one ramp interval
longer on each shot, then holds the value reached.

A step with `grow` set lasts for its programmed duration plus an offset. The
offset starts at 0 and rises by the increment (address `0x51`) after every
completed sequence. Command `0x61`, or a `shot_clr`, sets it back to 0. A
typical scan table:

| step | DRCTL | DRHOLD | grow | duration |
|------|-------|--------|------|----------|
| 0 | 1 | 0 | yes | ramp to the first point |
| 1 | 1 | 1 | no  | hold for the measurement |
| 2 | 0 | 0 | no  | ramp back down to the lower limit, `last` |

Set the increment to the DDS ramp interval, expressed in FPGA clocks. Each
shot then ends one ramp step higher than the one before.

## Structure

```
rf_pulse_gen_top
├── uart_rx              8N1 receiver (two-flop synchroniser, mid-bit sampling)
├── packet_assembler     10 bytes -> packet_t, idle-timeout resync
├── cmd_decoder          checks channel/address, routes writes and commands
├── trigger_detect       synchroniser + rising-edge pulse
└── rf_channel  x8
    ├── dds_preloader    register/RAM images, preload sequencing, IO_UPDATE
    ├── dds_serial_master  AD9910 3-wire serial port
    └── pulse_sequencer  step table, timer, idle state, per-shot offset
```

`rfgen_pkg` holds the address map, the packet, pin and step structs, and the
register-width function. Writes travel to every channel on one shared bus
(`wr_addr`, `wr_data`) with a per-channel strobe. Within a channel, the
preloader and the sequencer each decode their own addresses.

Parameters of `rf_pulse_gen_top`, with their defaults:

| parameter | default | origin |
|-----------|---------|--------|
| `NUM_CH` | 8 | original design |
| `RAM_DEPTH` | 1024 | AD9910 RAM size, used by the original design |
| `CLK_HZ` | 50 000 000 | own choice |
| `BAUD` | 115 200 | own choice |
| `STEPS` | 16 | own choice |
| `SCLK_HALF` | 2 | own choice |
| `IOUP_CYCLES` | 4 | own choice |
| `IDLE_TIMEOUT` | 500 000 | own choice |

Everything is one clock domain with an active-low asynchronous reset. The
only asynchronous inputs are `uart_rxd` and `trigger_in`, and each has a
two-flop synchroniser.

## What follows the original design and what does not

These parts follow the original design:

* one FPGA controlling eight AD9910s;
* packets of ten UART characters, with the channel number first;
* a state machine that routes packet data;
* preloading all profile registers and up to 1024 RAM words before the sequence;
* a trigger edge that starts all channels together;
* during a sequence, only `PROFILE[2:0]`, `DRCTL` and `DRHOLD` change;
* single-tone, RAM and DRG modes;
* the Raman and 3D-cooling profile orders above.

These parts are this implementation's own, because the original leaves them
open:

* the clock frequency and baud rate;
* the meaning of packet bytes 2–10 (address map, step format, broadcast channel);
* the idle timeout;
* the register widths, serial timing and `IO_UPDATE` pulse, taken from the
  AD9910 data sheet;
* the order of the preload;
* a separate serial port per DDS;
* 16 table steps and the 32-bit timer;
* the idle state;
* ignoring triggers during a preload or a running sequence;
* the growing-duration mechanism for scans.

What the RTL does not cover:

* the DDS chips themselves;
* the clock distribution (LVDS translator and fan-out buffer);
* the USB-to-UART bridge;
* the analogue output chain (balun, low-pass filter, amplifier);
* the power supplies.

The measured figures of the original board cannot be checked here: the
switching delay of 119 ns includes the DDS pipeline and the modulator's
rise time, and the 3 ns skew between channels comes from the board. In the RTL
the eight channels switch on the same clock edge.

There is no read-back path. The host cannot read DDS registers or status
over the UART.

## Simulation

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. `tb/ad9910_model.sv` is a behavioural model
of the AD9910 serial port, for simulation only. It decodes writes into
buffered registers, applies them on `IO_UPDATE` and stores RAM words.

| testbench | what it checks |
|-----------|----------------|
| `tb_uart_rx` | random bytes, sampling window, framing error, glitch rejection |
| `tb_packet_assembler` | packet framing and latency, resync after a timeout |
| `tb_cmd_decoder` | 400 random packets against a reference decode |
| `tb_trigger_detect` | one pulse per rising edge, 3-clock latency |
| `tb_dds_serial_master` | bit stream, MSB order, SCLK period, CS framing |
| `tb_dds_preloader` | byte stream and framing against the register map, RAM transfer, `IO_UPDATE`, writes during a preload |
| `tb_pulse_sequencer` | Raman table cycle by cycle, scan growth per shot, ignored trigger |
| `tb_rf_channel` | preload into the DDS model, trigger held off during preload, 3D-cooling table |
| `tb_rf_pulse_gen_top` | the whole controller through its UART at reduced clock/baud and RAM size |
| `tb_rf_pulse_gen_full` | one full operation at the default parameters, including a 1024-word RAM preload |
| `tb_gyro_shot` | a whole gyroscope shot on five channels (2D and 3D cooling, repumping, Raman, blow-away), with a 1024-word RAM frequency sweep, checked cycle by cycle over two shots |

`tb_rf_pulse_gen_top` reaches every mechanism at least once and counts it:

* broadcast packets;
* packet errors and resync;
* preload, RAM load and `IO_UPDATE`;
* a trigger held off during a preload;
* a trigger during a sequence;
* a synchronous start of all eight channels;
* per-shot growth.

To run one of the testbenches with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/rfgen_pkg.sv tb/tb_rf_pulse_gen_top.sv \
    --top-module tb_rf_pulse_gen_top -o sim
./obj_dir/sim
```

The package is named first, and `-y` lets Verilator find every other module
by its file name. Any testbench runs the same way; replace both
occurrences of the testbench name.

`tb_rf_pulse_gen_full` simulates about 1.2 million clock cycles,
which takes under a second.

In `tb_gyro_shot` the stage lengths are illustrative (0.5 ms per shot). The
original design treats them as freely adjustable.
