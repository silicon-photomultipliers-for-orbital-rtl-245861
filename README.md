# SiECA camera readout: photon-counting FPGA logic in SystemVerilog

SiECA is a 256-pixel test camera built to find out whether silicon
photomultipliers (SiPMs) can replace multi-anode photomultiplier tubes in
space telescopes that watch the UV fluorescence of cosmic-ray air showers
from orbit. Four 64-pixel SiPM arrays feed eight 32-channel front-end ASICs.
Each ASIC channel has a discriminator, and its digital "trigger" output
pulses whenever the pixel's signal rises above a set threshold. The camera
does not digitise waveforms. It counts those pulses in fixed time slices of
2.5 µs, the Gate Time Unit (GTU). One GTU gives a 256-pixel image of photon
counts.

Air showers are rare and brief, so the camera records all the time and keeps
only what a trigger asks for. The counts of every GTU go into a ring buffer
that holds the last 1024 GTU (2.56 ms). When an external trigger arrives, a
window of consecutive GTUs (128 by default) is cut out of that history. It is
framed as a packet and streamed to the host over USB.

This repository holds synthesizable RTL for that FPGA logic, plus
self-checking testbenches. The camera's published description sets the
numbers (256 channels, 2.5 µs GTU, 1024-GTU history, 128-GTU events) and the
functions. Clock rate, widths, encodings, handshakes and the packet layout
are not published, so they are this design's own choices. Each one is
flagged where it matters below.

## Data path at a glance

```
 256 ASIC trigger lines ──► pulse_counter ──frame──► ring_buffer (1024 GTU)
                               ▲                        ▲      │ read port
 pps ──► gtu_timer ──gtu_tick──┘           last_gtu ────┘      ▼
            │ gtu_num                         │          packet_builder ──► sync_fifo ──► usb_tx ──► USB chip
 ext_trig ──┴──────────────────► trigger_ctrl ┴─ request ──►  ▲   (1024 × 64 b)    (bytes)
                                      │ temp_start             │ temps
                                      └──────► temp_monitor ───┘ ◄──► temperature ADC
 host bus ──► config_regs (GTU length, depth, latency, run, status)
          └─► asic_sc_loader ──► serial slow control of the 8 ASICs
```

| Module | Role |
|---|---|
| `sieca_pkg` | Shared constants, the `cfg_t` configuration struct and the `readout_req_t` request struct |
| `gtu_timer` | Makes GTUs of programmable length, numbers them, and re-aligns them to a GPS PPS pulse |
| `pulse_counter` | Keeps 256 saturating 8-bit counters and swaps out a frame at each GTU boundary |
| `ring_buffer` | Stores one frame per GTU in a circular memory of 1024 × 2048 bits |
| `trigger_ctrl` | Handles the trigger: records the trigger GTU, waits the latency, then requests the readout window |
| `packet_builder` | Reads the window, adds a header and a footer, and handles back-pressure |
| `sync_fifo` | Event FIFO in front of the USB link |
| `usb_tx` | Splits 64-bit words into bytes for the USB interface chip |
| `temp_monitor` | Reads the four temperature sensors and averages them per array |
| `config_regs` | Host-visible settings and status counters |
| `asic_sc_loader` | Shifts the ASIC settings (gains, thresholds, input DACs) into the chips |
| `sieca_top` | Wires all of the above together |

## Clock and the GTU

Everything runs on one clock, `clk`. A rate of 100 MHz is assumed, so the
default GTU is 250 clocks (2.5 µs). The GTU length is a register, so any
other clock rate only needs a different value there. `gtu_timer` drives
`gtu_tick` high in the last clock of every GTU. `gtu_num` is the 32-bit number of
the GTU now being integrated; it advances in the clock after the tick.

The camera can take an external clock, or run from a local oscillator and
lock to the host's GPS pulse-per-second signal. Here a rising PPS edge (after
a two-flop synchroniser) ends the current GTU at once. The next GTU then
starts on the PPS edge and GTU boundaries line up with GPS seconds. The GTU
cut short by the PPS counts as a normal, shorter GTU. GTU lengths below 40
clocks are raised to 40, because the ring buffer needs 32 clocks to store a
frame.

## Counting without dead time

Each trigger line passes a two-flop synchroniser. A rising edge after it
counts as one pulse, so a pulse must stay high for at least one clock and
low for at least one clock. In the tick clock the counters are copied into
`frame` and cleared on the same edge. A pulse edge that falls in the tick
clock is still added to the finishing GTU. No pulse falls between two GTUs,
which is what the camera requires ("dead time negligible between GTUs").
Counters saturate at 255. The brightest lab illumination described for this
camera gives about 7.5 photons per GTU per pixel, so saturation only marks
bad data.

`frame` stays stable for the whole following GTU, and `frame_valid` pulses
one clock after the tick.

## Ring buffer and the event window

The hardest part of the design is the timing between trigger, history and
readout.

**Storage.** A frame is 256 × 8 bits = 2048 bits. It is stored as 32 words of
64 bits. Word `w` holds channels `8w … 8w+7`, and channel `8w+k` sits in bits
`[8k +: 8]`. The frame of GTU `n` goes to bin `n mod 1024`, one word per
clock, starting the clock after `frame_valid`. The memory is one
1024 × 32 × 64-bit array with one write port and one read port (2 Mbit,
block RAM on an FPGA). Once the 32nd word is written, `last_gtu` becomes `n`.
Every bin up to `last_gtu` can then be read. Bins older than `last_gtu − 1023` have
been overwritten.

**Window.** Two run-time settings define an event:

* `depth`: the number of GTUs in the event (default 128, 1 to 1024).
* `latency`: the number of GTUs recorded *after* the GTU in which the
  trigger arrived (default 64, 0 to 1023).

For a trigger that arrives during GTU `t`, the event is the range
`t + latency − depth + 1 … t + latency`, oldest first. With the defaults the
trigger GTU sits at position 63 of 128. `latency = depth − 1` puts it first;
`latency = 0` puts it last. The published description only says that a
programmed number of bins is read out "with the defined latency". Treating
latency as post-trigger GTUs is this design's reading.

**Sequence.**

1. `trigger_ctrl` synchronises `ext_trig` and takes its rising edge. When idle
   and `run` is set, it records `t = gtu_num`, computes the window, pulses
   `temp_start` and waits.
2. Once the ring buffer reports `last_gtu ≥ t + latency`, it offers the
   request (`req_valid`). The comparison uses a signed difference, so the
   32-bit GTU counter may wrap. From the trigger, this takes `latency` GTUs plus
   the rest of GTU `t` plus 32 clocks.
3. `packet_builder` accepts the request when idle and reads the window out.
   Each data word takes three clocks: read, hold, output. A 128-GTU event is
   4096 data words, about 12,300 clocks (49 GTUs) when the FIFO does not
   block.

While one trigger is pending (steps 1–2), another trigger is not accepted.
It is counted in `trig_dropped`. Once the request has been taken, the next
trigger can be accepted while the packet is still being read out.

**Limit.** The oldest bin of a window is overwritten about `1025 − depth`
GTUs after the window was requested. The whole packet must pass into the FIFO
before then; with the defaults that is 897 GTUs (2.2 ms). A host that stalls
the USB link for longer corrupts the oldest part of a pending event. Nothing
in the logic detects this.

## Event packet

64-bit words, sent most significant byte first on the USB byte stream:

| Word | Contents |
|---|---|
| H0 | `16'h5ECA`, 5 zero bits, `depth[10:0]`, `event_num[31:0]` |
| H1 | `trig_gtu[31:0]`, `first_gtu[31:0]` |
| H2 | temperatures of arrays 3, 2, 1, 0 (16 bits each, array 0 in the low bits) |
| D × depth·32 | the window, GTU by GTU, 32 words per GTU in the storage layout above |
| F0 | `16'hF00D`, `16'h0000`, checksum = XOR over data words of `word[63:32] ^ word[31:0]` |

A default event is 4100 words, or 32,800 bytes. The description says only that
events are "wrapped with header and footer". The fields and magic numbers
are this design's.

## Temperatures

Four sensors sit between the corners of neighbouring SiPM arrays. An ADC
digitises them. Reading the sensors while the camera counts photons couples
noise into the pixels, so the camera reads them only at start-up and after each
trigger. `temp_monitor` does exactly that. After reset, and on each
`temp_start`, it converts channels 0 to 3 over a start/done handshake. It
then updates all four array estimates at once. Sensor `k` is taken to sit between
array `k` and array `k+1 (mod 4)`, so array `i` is the rounded-down mean of
sensors `i` and `i−1`. The ADC, its resolution (12 bits assumed) and the sensor
placement are not specified in the description. A `start` that arrives during a sweep
runs one more sweep afterwards. The event header carries the latest
estimates. With the default latency, the sweep started by the trigger has
finished long before the header is built. The temperatures are not used to
regulate the SiPM bias.

## ASIC initialisation

Each front-end ASIC holds its pre-amplifier gains, discriminator thresholds,
fine tunings and per-channel input DACs in a serial slow-control register.
The input DACs trim each SiPM's bias for flat-fielding. The host writes the
bit strings of all eight chips into `asic_sc_loader`. Writing CTRL bit 1 then
shifts them into all chips in parallel and ends with a `sc_load` pulse.
The chain length is 1144 bits, taken from the ASIC's own documentation, not
from the camera description. Bit 0 goes first; each bit lasts 10 clocks, and
`sc_clk` rises in its middle. The real chip has more control pins (resets,
register select); they would be added at the board level.

## Host registers

`host_wr_addr[9] = 0` writes `config_regs`; `host_wr_addr[9] = 1` writes word
`a·36 + j` (bits `32j … 32j+31`) of ASIC `a`'s slow-control string.

| Addr | Name | Meaning |
|---|---|---|
| 0 | CTRL | bit 0 `run`; writing bit 1 starts the slow-control load |
| 1 | GTU_LEN | clocks per GTU (reset 250) |
| 2 | DEPTH | GTUs per event, clamped to 1..1024 (reset 128) |
| 3 | LATENCY | GTUs after the trigger GTU, clamped to ≤ 1023 (reset 64) |
| 8..15 | status | accepted triggers, dropped triggers, packets, FIFO peak fill, temperature sweeps, arrays 0/1 and 2/3 temperatures, current GTU |

The camera restarts with the settings of its previous run. Here the reset
values stand in for those settings and `run` is set at reset, so the ring
buffer fills as soon as the FPGA comes out of reset. How the camera stores its
settings, and the host command protocol on the USB link, are not described;
the register bus is a port of the top.

## What is outside this RTL

These parts have no logic of their own, or are bought parts whose interface
is not described. They appear only as ports of `sieca_top`:

* The ASICs themselves (analog front end, discriminators, and the multiplexed
  charge outputs). Charge readout is too slow for this application and is not
  part of the photon-counting path.
* SiPM arrays, bias generators, temperature sensors and oscillator.
* The temperature ADC. The testbenches use a behavioural model,
  `tb/adc_model.sv`.
* The USB and LVDS interface chips.

## Choices that are not from the published description

* 100 MHz clock; 8-bit saturating counters; 64-bit memory and FIFO words.
* Edge-based pulse counting with two-flop synchronisers.
* PPS handling by truncating the current GTU.
* Latency meaning "GTUs after the trigger GTU"; default latency 64.
* Dropping triggers that arrive while one is pending.
* The packet header, footer and checksum.
* FIFO depth (1024 words), first-word-fall-through, and the byte order on USB.
* The ADC handshake, the sensor-to-array mapping and 12-bit temperatures.
* The register map and the slow-control serial protocol.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_gtu_timer` | GTU period, numbering, run gating, minimum length, PPS truncation and re-alignment |
| `tb_pulse_counter` | Random pulses on 16 channels against the testbench's counts; 3-bit counters to force saturation |
| `tb_ring_buffer` | Full size: 1100 random frames, every bin of the last 1024 read back, overwrite of old bins, read during write |
| `tb_trigger_ctrl` | Window arithmetic, request timing against stored GTUs, dropped trigger, request hold, run gating |
| `tb_packet_builder` | Header, data order and footer checksum under random back-pressure, GTU counter wrap |
| `tb_sync_fifo` | Queue model, full stall, level and peak fill |
| `tb_usb_tx` | Byte order, one byte per clock, back-pressure on both sides |
| `tb_temp_monitor` | Start-up sweep, neighbour averages, start during a sweep |
| `tb_config_regs` | Reset values, clamping, slow-control start pulse, status read-back |
| `tb_asic_sc_loader` | Serial stream sampled as a chip would sample it, bit period, load pulse |
| `tb_sieca_top` | End to end at reduced size (32 channels, 64-GTU ring, 16-word FIFO, 40-clock GTU, 8-GTU events): three events, one dropped trigger, a PPS, FIFO-full stalls, USB back-pressure, events read after the ring wrapped, a slow-control load. Every packet byte is checked against counts the testbench keeps itself. |
| `tb_sieca_full` | The same test, with every parameter at its default, for one 128-GTU event taken at GTU 1060 (after the ring has wrapped) |
| `tb_illum_scan` | The calibration measurement at default sizes: one pixel lit at 1 MHz, 0.5 MHz dark pulses on all pixels, ten 128-GTU events. Every count is checked exactly, with pulses at any phase of the GTU, boundary clocks included. The measured rates are also checked (about 3.6 pulses per GTU on the lit pixel and 1.25 on dark pixels). |

Run a testbench with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/sieca_pkg.sv \
          tb/tb_sieca_full.sv --top-module tb_sieca_full -o sim && ./obj_dir/sim
```

For a unit testbench, replace the testbench file and top name. The full-size
test simulates about 340,000 clocks and finishes in a few seconds.

Limits of the verification:

* Only `tb_illum_scan` places pulses right at GTU boundaries. The other
  end-to-end tests keep pulses away from the boundaries so that a PPS can
  shorten a GTU without ambiguity.
* The ring-buffer overwrite limit described above is not exercised.
* No gate-level or FPGA timing was run. A single 64-bit × 32768-word memory
  and 256 counters are modest for a Spartan-6-class FPGA, but the 100 MHz
  target is unverified.
