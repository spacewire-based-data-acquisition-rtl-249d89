# FOXSI-4/5 data acquisition network in SystemVerilog

FOXSI is a solar-flare sounding rocket. Its hard X-ray detectors
(four CdTe double-sided strip detectors, "DSDs"), two soft X-ray CMOS
cameras and a Timepix3 camera share one data network. The network has
three jobs. It turns photon triggers into fixed-size data frames without
losing data during a flare peak. It moves those frames to a central
computer on a fixed timetable. And it lets the ground command every
detector through one narrow uplink.

The main idea is a **timecode-driven, memory-buffered pipeline**:

* Each detector canister writes everything it records into its own large
  ring buffer in SDRAM (64 MB, 2047 frames). The canister never waits
  for the network, so a short burst of events far above the link rate is
  absorbed by the ring.
* A 64 Hz timecode (values 0..63, one cycle per second) splits every
  second into fixed steps: housekeeping, command polling, parameter set-up,
  high-voltage/readout control, and sixty acquisition steps. During the
  acquisition steps the detector electronics (DE) drains the canister rings
  in a fixed order. Everything that changes state does so at a known step.
* Frames, rings and pointers have fixed sizes (a frame is always
  32 780 bytes), so every address is a multiple of the frame size. The
  ring state is just a few counters.

This repository implements that network as a single-clock synthesizable
design. It covers four canisters, the DE controller and its storage, two
CMOS exposure sequencers, and the command router and telemetry packetiser
of the central "Formatter" computer. In the instrument several of these
are software on small Linux computers. Here they are written as logic
with the same external behaviour. The SpaceWire links between boards
become direct streams.

## Block map

```
 det_trig/adc ─► event_builder ─► frame_builder ─► ring_buffer_ctrl ──┐  x4 canisters
 pseudo_trigger ─┘   (asic_packer)       ▲ flush       (canister SDRAM)│
                                          │                            ▼
 timecode_gen ─► timecode_scheduler ─► de_readout ◄── which canister, when
        │                │               │
        │                ▼               ▼
        │          de_mode_ctrl     ring_buffer_ctrl x4 (DE SDRAM, 980 frames each)
        │           ▲  modes, HV,        │
        │           │  Dth, flush        ▼
        │           │               ql_downlink ─► downlink_fragmenter ─► packets
        ▼           │
 uplink_cmd_router ─┴─► cmos_cmd_regs ─► cmos_exposure_seq   x2 CMOS cameras
 pps_capture (PPS time stamp)
```

`foxsi_daq_top` wires these together. `foxsi_pkg` holds the shared
constants: frame layout, memory map, command opcodes and the enums for
actions, modes and CMOS operations.

## The CdTe data format

The hardest part to get right is the byte layout. The ground software
parses it without any further framing.

**ASIC block** (`asic_packer`). Each of the four VATA451 ASICs on a
detector gives 64 channels of 10-bit ADC samples and a 10-bit common-mode
value. These are packed into one bit stream, most significant bit first:

1. a 64-bit channel flag (bit *i* = channel *i* recorded; sent from
   channel 63 down);
2. the 10-bit ADC value of each recorded channel, in ascending channel order;
3. the 10-bit common-mode value;
4. zero padding to a byte, then to a 32-bit word.

In All Readout mode every channel is recorded: 64 + 640 + 10 = 714 bits,
padded to 728 bits (91 bytes) and then to 23 words. In sparse mode only
channels whose ADC value is strictly greater than the threshold `Dth` are
recorded. The packer handles one channel per clock and holds the last word
back until it knows that the word is the last one, so `out_last` is
always on the right word.

**Event** (`event_builder`). A trigger captures all four ASICs at once.
It then emits:

| word | content |
|------|---------|
| 0 | `0x00003C3C` event header |
| 1 | TI, a free-running clock counter |
| 2 | live clock cycles since the previous event |
| 3 | bits 31:16 of the total live time, then 16 flag bits (bit 0 = pseudo trigger) |
| 4, 5 | external time, upper and lower halves |
| 6 | pseudo-trigger counter |
| … | ASIC 1..4, each followed by one zero word |
| last | `0x77770000` event footer |

A full event is 7 + 4 × 24 + 1 = 104 words (416 bytes). The four ASICs
are captured in parallel but packed one after another through a single
packer, since the output carries one word per clock in any case.
Triggers that arrive while an event is being built are lost; that is the
dead time.

**Frame** (`frame_builder`). A frame is always 8195 words (32 780 bytes):

| word | content |
|------|---------|
| 0 | `0x02EFCDAB` frame header |
| 1 … | events, back to back |
| … 8192 | zero fill |
| 8193 | UNIX time |
| 8194 | `0x2301FFFF` frame trailer |

A new event may start only while at least two maximum-size events
(2 × 104 words) of room remain before word 8193. With All Readout events
this gives exactly 77 events per frame, the number the instrument's
format documentation gives. With sparse events of about 25-26 words it
gives about 310. The frame builder tells the event builder whether it may
start (`accept`). It closes the frame only when no event is half built.
A `flush` closes a partly filled frame, as happens at Obs:Stop. An empty
frame is never flushed.

All words are sent most significant byte first, so a byte dump starts
`02 EF CD AB`.

## Ring buffers and the memory map

`ring_buffer_ctrl` stores whole frames in consecutive 32 780-byte slots
from `BASE_ADDR` onwards and wraps after `N_FRAMES` slots. It keeps the
pointer set of the instrument: for each of write and read, the total
bytes moved ("sum address"), the byte address of the current slot and
the number of frames. A frame becomes readable only after its last word
is written. A full ring applies back-pressure and never overwrites. At a
canister this turns into dead time: events stop being accepted. Writes
have priority over reads on the memory port, and one read is in flight at
a time.

The same block is used twice:

| instance | frames | address range |
|----------|--------|---------------|
| canister ring, one per canister | 2047 (64 MB) | 0x0000_0000 … in the canister's SDRAM |
| DE quick-look ring, one per detector | 980 (30.6 MB) | 0x0040_0000 + d × 0x01F0_0000 in the 128 MB DE SDRAM |

The first 4 MB of the DE SDRAM is the general control area. It holds the
12-byte command buffer and housekeeping. Each detector area is 31 MB.

Each ring has its own simple memory port: request, write enable, byte
address and data, a same-cycle grant, and read data returned later with
`mem_rvalid`. There is no shared SDRAM controller. Arbitration between the
four DE areas is left to whatever memory controller is attached.

## The one-second timetable

`timecode_gen` divides the clock to 64 Hz and counts timecodes 0..63 and
one-second cycles, starting at cycle 1. `timecode_scheduler` is a
combinational decoder:

| timecode | action |
|----------|--------|
| 0 | housekeeping update (and Idle → Init after reset) |
| 1 | poll the command buffer |
| 2 | DAQ parameter set-up (threshold, sparse mode; Init → Standby) |
| 3 | apply HV, start or stop readout (mode changes take effect here) |
| 4-33 | acquisition from the first detector of the cycle's pair |
| 34-63 | acquisition from the second detector of the pair |

Odd cycles serve detectors 1 and 2, even cycles serve 3 and 4. This
follows the instrument's timing chart. Its prose states the opposite
parity. The `ODD_FIRST` parameter switches between the two.

`de_readout` asks the scheduled canister's ring for a frame whenever
readout is enabled, the step is an acquisition step and the ring holds
one. It then streams that frame, tagged with the detector number, into
that detector's DE ring. A transfer that is still running when the step
ends is finished first. In the top, a canister whose DE ring is full
looks empty to the readout. Frames then wait in the canister and are
never half-transferred.

## Modes and commands

`de_mode_ctrl` has two layers of modes:

* General mode: Idle → Init → Standby ⇄ Obs, then End → Standby.
  Idle → Init and Init → Standby happen by themselves at timecodes 0
  and 2. HV is applied at timecode 3 in Standby and removed on End.
* Observation mode, only inside Obs: Idle → Start → Stop → Stop Readout
  → Idle. In Start the canisters acquire and the DE reads. In Stop,
  acquisition ends and a `flush` closes partly filled frames, but readout
  continues. Stop Readout ends readout and drops back to Idle on the next
  step.

Commands come through a 12-byte buffer that the DE polls at timecode 1.

| byte | meaning |
|------|---------|
| 0 | opcode: 1 general mode, 2 observation mode, 3 threshold and sparse mode, 4 HV value |
| 1 | argument |
| 2-3 | value |
| 4-11 | reserved |

A mode change takes effect at the next timecode 3. A threshold change
takes effect at timecode 2. An illegal request, such as Obs:Start in
Standby, is counted in `cmd_rejected` and ignored. The buffer holds one
command, so a second write before the poll replaces the first.

Ground commands are two bytes: a target system, then a command for it.
`uplink_cmd_router` queues them per system (1 = CdTe DE, 2 and 3 = CMOS
cameras, 4 = Timepix). It delivers one command at each poll, visiting the
systems in turn. Unknown systems and commands for a full queue are
rejected. In the top:

* A DE command byte `{opcode[3:0], argument[3:0]}` becomes a command-buffer
  write.
* A CMOS byte *b* becomes a write of 1 to CMOS register *b* × 4.
* Commands that carry values use the direct ports `de_cmd_*` and `cmos_*`:
  the DE threshold and HV, and the CMOS mode and exposure time.

## CMOS exposure sequencing

The 2048 × 2048 CMOS sensor uses 1920 lines split into five 384-line
regions. Region 3 is in the centre. `cmos_exposure_seq` issues one sensor
operation per 4 ms slot: R (read out a region, which ends its exposure),
S (start its exposure) or, for Region 3 only, a burst cycle (read and
restart in one slot).

In Flight mode two phases alternate:

* Quick-look phase: R,S for regions 1, 2, 4, 5, 3, then a pause.
* Photon-counting phase: R,S for regions 1, 2, 4, 5, 3, then 50 burst
  cycles of Region 3, which is 250 frames/s for 200 ms.

The R of each phase ends the exposure started by the previous phase, in
the same order, so all regions get equal exposures. The quick-look pause
is set so that each region's quick-look exposure lasts exactly
`exp_slots` slots. Test mode reads and restarts the whole sensor and
exposes it for `exp_slots` slots.

`cmos_cmd_regs` is the camera's command window:

| address | command |
|---------|---------|
| 0x000 | start |
| 0x004 | stop |
| 0x008 | mode (bit 0: 1 = Flight) |
| 0x00C | exposure in slots |
| 0x020 | stop, restore defaults and restart |
| 0x024 | reboot |
| 0x180 | arm the reboot |

Reboot runs only if the arm flag at 0x180 was written non-zero by the
write just before it. Any other write clears the flag.

## Telemetry packets and time

`downlink_fragmenter` cuts a product of any length into packets of at
most 1500 bytes. Each packet has an 8-byte header:

| byte | field |
|------|-------|
| 0 | system ID |
| 1-2 | packet total, big-endian |
| 3-4 | packet counter from 0, big-endian |
| 5 | data type |
| 6-7 | reserved, zero |

Up to 1492 payload bytes follow the header. A CdTe frame becomes 22
packets. `ql_downlink` (glue) takes one frame from a DE ring on request
and feeds it to the packetiser byte by byte.

`pps_capture` synchronises the GPS pulse-per-second input. On its rising
edge it latches the free-running 64-bit local clock and the current
timecode. The same local clock is the events' external time.
`pseudo_trigger` inserts random triggers at a mean rate (10 Hz by
default) for live-time calibration. It makes a 32-bit LFSR draw every
clock and compares it with `2^32 × rate / f_clk`.

## Parameters

| parameter (top) | default | meaning |
|-----------------|---------|---------|
| `CLK_HZ` | 100 000 000 | system clock (the clock rate is this design's choice) |
| `TC_HZ` | 64 | timecode rate |
| `FRAME_W` | 8195 | words per frame |
| `CAN_FRAMES` | 2047 | canister ring size in frames |
| `DE_FRAMES` | 980 | DE ring size in frames |
| `PSEUDO_HZ` | 10 | pseudo-trigger rate |
| `N_BURST` | 50 | Region 3 burst cycles |
| `MTU` | 1500 | downlink packet size limit |

## Where this departs from the instrument

* **Transport.** SpaceWire links, routers and RMAP memory access are not
  built. Canister → DE and DE → Formatter are direct valid/ready streams,
  so link rates (10 or 50 Mbit/s) do not limit throughput here.
* **Software as logic.** The DE, Formatter and canister logic in the
  instrument is partly software. The timecode source, mode machine,
  command router and packetiser here are hardware with the same
  observable behaviour. No file system, logging or housekeeping
  collection is modelled.
* **This design's own choices.** The following are not fixed by the
  source description:
  * command encodings and CMOS register addresses other than 0x20;
  * live-time and flag word contents;
  * the frame-closing rule (chosen to reproduce 77 events per frame);
  * ring behaviour when full (back-pressure);
  * the detector-pair parity (the chart is followed over the prose);
  * the uplink byte mappings;
  * one 4 ms slot per burst cycle. The source says both "each R or S
    takes 4 ms" and "250 frames/s"; the frame rate is followed.
* **Not built.** The VATA451 ASICs and detectors, the SDRAM devices, the
  CMOS sensor, the Zynq processing and SSD storage of the CMOS system,
  and the Timepix3 readout. They appear only as ports. The testbenches
  contain a behavioural SDRAM (`tb/sdram_model.sv`).
* **Timing.** Only the 100 MHz clock is assumed. No timing closure has
  been attempted.

## Verification

Every block has a self-checking testbench in `tb/<block>_tb.sv`. Each one
compares the block's outputs with values computed independently in the
testbench and ends by printing `TB_RESULT checks=N failures=M`. Some
examples:

* The packer and event builder are checked word for word against a
  reference packing function.
* The frame builder is checked for 77 All Readout events per frame and
  for the sparse-event count.
* The ring is checked through wrap-around with a stalling memory.
* The CMOS sequencer is checked for operation order, 50 bursts and exact
  exposure lengths.
* The packetiser is checked for packet sizes and headers at several
  lengths.

Two testbenches cover the whole design:

* `foxsi_daq_top_tb` runs the network at reduced size: 3000 clocks per
  timecode step, 1024-word frames, rings of 4 and 3 frames. It counts
  each mechanism and fails if one never happens: start-up modes, a
  refused command, observation start, stop and end, canister-ring and
  DE-ring back-pressure, reads from both detector pairs only in their
  steps, the flush, quick-look packets, CMOS quick-look, photon-counting
  and Test phases, bursts, reboot with its flag, PPS stamps, Timepix
  pass-through and uplink rejection. It takes about 2 M clocks.
* `foxsi_daq_full_tb` runs the top with every default: 100 MHz clock,
  full frames, full rings. It takes the DE from reset through start-up,
  Obs and Obs:Start. Commands are polled only once per second, so this
  is about 3.1 s of instrument time, roughly 310 M clocks and several
  minutes of simulation. It then checks a downlinked frame byte for byte:
  22 packets, header, 77 events at 104-word stride, zero fill, UNIX time
  and trailer.
* `canister_rate_tb` runs one canister's event builder, frame builder and
  2047-frame ring at default sizes under random triggers at 5000 events/s
  with sparse readout (4 % of channels above Dth = 10). It records 1036 of
  1052 triggers and closes frames of 306-307 events with a mean event of
  26 words, against the paper's figure of about 310.

To run one with Verilator:

```
verilator --binary --timing -Wno-fatal --top-module foxsi_daq_top_tb \
    -y rtl -y tb +libext+.sv -Irtl rtl/foxsi_pkg.sv tb/foxsi_daq_top_tb.sv
./obj_dir/Vfoxsi_daq_top_tb
```

The design resets every register asynchronously through `rst_n`
(active low) and does not depend on initial values.
