# NA62 Level-0 Trigger Processor (L0TP) in SystemVerilog

The NA62 kaon experiment produces far more detector data than it can record. A hardware
Level-0 trigger picks the events worth keeping. The fast sub-detectors send short summaries of
what they saw, called *primitives*, to a central FPGA, the Level-0 Trigger Processor (L0TP).
Each primitive carries the hit time and a 16-bit ID that encodes what kind of hit it was. Up to
seven detectors feed the L0TP, each over its own Gigabit-Ethernet link.

The L0TP brings together primitives that belong to the same particle crossing, within a few
nanoseconds. It compares the combination with up to 16 trigger *masks*. It then sends a trigger
to every detector, at a fixed latency after the event time. That latency is at most 1 ms, and the
average trigger rate is at most 1 MHz.

The hard part is time. The detectors deliver their primitives late by very different and
variable amounts. Each detector packs its primitives into one packet per 6.4 µs *frame*. A slow
detector may deliver frame *k* several frames after a fast one does. Within a frame, the order
of primitives can fluctuate by tens of microseconds.

This RTL solves the problem in three steps:
1. It removes the fixed offset between detectors by delaying frames.
2. It absorbs the remaining jitter by writing every primitive into a RAM at an address taken from
   its own timestamp.
3. It reads those RAMs only at the times where a chosen *reference detector* saw something.

The rest of this document follows a primitive through the design. `l0tp_top` wires all the
blocks together.

```
 7 x MTP ──► mtp_parser ──► delay_generator ──► align_ram x7 ──┐
                                 │                             │ slots S-1, S, S+1
                                 ├──► ref_fifo (reference) ──► read_sequencer ──► amm ──► downscaler ─┐
                                 ├──► ref_fifo (control)  ──┘                                          │
                                 └──► calib_trigger (PID bit 15) ───────────────────────────────────┐  │
                                                                         clk_sys 125 MHz            │  │
 ─────────────────────────────────────────────────────────── async_fifo x2 ───────────────────────────┼──┼──
                                                                         clk_40 40 MHz              ▼  ▼
 nim_calib_trigger, periodic_trigger, random_trigger ──────────────────► latency_buffer ──► trigger_dispatcher ──► l0_* (detectors)
                                                                                                    └──► mep_generator ──► mep_* (PC farm)
```

## Time, primitives and frames

All times are counted in periods of the 40 MHz master clock, 24.95 ns each. The count starts at
the start-of-burst signal (SOB); `burst_timer` keeps it. A primitive (`prim_t` in `l0tp_pkg`) has
three fields:

| Field | Width | Meaning |
|---|---|---|
| `ts` | 32 bits | timestamp in master-clock periods |
| `fine` | 8 bits | fine time; 1 LSB is 1/256 of a period, about 98 ps |
| `pid` | 16 bits | primitive ID; bit 15 marks a calibration primitive |

A frame is 256 periods, which is 6.4 µs. The frame number of a primitive is therefore `ts[31:8]`.

Each detector sends one Multi-Trigger-Packet (MTP) per frame, even when the frame is empty. This
design assumes the following layout of 32-bit words:

```
word 0    {source_id[7:0], 8'h00, primitive_count[15:0]}
word 1    frame timestamp[31:0]
then, per primitive:
          {pid[15:0], 8'h00, fine[7:0]}
          ts[31:0]
```

Only the content of the header (data size and source ID) is given by the experiment's
description. The bit layout is this design's own.

## Receiving the packets: `mtp_parser`

There is one small state machine per link. It reads the header and compares the source ID with
the one configured for the link. It then checks that every primitive belongs to the frame its
packet announces: the `ts[31:8]` of the primitive must equal that of the frame. Primitives that
fail this check are dropped and counted in `n_rejected`. A packet whose header carries another source ID is
dropped whole and counted in `n_bad_pkt`.

The parser writes the accepted primitives on, then an end-of-frame marker. `frame_word_t` is a
primitive plus an `eof` bit. The parser takes one word per 125 MHz clock, which is 62.5 M
primitives/s per link.

## Removing the fixed offsets: `delay_generator`

Each source has an 8192-word FIFO. After SOB, the first `skip_frames[i]` frames of source *i*
are thrown away. A detector that needs *N* extra frames to form its primitives sends *N* leading
frames that have no partner; skipping them lines up its later frames with those of the fast
detectors. Meanwhile the fast detectors keep filling their FIFOs.

Frames then leave in **lock-step**. As soon as every enabled source holds one complete frame,
that frame is popped from all sources in parallel, one word per source per clock, until each
reaches its end-of-frame marker. `frame_done` then pulses and `frame_count` increments.

At 10 MHz of primitives per source, 8192 words hold about 800 µs. The FIFOs only need to hold
the frames a fast detector waits for, and in normal running that is a few frames (19.2 µs for a
3-frame offset). Words that reach a full FIFO are dropped and counted in `dg_overflow`.

## Alignment RAMs and the reading process

This is the core of the design, and the part that is least obvious.

### Writing: the time is the address

Every source has an `align_ram` of 2^14 = 16384 slots. A primitive is written at this address:

```
slot    = {ts, fine} >> (8 - fine_bits)      // fine_bits = 0..3, run-time setting
address = slot[13:0]
```

So the time in units of 24.95 ns / 2^fine_bits selects the slot. With 3 fine bits a slot is
3.125 ns wide and the RAM spans 51.2 µs. With 2 fine bits it spans 102.4 µs. Primitives of one
event land in the same or a neighbouring slot in every source's RAM, whatever order they arrive
in, as long as they arrive within one span of each other.

The full time and the ID are stored, with a valid bit. After reset a sweep clears all valid bits;
`ram_busy` is high during the sweep. Calibration primitives are not written. If two primitives
share a slot, the later one overwrites the earlier.

### Which slots are read: `ref_fifo`

Reading every slot would be far too slow. Instead, a `ref_fifo` lists every primitive of the
**reference detector**, which is chosen by `cfg_ref_src`. Only these slots are read. A second
instance lists the primitives of the **control detector** (`cfg_ctl_src`); these drive the
minimum-bias control trigger.

Each entry is tagged with the index of the frame release that brought it in.

### Reading: `read_sequencer`

For a reference primitive in slot *S*, the sequencer reads slots *S-1*, *S* and *S+1* from all
seven RAMs at once, one slot per clock. The neighbours catch primitives of the same event that
fell just over a slot boundary (the "edge effect").

For every source and every slot read, the entry counts as a hit only if both of these hold:
- **MSB check.** The stored time maps to exactly that slot number. The RAM is circular, so an
  entry written one span earlier has the same address; comparing the full slot number throws it
  away.
- **Timing window.** The full time differs from the reference time by at most `cfg_window[i]`
  fine-time LSBs. The window is a 12-bit value set per source.

A reference entry is read only after the frame after its own has been released for every source.
In terms of release indices, that means `frame_count - entry_index >= 2`. This guarantees that
slot *S+1* has been written even when *S* is the last slot of a frame. After the end of burst,
all remaining entries are read.

The reference FIFO has priority over the control FIFO. One reference primitive takes four clocks,
which gives 31 M/s at 125 MHz.

## Associative memory and downscaling: `amm`, `downscaler`

A three-stage shift register in `amm` collects the three slots read for one reference primitive.
For each source, the IDs of the in-time hits are ORed into a *global primitive ID*. The ID is 0 if
the source had no hit.

All 16 masks are then compared with these seven IDs in one clock. A mask gives every ID bit of
every source one of three meanings, encoded as a care/value pair:

| care | value | meaning |
|---|---|---|
| 0 | – | ignored |
| 1 | 1 | requested (the bit must be set) |
| 1 | 0 | veto (the bit must be clear) |

Control-detector events are matched against one separate control mask instead. For example, a
mask can require a CHOD hit and one MUV3 bit, and veto any LAV hit.

`downscaler` holds one counter per mask and one for the control trigger. Of every `F`
consecutive matches of a mask, only the first is kept. A trigger word (`trig_t`) is produced when
at least one mask survives. It carries:
- the reference time
- the list of surviving masks
- the seven global IDs

## Triggers that bypass the matching

- **Calibration primitives** (`calib_trigger`). A primitive with PID bit 15 set becomes a
  `TK_CALIB_PRIM` trigger at its own time, whatever the other detectors report.
- **LKr calibration NIM input** (`nim_calib_trigger`). A rising edge latches the current
  timestamp as a `TK_CALIB_NIM` trigger.
- **Periodic triggers** (`periodic_trigger`). There are two independent flows. Each has a period
  in master-clock periods and a start and stop time relative to SOB. A period of 0 turns the flow
  off.
- **Random trigger** (`random_trigger`).
  - A 32-bit Galois LFSR (taps `0x80200003`) produces one number every `rate_div` clocks.
  - A trigger is issued when the number's LSB is 1, so the mean rate is 20 MHz / `rate_div`.
  - It runs from a start time until the end of burst.

## Crossing to the master clock and the fixed latency: `async_fifo`, `latency_buffer`

Everything above runs at 125 MHz (`clk_sys`). The output stage runs on the 40 MHz master clock
(`clk_40`). Physics and calibration-primitive triggers cross between the two through two
16-deep dual-clock FIFOs with Gray-coded pointers.

`latency_buffer` is a 65536-slot circular RAM indexed by `ts[15:0]`, which spans 1.64 ms:
- **Writing.** A trigger is written at its own timestamp, so the buffer stays sorted in time
  whatever order triggers arrive in. Five sources share one write port in fixed priority: physics,
  calibration primitive, NIM, periodic, random.
- **Reading.** The read pointer waits until the burst timer reaches `cfg_latency`. After that it
  reads slot *X* at time *X + latency*.
- **Delivery.** A slot is delivered only if its stored full timestamp is the one being read, and
  it is cleared after reading.
- **Late triggers.** A trigger that arrives after its slot was read has missed its latency. It is
  dropped and counted in `lb_late`.

Measured at the top-level ports, a trigger of time *T* appears on `l0_*` at master-clock count
*T + latency + 2*: one clock for the buffer read and one for the dispatcher register.

## Dispatching: `trigger_dispatcher`

The last stage drops normal triggers in four cases:
- **Choke or error.** Each of the 16 detector choke and error lines is synchronized with two
  flip-flops and enabled by a mask. While any enabled line is active, no normal trigger leaves.
- **Dead time.** The trigger distribution needs 75 ns, which is 3 master clocks, per trigger. A
  normal trigger that comes sooner than that after the previous one is dropped.
- **Autochoke.** Triggers offered to the dispatcher are counted over a window of `cfg_ac_window`
  clocks. Once the count passes `cfg_ac_max`, the dispatcher stops until a window ends within the
  budget. For example, 100 per 4000 clocks is 1 MHz.

The start and the end of each choke, error and autochoke period are announced at once, without
latency, by special triggers: `TK_CHOKE_ON` … `TK_AUTOCHOKE_OFF`. These carry the current time.
They have priority over normal triggers and wait for the 3-clock spacing instead of being dropped.

Drops are counted by cause in `n_drop_inhibit` and `n_drop_deadtime`.

## Records for the PC farm: `mep_generator`

Every delivered trigger is also packed into packets for the PC farm, so that the trigger
conditions can be studied offline. A packet is sent once 8 records are waiting, or when the
oldest has waited `cfg_mep_timeout` clocks. It is a 32-bit word stream with start/end-of-packet
flags and a ready handshake:

```
header : {packet_number[15:0], record_count[7:0], 8'h00}
record : {kind[3:0], 4'h0, fine[7:0], masks[15:0]}
         ts[31:0]
         {gid[1], gid[0]} {gid[3], gid[2]} {gid[5], gid[4]} {16'h0, gid[6]}
```

## Configuration, reset and status

All settings are static input ports of `l0tp_top`, named `cfg_*`. Each source has:
- an ID
- an enable
- a skip count
- a timing window

The design also takes:
- the fine-bit count
- the reference and control sources
- the mask care/value arrays and mask enables
- the downscaling factors
- the latency
- the choke/error masks
- the autochoke window and maximum
- the periodic, random and NIM settings
- the MEP timeout

`rst_n` is the one reset shared by both clock domains. After it, both RAM sweeps must finish
(`ram_busy` low) before a burst starts. The status outputs give the choke, error and autochoke
state, `frame_count`, and one 16-bit counter for every place where data can be lost.

Memory at default sizes:

| Memory | Size |
|---|---|
| 7 frame FIFOs | 3.3 Mbit |
| 7 alignment RAMs | 0.9 Mbit |
| latency buffer | 11.3 Mbit |
| whole design | about 21 Mbit |

Written as plain arrays, these map to FPGA block RAM.

## Where this design departs from, or goes beyond, the description it follows

- **Not included.** The IP/UDP Ethernet stack, the RGMII/SGMII PHY interfaces, the PLLs and the
  auxiliary TTC board are not part of this RTL. The top takes MTP words as already received, and
  gives MEP words for a transmitter.
- **Own choices.**
  - The MTP and MEP bit layouts, depths other than 8192/16384/65536, counter widths and the
    care/value mask encoding are all this design's.
  - Frames are released in lock-step across all sources. This replaces "read the slowest source
    from the link and the others from their buffers" with a rule that needs no notion of which
    source is slowest.
  - A reference entry waits for the next frame release so that the *S+1* slot exists.
- **Collisions.** A second primitive in the same alignment slot overwrites the first. A second
  trigger with the same timestamp in the latency buffer replaces the first. Neither is counted.
- **Dead time.** A normal trigger closer than 75 ns to the previous one is dropped, not delayed.
- **Specials.** The detectors' acknowledgement of special triggers is not modelled. Specials are
  sent and not re-sent.
- **Full FIFOs.** A trigger that meets a full clock-crossing FIFO is lost without being counted.
  The producer side is at most about 31 M/s against a 40 MHz reader, so this needs a long stall.
- **Autochoke.** The rate measure (a count per fixed window) is this design's choice.
- **Latency.** Delivery is at *T + latency + 2* master clocks. Subtract 2 from `cfg_latency` for
  an exact figure.

## Verification and simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb_l0tp_top` runs the whole design with its
default sizes. In a short burst it makes every mechanism happen at least once, counts it, and
checks the result against a model of the expected trigger times:
- a skipped frame
- an edge-effect hit in a neighbouring slot
- a veto
- a hit outside the timing window
- downscaling
- choke and error inhibition with their specials
- autochoke
- the dead time
- control, calibration-primitive, NIM, periodic and random triggers
- MEP packets

`tb_l0tp_rate` runs the design at its operating point, also at full size:
- all seven sources send 64 primitives per frame (10 MHz each) for twelve frames
- one source is two frames late
- one mask selects about 1 MHz of triggers

It checks that every expected trigger leaves exactly at time + latency + 2, and that no FIFO,
buffer or packet stage loses anything.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
          -Irtl -Itb -y rtl -y tb +libext+.sv \
          rtl/l0tp_pkg.sv tb/tb_l0tp_top.sv --top-module tb_l0tp_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

`-Wno-fatal` keeps the unused-signal warnings from stopping the build. Replace `tb_l0tp_top` with any other testbench name, for example `tb_read_sequencer`. The
full-size top-level test takes about ten seconds. Smaller configurations only need the parameters
of the instantiated blocks changed, for example `align_ram #(.AW(10))`. Those parameters are set
in the block testbenches.
