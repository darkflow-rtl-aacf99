# DarkFlow readout in SystemVerilog

A dark-matter detector of the liquid-argon TPC type must record two very different
light signals with the same silicon photomultiplier (SiPM) array. The prompt S1
flash is a handful of photons that need nanosecond timing. The S2
electroluminescence is a microsecond-long flood that can exceed 10 Gb/s of raw hits
across the array. Cable bandwidth and the power allowed in the cryostat are both
small. DarkFlow is a digital SiPM readout for this problem. It rests on four ideas:

1. **Aggregate locally, early.** The 16 SPADs of an L1 unit are summed in the
   analog domain and reduced to a 2-bit energy level. Sixteen L1 units form an L2
   tile, which sends packets instead of per-photon events.
2. **Relative time instead of absolute timestamps.** An L2 tile stamps only its
   first photon, with a 15-bit offset at 2 ns resolution. After that it reports one
   8-bit count per 10 ns frame, indexed by a 7-bit frame number. A 32-bit absolute
   time packet is sent once per 10 µs epoch and anchors the offsets.
3. **Backpressure from the consumer back to the sensor.** When the link stops,
   nothing is thrown away until the smallest buffer, the L2 FIFO, is full.
4. **A large eDRAM burst buffer whose refresh looks only at occupied slots.** The
   refresh pointer stays between the read and write pointers, so every refresh
   cycle lands on live data.

This repository holds RTL for the whole digital path of that architecture: the L1
encoders, the L2 tiles, the systolic rows, the L3 packing engines, the eDRAM FIFO
controller and the absolute timer. It also holds behavioural models of the two
analog or process-specific parts (the L1 front end and the eDRAM bank) and
self-checking testbenches for every module. The architecture comes from the
published DarkFlow description. Widths, sizes and packet layouts follow it, and
details it leaves open are filled in here and marked as such below.

## Hierarchy and sizes

| Level | Contents | Default |
|---|---|---|
| L1 | 4×4 SPADs, analog sum, 3 comparators (Vth1 = Pth < Vth2 < Vth3) → 2-bit level | 16 SPADs |
| L2 tile | 16 L1 units (256 SPADs), fine timer, frame/index counter, event counter, 16×16-bit FIFO | 16 L1 |
| Row | 16 L2 tiles in a systolic chain of single-slot skid buffers | 16 tiles |
| Array | 8 rows = 8×16 tiles = 256×128 SPADs | 8 rows |
| L3 | absolute timer, two packing engines (even rows → left, odd rows → right), two eDRAM FIFO sides of 4096×128 bit (128 kB in total) | |

One clock runs the design: 500 MHz, so one cycle is 2 ns. This cycle is the unit
of every time value.

## Packet formats

```
L2 time packet   (16 b)  [15]=0  [14:0] Offset            first photon, 2 ns units since epoch start
L2 event packet  (16 b)  [15]=1  [14:8] Sequence_Index    10 ns frame number after the first photon (1..127)
                                 [7:0]  count             sum of L1 levels over the frame
L3 event packet  (32 b)  [31:30]=10 [29:23]=0 [22:20] row ID [19:16] L2 ID [15:0] L2 packet
L3 time packet   (32 b)  [31:30]=01 [29:0] Global_Epoch   absolute time of the epoch start, 2 ns units
idle slot        (32 b)  all zero                          padding in a partly filled 128-bit word
```

A 128-bit FIFO word holds four 32-bit packets, with the oldest in bits [31:0]. The
host rebuilds times as follows:

```
T_start = Global_Epoch + Offset
T_n     = T_start + Sequence_Index × 10 ns
```

`Global_Epoch` is the last time packet in the same FIFO stream. The L2 FIFOs and
the chain can delay a time packet. If that delay pushes it past the next epoch
boundary, the latest anchor is one epoch too new. Offsets never reach the epoch
length (5000), so the host can try `Global_Epoch − 5000` as well. The end-to-end
testbench measures how often the latest anchor is the right one.

The published description fixes the event head code only for time packets
(`01`). The codes `10` for events and `00` for empty slots are this design's
choice.

## L1: front end and energy code

`l1_analog_frontend` is a behavioural model, not logic to synthesize. It counts the
SPADs that fired in a cycle and compares the count with three thresholds, all in
photo-electrons. `pth` is the programmable photon threshold:

- `Pth = 1` detects single photons.
- `Pth = 2` on one unit hides a SPAD with a high dark-count rate.
- Raising `Pth` everywhere sheds faint hits during a flood.

`l1_encoder` maps the thermometer code to a level:

| Level | Condition | Meaning |
|---|---|---|
| 0 | below Pth | sparse or noise |
| 1 | ≥ Pth | low photon density |
| 2 | ≥ Vth2 | moderate photon density |
| 3 | ≥ Vth3 | high density |

Vth1 gates the other two comparators. If Pth is raised above Vth2, sums below Pth
still read as 0.

## L2 tile: first photon, then frames

`l2_node` waits in IDLE until any of its L1 units reports a non-zero level.

1. **Trigger cycle.** The tile writes a time packet holding the fine timer, which
   counts cycles since the current epoch began. Frame 1 starts in the same cycle.
2. **Frames.** Each frame lasts 5 cycles (10 ns). `l2_event_counter` adds up the
   L1 levels; with 16 units the maximum is 16·3·5 = 240. In the frame's last cycle
   the tile writes an event packet `{index, count}` if the count is non-zero.
3. **End of the window.** Frame 127 is the largest index 7 bits can hold. After it
   the tile returns to IDLE, and the next photon starts a new window with a fresh
   time packet.

The 16-entry FIFO absorbs packets while the row is stalled. A packet that meets a
full FIFO is not written, and `drop` pulses. This is the only place in the design
where data is discarded.

Choices made here where the description is silent:

- frame 1 begins in the trigger cycle;
- frames with a zero count produce no packet;
- the window closes after 127 frames;
- the count is the sum of 2-bit levels.

## Rows: systolic chain and how a stall travels

This part needs the most care. `l2_row` chains one `skid_buffer` per tile.

**Stage merging.** Stage *i* takes either the word coming from stage *i−1* or a
packet from its own tile's FIFO. It tags the tile's packet with the tile's 4-bit
ID. The last stage adds the 3-bit row ID and the head, which makes the 32-bit L3
event packet. All wires run between neighbours.

**Arbitration.** When both inputs are waiting, stage *i* serves its own tile once
every *i+1* transfers (weighted round robin). Stage *i* carries the traffic of *i*
tiles upstream, so under saturation every tile gets 1/16 of the link. Plain
alternation would starve the tiles near the start of the chain. This matters in a
flood: each tile can produce one packet every 5 cycles, 16 tiles then offer 3.2
packets per cycle, and the link carries one per cycle. The tile FIFOs are therefore
what holds a dense burst.

**Backpressure.** `row_stall` from the packing engine is the ready signal of the
row's last stage, and a stall travels upstream in four steps:

1. The last stage holds its word. Its skid slot catches the one word already in
   flight.
2. The skid slot being full lowers `in_ready` one cycle later. The stall moves
   upstream one stage per cycle, and no ready signal ripples combinationally along
   the 16 stages.
3. With the chain frozen, nothing pops the tile FIFOs (Fig. 4(b) of the
   description shows the `fifo_rd_en` that stops). The FIFOs go on taking new
   packets until they are full.
4. Only then do packets drop.

## L3: packing engine and absolute timer

`l3_abs_timer` counts 2 ns cycles (30 bits). Every 5000 cycles (10 µs) it raises
`sync` in the last cycle of the epoch. The pulse does two things:

- every L2 fine timer reads 0 in the first cycle of the new epoch;
- both packing engines insert a time packet carrying the epoch start time.

Each `l3_packer` serves four rows.

- **Intake.** In one cycle it can take a packet from every row plus a time packet.
  They go into an 8-slot buffer in a fixed order: time packet first, then rows by
  index.
- **Output.** Four packets leave as one 128-bit word.
- **Partial words.** If fewer than four packets wait for 16 cycles with nothing new
  arriving, the engine sends the partial word padded with zeros, so sparse S1 hits
  are not held back.
- **Stall.** `row_stall` rises when the buffer could not hold one more full round
  of inputs, which is 4 rows + 1 time packet. A time packet that finds no room
  waits in a one-entry register.

The buffer size, the stall rule and the flush timeout are this design's choices.

## eDRAM burst FIFO and occupancy-aware refresh

Each side (`l3_edram_fifo`) is a 128-bit × 4096 FIFO with three parts:

- **Burst buffer.** A two-entry queue takes one word per cycle and holds a word
  while the memory is busy.
- **Two banks.** `edram_bank` is a behavioural model: 2048 rows × 128 columns with a
  2:1 column mux, so each bank holds 4096 × 64 bits. Bits [127:64] of each word go
  to bank 0 and bits [63:0] to bank 1, with the same address and command. The two
  banks share one controller.
- **Controller.** `l3_fifo_ctrl` issues at most one command per cycle, in priority
  order:

  | Command | When | Source |
  |---|---|---|
  | READ | read timer pending, data present, output free | timer every `READ_PERIOD` = 64 cycles |
  | WRITE | burst buffer holds a word, FIFO not full | |
  | REFRESH | refresh timer pending, FIFO not empty | timer every `REFRESH_PERIOD` = 24 cycles |

  The read rate is one 128-bit word per 128 ns per side, 2.0 Gb/s for both sides
  together. Refresh only gets cycles that reads and writes leave unused, so a
  sustained burst suspends it.

The refresh pointer RefP follows three rules:

- RefP always lies in the occupied window [RdP, WrP).
- After refreshing the slot just below WrP, it wraps back to RdP.
- When a read moves RdP past RefP, RefP is clamped to the new RdP.
- An empty FIFO refreshes nothing.

Every refresh therefore hits a live slot. A timer-driven sweep of all 4096
addresses would instead spend most of its cycles on empty ones. With the default
period, a completely full side is swept in 4096 × 24 = 98,304 cycles (197 µs). That
is inside the 250 µs (125,000-cycle) retention assumed for the eDRAM.

The bank model makes decay visible. A row that has not been activated (by a write,
read or refresh) for more than `RETENTION` cycles reads back inverted and raises
`retention_err`. The testbenches fail on any such error.

Reading to the consumer has one cycle of latency, and `out_data` holds until the
next read. A consumer that keeps `out_ready` low fills the FIFO, then the burst
buffer. When `in_ready` drops, the packing engine stalls the rows.

## Top level

`darkflow_top` instantiates 2048 L1 front-end models, 8 rows, the absolute timer,
two packing engines and two FIFO sides.

**Inputs**
- the SPAD hits of every L1 unit;
- a Pth value for every L1 unit;
- the global Vth2 and Vth3.

**Outputs**
- the two 128-bit FIFO streams on valid/ready. The serial link that would carry them
  off chip is not part of this RTL.
- status: per-tile drop and FIFO full, per-row stall, FIFO levels, refresh strobes,
  retention errors and time-packet strobes.

Main parameters (defaults):

| Parameter | Default | Meaning |
|---|---|---|
| `ROWS`, `NODES`, `N_L1`, `N_SPAD` | 8, 16, 16, 16 | array size |
| `FRAME_CYCLES` | 5 | 10 ns frame |
| `L2_FIFO_DEPTH` | 16 | tile FIFO |
| `EPOCH_CYCLES` | 5000 | 10 µs epoch |
| `PACK_SLOTS`, `FLUSH_TIMEOUT` | 8, 16 | packing engine (own choice) |
| `FIFO_DEPTH`, `BB_DEPTH` | 4096, 2 | eDRAM FIFO per side, burst buffer (own choice) |
| `READ_PERIOD` | 64 | link pacing, 2 Gb/s total (own choice) |
| `REFRESH_PERIOD` | 24 | refresh request interval (own choice) |
| `RETENTION` | 125000 | eDRAM model retention, 250 µs |

`ROWS` may be at most 8 and `NODES` at most 16, because the row and tile IDs are 3
and 4 bits wide.

## Files

| File | Content |
|---|---|
| `rtl/darkflow_pkg.sv` | widths, head codes, packet structs and constructors |
| `rtl/l1_analog_frontend.sv` | behavioural model of the L1 SPAD sum and comparators |
| `rtl/l1_encoder.sv` | thermometer code → 2-bit level |
| `rtl/l2_fine_timer.sv` | 15-bit 2 ns offset counter |
| `rtl/l2_event_counter.sv` | 8-bit per-frame energy sum |
| `rtl/sync_fifo.sv` | FIFO (L2 FIFO, burst buffer) |
| `rtl/skid_buffer.sv` | single-slot skid stage |
| `rtl/l2_node.sv` | L2 tile |
| `rtl/l2_row.sv` | systolic row |
| `rtl/l3_abs_timer.sv` | absolute timer and global sync |
| `rtl/l3_packer.sv` | packing engine |
| `rtl/edram_bank.sv` | behavioural model of an eDRAM bank with retention |
| `rtl/l3_fifo_ctrl.sv` | pointer manager, timers, occupancy-aware refresh |
| `rtl/l3_edram_fifo.sv` | one FIFO side |
| `rtl/darkflow_top.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_darkflow_top.sv` | end to end, full array, shrunk FIFO and timers |
| `tb/tb_darkflow_full.sv` | end to end, every parameter at its default |
| `tb/tb_darkflow_workload.sv` | loss under Gaussian and uniform illumination, defaults |
| `tb/tb_l3_refresh_workload.sv` | refresh efficiency of one FIFO side over a full drain, defaults |

## Simulating

Every testbench ends with a line `TB_RESULT checks=N failures=M`. Each also has a
watchdog that counts a failure and stops the run if the simulation hangs.
With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -y rtl +libext+.sv rtl/darkflow_pkg.sv tb/tb_l2_node.sv \
  --top-module tb_l2_node -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

Replace `tb_l2_node` with any other testbench name. The two top-level testbenches
take about two minutes to compile and a few seconds to run. `-Wall` lint is clean
except for style warnings, listed under "Known warnings" below.

## What the testbenches check

- **Unit tests** compare each module with a reference model in the testbench:
  - L1: comparator decisions and the level table.
  - L2 tile: time/event packets, frame sums, index 1..127 and re-arm, drop on a full
    FIFO, one-cycle FIFO latency.
  - Rows: no loss, per-tile order, IDs, a word held during a stall, chain latency
    of 2 + 16 cycles, equal share per tile under saturation.
  - Packing engine: order, padding only after the timeout, the exact stall rule,
    4 packets per cycle in and one word per cycle out.
  - FIFO controller: command priority, read rate, every refresh inside the
    occupied window, wrap and clamp events.
  - eDRAM FIFO: data intact through a consumer pause of 3000 cycles with a
    600-cycle retention, so refresh is doing the work.
  - Bank model: decay and restore.
- **`tb_darkflow_top`** runs the full 8×16×16 array with small FIFOs and timers
  through five phases: sparse single photons, a noisy unit at Pth = 2, a dense
  burst, a consumer pause and a drain.
  - The host side checks every delivered packet against what the tiles wrote, and
    rebuilds every T_start.
  - It requires each mechanism to occur: row stall, tile FIFO full, drop,
    burst-buffer backpressure, refresh, time packets, partial words, window wrap,
    and Pth suppression.
- **`tb_darkflow_full`** does the same with every parameter at its default: a
  12 µs sparse phase, a 2.4 µs burst with a consumer pause, then a 300 µs drain at
  the 2 Gb/s link rate.
- **`tb_darkflow_workload`** drives Poisson photon arrivals into the default design.
  It counts packets written and dropped at the tiles, and their energy. The
  checks are structural: no retention error, Pth = 2 never makes more packets
  than Pth = 1, and loss never falls as the rate or burst length grows.
- **`tb_l3_refresh_workload`** checks that a full drain is intact and in order,
  with no retention error and reads exactly 64 cycles apart. It also checks that
  every refresh hits valid data and that useful refreshes are at least 1.5
  times those of the global sweep.

## Loss under illumination

`tb_darkflow_workload` sweeps two spatial profiles, a Gaussian spot (sigma of 20
SPAD pitches) and uniform light. It also sweeps three aggregate rates (1e9, 2e9
and 1e10 hits/s), both photon thresholds, and two burst lengths (10 µs and
50 µs). Packet loss is dropped over generated packets. Photon-equivalent loss
is the same ratio taken over the energy (sum of L1 levels) of event packets.

| burst | profile | Pth | 1e9 | 2e9 | 1e10 |
|---|---|---|---|---|---|
| 10 µs | Gaussian | 1 | 0 | 0 | 7.4 % |
| 10 µs | uniform | 1 | 0 | 0 | 50.2 % |
| 50 µs | Gaussian | 1 | 12.6 % | 48.2 % | 80.0 % |
| 50 µs | uniform | 1 | 27.2 % | 60.8 % | 90.1 % |
| both | both | 2 | 0 | 0 | 0 |

Packets are lost only once the buffers are full. The two eDRAM sides hold 8192
words, or 32,768 packets, and the 2 Gb/s link drains at most 62.5 packets per µs.
So the length of a burst the design survives depends on its rate. At Pth = 2,
the L1 units suppress single dark counts, and no run loses anything. The
photon-equivalent loss tracks the packet loss. In most runs it is a few points
lower.

## Refresh over a full drain

`tb_l3_refresh_workload` runs one FIFO side at its defaults. A burst fills all
4096 words while writes starve refresh. The side then drains through the read
timer, one word per 64 cycles, and is empty after 536 µs. As a reference, the
testbench models a conventional global refresh. It gets the same refresh
slots, but its pointer walks all 4096 addresses whether they hold data or not.

| | occupancy-aware (RTL) | global sweep (reference model) |
|---|---|---|
| refreshes that hit valid data | 100 % | 52.8 % |
| mean age of a word at readout | 9,410 cycles | 20,802 cycles |
| largest age at readout | 61,800 cycles | 98,216 cycles |

There are 11,000 refresh slots in the run. The occupancy-aware scheme turns
1.89 times as many of them into useful refreshes. The gain comes from the
occupied window. It shrinks linearly during the drain, so a blind sweep finds
data about half the time. Both schemes stay within the 125,000-cycle
(250 µs) retention here. What the occupancy-aware scheme buys is margin: its
oldest word at readout is 37 % younger.

## Where this RTL departs from, or adds to, the published design

- **Analog and macro parts are models.** The SPAD array, the summing node and the
  comparators are modelled as a per-cycle photon count against thresholds in
  photo-electrons. The eDRAM is a behavioural array with a per-row retention
  timer. The threshold DACs, the PLL/clock tree and the serial link (for example
  LVDS) are not modelled.
- **The event count** is read here as the sum of L1 energy levels over a frame. The
  description calls it the photon count within each 10 ns window.
- **Own choices.** The description does not specify the following, and they are
  choices made here:
  - frame alignment to the first photon, the 127-frame window, and skipping empty
    frames;
  - the event and idle head codes;
  - stage arbitration in the rows;
  - the packing buffer, its stall rule and flush timeout;
  - burst buffer depth, command priority, read and refresh periods;
  - the absolute time in 2 ns units;
  - reset (asynchronous, active low) and every valid/ready handshake.
- **Epoch anchoring** uses the latest time packet of the same stream. A time packet
  delayed across an epoch boundary needs the host to step back one epoch, as
  described under Packet formats.
- **Not built in RTL:** the conventional global refresh. It is only a point of
  comparison, so it exists just as a reference model inside
  `tb_l3_refresh_workload`. The serial and AER readouts that the loss figures
  are compared with are not modelled at all.

## Known warnings

- Verilator reports `SYNCASYNCNET` on `rst_n`. The flops use `rst_n` as an
  asynchronous reset while the assertions use it in `disable iff`.
- It reports `PINCONNECTEMPTY` where status outputs of reused modules are left
  open on purpose.
