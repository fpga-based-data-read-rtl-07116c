# Two-layer FPGA read-out for a DEPFET pixel detector

A DEPFET pixel half ladder is read by four DHP chips. Each DHP streams
zero-suppressed hits over its own serial link. The DHP does not know about
triggers. It reads its 768-row matrix continuously in a rolling shutter, four
rows per 100 ns read-out cycle, and sends every frame in full.

The read-out system cuts one detector frame per trigger out of these streams
and optionally groups the hits into clusters. It then gathers the data of up
to five half ladders into one sub-event and passes that on. Two layers of FPGA
firmware do this:

- **DHH** (Data Handling Hybrid): one per half ladder, with four DHP links.
- **DHHC** (DHH controller): one per five DHHs. It distributes trigger and
  clock, builds sub-events, and shares one Ethernet connection for slow
  control.

This repository holds synthesizable SystemVerilog for both layers and for one
read-out unit (five DHHs and one DHHC, module `readout_unit`). It also has
self-checking testbenches for every block.

## Data format

All streams are 16-bit words with start-of-frame and end-of-frame flags:
`dhh_pkg::word_t = {sof, eof, data[15:0]}`, moved with valid/ready.

Body words (top two bits):

| bits 15:14 | meaning | payload |
|---|---|---|
| `00` | hit | column [13:8], ADC value [7:0] |
| `10` | row header | row [9:0]; following hits belong to this row |
| `11` | cluster tag | cluster number [11:0] of the next hit |

A DHP frame here is a header word holding the DHP frame counter, then the
rows with hits in ascending order. The real DHP format is not public in this
form, so this layout is one choice among many.

Frames between the layers start with a type word:

| bits | meaning |
|---|---|
| [15:12] | frame type: 0 raw, 1 clustered, 2 Ethernet, 3 sub-event header, 4 sub-event trailer |
| [11] | last frame of this event from this DHH |
| [7:2] | DHH index |
| [1:0] | DHP link |

The second word of every data frame is the trigger (event) number.

## DHH: turning a rolling shutter into events

### Which rows belong to a trigger (`job_allocator`, `data_storage`, `data_reader`)

This is the least obvious part of the design.

The DHP keeps no trigger information. When a trigger arrives, the DHP is
somewhere in the middle of its frame, at row R of frame F. The detector image
that belongs to the trigger is made of two pieces:

- rows R..767 of frame F;
- rows 0..R-1 of frame F+1, which the shutter passes over after the trigger.

DHH and DHP run from one clock, so the DHH does not need to be told R. The
`job_allocator` runs its own copy of the DHP read pointer:

- one read-out cycle (4 rows) every `CLK_PER_RO` clocks;
- a wrap to row 0 and frame F+1 after 768 rows.

`CLK_PER_RO` is 8 clocks at 76.33 MHz, which gives 104.8 ns against the
nominal 100 ns. It must equal the real DHP timing. The pointer starts at row 0
of frame 0 when reset is released. DHP and DHH must leave reset together.

On each trigger the allocator hands `{trigger number, R, F}` to the next free
`data_storage` module, in round-robin order. With `NDSM` = 4 modules, up to
four triggers can be in progress at once. Their frame windows may overlap.

Each storage module watches the shared DHP stream:

- it stores rows ≥ R of frame F in FIFO A;
- it stores rows < R of frame F+1 in FIFO B;
- it then emits the trigger number, FIFO B, and FIFO A.

So the event comes out with rows in ascending order. `data_reader` collects
finished events from the modules, again in round-robin order.

A trigger that finds every module busy is dropped and counted. In a DHH, a
trigger is accepted only when all four links have a free module. All four
links therefore always carry the same list of events.

### External memory FIFO (`ddr3_fifo`)

After re-ordering, each link's events go through a FIFO that lives in the
external DDR3 memory. There is one ring buffer per channel. Base and size come
from registers; asserting `cfg_load` reloads them and empties all rings.

Words are packed into 256-bit memory vectors:

- the lowest 16 bits are a service field: word count [3:0], sof [4], eof [5];
- the other 240 bits hold up to 15 data words, all from one frame.

Storage overhead is therefore 1/16 = 6.25 % for long frames and more for short
ones. A frame of n words takes ceil(n/15) vectors.

An arbiter visits the channels in turn. On each visit it writes up to `BURST`
waiting vectors, then reads up to `BURST` stored vectors back, and waits for
the read data.

The memory port is a simple command interface (`mem_req`/`mem_ready`, read
data returned in order). It stands for the vendor DDR3 controller.
`ddr3_mem_model` is a behavioural stand-in with fixed latency and periodic
stalls.

### Clustering (`cluster_recovery`)

One unit per DHP stream (64 columns) works in two passes.

**Pass 1** takes one hit per clock. For each column it keeps the cluster
number in the current row and in the row above. A hit looks at four
neighbours: left, up-left, up and up-right.

- With no numbered neighbour, it takes a new number.
- Otherwise it takes the smallest neighbouring number.
- When two different numbers touch, the table records larger → smaller.
  Every column cell holding the larger number is rewritten at once.

Because of the rewrite, a hit never sees more than two distinct numbers.

**Pass 2** re-reads the buffered hits. It follows each number through the table
to its root and writes the root back, so later look-ups are short. The longest
chain seen is reported (`max_lookups`, 2 in all tests).

Output is the trigger number, then row headers and one cluster tag before
every hit. The hits stay in the same order as in bypass mode.

**Not implemented:** the final merge of clusters that cross the borders
between the four DHP streams. Cluster numbers are per stream.

### Framing and link multiplexing (`dhh_framer`, `eth_data_mux`)

`dhh_framer` takes one frame per link, link 0 to 3, and prepends the type word.
The last link's type word carries the last-frame flag.

`cluster_mode` chooses clustered or bypass (raw) data. It is sampled when an
event starts. It also drives the bypass/cluster demultiplexer behind the
memory FIFO directly. **Change it only while no event is in flight**; a change
mid-event splits a frame between the two paths.

`eth_data_mux` merges slow-control Ethernet replies into the link at frame
boundaries, data first. Each reply gets an Ethernet type word in front.

### Slow control (`jtag_master`, `sequencer`)

- **`jtag_master`** executes commands of up to 32 bits. A command gives a
  length and TMS and TDI vectors, LSB first. TCK runs at clk/(2·`TCK_DIV`).
  The master returns the captured TDO bits. A second instance drives the
  switcher chips as a JTAG player.
- **`sequencer`** is a dual-port memory holding the switcher control pattern.
  It is written from slow control and read out continuously. The read pointer
  restarts at `last_addr` or on `frame_sync`.

## DHHC: sub-events

### Trigger crossing (`trigger_cdc`)

Triggers arrive in the 127.21 MHz clock of the trigger system. They are moved
into the 76.33 MHz read-out clock, which is exactly 3/5 of it.

No synchronizer is used. Instead, the design uses the common period of 5 fast
cycles = 3 slow cycles (39.3 ns):

- the fast side writes a transfer register at the start of each period;
- the slow side reads it at the end of the period.

Latency is fixed at under two periods. A second trigger in the same period is
counted in `lost`. This cannot happen at the real minimum trigger spacing of
190 ns.

Both counters must be started by one reset released at a common edge.

### Sub-event builder (`seb_input`, `event_framer`, `sub_event_builder`)

**`seb_input`**, one per DHH link:

- It buffers the link in an input FIFO.
- It raises `xoff` at 3/4 fill and drops it below 1/4. `xoff` stands for the
  link's native flow control: the DHH holds its stream and the data waits in
  the DHH's external memory.
- It sends each event, as a whole, to one of four intermediate FIFOs, one per
  output. It moves to the next output when the event number (second word of a
  frame) changes.
- Masked outputs are skipped.

**`event_framer`**, one per output:

- It reads the intermediate FIFOs of the unmasked inputs in index order. From
  each it takes frames until the one with the last-frame flag.
- It wraps them in a header frame (`{3, 0}`, event number) and a trailer frame
  (`{4, mismatch flag, frame count}`, event number).
- A frame whose event number differs from the first one is counted in
  `mismatches` and flagged in the trailer.

The outputs then pass through a second `ddr3_fifo` in the DHHC's own memory.

### Ethernet sharing (`eth_hub`, `dhhc`)

The board has one Ethernet port. `eth_hub` handles it:

- It broadcasts each incoming frame to the five DHHs and the DHHC's own
  register client. A word moves on only when every port has taken it.
- It merges the replies, whole frames at a time, in round-robin order.

`dhhc` separates reply frames from data on each DHH link by their type word.

## Top level

`readout_unit` wires five `dhh` and one `dhhc`. Parts outside this RTL are
brought out as ports:

- the serial link cores and transceivers; their user-side streams connect
  directly, and one clock stands for the recovered link clock;
- the Ethernet/register client;
- the front-end chips.

## Parameters and sizes

Defaults follow the paper where it gives a number:

- 768 rows, 4-fold read-out, 64 columns per DHP;
- 4 links per DHH, 5 DHHs, 4 outputs;
- 256-bit memory vectors with a 16-bit service field;
- 27-bit vector addresses, i.e. 4 GB.

The rest are this design's own choices:

| parameter | value | why |
|---|---|---|
| `NDSM` | 4 | overlapping triggers per link |
| `FIFO_DEPTH` | 4096 | storage FIFO depth; one event at 3 % occupancy is about 2200 words |
| `HIT_DEPTH` | 4096 | hit buffer depth |
| `ID_W` | 12 | cluster number width |
| `IN_DEPTH`, `INT_DEPTH` | 1024, 512 | sub-event builder FIFO depths |
| `BURST` | 8 | vectors per arbiter visit |
| `SEQ_DEPTH` | 1024 | sequencer depth |
| `TCK_DIV` | 4 | JTAG clock divider |

The behavioural memory holds 262144 vectors (8 MB) per instance instead of
4 GB.

Load and capacity, worked out from the defaults:

- Each DHH-to-DHHC stream carries one word per clock: 152.7 MB/s.
- A DHP frame takes 20.1 µs.
- A beam-test load of 5 kHz triggers and 17 MB/s, or 300 Hz and 0.2 MB/s, is
  far inside these limits.
- A 3-DHP test module of 480×192 pixels uses three links. `ROWS` must then be
  set to 480, because the DHH's pointer model must match the DHP frame length.

## Where this departs from a full system

- No merge of clusters across DHP stream borders.
- The DHP frame format, the type-word and header/trailer layouts and the memory
  service-field layout are this design's own.
- `cluster_mode` must not change with events in flight.
- A trigger dropped in one DHH is not dropped in the others. At the same load
  the DHHs make the same decision, but nothing forces it. A real system needs
  a trigger veto (busy) signal back to the trigger system.
- The memory controller is reduced to a simple command port.
- DHH and DHHC share one clock.

## Simulation

Each testbench in `tb/` prints `TB_RESULT checks=N failures=M` and stops. Each
has a watchdog. With plain Verilator, from the repository root:

```
verilator --binary --timing -Irtl -Itb rtl/dhh_pkg.sv tb/tb_pkg.sv \
          tb/tb_readout_unit.sv --top-module tb_readout_unit -Mdir obj -o sim
obj/sim
```

Swap in any other testbench name.

Shared test code:

- `tb/tb_pkg.sv` defines the pixel content as a pure function of (frame,
  link, row, column). Every expected value is computed from it, not taken from
  the design.
- `tb/dhp_model.sv` plays the DHP side: the rolling pointer, and sending the
  frames a trigger needs.

| testbench | covers |
|---|---|
| `tb_data_reordering` | allocator, storage, reader: overlapping and dropped triggers |
| `tb_ddr3_fifo` | packing, four channels, full ring, vector count against ceil(n/15) |
| `tb_cluster_recovery` | V/U shapes and random events against a flood-fill reference; one clock per hit in pass 1 |
| `tb_trigger_cdc` | 200 triggers, latency bound, one lost trigger |
| `tb_dhh_framer` | frame order and type words across mode changes |
| `tb_eth_data_mux` | priority and framing of replies |
| `tb_jtag_master` | shifts against a 40-bit device model |
| `tb_sequencer` | pointer behaviour against a reference model |
| `tb_sub_event_builder` | round-robin with a masked output, masked input, flow control, a mismatching event |
| `tb_eth_hub` | broadcast and merging |
| `tb_readout_unit` | end to end at reduced size (64-row frames, small memories) |
| `tb_readout_full` | end to end, every parameter at its default, 3 % occupancy; about half a minute |

`tb_readout_unit` checks every sub-event word by word. It fails unless each of
these happened at least once:

- trigger crossing, and a lost trigger;
- overlapping triggers, and dropped triggers;
- bypass frames and clustered frames;
- flow control, and a full ring buffer;
- Ethernet broadcast and reply merging;
- a masked DHH.
