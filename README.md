# A memory-trace board FPGA in SystemVerilog

## The idea

To record every access that a running machine makes to its main memory, you
can put a board between one DIMM slot and the DIMM. The board sees the DDR
command and address pins. An FPGA on the board turns every READ and WRITE it
sees into a small record and streams the records out over Gigabit Ethernet to
other machines, which store them. The traced machine runs unmodified and at
full speed. Nothing in its caches or memory controller changes.

Such a trace holds only physical line addresses. On its own it cannot say
which process, system call or program phase an access belongs to. The design
adds that meaning through a back channel that costs the traced machine
almost nothing. A small region at the top of the DIMM, the *configuration
space*, is reserved.

- Software marks an event by *reading* one line of that region.
- The FPGA sees that read on the command bus like any other access.
- It recognises the address and does two things:
  - it treats the read as a command to the tracer (start, stop, reset, switch
    mode);
  - it inserts a *tag record* into the trace at exactly the point where the
    read happened.

A kernel module or an instrumented program can therefore label the trace
with process switches, system calls, or its own user-defined events. The
labels are in perfect order with the surrounding references.

This RTL implements the FPGA:

- command snooping;
- the configuration-space interface;
- the record format with differential timestamps;
- two optional on-line analysis units (a reuse-distance and hot-page unit,
  and an interval statistics unit);
- a 16K-word buffer;
- framing over three Gigabit Ethernet transmit MACs.

## Block diagram and data flow

```
 DDR pins (CS#,RAS#,CAS#,WE#,BA,A) of the traced DIMM, memory clock `clk`
        |
   ddr_cmd_buffer      capture + decode, 2 clocks
        | buffered command
        +--------------------------+
        |                          |
   config_unit                ddr_state_machine_unit
   (mode, clear, tags)  --->   4 x ddr_bank_fsm -> <row,bank,col,r/w>
        |                      duration counter, record packing, queue
        |                          | trace records       | raw references
        |                          |                     +--> rdhpu (LRU stack)
        |                          |                     |     | reuse distance, hot pages
        |                          |                     +--> statistic_unit
        |                          |                           | statistics records
        v                          v                           v
                     tx_fifo_unit: 16K x 32 dual-clock FIFO
                                   |  transmit clock `tx_clk` (125 MHz)
                     tx_thread_unit: frames, round robin over 3 ports
                          |            |            |
                       gmac_tx      gmac_tx      gmac_tx     -> GMII to PHYs
```

There are two clock domains.

- The left-hand side runs on the DDR command clock. That is half the data
  rate: 100 MHz for DDR-200 and 200 MHz for DDR2-400.
- Everything after the FIFO runs on the 125 MHz GMII transmit clock.
- The only crossing is the FIFO (`async_fifo`, gray-coded pointers).

## Seeing references on the command bus

A DDR access has two phases.

1. ACTIVE opens a row in one bank.
2. Later READ or WRITE commands to that bank give the column.

Commands to different banks interleave freely. The tracer needs none of the
rest of the JEDEC state machine, only ACTIVE, READ and WRITE.

**`ddr_cmd_buffer`** registers the pins and decodes them with the standard
truth table. The result is valid two clocks after the pins.

**`ddr_bank_fsm`** has one instance per bank, each a four-state machine:

- **States:** IDLE, ACTIVE, READ and WRITE.
- **ACTIVE:** latches the row.
- **READ/WRITE:** emits the reference one clock later.
- **Any other command** (PRECHARGE, REFRESH and so on) returns a bank from
  READ or WRITE to IDLE.

An ACTIVE to a row inside the configuration space is "filtered": the state
stays out of ACTIVE. This design still latches the row and a `cfg` flag, so
that accesses to that row can be recognised and kept out of the normal trace.

**Address arithmetic.** The address map is one single-rank 512 MB DIMM of
512 Mb x8 parts:

- 13 row bits, 4 banks, 11 column bits;
- the column is `{A11, A9..A0}`, because A10 is the auto-precharge flag.

With a 64-bit bus and a burst of eight, one READ/WRITE moves one 64-byte
cache line. The trace therefore carries a 23-bit *line number*,
`{row, bank, column[10:3]}`. The low column bits select the word within the
burst and are dropped.

**`ddr_state_machine_unit` (DSMU)** holds the four bank machines. Only one
command can be on the bus per clock, so at most one bank produces a
reference per clock.

## Talking to the tracer through memory reads

The configuration space is the top 8 MB of the DIMM, rows 8064 to 8191.

**`config_unit`** does three things:

- it remembers, per bank, whether the open row is in this space and which of
  its 128 rows it is;
- it turns each READ of the space into a *line index*,
  `{row offset, bank, column[10:3]}` (byte offset / 64);
- it acts on that index:

| byte offset | index | action |
|---|---|---|
| 0x0    | 0 | BEGIN_TRACING: work mode TRACE |
| 0x40   | 1 | END_TRACING: work mode OFF |
| 0x80   | 2 | RESET_TRACING: mode OFF, and a one-clock `clear` of the duration counter, drop counter, LRU stack and statistics |
| 0xC0   | 3 | OUTPUT_BW: work mode BW, where statistics and tags flow but no per-reference records |
| 0x1000 and up | 64.. | user-defined events |

Rules for tags and writes:

- **Tags.** Every configuration-space READ becomes a tag record carrying its
  17-bit index, provided tracing was on before or after it. The records
  around a mode switch are therefore bracketed by the tag that caused it.
- **Writes** to the space are ignored.
- **Offsets without a meaning** below 0x1000 still produce a tag but change
  nothing. There is no separate "insert one trace" command, because any
  read of the space already inserts a tag.

A program marks an event with a single uncached load. It has to defeat the
caches for that address, for example by mapping the space uncacheable or
flushing the line first, which is software's job.

## Records and time

Each record is 32 bits. Bit 31 tells a reference from a special record.

```
reference   0 | W | duration[6:0] | line[22:0]
special     1 | type[2:0] | payload[27:0]
  type 0 DUR_HI   duration bits [34:7] of the next timed record
  type 1 TAG      [27:21] duration[6:0], [16:0] configuration-space index
  type 4 STAT_LO  [27:20] counter index, [19:0] low bits   (index 0xFF = header)
  type 5 STAT_HI  [27:20] counter index, [11:0] bits 31..20 of the counter
  type 6 HOT      [16:0] 4 KB page number
```

**No absolute timestamp.** There is no room for one in 32 bits. Each *timed*
record (a reference or a tag) instead carries its *duration*: the number of
memory clocks since the previous timed record.

- Durations that do not fit in 7 bits are preceded by a DUR_HI record with
  the high 28 bits.
- If nothing at all happens for 2^35 clocks, a lone DUR_HI with all ones
  keeps the count going.

**Rebuilding absolute time.** The receiver does this:

```
t = 0; hi = 0
for each record r in order:
    if r is DUR_HI:  hi = r.payload
    elif r is timed: t += (hi << 7) + r.duration; hi = 0; emit (t, r)
```

The clock count restarts at reset and at RESET_TRACING. After a
RESET_TRACING tag at clock *c*, the next record's duration counts from
*c + 1*.

**Drops.** The DSMU queue is four words deep and can take two words per
clock (DUR_HI + record). If the TX FIFO is full and a record cannot be
queued:

- the record is dropped;
- `drop_count` counts it;
- the duration counter keeps running.

The next record that does get through therefore still carries the correct
time since the last record the receiver saw. A drop loses the reference,
never the timeline.

Statistics and hot-page records carry no duration. They are not part of the
timeline and may sit anywhere in the stream.

## On-line analysis

### Reuse distance and hot pages (`rdhpu`)

**The stack.**

- A 128-entry LRU stack of 4 KB page numbers.
- Each reference in TRACE or BW mode is looked up in all 128 entries at
  once, with one comparator per entry and a priority encoder.
- **Hit at depth *d*:** the reuse distance is *d*, the number of different
  pages touched since. Entries above it shift down and the page moves to the
  top.
- **Miss:** everything shifts and the bottom entry falls out.
- One reference per clock, results one clock later.

This is the behavioural equivalent of the systolic LRU array that the
original design borrows from earlier work, not a copy of that array.

**Hot pages.**

- Each entry carries an 8-bit hit count.
- When a page's count reaches `HOT_THRESH` (64), a HOT record with the page
  number is emitted once.
- The count is lost when the page falls out of the stack.

### Interval statistics (`statistic_unit`)

**Counters.** 38 counters, cleared at the end of every interval of
`stat_interval` memory clocks (0 = off):

- 0, 1: reads and writes, which give bandwidth;
- 2 to 5: references per bank;
- 6 to 28: for each line-address bit, how many references flipped it
  relative to the previous reference;
- 29 to 37: a reuse-distance histogram. The bins are 0, [1,2), [2,4) …
  [64,128), and one bin for misses.

**Reports.** At the end of an interval the counters are snapshotted and sent
as 77 words:

- a header (STAT_LO, index 0xFF, interval number);
- a LO/HI pair per counter.

If the previous report is still being sent when an interval ends, the new
one is skipped and `stat_skipped` counts it.

Both analysis units can be left out with `EN_RDHPU = 0` / `EN_SU = 0`.

## Getting the trace off the board

### The FIFO (`tx_fifo_unit`)

The TX FIFO is 16K x 32 bits. It is written in the memory clock and read in
the transmit clock.

Three sources share its single write port, by fixed priority:

1. **Trace:** the DSMU queue. It stalls when the FIFO is full, and the DSMU
   drops.
2. **Statistics:** the statistics unit waits.
3. **Hot page:** a one-word holding register. A second hot page arriving
   before the first is written is counted in `hot_lost`.

`fifo_max_level` records the highest fill seen. It shows how close a run
came to dropping.

### Framing and ports (`tx_thread_unit`, `gmac_tx`)

The thread unit has one frame buffer ("thread") per Gigabit Ethernet port.

**Filling.**

- It fills the current thread's buffer with one FIFO word per transmit
  clock.
- The frame is handed to that port's MAC when either:
  - 256 words have been collected; or
  - the FIFO has been empty for 1024 clocks with a partial frame waiting
    (the flush).
- Filling then moves to the next port, round robin.
- If that port is still sending its previous frame, filling waits and the
  FIFO absorbs the delay.

**Frame format.** All fields are big-endian:

```
dst MAC (6) | src MAC (6, last byte + port number) | EtherType 0x88B5 (2)
| sequence number (4) | word count (2) | records (4 x count)
```

Consecutive frames are consecutive pieces of one record stream. A receiver
on each port writes its frames to disk, and the full trace is rebuilt by
merging all ports' frames by sequence number.

**`gmac_tx`** adds the preamble, start delimiter, padding to 60 bytes, the
CRC-32 frame check sequence and the 12-byte inter-frame gap, on a GMII byte
interface.

**Throughput.** A 256-word frame costs 1068 byte times on the wire, so three
ports drain about 359.6 MB/s, or 0.9 words per 100 MHz memory clock. DDR-200
at its peak (one line every four command clocks) makes 100 MB/s of records.

## Latency and timing

- **Pins to DSMU:** a command reaches the DSMU three memory clocks after the
  pins: two in the buffer, one in the bank machine or config unit.
- **Into the FIFO:** the record enters the FIFO one clock later at the
  earliest.
- **DSMU throughput:** one command per clock, far above what a DIMM can
  issue.
- **Pointer crossing:** the FIFO's gray pointers cross in two flip-flops per
  side.
- **Resets:** each clock domain has its own asynchronous active-low reset
  (`rst_n`, `tx_rst_n`).

## Parameters

| where | parameter | default | meaning |
|---|---|---|---|
| `hmtt_fpga` | `FIFO_DEPTH` | 16384 | TX FIFO words (power of two) |
| | `NUM_GE` | 3 | Ethernet ports |
| | `FRAME_WORDS` | 256 | records per full frame |
| | `FLUSH_CYCLES` | 1024 | idle transmit clocks before a partial frame is sent |
| | `LRU_DEPTH` | 128 | LRU stack entries |
| | `HOT_THRESH` | 64 | hits that make a page hot |
| | `EN_RDHPU`, `EN_SU` | 1 | include the analysis units |
| `hmtt_pkg` | `ROW_W`, `BANK_W`, `COL_W` | 13, 2, 11 | DIMM address map |
| | `CFG_ROW_BITS` | 7 | configuration space = top 2^7 rows |
| `ddr_state_machine_unit` | `QDEPTH` | 4 | record queue before the FIFO |
| `statistic_unit` | `CNT_W`, `IV_W` | 32, 27 | counter width; interval width (1.34 s at 100 MHz) |

## Files

`rtl/` holds one module or package per file:

- `hmtt_pkg` (types, record helpers);
- `ddr_cmd_buffer`, `ddr_bank_fsm`, `config_unit`, `ddr_state_machine_unit`;
- `rdhpu`, `statistic_unit`;
- `async_fifo`, `tx_fifo_unit`, `tx_thread_unit`, `gmac_tx`;
- `hmtt_fpga` (top).

`tb/` holds one self-checking testbench per block, plus:

- `gmii_rx_model`, a behavioural Ethernet receiver that checks preamble,
  length, CRC and gap, and keeps the frame contents;
- `hmtt_e2e_body.svh`, shared by the two end-to-end tests.

## Simulating

With Verilator 5, for example for the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hmtt_pkg.sv rtl/*.sv \
    tb/gmii_rx_model.sv tb/tb_hmtt_fpga.sv --top-module tb_hmtt_fpga
./obj_dir/Vtb_hmtt_fpga
```

Every testbench ends with a line `TB_RESULT checks=N failures=M` and has a
watchdog.

| testbench | what it checks |
|---|---|
| `tb_ddr_cmd_buffer` | random pin patterns against the truth table, two-clock latency |
| `tb_ddr_bank_fsm` | random command sequences against a model of the four-state machine; every transition taken |
| `tb_config_unit` | modes, `clear`, tags and indices for random ACTIVE/READ/WRITE traffic over normal and configuration rows |
| `tb_ddr_state_machine_unit` | record words, durations, DUR_HI, tags, back-pressure drops and `clear`, against a cycle model |
| `tb_rdhpu` | distances, misses and hot pages against a software LRU list |
| `tb_statistic_unit` | every counter of every report against a model; skipped reports |
| `tb_tx_fifo_unit` | order and priority across two clocks, fill to exactly 16384 words, hot-page loss |
| `tb_tx_thread_unit` | frames on three MACs: headers, round robin, flush timing, back-pressure, the merged stream word for word |
| `tb_gmac_tx` | 200 random frames: bytes, padding, CRC, gap, wire time |
| `tb_hmtt_fpga` | end to end with a 1K FIFO and 64-word frames |
| `tb_hmtt_fpga_full` | the same at every default size (16K FIFO, 256-word frames, threshold 64) |
| `tb_hmtt_workloads` | default sizes under the peak traffic of one DIMM at DDR-200 and DDR2-400 speed |

**What the end-to-end test does.** It plays the traced machine and the
receiving side. The traced-machine side runs in phases:

1. Random traffic while tracing is off.
2. BEGIN, then traffic with long idle gaps and user events, plus writes into
   the configuration space.
3. OUTPUT_BW.
4. A loop that makes four pages hot.
5. RESET.
6. A run of back-to-back READs, one every clock, which overruns the Ethernet
   links.
7. END.

The receiving side takes frames from all three ports, merges them by
sequence number and decodes every record:

- **Trace records** must match a reference model in order.
- **Durations:** each duration must equal the clocks since the previous
  record that arrived.
- **Missing records:** the number missing must equal `drop_count`.
- **Statistics reports** must be complete and consistent.
- **Hot pages** must really have been hot.

At the end it prints how often each mechanism happened and fails if any
never did. The mechanisms counted are:

- references;
- tags;
- duration overflows;
- mode switches;
- FIFO-full stall clocks;
- drops;
- statistics reports and skipped reports;
- hot pages;
- flushed partial frames;
- frames per port.

A typical full-size run:

- 164K references and 14 tags;
- 158 overflow records and 6 mode switches;
- 37K stall clocks and 37K drops;
- 4 reports and 15 skipped;
- 5 hot pages;
- 658 frames (220/219/219 per port), 20 of them flushed;
- the FIFO reached 16384.

## Where this departs from the original design, and what is left out

**Record format.** The original stores each record in four bytes, with a
differential duration and a special format for its overflow. This matches
it. The exact bit positions and record types are this design's own.

**Configuration space.** The offsets of the four inner commands and of the
user events are the original's. Two things are this design's
interpretation:

- what RESET and OUTPUT_BW do beyond their names;
- that writes to the space are ignored.

**Bank state machine filter.** The original's bank state diagram marks the
filtered address as "addr = 0 in bank 0", while its text places the space at
the top of memory. This design follows the text.

**Design choices not given by the original:**

- the frame format and sequence-number merge key;
- the flush timeout;
- the FIFO write priorities and the hot-page holding register;
- the statistics counter set and histogram bins;
- the hot-page threshold;
- the DSMU queue and drop policy.

**Not built:**

- the interrupt to the traced machine for on-line feedback, whose interface
  is not described;
- the clock managers, PHYs and the receive side (PCs with RAID);
- the traced DIMM itself.

**Scope of a board.** One board snoops one single-rank 512 MB DIMM.

- A machine with several channels needs one board per channel.
- Larger DIMMs need a wider row address or a chip-select input.

**Link capacity.**

- Peak DDR-200 traffic (100 MB/s of records) fits easily in three Gigabit
  links.
- A single 64-bit DDR2-400 DIMM at peak (200 MB/s) also fits.
- `tb_hmtt_workloads` drives both rates for 40,000 references each. Every
  reference arrives, and the FIFO never holds more than four words.
- A dual-channel DDR2-400 system at its theoretical peak (400 MB/s) exceeds
  them. The 16K FIFO then rides out bursts of about 1.6 ms before records
  are dropped.
