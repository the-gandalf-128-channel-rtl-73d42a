# A 128-channel shifted-clock-sampling TDC

This is an FPGA time-to-digital converter (TDC) that measures the arrival time of
logic edges on 128 inputs in bins of about 160 ps. It does not use a delay line.
Each input is sampled by 16 ordinary flip-flops. The flip-flops are clocked by
eight copies of a 388.8 MHz clock, each shifted by 1/16 of a period, on both their
rising and falling edges. Together the 16 samples show where inside the 2.57 ns
period the input changed. That position, combined with a clock counter, gives the
time of the edge. The hits are kept in a deep buffer per channel. A trigger matching
stage then selects the hits that fall into a programmable window around each
trigger. The result goes out as one event per trigger on an S-Link style port.

The RTL follows the TDC of the GANDALF VME module (Freiburg, for the COMPASS
experiment at CERN), as published by its authors. It adds the many details their
description leaves open. These are marked below and in the opening comment of every
file.

## Structure

```
gandalf_tdc                      128 inputs, 8 clocks, trigger, S-Link port
 ├─ f1_block  x16                 8 channels that share one trigger matching unit
 │   ├─ tdc_channel x8
 │   │   ├─ tdc_sampler           16 sampling flip-flops ("TDC register")
 │   │   ├─ partition_sync        4 partitions, two-stage move into the clk(0) domain
 │   │   ├─ hit_search            bitswap search, leading/trailing, time stamp
 │   │   ├─ clock_counter         coarse time
 │   │   └─ hit_buffer            1024-deep hit memory per channel
 │   ├─ clock_counter             time base for triggers and hit deletion
 │   ├─ sync_fifo                 trigger FIFO (64 trigger times)
 │   ├─ trigger_matching          window selection, hit deletion, event fragments
 │   ├─ sync_fifo                 output FIFO (512 words)
 │   └─ async_fifo                S-Link FIFO (256 words, into the S-Link clock)
 └─ event_collector               merges the 16 fragments of every event
tdc_pkg                           constants, hit type, word types
```

The grouping into 16 "F1-blocks" of 8 channels comes from the original design. It
reused the data format of an older ASIC TDC (the F1 chip), which also served 8
channels. Its benefit is a two-step merge: within a block first, then across blocks.

## Sampling: 16 bins from 8 clocks

`clk_ph[i]` (clk(i), i = 0..7) is clk(0) delayed by i/16 of a period. Sample `q[k]`
is taken at phase k/16:

| q bit | 0..7 | 8..15 |
|---|---|---|
| flip-flop clock | rising clk(k) | falling clk(k-8) (the inverted clock) |
| sampling instant in the period | k/16 | k/16 |

At 388.8 MHz a bin is 2572/16 = 160.8 ps. The testbenches use 2560 ps (exactly
160 ps) so that expected times are whole numbers. In the FPGA two PLLs produce the
eight clocks. Here they are inputs of the top level, and `tb/tdc_clock_model.sv`
generates them for simulation. How linear the bins are depends on clock phase
accuracy and on equal routing from the input pin to the 16 flip-flops. Both are
matters of placement and constraints, outside the RTL.

## Merging 16 clock domains: the partitions

This is the least obvious part of the design. Each sample lives in its own clock
domain, and no single clock edge can copy all 16 without violating some flip-flop's
setup or hold time. So the samples are read in two stages. Stage one uses four
partitions of five samples each. Neighbouring partitions share their border sample,
so every pair of adjacent samples lies inside one partition and an edge is never
split between two partitions:

| partition | samples read | captured on | taken into clk(0) domain |
|---|---|---|---|
| 0 | q[0..4] | falling clk(0), phase 8/16 | next rising clk(0), plus one delay register |
| 1 | q[4..8] | falling clk(4), phase 12/16 | next rising clk(0), plus one delay register |
| 2 | q[8..12] | rising clk(4), phase 4/16 of the next period | next rising clk(0) |
| 3 | q[12..15] and q[0] of the next period | falling clk(0), phase 8/16 of the next period | next rising clk(0) |

Each capture edge comes at least 4 bins (640 ps) after the last sample it reads,
and at least 4 bins before the first of those samples changes again. The same
4-bin margin holds for stage two. Partitions 0 and 1 get one extra register, so
that all four outputs describe the same clock period. The frame whose period starts
at rising clk(0) edge m is available right after edge m+2.

The original design names the four partitions, their shared border flip-flops and
the two-stage merge. The choice of capture edges is this implementation's own; the
original does not state it. On silicon these paths must be constrained as
multi-clock paths.

## Finding edges and stamping them

`hit_search` tests each partition word. A word of all zeros or all ones holds no
edge. Otherwise each adjacent pair (4p+j, 4p+j+1) is checked: 0→1 is a leading
edge and 1→0 a trailing edge. The position k = 4p+j is the last sample before the
change, so the edge lies in bin k. The time of the hit is

    time = (clock counter - 2) * 16 + k        (20 bits, in bins)

The "- 2" removes the partition latency, so the time refers to the period in which
the input was sampled. In the testbenches the time equals floor(t / 160 ps) - 16·R,
where R is the last rising clk(0) edge that still saw reset.

Leading and trailing sensitivity are enabled separately (`lead_en`, `trail_en`).
Per channel and clock period at most one leading and one trailing edge are reported:
the earliest of each. A pulse shorter than one period gives both hits in the same
period. Two edges of the same kind within one 2.6 ns period are beyond this design's
double-pulse resolution, and the second is not reported.

## Hit buffers and trigger matching

Each channel has a circular buffer of 1024 hits (`hit_buffer`, 21 bits per entry,
about one 36-kbit block RAM). A three-entry queue in front of the RAM absorbs the
second hit of a period. When RAM and queue are full, new hits are dropped and the
sticky `hit_overflow` bit of the channel is set.

A trigger is a one-period pulse synchronous to clk(0). Its time is the counter value
at that period, with bin 0. Trigger times wait in the trigger FIFO. If that FIFO is
full, the trigger is lost and `trig_overflow` is set. For a trigger at time t the
window is

    [t - latency, t - latency + width)          latency, width in bins

With width ≤ latency the window lies wholly before the trigger.
`trigger_matching` first waits until the window end is 8 clock periods in the past,
so that every hit of the window has passed the channel pipeline. It then writes a
header and works through channels 0..7 one at a time. Hits at the head of a buffer
that are older than the window are deleted. Hits inside the window are written to
the output FIFO and removed. The first later hit, or an empty buffer, moves it on to
the next channel. A trailer closes the fragment.

While no trigger is waiting, all eight buffers delete in parallel the hits older
than `now - latency - 8 periods`, which no later trigger can select. This keeps the
buffers from filling up. Matched hits are removed, so overlapping windows do not
share hits.

Fragment words (bits 31:30 give the type):

| word | layout |
|---|---|
| header | `10`, block[29:26], event[25:20], trigger time[19:0] |
| data | `00`, block[29:26], channel[25:23], leading[22], `00`, hit time minus window start[19:0] |
| trailer | `11`, block[29:26], event[25:20], `0000`, words in the fragment[15:0] |

The original design used the data format of the F1 chip, which is not available
here. This layout is a stand-in with the same content.

## Collecting events

Each block's output FIFO feeds its S-Link FIFO, a dual-clock FIFO with Gray-coded
pointers that crosses into the S-Link clock. `event_collector` waits for block 0 to
have data. It then writes a control header (`8'hB0`, 24-bit event number) and copies
the fragment of block 0 up to its trailer, then those of blocks 1 to 15. It ends the
event with a control trailer (`8'hE0`, 24-bit word count). It stalls when a block
has no data yet or when `slink_full` is high. Every block writes exactly one fragment
per trigger, so fragments never get out of step. The S-Link protocol itself is not
modelled: `slink_data`, `slink_wen`, `slink_ctrl` and `slink_full` are a plain
write port.

## Top-level ports (`gandalf_tdc`)

| port | dir | width | meaning |
|---|---|---|---|
| clk_ph | in | 8 | clk(0..7); clk(0) is the system clock |
| rst | in | 1 | synchronous to clk(0); starts the time count |
| din | in | 128 | channel inputs (asynchronous) |
| trigger | in | 1 | one clk(0) period per trigger |
| lead_en, trail_en | in | 1 | edge sensitivity |
| latency, width | in | 20 | trigger window in bins |
| slink_clk, slink_rst | in | 1 | S-Link side clock and reset |
| slink_full | in | 1 | link cannot take a word |
| slink_data, slink_wen, slink_ctrl | out | 32, 1, 1 | event stream |
| hit_overflow | out | 128 | sticky, per channel |
| trig_overflow | out | 16 | sticky, per block |
| n_events | out | 24 | events sent |

In the original board, configuration came over VME. Here it comes in through ports.

## Where this differs from the original, and how far to trust it

Taken from the original design: 16 bins per period from 8 clocks used on both edges;
4 partitions with shared border flip-flops and a two-stage merge; bitswap search
with leading/trailing selection and the time formula; 16 blocks of 8 channels; a 1k
hit buffer per channel; a trigger FIFO; window matching channel by channel into an
output FIFO; deletion of old hits; an S-Link FIFO per block; collection of all blocks
onto one link.

Chosen here: the capture edges of the partitions; the 16-bit counter and 20-bit
time; the two-hit-per-period limit and its queue; drop-on-full policies and flags;
the window definition; the 8-period wait; removal of matched hits; all FIFO depths;
the data word and framing formats; the collector's handshake. The time compare is
modulo 2^20 bins (168 µs), so latency plus waiting time must stay well below half
that.

Not covered by the RTL: the PLLs, input buffers, placement scripts and floorplan
that set the real bin widths (the measured 64 ps resolution and the DNL depend on
them); the VME/USB controller; the S-Link card. At default size, coarse synthesis
gives about 30k flip-flops and 3.2 Mbit of memory. The published FPGA used 43% of
the flip-flops of a Virtex-5 SX95T (about 25k).

## Simulating

All testbenches are self-checking. They print `TB_RESULT checks=N failures=M` and
stop themselves. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tdc_pkg.sv \
    tb/tb_gandalf_tdc.sv tb/tdc_clock_model.sv rtl/*.sv \
    --top-module tb_gandalf_tdc -Mdir obj && obj/Vtb_gandalf_tdc
```

Replace the top module and file list to run another bench. Each bench needs the
package, its block, the block's submodules and, for the channel-level benches,
`tb/tdc_clock_model.sv`.

| bench | what it shows |
|---|---|
| tb_tdc_sampler | each flip-flop holds the input at its own sampling instant |
| tb_partition_sync | partition words equal the input at the 17 sampling instants of period m-2 |
| tb_hit_search | edges and times against a reference scan of the whole 17-sample word |
| tb_clock_counter | reset, count, wrap |
| tb_hit_buffer | order and content under random traffic; one-clock latency; overflow keeps the oldest 1027 hits |
| tb_tdc_channel | pin-to-buffer times for 300 pulses, three edge modes, latency ≤ 6 periods |
| tb_sync_fifo, tb_async_fifo | random traffic against a queue model, full and empty |
| tb_trigger_matching | fragments for 40 triggers against a model; idle and in-scan deletion; output stalls |
| tb_event_collector | event framing and block order with random arrival and link stalls |
| tb_f1_block | one block from pins to S-Link FIFO, word by word; both overflows |
| tb_gandalf_tdc | the full 128-channel design at its default size, pins to S-Link port, word by word; mode switches; overflows (about 1 minute) |
| tb_tdc_measurements | code density (DNL of all 16 bins under 0.25) and a 6.25-bin delay between two channels measured with the ideal quantisation RMS of 0.43 bins (limit 0.56) |
