# Constant-time hit clustering for time projection chambers

A time projection chamber (TPC) delivers hits in a channel x time plane. A
cluster is a run of hits on neighbouring channels whose time bins are equal
or adjacent. Software finds clusters with two nested loops, in O(n^2) time.
A trigger has to do it in a time that does not depend on what the event
looks like.

This engine clusters by index lookup instead of comparison. While the hits
of an event stream in, each one writes its running number (its *Hit Number*)
into a memory addressed by its own time bin and channel: a bitmap of the
event that also holds an index. To find the neighbours of a hit, the engine
reads the neighbouring cells directly. Every hit is touched exactly once on
the way in and once on the way out. An event of N hits takes 8N clocks to
fill and 8N clocks to empty, however many clusters it has and however long
they are. The only limit is the total: 128 hits per event.

The output is the same hit stream with the same words, reordered so that the
hits of each cluster leave one after another.

This RTL implements the engine described by J. Wu, M. Wang and D. Gong in
"A Complexity Agnostic Clustering Engine for Time Projection Chambers and its
Implementation in FPGA". It follows that description where it is specific,
and fills in the rest with its own choices, listed near the end of this file.

## Hit format

A hit is 8 words of 48 bits. Each word holds two 24-bit half-words, so a hit
carries a header plus 15 ADC samples.

| word 0, bits 47:24 | word 0, bits 23:0                          | words 1-7          |
|--------------------|--------------------------------------------|--------------------|
| sample             | header: `flag`(23) `TM[14:0]`(22:8) `CH[7:0]`(7:0) | two samples each |

- `flag` = 1 marks a header. A sample half-word in the lower half of a word must have bit 23 clear.
- The time bin used for clustering is `TM[14:8]`: 128 bins.
- `TM[7:0]` is carried through but takes no part in clustering.
- `CH` selects one of 256 channels.
- The end of an event is marked by `in_last` on its last word.

The 8-word hit, the header fields `TM[14:8]` and `CH[7:0]`, and the 128-hit
limit follow the published design. The 24-bit half-word and the exact bit
positions are this implementation's own choice.

## The Hit ID RAM: a Time x Channel map in four blocks

Each cell of the map holds a *Hit ID*: `{valid, Hit Number[6:0]}`. The 128
time bins are split by `TM[9:8]` over four RAM blocks. Inside a block the
address is `{TM[14:10], CH}`: 13 bits, 8192 cells of 8 bits.

Each block has two ports:

- **Port A** addresses the current hit's own cell. It writes the Hit ID
  during filling. During readout it reads the cell and then clears it.
- **Port B** searches a neighbouring channel. Each block gets its own port-B
  address, so the three time bins TM-1, TM and TM+1 of one channel come out
  in a single access.

Block `k` is pointed at the bin nearest the current bin whose low bits are
`k`. Only two cases need a coarse-time offset:

| current `TM[9:8]` | block 0      | block 1      | block 2      | block 3      | searched blocks (bins) |
|-------------------|--------------|--------------|--------------|--------------|------------------------|
| 00                | TM[14:10]    | TM[14:10]    | (unused)     | TM[14:10]-1  | 3 (-1), 0 (0), 1 (+1)  |
| 01                | TM[14:10]    | TM[14:10]    | TM[14:10]    | (unused)     | 0, 1, 2                |
| 10                | (unused)     | TM[14:10]    | TM[14:10]    | TM[14:10]    | 1, 2, 3                |
| 11                | TM[14:10]+1  | (unused)     | TM[14:10]    | TM[14:10]    | 2 (-1), 3 (0), 0 (+1)  |

The block outside the window is masked. At the edges of the map (channel 0
or 255, time bin 0 or 127) the missing neighbours are masked too, so the
search never wraps around. This scheme is implemented in `addr2_unit`.

## One hit per 8-clock slot

Readout runs in slots of 8 clocks, one hit per slot, and the slots follow
each other without gaps. The clock numbers below count from the start of the
slot in which hit `cur_id` is read. Clocks 8-15 overlap clocks 0-7 of the
next slot.

| clock | what happens |
|-------|--------------|
| 0     | `cur_id` addresses the Hit Buffer (`{cur_id, 0}`, then words 1..7 on clocks 1..7). The hit's bit in the Bit Register is cleared. |
| 2     | The header word is on the Hit Buffer output. `TM` and `CH` are captured by the port-A and port-B address units. |
| 3     | Port A reads the hit's own cell. Port B reads channel CH+1 in all four blocks. |
| 4     | Port A writes zero to the hit's own cell. Port B reads channel CH-1. |
| 5     | CH+1 data arrive: the Next Hit ID Unit keeps the first valid one. The port-A data arrive: the Current Hit Valid Unit latches their valid bit. |
| 6     | CH-1 data arrive: the Next Hit ID Unit keeps the first valid one. |
| 7     | The next Hit ID is chosen and loaded as `cur_id` of the next slot. |
| 8-15  | The 8 words of this hit leave the engine, after passing through a 6-stage delay pipeline. They are flagged with the valid bit latched at clock 5. |

The RAM and the Hit Buffer both have a two-clock read latency (address
register and output register), as block RAM with output registers has.

A clear at clock 4 always finishes before any later slot's search at its
clock 3. So a cell found valid always belongs to a hit that has not been read
yet. This is why each hit leaves exactly once.

The chain of per-clock strobes comes from `control_signal_pipeline`. It is a
16-bit one-hot shift register started at clock 0 of each slot that holds a
hit.

## Choosing the next hit

At clock 7 the `next_hit_id_unit` applies four rules, in this order:

1. If CH+1 has a hit, go there. If CH-1 also had one, save the CH-1 hit in a
   single register.
2. Otherwise, if CH-1 has a hit, go there.
3. Otherwise, if a saved hit exists and its Bit Register bit is still set,
   go back to it.
4. Otherwise start a new cluster at the highest unread Hit Number. The
   Priority Encoder supplies this number, and it also opens the readout.

Within one channel the bins are tried in the order TM, TM+1, TM-1.

The effect is that a cluster is entered wherever its highest-numbered hit
sits. The engine then walks upward in channel to the cluster's top end and
returns to the saved hit just below the entry point. From there it walks
down to the bottom end.

Example, with a track on channels 170-182 entered at 175:

    175 176 177 178 179 180 181 182 174 173 172 171 170

`tb_cluster_engine` checks this order.

Branches and gaps never lose a hit:

- A second branch overwrites the saved register.
- A hit left behind keeps its Bit Register bit.
- The Priority Encoder later starts it as a cluster of its own.

The readout always runs exactly N slots, so the output phase lasts 8N clocks
in every case.

## Ordering clusters end to end: two engines in cascade

One engine usually enters a cluster in the middle. The cluster then leaves
from its entry point upward, then from below the entry point downward. The
last hit to leave is one end of the cluster, usually the lower one. It has
the highest Hit Number in the next engine, so the second engine enters the
cluster at that end. It then walks the whole cluster in one direction.

`cluster_engine_top` with `N_STAGES = 2` builds this cascade. With the
CH+1-first rule the cascade output usually runs from the lower end upward.
The original description of the cascade expects mostly "higher to lower"
order, which conflicts with its own CH+1-first rule and its single-engine
example. This implementation follows the rule.

In the cascade, stage 1 starts a readout only while stage 2 is in its fill
phase (`out_ready`). Only valid words are passed on, plus the word that
carries `out_last`.

## Interface and timing of `cluster_engine_top`

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst` | in | clock; synchronous active-high reset |
| `in_valid`, `in_data[47:0]`, `in_last` | in | hit word stream; `in_last` on the event's last word |
| `in_ready` | out | high while the engine is filling; words are taken when `in_valid && in_ready` |
| `out_ready` | in | a readout starts only while this is high; hold high for a single engine |
| `out_valid`, `out_data[47:0]`, `out_last` | out | reordered words; `out_last` on the event's last output clock |
| `overflow` | out | the last event had more than 128 hits; hits after the 128th were dropped |

Timing, counted in clocks:

- **After reset:** the engine clears all 32768 RAM cells, one address of all
  four blocks per clock: 8192 clocks with `in_ready` low. The readout leaves
  the RAM clear afterwards, so this happens only once.
- **Fill phase:** one word per clock, back to back if the source can keep up.
- **Latency:** the first output word leaves 13 clocks after the clock that
  took the last input word. This holds when `out_ready` is high. If the
  engine waits in its hold state, the first word leaves 11 clocks after
  `out_ready` rises.
- **Output phase:** exactly 8N clocks for N hits, including the slots of any
  hit sent with `out_valid` low. `in_ready` rises again within 3 clocks of
  `out_last`.
- **Empty event:** an event with no header produces no output.

The fill and read phases do not overlap, so one engine takes about 16N
clocks per event (8N to fill, 13 of latency, 8N to empty). At 200 MHz that is
about 10 us for a full 128-hit event.

## Double hits in one cell

The bin size is meant to rule out two hits in one cell. If it happens
anyway, the later hit overwrites the cell. The earlier hit is still read out
in its own slot, because the Priority Encoder finds its bit. However, its
own cell no longer holds a valid Hit ID, so its words leave with
`out_valid` low. This is the reading taken here of the Current Hit Valid
Unit. The time taken is unchanged.

## What is the published design and what is not

The following come from the published description:

- the block structure (Hit Filling Control, Hit Buffer, Hit ID RAM with a
  Hit ID/ADDR1 unit on port A and an ADDR2 unit on port B, Current Hit Valid
  Unit, Next Hit ID Unit, Hit Indexing Unit, Bit Register, Priority Encoder,
  control and delay pipelines);
- the two phases and the 8-clock slot with its clock numbers;
- the four-block RAM split on `TM[9:8]` and its port-B addressing;
- the CH+1-first search with its return to the CH-1 side;
- the 128-hit limit and 8 words per hit;
- the two-engine cascade.

This implementation's own choices:

- the word format and bit positions;
- the `in_last` / `in_ready` / `out_ready` handshake;
- the once-only RAM clear after reset;
- the output timing (6-clock delay pipeline, words on clocks 8-15);
- the single saved-hit register and the bin order inside a channel;
- no search across the map edges;
- dropping hits beyond 128 and samples beyond 8 words;
- the meaning of `out_valid` for double hits;
- the coupling of two engines in a cascade.

Not covered:

- the FPGA test system (preloaded input buffer, output buffer, UART);
- vendor RAM primitives: the memories are plain synthesizable arrays;
- the resource figures and the 200 MHz timing, which were not verified here.

A design that needs more than 8 words per hit would need a longer slot,
which this RTL does not parameterise.

## Size

A generic coarse synthesis of one engine (Yosys, memories kept as memory
cells) gives the following:

- 494 flip-flops.
- About 490 word-level cells. The 128-input Priority Encoder is the largest
  piece of logic.
- 311,680 memory bits: four 8192 x 8 Hit ID RAM blocks (262,144 bits) and the
  1024 x 48 Hit Buffer (49,152 bits).
- The 6-stage output delay may be inferred as a small memory (384 bits).

On an FPGA with 10-kbit block RAMs, the Hit ID RAM needs about 28 blocks and
the Hit Buffer 5 or 6. No FPGA place-and-route or timing analysis was done
for this RTL.

## Files

| file | block |
|------|-------|
| `rtl/ce_pkg.sv` | sizes, header and Hit ID types |
| `rtl/cluster_engine_top.sv` | top: one engine or a cascade of two (`N_STAGES`) |
| `rtl/cluster_engine.sv` | one engine: phase control and wiring |
| `rtl/hit_filling_control.sv` | header detection, Hit Numbers, fill writes |
| `rtl/hit_buffer.sv` | 1024 x 48 word store |
| `rtl/hit_id_ram.sv` | four 8192 x 8 dual-port blocks |
| `rtl/hit_id_addr1_unit.sv` | port A: clear, fill, read/clear of the current hit |
| `rtl/addr2_unit.sv` | port B: CH+1 / CH-1 addresses per block, search masks |
| `rtl/current_hit_valid_unit.sv` | valid flag of the hit being sent |
| `rtl/next_hit_id_unit.sv` | next-hit rules, saved CH-1 hit |
| `rtl/hit_indexing_unit.sv` | slot sequencer, `cur_id`, Hit Buffer read address |
| `rtl/bit_register.sv`, `rtl/priority_encoder.sv` | unread hits; highest unread Hit Number |
| `rtl/control_signal_pipeline.sv`, `rtl/delay_pipeline.sv` | per-clock strobes; output data delay |

## Simulation

Each block has a self-checking testbench `tb/tb_<block>.sv` that prints
`TB_RESULT checks=N failures=M`. The end-to-end tests are:

- **`tb_cluster_engine_top`:** the top at its default size. It runs eight
  fixed events: 110 hits in 28 clusters, two 60-hit clusters, a mid-entry track,
  map edges, a double hit, 131 hits (overflow), an empty event and 128 hits.
  It then runs 30 events of random complexity, some with tracks packed
  together so that they touch and branch.
  Every output word is compared with a reference model of the clustering
  rules (`tb/tb_ce_model_pkg.sv`), as are the latency and the 8N-clock
  output phase. It reports how often each rule fired.
- **`tb_cluster_engine`:** two tracks (channels 170-182 entered at 175, and
  160-164 entered at its top end) whose output order is worked out by hand,
  and the `out_ready` hold-off.
- **`tb_cascade`:** two engines. Each track must leave whole and in channel
  order.

Run with Verilator 5, for example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/ce_pkg.sv tb/tb_cluster_engine_top.sv --top-module tb_cluster_engine_top
    ./obj_dir/Vtb_cluster_engine_top

Each test runs in well under a second.

To change the event size, edit `MAX_HITS` in `ce_pkg`. The Hit Number
width, Bit Register, Priority Encoder and Hit Buffer all follow from it.
The map size is fixed by the slices `TM[14:8]` and `CH[7:0]`, which the
address units use directly; changing it means editing `addr2_unit` and
`hit_id_addr1_unit` as well as the package.
