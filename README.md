# Connected component labelling at four pixels per clock

This RTL labels the connected components of a binary video stream in real
time, with four pixels arriving on every clock cycle. The target is UltraHD
(3840 x 2160) at 60 frames per second. At four pixels per clock that needs
about 2.07 M clock cycles per frame, which fits at 133.3 MHz (2.22 M cycles
per frame).

The algorithm is a single-pass raster-scan labeller with an equivalence
table. Each pixel gets a *provisional label* from its already-labelled
neighbours (8-connectivity):

- A pixel that touches two different labels records a *merger*: the higher
  label is declared equivalent to the lower one.
- Mergers are written into an equivalence table as they appear.
- Labels that come back from the previous image row are recoded through
  that table before they are used again.
- When a frame ends, the table is compressed so that every provisional
  label points straight at its final label. It is then sent out.

The design follows a published architecture for this problem: the block
structure, the neighbourhood, the merger-pair analysis, the double-buffered
five-copy tables and the stream interfaces. Where that description leaves
the mechanism open, or where following it literally would give wrong labels
in some images, this implementation makes its own choices. They are listed
in "Departures and open points" below.

## Interfaces (`ccl_top`)

| Port group | Direction | Contents |
|---|---|---|
| `s_tvalid/s_tready/s_tdata[3:0]/s_tuser/s_tlast` | in | AXI4-Stream of binary pixels, four per beat. Bit 0 is the leftmost pixel. `tuser` marks the first beat of a frame and `tlast` the last beat of a line. |
| `m_tvalid/m_tready/m_tdata[4*LABEL_BITS-1:0]/m_tuser/m_tlast` | out | AXI4-Stream of provisional labels, one per pixel. The leftmost pixel is in the low bits. Framing matches the input. Background is 0. |
| `tbl_valid/tbl_addr/tbl_data` | out | After every frame, one beat per label value 0 … 2^LABEL_BITS−1, in ascending order: `tbl_addr` is a provisional label and `tbl_data` its final label. This stream has no back-pressure. |
| `label_overflow` | out | Sticky within a frame. The frame needed more than 2^LABEL_BITS−1 provisional labels, so its labelling is not valid. |
| `stack_overflow` | out | A line produced more mergers than `STACK_DEPTH`. This cannot happen with the default `STACK_DEPTH = WIDTH`. |

The final label of a pixel is `TABLE[LABELS value]`. Final labels are the
smallest provisional label of each component. They are unique per component
but not consecutive.

Parameters of `ccl_top`:

| Parameter | Default | Meaning |
|---|---|---|
| `LABEL_BITS` | 10 (1023 labels) | 15 also works; `label_t` is 16 bits wide. |
| `WIDTH` | 3840 | A multiple of 4, and at least 20. |
| `HEIGHT` | 2160 | Frame height in lines. |
| `STACK_DEPTH` | `WIDTH` | Mergers stored per line. |

Reset (`rst_n`) is asynchronous and active low. After reset the first table
bank initialises, which takes 2^LABEL_BITS cycles. `s_tready` stays low
until it is done.

## The neighbourhood and the per-pixel rule

A beat holds pixels P3 P2 P1 P0, with P3 leftmost. Their neighbours are:

- the six labels L5 … L0 of the row above, from one column left of P3 to one
  column right of P0;
- G, the label of the pixel left of P3.

```
  L5 L4 L3 L2 L1 L0
  G  P3 P2 P1 P0
```

`ccl_pixel_unit` decides one pixel from its left label `l` and its upper
labels `ul`, `u` and `ur`:

| Labelled neighbours | Labels compared |
|---|---|
| `l` set | `l` with `u`, or with `ur` when `u` is clear |
| `l` clear, `u` set | `u` alone |
| `l` and `u` clear | `ul` with `ur` |
| none | a new label from the frame counter |

The other combinations are already connected through neighbours in the row
above. For example, `ul` and `u` touch each other.

The pixel takes the smaller of the compared labels. If the two differ, it
emits the merger *larger → smaller*.

The four pixel units run in one combinational chain, P3 to P0. Each one
passes its label on as the next pixel's left label.

A merger found by one pixel is applied at once to the context that the later
pixels of the same beat see. Without this, a later pixel could compare a
label that has just stopped being a root. That creates exactly the indirect
table entries the design must avoid.

Up to four mergers can come out of one beat. Usually there are at most two.

## Mergers of one beat

`merger_analysis` is the pair rule for a beat with exactly two mergers
(a→b, c→d). It rewrites them so that both end on the same label:

| Case | Result | Chain flags |
|---|---|---|
| same source, a = c | The one with the larger target is rewritten to point its target at the other target. | both |
| a = d | c→d becomes c→b | none |
| b = c | a→b becomes a→d | both |
| otherwise | unchanged | the first |

A merger whose two labels become equal is dropped.

The label assigner then hands all of the beat's mergers to the `merger`
block and raises `pause` for n−1 cycles. The merger writes one merger per
cycle into the table; `s_tready` is low during the pause.

The raw labels of the beat are recoded with the beat's own mergers
(`recode`). They then go to the LABELS output and to the delay line.

## Keeping labels in flight current

This is the subtle part of the design. Labels live in several places at
once:

- the delay line, which holds one image row minus 4 beats;
- the table lookup (1 cycle);
- three context registers;
- the G register;
- the merger queue.

A label must not be used after a merger has made it stale.

The rule the RTL follows: **there is exactly one table write per clock**
(`merge_t bus`). During a line it comes from the merger; between lines it
comes from the chain stack. That same write is applied, combinationally, to
every label held in a register:

- the three context groups;
- G;
- the label read out of the table in the same cycle. A write-first RAM
  cannot return it, so a one-merger `recode` follows the table.

The labels that a beat's pixel units see are therefore exactly what the
table would say if they were looked up now.

Delay-line bookkeeping: a group read from the delay line at acceptance j
passes through a register, the table lookup and the right and middle
context slots. It is the middle context group at acceptance j+4. So the
delay line is `WIDTH/4 − 4` entries long: 956 for UHD. It is a read-first
circular buffer whose address only moves on accepted beats.

## Line-end resolution (`chain_stack`)

Inside a line, every merger is written to the table and also pushed onto
the chain stack. Two kinds of entry are left imperfect by then:

- Chains: 9→7 is written, then 7→5, then 5→4. Label 9 still points at 7.
- Mergers whose labels were already out of date when they were formed.
  This can happen because of the pipeline delay between writing a merger
  and its effect on lookups.

When the last beat of a line has been accepted and the merger queue is
empty, the input is held off. The stack is then processed top-down, twice:

1. **Union pass.** For each entry (a, b), follow table pointers from a and
   from b to their roots. If the roots differ, write table[larger root] =
   smaller root.
2. **Flatten pass.** For each entry, find the roots again and write
   table[a] = root(a) and table[b] = root(b).

Each pointer step is one read of the fifth table copy, whose read latency is
one cycle. Because pointers always go from a larger to a smaller label, the
walks end.

Afterwards, every label that took part in the line points directly at its
root. Any label coming back from the delay line in the next line is then
fully recoded by one lookup. The writes use the same bus as the merger, so
the context and G follow them.

Cost: at least 9 cycles per stored merger, plus a few cycles per line.

## Equivalence tables and the end of a frame

`equivalence_tables` holds two banks (`eq_bank`) and swaps them at every
frame end. Each bank has five copies of the table (`eq_ram`: 2^LABEL_BITS
words, write-first, one-cycle read):

- four serve the four labels of a delay-line group;
- one serves the chain stack.

Every write goes to all five copies.

A bank cycles through four states:

- **ACTIVE**: it is used for a frame.
- **FINAL**: it is compressed and streamed out.
- **INIT**: it is reset to table[l] = l, one word per cycle.
- **READY**: it waits to be used again.

Final compression visits labels in ascending order. For each label l it
reads p = table[l], then r = table[p], outputs (l, r) on TABLE and writes
r back to table[l]. Every pointer goes to a smaller label, so table[p] is
already final when it is read, and one pass settles chains of any length.
It takes three cycles per label: 3072 cycles for 10-bit labels, or 98,304
for 15-bit labels. This overlaps the next frame in the other bank.

The next frame's end is held back until the previous TABLE stream has
finished.

## When the input is stalled

`s_tready` is low while any of these holds:

- the assigner's pause (n−1 cycles after a beat with n ≥ 2 mergers);
- after each line: draining the merger queue, then the chain-stack
  resolution;
- after a frame: waiting for the other bank to finish its TABLE stream and
  for the active bank to be initialised;
- the LABELS output is full and `m_tready` is low.

Within a line with no pauses, the design takes one beat per clock.

The full-size simulation measured the cost on a test image of discs and comb
shapes with 450–530 provisional labels: 2,082,000–2,083,000 cycles from the
first to the last beat of a frame, against 2,073,600 beats. The 60 fps budget
at 133.3 MHz is 2,222,222 cycles. That leaves about 69 stall cycles per line,
or roughly 7 stored mergers per line on average. Images with many more
mergers per line than that will not keep up at 60 fps.

## Departures and open points

Where the published description is followed:

- The block set: context generator, label assigner with merger analysis,
  merger, chain stack, delay line, recode, and two banks of five table
  copies.
- The AXI4-Stream signals, and the counter reset on `tuser`.
- Zeroing of the context on the first row and at the image edges.
- Read-first delay line, and one-cycle table read latency.
- The higher label pointing to the lower one in the table.
- Final recoding after the frame, with the table sent out.
- 10-bit labels by default.

This design's own choices:

- **All mergers go to the chain stack.** The published design pushes only
  the mergers that the pair analysis flags as chains. It resolves them with
  one read per entry.
  - This design resolves the whole stack with the two-pass union-find above.
    It is exact for any order of mergers, including mergers whose labels
    were out of date when they were formed.
  - The chain flags of `merger_analysis` are computed but not used.
- **In-beat recoding.** A merger found by one pixel recodes the context of
  the later pixels in the same beat. In the published two-merger example
  (mergers 4→1 and 7→1), pixel P1 therefore gets raw label 1 instead of 4.
  The final labels are the same (all 1).
- **Up to four mergers per beat**, with a pause of up to three cycles. The
  published bound is two mergers and a one-cycle pause. More mergers can
  occur when a context label is one merger behind.
- **Input stalls at every line end** while the stack is resolved. The
  published text does not give that cost.
- **Write-back during final recoding**, so that a single ascending pass
  fully compresses the table.
- **A fourth bank state (READY)** between initialisation and use.
- **Assumed details:**
  - pixel bit order in `tdata`;
  - LABELS packing;
  - TABLE stream format;
  - label-counter saturation with an overflow flag;
  - stack depth;
  - asynchronous reset.
- **Image width.** The published evaluation quotes a 3830-pixel line in one
  place. That is not a multiple of four; 3840 is used.
- **Not included:** the board-level test system (HDMI input and output,
  thresholding, processor, logic analyser).

## Files

| File | Contents |
|---|---|
| `rtl/ccl_pkg.sv` | shared types (`label_t`, `merge_t`, bank states) and recode helpers |
| `rtl/ccl_top.sv` | top level, stream control and line/frame sequencing |
| `rtl/context_generator.sv` | position counters and the three-group label context |
| `rtl/label_assigner.sv` | four pixel units, merger list, pair analysis, label counter, pause |
| `rtl/ccl_pixel_unit.sv` | per-pixel decision |
| `rtl/merger_analysis.sv` | two-merger rewrite |
| `rtl/merger.sv` | merger queue: one table write per cycle, stack push |
| `rtl/chain_stack.sv` | stack RAM and line-end union-find |
| `rtl/equivalence_tables.sv`, `rtl/eq_bank.sv`, `rtl/eq_ram.sv` | double-buffered tables |
| `rtl/delay_line.sv` | one-row label buffer |
| `rtl/recode.sv` | applies a list of mergers to a list of labels |

With the default parameters, a coarse synthesis gives:

- about 900 word-level cells;
- 620 flip-flop bits;
- 217,440 memory bits:
  - 2 × 5 × 1024 × 10 for the tables;
  - 956 × 40 for the delay line;
  - 3840 × 33 for the stack.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_recode` | random labels and mergers against a software model |
| `tb_merger_analysis` | all four cases, including the published example; random pairs, checked for an unchanged partition |
| `tb_label_assigner` | the published neighbourhood examples (two mergers in a beat; the 9→7→5→4→2 chain); G recoding; random neighbourhoods against a reference; label overflow (3-bit instance) |
| `tb_merger` | queueing, one write per cycle, stack addresses, stack overflow |
| `tb_chain_stack` | the chain example (all → 2); 40 random lines against a union-find, checking flatness, partition and downward pointers |
| `tb_delay_line` | delay and wrap with random advance |
| `tb_equivalence_tables` | bank swap, initialisation, final recoding and TABLE output over several frames |
| `tb_context_generator` | context shifting, edge zeroing and recoding |
| `tb_ccl_top` | end to end at 64 × 64 with 10-bit labels over 13 frames (details below) |
| `tb_ccl_full` | one full 3840 × 2160 frame at the default parameters (details below) |
| `tb_ccl_uhd_15bit` | the same test with 15-bit labels and a busier frame (about 9,400 provisional labels, 1,650 components) |

`tb_ccl_top` uses these frames:

- the published patterns;
- random images of several densities;
- an empty frame;
- a full frame;
- a frame of 1024 isolated pixels that overflows the labels.

It applies random input gaps and output back-pressure. Every pixel's final
label is compared with a reference labelling. It also checks framing, the
TABLE order and full rate on the empty frame. It counts pauses, line
resolutions, bank swaps, input and output stalls, and label overflow, and
fails if any of them never occurs.

`tb_ccl_full` checks all 8.3 M pixels, the framing, and the cycle count
against the 60 fps budget. It runs in a few seconds. In `tb_ccl_uhd_15bit`,
the busier frame took about 2.165 M cycles, still inside the budget.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ccl_pkg.sv tb/tb_ccl_top.sv \
          --top-module tb_ccl_top -o sim && ./obj_dir/sim
```

Replace `tb_ccl_top` with any other testbench name. `+verilator+seed+N`
changes the random images.

Lint notes:

- Verilator reports `rst_n` as both synchronous and asynchronous. This comes
  only from the assertions' `disable iff`.
- Some status outputs of sub-blocks are unused at the top: the chain flags,
  and the last-column and first-row flags.

## Limits

- A frame with more than 2^LABEL_BITS−1 provisional labels is not labelled
  correctly. It is flagged by `label_overflow`.
- The 15-bit label variant uses the same source (`LABEL_BITS=15`). It has
  been simulated on one full UHD frame; it has not been synthesised
  separately.
- Throughput depends on the number of mergers per line (see above). The
  design does not buffer input to absorb the line-end stalls. The source
  must accept back-pressure.
