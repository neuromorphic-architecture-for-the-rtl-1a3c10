# A Hierarchical Temporal Memory region in SystemVerilog

Hierarchical Temporal Memory (HTM) is an unsupervised learning model with two
stages. The **spatial pooler (SP)** turns a binary input into a *sparse
distributed representation* (SDR): a small, nearly fixed fraction of
*columns* becomes active. Similar inputs get overlapping SDRs. The **temporal
memory (TM)** works on the cells stacked inside each column. It learns which
SDR tends to follow which. From that it puts cells into a *predictive* state
for the next step. Because a column has several cells, the same input can be
represented in different contexts. This is what allows second-order
predictions, where the next element depends on more than the current one.

This RTL implements one HTM *region slice*: 100 columns of 3 cells, a main
control unit (MCU), and the two networks that join them. The main hardware
idea is the **synthetic synapse**. A synapse is not a wire. It is a memory
word holding the synapse's permanence, and its address is either regenerated
by an LFSR (proximal synapses) or stored (distal synapses). The connectivity
can then change during learning without any change to the wiring. The price
is time: each column and each cell unit walks its synapses one per clock.

The region takes a 256-bit input (a 16x16 binary image) as 32 bytes. After
each input it reports:

* the SDR: 100 bits, at most 20 set;
* which cells are active;
* which cells predict the next input.

## Block map

```
             enc_valid/enc_data (8)            out: sdr, cells_active, cells_pred
                     |                                   ^
               +-----v-----------------------------------+------+
               | htm_mcu                                         |
               |  Input Buffer 32x8    Overlap RAM 100x4          |
               |  Winning Columns 20x7 Winning Cells 20x11        |
               |  htm_kwta (20 comparator/register stages)        |
               |  control FSM                                     |
               +---+------------------------------------------^---+
      14-bit msg   |                                          | pipe (valid + 4)
             +-----v------+                                   |
             | htm_hbridge|  binary tree of registers,        |
             | (8 levels) |  same latency to every column     |
             +-----+------+                                   |
                   | msg to every column                      |
   +---------------v--------+  +------------------------+     |
   | column 99              |  | column 0               |     |
   |  htm_column  --cmd(3)--|  |  htm_column --cmd(3)-- |     |
   |   (SP)      <-codes(4)-|..|   (SP)     <-codes(4)- |     |
   |  htm_cells (3 cells)   |  |  htm_cells (3 cells)   |     |
   +-----------+------------+  +-----------+------------+     |
               +---> pipe ---> ... ---> pipe ------------------+
```

| file | role |
|---|---|
| `rtl/htm_pkg.sv` | sizes, message and pipeline formats, LFSR helpers |
| `rtl/htm_region.sv` | the top: MCU, H-Bridge, 100 x (column + cell unit), pipeline chain |
| `rtl/htm_mcu.sv` | main control unit and its memory bank |
| `rtl/htm_kwta.sv` | k-winner-take-all chain |
| `rtl/htm_hbridge.sv` | broadcast network from MCU to columns |
| `rtl/htm_column.sv` | SP column: overlap unit, learning unit, output unit |
| `rtl/htm_cells.sv` | TM cell unit: 3 cells in one partitioned memory |

## Communication: one broadcast network, one pipeline

Everything the MCU tells the columns goes through the **H-Bridge** as a
14-bit message. The message is a 3-bit opcode plus 11 data bits
(`hb_msg_t`). The H-Bridge is a tree of registers with the same depth on
every path. All 100 columns therefore see each message in the same clock and
run in lock-step.

| opcode | data | effect in the columns |
|---|---|---|
| `HB_INIT` | - | initialise proximal and distal synapse memories |
| `HB_PACKET` | input byte | examine all 16 proximal synapses against this byte (16 clocks) |
| `HB_SEND` | 0/1/2 | load the pipeline register with overlap / activity code / predictive code |
| `HB_WINCOL` | column number | the named column marks itself a winner |
| `HB_LEARN` | {tm, sp} | winners update proximal synapses; every column sends 111 or 101 to its cells (TM phase 1) |
| `HB_CELL` | cell address | append to every cell unit's list of current learning cells |
| `HB_TMGO` | tm | cell units predict (phase 2) and learn (phase 3) |

Everything the columns tell the MCU goes back through the **pipeline**. Each
column's output register takes its neighbour's word every clock, so after an
`HB_SEND` the MCU receives 100 consecutive words. Column 0 comes first. The
MCU knows a word's column from its arrival order, so no column numbers travel
with the data. A word is 4 bits plus a valid bit. It carries one of:

* an overlap (0..15);
* an activity code `{active, burst, learning cell[1:0]}`;
* a predictive code `{0, predictive cells[2:0]}`.

After every broadcast that starts work, the MCU waits for the H-Bridge
latency plus 3 clocks. It then waits until the OR of all column and cell
`busy` flags is low.

## One input, step by step

1. **Load.** 32 bytes arrive over `enc_valid/enc_ready` into the Input
   Buffer. Byte *p* holds input bits 8p+7..8p.
2. **Overlap.** The MCU broadcasts the bytes one every 17 clocks. Each
   column compares its synapse addresses with the byte number and counts its
   overlap (see below).
3. **Collect.** `HB_SEND(0)` brings the 100 overlaps into the Overlap RAM.
4. **Inhibition.** The Overlap RAM is read in the order of a 7-bit LFSR
   into the k-WTA chain: 127 clocks, one column per clock, skipping LFSR
   values above 100. This stands in for the random read order the design
   calls for. The chain keeps the 20 largest overlaps that are at least
   minOverlap = 2. They are copied to the Winning Columns RAM and form the
   SDR. If fewer than 20 columns reach minOverlap, the SDR is smaller.
5. **Winners.** The winning column numbers are broadcast. Then
   `HB_LEARN` makes the winners adapt their proximal synapses. The same
   message starts TM phase 1 in every cell unit.
6. **Learning cells.** `HB_SEND(1)` brings back activity codes. For every
   active column the MCU writes the address of its learning cell into the
   Winning Cells RAM and sets the active-cell bits. This means all three
   cells when the column bursts, otherwise one. It then broadcasts the list
   with `HB_CELL`.
7. **Predict and learn.** `HB_TMGO` starts TM phases 2 and 3.
   `HB_SEND(2)` then brings back the predictive cells. `out_valid` pulses.

At the default size, one input takes **1313 clocks** from the first byte to
`out_valid`. This was measured in the region testbench on the first input.
That is about 13 µs at 100 MHz. The 32 x 17 = 544 clocks of the overlap
phase are the largest share.

## The spatial-pooler column

A column has 16 proximal synapses. They live in a 16x9 RAM: an 8-bit
permanence and a status bit per synapse.

* **Addresses.** A synapse's address in the 256-bit input is the state of
  an 8-bit maximal LFSR (x^8+x^6+x^5+x^4+1) after *k* steps from a
  per-column seed. The seed is ((37·column) mod 255) + 1, so each column
  samples its own 16 pseudo-random positions anywhere in the input. The
  addresses are never stored: they are regenerated for every byte.
* **Overlap.** For each broadcast byte, the column walks the 16 addresses,
  one per clock:
  * address bits 7..3 are compared with the byte counter;
  * bits 2..0 select a bit of the byte;
  * on a match, the status bit records the input bit;
  * if that bit is 1 and the permanence is at least 127, the overlap counter
    increments. It saturates at 15 because overlaps are stored in 4 bits.
* **Learning.** Only winners learn, in 16 clocks:
  * permanence +1 where the status is 1 (the synapse sat on an active input
    bit);
  * permanence −1 elsewhere;
  * both saturate at 0 and 255.
* **Initial permanences.** They are 125..128, taken from the two low
  address bits, so about half the synapses start connected.

## The cell unit: three cells in one memory

This is the most involved part. Instead of three cell circuits, each column
has one datapath that serves its three cells from partitioned memories:

| partition | size | contents |
|---|---|---|
| Cells Segment | 90 x 11 | presynaptic cell address of each distal synapse (3 cells x 3 segments x 10 synapses) |
| Permanence | 90 x 8 | permanence of each distal synapse |
| Cells History | 40 x 11 | learning cells of the previous step (and the one before) |
| Current Status | 20 x 11 | learning cells of the current step |
| CellsTimeLine | 3 x 9 bits | active / learning / predictive bits of t, t-1, t-2 |

A cell address is `{slice[1:0], column[6:0], cell[1:0]}`. Only learning
cells are distributed: one per active column, so at most 20 per step. A
segment therefore connects a cell to the learning cells of the step before.

**Phase 1: activation.** The column sends `111` (winner) or `101` (loser).

* If a winner has a cell that was predicted in the previous step, that cell
  becomes the only active cell and the learning cell. This takes 1 clock.
* Otherwise the column *bursts*: all three cells are active. The unit then
  scans its 90 synapses (91 clocks) and counts, per segment, synapses whose
  address is among the previous step's learning cells. The cell with the
  best segment learns.
* If no segment matches at all, the cell with the fewest segments learns on
  a new segment. This is what spreads different contexts over different
  cells: the second context of an input lands on cell 1 because cell 0
  already owns a segment.

**Phase 2: prediction.** After the learning-cell list arrives, the unit
scans its 90 synapses again. Per segment it counts synapses that are
*connected* (permanence > 127) and point to a current learning cell. A cell
that is not active and has a segment with at least 5 of its 10 synapses
matching becomes predictive. The unit remembers which segment caused it.

**Phase 3: learning.** This phase is on when `tm_learn` is set.

* *Learning cell.* The segment is either the one that predicted the cell,
  the best-matching one, or a new one. One pass of 10 clocks fills the
  SynMatchVector: which synapses point to a previous learning cell. A second
  pass of 10 clocks updates them:
  * matching synapses get +1;
  * a non-matching synapse that is unused or has decayed below 125 is
    replaced by a previous learning cell not yet in the segment, with
    permanence 125;
  * other non-matching synapses get −1.
* *Wrong prediction.* A cell that was predicted but whose column did not
  become active gets −1 on the matching synapses of the segment that
  predicted it.

Finally the current list becomes the history and the timeline shifts.

**How learning unfolds.** New synapses start at 125, and a synapse counts
for prediction only above 127. A transition must therefore be seen three
more times before it is predicted. With a five-input sequence repeated, the
region testbench sees:

* no predictions in repetitions 1 to 4;
* 45 predicted columns over the five steps of repetition 5, then 68, 99
  and 100 in repetitions 6, 7 and 8 (100 = 20 winners x 5 steps);
* every one of these predictions is confirmed by the next input.

Predictions do fail once the sequence is broken; the test counts 11 such
columns.

## Sizes

| quantity | value | where it comes from |
|---|---|---|
| columns | 100 | design |
| proximal synapses / column | 16 | design |
| permanence | 8 bits, threshold 127, steps ±1 | design |
| minOverlap | 2 | design |
| winners | 20 (20 % sparsity) | design |
| input | 256 bits as 32 x 8 | design (16x16 images) |
| cells / column, segments / cell, synapses / segment | 3, 3, 10 | design |
| segment match threshold | 5 of 10 (50 %) | design |
| new distal synapse permanence | 125 (threshold − 2) | design |
| overlap width, column number, cell address | 4, 7, 11 bits | design |
| H-Bridge levels | 8 | this implementation |

All of these are package constants or module parameters. `htm_region`
takes `N` (columns) and `K` (winners). The read-order LFSR limits `N` to
127 or fewer.

## Where this RTL departs from the reference design, and what is missing

* **SP and TM run one after the other.** The reference design overlaps the
  SP of the next input with the TM of the current one. That overlap is not
  built here. Its stated SP time is 5.75 µs per sample at 100 MHz. This RTL
  needs 1313 clocks for SP and TM together, of which 544 are the overlap
  phase.
* **Overlap walk.** Each byte costs 16 clocks, because the column walks all
  16 synapse addresses for every byte.
* **One pipeline chain.** The reference figure has one chain per row of a
  2-D column array. Here the columns form a single chain.
* **LFSR receptive fields only.** The alternative with receptive fields
  stored in a ROM is not built, because its contents are not specified. The
  column-activity boosting that goes with it is not built either.
* **Winning Cells RAM depth.** It has 20 entries, matching the 20-entry
  Current Status partition of the cells. The reference drawing gives it 10
  entries.
* **Best-matching cell.** It counts address matches regardless of
  permanence. Counting only connected synapses would keep every new context
  on cell 0 until its synapses pass the threshold.
* **Learning rule.** SP learning strengthens synapses on active input bits
  whether or not they are connected. This follows the Hebbian rule as
  described in words; the matching equation also masks by the connected
  vector.
* **Phase order in the cells.** In the reference description, a cell
  unit whose cell is learning goes straight to learning and the others go to
  prediction. Here every unit first predicts and then learns, one after the
  other, once the list of learning cells has arrived. The result is the same;
  the only cost is time.
* **Connected test.** A proximal synapse counts when its permanence is at
  least 127, as in the overlap equation; the prose says "more than". A
  distal synapse counts when its permanence is above 127, so that a freshly
  grown synapse (125) needs three reinforcements before it predicts.
* **Distal initialisation.** Every distal permanence is set to 125 at
  initialisation, as described. In addition, each synapse and segment has a
  valid bit that starts cleared. A segment therefore starts empty, and a
  synapse gets an address, again with permanence 125, when it is grown.
* **Not included.** The router that would join several slices, the
  encoder (image binarisation and resizing), and the classifiers used to
  judge the SDRs are outside this RTL.
* **Input size.** A 19x14 = 266-pixel image does not fit the 256-bit input
  space.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_htm_kwta` | 30 trials of 100 random overlaps in shuffled order against a reference top-K selection; latency; clear |
| `tb_htm_hbridge` | 300 random messages reach all 100 leaves exactly 8 clocks later |
| `tb_htm_column` | 60 random inputs: overlap against a model with its own LFSR and permanences; ±1 learning; 111/101 command; busy times; pipeline path |
| `tb_htm_cells` | A→B sequence: bursting, segment growth, first prediction after the permanence passes 127, predicted activation, a second context on cell 1, weakening of a failed prediction |
| `tb_htm_mcu` | MCU against a model network: packet order and spacing, winners = K largest nominated overlaps, SDR, learning-cell list, cell outputs, learn flags |
| `tb_htm_region` | full default size: a five-input sequence x 9, then a sequence break and an empty input |

The region test keeps its own model of all 1600 proximal synapses and checks
every SDR against it. It also checks the cell activity of every step. It
fails if any of these mechanisms never happens:

* bursting;
* predicted activation;
* prediction;
* a failed prediction;
* SP learning;
* a step with fewer than 20 nominated columns.

It runs in about 2 seconds.

### Running a testbench with Verilator

```
verilator --binary --timing --assert -Irtl rtl/htm_pkg.sv rtl/htm_kwta.sv rtl/htm_mcu.sv \
    rtl/htm_hbridge.sv rtl/htm_column.sv rtl/htm_cells.sv rtl/htm_region.sv \
    tb/tb_htm_region.sv --top-module tb_htm_region -o sim
./obj_dir/sim
```

For a single block, list `rtl/htm_pkg.sv`, the block's file and its
testbench. `htm_mcu` also needs `htm_kwta.sv`. The testbenches use only
two-state values, so they also run with random initial values
(`+verilator+rand+reset+2`).
