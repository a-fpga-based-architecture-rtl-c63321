# Real-time cluster finding for a silicon pixel tracker, in SystemVerilog

A pixel detector read out at a 30 MHz crossing rate delivers its hits as *super pixels*
(SPs). An SP is a 4 x 2 block of pixels sent as one 32-bit word: an 8-bit hit map plus the
block's position and the sensor it belongs to. Tracking software needs *clusters*, the
centre of gravity of each group of touching active pixels. This design computes the
clusters in logic, one event after another, at the crossing rate. It serves one VELO
half-module, that is, a pair of 256 x 768 pixel sensors.

The main idea is to split the problem by difficulty:

* Most SPs have no active neighbour SP. Such an *isolated* SP holds its cluster (or two)
  completely. A lookup table over its 256 possible hit maps gives the centroid directly.
* The rest are *non-isolated* SPs. They go to a chain of small sparse matrices. Each
  matrix covers 3 x 3 SPs (12 x 6 pixels) and places itself where its first SP lands. A
  pattern matcher then finds clusters of up to 3 x 3 pixels inside each filled matrix.
  All matrices work in parallel.
* SPs that find no free matrix *overflow*. They are treated as if they were isolated
  and flagged as such.

Everything below the top level streams, so events overlap in the pipeline. A unit
passes a word when `valid` is high and the receiver's `hold` is low. Events are
separated inside the pipeline by *end-of-event* (EE) words, which carry a 5-bit
event number.

## Word formats (`velo_pkg.sv`)

| word | bits |
|---|---|
| SP | 31 = 0, 24 isolation flag, 23 sensor, 22:14 SP column, 13:8 SP row, 7:0 hit map (bit 4*c + r for pixel column c, row r) |
| EE | 31 = 1, 4:0 event number |
| cluster, from an isolated or overflow SP | 31 reserved, 30 = 1, 29 overflow flag, 28:23 topology, 22 sensor, 21:12 pixel column, 11:10 column quarter, 9:2 pixel row, 1:0 row quarter |
| cluster, from a matrix | 31 reserved, 30 = 0, 29 "contained", 28 "boundary", 27:23 topology, 22 sensor, then position as above |

The cluster layout (field positions and widths) is the published one. The SP and EE bit
positions, the flag order within bits 29:28 and the topology codes are this design's
choices. A centroid is `floor(4 * sum / npix)` in quarter pixels, with the sum taken over
the pixel coordinates.

## Data path (`velo_cluster_top.sv`)

```
256-bit in (valid, SOP, EOP, ready)
  -> decoder + isolation flagging -> 8 SP streams -> 8 FIFOs
  -> switch A (streams 0-3)        switch B (streams 4-7)      each sorts by isolation, then sensor
  -> 8 FIFOs
  -> isolated S0, S1 of A and of B : 4 x clustering_isolated (LUT)
  -> non-isolated S0 : clustering_matrices, line 0 from A, line 1 from B
  -> non-isolated S1 : clustering_matrices, same
  -> 8 cluster streams (4 isolated, 2 matrix, 2 overflow)
  -> encoder_8to1 -> 256-bit out (valid, SOP, EOP, ready)
```

Every unit writes into a FIFO that the next unit reads. Every FIFO reports its occupancy
and its maximum since the last `max_clear`. The top brings out the maxima of the 16
inter-unit FIFOs, a count of overflowing SPs, a count of bypassed event chunks, and the
error monitor's outputs.

## Isolation flagging (`isolation_flagger.sv`, inside `decoder.sv`)

This is the part with the tightest timing. The decoder cuts each 256-bit word into eight
32-bit slots (an all-zero slot is empty). It replaces SOP/EOP by an EE word on all eight
streams. On the way, it decides for every SP whether any of its eight neighbour SPs on
the same sensor is present in the same event. The flagger is a five-step pipeline. Each
step holds one event:

1. **read**: collects up to 144 SPs, 8 per cycle.
2. **buffer**: a copy of the read registers, so the next event can be read meanwhile.
3. **load**: the 144 slots form 9 blocks of 16. Each cycle, load picks a pair of blocks
   (i, j) with i <= j. For each SP of the pair it computes the row and column ranges
   (value plus and minus one) that a neighbour must match.
4. **flag**: compares the two blocks, all 16 x 16 pairs in one cycle. It sets a status
   bit for every SP that met a neighbour. An event of n blocks needs n(n+1)/2 such
   cycles; a typical event of up to 32 SPs needs 3.
5. **write**: sends the SPs 8 per cycle, one per output stream, with isolation = not
   status. Then it sends one EE word per stream.

A step hands its event to the next step when the next step is empty, or when the next
step hands its own event on in the same cycle. This keeps all steps busy in steady
state. In the block test, an event of 32 SPs takes 5.4 cycles, limited by the 4 + 1
write beats.

An event with more than 144 SPs is cut into chunks of at most 144. The chunks skip the
comparison and leave with the isolation bit cleared, so all of those SPs go to the
matrix chains. Only the last chunk is followed by EE words.

## Switching (`splitter.sv`, `merger.sv`, `dispatcher.sv`, `switch4.sv`)

* A **splitter** routes each SP to one of two outputs by a selected bit (isolation or
  sensor). It copies EE words to both outputs. A single register, R0, absorbs a word
  that arrives while the output is held. The input is held while R0 is full.
* A **merger** has one register per input and serves them in alternating order. It
  keeps an EE word until the other input's EE word also arrives. It then forwards one
  EE word, and pulses `sync_err` if the two event numbers differ.
* A **dispatcher** is two splitters crossed into two mergers (2 to 2).
* A **4-to-4 switch** is two dispatchers on the isolation bit, followed by two
  dispatchers on the sensor bit. Any input can reach any output. The output order is:
  isolated S0, isolated S1, non-isolated S0, non-isolated S1.

Each level adds one register. With 8 streams feeding 2 switches, the switches sustain
about 5 words per stream in 7.8 cycles.

## Isolated SPs (`sp_lut.sv`, `clustering_isolated.sv`)

The hit map of an isolated SP holds one or two clusters: runs of occupied pixel rows
that do not touch. `sp_lut` is combinational logic over the 8 hit bits, so it
synthesises to a 256-entry table. It returns, for each cluster, the quarter-pixel row
and column offsets and a 6-bit topology. The topology is the hit pattern of the first
three rows of the run. The two possible clusters are merged by a merger, and the
clusters are written into a FIFO, at one SP per cycle. The same block, built with
`OVERFLOW = 1`, resolves overflow SPs and sets their overflow flag.

## Matrix chain (`matrix_cell.sv`, `cluster_finder.sv`, `candidate_lut.sv`, `matrix_merger.sv`, `clustering_matrices.sv`)

This is the hardest part to follow.

**Filling.** A chain has 20 matrices per sensor. Each matrix has two input lines.

* An empty matrix is claimed by the first SP that arrives on its line 0. That SP becomes
  the centre, and line 1 is held for that cycle.
* After that, any SP within one SP row and column of the centre is ORed into its place
  in the 72-bit pixel map.
* Every other SP is passed on to the next matrix through a register.
* The lines are swapped between neighbouring matrices. An SP refused on line 1 therefore
  reaches the next matrix on line 0, where it may claim it.
* SPs leaving the last matrix are the overflow. They are merged and resolved like
  isolated SPs.

**Closing an event.** An EE word stops its line until the EE word of the other line
arrives. When the matrix's cluster finder is free, the whole matrix is copied into the
finder in one cycle. The matrix is then empty for the next event, and both EE words
move on. A mismatch between the two event numbers is reported as a sync error.

**Finding.** The cluster finder keeps a twin of the matrix. In one cycle, every pixel
checks two L-shaped patterns of inactive pixels around it. Pixels outside the matrix
read as zero. The patterns are mirrored for the two sensor orientations (`ORIENT`). In
the formulas below, s = +1 for one orientation and -1 for the other, and rows count
upward:

* A: the anchor (r, c) is active. Pixels (r+1, c-s), (r, c-s), (r-1, c-s), (r-1, c)
  and (r-1, c+s) are inactive.
* B: the anchor is inactive, and (r+1, c) and (r, c+s) are active. Pixels (r+1, c-s),
  (r, c-s), (r-1, c), (r-1, c+s) and (r-1, c+2s) are inactive.

Each match sets a bit in a pixel flag vector. A priority encoder then takes one anchor
per cycle. A multiplexer cuts the 3 x 3 grid (rows r..r+2, columns c..c+2s) out of the
twin, and the candidate goes into the matrix's FIFO. The grid carries two flags:

* *boundary*: the grid touches the edge of the matrix or lies partly outside it;
* *contained*: no active pixel outside the grid touches the grid.

**Merging.** A round-robin merger reads the 20 FIFOs one word per cycle. It checks that
all FIFOs close the same event with the same event number. `candidate_lut` turns each
3 x 3 grid into the centroid offset and a 5-bit topology (pixel count minus one and the
centre bit). The absolute position comes from the matrix centre and the anchor.

**Accepted imperfections.** A cluster larger than 3 x 3 pixels is cut: part of it may
be found by another anchor, or be missed. A cluster that spans two matrices, or a
matrix and the overflow, can come out as several pieces. The testbenches accept these
outcomes explicitly.

## Output encoder (`encoder_2to1.sv`, `encoder_8to1.sv`)

Seven 2-to-1 packers form a tree: 32 to 64 bits (four packers), 64 to 128 (two) and
128 to 256 (one).

* When both inputs offer a word, the two words are packed together.
* A lone word waits in a third register (R3) for the next one.
* Words that arrive under hold go into one register per input.
* At the end of an event, a waiting lone word is sent with a zero partner.
* The two EE words of an event are checked against each other and forwarded as one.

The tree therefore emits one 256-bit word per cycle, at the cost of zero-filled slots.
The output stage holds back one data word so that EOP can be set on the last word of
the event; SOP marks the first. An event without clusters leaves as one zero word with
SOP and EOP.

## Errors and monitoring (`error_monitor.sv`, `sync_fifo.sv`)

Units report two kinds of error:

* **data loss**: a word offered to a full FIFO;
* **loss of synchronisation**: EE words with different event numbers meeting in a
  merger, a matrix, the matrix merger or an encoder, or broken SOP framing at the input.

The first error raises a sticky `err_flag` and emits one error word, holding the code of
the source that fired. A counter counts all errors. Only reset clears them.

## How far it can be trusted

Every block has a self-checking testbench. Each one compares against a reference model
written independently in the testbench, for example:

* a flood-fill clusterer;
* a pairwise neighbour search;
* queue models.

Each testbench also checks the cycle counts where rates matter.

The top-level testbench `tb_velo_cluster_top` runs at the default parameters (144
read registers, blocks of 16, 20 matrices per sensor). It sends:

* hand-made events;
* random events;
* an event mix averaging 31.8 SPs in which most items are single isolated SPs;
* an event that overflows the matrices;
* an event of 160 SPs that is bypassed;
* a phase with random back-pressure at the output.

Every cluster must appear once, in its event, with its centroid and flags. Where the
design allows more than one outcome (a cluster found in a matrix or split by
overflow), the testbench accepts exactly those outcomes. The mix runs at 11.27 cycles
per event. At a 350 MHz clock that is 31.1 MHz, above the 30 MHz crossing rate
(budget: 11.67 cycles).

## Where this design departs from the original system, or fills gaps

* **One clock.** The original runs the decoder and encoder at 250 MHz and the switch
  and clustering at 350 MHz, with crossing FIFOs between them. Here every FIFO is
  synchronous, and the whole design runs on one clock.
* **Design choices.** The following were not specified and were chosen here:
  * the SP and EE bit layout;
  * the flag bit order;
  * the topology codes;
  * the FIFO depths (16; 32 for the overflow paths);
  * the order of the comparisons in the flagger;
  * the alternating priority of the mergers;
  * the round-robin of the matrix merger;
  * the error code layout;
  * the framing check at the input.
* **Block wiring.** Four isolated-SP clustering blocks and one matrix chain per sensor
  sit behind the switches. The chain's two lines come from the two switches.
* **Pattern reading.** The pixel sets of the patterns are read from the published
  pattern drawing. The assignment of sensor 0 of a pair to the non-mirrored
  orientation is an assumption.
* **Not included.** The surrounding readout firmware, the PCIe output, and the debug path
  that sends SPs alongside clusters.
* **FIFO occupancies.** The occupancy values inside the units are produced, but only
  the maxima of the inter-unit FIFOs reach the top.

## Simulating

Every testbench simulates with plain Verilator:

```
verilator --binary --timing -Irtl rtl/velo_pkg.sv tb/tb_velo_cluster_top.sv \
          --top-module tb_velo_cluster_top
./obj_dir/Vtb_velo_cluster_top
```

Each testbench ends with a line `TB_RESULT checks=<n> failures=<n>`. Substitute any
`tb/tb_<block>.sv` to test one block; the testbenches use small sizes where the block
allows it (for example 4 matrices in `tb_clustering_matrices`, so overflow happens
often). The top-level run takes well under a second.

| file | role |
|---|---|
| `velo_pkg.sv` | word formats, constants, helper functions |
| `sync_fifo.sv` | FIFO with occupancy, maximum and loss flag |
| `splitter.sv`, `merger.sv`, `dispatcher.sv`, `switch4.sv` | switch network |
| `isolation_flagger.sv`, `decoder.sv` | input stage |
| `sp_lut.sv`, `clustering_isolated.sv` | isolated SPs |
| `matrix_cell.sv`, `cluster_finder.sv`, `candidate_lut.sv`, `matrix_merger.sv`, `clustering_matrices.sv` | matrix chain |
| `encoder_2to1.sv`, `encoder_8to1.sv` | output stage |
| `error_monitor.sv` | error collection |
| `velo_cluster_top.sv` | the whole block |
