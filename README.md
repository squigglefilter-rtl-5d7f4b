# SquiggleFilter RTL: filtering nanopore reads against a virus genome in hardware

A nanopore sequencer reports each DNA strand as a "squiggle": a stream of raw
electrical current samples. Deciding early whether a strand belongs to a target
virus lets the sequencer eject non-target strands and spend its pores on the
virus. This design makes that decision directly on the raw samples, without base
calling: the first 2000 samples of a read are normalised and aligned against the
expected squiggle of the whole virus genome with subsequence dynamic time warping
(sDTW). If the best alignment cost is at or under a threshold, the read is kept;
otherwise it is ejected.

## The alignment recurrence

With query Q (the read prefix, 2000 samples) and reference R (the virus squiggle,
up to 102,400 samples), every cell of the cost matrix is

    S[i,j] = |Q[i] - R[j]| + min( S[i-1,j-1] - B[i-1,j-1],  S[i-1,j] )

* There is no horizontal term S[i,j-1]. The query may dwell on one reference
  sample (vertical step), but reference samples are never deleted.
* Row -1 is all zeros, so the alignment may start anywhere in the reference.
* B is a match bonus: 10 for every query sample that has been aligned to the same
  reference sample in a run, capped at 100. It rewards the diagonal step after a
  dwell, which suits nanopore signals, where one base gives several samples.
* Ties pick the vertical step. A diagonal step is taken only when it is strictly
  cheaper.
* The read's score is min over j of the last row S[N-1,j].

## Systolic array (`sf_pe`, `sf_pe_array`)

Each processing element (PE) holds one query sample. The reference streams
through the chain one sample per cycle, so PE i works on column j = c - i at
cycle c. All PEs of a diagonal therefore compute in parallel, and the array
produces one last-row cell per cycle after a fill latency of N_PE+1 cycles.

The PE keeps, as registers: the reference sample; the score of its previous
cell; the bonus; and score-minus-bonus of the cell from two cycles back, which is
the diagonal predecessor its successor needs. A valid bit moves with the
reference sample, so that the first column has no diagonal predecessor. A single
enable `en` stalls every register of the array at once.

The query is loaded through a separate shift chain (`shift_en`) while the
previous query is still being aligned. One `load` pulse then copies the whole
chain into the working registers. So loading query k+1 overlaps aligning query k.

### Multi-stage filtering

A read that is not yet decided after 2000 samples can be continued. The last
PE's score and bonus for every column (a 32-bit word: 24-bit cost, 8-bit bonus)
are streamed out (`iscore_out`) and saved. When the next 2000 samples of the
same read arrive, those words are streamed back in as row -1 (`iscore_in`). Two
continued queries give exactly the cost of one query of twice the length; the
array testbench checks this. One word per cycle at 2.5 GHz is 10 GB/s of memory
traffic. Each query carries a tag `{id, cont, save}` that says whether to
continue and whether to save.

## Normaliser (`sf_normalizer`, `sf_divider`)

Raw 10-bit samples are made independent of pore gain and offset. The normaliser
makes three passes over the query buffer bank:

1. sum = Σx, so sum = N·mean;
2. dev = N·x - sum, and sad = Σ|dev| = N²·MAD (mean absolute deviation);
3. one sequential division, recip = (N << 40) / sad, then for each sample
   z = (dev · recip) >> 32, which is 256 times the normalised value.

The result is clipped to ±4 (outlier removal), scaled by 32, rounded and
saturated into a signed 8-bit sample. A flat query (sad = 0) gives all zeros.
Pass 3 reads the bank in reverse address order, because samples enter the PE
chain from the far end. One query takes about 3·N cycles plus 45 cycles for the
division. This is less than the ≥ ref_len cycles the array spends per query, so
the normaliser is never the bottleneck.

This uses mean and mean absolute deviation instead of a median. That choice
keeps the hardware to adders, one divider and one multiplier.

## Buffers

* `sf_query_buffer`: two banks of 2000 raw samples (ping-pong). The sequencer
  fills one bank while the normaliser reads the other. The writer is held off
  (`wr_ready` low) only when both banks are full.
* `sf_ref_buffer`: 102,400 × 8-bit reference samples (100 KB), written once per
  target genome, read one sample per cycle.

## Tile (`sf_tile`, `sf_classifier`)

A tile contains a query buffer, a normaliser, a PE array of N_PE, a reference
buffer and a classifier. Its controller loads a new query and streams the
reference (ref_len reads). It then drains the array until the classifier has seen
ref_len last-row costs, and posts a result `{id, eject, min_cost}`. Without stalls
a tile produces one result every ref_len + N_PE + 4 cycles (checked by its
testbench).

The intermediate-score streams use valid/ready handshakes. If a continued query
lacks its input word, or a saving query's output word is not accepted, the whole
tile stalls through `en`.

## Top (`squigglefilter`, `sf_dispatcher`)

The top has five tiles and one dispatcher. The dispatcher hands each query of
2000 samples to one enabled tile with a free query buffer, choosing round-robin.
It merges the tiles' results round-robin and reports which tile produced each
one. `tile_en` removes tiles from the rotation; this is the logical part of
switching unused tiles off. Every tile shares the same reference, written
through one port. Each tile has its own intermediate-score ports. Off-chip
memory and its controller are outside this RTL.

## Parameters

| parameter | default | meaning |
|---|---|---|
| N_TILES | 5 | tiles |
| N_PE / QLEN / N | 2000 | PEs per tile = query length |
| REF_DEPTH | 102400 | reference samples per tile |
| BONUS | 10 | match bonus per aligned sample |
| MAX_BONUS | 90 | bonus cap before the final +BONUS (total cap 100) |
| F | 32 | fraction bits of the normaliser's reciprocal |

Widths (in `sf_pkg`): raw samples 10 bits, normalised 8 bits signed, cost 24
bits signed, bonus 8 bits, read id 16 bits.

## Workloads at the default size

* SARS-CoV-2, both strands about 60,000 samples: fits. One read takes 62,000
  cycles, or 24.8 µs at 2.5 GHz.
* Lambda phage, about 97,000 samples: fits. One read takes about 39.6 µs.
* A genome of 100 kb on both strands would need 200,000 samples. That does not
  fit in one pass.

## Where this departs from the source design

* The normalisation uses mean/MAD with integer arithmetic, as described above.
* The bonus is subtracted from the cost, and ties go to the vertical step.
* Control, handshakes, widths and the state machines are this design's own.
* Not built: off-chip DRAM, the sequencer, the host processor, storage, and power
  switches. Their signals are ports of the top.

## Known issues

* Under random stalls of the intermediate-score and result streams, the tile
  testbench loses one result. Treat the tile's handshakes under back-pressure as
  unverified.
* At tile level, a continued (two-stage) query reports a wrong minimum cost.
  The array on its own passes the same two-stage check, so the fault lies in
  the tile's wiring or in its testbench's score memory.
* At the testbench's tiny size (8 PEs), the normaliser's three passes take
  longer than one alignment. The result interval is then 78 cycles, not
  ref_len + N_PE + 4.
* The dispatcher and the top compile but have no testbench yet.
* The PE, array, normaliser, buffers and classifier pass their own
  testbenches.

## Simulating

Each testbench in `tb/` is self-checking and prints
`TB_RESULT checks=N failures=M`. Example with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/sf_pkg.sv tb/sf_tb_pkg.sv \
      rtl/sf_pe.sv rtl/sf_pe_array.sv tb/tb_sf_pe_array.sv --top-module tb_sf_pe_array
    obj_dir/Vtb_sf_pe_array

`tb/sf_tb_pkg.sv` holds the reference models: a cell-by-cell sDTW, an integer
normaliser that matches the RTL bit for bit, and a floating-point normaliser that
the RTL must track to within one step.

The largest simulated size is 8–16 PEs with a 64-sample reference. The reference
buffer alone was simulated at its full 102,400 depth.
