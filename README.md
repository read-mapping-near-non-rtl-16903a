# GeNVoM read-mapping card: RTL design notes

Read mapping finds where each short DNA read (about 100 bases) sits in a
reference genome of about 3 G bases. The reads contain sequencing errors.

This card keeps the whole reference inside non-volatile TCAM arrays and does
not scan it. Instead, each read is checked in two stages:

1. **Filtering.** The first L bases of the read (the *prefix*) are looked up in
   tables held in DRAM. These tables list every place in the reference where
   that prefix occurs.
2. **Matching.** Only the TCAM rows at those places are searched. Each search
   compares the whole read window in one step. The sense amplifier accepts a
   row with a few mismatching bits, so reads with errors still match.

If the forward read fails, the card retries with the reverse complement, then
with each half of the read in both orientations.

This RTL models the digital part of the card, following the design published as
"Read Mapping Near Non-Volatile Memory" (GeNVoM):

- the queues;
- the Filter Units (FilterU), which run the filtering stage;
- the Match Units (MatchU), made of a Dispatch Unit plus TCAM tiles;
- the join that combines the verdicts of all FilterU/MatchU pairs.

The defaults are the paper's balanced configuration, GeNVoM_Optim:

| Parameter | Default |
|---|---|
| FilterU/MatchU pairs (N) | 108 |
| Seed length (L) | 14 |
| TCAM arrays | 1K x 1K bits |
| Clock | 1 GHz; a single-row search takes one cycle |

## Block overview

| Module | Role |
|---|---|
| `genvom_pkg` | Shared types and helpers: 2-bit base symbols, the 3-bit TCAM code words, the 32-bit PMI `<array 13b, row 10b, col 9b>`, the six search steps and their windows. |
| `genvom_fifo` | Valid/ready circular-buffer queue, used for the input, search and output queues. |
| `filter_unit` | Holds the read. For each step it reads PMITIL[prefix] and PMITIL[prefix+1] to get a PMIT range, reads those PMIT entries, and pushes them into the search queue followed by an end marker. It then waits for the verdict. |
| `dispatch_unit` | Pops the search queue. It broadcasts the read to all tiles, sends each PMI to its array one at a time, and emits one outcome per step. |
| `shift_logic` | Per-tile query register logic. It keeps the read and its reverse complement, cuts out the step's window, encodes it in 3-bit code words, and shifts it to the PMI column. Unused columns are don't-care. |
| `match_ctrl` | Per-tile controller. It aligns, searches and senses. For a window that runs off the row end it also searches the next row. It computes the reference start and end of the whole read. |
| `tcam_array` | Behavioural model of one resistive TCAM array with its tunable sense amplifier. A row matches when fewer than `tol_bits` cared bits differ. |
| `match_unit` | A Dispatch Unit plus `ARRAYS` tiles (default 83). |
| `genvom_card` | Top level: input queue, N pairs, the join, and the output queue. |

## Dataflow and timing

1. A read enters the input queue. All FilterUs take it in the same cycle.
2. Each FilterU sends the read once, then runs the Phase 1 lookup. Each read from a table (PMITIL or PMIT) is one request/response on the FilterU's external DRAM port.
3. In each MatchU the Dispatch Unit handles one PMI at a time:
   - A single-row match takes 3 cycles: align, search (1 ns) and sense.
   - A fragmented match takes 6 cycles.
   - Once one PMI of a step has matched, the rest of that step's PMIs are dropped.
4. The join waits for all N step outcomes.
   - If any pair matched, the lowest-numbered matching pair's indices are written to the output queue, and every FilterU is released.
   - If no pair matched, Missed-Map goes back to all FilterUs, which move to the next step.
5. The steps run in this order:

   | Step | Window | Phase |
   |---|---|---|
   | FWD | Forward read | Phase 1 |
   | RC | Reverse complement | Phase 2 |
   | C1 | First half | Phase 3 |
   | C2 | Second half | Phase 3 |
   | C1_RC | Reverse complement of the first half | Phase 3 |
   | C2_RC | Reverse complement of the second half | Phase 3 |

   Each half uses its own seed-long prefix. When a half matches, the start index is moved back so that the reported start and end cover the whole read.
6. If C2_RC also misses, a record with `mapped=0` is written.

## Reference layout

- A base occupies bits `[3c+2:3c]` of a row, so a 1024-bit row holds 341 bases. The top bit is unused.
- Each array holds 1023 unique rows.
- Row 1023 holds a copy of the first row of the next array. As in the paper, this duplicate row means a fragment never leaves its array.
- The global reference index is `(array * 1023 + row) * 341 + col`.
- MatchU `u` holds global arrays `u*83 .. u*83+82`.
- PMIT entries carry the array number local to their MatchU. Each FilterU has its own PMIT/PMITIL bank, as in the paper.
- The host writes the reference through `wr_*`. The PMI tables are read through the per-FilterU ports `tl_*` and `pt_*`.

## Design choices where the paper is silent

- **Tolerance.** `tol_bits` is applied directly at the sense amplifiers, because the paper defines the sense amplifier threshold as a count of mismatching bits. One base substitution costs exactly 2 bits. For example, `tol_bits=3` allows one substituted base per row.
- **Fragmented matches.** A fragmented match must pass the threshold in both rows.
- **No fragmented head match.** Only the fragmented *tail* match is built. The paper also names a fragmented head match. Here, however, a PMI always points at the first base of the searched window, so a window never starts before its PMI column, and the head case cannot occur.
- **Sequential dispatch.** The Dispatch Unit issues one search at a time, in PMI order, and takes the first match. The sense amplifiers only report a binary match, so matches of a step cannot be ranked.
- **Lock-step pairs.** All pairs work on the same read and step. Throughput across reads is therefore limited by the slowest pair.
- **Queues.** The queues are 16 deep. The search queue carries three entry kinds: the query, a PMI, and an end-of-step marker.
- **Sentinel entry.** PMITIL has one extra sentinel entry at index 4^L, so the last prefix also has an end address.
- **Prefix index.** The prefix index is built with the first base in the most significant bits, using the base codes A=0, C=1, G=2, T=3.
- **Array count.** 83 arrays per MatchU is derived, not given by the paper: 108 x 83 x 1023 x 341 = 3.13 G bases, enough for the g1k_v37 human reference (about 3.10 G bases).

## Parts not built

The following parts have no digital function given by the paper, or are taken from elsewhere:

- the on-card DRAMs holding PMIT, PMITIL and the reads;
- the DMA engine;
- the H-tree network on chip;
- the host and its interface;
- PMI table generation, which is host pre-processing;
- the software that handles reads left unmapped;
- the analog resistive TCAM cell and the VLSA sense amplifier. These are replaced by the digital `tcam_array` model.

In simulation, the testbenches model the DRAM ports behaviourally and build the PMI tables themselves.

## Verification

Every module has a self-checking testbench in `tb/`. Each one:

- uses random stimulus;
- compares against a reference model;
- has a watchdog;
- prints `TB_RESULT checks=N failures=M`.

Cycle counts are checked where a latency is defined: the one-cycle sense, and the 3- and 6-cycle tile searches.

`tb_genvom_card` runs the whole card at reduced size:

- 2 pairs of 2 arrays of 8 x 96 cells;
- seed 4;
- reads of up to 20 bases;
- shallow queues.

It compares 400 reads against an algorithmic model of the mapping. It also fails if any of these mechanisms never occurs:

- a mapping in each of the six steps;
- an unmapped read;
- an empty PMI list;
- fragmented and array-boundary matches;
- PMIs dropped after a match;
- a win by the second pair;
- Missed-Map feedback;
- stalls of the input, search and output queues.

## Full-size simulation

No testbench runs the card at its default size. At defaults it holds:

- 108 pairs of 83 arrays, 8964 TCAM arrays of 1 Mbit each, about 9.4 Gbit of modelled cell state;
- 8964 copies of the per-tile shift logic and controller.

At this size the design lints and elaborates. However, the C++ model that a cycle-based simulator builds from it did not compile within 12 minutes, so a default-size run is not practical here.

Every mechanism is instead exercised at reduced size. All parameters are generic, so the scaled testbenches run the same RTL.

To simulate, for example, the end-to-end test:

```
verilator --binary --timing --assert rtl/genvom_pkg.sv rtl/*.sv tb/tb_genvom_card.sv --top-module tb_genvom_card
```
