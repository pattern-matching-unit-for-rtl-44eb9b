# Associative-memory pattern matching for MR fingerprinting

Magnetic Resonance Fingerprinting (MRF) reconstructs tissue properties, here
the relaxation times T1 and T2, by comparing every voxel's signal with a
dictionary of simulated signals and keeping the entry with the largest scalar
product. Done exhaustively this costs one dot product per voxel and dictionary
entry, about 6·10^11 for a 200×200×200 brain volume with a T1/T2 dictionary.

This RTL implements a board that cuts that cost with an **Associative Memory
(AM)**, a content-addressable memory originally built for track finding in
particle physics. The idea:

1. Offline, every dictionary entry (8 complex SVD coefficients) is **binned**:
   each real and imaginary part becomes an integer from 0 to 14. Entries that
   bin to the same 16 integers form one **pattern**, and each pattern keeps the
   list of entries that produced it. Some 26 million noised entries collapse
   into about 6000 patterns.
2. Online, each voxel is binned the same way and presented once to the AM,
   which compares it with *every* stored pattern in parallel and reports those
   that agree in at least a programmable number of the 16 integers. A partial
   match is still a match.
3. Only the entries in the lists of the matched patterns are then compared
   with the voxel at full resolution. If nothing matched, the voxel falls back
   to the standard method: a scan of the whole original dictionary.

The board follows the system described by Leombruni et al., *Pattern-matching
Unit for Medical Applications* (2020). That system has 64 AM chips on 4
mezzanine cards and two FPGAs: one distributes the input to the AM chips, the
other reads the matches out and does the refinement. The paper describes the
AM chip's structure and the reconstruction flow. It does not describe the
FPGA firmware, the chip capacity or any interface. This RTL fills those gaps
with choices of its own, all listed below.

## Data path

```
 host voxel ──► input_fpga ──── 8 buses, 16-bit words ────► am_mezzanine ×4
 (8 complex      │ voxel_binner                                 │ am_chip ×16 each
  coefficients)  │                                              │ match_merge (16→1)
                 │ full-resolution voxel                        ▼
                 └──────────────────────────────────────► match_merge (4→1)
                                                                │ pattern addresses
                                                                ▼
                     output_fpga: pattern FIFO ─► pattern_list_table ─► {start, count}
                                  │ read requests                            │
                                  ▼                                          │
                     external dictionary memory ─► dot_product_unit ─► argmax_unit ─► result
```

`puma_board` is the top level. The dictionary memory (26 million entries of
8 complex coefficients) is outside the board. Its read port is part of the
top's interface, and the testbenches supply a behavioural model of it.

## How an AM chip decides that a pattern matched

An `am_chip` holds `NCOLS` columns of 8 words, 16 bits each. Word *b* of every
column is attached to input bus *b* and has its own comparator and its own
hit flip-flop. An event runs like this:

* `ev_init` clears every hit flip-flop.
* Any number of cycles follow in which words are presented on the buses
  (`bus_valid[b]`, `bus_word[b]`). In the same cycle, each word is compared
  with word *b* of every column. Where they are equal, the flip-flop is set,
  and it stays set for the rest of the event.
* `ev_end` closes the event. For each pattern the chip counts the set
  flip-flops. The pattern matches when **count ≥ threshold** and all of its
  columns have been loaded.

A pattern is 1, 2 or 4 neighbouring columns, chosen by `grp_mode`. That gives
8, 16 or 32 words, so the threshold is meaningful from 6 to 32. Pattern *g*
covers columns *g·n … g·n+n−1*. MRF uses two columns per pattern (16 words for
8 complex coefficients). A threshold of 14 then accepts a voxel that differs
from the pattern in up to two of its 16 integers.

The chip then reads out the matched pattern addresses, lowest first, one per
cycle, with a valid/ready handshake. `done` rises once the last address has
been taken. It also rises straight after `ev_end` when nothing matched.
Columns that were never loaded never match: a per-column "loaded" bit is
cleared at reset.

## Pattern format on the buses

`voxel_binner` maps each of the 16 components (component 2*i* is the real part
of coefficient *i*, 2*i*+1 its imaginary part) to a bin:

    bin_k = clamp( floor( (x_k − min_k) · scale_k / 2^16 ), 0, 14 )

Here `min_k` is the component's known lower bound and
`scale_k = floor(15 · 2^16 / range_k)`. Both are loaded by the host for each
component. Using a reciprocal scale avoids a divider.

The two integers of coefficient *i* travel on bus *i* in consecutive cycles.
The real part comes first and is stored in column 0 of the pattern. The
imaginary part comes second and is stored in column 1. Each word is tagged
with its component index:

| bits 15:8        | bits 7:4 | bits 3:0 |
|------------------|----------|----------|
| component k (0–15) | 0      | bin (0–14) |

Without the tag, the real part's word could set the imaginary column's
flip-flop whenever the two bins happen to be equal. With it, a word can match
only the word of its own component. Patterns loaded into the bank must use
the same format (`puma_pkg::am_word`).

## Refinement and fallback (output stage)

`output_fpga` handles one voxel at a time:

1. It takes the full-resolution voxel, waits for `ev_end`, and then collects
   the matched pattern addresses `{mezzanine, chip, pattern}` into a 16-entry
   FIFO. When the FIFO is full, the readout of the whole AM stalls.
2. For each address it reads `{start, count}` from `pattern_list_table`. The
   entry lists are stored back to back in the dictionary memory. An address
   that was never written reads as an empty list.
3. It walks the list and issues one read request per cycle while the memory
   accepts. Each returned entry goes through `dot_product_unit`, which computes
   s = Σ conj(d_i)·x_i and the score |s|² in three pipeline stages. Using |s|²
   picks the same winner as |s| and needs no square root. Entries are assumed
   to be stored normalised.
4. `argmax_unit` keeps the highest score and the tissue-parameter index (the
   (T1, T2) combination) of its entry. If two scores are equal, the first one
   seen wins.
5. When the AM reports `done`, the FIFO is empty and no pattern matched, the
   stage walks the original dictionary region (`orig_base`, `orig_count`)
   instead.
6. Once every request has come back through the pipeline, it outputs a
   `result_t`: voxel id, best parameter index, its score, a matched/fallback
   flag, the number of patterns and the number of dot products.

Patterns are processed while the AM readout is still running, so a voxel with
many matches does not wait for the whole readout.

## Timing

| step | cycles |
|------|--------|
| input stage: accept, `ev_init`, two bus words, `ev_end` | 5 |
| first matched address at the output stage after `ev_end` | 3 (chip, mezzanine merge, board merge) |
| per matched pattern: FIFO pop and table read | 2 |
| per dictionary entry, memory not stalling | 1 |
| dot product pipeline | 3 + memory latency |

Voxels do not overlap: the input stage accepts a new voxel only when the
output stage has delivered the previous result. For a voxel with *P* matched
patterns whose lists hold *E* entries, that is about 5 + 3 + 2·P + E + 3 +
memory latency cycles. Without a match, *E* is the size of the original
dictionary.

## Loading the board

Before any voxel is processed, the host:

1. writes the 16 bin bounds (`bin_cfg_*`),
2. writes every pattern column (`am_wr_en`, address {mezzanine, chip, column},
   8 words in the format above),
3. writes `{start, count}` for every pattern (`lt_*`, address {mezzanine, chip,
   pattern}),
4. sets `grp_mode` (2 columns for MRF), `threshold`, `orig_base` and
   `orig_count`,
5. fills the dictionary memory: the original dictionary at `orig_base`, and
   each pattern's list at its `start`.

## Sizes

| quantity | value | origin |
|---|---|---|
| buses / words per column | 8 | paper |
| AM word width | 16 bits | paper |
| threshold range | 6–32 | paper |
| mezzanines × chips | 4 × 16 | paper |
| SVD coefficients per voxel | 8 complex | paper |
| bins per component | 15 | paper |
| columns per chip `NCOLS` | 256 | own (8192 two-column patterns against ~6000 needed) |
| full-resolution component | 16-bit signed | own |
| entry address `ADDR_W` | 25 bits (33.5 M ≥ 26 M entries) | own |
| list / scan length `CNT_W` | 25 bits | own |
| tissue-parameter index | 18 bits (≥ 171 981 combinations) | own |
| pattern FIFO | 16 | own |

The T1/T2 brain trial fits these defaults: about 6000 patterns, lists of up to
45 000 entries, 26 million noised entries and 171 981 original entries. The
larger 6-parameter dictionaries mentioned as future work (about 3·10^8
entries) would need 29 address bits.

## Where this RTL departs from, or goes beyond, the paper

* **Threshold rule.** The paper says a pattern matches when the count is
  "greater than" the threshold. It also says a threshold of 6 lets two of 8
  words miss, which only works with "at least". This RTL uses ≥.
* **Chip capacity** (256 columns) is an assumption. The paper gives no number.
* **Word tagging, bus/column mapping and binning arithmetic** are this
  design's choices. The paper only says that each component becomes one of 15
  bins and that each integer pair sits in two words.
* **FPGA functions.** The paper states what the two FPGAs do, not how. The
  sequencing, FIFOs, handshakes, list-table format and result format here are
  the simplest that do the job. Nothing overlaps between voxels.
* **Not in the RTL:** the dictionary memory, and the host-side processing
  (view sharing, SVD compression, non-uniform FFT, coil combination,
  background masking, dictionary simulation, noise injection, pattern
  generation). The paper treats all of these as offline software or external
  parts.
* **Implementation note.** At the default size the AM bank is 2 Mbit of
  flip-flops with 131 072 comparators. That is fine for simulation. A real
  device uses a custom CAM cell, which RTL cannot express.

## Files

`rtl/` (one module or package per file):

| file | contents |
|---|---|
| `puma_pkg.sv` | shared constants, types (`voxel_t`, `dict_entry_t`, `result_t`, `grp_mode_e`), `am_word()` |
| `am_chip.sv` | AM chip: bank, comparators, hit flip-flops, majority logic, readout |
| `match_merge.sv` | round-robin merge of readout streams, adds the source index |
| `am_mezzanine.sv` | 16 chips on shared buses with merged readout |
| `voxel_binner.sv` | component binning |
| `input_fpga.sv` | voxel intake, binning, AM event sequencing |
| `pattern_list_table.sv` | pattern → {start, count} |
| `dot_product_unit.sv` | complex dot product and |s|² |
| `argmax_unit.sv` | running maximum |
| `output_fpga.sv` | match collection, list walk, refinement, fallback |
| `puma_board.sv` | top level |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), the full-size
end-to-end test `tb_puma_full.sv`, the workload test `tb_mrf_trial.sv`, and `dict_mem_model.sv`, a behavioural
dictionary memory with a configurable latency and random stalls.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog counts a failure if the test hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/puma_pkg.sv tb/tb_puma_board.sv --top-module tb_puma_board -Mdir obj
./obj/Vtb_puma_board
```

Swap the testbench name to run any other.

* `tb_puma_board`: 2 mezzanines × 2 chips × 8 columns. 200 voxels cover full
  matches, partial matches, no-match fallbacks and five simultaneous matches.
  A 2-deep FIFO forces the readout to stall, and the memory model stalls too.
  Every result is checked against a reference model, and every mechanism must
  occur.
* `tb_puma_full`: the same stimulus on the default board (64 chips × 256
  columns). It builds in about 10 s and runs in about 1 s.
* `tb_mrf_trial`: the default board loaded with 6000 patterns, the pattern
  count of the T1/T2 trial, spread over all 64 chips. The patterns and lists
  are synthetic (1–4 entries per list, a 512-entry original dictionary). It
  runs 300 voxels, most derived from a pattern with up to three components
  one bin off, and prints the matched fraction and the dot-product count
  against an exhaustive search. One seed gave 176 of 300 voxels matched and
  about 64 000 dot products against 4.5 million. It runs in about a minute.
* The unit testbenches check the chip against a reference in all three
  groupings, the merge order and fairness, the binning against integer
  arithmetic, the input event cycle by cycle, the dot product against 128-bit
  arithmetic, and the output stage against a list-walking reference.

Verilator has only two signal states and starts uninitialised state at random,
so every register that is read is reset or written first.
