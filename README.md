# Scrooge alignment core

This core aligns a DNA read (the *pattern*) against a stretch of reference
genome (the *text*). It finds the smallest number of substitutions, insertions
and deletions that turn the text into the read, and streams the list of those
edits, the CIGAR string, one operation per cycle pair. It uses the
bitvector dynamic-programming method of the GenASM aligner, with three
changes from the Scrooge algorithm that shrink the stored state:

* **SENE** (store entries, not edges). Traceback needs the edges between
  table entries. The core keeps only the entries and recomputes the few
  edges traceback needs.
* **DENT** (discard entries not used by traceback). Traceback in a window
  reads only part of the table, so only that part is kept.
* **Early Termination (ET).** The table of a window stops growing at the
  first row that holds the answer.

At the default window size W = 64 and overlap O = 33, the traceback memory is
32 x 65 x 32 bits (8.1 KiB). Keeping all three edges of every entry of the
full table would take about twelve times that.

## 1. The bitvector table

Take one window: a text `t` of `n` bases and a pattern `p` of `m` bases, with
`n, m <= W`. The table `R` has columns `i = 0..n`, one per text position plus
the empty-text column `n`. It has rows `d = 0..W`, one per edit count. Each
entry is an `m`-bit vector. Pattern position `j` sits at bit `m-1-j`, so the
first pattern base is the most significant bit (MSB). A 0 at position `j` of
`R[i][d]` means that `p[j..m)` can be matched, with at most `d` edits,
against text that starts at `t[i]`.

Four *pattern masks* `PM[X]`, one per base, hold a 0 where `p[j] == X`. The
table is filled from the right-hand column leftwards:

```
R[n][d] = 11..1 << d
R[i][0] = (R[i+1][0] << 1) | PM[t[i]]                  exact-match row
R[i][d] =  (R[i][d-1]   << 1)                          I  insertion    (north)
         &  R[i+1][d-1]                                D  deletion     (north-east)
         & (R[i+1][d-1] << 1)                          S  substitution (north-east)
         & ((R[i+1][d]  << 1) | PM[t[i]])              M  match        (east)
```

The window's edit distance is the first row `d` whose entry `R[0][d]` has a
0 MSB. Row `m` always qualifies, so a distance always exists.

Worked example (W = 4, text ACGT, pattern ACGA, distance 1). The pattern
masks are PM[A] = 0110, PM[C] = 1011, PM[G] = 1101 and PM[T] = 1111. Column C
of the table reads 1111, 1010, 0000, 0000, 0000. Column G reads 1111, 1100,
1000, 0000, 0000.

The recurrences above are applied literally. Shifts bring in zeros at the
least significant end, so the end of the text is left free: the pattern may
match a prefix of the text. In column A, rows 0 and 1 give 1110 and 0100.
The printed example table of the original work shows 1111 and 0110 there,
which is a fully global reading. Only the last pattern bit differs, and
that bit is never stored (section 4).

## 2. Windows

Long sequences are aligned greedily, one window after another. A window
takes the next W bases of text and of pattern (fewer at the ends). The core
builds the window's table and traces back from the distance entry. It keeps
only the first W-O operations of that path and moves the text and pattern
start positions on by the bases those operations used. The last O bases of
the window are aligned again as part of the next window. The alignment ends
when the whole pattern has been used. Larger W and O find better alignments
at a higher cost.

Two descriptions of the step size exist in the original work. One says the
text and pattern both advance by W-O bases. The other says traceback stops
after W-O edges. This core follows the second, and advances each sequence by
what the kept edges used. An edge can use a base of one sequence only
(insertion, deletion), so the two positions can drift apart.

Short windows at the sequence ends are handled inside the fixed W-bit
datapath. The pattern stays MSB-aligned. Positions at or beyond `m_len` are
padding, and they hold 0 in every pattern mask and in the start column. A
padding bit then stays 0 throughout the table, and it supplies the zero the
shift would have brought in. The real bits are therefore exactly those of an
`m_len`-bit table. Text columns at or beyond `n_len` behave as the
start column.

## 3. Building the table: the DC array (`scrooge_dc_array`)

Entries on one north-west to south-east diagonal do not depend on each
other. The array has one processing element (PE, `scrooge_dc_pe`) per text
column `0..W-1`, plus a slot that produces the start column `W`. Slot `i`
computes row `d` at step `s = d + W - i`. The start column runs ahead, and
the leftmost PE computes row `d` at step `W + d`. In each step a PE takes
three inputs:

* its own previous result, `R[i][d-1]`;
* the last two results of its right neighbour, `R[i+1][d]` and `R[i+1][d-1]`;
* the pattern mask of its text base.

All slots advance together, one step per clock cycle.

**Early Termination.** When the leftmost PE produces an entry with a 0 MSB,
that row is the distance. Traceback only moves to the same or lower rows, so
construction stops there (`et_en = 1`). A window with distance `d` then takes
`W + d + 2` cycles from `start` to `done`. With `et_en = 0` all W+1 rows are
built, in `2W + 2` cycles, and the reported distance is the same. In diagonal
order the PE of column `c` is `c` rows ahead when the leftmost PE finishes.
Those extra rows are wasted work, and they are why Early Termination helps a
diagonal array less than a row-by-row machine.

## 4. What is stored: the traceback memory (`scrooge_tb_sram`)

Traceback in a window crosses at most W-O edges, starting at column 0 and
pattern position 0. It therefore never reads a column beyond W-O, and never
a pattern position beyond W-O. DENT keeps only:

* columns `0..W-O`;
* all `W+1` rows;
* the `W-O+1` leading bits of each entry.

At W = 64, O = 33 that is 32 x 65 x 32 bits. Shifts move bits only towards
the MSB, so the leading bits of an entry depend only on leading bits of its
neighbours. The trimmed entries are therefore self-contained.

The memory has one bank per stored column. In each step the DC array writes
one entry per column, and all of those entries lie on one diagonal. There
are three synchronous read ports for traceback. A read in cycle t returns
data in cycle t+1. An address outside the table reads as all ones, which
means "no path".

## 5. Traceback with regenerated edges (`scrooge_tb_logic`)

Traceback starts at position `(i, j, d) = (0, 0, distance)`. Each step reads
`R[i+1][d]`, `R[i+1][d-1]` and `R[i][d-1]`. It then recomputes the four edges
of `R[i][d]` with a second instance of the DC processing element, `W-O+1`
bits wide. The first edge with a 0 at bit `j` is taken:

| edge | test (bit j)                     | next position     | reported |
|------|----------------------------------|-------------------|----------|
| M    | `(R[i+1][d] << 1) \| PM[t[i]]`   | `(i+1, j+1, d)`   | match |
| S    | `R[i+1][d-1] << 1`               | `(i+1, j+1, d-1)` | substitution |
| D    | `R[i+1][d-1]`                    | `(i+1, j, d-1)`   | deletion (text base skipped) |
| I    | `R[i][d-1] << 1`                 | `(i, j+1, d-1)`   | insertion (pattern base added) |

In row 0 only M exists. The order M, S, D, I is this design's choice. A
different order gives another alignment with the same edit count. Once the
window's text is used up, which happens only in the last text window, the
remaining pattern bases are insertions. Traceback stops after W-O operations,
or when the window's pattern is used up. It reports the text and pattern
bases it used.

Each step takes two cycles: a memory read, then the decision. `op_valid`
pulses once per operation, one cycle after the decision. An assertion flags
an entry with no zero edge, which would mean a corrupt table.

## 6. The rest of the core

* `scrooge_pkg`: the base code (A=0, C=1, G=2, T=3) and the operation type
  `op_t` (M=0, S=1, D=2, I=3).
* `scrooge_pm_gen`: pattern masks of the current window, combinational.
* `scrooge_seq_buffer`: the text and the pattern, `MAX_LEN` = 16384 bases
  each, 2 bits per base. The host writes one base per cycle. The window
  controller reads one base of each sequence per cycle.
* `scrooge_window_ctrl`: loads each window, W+1 cycles. It then starts the DC
  array, waits for it, starts traceback, waits for it, and advances. It
  counts operations, edits and windows.
* `scrooge_top`: all of the above.

### Top-level interface (`scrooge_top`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `wr_en`, `wr_sel`, `wr_addr`, `wr_data` | in | write one base: `wr_sel` 0 = text, 1 = pattern |
| `start`, `text_len`, `pat_len` | in | start an alignment; hold the lengths until `done` |
| `et_en` | in | 1 = Early Termination, 0 = build every row |
| `busy`, `done` | out | `done` pulses after the last operation |
| `op_valid`, `op` | out | operation stream, first to last, no back-pressure |
| `edits`, `n_ops`, `n_windows` | out | summary, valid from `done` until the next `start` |
| `et_hit` | out | the last window's construction stopped early |

Cycle budget per window: W+1 cycles to load, `W + d + 2` cycles to build the
table (`2W + 2` without Early Termination), and `2k + 2` cycles to trace back
`k` operations. At the defaults, a 10,000-base read with 5% errors aligns in
328 windows and about 66,000 cycles. Loading, construction and traceback of
successive windows are not overlapped.

### Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `W` | 64 | window size, also the bitvector width and number of PEs |
| `O` | 33 | window overlap; `1 <= O <= W-1` |
| `MAX_LEN` | 16384 | capacity of each sequence memory, in bases |

With O = 33, each stored entry is exactly 32 bits. The original work
recommends W = 64, O = 33 for long reads, and W = 32, O = 17 for short reads.

## 7. Where this RTL departs from, or adds to, the described design

The following follow the published algorithm: the update rule, the diagonal
order with one PE per text column, stopping on the leftmost PE's MSB, the
DENT table size, and edge regeneration by one extra DC processing element.

The following are this design's own choices:

* the step schedule and the start-column slot;
* the `et_en` switch;
* the banking and port count of the traceback memory;
* the traceback edge order;
* the advance rule (section 2) and the handling of the sequence ends;
* the sequence buffer (capacity, one-base ports);
* the host interface;
* the base code.

What is not built:

* the row-discarding extension of DENT, which needs row-by-row construction;
* any overlap between the phases of successive windows, or several cores
  sharing a host;
* a back-pressure input on the operation stream.

The area and power figures of the original work come from an SRAM model and
published logic numbers. This RTL was not synthesized to a process, so it
does not reproduce those figures.

## 8. Simulating

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. They share a software reference model,
`tb/scrooge_ref_pkg.sv`. The model is a plain sequential rendering of the
table, traceback and windowing on full `m`-bit vectors, with no diagonal
schedule, padding or trimming.

| testbench | what it checks |
|-----------|----------------|
| `tb_scrooge_dc_pe` | update rule: worked example and random inputs |
| `tb_scrooge_pm_gen` | masks of the worked example and random patterns |
| `tb_scrooge_dc_array` | every stored entry, the distance and the latency; the worked example at W=4, O=3; random windows at W=16, O=9, with and without Early Termination |
| `tb_scrooge_tb_sram` | random writes and reads against a model |
| `tb_scrooge_tb_logic` | operations, consumed bases and cycle count against reference traceback |
| `tb_scrooge_seq_buffer` | writes and reads on both memories |
| `tb_scrooge_window_ctrl` | loaded windows and counts, with a reference-driven stand-in for the datapath |
| `tb_scrooge_top` | 40 random pairs end to end at W=16, O=9; counts multi-window runs, early stops, full builds, short-text windows, insertions after the text ends, and all four operations |
| `tb_scrooge_top_full` | one 10,000-base read at 5% error, at the default parameters |
| `tb_scrooge_workloads` | three 10,000-base reads (5% error) at the defaults, and 100 reads of 150 bases at W=32, O=17 (one in five against an unrelated region); each aligned with and without Early Termination |

`tb_scrooge_workloads` reports average cycles per alignment. With Early
Termination the measured averages are about 66,000 cycles for the long reads
and 1,100 for the short reads. Without it they are about 86,000 and 1,400.

For the end-to-end tests the operation stream must equal the reference. It
must also turn a prefix of the text into the pattern, which is checked
directly on the bases.

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/scrooge_pkg.sv tb/scrooge_ref_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
  tb/tb_scrooge_top.sv --top-module tb_scrooge_top -o sim
./obj_dir/sim
```

Replace `tb_scrooge_top` with any testbench name. The testbenches use only
`$urandom` and need no data files.
