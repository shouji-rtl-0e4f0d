# Shouji pre-alignment filter in SystemVerilog

Read mappers hand millions of candidate read/reference pairs to an expensive
alignment step, and most of those pairs turn out to be too different to align.
Shouji is a cheap test that runs before alignment. For a pattern `P` and a text
`T` of equal length `m`, and an edit distance threshold `E`, it answers one
bit. A 0 means the pair surely needs more than `E` edits, so it can be thrown
away. A 1 means it may be within `E` edits and must go on to the aligner.

The test rests on the pigeonhole principle. If two sequences differ by at
most `E` edits, then the parts they share add up to at least `m - E`
characters. Shouji looks for those shared parts as runs of matches along the
diagonals of a small comparison matrix. It counts the characters it could not
cover, and rejects the pair when more than `E` are left.

This RTL implements the filter and the accelerator around it. That is
`N_UNITS` independent filtering units between a sequence controller and a
result controller. Each unit takes one pair per clock.

## The algorithm as the hardware computes it

### Neighborhood map (`neighborhood_map`)

Entry `N[i][j]` is 0 when pattern base `i` equals text base `j`, and 1 when
they differ. Only the `2E+1` diagonals `d = j - i` with `|d| <= E` are needed.
Diagonal `d` is the text XOR-ed with the pattern moved by `d` bases. Each base
is a 2-bit code, so the two XOR bits of a base are OR-ed into one mismatch
bit. With `d > 0` (upper diagonals) the pattern moves towards higher text
positions; with `d < 0` (lower diagonals) it moves towards lower ones.

Every diagonal is indexed by **text position** (map column) `j`:
`diag[E_MAX+d][j] = N[j-d][j]`. As a result, a window of four columns sees the
same four columns on every diagonal.

Two cases have no real map entry, and both read as 1 (mismatch):

- positions where `j-d` falls off the pattern;
- three padding columns past the last one.

The hardware is built for a largest threshold `E_MAX`. The threshold itself
is an input. A diagonal with `|d|` above the current threshold reads as all
ones, so it can never be chosen.

### Search windows (`search_window`, `zeros_counter`)

There is one window per column `i`. Window `i` covers columns `i .. i+3`. All
`m` windows work in parallel.

In each window a 16-entry table counts the zeros of every diagonal's 4-bit
segment. The window then picks the segment `Z` with the most zeros. Ties are
broken in this order:

1. a segment that starts with a zero (a match in the window's first column)
   wins;
2. if still tied, the order is the main diagonal, then lower 1, upper 1,
   lower 2, upper 2, and so on.

A window 3 columns wide would be enough to see an isolated match between two
mismatches (`101`). The fourth column makes such short, often spurious
matches count for less, which improves accuracy.

### Shouji bit-vector (`shouji_bitvector`)

This is an `m`-bit record of which columns are covered by a match. It starts
as all ones. Windows are applied in column order. Window `i` writes its `Z`
over bits `i .. i+3` only when `Z` has more zeros than those four bits hold at
that point.

This update is sequential by nature: window `i` sees what windows `0 .. i-1`
wrote. In hardware it is an unrolled chain of `m` small combinational stages.
Each stage has its own 4-bit zero counter. This chain is the unit's longest
path. At `m = 100` it runs through 100 compare-and-select stages within one
clock cycle.

### Decision (`shouji_decision`)

The unit counts the zeros of the bit-vector. It accepts the pair (`1`) when
there are at least `m - E` zeros, that is, at most `E` ones.

### Worked example

Take `T = GGTGCAGAGCTC`, `P = GGTGAGAGTTGT` and `E = 3`. The bit-vector
(column 1 first) is `000010000101`. That is three edits, so the pair is
accepted. Both the testbench of `filtering_unit` and the reference model
reproduce this vector.

### What the filter does and does not guarantee

The filter never looks at where edits sit relative to each other. So it
accepts some pairs that are really farther apart than `E` (false accepts);
the aligner removes those later. It is meant to (almost) never reject a pair
that is within `E` edits. On random pairs with up to 7 edits, the reference
model rejected about 2 in 1000 pairs that were truly within `E`. These come
from the greedy window choice and from edits that move the alignment near the
ends of the sequences. Treat "zero false rejects" as a strong tendency, not a
proof.

Only global (end-to-end) filtering is built. Local and semi-global filtering
would mean not counting the ones at one or both ends of the bit-vector. They
are not implemented.

## Filtering unit timing (`filtering_unit`)

The unit is fully pipelined with no stall. It takes a new pair every clock and
has a fixed latency of two clock edges (`FU_LATENCY` in `shouji_pkg`):

| edge | what is registered |
|------|--------------------|
| 1 | the `m` window results `Z_i` and their zero counts, the threshold, the last flag |
| 2 | the bit-vector chain and the decision: `out_similar`, `out_edits`, `out_last` |

`out_edits` (the number of ones) is a side output, useful when debugging.

## Accelerator (`shouji_accel`)

```
 rx stream --> sequence_controller --FIFO u--> filtering_unit u --> FIFO u-- result_controller --> tx stream
 (128-bit       assemble 4 words/pair,          (u = 0..N-1)                 read FIFOs in the same
  words)        deal pairs round-robin                                       order, pack result bits
```

**Input format.** A pair is `ceil(4m/IN_W)` words. With the defaults that is
4 words of 128 bits. The concatenated words hold:

- the pattern in bits `[2m-1:0]`;
- the text in bits `[4m-1:2m]`;
- padding above that.

Base `i` of a sequence sits in bits `[2i+1:2i]`. The base code is A=00, C=01,
G=10, T=11. Only equality matters, so any one-to-one code works. `rx_last` on
the final word of a pair closes a batch.

**Ordering.** The sequence controller gives pair `k` of a batch to unit
`k mod N`. The result controller reads the per-unit result FIFOs in the same
order, so results leave in the order the pairs arrived. Both controllers
restart at unit 0 after a pair marked last.

**Flow control.** A unit cannot be stalled, so the result controller grants
credit for unit `u` only while `u`'s result FIFO has more free entries than
`FU_LATENCY`. Without credit, a pair waits in the unit's input FIFO. When the
FIFO whose turn it is fills up, `rx_ready` drops and `rx_stall` rises. If the
host stops taking results (`tx_ready` low), the stall propagates back to the
input.

**Output format.** Results are packed first-pair-in-bit-0 into 128-bit words.
A word is sent when it holds 128 results or the batch's last result.
`tx_count` gives the number of valid bits, and `tx_last` marks the end of a
batch.

**Threshold.** `cfg_threshold` (0..`E_MAX`) is shared by all units. Change it
only between batches, once the previous batch's last word has come out.

**Rate.** With 4 words per pair, a stream of one word per clock carries a pair
every 4 clocks. That is far below what 16 units can take. As in the original
system, the host link, not the filter, sets the throughput. At 250 MHz and
128 bits per clock, 4 GB/s of pair data would be 62.5 million pairs/s.

The PCIe endpoint and its DMA engines (in the original system, the RIFFA 2.2
framework), and the host software, are not part of this RTL. They would
connect to the `rx_*`/`tx_*` streams.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `M` | 100 | sequence length in bases (one filtering unit handles exactly this length) |
| `E_MAX` | 5 | largest threshold the hardware supports; sets the number of diagonals, `2*E_MAX+1` |
| `N_UNITS` | 16 | filtering units |
| `IN_W`, `OUT_W` | 128 | stream word widths |
| `SEQ_FIFO_DEPTH`, `RES_FIFO_DEPTH` | 4 | per-unit FIFO depths (result FIFOs need more than `FU_LATENCY` entries) |

The defaults match the configuration reported for the original FPGA build:
100-base reads, thresholds of 2 and 5, and 16 units. Other sizes need a
rebuild:

- 150-base reads (thresholds up to 15): `M=150`, `E_MAX=15`.
- 250-base reads (thresholds up to 25): `M=250`, `E_MAX=25`. The original
  build fit 8 units at this length.

## Where this RTL departs from, or adds to, the published description

- **Diagonal indexing.** The published pseudo-code indexes upper diagonals by
  pattern position. Its figures and its shift-and-XOR description index them
  by text position. This RTL follows the figures.
- **Window selection.** This RTL follows the prose rule: most zeros, then a
  leading zero. The published pseudo-code differs. It replaces `Z` with the
  better of each lower/upper pair without comparing it with the `Z` kept so
  far, and lets the main diagonal win only with strictly more zeros. The
  remaining tie order is this design's own.
- **Map edges.** Entries off the map, and the padding past the last column,
  count as mismatches. This is this design's own choice.
- **Run-time threshold.** The threshold is an input up to `E_MAX`, enforced
  by masking diagonals. This is this design's own choice.
- **Own choices, not specified.** All of the following are this design's own:
  the pipelining, the word formats, round-robin dealing with credits, the
  FIFO depths, result packing and the batch-end flag.

## Files and simulation

`rtl/`:

- `shouji_pkg.sv`: shared constants and the base code;
- `zeros_counter.sv`, `neighborhood_map.sv`, `search_window.sv`,
  `shouji_bitvector.sv`, `shouji_decision.sv`: the filter's steps;
- `filtering_unit.sv`: one complete filter;
- `sync_fifo.sv`, `sequence_controller.sv`, `result_controller.sv`: the
  accelerator's plumbing;
- `shouji_accel.sv`: the top.

`tb/`:

- one self-checking testbench per module, `tb_<module>.sv`;
- `shouji_ref_pkg.sv`: a character-level reference model of the algorithm, a
  Levenshtein distance and sequence generators.

Each testbench prints `TB_RESULT checks=N failures=F`. For example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_shouji_accel \
  rtl/shouji_pkg.sv tb/shouji_ref_pkg.sv rtl/*.sv tb/tb_shouji_accel.sv
./obj_dir/Vtb_shouji_accel
```

Lint warnings are not errors; add `-Wno-fatal` if your verilator treats them
as errors.

`tb_shouji_accel` runs the top at its default size. It sends 365 pairs in
three batches with thresholds 5, 2 and 0. It holds the result stream off long
enough to stall the input, and checks every result bit against the reference
model. It also counts each flow-control event and fails if one never happens.
`tb_filtering_unit` checks the worked example and 400 pairs at `M = 100`,
including the two-cycle latency.

The real read sets used to judge accuracy in the original work are not
included. The testbenches generate their own random and mutated pairs.
