# SAII: an FM-index constructor that builds the index with the index

This is synthesizable SystemVerilog for the FM-index constructor described in
"A Memory-Efficient FM-Index Constructor for Next-Generation Sequencing
Applications on FPGAs" (Chen, Li and Lu). The paper calls its algorithm
Self-Aided Incremental Indexing (SAII). The RTL follows the paper's
architecture and its FPGA configuration. Where the paper leaves a detail
open, the choice made here is stated below and in the comment at the top of
each file.

## The idea

An FM-index of a DNA string X$ has three parts:

- the Burrows-Wheeler transform (BWT);
- the C array, where C(a) is the number of bases smaller than a;
- the O table, where O(a, i) is the number of a's in BWT[0..i].

One step of backward search computes the lower bound

    R(aW) = C(a) + O(a, R(W) - 1) + 1

This is the first row whose suffix is not smaller than aW. It is well
defined even when aW does not occur in the text.

SAII reads the sequence from its end to its start and keeps the complete
index of the suffix L read so far. When the next base b arrives, the new
suffix bL is longer than every suffix already indexed, so it occurs nowhere
in them. One backward-search step on the current index then gives the exact
row at which bL sorts. The BWT is extended in two moves:

1. the $ in the BWT (the row of L itself) becomes b;
2. a new $ is inserted at the row R(bL).

No suffix array and no working copy of the text are needed. The only
storage is the index being built. Example for ACGCT (bases fed T, C, G, C, A):

| suffix | search            | BWT after the step |
|--------|-------------------|--------------------|
| T$     | 0 + 0 + 1 = 1     | T$                 |
| CT$    | 0 + 0 + 1 = 1     | T$C                |
| GCT$   | 1 + 0 + 1 = 2     | TG$C               |
| CGCT$  | 0 + 0 + 1 = 1     | T$GCC              |
| ACGCT$ | 0 + 0 + 1 = 1     | T$AGCC             |

Each step costs one search, which is cheap, plus one insertion into the
BWT and O table, which is expensive. Building an index of n characters
therefore takes time quadratic in n, divided by the O-table sampling
distance.

## Data layout

- **Bases.** A, C, G and T are coded 00, 01, 10 and 11, which is their
  lexical order (`saii_pkg::base_t`).
- **The $.** It has no code of its own. It is written as A, and its row is
  kept in a separate pointer (`dollar_pos`).
- **BWT memory** (`bwt_mem`). The BWT is cut into segments of K = 2,048
  characters. One segment is one BRAM word of 4,096 bits, with character j
  in bits [2j+1:2j]. There are 64 segments, for 131,072 characters.
- **O-table memory** (`otable_mem`). The O table is sampled every K
  characters, so it is K times smaller than a full table. Entry b holds the
  counts of A, C, G and T in BWT[0 .. b·K−1], i.e. everything before
  segment b. The $ is never counted. Each entry is four 17-bit counts.
- **Answering O(a, i).** Take entry ⌊i/K⌋ and add a pop count of a over
  positions 0 .. i mod K of segment ⌊i/K⌋.
- **C array** (`c_array`). Four registers. C(A) is always 0.
- **BRAM budget.** 64 × 4,096 + 64 × 68 = 266,496 bits. This equals the
  BRAM figure reported for the FPGA build.

## One iteration in hardware

### Search: three cycles

The search unit (`search_unit`, `pop_counter`) gets from the BRAM the
segment that holds position R(L)−1 and that segment's O-table entry. It then
takes three cycles:

| cycle | what happens |
|-------|--------------|
| 1 | **1st stage pop count.** 32 adders run in parallel. Each counts the matches of the search base in a 64-character slice, masked to positions ≤ (R(L)−1) mod K. |
| 2 | **2nd stage pop count.** The 32 partial counts are summed. |
| 3 | **Finish search.** C(b) + O entry + count + 1. The prefetch monitor registers the result as the new $ row. |

When R(L) = 0, the O term is 0 and the pop count is forced to 0.

### Update & Insert: one segment per cycle

Inserting a character at position p moves every later character up by one
place. The move crosses segment borders as a carry. The insert unit
(`insert_unit`) is purely combinational and rewrites one segment per cycle.

The segment that holds p:

- keeps the positions below p mod K;
- takes the new character at p mod K;
- moves its other characters up by one.

Each later segment:

- takes the carry, which is the old last character of the previous segment,
  at position 0;
- moves its own characters up by one.

In every segment, the old last character leaves as the next carry.

The O-table entry of a segment counts what lies before the segment, so:

- the entry of the first segment does not change;
- a later entry changes by `+[a = inserted] − [a = carry in]`.

An insertion into a full last segment opens a new segment. That segment's
BRAM word and entry have never been written. Its entry is therefore seeded
from the per-base totals, which the C array provides.

The sweep pipelines the BRAM. In each cycle it writes segment s and reads
segment s+1. A sweep from segment ⌊p/K⌋ to the last segment takes one cycle per
segment. The read of the first segment shares the last search cycle. On
average a sweep covers about half the segments in use, which matches the
i/2 term of the paper's runtime model.

## Prefetch: why the $ is never written

Done literally, each base costs two sweeps:

- an *update* sweep, which overwrites the $ with b;
- an *insert* sweep, which places the new $.

Overwriting the $ does not move any character, so the update sweep only
exists because of the O table.

The prefetch scheme merges the two sweeps. After the search has found the
new $ row q, the controller does not write the $. It waits for the next
base b′. Writing the $ at q and then overwriting it with b′ is the same as
inserting b′ at q, which is one sweep. As a result, the BRAM always holds
the current BWT with its $ row taken out.

The *prefetch monitor* (`prefetch_monitor`) records:

- where that missing row is (`pend_pos`);
- the row and base of the latest early write (`early_pos`, `early_base`);
- the length;
- whether the input has ended;
- at the end, the $ pointer.

The paper says the monitor ensures that the next search is still correct.
The order used here is the one in the paper's prefetch timing diagram:
first insert b′ at q, then search with b′ from R = q. In this order no count
correction is needed, for two reasons:

- the search counts only positions below q, and the early write does not
  move them;
- C(b′) does not change when a b′ is added.

So here the monitor is bookkeeping, plus assertions. One assertion checks
that every search result lies in [1, length]. Another, in the controller,
checks that every search stays below the early-written row.

After the last base nothing is left to prefetch. The $ itself is then
inserted, with one final sweep. It is stored as A, it does not count in the
O table, and `dollar_pos` is set.

## Controller and timing

`saii_ctrl` implements the states of the paper's state diagram:

```
INIT ──first base──► POP1 ─► POP2 ─► FIN ─(─► UPD while no base)─► SWEEP … SWEEP ─┬─► POP1  (next base)
 ▲                   └──────── Search ─────┘  └──────── Update & Insert ─────────┘
 └──restart── FINISH ◄───────────────────────────────── after the $ sweep ─────────┘
```

- **INIT.** Writes the first base as the whole BWT, which is a single
  segment write. The first search then uses R = 0.
- **FIN and UPD.** If the next base is already offered (or the input has
  ended, or the memory is full), FIN also starts Update & Insert. It takes
  the base (or chooses the $). It also reads the segment that holds the new
  $ row, using the row straight from the search unit's final adder. If no
  base is offered, the FSM waits in UPD and does the same when one arrives.
- **SWEEP.** Rewrites segments up to the last one. In its final cycle it
  reads the segment the next search needs. This read shares a cycle with a
  write. The read returns the old word, which is identical to the new word
  below the insertion point, and only those positions are counted.

Cycles per base: 3 (search) + (number of segments from the insertion
segment to the last one), plus any cycles spent waiting in UPD. For the
whole sequence, with the input always ready:

    cycles = 1 + 3n + Σ over insertions (1 + last segment − insertion segment)

The paper models the runtime as T = K·Σ_{i=1}^{n/K} (3 + i/2). This design
takes about half a cycle per base more, because the insertion segment is
itself rewritten. Measured at the default size with random sequences:

| bases   | cycles    | paper's model | at 120 MHz |
|---------|-----------|---------------|------------|
| 16,384  | 97,214    | 86,016        | 0.81 ms    |
| 32,768  | 261,333   | 237,568       | 2.18 ms    |
| 65,536  | 784,772   | 737,280       | 6.54 ms    |
| 131,071 | 2,614,193 | 2,523,136     | 21.8 ms    |

The paper reports about 21 ms for 131,072 bases. The remaining excess over
the model is a fixed cost per base, so its share shrinks as sequences grow.

## Using it

Parameters of `saii_top`:

- `K` (default 2,048): segment length and O-table sampling distance;
- `N_MAX` (default 131,072): characters held, $ included;
- `GROUPS` (default 32): first-stage pop-count adders.

`K`, `N_MAX/K` and `K/GROUPS` must be powers of two.

1. **Feed the bases.** Present one base per cycle on
   `in_valid/in_base/in_ready`, starting with the last base of the sequence
   and ending with the first. Raise `in_last` with the first base. The
   constructor takes a base only when `in_ready` is high, which happens
   once per iteration, so the input may stall freely. A base that is waiting
   when a search ends costs no extra cycle.
2. **Wait.** `busy` is high while the index is being built; `done` rises
   when it is complete.
3. **Read the index.** In `done`, `seq_len`, `dollar_pos` and `c_arr` give
   the index's length ($ included), the $ row and the C array. Drive
   `idx_rd_en/idx_rd_addr` to read a segment. One cycle later, `idx_bwt`
   holds its characters and `idx_occ` its O-table entry.
4. **Mind the $ when counting.** The O entries do not count the $. A count
   inside the segment that holds `dollar_pos` must skip that A.
5. **Start again.** Pulse `restart` to clear and take a new sequence.

If more than `N_MAX − 1` bases arrive, the index is built from the first
`N_MAX − 1` bases received, which are the last ones of the sequence.
`truncated` is then raised. The remaining input is not taken.

## Files

| file | role |
|------|------|
| `rtl/saii_pkg.sv` | base and state types, default sizes |
| `rtl/saii_top.sv` | top level: wiring, memory read-port sharing, O-entry seeding |
| `rtl/saii_ctrl.sv` | state machine |
| `rtl/prefetch_monitor.sv` | $ row, early-write row and base, length, $ pointer |
| `rtl/search_unit.sv` | lower-bound step, three cycles |
| `rtl/pop_counter.sv` | two-stage parallel pop counter |
| `rtl/insert_unit.sv` | one-segment insertion with carry, O-entry update |
| `rtl/c_array.sv` | C array and per-base totals |
| `rtl/bwt_mem.sv`, `rtl/otable_mem.sv` | block RAMs |

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares the
module against values computed inside the testbench and ends with a
`TB_RESULT checks=… failures=…` line.

- **`tb_saii_top`** (K = 16, 256 characters) builds twelve random sequences
  of 1 to 276 bases. The 276-base one is truncated. Some runs stall the
  input. For each sequence the testbench checks:
  - every BWT character, the $ row, every O-table entry and the C array,
    against a reference built by plain suffix sorting;
  - the exact cycle count.

  It also checks that multi-segment sweeps, newly opened segments, input
  stalls, truncation, restart and a single-base input all occurred.
- **`tb_saii_full`** runs the default configuration filled to capacity
  (131,071 bases) in under a minute of simulation. Sorting that many
  suffixes is too slow in a testbench, so it checks the result without a
  suffix sort:
  - the BWT must invert, by LF mapping, to exactly the input;
  - every O-table entry is recounted from the BWT;
  - the cycle count must equal the exact figure derived from the rows the
    LF walk visits.
- **`tb_saii_workloads`** does the same for 16,384, 32,768 and 65,536 bases
  at the default size.

To run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl rtl/saii_pkg.sv tb/tb_saii_top.sv \
          --top-module tb_saii_top -Mdir obj && ./obj/Vtb_saii_top
```

Replace the testbench name to run another one. The testbenches draw their
inputs with `$urandom`. Use `+verilator+seed+N` to vary them.

## Where this design departs from the paper, or fills gaps

- **Pop counter, second stage.** The paper gives 32 parallel adders for the
  first stage and 64 for the second. Summing 32 partial counts does not need
  64 adders. Here 64 is taken as the number of characters each first-stage
  adder covers (32 × 64 = 2,048 = K), and the second stage is one adder
  tree.
- **Segment width and BRAM ports.** A BRAM word is one whole segment, with
  one read port and one write port. The paper only says the BWT and O table
  are segmented in BRAM with a fixed word length. One segment per word is
  what makes its i/2 update cost come out.
- **O-table entries.** An entry holds the count before its segment. Its
  width of 17 bits is chosen to reproduce the reported BRAM total.
- **Capacity.** The design holds 131,072 characters *including* the $,
  i.e. 131,071 bases. The paper states 131,072 bp. Its BRAM total has room
  for 131,072 characters only.
- **Overlapping search and update.** The last search cycle also takes the
  next base and reads the first segment of the sweep. This is this design's
  way of reaching the paper's m + i/2 cost. It leaves about half a cycle per
  base above the paper's model (see the table above).
- **The monitor.** In the order used here it corrects nothing (see
  *Prefetch*). It keeps the early-written row and base and checks, with
  assertions, the invariants that make the correction unnecessary.
- **Chosen here, not in the paper:**
  - the input handshake and base order;
  - the `in_last` marker;
  - truncation when full;
  - `restart`;
  - the index read port;
  - the reset style (asynchronous, active low, memories not reset).
- **Not modelled.** The FPGA device, its clocking (120 MHz in the paper) and
  its I/O are outside the RTL.
