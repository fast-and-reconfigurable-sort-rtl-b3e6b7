# Sort-in-memory on 1T1R memristor arrays: tree node skipping in RTL

Sorting normally means moving numbers to an ALU and comparing them. This design sorts them
where they are stored. Each number sits in one bit line (column) of a 32 x 32 one-transistor-
one-memristor (1T1R) array, one digit per word line (row), most significant digit on top.
Turning on one word line reads that digit of every number at once: a **digit read (DR)**.
A min (or max) search then needs no comparator between numbers. Start at the MSB with every
unsorted number a candidate. At each digit, if the candidates read both 0's and 1's, drop the
ones that read 1 (for min) and keep going. When one candidate is left, or the LSB is reached,
that is the minimum.

Doing this once per output number from the MSB ("bit traversal") costs n x w reads. **Tree
node skipping (TNS)** avoids most of them. Every time a DR splits the candidates, the
controller remembers the branching point: the digit to resume from and the candidate set. It
keeps the k most recent points in a small LIFO. After a minimum is output, the next search
resumes from the most recent point instead of from the MSB. The other cross-array strategies
(multi-bank, bit-slice, pseudo multi-level) and two applications (partial sorts for Dijkstra's
algorithm, pruning of neural-network weights) are built on the same controller.

The RTL covers everything digital in such a system: the word-line decoder, the TNS state
controller with its LIFO and logic units, the cross-array processors, the write-verify
programmer for multi-level cells and the pruning mask. It also has behavioural models of the
analog parts: the memristor array and the sense/comparator front end.

## Data layout

| Item | Mapping |
|---|---|
| number *c* of a bank | bit line *c* (32 per array) |
| digit *j* of every number | word line `msb_row + j` (`msb_row`..`lsb_row` per bank) |
| binary cell | low resistance = 1, high resistance = 0; DC set/reset |
| multi-level cell (2 or 3 bits) | one of 8 conductance targets, written by write-verify |
| active numbers | `num_en` mask per bank |

Rows outside `msb_row..lsb_row` may hold other data. The Dijkstra example keeps two 16-bit data
sets in rows 0-15 and 16-31 of one array. Starting a sort at `msb_row + 1` skips the sign
bit, which gives a magnitude sort; the pruning application uses this.

## How one TNS cycle works

One clock is one cycle, and a cycle reads at most one digit. The register state is the
digit register (`col_q`), the number-exclusion register (`en_q`, the current candidates), a
"sorted" flag per number and the LIFO of `{column, mask}` nodes. Each cycle
(`tns_state_ctrl`):

1. **Pick the working set.**
   - While a search is under way: the candidates `en_q` at digit `col_q`.
   - At the start of a new search: the LIFO top node, minus the numbers sorted since it was
     recorded (a *reload*).
   - If that leaves nothing, the cycle is a *redundant* cycle that only pops the node. The
     paper's examples count this cycle too.
   - With an empty LIFO: every unsorted number from the MSB (a *restart*).
2. **Digit read** of that column, through the digit selector, array and digit processor. The
   result comes back in the same cycle.
3. **State recording and number exclusion.** If the candidates read both 0's and 1's (`ren`),
   push `{next column, candidates}` onto the LIFO; a full LIFO drops its oldest node. Then
   drop the candidates on the losing side. The node records the current column instead of the
   next one at the LSB, and for multi-level digits, where a digit can split more than once.
4. **Min/Max check.**
   - Exactly one candidate left: it is the result (*last number*).
   - Two or more left at the LSB: they are equal. Output the lowest index and stay on the LSB
     for the next cycle (*repeated numbers*).
   - Otherwise: move to the next digit.
5. **Load check.** After a result, if every number of the LIFO top is already sorted, pop it
   in the same cycle, so that it does not cost a redundant cycle later.

With k = 3, the numbers {9, 6, 14, 2, 14, 3} take 10 cycles. The two's complement set
{-7, 6, -2, 2} takes 5 cycles with k = 2. These are the counts of the worked examples this
design follows, and the testbenches check both. Bit traversal would need n x w reads.
Random tests also check that TNS never needs more.

### Signed data

The sign digit is searched in the opposite direction: for a min, negative numbers win.

- **Two's complement:** the other bits then follow the normal direction.
- **Sign-magnitude (and IEEE floating point, which orders like sign-magnitude):** the magnitude
  direction depends on which sign is left. For a min, a larger magnitude wins while only
  negative numbers remain. For a max, it does so while no positive number remains.
  The controller latches each number's sign bit from the first read of the MSB. It tracks
  "negatives remain" and "positives remain" for the current candidates.

### Multi-level digits

With m bits per cell, one DR returns an m-bit digit per number. The NE unit resolves the
digit bit by bit, from its top bit, within the same cycle. Each bit can exclude numbers. A
32-bit number then needs only ceil(32/m) reads per search. The digit processor turns the
bit-line current into a thermometer code, using 2^m - 1 comparators per bit line.

## Cross-array strategies (`mode` of `msim_top`)

| Mode | Banks used | What is shared | Output |
|---|---|---|---|
| `CA_TNS` | bank 0 | — | index in bank 0 |
| `CA_MB` multi-bank | all NB | has-0/has-1, survivor count, load and finish flags ORed/summed every cycle (`ca_mb_sync`) | bank + index, lowest bank first on ties |
| `CA_BS` bit-slice | `bs_slices` | groups of equal upper slices passed down through `ne_fifo` | last slice |
| `CA_PML` pseudo multi-level | banks 0 and 1 | both read on bank 0's row | index in bank 0 |

**Multi-bank.** Every bank runs its own controller. Each cycle all banks exclude, count and
pop as if they were one array of NB x 32 numbers. Only the bank holding the winner gets the
output grant. The cycle count therefore equals that of one big array.
Multi-bank mode is built for binary cells only.

**Bit-slice.** Each number is cut into digit slices, one slice per bank. Bank 0 holds the most
significant slice.
- The head slice sorts its slice. Instead of outputting one number, it hands over each
  located group (all numbers equal in this slice), with the group's sign, through a FIFO.
- The next slice takes a group as its whole universe: LIFO cleared, sorted flags reset. It
  sorts inside the group and passes on its own groups.
- The last slice outputs the numbers.
- A slice is finished when the slice before it is done and its FIFO is empty.
- The slices work as a pipeline; a full FIFO stalls the slice that feeds it.

**Pseudo multi-level.** Two binary arrays hold the upper and the lower bit of each 2-bit digit.
Reading both on the same row gives a 2-bit digit per number. Bank 0's controller processes it
exactly like a multi-level cell, so half the reads are needed without multi-level devices.

## Programming

`prog_valid` with `prog_bank/row/col` writes one cell:

- `prog_wv = 0`: DC set or reset, from `prog_value[0]`. Takes 2 cycles.
- `prog_wv = 1`: write-verify to level `prog_value` at `ml_bits` bits per cell
  (`write_verify_ctrl`). Reset, read, then check: if the cell is outside
  [G_t - dG, G_t + dG], give one SET or RESET pulse and read again. Stop in the window
  (success) or after `prog_nmax` pulses (failure). From start to done takes 4 + 2 x pulses
  cycles. `prog_ok` reports the result.

The eight conductance targets are 2, 4, 7, 11, 16, 22, 30 and 40 uS, with ±10 % windows.
An m-bit value uses every 2^(3-m)-th target.

## Partial sorts and pruning

`out_limit` stops a sort after that many outputs. With `out_limit = 1`, a Dijkstra step gets
the nearest unvisited neighbour. With `prune_en`, every output address (bank x 32 + index)
sets a bit of the pruning mask. `mvm_x_out` is `mvm_x_in` with pruned positions forced to zero,
as the inputs of a later matrix-vector multiply would be gated. A pruning run:

1. Store the weights in sign-magnitude.
2. Sort magnitudes (from `msb_row + 1`) with `out_limit = N x p`.
3. The mask then holds the p % smallest weights.

## Modules

| File | Kind | Role |
|---|---|---|
| `msim_pkg.sv` | package | sizes, electrical constants, enums (`dtype_e`, `ca_mode_e`, `cell_op_e`), event struct, level tables |
| `rram_1t1r_array.sv` | behavioural model | 32 x 32 conductances in nS. Bit-line current = sum G x V_READ (pA). DC and pulse programming |
| `wl_dec4to16.sv`, `digit_selector.sv` | RTL | 5-to-32 word-line decoder built from two 4-to-16 decoders and an inverter |
| `digit_processor.sv` | behavioural model | sampling resistor + comparator (binary) or comparator array (2-/3-bit) per bit line |
| `tns_lifo.sv` | RTL | k-entry node stack that keeps the k newest nodes |
| `tns_ne_unit.sv` | RTL | exclusion per digit bit, with data-type polarity and multi-bank sync |
| `tns_minmax_check.sv` | RTL | last number / repeated numbers, and which number is output |
| `tns_load_check.sv` | RTL | does a node still hold unsorted numbers |
| `tns_state_ctrl.sv` | RTL | one TNS sub-sorter controller (the cycle above) |
| `ca_mb_sync.sv` | RTL | multi-bank cross-array processor and output controller |
| `ne_fifo.sv` | RTL | bit-slice group FIFO between adjacent slices |
| `write_verify_ctrl.sv` | RTL | write-verify programming flow |
| `prune_mask.sv` | RTL | in-situ pruning mask and input gating |
| `msim_top.sv` | RTL | NB banks, mode muxing, programming port, counters |

`msim_top` parameters:

- `NB` (banks, default 2)
- `K` (LIFO nodes, default 2)
- `FIFO_DEPTH` (default 32)
- `XW` (MVM input width)

Array size (32 x 32) and maximum bits per cell (3) come from the package.

Top-level timing:

- `start` is a one-cycle pulse while idle. `busy` stays high during the sort.
- `done` stays high until the next start.
- `out_valid/out_bank/out_idx` give one number per cycle at most, one cycle after the cycle
  that located it.
- `cycle_count` counts busy cycles: one DR, reload or redundant cycle each.
- `ev_any` flags events as they happen: DR, state recording, LIFO drop, reload, redundant,
  restart, last, repeat, group out/in, stall.

## Simulation

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. For example, with plain Verilator:

```
verilator --binary --timing -Irtl rtl/msim_pkg.sv rtl/*.sv tb/tb_msim_top.sv \
          --top-module tb_msim_top -o sim && obj_dir/sim
```

`msim_pkg.sv` must come first (listing it twice is harmless). For a single block, replace the
testbench and top-module name.

- `tb_msim_top` runs the top at its default parameters, end to end. It programs all data
  through the programming port, including about 130 write-verify operations, and sorts in
  every mode and data type. It checks each output order against a reference sort.
  - It checks the 5-cycle example exactly and the n x w/m bound on the other TNS runs.
  - It checks the pruning mask and the gated inputs.
  - It counts every mechanism and fails if any of them never happened: DR, state recording,
    LIFO overflow drop, reload, redundant pop, restart, last-number exit, repeated-number
    exit, group hand-over, the four modes, multi-level reads, write-verify, halt and pruning.
- `tb_tns_state_ctrl` drives three controllers (k = 1, 2, 3) with ideal digit reads. It
  checks the worked examples' cycle counts and runs 120 random sorts against a reference.
- `tb_msim_scaled` runs the top with eight banks and one-entry slice FIFOs. It sorts 256
  numbers in multi-bank mode and 32-bit numbers cut into eight 4-bit slices. The FIFOs fill,
  so the slices must stall; the test fails if no stall happened.
- The other testbenches check their block against an independent model: queue models for
  the LIFO and the FIFO, a conductance model for write-verify, exhaustive decoding for the
  word-line decoder, and level decoding with ±9 % spread for the digit processor.

## Where this departs from the paper, and what to trust

- **Analog behaviour is idealised.** The array has no device variation, read noise or wire
  resistance. Pulse steps are a fixed 1/16 of G. The conductance values (HRS 2 uS, LRS 40 uS,
  the eight multi-level targets) and the multi-level comparator references were chosen here.
  The paper only gives measured distributions. Bit errors from overlapping states, which the
  paper discusses, cannot occur in simulation.
- **Cycle semantics were reconstructed from worked examples.** The paper gives them as
  sequences of DRs, not as a register-level specification. The controller reproduces the
  cycle counts of those examples. The exact order of some rules, such as popping fully sorted
  nodes early versus spending a redundant cycle, is this design's reading of them. Ties are
  output lowest index first.
- **One clock per DR.** The prototype ran at 100 kHz, limited by its board. The RTL counts
  cycles and does not model the read settling time.
- **System size.** By default there are two banks (64 numbers). That is enough for the
  bit-slice, pseudo multi-level, Dijkstra and pruning demonstrations. The 1024-number
  multi-bank benchmarks need `NB = 32`, which the top accepts.
- **Interface choices.** The host side is a simple programming port with one shared
  write-verify controller, instead of a PC and instruments. Start/busy/done, the registered
  outputs, the FIFO depth and `out_limit` are this design's own.
- **Not built.**
  - The host PC and its link to the controller.
  - The lab instruments used for programming.
  - The matrix-vector-multiply read-out that the pruning mask would gate.

  The paper does not describe them as hardware to design.
