# Two-phase blind detection of polar-coded control messages

A mobile terminal (UE) does not know where, in a downlink control channel,
the messages meant for it are, nor which of several formats and code lengths
they use. It has to try to decode every candidate position and keep only what
carries its own identifier. This is blind detection. In the scheme
implemented here, the UE ID is carried directly by a set of bit channels of
the polar code that would otherwise be frozen. The work is split into two
passes:

1. **Coarse pass.** All C1 = 44 candidates are decoded with a cheap
   successive-cancellation list (SCL) decoder of list size L1 = 2. For each
   candidate the design keeps two things:
   - a reliability figure: the magnitude of the LLR of the last decoded bit
     on the best path;
   - a flag that says whether the decoded ID bits equal the UE ID.
2. **Selection.** C2 = 5 candidates go on to the fine pass, chosen in this
   order:
   - every candidate whose ID matched;
   - if more than C2 matched, only the C2 most reliable of them;
   - any free slots are filled with the *least* reliable candidates, because
     a message for this UE may be hiding among the badly decoded ones.
3. **Fine pass.** The chosen candidates are decoded with list size
   L_MAX = 8, with *early stopping*:
   - each ID bit is compared with the UE ID as soon as it is decided;
   - paths that disagree are deactivated;
   - the decode stops when no path is left.

   The detection result is the ID-matching fine-pass result with the lowest
   path metric.

The hardware uses the same SCL decoders for both passes. A decoder built for
L_MAX = 8 paths runs in one of two modes:

- **L_MAX mode:** one candidate with list size 8.
- **L1 mode:** L_MAX/L1 = 4 candidates at once, each with list size 2, each
  in its own group of two paths.

This means N_SCL_MAX physical decoders act as 4·N_SCL_MAX decoders in the
coarse pass.

Default configuration:

| Parameter | Default | Meaning |
|---|---|---|
| N_MAX | 512 | maximum code length (codes of 256 and 512 are used) |
| L_MAX | 8 | list size of the fine pass |
| L1 | 2 | list size of the coarse pass |
| P | 64 | processing elements per path |
| C1 | 44 | candidates per detection |
| C2 | 5 | candidates passed to the fine pass |
| N_SCL_MAX | 1 | physical decoders |
| ID_BITS | 16 | bits in the UE ID |
| Q | 6 | bits per channel LLR |
| W | 8 | bits per internal LLR |
| PM_W | 12 | bits per path metric |

## Block structure

```
             in_* (channel LLRs, P per cycle)
                  |
          bd_cand_buffer  (C1 x N_MAX LLRs + code index)
                  | rd_cand / rd_chunk
                  v
   bd_controller ---> bd_decoder_array (N_SCL_MAX x bd_scl_decoder)
        ^  |                 | per decoder: NCH group results
        |  v                 v
        +-- bd_cand_select (PM / match registers, bd_pm_sorter, list, output)
```

| File | Role |
|---|---|
| `rtl/bd_pkg.sv` | default sizes, bit-type and list-mode enums |
| `rtl/bd_pe.sv` | one processing element: min-sum f and g, one selected |
| `rtl/bd_path_sorter.sv` | keeps the L best of 2L split candidates (combinational) |
| `rtl/bd_scl_decoder.sv` | list decoder with L1/L_MAX modes and early stopping |
| `rtl/bd_decoder_array.sv` | N_SCL_MAX decoders side by side |
| `rtl/bd_pm_sorter.sv` | extracts the K smallest (or largest) of C1 metrics, one per cycle |
| `rtl/bd_cand_select.sv` | coarse-pass register files, list building, fine-pass dispatch, output choice |
| `rtl/bd_cand_buffer.sv` | holds all candidates' channel LLRs |
| `rtl/bd_controller.sv` | sequences both passes |
| `rtl/bd_top.sv` | wires everything together |

## The list decoder (`bd_scl_decoder`)

The decoder walks the polar decoding tree depth-first, left child first. At a
node of stage s it produces the child LLRs from the parent's:

- **Left child (f):** `f(a,b) = sgn(a)·sgn(b)·min(|a|,|b|)`.
- **Right child (g):** `g(a,b) = b + (1-2β)·a`, where β is the partial sum
  of the finished left sibling.

All storage is in registers, one row per path:

- **Internal LLRs:** a heap-ordered array in which stage s occupies indices
  [2^s, 2^(s+1)). A node's children are always written to the row of the
  next lower stage.
- **Partial sums (β):** the same layout.
- **Decided bits:** one vector per path.
- **Channel LLRs:** NCH = 4 separate memories, one per candidate group in L1
  mode. Group 0 serves all paths in L_MAX mode.

Each path has P = 64 processing elements. A stage whose child row is longer
than P takes `2^s / P` cycles; any other stage takes one cycle.

At a leaf (stage 0) the bit is decided in the same cycle as its LLR:

- **Frozen leaf:** the bit is 0. The metric grows by |LLR| if the LLR
  disagrees with that decision.
- **Information or ID leaf:** every active path splits into two candidates.
  Their metrics follow the usual LLR-based rule: the candidate against the
  LLR sign pays |LLR|.

A split leaf takes one extra cycle. In that cycle:

- the 2L candidates are ranked;
- each surviving slot copies its parent's LLR, β and bit rows, with the new
  bit appended;
- in L1 mode, the four groups are ranked separately by four small sorters;
  in L_MAX mode one 16-to-8 sorter is used.

The partial-sum update walks up the tree after every leaf. It XORs with the
stored left siblings while the finished node is a right child. It then stores
the result as the left sibling at the first stage where the node is a left
child.

**ID bits.** These are decoded like information bits. After survivor
selection, each surviving path's bit is compared with the next UE-ID bit (the
first ID bit in decoding order is UE-ID bit 0):

- A mismatch always clears the path's "ID matched" flag.
- With `es_en`, a mismatch also deactivates the path.
- An inactive path produces no candidates at later splits.
- When no path is active, the decode ends and `est_bits` reports how many
  leaves were estimated.

Checking *after* selection matters. A path that disagrees with the UE ID is
not replaced by a worse path that agrees.

**Cycle count of one decode.** A split leaf is a leaf that is an information
or ID bit with list size above one.

- When every stage fits in one step (P ≥ N/2): `2N − 2 + (number of split
  leaves)`.
- Otherwise, add the extra steps of the stages longer than P.
- After an early stop, the count ends at the leaf where the list emptied.
- The `done` pulse comes one cycle after the last leaf.

**Outputs per group.** For the best active path of each group, the decoder
gives:

- the path metric;
- the reliability (|LLR| of the last decided bit);
- the ID-matched flag;
- the decided bit vector.

## Selecting the fine-pass candidates (`bd_cand_select`, `bd_pm_sorter`)

**Storing coarse-pass results.** Results come back one decoder round at a
time, on 4·N_SCL_MAX lanes with a valid strobe each. Each valid lane is
written into a reliability register file and an ID-match register file at
`address counter + rank among the valid lanes`. The address counter then
advances by the number of valid lanes, and a second counter counts ID
matches. This packing requires the controller to deliver candidates in index
order, which it does.

**Sorting.** When the address counter reaches C1, the sorter starts:

- each cycle it compares every eligible entry with all the others;
- it outputs the index of the minimum and removes it from the next
  comparisons;
- it stops after C2 hits, or earlier when nothing eligible is left.

**Building the list.** The list is the matched candidates, followed by the
lowest-reliability unmatched ones. If more than C2 candidates matched, the
sorter makes a second pass in maximum mode over the matched entries only, and
the list is their C2 highest.

**Latency.** Sorting takes C2 + 4 cycles, or 2·C2 + 5 with more than C2
matches.

**Fine pass and output.** A dispatch counter hands out the list N_SCL_MAX
entries at a time. The output selector keeps the fine-pass result with the
lowest path metric among those that:

- still had an active path;
- matched the ID;
- have a path metric not above the run-time input `pm_limit`.

The detection result is that result, or `out_found = 0`.

## Sequencing (`bd_controller`) and total latency

**Coarse pass.** The controller works in rounds of up to 4·N_SCL_MAX
consecutive candidates that share a code. Each round:

1. copies each candidate's LLRs from the buffer into its decoder group, P per
   cycle;
2. starts the decoders in L1 mode without early stopping;
3. waits for all of them;
4. strobes the results into the selection block.

**Fine pass.** The controller does the same in L_MAX mode with early
stopping, N_SCL_MAX list entries per round.

**Cycle model.** The cycle count from `go` to `done` is exactly:

```
sum over rounds (load + longest decode in the round + 5)
  + sorting (C2 + 4, or 2·C2 + 5)
  + 4
```

Here `load` is the number of LLR chunks copied. In a coarse round it is 4
groups × N/P chunks. In a fine round it is N/P chunks of the longest code in
the round.

**Measured latency at the defaults.** With one decoder, 22 candidates of
length 256 and 22 of length 512, K = 57 and 16 ID bits placed by
polarization weight:

- 12 811 cycles when the UE ID is present and found;
- 13 037 cycles when it is absent.

For comparison, the published worst case for the same system size is 14 720
cycles. That figure assumes a decoder with shortcut nodes and a different
load model; see the departures below. At the intended 1 GHz this would be
below the 16 µs requirement, but no clock frequency has been established for
this RTL.

## Interface of `bd_top`

**Before a detection:**

1. Write every candidate into the buffer. Hold `in_we` for N/P cycles per
   candidate, with:
   - `in_cand`: the candidate index;
   - `in_chunk`: 0 … N/P−1;
   - `in_code`: the index of its code;
   - `in_data`: P LLRs, bit index = chunk·P + lane.
2. Set the code table:
   - `code_nlog2`: log2 N per code;
   - `code_bt`: per-index types BT_FROZEN, BT_INFO or BT_ID.
3. Set `ue_id` and `pm_limit`.

**Running it:**

- Pulse `go` for one cycle. `busy` stays high until the end.
- `done` and `out_valid` pulse together. At that point `out_found`,
  `out_idx`, `out_u` (bits above the code length are 0) and `out_pm` hold the
  result.
- `p1_match_cnt`, `p1_many_match` and `p2_list` expose the selection.
- `dec_busy` and `dec_est_bits` expose the decoders, for monitoring early
  stopping.

**Conventions:**

- Reset is synchronous and active low.
- Channel LLRs are signed Q-bit integers, positive meaning bit 0.

## What follows the original scheme and what is this design's own

**Taken from the published architecture:**

- the two-pass scheme and its selection rules;
- the tunable-list decoder that serves both passes;
- four channel memories and four L1 sorters per decoder;
- register memories that are read, updated and written back in one cycle;
- survivor selection in the cycle after a split;
- early stopping after survivor selection, switchable by a control input and
  used only in the fine pass;
- P processing elements per path, with large stages done in several steps;
- the register files, counters, C1 comparator, one-minimum-per-cycle sorter
  and selectors of the candidate-selection block;
- all sizes in the table above except P, Q, W and PM_W.

**Chosen here, because the publication does not say:**

- P = 64.
- Fixed-point widths: Q = 6, W = 8 with symmetric saturation, PM_W = 12 with
  saturation.
- The all-pairs survivor ranking.
- Ties going to the lower index.
- The maximum-mode pass for more than C2 matches.
- The candidate buffer and its write protocol.
- The load of LLRs into the decoders.
- The controller's round structure.
- The `pm_limit` acceptance rule. The publication only says that validity
  depends on the ID match and the path metric.
- Synchronous reset.

**Departures that affect results or timing:**

- **No shortcut nodes.** The decoder visits every node of the tree. The
  published decoder is built on one that handles special nodes (rate-0,
  rate-1, repetition, single-parity-check) directly. Its latency formula is
  2N + K + 16 − 2 per decode; this RTL needs 2N − 2 + splits, plus the
  multi-step stages.
- **Rounds never mix code lengths.** With 22 + 22 candidates and four coarse
  lanes, this gives 12 rounds instead of ⌈44/4⌉ = 11.
- **LLR loading costs cycles.** Copying LLRs into the decoders adds N/P
  cycles per group per round. The publication does not describe loading.
- **The reliability figure saturates.** The last decoded bit's LLR is the
  best protected value in the tree. At W = 8 it is often saturated (127) for
  reliable codewords, so the selection's ordering by reliability degrades to
  index order among saturated candidates. A wider internal LLR would fix
  this at some area cost.
- **Path copy is eager.** Survivors copy whole LLR and β rows; there are no
  pointer tables.
- **Area and timing were not run.** No synthesis to a cell library was done,
  so the area figures and the 1 GHz clock of the publication are not
  reproduced.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=… failures=…` line and has a cycle watchdog.
`tb/bd_ref_pkg.sv` is a software model used by the testbenches:

- polar encoder;
- channel with bounded noise;
- code construction by polarization weight;
- a bit-true SCL decoder with early stopping and the same cycle model;
- the selection rules.

| Testbench | What it checks |
|---|---|
| `tb_bd_pe` | every input pair exhaustively (W = 8) |
| `tb_bd_path_sorter` | random metrics, against a software sort |
| `tb_bd_pm_sorter` | C1 = 44, C2 = 5; minimum and maximum mode; one result per cycle |
| `tb_bd_cand_buffer` | write and read at reduced size |
| `tb_bd_cand_select` | default sizes; list contents in the many/fill/none cases; sort latency; output choice |
| `tb_bd_controller` | stand-in decoders; loads, modes, starts, strobes and dispatch order |
| `tb_bd_scl_decoder` | bit-true results in both modes, with and without early stopping; decode cycles compared exactly (N_MAX = 32, L_MAX = 4, P = 4) |
| `tb_bd_decoder_array` | two decoders decoding different candidates at once |
| `tb_bd_top` | end to end at reduced size, checked against the reference model (see below) |
| `tb_bd_top_full` | the top at its defaults, two detections of 44 candidates, as above |

`tb_bd_top` runs at reduced size: codes of 32 and 64, L_MAX = 4, P = 8,
C1 = 12, C2 = 3, two decoders. It checks the following against the reference
model:

- the match count;
- the fine-pass list;
- every fine-pass stopping point;
- the result bits, index and metric;
- the exact cycle count.

It also counts the following mechanisms and fails if any never happens:
early stops, more than C2 matches, lists topped up with unmatched
candidates, detections and misses, and rounds with several candidates per
decoder.

To simulate with Verilator 5 (the packages first):

```
verilator --binary --timing -Wno-fatal rtl/bd_pkg.sv tb/bd_ref_pkg.sv rtl/bd_*.sv \
    tb/tb_bd_top.sv --top-module tb_bd_top
./obj_dir/Vtb_bd_top
```

The simulation is two-state. All state that is read is reset or written
before use. The full-size testbench runs in well under a minute.
