# HYPRE: a branch predictor built from hyperdimensional vectors

HYPRE predicts conditional branches without a table of per-pattern counters.
It turns each recent sequence of branches into one very long random-looking
binary vector, a *hypervector* of 4096 bits. It keeps one *Taken* and one
*Not-Taken* vector per history length. Each of these is the element-wise sum of
all the sequences that ended in that outcome.

The idea works because two unrelated 4096-bit vectors agree in almost exactly
half of their elements, 2048 ± 32. A vector that agrees with a query in clearly
more than half of its elements therefore "contains" that query. A sum of
vectors still agrees with each of its terms well above chance, so one stored
vector can hold many patterns at once, and one comparison can check all of
them.

This repository holds synthesizable SystemVerilog for the predictor in its
over-provisioned research configuration:

- eight path-history lengths (8 to 4094 branches);
- Taken and Not-Taken vectors of 4096 elements with 4-bit counters;
- a hyperdimensional "bimodal" fallback predictor.

Every testbench is self-checking.

## 1. Three operations on hypervectors

All hypervectors here are binary, with one bit per element.

| operation | on bits | used for |
|---|---|---|
| bind | element-wise XOR | combining the branches of a sequence into one vector |
| permute | circular shift by *k* | marking a branch's position (its age) in the sequence |
| bundle | element-wise majority (sum, then sign) | storing many sequences in one vector |

Similarity is the number of elements in which two vectors agree. A
hypervector for a branch comes from hashing its PC (`hv_encoder`). The same PC
always gives the same vector, and different PCs give unrelated ones. No table
of per-branch vectors is kept.

## 2. From a branch sequence to a query (`query_gen`, `hd_table`)

For a window of the last *L* branches, with the newest at age 0, the query is

    Q = XOR over ages a = 0 .. L-1 of  rot( HV(PC at age a), a )

where `rot(v, k)` moves element *i* to *(i + k) mod 4096*. Building this from
scratch would cost *L* hashes and rotations per branch, up to 4094 of them. The
predictor never does that. When a new branch arrives it updates the query in
three steps:

1. **Remove the oldest branch.** XOR in `rot(HV(PC_old), L-1)`. This term is
   already present in Q, so XORing it again cancels it. The step is skipped
   while the window is still filling.
2. **Age the rest.** Rotate by one, so every remaining branch moves to the next
   position.
3. **Add the new branch.** XOR in `HV(PC_new)` at rotation 0.

Steps 1 and 2 depend only on branches that are already known. Each table
therefore does them at the end of the previous branch, when it resolves, and
stores the result, the *partial query*, in its 4096-bit query register. When
the next PC arrives, only one XOR with that PC's hypervector remains before the
comparison. Between a request and its resolution the same register holds the
full query, which training needs.

The PC that leaves a window is read from the **path history** (`path_history`).
This is a circular buffer of the last 4094 branch PCs, 40 bits each, with one
read port per table at age *L-1*. A saturating fill count tells each table when
its window is full, so the predictor starts cleanly from reset.

Worked example, *L* = 3, after branches A, B, C:
`Q = rot(A,2) ^ rot(B,1) ^ C`. Branch D then arrives:
`rot(Q ^ rot(A,2), 1) ^ D = rot(B,2) ^ rot(C,1) ^ D`.

## 3. Storing outcomes and matching (`sdm_vector`, `hv_comparator`)

A stored vector is 4096 signed saturating counters of 4 bits, with values from
-8 to +7. The comparators see only the counters' signs: element *i* reads as 1
while counter *i* is non-negative. This is the majority vote over everything
added to the vector. The extra counter bits give each element some memory, so
a single later update does not flip the element.

The comparator XNORs the query with the sign bits and counts the agreeing
elements (`sim`). It reports two things:

- **match** when `sim >= N/2 + 2·sqrt(N)`: 2176 of 4096, four standard
  deviations above chance;
- **confident** when `sim >= N/2 + 4·sqrt(N)`: 2304 of 4096.

A match that is not confident is *marginal*.

Each table compares its query with both its Taken and its Not-Taken vector. The
table **hits** if either vector matches. If both match, the more similar vector
gives the direction, and a tie goes to Taken.

**Training** happens when the branch resolves. It uses the query and the match
flags that were recorded at prediction time. For each table:

- the vector of the actual outcome has the query **added** (each counter steps
  towards the query bit), unless it already matched confidently. Patterns that
  are already correct and certain are not reinforced;
- the vector of the opposite outcome has the query **partially subtracted** if
  it matched, because it would have mispredicted.

Two randomisations stop a single event from dominating. Both use masks from
`hv_random`, a 64-bit xorshift generator expanded through the hash:

- on an addition, about 1/16 of the elements step towards a random value
  instead of the query;
- a subtraction touches only a random half of the elements. A wrong pattern is
  weakened, but a common pattern that happens to share it is not wiped out.

## 4. The whole predictor (`hypre_top`)

```
 req_pc ──► hv_encoder ──► HV(pc) ──┬──► hd_table L=8    ──hit/dir──┐
   │                                ├──► hd_table L=32   ──hit/dir──┤
   │                                │        ...                    ├─► longest_match_select ─► pred_taken
   │                                └──► hd_table L=4094 ──hit/dir──┤        (longest hit wins,
   │     path_history ──PC at age L-1──► (each table)               │         else base)
   ├──► path_history (push)                                         │
   └──► hd_base_predictor ──────────────────────────────base_dir────┘
```

The matching table with the **longest history** provides the prediction. If
no table matches, the **HD base predictor** (`hd_base_predictor`) provides it:

1. A 2048-entry table holds the last 4 outcomes of each branch. It is indexed
   by `pc[12:2]`.
2. Those history bits are concatenated with the PC and hashed into a
   1024-element query.
3. The query is compared with one stored Taken vector, which has 2-bit
   counters.
4. The prediction is Taken if the query matches that vector.

Every combination of local pattern and branch gets its own random query, so
the base predictor can learn, for example, a branch that alternates. A plain
2-bit counter cannot. The base predictor trains when it mispredicts or when
its similarity lies within 64 of the threshold:

- for a taken outcome it adds the query;
- for a not-taken outcome it adds the inverted query.

### Interface and timing

| signal | dir | width | meaning |
|---|---|---|---|
| `req_valid`, `req_ready`, `req_pc` | in, out, in | 1, 1, 40 | branch to predict. Accepted when both valid and ready are 1. |
| `pred_valid`, `pred_taken`, `pred_provider` | out | 1, 1, 4 | Prediction, one cycle after acceptance. `pred_provider` is 0 for the base predictor and *i*+1 for table *i*. |
| `upd_valid`, `upd_taken` | in | 1, 1 | Outcome of the branch in flight. |

- **Cycle t:** the request is accepted. The hash, the single XOR, the
  comparisons and the selection are combinational, and the result is
  registered.
- **Cycle t+1:** `pred_valid` is 1 for one cycle, and `req_ready` is 0.
- **Update:** `upd_valid` may come in cycle t+1 or later. At that edge all
  vectors train, the local history shifts, and each table prepares its next
  partial query. `req_ready` is 1 again in the following cycle.

Only one branch can be in flight. The fastest rate is one branch every two
cycles, with the update given in the cycle `pred_valid` is high. An assertion
flags an update that arrives with no branch in flight.

## 5. Configuration and storage

Defaults, all in `hypre_pkg`; `hypre_top` takes them as parameters:

| parameter | default | meaning |
|---|---|---|
| `HV_W` | 4096 | elements per table vector and query |
| `CNT_W` | 4 | counter bits per element (saturation) |
| `HIST_LEN` | 8, 32, 128, 256, 512, 1024, 2048, 4094 | window lengths of the eight tables |
| `PC_W` / `PH_DEPTH` | 40 / 4094 | path-history entry width and depth |
| `BASE_HV_W` / `BASE_CNT_W` | 1024 / 2 | base predictor vector length and counter bits |
| `LHIST_W` / `LHT_ENTRIES` | 4 / 2048 | local history bits and entries |

The 4094-branch maximum keeps every rotation below the vector length.

Storage at the defaults:

| item | bits |
|---|---|
| vectors: 8 × 2 × 4096 × 4 | 262 144 |
| query registers: 8 × 4096 | 32 768 |
| path history: 4094 × 40 | 163 760 |
| base predictor | 10 240 |
| **total** | **468 912 (58.6 kB)** |

`HV_W` and `BASE_HV_W` must be multiples of 64. `PH_DEPTH` must exceed the
longest `HIST_LEN` minus one.

The thresholds follow the vector length automatically (`match_thr` and
`conf_thr` in `hypre_pkg`). The testbenches use this to run the design at
reduced size.

## 6. Where this RTL fills gaps or departs from the published description

The predictor was described at the level of its algorithm and block diagram.
This design decides the following points itself:

- **Comparator.** The description proposes an analog in-memory comparator.
  Matching elements pass current onto a sense line, and the current is
  compared with a threshold. Here the same function is a digital XNOR and
  pop count, done in one cycle. This is functionally identical, but it is not
  the proposed circuit, and its timing at 4096 bits is not representative.
- **Thresholds.** The description gives no numeric match or marginal
  thresholds. The values N/2 + 2√N and N/2 + 4√N are this design's choices.
- **Rolling query.** The description's update equation, read literally,
  rotates the oldest vector by *L-1* after the whole query has already been
  rotated, which would not cancel it. This design removes the oldest vector
  first and rotates afterwards, which is what the accompanying text describes.
- **Hash.** The description calls only for a hash from PC to hypervector. The
  add-rotate-xor mixer is this design's own.
- **Training rule details.** Which vectors train, the fraction of randomised
  elements (1/16), the fraction erased (1/2) and the tie rule (Taken) are
  this design's choices.
- **Base predictor.** The 2-bit counters are an inference from the stated
  10 240-bit budget. The index bits, the training rule, and the absence of
  randomisation are this design's choices.
- **Handshake.** The single branch in flight and the one-cycle latency are
  this design's choices.
- **Not built.** The "realistic" 14.6 kB variant is only sketched in the
  description, so it is not built. That variant uses 1024-bit vectors for short
  histories, Taken vectors only, and a 1-bit outcome global history. Variants
  with outcome-bit global history or extra features are also not built.

## 7. Files

| file | contents |
|---|---|
| `rtl/hypre_pkg.sv` | sizes, thresholds, hash mixer, training-op enum |
| `rtl/hv_encoder.sv` | key → hypervector hash |
| `rtl/hv_comparator.sv` | similarity count, match / confident |
| `rtl/sdm_vector.sv` | one stored vector: counters, add / partial subtract |
| `rtl/path_history.sv` | 4094 × 40-bit PC buffer with per-table taps |
| `rtl/query_gen.sv` | remove-oldest and rotate: the partial query |
| `rtl/hd_table.sv` | one history length: query register, T/NT vectors, training |
| `rtl/local_history_table.sv` | 2048 × 4-bit local histories |
| `rtl/hd_base_predictor.sv` | HD fallback predictor |
| `rtl/longest_match_select.sv` | longest matching table, else base |
| `rtl/hv_random.sv` | randomisation masks |
| `rtl/hypre_top.sv` | the predictor |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_hypre_top.sv`, `tb/tb_hypre_full.sv`, `tb/tb_hypre_body.svh` | end-to-end tests, at reduced and at full size |

## 8. Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. The
module testbenches compare against models written independently in the
testbench:

- the hash against a re-implementation of the mixer;
- the rolling query against the query computed from scratch over the window;
- `hd_table` and `hd_base_predictor` against full counter-level models of
  their vectors and training rules.

The end-to-end tests run a synthetic program with five kinds of branch, one
loop iteration per step:

- an alternating branch;
- a pair of path-dependent branches, T or NT;
- a branch repeating the first one's outcome, reachable only through the path;
- a random branch;
- a loop branch that exits every 10th iteration.

They check:

- the latency and the handshake on every branch;
- accuracy on the deterministic branches after warm-up;
- that each mechanism occurred: base and table providers, additions and
  partial subtractions on both vector kinds, base training, both vectors
  matching, windows filling (the longest included), and back-pressure.

`tb_hypre_full` runs the default configuration for 6000 branches, which fills
even the 4094-branch window. It reaches about 96 % on the deterministic
branches and takes a few seconds of simulation. What was measured: the
predictor learns this program. Its accuracy on real traces was not measured.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hypre_pkg.sv tb/tb_hypre_full.sv \
          --top-module tb_hypre_full -o sim && obj_dir/sim
```

Replace `tb_hypre_full` with any other `tb_*` module. Module testbenches need
only their own module and the modules it instantiates, which Verilator finds
through `-Irtl`.
