# Multi-path fetch with a variable fetch rate

A wide out-of-order machine loses much of its fetch bandwidth to conditional
branches that the predictor gets wrong. This front end follows *both*
directions of an unresolved branch as separate thread paths that share the
core, as in a simultaneous multithreading (SMT) machine. It then divides the
fetch width among the live paths according to how likely each path is to be
the right one. A path's likelihood is its *path confidence*: the product, over
the unresolved branches on the path, of the probability that each branch goes
the way the path assumes. Per-branch probabilities come from a table of 4-bit
confidence counters.

Two allocation policies are built, and an input selects between them:

* **Selective disjoint-eager execution (selective DEE).** A fixed number of
  instructions (TW = 8) goes to each of the FW/TW most confident paths. A
  32-wide fetch thus feeds 4 paths with 8 instructions each.
* **Dynamic disjoint-eager execution (dynamic DEE, the variable fetch rate).**
  Each path's share of the fetch width is proportional to its confidence. Two
  paths with confidences 0.8 and 0.2 get 26 and 6 of 32 instructions.

Once the number of unresolved branch levels reaches its limit, a path that
meets another branch cannot fork. It follows a gshare predictor instead.

The RTL covers the fetch side of this scheme and the rename-pointer lookup
that multi-path execution needs. The instruction cache, the BTB and
pre-decode, and the out-of-order back end are outside it; they connect
through ports of the top module `mp_frontend`.

## Thread IDs and levels

Every path has an ID of `ID_W` bits and a *level*, the number of unresolved
branches it has forked at. At reset there is one master path, ID 0 at
level 0. When a path with ID `i` at level `k` forks:

* the not-taken path keeps ID `i` and moves to level `k+1`;
* the taken path gets ID `i | (1 << k)` at level `k+1`.

Bit `k` of an ID is therefore the outcome assumed for the path's branch at
level `k`. The ID is a branch history of the path. Two paths share their
history up to level `k` when their low `k` bits agree. For example:

```
level 0      00 (master)
               | fork at level 0
level 1      00 ------------- 01
               | fork at level 1
level 2      00 ---- 10       01
```

When the branch forked at level `k` by path `i` executes, the wrong side of
that fork is removed in one cycle. Every live path that agrees with `i` in
bits `k-1..0`, sits above level `k` and has bit `k` different from the
outcome is killed. Paths outside that subtree are untouched.

At most `MAX_LEVEL` (= `ID_W`) levels can be unresolved. A path at
`MAX_LEVEL` that meets a branch follows the gshare direction. If that guess
turns out wrong, the back end redirects the path (`br_*` with
`br_forked = 0`).

Levels are not recycled while paths are live. When resolutions leave a
single path and the back end raises `rebase_allow`, that path becomes the new
master: ID 0, level 0, full confidence (`rebase_fire`). The back end must not
raise `rebase_allow` while instructions of the old ID are still in flight
under their old tag. The renames of the survivor must also have been made
visible at level 0 (see below).

## Path confidence

```
 fork: branch PC ──┐
                   ├─ XOR, fold ─> path_conf_table (8132 x 4-bit) ──┐
 branch history ───┘                                                │ counter c
 parent confidence P ───────────────────────────────────> cum_prob ─┴─> P*p, P*(1-p)
```

* **Confidence counters** (`path_conf_table`, `conf_update`). When a branch
  executes, its counter is updated by comparing the outcome with the gshare
  direction given at fetch. Values 0–7 are low confidence and 8–15 high.
  * Correct prediction: a low counter jumps to 8; a high one counts up,
    saturating at 15.
  * Wrong prediction: a low counter counts up; a high one drops to 7.

  The rule is implemented literally. A low counter can therefore reach 8 after
  a wrong prediction.
* **Index** (`conf_hash`). The branch address is XORed with the 16 history
  bits and folded to 13 bits. Indices 8132–8191 wrap back by subtracting
  8132.
* **Children** (`cum_prob`). Counter `c` becomes the probability that the
  predicted direction is right: `p = (16 + c) / 32`, from 0.5 to 31/32. The
  predicted child gets `P·p` and the other child `P·(1-p)`, with `P` a 16-bit
  fraction (`0xFFFF` ≈ 1). Reset counters (8) give a 0.75 / 0.25 split.
  Confidences only shrink as paths fork. Dynamic allocation uses them relative
  to one another, so their absolute size does not matter until they underflow
  to 0. If every ranked path reaches 0, the width is split evenly.

## Fetch allocation and the fetch group

`eager_scheduler` is combinational. It looks at all `2^ID_W` entries of the
thread management table every cycle:

1. **Rank.** There are `PORTS` (= 4) rounds, one per instruction-cache port.
   Each round takes the most confident live path not yet chosen; on a tie the
   lower ID wins.
2. **Allocate.**
   * Selective policy: `TW` instructions to each of the first `FW/TW` ranked
     paths.
   * Dynamic policy: `round(FW · c_i / Σc)` to each ranked path. Rounding can
     leave the total one or two off `FW`; the difference goes to the most
     confident path, so the group is always exactly `FW` instructions.

   A path with a share of 0 does not fetch.

Each chosen path drives one cache port with its next PC (`ic_pc[p]`). The
cache returns `FW` consecutive instructions from that PC in the same cycle
(`ic_line[p]`). `collapsing_buffer` takes the first `count[p]` instructions of
each port, port 0 first, and packs them into one `FW`-slot group. It tags
every slot with its PC and thread ID and registers the group. In the same
clock edge, `thread_mgmt_table` advances the next PC of every fetching path by
its count.

Timing of one fetch:

| cycle | what happens |
|---|---|
| t | scheduler ranks and allocates; `ic_pc` valid; `ic_line` must return in t |
| edge t→t+1 | next PCs advance; forks, kills and rebase written; group registered |
| t+1 | group on `dec_valid/dec_insn/dec_pc/dec_tid` |

A branch reported on `fk_*` in cycle t forks at the same edge. Its children
take part in the allocation of cycle t+1, so their instructions appear on
`dec_*` in cycle t+2. `fork_forked`, `fork_predicted`, `fork_pred` and
`fork_level` are valid in cycle t. The back end must carry `fork_pred` and
`fork_level` with the branch and return them on `br_pred` / `br_level`. The
fetch unit does not stop a path at the branch it has reported. The reporter
sets `fk_nt_pc`, the PC the not-taken path resumes at.

## Finding a rename pointer across paths

This is the least obvious part of the design. A register written on one path
must be seen by every path forked from that path *later*, but not by its
sibling paths. Mappings are kept per *(path ID, level, architectural
register)*. Level-0 mappings (the master path, ahead of every unresolved
branch) go to the architectural register pointer file.

A read of register `r` by path `ID` at level `L` walks up the ancestry, one
step per clock (`rename_ptr_logic`):

```
loop (at most MAX_LEVEL times):
    if mapping (ID, L, r) exists:  answer it, stop
    mask = 1 << (L-1);  sib = ID ^ mask
    L = L - 1;  if L == 0: L = MAX_LEVEL          // wrap-around
    if ParentID[ID] == sib and ParentLevel[ID] == L:  ID = sib
answer architectural pointer file[r]
```

`ParentID`/`ParentLevel` of a taken child are the ID and level of the path
that forked it. They are written when the thread table forks.

Worked example (`ID_W = 2`):

1. The master writes R12 → 54 at level 0.
2. Path 00 forks at level 0, creating path 01.
3. Path 00 writes R12 → 36 at level 1.
4. Path 00 forks at level 1, creating path 10 (ParentID 00, ParentLevel 1).
5. Path 00 writes R12 → 72 at level 2.

Reads of R12 then resolve as follows:

* **Path 10 at level 2.** It misses at (10,2), finds its parent 00 at
  level 1 and hits (00,1): pointer 36 in 2 steps.
* **Path 01 at level 1.** It never meets an ancestor mapping. After
  `MAX_LEVEL` steps it reads the architectural file: pointer 54.
* **Path 00 at level 2.** It hits its own (00,2) at once: pointer 72.

Kills and rebase clear mappings as follows:

* When the branch of level `k` resolves, killed paths lose their mappings
  above level `k` only. Mappings at or below `k` belong to ancestors that
  surviving paths still read.
* A rebase clears all per-path mappings. Before raising `rebase_allow`, the
  rename stage must rewrite the survivor's live mappings at level 0, or wait
  until they no longer matter.

Interface: `lk_valid`/`lk_ready` accept a lookup when the walker is idle.
`lk_res_valid` pulses with `lk_res_ptr`, `lk_res_arch` (answer from the
architectural file) and `lk_res_steps` (steps taken). The latency is 1 to
`MAX_LEVEL` cycles after acceptance. Writes on `rn_*` take effect at the
clock edge.

## Modules

| module | role |
|---|---|
| `mp_pkg` | fetch policy enum, instruction size |
| `mp_frontend` | top: wires everything below |
| `thread_mgmt_table` | per-ID next PC, forked branch address, level, confidence, parent; fork, kill, redirect, rebase |
| `eager_scheduler` | ranking and selective / dynamic allocation |
| `collapsing_buffer` | packs port runs into the fetch group |
| `path_conf_table` | 8132 four-bit counters, one read and one update port |
| `conf_update` | counter update rule |
| `conf_hash` | branch address XOR history → table index |
| `cum_prob` | child confidences (two multipliers) |
| `branch_history` | 16-bit history of resolved outcomes |
| `gshare` | 16384 two-bit counters, used at the maximum level and as the rated prediction |
| `rename_ptr_logic` | ancestry walk for rename pointers |

## Sizes

| parameter | default | meaning |
|---|---|---|
| `ID_W` = `MAX_LEVEL` | 20 | thread ID bits = branch levels; table has 2^20 entries |
| `FW` | 32 | fetch width, instructions per cycle |
| `TW` | 8 | per-path width of the selective policy |
| `PORTS` | 4 | paths fetching per cycle (cache ports) |
| `PCT_ENTRIES`, `CW` | 8132, 4 | confidence table |
| `GS_ENTRIES`, `HIST_W` | 16384, 16 | gshare and history |
| `CONF_W` | 16 | path confidence fraction |
| `AREGS`, `PTR_W` | 32, 12 | architectural registers; rename pointer width (4096-entry window) |

The evaluated machine allows 25 levels (2^25 paths). The default here is 20.
With 21 or more levels the rename pointer array passes 2^31 bytes, which the
slang front end refuses. From 24 levels upward, slang also refuses the
2^24-bit live mask and Verilator the rename storage array. Runs with 16 and 8 levels fit within the
default. The table of 8132 confidence entries keeps that count, although it
may be a misprint for 8192.

The scheduler compares every table entry every cycle, and the rename pointer
storage grows as `2^ID_W · ID_W · 32` entries. At the default size this is a
model of the algorithm, not a floorplan: a real implementation would keep far
fewer live paths than IDs.

## Where this design fills gaps

These choices are this design's own; the scheme itself does not fix them:

* gshare index and counter encoding
* how the confidence index is folded
* the counter-to-probability map `p = (16+c)/32`
* 16-bit confidences
* the limit of 4 fetching paths per cycle
* tie and rounding rules
* port-order packing and the one-cycle output register
* one fork and one resolution per cycle
* updating history at execution
* the rebase in place of circular level numbering
* clearing mappings on kill and rebase
* reset values: counters 8, gshare 1, identity architectural map

At branch execution, the confidence and gshare indices are recomputed with
the history current at that time, not the history seen at the fork.
Dynamic allocation shares the width among the four best paths, not all live
paths.
The original block diagram also feeds the thread level into the probability
unit. Here the parent's confidence already holds the product over its
levels, so `cum_prob` does not take the level.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each ends
with a `TB_RESULT checks=N failures=M` line. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_mp_frontend rtl/mp_pkg.sv tb/tb_mp_frontend.sv
./obj_dir/Vtb_mp_frontend
```

The block testbenches use small sizes (for example 3-bit IDs for the thread
table, 2-bit IDs for the rename walk). They check against values computed
independently, including the two worked examples above (26/6 and R36/R54/R72).

`tb_mp_frontend` runs the whole front end with 2^16 IDs and 16 levels and the
default widths. It drives the following sequence:

* a lone master;
* forks down to the maximum level;
* the prediction fallback and a redirect;
* kills;
* both policies;
* the rename example through real forks;
* a rebase.

Every cycle it checks the fetch group against a perfect-memory model:

* each slot holds the word at its PC;
* a path's slots have consecutive PCs;
* only live paths fetch;
* the group size is FW (dynamic) or 8 per path (selective).

It also counts each mechanism.

At the default 20 levels the design compiles with Verilator and slang, but
the Verilator simulation model crashes while running (a segmentation fault,
already at 18 levels). 16 levels is the largest size simulated.
