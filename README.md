# MTU — Multifunction Tree Unit

This is a synthesizable SystemVerilog model of the Multifunction Tree Unit (MTU).
The MTU is an accelerator for the balanced binary-tree kernels that dominate
zero-knowledge proof systems such as HyperPlonk. One datapath handles five
workloads:

| Mode (`cfg_mode`) | Tree | PE operation | Output |
|---|---|---|---|
| `M_BUILD_MLE` | forward (root to leaves) | `(a - a·r, a·r)` | all 2^mu values of eq(x, r), eight per cycle |
| `M_MLE_EVAL` | inverted (leaves to root) | `a + r·(b - a)` | f(r) for the table f |
| `M_MUL_TREE` | inverted | `a·b` | product of all leaves |
| `M_PROD_MLE` | inverted | `a·b` | every node of every level, plus the root |
| `M_MERKLE` | inverted | SHA3-256(a ‖ b) | Merkle root |

A tree has 2^mu leaves. Level 1 holds the leaves and level mu+1 holds the root.
The challenge for level k is `chal[k-1]`. Inverted trees use it to fold level k
into level k+1. Forward trees use it to expand level k+1 into level k.

## Architecture: hybrid traversal

Streaming a tree level by level (BFS) would need an on-chip buffer as large as
a whole level. Pure depth-first traversal (DFS) needs almost no storage, but it
reads and writes the leaves out of order. The MTU combines the two:

* **PE pipeline (`tree_pipeline`).** NUM_IN-1 PEs are arranged in log2(NUM_IN)
  columns of 4, 2 and 1 PEs (for the default NUM_IN = 8). They handle the
  three levels next to the leaves in level order.
  * Inverted trees: each cycle, eight consecutive leaves go in and one
    level-4 node comes out.
  * Forward trees: one level-4 node goes in and eight consecutive leaves come
    out.
  * The leaves therefore move as contiguous, in-order bursts, which suits
    off-chip memory.
* **DFS accumulator (`dfs_accumulator`).** One more PE, a small per-level node
  store (`acc_buffer`) and a scheduler handle levels 4 up to mu+1. The
  accumulator runs at exactly the pipeline's rate of one level-4 node per
  cycle. Levels above level 4 need only 1/2 + 1/4 + … < 1 PE operation per
  cycle between them, so a single PE is enough for all of them.
* **Controller (`mtu_ctrl`).** Holds the configuration registers and the
  challenge register file. It starts a run, counts leaf groups in forward mode
  and signals done or error.
* **PE (`mtu_pe`).** Pre-adder (b−a) → Montgomery multiplier → post-adder
  (a ± product), with a SHA3-256 block alongside the field path. The result
  stage is registered and is LAT cycles deep.

```
 in_data[0..7] ──► col 1: 4 PEs ──► col 2: 2 PEs ──► col 3: 1 PE ──► DFS accumulator ──► root
 leaf_data[0..7] ◄──────────────── (reversed for Build MLE) ◄─────── (1 PE + store)
 pe_out_* : every PE's results (Product MLE)
```

### DFS accumulator scheduling

**Inverted trees.**
* Level-4 nodes arrive one per cycle. Even-indexed nodes wait in a holding
  register.
* When the odd partner arrives, the pair is issued at once. This issue has top
  priority.
* In any other cycle, the scheduler issues the lowest level (the one nearest
  the leaves) that has two stored nodes.
* A result returns to the store one level up. It can be issued from the cycle
  after it leaves the PE.
* With a one-cycle PE, this gives the schedule L4₀L4₁ at cycle 1, L5₀L5₁ at
  cycle 6, L6₀L6₁ at cycle 12, L7₀L7₁ at cycle 24, and so on. That is the
  inverted-tree schedule of the original design, cycle for cycle.
* The store needs at most a few entries per level, so DEPTH = 4 is used.

**Forward trees (Build MLE).**
* The start pulse places the root value 1, in Montgomery form, at level mu+1.
* A fixed "ruler" pattern gives each cycle c to one level. Let d = mu − 4 and
  k = c mod 2^(d+1):
  * k = 0 → the root level;
  * otherwise → level 5 + ctz(k), as long as that is below the root;
  * otherwise the slot stays empty.
* This gives level 5 every other cycle, level 6 every fourth cycle, and so on.
  Each level is visited at exactly the rate at which the level below needs its
  children.
* In its slot, a level expands its oldest stored node if it has one.
* Expanding a level-5 node yields two level-4 children. The second child waits
  one cycle in a register, so the pipeline receives one level-4 node every
  cycle.
* For mu = 7 this reproduces the original design's Build MLE schedule table,
  including the deliberate gaps at cycles 2–3.
* The fixed pattern has a start-up cost. Level 5 + j first has data
  ~2^(j+1) cycles in, so the first output group appears after about
  2^(mu−4) cycles. After that, output is continuous at eight leaves per cycle.
  At mu = 20, a Build MLE run takes about 2^17 + 2^16 cycles.

### Arithmetic

* Words are 256 bits. Field elements are kept in Montgomery form with
  R = 2^256.
* The modulus is a run-time input, `cfg_field = {p, p_inv = −p⁻¹ mod 2^256,
  mont_one = R mod p}`. Any odd p < 2^255 works, for example the BLS12-381 or
  BN254 scalar fields.
* `mod_mul` is a word-level Montgomery reduction (REDC) with one final
  subtraction. `mod_add` adds or subtracts with one correction step.
* Both are written as combinational logic ahead of the PE's LAT-stage output
  register. A synthesis flow is expected to retime them into a deep pipeline.
  The original design uses HLS-generated, fully pipelined multipliers.
* SHA3-256 covers one 64-byte message of a then b, each little-endian, in a
  single Keccak-f[1600] block:
  * SHA3 padding: `0x06` after the message, with the top bit of byte 135 set.
  * The digest is returned as a little-endian 256-bit word.
  * The 24 rounds are unrolled in combinational logic.
* Merkle leaves enter as 256-bit digests (or raw 32-byte leaves) and are
  hashed in pairs.

## Interfaces and timing

| Signal group | Meaning |
|---|---|
| `cfg_we, cfg_mode, cfg_mu, cfg_field` | Configuration. Written only while idle. |
| `chal_we, chal_addr, chal_data` | Challenge register file; address k−1 is the challenge of level k. |
| `start, busy, done, error` | Start a run. `done` pulses after the last output. `error` is set by a start with mu outside 4..MAX_MU. |
| `in_valid, in_ready, in_data[8]` | Leaf stream for inverted trees: eight consecutive leaves per transfer. |
| `leaf_valid, leaf_data[8]` | Build MLE output: eight consecutive eq(x, r) values per cycle, in index order. |
| `root_valid, root_data` | Root of an inverted tree. |
| `pe_out_valid/a/b[8], acc_level, acc_index` | Product MLE: every PE's result. Entries 0..6 are the pipeline PEs; entry 7 is the accumulator PE, whose node level and index are given. |
| `out_ready` | Back-pressure. When low, the whole unit holds still for that cycle. |
| `buf_overflow` | Sticky flag. It cannot be set with the default parameters; it guards non-default ones. |

* Throughput is one group of eight leaves per cycle in both directions.
* Inverted trees also accept input bubbles (`in_valid` low) at any time.
* The root appears a few dozen cycles after the last leaf group: a 2^20-leaf
  run with LAT = 1 takes 131108 cycles for its 131072 input groups, counted
  from the start pulse.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_IN` | 8 | Leaves per cycle; the unit has NUM_IN PEs. |
| `MAX_MU` | 24 | Largest tree: 2^24 leaves. Sets the challenge file and the counter widths. |
| `DEPTH` | 4 | Node-store entries per accumulator level. |
| `LAT` | 1 | PE latency in cycles. |

## Workloads

The original evaluation uses tables of 2^20 entries for every workload. Build
MLE at 2^23 entries is given as an example of a large table. Leaves stream from
off-chip memory, so the only size limit on chip is mu ≤ MAX_MU = 24. All of
these sizes fit.

Tested at full size:
* MLE evaluation at 2^20 leaves.
* Build MLE, Product MLE and Merkle tree at 2^20 leaves.

## Differences from the original design and choices made here

* **PE count.** The architecture figure and text describe eight PEs. The area
  table lists 32 PEs. The default here is the eight-PE organisation. NUM_IN
  sets any power of two from 2 to 32 PEs (the range of the original
  scalability sweep); the accumulator then starts at level log2(NUM_IN)+1.
* **Scheduler priority.** The text says the scheduler prioritises "deeper
  levels", but the inverted-tree schedule table always serves the level nearest
  the leaves first. The scheduler follows the table.
* **Build MLE root.** Build MLE starts by expanding the value 1 at the root.
  That costs one extra multiplication instead of special-casing the first
  level.
* **Store depth.** The size of the accumulator's SRAM is not given. DEPTH = 4
  entries per level is this design's choice and is checked by assertions.
* **Memory.** Off-chip memory (HBM/DDR) and its controller are not modelled.
  The unit exposes streaming ports instead.
* **Arithmetic detail.** The multiplier's internal pipeline and the SHA3 core's
  byte order are not given. The choices above are this design's.

## Simulation

Each block has a self-checking testbench in `tb/`. The shared reference models
are in `tb/tb_ref_pkg.sv`: a bit-serial Montgomery product and an independent
Keccak built from its LFSR and rotation recurrences. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
  rtl/mtu_pkg.sv tb/tb_ref_pkg.sv rtl/mtu.sv tb/tb_mtu.sv --top-module tb_mtu
./obj_dir/Vtb_mtu
```

Each testbench prints `TB_RESULT checks=N failures=M` at the end.

* `tb_mtu` runs every mode with random stalls and bubbles. It counts each
  mechanism (stalls, bubbles, deep accumulator levels, holding-register pairs,
  error starts) and fails if any of them never happened.
* `tb_mtu_full` runs MLE evaluation at 2^20 leaves on the default unit.
* `tb_mtu_workloads` runs Build MLE, Product MLE and Merkle tree at 2^20
  (about three and a half minutes).
* `tb_mtu_pe_sweep` builds the unit with 2, 4, 16 and 32 PEs and runs four
  workloads on each.
