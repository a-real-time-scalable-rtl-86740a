# Collision Clustering decoder: SystemVerilog RTL

A surface-code quantum memory measures its parity checks over and over. When
a check changes value from one round to the next, that change is a *defect*.
A decoder looks at all the defects of an experiment and decides one thing:
whether the final logical measurement was flipped by the errors that caused
them. This RTL decodes a distance-`d` rotated planar surface code measured
for `d` rounds under circuit-level noise. It outputs one bit, the logical
correction.

It uses *Collision Clustering* (CC), a hardware-friendly form of the
Union-Find decoder:

- Every defect starts as a cluster of its own.
- Clusters that still need to grow all grow by one edge at a time.
- Two clusters that overlap are merged into one.
- A cluster stops growing when it holds an even number of defects, or when it
  touches an open boundary of the code.
- When nothing grows any more, the correction is the parity of the odd
  clusters that touch the *logical* boundary.

The design never stores the decoding graph. A cluster is represented only by
its defects and one growth radius per defect. The cluster is the union of
balls of those radii around its defects. Two balls overlap when the sum of
their radii exceeds the graph distance between their centres. That distance
has a closed form in the vertex coordinates, so no graph search is needed.
This is why the memory grows with the number of defects, not with the size
of the graph.

The default parameters give the `d = 23` configuration: 1057 physical qubits,
23 rounds and 6072 possible defect locations.

## 1. The decoding graph and its coordinates (`cc_pkg`, `cc_distance`)

### Vertex numbering

Each round contributes `(d²−1)/2` vertices, one per check of one type. A
vertex has coordinates `(x1, x2, t)`, where:

- `x1` runs over `1 … d−1`, along the axis that joins the two open
  boundaries.
- `x2` runs over `0 … (d−1)/2`.
- `t` is the round.

A vertex id is

    vid = t·(d²−1)/2 + x2·(d−1) + (x1−1)

The syndrome register holds one bit per vid.

### Boundary distances

With this numbering, `x1` is the number of edges from a vertex to the
logical boundary. `d − x1` is the number of edges to the opposite open
boundary.

### Pair distance

Circuit-level noise adds diagonal "hook" edges to the usual space-like and
time-like edges:

- `(−1,0,+1)`
- `(0,−1,+1)`
- `(−1,−1,+1)`

On that lattice the shortest path between two vertices is

    D(a, b) = ½ (|Δx1| + |Δx2| + |Δx1 + Δt| + |Δx2 + Δt|)

`cc_distance` computes this combinationally from two vids. It also returns
both boundary distances of the first vid. The testbench checks the formula
against a breadth-first search of the real lattice, for every pair of
vertices at `d = 5`.

The distance formula and the axes follow the published decoder. The
vertex-numbering order within a round is this design's own choice. Any
numbering works if the software that fills the syndrome register uses the
same one.

## 2. State held by the decoder

`s` is the number of defects in the syndrome. `MAX_DEFECTS` bounds it and
defaults to 6072, the number of vertices.

| Structure | Module | Per-defect contents | Access |
|---|---|---|---|
| Cluster Growth Stack (CGS) | `cc_cgs` | `{vid, radius, valid}` | push, one read and one write port |
| Parent table | `cc_parent_table` | index of the parent defect (union-find forest) | one read and one write port |
| Cluster registers | `cc_cluster_regs` | `parity`, `boundary`, `logical` bits | flat bit vectors |
| Merge stack | `cc_merge_stack` | requests `{kind, a, b}` | LIFO |

Notes:

- **Defect numbering.** Defect *k* is the *k*-th set bit of the syndrome.
  That index is its CGS slot and its Parent-table slot.
- **Root bits.** The cluster-register bits are meaningful only at a root of
  the forest:
  - `parity`: the cluster holds an odd number of defects.
  - `boundary`: the cluster has touched either open boundary.
  - `logical`: the cluster has touched the logical boundary.
- **Merge stack entries.** Each entry is one of:
  - `PAIR(a,b)`: defects *a* and *b* collided.
  - `BOUNDARY(a)`: defect *a* reached the non-logical boundary.
  - `LOGICAL(a)`: defect *a* reached the logical boundary.
- **Memories.** The three stacks and tables are plain arrays with a
  combinational read. On silicon they would map onto SRAM macros. If a
  macro has a registered read, the FSMs need one more state per read.

## 3. The decode loop

`cc_control` runs the phases below. The phase also selects which unit drives
each shared memory port.

```
INIT ──► GROW ──any cluster grew?──yes──► MERGE (Match ‖ Union) ──► GROW ...
                     │
                     no
                     ▼
                   DONE  (correction published)
```

### INIT (`cc_init`)

1. Empties the CGS and clears the cluster registers.
2. Scans the syndrome `SCAN_W` bits per cycle, 64 by default.
3. For each defect *k*, in a single cycle, it:
   - pushes `{vid, 0, 1}`;
   - writes `parent[k] = k`;
   - sets `parity[k]`.

Defects beyond `MAX_DEFECTS` are dropped, and `overflow` is raised. With the
default `MAX_DEFECTS = N` this cannot happen.

### GROW (`cc_grow`)

For each CGS entry *i* in order, Grow:

1. Follows the Parent table to the root, one hop per cycle.
2. Sets `valid = parity[root] & ~boundary[root]`.
3. Increments the radius if `valid`.
4. Writes the entry back.
5. Pushes `LOGICAL(i)` or `BOUNDARY(i)` onto the Merge stack if the new
   radius has just passed `x1` or `d − x1`.

Each root also folds `parity & logical` into a running correction bit.

If no entry was valid, the clusters are final. That correction bit is then
the answer, and control goes to DONE. Otherwise control goes to MERGE.

### MERGE: Match (`cc_match`) and Union (`cc_union`) in parallel

**Match** compares every pair `i < j` of CGS entries, one pair per cycle. It
pushes `PAIR(i,j)` when

    r_i + r_j > D(v_i, v_j)                       (they overlap now)
    (r_i − valid_i) + (r_j − valid_j) ≤ D(v_i, v_j)   (they did not before this growth step)

The second condition makes each colliding pair enter the stack exactly once.
Without it, every overlapping pair would be pushed again in every later
iteration. The stack would grow with the total number of overlaps instead of
the number of new ones.

**Union** pops requests as long as the stack is not empty. For each request:

- It finds the root of `a`.
- For a boundary request, it sets `boundary`, and also `logical` if the
  request was `LOGICAL`, at that root.
- For a pair, it also finds the root of `b`. If the two roots differ, it
  links them: `parent[rb] = ra`, `parity[ra] ^= parity[rb]`,
  `parity[rb] = 0`, and it ORs the `boundary` and `logical` bits into `ra`.

**Sharing and ending the phase:**

- Match only reads the CGS. Union only touches the Parent table and the
  registers. The two can therefore share the phase without arbitration. The
  Merge stack is the only meeting point: Match pushes and Union pops in the
  same cycle, and the stack handles that case.
- MERGE ends once all three conditions hold:
  - Match has finished its pass;
  - the stack is empty;
  - Union is idle.

### Why the stack order does not matter

Union-find merges commute. The stack is used as a LIFO because that is the
cheapest buffer. The final clusters do not depend on the order in which
requests are served.

### Worked example

This is one of the end-to-end testbench's directed cases.

- **Code:** `d = 7`.
- **Defects, at `(x1,x2,t)`:**

  | Defect | Coordinates |
  |---|---|
  | 0 | (3,0,0) |
  | 1 | (4,0,0) |
  | 2 | (1,3,0) |
  | 3 | (6,3,0) |

- **Pass 1:**
  - Every radius becomes 1.
  - Defects 0 and 1 (distance 1) collide.
  - Union links 1 under 0, and the merged cluster is even.
- **Pass 2:**
  - Only defects 2 and 3 grow, to radius 2.
  - Defect 2 passes its logical-boundary distance of 1.
  - Defect 3 passes its other-boundary distance of 1.
- **Pass 3:** nothing is valid, so the decode ends.
- **Result:** the correction is 1. The odd cluster {2} touches the logical
  boundary.

## 4. Register interface (`cc_sysreg`)

The bus is simple and always ready: `bus_valid`, `bus_write`, a 16-bit byte
address and 32-bit data. Read data appears on `bus_rdata` in the cycle after
the request.

| Address | Name | Access | Contents |
|---|---|---|---|
| `0x000` | CTRL | W | bit 0 = 1 starts a decode (ignored while busy) |
| `0x004` | STATUS | R | bit 0 busy, bit 1 done, bit 2 overflow, bit 3 correction, bits 31:16 defect count |
| `0x008` | PASSES | R | number of Grow passes in the last decode |
| `0x100 + 4k` | SYNDROME[k] | R/W | syndrome bits `32k … 32k+31` (bit *i* of the syndrome is bit `i%32` of word `i/32`); writes ignored while busy |

`irq_done` on the top follows STATUS.done.

To decode:

1. Write the syndrome words.
2. Write 1 to CTRL.
3. Poll STATUS or wait for `irq_done`.

`done` stays high until the next start.

## 5. Timing

All blocks use one clock `clk` and a synchronous, active-low reset `rst_n`.
The memories are not reset. Init writes every location before it is read.

Cycle costs, for `s` defects:

| Step | Cycles |
|---|---|
| Init | `⌈N/SCAN_W⌉ + s + 1` |
| One Grow pass | `4s` + parent hops + boundary pushes beyond the first per entry |
| One Match pass | `s(s−1)/2 + (s−1)`, plus one cycle per stall on a full stack |
| One Union request | `1 + (hops to ra + 1) + (hops to rb + 1)`, hidden under Match |

At `d = 23` and a 1.35 % defect rate (about 82 defects, the rate that the
published circuit-level noise model gives at `p = 0.1 %`), a decode takes
about **21,000 cycles** in simulation. The published ASIC reaches 0.24 µs per
round at 2 GHz, which is about **11,000 cycles** for 23 rounds. The gap
comes from two sources:

- The FSMs here spend one cycle per memory access and do not overlap passes.
- Match compares a single pair per cycle.

The same comparison at the smaller distances of the published FPGA table
uses the same 1.35 % defect rate at every size. The paper gives that rate
only for `d = 23`. Published cycles are execution time per round × `d` ×
Fmax.

| d | 3 | 5 | 7 | 9 | 11 | 13 | 15 | 17 | 19 | 21 | 23 |
|---|---|---|---|---|---|---|---|---|---|---|---|
| this RTL (mean cycles) | 9 | 24 | 75 | 202 | 422 | 932 | 1807 | 3081 | 6151 | 11787 | ~21000 |
| published | 94 | 133 | 170 | 257 | 498 | 854 | 1511 | 2566 | 4200 | 6889 | 10883 (FPGA), 11040 (ASIC) |

Up to `d ≈ 15` the two agree, or this RTL is faster; the published figures
presumably include fixed overheads. Beyond that, the quadratic Match pass
dominates, and this RTL falls behind by up to 2×.

The published design does better in ways it does not describe. Comparing
several pairs per cycle, or overlapping the next pass's reads with the
current write-back, are the natural places to recover the factor of two.

## 6. Sizing parameters

The top, `cc_decoder`, has these parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `D` | 23 | code distance |
| `ROUNDS` | 23 | measurement rounds in one decode |
| `MAX_DEFECTS` | `ROUNDS·(D²−1)/2` = 6072 | CGS and Parent-table depth |
| `MERGE_DEPTH` | `2·MAX_DEFECTS` | Merge-stack depth |
| `SCAN_W` | 64 | syndrome bits Init examines per cycle |

Widths are derived: vid `⌈log2 N⌉`, radius `⌈log2 D⌉+1`, defect index
`⌈log2 MAX_DEFECTS⌉`.

`MERGE_DEPTH` must be at least `2·MAX_DEFECTS`. Elaboration fails with an
error otherwise. During a Grow pass nothing pops the stack, and each entry
may push one hit per boundary. A smaller stack could fill, leaving Grow
waiting for space forever. A radius stays far below the 6 bits it is given at `D = 23`. A cluster stops
growing once it reaches a boundary, and every vertex is at most about `D/2`
edges from one.

For a smaller code, set `D` and `ROUNDS`. For example, the 168-vertex `d = 7`
build is `#(.D(7), .ROUNDS(7))`. `MAX_DEFECTS` can be set lower than `N` to
save memory. Syndromes with more defects then report `overflow`, and the
correction covers only the first `MAX_DEFECTS` defects.

## 7. Where this RTL departs from the published decoder

These parts follow the published decoder:

- the phase structure (Init, Grow, Match and Union);
- the three per-cluster registers;
- the CGS, Parent table and Merge stack;
- the distance formula;
- the "sum of radii exceeds the distance" collision rule;
- the correction rule.

These are this design's own choices:

- **Collision newness filters.** Match pushes a pair, and Grow pushes a
  boundary hit, only in the pass where it first happens.
- **Two boundary distances.** `x1` and `d − x1` are tracked separately, so
  that a hit on the logical boundary can be told apart from one on the other
  boundary.
- **Strict comparison.** Both collision rules use `>`, not `≥`. This
  reproduces the published worked example: a defect one edge from the
  boundary touches it only after its second growth step.
- **Linking direction.** The second root is linked under the first.
- **Simple union-find.** There is no path compression and no union by rank.
- **Vertex numbering.** See section 1.
- **Memories.** They are arrays with combinational read, not SRAM macros.
- **Reset and speed.** The reset is synchronous, and the cycle count is
  about twice the published figure (section 5).
- **Register map and bus.** Both are this design's own (section 4).
- **No run-time configuration.** The code size is fixed when the design is
  elaborated, by `D` and `ROUNDS`. The published Init unit also reads a
  decoder configuration, but its contents are not described.
- **Not built.**
  - The metric-generation logic that the published chip keeps next to its
    registers. Its contents are not described.
  - Clock generation and I/O.

## 8. Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.
`tb/cc_ref_pkg.sv` is a behavioural Union-Find reference: a plain software
version of the same algorithm that works with explicit coordinates. The
end-to-end testbenches compare the correction, defect count, pass count,
and overflow against it.

| Testbench | What it covers |
|---|---|
| `tb_cc_distance` | formula vs. breadth-first search on the real lattice (d=5, all pairs); random pairs at d=23 |
| `tb_cc_cgs`, `tb_cc_parent_table`, `tb_cc_merge_stack`, `tb_cc_cluster_regs` | memories against scoreboards; LIFO order and simultaneous push/pop; union bit algebra |
| `tb_cc_init` | defect scan, entries and parent writes, overflow, cycle count |
| `tb_cc_grow` | radii, valid bits, boundary pushes, correction, stalls on a full stack, cycle count |
| `tb_cc_match` | pushed pairs vs. an independent all-pairs model, newness filter, stalls, cycle count |
| `tb_cc_union` | random merge sequences against a reference forest |
| `tb_cc_control` | phase order, start pulses, MERGE exit conditions, pass count |
| `tb_cc_sysreg` | register map at full size, start and busy interlocks |
| `tb_cc_decoder` | d=7, MAX_DEFECTS=24: the worked example, single defects, dense and random syndromes; counts unions, boundary hits, stalls, overflows and multi-pass decodes, and fails if any never happened |
| `tb_cc_decoder_sweep` | one decoder per distance d=3,5,…,21 (d rounds each), 1.35 % defect rate, against the reference; prints mean cycles next to the published FPGA figures |
| `tb_cc_decoder_full` | default parameters (d=23, 23 rounds): random syndromes at 1.35 %, 4.05 % and 8.1 % defect rates against the reference; reports cycles per decode |

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/cc_pkg.sv tb/cc_ref_pkg.sv tb/tb_cc_decoder.sv --top-module tb_cc_decoder
./obj_dir/Vtb_cc_decoder
```

`cc_ref_pkg.sv` is needed only by the testbenches that import it:

- `tb_cc_decoder`
- `tb_cc_decoder_full`
- `tb_cc_decoder_sweep`
- `tb_cc_match`

Leave it out for the others.

The full-size run builds in seconds and simulates in under a second.

**How far to trust it:**

- **Checked against the reference model.** The clusters, and hence the
  corrections, match the reference Union-Find model on every syndrome
  tested. This includes overflow cases.
- **Not checked:** the decoder's accuracy as an error-correction method,
  such as its threshold or its logical error rates. That would need a noise
  simulator and very many shots.
- **Timing:** the absolute cycle counts are this implementation's, not the
  published chip's.
