# A ray stream tracing core on quantized BVHs

Ray tracing hardware spends much of its time moving data: BVH nodes,
triangles, rays and traversal stacks. This core is built to move as few
bytes as possible, using two ideas that work together.

1. **Everything the traversal reads is quantized.**
   - A node of the 8-wide BVH stores its eight child boxes as 8-bit
     coordinates in a local grid. The grid has a full-precision integer
     origin and a power-of-two step per axis.
   - A triangle stores its three vertices as 8-bit coordinates in the grid of
     its leaf, 9 bytes per triangle.
   - A ray is 32 bytes: a fixed-point origin, a direction folded into one
     32-bit octahedral code, and a 16-byte hit record.
2. **Rays travel as a stream.** All rays share one traversal stack. Each stack
   entry pairs a node with the list of rays that still have to visit it. A
   node is fetched once for all those rays instead of once per ray, and no
   ray keeps a private stack.

Because the quantized data is integer data, the intersection tests use
exact fixed-point arithmetic, with no floating point. The box test is the
classic slab test with a fixed-point divide. The triangle test is an
edge-function test whose intermediate values are wide enough never to round
before the hit/miss decision. Two triangles that share an edge see exactly
the same edge values, so a ray cannot slip through the gap between them.
Leaves all use one common grid step per axis, which keeps the shared edges
identical.

The RTL implements the hardware side of this scheme:
- the quantized number formats;
- dequantization into a 64-bit world grid;
- the slab and edge tests;
- octahedral direction coding in both directions;
- a ray stream traversal engine with banked ray lists and a shared stack;
- byte counters for every traffic class.

Building and compressing the BVH is host software and is not part of the
core. The testbenches contain a small builder that produces the same format.

## 1. Number formats

Every quantity has a signed fixed-point format (R.Q): R integer bits, Q
fractional bits, plus a sign bit.

| quantity | format | where |
|---|---|---|
| ray origin, node origins | R=16, Q=8 (stored as int32) | `rt_pkg::R_ORG/Q_ORG` |
| ray direction (decoded) | R=1, Q=10, 12 bits with sign | `R_DIR/Q_DIR/DIR_W` |
| world coordinates of box corners and vertices | 64-bit, Q=8 | `WORLD_W` |
| hit distance t | unsigned 32-bit, Q=9 | `Q_T` |
| barycentrics | 16-bit, 1.0 = 32768 | `hit_t` |

One world grid unit is 1/256 of a scene unit. All positions in the core are
integers on this grid, including node origins, ray origins and dequantized
corners and vertices. So adding, subtracting and comparing positions is
exact.

The hit distance comes from a fixed-point divide. The numerator, a
difference of positions in Q8, is shifted left by R_DIR + Q_DIR = 11 bits and
then divided by the Q10 direction component. The quotient has 8 + 11 − 10 = 9
fractional bits. The box test and the triangle test use the same scaling, so
their t values can be compared directly.

## 2. The compressed node and the quantized triangle

A node is 96 bytes (`cnode_t`, listed from the most significant bytes down):

| field | bytes | meaning |
|---|---|---|
| `node_type` | 1 | 0 = inner, 1 = leaf |
| `e[3]` | 3 | signed exponent per axis: grid step = 2^e scene units |
| `origin[3]` | 12 | grid origin, int32 in the world grid (Q8) |
| `child[8]` | 32 | inner: child node index, negative = empty slot; leaf: `child[0]` = first triangle, `child[1]` = triangle count |
| `hi_z, lo_z, hi_y, lo_y, hi_x, lo_x` | 6 × 8 | 8-bit child box bounds in the node's grid |

A grid coordinate q on an axis with exponent e maps to the world grid as

    world = sign_extend(origin) + (q << (e + 8))

This is what `dequant` computes, 48 times in parallel in `node_box_tester`.
The "+8" converts a step of 2^e scene units into world-grid units. A shift
outside 0..40 is clamped and raises `range_err`.

When the tree is built:
- the step per axis is the smallest power of two that spans the node's box
  with 255 steps;
- the origin is the box minimum, rounded down to the grid;
- lower child bounds round down and upper child bounds round up, so a child
  box always contains its geometry.

Two further rules make meshes watertight:
- every leaf uses the same step per axis, the largest one any leaf needs;
- an inner node's step is never finer than its children's.

The builder in `tb/tb_scene_pkg.sv` follows these rules.

The published equations are ambiguous about the unit of the
origin. One form divides the origin by the step, another subtracts it from
a world position. This design stores the origin as a world-grid position,
which is the form the node layout describes ("a full-precision integer
world-space point").

A triangle (`qtri_t`) is 9 bytes: three vertices, three 8-bit coordinates
each, in the grid of the leaf that holds it. The triangle unit dequantizes
them with the leaf's origin and exponents.

## 3. Rays: octahedral directions

A ray record (`ray_t`, 32 bytes) holds:
- the octahedral direction code, 4 bytes;
- the origin, three int32 values in the world grid, 12 bytes;
- the hit record, 16 bytes: t, triangle index, two barycentrics and a flags
  word with bit 0 = hit.

The hit record's t doubles as the ray's tMax. A fresh ray has t = all ones
and no hit.

**Encoding** (`ray_quantizer`). The direction is divided by its L1 norm. The
result lies on the octahedron |x|+|y|+|z| = 1, and its x and y are the code's
u and v. For the lower half (z < 0) the triangles of the octahedron are
folded outwards: u = sign(x)(1 − |y|), v = sign(y)(1 − |x|). Both are stored
as signed 16-bit values with 1.0 = 32767.

The hardware converts IEEE single-precision inputs directly:
1. It aligns the three mantissas to the largest exponent.
2. It forms S = |x|+|y|+|z| as an integer.
3. It computes each code as a rounded fraction of S. The folded values use
   S − |y| and S − |x|, so there is only one rounding step.

The origin is converted to the Q8 grid rounding down, like node origins. A
value outside 32 bits saturates and raises `range_err`.

**Decoding** (`oct_decode`):
1. Round u and v to Q10.
2. Compute z = 1 − |u| − |v|.
3. If z < 0, unfold.

The decoded vector has unit L1 norm, not unit length. No square root or
division is needed, and both intersection tests are invariant to the scale
of the direction. The one visible consequence is that hit distances are
measured in units of the L1-normalized direction. They are consistent
within a ray, which is all the closest-hit search needs.

## 4. The fixed-point box test

`ray_box_unit` runs the slab test per axis:
- A zero direction component means the ray is parallel to that slab. Such a
  component is common after quantization: any component below 2^-11 becomes
  zero. The ray misses if its origin lies outside [min, max] on that axis.
- Otherwise t1 = (min − o) / d and t2 = (max − o) / d. The two are swapped if
  d < 0, and the interval starting at [0, MAX] is narrowed to
  [max(tmin, t1), min(tmax, t2)].
- The box is hit unless the interval becomes empty.

The differences are 65 bits and the shifted numerators 76 bits, so nothing
overflows for any 64-bit corner.

The divide truncates toward zero. The truncation is monotonic, so a box that
contains the exact entry point of a ray is never rejected. Traversal
therefore finds every triangle the triangle test would accept; the testbench
of the full core relies on this when it compares against a brute-force
search.

`node_box_tester` holds eight copies of the box unit plus 48 dequantizers, so
one ray is tested against all eight children in one cycle. Its
`valid_mask` marks slots that hold a child: an inner node, with a
non-negative child index.

## 5. The exact triangle test

`ray_tri_unit` computes, in this order:

    a, b, c = dequantized vertices            (25-bit signed, Q8)
    ab = b-a, ac = c-a, bc = c-b              (26 bits)
    a0 = o-a, b0 = o-b, c0 = o-c              (26 bits)
    aN = ab x a0, bN = bc x b0, cN = c0 x ac  (52 bits)
    dota, dotb, dotc = aN.d, bN.d, cN.d       (65 bits)
    reject if any of dota, dotb, dotc > 0
    n = ab x ac, dotn = d.n
    dist = (-(a0.n) << 11) / dotn             (Q9)
    reject if dist < 0 or dist > tMax

The widths follow a worst-case growth analysis:
- adding two numbers adds one integer bit;
- multiplying adds the bit counts.

With 16.8 origins and vertices and 1.10 directions, the decisive dot
products need 64 bits plus a sign. All of them are computed exactly. Two
triangles that share an edge compute the same edge value with opposite sign,
so exactly one of them claims a ray through the edge.

Behaviour at the edges of the algorithm:
- **Single-sided.** The test accepts a triangle only if all three edge dots
  are ≤ 0. That is one winding; it is the algorithm as specified, kept
  unchanged.
- **dotn = 0.** Because dota + dotb + dotc = dotn, every hit has dotn < 0. A
  ray lying in the triangle's plane, or a degenerate triangle, has dotn = 0
  and is rejected.
- **Ties.** dist = tMax is accepted, so an equally close later triangle
  replaces the earlier one.
- **Barycentrics.** The edge ratios give them: the weight of vertex 1 is
  dotc/dotn and the weight of vertex 2 is dota/dotn, both in Q15.

The vertices are narrowed from 64 to 25 bits before the products.
`range_err` reports a vertex or ray origin that does not fit; the result is
then meaningless.

## 6. Ray stream traversal

This is the part of the design with the most state. It lives in
`stream_trav_ctrl`, with `stream_stack` and `ray_list_mem` as its storage.

### Stack entries and ray lists

A stack entry is 77 bits at the default sizes:

    { node index (32), bank (3), base, len, region_end (14 bits each) }

It names a node and a ray list. The list is the `len` ray indices at
`base`..`base+len−1` in bank `bank` of the ray-list memory.

The list memory has one bank per child slot, so eight banks. When a ray
leaves an inner node, it must be appended to the list of every child it
enters. With one bank per slot, these are up to eight writes to different
banks, and they happen in the same cycle. All banks share the write data,
since it is the same ray index, but each has its own address.

### Memory management of the lists

The lists of the children of one node are written into one new region. The
region starts at `new_base`, the current allocation pointer, in every bank.
Child c's list grows at `new_base + cnt[c]` in bank c. Each child list can
hold at most the parent's `len` rays, so the region is `len` entries long.

Each pushed child entry records `region_end = new_base + len`. Popping an
entry sets the allocation pointer back to that entry's `region_end`. This
frees every region allocated by nodes traversed since the entry was pushed,
and keeps the region that holds the lists of the entry's still-pending
siblings.

The stack is LIFO, so this is exact: no list that is still referenced is
ever overwritten. The memory needed is at most (tree depth) × (stream size)
entries per bank. At the defaults that is 8 levels of 1024 rays in 8192
entries.

If a region would not fit, traversal stops with `error` set. It also stops
if a push finds the stack full.

### Traversal order

1. At `start`, ray indices 0..N−1 are written to bank 0. The root entry
   {node 0, bank 0, base 0, len N} is pushed.
2. **Pop.** Take the top entry, fetch the node once, and branch on its type.
3. **Inner node.** For each ray of the entry, read its index, then the ray
   record. Test the ray against all eight children and append it to the
   lists of the children it hits.
4. **Push.** Push every child with a non-empty list, from slot 7 down to 0,
   so that slot 0 is popped first.
5. **Leaf.** For each ray, read the ray and test it against each triangle of
   the leaf in turn. The triangle unit takes the ray's current t as tMax. A
   closer hit replaces t, the triangle index and the barycentrics. The ray
   record is written back once, and only if something changed.
6. The stream is done when the stack is empty.

The published description also keeps "children processed" marks in each
stack entry. Here every child is its own entry, so the stack itself carries
that state.

### Timing

All memories are synchronous with one cycle of read latency. The controller
does not overlap accesses. The cycle count is exact and is checked by the
testbenches:

| work | cycles |
|---|---|
| set up the first list | N + 1 |
| stack: per pop, plus one final check | 2 per pop + 1 |
| inner node, per ray | 4 (list read, ray read, wait, box test) |
| inner node, push phase | 8 |
| leaf, per ray | 3, plus 3 per triangle, plus 1 if written back |

The engine is sequential: one ray-box test or one ray-triangle test at a
time. The box test is 8-wide, so a node's eight children are tested in
parallel.

## 7. Traffic accounting

`traffic_counters` adds up the bytes that would cross the memory interface:

| class | bytes per event |
|---|---|
| node fetch | 96 |
| triangle fetch | 9 |
| ray read or write-back | 32 |
| ray list entry read or written | 4 (assumed) |
| stack push or pop | 16 (assumed) |

It also counts ray-box tests and ray-triangle tests. The counters are 48
bits wide and can be cleared with `cnt_clear`.

## 8. Using the core (`rt_core`)

**Parameters** (memory sizes are this design's choice):

| parameter | default | meaning |
|---|---|---|
| `NODE_DEPTH` | 8192 | nodes; 8192 × 96 B holds the smallest evaluated scene, about 4.7k BVH8 nodes |
| `TRI_DEPTH` | 16384 | triangles; holds that scene's 16k triangles |
| `RAY_DEPTH` | 1024 | rays per stream |
| `LIST_DEPTH` | 8192 | entries per list bank |
| `STACK_DEPTH` | 256 | stack entries |
| `CNT_W` | 48 | counter width |

Larger scenes need external memory behind the same read ports.

**Loading.** While the core is idle, the host writes:
- nodes through `node_we/node_waddr/node_wdata`, with node 0 as the root;
- triangles through `tri_*`;
- rays, either fixed point through `ray_we/ray_addr/ray_wdata`, or as
  floats through `rayf_we/rayf_org/rayf_dir` (converted on the way in, at
  `ray_addr`).

**Running.** A one-cycle `start` with `num_rays` traces rays
0..num_rays−1. `busy` stays high until `done` pulses. The results are then
read back through `ray_addr`/`ray_rdata`, one cycle after the address.

**Status outputs:**
- `error`: list or stack overflow; traversal stopped.
- `range_err`: a scene value or float input outside the fixed-point ranges.
- `stack_depth`: current number of stack entries.
- `ev_leaf`, `ev_inner`: pulse on every node fetch.

## 9. Verification

Each block has a self-checking testbench in `tb/`. It compares the block
against independent reference models in `tb/tb_ref_pkg.sv`, which use plain
integer or real arithmetic. Each testbench prints
`TB_RESULT checks=… failures=…` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_oct_decode` | 8008 codes against the integer decoder, including the fold |
| `tb_ray_quantizer` | origins against floor(x·256) with saturation; directions against a real-valued octahedral encoder (±1 step) |
| `tb_dequant` | random origins, exponents and coordinates; clamping |
| `tb_ray_box_unit` | random boxes and rays, zero components, boxes behind the ray, against a 128-bit reference |
| `tb_ray_tri_unit` | random triangles against the exact reference: hit, t, barycentrics, tMax handling |
| `tb_node_box_tester` | full nodes with empty slots, leaves, random rays |
| `tb_sram_1p`, `tb_ray_list_mem`, `tb_stream_stack`, `tb_traffic_counters` | storage semantics, bank independence, overflow, byte sums |
| `tb_stream_trav_ctrl` | the controller with table-driven box and triangle units on a fixed tree: visit order, each visit's ray list, closest hits, cycles per visit |
| `tb_rt_core` | the whole core at its default parameters, described below |
| `tb_rt_core_teapot_size` | the core at default parameters on a scene of the size of the smallest evaluated object; described below |
| `tb_rt_core_overflow` | reduced list and stack sizes: a stream that fits gives correct results; one that does not, and a too-small stack, both stop with `error` |

**`tb_rt_core`** builds a random scene of 240 triangles, giving a BVH of
about 300 nodes. It loads the scene and 300 rays. Every tenth ray is loaded
through the floating-point port. The testbench then traces the stream and
checks:
- every ray's result against a brute-force search over all triangles;
- the byte counters;
- the exact cycle count.

It also counts how often each mechanism occurs and fails if any never
occurs. The mechanisms are: inner-node filtering, leaf intersection, rays
dropped by a child box, empty child slots, zero direction components,
closer hits replacing earlier ones, edge rejections, misses, write-backs and
float-loaded rays.

**`tb_rt_core_teapot_size`** runs a workload of the size of the smallest
evaluated scene, at the default parameters. The geometry is synthetic:
16000 random triangles, built with at most 4 triangles per leaf into 4617
nodes. The testbench traces one 1024-ray stream and checks every ray
against brute force (about a minute of simulation). In a typical run:
- about 450k cycles;
- per ray, 421 node bytes, 803 triangle bytes, 1453 ray bytes, 357 list
  bytes and 140 stack bytes;
- 175 box tests and 89 triangle tests per ray.

Ray records are the largest traffic class, which is why the 32-byte ray
format matters in a stream tracer.

Simulation with Verilator, for example the full core:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/rt_pkg.sv tb/tb_ref_pkg.sv tb/tb_scene_pkg.sv rtl/*.sv tb/tb_rt_core.sv \
      --top-module tb_rt_core -o sim && ./obj_dir/sim

For a single block, list `rt_pkg.sv`, `tb_ref_pkg.sv`, the block's files and
its testbench. All testbenches use `$urandom` only, and they reset or
initialise everything they read.

## 10. Where this departs from or adds to the published design

- **Cycle-level engine.** The published work is a software simulation that
  counts memory traffic. The cycle-level organisation is this design's own:
  - the banked list memory;
  - region allocation with LIFO freeing;
  - the push order;
  - the sequential schedule;
  - the overflow handling.
- **Direction normalisation.** Decoded directions are L1-normalised rather
  than unit length (section 3).
- **Box culling.** The box test does not use the ray's current tMax, as in
  the specified algorithm. A ray can therefore still enter boxes beyond its
  closest hit. The cost is more box tests, never a wrong result.
- **Triangle test details.** The triangle test is single-sided, rejects
  dotn = 0 and accepts dist = tMax. The barycentric formula is this design's
  choice.
- **Unspecified formats.** These encodings are this design's own:
  - the node type values and empty-slot marker;
  - the hit record layout;
  - the split of the octahedral code;
  - the byte costs of list entries and stack entries.
- **Memory sizes.** The on-chip sizes hold a scene of about 4.7k nodes and
  16k triangles. The larger published scenes (82k to 1.27M nodes) would
  need external memory behind the same ports.
- **Fixed width and leaf format.** The branching factor is fixed at 8 by the
  package, which is the recommended configuration; 2- and 4-wide trees were
  only comparison points. Storing up to three triangles directly inside a
  leaf node is mentioned as a possible optimisation and is not built.
- **Not included.** Not implemented in hardware:
  - the BVH builder;
  - the conversion of a floating-point BVH into the compressed format;
  - the propagation of leaf steps up the tree.

  These run on the host. `tb/tb_scene_pkg.sv` contains a small version for
  testing.
