# RayFlex datapath in SystemVerilog

A hardware ray tracer spends most of its arithmetic on two questions: *does this ray
pass through these axis-aligned boxes, and in which order?* (BVH traversal) and *does
this ray hit this triangle, and how far away?* (leaf test). This design answers both
in one shared, fully pipelined floating-point datapath. Each clock cycle it accepts
one operation, either

* **ray-box**: one ray against four child boxes of a BVH node, returning the four boxes
  sorted by entry distance, with hit flags and entry distances, or
* **ray-triangle**: one ray against one triangle (watertight test with back-face
  culling), returning a hit flag and the hit distance as a numerator/denominator pair,

and returns the result exactly 11 cycles later when nothing stalls. The two operations
share one pool of adders, multipliers and comparators; in every stage, the units are
fed by whichever operation currently occupies the stage. Flow control is elastic:
each of the 11 stages is a skid buffer with valid/ready handshakes on both sides, so
a consumer can stall the pipeline at any time without losing data or throughput.

The arithmetic is IEEE-754 single precision at the ports. Inside, numbers use a
33-bit *recoded* format, and every add and multiply is rounded to binary32
(round-to-nearest-even), so each intermediate value is exactly what a C program
doing the same operations in `float` in the same order would compute. The
testbenches rely on this: their reference models are bit-exact.

## 1. The two intersection tests

### Ray-box: the slab test

A box is the intersection of three slabs (`lo.x <= x <= hi.x`, and so on). A ray
`o + t*d` is inside the x slab for `t` between `(lo.x - o.x)/d.x` and
`(hi.x - o.x)/d.x`. The datapath uses the precomputed inverse direction `inv = 1/d`
so the division becomes a multiply:

```
t_lo[c] = (lo[c] - o[c]) * inv[c]      stage 2 (24 subtractions), stage 3 (24 multiplies)
t_hi[c] = (hi[c] - o[c]) * inv[c]
near[c] = min(t_lo[c], t_hi[c])       stage 4: 3 comparators per box
far[c]  = max(t_lo[c], t_hi[c])
tmin    = max(near.x, near.y, near.z, 0)          stage 4: 3 comparators per box
tmax    = min(far.x,  far.y,  far.z,  extent)      stage 4: 3 comparators per box
hit     = tmin < tmax                             stage 4: 1 comparator per box
```

That is 10 comparators per box, 40 for four boxes. The ray's valid interval is
`[0, extent]`.

**Rays lying in a face plane.** If `d.x = 0` the inverse is ±infinity. If the origin
is then exactly on the plane `x = lo.x`, the product is `0 * inf = NaN`. The min and max
here are *NaN-propagating*: if either input is NaN, the result is NaN. The NaN
reaches `tmin` or `tmax`, the final `<` reads false, and the box is a miss. A ray that
grazes a box along a face or an edge therefore never counts as a hit. This is
deliberate and it matches the reference behaviour the design was specified against.

**Strict hit test.** `hit = tmin < tmax`, not `<=`. With `<=`, a ray starting on a face
(or corner) and pointing away would have `tmin = tmax = 0` and count as a hit.
The specified behaviour is a miss.

**Sorting (stage 10).** Each box gets the key `hit ? tmin : +inf`. A five-comparator
network (compare-exchange pairs (0,1), (2,3), then (0,2), (1,3), then (1,2)) sorts the
four keys and carries each box's index and hit flag along. Entries are swapped only
when the second key is strictly smaller, so equal keys keep ascending index order.
Output slot 0 is the nearest hit box and missed boxes come last. The `tmin` output
of a slot is the box's real entry distance, also for a missed box.

### Ray-triangle: the watertight test

The triangle test follows the watertight algorithm of Woop, Benthin and Wald. It
first moves and shears the triangle so that the ray becomes the +z axis through the
origin. Then it computes 2D edge functions. Edges shared by two triangles give
bit-identical edge functions on both sides, so a ray cannot slip through the gap.

The ray carries two precomputed values for this test, which a GPU computes once per ray:

* `k`: an axis permutation. `kz` is the axis where `|d|` is largest, `kx = (kz+1) mod 3`,
  `ky = (kx+1) mod 3`, and `kx`/`ky` are swapped when `d[kz] < 0` to keep the winding.
* `S`: the shear constants `Sx = d[kx]/d[kz]`, `Sy = d[ky]/d[kz]`, `Sz = 1/d[kz]`.

The datapath then does, for vertices A, B, C (`v` = 0, 1, 2):

```
stage 2   p[v][c]  = V[v][c] - o[c]                   9 subtractions
stage 3   s[v][c]  = S[c] * p[v][kz]                  9 multiplies
stage 4   x[v]     = p[v][kx] - s[v][0]               6 subtractions
          y[v]     = p[v][ky] - s[v][1]
          z[v]     = s[v][2]                          (copied)
stage 5   products Cx*By, Cy*Bx, Ax*Cy, Ay*Cx, Bx*Ay, By*Ax       6 multiplies
stage 6   U = Cx*By - Cy*Bx,  V = Ax*Cy - Ay*Cx,  W = Bx*Ay - By*Ax   3 subtractions
stage 7   U*Az, V*Bz, W*Cz                            3 multiplies
stage 8   det' = U + V,       T' = U*Az + V*Bz        2 additions
stage 9   det  = det' + W,    T  = T' + W*Cz          2 additions
stage 10  hit  = !(U > 0) && !(V > 0) && !(W > 0) && !(det == 0) && !(T > 0)
                                                      5 comparators
```

**Sign conventions.** The triangle's front side is the one that `AB x AC` points to.
A hit requires the ray to arrive from the front: `d · (AB x AC) > 0`. Under this
convention a front hit has `U, V, W <= 0` (at least one strictly negative), so
`det < 0`, and a hit in front of the origin has `T < 0` as well. The test therefore
rejects any positive edge function (the ray passes outside or hits the back face), a
zero determinant (the ray is parallel to the plane, or the triangle is degenerate) and
a positive `T` (the triangle is behind the ray). `U`, `V` or `W` equal to zero means
the ray passes exactly through an edge or a vertex; that counts as a hit.

The datapath does not divide. It outputs `t_num = T` and `t_denom = det`. On a hit
both are negative and the hit distance is `T/det`. The consumer does the division and
compares the distance with the ray extent and the closest hit found so far, as
GPU instruction sets that return these two operands do. No double-precision fallback
for exactly-zero edge functions is built, and none is needed for the results above,
which are exact in binary32.

## 2. Interface

The top module is `rayflex` (`rtl/rayflex.sv`). All types are in `rayflex_pkg`.

| port        | dir | type            | meaning                                   |
|-------------|-----|-----------------|-------------------------------------------|
| `clk`       | in  | logic           | clock                                     |
| `rst_n`     | in  | logic           | asynchronous active-low reset             |
| `in_valid`  | in  | logic           | an operation is offered                   |
| `in_ready`  | out | logic           | the datapath takes it at this clock edge  |
| `in_data`   | in  | `rayflex_in_t`  | the operation                             |
| `out_valid` | out | logic           | a result is offered                       |
| `out_ready` | in  | logic           | the consumer takes it at this clock edge  |
| `out_data`  | out | `rayflex_out_t` | the result                                |

A transfer happens on a rising edge where valid and ready are both high. `in_ready`
and `out_valid` are registered outputs; they depend only on the state of the first
and last buffer, not combinationally on the other side's valid or ready.

`rayflex_in_t` holds, all in binary32:

* `op`: `OP_BOX` (0) or `OP_TRIANGLE` (1);
* `ray`: `origin[3]`, `dir[3]`, `inv_dir[3]` (element-wise `1/dir`, infinity where
  `dir` is zero), `extent`, `k[3]` (2-bit axis indices: `k[0]=kx`, `k[1]=ky`,
  `k[2]=kz`) and `shear[3]` (`Sx, Sy, Sz`);
* `box[4]`: `lo[3]` and `hi[3]` corners (used for `OP_BOX`);
* `trng`: `v[3][3]`, vertex × axis (used for `OP_TRIANGLE`).

The producer must supply `inv_dir`, `k` and `shear` consistent with `dir`. The
datapath does not check them. `dir` itself passes through but is not used.

`rayflex_out_t` holds `op` and, for `OP_BOX`, `box_order[4]` (box index in each sorted
slot), `box_tmin[4]` and `box_hit[4]` (per slot). For `OP_TRIANGLE` it holds `tri_hit`,
`tri_t_num` and `tri_t_denom`. The fields of the other operation are zero.

## 3. The elastic pipeline

### RayFlex skid buffer (`rayflex_skid_buffer`, `skid_buffer_ctrl`)

Every stage is one generic buffer, parameterised by an input type `T` and an output
type `U`. The stage's combinational work ("custom logic", `T -> U`) sits *inside* the
buffer, between its input mux and its output register:

```
             +--------+
 in_data --->| skid_q |---+
     |       +--------+   |  select
     +--------------------+--[mux]--> logic_in --> [stage logic] --> logic_out --> [out_q] --> out_data
```

The controller has three states:

| state | in_ready | out_valid | select | meaning                                   |
|-------|----------|-----------|--------|-------------------------------------------|
| EMPTY | 1        | 0         | 0      | nothing held                              |
| BUSY  | 1        | 1         | 0      | output register holds one item            |
| FULL  | 0        | 1         | 1      | output register and skid register hold one each |

Transitions, with `in_fire = in_valid & in_ready` and `out_fire = out_valid & out_ready`:
EMPTY→BUSY on `in_fire`; BUSY→FULL on `in_fire & !out_fire`; BUSY→EMPTY on
`!in_fire & out_fire`; FULL→BUSY on `out_fire`. The output register loads
(`load_out`) on EMPTY with `in_fire`, on BUSY with both fires, and on FULL with
`out_fire` (then from the skid register through the stage logic). The skid
register loads (`load_skid`) on BUSY with `in_fire & !out_fire`.

Why this matters: `in_ready` is a pure function of the state, so a stall at the
output reaches the previous stage one cycle later, not through a combinational chain
of 11 ready signals. The skid register absorbs the one item that the upstream stage
sends in that cycle. With a ready consumer every buffer stays in BUSY and passes one
item per cycle. When the consumer stops, the buffers turn FULL one after
another from the output backwards, and `in_ready` at the input drops once they are all
FULL. At that point the pipeline holds 22 operations. When the consumer resumes, the
output is again one per cycle.

Because the stage logic sits behind the mux, the logic always sees whichever item
goes to the output register next, and the skid register stores the *unprocessed*
input. An item that waits in a skid register is computed when it moves on. The stage
logic is purely combinational, so this gives the same result.

Only the controller state is reset. Data registers are not. A data register that
has never been loaded is never shown, because `out_valid` is low in EMPTY.

### Top level (`rayflex`)

The top is a chain of 11 buffers. Buffer 1 has `T = rayflex_in_t` and `U = srfds_t`,
buffers 2 to 10 have `srfds_t` on both sides, and buffer 11 has `srfds_t` in and
`rayflex_out_t` out. The stage logic modules `rayflex_s01_logic` ... `rayflex_s11_logic`
plug into the buffers' `logic_in`/`logic_out` ports. Latency is one register per stage:
an operation accepted at clock edge *n* is loaded into the last stage's register at
edge *n+10* and, with `out_ready` high, handed over at edge *n+11*: 11 cycles from
input handshake to output handshake.

### Shared data structure (`srfds_t`)

All inner registers carry the same wide struct. It holds the recoded copy of the ray,
the four boxes and the triangle, plus one field for every intermediate result of
either operation (`box_lo_tr`, `box_t_lo`, `box_tmin`, ... `tri_tr`, `tri_sh`,
`tri_xyz`, `tri_uvw`, ...). Each stage copies its input struct and overwrites only
the fields it produces, and only for its own operation. So every stage has the same
interface, and a stage can be moved or split without changing its neighbours. Fields
that no later stage reads are constant or unloaded at that point, and synthesis
removes those flip-flops. The struct is large (several thousand bits), but the
register cost after synthesis is only what is live at each stage.

### Sharing the functional units

In stages 2, 3 and 4 both operations use units. The input of each unit is a mux
selected by the opcode. Units that one operation does not use get zero inputs, so
they do not toggle. For example stage 2 uses all 24 adders for boxes (4 boxes × 2
corners × 3 axes), but only 9 for the triangle (3 vertices × 3 axes). Stages 5 to 9 are
used only by the triangle test; box operations pass through them unchanged. Stage 10
uses the sorting network for boxes and its 5 comparators for the triangle.

## 4. Number format and arithmetic units

### Recoded floating point

Inside the pipeline a number is 33 bits: `{sign, exp9, frac23}`.

| `exp9[8:6]` | meaning                                         |
|-------------|-------------------------------------------------|
| `000`       | zero (rest ignored)                             |
| `110`       | infinity                                        |
| `111`       | NaN                                             |
| other       | `(-1)^sign × 1.frac × 2^(exp9 − 256)`           |

The extra exponent bit lets binary32 subnormals be stored *normalised*: a subnormal
`0.f × 2^-126` becomes `1.f' × 2^e` with `exp9 < 130`. The adder and multiplier
therefore never handle a hidden bit of zero; only the rounding at the end handles
subnormal results. Because `exp9` increases with magnitude, `{exp9, frac}` compared
as an unsigned integer orders magnitudes. The comparator uses this.

* `fp_to_rec` / `rec_to_fp`: exact conversions (stages 1 and 11). All NaNs become one
  canonical quiet NaN.
* `fp_rec_add`: swaps the operands by magnitude, aligns the smaller one in a 28-bit
  window with guard, round and a sticky bit, adds or subtracts, normalises with a
  leading-zero count and rounds. Exact cancellation gives +0.
* `fp_rec_mul`: 24×24-bit significand product, normalised and rounded. `0 × inf` is NaN.
* `round_pack` (in `rayflex_pkg`): round-to-nearest-even of a wide significand, with
  gradual underflow to the binary32 subnormal grid and overflow to infinity. It
  returns the result in recoded form. The adder and multiplier share it.
* `fp_rec_cmp`: `lt`, `eq`, `gt`, `unordered`. Any NaN operand makes `lt`, `eq` and `gt`
  false. `+0 == -0`.

All arithmetic units are combinational. Each is a full IEEE binary32 unit, so results
are correctly rounded, not approximations.

## 5. Where this design differs from the specification it was built from

* **Rounding and format are fixed.** The original datapath has the intermediate
  precision and format as parameters, to study rounding strategies. Here every add and
  multiply rounds to binary32, with round-to-nearest-even, in the fixed 33-bit format.
* **One sorting network, not two.** The original stage 10 lists two sorting networks
  of five comparators. The second has no stated use for four boxes, so only one is
  built. Stage 10 therefore has 5 + 5 comparators rather than 5 + 10. The design has
  120 floating-point operations per cycle at full use, not 125.
* **Strict box hit test** (`tmin < tmax`), chosen to give the specified miss for rays
  starting on a face or corner and pointing away (see section 1). The slab algorithm as
  usually written uses `<=`.
* **`k` is three 2-bit indices**, not three floating-point values. `S` is three binary32
  values, as specified.
* **Ray interval.** The interval start is fixed at 0. Only the end (`extent`) is an
  input.
* **Triangle result.** Only the hit flag and the numerator/denominator of the distance
  are returned. No division, no comparison with the ray extent, and no barycentric
  coordinates at the output.
* **Own arithmetic units.** The original uses an existing open-source floating-point
  library. These units are written from scratch and give the same IEEE results.
* **Reset and IO layout** are this design's own. The original does not describe them.
* **Not built:** the extended datapath that also computes Euclidean and cosine
  distances for 16-element vectors (it needs accumulator state in the skid buffer's
  optional "stateful logic" slot, which is therefore also omitted), the variant with
  two disjoint pipelines, and the rest of the ray-tracing unit around the datapath
  (ray buffers, schedulers, BVH traversal).

## 6. Verification

Every module has its own self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M`. A shared package `tb_fp_pkg` gives the reference
arithmetic. It computes in `real` (double) and rounds once to binary32. For `+`, `-` and
`×` of binary32 operands this is exactly the correctly rounded binary32 result. So the
reference is bit-exact and shares no code with the design. It also has its own
binary32 ↔ recoded conversion and a random generator that mixes normal values with
zeros, subnormals, infinities and NaNs.

| testbench                 | what it checks                                                                 |
|---------------------------|--------------------------------------------------------------------------------|
| `rayflex_pkg_tb`          | `round_pack` against the reference for random signs, random 50-bit significands and exponents from deep underflow to overflow; the helper functions and IO struct widths |
| `fp_to_rec_tb`, `rec_to_fp_tb` | exact conversion of all classes, round trip                              |
| `fp_rec_add_tb`, `fp_rec_mul_tb` | 40 000 random operations plus special cases, bit-exact                   |
| `fp_rec_cmp_tb`           | `lt/eq/gt/unordered` with zeros of both signs, infinities and NaNs             |
| `skid_buffer_ctrl_tb`     | FSM against an occupancy model; every transition is counted                   |
| `rayflex_skid_buffer_tb`  | scoreboard under random valid/ready; no loss or duplication; 1 item/cycle and 1-cycle latency when unstalled |
| `quadsort_tb`             | random keys including ties and +inf: output is a permutation, sorted, with stable ties |
| `rayflex_stages_tb`       | each of the 11 stage-logic modules against its own reference: produced fields bit-exact, all other fields copied unchanged |
| `rayflex_tb`              | the whole datapath, default parameters (see below)                             |

`rayflex_tb` runs the full datapath in three phases:

1. Twenty directed cases with known outcomes, sent back to back. The nine box cases
   are: origin inside; outside pointing away; on a face pointing away; on a corner
   pointing away; on a corner along an edge; outside pointing at the box; two boxes in a
   row; three in a row plus one off the path (sort order checked); along an edge from
   outside. The eleven triangle cases are: back-face hit; front hit; edge; vertex; clear
   miss; parallel to the normal beside the triangle; a far-away large triangle; an
   oblique front hit; a coplanar ray through an edge; a front hit along the x axis; a
   coplanar ray from inside. Each operation must take exactly 11 cycles.
2. 300 random operations with the consumer always ready. The 300 results must leave on
   300 consecutive cycles.
3. 4 000 random operations with random producer gaps and consumer stalls of
   increasing severity.

Every result is compared with a reference model of the full chain of operations,
done in the same order with the same rounding. The testbench counts box and triangle
operations, box hits and misses, NaN-driven box misses, triangle hits and misses,
back-face culls, parallel rays, output stalls, input back-pressure and the
full-rate burst. Any of these that never happens counts as a failure. A typical run
makes about 13 000 checks with no failures.

Every testbench was also run against a deliberately broken copy of its module (for
example a comparator that finds `+0 != -0`, a skid buffer that never selects its skid
register, or a top whose last stage ignores `out_ready`), and each broken copy makes
its testbench fail.

How far to trust it: the arithmetic units are checked bit-exactly against an
independent model over special values and many random values, but not exhaustively.
The pipeline is checked end to end at its real size. Timing closure, area and power
have not been evaluated. The design is only simulated; no synthesis timing has
been done.

## 7. Simulating and changing it

Files: `rtl/rayflex_pkg.sv` (types and `round_pack`) must be compiled first. Each
other module is in `rtl/<module>.sv`. Testbench helpers are in `tb/tb_fp_pkg.sv`.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rayflex_pkg.sv tb/tb_fp_pkg.sv tb/rayflex_tb.sv --top-module rayflex_tb
./obj_dir/Vrayflex_tb
```

Replace `rayflex_tb` with any other testbench name to run a single unit. The
end-to-end test finishes in well under a second of simulation time. Building the
top takes about half a minute.

Common changes:

* **Different stage split.** Move a computation from one `rayflex_sNN_logic` to
  another. Both read and write `srfds_t`, so only the two stage modules change. Add a
  stage by adding a buffer to the chain in `rayflex.sv` and raising `LATENCY`.
* **New operation.** Add an opcode, add its fields to `srfds_t`, and in each stage
  extend the input muxes of the units it uses. Units it does not use must be given
  zero inputs, as the existing ones are.
* **Different rounding.** Everything goes through `round_pack`. Change the rounding
  there, and change the reference in `tb_fp_pkg` to match.
