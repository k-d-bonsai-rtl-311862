# K-D Bonsai: compressed k-d tree leaves with an exact-accuracy guarantee

Radius search on a k-d tree spends much of its time fetching leaf points from
memory: for each leaf it reaches, it loads up to ~15 points of three binary32
coordinates (12 bytes each) and computes a squared distance to the query. K-D
Bonsai makes those leaves smaller in two ways:

1. **Fewer bits per coordinate.** Leaf points are kept in IEEE-754 half
   precision (1 sign, 5 exponent, 10 mantissa bits). LiDAR coordinates stay
   within a few hundred metres of the sensor, so the reduced exponent range is
   never a problem. Only precision is lost.
2. **Shared sign and exponent.** A k-d tree leaf holds points that are close
   together, so in a given coordinate they often have the same sign and
   exponent. When all points of a leaf agree, that 6-bit `<sign,exponent>`
   tuple is stored once instead of once per point.

Lost precision could change whether a point is inside the search radius. The
hardware therefore computes an upper bound on the rounding error as well as
the approximate squared distance. Software uses the bound to decide between
three outcomes: certainly inside, certainly outside, or too close to call.
Only points in the last case are recomputed from the original binary32 data.
The search result is then bit-for-bit the same as the uncompressed search.

The mechanism is a small set of CPU instructions and two added units inside a
core. This repository contains synthesizable SystemVerilog for those units.

## Where the hardware sits

```
            +-------------------------------------------------------+
            |  compression/decompression unit (kdb_bonsai_top)      |
            |   bonsai_sequencer -- zippts_codec (Compress/Decompress)|
            |          |                 |                          |
            |   3x fp32_to_fp16 --> zippts_buffer (7 x 128-bit slices)|
            +------|------------------------|-------------------------+
          128-bit LSU channel        2 x 128-bit write ports
                   |                        |
           load/store unit          vector register file ---- vec_sqdiff_unit
           (not included)           (not included)             4 x sqdiff_fu
```

* **ZipPts buffer** (`zippts_buffer`): one leaf's worth of storage. It holds
  up to 16 half-precision points (768 bits) or their compressed form. The
  compressed form has 3 flag bits in front, so the buffer is 7 slices of
  128 bits.
* **Compress/Decompress Logic** (`zippts_codec`): rearranges the buffer
  contents in either direction in one micro-operation.
* **Sequencer** (`bonsai_sequencer`): splits each buffer instruction into
  slice loads and stores, a compress or decompress step, and register
  write-backs.
* **Vector square-of-differences unit** (`vec_sqdiff_unit`): four
  `(A-B')^2` units (`sqdiff_fu`), one per 32-bit NEON lane.

The load/store unit, the register file and the rest of the core are existing
CPU parts. They are not part of this RTL; the top level exposes their
interfaces as ports.

## Instructions

| instruction | operands | what the hardware does |
|---|---|---|
| `LDSPZPB` | index, addr | One 128-bit load. x, y and z are binary32 values in bits 31:0, 63:32 and 95:64. Each is rounded to half precision and written as point `index`. |
| `CPRZPB` | num_pts | Compresses points 0..num_pts-1 in place. `r_size` returns the size in bytes. |
| `STZPB` | addr, n | n slice stores: slice k goes to `addr + 16k`. |
| `LDDCP` | v_base, num_pts, addr, n | n slice loads into slices 0..n-1, then one decompress step, then three write-backs. The write-back for coordinate c (x, y, z) sends points 0-7 to `v_base+2c` and points 8-15 to `v_base+2c+1`, eight 16-bit lanes per register (point j in lane j mod 8). |
| `SQDWEL` / `SQDWEH` | vA, vB' | Lane i gets `(vA[i] - vB'[i])^2` and its error bound. `SQDWEH` uses vB' lanes i+4. |

Software flow. **Tree build:** for each new leaf, run `LDSPZPB` once per
point, then `CPRZPB`, then `STZPB` with `ceil(r_size/16)` slices into a
separate byte array. The leaf records the start address and length of its
compressed structure. **Radius search:** at each leaf, run `LDDCP`. Broadcast
one query coordinate into vA. Run `SQDWEL` and `SQDWEH` on each of the six
registers. Sum the three per-coordinate results with ordinary vector
instructions, then classify.

## The compressed leaf format

Uncompressed, point i occupies buffer bits `[48i +: 48]`: x in bits 15:0,
y in 31:16, z in 47:32. Each half-precision value splits into a 10-bit
mantissa (bits 9:0) and a 6-bit tuple `<sign,exponent>` (bits 15:10).

For each coordinate, compression checks whether all `n` points have the same
tuple. If they do, the coordinate's flag is set (cX, cY or cZ). The compressed
structure is a bit stream whose bit k is buffer bit k:

```
bit 0      cX
bit 1      cY
bit 2      cZ
bit 3..    mantissas  x0 y0 z0  x1 y1 z1 ... x(n-1) y(n-1) z(n-1)   10 bits each
then       one tuple for each flagged coordinate, in x, y, z order   6 bits each
then       point by point, the tuples of the unflagged coordinates   6 bits each
then       zeros up to the end of the last 128-bit slice
```

Mantissas are never compressed, so they always sit at the same place:
bit `3 + 10(3i + c)`. The shared tuples start at `S = 3 + 30n`. The unshared
tuples start at `U = S + 6·nc`, where `nc` is the number of flags set. The
size in bytes is

```
size = ceil((3 + 30n + 6·nc + 6·n·(3 - nc)) / 8)
```

Example: 10 points with only cX set. The stream is 3 + 300 + 6 + 120 =
429 bits, which is 54 bytes or 4 slices. The same points as binary32 take
120 bytes.

Sizes for a full 16-point leaf: 771 bits (7 slices) with no flag set, and 501
bits (4 slices) with all three set. For the usual 15-point leaf: at most
723 bits, which is 6 slices.

Decompression reads the flags from bits 2:0 and rebuilds points
0..num_pts-1. All later points become zero. `num_pts` is not in the stream,
so software passes it again; the leaf already knows it.

## The square-of-differences unit and its error bound

Suppose the original coordinate B was rounded to half precision, giving
B' = B + δB. With round-to-nearest and no range problem, |δB| is at most half
a unit in the last place of B'. That is `2^(e-15) · 2^-11 = 2^(e-26)` for a
half-precision exponent field `e`.

Expanding `(A-B')^2` shows how far it can be from the exact `(A-B)^2`:

```
(A-B)^2 - (A-B')^2 = 2(A-B')δB + δB^2
|error| <= max(eps) = 2·|A-B'|·max|δB| + max|δB|^2
```

`sqdiff_fu` computes both numbers for a binary32 A and a binary16 B'.
Everything runs in binary32, and B' is first widened exactly. The two terms
that depend only on B' come from a 32-entry table (`part_error_mem`) indexed
by B''s exponent:

```
2·max|δB|  = 2^(e-25)      binary32 exponent field e + 102
max|δB|^2  = 2^(2e-52)     binary32 exponent field 2e + 75
```

`|A-B'|` is computed once and used by both the square and the error product.
The unit is a three-stage pipeline. It accepts one operation per cycle and
returns results three cycles later:

1. Widen B', compute A − B', look up the table.
2. Compute (A−B')² and |A−B'|·2max|δB|.
3. Add max|δB|².

The binary32 add and multiply (`fp32_addsub`, `fp32_mul`) round to nearest
even and handle subnormals, infinities and NaN.

For exponent field 0 (half-precision subnormals, spacing 2^-24), the table
stores the bound for e = 1, which is 2^-25. Applying the formula literally at
e = 0 would give half that value and understate the error.

## Classification (software, shown for completeness)

For one leaf point, sum the three lanes' results over x, y and z to get the
approximate squared distance `d'^2` and the total bound `T`. Then:

* `d'^2 <= r^2 - T`: the point is inside the radius.
* `d'^2 > r^2 + T`: the point is outside.
* Otherwise: load the original binary32 point and decide exactly.

The bound covers only the half-precision rounding of the leaf points. Like
the method it implements, it ignores the binary32 rounding of the unit's own
operations and of the software sums. Those errors are about 2^-24 relative,
far below T in practice. The end-to-end test checks every classification
against the exact one.

## Top-level interface (`kdb_bonsai_top`)

The types are in `kdb_pkg`.

* **Instruction channel.** `instr_valid`/`instr_ready` carry `instr`
  (`bonsai_instr_t`: op, addr, index, num_pts, nslices, v_base). The unit
  accepts an instruction only when idle. `instr_done` pulses once when the
  last micro-operation ends. `r_size` holds the size from the last
  compress or decompress. `zip_flags` shows the codec's flags.
* **LSU channel.** `lsu_req_valid`/`lsu_req_ready` carry `lsu_req`
  (`we`, 64-bit byte `addr`, 128-bit `wdata`). Each accepted request gets
  exactly one `lsu_resp_valid`, in order; for loads it comes with
  `lsu_rdata`. Only one request is outstanding at a time. A waiting request
  must not change; an assertion in the sequencer checks this.
* **Register-file writes.** `vrf_wr0` and `vrf_wr1` (`we`, 5-bit `idx`,
  128-bit `data`) are both active on each write-back cycle.
* **SQDWE path.** Inputs `sqd_valid`, `sqd_high`, `sqd_va`, `sqd_vb`.
  Outputs `sqd_out_valid`, `sqd_sq_diff` and `sqd_error`, three cycles later.

Cycle counts are measured from the cycle the instruction is accepted to the
`instr_done` cycle, for an LSU that answers L cycles after accepting a
request and never withholds ready:

| instruction | cycles |
|---|---|
| `LDSPZPB` | 2 + L |
| `CPRZPB` | 2 |
| `STZPB` with n slices | n(1 + L) + 1 |
| `LDDCP` with n slices | n(1 + L) + 5 |

Reset is asynchronous and active low. It clears the sequencer, the buffer
(so unused bits read as zero padding) and the FU valid bits.

## What follows the method and what is this implementation's choice

The following come from the method as published:

* the 16-point buffer, 128-bit slices and ports, and the 3 flag bits;
* the field order of the compressed structure;
* half precision with round-to-nearest;
* the two error terms from a 32-line table indexed by exponent, and the
  sharing of |A−B'|;
* four 32-bit lanes with a low/high split of the eight 16-bit values;
* the micro-operation breakdown of each instruction.

The following are this implementation's own choices:

* bit positions inside the stream (cX in bit 0) and the point-major
  uncompressed layout;
* 7 slices of storage, needed to fit 771 bits;
* the register order of the write-back;
* the point format in memory (one 16-byte line per point);
* all handshakes and the pipeline depth;
* reset behaviour;
* IEEE behaviour for overflow, NaN and subnormals in conversion;
* the e = 0 table entry (a deliberate correction, see above).

Not included: the load/store unit, the register file, the decoder and the
rest of the out-of-order core, caches and memory. The radius-search
accumulation and classification run in software.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
With Verilator 5, run from the directory that holds `rtl/` and `tb/` (the
testbenches trigger width warnings, so `-Wno-fatal` is needed):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/kdb_pkg.sv tb/tb_fp_ref_pkg.sv tb/tb_kdb_bonsai_top.sv \
    --top-module tb_kdb_bonsai_top -o sim
./obj_dir/sim
```

Use the same command with another `tb/tb_<name>.sv` and `--top-module` for a
single block.

| testbench | what it checks |
|---|---|
| `tb_kdb_bonsai_top` | End to end at default sizes, against an LSU model that withholds ready on random cycles and answers with random latency. Builds 24 leaves of 1-16 points: checks `r_size` and the stored bytes against a stream built field by field. Decompresses every leaf and checks the register writes. Runs SQDWEL/SQDWEH for a query and checks every lane. Checks that the three-way classification always equals the exact one. Also checks that each flag was seen set and clear, a full leaf, back-pressure, both halves and all three outcomes. |
| `tb_workload_radius_search` | A radius search of the kind used for Euclidean clustering, run through the hardware at default sizes. The frame is synthetic and LiDAR-like: 480 points, ten objects 4-100 m from the sensor plus ground. The testbench builds a k-d tree with leaves of at most 15 points (median split on the widest coordinate). Every leaf is compressed with LDSPZPB/CPRZPB/STZPB. Then 40 queries of radius 0.5 m decompress every leaf whose box is in range and classify its points. Each result set must equal a brute-force exact search. It also prints the compressed size against binary32 and how many classifications fell in the shell. |
| `tb_zippts_codec` | 3000 random leaves compressed and decompressed, compared bit for bit. |
| `tb_zippts_buffer` | Random writes and reads against a shadow copy. |
| `tb_bonsai_sequencer` | Micro-operation order, addresses, indices and data; the cycle counts above. |
| `tb_sqdiff_fu`, `tb_vec_sqdiff_unit` | Results against a real-arithmetic reference rounded to binary32; 3-cycle latency; the error bound holds for randomly rounded operands. |
| `tb_fp32_to_fp16`, `tb_part_error_mem` | Conversion including ties, overflow and subnormals; all 32 table lines. |

On one run, `tb_workload_radius_search` stored its 32 leaves in 2539 bytes
instead of 5760 bytes of binary32, which is 44%. It found 91 neighbours over
63 leaf visits. Of 945 point classifications, 10 fell inside the error shell
and were recomputed at full precision. The seed changes these numbers. The
frame is synthetic, so they show the mechanism working, not a measurement on
driving data.

`tb_fp_ref_pkg` holds the reference arithmetic. It rounds `real` values by
scaling to the unit in the last place, so it shares no code with the RTL.

## Files

`rtl/kdb_pkg.sv` (constants and types), `kdb_bonsai_top`, `bonsai_sequencer`,
`zippts_buffer`, `zippts_codec`, `fp32_to_fp16`, `fp16_to_fp32`,
`sqdiff_fu`, `part_error_mem`, `fp32_addsub`, `fp32_mul`, `vec_sqdiff_unit`.
Testbenches are in `tb/`.
