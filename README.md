# Schur-elimination engine for bundle adjustment

Bundle adjustment refines camera poses and 3D points together by
Levenberg–Marquardt. In each iteration the normal equations are reduced to a
system in the camera parameters only, by Schur elimination over the points.
For `b` cameras that reduced system has a dense `6b × 6b` matrix **S** and a
`6b` vector **r**. Forming them is the costly step, and this RTL does it in
hardware. Software on a host CPU still computes the Jacobians and solves the
reduced system. It streams the per-point Jacobian data in and gets **S** and
**r** back.

The main idea is to size the processing elements by co-observation. The
co-observation count `CO_i` of a point is the number of cameras that see it.
The work for a point grows with `CO_i²`, and in real data most points are seen
by only two or three cameras. So the engine has two processing elements (PEs):

* a small one for points with few observations (`MAX_CO = 10` here);
* a large one for points with many observations (`MAX_CO = 50`).

Each PE has two S-processing units (SPUs). The host picks the PE for each
point.

## What is computed

For point `i`, observation `j` carries:

* the 2×3 point Jacobian `Jp`;
* the 2×6 camera Jacobian `Jc`;
* the 2-entry residual `eps`.

The header carries the 3 damping values `dp` for the point's diagonal. Per point:

```
U   = diag(dp) + Σ_j Jp_jᵀ Jp_j         (3×3)
g   = Σ_j Jp_jᵀ eps_j                   (3)
W_j = Jc_jᵀ Jp_j                        (6×3, one per observation)
S[j][j] += Jc_jᵀ Jc_j ;  r[j] += Jc_jᵀ eps_j
inv = U⁻¹
X_j = −W_j · inv                        (6×3)
S[a][b] += X_a · W_bᵀ   for every pair a ≤ b of the point's cameras
r[a]    += X_a · g
```

Once all points have been processed, the host-supplied `μ·D` terms are added
to the diagonal of **S**. The engine then streams out **S** (upper block
triangle) and **r**.

## Processing element: four stages

Each `se_pe` is a four-stage pipeline working on up to four points at once:

| stage | module | work | clocks per point |
|---|---|---|---|
| 1 | `se_stage1` | U, g, W rows, per-camera diagonal blocks and r' | 37·CO (36 compute + 1 record accept per observation) |
| 2 | `se_stage2` | 3×3 inverse by adjugate / determinant, one reciprocal | 70 |
| 3 | `se_stage3` | X = −W·inv, plus a copy of W for stage 4 | 36·CO |
| 4 | `se_stage4` | Q SPUs for the S blocks, one unit for r | ⌈18·CO(CO+1)/Q⌉ |

The stages move forward together. When every occupied stage is done, each
point moves one stage on. This is a coarse pipeline, and it is simple to
verify. Its cost is that a fast stage waits for the slowest one, which is
stage 4 for any CO above 2. The PE counts the moves in which some stage was
empty as "bubbles".

Three W banks and two X/Wᵀ banks keep the stages from overwriting each other's
data:

* stage 1 writes the W rows;
* stage 3 reads W and writes X and Wᵀ;
* stage 4 reads X and Wᵀ.

A new point takes the next bank of each kind.

**Stage 1** runs four multiply-add units on a fixed 36-clock schedule per
observation. Two units build U/g and W. The other two accumulate the 21
upper-triangle entries of `Jcᵀ Jc` and the 6 entries of `Jcᵀ eps` into
per-camera RAMs. Those sums never need the point's inverse, so they are kept
in stage 1 rather than in **S**.

**Stage 2** inverts U using the adjugate and the determinant. There is no
square root, and the only division is one reciprocal of the determinant,
done by a 28-bit restoring divider (`fp_recip`). One multiply-add unit works
the whole sequence, which is padded to exactly 70 clocks.

**Stage 4 and the SPUs.** The work for a point is a set of entries: 36 for each
block pair `(a, b)` with `a ≤ b`. Each entry is a 3-term dot product. SPU
`LANE` of `Q` takes entries `LANE, LANE+Q, …`. Each SPU owns a full copy of
the S upper block triangle (`mem_s`: `b(b+1)/2 · 36` words, 45,900 at
`b = 50`) and does a read-modify-write on it, one entry per clock. So
duplicating SPUs divides stage-4 time by Q and multiplies S storage by Q. The
block for cameras `j1 ≤ j2` lives at
`36 · (j1·b − j1(j1−1)/2 + j2 − j1)`, row-major inside the block.

## Accumulation and output

`accumulation_unit` walks the upper block triangle and, for each S word, adds
these terms in sequence on one adder:

* the word from every SPU copy of every PE;
* the stage-1 diagonal-block sum, on diagonal blocks;
* `μ·D`, on the diagonal.

It does the same for **r** (stage-1 r' plus stage-4 r). Each word goes to the
output FIFO as it is finished. `m_last` marks the final r word.

## Stream format (32-bit words, `s_data`)

| word | content |
|---|---|
| `START` | opcode 1 in [31:24], `b` in [5:0]: clears every RAM |
| `CAMD` | opcode 2, camera in [5:0], then 6 floats of μ·D |
| `POINT` | opcode 3, PE in [8], CO in [21:16], then 3 floats dp, then CO records of 21 words: camera, Jp (6, row-major), Jc (12, row-major), eps (2) |
| `FLUSH` | opcode 4: once the PEs are idle, sum and send S then r |

Observations of a point must come in ascending camera order. An assertion
checks this. A point with CO = 0, or with CO above the chosen PE's limit, is
read and dropped, and the sticky flag `err_co` is set.

Output order:

* S blocks for `j1 = 0..b−1`, `j2 = j1..b−1`, 36 words each;
* then r, 6·b words.

## Arithmetic

Values are IEEE binary32, computed by this design's own functions in
`pba_pkg`. Rounding is to nearest even and subnormals are flushed to zero.
There is no NaN or infinity handling. Results match a double-precision
reference to about 1e-4 relative.

## Top level and parameters

`pi_ba_top` connects `input_buffer` (a FIFO plus the parser) → two `se_pe` →
`accumulation_unit` → `stream_fifo` (the output buffer). Its parameters:

* `NPE = 2`;
* `Q = 2`;
* `PE_MAX_CO = '{10, 50}`;
* `NCAM = 50`;
* FIFO depths of 64.

Every dataset of 16 to 50 images fits. Points are not stored, so their number
is unlimited.

## Departures from the described architecture

* Stage 1 spends one extra clock per observation to accept its record, so it
  takes 37·CO clocks instead of 36·CO.
* The stages advance in lock-step. A finer handshake between stages would
  remove some bubbles.
* The host interface (CPU, DMA, DDR) is replaced by the word streams above.
* The split between the small and large PE (10/50) is a design choice.
* The host chooses the PE for each point.
* Multiply-add units are combinational, so there are no operator pipeline
  registers and a real FPGA build would need deeper timing work.
* The assertions use `disable iff (!rst_n)`. Verilator reports this as
  asynchronous use of the reset net. It is only a simulation check.

## Verification

Each testbench is self-checking and prints
`TB_RESULT checks=N failures=M`:

* `tb_fp_mul_add`, `tb_fp_recip`: random operands against a double-precision
  model. Also checks the 30-clock reciprocal latency.
* `tb_stream_fifo`: random push/pop against a queue model.
* `tb_mem_s`: random read and write traffic.
* `tb_se_stage1`: U, g, W rows, camera list, per-camera sums and clear. Also
  checks the 37·CO latency.
* `tb_se_stage2`: random SPD matrices. Also checks the 70-clock latency.
* `tb_pi_ba_top`: the whole engine at its default parameters with `b = 12`.
  It runs 29 points over both PEs, with CO from 1 to 12, including one
  over-limit point that must be dropped, and random back-pressure on both
  streams. Every S and r word is compared with a double-precision reference.
  It counts pipeline overlap, stalls, bubbles, input and output back-pressure
  and dropped points, and fails if any of them never happens. It is also the
  test for `input_buffer`, `se_stage3`, `spu`, `se_stage4`, `se_pe` and
  `accumulation_unit`.

To run one test with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pba_pkg.sv tb/tb_fp_pkg.sv \
  tb/tb_ba_pkg.sv rtl/*.sv tb/tb_pi_ba_top.sv --top-module tb_pi_ba_top -o sim
./obj_dir/sim
```

`pba_pkg.sv` must come first on the command line. The reference models in
`tb/tb_fp_pkg.sv` convert between binary32 and double by hand.
