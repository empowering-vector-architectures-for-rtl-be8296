# CAMP: an outer-product matrix-multiply unit for vector lanes

CAMP (Cartesian Accumulative Matrix Pipeline) is a functional unit for vector
processors. It speeds up quantized (8-bit and 4-bit integer) matrix
multiplication. A normal vector ALU works element by element. Building one
outer product from it costs broadcasts, extra registers and many
multiply-add instructions. CAMP computes the outer products itself. One
instruction takes two vector registers and does three things:

- it multiplies a 4x16 slice of A by a 16x4 slice of B, or 4x32 by 32x4 in
  4-bit mode;
- it adds all the products that belong to each element of the 4x4 result;
- it accumulates that 4x4 tile of 32-bit sums in an auxiliary register that
  stays inside the unit.

This matches the inner loop of GotoBLAS-style GEMM libraries with a 4x4
register block (m_R = n_R = 4). The loop over the reduction depth k becomes
one `camp` instruction per 16 (or 32) values of k, and the result is stored
once at the end.

The multipliers are *hybrid*: each 8-bit multiplier is made of four 4-bit
multipliers plus shifters and adders. Halving the element width doubles the
elements per register, so an outer product has four times as many products.
Splitting each 8-bit multiplier into its four 4-bit parts gives exactly that
factor of four. 4-bit data therefore runs on the same hardware at twice the
depth per instruction, with no packing or unpacking.

This repository holds synthesizable SystemVerilog for the unit at its
published size: 512-bit vector registers and 8 lanes. It also has self-checking
testbenches for every module.

## The `camp` operation

```
camp(VR0, VR1, VR2, mode)      VR0 (aux) = [VR0 +] A(VR1) x B(VR2)
```

| mode | A in VR1             | B in VR2          | k per op | result              |
|------|----------------------|-------------------|----------|---------------------|
| INT8 | 4x16, column-major   | 16x4, row-major   | 16       | 4x4 x int32         |
| INT4 | 4x32, column-major   | 32x4, row-major   | 32       | 4x4 x int32         |

Element `e` of a register sits at bits `[w*e + w-1 : w*e]`, with `w` = 8 or
4. In A, element `e = k*4 + r` is `A[r][k]`. In B, element `e = k*4 + c` is
`B[k][c]`. So both operands are just consecutive 4-element groups, one group
per value of k. All elements are two's complement. The result element
`C[r][c]` is at bits `[32*(c*4+r) +: 32]`, so the result is column-major.

A typical micro-kernel for one 4x4 tile of C looks like this:

```
for (s = 0; s < ceil(kc/16); s++) {           // INT8; 32 for INT4
    a = load 64 bytes of packed A;  b = load 64 bytes of packed B;
    camp(acc, a, b, INT8, acc_init = (s == 0));
}
store acc (16 x int32)
```

The hardware has no notion of "clear". Instead, each operation carries an
`acc_init` bit. When it is set, the sum of that op *replaces* the auxiliary
register. When it is clear, the sum is added.

## How the work is spread over the lanes

The 512-bit operands are cut into eight 64-bit slices, and slice `l` goes to
lane `l`. Because A and B both keep the 4 values of one k together, every
lane gets whole values of k:

- **INT8**: lane `l` holds `k = 2l, 2l+1`. That is two columns of A (4 bytes
  each) and the two matching rows of B.
- **INT4**: lane `l` holds `k = 4l .. 4l+3`.

Every lane computes its part of the 4x4 tile, `sum over its k of A[r][k]*B[k][c]`.
This takes 16 *intra-lane adders*, one per output element. The 16
*inter-lane accumulators* then add the same element index across all 8
lanes and add the total into the auxiliary register. No data moves between
lanes before this final reduction.

## Inside a lane: two halves and 32 hybrid multipliers

Each lane splits its 64 bits of A and of B into two 32-bit halves, h = 0 and
h = 1. Multiplier `m = h*16 + i*4 + j` multiplies byte `4h+i` of A by byte
`4h+j` of B. Each half is therefore a complete 4x4 outer product of 4 bytes
by 4 bytes, and the two halves use 32 multipliers.

**INT8.** A byte is one element. Half h is `A[.][2l+h]` times `B[2l+h][.]`,
which is one rank-1 update of the tile. Intra-lane adder (r, c) adds
product `r*4+c` of half 0 and of half 1.

**INT4: the subtle part.** A byte now holds two 4-bit elements, element
`2j` in the low nibble. Each hybrid multiplier returns its four 4x4-bit
sub-products separately, not their shifted sum. Byte `4h+i` of A holds nibbles
`2i` and `2i+1` of the half, and byte `4h+j` of B holds nibbles `2j` and
`2j+1`. So the four sub-products of multiplier (h, i, j) form the 2x2 outer
product of those nibble pairs. Together the 16 multipliers of a half form the
full **8x8 outer product** of the half's 8 A-nibbles and 8 B-nibbles. That is
64 products per half and 128 per lane.

In the layout above, half h of a lane holds two values of k:

- A nibble `2i+p` is `A[2*(i%2)+p][2h + i/2]`;
- B nibble `2j+q` is `B[2h + j/2][2*(j%2)+q]`.

A product belongs to the matrix product only if its A column equals its B
row, that is, if `i/2 == j/2`. That holds for half of the 8x8 outer product.
The other half pairs different k and is computed but not used. Intra-lane
adder (r, c) therefore adds four sub-products, for `h` in {0,1} and `kk` in
{0,1}:

```
multiplier h*16 + (2kk + r/2)*4 + (2kk + c/2),  sub-product 2*(r%2) + (c%2)
```

Per lane that is 2 x 16 = 32 INT8 multiply-adds per cycle, or 4 x 16 = 64
useful INT4 multiply-adds. The whole unit does 256 INT8 or 512 INT4
multiply-adds per operation.

## The hybrid multiplier

With `A = a1*16 + a0` and `B = b1*16 + b0`:

```
P = (a1*b1) << 8  +  (a1*b0 + a0*b1) << 4  +  a0*b0
```

`camp_hybrid_mult` has four 4-bit sub-multipliers (`camp_sub_mult`). One
adder sums the two cross products, which are then shifted by 4. The high
product is shifted by 8. A final adder forms the 16-bit product. The same
scheme can be repeated to build wider multipliers from 8-bit ones, but this
design stops at one level: 8-bit from 4-bit.

Signed data needs care, because in a signed byte only the high nibble
carries the sign. Each sub-multiplier therefore takes one `signed` flag per
operand. It widens the operand to 5 bits, using a copy of the top bit when the
flag is set and 0 when it is clear, and then forms a 5x5 signed product:

- In INT8 mode the high nibbles are signed and the low nibbles unsigned, so the
  decomposition gives the exact signed 8x8 product.
- In INT4 mode every nibble is signed, and the four sub-products are the four
  signed 4x4 products, each returned in 8 bits.

## Pipeline and timing

```
            cycle 0        1              2                 3                    4
 in_valid ──► [S1: op, A, B] ─► decode ─► [S2] ─► 32 mults + 16 adders ─► [lane regs] ─► 8-lane add ─► [aux] = vd
```

| stage | where               | what is registered                                   |
|-------|---------------------|------------------------------------------------------|
| S1    | `camp_lane`         | opcode bits (valid, mode, acc_init), A and B slices  |
| S2    | `camp_lane`         | decoded control, operands                            |
| S3    | `camp_lane`         | 16 intra-lane sums (18-bit signed)                   |
| S4    | `camp_inter_lane_acc` | auxiliary register, 16 x 32-bit                    |

- **Throughput** is one operation per cycle. There is no back-pressure
  (there is no ready signal).
- **Latency**: `vd_valid` goes high exactly 4 cycles after `in_valid`. At that
  point `vd` holds the auxiliary register, with that operation included.
- **Dependent accumulation never stalls.** The auxiliary register is a
  single-cycle read-modify-write at the end of the pipe, so operations of
  one tile can be issued back to back. A new tile can also start in the very
  next cycle: its first op has `acc_init` set.
- The 32-bit sums wrap. An INT8 product is at most 2^14 in magnitude, so a
  single tile overflows only past k = 131072.
- **Reset** (`rst_n`, active low, asynchronous) clears the control registers
  and the auxiliary register. The data pipeline registers are not reset.
- `vd` always shows the auxiliary register; `vd_valid` marks the cycles in
  which it has just been updated.

## Top-level ports (`camp_unit`)

| port          | dir | width | meaning                                             |
|---------------|-----|-------|-----------------------------------------------------|
| `clk`, `rst_n`| in  | 1     | clock, asynchronous active-low reset                |
| `in_valid`    | in  | 1     | issue one `camp` operation this cycle                |
| `in_mode`     | in  | 1     | `camp_pkg::MODE_INT8` (0) or `MODE_INT4` (1)         |
| `in_acc_init` | in  | 1     | first op of a tile: load instead of accumulate      |
| `vs1`         | in  | VLEN  | A operand (VR1)                                      |
| `vs2`         | in  | VLEN  | B operand (VR2)                                      |
| `vd_valid`    | out | 1     | `vd` was updated by an op                            |
| `vd`          | out | VLEN  | 4x4 int32 tile (VR0), column-major                   |

Parameters: `NLANES` (default 8) and `VLEN = NLANES*64` (default 512). The
lane width (64 bits), the tile (4x4) and the result width (32 bits) are
constants in `camp_pkg`. With fewer lanes, each op has a proportionally
smaller k. The 512-bit result is then cut to `VLEN` bits, so shrinking the
unit is meant for experiments only. The host processor is not part of this
RTL. Its vector register file supplies `vs1`/`vs2` and takes `vd`, and its
issue logic drives `in_valid`, `in_mode` and `in_acc_init`.

## Files

| file                               | contents                                            |
|------------------------------------|-----------------------------------------------------|
| `rtl/camp_pkg.sv`                  | constants, `camp_mode_e`, `camp_op_t`, element types |
| `rtl/camp_sub_mult.sv`             | 4-bit sub-multiplier with per-operand sign control  |
| `rtl/camp_hybrid_mult.sv`          | 8-bit / 4x 4-bit hybrid multiplier                  |
| `rtl/camp_outer_product.sv`        | 32 hybrid multipliers of one lane                   |
| `rtl/camp_intra_lane_adders.sv`    | 16 per-element adders of one lane                   |
| `rtl/camp_lane.sv`                 | lane pipeline around the two above                  |
| `rtl/camp_inter_lane_acc.sv`       | cross-lane adders and auxiliary register            |
| `rtl/camp_unit.sv`                 | top level                                           |
| `tb/camp_tb_pkg.sv`                | reference model (matrix product from the layout)    |
| `tb/tb_*.sv`                       | one self-checking testbench per module, plus `tb_camp_gemm` |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends itself. It also
has a watchdog that records a failure if the run hangs. Run from the
repository root, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/camp_pkg.sv tb/camp_tb_pkg.sv tb/tb_camp_unit.sv --top-module tb_camp_unit
./obj_dir/Vtb_camp_unit
```

The reference model in `tb/camp_tb_pkg.sv` computes `C = A*B` directly from
the element layout described above. It does not depend on the multiplier
numbering, so the testbenches check the hardware's index arithmetic rather
than repeating it.

- `tb_camp_sub_mult`, `tb_camp_hybrid_mult`: exhaustive over all operand
  values and both modes.
- `tb_camp_outer_product`: every product and sub-product, on random and
  extreme operands.
- `tb_camp_intra_lane_adders`: the lane's 16 sums against its slice of the
  matrix product.
- `tb_camp_lane`: random op streams with idle cycles. It checks the 3-cycle
  latency and that control and data stay aligned.
- `tb_camp_inter_lane_acc`: random load, accumulate and idle patterns,
  including a long tile that wraps the 32-bit accumulators.
- `tb_camp_unit` (default size): random tiles that mix INT8 and INT4, with
  mode switches, back-to-back issue and idle cycles. It checks the 4-cycle
  latency and every result. It ends with a tile of 8300 operations that
  drives the accumulators past 2^31. It counts each of these behaviours and
  fails if one never happened.
- `tb_camp_gemm` (default size): runs the micro-kernel for one output tile at
  each distinct reduction depth of the evaluated CNN layers and square
  matrices (k = 27 ... 4608), in both modes. It compares against an exact
  64-bit reference, so an overflow would be caught. It also checks that
  `ceil(k/16)` (or `ceil(k/32)`) ops finish in `ops + 3` cycles. It then runs
  complete 32x32x32 and 64x64x64 products in both modes, one tile after
  another with no idle cycle between tiles, and checks every element of C.

`camp_unit` also holds assertions. They check that each result arrives
exactly 4 cycles after its issue, that idle slots give no result, and that
all lanes stay in lockstep. Build with `--assert` to enable them.

## Workloads

The unit holds one 4x4 output tile, and software tiling covers any m, n and
k. So capacity is only a question of the 32-bit accumulators. The deepest
reduction among the evaluated CNN layers is k = 4608. In INT8, that gives
|C| <= 4608 * 128 * 128 ~ 7.5e7, well below 2^31. The transformer layers
(hidden sizes 768 to 1280, feed-forward sizes up to 5120) also stay far below
the limit. A full layer costs `ceil(m/4)*ceil(n/4)*ceil(k/16)` INT8
operations, or `ceil(k/32)` per tile in INT4, at one operation per cycle.

## What follows the original architecture, and what is chosen here

Taken from the architecture:

- 512-bit registers over 8 lanes of 64 bits;
- A column-major and B row-major, with the 4x16 / 16x4 and 4x32 / 32x4
  shapes;
- the two 4x4 outer products per lane on 32 hybrid multipliers, and the
  8x8 outer products of 4-bit data on their 128 sub-multipliers;
- the 4-bit building block and the shift-and-add composition;
- the 16 intra-lane adders and the 16 inter-lane accumulators;
- the auxiliary register holding the 4x4 int32 tile across the k loop;
- the lane drawn as two operand register stages with a decode step between
  them, in front of the ALU.

Chosen here, because the source leaves them open:

- **Signed arithmetic.** 8-bit data is signed in the source. Treating 4-bit
  data as signed, and the 5-bit widening that splits signed bytes, are
  choices made here.
- **4-bit product selection.** The source names the 8x8 outer product but not
  which of its products are summed. Here they are selected by matching k, as
  matrix multiplication requires.
- **Nibble order.** Element 0 is in the low nibble.
- **Result order.** Column-major, following the GEMM libraries' output
  convention.
- **Control interface.** The `acc_init` bit, the valid-only issue interface,
  the mode encoding, the pipeline depth and latency, the 18-bit intra-lane
  sums, 32-bit wrap-around, and the reset scope.
- **Register placement.** The products themselves are not registered
  separately. The lane registers the 16 intra-lane sums, and these serve as
  the per-lane inputs of the inter-lane accumulator.
- **Inter-lane adders.** They are drawn as a chain between output indices.
  Here each index has its own independent adder tree, since no result
  depends on another index.

Not included:

- the host processor, its vector register file and its issue logic;
- any other function of the vector ALU that this unit would sit in or
  replace.
