# GTA compute fabric: one 8-bit systolic array for every integer precision

A vector processor usually has a separate multiply-accumulate unit for each
element width (8, 16, 32 and 64 bit). Any one workload uses only one of them,
so most of that area sits idle. The General Tensor Accelerator (GTA) instead
puts a single array of 8-bit multipliers in each vector lane. It builds every
wider multiply out of 8-bit pieces.

This works because a long multiplication is a small matrix product. Split
`X` and `Y` into 8-bit *limbs*. Every limb of `X` must meet every limb of `Y`,
and the products are summed with shifts. A systolic array already computes
this kind of all-pairs product-and-sum. One array therefore serves three uses:

* **p-GEMM.** This is matrix multiplication of any size and precision. It runs
  in weight-stationary (WS), input-stationary (IS) or output-stationary (OS)
  dataflow.
* **Vector (SIMD) operations.** Blocks of PEs act as independent wide
  multipliers.
* **One big array.** The arrays of all lanes can be chained into one large
  systolic array. A control register sets its shape and splits it into
  independent parts.

This repository has synthesizable SystemVerilog for that compute fabric, plus
self-checking testbenches. It does not include the vector processor around
the fabric: register files, load/store unit, instruction sequencing and
floating-point handling. See [What is not here](#what-is-not-here).

## Contents

| file | what it is |
|---|---|
| `rtl/gta_pkg.sv` | shared constants, enums and bus structs |
| `rtl/mpra_pe.sv` | 8-bit processing element (PE) |
| `rtl/mp_acc_unit.sv` | shift-add unit that combines four limb products |
| `rtl/mpra_simd_unit.sv` | SIMD mode: spreads operands to the PEs and combines their products |
| `rtl/mp_accumulator.sv` | shift-add accumulator under the array columns (WS/IS/OS) |
| `rtl/mpra.sv` | one lane's 8x8 Multi-Precision Reconfigurable Array (MPRA) |
| `rtl/sys_csr.sv` | systolic control register: layout, mode, lane masks |
| `rtl/slide_unit.sv` | links between lanes, with mask matching |
| `rtl/gta_top.sv` | top: 16 lanes of MPRA, the control register and the slide unit |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Limb arithmetic

An `n`-limb operand (`n` = 1, 2, 4, 8 for INT8/16/32/64) is sent least
significant limb first. The product of limb `i` of `X` and limb `j` of `Y`
carries weight 2^(8(i+j)).

**Signed numbers.** Each limb travels with a sign flag. It is set only on the
most significant limb of a signed operand. Each PE has a 9x9 signed
multiplier, and the flag decides whether bit 7 is sign-extended. The sum of
the shifted limb products is then the exact two's-complement product, with no
correction step.

**The shift-add unit (`mp_acc_unit`).** It takes the four products of two
2-limb numbers `{X2,X1}` and `{Y2,Y1}` and returns the full product as W-bit
slices:

```
P1 = LSB(X1Y1)
a  = LSB(X2Y1) + MSB(X1Y1)
b  = MSB(X1Y2) + MSB(X2Y1)
P2 = LSB(X1Y2) + a            -> carry into P3
P3 = LSB(X2Y2) + b + carry    -> carry into P4
P4 = MSB(X2Y2) + carry
```

With W = 8 this is a 16-bit multiplier made from four 8x8 products. SIMD
mode stacks these units in a tree to reach 32 and 64 bits:

* sixteen W=8 units
* four W=16 units
* one W=32 unit

## One lane: the 8x8 MPRA

Data moves through the array in three directions:

* Inputs (`xbus_t`) move **right**, one PE per cycle.
* Partial sums (`pbus_t`) move **down**.
* In OS mode, weights (`wbus_t`) also move down.

Every PE output is a register. Each PE holds three operand registers and a
mode register. The mode register takes the lane's mode one cycle late.

### WS and IS

Each row of PEs holds one row of the stationary matrix, and `n` columns hold
one `n`-limb value. One MPRA therefore holds an `8 x 8/n` stationary matrix.
`wload_en[r]` writes PE row `r` from `wload_d`, one limb per column. IS uses
exactly the WS datapath; the only difference is that the preloaded operand is
the input matrix.

Feeding rules:

* Input vector `m` enters row `r` limb-serially.
* Row `r` is delayed by `r` cycles, the usual systolic skew.
* Limb `i` of vector `m` enters row `r` at cycle `m*n + i + r`.
* Each limb carries a tag `{vld, limb index}`. The partial sum takes over that
  tag, so the accumulator below knows the weight of every value it receives.

Column `c` therefore delivers `sum_r X_r[i] * W_r[j]`, where `j = c mod n`.
The accumulator (`mp_accumulator`) works as follows:

1. It shifts each column value by `8(i+j)`.
2. It adds up the `n` limbs of one vector per column.
3. One cycle after the last column of a group finishes, it adds the `n`
   column totals.

This gives one full-precision dot product per column group every `n` cycles,
so the array keeps up with a new vector every `n` cycles.

**Latency:** the first result appears `2n + R` cycles after the first limb
enters, where `R` is the number of PE rows in the chain.

### OS

Feeding rules:

* Row `r` receives limb `r mod n` of left-matrix row `r / n`, one K step per
  cycle, delayed by `r` cycles.
* Column `c` receives limb `c mod n` of right-matrix column `c / n`, delayed
  by `c` cycles.
* `clear`, given on the first cycle of a tile, restarts all accumulators.

Each PE accumulates in place. One MPRA holds an `8/n x 8/n` output tile.

To read the tile out, hold `drain` for as many cycles as there are PE rows in
the chain. The PE registers then shift down the columns, **bottom row first**.
The accumulator numbers the rows as they leave, with limb index
`n-1 - (d mod n)`, and applies the same shift-add. Results come out one
block-row of the tile every `n` cycles, starting with the last block-row.

### SIMD

Every `n x n` block of PEs multiplies one pair of elements, so one lane
handles `64/(n*n)` elements per cycle:

| precision | elements per lane per cycle |
|---|---|
| INT8 | 64 |
| INT16 | 16 |
| INT32 | 4 |
| INT64 | 1 |

Against a 64-bit lane datapath that does 8, 4, 2 and 1 elements, this gives
8x, 4x, 2x and 1x more throughput.

Element `e` sits in the 512-bit operand vectors at bits `e*8n +: 8n`. The
supported operations are MUL, MAC (`c + a*b`), ADD and SUB. Each returns the
low `8n` bits of its result. Results come two cycles after `simd_vld`, and a
new vector can start every cycle.

**Per-quadrant operations.** The operation is chosen separately for each
4x4 quadrant of the array, through `simd_op[q]`:

| `q` | quadrant |
|---|---|
| 0 | top-left |
| 1 | top-right |
| 2 | bottom-left |
| 3 | bottom-right |

At INT32 each quadrant is exactly one element, so one lane can run four
different operations in the same cycle, such as Mul, Add, MAC and Sub. At
INT8 and INT16, every element in a quadrant uses that quadrant's operation.
The single INT64 element uses `simd_op[0]`. For an ordinary vector
instruction, set all four entries to the same operation.

### Mode switching

The PEs and the accumulator each register the mode once. A new mode
therefore applies to data that enters one cycle after the mode changes. The
top adds one more cycle for the control-register write. Leave two idle
cycles after a write before sending operands.

## Many lanes: layout, mode and masks

The systolic control register (`sys_csr`) has three fields:

| field | width | meaning |
|---|---|---|
| Global Layout | 2 bits | the lanes form a grid of `1 << layout` lane rows, filled row by row |
| Systolic Mode | 2 bits | SIMD / WS / IS / OS |
| Lane Partition | 2 bits per lane | one mask value per lane |

With 16 lanes the layouts are 1x16, 2x8, 4x4 and 8x2 lanes. These give
8x128, 16x64, 32x32 and 64x16 PEs.

A write updates all fields at once. In the next cycle the masks and mode are
copied into the lanes.

The slide unit (`slide_unit`) connects each lane:

* to the lane on its left in the grid, for inputs;
* to the lane above it, for partial sums and, in OS mode, weights.

A link is made only where **both lanes hold the same mask value**. At a
mismatch, or at the edge of the grid, the lane takes its own edge operands
instead (`edge_west_x`, `edge_north_w`, zero partial sum). This is how the
lanes split into independent sub-arrays.

* **Results:** only lanes with no link below them hold final results. They
  are marked in `bottom_lane`, and `acc_vld` is masked off on all other lanes.
* **SIMD mode:** no links are made.
* **Row numbering:** rows are counted across the whole chain. For example, in
  a 2x8 layout, row 12 is row 4 of the lower lane row, and its inputs enter
  at the west edge of that lane row with skew 12.

## Top-level interface (`gta_top`)

Parameters: `NUM_LANES = 16` and `MASK_W = 2`. The fabric has 1024 PEs in
total.

| ports | purpose |
|---|---|
| `csr_we, csr_layout, csr_mode, csr_mask[]` | write the control register |
| `prec` | element precision (`prec_e`, `n = 1 << prec`) |
| `edge_west_x[lane][row]`, `edge_north_w[lane][col]` | operands from each lane's register file; used only where the lane has no link on that side |
| `wload_en[lane]`, `wload_d[lane][col]` | load the stationary operand (WS/IS) |
| `clear`, `drain` | start an OS tile / read it out (sent to all lanes) |
| `simd_vld[]`, `simd_op[4]`, `simd_a/b/c[]`, `simd_res_vld[]`, `simd_res[]` | SIMD operands and results; one operation per array quadrant, shared by all lanes |
| `acc_vld[lane][g]`, `acc_res[lane][g]` | 136-bit signed result of column group `g` of a bottom lane |
| `cur_layout, cur_mode, cur_mask, cfg_load, west_link, north_link, bottom_lane` | read back the configuration and the links it produced |

Result groups: group `g` of lane `l` covers global column group
`(l mod C)*8/n + g`, where `C` is the number of lane columns. Results are
signed and exact: 136 bits holds a 64x64-bit product summed over 128 rows.

## Simulating

All testbenches are self-checking. Each ends with `TB_RESULT checks=N
failures=M`. With Verilator 5:

```
verilator --binary --timing -j 8 -y rtl rtl/gta_pkg.sv tb/tb_gta_top.sv --top-module tb_gta_top
./obj_dir/Vtb_gta_top
```

Replace `tb_gta_top` with any other testbench name. Every testbench checks
against plain integer arithmetic:

| testbench | what it checks |
|---|---|
| `tb_mp_acc_unit` | random operands against `X*Y`, W = 8 and 16 |
| `tb_mpra_pe` | WS, OS and SIMD behaviour of a single PE, signed and unsigned |
| `tb_mpra_simd_unit` | all precisions and operations, uniform and mixed per quadrant, latency and rate (the testbench acts as the PEs) |
| `tb_mp_accumulator` | WS/IS tagged streams and OS drains at all precisions |
| `tb_mpra` | one MPRA: WS, IS, OS and SIMD at INT8 to INT64, signed and unsigned, latency `2n+8` |
| `tb_sys_csr` | write and load timing of the control register |
| `tb_slide_unit` | random layouts, modes and masks against a grid model, including the 01/01/10 mask example |
| `tb_gta_top` | full 16-lane fabric at default parameters (see below) |
| `tb_gta_workloads` | application kernels on the full fabric (see below) |
| `tb_gta_4lane` | the same phases as `tb_gta_top` on a 4-lane fabric (`NUM_LANES = 4`): layouts 2x2, 1x4 split by masks, and 4x1 |

`tb_gta_top` runs the full 16-lane fabric through five phases:

1. WS INT16 on 2x8 lanes (K=16, 32 outputs, latency `2n+16`).
2. Two mask partitions of 1x16 lanes running WS INT8 at the same time.
3. OS INT32 on 4x4 lanes, drained through four lanes.
4. Signed IS INT64 on 8x2 lanes (K=64).
5. SIMD MAC/SUB/MUL/ADD on all lanes, plus one INT32 pass with a different
   operation in each quadrant.

It counts each mechanism it used (layout switch, mask mismatch, WS, IS, OS
drain, SIMD, mixed-quadrant SIMD, each precision) and fails if any count is
zero. Building takes
about half a minute; the run takes well under a second.

`tb_gta_workloads` runs five small integer kernels on the full fabric. Each
kernel is turned into a matrix product, and each result is checked against
the kernel computed directly:

| kernel | precision and mapping | size |
|---|---|---|
| sRGB to XYZ colour conversion | unsigned INT8, WS on 1x16 lanes | 3x3 matrix in Q1.7, 32 pixels |
| feed-forward equaliser (FIR filter) | signed INT16, WS on 2x8 lanes | 16 taps, 48 outputs |
| Gram matrix `A*A^T` (the first step of a Cholesky decomposition) | signed INT32, OS on 4x4 lanes | `A` is 8x16 |
| convolution layer, lowered with im2col | signed INT8, WS on 8x2 lanes | 7x6x6 input, 16 kernels of 7x3x3 |
| big-number multiplication | unsigned INT64, WS on 1x16 lanes | four 512x512-bit products |

In the big-number case the 64-bit words of one factor form a Toeplitz weight
matrix. Column `q` then returns the exact sum of all word products whose
indices add up to `q`. The testbench does the final carry pass, as software
would, and compares the result with a 1024-bit product. The kernel sizes
were chosen here so that each fits one array tile.

## How far to trust it

**Checked by simulation:**

* every dataflow at every integer precision, signed and unsigned, against
  exact integer results;
* the lane links for every layout;
* WS latency and SIMD throughput.

**Taken directly from the architecture description:**

* the 8-bit PE, the 8x8 array per lane and the 16-lane example;
* the three control-register fields and the 2-bit width of the first two;
* the mask match rule: equal masks permit data to pass, unequal masks block
  it;
* the structure of the shift-add unit;
* which operands move between lanes in each mode: inputs and partial sums in
  WS/IS, three operand sets in OS.

**Choices made here (not from the source), each noted in its file's header:**

* the enum encodings, including layout = log2(lane rows);
* sign flags on limbs, and the limb tag carried with the data;
* the 24-bit partial-sum width;
* the per-column shift-add followed by a group adder;
* OS clear/drain control and the bottom-first drain order;
* the SIMD operand placement, the low-half result and the quadrant
  numbering;
* the one-cycle mask load;
* the separate `prec` input.

**Differences from the source to be aware of:**

* The source shows the four quadrants of one MPRA running four different
  INT32 operations at once. It does not say how the operations are chosen.
  Here they come from a four-entry `simd_op` port that all lanes share. The
  source also does not say which quadrant's operation an INT64 element
  follows; here it is quadrant 0.
* The source states that each PE has a "centrally controlled finite state
  machine" but does not describe it. Here the PEs are steered by the
  broadcast mode and the `clear`/`drain` signals.
* The evaluated configuration in the source has 4 lanes, while its
  architecture figures use 16. The default here is 16. Set `NUM_LANES = 4`
  for the smaller configuration; the layouts then become 1x4, 2x2 and 4x1.
  `tb_gta_4lane` tests that configuration.
* Timing closure (1 GHz in 14 nm in the source), area and power are not
  reproduced.

## What is not here

These parts are outside this fabric and are not modelled:

* the per-lane vector register file;
* the load/store unit and memory interconnect;
* the lane sequencer that issues instructions and writes the control
  register;
* the lane ALU for non-multiply vector instructions;
* the floating-point pre- and post-processing (alignment, normalization,
  rounding) around the mantissa multiply.

This means **floating-point operations are not supported**, although an
integer mantissa product up to 64 bits can be formed. Choosing the dataflow,
tile shape and masks for a given operator ("dataflow pattern matching") is a
software task. Its results are simply the contents of the control register.

## Changing it

* **Lane count.** `NUM_LANES` can be any value. Layouts that would need more
  rows than there are lanes fall back to a single column.
* **Mask width.** `MASK_W` sets how many distinct partitions the masks can
  express.
* **Array size and datapath widths.** The array size (`MPRA_DIM`), limb width
  and partial-sum/result widths are package constants. Only 8x8 with 8-bit
  limbs is verified; the SIMD tree and the 3-bit limb tags assume it.
* **Tall chains.** If you chain more than 128 PE rows, widen `PSUM_W`.
