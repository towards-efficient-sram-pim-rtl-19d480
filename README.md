# DB-PIM: an SRAM compute-in-memory accelerator that skips zero bits in weights and inputs

A digital SRAM processing-in-memory (PIM) macro multiplies an input bit by
every stored weight bit at once. When a weight bit is zero, the cell that
holds it does no useful work. In a quantised network most weight bits are
zero, even in layers with few zero *weights*. The zero bits are scattered
without pattern, though, so a plain bit-parallel array cannot skip them.

DB-PIM turns that scattered bit-level sparsity into a regular structure that a
fixed array can exploit. It works on both operands.

**Weights.**
- Each INT8 weight is rewritten in canonical signed digit (CSD) form, which uses the digits -1, 0 and +1.
- The weights are then *approximated* so that every weight of one filter has exactly the same number of non-zero digits, the filter's threshold φ (1 or 2).
- CSD never has two adjacent non-zero digits. So if the eight digit positions are split into four aligned pairs ("dyadic blocks"), each non-zero digit lies alone in its block.
- A non-zero block is then one of only four patterns: `01`, `10`, `0-1` and `-10`.
- Each non-zero block is stored in a single SRAM bit. The bit records which half of the pair holds the digit.
- A small side memory records the block's sign and which of the four pairs it came from.
- Zero blocks are not stored at all. A φ=1 filter therefore needs 1 stored bit per weight instead of 8, and a φ=2 filter needs 2.

**Inputs.**
- Inputs enter the array bit-serially, 16 features at a time.
- A bit position that is zero in all 16 features of a group contributes nothing, so the input pre-processing unit skips it.
- A group whose features are all zero is dropped entirely.

The RTL in `rtl/` implements the accelerator at the size described for the
design: four 16 Kb macros, 272 KB of buffers, 8-bit weights and inputs. It
includes the controller, buffers, input pre-processing and SIMD write-back
around the macros. The testbenches in `tb/` check every block on its own and
the whole accelerator end to end.

## 1. Dyadic blocks

Write an 8-bit weight in CSD form, `w = Σ d_i 2^i` with `d_i ∈ {-1,0,1}` for
i = 0..7, and no two adjacent `d_i` non-zero. Pair the digits as blocks
b = 0..3, holding positions (2b+1, 2b). A non-zero block has exactly one non-zero
digit, and it is stored as three fields:

| field | bits | meaning |
|---|---|---|
| `Q` (in the macro) | 1 | 1: digit at position 2b+1 (pattern `10`); 0: digit at 2b (pattern `01`) |
| `sign` (meta RF) | 1 | 1: the digit is -1 |
| `idx` (meta RF) | 2 | block number b |

Its value is `(sign ? -1 : 1) · 2^(2·idx + Q)`. The 3-bit metadata word is
`{sign, idx[1:0]}` (`dbpim_pkg::meta_t`, sign in the top bit).

Example: -100 = -128 + 32 - 4 has CSD digits `-1 0 1 0 0 -1 0 0`, reading bit 7
down to bit 0. Its non-zero blocks are:
- block 3 = `-10`: Q=1, sign=1;
- block 2 = `10`: Q=1, sign=0;
- block 1 = `0-1`: Q=0, sign=1.

The FTA weight approximation picks, for each weight, the nearest INT8 value
whose CSD form has exactly φ non-zero digits (φ is per filter). So every
weight of a φ=1 filter is one block, and every weight of a φ=2 filter is two
blocks. A weight can never be zero. Filters with φ=0 (all-zero filters) would
simply not be mapped. This approximation, the choice of φ and the packing into
rows are offline steps; they are not hardware. The testbench package
`tb/tb_ref_pkg.sv` contains a reference version (`fta_approx`, `csd_blocks`,
`pack_row`) so the tests can produce realistic data.

## 2. The PIM macro (`pim_macro`)

One macro holds 16 compartments × 16 DBMUs × 64 rows = 16 Kb of `Q` bits.

- **Compartment c** receives input feature c of the current 16-input group. All
  its DBMUs see the same input bit and the same word line (row).
- **DBMU d** (dyadic-block multiply unit, `dbmu`) is a column of 64 cells plus a
  local processing unit. For the selected row it outputs
  `o_q = Q & in` and `o_qb = ~Q & in`: at most one of the two is set, and only
  when the input bit is 1.
- **DBMU column d across all 16 compartments** holds one block of 16 different
  weights of the same filter, multiplied by the 16 different inputs. It feeds
  **post-processing unit d** (`post_processing_unit`).

Row layout. The DBMUs form eight aligned pairs (2j, 2j+1). Each pair is set to
φ=1 or φ=2 on its own, so filters of both kinds can share the rows of one macro:

| pair j mode | DBMU 2j of compartment c holds | DBMU 2j+1 holds | filters on the pair |
|---|---|---|---|
| φ=1 | the block of filter 2j's weight for input c | the block of filter 2j+1's weight | 2 |
| φ=2 | the lower block of filter 2j's weight | its upper block | 1 |

A row thus carries between 8 filters (all pairs φ=2) and 16 (all φ=1).
Filters are named by the DBMU (and output lane) that delivers their result.

In the 256-bit weight row, bit `16c + d` is the `Q` of compartment c, DBMU d.
In the 768-bit metadata row, bits `3(16c+d)+2 : 3(16c+d)` are its `{sign, idx}`.

### 2.1 From LPU outputs to a signed term (`csd_adder`)

This is the part that replaces a multiplier. For one DBMU, the product of an
input bit (0 or 1) and the stored block is either 0 or `±2^(2·idx+Q)`. The CSD
adder builds it without ever reading `Q` directly:

1. `m = o_q | o_qb`. This is the input bit, or 0 when the input bit is 0.
2. `t = m << {idx, o_q}`. The shift amount is 3 bits: the block number doubled,
   plus 1 when the digit is the upper one. `o_q` is 1 exactly when `Q`=1 and the
   input is 1, so it stands in for `Q` whenever the term is non-zero. `t` is
   8 bits.
3. If `sign` is 1, the term is negated (invert, add 1). A mux picks the signed
   9-bit result.
4. Each CSD adder adds two such terms (compartments 2k and 2k+1) into 10 bits.

The **CSD-based adder tree** (`csd_adder_tree`) has eight CSD adders and sums
their outputs into a 13-bit signed value. The bound is 16 × 128 = 2048 in
magnitude.

Example: let the input bit be 1 for two compartments whose blocks are
block 2 = `10` (Q=1, sign=0) and block 3 = `-10` (Q=1, sign=1). The first
term is `1 << {2,1}` = `1 << 5` = 32. The second is `1 << {3,1}` = `1 << 7`
= 128, negated to -128. The CSD adder outputs -96.

### 2.2 Shift & Add, Accumulator, and φ=2 pairing

The tree result x is the filter's dot product for *one input bit position* b
(sent by the IPU with the column). The **Shift & Add** stage (`shift_add`)
updates the group's partial sum:

```
psum = (first ? 0 : psum) + (neg ? -x : x) << b
```

`neg` marks bit 7 of signed (two's-complement) inputs, which weighs -2^7.
Because each column carries its own absolute index b, the columns may arrive
in any order and any of them may be missing. Skipped all-zero columns cost
nothing.

One cycle after a group's last column, the **Accumulator** adds the finished
psum into the 32-bit per-filter accumulator. Accumulators are cleared at the
start of a MAC instruction unless its *keep* flag is set (section 4).

For a **φ=2** pair, a weight's two blocks sit in DBMUs 2j and 2j+1. Unit 2j
adds unit 2j+1's tree sum to its own before the Shift & Add (`pair_en`). The
filter's result is therefore accumulator 2j. Accumulator 2j+1 then holds a
meaningless partial value. The mode is one bit per pair and macro
(`phi2[m][j]`).

### 2.3 Macro pipeline

```
cycle n    : IPU presents column (bits, idx, row, first/last/neg); meta RF read issued
edge n     : column registered in the macro; meta RF data valid
cycle n+1  : word-line select, LPUs, adder trees (combinational)
edge n+1   : psum updated
edge n+2   : accumulator += psum   (only after the last column of a group)
```

Each of the four macros takes one column per cycle, so throughput is one bit
column per cycle. The macros hold different filters and all receive the same
broadcast column (`pim_core`). Per cycle that is 16 inputs × 16 filters × 4
macros at φ=1.

## 3. Input pre-processing unit (`ipu`)

The IPU takes 128-bit feature words (16 INT8 inputs of one group) and turns
them into the column stream.

- **Register file, 256 bits**: two group entries used alternately. One is
  loaded while the other is being sent. `free_cnt` tells the controller how many
  entries are free.
- **Zero detection** (`zero_detect`): an 8-bit mask, with bit b set when any of
  the 16 inputs has bit b set.
- **Leading-one detection** (`leading_one_detect`): picks the highest mask bit
  not yet sent. The **input selection** takes that bit from each of the 16
  inputs as the column.
- The column goes out tagged with `idx = b`, `first`, `last`, `neg` (b = 7 and
  signed inputs) and the macro row the group was loaded for.
- A group whose mask is zero is dropped in one cycle (`grp_skip`) and sends no
  column.

A dense group costs 8 cycles. A group of small values (say 0..15) costs 4. An
all-zero group costs 1. The controller needs two cycles from issuing a feature
read to the load, so groups shorter than two columns leave bubbles.

## 4. Controller and instruction set (`top_ctrl`)

Instructions are 32-bit words in the instruction buffer. The opcode is in bits
[31:28].

| op | code | fields | action |
|---|---|---|---|
| HALT | 0 | – | stop, raise `done` |
| CFG | 1 | [3:0] all pairs of macro m φ=2, [4] signed inputs, [5] ReLU, [10:6] shift | set modes |
| LDW | 2 | [27:26] macro, [25:20] first row, [19:13] rows, [9:0] weight-buffer address | copy weight rows into a macro |
| LDM | 3 | same as LDW, meta-buffer address | copy metadata rows into that macro's meta RF |
| MAC | 4 | [27:22] first row, [21:15] groups, [14] keep, [12:0] feature address | run `groups` consecutive feature words; group g uses macro row first+g |
| ST | 5 | [12:0] feature address | requantise the captured accumulators of all four macros, write 4 words |
| PHI | 6 | [27:26] macro, [7:0] pair mask | bit j = 1 sets DBMU pair j of that macro to φ=2 |

CFG's bits [3:0] set every pair of macro m to φ=2 (bit m = 1) or φ=1. A
following PHI refines one macro pair by pair.

Behaviour of the instructions:
- **LDW/LDM** copy at one row per cycle.
- **MAC**:
  - clears the accumulators unless `keep` is set;
  - issues a feature read only when the IPU will still have room when the word arrives;
  - waits for the IPU to go idle and the macro pipeline to drain;
  - captures all 64 accumulators in the **output RF** (`output_rf`, 64 × 32 b).
- **ST** passes the output RF through the **SIMD core** one macro at a time. The SIMD core (`simd_core`) applies optional ReLU, an arithmetic shift right and saturation to INT8. ST writes macro m's 16 bytes to feature address `addr + m`. Lane i sits in bits 8i+7:8i; a φ=2 pair j delivers its filter in lane 2j.

A reduction longer than 64 rows × 16 inputs = 1024 products is split over
several MACs with `keep` set on all but the first. A k×k convolution can be run
one kernel row at a time the same way (see `tb_wl_conv3x3`).

## 5. Memories

| memory | size | organisation | word |
|---|---|---|---|
| feature buffer | 128 KB | 8192 × 128 b | 16 INT8 inputs (one group) or 16 INT8 outputs |
| instruction buffer | 16 KB | 4096 × 32 b | one instruction |
| weight buffer | 32 KB | 1024 × 256 b | one macro row of `Q` bits |
| meta buffer | 96 KB | 1024 × 768 b | one meta RF row |
| meta RF (per macro) | 6 KB | 64 × 768 b | one row's 256 `{sign, idx}` |
| output RF | 2 Kb | 64 × 32 b | one accumulator per post-processing unit |
| macro | 16 Kb | 64 × 256 b | |

All buffers have one write port and one synchronous read port (`sram_buffer`,
`data_buffers`). The host writes all four buffers through the `host_*` ports of
`db_pim_top`, and reads results from the feature buffer, but only while `busy`
is low. An assertion checks this.

## 6. Files

Package and shared types:
- `rtl/dbpim_pkg.sv`: sizes, `meta_t`, the IPU column struct `col_t`, opcodes.

Macro datapath:
- `rtl/dbmu.sv`
- `rtl/compartment.sv`
- `rtl/csd_adder.sv`
- `rtl/csd_adder_tree.sv`
- `rtl/shift_add.sv`
- `rtl/post_processing_unit.sv`
- `rtl/pim_macro.sv`

Core:
- `rtl/meta_rf.sv`
- `rtl/output_rf.sv`
- `rtl/pim_core.sv`

Input side:
- `rtl/zero_detect.sv`
- `rtl/leading_one_detect.sv`
- `rtl/ipu.sv`

Rest of the accelerator:
- `rtl/simd_core.sv`
- `rtl/sram_buffer.sv`
- `rtl/data_buffers.sv`
- `rtl/top_ctrl.sv`
- `rtl/db_pim_top.sv` (top)

Each RTL file starts with a comment on what it does, its interface and timing,
and which parts follow the published design and which are choices made here.

Testbenches (`tb/tb_<module>.sv`, one per module) compare against independent
integer models and print `TB_RESULT checks=<n> failures=<n>`. Three of them run
whole workloads:

- `tb_db_pim_top` runs at full default size.
  - Layer A: a 1024-input layer on all 64 rows of all four macros, with two φ=1
    macros, one φ=2 macro and one macro mixing both per pair. Inputs are
    unsigned, with varied sparsity.
  - Layer B: a signed-input layer.
  - Layer C: layer A again, split into two MACs joined with keep.
  - It counts each mechanism and fails if one never occurs: zero-column bypass,
    zero-group bypass, both φ modes, both in one macro, negative digits, signed sign-bit columns,
    ReLU, saturation, controller stalls on a full IPU, and keep. It also checks
    the rate of one column per cycle.
- `tb_wl_fc2048` runs a 2048-input fully connected layer for two input
  vectors:
  - each MAC covers 1024 inputs; the second half of the weights is loaded over
    the same macro rows between two MACs joined with keep;
  - the host rewrites the inputs between runs of the same program;
  - one macro mixes φ=1 and φ=2 filters.
- `tb_wl_conv3x3` runs a 3×3 convolution:
  - 8×8 map, 32 → 48 channels, zero padding;
  - three keep-chained MACs and one ST per output pixel;
  - checks all 3072 outputs.

## 7. Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/dbpim_pkg.sv tb/tb_ref_pkg.sv tb/tb_db_pim_top.sv \
    --top-module tb_db_pim_top -Mdir obj_top -o sim
./obj_top/sim
```

Replace `tb_db_pim_top` with any other testbench name. Testbenches that do not
use the reference package compile fine with it listed anyway. The full-size
top test builds in about half a minute and runs in seconds. Memory
contents that are never written start at random values in a two-state
simulator. The testbenches only read what they wrote, and they give the same
result with `+verilator+rand+reset+2`.

To change sizes, edit the constants in `dbpim_pkg.sv`. The macro geometry
(16 × 16 × 64) is tied to the 8-bit inputs and the 3-bit shift encoding, so
change it with care. Buffer depths can be changed freely. The widths derived
from them follow automatically.

## 8. How this RTL departs from the published design

The published description gives the block structure, the dyadic-block
encoding, the macro organisation, the CSD adder datapath and the IPU's
zero-column bypass. Everything below was decided here.

- **Instruction set, sequencing, host interface and the MAC keep flag** are
  invented. The published design only says that a compiler generates
  instructions that the top controller decodes.
- **SIMD operations** (ReLU, shift, INT8 saturation) are an assumption. The
  description just says "element-wise operations".
- **φ=2 mapping.** How the two blocks of a φ=2 weight are combined is not
  described. Here a φ=2 filter takes an aligned pair of neighbouring DBMUs and
  units, set per pair by the PHI instruction. Its odd output lane is unused.
  φ=0 filters are not mapped.
- **Shift & Add placement.** The block diagram places the shifter on the
  register side of the adder, i.e. shifting the running sum. This RTL shifts the
  incoming term by its absolute bit index. The sum is identical and the column
  order becomes free.
- **Bit index labels.** The IPU figure labels mask positions so that the most
  significant bit shows the small number. Here the index is always the bit's
  weight (0 = LSB), which is what the Shift & Add needs. Columns are sent MSB
  first. The published text only says the "first non-zero bit" is detected.
- **Register file split.** The IPU's 256-bit register file is split into two
  group entries.
- **Group skip cost.** An all-zero group costs one cycle.
- **Pipeline.** Pipeline registers (column register, meta RF read, psum,
  accumulator) and the resulting 3-cycle fill per MAC are this design's own.
- **SRAM cells.** The 6T cells and word-line read are modelled as flip-flops and
  multiplexers. The custom circuit, its timing and power are not modelled.
- **Widths.** Adder widths beyond the printed 9-bit term (10-bit CSD adder
  output, 13-bit tree, 32-bit accumulators) are chosen to be exact for
  8-bit data.
- **Not built or checked:**
  - the 500 MHz clock;
  - the 77.5 GOPS per macro;
  - the energy figures.

  Nothing here is timed or measured. For reference: a dense group gives 16 × 16
  MACs per 8 cycles per macro at φ=1, i.e. 32 GOPS per macro at 500 MHz. Input
  bit sparsity raises that in proportion to the columns skipped.
- **Not hardware:** the offline weight approximation and packing, and the
  off-chip memory that holds compiled models. Data enters through the host
  write ports. The published networks (AlexNet, VGG19, ResNet18, MobileNetV2,
  EfficientNetB0 on CIFAR-100) need far more weight storage than the 128 KB of
  weight and meta buffers. They would run layer by layer, with the host
  refilling the buffers. Depthwise layers use only one compartment per filter,
  because a stored weight cannot be zero. Residual additions and other non-MAC
  operations fall to the host.
