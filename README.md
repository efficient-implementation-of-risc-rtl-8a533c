# A unified, fixed-latency permutation unit for RISC-V vectors

RISC-V vector permutations come in two kinds that describe the same kind of
data movement in opposite ways.

* **Output-driven:** `vrgather` gives, for every *output* element, the index
  of the input element it copies.
* **Input-driven:** `vcompress` gives a mask bit for every *input* element,
  and `vslideup`/`vslidedown` give one offset by which every input moves.

The usual answer is separate hardware: a crossbar for gather, a shifter for
slides, and a sequential one-element-per-cycle loop for compress. That costs
area, and compress then takes a data-dependent number of cycles, which is a
timing side channel in cryptographic code.

This RTL executes all four on **one** byte-granular crossbar with a **fixed
latency of one cycle** (two cycles as an option). The input-driven controls
are turned into the crossbar's per-output form by a small front end that
contains **no carry-propagate adder anywhere**. The default instance is
256 bits wide: 32 byte lanes, with element widths of 8, 16 and 32 bits.

## 1. One crossbar, two ways to fill its select matrix

The datapath is an N x N crossbar (`xbar_andor`), with N = 32 for a 256-bit
register of bytes. Output `o` is the OR over all inputs `i` of
`din[i] AND sel[o][i]`. As long as every row `sel[o]` is one-hot or zero, this
is a multiplexer per output. An all-zero row gives a zero output.

Picture `sel` as an N x N bit matrix, with rows for outputs and columns for
inputs.

* **`vrgather`:** each output decodes its own index into a one-hot row
  (`gather_decoder`). Two outputs may pick the same input, so columns may hold
  several ones. That is legal, because only rows must be one-hot.
* **Input-driven operations:** each *input* computes where it goes, as a
  one-hot column (`dest_gen`). Reading that matrix by rows is pure wiring: a
  transpose. It is valid only if no two inputs pick the same destination,
  because then every row is one-hot again. The destination logic is built so
  that this always holds.

In `vperm_unit`, a 2:1 mux per select bit picks the decoded rows or the
transposed columns, according to the operation class. The crossbar itself is
shared by all operations.

## 2. From a compress mask to distinct destinations

For input position `i` (0 = least significant element), with mask `m`:

```
ones[i]  = number of 1s in m[N-1 : i]    (counted from the top down, inclusive)
zeros[i] = number of 0s in m[i : 0]      (counted from the bottom up, inclusive)

dest[i]  = i - zeros[i]   if m[i] = 1
dest[i]  = i + ones[i]    if m[i] = 0
```

For `m[i] = 1`, `i - zeros[i]` is the number of selected elements below `i`.
So the selected elements pack at the bottom, in order, which is what
`vcompress` does. For `m[i] = 0`, `i + ones[i]` is the total number of
selected elements plus the number of unselected elements below `i`. So the
unselected elements fill the top, in order.

Moving the unselected elements at all looks wasteful. It is what makes `dest`
a permutation of 0..N-1, and so makes every crossbar row one-hot.

Example with 8 elements (listed from element 7 down to 0):

```
data   a b c d f e g h
mask   1 0 0 1 1 0 1 1
ones   1 1 1 2 3 3 4 5
zeros  3 3 2 1 1 1 0 0
dest   4 7 6 3 2 5 1 0
result b c e a d f g h      (a d f g h compressed at the bottom)
```

## 3. Carry-free arithmetic

Each destination is a count plus or minus a constant index, followed by a
decode. None of these steps ever resolves a carry chain.

1. **Carry-save counters (`cs_counter`, `prefix_count`).** Each position has
   two independent counters: ones from the top, and zeros from the bottom.
   Each counter cuts its bits into groups of eight. Each group is counted by
   an 8-input cell (`cs_count8`) of three full adders and a half adder:
   FA(7,6,5), FA(4,3,2), FA(sum,1,0), and a half adder on the two upper
   carries. The groups are merged by a balanced tree of 4:2 compressors. The
   result is two rows whose sum is the count. All 2N counters work in
   parallel.
2. **Adding the index (`csa`).** One 3:2 carry-save adder per position adds
   the constant index `i` to the two rows. After synthesis, most of this
   adder folds into wires and inverters.
3. **Subtraction without a carry.** `i - (a + b)` is computed as
   `i + ~a + ~b + 2`. The two extra ones go into two free carry-in slots:
   the least significant bit of the csa's shifted carry row, and the carry-in
   of the decoder.
4. **Sum-addressed decoding (`sad`).** Line `j` of the one-hot output must be
   set when `a + b + cin == j`. If the sum is `j`, the carry entering bit `k`
   is fixed by bit `k-1` alone:
   `c[k] = a[k-1]&b[k-1] | (a[k-1]|b[k-1]) & ~j[k-1]`, with `c[0] = cin`.
   Line `j` is therefore the AND over all bits of
   `a[k] ^ b[k] ^ j[k] == c[k]`, a purely local test.

All words are W = log2(N) + 1 bits wide (6 for N = 32). Arithmetic is
modulo 2^W, and the decoder has only N lines. A sum from N to 2N-1 therefore
selects nothing: a negative result wraps into that range, and so does an
overflow.

## 4. Slides on the same path

For slides, the per-element mux feeds the pair `(offset, 0)` into the csa
instead of the prefix sums. For `vslidedown` it is inverted with the +2
correction, as for the `zeros` case. The prefix counters are then unused.

* An element whose destination falls outside the register decodes to an
  all-zero column and simply vanishes.
* Output positions that nothing reaches read 0.

Offsets are given in elements. They are scaled to bytes, and any offset of
VLMAX elements or more is clamped to VLMAX, so that every element slides out.

## 5. Element widths and the movable unit

The crossbar moves *units* of `UNIT_BYTES` bytes: 1 by default, and 2 is the
coarser option. An element of SEW bits is R = SEW / (8 * UNIT_BYTES)
consecutive units.

| Operation | How the element is mapped onto units |
|---|---|
| `vcompress` | Each element's mask bit is repeated over its R units. Compressing units then compresses elements, because the units of one element stay together and in order. |
| Slides | The offset is multiplied by R. |
| `vrgather` | Unit `b` of output element `e` selects unit `idx[e] * R + b`. An index of `VLEN/SEW` or more gives a zero element. |
| `v0` masking | Each element's `v0` bit is repeated over its units. |

With `UNIT_BYTES = 2`, SEW = 8 cannot be expressed; the unit raises
`illegal` instead.

## 6. Interface and timing (`vperm_unit`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_ni` | in | 1 | Clock, asynchronous active-low reset (valid bits only). |
| `in_valid` | in | 1 | Operation presented this cycle. A new one may come every cycle. |
| `op` | in | 3 | `perm_pkg::perm_op_e`: `OP_VRGATHER`, `OP_VRGATHER_VX`, `OP_VCOMPRESS`, `OP_VSLIDEUP`, `OP_VSLIDEDOWN`. |
| `sew` | in | 2 | `perm_pkg::sew_e`: `SEW8`, `SEW16`, `SEW32`. |
| `vm` | in | 1 | 1 = unmasked. 0 = elements whose `v0` bit is 0 keep `vd_old`. |
| `vs1` | in | VLEN | The data being permuted. |
| `vs2` | in | VLEN | `vrgather` indices (SEW bits each), or the `vcompress` mask (bit `e` for element `e`). |
| `v0` | in | VLEN | Mask register, bit `e` for element `e`. |
| `vd_old` | in | VLEN | Old destination, used for masked-off elements. |
| `scalar` | in | 32 | Slide offset, or the `vrgather.vx` index. |
| `out_valid` | out | 1 | Exactly `LATENCY` cycles after `in_valid`. |
| `vd` | out | VLEN | The result. |
| `illegal` | out | 1 | The SEW is narrower than the unit, or the SEW code is unused. `vd` is then meaningless. |

There is no back-pressure and no dependence of timing on any operand.

* **`LATENCY = 1`:** index logic and crossbar work in one cycle, and the
  result is registered.
* **`LATENCY = 2`:** adds a register stage between the select generation and
  the crossbar.

Note the operand naming, which follows the description this design comes
from: `vs1` is the data, and `vs2` holds the control. The RISC-V
specification uses the opposite names, so a decoder must swap them.

## 7. Conventions that differ from the RISC-V specification

These are deliberate and easy to change in `vperm_unit.sv`.

* **Slid-in and out-of-range elements are written as 0.** For `vslideup`,
  the specification leaves the lowest `offset` elements unchanged. To follow
  it, take those elements from `vd_old`.
* **The `vcompress` tail holds the unselected elements, in order, not an
  undisturbed or all-ones tail.** To clear or keep the tail, mask the outputs
  at and above the popcount of the mask.
* **`vl` is taken as VLMAX.** There is no `vl` input and no tail masking.
* **Not provided:** `vrgatherei16`, `vslide1up`/`vslide1down`, and register
  groups (LMUL > 1). A group would be run as a sequence of single-register
  permutations by a sequencer outside this unit.

## 8. Module map

```
vperm_unit            operand scaling, class mux, optional pipeline stage, v0 merge
 |- dest_gen          per-input destination columns (compress and slides)
 |   |- prefix_count  2N carry-save counters
 |   |   '- cs_counter -> cs_count8, csa
 |   |- csa           + index, one per input
 |   '- sad           decode, one per input
 |- gather_decoder    per-output index decoders (vrgather)
 '- xbar_andor        N x N AND-OR crossbar
perm_pkg              op and SEW enums, helpers
```

| Parameter | Default | Meaning |
|---|---|---|
| `VLEN` | 256 | Register width in bits. |
| `UNIT_BYTES` | 1 | Smallest movable element, in bytes. |
| `LATENCY` | 1 | 1 or 2 cycles. |

N = VLEN / (8 * UNIT_BYTES) must be a power of two, and is checked at
elaboration. The internal word width W is log2(N) + 1.

After coarse synthesis with yosys, the default unit has roughly 9.5k
word-level cells and 258 flip-flops. The destination logic is the largest
part, at about 5.8k cells before gate-level optimisation. The crossbar has
32 x 32 AND-OR cells of 8 bits.

## 9. Verification

Every module has a self-checking testbench in `tb/`. Each compares the module
against a model written independently of the RTL, and ends by printing
`TB_RESULT checks=<n> failures=<n>`.

| Testbench | What it checks |
|---|---|
| `tb_cs_count8` | All 256 inputs of the 8-input cell. |
| `tb_cs_counter` | All 8- and 11-bit inputs, plus random 32-bit inputs, against `$countones`. |
| `tb_csa` | Random words: rows sum to `x+y+z+cin`, and the sum row is the XOR. |
| `tb_sad` | Exhaustive over `a`, `b` and `cin` for N = 32. |
| `tb_prefix_count` | The 8-element example above, plus random 32-bit masks. |
| `tb_dest_gen` | The example destinations, slides by 1 and by 2, and random masks and offsets against a mask walk. |
| `tb_gather_decoder` | Random indices at every SEW, including out-of-range and scalar indices. |
| `tb_xbar_andor` | Random one-hot or empty rows. |
| `tb_worked_examples` | The four 8-element examples (gather, compress, slide up 1, slide down 2) on a 64-bit unit. |
| `tb_vperm_unit` | 3000 random operations on a default unit and on a 2-byte, 2-cycle unit. Checks results, exact latency and `illegal`, and counts that every class, every SEW, out-of-range indices, full slide-outs, masking and back-to-back issue occurred. |
| `tb_vperm_full` | The same stream on the default unit only, with no parameter overrides. |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_vperm_full rtl/perm_pkg.sv tb/tb_vperm_full.sv -o sim
./obj_dir/sim
```

Each run takes well under a second of simulation. Whether a crossbar row is
one-hot is also asserted inside `vperm_unit`, so `--assert` catches any
destination collision.

What is not verified: there is no gate-level or timing check, and the
one-cycle latency says nothing about the achievable clock frequency. The
reference models share this design's conventions (section 7), so they do not
check compliance with the RISC-V specification on those points.
