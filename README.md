# SWIS: a bit-serial systolic array for shared-weight-bit-sparse neural networks

## The idea

A bit-serial multiply-accumulate unit processes one bit position of one operand per
cycle, so its latency is set by how many bit positions it must visit. SWIS ("shared
weight bit sparsity") makes that number small by quantizing the *weights* offline so
that a small group of weights (here 4, taken along the input-channel axis) shares a
short list of active bit positions, the *shifts*. Every other bit of those weights is
forced to zero. A weight is then

    w_i = sign_i * sum_j  m_i[j] * 2^(s_j)        j = 0 .. n_shifts-1

where `s_j` (3 bits, 0..7) are the group's shared shift values and `m_i[j]` is one
mask bit per weight and shift. The dot product of an activation vector `a` with the
group becomes

    a . w = sum_j ( sum_i sign_i * (a_i AND m_i[j]) ) << s_j

which is an ordinary bit-serial MAC whose loop runs over the `n_shifts` shared
positions instead of all 8 bit positions, and whose positions need not be
consecutive. With 2-4 shifts an 8-bit network keeps close to its 8-bit accuracy,
so the array runs 2-4 times fewer cycles than a full 8-bit bit-serial design. The
weights also shrink: per group only the signs, the masks and 3 bits per shift are
stored.

A restricted variant, **SWIS-C**, requires the shifts of a group to be consecutive
(`off, off+1, ...`), so only one 3-bit offset per group is stored; the hardware
generates the other shift values by incrementing it.

This RTL implements the accelerator that runs such weights: an 8x8
output-stationary systolic array of **double-shift** processing elements (each PE
consumes two shifts per cycle) with 64 KB activation, 64 KB weight and 16 KB output
memories. Choosing the shifts and masks (an exhaustive search per group with a
squared-error-plus-bias metric) and spreading the shift counts over filters are
offline software steps. They are not part of the hardware.

## Weight words

The unit of weight data is the **double-shift weight word** (`swis_pkg::wgt_word_t`,
18 bits). It holds everything one PE needs for one cycle:

| field   | bits | meaning                                              |
|---------|------|------------------------------------------------------|
| `sign`  | 4    | sign of each of the 4 weights (1 = negative)          |
| `mask1` | 4    | mask bits of the 4 weights for shift `s1`             |
| `mask0` | 4    | mask bits of the 4 weights for shift `s0`             |
| `s1`    | 3    | second shift value of the pair                        |
| `s0`    | 3    | first shift value (SWIS-C: the group's offset)        |

A group with `n` shifts occupies `n_pairs = ceil(n/2)` consecutive words, one per
cycle. The same `sign` field is repeated in each of them. An odd shift count leaves
`mask1` of the last word at zero, so that lane idles for one cycle. An odd count is
therefore never faster than the next even one. The way round this is to give
different tiles different counts: 2 shifts for half of a layer's filters and 4 for
the other half averages 3 shifts per layer at full utilization.

In **SWIS-C mode** the shift generator ignores `s0`/`s1` in all but the first word of
a group. It takes `s0` of the first word as offset `off` and produces the pairs
`(off, off+1)`, `(off+2, off+3)`, ... itself. The offline tools must keep
`off + n - 1 <= 7`, because 3-bit shift values wrap.

Activations are unsigned 8-bit values (post-ReLU), packed 4 to a vector
(`swis_pkg::act_vec_t`). The weights carry all of the sign information.

## The double-shift PE

`swis_mac` is the PE's arithmetic, a combinational path:

1. **Sign inversion**: each of the 4 activations is negated when its weight is
   negative. Both shift lanes share this step, which is much of what makes the
   double-shift PE cheaper than two single-shift PEs.
2. **Masking**: two AND stages, one with `mask0` and one with `mask1`.
3. **Two adder trees**: each sums 4 signed 9-bit terms into an 11-bit sum.
4. **Two barrel shifters**: these shift left by `s0` and by `s1` (0..7).
5. **Final adder**: its 19-bit result is the group's contribution for two shifts.

`swis_pe` wraps the MAC with the PE's buffers. It has an activation buffer, which
forwards to the right neighbour, and sign, mask and shift buffers, which hold the
weight word and forward it to the PE below. Valid bits travel with both. The
**accumulator** adds the product whenever both buffered operands are valid.
`acc_clr` clears it, and the clear takes priority.

**Accumulator width: read this before using the outputs.** The accumulator is
`ACC_W = 16 + log2(4) = 18` bits, the width given for this PE in the original
description, and it wraps in two's complement. That width holds a few groups of
products exactly. It does not hold a full convolution reduction: 3x3x512 weights
can need 30 bits. With random 8-bit data, most outputs of a 3x3x512 layer wrap
(`tb_swis_layers` counts them). Real, sparse activations and small quantized weights
overflow less often, but nothing guarantees they stay in range. To get exact
results, widen `ACC_W` in `swis_pkg.sv`. Every width downstream (array, output
memory, top ports) follows it. The adder-tree and product widths are one bit wider
than in the original drawing (`8+log2 N` and `16+log2 N`), so that every 8-bit input
gives an exact result.

## Array and dataflow

`swis_array` is an 8x8 grid in which **PE (r, c) computes output pixel r of filter c**
for a whole tile (output stationary). Activation vectors enter each row at column 0
and move one PE right per cycle. Weight words enter each column at row 0 and move one
PE down per cycle. Every hop costs one cycle, so the inputs are skewed: row r and
column c are delayed by r and c cycles.

The mapping of shifts onto the systolic flow is the less obvious part. Weight words
move through the array at the normal rate, one shift pair per cycle. Each activation
vector, though, is presented **once per shift pair of its group**: for `n_pairs = 2`
every activation word enters its row twice in a row, meeting the group's two weight
words one after the other. The activation memory is still read only once per group.
`swis_feeder` keeps the word in a hold register and repeats it. Neither the PE
weight buffers nor the memory interfaces need to grow with the shift count, and all
PEs of a tile stay in lock-step. They have to, because every filter in a tile uses
the same number of shifts (`n_pairs` is a per-tile setting).

Pipeline for step `s = k*n_pairs + p` (group k, pair p), counted from its read
cycle `t`:

| cycle       | what happens                                                        |
|-------------|---------------------------------------------------------------------|
| t           | controller reads weight word `wgt_base+s`, and activation word `act_base+k` if `p = 0` |
| t+1         | memory data valid                                                    |
| t+2         | shift generator output (SWIS-C shifts filled in); activation hold-register output |
| t+2+r / t+2+c | enters row r / column c of the array                               |
| t+3+r+c     | in PE (r, c)'s buffers                                               |
| t+4+r+c     | added to PE (r, c)'s accumulator                                     |

## Running a tile

`swis_ctrl` runs one tile per `start` pulse. A tile is 8 output pixels x 8 filters
over a reduction of `k_groups` groups of 4. The descriptor is sampled on the start
cycle:

| input      | meaning                                                  |
|------------|----------------------------------------------------------|
| `mode`     | `MODE_SWIS` or `MODE_SWIS_C`                             |
| `n_pairs`  | shift cycles per group, 1..4 (= ceil(shifts / 2))        |
| `k_groups` | groups in the reduction, >= 1                            |
| `act_base` | first activation word; word `act_base + k` holds group k for all 8 pixels (row r in bits `[32r +: 32]`) |
| `wgt_base` | first weight word; word `wgt_base + k*n_pairs + p` holds pair p of group k for all 8 filters (column c in bits `[18c +: 18]`) |
| `out_base` | output word `out_base + r` receives the 8 accumulators of pixel r |

Sequence: one clear cycle, then `S = k_groups * n_pairs` read cycles, then 8+8+1
drain cycles, then 8 output writes, then a one-cycle `done` pulse. From the start
cycle to `done` is **S + 2*8 + 8 + 3 = S + 27 cycles**. The data-dependent part is
exactly one cycle per shift pair per group. An assertion checks that
`1 <= n_pairs <= 4` and that `k_groups > 0` at start.

The external memory side is plain ports on `swis_top`: write ports for the
activation and weight memories and a read port for the output memory, all with a
one-cycle read latency. A host or DMA engine lays out the data in im2col order
before each tile. Address generation for convolution windows is not in the
hardware. The host may use the ports while a tile runs, but it must not overwrite
words the tile still reads.

## Memories

| memory        | size  | word                        | words |
|---------------|-------|-----------------------------|-------|
| activation    | 64 KB | 8 rows x 4 x 8 bit = 256 bit | 2048  |
| weight        | 64 KB | 8 columns x 18 bit = 144 bit | 3640  |
| output        | 16 KB | 8 columns x 18 bit = 144 bit | 910   |

All three are arrays with one synchronous write port and one synchronous read port.
They are not SRAM macros. At 4 shifts a tile with a 3x3x512 reduction (1152 groups)
needs 1152 activation words and 2304 weight words, so the largest layers of
ResNet-18 and VGG-16 fit one tile at a time. At 7-8 shifts such a layer needs more
than 3640 weight words. The host must then split the reduction, and the design has
no way to carry partial sums between tiles.

## Departures and own choices

The following follow the original design: the PE structure (shared sign inversion,
two mask stages, adder trees, two 3-bit shifters, accumulator), the accumulator
width, the two shifts per cycle, the group size 4, the 8x8 array, the output-stationary
dataflow with activations repeated per shift cycle and fetched once, the SWIS-C
offset incrementer outside the array, and the memory capacities.

The following are this implementation's own choices:
- The weight-word layout, and repeating the signs in every shift-pair word. The
  compact format (signs once per group, one offset per SWIS-C group) is meant for
  off-chip storage. Here it would need a decompressor, which is not built.
- Valid bits, asynchronous active-low reset, the clear, the start/busy/done
  protocol, the tile descriptor, the drain wait, the memory layouts and the parallel
  accumulator read-out, row by row.
- Unsigned activations, and the one-bit-wider internal MAC widths.

Not included:
- External DRAM and any DMA engine.
- The offline shift selection and filter scheduling. A small SystemVerilog version
  of the selection exists only in the testbench package `tb_swis_quant_pkg`, to make test
  weights.
- The single-shift PE, a conventional fixed-point PE and the other baselines.
- Support for fully connected layers, which the design does not target.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`:

| testbench           | what it checks                                                           |
|---------------------|--------------------------------------------------------------------------|
| `tb_swis_mac`       | MAC against a weight-value reference (rebuilds each weight from sign, masks and shifts); corner cases and 5000 random vectors |
| `tb_swis_pe`        | forwarding, accumulation with random valids and clears                    |
| `tb_swis_array`     | all 64 accumulators after skewed streams; completion exactly K+R+C-1 cycles after the first input |
| `tb_swis_shift_gen` | SWIS pass-through; SWIS-C pairs for 1-4 pairs per group                   |
| `tb_swis_feeder`    | activation repetition with garbage on non-first cycles, skews, valids     |
| `tb_swis_ctrl`      | every control output, cycle by cycle, for all `n_pairs` and both modes     |
| `tb_swis_*_mem`     | write/read at the full size, first and last address, read latency          |
| `tb_swis_top`       | end to end at the default size: a 16-pixel x 16-filter layer as four tiles with 2 and 4 shifts on the two filter groups (3 on average), in SWIS and SWIS-C mode, plus 5- and 7-shift tiles and tiles at the top of every memory; checks the outputs, the latency S+27, one activation read per group and one weight read per cycle; counts how often each mechanism ran (both modes, each `n_pairs`, odd counts, activation reuse) and fails if one never ran |
| `tb_swis_layers`    | one tile each of a ResNet-18 3x3x64 layer (SWIS and SWIS-C, 4 shifts), a VGG-16 3x3x512 layer (3 shifts) and a MobileNet-v2 1x1x96 layer (5 shifts), with random weights quantized by exhaustive shift selection; prints the weight RMSE and how many outputs exceed the 18-bit accumulator |
| `tb_swis_sched`     | a ResNet-18 3x3x64 layer for 8 output pixels and all 64 filters with filter scheduling: every filter quantized at 2 and at 4 shifts, the half whose error grows least moved to 2 shifts, filters ordered so each 8-filter tile has one count; checks all outputs, S+27 cycles per tile and exactly 3/4 of the compute cycles of 4 shifts everywhere, and prints the weight error next to uniform 2, 3 and 4 shifts |

Outputs are compared modulo 2^18, the accumulator's width. `tb_swis_quant_pkg` holds
the testbench version of the shift selection. The weights in these tests are
independent random values. For such weights the schedule averaging 3 shifts gives a
larger weight error than 3 shifts everywhere (about 4.2 against 2.7 LSB RMS). No
filter is more sensitive than another, so moving filters between 2 and 4 shifts
gains nothing. The schedule pays off only on trained layers, whose filters differ.
Its benefit here is speed: 3 shifts everywhere costs as many cycles as 4 on a
double-shift array.

To run one with Verilator 5 from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/swis_pkg.sv tb/tb_swis_pkg.sv tb/tb_swis_top.sv --top-module tb_swis_top
    ./obj_dir/Vtb_swis_top

`tb_swis_layers` and `tb_swis_sched` also need `tb/tb_swis_quant_pkg.sv` on the
command line, after `tb/tb_swis_pkg.sv`. Every testbench runs at the default sizes
in about a second or less.

## Changing it

- **Array size**: use the `NROWS`/`NCOLS` parameters of `swis_top`. The memory word
  widths and depths follow from them and from the byte sizes `ACT_BYTES`,
  `WGT_BYTES` and `OUT_BYTES`. Only the 8x8 size has been simulated, and `NROWS`
  should stay a power of two.
- **Accumulator width**: change `ACC_W` in `swis_pkg.sv`. The group size `GROUP` and
  activation width `ACT_W` live there too, and the whole design follows them.
- **Maximum shift pairs** per group is `MAX_PAIRS = 4`, which covers 8 shifts. The
  `n_pairs` port is 3 bits wide.
