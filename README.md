# FORTALESA: a reconfigurable, fault-tolerant output-stationary systolic array

Most DNN accelerators are built around a systolic array. A soft error in one
register or multiplier of such an array quietly corrupts outputs. Which
outputs it corrupts depends on where the error is: a whole column, a whole
row, or one element. Protecting every processing element (PE) all the time
with triple modular redundancy costs three times the hardware. But not every
layer of a network needs that protection.

FORTALESA lets the same N x N array be regrouped at run time into one of
three **execution modes**:

| mode | what a group is | effective output size | protection |
|------|-----------------|-----------------------|------------|
| PM (performance) | one PE | N x N | none |
| DRG (dual-redundancy grouping) | 2 PEs, main + shadow | N x N/2 | an error is reduced, not removed |
| TRG (triple-redundancy grouping) | 3 voting PEs (TRG3: 3 PEs, TRG4: 4 PEs) | TRG3: 2N/3 x N/2, TRG4: N/2 x N/2 | single errors are removed |

The host chooses a mode for each layer. Vulnerable layers run in TRG, robust
layers run in PM at full speed, and DRG sits in between. All PEs of a group
compute the same output element from their own copies of the operands. The
group's *main* PE combines the copies. Two choices are fixed when the design
is built:

* the DRG correction rule: **DRGA** averages the two copies, **DRG0** sets
  the bits on which they disagree to zero;
* the TRG group shape: **TRG3** uses L-shaped groups of three PEs whose main
  PE also computes; **TRG4** uses 2 x 2 groups whose main PE only votes on
  its three shadows.

This gives four implementation options (PM-DRG0-TRG3, PM-DRG0-TRG4,
PM-DRGA-TRG3, PM-DRGA-TRG4). All four are available through parameters. The
default build is **PM-DRGA-TRG3 on a 48 x 48 array**, with 8-bit signed
activations and weights and 32-bit partial sums.

The SystemVerilog here follows the published FORTALESA architecture for
everything the architecture defines: the modes, group shapes, skip-one
links, correction rules, widths and latencies. Where the publication is
silent (buffers, sequencing, result readout, reset, fault-injection access)
the design makes its own simple choices. They are listed in
[Departures and own choices](#departures-and-own-choices).

## The array and its dataflow

The array is **output-stationary**. PE(i,j) accumulates element (i,j) of
C = A x B in its 32-bit OREG:

* activations A[r][k] enter from the left and move one PE to the right per
  cycle, through each PE's 8-bit IREG;
* weights B[k][c] enter from the top and move one PE down per cycle, through
  each PE's 8-bit WREG;
* every cycle each PE does `OREG <= OREG + IREG * WREG` (signed).

Row r of A is delayed by r cycles and column c of B by c cycles. Element k of
both streams then meets in PE(r,c) at the same time. A tile with shared
dimension M takes `L = M + R + C - 2` cycles on an R x C array. This is
`M + 2N - 2` for the full array. Larger matrices are cut into tiles by the
host.

## How the modes map groups onto the grid

This is the central part of the design and the part that is easiest to get
wrong.

Every PE has a fixed position (i,j). In a given mode it belongs to the group
at *effective* coordinates (er, ec) and has a *role* in that group: 0 is the
main PE, 1..3 are shadows. The package `fortalesa_pkg` holds this mapping as
constant functions: `pe_er`, `pe_ec`, `pe_role`, and the inverse
`pos_row`/`pos_col`. The array, the feeders and the testbenches all use it.

**DRG.** Column pairs (2c, 2c+1) form groups in every row. The shadow is on
the left and the main PE on the right.

    row i:   [s1][M]  [s1][M]  [s1][M] ...     (effective N x N/2)

**TRG3.** A block of 3 rows x 2 columns holds two L-shaped groups, an upper
one U and a lower one L:

            col 2c   col 2c+1
    row 3b   U.s1     U.M        U = effective row 2b
    row 3b+1 U.s2     L.s2       L = effective row 2b+1
    row 3b+2 L.s1     L.M

This gives 2N/3 effective rows and N/2 effective columns. N must be a
multiple of 6; both sizes the architecture was evaluated at (48 and 132)
are.

**TRG4.** Each 2 x 2 block is one group, with three shadows and a main PE at
the bottom right:

    row 2b   s1  s2
    row 2b+1 s3  M              (effective N/2 x N/2)

**The links keep the copies apart.** If copies shared registers, a single
faulty IREG or WREG would corrupt all copies of a group at once, and voting
could not help. So in DRG and TRG each copy of an operand travels only
through PEs of the same role:

* Activations skip one PE. PE(i,j) takes its activation from PE(i,j-2)
  instead of PE(i,j-1). In every redundant mode, the same-role PE of the
  next group column is two columns to the right in the same row. One cycle
  therefore moves an activation one *group* column.
* In PM and DRG, weights come from the PE directly above, because DRG groups
  do not span rows. In TRG, every PE takes its weight from the same-role PE
  of the group above. This costs one cycle per group row. In TRG4 that PE is
  two rows up. In TRG3 the chains zig-zag; for example U.s2 (3b+1, 2c) feeds
  L.s2 (3b+1, 2c+1), which feeds the next block's U.s2 (3b+4, 2c).
* At the edges, every PE of the first group column reads the left edge lane
  of its group, and every PE of the first group row reads the top edge lane
  of its own column. In TRG, all PEs of a group read the edge row of their
  main PE. This matters in TRG3, where the middle row holds PEs of two
  different groups.
* Each shadow's OREG is wired to its group's main PE.

Each PE holds the two-way multiplexers in front of IREG and WREG. The
registered mode signal drives them. The mode is constant for the whole
operation.

## Correction in the main PE

A main PE has a result register VREG next to its OREG. Every cycle VREG is
loaded with the corrected value of the current OREGs:

| mode / option | VREG <= |
|---------------|---------|
| DRG, DRGA | floor((OREG_main + OREG_shadow) / 2), computed on 33 bits |
| DRG, DRG0 | OREG_main & OREG_shadow (disagreeing bits become 0) |
| TRG3 | bitwise majority(OREG_main, OREG_s1, OREG_s2) |
| TRG4 | bitwise majority(OREG_s1, OREG_s2, OREG_s3); the main PE's own MAC is idle |

The correction runs alongside the MACs, so a corrected result is ready one
cycle after the last accumulation. This is the "+1" in the redundant-mode
latencies below. The OREGs themselves are never overwritten. Each copy
therefore keeps accumulating independently, and a fault stays confined to
its copy.

What this means for one flipped bit b in one copy:

* TRG removes it completely.
* DRGA leaves an error of 2^(b-1) instead of 2^b.
* DRG0 removes it if the true bit is 0. If the true bit is 1, it leaves an
  error of 2^b.

In PM the output of PE(i,j) is simply its OREG.

## Feeding operands

`operand_buffer` is one simple RAM with one word per address. Each word holds
N 8-bit elements. The activation buffer's word k is column k of the
activation tile (element r = A[r][k]). The weight buffer's word k is row k of
the weight tile (element c = B[k][c]). The data is always written in
*effective* coordinates. Elements beyond the mode's effective size are
ignored.

`skew_feeder` turns the one word read per cycle into N edge lanes. Lane l
carries element `src(mode,l)` delayed by `src(mode,l)` cycles. Here `src` is
the effective row (activation side, lanes are physical rows) or the
effective column (weight side, lanes are physical columns) of that lane. So
in the redundant modes the same effective row or column appears on several
lanes, one per copy. Each lane is a shift register, as long as its largest
delay in any mode, with a tap chosen by the mode.

## One operation, cycle by cycle

`fortalesa_ctrl` runs a tile as follows:

1. `start` is sampled with the host's `mode` and `m_len` (M). Both are
   latched.
2. **CLEAR**, one cycle: `clr` zeroes every PE register, VREG and the feeder
   delay lines.
3. **RUN**: buffer addresses 0..M-1 are read in consecutive cycles. The read
   data is registered, skewed by the feeders, and captured by the edge PEs'
   IREG/WREG.
4. **DONE**: `done` goes high and stays high until the next `start`. `c_out`
   holds the result.

Counting from the first RUN cycle, `done` rises after L + 2 cycles. L is the
tile latency of the mode:

| mode | L | N = 48, M = 24 |
|------|---|----------------|
| PM | M + 2N - 2 | 118 |
| DRG | M + 3N/2 - 1 | 95 |
| TRG3 | M + 7N/6 - 1 | 79 |
| TRG4 | M + N - 1 | 71 |

The 2 extra cycles are the buffer read register and the edge register. With
the CLEAR cycle, `done` is seen L + 3 clock edges after the edge that samples
`start`. One cycle before `done`, the last output element is still missing
its final product. The testbenches check both facts. To run a whole layer,
the host tiles it: ceil(P/R) x ceil(K/C) tile operations, with R x C the
effective size of the chosen mode.

## Interface of `fortalesa_top`

| port | dir | width | meaning |
|------|-----|-------|---------|
| clk, rst_n | in | 1 | clock, asynchronous active-low reset |
| act_wr_en / act_wr_addr / act_wr_data | in | 1 / 13 / N x 8 | write word k of the activation tile |
| wgt_wr_en / wgt_wr_addr / wgt_wr_data | in | 1 / 13 / N x 8 | write word k of the weight tile |
| mode | in | `mode_e` | MODE_PM, MODE_DRG or MODE_TRG, sampled with start |
| m_len | in | 14 | M, from 1 to DEPTH (an assertion checks this) |
| start | in | 1 | start a tile; ignored while busy |
| busy, done | out | 1 | CLEAR/RUN in progress; result valid |
| c_out | out | N x N x 32 | C[r][c] at [r][c]; 0 outside the effective size |
| fi | in | `fi_req_t` | fault injection for verification; tie `fi.en` to 0 |

The buffers should not be written while `busy` is high.

Parameters: `N` (48), `DRG_CORR` (`DRG_AVG` or `DRG_ZERO`), `TRG_IMPL`
(`TRG3` or `TRG4`), `DEPTH` (4608 words). The operand widths (8 bits) and the
partial-sum width (32 bits) are package constants.

**Fault injection.** `fi` names one PE (`row`, `col`) and one target: IREG,
WREG, OREG, or the multiplier output. It also sets a bit and a kind: flip,
stuck-at-0 or stuck-at-1. The fault acts on the value as it enters the
target in every cycle `fi.en` is high. Hold it for one cycle for a transient
fault, or for the whole operation for a permanent one. This port is not
part of the FORTALESA architecture. It exists so that the correction
mechanisms can be exercised in simulation. It costs two 8-bit comparisons
and a few XOR/AND/OR gates per PE.

## Files

| file | contents |
|------|----------|
| `rtl/fortalesa_pkg.sv` | widths, `mode_e`, option enums, `fi_req_t`, group geometry and latency functions |
| `rtl/fortalesa_pe.sv` | PE: IREG/WREG/OREG, MAC, mode multiplexers, VREG with corrector/voter |
| `rtl/drg_corrector.sv` | DRGA / DRG0 correction |
| `rtl/tmr_voter.sv` | bitwise 2-of-3 voter |
| `rtl/systolic_array.sv` | N x N grid, all mode links, effective-result selection |
| `rtl/operand_buffer.sv` | activation / weight buffer |
| `rtl/skew_feeder.sv` | mode-aware skew and duplication of the edge lanes |
| `rtl/fortalesa_ctrl.sv` | CLEAR/RUN/DONE sequencer and latency counter |
| `rtl/fortalesa_top.sv` | the core |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_top_core.sv`, `tb/tb_fortalesa_top.sv` | end-to-end test at N = 12 for PM-DRGA-TRG3 and PM-DRG0-TRG4 |
| `tb/tb_fortalesa_full.sv` | end-to-end test at the default parameters (48 x 48) |
| `tb/tb_conv_layers.sv` | two small convolution layers, lowered with im2col, tiled and run in TRG, DRG and PM |

## Simulating

Every testbench ends with `TB_RESULT checks=<n> failures=<m>` and has a
watchdog. With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/fortalesa_pkg.sv tb/tb_fortalesa_top.sv --top-module tb_fortalesa_top
    ./obj_dir/Vtb_fortalesa_top

Substitute another testbench name as needed. The 48 x 48 test
(`tb_fortalesa_full`) takes a few minutes to compile and under a second to
run.

What the testbenches establish:

* **Reference results.** All results are compared with matrix products the
  testbench computes itself, in every mode and for both option pairs. The
  reference does not use the package's geometry functions; the testbenches
  write out the effective sizes, lane mapping and latency formulas on their
  own.
* **Timing.** `done` timing is checked against the latency formulas, and the
  check that one product is still missing a cycle earlier pins down the
  exact cycle.
* **Fault behaviour.**
  * A transient fault in PM corrupts exactly the expected output.
  * A bit flip in either OREG of a DRG group gives exactly the DRGA or DRG0
    result computed by the testbench.
  * Transient faults of all four types, and a permanent stuck-at-1 weight
    bit, leave TRG results exact. The same stuck-at fault is first shown to
    corrupt PM results.
* **A small CNN, end to end.** `tb_conv_layers` runs two small
  convolution layers the way a host would: im2col lowering, tiling into
  effective-size tiles with partial edge tiles, and a different mode per
  layer. It compares against direct convolution, and it checks that the
  compute cycles equal ceil(P/R) x ceil(K/C) x (L + 3).
* **Each test can fail.** Every testbench was also run against a copy of
  its module with one deliberate bug (for example, a missing majority
  term, or the direct link used instead of the skip-one link), and it
  reported failures.

## Departures and own choices

Taken from the FORTALESA architecture:

* the three modes;
* both DRG rules and both TRG group shapes;
* the group positions (shadow/main placement in DRG, L-shapes in TRG3,
  2 x 2 in TRG4);
* the skip-one activation links;
* the shadow-to-main partial-sum links;
* the idle MAC of the TRG4 main PE;
* effective sizes, latencies and widths;
* the 48 x 48 size.

Choices made by this design where the architecture is silent or ambiguous:

* **DRG orientation.** The architecture's text gives the DRG effective size
  as N x N/2, which matches horizontal pairs, but its mode table lists
  N/2 x N. The text and the drawing of horizontal pairs are followed.
* **Buffer side.** One description puts the activation buffer on top and the
  weight buffer on the left. The dataflow description and the drawings feed
  activations from the left and weights from the top, which is what is
  built.
* **Weight chains in TRG3.** Which same-role PE feeds which is chosen here.
  It keeps each copy in its own chain. The published drawing's wiring may
  differ in detail, but not in function or latency.
* **Voter rule.** The voter is bitwise majority. Averaging in DRGA rounds
  down.
* **Correction register.** The corrected value goes into a separate
  register (VREG) every cycle. It is not written back into OREG.
* **Buffers, feeders, controller.** These are not specified by the
  architecture beyond their existence and purpose. Their organisation,
  DEPTH = 4608 and the two pipeline cycles they add are this design's. 4608
  is 3 x 3 x 512, the deepest im2col dimension of the VGG-11 and ResNet-18
  convolution layers, so every layer of the networks used to evaluate the
  architecture (AlexNet, VGG-11, ResNet-18) fits in M. P and K are tiled by
  the host.
* **Readout.** All effective results are presented in parallel on `c_out`.
  A chip would more likely shift them out.
* **Reset and arithmetic.** Reset is asynchronous, plus a synchronous clear
  per operation. Operands are signed two's complement. The 32-bit
  accumulation wraps on overflow.
* **Fault-injection port.** This is added for verification only.

Not included: the host processor, which sets the mode per layer and does
the tiling; the off-chip memory; and the layer-vulnerability analysis used
to choose the modes. That analysis is a software method.
