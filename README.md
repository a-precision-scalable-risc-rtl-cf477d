# A precision-scalable matrix co-processor for a RISC-V cluster

This is synthesizable SystemVerilog for a matrix-multiply co-processor that sits next to
a cluster of small RISC-V cores at the extreme edge. It addresses two needs. First,
quantized neural networks come in many integer widths. Second, on-device training needs
floating point. One processing element (PE) therefore does, per cycle, one FP16 MAC, one
INT16 MAC, four INT8 MACs, eight INT4 MACs or sixteen INT2 MACs. The narrow integer modes
reuse parts of the same multiplier instead of adding a separate multiplier per width. A 12 x 12
systolic array of these PEs takes a whole matrix product from one command, so the cores issue
a handful of instructions where a core-based SIMD scheme needs hundreds.

The design follows the architecture described in *A Precision-Scalable RISC-V DNN Processor
with On-Device Learning Capability at the Extreme Edge* (Huang et al., ASP-DAC 2024). That
paper gives the block structure, the multiplier and adder organisation and the array size. It
does not give bit-level interfaces, memory layouts or corner-case arithmetic. Those are chosen
here; the section *What is this design's own* lists each of them.

## Data format: one 32-bit word, one to sixteen lanes

Every operand that moves through the array is a 32-bit word:

| precision | lanes per word | lane bits | product / accumulator lane |
|-----------|----------------|-----------|----------------------------|
| FP16      | 1 (bits 15:0, upper half zero) | 16 | 16-bit FP16 in bits 15:0 |
| INT16     | 1 (bits 15:0, upper half zero) | 16 | 32 bits, sign-extended to 64 |
| INT8      | 4  | 8 | 16 bits |
| INT4      | 8  | 4 | 8 bits |
| INT2      | 16 | 2 | 4 bits |

Lane 0 is in the least significant bits. Integers are signed two's complement. A lane
product is exactly twice as wide as the lane. So the multiplier output and the accumulator Y
are always 64 bits, and the adder wraps inside each lane without saturating. Lanes never
interact. A word with four INT8 lanes therefore carries four *independent* matrix products:
lane *l* of Y is the product of lane *l* of A and lane *l* of B. The paper's example is "four
INT8 4 x 4 matrix multiplications" done at once. The accumulator has no headroom beyond the
product width, so long INT8/INT4/INT2 reductions wrap. Software must bound K or rescale
between LOADs.

## The systolic array (`systolic_array`, `ps_pe`)

The array is output-stationary. In each step it takes one column of A (N words, one per
row) from the left and one row of B (N words, one per column) from the top. Row *i* and
column *j* are delayed by *i* and *j* cycles by triangular skew registers. This way
PE(*i*,*j*) sees A[*i*][*k*] and B[*k*][*j*] in the same cycle. X moves right and W moves
down, one PE per cycle. Each PE accumulates `Y += X * W` lane by lane.

A PE is a two-stage MAC:

```
 x_in ->[X reg]-+-> x_out            cycle t  : X, W registered
 w_in ->[W reg]-+-> w_out            cycle t+1: product registered
          |                          cycle t+2: product added into Y
          v
   ps_multiplier ->[P reg]-> ps_adder -> [Y reg] -> y_out (down, in shift mode)
```

A valid bit travels with X and one with W. A PE only accumulates a product whose two operands
were both valid, so bubbles and stalls cost nothing but time. Three array-wide controls
exist:

* `en`: advance everything. When it is 0 the whole array, skew registers included, holds
  (a global stall).
* `clr`: zero all accumulators.
* `shift`: every PE loads Y from the PE above. The columns become shift registers and
  the bottom row appears on `y_bot`: row N-1 first, then N-2, and so on down to 0. After N
  shifts the array holds zeros.

Timing: with `en` held high, a vector pair given in cycle *t* reaches the last PE's
accumulator 2N cycles later. K steps are complete after K + 2N enabled cycles. The
testbench checks both that this is enough and that one cycle fewer is not.

## Inside the multiplier (`ps_multiplier`, `mul_tree8`, `mul_tree4`, `mul2`)

This is the part of the design with the most detail. The multiplier holds two kinds of
hardware:

* **One 16-bit multiplier**, built 17 x 17 signed. In INT16 mode it multiplies the two
  sign-extended operands. In FP16 mode the same unit multiplies the two 11-bit significands,
  hidden bit included. Around it sit the FP16 side path (sign XOR, exponent add, normalise,
  exponent adjust, round, pack) and an output mux. The FP16 multiplier therefore costs no
  second multiplier. On an FPGA this unit is the one meant for a DSP slice.
* **Four 8-bit multiplier trees**, one per byte of the operand word, for INT8/INT4/INT2.
  They are meant for LUTs.

A tree of width *w* has four sub-multipliers of width *w*/2 and one adder. The operands
are split into high (h) and low (l) halves, and the four partial products are shifted and
added:

```
  full mode (one w-bit product)          split mode (two w/2-bit lanes)
  TL = Xh*Wh << w                        TL, BL gated to zero
  BL = Xh*Wl << w/2                      TR = X2*W2  (lane 1), placed at << w
  TR = Xl*Wh << w/2                      BR = X1*W1  (lane 0), placed at << 0
  BR = Xl*Wl                             each lane product cut to w bits
```

Only the two right-hand sub-multipliers have operand muxes. In split mode they switch from
the cross terms to the two lanes. This reuses half of the sub-multipliers and keeps the
output exactly 2*w* bits wide in every mode. `mul_tree8` is built from four `mul_tree4`
trees, and `mul_tree4` from four `mul2` leaves. That gives:

* INT8: `mul_tree8` in full mode, its four 4-bit trees in full mode.
* INT4: `mul_tree8` in split mode. Its two right-hand 4-bit trees each produce one INT4
  lane product in full mode.
* INT2: `mul_tree8` in split mode, and those two 4-bit trees also in split mode. That is
  four 2-bit lanes per byte.

**Signedness.** In a full-mode product of signed numbers, the high half of each operand is
signed and the low half is unsigned. Each 2-bit field is therefore widened to a 3-bit signed
value before it reaches a `mul2` leaf. The extra bit is the field's sign bit if the field is
the top of a signed number or a lane, and 0 if it is an unsigned low half. A signed 3 x 3
multiplier then covers every case. Each tree has `x_sgn`/`w_sgn` inputs that say which case
applies. The tests check `mul_tree4` under all four signed/unsigned combinations and
`mul_tree8` over all 65,536 operand pairs in each mode.

## The adder (`ps_adder`, `fp16_adder`)

The adder is deliberately *not* shared between precisions. Sharing it would add muxes that
cost about as much as the adders they replace. It holds one FP16 adder, one 32-bit adder,
four 16-bit, eight 8-bit and sixteen 4-bit adders, and the precision select picks one group's
result. The FP16 adder works in these stages: unpack, sign decide (by larger magnitude),
align (right shift keeping guard, round and sticky bits), add/subtract, normalise
(leading-zero shift or one right shift), exponent adjust, round to nearest even, and pack.
The integer adders are meant for DSP slices and the FP16 adder for LUTs.

FP16 corner cases, in both multiplier and adder: subnormal inputs are read as zero and
subnormal results are flushed to zero. Overflow gives infinity. Invalid operations (inf-inf,
inf*0, NaN in) give 0x7E00. An exact cancellation gives +0.

## Programming the co-processor (`hwpe_ctrl`, `coprocessor`)

The cores see a small register slave. Each of the six co-processor instructions is one
register write; offsets are in `ps_pkg`:

| offset | command | effect |
|--------|---------|--------|
| 0 | SETUP  | `wdata[2:0]` = precision (0 INT2, 1 INT4, 2 INT8, 3 INT16, 4 FP16); clears all accumulators |
| 1 | XADDR  | byte address of A |
| 2 | WADDR  | byte address of B |
| 3 | LEN    | K, the number of A columns / B rows per LOAD (16 bits) |
| 4 | LOAD   | stream K vector pairs through the array; adds to what Y already holds |
| 5 | STORE  | `wdata` = byte address for Y; drains the array to memory |
| 6 | STATUS | read: bit 0 busy, bits 6:4 precision |

While a command runs, the slave withholds the grant for any write, so the issuing core waits.
Reads are always answered one cycle later. `evt` pulses when a LOAD or STORE ends. Because
LOAD accumulates and only SETUP clears, a long reduction can be split into several LOADs.
STORE empties the array.

Memory layout, in 32-bit words:

* A: K vectors of N words. Vector *k* is column *k* of A (word *i* = A[*i*][*k*]).
* B: K vectors of N words. Vector *k* is row *k* of B (word *j* = B[*k*][*j*]).
* Y: row *i* starts at `base + 8*N*i` bytes. Y[*i*][*j*] takes two words, low half first,
  at word offsets 2*j* and 2*j*+1.

Data path of one LOAD: the two `load_unit`s read their vectors through the
`streamer_interco`. The co-processor has two N-word (384-bit) memory ports, each with a
req/gnt handshake and read data one cycle after the grant. Port 1 belongs to the W (B) load
unit alone. Port 0 is shared, round-robin, by the X (A) load unit and the store unit, which
rarely overlap (only at the boundary between a LOAD and the next STORE). The returned vectors go into
two `sync_fifo`s. A load
unit only issues a read when its FIFO has room for it and for all reads in flight. The array
advances in exactly those cycles in which both FIFOs hold a vector. Otherwise it stalls. After
the K-th vector the controller runs 2N more enabled cycles.

Data path of one STORE: the array shifts one row per cycle into the output FIFO, unless the
FIFO is full. The `store_unit` writes each row in two N-word beats.

Cycle counts with a memory that never stalls, from the LOAD write to `evt`:
**LOAD = K + 2N + 4** (the testbench checks this). STORE = 27 cycles at N = 12. Both load
units fetch one vector per cycle, so the array takes one step every cycle.

## Throughput

At N = 12 and 200 MHz, the array can do 144 PEs x (1, 1, 4, 8, 16) MACs x 2 operations
per cycle. That is a peak of 57.6 GOPS in FP16 and INT16, 230 GOPS in INT8, 461 GOPS in INT4
and 922 GOPS in INT2. The FP16 figure matches the peak quoted for the original design. With
a memory that never stalls, a LOAD of K vectors keeps the array busy for K of its K + 2N + 4
cycles, so long reductions approach the peak; the STORE and the fill and drain of the array
are the overhead. The original design reports about 80 % of the INT8 peak on ResNet-50.
An earlier version of this RTL shared a single memory port between the two load units. That
halved the rate, which is below what the paper measures, so each load unit now has its own
port.

## What is this design's own

The paper gives these parts:

* the block diagram: load units, FIFOs, store unit, streamer interconnect, control and an
  N x N PE array, with X entering from the left, W from the top and results leaving at the
  bottom;
* the six instructions;
* the PE's contents and its register between multiplier and adder;
* the operand packing;
* the multiplier organisation: one shared 16-bit multiplier, four 8-bit trees of 4-bit
  trees of 2-bit multipliers, with the printed shifts and the reuse of half the trees;
* the adder organisation;
* N = 12.

Everything else is chosen here:

* the precision encoding and the register offsets;
* that SETUP clears Y;
* the STORE address carried in the command's write data (the paper names no address for
  the results);
* the memory layout and the memory-port protocol;
* the two memory ports and the round-robin arbitration on the shared one;
* the FIFO depth (4);
* the skew registers and exact latencies;
* the signed/unsigned handling in the trees;
* lane wrap-around;
* all FP16 corner-case rules.

The RTL does not model the surrounding RISC-V cluster: cores, shared data memory banks,
cluster interconnect, DMA, instruction cache and AXI bus. The co-processor's register slave
and two memory master ports are top-level ports for connecting to it. The testbenches use a
behavioural memory model (`tb/tcdm_model.sv`) and drive the register slave directly.

The paper also describes a resource-mapping technique: the 16-bit multiplier and the integer
adders go to DSP slices, the trees and the FP16 adder to LUTs. This is a synthesis directive
for FPGA tools, not logic. The RTL is written so that the split is natural (separate modules
and operators), but it carries no vendor attributes.

## Files

`rtl/` (one module or package per file):

* `ps_pkg.sv`: precision type, register offsets, FP16 round-and-pack function
* `mul2.sv`, `mul_tree4.sv`, `mul_tree8.sv`: multiplier trees
* `ps_multiplier.sv`, `fp16_adder.sv`, `ps_adder.sv`: PE arithmetic
* `ps_pe.sv`, `systolic_array.sv`: PE and array
* `sync_fifo.sv`, `load_unit.sv`, `store_unit.sv`, `streamer_interco.sv`: data movement
* `hwpe_ctrl.sv`: register slave and sequencer
* `coprocessor.sv`: top level (parameters `N = 12`, `FIFO_DEPTH = 4`)

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`). Each prints
`TB_RESULT checks=<n> failures=<m>`. There are also these helpers:

* `fp16_ref_pkg.sv`: FP16 reference built on `real` arithmetic;
* `ps_ref_pkg.sv`: lane-level reference for the PE arithmetic;
* `tcdm_model.sv`: the memory model;
* `coproc_tb_body.svh`: the shared end-to-end test.

`tb_coprocessor` runs that test on a 4 x 4 array, three passes over all five precisions,
with and without memory stalls. It counts array stalls, memory stalls, FIFO back-pressure,
refused commands, accumulating LOADs and cycles in which both ports fetch, and fails if any
of them never happened. `tb_coprocessor_full` runs one pass at the default 12 x 12 size.

To simulate with Verilator, list the packages first:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_coprocessor \
    rtl/ps_pkg.sv tb/fp16_ref_pkg.sv tb/ps_ref_pkg.sv tb/tb_coprocessor.sv -y rtl -y tb
./obj_dir/Vtb_coprocessor
```

Other testbenches are built the same way with their own `--top-module`. The unit
testbenches finish in well under a second. The full-size end-to-end test spends most of its
time in compilation (about 1.5 minutes).
