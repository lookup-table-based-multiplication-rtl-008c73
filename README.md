# A multiplication-free lookup-table accelerator with a self-timed carry-save pipeline

This is the RTL of a small DNN accelerator macro that computes matrix products
with no multipliers. It builds on the MADDNESS approach to approximate matrix
multiplication. Each input subvector is replaced by the nearest of 16 learned
prototypes. The dot products of every prototype with every weight vector are
worked out offline and stored in small tables. Inference then needs only three
steps: classify the subvector, read one table entry, and add it to a running sum.

The macro does this with three ideas:

* **A decision-tree encoder made of comparators.** A 4-level binary tree of 15
  comparators sorts a subvector into one of 16 prototypes. Each comparator
  stores its own threshold. Only the four comparators on the path taken ever
  evaluate.
* **Lookup tables with completion detection.** Each table is 16 rows × 8 bits,
  one row per prototype. The read bitlines themselves signal when a read has
  finished, so no timing margin is needed.
* **A pipeline of compute blocks without a global clock.** The blocks pass a
  partial sum along the chain in carry-save form. Neighbouring blocks
  synchronise with a four-phase handshake. Only at the end of the chain is the
  sum resolved by ripple-carry adders.

The silicon this describes is clockless. The RTL here is a **clocked, cycle-level
model** of it. One `clk` cycle stands for one gate-delay step, such as one
comparator stage, one bitline discharge or one handshake transition. The logic
function and the order of events are modelled exactly. The absolute timing is not.

## What the macro computes

There are `N_S` compute blocks (32 by default) and `N_DEC` decoders per block
(16 by default). For a convolution, block *k* handles input channel *k*, and
decoder position *j* handles output kernel *j*. For one output pixel:

```
row_k = tree_k(x_k)                         4-bit prototype index of block k
y[j]  = sum over k = 1..N_S of  T[k][j][row_k]      (16-bit, two's complement, wraps)
```

* `x_k` is the set of four subvector elements that block k's tree compares.
  The choice of which elements of, say, a 3×3 patch go to the tree is made
  offline.
* `T[k][j][r]` is the signed INT8 entry: the dot product of prototype *r* of
  channel *k* with kernel *j*'s weights for that channel.

The table capacity is 32 × 16 × 16 × 8 bit = 64 kbit. Each table is written
once before inference.

## Module map

```
maddness_macro                      top: chain of blocks + output side
├── global_write_driver             host write port -> broadcast D_1..D_Ndec, A, LWE/TWE, block select
├── compute_block  [N_S]            one pipeline stage / input channel
│   ├── local_write_control         this block's write enables (only when selected and CALCE low)
│   ├── wwl_decoder_driver          A[3:0] -> one-hot WWL[15:0]
│   ├── input_buffer                2-entry FIFO of operand sets (4 x 8 bit)
│   ├── bdt_encoder                 15 x dlc in a tournament -> one-hot RWL[15:0]
│   │   └── dlc [15]                8-bit dual-rail comparator with stored threshold
│   ├── pipeline_controller         four-phase handshake, iCLK / PCHE / RWL enable
│   ├── rwl_driver                  gates RWL onto the decoders' read wordlines RWL'
│   ├── decoder [N_DEC]             one table + carry-save adder + output latches
│   │   ├── lut_sram                16 x 8 two-port array with precharged read bitline pairs
│   │   ├── csa                     16-bit carry-save adder
│   │   └── rcd_tree                8 column completions -> RCD_LUT
│   └── rcd_tree                    N_DEC RCD_LUT -> block RCD
├── rca [N_DEC]                     16-bit ripple-carry adder, S + 2C of the last block
├── output_register                 captures the N_DEC sums when the last block's ACK rises
└── delay_gate                      ACK_Ns delayed, then inverted into REQ_O
maddness_pkg                        widths, sizes and the carry-save type cs_t
```

## The encoder: a tree of dual-rail comparators

Comparator *n* (`dlc`) holds an 8-bit threshold `t_n` and compares it with
one unsigned 8-bit operand. It has two output rails, YP and YN. While the
comparator is not evaluating, both rails are high (precharged). During
evaluation exactly one rail falls:

| condition | YP | YN |
|-----------|----|----|
| precharge | 1  | 1  |
| t > x     | 0  | 1  |
| t = x     | 0  | 1  |
| t < x     | 1  | 0  |

`done = YP xor YN` is the comparator's own completion signal. In silicon, the
comparator is a chain of eight 1-bit stages, starting at the MSB. A stage whose
two bits differ decides at once. A stage whose bits are equal passes the
decision down to the next stage. The model keeps this data-dependent delay, at
one cycle per stage. A comparison settled by the MSB takes 1 cycle; equal
operands take 8.

The tree numbers its nodes like a heap. Node 0 is the root. Node *n* has a lower
child 2n+1, taken when x ≤ t, and an upper child 2n+2, taken when x > t.
Level *l* compares operand `x[l]`. A child enters evaluation only when its
parent has finished and chosen it. The eight leaves, nodes 7 to 14, drive
wordlines 2(n−7) (for x ≤ t) and 2(n−7)+1 (for x > t). The wordline index is
therefore the 4-bit word of branch decisions, root first. One lookup costs
4 to 32 cycles of encoder time.

**The tie rule.** The source pictures label the upper branch "x ≥ t". The
comparator's truth table, however, sends x = t to the same rail as x < t. This
RTL follows the truth table, so a tie takes the lower branch. A threshold
trained under the "≥" rule should be loaded as t − 1.

## The decoder: reading a table and adding without carries

Each table column has a pair of read bitlines, RBL and RBLB. While the block is
idle, `pche` holds both high. When the read wordline driver raises one row,
that cell pulls exactly one line of each pair low:

* RBL falls for a stored 0.
* RBLB falls for a stored 1.

RBL is thus the data bit. The NAND of the pair, `RCD_col`, rises as soon as
the column's read is complete. A pulse generator turns that edge into a
one-cycle latch enable, GE. The GE pulse latches that column's full-adder
result.

The adder (`csa`) is a row of independent full adders. For each bit *i* it adds
three things:

* the entry bit (sign-extended to 16 bits),
* the incoming sum bit `S[i]`,
* the incoming carry bit `C[i−1]`.

It produces a new `S[i]` and `C[i]`. No carry propagates inside a block, so
its delay does not depend on the word width. The partial sum travels down the
chain as `cs_t {S[15:0], C[14:0]}`, standing for S + 2C mod 2^16. The eight
upper adder bits see the sign bit and are latched with column 7's GE. The
eight column completions are ANDed by a NAND/NOR tree (`rcd_tree`) into
`RCD_LUT`. A second tree ANDs the `RCD_LUT` of all decoders of the block into
the block's `RCD`.

## The self-timed pipeline

This part takes most care to follow. Each pair of neighbouring blocks, k
(producer) and k+1 (consumer), shares two wires:

* `ACK_k`, from block k to block k+1: high means block k's latched partial sums
  are valid.
* `REQ_{k+1}`, from block k+1 to block k: high means block k+1 has no claim on
  those sums. It falls once block k+1 has latched its own result from them.

One transfer runs through four phases:

```
ACK_k  ____/‾‾‾‾‾‾‾‾‾‾‾‾\______________
REQ_k+1 ‾‾‾‾‾‾‾‾‾\______________/‾‾‾‾‾‾
            1    2      3       4
1 block k has latched a new partial sum
2 block k+1 has used it (its own latches now hold the next sum)
3 block k may now overwrite its latches later; it withdraws ACK
4 block k+1 re-arms
```

A block's controller (`pipeline_controller`) starts a lookup only when five
conditions all hold:

* CALCE is high.
* Its input buffer holds an operand set.
* `ACK_{k-1}` is high (its input sum is valid).
* `REQ_{k+1}` is high (the next block has released the previous result).
* Its own last transfer has finished (`ACK_k` low, `REQ_k` high).

It then raises `iclk` (which drops precharge) and enables the wordline driver
once the encoder is done. It finishes when `RCD` rises: it raises `ACK_k`,
lowers `REQ_k`, pops the input buffer and returns to precharge. Between
lookups it completes phases 3 and 4 on both sides, independently.

Timing of one lookup, counted in cycles from the edge that starts it, where
*L* is the encoder latency (4 to 32):

| cycle | event |
|-------|-------|
| 0     | `iclk` rises, precharge released, root comparator evaluates |
| L     | encoder done, one-hot wordline driven on all `N_DEC` tables |
| L+1   | bitlines discharged, `RCD_col`/`RCD_LUT`/`RCD` high, GE pulse |
| L+2   | sums latched; `ACK_k` up, `REQ_k` down, back to precharge |

The ends of the chain work as follows:

* **First block.** It sees a constant zero sum. Its `ACK_0` is simply its own
  `REQ_1`.
* **Last block.** Its `ACK` feeds the output register, which captures the N_DEC
  ripple-carry results on the rising edge and pulses `y_valid`. The same `ACK`
  also passes through `delay_gate` (2 cycles) and an inverter to become
  `REQ_O`, the last block's `req_in`.

Because each block waits only for its neighbours, block k works on pixel p+1
while block k+1 works on pixel p. A block with a slow lookup, such as many
threshold ties, stalls only the blocks behind it, and only when they catch up.

## Loading tables and thresholds

The host writes with CALCE low. The global write driver registers one request
and broadcasts it one cycle later.

* `wr_lut` writes row `wr_addr` of all N_DEC tables of block `wr_blk`, with
  `wr_data[j]` going to decoder j.
* `wr_thr` writes `wr_data[0]` as the threshold of comparator `wr_addr` (0..14)
  of block `wr_blk`.

Writes that arrive while CALCE is high are ignored. Loading a whole macro
takes 32 × (16 + 15) write cycles.

Operands enter through one valid/ready port per block, `x_in[k][0..3]`. Block k
must receive the operand sets of successive pixels in the same order as every
other block. Each port has a 2-entry FIFO, so the next set can be loaded while
the current one is being classified.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N_S` (top) | 32 | compute blocks (pipeline stages, input channels) |
| `N_DEC` (top, block) | 16 | decoders per block (output kernels) |
| `IBUF_DEPTH` | 2 | operand FIFO depth per block (own choice) |
| `SINK_DELAY` | 2 | delay gate before `REQ_O` (own choice) |
| `LUT_W`, `LUT_ROWS`, `ACC_W`, `X_W` | 8, 16, 16, 8 | fixed in `maddness_pkg` |

The source description also reports configurations with `N_DEC` = 4, 8 or 32
and `N_S` = 4. They are reached by overriding the two top parameters.

## How the design is built, and where it is its own

The following come from the source description of the macro: the block
structure, the sizes, the comparator truth table, the tree numbering and
wordline order, the 16×8 two-port tables, the NAND completion per column, the
GE pulse, the NAND/NOR completion trees, the carry-save accumulation with
S[15:0]/C[14:0], the per-decoder 16-bit ripple-carry adders, and the output
register with a delay gate and inverter at the end of the chain.

The following are this design's own choices, because the source is silent on
them:

* It uses a clocked model of the clockless circuit, with one cycle per
  comparator stage, bitline discharge or handshake step.
* The handshake wires' directions and polarities and the phase order. The
  source names ACK_k/REQ_k and states only that a four-phase protocol is used.
* Sign extension of INT8 entries into the 16-bit adder. Entries are signed;
  operands and thresholds are unsigned.
* Which bitline discharges for which stored value.
* The tie rule described above.
* The write path for thresholds, the block select, and CALCE as a
  calculate/write mode bit.
* The input FIFO and its depth, and the zero source at the head of the chain.
* The delay-gate length.
* Output latches modelled as GE-enabled flip-flops.
* Asynchronous active-low reset everywhere except the table arrays, which must
  be written before use.

One difference from the source: it mentions "a 16-bit ripple carry adder", but
its block diagram shows one per decoder position. The RTL has `N_DEC` of them.

The same diagram also shows a 3-bit bus, D_0[2:0], leaving the global write
driver, but its purpose is not given. It is not built. Here thresholds travel
on the first data lane, and the block select is a separate input.

Not modelled: transistor-level behaviour (10T/6T cells, precharge devices,
pulse-generator delay chains), energy, and real delays. The source reports
these from circuit simulation.

## Using the design for a network

A conventional layer maps onto the macro in tiles. Each tile covers 32 input
channels × 16 kernels, with a 16-entry table per (channel, kernel) pair. A
ResNet-9-sized layer with 512 input and 512 output channels needs
512 × 512 × 16 × 8 bit = 32 Mbit of tables. That is 512 tiles of the 64 kbit
macro. The tiles are reloaded between passes, and the partial results of the
channel tiles are added outside the macro. The source does not describe such
tiling; it is not part of this RTL.

`tb/tb_conv_layer.sv` runs one such tile at the default size: a 3×3
convolution of a 32-channel 6×6 input with 16 kernels, which gives 16 output
pixels × 16 kernels. The host side is done in the testbench, and goes as follows.

* Each channel gets its own tree.
* Each leaf's prototype is the mean of the 3×3 patches that reach it.
* Each table entry is the prototype's dot product with one kernel's weights
  for that channel, divided by 64 and clipped to INT8.
* Per pixel and channel, the four tree levels compare patch elements a0, a3,
  a6 and a7 (row-major order). This is the example the source gives for a
  nine-element subvector.

The macro's output must equal the table-sum reference exactly. For
information, the testbench also prints the mean distance between that
approximation and the exact convolution. This distance is large for random
images, because four comparisons say little about nine random pixels.
Approximation quality depends on trained trees and prototypes, which are
outside the hardware.

A single pass sums at most 32 entries of magnitude ≤ 128. That is |y| ≤ 4096,
so the 16-bit accumulator cannot overflow within one pass.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. It ends by
printing `TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/maddness_pkg.sv \
          tb/tb_maddness_macro.sv --top-module tb_maddness_macro -o sim
./obj_dir/sim
```

Replace the testbench name to run any other one.

`tb_maddness_macro` runs the whole macro at its default size (32 × 16). Building
it takes about two minutes; running it takes under a second. It:

* loads random tables and thresholds, and checks that a write during
  calculation is ignored;
* streams 48 pixels with random input gaps and a CALCE pause;
* checks every result against a reference tree walk and table sum;
* checks that each mechanism happened at least once: fastest and slowest
  encoder path, back-pressure from a downstream block, waiting for the
  upstream block, waiting for input, CALCE pause, blocked write, and several
  blocks evaluating at once.

`tb_conv_layer` also runs at the default size. It feeds one tile of a 3×3
convolution through the macro, as described in the previous section.

The other testbenches check:

* **Per comparator:** truth table and latency.
* **Encoder:** tree walk, latency, and exactly four comparators firing per
  lookup.
* **Decoder:** completion latency, carry-save sums, and that the latches hold.
* **Controller:** every handshake edge against a random environment.
* **Remaining modules:** a reference model each.

The simulator used has two states, so testbenches initialise everything they
read and ignore outputs while reset is active.
