# DB-PIM: a digital SRAM compute-in-memory accelerator that skips zeros at three levels

A neural-network layer on an SRAM processing-in-memory (PIM) macro is a
matrix–vector product. Inputs are fed one bit column at a time. Every weight
bit sits in one SRAM cell and is ANDed with the input bit on its row. Most of
that work multiplies by zero:

- **Pruned weight rows.** Many weight rows are removed outright by block-wise
  pruning.
- **Zero weight digits.** An 8-bit weight in canonical signed digit (CSD) form
  has at most four non-zero digits out of eight, and after pruning most weights
  have one or two.
- **Zero input bits.** In a group of post-ReLU INT8 activations, whole bit
  positions are often zero in every member.

This design removes all three kinds of zero from the datapath, without losing
the regular layout that makes an SRAM macro dense:

| Zero | Where it is removed | Mechanism |
|---|---|---|
| Pruned input rows | Before the PIM cores | A per-core bit mask and a leading-one-detector switch compress the input vector, so only kept rows reach the macro. |
| Zero CSD digits | In the weight storage | Only non-zero digits are stored, one per dyadic block, with a 3-bit sign/position tag. A CSD adder tree shifts each product back into place. |
| Zero input bit columns | In front of each macro | The input pre-processing unit (IPU) ORs a group of 16 inputs per bit position. It then feeds the macro only the bit columns that have a one somewhere. |

The RTL is a complete, cycle-level, synthesisable SystemVerilog model of the
chip:

- 8 PIM cores of 4 macros each, with 16 KB of weight cells in total.
- Input, output, instruction and mask buffers.
- The sparse allocation network, a SIMD post-processing core and a controller
  that runs a small instruction set.

Off-chip memory and the offline pruning/encoding flow are not included. A host
load port writes every on-chip memory directly.

## 1. Weights as dyadic blocks

Split an 8-bit CSD weight into four 2-digit *dyadic blocks* DB3..DB0. DB*i*
covers bit positions 2*i*+1 and 2*i*. CSD never has two adjacent non-zero
digits, so a block is either `00` or holds exactly one non-zero digit, in one of
four forms: `01`, `10`, `0(-1)` or `(-1)0`. One non-zero block is therefore
fully described by:

| field | bits | meaning |
|---|---|---|
| Q | 1 (the SRAM cell) | which half holds the digit: 1 → upper (`10`), 0 → lower (`01`) |
| sign | 1 (metadata) | 1 → the digit is −1 |
| index | 2 (metadata) | which block, i.e. shift by 4^index |

So the value of the block is (sign ? −1 : 1) · (Q ? 2 : 1) · 4^index.

A 6T cell exposes Q and Q̄. When an input bit `x` is applied, a dyadic block
multiply-unit (DBMU) produces the pair `{x·Q, x·Q̄}`. That 2-bit pattern is
exactly the product's digit pair, `10` or `01`, or `00` when x = 0.

*Filter threshold.* All weights of one filter are pruned to the same maximum
number of non-zero digits, 1 or 2 (0 means the filter is gone):

- **Threshold 1.** The filter needs one column of cells.
- **Threshold 2.** It needs two columns, and their partial sums are added.

A 16-column macro therefore holds 16 threshold-1 filters, 8 threshold-2 filters,
or any mix by column pair. In this design, a threshold-2 filter always occupies
the column pair (2p, 2p+1). A per-core `pair_cfg` bit p tells the core to add
the two column results when it latches them. The paper fixes the 1-or-2
threshold but not where the second digit goes: the pairing rule is this
design's choice.

Storage per macro is 16 rows × 16 compartments × 16 columns of cells, which is
512 bytes. Each cell has 3 bits of metadata, kept in the core's 1.5 KB metadata
register file. The four macros of a core hold the same weights, so one metadata
RF serves them, with four read ports.

## 2. Inside a macro

```
         group of 16 INT8 inputs (one per compartment) + row
                         │
                    ┌────▼────┐   bit_mask = OR over the 16 inputs per bit
                    │   IPU   │   leading-one detect → one bit column / cycle,
                    └────┬────┘   MSB first, zero columns never sent
        col_bits[16], col_idx, col_row
     ┌───────────────────▼─────────────────────┐
     │ 16 compartments × 16 columns of DBMUs    │  each DBMU = 16 cells (rows)
     │ (pim_array)  → {x·Q, x·Q̄} per cell       │
     └───────────────────┬─────────────────────┘
                 16 columns × 16 products
     ┌───────────────────▼─────────────────────┐
     │ per column: CSD adder tree (ppu)         │  ±{q,q̄}<<2·index, summed in a
     │  → shift by col_idx, negate if bit 7     │  balanced 4-level tree (13 bits),
     │  → 32-bit accumulator                    │  then shift-and-add over bits
     └─────────────────────────────────────────┘
```

- **IPU timing.** A group with P non-zero bit columns occupies the macro for
  max(1, P) cycles. An all-zero group is absorbed in the cycle it is accepted.
  `in_ready` is high when the IPU is idle or sending its last column, so
  back-to-back groups run without bubbles. Worked example: the bit mask
  `0100_1101` is sent as columns 6, 3, 2, 0.
- **Signed inputs.** Bit 7 of a two's-complement INT8 has weight −128. The
  post-processing unit (PPU) negates the tree sum for that column ("signed
  MSB"), so signed and unsigned activations both work.
- **Accumulator.** `acc <= (acc_clr ? 0 : acc) + weighted`. The 32-bit width is
  this design's choice. 256 inputs × 127 × 128 fits with room to spare.

Tree widths grow from 9 bits (a ±2·4³ term) by one bit per level to 13 bits.
This matches the 9/12/13-bit adders the paper prints for its CSD adder tree.

## 3. Sparse allocation network

Block-wise pruning leaves, per core and per 128-input window, a 128-bit *mask*
of kept input rows. Each core has its own mask, because different filters keep
different rows. The network has one `sparse_switch` per core. All switches see
the same 4×128 INT8 input word (one 128-input window for each of the four
macros, i.e. four output pixels m).

Per window, a switch works in three steps:

1. Latch the mask.
2. Each EXTRACT cycle, a chain of 16 leading-one detectors picks the 16 lowest
   remaining kept positions. The switch muxes those inputs out of all four
   pixel rows, padding with zeros when fewer than 16 remain.
3. Over the following SEND cycles, it hands the four groups to macros 0..3 in
   turn, each with the current weight row. A macro that is busy stalls the
   switch.

Kept input number *kc* of the window therefore meets weight row
`row_base + kc/16`, compartment `kc mod 16`. The weights must be loaded in that
compressed order, which is what block-wise pruning makes possible.

With an always-ready macro, a window with G groups takes 2 + G·(1+4) cycles.
The first MVM of a K tile uses `row_base` 0, and a second window of the same
tile continues at `row_base` 8.

## 4. PIM core

A core holds:

- the metadata RF;
- four macros;
- the `pair_cfg` register;
- a 4 × 16 × 32-bit output RF.

Weight rows are written to all four macros at once. A `STORE` instruction first
raises `out_snap`, which copies every macro accumulator into the output RF.
While copying, for each set pair bit p it writes a+b into slot 2p and zero into
slot 2p+1.

## 5. Controller and instruction set

The controller fetches 64-bit instructions from address 0 after `start`. It
runs each instruction to completion and raises `done` at HALT.

| op | fields (body[59:0]) | effect |
|---|---|---|
| NOP (0) | — | nothing |
| MVM (1) | in_addr[7:0], mask_addr[3:0], row_base[3:0], acc_clr | read input word and each core's mask word, (clear accumulators), run all switches, wait until switches and cores are idle |
| STORE (2) | base[11:0] | snapshot accumulators to output RFs, write the 32 result words (core·4+macro) to output buffer base.. |
| SIMD (3) | sop, src_a, src_b, dst, shift, cnt−1 | for i in 0..cnt−1: `ob[dst+i] = op(ob[a+i], ob[b+i])`; QSTORE writes input word dst[15:8], 128-bit slice dst[7:0]+i instead |
| HALT (4) | — | stop |

The SIMD operations work on 16 lanes of 32 bits:

- ADD (residual additions), MUL, MAX (pooling) and RELU.
- QUANT: rounded arithmetic right shift by `shift`, saturated to INT8, output
  in the low byte of each lane.
- QSTORE: the same quantization, but it writes the 16 bytes into the input
  buffer, so a layer's output becomes the next layer's input without leaving
  the chip.

The paper only says that a SIMD core handles the non-MVM operations. The
operation list, the encoding and all controller timing are this design's own.

The mapping loop nest follows the paper's weight-stationary N-K-M order. Tiles
are Tk1 = 16 (compartments) × Tk2 = 16 (rows) = 256 inputs, and Tn = 8·α
filters with α = 8 pixels. The host program unrolls the loops. The hardware
performs one 128-input window for 4 pixels and up to 128 filters per MVM.

## 6. Host port and memory layouts

All loads happen while the controller is idle, one word per `host_we` cycle:

| host_target | address | data |
|---|---|---|
| LD_INST | instruction index | wdata[63:0] |
| LD_INBUF | input word [7:0] (256 × 4096 bit = 128 KB) | byte m·128+k = input k of pixel m |
| LD_MASK | core, word [3:0] | wdata[127:0]: bit k = input k of the window kept |
| LD_META | core, row [3:0] | 768 bits: entry e = c·16+j has sign at 3e, index at 3e+1..3e+2 |
| LD_WEIGHT | core, row [3:0] | 256 Q bits, bit c·16+j |
| LD_PAIR | core | wdata[7:0] = pair_cfg |

`host_raddr` reads output-buffer words (4096 × 512 bit = 256 KB, 16 lanes of
32 bits). `host_rdata` is valid one cycle later.

## 7. What follows the paper and what does not

The following come from the paper:

- Dyadic-block encoding: Q, sign and index, with values ±{1,2}·4^i.
- The 1/2 filter threshold.
- The IPU's zero detection, bit mask, leading-one detection and MSB-first
  column order.
- A CSD adder tree with signed-MSB shift-and-add per column.
- 16 compartments × 16 DBMUs × 16 cells per macro, i.e. 512 B per macro.
- 4 macros per core with identical weights, 8 cores, and a 1.5 KB metadata RF.
- Leading-one-detector switches fed by per-core masks.
- The buffer capacities: 16 KB instructions, 8 × 2 Kb masks, 128 KB input,
  256 KB output.
- A SIMD core and the N-K-M mapping.

The following are this design's own choices:

- **Storage cells.** SRAM cells are modelled as flip-flops with AND gates. The
  analog read path, timing, area and power are not represented, so the paper's
  frequency, area and TOPS figures say nothing about this RTL.
- **Threshold-2 filters** use column pair (2p, 2p+1) and are merged at output
  snapshot time.
- **Interfaces and formats.** The instruction set, the host port, word layouts,
  accumulator width (32 bits), SIMD operation list and rounding are this
  design's own.
- **Group extraction.** Extraction takes one cycle per 16-input group, followed
  by one cycle per macro. The paper describes pipelined extraction but no cycle
  counts.
- **Convolutions.** There is no image-to-column unit. The host arranges
  convolution inputs into 128-input windows per pixel. Depthwise layers have no
  dedicated support: they run as poorly utilised MVMs or on the SIMD core.

### Tool warnings left in place

Lint reports a few unused signals, e.g. the per-switch `done` pulses in the
allocation network and `col_last` inside the macro. They exist because the
sub-blocks are also usable on their own. The opening comment of each affected
module notes this.

## 8. Verification

Every module has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=N failures=M` line. They use random stimulus (`$urandom`) and
a watchdog. Where the design has a rate, they also check it:

- IPU: max(1, P) cycles per group.
- Switch: 2 + 5G cycles per window.

`tb/tb_util_pkg.sv` holds the CSD conversion and dyadic-block helpers the
testbenches use to encode weights.

`tb_dbpim_top` runs the whole chip at its default size: 8 cores, 32 macros,
full-size buffers. It does the following:

1. Draws random masks, including a fully pruned window and an unpruned window.
2. Draws random pair configurations, and 1- or 2-digit CSD weights, including
   negative digits.
3. Loads everything through the host port, then runs this program: two MVMs
   forming one 256-input tile, STORE, QSTORE into the input buffer, RELU, ADD,
   MAX and MUL, then a second MVM on the re-quantized data and STORE.
4. Compares every written output word with a dense integer reference model.

It counts the following events and fails if any never happened:

- pruned inputs skipped;
- zero bit columns skipped;
- all-zero groups;
- merged column pairs;
- negative digits;
- signed-MSB columns;
- switch stalls on busy macros;
- quantization saturation.

The whole program takes about 660 cycles.

## 9. Simulating

With Verilator 5:

```
verilator --binary --timing --top-module tb_dbpim_top \
    rtl/dbpim_pkg.sv tb/tb_util_pkg.sv rtl/*.sv tb/tb_dbpim_top.sv -o sim
./obj_dir/sim
```

Replace `tb_dbpim_top` by any `tb_<module>` to test one block. The full-size
top takes a few minutes to compile, because it contains 8192 DBMUs; the block
testbenches build in seconds. Sizes live in `rtl/dbpim_pkg.sv`. Block modules
take them as parameters with the paper's values as defaults. The top uses the
package constants directly.
