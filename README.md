# Res-DPU: a resource-shared digital processing-in-memory macro in SystemVerilog

A digital processing-in-memory (PIM) macro stores a neural-network layer's weights in SRAM. It
computes multiply-accumulates next to the bit cells, so the weights never cross a bus. The cost of
such a macro is in two places: the compute logic added to each bit cell, and the adder tree that
sums the bit products. The Res-DPU design, published by Lokhande et al. ("Res-DPU:
Resource-shared Digital Processing-in-memory Unit for Edge-AI Workloads"), attacks both costs:

* **One AND gate for eight cells.** Eight small dual-port 5T SRAM latches in a column share a
  single 2-transistor AND gate. Only one of the eight cells takes part in a product in any cycle,
  selected by its word line. In exchange, the multiply logic costs 2/8 transistor per stored bit.
  That unit of eight cells and one AND is the *Res-DPU*.
* **A cheaper adder tree.** The column adder tree is built from ripple-carry adders whose full
  adders alternate between a power-gated 26-transistor cell and a 7-transistor cell. The power-gated
  cells restore the logic levels that the 7T cells weaken. This tree is called *TRAIT* (Transistor-Reduced 2-D
  Interspersed Adder Tree).
* **Cycle-controlled approximation (CIA2M).** Activations enter bit-serially, most significant bit
  first. The run can stop after 3 input bits (approximate) or 4 (accurate) instead of all of them.
  This trades accuracy for cycles at run time, with no error-correction hardware.

This repository is a register-transfer model of the whole 16 Kb macro at its published size:
256 rows x 64 bit columns, 16 output channels and 32 activations per operation. It can be
simulated with Verilator and synthesised. The transistor circuits are reduced to their logic
function. Where the published description is silent or inconsistent, this model makes its own
choices; they are listed below and in each file's header.

## How the array is organised

```
  array row  = 8*r + i        r = sub-bank row 0..31,  i = cell row inside the DPU 0..7
  array col  = 4*c + j        c = column group 0..15,  j = DPU inside the sub-bank 0..3

  column group c (one of 16)                     one sub-bank (8 x 4)
  +---------------------------+                  DPU0 DPU1 DPU2 DPU3
  | sub-bank 0   (rows 0..7)  |--4b-+            [c0] [c0] [c0] [c0]  <- cell row 0
  | sub-bank 1   (rows 8..15) |--4b-+            [c1] [c1] [c1] [c1]
  |   ...                     |     +--> TRAIT   ...
  | sub-bank 31 (rows 248..255)|-4b-+   (32 in)  [c7] [c7] [c7] [c7]  <- cell row 7
  +---------------------------+        |          AND  AND  AND  AND  <- one shared AND per DPU
                                        v           \____IN bit_____/
                                   accumulator c  = MAC#c
```

* **Cell** (`a5t_cell`): one stored bit. The write word line (WWL) writes it at the clock edge. The
  read word line (RWL) puts the bit on the DPU's shared line.
* **Res-DPU** (`res_dpu`): eight cells in a column with one shared AND. The product is
  `MUL = IN & (selected cell) & CIM_EN`. At most one RWL of a DPU may be high (an assertion checks
  this).
* **Sub-bank** (`sbnk`): four DPUs side by side that share word lines and one input bit. A cell row
  of a sub-bank is a 4-bit *nibble*. The sub-bank's output is the 4-bit partial product
  `IN ? nibble : 0`.
* **Column group** (`sbnk_column`): 32 sub-banks stacked over all 256 rows, with its TRAIT.
  Sub-bank `r` of every column group receives activation `r`. So a column group holds one output
  channel, such as one convolution filter or one row of a fully connected weight matrix.
* **Macro** (`rep_dpim_macro`): 16 column groups, 16 accumulators, and the peripheral blocks:
  * `cim_driver`: activation registers, bit broadcast, compute word lines, leading-one detection.
  * `sram_driver`: write word lines.
  * `bl_rw_ctrl`: bit-line write data and read capture.
  * `cia2m_ctrl`: the sequencer.

### Where a weight lives

A weight of `P` bits is stored as `ceil(P/4)` nibbles (`w_nib` = 1..4) in consecutive cell rows
of its sub-bank, least significant nibble first, starting at cell row `slot`. For weight
`W[r][c]`, the one multiplied by activation `r` for output `c`, nibble `k` lives at array row
`8*r + slot + k`, columns `4*c .. 4*c+3`. An 8-bit weight therefore takes two of the eight cell
rows, so each sub-bank can hold four 8-bit weight sets at once (slots 0, 2, 4, 6). Switching between the
resident sets only changes `slot`. Rewriting a set needs storage mode, because writes are ignored
while `pim_en` is high.

## One multiply-accumulate, cycle by cycle

A MAC computes, for all 16 column groups at once,

```
mac[c] = sum over r = 0..31 of  act[r] * W[r][c]        (unsigned)
```

The array can only form `one activation bit x one 4-bit nibble` per sub-bank per cycle, so the
product is built by shift-and-add. The loops run from the outside in:

1. **Input bits, most significant first.** When `start` is accepted, the CIM driver reports
   `lead`: one plus the position of the highest set bit in the OR of all 32 activations. The first
   bit processed is `lead-1`. All rows are therefore at the same bit weight in a given cycle,
   which is what lets one adder tree sum them.
2. **Weight nibbles.** For each input bit, the sequencer steps through `k = 0 .. w_nib-1`. It
   raises cell row `slot+k` in every DPU of the array, and the CIM driver puts bit `b` of
   activation `r` on sub-bank `r`.
3. **In the same cycle**, each TRAIT adds its 32 four-bit partial products. At the clock edge its
   accumulator adds that sum shifted left by `b + 4k`.

The run ends after the last nibble of the last input bit. How many input bits that is depends on
the mode (`resdpu_pkg::cia2m_mode_e`):

| mode            | input bits processed        | cycles for 8-bit weights |
|-----------------|-----------------------------|--------------------------|
| `MODE_EXACT`    | all, from `lead-1` to 0     | 2 x lead (16 for full 8-bit data) |
| `MODE_ACCURATE` | 4 (fewer if `lead` < 4)     | 8                        |
| `MODE_APPROX`   | 3 (fewer if `lead` < 3)     | 6                        |

The approximation is exact arithmetic on truncated inputs. The mode drops the input bits below the
last one processed, so the result equals `sum (act[r] & mask) * W[r][c]`, where `mask` keeps bits
`lead-1 .. lead-steps`. Results are never larger than the exact ones. If every activation is zero,
`done` follows `start` directly and the result is 0.

**Switching column groups off.** `col_en[c]` low takes column group `c` out of the dot product,
for example for a filter removed by pruning. Its DPUs' CIM_EN stays low, its adder tree stays
unpowered, and `mac[c]` reads 0. Keep `col_en` stable while a MAC runs.

**Timing.** `start` is sampled at a rising edge while the macro is idle and `pim_en` is high. At
that same edge the accumulators are cleared. Then `steps x w_nib` compute cycles follow, with
`busy` high. `done` is high for the one cycle after the last compute cycle; `mac[]` and `cycles`
are valid from then until the next `start`. Start-to-done latency is `steps x w_nib + 1` cycles.
Activations can be loaded (`act_we`, `act_idx`, `act_data`, 16 bits each) whenever no MAC is
running.

### How much the truncation costs

`tb_cia2m_error_sweep` pushes every pair of 8-bit unsigned operands through the macro (activation
`A`, weight `B`, one row active). Here the common leading one is simply that of `A`:

| mode            | mean error of `A*B` | largest error | mean cycles (8-bit weight) |
|-----------------|---------------------|---------------|----------------------------|
| `MODE_EXACT`    | 0                   | 0             | 14.0                       |
| `MODE_ACCURATE` | 617.6               | 3825          | 7.9                        |
| `MODE_APPROX`   | 1296.9              | 7905          | 5.9                        |

Relative to the product, the error is always below 1/8 of it in accurate mode and below 1/4 in
approximate mode. When several activations share a MAC, the leading one belongs to the largest of
them, so small activations in the same MAC lose relatively more.

## The adder tree

`trait` is a binary tree of `trait_rca` adders. Level `l` has `N_IN >> l` adders of `IN_W+l-1` bits,
each giving a result one bit wider. In the macro, 32 four-bit inputs become a 9-bit sum through
four-, five-, six-, seven- and eight-bit adders. Inside each adder the full-adder type alternates
along the carry chain:

* `fa_pg26t`: sum and carry built from the propagate node `x = a ^ b`. It is power-gated: with
  `rdb` low (storage mode) both outputs are 0.
* `fa_7t`: plain full adder.

Odd levels start the chain with the power-gated cell and even levels with the 7T cell, so the two
types also alternate from level to level. The tree is combinational. Its result reaches the
accumulator in the same cycle. It is powered (`rdb = pim_en`) only in PIM mode, so in storage mode
its output carries no meaning and the accumulators are not enabled.

The module's defaults are `N_IN = 64`, `IN_W = 4`, the size of the published tree drawing
(64 x 4 bit inputs, 10-bit result). The macro instantiates it with 32 inputs; see the departures
below.

## Storage mode

With `pim_en` low the macro is an ordinary 256 x 64 SRAM:

* **Write:** `en_str` high writes `wdata` into row `row` at the clock edge.
* **Read:** `rd_en` high (with `en_str` low) returns row `row` on `rdata`, with `rvalid` high one
  cycle later.

Writes and reads are ignored while `pim_en` is high. The cells have no reset; write every row you
compute with before using it.

## Files

| file | contents |
|------|----------|
| `rtl/resdpu_pkg.sv` | geometry constants, accumulator width, `cia2m_mode_e` |
| `rtl/a5t_cell.sv`, `res_dpu.sv`, `sbnk.sv`, `sbnk_column.sv` | array hierarchy |
| `rtl/fa_pg26t.sv`, `fa_7t.sv`, `trait_rca.sv`, `trait.sv` | adder tree |
| `rtl/accumulator.sv` | shift-accumulator, one per column group |
| `rtl/cim_driver.sv`, `sram_driver.sv`, `bl_rw_ctrl.sv`, `cia2m_ctrl.sv` | peripheral logic |
| `rtl/rep_dpim_macro.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_layer_workloads.sv` | a convolution layer and a fully connected layer mapped onto the macro |
| `tb/tb_cia2m_error_sweep.sv` | every 8-bit x 8-bit product in the three modes, with error statistics |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and finishes by itself. It also has a
watchdog that counts a failure if the run hangs. With Verilator 5, from the repository root:

```
verilator --binary --timing --assert --top-module tb_rep_dpim_macro \
    rtl/resdpu_pkg.sv $(ls rtl/*.sv | grep -v _pkg) tb/tb_rep_dpim_macro.sv
./obj_dir/Vtb_rep_dpim_macro
```

The package has to come first and only once. Pass `-Wno-fatal` if you build with `-Wall`. The
full-size macro builds in about a minute and simulates in well under a second.
The tests:

* `tb_rep_dpim_macro` runs the default-size macro end to end:
  * fills and reads back the array, and checks that a write in PIM mode is ignored;
  * runs MACs with 4-, 8- and 16-bit weights and 2-, 8- and 16-bit activations in all three modes, once with some column groups switched off;
  * checks all 16 results against a reference model, along with the cycle count and the latency.
* `tb_layer_workloads` stores sixteen 3x3x3 filters and a 32x16 fully connected matrix (about 30 %
  zero weights) side by side in different slots. It evaluates a 4x4 output map and the fully
  connected layer, and checks them against direct computation.
* `tb_cia2m_error_sweep` runs all 65,536 8-bit x 8-bit products in the three modes (about 10 s).

To change the size, override `ROWS`/`COLS` on `rep_dpim_macro`. `ROWS/8` (the number of sub-banks, and of
activations) must be a power of two, because the adder tree is a binary tree. `COLS` must be a
multiple of 4. The accumulator width is `ACC_W` in the package.

## Departures from the published description, and how far to trust this model

The published description is short and in places inconsistent. This model follows it where it is
clear and picks one reading where it is not:

* **32 or 64 adder-tree inputs.** The published block diagram shows 64 four-bit inputs per
  column tree, widening to 10 bits, and a 14-bit path to the accumulators. But 256 rows divided into
  8-cell DPUs gives 32 sub-banks per column, matching the 32 activations, the 2048 DPUs quoted for
  16 Kb, and the W0..W31 of the mapping figures. The model uses 32 sub-banks per column. The TRAIT
  module keeps the drawn 64-input default, but the macro instantiates 32 inputs. The 9-bit sum is
  zero-extended onto the 14-bit accumulator input.
* **Cycles per 8-bit operation.** The publication states 4 cycles for an 8-bit CIA2M product.
  Here a sub-bank gives 4 product bits per cycle, so an 8-bit weight takes two cycles per input bit:
  8 cycles in accurate mode, 6 in approximate mode. Only a design that produced 8 product bits per
  sub-bank per cycle could reach 4. With 1-bit (or up to 4-bit) weights, an 8-bit activation does
  take 4 cycles in accurate mode, which matches the stated "8A1W" case. The publication also quotes 1 and 8
  cycles for 1-bit and 8-bit inputs with 8-bit weights. Here those cases take 2 and 16 cycles
  (exact mode).
* **What CIA2M truncates.** The publication writes the first step as `A*2^Kb + B_R*2^Ka`, an
  iterative logarithmic (Mitchell-type) multiplication, and plots an error histogram with errors of
  both signs. With the weight stored in the array and only the input serial, this model implements
  the cycle-controlled part as MSB-first input truncation. It starts at the leading one shared by all
  activations, and its error is always non-negative. It does not reproduce that histogram.
* **Leading one shared by all activations.** The publication speaks of the input's leading bit.
  Using one leading-one position common to all 32 activations is this model's choice. It keeps every
  row of a column at the same bit weight in each cycle.
* **RWL for compute, WWL for write.** The block diagram labels the CIM driver's lines RWL and the
  SRAM driver's lines WWL. One sentence of the text says computation happens "when WWL is
  activated". The model follows the diagram.
* **Weight precision in steps of 4 bits.** Weights are 4, 8, 12 or 16 bits. Shorter weights are
  zero-padded. Activations are 1 to 16 bits, unsigned. Signed data is not described and not
  supported.
* **Enable granularity.** The publication says the compute enable can switch parts of the dot
  product on and off, and that the array can use its parts independently under pruning. Here
  that is one enable per column group (`col_en`), combined with `pim_en`; there is no per-DPU
  enable.
* **"MUX-ed" adder tree.** The publication calls the adder tree multiplexed once but shows no
  multiplexer and does not say what it selects. The model has one fixed tree per column group; the
  only selection it makes is which cell row of each DPU drives the tree (the one-hot read word line).
* **Own choices, not from the publication:**
  * the host interface and its handshake;
  * the accumulator's shift-add form and its 40-bit width (enough for 16-bit x 16-bit x 32 rows);
  * synchronous cell writes;
  * one-cycle reads;
  * exclusive storage and PIM modes;
  * power-gate polarity (`rdb = 1` means powered).
* **Not modelled:**
  * bit-line pre-charge and sensing (analog);
  * the off-chip ReLU and control engine that feeds the macro;
  * pruning hardware: zero weights simply contribute zero.

The checks compare every module against independent reference computations. Only the logic is
modelled: nothing here says anything about the transistor counts, area, delay, power or energy
figures of the original design.

## What fits

All 16 Kb hold 2048 eight-bit weights: 32 inputs x 16 outputs x 4 slots. A convolution filter of
up to 32 weights fits in one column group, for example 3x3 over 3 input channels. A typical
3x3x64 filter of a ResNet-18 or VGG-16 layer needs 576 weights, so one output takes 18 MACs. The
partial results must then be added outside the macro. Whole networks such as ResNet-18 or VGG-16
(millions of weights) are run layer by layer, reprogramming the array between tiles.
