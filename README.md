# A bit-sliced compute-in-memory macro that tolerates stuck-at faults with sign-flip and bit-flip

Compute-in-memory (CiM) crossbars store DNN weights in memory cells and compute
dot products where the weights are stored. Real arrays have cells that are
*stuck*: permanently 0 (SA0) or permanently 1 (SA1), whatever is written. A
weight that lands on a stuck cell is stored wrongly, and the error propagates
into every dot product that uses it.

This RTL implements the memory macro described in *Weight Transformations in
Bit-Sliced Crossbar Arrays for Fault Tolerant Computing-in-Memory* (Malhotra
and Gupta). The macro tolerates such faults without spare rows or columns. Its
two tools are:

* **Sign-flip.** A whole weight column may be stored as `-W` instead of `W`.
  The macro negates that column's dot product afterwards.
* **Bit-flip.** Any single bit-slice of a weight column may be stored
  complemented. The macro replaces that slice's partial sum `p` by
  `sum(I) - p` afterwards, where `sum(I)` is the number of active inputs.

Both choices are made offline. Software that knows the chip's fault map picks
the stored codes so that most stuck cells already hold the value they are stuck
at. The hardware only undoes the transformation exactly. The RTL here is that
hardware: the macro, its peripheral circuits, and a model of the analog array.

## 1. The macro

| quantity | value |
|---|---|
| weights | 64 x 64, 8-bit two's complement |
| activations | 64, 8-bit, unsigned or two's complement (`act_signed`) |
| arrays | 8 crossbars of 64 x 64 binary cells; array `k` holds bit `k` of every weight |
| rows driven at once | 16 of 64 (partial word-line activation, PWA) |
| ADCs | 4-bit flash, one per 8 columns: 8 per array, 64 in all |
| post-processing lanes | 8; lane `a` serves weight columns `8a .. 8a+7` |
| outputs | 64 signed 24-bit dot products |
| latency | 256 conversion clocks + 3 = 259 clocks from `start` to `done` |

Package `cim_pkg` holds these numbers. Every module takes them as parameters,
with these values as defaults.

### How one VMM is computed

Weight `w` is split into bits `w[7..0]`, one per array (*bit-slicing*).
Activation `a` is applied one bit at a time, LSB first (*bit-streaming*): a word
line is at VDD when its input bit is 1. In one conversion step, each column of
array `k` sums the cells that store 1 on active rows whose input bit is 1. This
gives a partial sum `p[k]` between 0 and 16. The step value of one weight column
is

    v = p[0] + 2 p[1] + ... + 64 p[6] - 128 p[7]      (weight MSB is negative)

The shift-and-add accumulates `2^l * v` over the activation bits `l`. When
activations are signed, the value for the MSB (`l = 7`) is subtracted instead.
The four 16-row groups are simply added. The result is the exact signed product
`sum_r W[r][c] * a[r]`.

`cim_controller` visits the steps in this order:

    for phase p in 0..7            (which column of each 8-column group)
      for bit l in 0..7            (activation bit)
        for group g in 0..3        (rows 16g .. 16g+15)
          one clock: every array routes column 8a+p to ADC a, for a = 0..7

Each lane finishes one column before it starts the next, so one accumulator
per lane is enough. Results of phase `p` land in `y[8a+p]`.

### Pipeline

| stage | what happens | where |
|---|---|---|
| 0 | word lines driven, column mux set, cells sum currents, comparators settle | `bitstream_driver`, `cim_subarray` |
| edge | ADC codes latched, `sum(I)` registered | `flash_adc`, `input_sum_tree` |
| 1 | bit-flip correction, slice weighting, accumulate | `column_peripheral` (`bitflip_corrector`, `shift_add`) |
| 2 | sign-flip negation on the finished column, write to output buffer | `signflip_unit`, `output_buffer` |

The controller passes the step tags (`first`, `last`, bit index, phase) along
with the data. The stage-1 tags must select the flip bits. A stage-0 phase
would give the last step of each column the next column's `b_flip` bits.

## 2. Why the two corrections are exact, and where they sit

**Sign-flip.** `sum I*W = -(sum I*(-W))`. If a column is stored as `-W`, its
accumulated dot product is the negative of the wanted one. The fix needs the
*whole* dot product, so it comes **after** shift-and-add. It is one negation per
weight column, shared by all 8 bit-columns. `signflip_unit` builds it as
described for the hardware: an inverter on each bit, then a ripple-carry +1,
then a 2:1 mux. Mux input 1 (negated) is chosen when the column's `col_flip`
bit is set.

**Bit-flip.** For a slice stored complemented, the column sees
`sum I*(1-W) = sum(I) - sum I*W`. So the true partial sum is `sum(I)` minus the
ADC output. This is per slice and per step, so it comes **before**
shift-and-add. Each bit-column has a `bitflip_corrector`: a subtractor and a
2:1 mux, with input 1 (`sum(I) - code`) chosen when the column's `b_flip` bit is
set. `sum(I)` is the number of 1s among the 16 active input bits. One adder
tree (`input_sum_tree`) computes it for all columns of all eight arrays, since
they share the activation vector.

**Storage of the masks.** `col_flip` has one bit per weight column (64 bits).
`b_flip` has one bit per bit-column (8 x 64 bits). Both are near-memory
registers in `flip_mask_regs` and reset to 0.

**Mode.** Sign-flip and bit-flip are alternative techniques; this design never
combines them. The macro contains both datapaths, and the run-time `mode` input
chooses one:

* `MODE_CVM`: no correction
* `MODE_SIGN_FLIP`: only `col_flip` acts
* `MODE_BIT_FLIP`: only `b_flip` acts

The controller captures `mode` at `start`. A chip built for a single technique
would tie `mode` and drop the unused path.

**The offline mapping** is not part of the hardware. For each weight and its
fault pattern, *closest-value mapping* (CVM) chooses the storable code nearest
to the target. A storable code has 0 where a cell is stuck at 0 and 1 where a
cell is stuck at 1. Sign-flip runs CVM on `w` and on `-w` and keeps, per column,
the one with the smaller summed error. Bit-flip tries all 256 slice-flip
patterns `j`. For pattern `j` it runs CVM on the effective value `stored ^ j`,
because a flipped slice turns a stuck-at-0 cell into an effective 1. It keeps
the pattern with the smallest summed error. Package `tb/cim_map_pkg.sv` and the
tasks in `tb/tb_cim_macro.sv` contain a SystemVerilog version of this search.
They exist only to drive the test.

**A caveat of the 4-bit ADC.** Sixteen rows are active at once, so a column can
carry 16 units of current. A 4-bit code tops out at 15. The ADC model saturates
at 15, so a partial sum of 16 is read as 15 and the dot product is off by the
slice weight. Bit-flip makes this more likely, because complementing a
mostly-zero slice makes it mostly ones. The bit-level model in the testbench
reproduces the saturation exactly. The exact-arithmetic check skips columns
where it happened; it occurs only when all 16 active inputs and all 16 cells
are 1. A 5-bit ADC, or 15 active rows, would remove it. The source text gives
the 16 rows and the 4 bits but does not discuss the case.

## 3. Module map

```
cim_macro                      top: the memory macro
├── cim_controller             step sequencer, mode/act_signed capture, pipeline tags
├── bitstream_driver           activation register, word-line drive for (bit l, group g)
├── input_sum_tree             sum(I) adder tree, shared (bit-flip)
├── cim_subarray  x8           behavioural model: 64x64 cells + stuck-at faults + column mux
│   └── flash_adc x8 each      behavioural model: 4-bit flash ADC, latched
├── flip_mask_regs             col_flip and b_flip registers
├── column_peripheral x8       one lane per ADC position
│   ├── bitflip_corrector x8   sum(I) - code, 2:1 mux (one per bit-slice array)
│   ├── shift_add              two's-complement shift-and-add accumulator
│   └── signflip_unit          one's complement + ripple +1, 2:1 mux
└── output_buffer              64 results, done flag
cim_pkg                        sizes and the flip_mode_e enum
```

`cim_subarray` and `flash_adc` stand in for analog circuits. The first is an 8T
SRAM, 1T-1ReRAM or 1FeFET array summing cell currents; the second is a bank of
comparators. They are written so that a simulator and a linter accept them, and
they also pass through synthesis. But their gates say nothing about the real
circuits. The column current is an integer count of conducting cells, with no
noise, IR drop or device non-linearity. Everything else is ordinary
synthesizable logic.

## 4. Using the top level

Ports of `cim_macro` (all synchronous to `clk`; `rst_n` is an active-low
synchronous reset):

| port | use |
|---|---|
| `w_wr_en, w_wr_array[2:0], w_wr_row[5:0], w_wr_data[63:0]` | write one row of one bit-slice array; bit `c` of `w_wr_data` is bit `k` of weight `(row, c)` |
| `flt_wr_en, flt_array, flt_row, flt_sa0[63:0], flt_sa1[63:0]` | **simulation only**: mark cells of a row stuck at 0 / 1; stands in for the defects of a real chip |
| `cf_wr_en, cf_wr_data[63:0]` | write `col_flip` |
| `bf_wr_en, bf_wr_slice[2:0], bf_wr_data[63:0]` | write the `b_flip` bits of one slice (array) |
| `mode`, `act_signed`, `act_in[64]`, `start` | start a VMM; sampled at the edge where `start` is high and `busy` is low |
| `busy`, `done`, `y[64]` | `done` pulses for one clock when all 64 results are valid; `y` holds them until the next VMM overwrites them |

To deploy a mapped layer:

1. Write the 8 x 64 array rows from the stored codes.
2. Write `col_flip` or `b_flip` (or neither for CVM only).
3. Start VMMs.

`done` arrives 259 clocks after the `start` edge. `act_in` may change after
that edge.

## 5. Simulating

Every testbench is self-checking and ends with
`TB_RESULT checks=N failures=M`. With Verilator 5, from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal rtl/cim_pkg.sv -Irtl -Itb \
          tb/tb_cim_macro.sv --top-module tb_cim_macro -Mdir obj_macro -o sim
./obj_macro/sim
```

Use the same command with another `tb_*` name for the block tests. The
end-to-end test runs the macro at its full default size. It builds in about
15 s and runs in under a second.

| testbench | what it establishes |
|---|---|
| `tb_cim_macro` | full macro at default size; see below |
| `tb_workload_layer` | three network layers tiled onto the full-size macro, fault rates 0-5 %; see below |
| `tb_column_peripheral` | one lane, 60 back-to-back columns over all modes; bit-flip before, sign-flip after accumulation; `res_valid` timing |
| `tb_cim_controller` | 256 steps in phase / bit / group order, tags one and two stages late, `start` ignored while busy, mode capture |
| `tb_shift_add` | two's-complement reconstruction with signed and unsigned activations, idle cycles |
| `tb_cim_subarray` | column currents with random data and 6 % stuck cells against an independent count |
| `tb_flash_adc` | code = min(current, 15), latched |
| `tb_bitflip_corrector` | exhaustive over code and `sum(I)` |
| `tb_signflip_unit` | negation on edge and random values |
| `tb_input_sum_tree`, `tb_bitstream_driver`, `tb_flip_mask_regs`, `tb_output_buffer` | their block's function |

`tb_cim_macro` draws a random layer and puts random stuck cells into 5 % of
all cells, half SA0 and half SA1. It then deploys the layer four ways:

1. naive write, where the faults visibly corrupt weights
2. CVM only
3. sign-flip
4. bit-flip

Each deployment runs three VMMs: unsigned activations, signed activations, and
all ones. Every output is compared with a bit-level model of the macro written
in the testbench (faults, 16-row groups, ADC saturation, corrections). Outputs
without saturation are also compared with the plain integer product of the
activations and the effective weights. The test also checks:

* the 259-clock latency
* that sign-flip and bit-flip never do worse than CVM on summed weight error
* that every mechanism occurred at least once

For one seed the summed absolute weight error was 25465 naive, 7432 with CVM,
5226 with sign-flip and 3472 with bit-flip. That is the ordering the technique
predicts.

`tb_workload_layer` runs whole layers, tile by tile, on the full-size macro:

* a ResNet-18 stage-1 3x3 convolution, 64 to 64 channels (576 x 64, 9 tiles)
* a ResNet-50 bottleneck 1x1 reduction, 256 to 64 channels (4 tiles)
* a 64-output slice of a ViT-Base feed-forward layer (768 inputs, 12 tiles,
  signed activations)

The shapes are standard network dimensions; the weights and activations are
synthetic. For stuck-at rates of 0 to 5 % in 1 % steps, each tile gets a fresh
fault map and is deployed with CVM, sign-flip and bit-flip in turn. The tile
outputs are summed as a host would. Every VMM is checked as in `tb_cim_macro`.
The layer result must be exact at 0 %, and at every rate both corrections
must do no worse than CVM on weight error. The test prints a table of weight
error and layer-output error per rate and mapping. For the ResNet-18 layer at
5 % it reported a summed weight error of 67743 with CVM, 47502 with
sign-flip and 31814 with bit-flip. The run takes about 45 s.

## 6. What follows the source and what is this design's own

From the source description:

* 8-bit weights in eight binary bit-slice arrays of 64 x 64
* 8-bit activations streamed bit by bit with 0/VDD levels
* two's-complement reconstruction, with negative MSB terms
* 16 of 64 rows active at once
* 4-bit flash ADCs, one set of peripherals per 8 columns
* sign-flip hardware: register, two's-complement unit, 2:1 mux, placed after shift-and-add
* bit-flip hardware: register, shared adder tree for `sum(I)`, subtractor, 2:1 mux, placed before shift-and-add
* the stuck-at-0 / stuck-at-1 fault model

Choices made here, where the description is silent:

* The step order and one conversion per clock. The source calls the operation
  "one cycle" but also says that PWA and column sharing cost latency. This RTL
  follows the PWA and sharing, giving 256 clocks.
* The column-to-ADC grouping: ADC `a` serves columns `8a .. 8a+7`.
* Contiguous 16-row groups.
* ADC thresholds at k + 0.5 units, with saturation at 15.
* The register after the adder tree.
* A 24-bit accumulator.
* A run-time mode input carrying both correction paths.
* `act_signed` as a run-time input.
* Row-wise programming ports and the simulation-only fault port.
* Synchronous active-low reset.
* The output register file.

Not built:

* The offline mapping software and the precomputed CVM lookup table that
  speeds it up (it has 6^8 entries for 8-bit weights). They run on a host
  before deployment.
* The off-chip store of the fault map.
* The digital cores that run transformer self-attention.

A whole network needs many macros, or re-programming. ResNet-18 has about 11.7
million weights; one macro holds 4096. Each 64 x 64 tile of a layer runs as one
VMM of this macro.
