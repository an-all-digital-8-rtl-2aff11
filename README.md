# ConvCoTM: a Tsetlin machine image classifier in registers and gates

This is synthesizable SystemVerilog for an inference accelerator that classifies
28x28 black-and-white images into 10 classes with a *convolutional coalesced
Tsetlin machine* (ConvCoTM). It follows the architecture of the chip described in
"An All-digital 8.6-nJ/Frame 65-nm Tsetlin Machine Image Classification
Accelerator" (Tunheim et al., IEEE TCAS-I). Where that description is silent,
this RTL makes its own choices, and they are listed below.

A Tsetlin machine does no arithmetic on its inputs. It evaluates *clauses*. A
clause is an AND of a few chosen *literals*, and a literal is an input bit or its
complement. Which literals a clause includes was decided during training: one
"include" bit per clause per literal. In the coalesced variant, all classes share
one pool of clauses. Each class weights every clause with a signed integer. The
class score is the sum of the weights of the clauses that are true, and the class
with the highest score wins.

With convolution, a 10x10 window slides over the image. The clauses are
evaluated on every window position, and a clause counts as true for the image if
it was true at any position. The hardware keeps the whole model in flip-flops:
128 x 272 include bits and 10 x 128 weights. All 128 clauses therefore see their
full model at once, and one window position is evaluated per clock cycle.

## Numbers of the configuration

| quantity | value |
|---|---|
| image | 28 x 28 pixels, 1 bit each (booleanized before it reaches the chip) |
| window, stride | 10 x 10, stride 1 in x and y: 19 x 19 = 361 patches |
| features per patch | 100 window pixels + 18 bits of y position + 18 bits of x position = 136 |
| literals per patch | 136 features and their 136 complements = 272 |
| clauses | 128 |
| classes | 10 |
| weights | 8-bit two's complement, 10 x 128 |
| model size | 34816 include bits + 10240 weight bits = 45056 bits = 5632 bytes |
| class sum | 15-bit signed (holds 128 x [-128, 127]) |
| latency | 366 cycles from `start` to the interrupt; 466 cycles from the first image byte |
| continuous mode | one image every 369 cycles with a processor that reacts at once |

All of these are in `rtl/convcotm_pkg.sv`. The published chip reports 471 cycles
of single-image latency (99 transfer + 372 processing cycles) and a continuous
period of 372 cycles. This RTL is 6 cycles shorter because it has no cycles that
the description does not account for. See "Departures" below.

## How an image flows through the design

```
 byte stream ──► axis_interface ──► image_buffers (2 x 99 B) ──► patch_generator ──► literal_append
      │                                                              (10x28 reg)        (136 → 272)
      └──► model_registers (clk_model) ── 128x272 include bits ──► clause_pool (128 clauses, seq. OR)
                                       └─ 10x128 weights ──────► class_sum x10 (3-stage tree) ──► argmax ──► result
 main_fsm: Idle / Load Model / Patch Generation / Class Sum / Predict / Finished
```

Below, the edge that samples `start` high in Idle is cycle 0.

1. **Cycle 0 (Idle, start = 1).** The first 10 rows of the oldest complete image
   are copied into the 10x28 patch register, and the window goes to (x, y) = (0, 0).
   All 128 clause registers are cleared. The image label is kept for the result.
2. **Cycles 1 to 361 (Patch Generation).** Each cycle shows one patch. The 100
   window bits are picked out of the register by a column multiplexer at offset x.
   The thermometer codes of y and x are appended, and the complements of all 136
   features are appended as well. Every clause ANDs its included literals and ORs
   the result into its register. After x = 18 the register shifts up one row and
   image row y + 10 enters at the bottom. On the last patch (18, 18) the image
   buffer is released, so the processor can already refill it.
3. **Cycles 362 to 364 (Class Sum).** The clause outputs enter ten adder trees.
   Each tree has three pipeline register stages, so the ten sums are ready after
   three edges.
4. **Cycle 365 (Predict).** The argmax tree picks the class with the highest sum.
   The predicted class and the label are registered.
5. **Cycle 366 (Finished).** `intr_done` is high and
   `result = {label[3:0], predicted[3:0]}`. The machine stays in this state until
   the processor drops `start`.

While steps 2 to 5 run, the next image can be streamed into the other image
buffer. This is *continuous mode*. The stream is back-pressured (`s_axis_tready`
low) only when both buffers hold images that have not been classified yet.

## The clause circuit (`clause.sv`)

Each clause `j` computes

```
term_k = l_k | ~include_k | (csrf_en & c_j)         for k = 0..271
cb_j   = (&term) & ~empty,      empty = ~|include
c_j   <= c_j | cb_j             (each enabled cycle; cleared at image start)
```

An excluded literal makes its term 1, so only the included literals matter. A
clause with no included literal would be a constant 1. The `empty` signal forces
such a clause to 0 instead, as TM software does at inference.

The register implements the OR over all patches. The feedback term
`csrf_en & c_j` is the *clause switching reduction feedback* (CSRF). Once a clause
has fired for this image, all of its OR terms are forced to 1. The large AND then
stops toggling for the remaining patches, which saves dynamic power. The result
is unchanged: `c_j` is already 1, and `cb_j` stays 1 for a non-empty clause. The
`csrf_en` pin turns the feedback off so that the two cases can be compared.

## Class sums and argmax

`class_sum.sv` gives each clause a 2:1 multiplexer that selects the weight or
zero, followed by a 7-level binary adder tree. The three register stages sit after
tree levels 3, 5 and 7 (parameter `REG_LEVELS`). The chip's description gives only
"three stages". `argmax.sv` is a fixed tree of nine compare-select cells
(`argmax_cell.sv`). The first five cells compare the pairs (0,1), (2,3), (4,5),
(6,7) and (8,9). The next level reduces 0-3 and 4-7, then 0-7. The last cell
compares the winner of 0-7 with the winner of 8-9. A cell passes its second input
only if that input is strictly greater. A tie therefore goes to the lower class
number, which matches a software `argmax` that returns the first maximum.

## Clock domains and clock gating

There are two clock inputs. `clk_model` clocks only `model_registers`, about 90 %
of the flip-flops. It can be stopped once the model is loaded, because the model
outputs are static during inference. `clk_core` clocks everything else.

While the model is loaded, the byte write strobe passes from the `clk_core` side
to the `clk_model` registers without synchronisers. **The two clocks must
therefore be the same clock during loading.** The testbench derives `clk_model`
from `clk_core` through an enable.

The inference core's clock gating is written as register enables. The clause
registers are enabled during patch generation. The class-sum pipeline is enabled
in the three Class Sum cycles and the Predict cycle, four cycles per image. A
synthesis flow turns these enables into integrated clock-gating cells.
`cg_en = 0` forces the enables on, which models gating switched off. The results
are identical either way.

## Host protocol and data formats

Pins of `convcotm_accelerator`:

- `clk_core` and `clk_model`: the two clocks.
- `reset`: synchronous reset, active high.
- `start` and `load`: control levels from the processor.
- `csrf_en` and `cg_en`: feature enables.
- `s_axis_tdata[7:0]`, `s_axis_tvalid` and `s_axis_tready`: the byte stream. A
  byte moves on an edge where both valid and ready are high. There is no `tlast`:
  the byte counts are fixed.
- `result[7:0]`, `status[2:0]` (the state number), `intr_done` and `intr_model`.

**Loading a model.** Raise `load` in Idle and stream 5632 bytes. When
`intr_model` rises, drop `load`. The machine returns to Idle once the model is
complete and `start` is low. The byte layout is:

- Bytes `34*j + b` (j = 0..127, b = 0..33) hold the include bits of clause j.
  Bit i of such a byte is literal `8*b + i`.
- Byte `4352 + 128*i + j` is the weight of clause j for class i.
- Literals 0..99 are window pixels in row-major order: row r, column c is
  `10*r + c`.
- Literals 100..117 are the y code and 118..135 the x code.
- Literals 136..271 are the complements of 0..135.
- A position p is coded by setting its p lowest bits (thermometer code).

**Classifying.** Stream 98 image bytes and then a label byte. Pixel
`(row, col)` is bit `p % 8` of byte `p / 8`, with `p = 28*row + col`. Raise
`start`, wait for `intr_done`, read `result` and drop `start`. To run in
continuous mode, stream the next image while the current one is being classified.
`start` must only be raised once an image is complete; an assertion in
`inference_core` checks this in simulation.

## Files

| file | block |
|---|---|
| `rtl/convcotm_pkg.sv` | sizes, state type, thermometer helper |
| `rtl/convcotm_accelerator.sv` | top level |
| `rtl/axis_interface.sv` | byte stream, routes bytes to the model or the image buffers |
| `rtl/main_fsm.sv` | main state machine and control decode |
| `rtl/model_registers.sv` | 5632-byte model storage on `clk_model` |
| `rtl/inference_core.sv` | everything on `clk_core` that classifies |
| `rtl/image_buffers.sv` | two image + label buffers with full flags |
| `rtl/patch_generator.sv` | 10x28 register, sliding window, position codes |
| `rtl/literal_append.sv` | features → literals |
| `rtl/clause.sv`, `rtl/clause_pool.sv` | one clause; 128 clauses |
| `rtl/class_sum.sv` | weighted sum of one class, pipelined tree |
| `rtl/argmax.sv`, `rtl/argmax_cell.sv` | argmax tree and its cell |

Each module has a testbench `tb/tb_<module>.sv`. Every testbench checks the
module against values computed independently from the TM equations and prints
`TB_RESULT checks=N failures=M`. `tb_convcotm_accelerator` runs the whole chip at
full size:

- a sparse model, loaded over the stream, whose clauses are cut from ten random
  class templates, including empty clauses and the extreme weights -128 and 127;
- ten noisy copies of the templates classified in continuous mode, with
  back-pressure (every third one carries a wrong label);
- CSRF and clock gating switched on and off between images;
- the model clock stopped during inference;
- the clause outputs, all ten class sums, the prediction, the label, the
  366-cycle latency and the continuous-mode period compared with a reference.

It runs in well under a second of simulated work. To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_convcotm_accelerator \
    rtl/convcotm_pkg.sv tb/tb_convcotm_accelerator.sv
./obj_dir/Vtb_convcotm_accelerator
```

Replace the top-module name to run any other testbench. Verilator finds the
modules in `rtl/` through `-Irtl`. The package has to be listed first.

## Departures from the published chip and choices made here

- **Latency.** This design takes 366 cycles from `start` to the result. The chip
  takes 372 cycles for patch generation, class summation and prediction. The
  description accounts for 361 patch cycles and a 3-stage pipeline but not for the
  rest, so no padding cycles were invented. With the 99 transfer cycles, the
  single-image latency is 466 cycles against the chip's 471.
- **Chosen here, not given by the chip's description:**
  - the byte layouts of model and image;
  - the order of the 136 features;
  - the positions of the three adder-tree register stages;
  - the 15-bit class-sum width;
  - the one-cycle load of the first 10 rows;
  - the buffer full flags and release point;
  - `load` having priority over `start` in Idle;
  - two interrupts (model loaded, classification done);
  - the `status` output;
  - the order of the two nibbles in the result byte;
  - synchronous reset.
- **Clock gating** is expressed as enables, not as explicit gating cells.
  **Stopping `clk_model`** is safe only outside Load Model.
- **Not included:** IO pads and package, clock-gating library cells, and anything
  needed for training (the automata, random patch selection, LFSRs). The chip
  also has none of these training parts. The reduced clause circuit with 10
  multiplexed literals per clause and the scaled-up CIFAR-10 design are paper
  estimates for future chips and are not implemented here.
- **Trust.** All modules are checked by self-checking simulation against
  independent reference code, including fault injection: each testbench is known
  to fail on a deliberately broken copy of its module. Nothing here was checked
  against the chip itself or against trained MNIST models. Models cut from random
  class templates, and noisy copies of those templates, stand in for them.
