# Ptolemy-style adversarial-input detection hardware in SystemVerilog

An adversarial input is one that has been perturbed slightly so that a DNN
misclassifies it. Inputs like that tend to make the network *execute
differently*. For each class, training can find the small set of neurons that
matter most to that class's decisions; this set is its *class path*. At
inference time the same extraction runs on the current input, giving an
*activation path*. That path is compared with the class path of the
predicted class:

    S = popcount(P & Pc) / popcount(P)

A classifier (a random forest) uses S to decide whether the input is
adversarial.

This RTL implements the hardware that makes the detection cheap:

* **An inference accelerator extended to expose partial sums.** It is a 20×20
  systolic array of 16-bit MACs with 32-bit accumulators. It can store every
  product it forms to a side SRAM, or only a 1-bit "product > threshold" mask.
  It can also re-compute the products of a single output neuron later.
* **A path constructor.** It sorts a neuron's partial sums, picks the fewest
  largest ones whose sum reaches θ times the neuron's value, and sets the
  chosen inputs' bits in a path bit vector. It then computes S.
* **An instruction dispatcher.** It runs the detection program, written in a
  small 24-bit CISC instruction set, and overlaps inference with path
  construction.

The configuration follows the published one:

| Part | Size |
|---|---|
| MAC array | 20×20 at 250 MHz |
| Accelerator SRAM | 1.5 MB |
| Partial-sum/mask SRAM | 32 KB, in 2 KB banks |
| Path-constructor SRAM | 64 KB |
| Sort units | two, 16 elements each |
| Merge tree | one, 16-way |
| Accumulation unit | one |

The micro-controller, the random forest and the DRAM are outside the RTL. They
connect through ports.

## Extracting important neurons

An output neuron `y = Σ x_i·w_i` has *important inputs*. These are the
smallest set of products `x_i·w_i` whose sum is at least `θ·y`, where θ = 0.5.
Two families of algorithms are supported:

* **Cumulative threshold (BwCu)** needs every partial sum of the neuron's
  receptive field, sorted. Two modes supply them:
  * `infsp` in mode 0 stores all partial sums during inference.
  * `csps` re-computes them later for the important neurons only; this is the
    "re-computation" optimisation.
* **Absolute threshold (BwAb/FwAb)** only needs `x_i·w_i > φ` per product.
  `infsp` in mode 1 stores exactly that bit.

The important inputs are found layer by layer, from the output backwards. Each
one becomes an important output of the layer before, and its bit is set in the
path.

## Instruction set

Instructions are 24 bits: `op[23:20] f1[19:16] f2[15:12] f3[11:8] f4[7:4]
f5[3:0]`. The `f` fields name registers r0..r15, which are 32 bits wide.
Opcodes 0–8 are the published ones; 9–15 are this design's scalar
instructions.

| op | mnemonic | operands | unit |
|---|---|---|---|
| 0 | `inf` | f1 = input lines, f2 = weight lines, f3 = output lines | accelerator |
| 1 | `infsp` | as inf, f4 = first partial-sum address | accelerator |
| 2 | `csps` | f1 = neuron (r·DIM+c), f2 = layer number, f3 = partial-sum address | accelerator |
| 3 | `sort` | f1 = source, f2 = length, f3 = destination | path constructor |
| 4 | `acum` | f1 = sorted sequence, f2 = list address, f3 = threshold | path constructor |
| 5 | `genmasks` | f1 = list address, f2 = path base | path constructor |
| 6 | `findneuron` | f1 = layer, f2 = position → f3 | path constructor |
| 7 | `findrf` | f1 = neuron address → f2 | path constructor |
| 8 | `cls` | f1 = class path, f2 = activation path → f3 = S (Q16.16) | path constructor |
| 9 | `mov` | f1 ← imm16 (bits 15:0) | dispatcher |
| 10 | `dec` | f1 ← f1−1, Z ← (result = 0) | dispatcher |
| 11 | `jne` | if !Z: pc ← imm16 | dispatcher |
| 12 | `mul` | f1 ← (f1·f2) >>> 16 (Q16.16, used for θ·y) | dispatcher |
| 13 | `setcsr` | CSR[{f1,f2}] ← f3 | dispatcher |
| 14 | `nop` | | |
| 15 | `halt` | waits until both units are idle and no result is pending | |

CSRs (control and status registers):

| Address | CSR | Meaning |
|---|---|---|
| 0x00 | `K` | reduction depth of `inf`/`infsp` |
| 0x01 | `THD` | absolute threshold φ (Q16.16) |
| 0x02 | `MODE` | 1 = masks, 0 = partial sums |
| 0x03 | `LAYER_RST` | restarts the accelerator's layer count |
| 0x04 | `PATH_WORDS` | path length in 64-bit words, for `cls` |
| 0x40+l | | output base of layer l (`findneuron`/`findrf`) |
| 0x60+l | | partial-sum base of layer l |
| 0x70+l | | receptive-field size of layer l |

The dispatcher (`dispatcher.sv`) issues in order. Fetch and issue take two
cycles per instruction. An instruction waits in two cases:

* **Unit stall:** its unit is busy.
* **Dependency stall:** a register it reads or writes is still owed by a
  `findneuron`, `findrf` or `cls` in flight. A 16-bit scoreboard tracks these.

An `inf` can therefore start while the path constructor is still sorting the
previous layer. This is the overlap that hides most of the extraction cost.

## The accelerator (`dnn_accel`, `pe_array`, `enhanced_mac`)

### Dataflow

`inf` computes one DIM×DIM tile `C = A·W` of depth K. The activation SRAM
holds lines of DIM 16-bit values:

* Line `in_addr+k` holds column k of A (`A[r][k]` for every row r).
* Line `w_addr+k` holds row k of W.

Both lines are read in the same cycle through two read ports. They are fed to
the left and top edges of an output-stationary array through skew registers
(row r is delayed by r cycles, column c by c cycles). The run ends after
`K + 2·DIM − 1` advancing cycles. The DIM accumulator rows are then
requantised and written back as DIM output lines at `out_addr`. Requantisation
takes the value as Q8.8 × Q8.8, shifts right arithmetically by 8, and
saturates to 16 bits.

### The enhanced MAC

Each PE holds its two operand registers, the multiplier and the 32-bit
accumulator. It adds a comparator, `product > thd`, and a mode multiplexer.
The multiplexer sends either the product or the 1-bit comparison to the
partial-sum SRAM. A valid bit travels with the activation, so only real
products are stored.

### Partial-sum capture

This is the part that costs time. After every array step s, all DIM² PE
outputs are written to the partial-sum buffer:

* PE (r,c) goes to entry `s·DIM² + r·DIM + c`.
* The product `A[r][k]·W[k][c]` of output (r,c) therefore sits at step
  `s = k + r + c`.
* Entries outside a PE's k window are zero.
* Entries start at the `infsp` address and wrap around the buffer.

The buffer is 16 banks of 512 words, interleaved by word address. It accepts
16 consecutive words per cycle, so storing 400 products holds the array for 25
cycles per step (`drain_stall`). Masks pack 32 per word, so a step needs 13
words in one cycle, and the mask mode costs almost nothing. This is why the
absolute-threshold variants are far cheaper than BwCu without re-computation.

### Double buffering

The buffer is split into two halves:

* A tracked write that fills the last word of a half marks that half full.
* A step that would write into a full half holds the array (`full_stall`).
  It waits until the DMA has copied the half to DRAM and the controller
  pulses `ps_release`.
* At the end of an `infsp`, the half holding its last entry is marked full.

### Re-computation (`csps`)

`csps` looks up the layer's input address, weight address and K in a small
table. The accelerator fills that table at every `inf`/`infsp`, numbering
layers from the last `LAYER_RST`. Only row 0 of the array is enabled. Row 0
is fed `A[r][k]` of the wanted neuron, and PE(0,c)'s K products are written
to consecutive words. These writes are untracked: they do not touch the
half-full bookkeeping.

## The path constructor (`path_ctor` and its units)

All units share the 64 KB SRAM (`pc_sram`). It has 8192 words of 64 bits, and
each word holds `{tag[31:0], value[31:0]}`. The units reach it through one
read port and one write port, which the running instruction owns; a third
port belongs to the DMA. One instruction runs at a time.

### `sort_engine`

`sort_engine` works in two phases:

1. **Run formation.** Values are read one per cycle and tagged with their
   offset in the receptive field. Each group of 16 goes to one of the two
   bitonic sort units (`sort_unit`), alternately. One unit's result is written
   back while the next group is gathered, so this phase moves one word per
   cycle in each direction. It is memory-bound, as the published analysis
   finds.
2. **Merge passes.** Groups of up to 16 runs are merged by the 16-way
   tournament tree (`merge_tree`), producing one element every two cycles.
   This repeats until a single run remains.

Passes alternate between `dst` and `dst+len`. Phase 1 starts in whichever
region lets the last pass end at `dst`, so the destination needs `2·len`
words. The order is descending value, with ties broken by the smaller tag.

### `accum_unit`

`accum_unit` walks the sorted sequence, adding values until the sum reaches
the threshold register. The element that crosses the threshold is included.
It writes the count at `dst` and the chosen tags at `dst+1…`. Its length is
that of the last `sort`.

### `mask_gen`

`mask_gen` ORs bit `tag` into the path: word `dst + tag/64`, bit `tag % 64`.
Each tag takes a three-cycle read-modify-write. Paths accumulate over
receptive fields and layers; software clears a path before use.

### `similarity_unit`

`similarity_unit` reads the two paths word by word and accumulates
`popcount(P & Pc)` and `popcount(P)`. A 48-step restoring division then gives
S in unsigned Q16.16, where 1.0 is `0x10000`. Both counts and S appear on the
`cls_*` ports for the classifier.

### `addr_unit`

`addr_unit` computes addresses from the CSR layer table:

* `findneuron` returns `out_base[l] + pos`.
* `findrf` returns `psum_base[L] + (addr − out_base[L])·rf_size[L]`, where L
  is the layer of the previous `findneuron`.

## DMA and system view (`dma`, `ptolemy_top`)

The DMA copies `len` words one at a time between three spaces:

* DRAM, through a valid/ready request channel and an in-order response
  channel;
* the partial-sum buffer, read only; a 32-bit partial sum is sign-extended
  into the 64-bit word the sort engine expects;
* the path-constructor SRAM.

The controller commands it through the `dma_*` ports and releases drained
halves with `ps_release`.

`ptolemy_top` connects the dispatcher, the accelerator, the path constructor
and the DMA. It exposes the following ports:

* the program memory port and the register debug port;
* the accelerator SRAM host port, for loading weights and feature maps;
* the DMA, the DRAM channel and the classifier results;
* activity and stall signals, for counting.

## Where this departs from, or adds to, the published design

* **Dispatcher.** The published controller is a Cortex-M4-class MCU that
  interprets the code in software. Here a hardware dispatcher issues the
  instructions. The MCU's other jobs (DMA commands, the random forest) stay
  outside and reach the design through ports.
* **Invented details.** The published text gives none of the following, so
  they are this design's own:
  * the encodings of `mov`/`dec`/`jne` and the other scalar instructions;
  * the operand fields and the CSR map;
  * the Q8.8 format;
  * the tile-level `inf` semantics;
  * the partial-sum layout and the 16-word drain;
  * the half/flag protocol;
  * the SRAM word formats and the list format of `acum`;
  * the serial divider.
* **Extra state for `acum`, `cls` and `csps`.** `acum` takes its length from
  the last `sort` and `cls` its length from a CSR, because the published
  instructions have no such operand. `csps` finds its layer through a table
  kept in the accelerator.
* **Serialised path-constructor instructions.** The published compiler
  software-pipelines sort and acum of different neurons, which this design
  does not do.
* **`mul` operands.** The published listing's `mul` reads a memory operand;
  here both operands are registers.
* **Accelerator SRAM banking.** The 1.5 MB SRAM is one memory with DIM-wide
  lines and two read ports, not 24 banks of 64 KB.
* **DRAM channel.** A single DRAM channel port stands for the four LPDDR3
  channels.
* **Long receptive fields.** A single `sort` holds at most about 2730
  elements: the source plus a 2·len destination in 8192 words. Receptive
  fields larger than that (for example AlexNet fc6 with 9216 inputs, or
  ResNet18's 3×3×512 layers) would need software to split them, and there is
  no instruction that merges two sorted sequences.

## How far it has been checked

Each module has a self-checking testbench in `tb/` that compares it with an
independent reference model. All of them pass.

| Testbench | What it covers |
|---|---|
| `tb_enhanced_mac` | the enhanced MAC |
| `tb_pe_array` | the array, against a matrix product, with random stalls and a row-0-only pass |
| `tb_act_sram`, `tb_pc_sram` | the accelerator and path-constructor SRAMs |
| `tb_psum_buffer` | the partial-sum buffer, including stall, release and flush |
| `tb_dnn_accel` | inf results, the partial-sum and mask layouts, drain-stall cycle counts, the full-half stall, csps |
| `tb_sort_unit`, `tb_merge_tree` | the sort unit and the merge tree |
| `tb_sort_engine` | lengths 1–2000, several merge passes |
| `tb_accum_unit` | includes the four-neuron example with θ = 0.6 |
| `tb_mask_gen`, `tb_similarity_unit`, `tb_addr_unit` | the other path-constructor units |
| `tb_path_ctor` | sort → acum → genmasks → cls at full size |
| `tb_dma` | random DRAM latency and back-pressure |
| `tb_dispatcher` | against an instruction-level reference interpreter |

`tb_ptolemy_top` runs the whole flow at a 4×4 array:

* two `infsp` layers with the testbench draining halves through the DMA;
* a `csps`;
* a two-pass loop of findneuron, findrf, sort, an overlapping `inf`, acum
  with θ·y from `mul`, genmasks and cls.

It checks the results and fails if any of these never happened: drain stall,
full-half stall, unit stall, dependency stall, overlap, csps, DMA, release,
loop branch or cls.

`tb_workload_rf` runs receptive fields of realistic size through the full-size
path constructor with θ = 0.5:

* 576 elements (3×3×64);
* 2304 elements (3×3×256, as in ResNet18's third stage and AlexNet conv3);
* 2730 elements, the single-sort limit.

A sort takes about 5.2 cycles per element, for example 12,002 cycles for
2304 elements, or 48 µs at 250 MHz.

`tb_ptolemy_full` runs the same flow on the full-size design, with no
parameter overrides and K = 20. It takes about ten seconds of simulation.

To run a testbench with plain Verilator:

    verilator --binary --timing --assert --top-module tb_ptolemy_top \
        rtl/ptolemy_pkg.sv $(ls rtl/*.sv | grep -v ptolemy_pkg) tb/tb_ptolemy_top.sv
    ./obj_dir/Vtb_ptolemy_top

Every testbench ends by printing `TB_RESULT checks=N failures=M`.

Not verified:

* timing closure at 250 MHz;
* the MCU software that would generate programs and DMA schedules for a
  real network;
* the random forest.
