# Signed-ternary compute-in-memory core (SiTe CiM), in SystemVerilog

Ternary neural networks restrict weights and activations to {-1, 0, +1}. A dot product of two
such vectors is the number of +1 products minus the number of -1 products. This core computes
those dot products inside the weight memory. Each ternary weight is held in two ordinary bit
cells. The core adds a few transistors that can *cross-couple* the two cells onto each other's
read bitline. The input's sign then decides whether a cell's stored value lands on the "plus"
bitline or the "minus" bitline. Sixteen rows are read at once. Each column's two bitlines then
hold the count of +1 products and the count of -1 products. Per-column converters digitize the
two counts, and peripheral units subtract and accumulate them.

The circuit technique is the one of *"SiTe CiM: Signed Ternary Computing-in-Memory for Ultra-Low
Precision Deep Neural Networks"* (Thakuria et al., Purdue University). This RTL is an independent
implementation. It models that paper's memory arrays at the level of bitline step counts, and
builds the digital periphery and control around them. The paper leaves most of the periphery
and control unspecified, so those parts are this implementation's own design.

Two flavours of the array are provided and selected with the `FLAVOR` parameter:

* **SITE_I**: two cross-coupling transistors in every cell. Voltage sensing. Two ADCs per column,
  then a digital subtractor.
* **SITE_II**: four cross-coupling transistors shared by each 16-cell sub-column, so the area is
  smaller. Current sensing. An analog comparator and current subtractor, then one ADC per column.

The two flavours give the same result except when a column saturates (see *Saturation*).

## Ternary codes

Every ternary quantity uses a 2-bit differential code (`site_pkg::trit_e`):

| value | code | weight cells M1 M2 | SITE_I wordlines RWL1 RWL2 | SITE_II wordlines RWL, RWL_t1, RWL_t2 |
|------:|:----:|:------------------:|:--------------------------:|:------------------------------------:|
|  0    | 00   | 0 0                | 0 0                        | 0 0 0                                |
| +1    | 01   | 1 0                | 1 0                        | 1 1 0                                |
| -1    | 10   | 0 1                | 0 1                        | 1 0 1                                |

Bit 0 is the "positive" side (M1, RWL1) and bit 1 the "negative" side (M2, RWL2). Code 11 is
never produced and is read as 0. A bit cell that stores 1 is in its low-resistance state. If an
open access transistor connects it to a bitline, it discharges that bitline by one step (SITE_I)
or sinks one unit of current from it (SITE_II).

## How a cell multiplies

**SITE_I** (`site1_cell`). M1 reaches RBL1 through AX1 and M2 reaches RBL2 through AX2, both
gated by RWL1. Cross-coupling transistors gated by RWL2 connect M1 to RBL2 (AX3) and M2 to RBL1
(AX4). So:

* Input +1 (RWL1) puts the weight on the bitlines as stored: W=+1 discharges RBL1, W=-1
  discharges RBL2.
* Input -1 (RWL2) swaps them: W=+1 discharges RBL2, W=-1 discharges RBL1.
* Input 0 opens nothing.

RBL1 therefore discharges exactly when I·W = +1, and RBL2 exactly when I·W = -1.

**SITE_II** (`site2_subcol`). The cells of a 16-row block share local bitlines LRBL1/LRBL2 in
each column. The row wordline RWL_i connects cell i to them. Four shared transistors connect the
local bitlines to the global ones:

* RWL_t1 connects them straight: LRBL1→RBL1 and LRBL2→RBL2.
* RWL_t2 connects them crossed: LRBL1→RBL2 and LRBL2→RBL1.

The same product rule results: one unit of low-resistance current flows on RBL1 for I·W = +1,
and on RBL2 for I·W = -1. Because the shared transistors serve the whole block, **only one row
per block can be driven at a time**. An assertion in `site2_subcol` checks this.

A SITE_II sub-column whose weight is 0 still draws a small high-resistance current I_HRS on both
global bitlines. Every driven block contributes one unit, I_LRS or I_HRS, to *each* bitline. So
I_RBL1 − I_RBL2 = (n1 − n2)·(I_LRS − I_HRS), and the model counts only the low-resistance units.

## One array access and saturation

An access drives 16 rows, one in each group of 16 rows. For SITE_II these groups are the
blocks. `sel[g]` picks the row in group g and `in_t[g]` is its input. Per column, let *a* be
the number of +1 products among the 16 rows and *b* the number of -1 products.

The column converter is a 3-bit flash ADC, which resolves 0..7, plus one extra sense amplifier
for the value 8 (`site_adc`). Any count from 8 to 16 reads as 8. The 16-rows-per-access choice
trades parallelism against sense margin: the paper's bitline voltage becomes hard to resolve
beyond 8 steps. It relies on DNN sparsity to make counts above 8 rare. The two flavours place
the subtraction differently, so they saturate differently:

* SITE_I: `psum = min(a,8) − min(b,8)`. Each bitline has its own ADC, then a digital subtractor
  (`site_sub`).
* SITE_II: `psum = S · min(|a − b|, 8)`, where S = +1 only if a > b. The comparator gives S and
  the current subtractor forms |a − b| before the single ADC (`site2_compsub`, `site_adc`).

Example: a = 12, b = 5 gives 8 − 5 = 3 in SITE_I and 7 in SITE_II. The true value is 7. Both
outputs lie in −8..+8 and are 5-bit signed numbers.

Only the cells of the 16 activated rows are modelled in SITE_I. A multiplexer per group picks
them out of the weight storage, and the other 240 rows have both wordlines low, so they cannot
touch a bitline. SITE_II models all 16 cells of each sub-column, because its one-row-per-block
rule is a property of the shared transistors.

## A complete dot product

Each access computes, in every column of every array, a partial dot product of length 16. The
32 arrays together make 8192 of them per access. A MAC command runs 16 accesses. Access *s*
(s = 0..15) drives row *s* of every group *g*, with input element `16·g + s`. After 16 accesses, every one of the 256 rows has been used once. Each
of the 256 columns has then produced its full 256-element dot product: 8192 dot products across
the 32 arrays.

The column results of each access go to the **PCUs** (peripheral compute units, `site_pcu`).
There are 32 per array, so each PCU serves 8 columns. A PCU samples its 8 column outputs into
hold registers, which stand in for the paper's sample-and-hold. It then adds them into 8
accumulators, one column per clock, through a single shared adder. The next access may be
sampled in the clock that adds the last column.

An access therefore takes 8 clocks, and a MAC command takes 16 × 8 + 2 = **130 clocks** from
acceptance to `done`. The shared serial adder is an implementation choice: the paper fixes only
the PCU count. Accumulators are 16 bits wide. A 256-row MAC needs at most ±128. Wider sums come
from chaining MAC commands with `clr = 0`, reprogramming rows in between if needed.

Each accumulator is ternarized into the next layer's activation: +1 if acc > thr, −1 if
acc < −thr, otherwise 0 (`site_act_quant`). `thr` is a run-time input. The paper only says that
dot products are "quantized and passed through an activation function". The threshold rule is
this implementation's choice.

## Commands and interface of `site_cim_top`

Commands are `site_cmd_t {op, arr, row, clr}` and are taken when `cmd_valid && cmd_ready`. The
core takes one command at a time. `done` pulses for one clock when the command has taken effect.

| op       | what happens | clocks to `done` |
|----------|--------------|-----------------:|
| OP_WRITE | Row `row` of array `arr` is programmed with `wr_w`. Hold `wr_w` until `done`. | 2 |
| OP_READ  | Row `row` of array `arr` is read as a single-row access with input +1. This is the memory's normal read (only RWL1, or RWL and RWL_t1, high). The result appears on `rd_data` when `acc_sel == arr`. | 2 |
| OP_MAC   | All arrays compute with their own `in_vec[arr]`. If `clr` is set, accumulators start from zero; otherwise they keep adding. `acc_row` shows array `acc_sel`'s 256 dot products; `act_out` shows every array's activations. | 130 |

Reset `rst_ni` is asynchronous and active low. It clears the controller and the PCUs but not
the weights. The clock is a single `clk`. Everything is synchronous to its rising edge.

## Module map

```
site_cim_top            32 macros + one controller, read/accumulator output muxes
├── site_ctrl           command sequencer (WRITE / READ / MAC, access stepping, PCU handshake)
└── site_macro ×32      input staging, one array, 32 PCUs
    ├── site1_array     (FLAVOR = SITE_I)  weight storage, 256 columns × 16 site1_cell,
    │   ├── site_wl_enc                     2 × site_adc + site_sub per column
    │   ├── site1_cell
    │   ├── site_adc
    │   └── site_sub
    ├── site2_array     (FLAVOR = SITE_II) weight storage, 256 columns × 16 site2_subcol,
    │   ├── site_wl_enc                     site2_compsub + site_adc per column
    │   ├── site2_subcol
    │   ├── site2_compsub
    │   └── site_adc
    └── site_pcu ×32    hold registers, serial accumulation, site_act_quant ×8
site_pkg                trit / flavour / opcode types, command struct, default sizes
```

Parameters and their defaults:

| parameter | default | meaning |
|-----------|--------:|---------|
| `FLAVOR`  | SITE_I  | array circuit |
| `N_ARR`   | 32      | arrays |
| `NR`, `NC`| 256     | rows and columns per array |
| `NA`      | 16      | rows per access; also the number of row groups (SITE_II blocks) |
| `N_PCU`   | 32      | PCUs per array (columns per PCU = NC / N_PCU) |
| `ACC_W`   | 16      | accumulator width |

All sizes except `ACC_W` and the default flavour are the paper's. `NR/NA` must be a power of
two, `NA ≥ 2`, and `NC` a multiple of `N_PCU`. In general a group holds `NR/NA` rows, a MAC
makes `NR/NA` accesses, and it takes `(NR/NA)·(NC/N_PCU) + 2` clocks.

## What is modelled, and how far to trust it

The bit cells (8T-SRAM, 3T-eDRAM or ferroelectric 3T-FEMFET in the paper) are represented by
an ordinary weight array. The bitlines are represented as exact counters of unit steps. The
comparator, current subtractor and flash ADC are written as synthesizable behavioural models of
their transfer functions. `site1_cell`, `site2_subcol`, `site2_compsub` and `site_adc` stand for
analog circuits and are not gate-level designs. Not modelled:

* the reduced sense margin for outputs above 8 and the resulting sensing errors, which the
  paper puts at a total dot-product error probability of 3.1·10⁻³;
* bitline precharge and the timing of the array;
* the difference between write and read timing of the memory technologies;
* retention and refresh of the eDRAM cells.

Results are therefore the *ideal* outputs of the circuit, saturation included.

Where this implementation departs from the paper, or fills a gap it leaves:

* **Which 16 rows an access drives in SITE_I.** The paper allows any 16. Here it is one row per
  16-row group, so both flavours share one interface and one controller.
* **ADC placement.** The paper says there are two ADCs (SITE_I) or one (SITE_II) *per column*.
  It also says there are 32 PCUs per 256 columns. Here the ADCs sit in every column and the
  PCUs receive digital values.
* **Subtractor width.** The paper calls the SITE_I subtractor 3-bit, but its operands reach 8.
  Here it is built with 4-bit operands.
* **Parallel dot products.** The paper quotes "8196" parallel dot products. 32 × 256 = 8192,
  which is what is built.
* **Own additions.** The command interface, the latencies, the serial PCU adder, the accumulator
  width, the threshold activation and the reset behaviour are all this implementation's own.
* **Not built.** The accelerator around the arrays (buffers, host interface, other function
  units) is not built. Its data paths are the top's ports.

Capacity against the paper's benchmarks: 2,097,152 resident ternary weights. AlexNet (~61 M
weights), ResNet-34 (~22 M) and Inception (~7–24 M depending on version) do not fit at once.
They run tile by tile, with 256 × 256 weight tiles rewritten between MAC commands and partial
sums chained with `clr = 0`. The LSTM and GRU sizes are not stated. A recurrent layer fits if
(input + hidden) × gates × hidden ≤ 2.1 M.

## Testbenches

Each testbench in `tb/` is self-checking. It prints `TB_RESULT checks=N failures=M` and has a
watchdog. Expected values are computed in the testbench from integer products of the ternary
operands (`site_ref_pkg`), never from the RTL.

| testbench | covers |
|-----------|--------|
| `tb_site_wl_enc`, `tb_site1_cell`, `tb_site_adc`, `tb_site_sub`, `tb_site2_compsub` | exhaustive truth tables |
| `tb_site2_subcol`, `tb_site_act_quant` | random and edge cases |
| `tb_site1_array`, `tb_site2_array` | 64×16 arrays: random weights and inputs at several sparsities, saturation cases, all-zero inputs, read-back |
| `tb_site_pcu` | hold, 8-clock absorption per access, accumulation, clear, activation |
| `tb_site_ctrl` | command latencies, strobes, the 16-step access order, clear |
| `tb_site_macro` | both flavours side by side: write, MAC (clearing and chained), read |
| `tb_site_cim_top` | the whole core in both flavours at 2 arrays × 64×16, end to end. Counts each mechanism (write, read, clearing and chained MAC, saturation in each flavour, negative comparator decision, flavours disagreeing, each activation value) and fails if one never occurs |
| `tb_site_layer` | workload: a two-layer ternary fully-connected net (192 → 32 → 16) on a 2-array core in both flavours, tile by tile: weights rewritten between MACs, partial sums chained, layer-1 activations fed into layer 2; also counts outputs that saturation changed |
| `tb_site_full` | the default core (32 × 256 × 256, SITE_I), no parameter overrides: all 8192 rows written, rows read back, one MAC with all 8192 dot products and activations checked |

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal rtl/site_pkg.sv tb/site_ref_pkg.sv \
          $(ls rtl/*.sv | grep -v site_pkg) tb/tb_site_cim_top.sv --top-module tb_site_cim_top
./obj_dir/Vtb_site_cim_top
```

The reduced-size testbenches build in about a minute and run in well under a second. `tb_site_full` elaborates about 131 000 cell models and
takes about 10 minutes to compile and under a minute to run. The reduced-size testbenches
exercise the same code at other parameter values. To change the size or flavour, override the
parameters of `site_cim_top`. The reference model in the testbenches follows the parameters.
