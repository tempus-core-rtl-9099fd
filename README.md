# Tempus Core: a temporal-unary-binary convolution core

A convolution engine spends almost all of its area on multipliers. Tempus Core
keeps the dataflow of NVDLA's convolution core, where K PE cells each hold the
weights of one kernel and all of them see the same feature data. What it changes
is the multiplier. Each binary multiplier is replaced by a *tub*
(temporal-unary-binary) multiplier. A tub multiplier is little more than an
accumulator. The weight reaches it as a train of pulses in time, and on each
pulse the multiplier adds the binary feature value.

The trade is area and power for latency. A product that a binary multiplier
makes in one cycle here takes as many cycles as the weight needs pulses.
Weights are sent in a *2s-unary* code, where each pulse is worth 2, so an INT8
weight needs at most 64 cycles and an INT4 weight at most 4. All cells work in
lock-step, so the slowest weight in the array sets the latency. An array that
holds only small weights finishes early, and an array of zero weights takes no
compute cycles at all.

This RTL implements the core in SystemVerilog: the sequencer, the PE cell unit
and the accumulator. Its default size is a 16 × 16 array (16 cells of 16
multipliers) at INT8. Precision, array width and array height are parameters.

## The 2s-unary code and the tub multiplier

A signed weight `a` is split into a sign (`a_neg`) and a magnitude `|a|`. Write
`|a| = 2q + r`. The encoder (`twos_unary_enc`) then:

* sends `q` pulses on `unary_a`, each worth 2;
* sends one more pulse on `a_is_odd`, worth 1, when `r = 1`. It comes last, in a
  cycle of its own.

The stream therefore lasts `ceil(|a|/2)` cycles. The encoder is a down-counter
loaded with `|a|` that drops by 2 per cycle, or by 1 for the odd pulse. The
most negative INT-W value has magnitude 2^(W-1), which still fits in W unsigned
bits, so INT8's −128 takes 64 cycles.

The multiplier (`tub_mul`) gets the feature as sign `b_neg` and magnitude `b`.
It adds `b<<1` to its accumulator for every `unary_a` pulse and `b` for the
`a_is_odd` pulse. Each addend is negated when `a_neg ^ b_neg`. Example: weight 4
is sent as two `unary_a` pulses, and the feature is 5. The accumulator holds
10 after the first pulse and 20 after the second. The accumulator is 2W bits
wide, enough for (−2^(W−1))².

    cycle      0 (clear)  1        2        3 ...
    unary_a    -          1        1        0
    acc        0          10       20       20     (a = 4, b = 5)

## PE cell and PE cell unit

**PE cell (`pe_cell`).** A cell computes one partial sum: the dot product of
a 1×1×N weight cube with a 1×1×N feature cube. It contains:

* a register holding the cached weight cube and the current feature cube, the
  feature kept as sign and magnitude;
* N encoders and N tub multipliers;
* a balanced adder tree (`adder_tree`) over the N accumulators. Its output is
  `2W + clog2(N)` bits wide, 20 bits at the defaults.

`start` clears the accumulators and loads the encoders. The cell is `busy`
while any encoder is still pulsing, and once `busy` falls `psum` is final.

A cell started with `en` low stays still and gives 0. This is how cells are
gated when a layer has fewer kernels than cells.

**PE cell unit (`pcu`).** The PCU is the replacement for NVDLA's MAC array. It
holds K cells and takes commands on a valid/ready handshake:

| command | effect |
|---|---|
| `OP_WT` | writes `in_data` into the weight register of every cell selected in `in_sel`. Takes one cycle; the PCU stays idle. |
| `OP_FEAT` | broadcasts the feature cube `in_data` to all cells. `in_sel` is the mask of enabled cells. `in_tag` travels with the operation. |

The PCU waits until every cell has finished. It then copies all K partial sums
and the tag into its output registers in the same cycle and raises `out_valid`.
This makes the latency of one feature operation

    m = max over enabled cells and lanes of ceil(|w|/2)        (0 .. 2^(W-2))

**Timing.** A feature command accepted at clock edge 0 has its sums
registered at edge `m + 1`. In that same cycle the PCU can accept the next
command, so back-to-back feature cubes cost `m + 1` cycles each. Two cases
hold the PCU back:

* **Multi-cycle operation:** `in_ready` is low while the PCU computes.
* **Output stall:** `in_ready` also stays low if the previous result is still
  waiting because the accumulator has not taken it. The finished sums are
  held until it does.

The weight registers may be written only while the PCU is idle. An assertion
in `pe_cell` checks this.

## Running a layer: sequencer and accumulator

**What the sequencer runs.** The sequencer (`csc`) handles one 1×1
convolution layer per `start`:

* P output positions;
* C = G·N input channels, in G channel groups;
* NK ≤ K kernels.

**Buffer layout.** The convolution buffer is outside the core. It is reached
through a read port with one-cycle latency whose data holds until the next
read. Each entry is one 1×1×N cube, laid out as follows:

    feature cube (position p, group g) : feat_base + p*G + g
    weight cube  (kernel j, group g)   : wt_base  + g*NK + j

**Command order.** Positions go in stripes of up to `STRIPE` (16) positions.
For each stripe and each group g the sequencer:

1. writes the NK weight cubes of group g into cells 0..NK−1;
2. broadcasts the stripe's feature cubes of group g.

Each feature cube carries a tag with its position, first/last-group flags and
an end-of-layer flag. When G = 1 the weights are written only once per layer
and stay cached across stripes. Each cube costs one buffer read and one PCU
handshake, at least two cycles. In practice the PCU's `m + 1` cycles set the
pace.

**Accumulator (`cacc`).** The accumulator keeps STRIPE rows of K 32-bit
accumulators, indexed by position modulo STRIPE:

* the first group of a position overwrites its row;
* middle groups add to the row;
* the last group's sum goes to the output register instead of back to the row.

Each result leaves on a valid/ready stream, together with its position and the
end-of-layer flag. The stream goes towards post-processing (activation and
pooling in the host accelerator). When that side applies back-pressure,
`in_ready` falls, which in turn stalls the PCU and then the sequencer.

A 3×3 or larger convolution can be run as a 1×1 layer whose channels are the
im2col expansion (k·k·C channels). The buffer layout for that is the host's
job.

## Top-level interface (`tempus_core`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start` | in | 1 | start a layer (ignored while busy or if any size is 0) |
| `cfg_num_pos` | in | 16 | output positions P |
| `cfg_num_grp` | in | GRP_W (8) | channel groups G |
| `cfg_num_ker` | in | clog2(K+1) | kernels NK, 1..K |
| `cfg_feat_base`, `cfg_wt_base` | in | ADDR_W (16) | buffer base addresses |
| `busy`, `done` | out | 1 | layer running; one-cycle pulse when the last result is taken |
| `cb_rd_en`, `cb_rd_addr` | out | 1, ADDR_W | buffer read request |
| `cb_rd_data` | in | N·W | cube read (valid the cycle after the request) |
| `res_valid`, `res_ready` | out, in | 1 | result handshake |
| `res_data` | out | K × 32 | one sum per kernel (0 for kernels ≥ NK) |
| `res_pos`, `res_last` | out | 16, 1 | output position; last result of the layer |

**Parameters** (defaults in brackets):

* `K` [16]: cells;
* `N` [16]: multipliers per cell;
* `W` [8]: precision;
* `STRIPE` [16]: a power of two;
* `ADDR_W` [16], `GRP_W` [8], `ACC_W` [32].

The package `tempus_pkg` holds the PCU command encoding and the tag layout.

## What follows the source design and what is this implementation's own

**Taken from the source design:**

* the tub multiplier with its signal names (`a_neg`, `b_neg`, `b`, `unary_a`,
  `a_is_odd`), the `<<1` path and the accumulator register;
* the 2s-unary code and its latency: worst case 64 cycles at INT8 and 4 at
  INT4, set by the largest weight magnitude in the array;
* the cell: register, N tub multipliers, adder tree;
* K cells sharing one feature cube, each caching its own weight cube;
* output registers that release all K partial sums only when every cell is
  done, and handshaking for the multi-cycle operation;
* zero weights that keep their multiplier silent;
* the CSC → PCU → CACC structure, and the 16 × 16 INT8 default.

The source is inconsistent on one point. It says both that the cycle count
equals the largest weight magnitude and that it is half of it. This RTL uses
half, `ceil(|w|/2)`, which is the figure that matches the 2s-unary code and
the stated 64-cycle INT8 worst case.

**Choices made here, where the source gives no detail:**

* the odd pulse sent last on its own cycle;
* how the sign is applied;
* the valid/ready protocols and the command/tag format;
* the exact cycle timing (`m + 1` per operation);
* the cell enable standing in for clock gating (no clock-gate cell is used);
* the whole sequencing scheme: 1×1 only, the buffer layout, stripes, weight
  reuse;
* the accumulator's assembly buffer and its 32-bit width;
* the reset behaviour.

**Not built:**

* NVDLA's full convolution sequencer (strides, padding, k×k kernels, other
  data modes);
* the delivery path of NVDLA's accumulator (truncation, output formats);
* the convolution buffer;
* the configuration block behind the CSB;
* post-processing;
* the memory interface.

The buffer, configuration and results appear as ports. The testbenches use a
small behavioural buffer, `tb/cb_model.sv`.

## Verification

Every module has a self-checking testbench that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_twos_unary_enc` | all INT8 magnitudes 0..128: stream value, length `ceil(|a|/2)`, pulse shape |
| `tb_tub_mul` | every INT8 weight against edge-case and random features, including 4 × 5 = 20 |
| `tb_pe_cell` | random cubes against a dot product; busy time `= ceil(max|w|/2)`; disabled cell |
| `tb_pcu` | 16×16 INT8 PCU against a reference model; latency `m + 2` edges to the handshake; random output stalls; all-zero arrays |
| `tb_pcu_configs` | PCU at 16 × {4, 16, 32} for INT8/INT4/INT2 (includes 16 × 4 INT4); sums, latency, worst case reached |
| `tb_csc` | the command stream for several layer shapes against an independently built list, with random PCU back-pressure |
| `tb_cacc` | group accumulation, position order, end-of-layer flag, random back-pressure |
| `tb_conv_layer` | a 3×3 convolution (8×8×16 input, 16 kernels, zero padding) fed as im2col cubes, against a direct convolution; reports average compute cycles per operation |
| `tb_tempus_core` | whole core at default size on six layers against integer convolution; PCU latency on every operation; counts stalls, back-pressure, multi-group, multi-stripe, weight reuse, gated cells, silent arrays and the 64-cycle worst case, and fails if any never occurs |

Run one with Verilator from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
        rtl/tempus_pkg.sv tb/tb_tempus_core.sv --top-module tb_tempus_core
    ./obj_dir/Vtb_tempus_core

The full-size run takes well under a second.

Not verified here:

* timing closure, area and power;
* PE cells at the very wide sizes (n = 256, 1024), which exist only as a
  parameter setting;
* behaviour on real network weights. With real weights the average latency per
  16 × 16 tile is expected to be around half the worst case (about 31–33
  cycles for INT8 MobileNetV2 and ResNeXt101), since it is set by each tile's
  largest weight.
