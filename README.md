# BETA: a binarized Transformer accelerator in SystemVerilog

Binary Transformers keep weights at one bit and activations at 1, 2, 4 or 8 bits. Each quantized
tensor still carries full-precision scale factors and offsets. A naive implementation computes
`(αA + γ) × βW` directly and multiplies in full precision everywhere. This design reorders the
computation instead:

    (αA + γ·1) × βW  =  (A × W) · αβ  +  (1 × W) · γβ

The expensive part, `A × W`, becomes a pure integer matrix product of low-bit activations and
binary weights. It runs on an array of AND gates and compressor trees, the **QMM engine**
(quantized matrix multiplication). The cheap part runs on a small FIX-16 **vector process unit
(VPU)** afterwards: one multiply by the fused coefficient `αβ` and one add of the fused offset
`γβ·colsum(W)`. Softmax, GELU and layer normalisation are not matrix products. They run at full
precision in three streaming units.

The RTL follows the architecture of the BETA accelerator ("BETA: Binarized
Energy-Efficient Transformer Accelerator at the Edge"). Its main configuration has N = 2 dot
product units of J = 256 processing elements each, running at 190 MHz. Those numbers are the
defaults here. The internals the publication leaves open were filled in with the simplest
circuit that does the job. Those points are listed under "Where this RTL goes beyond the
published description" below.

## Block map

    host MCU / off-chip memory  (outside the design: plain ports of beta_top)
        |                   |                       |
        v                   v                       v
    +---------------- qmm_engine ----------------+  softmax_unit
    | weight_buffer --copy--> compute_buffer     |  gelu_unit
    |   read_ctrl -> addr_gen -> (read)          |  layernorm_unit
    |   p2s -> dpu x N -> s2p -+-> out1 ---------+--> vpu <-> vector_buffer
    |                          +-> transpose -> out2 (to host)
    +--------------------------------------------+

| File | Role |
|---|---|
| `beta_pkg.sv` | widths, precision and QMM-type enums, QMM descriptor struct, FIX-16 saturation |
| `pe.sv` | one processing element: 8 AND gates, `x & {8{w}}` |
| `comp42.sv`, `csa_tree.sv` | 4:2 compressor (XOR/MUX form) and a tree of them |
| `ctree_loop.sv` | compressor tree with carry-save feedback: the dot-product accumulator |
| `csel_adder.sv` | carry select adder that resolves the loop's sum/carry pair |
| `dpu.sv` | J PEs, crossbar, 8 lane accumulators |
| `compute_buffer.sv`, `weight_buffer.sv` | on-chip operand storage |
| `read_ctrl.sv`, `addr_gen.sv` | loop sequencer and address generator |
| `p2s.sv`, `s2p.sv` | bit-plane selection into the DPUs; result packing out of them |
| `transpose_unit.sv` | row-to-column tile transpose on the second output |
| `qmm_engine.sv` | all of the above, plus the weight-copy engine |
| `vpu.sv`, `vector_buffer.sv` | FIX-16 `sat(x·k + b)` over 64 lanes and its vector store |
| `softmax_unit.sv`, `gelu_unit.sv`, `layernorm_unit.sv` | non-linear functions (helpers `seq_div.sv`, `seq_sqrt.sv`) |
| `beta_top.sv` | top level |

## Packing and bit-serial operation: how one DPU serves four precisions

This is the central trick of the design. A PE sees an 8-bit word `x` and one bit `w`, and its
output is `x & {8{w}}`. The meaning of the word depends on the activation precision `b`:

| mode | activations per word | products per PE per cycle | lane `l` reads PE bits |
|---|---|---|---|
| A8 | 1 | 1 | `[7:0]` |
| A4 | 2 | 2 | `[4l +: 4]` |
| A2 | 4 | 4 | `[2l +: 2]` |
| A1 | 8 | 8 | `[l]` |

An activation-region word `j` holds element `j` of `8/b` different rows of the activation
matrix. Row `l` of the group sits at bits `[l·b +: b]`. The AND with one weight bit multiplies
all packed activations at once. The crossbar inside `dpu` then routes sub-word `l` of all J PEs
to lane `l`. Each lane has its own compressor tree loop, which adds the J sub-words, zero-extended
to 32 bits, into its accumulator. So one DPU cycle produces up to 8 partial dot products of
length J, one per packed row.

A second operand wider than one bit (activation × activation, e.g. query × key) is traversed one
bit at a time, most significant bit first. Before each new bit-plane the accumulator doubles
(`dbl`), so after `X` planes it holds `Σ a·(Σ_k 2^k·b_k) = Σ a·b`. A 4-bit activation ×
activation product therefore takes four cycles per chunk, and an 8-bit one takes eight. Vectors
longer than J are split into chunks of J. The chunks simply add up; `first` clears the
accumulator at the start of a new dot product.

All arithmetic in the QMM engine is unsigned. Signed or offset activations are handled by the
reordering above: the offset term moves into the VPU's `b` vector.

### Compressor tree loop

Each lane accumulator is a tree of 4:2 compressors. Its inputs are the J products of the cycle
plus the two fed-back halves of the previous partial result, which is kept in carry-save form.
There is no carry chain in the loop, so its delay grows as log₂(J). The 4:2 compressor uses the
XOR/multiplexer form:

    t = a^b^c^d;  cout = (a^b) ? c : a;  sum = t ^ cin;  carry = t ? cin : d

`csa_tree` builds the levels in generate blocks: groups of four go through `comp42`, a leftover
of three through a 3:2 row, and a leftover of one or two passes straight through. Vectors are 32
bits wide and all carries above bit 31 are dropped, so the arithmetic is modulo 2³². That is
exact for any dot product whose result fits in 32 bits. `csel_adder` (8-bit blocks) turns the
final pair into the result one cycle after the last step.

## The QMM loop and buffer layout

A QMM is started with a descriptor (`qmm_desc_t`):

| field | meaning |
|---|---|
| `qtype` | `QMM_AW` (activation × binary weight) or `QMM_AA` (activation × activation) |
| `prec` | activation precision A8/A4/A2/A1 |
| `xbits` | number of bit-planes of the second operand (1 for weights, up to 8) |
| `x_base`, `b_base` | start entries in the two compute-buffer regions |
| `n_chunks` | C = ceil(K / J) chunks per dot product |
| `n_rowgrp` | R = groups of `8/b` packed rows |
| `n_colgrp` | G = groups of N columns |
| `out_sel` | `OUT_VPU` (out1) or `OUT_TRAN` (out2 through the transpose unit) |

`read_ctrl` walks row group → column group → bit-plane (MSB first) → chunk. It issues one step
per cycle:

    first = (plane == top && ch == 0),  dbl = (plane != top && ch == 0),  last = (plane == 0 && ch == C-1)

`addr_gen` forms `x_base + rg·C + ch` and `b_base + cg·C + ch`. Data takes two register stages to
reach the DPUs: the synchronous buffer read and `p2s`, which picks bit `plane` of every operand
element. A QMM therefore takes **R·G·X·C + 7 cycles** from `start` to `done`, and the testbenches
check this figure.

Memory formats:

* Activation region entry: J × 8 bits. Word `j` holds element `j` of the `8/b` rows of a row
  group.
* Operand region entry: N × J × 8 bits. Element `(n, j)` sits at bits `[(n·J + j)·8 +: 8]` and is
  element `j` of the current chunk of column `cg·N + n`.
* Weight buffer entry: N × J bits. Bit `n·J + j` has the same meaning as the operand region
  element. The copy engine (`cp_start`, `cp_src`, `cp_dst`, `cp_len`) moves one entry per cycle
  into the operand region and widens each weight bit to bit 0 of an element. A binary-weight QMM
  is then an ordinary QMM with `xbits = 1`.

`s2p` collects the N DPUs × `8/b` lanes of each finished group into VL = 64 element vectors in
lane-major, DPU-minor order. Element `i` of group `(rg, cg)` is therefore row `rg·(8/b) + i/N`
and column `cg·N + i%N`. A vector is emitted when full or at the end of the QMM (`flush`);
`vec_cnt` gives its valid length. Routed to out1, the vector goes straight into the VPU. Routed
to out2, it enters a double-buffered 64 × 64 tile in `transpose_unit`, which emits the columns
one per cycle. `done` pulses when the last vector has left the engine. The columns of a last
tile on out2 follow within 2·VL + 2 cycles after that.

## Vector process unit and non-linear units

`vpu` computes `y = sat16(((x · k) >>> 8) + b)` on 64 lanes in Q7.8 fixed point (FIX-16, 8
fractional bits). Here `x` is either a 32-bit integer QMM result (stream path) or a FIX-16
vector from the vector buffer (command path). `k` and `b` are FIX-16 vectors stored in
`vector_buffer`. On the stream path, `cfg_load` sets the `k` and `b` addresses and a destination
pointer that advances by one entry per vector. The result is written to the vector buffer and
shown on `y` one cycle after the input. The VPU has write priority over the host port
(`vb_wr_ready`). Results saturate to the 16-bit range rather than wrap.

The non-linear units take one FIX-16 element per cycle, with `in_last` marking the end of a row:

* `gelu_unit` computes `x · σ(1.702·x)`, using a piecewise-linear (PLAN) sigmoid. It is fully
  pipelined with one cycle of latency.
* `softmax_unit` stores the row and tracks its maximum. It then computes
  `e_i = 2^((x_i − max)·log₂e)`, using `log₂e ≈ 1477/1024` and a quadratic for the fractional
  power, and accumulates the sum. One 48-bit sequential division forms `2⁴⁰/sum`, and each
  output is `e_i` times that reciprocal. A row of L elements finishes within 2L + 60 cycles.
* `layernorm_unit` computes the mean (sequential divide), the variance in a second pass,
  `sqrt(var + 2⁻¹⁶)` with a digit-by-digit square root, and the reciprocal of the standard
  deviation. It then streams `(x − mean)·r·γ + β`.

## Where this RTL goes beyond the published description

The publication gives the block set, the PE/packing scheme, the compressor-tree-loop structure,
the carry select adder, N and J, and the FIX-16 format. Everything below is this design's own
choice:

* **Buffer sizes.** The weight buffer holds 13824 × 512 bits, exactly one BERT-base encoder layer
  (7,077,888 weight bits). A whole 12-layer model does not fit and is loaded layer by layer.
  Compute buffer regions are 2048 × 2048 bits (activations) and 1024 × 4096 bits (operands). A
  768 × 3072 weight matrix therefore runs in column slices of up to 341 column groups.
* **VPU width.** 64 lanes, one per DSP multiplier of the reference implementation.
* **Accumulator width.** 32 bits, modulo 2³².
* **One accumulator per lane.** The reference draws one compressor tree loop per DPU. How packed
  sub-results are kept apart is not described, so here every lane has its own loop.
* **Compressor tree.** Built only from 4:2 compressors plus 3:2 rows. The reference figure also
  shows 6:2 compressors, which compute the same function.
* **Blocks known only by name** (P2S, S2P, transpose, read controller, address generator, vector
  buffer). Their behaviour, loop order, descriptor, memory formats and copy engine are
  inventions of this design.
* **Non-linear units.** The reference keeps these at full precision but does not give their
  circuits. The approximations above are common, simple choices. The testbenches compare
  them with double-precision references and accept absolute errors of 0.07 (GELU), 3/256
  (softmax) and 0.05 (layer norm).
* **Not built.** The host MCU (quantization and sequencing), off-chip memory and the SoC
  interconnect. Their roles are taken by the ports of `beta_top`: buffer write ports, the copy
  command, the QMM descriptor and start, VPU configuration and commands, and the non-linear
  streams. Nothing moves data between the non-linear units and the buffers automatically; the
  host does that.
* **Reset.** Synchronous and active low. It clears control state only; memories are not reset.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/beta_pkg.sv \
              $(ls rtl/*.sv | grep -v beta_pkg) tb/tb_dpu.sv --top-module tb_dpu -o sim
    obj_dir/sim

The package must come first on the command line.

* `tb_beta_top` runs the whole accelerator at reduced size (J = 16, VL = 16). It exercises all
  four precisions, activation × activation, the weight copy, chunked dot products, both outputs
  with flush, VPU streaming, commands and saturation, the host write hold-off, and all three
  non-linear units. It counts each mechanism and fails if any never occurred.
* `tb_beta_top_full` runs the top with every parameter at its default. It performs a W1A4
  activation × weight QMM (8 × 512 by 512 × 64), scales it in the VPU, and compares against a
  model computed in the testbench. It needs about a minute and a half, most of it compile time.

To change the configuration, override the parameters of `beta_top` (`N`, `J`, `VL`, `ACC_W`,
buffer depths). The descriptor field widths (16 bits) limit R, G and C to 65535 each.
