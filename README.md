# MARS: a sparse-CNN accelerator built on SRAM compute-in-memory macros

An SRAM computing-in-memory (CIM) macro stores weights and multiplies them with
an input vector where they sit. That saves moving weights, but real macros
have limits. They hold only 64 Kbit. They switch on only a few word lines at a
time. They take 4-bit inputs. A plain weight mapping also stores, and computes
with, every zero weight of a pruned network.

MARS is built around one unit of storage and computation, the **group-set**.
When a whole group-set of weights is zero, it is neither stored in the macros
nor computed. Training prunes the network so that zeros fall into whole
group-sets. A 16-bit **index code** per stored group-set records which part of
the kernel it came from. A small **sparsity address search (SAS)** unit turns
that code back into the address of the input pixel and channels it needs. The
result: zero group-sets cost neither storage nor cycles, and many sparse
kernels fit into a macro load that would hold only a few dense ones.

This repository holds synthesizable SystemVerilog for the accelerator. The
macro itself is a mixed-signal part, so it comes as a behavioural model. Each
block has a self-checking testbench, and end-to-end tests compare whole
convolution layers against a golden model.

## 1. Terms

| term | meaning |
|---|---|
| weight-group | 16 weights of one kernel at one 3x3 position, for 16 consecutive input channels. One row of 16 cells in a macro partition. |
| group-set | the 16 weight-groups at the same position of the 16 kernels a core computes together. Macro 1 holds kernels 0-7, one per partition, and macro 2 holds kernels 8-15. All 16 sit at the same slot address (0..63). |
| kernel-set | 16 kernels (16 output channels) computed together by one core. It is stored as its nonzero group-sets only, 1 to 64 of them. |
| channel group | 16 consecutive channels. A feature-map word holds one channel group of one pixel. |
| index code | 16 bits per stored group-set. Bit 15: first group-set of its kernel-set. Bits 14:9: the kernel-set's group-set count minus 1. Bits 8:5: position in the 3x3 window (0..8, row-major). Bits 4:0: input channel group. |

## 2. Structure

```
 mars_top
 ├── instr_rf        per-layer instruction words (32)
 ├── controller      runs the instructions; go/done handshake with the cores
 ├── fm_sram x2      512 Kbit each: SRAM1 / SRAM2
 ├── pingpong_if     IFM reads -> SRAM[src_sel], OFM writes -> SRAM[!src_sel]; host port
 ├── shunter         one FM access per system cycle, cores in turn; core clock enables
 └── cim_core x4
     ├── core_ctrl   load / compute sequencing
     ├── index_sram  128 x 16 bit
     ├── weight_sram 2048 x 128 bit (256 Kbit)
     ├── sas         index code + output pixel -> IFM word address / padding
     ├── core_io     request to the shunter, 128-bit input buffer, nibble select
     ├── cim_macro x2  8 partitions x 64 weight-groups x 16 x 8 bit (behavioural)
     ├── acc_system  shift adder + kernel adder, 16 x 32-bit accumulators
     └── apw         activation, 2x2 max pooling, output word
```

`mars_pkg.sv` holds the shared sizes and the packed structs: `idx_code_t`,
`instr_t` and `fm_req_t`.

## 3. How a layer is computed

**Work split.** A layer with `kg` output channel groups has `kg` kernel-sets.
Core *c* computes kernel-sets *c, c+4, c+8, ...* and writes output channel
group *c+4j*. Each core's index SRAM holds the index codes of its kernel-sets,
one after another, starting at the instruction's `idx_base`. The weight SRAM
holds the 16 weight-groups of index entry *i* at addresses `16*i + k`
(kernel *k*).

**Load phase (filling the macros).** The core controller reads the first
index code of the next kernel-set. That code gives the kernel-set's size *n*.
If *n* still fits in the free slots of the macros (64 per macro), the
controller copies the 16·n weight-groups from the weight SRAM. It does one
write per core cycle, kernel *k* to macro *k/8*, partition *k%8*. Then it
tries the next kernel-set. It stops when the next kernel-set does not fit or
none is left. Sparse kernel-sets are therefore packed back to back in the
slots, which is what lets the macros hold more than their dense capacity.

**Compute phase.** For every kernel-set in the load and every output pixel,
the kernel-set's *n* stored group-sets stream through a three-stage pipeline
(state `C_RUN`). One group-set enters every P core cycles. P = 1 with 4-bit
activations; P = 2 with 8-bit ones, which need a low and a high nibble pass.
With `tc` counting core cycles from the start of the pixel, group-set *g*
goes through:

| core cycle `tc` | stage |
|---|---|
| `P*g` | read index code `chunk_base + slot + g` |
| `P*g + 1` | SAS turns the code into the IFM word address (or flags padding); the read goes out through the shunter, and the word lands in the input buffer before the next core cycle |
| `P*g + 2` | both macros compute slot `slot+g` with the low nibbles: 16 inner products |
| `P*g + 3` | 8-bit activations only: the same with the high nibbles |

So the macros compute in every core cycle while a pixel runs. The read for
group-set *g+1* is issued in the cycle of the last pass of *g*. It lands in
the buffer after that pass has used the old word, so a single 128-bit buffer
is enough. The size *n* comes from the first index code, at `tc = 1`. Until
then, index reads run ahead harmlessly.

The accumulator adds each macro result one core cycle later. The high-nibble
pass is shifted left by 4. After the last pass come `C_DRAIN` (last add),
`C_ACT` (APW) and `C_WR` (the OFM write, through the shunter). A kernel-set
with *n* stored group-sets thus costs `P*n + 5` core cycles per output pixel.
Zero group-sets cost nothing. With pooling, the pixels are visited in 2x2
window order. APW keeps the running maximum and writes one word per window.
When every kernel-set of the load is done, the macros are reloaded with the
next kernel-sets.

**Activation.** A kernel sum *S* becomes
`min((max(S,0) + 2^(shift-1)) >> shift, 2^bA - 1)`, with bA = 8 or 4 from the
instruction's `a8` bit. This is the integer form of a uniform quantiser that
clips activations to [0,1] with 2^bA-1 steps. The clip at 0 is the ReLU.
Batch normalisation is folded into the weights during training and needs no
hardware.

**Ping-pong.** A layer reads its IFM from SRAM[`src_sel`] and writes its OFM
to the other SRAM. The next layer's instruction flips `src_sel`, so no data
are copied between layers.

## 4. Clocking and the shunter

The macros run at about 100 MHz. The top level (controller, shunter, FM SRAMs)
runs at exactly four times that. Four cores cannot share single-port SRAMs at
the same time, so the shunter hands out the SRAM time. A slot counter walks
0,1,2,3 at the system clock. In slot *k* it accepts core *k*'s request. Read
data come back in the next system cycle, tagged with `rsp_valid[k]`.

The RTL has one clock. Slot *k* is also core *k*'s clock enable (`ce`). Each
core thus advances once every four system cycles, one cycle after its
neighbour, and always finds its request accepted in its own cycle. The paths
inside a core are four-cycle multicycle paths. In a real chip the core logic
could run on a separate /4 clock instead. The accept order, Core1, Core2,
Core3, Core4, Core1, ..., and the four-cycle spacing between two accesses of
the same core follow the paper. A request can carry one IFM read and one OFM
write together, because they go to different SRAMs.

## 5. Data formats

* **FM word** (128 bit): channel *i* of the group in bits `8i+7:8i`, unsigned.
  4-bit activations sit in the low nibble. Address = `pixel*CG + channel_group`,
  with pixel = `y*W + x`. After pooling, the pixel counts in the pooled grid.
* **Weight word** (128 bit): weight *i* in bits `8i+7:8i`, signed. 4-bit
  weights use the same cells with values -7..7.
* **Instruction** (`instr_t`): `last`, `src_sel`, `a8`, `pool`, `pad`
  (zero padding 1), `h`, `w`, `cg` (input channel groups), `kg` (output channel
  groups), `shift`, `idx_base`. Convolutions are 3x3 with stride 1. The output
  size is `h x w` with padding and `(h-2) x (w-2)` without, halved by pooling.

## 6. Using the top level

While `busy` is low:
1. write the instructions with `iw_en/iw_addr/iw_data`;
2. write each core's index codes (`il_we[c]`, `il_addr`, `il_data`) and
   weight-groups (`wl_we[c]`, `wl_addr`, `wl_data`);
3. write the input map into the SRAM the first instruction reads
   (`h_en`, `h_we`, `h_sel` 0 = SRAM1, `h_addr`, `h_wdata`).

Then pulse `start` and wait for the `done` pulse. Read the result with `h_en`
and `h_we=0`; the data appear on `h_rdata` one cycle later. `ev_group`,
`ev_load` and `ev_pad` are per-core event strobes, valid in the core's `ce`
cycle (and in every cycle for `ev_pad`): group-set computed, macro load
started, padding read skipped.

Both SRAMs of one core hold a single layer at a time (index 128 codes, weights
256 Kbit). The host has to reload them between layers unless the codes of
several layers fit together, via `idx_base`.

## 7. Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mars_top \
    rtl/mars_pkg.sv rtl/*.sv tb/tb_mars_top.sv
./obj_dir/Vtb_mars_top
```

(List `mars_pkg.sv` first; it may appear twice in the file list, or filter it
out of the glob.)

| testbench | what it shows |
|---|---|
| `tb_mars_top` | Full size. Two chained layers through the whole chip. 8-bit then 4-bit activations, padding, pooling, the ping-pong switch, a macro reload within a layer, all four cores interleaved in the shunter. Outputs match the golden model; the count of computed group-sets is exact. |
| `tb_vgg16_layers` | Full size. All seven 3x3 convolution shapes of VGG16 on CIFAR-10 (32x32 images), each with as many stored group-sets as its compressed index holds: from 137 of 144 (3x3x64x64) down to 120 of 9216 (3x3x512x512). Mixes 8- and 4-bit activations, with and without pooling. The 3x3x128x256 layer nearly fills the index SRAM (111 of 128 codes per core). Every output word is checked, and the test reports cycles and useful MACs per cycle. |
| `tb_cim_core` | One core with a modelled shunter. Three kernel-sets that need two macro loads. |
| `tb_core_ctrl` | Load packing, macro placement, compute and write counts, the `P*n + 5` cycle spacing of output pixels, OFM addresses, handshake. |
| `tb_cim_macro`, `tb_sas`, `tb_core_io`, `tb_acc_system`, `tb_apw` | Datapath blocks against independent reference computations. `tb_sas` includes the paper's index-code example. |
| `tb_shunter`, `tb_pingpong_if`, `tb_controller` | Slot order and spacing, routing, instruction sequencing. |
| `tb_fm_sram`, `tb_index_sram`, `tb_weight_sram`, `tb_instr_rf` | Memories. |

Measured with `tb_vgg16_layers`, 8-bit weights, counting system cycles from
`start` to `done` (macro loads included):

| layer | input | activations | stored group-sets | system cycles | nonzero MACs per system cycle |
|---|---|---|---|---|---|
| 3x3x64x64 | 32x32 | 8-bit | 137 | 309,476 | 116 |
| 3x3x64x128 | 16x16 | 8-bit | 144 | 86,324 | 109 |
| 3x3x128x128 | 16x16 | 8-bit, pooled | 250 | 143,347 | 114 |
| 3x3x128x256 | 8x8 | 8-bit | 442 | 69,148 | 105 |
| 3x3x256x256 | 8x8 | 4-bit | 157 | 18,004 | 143 |
| 3x3x256x512 | 4x4 | 4-bit, pooled | 101 | 6,033 | 69 |
| 3x3x512x512 | 4x4 | 4-bit, pooled | 120 | 6,548 | 75 |

## 8. What comes from the paper and what does not

**From the paper:**
* the block structure: controller, instruction register file, two 512-Kbit FM
  SRAMs in ping-pong, shunter, four cores of two macros each, weight SRAM,
  index SRAM, SAS, 128-bit input buffer, shift and kernel adders, APW;
* the macro organisation (8 x 64 x 16 x 8 bit, 8 results the next cycle) and
  the 4-bit macro input;
* the group-set skip and packed sparse mapping;
* the index code fields;
* the 4:1 clock ratio and the round-robin shunter order;
* the clip-to-[0,1] activation quantiser.

**This design's own choices**, where the paper gives no detail:
* all widths and depths not listed above: FM word 128 bit, index SRAM depth
  128, weight SRAM 256 Kbit per core, 32 instructions, 32-bit accumulators;
* the instruction format;
* the go/done handshake;
* the core-controller state sequence and loop order;
* the split of kernel-sets over the cores;
* the clock-enable implementation of the core clock;
* requantisation by a rounding right shift;
* 2x2 max pooling in window order;
* the host load/read ports.

**Departures and limits:**
* **Throughput.** The pipeline restarts for every output pixel. Each pixel
  pays 5 core cycles for pipeline fill, last add, activation and write; they
  do not overlap with the next pixel. Macro reloads are not overlapped with
  computing either. The peak is 256 MACs per system cycle with 4-bit
  activations (4 cores x 16 kernels x 16 channels per core cycle), 128 with
  8-bit ones. Layers with many group-sets per kernel-set come close to it
  (116 of 128 above). Very sparse layers do not (69 to 75 of 256 with 3 to 4
  group-sets per kernel-set). The paper's frame rates and throughput figures
  are estimates, and this RTL does not try to reproduce them.
* **Macro model.** The macro model is exact: it models no ADC quantisation, no
  analog error, and neither power nor timing.
* **Layer types.** Only 3x3, stride-1 convolutions run. There are no fully
  connected layers, no stride 2, no 1x1 shortcuts and no residual additions.
  So ResNet18, which the paper evaluates, cannot run as is, nor can VGG16's
  classifier layers.
* **Sparsity limits.** A kernel-set must keep 1 to 64 group-sets. An all-zero
  kernel-set cannot be expressed.
* **Not modelled.** The clock source and the IO pads.
