# A programmable W4A4 / W4A8 accelerator for quantized depth-estimation transformers

Monocular depth-estimation networks built on vision transformers are too slow
for edge devices in floating point. Quantizing weights to 4 bits and
activations to 4 or 8 bits cuts both the arithmetic and the memory traffic.
But the decoder activations of these networks have long-tailed, channel-skewed
distributions that uniform quantizers handle badly. The cure used here is a
per-channel logarithmic "polishing" of activations before quantization:

    polish(x, a)   = sign(x) * ( log2(|x| + a) - log2(a) )
    unpolish(y, a) = sign(y) * ( a * 2^|y| - a )

`a` is a per-channel factor found during calibration.

This repository holds the RTL of an accelerator built for that scheme:

* integer multiply-accumulate trees run the W4A4 and W4A8 matrix products;
* a floating-point vector unit dequantizes the integer results, applies
  activations and polishing, and requantizes them to INT4 / INT8;
* the two are fused on chip, so intermediate results never go back to DRAM;
* instruction streams decouple data movement, matrix work and vector work,
  so the three overlap in time.

The block structure follows the published description of the QuartDepth
accelerator. The paper gives the block diagram and the function of each
block, but not their insides. All widths, depths, encodings and protocols
below are this design's own, and they are marked as such.

## Block structure

```
            AXI (fetch)                       AXI (load)        AXI (store)
                |                                 |                  ^
           +----v-----+   push   +-----------+    |                  |
           | dispatch |--------->| FIFO Load |--+ |                  |
           +----------+          | FIFO Store|--+ |                  |
                                 | FIFO MMU  |--+ |                  |
                                 | FIFO VCU  |--+ |                  |
                                 +-----------+  | |                  |
                                    head/pop    v |                  |
                                 +--------------+-v-+   work / done  |
                                 |   synchronizer   |<------------>  all units
                                 +------------------+
       +-----------+                                      +------------+
       | load_unit |--- bank writes (one core or all) -->| qd_core x8  |
       +-----------+                                      |  mmu + vcu |
       +------------+<-- bank reads (one core) -----------|  4 banks   |
       | store_unit |                                     +------------+
       +------------+
```

| module | role |
|---|---|
| `quartdepth_top` | Top level. Three AXI4 master ports (instruction fetch, load, store), start/done, status. |
| `dispatch` | Reads the program in 16-beat bursts and pushes each instruction into the FIFO of its unit. |
| `inst_fifo` | One 16-deep FIFO per unit (Load, Store, MMU, VCU). |
| `synchronizer` | Starts a unit (`work`) when its next instruction's dependencies are met; collects `done`. |
| `load_unit` | DMA from DRAM into the banks of one core, or of all cores at once (broadcast). |
| `store_unit` | DMA from one bank of one core to DRAM. |
| `qd_core` | One MMU, one VCU and four `local_buffer` banks. `NUM_CORES` = 8 instances. |
| `mmu`, `mac_tree` | W4A4 / W4A8 matrix multiplication unit: 8 trees of 32 (INT4) or 16 (INT8) multipliers. |
| `vcu`, `vcu_lane` | Vector unit: 8 FP32 lanes with a log2 / exp2 function unit, conversion and quantizer. |
| `local_buffer` | Dual write-port bank with bit masks and one-cycle reads, written as an array. |
| `qd_pkg`, `qd_fp_pkg` | Instruction format and opcodes; FP32 arithmetic and SFU polynomial tables. |

## The instruction stream and how units are kept in order

The hardest part of the design to follow is how four independent units stay
correctly ordered. The program is a flat list of 128-bit instructions, one per
AXI beat, each naming the unit that runs it (`instr_t` in `qd_pkg`):

| field | bits | meaning |
|---|---|---|
| `last` | 1 | final instruction of the program |
| `unit` | 2 | 0 Load, 1 Store, 2 MMU, 3 VCU |
| `wait_m` | 4 | bit u: need one token from unit u before starting |
| `sig_m` | 4 | bit u: give one token to unit u after finishing |
| `op` | 5 | MMU / VCU opcode |
| `core`, `bcast`, `bsel` | 4, 1, 2 | Load/Store: target core, broadcast, bank |
| `ddr` | 32 | Load/Store byte address in DRAM (16-byte aligned) |
| `a`, `b`, `c` | 12 each | source, second source, destination word address |
| `n0`, `n1` | 12 each | row / word count; MMU words per row (KW) |
| `imm` | 8 | MMU activation zero point; VCU `{slot, p}` |

Dispatch fills the FIFOs in program order. Each unit therefore runs its own
instructions in order, but the units run independently of each other. All
ordering between units comes from explicit tokens. The synchronizer holds a
4-bit counter `tok[p][c]` for every producer/consumer pair:

* A unit with a non-empty FIFO gets a one-cycle `work` pulse when it is idle
  and, for every `p` set in its head's `wait_m`, `tok[p][c]` is non-zero.
  The same pulse pops the FIFO and decrements those counters.
* When the unit pulses `done`, each counter named in the finished
  instruction's `sig_m` is incremented.

A typical layer is a chain of handoffs:

1. Load the tile and signal the MMU.
2. The MMU waits for that token, computes, and signals the VCU.
3. The VCU waits, post-processes, and signals Store.
4. Store waits and writes the result back.

Load can already be fetching the next tile while the MMU computes. Only the
tokens order the units, so data movement, matrix work and vector work overlap.
The program writer must keep buffers from being overwritten too early. To do
that, the program makes a later load wait on a token from the consumer of the
buffer. The hardware does not check this.

If a FIFO is full, dispatch drops `rready` and the fetch burst stalls. Fetch
resumes once the unit drains the FIFO. Beats that follow the `last`
instruction inside the same burst are discarded. `done` of the top rises when
fetch has finished, every FIFO is empty and no unit is busy.

Token counters saturate at 4 bits. A program must not keep more than 15
unconsumed tokens on one pair.

## Cores and data layout

All cores receive the same MMU and VCU instructions and run in lock step,
each on its own banks. Each core computes a different slice of output
channels. Load writes either one core (`bcast`=0, `core`) or all of them, so
activations can be broadcast and weights loaded per core. Store reads one
core.

Banks per core (word width x depth):

| bank | word | depth | content |
|---|---|---|---|
| act | 128 b | 512 | 32 INT4 or 16 INT8 codes; the VCU writes 8-lane slots into it |
| wgt | 8 x 128 b | 256 | for each of 8 output columns, the 32 INT4 weights of one K slice |
| psum | 8 x 32 b | 256 | INT32 MMU results, one row of 8 columns |
| vec | 8 x 32 b | 256 | FP32 vectors, lane l = column l |

Load and Store move bank words as 1 (act), 2 (psum, vec) or 8 (wgt) AXI beats,
least significant beat first. They split transfers into bursts of at most 64
beats. Store waits for each write response before it starts the next burst.

## Matrix unit

A GeMM instruction multiplies an M x K activation tile by a K x 8 weight
tile. The activation tile is M rows of KW words at `a`. The weight tile is KW
words at `b`. Every cycle, one activation word and one weight word go to the
8 MAC trees:

* A4 (`M_GEMM_A4`): 32 activations x 32 weights per tree.
* A8 (`M_GEMM_A8`): 16 activations, using the first 16 weight nibbles.

Both operands are unsigned codes. The trees subtract the zero points first:
the activation zero point comes from `imm`, and the per-column weight zero
points are set by `M_SETZ` from weight word `b`. Sums accumulate in INT32 and
are written to psum row `c + m`. A tile takes M*KW + 5 cycles from `work` to
`done`. The precision can change from one instruction to the next.
Convolution runs as GeMM over im2col rows, which the program lays out in the
activation bank.

## Vector unit

The VCU has 8 lanes with a 5-stage FP32 pipeline. It reads one row per cycle
and takes n0 + 9 cycles per instruction. Four per-lane parameter registers
P0..P3 are loaded from the vector bank with `V_SETP`. `imm[1:0]` picks `p`,
and an operation uses `P[p]` and `P[p+1]`.

| op | result |
|---|---|
| `V_DEQ` | fp32(psum) * P[p] (INT32 -> FP32 dequantization) |
| `V_ADD`, `V_MUL`, `V_ADDP`, `V_MULP`, `V_RELU` | element-wise FP32 |
| `V_LOG2`, `V_EXP2` | function unit |
| `V_POL` | sign(x) * (log2(abs(x) + P[p]) - P[p+1]), where P[p+1] holds log2 of P[p] |
| `V_UNPOL` | inverse of `V_POL`: sign(y) * (P[p] * 2^abs(y) - P[p]), computed as 2^(abs(y) + P[p+1]) - P[p] |
| `V_QNT4`, `V_QNT8` | clip(round(x * P[p] + P[p+1])) into slot `imm[3:2]` of an act word |
| `V_DQ4`, `V_DQ8` | (code - P[p+1]) * P[p] |

Numerics:

* Results are rounded to nearest even. Subnormals are flushed to zero and
  overflow saturates to infinity. `V_ADD`, `V_MUL`, `V_DEQ`, the quantizers
  and `V_DQ*` are bit-exact against a correctly rounded reference.
* log2 and exp2 use a cubic Taylor polynomial per segment: 64 segments of
  the mantissa (log2) or of the fractional part (exp2). The coefficient
  tables are computed at elaboration time by constant functions, so there are
  no data files.
* Measured error against a double-precision reference: about 2e-6 relative
  for polish and 1e-4 relative for a polish/unpolish round trip.

## Departures from the published design

* The instruction set, the token scheme, the FIFO depths, the bank sizes and
  the tree shapes are all this design's own choices.
* The paper's SFU uses a cited polynomial method and reaches 2-5 ULP. The
  SFU here uses a different, simpler polynomial scheme.
* The vector unit has no GeLU, softmax or layer norm. It provides the
  element-wise operations, ReLU, log2/exp2, polishing and (de)quantization.
  The nonlinear layers of a full transformer would need extra operations.
* The Float32 matrix datapath is only a baseline in the paper's comparison,
  and it is not built.
* Memories are register arrays, not SRAM macros. The three AXI ports are
  brought out separately; the interconnect to DRAM is left to the
  integrator.

## Capacity and throughput against the evaluated models

The peak MAC rate is 8 cores x 8 trees x 32 = 2048 MAC/cycle in W4A4, and
half that in W4A8. At 1 GHz that is 2.05 / 1.02 TMAC/s.

Model weights never fit on chip. They are streamed tile by tile from DRAM:
Metric3D ViT-Small 17.9 MB, ViT-Large 196.5 MB and ViT-Giant 656.9 MB at 4 bits.

The compute lower bounds below use the published MAC counts: ViT-Small 24.3 /
105 / 633 GMAC and ViT-Large 255 / 1036 / 6244 GMAC at 256 / 512 / 1024
pixels.

| model | W4A4 | W4A8 |
|---|---|---|
| ViT-Small at 256 | 11.9 ms | 23.8 ms |
| ViT-Large at 256 | 125 ms | 249 ms |

The W4A8 bound for ViT-Large is above the 223 ms reported for the original
chip, and at 1024 pixels both precisions are. The original therefore has more
MAC throughput than this configuration. To close the gap, raise `NUM_CORES`
or widen the trees.

## Simulation

Every testbench in `tb/` checks itself and ends by printing
`TB_RESULT checks=<n> failures=<n>`. They use Verilator 5:

```
verilator --binary --timing -Irtl -y rtl +libext+.sv \
  rtl/qd_pkg.sv rtl/qd_fp_pkg.sv tb/tb_util_pkg.sv tb/axi_mem_model.sv \
  tb/tb_quartdepth_top.sv --top-module tb_quartdepth_top -o sim && obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_quartdepth_top` | Runs a full program on the default 8-core design (Verilator compile takes about a minute; the run takes about 1000 cycles). Covers per-core and broadcast loads, W4A4 then W4A8 GeMM, and the VCU chain DEQ -> POL -> QNT8 -> UNPOL -> RELU -> DQ8 -> additions. Compares every stored value with a reference. Fails if load/MMU overlap, token waits, a full FIFO, AXI stalls or the A4/A8 switch never occur. |
| `tb_mmu` | GeMM results and the M*KW+5 latency. |
| `tb_vcu` | Every VCU operation and the n0+9 latency. |
| `tb_dispatch` | Order per unit, back-pressure and end of program. |
| `tb_synchronizer` | Dependency order and concurrency with randomized unit latencies. |
| `tb_load_unit`, `tb_store_unit` | DMA contents, burst splitting and core selection. |
| `tb_inst_fifo`, `tb_local_buffer` | FIFO and memory behaviour against shadow models. |

`axi_mem_model` is a behavioural DRAM with optional random stalls. It is
used only by the testbenches.
