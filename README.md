# EdgeMM in SystemVerilog

EdgeMM is a multi-core RISC-V CPU for running multimodal LLMs at the edge. Its cores carry
AI coprocessors of two kinds, each matched to one phase of the workload:

- **Compute-centric (CC) cores** use a weight-stationary systolic array. They run the
  GEMM-heavy vision encoder and the LLM prefill.
- **Memory-centric (MC) cores** use a digital compute-in-memory (CIM) macro as their weight
  memory. They run the memory-bound GEMV of LLM decoding.

Two further ideas cut the DRAM traffic that dominates decoding:

- **Activation-aware pruning.** A per-layer Top-k picks the largest activation channels. The
  DMA fetches only the weight rows of those channels, in gather mode.
- **Bandwidth management.** Every cluster's DMA has a budget counter, so the DRAM bandwidth
  can be divided between the clusters.

This repository is a register-transfer model of that chip. The host RISC-V cores are not
included; their interfaces are ports.

## Structure

```
edgemm_top                 4 groups + system crossbar (axi_xbar) -> one DRAM port
└─ edgemm_group            2 CC clusters + 2 MC clusters + cluster crossbar (axi_xbar)
   ├─ cc_cluster           4 CC cores, 32 kB data memory, 8 kB instruction memory,
   │  │                    DMA (dma + bw_pmc), shared ACU, barrier, cluster buses
   │  └─ cc_coprocessor    4 matrix registers, systolic_array (16x16 sa_pe),
   │                       vector_unit, load/store unit, CSRs
   └─ mc_cluster           2 MC cores, 8 kB shared buffer, 8 kB instruction memory,
      │                    DMA, gather-list merge, shared ACU, barrier
      └─ mc_coprocessor    32 vector registers, cim_macro (16 x cim_column, 64 kB),
                           act_pruner, vector_unit, CSRs
```

Shared pieces:

- `edgemm_pkg`: request/response structs, instruction field layouts, function codes and CSR
  numbers.
- `local_bus`, `rr_arbiter`, `sram` and `sync_fifo`: small building blocks used inside the
  blocks above.

## How the pieces work

**Host–coprocessor interface.** A host core sends an instruction word, `rs1` and `rs2` to its
coprocessor with a valid/ready handshake. Reads such as CSR reads come back on a response
channel. The fields follow the paper's instruction formats (M-M, M-V, V-V, config). The
opcodes are RISC-V custom-0 for CC and custom-1 for MC.

**CC core.** It has these instructions:

- `MLD`/`MST` move a 16x16 matrix register to or from the cluster data memory, one 512-bit
  row per access. Elements can be 8, 16 or 32 bits.
- `MMUL` streams the weight register into the array row by row, then feeds the activation
  rows with a skew. Results are taken from the bottom edge.
  - It takes exactly 2R+C+M−3 cycles, the paper's Eq. (2).
  - `uop[0]` accumulates into the destination.
- `VV` applies an element-wise operation to one row of three registers: add, sub, mul, max,
  min, ReLU, arithmetic shift, saturate-to-int8 or move. The row pointer then advances.
  Shift plus saturate is the requantisation step.

**MC core.** The CIM macro stores 32 subarrays × 128 wordlines × 16 columns of 8-bit weights.
These are written and read by the DMA through the macro's read/write port.

- `GEMV` computes MROWS vectors in MROWS·W+1 cycles, the paper's Eq. (3).
  - Activations enter bit-serially, most significant bit first, W = 8 bit planes. The sign
    plane is subtracted.
  - Each of the 16 columns sums its 32 selected weights in an adder tree, then shifts and
    accumulates.
- `PRUNE` runs the paper's Algorithm 1 on a 32-element vector register:
  1. Top-k by magnitude, with ties going to the lower channel. The kept values are packed
     to the front, and the index register records the kept channels.
  2. n = number of channels with |v| > max/16. If n < k, then k becomes n. Software writes
     k = d at the first layer.
  3. With `uop[0]` set, the address generator sends one gather entry per kept channel to the
     DMA. The entry holds the DRAM address of the channel's weight row and the CIM subarray
     it fills.
- `VLD`/`VST` move vectors to and from the shared buffer. `VV` works as in the CC core.

**DMA.**

- Descriptors are two-dimensional: rows × lines per row, with source and destination
  strides. The direction is DRAM→local or local→DRAM.
- In gather mode, each row's addresses come from the pruners.
- Up to 8 lines are in flight, and responses return in order.
- `bw_pmc` counts DRAM beats in each interval T. Once the count exceeds the budget B, it
  blocks the DMA until the interval ends, so at most B+1 lines pass per T. T = 0 turns the
  budget off. Blocked cycles are counted.

**Clusters and interconnect.**

- The cores and the DMA share the data memory, or the shared buffer, through a round-robin
  bus. This allows one 512-bit access per cycle.
- Local address map, by byte-address bits 23:20: 0 = data memory or shared buffer,
  1 = instruction memory, 2+i = CIM macro of MC core i.
- The crossbars are N:1 round-robin. Each adds its master index to the low bits of the
  request ID and routes responses back by it.
- A shared ACU (multiply in one cycle; divide and remainder by a 33-cycle restoring divider)
  and a barrier serve each cluster's five or three host cores.

## Verification

Every block has a self-checking testbench in `tb/`, compared against a reference model. Each
ends with a `TB_RESULT` line.

- **Cycle counts:**
  - the systolic array and the CC core are checked against 2R+C+M−3 for several M;
  - the CIM macro and the MC core against nvec·W+1;
  - the budget counter against B+1 beats per interval.
- **Cluster testbenches:** full GEMM and pruned-GEMV flows through DMA, bus and cores, on a
  DRAM model (`tb/dram_model.sv`) that has a fixed latency and occasional stalls.
- **Top testbench (`tb_edgemm_top`):** one complete group at full cluster size.
  1. Prefill: all CC cores compute and requantise tiles that come from DRAM, while one
     cluster is throttled.
  2. The results go back to DRAM, where every element is checked.
  3. Decode: the MC cores take those int8 rows as input, prune over two layers, gather only
     the kept weight rows and run GEMV. This is checked against the product over the kept
     channels.
  4. It counts and requires each of these to happen: DRAM stall, crossbar wait, bus stall,
     throttling, GEMM, requantisation, k reduction, gathered rows, GEMV, the
     prefill-to-decode hand-over, barrier release and ACU result.
- **Fault copies:** each block also has a deliberately broken copy, and its testbench must
  fail on it.

The four-group chip is not simulated. It passes the linter and the synthesis front end, but
its simulation model is too large to compile in reasonable time. The group is simulated
instead, and the chip is four copies of it behind the system crossbar.

## Simulating and changing it

Every testbench builds with plain Verilator from the package, all RTL files, the DRAM model and
the testbench itself, for example:

```
verilator --binary --timing --assert -j 4 --top-module tb_edgemm_top \
  rtl/edgemm_pkg.sv $(ls rtl/*.sv | grep -v edgemm_pkg) tb/dram_model.sv tb/tb_edgemm_top.sv
./obj_dir/Vtb_edgemm_top
```

Each prints `TB_RESULT checks=N failures=M`. Parameters default to the chip's sizes; smaller
configurations for experiments are set by overriding `N_GROUP`, `N_CC`, `N_MC`, `CC_NCORE` and
`MC_NCORE` on `edgemm_top`, `R`, `C` on the CC core, or `R`, `C`, `M`, `N`, `W` on the MC core. Software for the host cores
would issue the instruction words built by the `enc_*` functions in `edgemm_pkg`.

## What follows the paper and what is this design's choice

Taken from the paper:

- The hierarchy and its counts: 4 groups; 2 CC + 2 MC clusters each; 4 CC and 2 MC cores per
  cluster.
- Array size R = C = 16.
- CIM tile 32 × 16, and 128 kB of CIM per MC cluster.
- 32 kB CC data memory.
- The latency formulas of Eq. (2) and Eq. (3).
- The instruction field positions.
- Four matrix registers.
- Algorithm 1, with threshold shift t = 16.
- Gather-mode DMA.
- The budget/interval counter.
- The DMA core per cluster, the shared ACU and the barrier.

Chosen here (the paper does not give them):

- Opcodes, function codes and CSR numbers.
- The local address map and bus protocol.
- Instruction memory and shared-buffer sizes (8 kB).
- 512-bit lines, 8 outstanding DMA lines, and the crossbar ID scheme.
- The activation bit width W = 8 and the weight width N = 8.
- The CIM wordline count M = 128, which follows from 64 kB per macro.
- The divider's latency.

## Differences from the paper

- **Data type.** The paper's configuration table lists BF16. This design computes in INT8
  with 32-bit accumulation, because the bit-serial digital CIM described in the paper is an
  integer datapath. The CC core follows the same choice so that the two kinds of core can
  exchange data.
- **Pruning width.** Algorithm 1 ranks the whole activation vector (d = 2048 for TinyLlama).
  Here one `PRUNE` ranks one 32-element register, so a long vector is pruned slice by slice,
  each slice with its own threshold.
- **DRAM and host cores.** The DRAM controller (GDDR6) and the RISC-V host cores are outside
  the RTL. Their behaviour appears only in the testbench models and drivers.
- **Bandwidth scheduling.** The paper adjusts the budgets dynamically for different output
  lengths. Here the budgets are inputs; the policy would be host software.
- **Not modelled:** the paper's energy, area and frequency figures. No claim is made about
  throughput (tokens/s).
- **CIM circuits.** The paper's CIM circuit details (6T cells, local compute cells) are
  modelled only at the logic level.

## Workloads

The paper evaluates SPHINX-Tiny (TinyLlama-1.1B) and Karmavlm (Qwen1.5-0.5B), each with
vision encoders and about 300 input tokens.

- **Weight size.** At INT8 their weights are about 1.1–1.2 GB. That is far more than the
  ~1.4 MB on chip, so weights stream from DRAM in tiles: 16×16 per CC core, and
  32×16×128 per CIM macro. The 32-bit DRAM address space holds them.
- **Simulated here.** One tile of each kind, end to end. Whole-model runs need the host
  software, which is not part of this design.
- **Top-k.** Ranking over the full d is only approximated, slice by slice (see above).
