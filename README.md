# HyperX: Nyström-HDC graph classification accelerator in SystemVerilog

This is a synthesizable SystemVerilog model of HyperX, an FPGA accelerator for graph
classification with Nyström hyperdimensional computing. It classifies one graph per run:

1. For each hop t = 0..H-1:
   - it hashes the node features into integer codes with LSH;
   - it maps each code to a histogram bin through a minimal perfect hash;
   - it counts the bins;
   - it adds the hop's landmark similarities H(t)·h(t) into the kernel vector C.
2. It projects C into a d-bit bipolar hypervector, sign(Pnys·C). The projection matrix Pnys
   streams from DDR.
3. It takes the arg-max over the class prototype scores.

## Directory layout

- `rtl/`: the design. There is one module or package per file.
- `tb/`: self-checking testbenches, plus a behavioural DDR model (`ddr_model.sv`) and testbench helpers (`tb_util_pkg.sv`).

## Blocks

| Module | Role |
|---|---|
| `hx_pkg` | Q16.16 number format, 64-bit seeded hash, xorshift128+ step, load-port region and register map |
| `bank_resolver` | One grant per memory bank per cycle; round-robin priority that rotates on conflicts |
| `sync_fifo` | First-word fall-through FIFO with occupancy count |
| `spmv_engine` | Statically load-balanced sparse matrix–vector product (see below) |
| `densemv` | Dense projection c = F·u(t), 4 PEs in lockstep |
| `lshu` | LSH unit: c = F·u(t), then t passes of c ← A·c, then floor((c + b)/w) |
| `mphe` | Minimal perfect hash engine (see below) |
| `hue` | Histogram update engine (see below) |
| `kse` | Kernel similarity engine: C (+)= H(t)·h(t) on the same SpMV engine |
| `nee` | Nyström encoding engine (see below) |
| `sce` | Similarity and classification engine (see below) |
| `hyperx_top` | Controller and wiring, host load port, DDR read port, event counters |

**`spmv_engine`.**
- Schedule table: built offline. Each iteration assigns one row to each of the P PEs, so all PEs in an iteration have similar nonzero counts. An iteration ends when every PE is done.
- Stores: the CSR arrays and the vectors are banked by index mod P. Each store has a `bank_resolver`.
- Buffers: two ping-pong vector buffers, so repeated propagation needs no copy.

**`mphe`.**
- The lookup queue feeds a hash stage with two seeded hashes.
- Each level then has one probe stage; the next hash comes from xorshift128+.
- A rank stage and a codebook compare stage follow.
- Throughput is one lookup per cycle, with latency LEVELS+3.

**`hue`.**
- Each of the P lanes has a private histogram copy.
- A merge step reduces the copies, writes counts (Q16.16) into the KSE input buffer, and clears the copies.

**`nee`.**
- An AXI4-style burst read master (16-beat bursts, up to 4 in flight) feeds a 512 × 512-bit stream FIFO.
- A burst is issued only when the FIFO has room for it after counting the beats still in flight (a credit check).
- 16 MAC lanes read a cyclically banked C. An adder tree takes the sign, and the result is packed into a 64-bit-word HV buffer.

**`sce`.**
- 4 PEs, each holding a block of prototype rows. A PE computes each score as d − 2·popcount(g xor h), one 64-bit word per cycle.
- A sequential argmax follows; ties go to the lower class index.

## Top-level use (`hyperx_top`)

All logic uses one clock and a synchronous, active-low reset.

**After reset.** The histogram copies clear for MAX_BINS cycles. `busy_init` is high meanwhile; do not assert `start` until it falls.

**Loading.** Use the `cfg_we/cfg_region/cfg_addr/cfg_data` load port. Regions (`hx_pkg::region_e`):
- **`RG_REG`:** configuration registers. The map is in `hx_pkg`: REG_N_NODES, REG_N_FEAT, REG_N_HOPS, REG_A_NITER, REG_LSH_SHIFT, REG_N_LAND, REG_DIM, REG_N_CLASSES, REG_PNYS_BASE, and the per-hop REG_LSH_B, REG_N_BINS, REG_CB_BASE, REG_LVL_LOG2 and REG_LVL_BASE.
- **`RG_FEAT`:** F at row·MAX_F + k. **`RG_LSHU_U`:** u(t) at t·MAX_F + k.
- **`RG_A_SCHED`, `RG_A_ROWPTR`, `RG_A_COLVAL`:** adjacency schedule at iteration·P + pe, as {valid, row}. Row pointers. Nonzeros as {col[63:32], val[31:0]}.
- **`RG_H_SCHED`, `RG_H_ROWPTR`, `RG_H_COLVAL`, `RG_KSE_DESC`:** the same for all landmark matrices H(t). Descriptor t is {rowptr_base[63:32], n_iter[31:16], sched_base[15:0]}.
- **`RG_MPH_LEVEL`, `RG_MPH_RANK`:** level words and rank entries at level·LT_DEPTH + word.
- **`RG_MPH_CB`:** codebook entries {code[47:16], hist_idx[15:0]}.
- **`RG_PROTO`:** prototypes at class·ceil(D_MAX/64) + word. Bit = 1 means +1.

**Run.** Pulse `start`. `done` pulses when the run ends. `label` and `best_score` then hold the result, `run_cycles` the latency, and `score_raddr/score_rdata` give every class score.

**Control sequence.** The controller runs these steps in order. The Pnys prefetch is issued at `start`.

| Step | What happens |
|---|---|
| LSH, per hop | Codes stream LSHU → MPHE → HUE. MPHE hits go to the HUE lanes round-robin. |
| DRAIN | Wait until the MPHE is empty. |
| MERGE | HUE writes h(t) to the KSE. |
| KSE | C += H(t)·h(t). At hop 0, C is overwritten instead. |
| ENC | NEE loads C and streams Pnys. |
| CLS | SCE scores the prototypes. |

**DDR port.** `m_ar_*` / `m_r_*` is a read-only AXI4 subset:
- ARVALID/ARREADY/ARADDR/ARLEN and RVALID/RREADY/RDATA(512)/RLAST.
- The engine never deasserts `m_r_ready` while a burst it issued is returning.
- Pnys is row-major: ceil(s/16) 512-bit words per row, element k in lane k mod 16 of word k/16.

**Counters.**
- Bank-conflict stall cycles in the LSHU and KSE.
- KSE iterations.
- MPH hits, absent codes (no level hit) and mismatches (hit, but a different code stored).
- Histogram updates and out-of-range indices.
- DDR credit stalls and MAC starvation cycles.
- The most bursts seen in flight.

## Default sizes

| Parameter | Default | Basis |
|---|---|---|
| P (PEs in LSHU, KSE, HUE) | 4 | published configuration |
| NEE lanes / FIFO depth / AXI width | 16 / 512 / 512 bit | published configuration |
| D_MAX (d) | 10000 | "d ~ 10^4" |
| MAX_HOP | 10 | "H ≤ 10"; MUTAG uses 10 hops |
| MAX_S (landmarks, bins per hop) | 512 | s up to about 400 (Pnys sizes of 7–16 MB at d = 10^4) |
| MAX_N / A_NNZ | 1024 / 8192 | this design's choice |
| MAX_F | 128 | this design's choice (TU datasets have at most 89 features) |
| LEVELS / LT_DEPTH / CB_DEPTH | 8 / 256 / 4096 | this design's choice; the published MPH sizes (≤ 20 KB) fit |
| MAX_C | 8 | this design's choice |

## Where this design follows the published work, and where it chooses

**Followed:**
- the six engines and their order;
- the LSHU restructuring (projection first, then t SpMV passes);
- CSR storage with static iteration-wise schedule tables;
- banked stores with conflict resolvers;
- the BBHash-style MPH: levels, rank vector, popcount − 1 index, codebook compare, two seeded hashes then xorshift rehash, one lookup per cycle;
- private histogram copies with a merge;
- C accumulated on chip across hops;
- Pnys streamed from DDR in 512-bit contiguous bursts, with several bursts outstanding, into a 512-entry FIFO and 16 MAC lanes against a cyclically partitioned C, with the sign fused;
- the prototype dot products spread across PEs, then an argmax.

**Own choices**, where the published description is silent:
- **Arithmetic:**
  - Q16.16 fixed point instead of FP32. The 32-bit element width and the 16 elements per word are kept.
  - The LSH width w is a power of two, so the division is a shift.
  - sign(0) = +1.
- **Memory and engine internals:**
  - Memories are read combinationally.
  - SpMV PEs take 2 cycles per nonzero.
  - Round-robin bank arbitration.
- **MPH:**
  - Power-of-two level sizes.
  - The hash mixer constants and seeds.
  - 16-bit rank entries.
- **NEE:**
  - Burst length 16 and 4 outstanding bursts.
  - The credit check.
  - An early Pnys prefetch at the start of a run.
- **Control:**
  - Strictly sequential engine phases per hop.
  - The load-port register map.

**Outside this design:**
- The host CPU, the PCIe link, the DDR device and its controller. The testbenches use a behavioural DDR model in their place.
- The offline steps: DPP landmark selection, schedule-table construction and MPH construction. The testbenches do the latter two in SystemVerilog.

**Known differences from the published implementation:**
- The original is HLS-generated FP32 logic at 300 MHz; this design's timing has not been closed for any device.
- The LSHU, KSE and NEE do not overlap across hops.

## Workloads (the eight TU datasets)

All of them fit except the largest D&D graphs:
- **D&D's largest graphs:** up to about 5700 nodes and 14000 edges (own knowledge), which exceeds MAX_N = 1024 and A_NNZ = 8192. The mean D&D graph (284 nodes, 716 edges) fits.
- **NEE time:** for s ≈ 300 landmarks, the NEE needs d·ceil(s/16) ≈ 190,000 cycles, about 0.63 ms at 300 MHz. At one 64-byte word per cycle this is DDR-bound, so NEE time dominates a run.

## Verification

Each block has a self-checking testbench, `tb/tb_<module>.sv`. Each one prints `TB_RESULT checks=N failures=M` and has a cycle-count watchdog. Reference values are computed independently in the testbench: integer models of the SpMV, LSH codes, MPH construction, histograms, C, sign(Pnys·C) and prototype scores.

Cycle counts are checked where a rate is defined:
- the MPHE: one lookup per cycle;
- the SCE run length;
- the DenseMV run length;
- the NEE: at most one word per cycle.

The end-to-end testbench, `tb_hyperx_top`, runs the top at its default parameters with no overrides:
- **Model:** it builds a random trained model (3 hops, s = 48, d = 10000, 4 classes).
- **Runs:** it classifies two random 200-node graphs and compares every class score and the label with the reference. It also checks the absent-code count and bounds the run length.
- **Mechanisms:** it requires each of these to occur at least once: bank-conflict stalls in both SpMV engines, absent codes, DDR credit stalls, MAC starvation, and more than one burst outstanding. Each run takes about 39,000 cycles.


**Simulation.** Use Verilator 5 with `--binary --timing --assert`. Example:

```
verilator --binary --timing --assert rtl/hx_pkg.sv tb/tb_util_pkg.sv rtl/*.sv \
  tb/ddr_model.sv tb/tb_hyperx_top.sv --top-module tb_hyperx_top
```

**Lint warnings.** Verilator reports a few unused signals on purpose:
- busy flags of sub-engines;
- iteration counters and queue counts that the LSHU and MPHE do not need.

These are not circuit faults.

**Synthesis sizes.** Yosys coarse synthesis of the modules with large memories (SpMV, DenseMV, HUE and the top) takes longer than 10 minutes, so their sizes were not obtained.
