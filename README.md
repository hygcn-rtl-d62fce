# HyGCN in SystemVerilog: a hybrid accelerator for graph convolutional networks

A graph convolutional network (GCN) layer does two very different kinds of work.

- **Aggregation** gathers the feature vectors of each vertex's neighbours and reduces them element by element (sum, max or min). The neighbour lists are irregular and sparse, so this phase is bounded by memory traffic and is hard to vectorise.
- **Combination** multiplies each aggregated vector by a dense weight matrix, adds a bias and applies ReLU. This is regular, compute-bound work, the kind a systolic array does well.

HyGCN gives each phase its own engine and runs them as a pipeline:

- an **Aggregation Engine** built from 32 SIMD cores of 16 lanes each;
- a **Combination Engine** built from eight 4 × 128 systolic modules;
- a two-bank **Aggregation Buffer** between the engines, so one bank of destination vertices can be combined while the next is being aggregated;
- a **Memory Access Handler** that merges the off-chip traffic of the four buffers.

This RTL implements that architecture. One layer runs per `start`, configured by a struct. It is written to be read and simulated with Verilator.

## One layer, end to end

The destination vertices are cut into **intervals**. The host chooses the interval width. An interval must fit in one bank of the Aggregation Buffer, and its edges must fit in the Edge Buffer. For each interval, `hygcn_top` goes through these steps:

1. **Edge fetch.** The column pointers and in-edge lists of the interval are read from memory. The graph is stored in compressed-column form: `col_ptr` and `row_idx`, one 32-bit word per memory beat.
2. **Sampling.** Each vertex's list goes through the **Sampler**, which has three modes:
   - keep every edge;
   - keep one edge in every `factor`, starting at a pseudo-random offset, with an optional cap on the kept count (GraphSage keeps 25);
   - keep the edges whose stored word has bit 31 set (predefined sampling).

   The kept edges are written to the sampled half of the Edge Buffer. Each kept source row is marked in the Sparsity Eliminator's bitmap.
3. **Windows.** The **Sparsity Eliminator** scans the bitmap and returns windows of source rows.
   - Window *sliding*: a window starts at the first row below the previous window that has an edge.
   - Window *shrinking*: the window's bottom is pulled up to the last row inside it that has an edge.
   - So no window begins or ends with a row that has no edge. The next window begins where the unshrunk window would have ended.
4. **Feature prefetch.** For each window, the features of its rows are fetched into one bank of the double-buffered **Input Buffer**. Meanwhile the cores work on the other bank.
5. **Aggregation.** The **edge scheduler** (`esched`) spreads one vertex's feature over all 32 cores. Each core owns one 16-element chunk. This is the *vertex-disperse* mode.
   - A feature shorter than 32 chunks leaves cores free, so several vertices run side by side.
   - A longer feature takes several passes.
   - Partial results are kept in the Aggregation Buffer between windows. A per-vertex cursor records how far through its edge list each vertex has got.
   - When a vertex's last edge is folded in, the vertex is marked *ready*.
6. **Combination.** The **vertex scheduler** (`vsched`) sends ready vertices to the systolic modules in groups of four (one row per vertex). It has two modes, described in the next section. Results pass through the **Activate Unit** (bias, ReLU) into the **Output Buffer**. The Output Buffer writes each 128-element row to memory as one burst.

Steps 1–5 of interval *i*+1 overlap step 6 of interval *i*, through the two banks of the Aggregation Buffer.

## The two pipeline modes

`cfg.pipe` selects how the Combination Engine uses its eight modules.

- **Latency-aware (`PIPE_LATENCY`): modules work independently.**
  - As soon as the next group of four vertices is ready, it goes to the lowest-numbered free module.
  - The group does not have to wait for the rest of its interval. This is the purpose of the per-vertex ready bits in the `coordinator`.
  - Each module reads its own weights from the Weight Buffer.
- **Energy-aware (`PIPE_ENERGY`): modules work as one 32 × 128 array.**
  - The scheduler waits until eight groups (32 vertices) are ready and all modules are free.
  - Weights enter only the bottom module. Each module passes them to the module above.
  - The Weight Buffer is therefore read once for 32 vertices instead of once per 4. Vertex latency is longer.

Inside a module the dataflow is output stationary.

- Aggregated elements flow left to right. Weights flow bottom to top.
- Both are skewed, so that element *k* of row *r* and weight row *k* of column *c* meet in PE (*r*, *c*).
- With a feature length of *K*, the last accumulator of a module is final *K* + *ROWS* + *COLS* − 2 clock edges after the first input.
- In cooperative mode, *ROWS* is 32.

## Memory access coordination

The four buffers that talk to memory issue bursts at the same time: edges, input features, weights and output rows. The `memory_handler` works as follows.

- It takes everything that is pending as one **batch**.
- It serves the batch in fixed priority: edges > input > weights > output.
- It collects a new batch only when the current one is empty. A low-priority request already in the batch therefore goes before a high-priority one that arrives later.
- Each beat address is split into channel (bits 2:0), bank (bits 6:3) and row. Consecutive beats of a burst therefore fall in different channels and banks.
- Read beats come back in order. A tag FIFO sends each beat to its client, with its index in the burst.

## Numbers and formats

| | value | note |
|---|---|---|
| element | 32-bit signed fixed point, Q16.16 | products are accumulated in 64 bits and shifted back by 16 in the Activate Unit, saturating |
| memory beat | 512 bits = 16 elements | vertex *u*'s feature is `cpv = ceil(flen/16)` beats at `x_base + u*cpv` |
| SIMD cores | 32 × 16 lanes | |
| systolic modules | 8 × (4 × 128) PEs | |
| Input Buffer | 2 banks × 1024 beats = 128 KB | a window may hold at most `1024 / cpv` rows |
| Edge Buffer | 2 halves × 262144 words = 2 MB | raw list and sampled list |
| Weight Buffer | 4096 × 128 words + 128 bias = 2 MB | weight row *k* at `w_base + 8k`; the bias follows the matrix |
| Output Buffer | 8192 rows × 128 words = 4 MB | row of vertex *v* at `out_base + 8v` |
| Aggregation Buffer | 2 banks × 131072 beats = 16 MB | |
| Sparsity bitmap | 262144 rows | enough for the largest graph evaluated (232,965 vertices) |

`hygcn_pkg.sv` holds these constants, the `layer_cfg_t` configuration struct and the aggregation operator.

## Files

| file | block |
|---|---|
| `hygcn_top.sv` | the accelerator; memory port and event outputs |
| `aggregation_engine.sv` | interval sequencing, edge and feature prefetch, Edge Buffer |
| `esched.sv`, `simd_core.sv` | edge scheduler and the 32 SIMD16 cores |
| `sampler.sv` | uniform / predefined edge sampling |
| `sparsity_eliminator.sv` | window sliding and shrinking |
| `pingpong_ram.sv` | Input Buffer (two banks) |
| `coordinator.sv` | Aggregation Buffer banks, ready bits, hand-off |
| `combination_engine.sv` | Weight Buffer, feeders, eight modules, drain |
| `vsched.sv`, `systolic_module.sv`, `pe.sv` | vertex scheduler and arrays |
| `activate_unit.sv`, `output_buffer.sv` | bias + ReLU, output coalescing |
| `memory_handler.sv` | batching, priority, channel/bank split |

## Simulating

Every testbench in `tb/` is self-checking and prints `TB_RESULT checks=… failures=…`. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps --top-module tb_hygcn_top \
    -Irtl -Itb -y rtl -y tb +libext+.sv rtl/hygcn_pkg.sv tb/tb_hygcn_top.sv
./obj_dir/Vtb_hygcn_top
```

`tb_hygcn_top` runs the top at its default, full-size parameters against `hbm_model`. `hbm_model` is a behavioural memory with a fixed latency and random back-pressure. The testbench runs three layers:

1. sum aggregation, no sampling, latency-aware mode;
2. max aggregation, uniform sampling with a cap, energy-aware mode;
3. min aggregation, predefined sampling, a 600-element feature (several passes), latency-aware mode.

It builds random graphs, works out the expected windows, sampled edges and output rows in plain SystemVerilog, and compares every output word. It also counts each mechanism and fails if one never happened:

- sliding and shrinking;
- dropped edges;
- multi-slot and multi-pass aggregation;
- both dispatch modes;
- memory batches;
- both Aggregation Buffer banks busy at once;
- aggregation waiting for a free bank.

The Verilator build takes about two minutes; the run takes under a second.

The other testbenches check single blocks: the SIMD core, PE, systolic module (including its latency), Activate Unit, Sampler, Sparsity Eliminator, vertex scheduler, Input Buffer, Output Buffer and Memory Access Handler.

## Where this design departs from the paper, and what is left out

- **Edge and weight double buffering.** The Input Buffer is double-buffered. The Edge Buffer is not: the next interval's edges are fetched only after the current interval has been aggregated. The Edge Buffer's 2 MB is used for the raw and the sampled list instead. The Weight Buffer holds one layer's whole matrix and is loaded once before combination.
- **Memory bandwidth.** The memory port moves one 512-bit beat per cycle (64 GB/s at 1 GHz). The paper's HBM delivers 256 GB/s.
- **Output width.** One layer produces one 128-wide slice of output features. This is the width of every model evaluated. Wider outputs need further passes.
- **Beyond plain layers.** The following are left to the host, which sequences further passes of the same hardware:
  - the second MLP layer of GIN;
  - DiffPool's pooling matrix products and transposes;
  - the graph Readout.
- **GCN normalisation.** The 1/sqrt(d_u d_v) edge normalisation of GCN is not applied in hardware. It has to be folded into the features.
- **Core width.** Each SIMD core has 16 lanes, from the configuration table. The aggregation figure draws cores with 8 lanes.
- **eDRAM.** All buffers are plain arrays with asynchronous reads, standing in for the eDRAM the original uses. Their size matches the original. Their timing does not.
- **Own choices not fixed by the original description**, and how they are made here:
  - number format: Q16.16;
  - sampler: a 16-bit LFSR;
  - predefined-sample flag: bit 31 of each edge word;
  - channel/bank bit split: 3 channel bits and 4 bank bits;
  - buffer handshakes: valid/ready;
  - ping-pong acquire/release protocol, per-vertex ready bits and edge cursors;
  - vertex-to-module choice: the lowest-numbered free module.

## Lint notes

- Each assertion uses `disable iff (!rst_n)`, and the same `rst_n` also resets flip-flops asynchronously. Verilator therefore reports `rst_n` as both a synchronous and an asynchronous signal. This is expected.
