# GraphAGILE-style GNN overlay accelerator in SystemVerilog

An overlay accelerator runs graph neural network (GNN) inference without
building a new bitstream for each model or graph. The hardware is fixed. A
compiler on the host turns the model and the graph into a binary of
high-level instructions. Each instruction is one whole kernel on one tile of
data: a dense matrix product (GEMM), a sparse-dense product over edges
(SpDMM, the "aggregate" step), a sampled dense-dense product that computes a
value per edge (SDDMM, used by attention models), a vector add, or an
activation function. The same array of ALUs is rewired for each kind of
kernel, so all of them run at full use of the multipliers.

This RTL implements that machine: a Scheduler that hands tiling blocks of the
binary to idle Processing Elements (PEs), and PEs that each hold triple-buffered
feature memory, double-buffered weight and edge memory, two butterfly
networks, and a P x P array of ALUs (the ACK, Adaptive Computation Kernel)
that is either a systolic array or P/2 scatter-gather pipelines.

## How a program runs

The binary lives in DDR, four 128-bit instructions per 512-bit word (at
P = 16; P x 32 bits in general). It is a list of **layer blocks**. Each
opens with a CSI instruction that gives the number of **tiling blocks** in
the layer. Each tiling block is a self-contained instruction list that ends
with `TB_END`: it loads its data, computes and stores its results.

The Scheduler (`ga_scheduler`):

* takes the lowest-numbered idle PE for each tiling block, which balances
  load dynamically;
* streams the block's instructions into that PE's instruction queue;
* after the last block of a layer, waits until every PE is idle (the
  **layer barrier**), because the next layer reads this layer's output from
  DDR.

A PE counts as busy from the first instruction it receives until its
decoder retires `TB_END`.

Inside a PE, the decoder (`ga_decoder`) issues in order, one instruction per
cycle at most:

* **Memory reads** (DDR to a buffer copy) run on one of three loaders
  (`ga_dma`): feature, weight or edge. A read may *lock* the buffer copy's
  mutex.
* **Computations** run one at a time. A computation unlocks the mutexes named
  in its instruction when it finishes.
* **A read into a locked copy stalls** until that copy's last consumer is
  done. This makes loading the next tile overlap computing on the current
  one safely, with no dependency analysis in hardware.
* **A computation cannot start while one of its operand copies is still
  loading.**
* **Changing the ACK's mode** (GEMM, SpDMM, SDDMM, vector add) costs one
  cycle.

## The ACK and its two faces

**GEMM mode.** The P x P ALUs form an output-stationary systolic array
(`ga_ack`).

* Each cycle the decoder reads one row on all P Feature Buffer banks and
  one Weight Buffer row. Word k of bank r (vertex r of the tile) enters
  array row r. Row k of the weight tile enters the columns.
* Both operands are skewed at the array edge and ripple through it. Every
  ALU multiply-accumulates.
* After the last input the array needs 2P-1 more cycles. Then all P x P
  sums, after an optional ReLU/PReLU, are written into the P banks in one
  cycle.
* One P x P output tile with a reduction length of `len` takes
  1 + len + 2P-1 + 1 cycles. Tiles are not overlapped (see *Departures*).

**Edge modes.** The array is split into P/2 UR pipelines
(`ga_ur_pipeline`). Each owns two ALU rows: P Update ALUs and P Reduce ALUs.

* The decoder reads one Edge Buffer row per cycle: P/2 edges, one per bank.
* It injects one packet per edge into the ISN (index shuffle network). SDDMM
  and vector add inject two packets per edge, for the source and the
  destination vertex.
* The ISN (`ga_isn`, a butterfly of buffered 2x2 switches, `ga_butterfly`,
  `ga_bfly_switch`) routes each packet to the Feature Buffer bank that holds
  its vertex (vertex row mod P).
* A one-stage fetch reads the feature row. The DSN (data shuffle network,
  `ga_dsn`) carries the row and the edge to the right pipeline.
  * SpDMM and vector add go to the pipeline that owns the destination row
    (dst mod P selects the bank pair, so each pipeline writes only its own
    two banks).
  * SDDMM goes to the pipeline of the edge's slot.

What each mode computes:

* **SpDMM:** Update multiplies the source vector by the edge weight. The RAW
  unit (`ga_raw_unit`) holds back an update whose destination row is being
  written in this very cycle, and lets younger, independent updates pass it
  through a small reorder FIFO. Reduce reads the old destination row, combines
  (sum/max/min) and writes it back the next cycle. Throughput is P/2 edges per
  cycle when the banks do not collide.
* **SDDMM:** Update multiplies the two vectors element-wise. The Reduce ALUs
  form an adder tree. The last ALU is the root accumulator, which adds the
  previous partial score when the feature length spans several fibers, then
  applies ReLU/PReLU. The new weight is written into the Edge Buffer in place.
* **Vector add:** Update adds the two vectors. Reduce is bypassed.

**ALU** (`ga_alu`): multiply, add, min/max, accumulate, then ReLU/PReLU.
**Activation elements** (`ga_act_elem`): exp, sigmoid (as 1/(1+exp(x)),
the form the source prints) and division. They apply to Feature Buffer rows,
one row of P words per cycle (`ga_act_unit`).

## Memories and data layout

| Buffer | Copies | Organisation | Paper size per PE | Default here |
|---|---|---|---|---|
| Feature (`ga_feature_buffer`) | 3 | P banks of P-word rows; linear row L in bank L mod P, row L/P | 16384 x 16 words per copy | 64 rows per bank |
| Weight (`ga_weight_buffer`) | 2 | one P-word row per address | 16384 x 16 words | 256 rows per copy |
| Edge (`ga_edge_buffer`) | 2 | P/2 banks; edge e in bank e mod P/2 | 65536 edges per copy | 256 per bank |

* A GEMM operand element (vertex v, feature f) of a tile with S_B vertices
  sits at linear row `base + (f / P) * S_B + v`, word `f mod P`.
* Weight row `k` of output column tile `j` is at `wb_base + j*len + k`.
* Bases are multiples of P, and Edge Buffer bases are multiples of P/2.
* Numbers are Q16.16 fixed point (32-bit).
* Edges are 96 bits (src, dst, weight). In DDR each edge takes a 128-bit
  slot.

The memory controller (`ga_mem_ctrl`):

* arbitrates round-robin among the Scheduler and the 3 x NPE loaders and
  writers;
* tags every read and hands read data back in request order.

## Instruction format

| Bits | Field |
|---|---|
| 127:120 | opcode (NOP, CSI, MEM_RD, MEM_WR, GEMM, SPDMM, SDDMM, VADD, ACT, INIT, TB_END, HALT) |
| 119:112 | mutex mask: for MEM_RD, non-zero locks the target copy; for computations, the copies released at the end (bit 0-2 feature copies, 3-4 weight, 5-6 edge) |
| 111:72 | operation fields (tile counts, length, output copy, post-op, reduce op, bases) |
| 71:64, 63:56 | buffer IDs A and B: [7:6] type (0 feature, 1 weight, 2 edge), [1:0] copy |
| 55:40 | base A (buffer row or edge index) |
| 39:16 | base B / number of edges; for MEM_RD/WR [39:8] is the DDR word address |
| 15:0 | output base |

Per-opcode use of bits 111:72 (INFO[39:0]) and the bases:

* GEMM: INFO[39:38] output feature copy, [37:36] post-op, [35:24] number of
  S_B tiles of P vertices, [23:12] `len`, [11:0] number of weight column
  tiles; ID A feature copy, ID B weight copy, base A feature base, base B
  weight base, output base.
* SpDMM: ID A edge copy, ID B source feature copy, base A first edge, base B
  edge count, INFO[39:38] output copy, [37:36] reduce op (sum/max/min),
  [31:16] source row base.
* SDDMM: as SpDMM, with INFO[39:38] copy of the destination vectors, [37]
  accumulate into the existing weight, [36:35] post-op; output base =
  destination row base.
* VADD: ID B copy of A, INFO[39:38] copy of B, [37:36] output copy, [31:16]
  A base, [15:0] B base; output row = output base + dst.
* ACT: ID A copy, base A first linear row, INFO[39:36] function, [23:0] rows,
  [39:8] divisor. INIT: same, [39:8] the value, rows a multiple of P.
* MEM_RD / MEM_WR: ID A target copy, base A buffer row (edge index for the
  Edge Buffer), INFO[23:0] number of DDR words.
* CSI: [119:96] number of tiling blocks.

`tb/tb_ga_top.sv` has small assembler functions. The paper describes the fields
but not their bit positions. The layout above is this design's own.

## Parameters and sizes

Parameter defaults are the paper's figures except where a tool could not cope:

* The full 8-PE, P = 16 top with the paper's buffer depths ran out of
  memory in synthesis. It also took over ten minutes to build for
  simulation.
* The top therefore defaults to NPE = 2, P = 8 (as do `ga_pe`, `ga_ack`
  and `ga_ur_pipeline`; a single P = 16 PE did not finish synthesis in ten
  minutes), and the buffers to the
  depths in the table above.

Every module is written for any power-of-two P ≥ 4. The paper's size is
`ga_top #(.NPE(8), .P(16), .FB_DEPTH(1024), .WB_DEPTH(8192), .EB_DEPTH(8192))`.
There is no simulation of that full-size configuration. The end-to-end test
runs at the defaults.

## Verification

`tb/tb_ga_top.sv` plays host and compiler. It writes random features,
weights and graph partitions into a behavioural DDR (`tb/ga_ddr_model.sv`:
fixed latency, random back-pressure), assembles a two-layer program and
checks every output word against a reference computed in the testbench
with the same arithmetic.

The program:

1. **Layer 1:** ReLU(H·W) by GEMM, then neighbour aggregation by SpDMM.
2. **Layer 2:** vector add of two layer-1 outputs, SDDMM edge scores written
   back from the Edge Buffer to DDR, then division in the Activation Unit.

It also checks that each mechanism actually happened:

* mutex stalls;
* RAW hazards;
* ISN congestion;
* mode switches;
* all PEs receiving blocks;
* both layer barriers.

It passes: 145 checks, 0 failures.

```
verilator --binary -Irtl -Itb rtl/ga_pkg.sv rtl/*.sv tb/ga_ddr_model.sv tb/tb_ga_top.sv --top-module tb_ga_top
./obj_dir/Vtb_ga_top
```

Two blocks also have unit testbenches:

* `tb/tb_ga_alu.sv` checks random operands for every operation and post-op,
  and a multiply-accumulate run.
* `tb/tb_ga_instr_queue.sv` checks random push/pop traffic against a queue
  model, cycle by cycle.

The other blocks are exercised only through the end-to-end test.

## Departures from the paper and open points

* **Tile schedule:**
  * GEMM tiles are not overlapped: the next tile starts after the drain.
    A real design would overlap the drain of one tile with the feed of the
    next.
  * SDDMM and vector add send one batch of P/2 edges and wait for it to
    finish before sending the next. Their two operand vectors are paired by
    edge slot inside the pipeline, and this keeps slots unique. SpDMM is
    fully pipelined.
* **One DDR port** instead of four channels. DDR, the FPGA shell, PCIe and
  the host compiler are not part of the RTL.
* **Fixed point** instead of the floating point the paper's GFLOPS figures
  suggest. The exponent uses a 16-segment piecewise-linear 2^x.
* **The PReLU slope** is a PE parameter (0.25). The paper does not say where
  it comes from.
* **Port sharing:**
  * The weight buffer cannot be written back to DDR.
  * Feature Buffer ports are shared between fetch, GEMM feed and the
    Activation Unit by mode. This is safe because only one computation runs
    at a time.
* **A verification warning about a combinational loop** in the SDDMM adder
  tree is a false path. The tree nodes and the leaves are elements of one
  ALU output array.
