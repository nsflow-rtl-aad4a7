# An adaptive systolic array for neuro-symbolic inference

Neuro-symbolic models mix two kinds of work. A neural front end, such as a CNN, is
dense matrix multiplication. A symbolic back end computes with high-dimensional
vectors: binding two vectors is a circular convolution, unbinding is a circular
correlation, and matching is a dot product against a codebook. A plain systolic
array does the first well and the second badly. Running the two one after another
leaves half of the hardware idle.

This RTL implements the accelerator architecture of NSFlow (an FPGA framework for
neuro-symbolic inference) at the register-transfer level. Its core is **AdArray**, an
H x (W*N) weight-stationary systolic array made of N sub-arrays of W columns each.
At run time, every sub-array is set to one of two modes:

* **NN mode.** NN sub-arrays are chained side by side into one ordinary systolic
  array that multiplies a matrix by a stream of vectors.
* **VSA mode.** Each column of a VSA sub-array is a small circular-convolution
  engine working on its own pair of vectors.

Both kinds of sub-array run at the same time, each fed from its own part of the
memory system. Around the array are:

* double-buffered memories Mem_A, Mem_B and Mem_C;
* a large on-chip cache;
* an AXI4 master that moves data to and from DRAM;
* a SIMD unit for element-wise operations and reductions;
* a command-driven control unit.

The default parameters are the configuration the paper deploys for NVSA (a
neuro-vector-symbolic architecture):

* a 32 x 16 x 16 array (8192 PEs) with 14 NN and 2 VSA sub-arrays;
* a 64-lane SIMD unit;
* INT8 neural and INT4 symbolic arithmetic;
* the memory sizes of that deployment: Mem_A1 2.7 MB, Mem_A2 1.1 MB, Mem_B 2.7 MB,
  Mem_C 1.6 MB and a 16.2 MB cache, with MB read as 2^20 bytes.

## The processing element and the two dataflows

Each PE (`nsf_pe`) has four registers:

* the **stationary** register holds a weight, or an element of vector A;
* the **passing** register holds a streamed element for one cycle;
* the **streaming** register holds the element being multiplied;
* the **partial-sum** register holds the sum passed down the column.

Every cycle the PE computes:

```
next   = VSA ? pass : in_left
psum  <= psum_in + stat * next      (psum_in from the PE above)
stream <= next                      (goes right in NN mode, down in VSA mode)
pass  <= stream of the PE above     (top row: the column input)
```

**NN mode (weight stationary).** Weight row r sits in PE row r. Input vector t
enters row r at cycle t + r, so the inputs are skewed. It travels right through the
streaming registers. The column sum of output t for column c leaves the bottom at
cycle t + H + c. The skew is produced by addressing: every Mem_B lane and every
Mem_C lane has its own address, so no delay lines are needed.

**VSA mode (vector stationary).** The column holds H elements of A, with A[i] in
row i. Elements of B enter at the top. Each one spends one cycle in a passing
register and one in a streaming register per row, so it moves down one row every
two cycles. Row i therefore sees the stream delayed by 2i cycles.

Each partial sum moves down one row per cycle. The output that leaves the bottom
at cycle s + 2H therefore gathers A[i] times the element that entered i cycles
before its own entry. This is a sliding dot product, which is what a circular
operation needs.

How B is streamed decides which operation the column computes:

| Operation | Stream of B, for j = -(H-1) .. d-1 | Result |
|---|---|---|
| binding (convolution) | B[(j - ch*H) mod d] | C[s] = sum_k A[k] B[(s-k) mod d] |
| unbinding (correlation) | B[(ch*H - j) mod d] | C[s] = sum_k A[k] B[(k-s) mod d] |

The unbinding order reproduces the worked example of the paper's PE figure:
streaming B3, B2, B1, B3, B2 gives A1B1+A2B2+A3B3, then A1B3+A2B1+A3B2, then
A1B2+A2B3+A3B1.

A vector longer than H is handled in chunks of H elements. Chunk ch holds
A[ch*H .. ch*H+H-1] in the column. Elements past d read as zero. Chunk ch adds its
part onto the partial sums in Mem_C, which enter at the top of the column.

## Mixed precision

`mp_mac` multiplies in one of two formats:

* **INT8:** one signed 8 x 8 product added to a 32-bit sum.
* **INT4:** a byte holds two signed 4-bit values, and the 32-bit sum splits into
  two independent 16-bit sums. Each column then computes two INT4 circular
  operations at once, one in each nibble lane.

NN sub-arrays and VSA sub-arrays select their precision separately, so NVSA's INT8
neural part and INT4 symbolic part run together. The SIMD unit has a matching
*split* mode that treats every 32-bit lane as two 16-bit lanes.

## Memory system

| Memory | Role | Organisation (defaults) |
|---|---|---|
| Mem_A1 | NN weights, top of the NN columns | 256 lanes x 8 bit, 2 x 5530 rows |
| Mem_A2 | vectors A and B, top of the VSA columns | 256 lanes x 8 bit, 2 x 2253 rows |
| Mem_B | NN input vectors, left edge | 32 lanes x 8 bit, 2 x 44237 rows |
| Mem_C | partial sums and results, bottom edge | 256 lanes x 32 bit, 2 x 819 rows |
| cache | staging between DRAM and Mem_A/B/C | 265421 words x 512 bit, 2 ports |

`dbuf_mem` is the double buffer used for every one of these memories. It has:

* **banks:** each lane owns two synchronous-read RAM banks;
* **compute side:** used by the engines, with a read and a write port per lane;
* **fill side:** used by the transfer engine, reached in 512-bit chunks, where
  chunk address = row * CHUNKS + k covers lanes k*LPC to k*LPC+LPC-1;
* **swap:** a one-cycle `swap` pulse exchanges the two sides.

Loading the next data set therefore overlaps computing on the current one.

`mem_a` joins Mem_A1 and Mem_A2:

* **Separate mode:** a lane reads Mem_A2 if its column is in a VSA sub-array and
  Mem_A1 otherwise.
* **Merged mode:** used when the whole array runs one kind of work. The two form a
  single address space; rows below D1 are in Mem_A1 and the rest in Mem_A2.

Mem_A2 also accepts results of the SIMD unit, so one vector operation can feed the
next without a trip to DRAM.

`axi_dma` moves whole 512-bit words between DRAM and the cache:

* bursts are INCR, at most 64 beats, and never cross a 4 KB boundary;
* one burst is outstanding at a time;
* a read beat takes one cycle, a write beat two (cache read, then W).

## Control: commands and engines

The host sends commands (`nsf_pkg::cmd_t`) over a valid/ready port. The control
unit queues them in an 8-entry FIFO and issues them in order. Each command goes to
one of five engines:

| Opcode | Engine | Work |
|---|---|---|
| `DMA_RD` / `DMA_WR` | `axi_dma` | DRAM <-> cache, `len` words |
| `XFER_IN` / `XFER_OUT` | `xfer_seq` | cache <-> fill side of Mem_A1/A2/B/C, one word per cycle |
| `NN` | `nn_seq` | one weight-stationary fold on the NN columns |
| `VSA` | `vsa_seq` | one chunk of binding or unbinding on every VSA column |
| `SIMD` | `simd_seq` + `simd_unit` | one operation over `len` rows of Mem_C |
| `CFG` | control unit | sets the number of NN sub-arrays, both precisions, and the Mem_A merge |
| `SWAP` | control unit | swaps any of Mem_A1, A2, B, C |
| `SYNC` | control unit | waits until every engine is idle |

The field meanings of every opcode are listed in `rtl/nsf_pkg.sv`.

A command waits at the head of the queue until its engine is free and nothing it
conflicts with is running:

* NN and VSA kernels overlap each other.
* Transfers and DMA overlap everything.
* SIMD waits for NN and VSA, because all three use Mem_C.
* CFG and SWAP wait for the compute engines.

Status outputs report:

* commands issued;
* cycles the queue stalled;
* cycles an NN and a VSA kernel ran together.

Timing, from start pulse to done pulse:

* **NN fold:** 2H + n_cols + M + 2 cycles, for M input vectors on n_cols columns.
* **VSA chunk:** 3H + d + 3 cycles.

The paper's analytic model gives 2H + W + M - 2 and 3H + d - 1. The four extra
cycles are command capture, memory read latency, the hand-off from load to stream,
and the done cycle.

### A program

One neuro-symbolic step at the default size, as run by `tb/tb_nsflow_full.sv`:

```
CFG      n_nn = 14, INT8/INT8
DMA_RD   2184 words DRAM -> cache
XFER_IN  Mem_A1 (weights), Mem_A2 (A and B vectors), Mem_B (inputs);  SWAP A1,A2,B
NN       8 vectors through 224 NN columns
VSA x 8  chunks 0..7 of 32 bindings of 256-element vectors (accumulate from chunk 1)
SWAP C;  XFER_OUT Mem_C -> cache;  DMA_WR cache -> DRAM
```

The NN fold and the first VSA chunk run at the same time.

## Files

**Design (`rtl/`):**

* `nsf_pkg.sv`: types, opcodes and the command format.
* `mp_mac.sv`, `nsf_pe.sv`, `adarray.sv`: the array.
* `sdp_ram.sv`, `dbuf_mem.sv`, `mem_a.sv`, `onchip_cache.sv`: the memories.
* `simd_unit.sv`, `simd_seq.sv`: the SIMD unit and its engine.
* `nn_seq.sv`, `vsa_seq.sv`, `xfer_seq.sv`: the other engines.
* `axi_dma.sv`: the AXI master.
* `ctrl_unit.sv`: the control unit.
* `nsflow_top.sv`: the top level. Its ports are the command stream, the status
  counters and an AXI4 master.

**Testbenches (`tb/`):** each one is self-checking and prints
`TB_RESULT checks=N failures=M`.

* `tb_<module>.sv`: a test for each block.
* `tb_nsflow_top.sv`: an end-to-end test at the size of the paper's array figure
  (H=4, W=2, N=3). It covers:
  * a load that crosses a 4 KB boundary;
  * NN and VSA kernels running together;
  * bind and unbind with accumulated chunks;
  * INT4 binding;
  * SIMD ReLU, dot product, shift written back to Mem_A2, and split add;
  * merged Mem_A;
  * the drain to DRAM.

  Every drained value is compared with a reference.
* `tb_nsflow_full.sv`: the full-size test at the default parameters.
* `axi_dram_model.sv`: a behavioural AXI DRAM with random back-pressure. It is not
  part of the design.

To simulate (packages first):

```
verilator --binary --timing --assert --top-module tb_nsflow_top \
  rtl/nsf_pkg.sv $(ls rtl/*.sv | grep -v nsf_pkg) tb/axi_dram_model.sv tb/tb_nsflow_top.sv
./obj_dir/Vtb_nsflow_top
```

Building the full-size test is slow, about 10 minutes of C++ compilation for 8192
PEs. The simulation itself takes seconds.

## Where this design departs from the paper, or fills gaps

* **PE figure legend.** The legend prints "MAX" beside the multiply-accumulate
  symbol, while the text says MAC. A MAC is built.
* **Placement and mapping.** The paper gives neither how sub-arrays are placed nor
  how vector pairs map to columns. Here NN sub-arrays are the lowest-numbered ones,
  and each VSA column handles one vector pair.
* **Precision.** Only INT8 and packed INT4 are built. The paper also mentions FP16
  and FP8, but its main configuration does not use them.
* **SIMD unit.** It has add, sub, mul, max, min, ReLU, clamp and arithmetic shift,
  plus sum, max and dot reductions. The paper also lists division, exp/log/tanh,
  norm and softmax circuits, which are not built.
* **Interfaces.** The host interface is a command stream. The AXI burst engine,
  the command set, the issue rules and the per-lane banked memories are this
  design's own choices, as the paper gives only the blocks' roles.
* **Capacities.** Memory capacities follow the table of the NVSA deployment, read
  as MiB and split evenly between the two halves of each double buffer. BRAM and
  URAM mapping is left to the synthesis tool.
* **Not hardware.** The design-space exploration that picks H, W, N, the partition
  and the memory sizes is offline software. Its results appear here as parameters
  and as the `CFG` command. Layer tiling, and mapping a network onto folds, is host
  software and is not part of this RTL.
* **Other deployments.** MIMONet (32 x 32 x 8, larger memories) needs other
  parameter values. The LVRF deployment fits the defaults.
