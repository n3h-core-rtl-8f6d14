# A heterogeneous LUT/DSP GEMM accelerator for mixed-precision CNNs

A small FPGA has two kinds of compute. It has a few hundred DSP slices, which are good
at fixed-width multiplications. It also has tens of thousands of LUTs, which sit mostly
idle in a DSP-based CNN accelerator. This design uses both on every layer:

* The **DSP-core** is a bit-parallel array of 4-bit multiply-accumulate slots.
* The **LUT-core** is a bit-serial array. It multiplies operands of any width from 1 to
  8 bits, one pair of bit planes at a time, so its cost grows with the bit-widths.

Each convolution or fully-connected layer, written as a matrix product, is split by
output filters between the two cores. The cores then compute their shares concurrently.
Because the LUT-core can use low-precision weights, a network can run with per-layer
mixed precision: the filters the LUT-core takes use few bits, and the 4-bit share runs
on the DSPs.

The RTL follows the accelerator described in "N3H-Core: Neuron-designed Neural Network
Accelerator via FPGA-based Heterogeneous Computing Cores" (main configuration: XC7Z020,
ResNet-18, 35 ms target). It is not the authors' code. Where that description is silent,
the choices made here are marked in the file headers and in the section
[What differs from the published design](#what-differs-from-the-published-design).

## Block structure

```
                    layer descriptor            region bases (init)
                          |                           |
                   +------v---------------------------v-----+
                   |   layer barrier  +  address generator  |  n3h_top
                   +------+---------------------------+-----+
              gen_cfg_t   |                           |   gen_cfg_t
          +---------------v-------+       +-----------v-----------+
          | instr_gen (LUT)       |       | instr_gen (DSP)       |
          |  F / E / R queues     |       |  F / E / R queues     |
          | fetch  exec  result   |       | fetch  exec  result   |
          |   ^ tokens ^ tokens   |       |   (same structure)    |
          | dma_rd  lut_core dma_wr|      | dma_rd dsp_core dma_wr|
          | act/w buffers, result |       | act/w buffers, result |
          +----+-------------+----+       +----+------------+-----+
               | DDR rd      | DDR wr          | DDR rd     | DDR wr
```

Each core is a complete subsystem with its own parts:

* an instruction generator;
* three instruction queues, one each for Fetch, Execute and Result;
* three engines that work through those queues;
* four token queues between the engines;
* banked activation and weight buffers;
* a result buffer;
* a read DMA and a write DMA, each with its own DDR port.

The two subsystems share only two things. One is the layer barrier: the next layer
starts only when both cores have drained. The other is the address generator, which
keeps their DDR data apart.

| file | block |
|---|---|
| `rtl/n3h_pkg.sv` | instruction formats, layer descriptor, generator programme |
| `rtl/n3h_top.sv` | the accelerator: two core subsystems, address generator, layer barrier |
| `rtl/instr_gen.sv` | writes the three instruction streams of one core for one step |
| `rtl/fetch_engine.sv`, `exec_engine.sv`, `result_engine.sv` | the engines |
| `rtl/sync_fifo.sv` | instruction and token queues |
| `rtl/dma_rd.sv`, `rtl/dma_wr.sv` | DDR to buffer and result buffer to DDR |
| `rtl/buffer_bank.sv` | banked activation / weight buffer |
| `rtl/lut_core.sv`, `rtl/dpu.sv` | bit-serial core and its dot-product unit |
| `rtl/dsp_core.sv` | bit-parallel 4-bit core |
| `rtl/result_buffer.sv` | result tile holding register |
| `rtl/addr_gen.sv` | DDR regions, bases and strides |

## Bit-serial arithmetic on the LUT-core

Take an activation matrix L with B^a-bit entries and a weight matrix R with B^w-bit
entries. Each is split into bit planes: L_i holds bit i of every entry and is a 0/1
matrix. Then

    L x R = sum over i < B^a, j < B^w of  s_ij * 2^(i+j) * (L_i x R_j)

Each L_i x R_j is a binary matrix product: for each output it is the population count
of the AND of two bit vectors.

For two's-complement operands, the top plane is worth -2^(B-1) instead of +2^(B-1). So
s_ij = -1 when exactly one of i and j is a sign plane, and +1 otherwise. The product of
two sign planes is added.

Each DPU (`dpu.sv`) takes one K-bit chunk of an activation plane and one K-bit chunk of
a weight plane per cycle. It computes `popcount(a & w) << shift` and adds it to, or
subtracts it from, its 32-bit accumulator. The array is M x N DPUs:

* DPU row m reads activation bank m, which holds the plane of output pixel m.
* DPU column n reads weight bank n, which holds the plane of filter n.

Cost per cycle and per plane pair:

* The array performs M·N·K binary MACs per cycle.
* One Execute instruction covers one plane pair over `chunks` = (inner dimension)/K
  words.
* It takes chunks+3 cycles.
* A B^a x B^w-bit product needs B^a·B^w instructions.

## Bit-parallel arithmetic on the DSP-core

The DSP-core (`dsp_core.sv`) works on 16-element chunks of the inner dimension. It has
two register arrays:

* an activation array, ROWS x 16, loaded in one cycle, one row from each of the ROWS
  activation banks;
* a weight array, 16 x 16, loaded in two cycles. Each of the 8 weight banks holds two
  output columns: in the first cycle its word fills the even column 2b, in the second
  the odd column 2b+1.

A ROWS x 16 array of multiply-accumulate slots then takes 16 cycles, one inner index per
cycle. Each slot multiplies an unsigned 4-bit activation by a signed 4-bit weight.
Activations narrower than 4 bits are zero-padded.

Timing: a chunk costs 3 + 16 = 19 cycles, and an Execute of `chunks` chunks ends
19·chunks + 2 cycles after it starts. With ROWS = 13 the array has 208 slots, one per
DSP slice of the XC7Z020's 220.

## The three engines and their tokens

This part is the hardest to follow, and the one to understand before changing anything.
Each core is driven by three independent instruction streams. Sync instructions and
3-bit tokens keep them in step, so that:

* data is fetched while earlier data is being multiplied;
* a buffer is never overwritten before its last use.

A Sync instruction names a peer engine and a direction:

* send (cur = 1) pushes the 3-bit flag into the token queue towards the peer;
* wait (cur = 0) blocks until a token from the peer is there, then pops it.

The generator (`instr_gen.sv`) writes the streams for one output tile as follows. Let
G = ceil(B^w/2), the number of weight planes the weight buffer holds (the buffer is half
the weight matrix). L_i is activation plane i and R_j is weight plane j.

```
Fetch  : R0 L0 SE L1 SE ... L(Ba-1) SE   R1 SE ... R(G-1) SE
         WE  R(G) SE ... R(2G-1) SE   WE ...
Execute: WF L0xR0 WF L1xR0 ... WF L(Ba-1)xR0
         WF L0xR1 L1xR1 ...               (one WF per later weight plane)
         ... SF (after the last product of a weight group) ...
         SE(result) WE(result)
Result : WE  Result  SE
```

The abbreviations:

* SE (signal execute) is sent by the fetch engine when a plane has arrived. It is
  also sent by the execute engine to the result engine when the tile is final.
* WF (wait fetch) makes the execute engine wait for the plane it is about to use.
* SF (signal fetch) tells the fetch engine that a weight group is no longer needed.
* WE (wait execute) makes the fetch engine wait for SF before it overwrites that group.
  The result engine uses WE to wait for the final tile.

The last Sync of the result stream tells the execute engine that the result buffer has
been written out. The execute stream's last instruction waits for it.

The flags are 001 for data fetched, 010 for group released and 100 for tile done. The
engines check only that a token is present; a mismatched flag raises an assertion at
the top.

Every Execute carries four control fields:

* `shift` = i + j;
* `negate`, when exactly one of the two planes is a sign plane;
* `clear`, on the first plane pair;
* `commit`, on the last. On commit the accumulator tile is copied into the result
  buffer, and the Result instruction writes it to DDR.

The DSP-core uses the same machinery with B^a = B^w = 1. Its streams are
R0 L0 SE / WF L0xR0 SE WE / WE Result SE.

## Instruction words

All instructions are 128 bits, and bits 127:126 hold the opcode: 0 = Fetch,
1 = Execute, 2 = Result, 3 = Sync. The field widths of Fetch, Result and Sync are the
published ones. Their order inside the word, and the whole Execute layout, are this
design's (see `n3h_pkg.sv`).

| instruction | fields, low bits first |
|---|---|
| Fetch / Result | DDR range 16, DDR offset 24, DDR base 32, buffer read/write 1, stage 3, buffer base 16 |
| Execute | commit 1, clear 1, negate 1, shift 5, chunks 16, rhs address 16, lhs address 16 |
| Sync | flag 3, next (peer engine) 2, cur (send/wait) 1 |

A Fetch fills `nbanks` banks with `range` words each. Bank b, word w, beat t is read
from DDR word `base + b*offset + w*(K/64) + t`. For a Result, `offset` is the distance
between result rows and `range` is the number of 64-bit beats per row. Stage bit 0
selects the weight buffer (1) or the activation buffer (0).

## Memory: buffers, DDR regions, steps

The buffers are simple dual-port arrays, one per bank. All banks read the same address,
with one cycle of latency.

DDR is divided into four regions:

* two activation regions, used alternately: a step reads the current one and both cores
  write their results into the other;
* one weight region per core. Its pointer moves on by the weight volume of each step
  that used that core.

The layout inside a region is this design's:

* LUT activation plane i, row m, chunk c is at `(i*M + m)*C*K/64 + c*K/64`.
* The DSP rows follow, 16 packed 4-bit values per word.
* In the result region, the LUT tile (M rows of N/2 beats) precedes the DSP tile (ROWS
  rows of 8 beats). Each beat holds two 32-bit sums, the lower-numbered column in bits
  31:0.

One layer descriptor computes one output tile per core: an M x N tile of the LUT-core's
filters and a ROWS x 16 tile of the DSP-core's. A layer larger than that is issued as
several steps. Before each step the host pulses `init` with new region bases, which
places that tile's inputs, weights and results anywhere in DDR. The end-to-end test does
this. A core whose enable bit is clear sits the step out, which is how split ratios 0
and 1 are expressed.

## Host interface and the layer barrier

* `init` loads the four region bases.
* `layer_valid`/`layer_ready` hands over a `layer_desc_t`, which holds:
  * the two core enables;
  * the LUT activation and weight bit-widths (1..8);
  * whether each is signed;
  * the LUT chunk count (inner dimension / K);
  * the DSP chunk count (inner dimension / 16).
* Taking a descriptor starts both generators in the same cycle. The two cores then run
  on their own.
* The barrier waits until, for both cores, the generator is finished, every instruction
  queue is empty and every engine is idle.
* Then `layer_done` pulses for one cycle, the address generator swaps the activation
  regions, and the next descriptor can be taken.

The DDR ports, one read and one write per core, use valid/ready. Read data returns in
request order. Widths are 32-bit word addresses and 64-bit data.

## Parameters

| parameter | default | origin |
|---|---|---|
| `K` | 128 | published |
| `M` | 8 | published |
| `N` | 16 | published |
| `D_LA` | 1024 | published |
| `D_DA` | 2048 | published |
| `D_DW` | 1024 | published |
| `D_COLS_A`, `D_COLS_W` | 16 | published |
| `D_LW` | 1024 | not published |
| `D_ROWS` | 13 | not published: 220 DSPs / 16 |
| `IQ_DEPTH` | 16 | not published |
| `TQ_DEPTH` | 8 | not published |

The published values come from the XC7Z020 ResNet-18 35 ms configuration; the table
below of other configurations comes from the same source.

Other evaluated configurations:

| configuration | K | M | N | D_DA | D_DW |
|---|---|---|---|---|---|
| XC7Z020 ResNet-18 30 ms | 128 | 7 | 17 | 2048 | 1024 |
| XC7Z020 MobileNet-V2 5 ms | 64 | 18 | 12 | 11264 | 1024 |
| XC7Z020 MobileNet-V2 7 ms | 64 | 26 | 8 | 9216 | 1024 |
| XC7Z045 ResNet-18 25 ms | 512 | 11 | 17 | 6144 | 2048 |
| XC7Z045 ResNet-18 30 ms | 512 | 14 | 14 | 15360 | 1024 |
| XC7Z045 MobileNet-V2 5 ms | 64 | 35 | 22 | 19456 | 11264 |
| XC7Z045 MobileNet-V2 6 ms | 64 | 44 | 18 | 20480 | 8192 |

Each of these is a parameter override, with two exceptions:

* N must be even, because results leave two per beat. The configurations with N = 17
  need N = 18 or a change to `result_buffer`.
* K must be a multiple of 64.

At the defaults, every GEMM of ResNet-18 fits the buffers:

* The inner dimension is at most 4608, which is 36 LUT chunks. That needs 8·36 words of
  the activation buffer and 4·36 of the weight buffer.
* On the DSP side it needs 288 activation words and 576 weight words.

## What differs from the published design

* **AND, not XNOR.** The published text says the DPU uses XNOR and popcount. The
  bit-plane sum it gives multiplies 0/1 planes, whose product is AND, so AND is used.
* **Result buffers.** One passage speaks of a shared result buffer; the block diagram
  and the buffer description give each core its own. Each core has its own here.
* **No requantization.** Results go to DDR as raw 32-bit sums. How they become the next
  layer's 2- to 8-bit activations (scaling, clipping, repacking into bit planes) is not
  described and not built. The host, or a block added after the write DMA, must do it.
* **Extra tokens.** The published schedule shows only the start of a tile. Three
  tokens are additions:
  * an SE after every later weight plane;
  * the generalisation to any B^a, B^w with groups of ceil(B^w/2);
  * the token from the result engine back to the execute engine.
* **Register-transfer choices.** The DSP array's internal schedule, every latency, the
  queue depths, the DDR port protocol, the encodings and the DDR layout are this
  design's.
* **Not hardware.** The design-space search (reinforcement learning, cost and latency
  models) and the quantization-aware training that choose the parameters, bit-widths
  and split ratios are offline software.

## Simulating

Every block has a self-checking testbench in `tb/`, which prints
`TB_RESULT checks=… failures=…`. For example:

```
verilator --binary --timing --assert -Itb rtl/n3h_pkg.sv rtl/*.sv tb/ddr_model.sv \
          tb/tb_n3h_top.sv --top-module tb_n3h_top -Mdir obj -o sim
obj/sim
```

* `tb/ddr_model.sv` is a behavioural DDR with fixed read latency and random back-pressure.
* `tb/n3h_env.svh` holds the shared layer driver and the integer reference model used by
  the two accelerator-level testbenches.
* `tb_n3h_top` runs nine steps at a reduced size (3x4 DPUs of 64 bits, 2 DSP rows,
  4-deep queues). The steps cover:
  * both cores, LUT-core only and DSP-core only;
  * signed and unsigned planes, with 1 to 8 bits;
  * one to three weight-group refills;
  * two tiles placed by re-initialising the region bases.

  It checks every result word. It counts each mechanism, failing any that never occurs:
  * engine waits;
  * both cores computing in the same cycle;
  * barrier waits;
  * region swaps;
  * subtracted planes;
  * full instruction queues;
  * DDR stalls.
* `tb_n3h_full` runs two steps with every parameter at its default.
* `tb_n3h_workloads`, also at the defaults, runs three tiles shaped like network layers:
  * the ResNet-18 first layer, 8-bit;
  * the deepest 3x3 convolution of ResNet-18 (inner dimension 4608, 2-bit x 4-bit);
  * a MobileNet-V2 1x1 projection (3-bit x 5-bit).

  The ResNet-18 tile takes about 16,200 cycles. The DSP-core's 288-chunk Execute
  (5,474 cycles) and the fetch of its 8,352 buffer words dominate.
* Unit testbenches check the cycle counts given above: chunks+3 for the LUT-core,
  19·chunks+2 for the DSP-core, and one instruction per cycle from the generator.

## Lint and synthesis notes

Verilator reports a few unused signals. Each is explained in the opening comment of its
module:

* the token payloads the engines do not inspect;
* the generators' `done`;
* fields of the instruction structs that a given engine does not use.

It also reports `rst_n` as both synchronous and asynchronous. The synchronous use is the
`disable iff` of the assertions.

At the defaults the design elaborates to about 23k flip-flops plus the buffer memories
(about 5.4 Mbit, mostly the 16 weight banks and 8 activation banks of the LUT-core). No
timing constraints are included. The published design runs at 100 MHz.
