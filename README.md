# BISMO: a bit-serial matrix multiplication overlay in SystemVerilog

Multiplying low-precision integer matrices does not need a multiplier per
element. Write each operand matrix as a weighted sum of binary matrices, one per
bit position:

    L = sum_i 2^i * L[i]        R = sum_j 2^j * R[j]

Then the product is a weighted sum of binary matrix products:

    P = L * R = sum_i sum_j 2^(i+j) * (L[i] * R[j])

A binary dot product is an AND of two bit vectors followed by a population
count. An l-bit by r-bit product therefore costs l*r binary matrix products.
The precision is a property of the instruction stream, not of the hardware, so
the same array serves 1-bit, 2-bit or 8-bit operands, and any mix of the two
widths.

For two's-complement operands the most significant bit carries weight
-2^(l-1). A binary product therefore enters the sum negated when exactly one of
i and j is a sign bit.

This repository holds RTL for an overlay built around that idea. It has:

- an array of dot-product units (DPUs);
- three decoupled pipeline stages (fetch, execute, result), each driven by its
  own instruction queue;
- token FIFOs that let the stages hand work to each other;
- a standalone parallel-to-serial (P2S) converter that turns an ordinary integer
  matrix into the bit-plane layout the array consumes.

The default parameters are the main 10 x 256 x 10 configuration:

- a 10 x 10 grid of DPUs, each consuming 256 bits per operand per cycle;
- 64-bit memory paths;
- 1024 rows of 256 bits in each matrix buffer.

At 300 MHz this configuration performs 51,200 binary operations per cycle, or
15.4 binary TOPS.

## Data layout

Operands live in main memory in *bit-serial* layout, `[bits][rows][cols]`. Each
bit position is a dense, row-major binary matrix. The right-hand matrix is
stored transposed, so both operands are read along the shared K dimension.

A row of K bits of bit plane i occupies K/8 consecutive bytes. Inside a 64-bit
memory word, bit b of byte y holds column 8*y + b.

The P2S converter produces exactly this layout. Its input is an ordinary
`[rows][cols]` matrix of bytes, with each element padded to M = 8 bits.

## The compute core

### Fused AND-popcount (`and_popcount`)

The heart of each DPU counts the ones in `a & b` for DK-bit vectors. The
products are never formed separately. Groups of three bit products go straight
into one full adder each: the products are the adder's inputs, and the adder
yields one sum bit of weight 1 and one carry bit of weight 2.

The count is then `popcount(sums) + 2 * popcount(carries)`, which are two
popcounts over a third of the width, plus a shift and an add.

The unit is pipelined in three register stages:

1. the compressed sum and carry vectors;
2. the two partial popcounts;
3. the final count.

A result therefore appears three clock edges after its operands. The
partial popcounts are written as plain `$countones`-style adder trees, and
synthesis maps them to LUTs. The paper goes further, building hand-placed
(6:3) counters and a compression tree tuned to the LUT-6 fabric; that level of
technology mapping is not reproduced here.

### Dot-product unit (`dpu`)

Each cycle with `in_valid` set, the DPU computes

    acc <= mux(mode){0, acc, acc << 1} + (negate ? -pc : pc)

where `pc` is the AND-popcount of the two input words. There is no per-bit
weight shifter. Instead the instruction stream visits the bit pairs in
**wavefront order**: all pairs with the same i + j form one wavefront, and
wavefronts are visited from the largest weight down to zero. The accumulator
mode follows from that order:

| mode    | when                                   | effect               |
|---------|----------------------------------------|----------------------|
| `ZERO`  | first run of a result tile             | start a new sum      |
| `SHIFT` | first run of each later wavefront      | double the old sum   |
| `KEEP`  | other runs in the same wavefront       | add at the same weight |

A 3-bit by 2-bit signed product, for example, runs these pairs, in the
order shown:

| wavefront | i + j | pairs (i,j)  |
|-----------|-------|--------------|
| 3         | 3     | (2,1)        |
| 2         | 2     | (2,0), (1,1) |
| 1         | 1     | (1,0), (0,1) |
| 0         | 0     | (0,0)        |

Negation is set for (2,0) and (0,1), where exactly one operand bit is a sign
bit. (2,1) is not negated, because both of its bits are sign bits.

Mode and negate travel alongside the AND-popcount pipeline. The accumulator
therefore updates on the fourth rising edge after the operands were presented.

### Dot-product array (`dpa`)

The array is a DM x DN grid of DPUs:

- row m receives the DK-bit word from left-hand buffer m;
- column n receives the word from right-hand buffer n;
- `negate`, `acc_mode` and `in_valid` are broadcast to every unit.

DPU (m,n) thus accumulates row m of the left tile against column n of the
right tile.

## The pipeline

```
            instr queues (fifo) x3, filled by the host
                 |              |               |
        +--------v---+   +------v------+   +----v-------+
 mem -->|  fetch     |-->|  execute    |-->|  result    |--> mem
  rd    |  stage     |   |  stage      |   |  stage     |    wr
        +------------+   +-------------+   +------------+
         matrix buffers      DPA            result buffer (BR slots)
                <-- f2e / e2f -->  <-- e2r / r2e -->   token FIFOs

 mem rd --> P2S converter --> mem wr      (independent, own command port)
```

### Stage controllers and synchronisation

Every stage has the same controller (`stage_controller`). It pops instructions
in order and handles three kinds:

- **Run** hands the run fields to the stage's datapath for one cycle
  (`run_valid`), then waits for `run_done`.
- **Wait** blocks until the selected token FIFO has a token, then takes one.
- **Signal** blocks until the selected token FIFO has room, then adds a token.

Taking an instruction, executing a Wait or Signal that can complete at once,
and returning for the next instruction take two cycles.

Tokens carry no data, so each of the four synchronisation FIFOs (`sync_fifo`)
is an up/down counter with `avail` and `space` flags. Two assertions state the
handshake rule: no push when the FIFO is full and no pop when it is empty.

Fetch and result each have a single channel, which goes to execute. Execute has
two channels: channel 0 to fetch and channel 1 to result.

What a token *means* is decided entirely by the program. In the testbenches a
token means that a buffer slot is full or free, or that a result slot is full or
free.

### Fetch stage (`fetch_stage`, `stream_reader`, `fetch_router`)

A RunFetch reads `num_blocks` blocks of `block_bytes` bytes, spaced
`block_stride` bytes apart, one 64-bit word per request. Read responses arrive
in order.

The returned stream is cut into pieces of `words_per_buf` words. The pieces are
dealt round-robin to buffers `buf_start` ... `buf_start + buf_range - 1`. After
each full round, the next round writes the following `words_per_buf` addresses,
starting from `buf_offset`.

Buffer ids are numbered as follows:

- 0 ... DM-1 are the left-hand buffers;
- DM ... DM+DN-1 are the right-hand buffers.

One RunFetch therefore scatters a tile of DM rows into DM buffers with no help
from software.

Delivery uses a linear array of router nodes, one chain per side. A node
registers the packet (id, address, data), writes its own buffer when the id
matches, and passes the packet on. This costs one cycle per node and keeps the
fan-out at one.

`run_done` is raised once the last response has left the end of the longer
chain.

### Matrix buffers (`matrix_buffer`)

Each buffer is a simple dual-port memory. It has an F-bit write port for the
fetch stage and a DK-bit registered read port for the execute stage, with one
cycle of read latency. This is the asymmetric block RAM shape the paper's
buffer-depth model assumes. Its depth follows the BRAM equation for the main
instance: BM = BN = 1024.

### Execute stage (`execute_stage`)

A RunExecute gives:

- separate left and right buffer offsets;
- a length L, in DK-bit words;
- the negate flag and the accumulator mode;
- optionally, a request to write the finished tile to a result buffer slot.

The stage reads words offset ... offset+L-1 from all buffers in lock-step and
streams them into the array. Only the first beat uses the instruction's mode;
the remaining beats of the run use KEEP, so one run adds a whole
K-long binary dot product at one weight.

A run that only accumulates raises `run_done` one cycle after its last
buffer read is issued. Its beats are still in the DPU pipeline when the next
run begins. That is safe because mode and negate travel with each beat, and
the buffers are no longer needed once their last read has been issued.

A run that writes a result is different. It waits four cycles for the buffer
read and the DPU pipeline to drain, and only then does a finish cycle copy the
tile into the result buffer. The pipeline therefore empties only where execute
hands a tile to the result stage.

**Timing:**

- A run of length L takes L + 1 cycles from acceptance to `run_done`.
- A run that writes a result takes L + 5 cycles.
- The controller adds about two cycles per instruction.

A binary product of K = 8192 columns is a single run of 32 words, so it is
32/37 = 86 % efficient. A w x a-bit product of the same size costs
(w*a - 1)(L + 1) + L + 5 cycles, which is slightly less than w*a binary
products.

### Result buffer and result stage (`result_buffer`, `result_stage`)

The result buffer has BR = 2 slots. Each slot holds a full DM x DN tile of
32-bit accumulators, written in one cycle. The execute stage can therefore start
the next tile while the result stage is still draining the previous one.

A RunResult walks the chosen slot row by row. Each row of DN values is cut into
R-bit words. The last word is padded when DN*A is not a multiple of R. With the
defaults, a row of 320 bits is exactly five 64-bit words.

Row m is written at `base_addr + offset + m * row_stride`. The stage moves one
word per cycle when memory is ready, and `run_done` follows one cycle after the
last accepted word.

### P2S converter (`p2s`)

A RunP2S command gives the source and destination addresses, the rows, the
columns and the actual precision (at most M = 8).

Each 64-bit read brings eight padded elements. Bit b of each element is routed
into coalescing buffer b, so there is one coalescing buffer per bit position.
When the buffers hold R = 64 columns, the P2S writes one word per active bit
position to its plane. Plane b begins at `dst + b * rows * cols / 8`.

The column count must be a multiple of 64, so that every output word holds
columns of a single row.

The converter has its own read and write channels and a command handshake. It
runs alongside the three-stage pipeline and is synchronised by the host.

## Programming model and a worked schedule

The host computes an M x K x N product with l-bit and r-bit operands as
follows:

1. Convert both operands with the P2S, unless they are already bit-serial.
2. For each DM x DN output tile, and for each bit pair (i,j) in wavefront order:
   - fetch the left rows of plane i and the right rows of plane j into a buffer
     slot;
   - run one execute instruction on that slot, with negate and mode as in the
     table above;
   - on the last pair, write the tile to a result slot.
3. After each tile, run the result stage once.

The end-to-end testbenches use two buffer slots, alternating per step, with
this synchronisation:

```
fetch:   [Wait e2f (from the 3rd step)]  Run L-plane  Run R-plane  Signal f2e
execute: Wait f2e  [Wait r2e if the result slot is being reused]  Run  Signal e2f
         [last step of a tile: Signal e2r]
result:  Wait e2r  Run  Signal r2e
```

Fetch of step k+1 overlaps execute of step k. Result writing of tile t overlaps
the computation of tile t+1.

## Interfaces of the top (`bismo_top`)

The top module has the following ports:

- three valid/ready instruction ports, one per stage. The instruction formats
  are in `bismo_pkg`;
- a read channel for the fetch stage: a request with address and ready, and an
  in-order response;
- a write channel for the result stage: address, data and ready;
- a command port for the P2S, with its own read and write channels;
- `busy`.

The memory system is outside the design. In simulation it is
`tb/main_memory_model.sv`, which has:

- a fixed read latency;
- in-order responses;
- pseudo-random ready stalls on every port.

Parameters, all of them types with defaults:

| parameter | default | meaning |
|---|---|---|
| DM, DN | 10, 10 | DPA rows and columns |
| DK | 256 | bits per DPU operand per cycle |
| A | 32 | accumulator width |
| F, R | 64, 64 | fetch and result memory word widths |
| BM, BN | 1024 | rows of each left and right matrix buffer |
| BR | 2 | result buffer slots |
| M | 8 | maximum bit-parallel element width for P2S |
| IQ_DEPTH, SYNC_DEPTH | 16, 8 | instruction-queue and token-FIFO depths |

DK must be a multiple of F.

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench:

- drives the module with random and directed stimulus;
- checks against a model written independently in the testbench;
- has a watchdog;
- ends with a `TB_RESULT checks=... failures=...` line.

Where this design promises a latency or a rate, the testbench checks the cycle
count:

- `and_popcount`: 3 cycles;
- `dpu` and `dpa`: 4 cycles;
- matrix buffer read: 1 cycle;
- execute run: L + 1 cycles, or L + 5 when it writes a result;
- fetch and result stages: one word per cycle when memory does not stall.

The two end-to-end testbenches check the whole flow. In each, P2S first converts
a signed 3-bit left matrix and a signed 2-bit right matrix. The program
described above then multiplies them in three tiles, and every product element
is compared with an integer reference.

- `tb_bismo_top` runs a 2 x 64 x 2 array on a 6 x 128 by 128 x 2 product.
- `tb_bismo_full` runs the default 10 x 256 x 10 array, with no parameter
  override, on a 30 x 256 by 256 x 10 product. It takes about 3,000 cycles.

Two more testbenches run the evaluation workloads at default sizes:

- `tb_execute_workload` runs the execute stage on 10 x K x 10 binary products
  for K from 256 to 16384. It also runs 2 x 2-bit and 4 x 4-bit signed
  products with K = 2048 and K = 16384. It checks every result and the run
  timing, and prints the efficiency.
- `tb_p2s_workload` converts 20 x 1280 matrices at 1 to 4 bits, taking 5,201
  to 6,401 cycles.
- `tb_stage_overlap` multiplies 256 x 4096 x 256 binary matrices on an
  8 x 64 x 8 instance by block matrix multiplication. The operands are twice
  the on-chip capacity: half of the right-hand matrix stays resident while
  each left-hand tile is fetched once and reused for 16 output tiles. The
  same product is run twice:
  - with a program that overlaps the three stages: 94,568 cycles;
  - with one that serialises them: 165,346 cycles.

  That is a 1.75x speedup, against the paper's 2.2x for its own schedule.
  All 65,536 results are checked.

Both count every mechanism and fail if one never occurs:

- each accumulator mode;
- negation;
- a Wait stall in each of the three stages;
- fetch and execute active together;
- P2S write-back;
- reuse of a result slot;
- memory back-pressure.

To make fetch block on its Wait, the execute instructions are released a few
hundred cycles late.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/bismo_pkg.sv \
    tb/tb_bismo_full.sv --top-module tb_bismo_full -Mdir obj -o sim
./obj/sim
```

The simulator is two-state: everything that is read is reset or initialised.

## Where this RTL departs from, or goes beyond, the paper

Where the paper is silent or sketchy, this design makes its own choices:

- **Instruction fields.**
  - RunExecute has separate left and right buffer offsets, where the paper
    lists one "matrix buffer offset".
  - RunExecute also carries an explicit result-write flag and result slot.
    The paper leaves the execute-to-result hand-off implicit.
  - RunResult has a row stride. The paper lists only a base address and an
    offset.
  - The bit encodings of all fields are this design's own (`bismo_pkg`).
- **Buffer numbering.** The text numbers the buffers "from zero to Dm*Dn - 1",
  but the architecture figure has Dm + Dn buffers. This design follows the
  figure: ids 0 ... DM+DN-1.
- **Counters.** The popcount uses the full-adder pre-compression the paper
  proposes. The remaining counter tree is left to synthesis; the paper
  hand-maps it to LUT-6 counters. The pipeline depth of 3 is this design's
  choice.
- **Execute efficiency.** The pipeline here is shorter than the one the paper
  measured. At K = 8192 and DK = 256, a binary product is about 86 %
  efficient here, against the 68 % reported.
- **Router chain.** The chain adds one cycle per node of latency, but no loss
  of throughput.
- **Memory interface.** A simple valid/ready request and in-order response,
  instead of AXI.
- **P2S.** As in the paper, the column count must be a multiple of R. The
  converter alternates between reading one group of 64 columns and writing
  that group's bit planes. It does not overlap the reads of the next group
  with the write-back.
- **Not built.** The host CPU and its software runtime, the DRAM and its AXI
  ports, and the vendor performance counters are outside the RTL. In the
  testbenches, their roles are taken by the instruction programs and the memory
  model.
