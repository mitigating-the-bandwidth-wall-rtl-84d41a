# MatrixFlow: a page-streaming systolic-array GEMM accelerator in SystemVerilog

MatrixFlow is a loosely coupled matrix-multiplication accelerator, meant to sit
on PCIe next to a host CPU and take over the GEMMs of transformer inference.
Its main idea is to keep almost nothing on chip. A and B are not loaded into
a large scratchpad. The driver cuts them into tiles that are each exactly one
4 KB memory page. The accelerator then streams those pages through a small
16 x 16 systolic array, one page-sized DMA transfer per tile. Only two pairs of
input pages (double buffering) and one output page live on chip. The
bandwidth a big scratchpad would normally save is bought back by keeping
every transfer long, page-aligned and overlapped with computation.

This repository holds RTL for the accelerator itself: the register block,
the tile sequencer, the multi-channel DMA, the tile buffers and the array.
It also holds a self-checking testbench for every block, one end-to-end
testbench, and testbenches that run whole GEMM workloads. The design follows the MatrixFlow paper ("Mitigating the Bandwidth
Wall via Data-Streaming System-Accelerator Co-Design"). Wherever the paper
gives only a block's purpose, the mechanism here is this design's own. Each
such choice is marked below and in the opening comment of its source file.

```
           host driver (MMIO)            completion interrupt
                 |                               ^
           +-----v------+  descriptors   +-------+--------+
           |  mf_csr    |--------------->| mf_controller  |
           +------------+                +--+----+----+---+
                                 rd_start/  |    |    | cbuf_we
                                 wr_start   |    |rd_en/rd_k
   host port  +-----------+  64 B beats  +--v----v--+ |  +-----------+
 <===========>|  mf_dma   |------------->| A0 | A1  | |  | buffer C  |
   dev port   | 2 rd ch   |------------->| B0 | B1  | |  | 4 KB,     |
 <===========>| 2 wr ch   |<----------+  +----+-----+ |  | 4 slots   |
              +-----------+           |       | column k  +-----^-----+
                                      |  +----v-----------+     |
                                      |  | 16x16 systolic |-----+ one result
                                      |  | array (OS)     |       row/cycle
                                      |  +----------------+
                                      +-- C beats for write-back
```

## Tiles are pages

The array is W x W (W = 16). An INT8 tile is W rows of L = 4096 / 16 = 256
elements, which is exactly one page. INT16 tiles have L = 128 and INT32 tiles
have L = 64.

* An **A tile** (i, k) holds rows i*W .. i*W+15 of A and columns k*L .. k*L+L-1.
  It is stored row-major: byte `r*L + e` of the page is `A[i*W + r][k*L + e]`.
* A **B tile** (j, k) holds the same k range of columns j*W .. j*W+15 of B.
  It is stored *row-striped*: row r of the page is column `j*W + r` of B, that
  is, a row of B transposed. Byte `r*L + e` is `B[k*L + e][j*W + r]`.

Both operands are therefore read the same way, as W rows of L elements, and
one result tile is

    C(i,j) = sum over k of  A_tile(i,k) x B_tile(j,k)^T        (W x W, 32-bit)

The row-striped B layout is what makes the stream possible. In a naive layout
a column of B spans many pages and turns into many short strided transfers.
Here every tile is one contiguous 4 KB transfer.

The driver issues one **descriptor** per (i, j, k) step. A descriptor holds
the address of the A page, the address of the B page, and the address where
C(i,j) will be written. It also carries a `last` flag, set on the final k of
a result tile. The result tiles of a GEMM are simply the loop

    for i, for j: for k: push {A(i,k), B(j,k), C(i,j), last = (k == KT-1)}

Result tiles are 16 x 16 x 32 bit = 1 KB, written as 16 beats of 64 bytes,
one beat per result row. Dimensions that are not multiples of the tile are
zero-padded by the driver. The hardware only ever sees whole pages.

## The systolic array: skew, accumulate, drain

This is the part that takes the most care to read (`mf_systolic_array.sv`,
`mf_pe.sv`).

**Dataflow.** The array is output stationary: PE(i,j) owns `C[i][j]` for the
whole tile. Each cycle the feeder presents column k of both tiles:
`a_col[i] = A[i][k]` on the left edge and `b_col[j] = B^T[j][k]` on the top
edge. A moves right one PE per cycle and B moves down one PE per cycle. Row i
of A enters i cycles late and column j of B enters j cycles late; these are
the two skew triangles, built as shift registers at the edges. With them,
`A[i][k]` and `B[j][k]` reach PE(i,j) in the same cycle. Each PE registers
its two operands, multiplies them and adds the product into a 32-bit
accumulator. The operands are signed and the sum wraps.

**Control travels with the data.** A `valid` bit and a `last` bit travel with
A through the array. A beat with valid low is a bubble. The array itself never
stalls: an input gap simply becomes a bubble that flows through. When a PE
sees `valid & last`, it copies (accumulator + this product) into a separate
**result register** and restarts its accumulator at zero. The next tile can
then enter on the very next cycle, and its first product goes into a clean
accumulator.

**Drain.** The last beat fed in cycle t reaches the far corner PE(15,15)
after the skews plus the path through the array, which is fewer than 2W
cycles. A 2W-stage delay line of the `last` marker therefore starts the
drain at t + 2W. For the next W cycles, the result registers of every column
behave as a shift chain: each loads the value from the PE above. The bottom
row appears on `out_data` as one 16 x 32-bit = 64-byte row per cycle, row 15
first and row 0 last (`out_row` says which).

```
cycle    t        t+1 ... t+2W-1     t+2W   t+2W+1 ...  t+3W-1
input    last k   next tile k=0,1,...  (continues, no gap)
out                                  row15  row14  ...  row0
```

Because the drain uses the result registers and not the accumulators, it
overlaps the accumulation of the next tile. The W x W fill/drain bubble of
roughly 2(W-1) cycles, which an array without this overlap pays once per
tile, disappears as long as tiles arrive back to back. The one constraint is
that two `last` beats must be at least 3W = 48 cycles apart, so that a drain
finishes before the next one starts. Every tile is L >= 64 cycles long, so
this always holds; an assertion checks it.

**Precisions.** The precision is fixed when the design is built. With
`DATA_W` = 8, 16 or 32 the PE multiplies signed integers. With `FLOAT = 1`
it takes IEEE half-precision (`DATA_W = 16`) or single-precision
(`DATA_W = 32`) operands instead, and always accumulates in single
precision (`mf_fp_mul.sv`, `mf_fp_add.sv`):

* The multiplier forms the exact significand product and rounds it once to
  24 bits. A half × half product always fits, so FP16 products are exact.
* The adder aligns the smaller operand inside a 50-bit window, with bits
  shifted out of the window kept as a sticky 1 at the bottom. It then adds or
  subtracts, normalises with a leading-one search and rounds.
* Rounding is to nearest, ties to even. Subnormal inputs count as zero and
  tiny results flush to zero. Overflow gives infinity, and invalid
  operations give the quiet NaN 0x7fc00000.
* Both units are combinational, so the floating-point PE does its
  multiply-add in one cycle. The paper quotes about 0.6 GHz for its
  floating-point arrays, compared with 1 GHz for integer ones.
* A floating-point sum depends on the order of addition. Here the order is
  fixed: each C element adds its products in k order, starting from +0.
  Results are therefore bit-reproducible, and the testbenches compare them
  bit for bit.

Within a result tile, the K dimension is accumulated *in the PEs*. The
controller streams the KT tile pairs of one result tile back to back and
raises `last` only on the final k of the final pair. C therefore never
leaves the chip as a partial sum.

## Double buffering and the three controller stages

`mf_controller.sv` runs three independent stages, which hand work to each
other through a few flags.

1. **Fetch.** When a released descriptor is waiting and the input half `fp`
   is not full, the controller pops the descriptor. It starts read channel 0
   (A page → A<fp>) and read channel 1 (B page → B<fp>) in the same cycle.
   It also stores the descriptor's C address and `last` flag with that half.
   When both channels report done, half `fp` is marked full and `fp` flips.
2. **Compute.** When a half is full, the controller reads it for L cycles,
   one k per cycle, and feeds the array. On the cycle that reads the last
   k, it can already start the other half (`comp_go` at `last_k`), so
   consecutive tile pairs enter the array with **no gap cycle**. The half
   just emptied is freed in the same cycle. The fetch stage can then refill
   it while the other half is being computed.
3. **Write-back.** Buffer C (4 KB) is used as four 1 KB **slots**, each
   holding one result tile. A drain from the array goes into the next slot,
   16 rows on 16 consecutive cycles. Once row 0 is written, the slot is
   handed to a write channel together with its C address; slots alternate
   between the two write channels. A slot is freed when its channel reports
   the tile written.

The rule that links compute and write-back: a descriptor with `last` set may
only start computing if a slot will be free for its result. The check counts
the slot being allocated in the same cycle. Without that rule, a slow write
path would let a drain overwrite a tile that has not been written back. With
it, a slow write path stalls the array instead. This is the only
back-pressure in the design, and the end-to-end test provokes it on purpose.

`idle` is high when no stage holds work. Two counters make the utilisation
measurable. `sa_cycles` counts cycles in which the array was fed.
`stall_cycles` counts cycles in which work was in flight but the array had
no full half or no free slot.

**Why this is enough.** The INT8 array consumes 16 + 16 bytes per cycle,
which is 32 B/cycle or 32 GB/s at 1 GHz. The DMA path moves one 64-byte beat
per cycle. Both 4 KB pages of the next step therefore arrive in 128 cycles
plus memory latency, well inside the 256 cycles that one tile pair takes to
compute. With a memory that keeps up, the array runs at 100 %. This is checked: 8
tile pairs take exactly 8 x 256 cycles, and a 512 x 512 x 512 GEMM keeps
the array fed on 524,288 of 524,288 cycles.

Wider elements change the balance. A page then holds fewer k-steps, but it
still takes 64 beats to fetch. INT16 needs 64 B/cycle, exactly what the port
delivers, and INT32 needs 128 B/cycle, so at most 50 % utilisation. With 40
cycles of memory latency, the 512³ GEMM measures 74 % (INT16) and 37 %
(INT32), and the same for FP16 and FP32. The refill of a half can only start once that half is emptied, so
with two halves the latency is paid in every step. Each step then costs
the fetch of its two pages (128 beats) plus the latency, about 170 cycles,
against 128 or 64 cycles of compute. The paper gives the same 32/64/128 GB/s asymptotes for
INT8/FP16/FP32.

## DMA channels and the three access paths

`mf_dma.sv` has two read channels and two write channels.

* **Read channels.** Channel 0 reads A and channel 1 reads B. A started read
  channel splits its page into four 1024-byte bursts. The two channels share
  the request port round robin, so both pages are in flight at once. Read
  data comes back as 64-byte beats tagged with the channel number, in order
  within a channel. Each beat goes straight into that channel's buffer at
  beat index `offset / 64`. There is no staging FIFO on the read side.
* **Write channels.** A write channel writes one result tile (16 beats, from
  any slot of C) as one burst. The write port carries one burst at a time:
  the request (address, length) is sent first, then the data beats. The
  beats are read from C through a 4-entry prefetch queue, which hides C's
  one-cycle read latency, so one beat leaves per cycle.

The **access mode** (register MODE) selects where the traffic goes:

| mode   | port   | `coherent` | meaning |
|--------|--------|-----------|---------|
| DM     | host   | 0 | direct to host memory over PCIe, bypassing the CPU caches |
| DC     | host   | 1 | host memory through the coherent last-level cache |
| DevMem | device | – | on-card memory through its local controller, no PCIe traffic |

The host port stands for the PCIe interface. In a full system the PCIe
endpoint, the SMMU that translates the accelerator's virtual addresses, and
the host caches all sit behind it. None of them is part of this RTL.
Addresses leave the DMA exactly as the descriptors gave them, as 64-bit
virtual addresses.

Port protocol (identical for host and device ports, types in `mf_pkg.sv`):

| channel | signals | notes |
|---|---|---|
| read request  | `*_rd_req_valid/ready`, `mem_req_t {addr, len, tag, coherent}` | len ≤ 1024 bytes, multiple of 64 |
| read data     | `*_rd_rsp_valid`, `mem_rsp_t {data[511:0], tag, last}` | no back-pressure; in order per tag |
| write request | `*_wr_req_valid/ready`, `mem_req_t` | one burst at a time |
| write data    | `*_wr_dat_valid/ready`, `mem_wdat_t {data, last}` | beats of the current burst |

## Driver interface: registers, doorbell and interrupt

`mf_csr.sv`. This is a 64-bit register port, one access per cycle; reads are
answered in the same cycle.

| offset | name | access | contents |
|---|---|---|---|
| 0x00 | MODE      | RW | [1:0] 0 DM, 1 DC, 2 DevMem (writes ignored while busy) |
| 0x08 | STATUS    | RO | [0] busy, [1] irq pending, [15:8] queued, [31:16] released not yet taken |
| 0x10 | DESC_A    | RW | A page address of the next descriptor |
| 0x18 | DESC_B    | RW | B page address |
| 0x20 | DESC_C    | RW | result tile address |
| 0x28 | DESC_PUSH | WO | push {DESC_A, DESC_B, DESC_C, last = wdata[0]} (queue of 16) |
| 0x30 | DOORBELL  | WO | release wdata[15:0] more queued descriptors |
| 0x38 | IRQ       | RW | [0] pending; write 1 to acknowledge |
| 0x40 | SA_CYC    | RO | cycles the array was fed |
| 0x48 | STALL_CYC | RO | cycles the array waited with work pending |

Driver sequence for one batch:

1. Write MODE.
2. For each step, write DESC_A, DESC_B and DESC_C, then push with the
   `last` bit.
3. Write DOORBELL with the number of pushed steps.
4. Wait for the interrupt.
5. Write 1 to IRQ.

The interrupt fires once every released descriptor has been taken *and*
the whole pipeline is idle. By then the last result tile has been accepted
by memory. The block then raises the `irq_pending` level and a one-cycle
`msi` pulse, which the PCIe interface would turn into a message-signalled
interrupt. Descriptors only reach the controller after the doorbell, so a
half-written batch never starts. A GEMM larger than 16 steps is run as
several batches.

## Sizes and parameters

| parameter | default | where |
|---|---|---|
| `W` | 16 | array edge, rows per tile (`mf_top`, `mf_systolic_array`, ...) |
| `DATA_W` | 8 | element width; 16 and 32 also work (L = 128 / 64) |
| `FLOAT` | 0 | 1: IEEE FP16 (`DATA_W` 16) or FP32 (`DATA_W` 32) elements, FP32 sums |
| `ACC_W` | 32 | accumulator; `W * ACC_W` must equal the 512-bit beat (checked at elaboration) |
| `QDEPTH` | 16 | descriptor queue |
| `PAGE_BYTES` | 4096 | tile size (`mf_pkg`) |
| `BURST_BYTES` | 1024 | DMA burst (`mf_pkg`) |
| `BEAT_BYTES` | 64 | memory beat (`mf_pkg`): 64 B/cycle = 64 GB/s at 1 GHz |

On chip there are 4 x 4 KB input buffers (A0, A1, B0, B1), each split into
16 row banks so that one column can be read per cycle, plus the 4 KB C
buffer: 20 KB of SRAM in total. The array holds 16 x 16 PEs with a 32-bit
accumulator and a 32-bit result register each.

Any GEMM fits, because A, B and C stay in memory. What grows with the
problem is only the number of descriptors:
`ceil(M/16) * ceil(N/16) * ceil(K/256)`. For example, a 512 x 512 x 512 INT8
GEMM is 32 x 32 x 2 = 2048 descriptors and 524,288 array cycles, which is
0.52 ms at 1 GHz if the memory keeps up. A transformer layer's
GEMMs (QKV, attention scores, context, projection, FF1, FF2) map the same
way. Attention with a head dimension of 64 is padded to a 256-deep k-block,
which wastes three quarters of those particular tiles.

## Where this RTL departs from the paper, and what it leaves out

* **Buffers: 20 KB, not 12 KB.** The paper speaks both of "three 4 KB
  buffers" and of double-buffered A0/A1, B0/B1 plus C (20 KB physical, 12 KB
  logical). The double-buffered version is built, since it is the one that
  overlaps fetch and compute.
* **Tile shape.** One passage mentions 64 x 64 INT8 tiles. The 16 x 256
  shape given elsewhere is used because its 16 rows match the array.
* **Result register in each PE.** This is added so that the drain overlaps
  the next tile. The paper only says that finished tiles are flushed.
* **Buffer C as four 1 KB slots** instead of one tile-sized buffer. The
  paper's C page holds four 16 x 16 INT32 tiles; using all four lets
  write-back lag the array by up to four tiles.
* **One descriptor per step** carries the A, B and C addresses, instead of
  three separate read(A), read(B) and write(C) descriptors. The register
  map, the queue and the doorbell-with-count semantics are also this
  design's own.
* **Bursts.** The paper says both that a tile comes in "a single DMA burst"
  and that bursts are 1024 bytes. Here each tile is one page-sized transfer
  cut into four 1024-byte bursts.
* **Partial sums stay in place.** The paper describes partial results
  flowing diagonally through the array, and it also calls the array output
  stationary. The output-stationary reading is built. Only the operands move
  (their skewed wavefront runs diagonally). A sum moves only once it is
  finished, and then downwards.
* **Interrupt per batch.** The interrupt fires when everything released by
  the doorbell is done. A driver that wants one interrupt per result tile
  rings the doorbell once per tile.
* **The DM/DC difference is a `coherent` attribute** on each host request.
  How the real PCIe interface expresses this (for example, with a no-snoop
  bit) lies outside this RTL.
* **Floating-point arithmetic.** The paper lists FP16 and FP32 PEs but not
  their arithmetic. Single-precision accumulation, round-to-nearest-even and
  flush-to-zero are this design's choices.
* **Not built:**
  * the FP8 PE: the paper does not say which 8-bit format it uses;
  * the PCIe endpoint, link and switch;
  * the SMMU;
  * the device-memory controller and DRAM;
  * the host CPU and caches.
  The two memory ports and the `msi` output are where these connect.
* **Precision is a build-time parameter** (`DATA_W`, `FLOAT`), not a run-time mode.
  The default build is the INT8 design point. The transformer comparison in
  the paper is said to use int32, which needs a `DATA_W = 32` build.

## Source files

| file | content |
|---|---|
| `rtl/mf_pkg.sv` | constants, access-mode enum, descriptor and memory-port structs |
| `rtl/mf_pe.sv` | processing element |
| `rtl/mf_fp_mul.sv` | half/single-precision multiplier, single-precision product |
| `rtl/mf_fp_add.sv` | single-precision adder (the floating-point accumulator) |
| `rtl/mf_systolic_array.sv` | W x W array, skew registers, drain control |
| `rtl/mf_tile_sram.sv` | simple dual-port SRAM with registered read (buffer C, input banks) |
| `rtl/mf_in_buffer.sv` | 4 KB input tile buffer, 16 row banks, column read |
| `rtl/mf_fifo.sv` | small FIFO (descriptor queue, DMA write prefetch) |
| `rtl/mf_dma.sv` | 2 read + 2 write channel DMA, mode routing |
| `rtl/mf_csr.sv` | registers, descriptor queue, doorbell, interrupt |
| `rtl/mf_controller.sv` | fetch / compute / write-back sequencer |
| `rtl/mf_top.sv` | the accelerator |
| `tb/mf_mem_model.sv` | behavioural memory for the testbenches (latency, stalls, burst counters) |
| `tb/mf_fp_ref_pkg.sv` | reference single-precision rounding for the testbenches |
| `tb/mf_gemm_host.sv` | driver and memories around one accelerator, runs a whole GEMM and checks it |
| `tb/tb_*.sv` | one self-checking testbench per module, `tb_mf_top`, and two workload testbenches |

## Simulating

Each testbench is a top module without ports. It prints
`TB_RESULT checks=<n> failures=<n>` and stops. A watchdog ends it with a
failure if it hangs. With Verilator 5 (the package first; the other files are
found through `-y`):

```
verilator --binary --timing --assert -Wno-fatal -j 4 \
    --top-module tb_mf_top -y rtl -y tb +libext+.sv \
    rtl/mf_pkg.sv tb/tb_mf_top.sv
./obj_dir/Vtb_mf_top
```

Replace `tb_mf_top` with any other testbench name to run it. The
end-to-end test runs the accelerator at its default size with no parameter
overrides. It takes about 30 s to compile and under a second to run.

What the testbenches establish:

* `tb_mf_pe`: operand pass-through timing; exact signed sums; the
  accumulator restarts after `last`; the shift chain.
* `tb_mf_systolic_array`: full 16 x 16 array. It runs tiles back to back,
  with gaps and with bubbles. Every element is checked, and the first row
  must appear exactly 2W cycles after the last beat.
* `tb_mf_in_buffer` and `tb_mf_tile_sram`: every column or word of a random
  page, with the one-cycle read latency.
* `tb_mf_dma`: all three modes. It checks page contents, bursts of four
  times 1024 bytes, the coherent attribute only in DC, no host traffic in
  DevMem, and that both pages arrive within 128 beats plus latency.
* `tb_mf_csr`: the doorbell withholds descriptors, descriptor order, the
  mode lock while busy, one interrupt, the acknowledge and the counters.
* `tb_mf_controller`: read order and half selection; `last` marking;
  back-to-back tiles with fast DMA; stalls with slow DMA; slot addresses
  and write-back of every tile.
* `tb_mf_top`: a 32 x 512 by 512 x 32 INT8 GEMM (2 x 2 result tiles, 2
  k-steps each) in DM, DC and DevMem. A fourth run holds the host writes
  back so that all four C slots fill up. Every result element is compared
  with a product computed in the testbench. The test also counts, and
  requires at least once each: fetch overlapping compute, tiles entering
  back to back, array stalls, slot back-pressure and one interrupt per
  batch. In DM mode the 8 tile pairs must take exactly 8 x 256 array cycles.

Two more testbenches run whole workloads through the register interface.
A helper, `tb/mf_gemm_host.sv`, acts as the driver. It refills the
16-entry queue while the array works and checks every result element.

* `tb_mf_gemm_workloads` runs the default INT8 build on these GEMMs:
  * square GEMMs of 64, 128, 256 and 512 (64 needs K padding; 512 is run in
    DC mode);
  * one BERT-Base attention-score GEMM, 128 x 64 by 64 x 128, from device
    memory;
  * one ViT-Base/16 head projection, 197 x 768 by 768 x 64, where the
    token count is padded to 208.

  All results are exact. The host-memory runs must keep the array fed on
  every cycle from first to last column. About 7 s.
* `tb_mf_gemm_precision` builds the accelerator four times, as INT16,
  INT32, FP16 and FP32, and runs a 512³ GEMM on each. It checks exact
  results (bit-exact for floating point), the tile shapes (16 x 128 and
  16 x 64) and the 50 % bandwidth bound for 32-bit elements. About 2
  minutes.
* `tb_mf_fp_arith` checks the floating-point multiplier and adder bit for
  bit against a reference rounding built on double-precision reals. It
  covers 120,000 random and edge-case operations plus the special values.

All testbenches assume a two-state simulator that starts registers at random
values. Everything that is read is reset, and the tests are written to pass
regardless of the initial values.
