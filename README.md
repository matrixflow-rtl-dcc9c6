# MatrixFlow accelerator: SystemVerilog model

MatrixFlow is a matrix-multiply accelerator for transformer inference. It is
*loosely coupled*: it is not part of a CPU pipeline. It sits on a PCIe link
and moves its own data by DMA. The core is a 16 x 16 systolic array with very
little local storage: three 4 KB buffers, one each for A, B and the result C.
That is enough because matrices are stored in memory as **page blocks**.

A page block is a rectangle of a matrix that fills exactly one 4 KB memory
page. So one DMA transfer fetches one block, with a single address
translation and no gathering of strided rows or columns. The accelerator
works through a matrix product one page block at a time, and the host CPU
only has to post a descriptor and wait for an interrupt.

This repository holds synthesizable RTL for the accelerator side of that
system: the processing elements, the array, the three buffers, the DMA engine
and the controller, wired together in `matrixflow_top`. It also holds
self-checking testbenches. The host system is not RTL here. That means the
PCIe endpoint, switch and root complex, the SMMU, the caches and DRAM. A
behavioural memory model stands in for all of it in the testbenches.

The architecture follows the MatrixFlow paper (Liu, Zapater, Atienza). The
paper gives the structure, sizes and data flow, but not the encodings,
handshakes or register interface. Those are this design's own choices. Each
one is marked below and in the opening comment of the file it lives in.

## 1. Page blocks: how matrices must be laid out

Everything else follows from this layout, so it comes first.

Let W = 16 be the array size. Let L be the number of elements that fit in one
page row when a page holds W rows:

    L = 4096 / (W * element bytes)   -> INT32/FP32: 64, INT16/FP16: 128, INT8: 256

For C = A x B, with A of size M x K and B of size K x N:

* **A block (i, k)** covers rows `16i .. 16i+15` and columns `Lk .. Lk+L-1` of A.
  In its page, row r occupies bytes `r*256 .. r*256+255`, with element e at
  byte `r*256 + e*bytes`. Blocks are stored in order (i, k), at
  `A_base + (i*KB + k) * 4096`.
* **B block (j, k)** covers columns `16j .. 16j+15` and rows `Lk .. Lk+L-1` of
  B, **stored transposed**: page row r holds column `16j+r` of B, with its L
  elements contiguous. It is stored at `B_base + (j*KB + k) * 4096`. This
  "horizontal" split is the paper's key data-structure change. Without it, a
  column of B would be spread over many pages.
* **C block (i, j)** is a 16 x 16 block of 32-bit results, row-major, 1 KB.
  Blocks are numbered `b = i*NB + j` and packed four to a page:
  `C_base + (b/4)*4096 + (b%4)*1024`.

Here MB = M/16, NB = N/16 and KB = K/L. M and N must be multiples of 16, and K
a multiple of L. The host pads with zeros otherwise.

Every result block is an accumulation over the K blocks. This is the paper's
block algorithm:

    for i < MB: for j < NB:
        R = 0
        for k < KB: R += A_block(i,k) x B_block(j,k)^T
        store R as C block (i,j)

Each A row meets each B row (that is, each B column) over the same L
elements. So a block pair is a plain W x W set of dot products of length L.

## 2. The systolic array (`mf_pe`, `mf_systolic_array`)

Each PE is the cell drawn in the paper. It has an input register for A and
one for B. The two registers feed a multiplier, and the multiplier feeds an
adder with an accumulator register. The registered A continues to the right
and the registered B continues downwards. `sum_out` is the accumulator.

The array is output-stationary: PE(i, j) accumulates
`sum_k A[i][k] * B[j][k]`. In each cycle the array takes one column k of the
A page (16 values, one per array row) and the same column of the B page (one
per array column). Row i and column j pass through i and j extra registers
first (the input skew). That makes `A[i][k]` and `B[j][k]` arrive at PE(i,j)
in the same cycle, k+i+j. Idle cycles feed zeros, which add nothing.

Timing, as the array testbench checks it: if column 0 is presented in cycle 0,
the full block result can be read from cycle **L + 2W - 1** (L + 31 for a
16 x 16 array), and not a cycle earlier. Block pairs with the same (i, j) can
follow each other with no gap. The accumulators carry on across them.

The results are read one row per cycle: `rd_row` selects 16 accumulators,
which is 64 B. The paper prints 64 GiB/s on each array-buffer link, and at
1 GHz that is exactly one 64 B row or column per cycle. The 16 buffer columns
going in and the 16 rows coming out are sized to that rate.

Data types are fixed at build time with the `DTYPE` parameter. The paper
built a separate MAC design for each type. The options are INT32, INT16,
INT8, FP32 and FP16. The accumulator is 32 bits for every type; the paper
does not say. INT8 and INT16 products are sign-extended, INT32 wraps modulo
2^32, and FP16 products are summed in FP32. The floating-point MAC
(`mf_fp_mac`) is this design's minimal version: it truncates, flushes
subnormals to zero, saturates to infinity and does not produce NaN.

## 3. Buffers (`mf_in_buffer`, `mf_out_buffer`)

Buffers A and B are each one page. They are written by DMA in address order,
64 B per beat, and read by the array one column per cycle: element k of all
16 page rows. Each buffer is split into 16 banks, one per page row, so a beat
write touches one bank and a column read takes one element from every bank.
The read port is registered. Its output is zero in the cycle after a cycle
with no read, which is how the array gets its zero fill.

Buffer C is one page of 32-bit results. It is written a row at a time from
the array and read a beat at a time by the write DMA. With 32-bit results it
holds four result blocks. When it is full, or after the last block of a job,
it is written back by DMA, as the paper describes.

## 4. Controller and the block pipeline (`mf_controller`)

The host programs these registers (byte offsets, 32-bit). The map is this
design's own.

| offset | name     | meaning |
|--------|----------|---------|
| 0x00   | CTRL     | write bit 0 = 1 to start a job |
| 0x04   | STATUS   | bit 0 busy, bit 1 done (= irq); write 1 to bit 1 to clear |
| 0x08   | DESC_LO  | descriptor address, bits 31:0 |
| 0x0C   | DESC_HI  | descriptor address, bits 63:32 |
| 0x10   | MODE     | bit 0: 0 = DC (direct cache), 1 = DM (direct memory) |
| 0x14   | BURST    | DM burst length in bytes (reset 4096) |
| 0x18   | CYCLES   | clock cycles taken by the last job |

A job is described by a 64 B **descriptor** in host memory. The paper mentions
descriptor fetching but not its format, so the format is this design's own.
Counting little-endian 32-bit words:

| words | field |
|-------|-------|
| 0-1   | A_base |
| 2-3   | B_base |
| 4-5   | C_base |
| 6     | MB in bits 15:0, NB in bits 31:16 |
| 7     | KB in bits 15:0 |

After `start`, the controller fetches the descriptor and then runs two
sequencers. Both walk the block loop above.

* The **fetch sequencer** commands DMA channel A and channel B to fetch the
  next (A block, B block) pair. It does this as soon as both channels have
  finished the previous pair, which is usually while the array is still
  computing on that pair. The DMA accepts returning data only once the
  target buffer has been read out. So, as in the paper's pipeline figure,
  request latency is hidden behind computation but the data lands after it.
  Fetching pairs in lock-step keeps the shared, in-order return path free of
  deadlock.
* The **compute sequencer** waits until both buffers hold the pair, then
  streams its L columns. Before k = 0 it clears the accumulators. After the
  last k it waits 2W cycles for the array to finish, then drains the 16
  result rows into the next free quarter of buffer C. It starts a write-back
  when buffer C is full or the job is over. It waits for an earlier write-back
  only when it needs buffer C again.

When the last result page has been written, STATUS.done and `irq` go high.

The array is idle while a pair is being fetched. With only three single
buffers, as in the paper, a block pair costs its L compute cycles plus the
time to move 8 KB. In the testbench's host model, that means 128 beats on a
single 64 B return path plus latency. On large jobs the measured cost per
pair is about L + 130 cycles: 194 for INT32/FP32, 258 for INT16/FP16 and 387
for INT8. The array is therefore busy 33 %, 50 % and 66 % of the time.
Double-buffering would hide the fetch. The paper does not describe it and
it is not built.

## 5. DMA engine and the PCIe-side ports (`mf_dma`)

There are three read channels: A, B and the descriptor. They share one
request port and take turns round-robin, which is the paper's
"time-multiplexed channels sharing one PCIe link". Each transfer of up to one
page is split into requests according to the mode:

* **DC mode** (`rd_req_to_cache = 1`): 64 B requests, meant to be served by the
  last-level cache.
* **DM mode** (`rd_req_to_cache = 0`): bursts of `BURST` bytes to the memory
  controller. The burst is adjustable, as in the paper.

The port protocol is this design's own:

* **Requests**: `rd_req_valid/ready`, address, length, a 2-bit tag (the
  channel) and the routing bit. A request is held stable until it is
  accepted; an assertion checks this.
* **Read data**: 64 B beats `rd_rsp_*` with the tag. Beats must come back in
  request order. `rd_rsp_ready` is low while the target buffer is still in
  use.
* **Writes**: `wr_req_*` (address, length, routing) plus a data stream
  `wr_dat_*`. `wr_dat_last` marks the end of each request, and the host
  returns one `wr_rsp_valid` pulse per request.
* **Registers**: `cfg_valid`, `cfg_write`, `cfg_addr`, `cfg_wdata`, and
  `cfg_rdata`, which is combinational. This is the CPU's path to the
  registers through the endpoint's BAR.

The PCIe endpoint (transaction, link and physical layers) is assumed to sit
on the other side of these ports. So are the device-side memory controller
shown in the paper's wrapper figure, and the host's SMMU, IOCache, caches and
DRAM. None of them is modelled in RTL.

## 6. Files

| file | contents |
|------|----------|
| `rtl/mf_pkg.sv` | data types, sizes, descriptor struct, register offsets |
| `rtl/mf_pe.sv` | processing element (MAC) |
| `rtl/mf_fp_mac.sv` | FP32 / FP16 multiply-add used by FP builds of the PE |
| `rtl/mf_systolic_array.sv` | W x W array with input skew and row read-out |
| `rtl/mf_in_buffer.sv` | 4 KB operand page buffer (A or B) |
| `rtl/mf_out_buffer.sv` | 4 KB result buffer (C) |
| `rtl/mf_dma.sv` | DMA engine: read channels, DC/DM split, write channel |
| `rtl/mf_controller.sv` | registers, descriptor fetch, block loop, interrupt |
| `rtl/matrixflow_top.sv` | the accelerator wrapper |
| `tb/mf_host_mem.sv` | behavioural host: memory with latency and back-pressure |
| `tb/tb_*.sv` | one self-checking testbench per module, plus workload tests |

Top-level parameters are `W` (default 16) and `DTYPE` (default INT32). Sizes
tied to the 4 KB page are package constants.

## 7. Simulating

All testbenches are self-checking. Each one prints
`TB_RESULT checks=N failures=F` and has a cycle watchdog. With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        +libext+.sv rtl/mf_pkg.sv tb/tb_matrixflow_top.sv --top-module tb_matrixflow_top
    ./obj_dir/Vtb_matrixflow_top

To run another test, replace the testbench name.

| testbench | what it checks |
|-----------|----------------|
| `tb_mf_pe` | INT32/16/8 and FP32 PEs against reference sums; one-cycle forwarding; clear |
| `tb_mf_fp_mac` | FP32 and FP16-operand multiply-add against real arithmetic; exact cases |
| `tb_mf_systolic_array` | block products, latency L + 2W - 1 exactly, accumulation across blocks, clear |
| `tb_mf_in_buffer` | shuffled page writes; every column read for INT32 and INT8; zero fill |
| `tb_mf_out_buffer` | row writes against beat reads; partial overwrite |
| `tb_mf_dma` | DC and DM splitting, routing bit, round-robin alternation, sink back-pressure, writes |
| `tb_mf_controller` | page address order of the block loop, streaming, clears, drain slots, write-backs, registers |
| `tb_matrixflow_top` | two complete jobs at default parameters (see below) |
| `tb_mf_gemm_int8` | INT8 square GEMM, n = 64, 256 (DC and DM) and 1024 (DC) |
| `tb_mf_gemm_dtypes` | 512-cube GEMM (DC) and 256-cube GEMM (DM) on all five data-type builds at once |
| `tb_mf_transformer` | one GEMM of each shape in a BERT-base / ViT encoder layer, INT32 |

`tb_matrixflow_top` runs the whole accelerator at its default parameters. It
runs a 32 x 128 by 128 x 32 product in DC mode (four result blocks, two K
blocks each, one full result page) and a 16 x 64 by 64 x 80 product in DM
mode with 1 KB bursts (five result blocks, so one full page and one partial
page). It compares every result with a product computed in the testbench. It
checks that each block pair streams at exactly one column per cycle. It also
counts the mechanisms: requests overlapping computation, data held back by a
busy buffer, A/B interleaving, DC and DM requests, full and partial
write-backs, K accumulation and the interrupt. Each must occur at least once.

The three workload tests share `tb/mf_gemm_bench.sv`. It holds one
accelerator with a host model, and has a task that lays out random
matrices in page blocks, runs the job through the registers and checks every
result element. The floating-point inputs are multiples of 1/8 in -15/8 ..
15/8, so every FP32 sum is exact and can be compared bit for bit.

The largest workloads simulated are these. INT8 GEMM up to 1024 x 1024 x
1024 takes 6.3 M cycles and about a minute of simulation. The BERT-base Q
projection (128 x 768 by 768 x 768) takes 0.89 M cycles. The ViT-base Q
projection (197 tokens padded to 208) takes 1.45 M cycles. A 2048-cube
GEMM, or all the GEMMs of a complete model, would take proportionally
longer. They are not simulated here.

Sizes that are not multiples of the block grid need padding by the host:
M and N to multiples of 16, and K to a multiple of L, with zeros. One
example is the 197-token sequence of ViT-base. Another is the 80-wide heads of ViT-huge,
where the score product pads K from 80 to 128.

## 8. How far to trust it, and where it departs from the paper

Taken from the paper:

* the 16 x 16 PE grid and the PE structure
* three 4 KB buffers
* page-sized W x L blocks, with B split horizontally
* the block loop
* DMA between buffers and host memory, with buffer C written back when full
* DC (64 B, via the cache) and DM (adjustable bursts) modes
* time-multiplexed fetch channels
* descriptor fetch
* a completion interrupt
* a MAC design per data type

This design's own choices, where the paper is silent:

* every port protocol and tag scheme, and the requirement for in-order read
  data
* the register map and descriptor format
* the result layout (four 1 KB blocks per page)
* 32-bit accumulators for all types, and the FP rounding behaviour
* the input skew and the row-wise read-out
* the banked buffer organisation
* draining the array before the next result block starts, which leaves the
  array idle for about 3W cycles per result block
* lock-step fetching of A/B pairs

Not built:

* the PCIe endpoint and PHY, the device memory controller, and the host
  system (CPU, caches, IOCache, SMMU, root complex, switch, DRAM controller)
* the kernel driver, which is software

Link width and speed (the paper studies x16 at 64 Gb/s down to x4 at 5 Gb/s)
belong to the endpoint. Here they only show up as how fast the host side
answers.

Performance figures in the paper come from full-system simulation of the
whole platform. They are not reproduced by this RTL.
