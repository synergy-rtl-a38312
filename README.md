# Synergy accelerator fabric in SystemVerilog

This is the programmable-logic side of the Synergy heterogeneous CNN framework. It has:

- processing engines (PEs) that compute tiled single-precision matrix products for convolution layers;
- the memory subsystem that lets the PEs read user-space virtual memory directly.

The software side (delegate threads, job queues, clusters, work stealing, NEON engines, the ARM cores) and the vendor parts (system bus, DDR) are not logic. They are not built here.

## Blocks

| File | Role |
|------|------|
| `rtl/synergy_pkg.sv` | Shared constants and types: command opcodes, the 9-word job record, memory request, AXI4 channel structs. |
| `rtl/sync_fifo.sv` | Valid/ready FIFO, 128 deep by default. Each PE has four of them: sw2hw, hw2sw, hw2mem, mem2hw. |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv` | Combinational IEEE single-precision multiply and add. Round to nearest even; subnormals flushed to zero. |
| `rtl/fp32_mac_tree.sv` | LANES products summed by a balanced adder tree. This is the unrolled innermost loop. |
| `rtl/pe.sv` | The processing engine (see below). LANES = TS (32) gives the fast PE (F-PE). LANES = 2 gives the slow PE (S-PE). |
| `rtl/mem_arbiter.sv` | Round-robin arbiter for the two PEs that share an MMU. It grants a whole transaction. |
| `rtl/mmu.sv` | Two-level ARM short-descriptor page walk for every burst. Reports faults. |
| `rtl/proc_arbiter.sv` | Round-robin access from all MMUs to the single Proc unit. |
| `rtl/proc_unit.sv` | Holds the L1 page-table base. On a fault it raises an interrupt and waits for the CPU to supply a base again. |
| `rtl/mem_controller.sv` | AXI4 master: 32-bit INCR bursts, one transaction in flight. |
| `rtl/synergy_top.sv` | 8 PEs: PE0 and PE1 are S-PEs, PE2 to PE7 are F-PEs. There are 4 arbiter/MMU/controller groups, one per pair of PEs, plus a Proc arbiter and the Proc unit. |

## How a PE works

1. The PE waits for the start word on sw2hw.
2. It asks for a job by sending `{0x01, 0}` on hw2sw. The delegate answers with the virtual address of a job record. The record has 9 words: A, B and C addresses, m, n, k, the row tile t1, the column tile t2, and the layer id.
3. The PE reads the record through its memory port.
4. It walks the K dimension in tiles of TS:
   - A fetch engine loads A and B tiles into one half of a double buffer while the kernel works on the other half.
   - Rows and columns outside the matrix are filled with zeros, not read.
   - Every burst is cut at 4 KiB page boundaries, so one page walk translates it.
5. The kernel issues one (i, j) dot-product step per cycle. Each step covers LANES products of the tile.
   - Steps of one K tile are accumulated in order.
   - K-tile sums are added into the C tile, and the first K tile overwrites it.
   - One K tile therefore takes TS·TS·(TS/LANES) cycles.
6. The valid part of the C tile is written back.
7. The PE sends `{0x02, layer_id}` and asks for the next job.

A memory transaction on hw2mem is:

- the word `{write, 7'b0, length_in_bytes[23:0]}`;
- the virtual address;
- for writes, the data.

Read data comes back on mem2hw.

## Address translation

Each MMU asks the Proc unit (through the Proc arbiter) for the L1 base, then performs the walk:

- It reads the L1 descriptor at `{base[31:14], VA[31:20], 00}`.
- A type-01 descriptor points to an L2 table. The MMU then reads the L2 descriptor at `{desc[31:10], VA[19:12], 00}`.
- A small-page entry gives `PA = {desc[31:12], VA[11:0]}`.

Any other descriptor is a page fault:

- The MMU reports the faulting address to the Proc unit.
- The Proc unit raises `irq` and holds it until the CPU writes a page-table base again.
- The MMU then walks again from the start.

## Parameters (defaults follow the paper)

| Parameter | Value | Origin |
|-----------|-------|--------|
| Tile size TS | 32 | architecture template (tile_size) |
| FIFO depth | 128 | architecture template (fifo_os, fifo_mem) |
| Number of PEs | 8 (6 F-PE + 2 S-PE) | main evaluated configuration |
| S-PE lanes | 2 | unroll factor 2 of the inner loop |
| PEs per MMU / controller | 2 | memory subsystem description |

## Choices made where the paper is silent

- The encodings of the command, job and memory streams (above).
- Row-major matrices.
- The K-tile count is ceil(k/TS). The paper's listing divides, but padded tiles need the rounded-up count.
- Round-robin arbitration that holds the grant for a whole transaction.
- No TLB.
- A single outstanding AXI transaction per controller.
- Floating point flushes subnormals to zero.
- PE0 and PE1 are the slow engines.

## Verification status

These blocks have self-checking testbenches:

- `tb_sync_fifo`: random traffic against a queue model.
- `tb_fp32_mac_tree`: 32- and 2-lane trees against a double-precision reference that rounds to single. Includes hand-picked rounding and overflow cases.
- `tb_pe`: an F-PE and an S-PE (TS = 4) compute a 6×9 by 9×7 product.
  - The A matrix crosses a page boundary.
  - Every C element is checked bit for bit.
  - Also checked:
    - no neighbouring words are written;
    - the layer ids come back;
    - the kernel cycle count is exact;
    - double-buffer overlap, zero padding and page splitting all occur.

The memory-subsystem blocks and the top level are written and compile, but their own testbenches are not finished. The end-to-end test is also missing: it would cover page faults and interrupts, arbiter contention and the full-size top. These blocks are therefore unverified in simulation.

## Known differences from the paper

- The PEs here are hand-written RTL. The paper generates them with HLS, and its 100 MHz timing is not claimed here.
- No TLB and no multiple outstanding bursts. Memory throughput is therefore lower than a production controller's.
