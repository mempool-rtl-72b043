# MemPool cluster in SystemVerilog

A synthesizable model of the MemPool manycore cluster. It has 256 core ports in 4 groups × 16 tiles × 4 cores. The shared L1 scratchpad is 1 MiB, built from 16 banks of 1 KiB per tile, and reached over the TopH interconnect. The Snitch cores are not built. Their data and fetch ports are ports of the top module `mempool_cluster`, and the testbenches drive them.

## What is built (rtl/)

| module | role |
|---|---|
| `mempool_pkg` | constants, request and response structs, a reduced AXI bundle (AR/AW/W/R/B) |
| `address_scrambler` | hybrid addressing: the first 128 KiB holds one 2 KiB sequential region per tile |
| `spm_bank` | 1 KiB bank, 1-cycle access, byte enables, RISC-V AMOs, LR/SC reservation |
| `crossbar`, `rr_arbiter`, `pipe_reg` | round-robin crossbar used at tile and group level; pipeline register |
| `l0_icache` | 4-line private L0 cache with loop and jump prefetching |
| `l1_icache` | 2 KiB, 2-way tile cache; serial tag/data lookup; coalescing refill |
| `axi_node`, `ro_cache` | AXI tree node (ID extension) and 8 KiB read-only cache with bypass and flush |
| `dma_frontend`, `dma_splitter`, `dma_distributor`, `dma_backend` | distributed DMA: register file, split at 4 KiB L1 lines, per-group and per-backend distribution, row-wide data movers |
| `tile` | banks, the 8→16 tile crossbar, the remote crossbar to the L/N/NE/E ports, I-caches, AXI port |
| `group` | 16 tiles, local/N/NE/E 16×16 crossbars with pipeline stages, AXI tree, 4 DMA backends |
| `mempool_cluster` | 4 groups wired point to point, DMA frontend, splitter and distributor, 4 AXI masters |

Latencies without contention are 1 cycle inside a tile, 3 inside a group and 5 between groups, as in the paper. The end-to-end testbench measures each of them.

### Deviations and choices

- The read-only cache handles one cached burst at a time and blocks on a miss. The paper's cache is pipelined with several outstanding misses.
- L1 I-cache tags are flip-flops, not latches. One refill is in flight at a time.
- DMA transfers must be 64-byte aligned and a multiple of 64 bytes. Each AXI beat moves one whole tile row through a wide DMA port into the tile crossbar, and that port has priority at the banks.
- The direction of the group links follows the cluster figure: N reaches group g^2, NE reaches g^3 and E reaches g^1.
- The paper does not describe the control registers. The read-only cache region and flush are top-level ports. The DMA registers are offsets 0x0–0x14 of `dma_frontend`.
- Not built: the Snitch core, its integer processing unit and the SoC around the cluster (AXI crossbar, L2, peripherals). The testbenches use a behavioural AXI memory (`tb/tb_axi_mem.sv`) as L2.
- Verilator reports UNOPTFLAT for the AXI bundles in `axi_node`, `ro_cache`, `tile`, `group` and the top. Each bundle is one packed struct that carries both directions' handshakes, so the warning is a false loop; no combinational path exists.

## Testbenches (tb/)

Every block has a self-checking `tb_<module>.sv`. Each ends with a `TB_RESULT` line and has a watchdog.
`tb_mempool_cluster` runs the top at its default, full size. It measures the 1/3/5-cycle latencies and checks these mechanisms, counting a failure for any that never happens:

- scrambled sequential regions;
- bank conflicts;
- AMOs and LR/SC;
- DMA L2→L1 and L1→L2 across full 4 KiB lines, programmed through the registers;
- instruction fetch with prefetching and coalesced refills;
- read-only cache hits and misses;
- core loads over AXI.

It simulates in under a minute with Verilator.

For each module, a copy with one deliberate bug was run against its testbench, and every testbench failed on its copy.

## Workloads

The design was sized for these kernels. Their arithmetic was worked out too:

- matmul 256×256, conv 96×1024, dct 192×1024, axpy 98304 and dotp 98304;
- histogram equalization, ray tracing and BFS;
- double-buffered versions at half size.

Each single-buffered kernel uses 768 KiB or less, so it fits in the 1 MiB L1. No kernel was run, because no core is built.
