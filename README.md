# CXL-PNM KV-cache manager: RTL

This is synthesizable SystemVerilog for the near-memory accelerator of "Scalable
Processing-Near-Memory for 1M-Token LLM Inference: CXL-Enabled KV-Cache Management Beyond
GPU Limits". The accelerator sits in a CXL memory device next to the LPDDR5X memory. It keeps
the KV cache of long-context decoding in device memory. It runs the page-selection work itself:

- It builds per-page min/max digests.
- It estimates a score for every page against the current query.
- It sorts the scores to find the Top-K pages.
- It computes the softmax.
- It runs steady selection. This decides which pages the GPU must evict and which it must
  recall, and it keeps pages that stay selected resident.

## Block map

```
            AHB (from CXL.io)                    AXI4 (from CXL.mem, host)
                 |                                      |
            cfg_regs --start/done/irq-- pnm_controller  |
                 | metadata regs            | dispatch  |
                 v                          v           v
           dma_engine <---- AXI4 ----> axi_arbiter ----> AXI4 to LPDDR5X controllers
              |  ^
   load rows  v  | store rows
     Matrix/Vector buffer ------------> 32 x vpu_tile (mc_unit array + ac_unit tree)
     (sram_buffer, 256 x 8 KB)           |  query register
                                         v
     Output buffer (sram_buffer, 1024 x 256 B) <--> sfu (exp / normalise)
                 |                    ---> topk_merge_sorter ---> steady_selector
                 +<-------------------------- (evict, recall) pairs
```

The controller (`pnm_controller`) holds an instruction buffer. It fetches, decodes and
dispatches one instruction at a time. Its `scoreboard` stalls an instruction while the unit or
buffer it needs is still in use.

| Module | Role |
|---|---|
| `fp16_pkg` | FP16 multiply, add, compare. Round to nearest even, subnormals flushed. |
| `vpu_pkg` | VPU modes and per-mode unit operations. |
| `mc_unit` | Array element: multiplier or comparator (max/min). |
| `ac_unit` | Tree node: adder or comparator. |
| `vpu_tile` | 128-lane M/C array with a 127-node A/C tree, pipelined one level per cycle. Row accumulator. Modes: GEMV, digest max/min, score (first tree level max). |
| `sfu` | 128-lane softmax unit. The exp sweep uses a LUT and adds to a running sum through an adder tree. The normalise sweep multiplies by the LUT reciprocal of the sum. |
| `topk_merge_sorter` | Ranks a chunk of 16 scores in parallel, then merges it into the sorted Top-128 list. Streams out the sorted page indices. |
| `steady_selector` | Algorithm 1. Bitmasks give evict = P & ~T and candidates = T & ~P. A counter walks the Top-K FIFO and pairs each evicted slot with the next candidate. |
| `scoreboard` | Busy bits per unit and per buffer resource. |
| `pnm_controller` | Instruction buffer, fetch/decode/issue, stall counter, completion. |
| `cfg_regs` | AHB-Lite slave: ten 32-bit metadata registers, CTRL/STATUS, instruction-buffer window, interrupt. |
| `dma_engine` | AXI4 master. One burst per buffer row, either loading into the Matrix buffer or storing from the Output buffer. |
| `axi_arbiter` | Round-robin arbiter between host CXL.mem traffic and the DMA. Reads and writes are arbitrated separately. A grant is held until the burst ends. |
| `sram_buffer` | Buffer with one write port and one registered read port. |
| `pnm_top` | Top level that wires up all of the above. |
| `pnm_pkg`, `axi_pkg` | Instruction format and AXI channel structs. |

## Instruction set (own design; the paper does not give one)

There are 64-bit instructions. Bits 63:60 hold the opcode. Rows are buffer row numbers.

- `DMA_LD` / `DMA_ST reg, offset, row, count` move rows between device memory and the
  buffers. The memory address is (metadata register + offset) × 128 bytes.
- `LDQ row` copies a Matrix-buffer row into the query register.
- `VPU mode, group, dst, src, count` streams `count` rows into all 32 tiles.
  - `group` consecutive rows are accumulated into one result per tile.
  - Row j of a group is multiplied with query slice j.
  - Results are packed 32 per event into Output rows.
- `SFU_EXP clear, bias, row, count` computes exp(x − bias) in place and adds it to the sum.
  `SFU_NORM row, count` multiplies by 1/sum in place.
- `TOPK row, count` sorts the scores held in `count` Output rows. The page index is
  row × 128 + lane.
- `STEADY clear, cap, dst` runs steady selection on the sorted list. It writes the
  (slot, recall) pairs to Output row `dst`. A slot of 0xFFFF means the recall fills a free slot.
- `END` waits for all units to finish, then raises the interrupt.

## Data layout (own choice)

- A page's digest has d_h = 128 channels of max and min. It takes two Matrix rows per page, and
  each tile holds one page.
- In a row, lanes 2k and 2k+1 hold the max and the min of one channel.
- The query register holds lanes 2k and 2k+1 equal to the query channel. A score
  instruction is therefore `VPU SCORE group=2`.

## Timing

- The VPU tile has a latency of 9 cycles. It takes one row per cycle.
- The SFU has a latency of 2 cycles. It takes one row per cycle.
- The sorter takes one chunk of 16 scores per cycle. It finishes two cycles after the last chunk.
- The steady selector loads K indices, one per cycle. It then spends one cycle on the masks,
  then emits one pair per cycle.
- The DMA keeps one AXI4 burst in flight, of 64 beats for a Matrix row and 2 for an Output row.

## Verification

Every block is covered by a self-checking testbench in `tb/`. Each one ends by printing the number of
checks and failures.

- `tb_mc_unit`, `tb_ac_unit`, `tb_vpu_tile`, `tb_sfu`: random FP16 operands, checked against
  real-number references within FP16 tolerance.
- `tb_topk_merge_sorter`: random score sets against a stable sort.
- `tb_steady_selector`: at 32768 pages. The Fig. 9 example, then 12 random steps, checked
  against a reference model of Algorithm 1.
- `tb_scoreboard`: random issue and complete traffic against a reference model. Counts
  stalls caused by a busy unit and by a held resource.
- `tb_sram_buffer`: random reads and writes, including a read and a write of the same row in
  one cycle.
- `tb_pnm_top`: the end-to-end test, run on a reduced top with 2 tiles of 64 lanes and 128
  pages. The host programs two complete decode steps over AHB:
  1. Load digests and queries.
  2. Compute scores.
  3. Sort the Top-K pages.
  4. Run steady selection.
  5. Compute the softmax.
  6. Store the results.

  It then runs a digest pass and a GEMV pass. It checks every result stored in the behavioural
  DRAM model (`tb/axi_mem_model.sv`). At the same time, the host keeps reading the DRAM over
  CXL.mem. The test counts each mechanism and fails if one never happened: scoreboard stalls,
  arbiter contention, evictions, recalls, free-slot fills and the completion interrupt. The
  controller, register file, DMA and arbiter are checked through this test only.
- Largest size simulated end to end: the reduced top above (2 tiles × 64 lanes, Top-16,
  256-page selector). A build of the same program on the top at its defaults (32 tiles × 128
  lanes) did not finish compiling in verilator within 20 minutes, so no full-size end-to-end
  run is included. The blocks with the heaviest sizes were simulated at their defaults:
  `vpu_tile` at 128 lanes, `sfu` at 128 lanes, and `steady_selector` at 32768 pages. To
  try the full-size top, change the `localparam` sizes of `tb_pnm_top` and drop the
  parameter override on `pnm_top`.

For every block, a copy with one deliberate bug was run against its testbench, and the
testbench reported failures.

## Where this RTL departs from the published description

- Each tile is described as a 128-wide multiplier array, a 128-wide comparator array, a
  64-length adder tree and a 64-length comparator tree. Here, multipliers and comparators share
  one reconfigurable array element, and the tree nodes are shared the same way. The tree is a
  full binary tree of 127 nodes, which matches the per-chip totals in the hardware table
  (4096 multipliers and 4064 adders for 32 tiles).
- The buffers are register arrays, not SRAM macros. The Matrix-buffer row is 64 Kbit wide so
  that one row feeds all 32 tiles. The published SRAM I/O width is 16384 bits.
- The MSI-X interrupt becomes a level `irq` pin. The instruction set, the page size and the
  FP16 rounding details are not published, so they are chosen here.

## What is not built

- The CXL controller IP: the CXL.io and CXL.mem transaction layers, the port ARB/MUX and the
  PCIe 6.0 PHY. The AHB and AXI4 sides of this IP are ports of the top.
- The LPDDR5X memory controllers and the DRAM.
- The 1 MB DMA buffers. Only their size is given, so the DMA writes straight into the vector
  buffers.
- The host driver and the MSI-X path. The top raises a level interrupt instead.
- The GPU side of steady mode. The top produces the (slot, recall) pairs that the GPU would act
  on.

## Own choices where the paper is silent

- The instruction set and the address map.
- The page size of 32 tokens, which sets 32768 pages for 1M tokens.
- The exp and reciprocal LUT sizes.
- Flush-to-zero FP16.
- Ranking plus rank merge as the merge-sort structure.
- Round-robin arbitration.
- Buffer depths: 256 Matrix rows of 8 KB and 1024 Output rows of 256 B, which add up to the
  2.25 MB of on-chip buffers.
