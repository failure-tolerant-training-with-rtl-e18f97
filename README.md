# CXL-MEM: a persistent-memory expander that trains embeddings and checkpoints itself

Recommendation models (DLRM-style) keep huge embedding tables next to small
MLPs. This design puts the tables in persistent memory (PMEM) on a CXL Type-2
device, **CXL-MEM**. The device does three jobs near the data:

- **Embedding work.** It sums the looked-up embedding vectors of each table into a "reduced" vector (lookup), and it applies the gradient to those vectors (update).
- **Automatic data movement.** Reduced vectors reach the GPU as cache-line write-backs over CXL.cache. Gradients arrive from the GPU as CXL.mem writes, so no copy calls are needed.
- **Checkpointing.** It keeps an undo log of the embedding vectors a batch is about to change, plus a copy of the GPU's MLP parameters. A power failure in the middle of a batch can then be undone from PMEM.

Two scheduling ideas hide the checkpoint and the slow PMEM writes:

- **Batch-aware checkpointing.** The indices of a batch are known before the batch runs, so the rows it will overwrite can be logged in the background before the update. The MLP log is fetched from the GPU only while the GPU has time to answer.
- **Relaxed lookup.** The lookup of batch N+1 does not wait for batch N's update. It reads the old table and is corrected afterwards. Addition is commutative, so subtracting `lr*g` once per index that the two batches share gives exactly the result of a lookup after the update. The corrected result is bit-identical. The read-after-write stall PMEM would show between the update and the next lookup is avoided.

Everything between the CXL transaction layer and the PMEM media pins is RTL
here. The CXL link/PHY, the PMEM chips, the GPU and the host are outside the
top. They are represented by ports, and in simulation by small behavioural
models.

## Block structure

```
            CXL.io (MMIO)   CXL.cache (D2H/H2D)   CXL.mem (M2S/S2M)
                 |                 |                     |
        +--------------------- cxl_controller ----------------------+
        |  mmio_regs    dcoh (reduced-line states)   D2H arbiter    |
        |               CXL.mem decode: gradient window | PMEM       |
        +------+-------------+---------------+---------------+------+
               | doorbells   | flush         | grad writes   | bus master 2
     sparse_feature_buf   scratchpad(red)  scratchpad(grad)  |
          |      |            |       \        /             |
   compute_logic  ckpt_logic  ------------+                  |
    bus master 0  bus master 1 (+ CXL.cache reads via D2H)   |
               \      |      /-------------------------------+
                   system_bus (addr mod 4, round-robin per channel)
              pmem_mc   pmem_mc   pmem_mc   pmem_mc   (PMEM latency emulation)
               media0    media1    media2    media3
```

| File | Role |
|---|---|
| `rtl/trainingcxl_pkg.sv` | Sizes, types (`line_t`, `mem_req_t`, CXL.cache request/response structs), PMEM layout, register offsets |
| `rtl/cxl_mem_top.sv` | The device |
| `rtl/cxl_controller.sv` | MMIO registers, DCOH, CXL.cache arbiter, CXL.mem decode |
| `rtl/mmio_regs.sv` | Register file and command doorbells |
| `rtl/dcoh.sv` | Tracks the reduced-embedding lines and evicts modified ones to the GPU |
| `rtl/compute_logic.sv` | Lookup, update and relaxed correction; 16 lanes of adder and multiplier |
| `rtl/ckpt_logic.sv` | Embedding undo log, MLP log, persistent flags, deletion of the old checkpoint, restore |
| `rtl/sparse_feature_buf.sv` | Indices of two batches (two banks) |
| `rtl/scratchpad.sv` | Line RAM, used for reduced vectors and for gradients |
| `rtl/system_bus.sv` | 3 masters to 4 memory controllers |
| `rtl/pmem_mc.sv` | One PMEM channel with latency emulation |

## Sizes and number format

- **Lines and elements.** A line is 512 bits: 16 elements of 32 bits. Elements are signed **Q16.16**.
  - `lr*g` is the 64-bit product shifted right arithmetically by 16, keeping the low 32 bits.
  - All sums wrap modulo 2^32. This makes the relaxed correction exact.
- **Model limits.** Up to 80 tables, 80 lookups per table per batch, and vectors of up to 32 elements (two lines).
  - These match the largest model the design is sized for: 80 tables × 80 lookups × dimension 32.
  - `VEC_LEN` of 16 or less uses one line per vector.
- **Sparse-feature buffer.** 2 banks × 6400 indices of 32 bits. Entry `t*80 + j` is index `j` of table `t`.
- **Scratchpads.** 160 lines each (80 tables × 2 lines). The line of table `t` and line `l` is `t*2 + l`.
- **PMEM.** 2^30 lines of 64 B, which is 64 GB, line-addressed (`laddr_t`, 30 bits).

## PMEM layout

The lower half of PMEM is the **data region**. It holds the tables. The line
address of table `t`, row `r`, line `l` is

```
{1'b0, t[6:0], r[20:0], l[0]}          (data_addr() in the package)
```

So each table has 2^21 rows. Consecutive lines of a row, and consecutive rows, fall on different channels.

The upper half is the **log region**. Headers sit at `LOG_BASE = 2^29`:

| Line | Content |
|---|---|
| `LOG_BASE + 0/1` | embedding-log header, slot 0/1 |
| `LOG_BASE + 2/3` | MLP-log header, slot 0/1 |
| `LOG_BASE + 16 + s*19200 + e*3` | embedding-log entry `e` of slot `s`: metadata line `{table, index}`, then the 2 vector lines |
| `LOG_BASE + 2^28 + s*2^27 + k` | MLP-log line `k` of slot `s` |

- **Header line fields.**
  - `[31:0]` holds the magic `0x434B5054`.
  - `[63:32]` holds the batch number.
  - `[64]` is the valid bit, which is the **persistent flag**.
  - `[127:96]` holds the number of entries or lines.
- **Slot choice.** The embedding-log slot is the parity of the batch number. The MLP log alternates slots on each request.
- **Write ordering.** A header is written with its valid bit only after every line of its log has been written and acknowledged, so a set flag means a complete log.

## One training batch

Host software drives the device through MMIO. CXL-GPU runs the MLPs. The
schedule, with the relaxed lookup, is:

1. **Write the indices** of batch N+1 into the sparse-feature window (`SF_BANK` selects the bank = batch parity).
2. **`CK_EMB`** (`BATCH` = N). The checkpointing logic logs, for every index of batch N, the current vector before batch N's update changes it. This is the undo log. At the end it writes the header with the persistent flag. `EMB_CNT` counts logged vectors.
3. **Early lookup of batch N+1**: `COMP_CMD = OP_LOOKUP | bank | defer`. The result goes into the reduced scratchpad but is not sent to the GPU yet.
4. **`CK_MLP`.** The checkpointing logic reads `MLP_SIZE` bytes of MLP parameters from the GPU (`MLP_ADDR`), one line per CXL.cache read, and writes them into the MLP log. `MLP_CNT` counts the lines.
   - The GPU answers only between its own kernels, so these reads may wait. The MLP log can run into the next batch.
   - An embedding-log request always takes precedence. The MLP log resumes afterwards.
   - When `MLP_CNT*64` reaches `MLP_SIZE`, the header is written valid.
5. **Gradients arrive.** The GPU's DCOH flush arrives as CXL.mem writes with address bit 30 set (the gradient window), one line per table line. They land in the gradient scratchpad.
6. **`OP_UPDATE`** (bank of batch N). For every occurrence of every index, the logic reads the line, subtracts `lr*g`, and writes the line back.
7. **`OP_CORRECT`** (bank = N+1, bank2 = N). For each table it counts `m`, the number of index pairs `(j,k)` with `idx_{N+1}[j] == idx_N[k]`, and subtracts `m*lr*g` from the reduced vector. The DCOH then flushes the reduced lines to the GPU.
   - A lookup without `defer` (the first batch) is flushed at once.
8. **Delete the old checkpoint.** Once the embedding and MLP flags are both set, the checkpointing logic invalidates the *other* slot's headers (`del_cnt` counts this).

**Recovery.** `CK_RESTORE` with a slot number checks that slot's embedding
header. If valid, it copies every logged vector back to its data-region
address. `STATUS.restore_ok` reports the outcome. The MLP log is read back by
host software over CXL.mem.

## Relaxed correction in detail

Write `R'` for the result of the early lookup on the old table. The correct
result after batch N's update is `R = R' - Σ_j Σ_k [idx_{N+1}[j] == idx_N[k]]
· (lr·g)`. Here `g` is table `t`'s gradient of batch N. The update subtracts
`lr·g` once per occurrence, so a row used twice in batch N was changed twice.

The correction walks `j` and `k` over the sparse-feature buffer, reading both
banks. For 80 lookups this costs about 80×83 cycles per table, but no PMEM traffic.
It then rewrites each reduced line once.

`lr·g` is rounded exactly as the update rounds it, and the sums wrap. The
corrected vector is therefore bit-equal to a lookup after the update. The
end-to-end test checks exactly that.

## Automatic data movement (DCOH)

`dcoh` keeps one state bit per reduced line: Modified or Invalid.

- **Marking.** A lookup or correction writing a line marks it Modified.
- **Flush walk.** On `flush_req` the DCOH walks lines 0..159. For each Modified line it reads the scratchpad and sends a D2H write of the line to `RED_BASE + 64*line` (the GPU-side buffer, set in `RED_LO`/`RED_HI`).
- **Completion.** It waits for the completion, then marks the line Invalid.
- **Re-written lines.** A line re-written during its own eviction stays Modified and is sent again.

CXL.cache requests carry an id. Id 0 is a DCOH write-back, id 1 a checkpoint
read. Each source has at most one outstanding request, so responses may return
in any order. A round-robin arbiter alternates the two sources when both
request.

## PMEM timing emulation

Each `pmem_mc` serves one request at a time. It returns the response this many
cycles after accepting it:

- **Reads:** `BASE_LAT*RD_X` = 12 cycles.
- **Writes:** `BASE_LAT*WR_X` = 28 cycles.

These are PMEM's 3× and 7× latency over DRAM, with a DRAM access taken as 4
cycles.

A read to the same 16-line row as the channel's last write, within 4096 cycles
of that write, pays 28 more cycles and pulses `raw_hit`. This models PMEM's
read-after-write slowdown, the effect the relaxed lookup avoids.

The media port does the access in the accept cycle, with read data one cycle
later. It can drive DRAM or an SRAM model. Bandwidth limits (PMEM's 0.6×/0.1×)
are not modelled separately.

## Register map (CXL.io, 32-bit, byte offsets)

| Offset | Name | Access | Meaning |
|---|---|---|---|
| 0x00 | COMP_CMD | W | `[1:0]` op (0 lookup, 1 update, 2 correct), `[4]` bank, `[5]` bank2, `[6]` defer |
| 0x04 | CK_CMD | W | `[1:0]` op (0 embedding log, 1 MLP log, 2 restore), `[4]` slot for restore |
| 0x08 | STATUS | R | bit 0 compute busy, 1 emb-log busy, 2 MLP-log busy, 3 DCOH busy, 4 emb flag, 5 MLP flag, 6 restore busy, 7 restore ok |
| 0x0C | VEC_LEN | RW | elements per vector (reset 32) |
| 0x10 | LR | RW | learning rate, Q16.16 |
| 0x14/0x18 | MLP_LO/HI | RW | GPU address of the MLP parameters |
| 0x1C | MLP_SIZE | RW | their size in bytes |
| 0x20 | NTABLES | RW | tables in the model |
| 0x24 | NLOOKUPS | RW | indices per table per batch |
| 0x28 | BATCH | RW | batch number recorded by the next log |
| 0x2C/0x30 | RED_LO/HI | RW | GPU address of the reduced-embedding buffer |
| 0x34 | SF_BANK | RW | bank written through the window |
| 0x38 | EMB_CNT | R | embedding-log counter |
| 0x3C | MLP_CNT | R | MLP-log counter (lines) |
| 0x8000 + 4e | SF window | W | index entry `e = t*80 + j` |

## Interfaces of `cxl_mem_top`

- **Handshakes.** All channels are valid/ready. A request is held until it is accepted. Responses are one-cycle pulses.
- **MMIO.** `mmio_wr`/`mmio_rd` are single-cycle strobes. Read data appears the cycle after the read strobe.
- **CXL.cache.** `d2h_*` is a request (`op`, 64-bit byte address, line, id). `h2d_*` is the response carrying the id and the read data.
- **CXL.mem.** `m2s_addr` is a 31-bit line address whose top bit selects the gradient window. `s2m_valid` pulses once per request, writes included.
- **Media.** One port per channel: `med_re`/`med_we`, the address, write data, and read data one cycle later.
- **Observation outputs.** `raw_hit`, `bus_conflict`, `comp_done`, `last_matches` (the match count of the last correction), `del_cnt`, `dcoh_evicted`, `dcoh_busy`.

## What follows the paper and what is this design's own

**Follows the paper:**
- the block structure: a CXL controller with MMIO registers and DCOH, computing logic, checkpointing logic, system bus, and four controllers with PMEM
- the MMIO-driven setup (vector length, learning rate, MLP address and size, sparse features per batch)
- lookup, update and relaxed lookup by commutativity
- DCOH-driven write-back of reduced embeddings, and gradients arriving from the GPU's flush
- the undo-logging embedding log, with a persistent flag
- the MLP log fetched over CXL.cache and finished when the counter matches the MLP size, with a persistent flag
- deleting the old checkpoint when both flags are set
- the DMA engine with two counters
- PMEM latency emulation with 3× reads and 7× writes
- the model sizes (80 tables, 80 lookups, dimension 32, 64 GB)

**This design's own choices:**
- the Q16.16 number format and 512-bit lines
- sum pooling and one gradient line set per table
- the register map and command encoding
- the two-bank sparse-feature buffer
- the log layout, header format and slot scheme
- the restore command
- the gradient window in CXL.mem space
- the two-state DCOH
- the CXL.cache id scheme and arbitration
- the bus interleaving and arbitration
- one outstanding request per master
- the base latency, and the row/window model of the read-after-write penalty

**Not built:**
- the CXL flit, link and physical layers (the top exposes transaction-level channels)
- PMEM bandwidth limits
- the GPU and the host

## Simulating

All testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/trainingcxl_pkg.sv tb/tb_util_pkg.sv rtl/*.sv \
  tb/pmem_model.sv tb/gpu_model.sv tb/tb_cxl_mem_top.sv \
  --top-module tb_cxl_mem_top -o sim && obj_dir/sim
```

Swap the last file and `--top-module` to run a block test (`tb_pmem_mc`,
`tb_system_bus`, `tb_dcoh`, `tb_compute_logic`, `tb_ckpt_logic`,
`tb_cxl_controller`, `tb_mmio_regs`, `tb_scratchpad`, `tb_sparse_feature_buf`).

Behavioural models and helpers in `tb/`:

- `pmem_model.sv` is sparse media. Unwritten lines read as `tb_util_pkg::init_line(addr)`.
- `gpu_model.sv` is the CXL.cache side of the GPU. It has an answer window and stores write-backs.
- `tb_util_pkg.sv` holds the reference arithmetic and data patterns.

`tb_cxl_mem_top` runs the top with every parameter at its default. It trains 4
batches of a 3-table model, 5 lookups per table, dimension 32, in the relaxed
schedule.

- **Shadow-model checks.** Every reduced line the GPU receives, the final table, both logs and their headers, the deletions, and a restore after a simulated failure are all checked against an independent shadow model.
- **Mechanism counts.** It requires each mechanism to occur: RAW stalls, bus conflicts, corrections with shared indices, MLP-log reads held by the GPU, the MLP log spanning batches, evictions, and deletions.

A larger model only lengthens the run. Every loop bound comes from the
registers.

## Trust and limits

- **Equivalence.** The relaxed schedule is checked for bit equivalence against a non-relaxed reference. The checkpoint is checked for exact contents and for restoring a corrupted table.
- **Cycle counts.** Latencies are checked cycle-exactly in the controller test. The throughput of the whole device is not calibrated against any hardware.
- **Request concurrency.** Every master has one request in flight at a time. Embedding work therefore runs at roughly one line per PMEM latency per master, not at the bandwidth four channels could give.
- **Host-side ordering.** A real host must order its commands as listed above. The device does not check, for example, that `OP_UPDATE` for batch N is issued only after `CK_EMB` of batch N has finished. Software polls `STATUS`.
- **Index ranges.** Indices must be below 2^21, and table numbers below 128.
