# CARAM: a deduplicating memory controller for hybrid DRAM/PCM main memory

A large share of the 256-byte lines that a server writes back to main memory
hold content that is already in memory somewhere else: zero-filled pages,
copies of the same file in several page caches, virtual-machine images. CARAM
is a memory controller that stores such a line only once. Every written line is
fingerprinted. If a line with the same fingerprint and the same data is already
stored, the write is not performed. Instead, the logical line address is mapped
to the stored copy.

The main memory behind the controller is hybrid:

- a small DRAM, which also holds the controller's metadata and a write buffer;
- a large phase-change memory (PCM), which is dense and non-volatile but slow
  to write and wears out with writes.

Removing duplicate writes saves PCM lifetime and write energy. It also makes
the memory hold more distinct content.

This repository contains synthesizable SystemVerilog for the controller, one
module per block, and a self-checking testbench for every block.

## Block diagram

```
 host (last-level caches)
   | rq_*                                        ^ rs_*
   v                                             |
 request queue --> deduplicator ------------> response queue
                   |  (SuperFastHash unit)
          +--------+--------+-----------+
          v        v        v           v
        LFI       AMT   free-line   address map / scheduler
     fingerprint  LLA->PLA allocator   |-> DRAM channel --> DRAM devices
       index      table                 '-> write buffer -> PCM channel --> PCM devices
```

Three kinds of address appear throughout:

- **LLA** (logical line address): the address the host uses, one per 256-byte line.
- **PLA** (physical line address): where a line's content is stored.
- **LFP** (line fingerprint): a 32-bit SuperFastHash of the line's 256 bytes.

## Physical line space

The DRAM data partition and the PCM together form one space of physical lines:

- PLA 0 … 3,670,016−1: DRAM data partition. This is the 2 GB DRAM minus 640 MB
  for the LFI and 512 MB for the AMT, divided by 256 B per line.
- PLA 3,670,016 … 37,224,448−1: PCM, 8 GB = 33,554,432 lines.

Allocation (`line_alloc`):

- A bump pointer hands out never-used lines, starting with PLA 0.
- Freed lines go onto a LIFO stack and are handed out first.
- DRAM lines are therefore used before PCM lines.
- When both the pointer and the stack are exhausted, a write that needs a new
  line is refused with `ST_WR_FULL`.

The original design relies on the operating system's page cache to evict pages
to disk. That eviction is outside the controller and is not modelled.

## Metadata tables

Both tables are direct-mapped hash tables with 2^26 entries, the size the
design budgets for a 16 GB memory. The low 26 bits of the key select a slot and
the remaining key bits are stored as a tag.

In the intended system the tables live in battery-backed DRAM. Here each table
is a dedicated single-port array with one-cycle access. Each table answers a
command two cycles after accepting it.

After reset, each table clears itself one entry per cycle: 2^26 cycles at full
size. `init_done` rises when clearing is finished. Requests are queued until
then.

### Line fingerprint index (`lfi_table`)

- Maps an LFP to {PLA, 16-bit reference count}. The reference count is the
  number of LLAs that share the line.
- Commands: LOOKUP, INSERT, INCREF and DECREF.
- INSERT only succeeds into an empty slot. If the slot is taken by another
  fingerprint, the new line stays *unindexed*: it is stored and mapped, but
  later writes of the same content cannot find it. The deduplication is
  therefore approximate. A few duplicates survive, but no data is lost.
- DECREF is only applied if the entry still points at the PLA being released.
- An entry whose count reaches zero is deleted, and the caller frees the line.

### Address mapping table (`amt_table`)

- Maps an LLA to a PLA. Many LLAs may map to one PLA.
- An update of a slot that holds a *different* LLA displaces that LLA. Its line
  is released exactly as if the page had been evicted. That LLA then reads as
  non-resident (`ST_RD_MISS`).

## Deduplicator (`dedup_ctrl`, `sfh_unit`)

The deduplicator handles one request at a time.

### Fingerprint

`sfh_unit` computes Paul Hsieh's SuperFastHash over the 256 bytes at one byte
per cycle:

- one 32-bit round every four cycles;
- then one cycle for the final avalanche;
- 257 cycles per line in total.

A write therefore spends most of its time hashing.

### Write flow

1. Hash the line and LOOKUP the LFI.
2. **Fingerprint hit:** read the stored line and compare all 256 bytes.
   SuperFastHash is not collision-free: the testbenches contain two lines with
   equal fingerprints and different data. If the data differs, the write is
   treated as new content.
3. **Duplicate content:** look up the LLA in the AMT.
   - If it already maps to that PLA, the write is dropped (`ST_WR_DROP`).
   - Otherwise the LLA is pointed at the PLA and the count is incremented
     (`ST_WR_SHARE`). If the LLA previously mapped to another line, that line
     is released.
   - A line whose count is saturated is not shared.
4. **New content:**
   1. Allocate a PLA and write the line through the scheduler.
   2. INSERT its fingerprint in the LFI.
   3. Update the AMT. The status is `ST_WR_NEW` if the LLA was unmapped and
      `ST_WR_UPD` if it replaced a mapping.
5. **Releasing a line** (update, sharing over an old mapping, or displacement):
   - The LFI is keyed by fingerprint, and the old fingerprint is not stored
     anywhere. The deduplicator therefore reads the old line back and hashes it
     again, then DECREFs that fingerprint.
   - When the count reaches zero, or when the line was never indexed, the line
     is returned to the allocator.

### Reads

A read looks up the AMT:

- if the LLA is mapped, the line at its PLA is read (`ST_RD_HIT` with the data);
- otherwise the status is `ST_RD_MISS`.

### Response status

`rs_status` takes one of these values (`caram_pkg::status_e`):

- `ST_RD_HIT`, `ST_RD_MISS`
- `ST_WR_NEW`, `ST_WR_UPD`, `ST_WR_SHARE`, `ST_WR_DROP`, `ST_WR_FULL`

Responses come back in request order. `rs_lla` echoes the request.

## Address map, write buffer and channels (`addr_sched`, `write_buffer`, `chan_ctrl`)

`addr_sched` decides where a PLA lives.

**Device address.** A PLA below `DRAM_DATA_LINES` is in the DRAM. Otherwise it
is in the PCM, at the offset PLA − `DRAM_DATA_LINES`. The device line number is
split from the LSB up:

| Field | Width |
|---|---|
| column | 4 bits (16 lines per row) |
| bank | 3 bits |
| row | 13 bits (DRAM, 8192 rows) or 15 bits (PCM, 32768 rows) |
| rank | 3 bits |

With these widths the DRAM is 2^23 lines (2 GB) and the PCM 2^25 lines (8 GB).

**Writes.**

- DRAM writes go straight to the DRAM channel.
- PCM writes go into `write_buffer`, a 32-line FIFO standing for the DRAM write
  buffer, and are acknowledged at once.
- The buffer drains to the PCM channel in order.
- A write to a PLA that is already waiting overwrites the waiting copy.
- A PCM read that hits the buffer is served from it.
- A PCM read that misses the buffer has priority over the drain.
- A full buffer stalls the write.

**Channels.** `chan_ctrl` is one channel controller, instantiated once for the
DRAM and once for the PCM. It uses a closed-page policy with one access at a
time:

- ACT at cycle 0;
- RD or WR at tRCD;
- PRE at tRAS;
- the next ACT no earlier than max(tRC, tRAS+tRP).

Each access moves a whole line in one beat. The timings are in controller
cycles:

| | tRAS | tRCD | tRC | tRP |
|---|---|---|---|---|
| DRAM | 36 | 22 | 96 | 60 |
| PCM | 15 | 5 | 20 | 5 |

Read data arrives on `*_rvalid`/`*_rdata` after the device's latency.

### Interaction of the paths

Hashing is slow compared with the PCM: 257 cycles against a 20-cycle write. As
a result, in the assembled controller the write buffer never fills and a read
never finds its line still waiting. Both of those cases are exercised in the
`addr_sched` testbench.

## Top level (`caram_top`)

`caram_top` connects all of the blocks. Its interface:

- **Host request:** `rq_valid/rq_ready/rq_op/rq_lla/rq_data`. The line's byte i
  is in bits [8i+7:8i].
- **Host response:** `rs_valid/rs_ready/rs_status/rs_lla/rs_data`.
- **Device command buses:** `dram_*` and `pcm_*`, which connect to the devices.
- **Status outputs:**
  - `used_lines`, the number of physical lines in use;
  - `wb_count`, the write buffer occupancy;
  - event pulses `ev_lfi_full` (line left unindexed), `ev_displace`,
    `ev_release`, `ev_free`, `ev_wb_hit`, `ev_wb_stall` and `ev_wb_drain`.

### Parameters

| Parameter | Default | Origin |
|---|---|---|
| `LFI_IDX_W`, `AMT_IDX_W` | 26 | table sizes for a 16 GB memory |
| `DRAM_DATA_LINES` | 3670016 | 2 GB DRAM minus the two tables |
| `PCM_LINES` | 33554432 | 8 GB PCM |
| `DRAM_NUM_ROWS`, `PCM_NUM_ROWS` | 8192, 32768 | device tables |
| `WB_ENTRIES` | 32 | own choice |
| `Q_DEPTH` | 8 | own choice |
| `BANK_W`, `COL_W`, `RANK_W` | 3, 4, 3 | own choice |

At the defaults the two tables hold 2^26 entries each, so a simulation needs
about 1.2 GB of memory. Synthesis of these arrays with a generic flow is not
practical. A real implementation puts them in the DRAM behind the DRAM channel.

## Where this design departs from, or adds to, the original description

- **Table location.** The LFI and the AMT are modelled as dedicated arrays, not
  as DRAM traffic on the DRAM channel. Table accesses therefore cost no DRAM
  bandwidth here.
- **Where the hash is computed.** One passage computes the fingerprint in the
  CPU, another in the deduplicator. This design computes it in the
  deduplicator.
- **Own choices where the original is silent:**
  - hash-table organisation: direct-mapped, with refused inserts;
  - how an old fingerprint is found: read back and rehash;
  - allocation policy;
  - queue and buffer sizes;
  - bank, rank and column counts;
  - the closed-page, single-beat channel protocol.
- **Not modelled:**
  - device width and burst timing;
  - page migration between DRAM and PCM;
  - the page-cache eviction policy;
  - the storage pool;
  - the battery backing.
- **Workloads.** The evaluation replays block traces whose largest has about
  3.9 M distinct lines. That fits the 37.2 M physical lines and 2^26-entry
  tables. The traces carry only fingerprints, so running them needs synthetic
  line data.

## Verification

Each block has a testbench in `tb/` that compares the block against an
independent model and prints `TB_RESULT checks=N failures=M`.

Support files:

- `tb_ref_pkg.sv`: a software SuperFastHash and a line generator.
- `hm_device_model.sv`: a behavioural DRAM/PCM device. It checks ACT/RD/WR/PRE
  timing and stores lines.

Top-level testbenches:

- **`tb_caram_top`** runs the whole controller with small tables: 64 entries,
  16 DRAM + 32 PCM lines. It uses several hundred random requests. It counts
  and requires at least once:
  - every response status;
  - a fingerprint match with different data;
  - unindexed lines, AMT displacement, release and freeing of lines;
  - DRAM and PCM writes and write-buffer drains;
  - request-queue back-pressure.

  It also checks that the number of used lines equals lines allocated minus
  lines freed.
- **`tb_caram_workload`** replays the four evaluated block traces (mail,
  web-vm, homes, web-users) in scaled-down form: 32 blocks of 16 lines each.
  The fraction of distinct blocks is taken from each trace's unique and total
  write counts. All 16 lines of a block carry the same content, because the
  traces record one fingerprint per 4 KB block. The testbench checks that:
  - exactly one line is stored per distinct block;
  - every other write is shared;
  - every line reads back correctly.

  The printed write reduction (about 95 %) mostly reflects the identical lines
  within a block. It is not a prediction of the original evaluation's
  results.
- **`tb_caram_full`** runs the controller at the default sizes. It checks that
  the clearing sweep lasts 2^26 cycles, then runs new, duplicate, shared,
  updated and read requests through it. It takes about 1.5 minutes and 1.2 GB.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/caram_pkg.sv tb/tb_ref_pkg.sv tb/tb_caram_top.sv --top-module tb_caram_top
./obj_dir/Vtb_caram_top
```

Reset and initialise everything that is read, since the testbenches are run
with random initial values.
