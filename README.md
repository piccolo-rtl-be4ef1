# Piccolo memory side in SystemVerilog

This is RTL for the memory side of Piccolo, a graph-processing accelerator built around fine-grained in-memory scatter-gather. The design has three parts:

- **Piccolo-FIM.** An in-DRAM gather/scatter unit in every bank of every DDR4 device, driven by standard DDR4 commands only.
- **Piccolo-cache.** A cache of 8-byte items.
- **Collection-extended MSHR (CE-MSHR).** It groups cache misses and write-backs by DRAM row, so that eight items move with one gather or scatter.

Everything is synthesizable SystemVerilog (IEEE 1800-2017) in `rtl/`. Every block has a self-checking testbench in `tb/`.

## Structure

```
update engines ──core_req/resp──► piccolo_cache ──miss / write-back──► ce_mshr
                                        ▲                                 │ gather / scatter (8 offsets)
                                        └────────── returned items ───────┤
                                                                          ▼
                                                                    fim_cmd_gen ── DDR4 ACT/PRE/RD/WR ──►
   4 ranks × 4 x16 devices (fim_chip) ── per bank: fim_internal_ctrl + fim_offset_buffer + fim_data_buffer
                                                          │ column path (arr_*)
                                                          ▼
                                                 DRAM cell array (outside the RTL)
```

| File | Function |
|---|---|
| `rtl/piccolo_pkg.sv` | Shared constants, DDR4 timing, the command and operation structs, the event struct and the item address map. |
| `rtl/fim_offset_buffer.sv` | Per-bank buffer of eight 16-bit column offsets, loaded by one write burst. |
| `rtl/fim_data_buffer.sv` | Per-bank 128-bit buffer of eight 16-bit words. Gathered words collect here; scatter words wait here. |
| `rtl/fim_internal_ctrl.sv` | Per-bank controller. It decodes commands to the virtual rows and runs eight internal column accesses spaced by tCCD_L. |
| `rtl/fim_chip.sv` | One x16 DDR4 device: bank decode, the three FIM parts per bank, and the CAS-latency pipeline. |
| `rtl/fim_cmd_gen.sv` | Memory-controller side. It turns one collected gather or scatter into a DDR4 command sequence. |
| `rtl/piccolo_cache.sv` | 4 MB, 8-way fine-grained cache with a 32-entry request queue to the CE-MSHR. |
| `rtl/ce_mshr.sv` | Collection-extended MSHR: 4096 direct-mapped entries of 8 GA + 8 SC offsets. |
| `rtl/piccolo_top.sv` | Connects all of the above for one channel with four ranks. |

## How it works

### Piccolo-FIM

**Virtual rows.** Each bank has two virtual rows: y (row 0xFFFE) and z (row 0xFFFF). They are the two highest row addresses, and no cells back them. In a virtual row:

- column 0 (the first burst) addresses the offset buffer;
- column 8 (the second burst) addresses the data buffer.

**Buffers.** Each device holds a 16-bit slice of every 64-bit item, and each buffer is 8 × 16 bits. The host puts the same eight offsets on all four devices of a rank: beat k carries offset k on every device.

**Bank controller behaviour.**
- ACT and PRE to a virtual row are no-ops, so the physical target row x stays in the sense amplifiers.
- A WR to the offset buffer loads the eight offsets and starts a gather. Every tCCD_L = 6 cycles, the controller reads the column burst at offset[9:3] of row x. It puts word offset[2:0] of that burst into the data buffer.
- A WR to the data buffer of the same virtual row starts a scatter instead. The controller writes each word into row x with a one-word write mask.
- The eighth internal access comes 1 + 7·6 = 43 cycles after the offset write.
- A RD to the data buffer returns the buffer contents after CL.
- RD and WR to physical rows behave as in a normal DRAM.
- Precharge is lazy. PRE closes only the row the controller sees. The physical row is replaced when an ACT to another physical row arrives.

**Command generator.** It handles one operation at a time:

| Operation | Command sequence |
|---|---|
| Gather | `[PRE] ACT x (tRAS) PRE (tRP) ACT v (tRCD) WR v.ofs (tBURST+tWR) PRE (tRP) ACT v' (tRCD) RD v'.data` |
| Scatter | `… WR v.ofs (tCCD_L) WR v.data (tBURST+tWR) PRE (tRP) ACT v'` |

- v is the virtual row currently open and v' is the other one.
- The commands before the first WR are skipped when the right rows are already open.
- The PRE/ACT to the other virtual row gives the bank tWR + tRP + tRCD = 50 cycles, which is more than the 43 cycles of internal work. Closing a scatter with the same PRE/ACT plays the part of the paper's dummy write.
- With the rows already in place, a gather costs 75 cycles from acceptance to the returned items.
- An operation uses two data bursts on the channel; eight separate accesses would use eight.

### Piccolo-cache

**Address split.** A 48-bit byte address splits as tag 21 | fg-tag 8 | set 12 | fg-offset 4 | byte 3. Each 128 B line has:
- one tag;
- 16 sectors of 8 B, each with its own valid bit, dirty bit and 8-bit fg-tag.

**Lookup.**
- All 8 tags of the set are compared in the same cycle.
- The matching ways are then searched one per cycle for the fg-tag.
- A hit in the first matching way answers 3 cycles after acceptance.

**Replacement on an fg miss:**
1. Use an empty sector slot in a line with the same tag.
2. Otherwise, if the tag owns fewer than `alloc_ways` lines, evict the LRU line of another tag. An invalid way is taken first.
3. Otherwise, evict only the sector in the LRU line with the same tag.

Dirty sectors that leave are written back one item at a time.

**Misses and writes.**
- A read miss allocates when its data return.
- A write allocates without a fetch.

**Deadlock avoidance.** The cache never blocks halfway through an operation:
- a core request starts only if the 32-entry queue to the CE-MSHR has more than 16 free entries;
- a fill that arrives with fewer than 16 free entries is returned to the requester without being kept.

Together these rules guarantee that the cache always drains the CE-MSHR's responses.

### CE-MSHR

**Entries.** An entry is selected by the low 12 bits of the DRAM row identity {row, rank, bank}. It holds:
- 8 gather offsets, each with up to 4 waiting requester ids;
- 8 scatter offsets with their write-back data.

**Request handling.** A request is compared with the entry's offsets one per cycle, in the paper's order:
1. An SC hit serves a read from the write-back data. A write-back that hits SC replaces the data.
2. A GA hit adds a subentry.
3. Otherwise the request takes a new slot.

**Issue rules.**
- Eight offsets trigger a gather or a scatter.
- A request for a different row on the same entry first issues the entry's partial operations.
- A full subentry list issues the gather early.
- A write-back whose offset is pending in GA is stored in SC.
- A pending scatter always goes out before the gather of the same entry, so gathers see written data.
- `flush` issues every partial operation, for example at the end of a tile. In the top, it waits until the cache's queue is empty.

**Returns.** Up to four gathers can be in flight. They return in order, and every subentry gets a response.

### Item address map

An 8-byte item address (the byte address without its low 3 bits) maps to DRAM as follows:

| Bits | Field |
|---|---|
| [9:0] | column (16-bit word within a 2 KB device page) |
| [12:10] | bank |
| [14:13] | rank |
| [30:15] | row |

A DRAM row therefore holds 1024 consecutive items, and the four ranks hold 2^31 items (16 GB).

## Interfaces

- **`piccolo_top`.**
  - `core_req_*` is a valid/ready request: byte address, write, data and an 8-bit id.
  - `core_resp_*` returns read data by id, with no back-pressure.
  - `alloc_ways` sets the way partitioning of the current tile.
  - `flush` and `flush_busy` drain partial operations. `mem_idle` is high when nothing is in flight.
  - `arr_*[rank*4+chip][bank]` is the column path of every bank: row open, column read/write with a word mask, and read data.
  - `ddr_cmd_*` mirrors the command bus for monitoring.
  - `ev` carries one-cycle pulses for every mechanism.
- **Inner interfaces.** Each module's opening comment gives its interface and timing.
- **Clock and reset.** All modules use one clock and a synchronous active-low reset.
- **Start-up.** After reset, the cache and the CE-MSHR clear their tables in 4096 cycles. Requests are held off until then.

## Parameters

The defaults are the paper's main configuration where it gives one:

| Setting | Value | Source |
|---|---|---|
| Items per gather/scatter | 8 | paper |
| Cache | 4 MB, 8 ways, 128 B lines of 16 × 8 B sectors, 8-bit fg-tags | paper |
| CE-MSHR | 4K entries | paper |
| Memory | four ranks of x16 DDR4-2400R | paper |
| tCCD_L / tCCD_S / tRAS / tBURST | 6 / 4 / 39 / 4 nCK | paper |

Values that are this design's own choice:

| Setting | Value | Why |
|---|---|---|
| tRCD / tRP / tWR / CL | 16 / 16 / 18 / 16 nCK | DDR4-2400R values. The paper gives only tWR + tRP + tRCD ≈ 41.64 ns. |
| Subentries per offset | 4 | Not given by the paper. |
| Gathers in flight | 4 | Not given by the paper. |
| Cache request queue | 32 entries | Not given by the paper. |
| Channels | 1 | Not given by the paper. |
| Device size | 8 Gb: 65536 rows × 8 banks × 2 KB | Not given by the paper. |

## Differences from the paper, and limits

- **Banks per device.** The design has **8 banks per device**, as in a x16 DDR4 device and the paper's bank figure. The paper's FPGA emulation and its area estimate speak of 16 banks. `NUM_BANKS` in the package sets this.
- **Clock.** One clock runs the whole design, in DRAM cycles. The paper's accelerator runs at 1 GHz and DDR4-2400 at 1.2 GHz; the two domains are not separated.
- **Operations in flight.** One FIM operation is in flight per channel. Operations to different banks are not overlapped, which the paper's "bank parallelism" remark would allow.
- **Write timing.** Write data travel with the WR command; write latency (CWL) is not modelled.
- **Virtual-row positions.** The exact positions of the virtual rows and buffers are this design's choice.
- **Workloads.** The graphs of the paper's evaluation fit in the modelled 16 GB, counting 8 B per vertex property and 8 B per edge. The exception is Kronecker scale 28 (268M vertices, 2684M edges, about 23.6 GB), which does not.
- **Blocks not built.** These parts are described only by name, or are standard parts the paper does not design:
  - the DRAM cell arrays, sense amplifiers and device I/O;
  - the rest of the DDR4 memory controller (refresh, scheduling);
  - the prefetcher, the processing elements, the crossbar and the updaters of the accelerator.

  The top brings their signals out as ports. `tb/dram_array_model.sv` is a behavioural stand-in for the cell arrays.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_fim_offset_buffer` | Random bursts read back by index. |
| `tb_fim_data_buffer` | Bursts, word deposits and word reads against a reference copy, including the write priority. |
| `tb_fim_internal_ctrl` | One bank with the array model. Virtual ACT/PRE are no-ops. A gather picks the right words in exactly 1 + 7·tCCD_L cycles. A scatter writes only the addressed words. Normal RD/WR work. Protocol errors are flagged. |
| `tb_fim_chip` | A gather and a scatter running at the same time in two banks. Read data arrive exactly CL after RD. No protocol error. |
| `tb_fim_cmd_gen` | One rank of four devices. Gather from a closed bank, scatter, gather back, and a row switch. Item values, command counts per operation, and the exact gather latency (75 cycles). The bank is never busy when its buffers are next touched. |
| `tb_piccolo_cache` | Full size. Hit and hit latency, miss, sector-only eviction under way partitioning, whole-line eviction with 16 write-backs, a fill dropped with a full queue, and random traffic against a scoreboard. |
| `tb_ce_mshr` | Full size. Eight reads make one gather; eight write-backs make one scatter. SC hit, GA merge, full subentry list, row conflict, flush, and random traffic with in-order gather returns. |
| `tb_piccolo_top` | The whole design at its default parameters, with a model array behind each of the 16 devices. About 7,000 requests are checked against a scoreboard. It counts all 13 mechanisms and fails if any never happens. It also checks two data bursts per FIM operation and no DRAM protocol error. It runs in a few seconds. |
