# PIM-MMU: a copy engine and address mapper for DRAM <-> PIM transfers

In a commercial processing-in-memory (PIM) system of the UPMEM kind, the PIM
cores sit inside DRAM chips on ordinary DDR4 DIMMs, next to the host's normal
DRAM DIMMs on the same memory controller. Before a PIM core can compute, the
host must copy its input from host DRAM into that core's private memory
(MRAM), and copy results back afterwards. Done in software, these copies are
slow, for three reasons:

1. **Byte transposition.** A PIM rank's 64-bit bus is split byte-wise over
   8 chips, and each chip holds its own PIM cores. A 64-bit word meant for one
   core must therefore be cut into 8 bytes and sent one byte per bus beat on
   that chip's lane. The CPU does this reshuffle in software.
2. **No memory-level parallelism.** The PIM side maps every PIM bank to one
   contiguous block of addresses, because a core must own its bank. A software
   copy that streams core by core hits one bank at a time, so most banks,
   bank groups and ranks idle.
3. **One shared mapping.** Host DRAM is often given the same
   locality-centric map, which concentrates a stream on a few channels.

The PIM-MMU fixes all three in hardware next to the memory controller:

* a **data copy engine (DCE)** performs a whole transfer for all 512 PIM
  cores, with a hardware transpose unit. The driver only describes it through
  memory-mapped registers and waits for an interrupt;
* a **PIM-aware memory scheduler (PIM-MS)** inside the DCE. The engine may
  order the independent per-core copies however it likes, so it interleaves
  them to hit a different bank group, then rank, then bank on every request;
* **HetMap**, a dual address map in the memory controller. PIM addresses keep
  the locality-centric map that PIM needs. DRAM addresses get an MLP-centric
  map: channel bits near the bottom of the address, XOR-hashed, so streams
  spread over all channels.

The RTL in `rtl/` implements the DCE, PIM-MS and HetMap. The host CPU, the
memory controller's queues and command scheduler, and the DRAM and PIM
devices are not designed here. The testbenches model them behaviourally
(`tb/mem_model.sv`).

## System and block structure

```
                 MMIO / irq                                   host LLC misses
                     |                                              | host_pa
 +-------------------v------------------------------------------+   |
 | pim_mmu                                                      |   |
 |  +-------------------- dce --------------------------+       |   |
 |  | dce_ctrl (registers, start, irq)                  |       |   |
 |  |   lane g = 0..3 (one per channel, all in parallel)|       |   |
 |  |   addr_buf (128 entries) -- pim_ms -- agu x2      |  pa   |   |
 |  |   data_buf (8 tiles x 8 lines) -- preproc         |------>| hetmap (per lane, rd & wr) --> mc_rd_* / mc_wr_*
 |  +---------------------------------------------------+  <----------------------------- mc_rsp_* (data + tag)
 |  hetmap (host path) ------------------------------------------------------------------> host_map
 +--------------------------------------------------------------+
```

| file | role |
|---|---|
| `pimmmu_pkg.sv` | geometry, widths, address-map constants, shared types |
| `hetmap.sv` | physical address -> device address (PIM or DRAM map) |
| `agu.sv` | forms one DRAM address and one PIM address from entry, unit, heap and offset |
| `addr_buf.sv` | one bank of the address buffer: per-core DRAM base, valid bit, Offset counter |
| `data_buf.sv` | one 4 KB bank of the data buffer, as 8 tiles of 8 lines |
| `preproc.sv` | 8x8 byte transpose of a tile, both directions, one cycle |
| `pim_ms.sv` | one scheduler lane: issue order, tile bookkeeping, write-back |
| `dce_ctrl.sv` | MMIO register file, start pulse, busy, interrupt |
| `dce.sv` | the controller plus four lanes |
| `pim_mmu.sv` | top: the DCE plus HetMap on every request path |

## Geometry and the PIM core ID

There are 4 channels with 2 ranks each, and 8 PIM chips per rank. Each chip
has 8 banks, with one PIM core per bank, split here as 4 bank groups x 2 banks.
That gives 4 x 2 x 8 x 8 = 512 PIM cores, each with 64 MB of MRAM.

A **bank unit** is one (channel, rank, bank group, bank). Because the bus word
is spread over the chips, one bank unit holds 8 PIM cores, one per byte lane.
The PIM core ID is

```
id[8:0] = { ch[1:0], ra, bg[1:0], bk, chip[2:0] }
```

Inside a channel, this gives the bank-unit number `ra*8 + bg*2 + bk`, the
order the scheduling loop uses, with the chip as the lowest digit. Each
channel lane owns 16 bank units, i.e. 128 cores, and the address-buffer
entries of exactly those cores.

## Address maps (HetMap)

Physical addresses are 36 bits. The PIM region `[pim_base, pim_limit)` is set
at boot; the design assumes 32 GB. Every other address is DRAM. `ofs` is the
address minus the region's base.

**PIM region, locality-centric `ChRaBgBkRoCo`:**

| ofs bits | 34:33 | 32 | 31:30 | 29 | 28:13 | 12:3 | 2:0 |
|---|---|---|---|---|---|---|---|
| field | ch | ra | bg | bk | row | col | byte lane = chip 7-b |

Each bank unit is one contiguous 512 MB block. Byte lane `b` (bus bits
`8b+7:8b`) belongs to chip `7-b`, so chip 0 drives the most significant byte.
The 3 low bits therefore pick the PIM core rather than a column.

MRAM byte `m` of core `c` (bank unit `u = c>>3`, chip `c&7`) sits at

```
pim_base + u*2^29 + 8*m + (7 - chip)
```

Each 64-bit bus word at a PIM address holds one byte for each of the 8 cores
of the unit. A 64 B burst holds 8 consecutive MRAM bytes of each of the
8 cores.

**DRAM region, MLP-centric.** Field order from the MSB is
Ro Bk Bg Ro Ra Co Bg [Ch] Co:

| ofs bits | 34:27 | 26:25 | 24 | 23:17 | 16 | 15:9 | 8 | 7:6 | 5:3 | 2:0 |
|---|---|---|---|---|---|---|---|---|---|---|
| field | row[14:7] | bk | bg[1] | row[6:0] | ra | col[9:3] | bg[0] | channel slot | col[2:0] | byte |

The channel bits are not taken from bits 7:6 directly:

* `ch[0]` is the XOR of offset bits 6, 17, 19, 21, …, 31;
* `ch[1]` is the XOR of offset bits 7, 18, 20, …, 32.

Each mask contains its own slot bit and not the other one, so the map stays
one-to-one. Consecutive 64 B lines rotate over the channels. Row bits flip the
hash, so strided streams do not pile onto one channel. The field order is the
published one; the exact widths and tap positions are this implementation's
choice.

HetMap is combinational. The top instantiates it on each lane's read path, on
each lane's write path and on the host path.

## The byte transpose

A tile is the 8 lines of one bank unit at one line offset:

* in DRAM layout, line `c` holds 64 bytes of core `c`'s data;
* in PIM layout, burst `k` is eight 64-bit beats `r = 0..7`.

Beat `r` of burst `k` carries byte `r` of word `k` of every core, each core on
its own chip's lane:

```
PIM burst k, bits 64r + 8(7-c) +: 8   =   DRAM line c, bits 64k + 8r +: 8
```

DRAM->PIM applies this mapping and PIM->DRAM applies its inverse. `preproc`
does a whole tile in one registered cycle. Byte `r` of a word is taken as its
r-th least significant byte, as on a little-endian host.

## One transfer, as the driver sees it

Registers are 64-bit, at word addresses on `mmio_addr`. Reads return one
cycle after `mmio_re`.

| addr | access | meaning |
|---|---|---|
| `0x000` CTRL | W | bit0 start, bit1 direction (0 DRAM->PIM, 1 PIM->DRAM), bit2 invalidate all entries, bit3 clear irq |
| `0x001` SIZE | R/W | bytes per PIM core, a multiple of 64 |
| `0x002` HEAP | R/W | MRAM byte address where each core's data starts, a multiple of 8 |
| `0x003` STATUS | R | bit0 busy, bit1 irq |
| `0x400+id` | W | entry of core `id`: bit63 valid, bits 35:0 DRAM address of its data |
| `0x800+id` | R | Offset of core `id`: 64 B lines read so far in the current transfer |

To run a transfer, the driver:

1. writes one entry per participating core;
2. writes SIZE and HEAP;
3. writes CTRL with start and the direction.

`busy` rises and every lane's Offsets clear. When all four lanes report done,
`busy` falls and `irq` rises and stays high until cleared through CTRL bit 3.

The following are ignored while busy:

* a second start;
* writes to SIZE and HEAP;
* the invalidate bit.

A core whose entry is not valid is left out of the transfer: its MRAM is
never written and its DRAM buffer is never touched.

## The scheduler lane (PIM-MS)

Each channel has its own lane, and all four lanes start together. A lane
walks its channel's bank units in the order

```
for round = 0 .. SIZE/64 - 1
  for bk: for ra: for bg:          -- bg changes fastest
    visit bank unit (ra, bg, bk)
```

Consecutive visits therefore move to a new bank group, which has the short
column-to-column delay. Next they move to the other rank, and only after that
to the other bank. `round` is the line offset that every core has reached.

A **visit** allocates a free tile and issues 8 reads, one per cycle while the
memory controller accepts:

* **DRAM->PIM:** line `c` at `entry[unit,c].dram + 64*round`. A core whose
  entry is not valid uses its cycle but issues no read.
* **PIM->DRAM:** the 8 PIM bursts `k` of the unit at MRAM byte
  `heap + 64*round + 8k`, always all 8.

Each read carries the tag `{slot, line}`. Returns may come back in any order.
Each return is written straight into its tile's line.

Tiles **retire in allocation order**. When the oldest tile is complete, it is
read, transposed and written out with up to 8 writes:

* **DRAM->PIM:** burst `k` to the PIM address. Its 64-bit byte enable is
  cleared on the lanes of cores that are not in the transfer, so their MRAM
  keeps its contents (the DDR4 data mask).
* **PIM->DRAM:** line `c` to `entry[unit,c].dram + 64*round`, for valid cores
  only.

The lane **stalls** in two cases:

* the memory controller's read queue is full (`rd_req_ready` low): the request
  is held unchanged;
* the next tile is still busy, i.e. the data buffer is full.

Both conditions appear on the `stall_rd` and `stall_full` ports.

**Offset counters** count lines read per core. In DRAM->PIM they count up as
each read returns. In PIM->DRAM they count up for all valid cores of the unit
when the tile's last burst returns. Addresses are generated from the lane's
round counter, which equals every core's issue offset. The stored Offset
records read progress, so software can see how far a transfer has got.

**Buffers.** The 64 KB address buffer and the 16 KB data buffer are each split
into four banks, one per lane:

* address buffer: 128 entries per lane; only DRAM address, valid bit and
  Offset are stored;
* data buffer: 8 tiles x 8 lines x 64 B = 4 KB per lane.

**Timing.** A lane issues at most one read per cycle and one write per cycle.
With a memory that always accepts, a lane issues 64 reads in 64 cycles, plus
one cycle per skipped core. Write-back of a tile takes one cycle to start, one
cycle to transpose, then 8 write cycles. The tile pipeline hides this behind
the reads of the following tiles.

With the random-ready, random-latency model in the testbenches (reads accepted
70% of cycles, writes 70%, latency up to 30 cycles), 1 MB in all (2 KB per
core) moves in about 6,970 cycles in each direction.

## What follows the published design, and what is chosen here

Taken from the published design:

* the three mechanisms (copy engine with transpose, bank-group-first
  scheduling loop, dual address map);
* one scheduler lane per channel;
* the ChRaBgBkRoCo PIM map and the Ro Bk Bg Ro Ra Co Bg Ch Co field order of
  the DRAM map;
* 512 cores, 4 channels, 2 ranks, 8 chips per rank;
* a 64 KB address buffer and a 16 KB data buffer;
* a per-core entry of DRAM address and Offset;
* MMIO control with a completion interrupt.

Chosen here, where the description gives no detail:

* the 4 bank groups x 2 banks split;
* all field widths and the XOR taps of the DRAM map; a 36-bit physical address
  with 32 GB regions;
* the register map and the level interrupt;
* tiles of one bank unit, in-order retire, per-lane buffer banks;
* byte-masked PIM writes for cores left out;
* how a PIM->DRAM transfer is scheduled. The description says only that it
  mirrors DRAM->PIM. Here it reads whole bursts and writes per core;
* the Offset semantics. The scheduling pseudo-code advances the offset at
  issue, while the prose advances it when a read is serviced. Here the address
  comes from the issue-side round counter and the stored Offset counts
  returns;
* transfer size as bytes per core, in whole 64 B lines.

Not built: the host memory controller (queues, FR-FCFS scheduling, DDR4
timing), the DRAM and PIM devices, the host CPU and the software library and
driver. Their interfaces are the `mc_*` and `mmio_*` ports. The energy and
area figures of the evaluation are not reproduced.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_hetmap` | hand-worked addresses, the channel spread of a stream, 4,000 random addresses against an independent table-driven reference |
| `tb_agu` | random operands against the address formulas |
| `tb_addr_buf` | entry writes and reads on both ports, masked Offset increments, clears |
| `tb_data_buf` | random line writes and whole-tile reads |
| `tb_preproc` | the byte transpose against the formula, both directions, round trip, one-cycle latency |
| `tb_pim_ms` | one lane: exact read order of the loop nest, one issue per cycle, buffer-full stall, data and Offsets both ways |
| `tb_dce_ctrl` | register interface, start/busy/irq behaviour |
| `tb_dce` | four lanes on a physical-address memory; lanes stay on their channel and run concurrently |
| `tb_pim_mmu` | end to end, 256 B per core over all 512 cores (top at default parameters) |
| `tb_xfer_1mb` | the same at 1 MB in all |

The end-to-end harness (`pim_mmu_e2e`) drives the registers like a driver,
with every 37th core left out. The memory model stores data by device
address, so a wrong map breaks the data. The harness checks:

* every byte at its MRAM address and back in DRAM;
* that cores left out keep their MRAM;
* the Offsets, request counts, busy and irq;
* 200 random host addresses through HetMap.

It also counts each mechanism and fails if any never happens: read-queue
stall, buffer-full stall, out-of-order return, byte-masked write, skipped core,
host DRAM map and host PIM map.

Simulating with Verilator 5 (any testbench name in place of `tb_pim_mmu`):

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/pimmmu_pkg.sv tb/tb_ref_pkg.sv tb/tb_pim_mmu.sv --top-module tb_pim_mmu
./obj_dir/Vtb_pim_mmu
```

The largest size simulated is 1 MB in all. The largest evaluated size,
256 MB (512 KB per core), uses the same path. It fits the registers
(SIZE < 2^21 lines per core) and the 64 MB MRAM, but takes about 256 times as
many cycles.

## Lint notes

`pim_ms` leaves the valid bit of its write-side entry read unused, because
the tile keeps the valid mask captured at issue. Its assertions use `rst_n`
in their disable condition, which lint reports as a reset net also used
synchronously.
Modules that use only some of the package's constants draw lint notes about
the unused ones.
