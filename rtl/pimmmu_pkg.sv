// pimmmu_pkg -- shared constants, types and address-map helpers of the PIM-MMU.
//
// The system has 4 channels with 2 ranks each on both the DRAM side and the
// PIM side, and 512 PIM cores: 8 PIM chips per rank and one PIM core per bank,
// 8 banks per chip.  The split of those 8 banks into 4 bank groups x 2 banks
// is this design's choice.  A "bank unit" is one (channel, rank, bank group,
// bank) of a PIM rank; because every 64-bit bus word is split byte-wise over the
// 8 chips, one bank unit holds 8 PIM cores, one per byte lane.  The PIM core
// ID is {ch, ra, bg, bk, chip}, which reproduces the ordering
// ra*banks*bankgroups + bg*banks + bk of the scheduling algorithm inside a
// channel, with the chip as the least significant digit.
//
// Physical address layout (36 bits, 64 GB): the PIM region and the DRAM region
// are each 32 GB.  Where the PIM region starts is a boot-time input
// (pim_base/pim_limit).  Region offsets are 35 bits.
//   PIM  (locality-centric, ChRaBgBkRoCo):
//        [34:33] ch  [32] ra  [31:30] bg  [29] bk  [28:13] row  [12:3] col  [2:0] byte lane
//        (byte lane b = bus bits 8b+7:8b = chip 7-b, chip 0 on bits 63:56)
//   DRAM (MLP-centric; order Ro Bk Bg Ro Ra Co Bg [Ch] Co from the MSB):
//        [34:27] row[14:7] [26:25] bk [24] bg[1] [23:17] row[6:0] [16] ra
//        [15:9] col[9:3]   [8] bg[0]  [7:6] channel slot  [5:3] col[2:0] [2:0] byte
//        ch[i] = XOR of the offset bits selected by CH_HASH[i]; each mask holds
//        its own channel-slot bit and no other channel-slot bit, so the map is a
//        bijection.  The tap positions are this design's choice.
// A module that uses only some of these constants draws lint notes about
// the unused ones; they are shared definitions, not dead logic.
package pimmmu_pkg;

  localparam int unsigned PA_W        = 36;   // physical address width
  localparam int unsigned OFS_W       = 35;   // offset inside one region
  localparam int unsigned NUM_CH      = 4;
  localparam int unsigned NUM_RA      = 2;
  localparam int unsigned NUM_BG      = 4;
  localparam int unsigned NUM_BK      = 2;    // PIM banks per bank group
  localparam int unsigned NUM_CHIPS   = 8;
  localparam int unsigned UNITS_PER_CH = NUM_RA * NUM_BG * NUM_BK;          // 16
  localparam int unsigned CORES_PER_CH = UNITS_PER_CH * NUM_CHIPS;          // 128
  localparam int unsigned NUM_CORES   = NUM_CH * CORES_PER_CH;              // 512
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;                     // 512
  localparam int unsigned TILE_LINES  = NUM_CHIPS;                          // 8
  localparam int unsigned DATA_BUF_BYTES = 16 * 1024;
  localparam int unsigned SLOTS_PER_CH = DATA_BUF_BYTES / LINE_BYTES / TILE_LINES / NUM_CH; // 8
  localparam int unsigned OFF_W       = 21;   // Offset counter, in 64 B lines (up to 64 MB MRAM = 2^20 lines)
  localparam int unsigned HEAP_W      = 26;   // MRAM byte address (64 MB per PIM core)
  localparam int unsigned UNIT_SHIFT  = 29;   // bytes of PIM region per bank unit = 2^29
  localparam int unsigned CORE_ID_W   = $clog2(NUM_CORES);                  // 9
  localparam int unsigned LCORE_W     = $clog2(CORES_PER_CH);               // 7
  localparam int unsigned LUNIT_W     = $clog2(UNITS_PER_CH);               // 4
  localparam int unsigned SLOT_W      = $clog2(SLOTS_PER_CH);               // 3
  localparam int unsigned TAG_W       = SLOT_W + 3;                          // {slot, line}

  localparam logic [OFS_W-1:0] CH_HASH [2] = '{
    35'h0_AAAA_0040,   // ch[0]: bits 6,17,19,21,23,25,27,29,31
    35'h1_5554_0080    // ch[1]: bits 7,18,20,22,24,26,28,30,32
  };

  typedef logic [PA_W-1:0]      pa_t;
  typedef logic [LINE_BITS-1:0] line_t;

  typedef enum logic {DIR_D2P = 1'b0, DIR_P2D = 1'b1} dir_e;

  // Device address produced by HetMap for the memory controller.
  typedef struct packed {
    logic        is_pim;
    logic [1:0]  ch;
    logic        ra;
    logic [1:0]  bg;
    logic [1:0]  bk;
    logic [15:0] row;
    logic [9:0]  col;
  } dev_addr_t;

  // Address-buffer entry (the PIM addr field of the entry is its index).
  typedef struct packed {
    logic valid;
    pa_t  dram;
  } ab_entry_t;

  // Read request toward the memory controller.
  typedef struct packed {
    pa_t              pa;
    logic [TAG_W-1:0] tag;
  } rd_req_t;

  // Write request: 64 B of data with one enable bit per byte.
  typedef struct packed {
    pa_t                   pa;
    logic [LINE_BYTES-1:0] be;
    line_t                 data;
  } wr_req_t;

endpackage
