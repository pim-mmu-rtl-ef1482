// agu -- Address generation unit of the data copy engine.
//
// For one step of a transfer it forms the two physical addresses involved:
//   dram_pa = dram_base + 64*off_lines
//       the 64 B line of one PIM core's data in the DRAM address space
//       (the "src_base + offset" of the scheduling algorithm);
//   pim_pa  = pim_base + unit*2^29 + 8*(heap + 64*off_lines + 8*k)
//       the 64 B PIM burst k (k = 0..7) of bank unit `unit`.
// The PIM formula follows from the locality-centric map and the byte-lane
// layout of a PIM rank: MRAM byte b of every PIM core in a bank unit sits in
// bus beat b of that bank, one byte lane per chip, so 8 MRAM bytes of all 8
// cores make one 64 B burst.  The PIM address is thus derived from the PIM
// core ID and the heap pointer, as the paper states; the formula itself is
// this design's derivation.  heap must be a multiple of 8.
// Combinational.
module agu
  import pimmmu_pkg::*;
(
  input  pa_t                         pim_base,
  input  pa_t                         dram_base,
  input  logic [$clog2(NUM_CH)+LUNIT_W-1:0] unit,   // global bank unit {ch, ra, bg, bk}
  input  logic [HEAP_W-1:0]           heap,
  input  logic [OFF_W-1:0]            off_lines,
  input  logic [2:0]                  k,
  output pa_t                         dram_pa,
  output pa_t                         pim_pa
);
  logic [HEAP_W+1:0] mram;   // MRAM byte address of the burst's first byte

  always_comb begin
    dram_pa = dram_base + (PA_W'(off_lines) << 6);
    mram    = (HEAP_W+2)'(heap) + ((HEAP_W+2)'(off_lines) << 6) + ((HEAP_W+2)'(k) << 3);
    pim_pa  = pim_base + (PA_W'(unit) << UNIT_SHIFT) + (PA_W'(mram) << 3);
  end
endmodule
