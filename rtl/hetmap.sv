// hetmap -- Heterogeneous memory mapping unit (HetMap).
//
// Translates a physical address into a device address (channel, rank, bank
// group, bank, row, column) for the memory controller, using one of two
// mapping functions chosen by the address itself:
//   * PIM region  [pim_base, pim_limit): locality-centric ChRaBgBkRoCo map.
//     Channel, rank, bank group and bank sit at the top of the region offset,
//     so each PIM bank (and the 8 PIM cores sharing it) owns one contiguous
//     512 MB block of physical addresses and no DRAM address ever lands in a
//     PIM bank.
//   * DRAM region (everything else): MLP-centric map with the channel bits near
//     the LSB, each computed as an XOR hash over many higher bits, and rank and
//     bank-group bits also low, so that streams spread over all channels and
//     bank groups.
// The field orders follow the paper's description of the two functions; field
// widths and the XOR taps are this design's choice (see pimmmu_pkg).
// Purely combinational: pa in, m out in the same cycle.  The region bounds are
// set once at boot by firmware.
module hetmap
  import pimmmu_pkg::*;
(
  input  pa_t       pa,
  input  pa_t       pim_base,
  input  pa_t       pim_limit,
  output dev_addr_t m
);
  logic             in_pim;
  logic [OFS_W-1:0] ofs;

  always_comb begin
    in_pim = (pa >= pim_base) && (pa < pim_limit);
    // The DRAM region is taken to start at address 0.
    ofs    = in_pim ? OFS_W'(pa - pim_base) : OFS_W'(pa);
    m      = '0;
    m.is_pim = in_pim;
    if (in_pim) begin
      // ChRaBgBkRoCo; ofs[2:0] is the byte lane, i.e. selects the PIM chip.
      m.ch  = ofs[34:33];
      m.ra  = ofs[32];
      m.bg  = ofs[31:30];
      m.bk  = {1'b0, ofs[29]};
      m.row = ofs[28:13];
      m.col = ofs[12:3];
    end else begin
      m.ch[0] = ^(ofs & CH_HASH[0]);
      m.ch[1] = ^(ofs & CH_HASH[1]);
      m.ra    = ofs[16];
      m.bg    = {ofs[24], ofs[8]};
      m.bk    = ofs[26:25];
      m.row   = {1'b0, ofs[34:27], ofs[23:17]};
      m.col   = {ofs[15:9], ofs[5:3]};
    end
  end
endmodule
