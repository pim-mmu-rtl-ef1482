// data_buf -- One channel's bank of the DCE data buffer.
//
// Stores the 64 B lines returned by the memory controller until the
// preprocessing unit consumes them.  The 16 KB buffer of the DCE is split into
// one 4 KB bank per channel lane, and each bank into SLOTS tiles of 8 lines;
// a tile holds the data of one scheduler visit (8 lines, one per PIM core of a
// bank unit, or 8 PIM bursts).  Lines are written one at a time by read
// returns (any order); a whole tile is read at once, combinationally, by the
// preprocessing unit.  Contents are not reset; every line of a tile is written
// before the tile is read.
// The tile organisation and the wide read port are this design's choice.
module data_buf
  import pimmmu_pkg::*;
#(
  parameter int unsigned SLOTS = SLOTS_PER_CH,
  localparam int unsigned SW   = $clog2(SLOTS)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [SW-1:0] wr_slot,
  input  logic [2:0]    wr_idx,
  input  line_t         wr_data,
  input  logic [SW-1:0] rd_slot,
  output line_t         rd_tile [TILE_LINES]
);
  line_t mem [SLOTS][TILE_LINES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_slot][wr_idx] <= wr_data;
  end

  always_comb begin
    for (int i = 0; i < TILE_LINES; i++) rd_tile[i] = mem[rd_slot][i];
  end
endmodule
