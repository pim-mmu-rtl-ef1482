// preproc -- Preprocessing (transpose) unit of the DCE.
//
// On a PIM rank every 64-bit bus word is spread over 8 chips, one byte per
// chip, and each chip holds one PIM core per bank.  For a PIM core to see whole
// 8-byte words, data must be byte-transposed on its way in and out.  This unit
// transposes one tile of 8 lines (8 x 64 B) in either direction:
//   DRAM->PIM: input line c is the next 64 B of PIM core c (chip c) of a bank
//     unit, i.e. 8 words w[c][k].  Output burst k carries word k of all 8
//     cores: beat r, byte lane of chip c = byte r of w[c][k].
//   PIM->DRAM: the inverse; input burst k, output line c.
// Lane placement follows the paper's figure: chip 0 on bits 63:56 of a beat,
// chip 7 on bits 7:0.  Byte r of a word is its r-th least significant byte.
// Timing: in_valid loads the tile; tile_out is registered and valid (out_valid
// high for one cycle) on the next cycle, and holds until the next load.
module preproc
  import pimmmu_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  dir_e  dir,
  input  line_t tile_in  [TILE_LINES],
  output logic  out_valid,
  output line_t tile_out [TILE_LINES]
);
  line_t t [TILE_LINES];

  always_comb begin
    for (int a = 0; a < 8; a++) t[a] = '0;
    for (int c = 0; c < 8; c++)
      for (int k = 0; k < 8; k++)
        for (int r = 0; r < 8; r++)
          if (dir == DIR_D2P)
            t[k][64*r + 8*(7-c) +: 8] = tile_in[c][64*k + 8*r +: 8];
          else
            t[c][64*k + 8*r +: 8] = tile_in[k][64*r + 8*(7-c) +: 8];
  end

  always_ff @(posedge clk) begin
    if (in_valid) tile_out <= t;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
