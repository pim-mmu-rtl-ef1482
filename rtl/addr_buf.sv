// addr_buf -- One channel's bank of the DCE address buffer.
//
// Holds one entry per PIM core of the channel (128 with the default
// geometry).  An entry is the base physical DRAM address of that core's data
// (source for DRAM->PIM, destination for PIM->DRAM) plus a valid bit that says
// whether the core takes part in the transfer; the entry's index is the local
// PIM core ID {ra, bg, bk, chip}, which is the entry's "PIM addr" field.
// Beside each entry sits its Offset counter, the number of 64 B lines of that
// core already read, which the scheduler advances as reads complete.
//
// Ports: one write port (loaded by the controller from MMIO writes), two
// asynchronous read ports (issue side and write-back side of the scheduler
// lane), one Offset read port for status, and an increment port that bumps
// the Offsets of any subset of the 8 cores of one bank unit in one cycle.
// clr_off zeroes all Offsets (start of an operation); clr_valid drops all
// entries.  All updates take effect at the next clock edge.
// The entry layout and the split into one bank per channel are this design's
// choices; the fields follow the paper's address buffer.
module addr_buf
  import pimmmu_pkg::*;
#(
  parameter int unsigned ENTRIES = CORES_PER_CH,
  localparam int unsigned IW     = $clog2(ENTRIES)
) (
  input  logic               clk,
  input  logic               rst_n,
  // load port
  input  logic               wr_en,
  input  logic [IW-1:0]      wr_idx,
  input  ab_entry_t          wr_entry,
  input  logic               clr_valid,
  // read ports
  input  logic [IW-1:0]      rd_idx_a,
  output ab_entry_t          rd_entry_a,
  input  logic [IW-1:0]      rd_idx_b,
  output ab_entry_t          rd_entry_b,
  // Offset counters
  input  logic               clr_off,
  input  logic               inc_en,
  input  logic [IW-4:0]      inc_unit,
  input  logic [7:0]         inc_mask,
  input  logic [IW-1:0]      off_idx,
  output logic [OFF_W-1:0]   off_rd
);
  pa_t              mem [ENTRIES];   // DRAM addr field
  logic [OFF_W-1:0] off [ENTRIES];   // Offset field
  logic [ENTRIES-1:0] vld;           // valid bits

  assign rd_entry_a = '{valid: vld[rd_idx_a], dram: mem[rd_idx_a]};
  assign rd_entry_b = '{valid: vld[rd_idx_b], dram: mem[rd_idx_b]};
  assign off_rd     = off[off_idx];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= wr_entry.dram;
  end

  // Valid bits and Offsets are reset; the address fields are not.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) off[i] <= '0;
    end else if (clr_off) begin
      for (int i = 0; i < ENTRIES; i++) off[i] <= '0;
    end else if (inc_en) begin
      for (int c = 0; c < 8; c++)
        if (inc_mask[c]) off[{inc_unit, 3'(c)}] <= off[{inc_unit, 3'(c)}] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          vld <= '0;
    else if (clr_valid)  vld <= '0;
    else if (wr_en)      vld[wr_idx] <= wr_entry.valid;
  end

endmodule
