// dce_ctrl -- Controller of the data copy engine (MMIO registers, start,
// completion interrupt).
//
// The device driver describes a transfer by MMIO writes: the transfer type,
// the size per PIM core, the MRAM heap pointer and one address-buffer entry
// per PIM core, and then starts it.  The controller forwards entries to the
// address buffer, pulses `start` to all scheduler lanes (which also clears the
// Offset counters), and when every lane reports done it raises `irq`, which
// stays high until the driver clears it.
//
// Register map (64-bit registers, word addresses on mmio_addr):
//   0x000 CTRL   write: bit0 start, bit1 direction (0 DRAM->PIM, 1 PIM->DRAM),
//                       bit2 invalidate all entries, bit3 clear irq
//   0x001 SIZE   bytes per PIM core (multiple of 64; bits 5:0 ignored)
//   0x002 HEAP   MRAM heap pointer of the PIM side (multiple of 8)
//   0x003 STATUS read: bit0 busy, bit1 irq
//   0x400+id     write: address-buffer entry of PIM core id:
//                       bit63 valid, bits 35:0 DRAM physical address
//   0x800+id     read : Offset counter of PIM core id (lines read so far)
// Reads return data on mmio_rdata one cycle after mmio_re.  A start while
// busy is ignored.  The register map and interrupt behaviour are this
// design's choices; the paper specifies MMIO registers and a completion
// interrupt.
module dce_ctrl
  import pimmmu_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // MMIO
  input  logic                  mmio_we,
  input  logic                  mmio_re,
  input  logic [11:0]           mmio_addr,
  input  logic [63:0]           mmio_wdata,
  output logic [63:0]           mmio_rdata,
  output logic                  irq,
  // to the lanes
  output logic                  start,
  output dir_e                  dir,
  output logic [OFF_W-1:0]      size_lines,
  output logic [HEAP_W-1:0]     heap,
  input  logic [NUM_CH-1:0]     lane_done,
  output logic                  busy,
  // to the address buffer
  output logic                  ab_wr_en,
  output logic [CORE_ID_W-1:0]  ab_wr_id,
  output ab_entry_t             ab_wr_entry,
  output logic                  ab_clr_valid,
  output logic [CORE_ID_W-1:0]  off_id,
  input  logic [OFF_W-1:0]      off_rd
);
  localparam logic [11:0] A_CTRL = 12'h000, A_SIZE = 12'h001, A_HEAP = 12'h002, A_STATUS = 12'h003;

  logic wr_ctrl;
  assign wr_ctrl      = mmio_we && mmio_addr == A_CTRL;
  assign start        = wr_ctrl && mmio_wdata[0] && !busy;
  assign ab_wr_en     = mmio_we && mmio_addr[11:10] == 2'b01;
  assign ab_wr_id     = mmio_addr[CORE_ID_W-1:0];
  assign ab_wr_entry  = '{valid: mmio_wdata[63], dram: mmio_wdata[PA_W-1:0]};
  assign ab_clr_valid = wr_ctrl && mmio_wdata[2] && !busy;
  assign off_id       = mmio_addr[CORE_ID_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dir <= DIR_D2P; size_lines <= '0; heap <= '0; busy <= 1'b0; irq <= 1'b0;
      mmio_rdata <= '0;
    end else begin
      if (mmio_we && !busy) begin
        if (mmio_addr == A_SIZE) size_lines <= OFF_W'(mmio_wdata[63:6]);
        if (mmio_addr == A_HEAP) heap <= mmio_wdata[HEAP_W-1:0];
      end
      if (start) begin
        dir  <= dir_e'(mmio_wdata[1]);
        busy <= 1'b1;
      end else if (busy && &lane_done) begin
        busy <= 1'b0;
        irq  <= 1'b1;
      end
      if (wr_ctrl && mmio_wdata[3]) irq <= 1'b0;
      if (mmio_re) begin
        if (mmio_addr == A_STATUS)         mmio_rdata <= {62'd0, irq, busy};
        else if (mmio_addr == A_SIZE)      mmio_rdata <= {37'd0, size_lines, 6'd0};
        else if (mmio_addr == A_HEAP)      mmio_rdata <= 64'(heap);
        else if (mmio_addr[11:10] == 2'b10) mmio_rdata <= 64'(off_rd);
        else                               mmio_rdata <= '0;
      end
    end
  end
endmodule
