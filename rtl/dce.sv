// dce -- Data copy engine.
//
// Moves data between the DRAM and PIM address spaces on its own once the
// driver has described the transfer, so no CPU thread takes part.  It holds
// the controller (MMIO registers, interrupt) and, for each of the NUM_CH
// channels, one lane made of: a bank of the address buffer (the entries of the
// PIM cores on that channel), a PIM-MS scheduler lane with its two address
// generation units, a 4 KB bank of the data buffer and a preprocessing
// (transpose) unit.  All lanes start together and run in parallel; each lane
// has its own read-request, read-return and write-request ports, carrying
// physical addresses, toward the memory controller (through HetMap, outside
// this module).  A read return must come back on the lane port that issued
// it, with the request's tag.
// The per-channel lane structure follows the paper's scheduling algorithm
// ("do-parallel channel"); splitting the buffers per lane is this design's
// choice.
module dce
  import pimmmu_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  pa_t                   pim_base,
  // MMIO
  input  logic                  mmio_we,
  input  logic                  mmio_re,
  input  logic [11:0]           mmio_addr,
  input  logic [63:0]           mmio_wdata,
  output logic [63:0]           mmio_rdata,
  output logic                  irq,
  output logic                  busy,
  // per-lane memory ports
  output logic    [NUM_CH-1:0]  rd_req_valid,
  input  logic    [NUM_CH-1:0]  rd_req_ready,
  output rd_req_t               rd_req       [NUM_CH],
  input  logic    [NUM_CH-1:0]  rd_rsp_valid,
  input  logic    [TAG_W-1:0]   rd_rsp_tag   [NUM_CH],
  input  line_t                 rd_rsp_data  [NUM_CH],
  output logic    [NUM_CH-1:0]  wr_req_valid,
  input  logic    [NUM_CH-1:0]  wr_req_ready,
  output wr_req_t               wr_req       [NUM_CH],
  // activity, for monitoring
  output logic    [NUM_CH-1:0]  stall_full,
  output logic    [NUM_CH-1:0]  stall_rd
);
  logic                  start;
  dir_e                  dir;
  logic [OFF_W-1:0]      size_lines;
  logic [HEAP_W-1:0]     heap;
  logic [NUM_CH-1:0]     lane_done;
  logic                  ab_wr_en, ab_clr_valid;
  logic [CORE_ID_W-1:0]  ab_wr_id, off_id;
  ab_entry_t             ab_wr_entry;
  logic [OFF_W-1:0]      off_rd_lane [NUM_CH];

  dce_ctrl u_ctrl (
    .clk, .rst_n, .mmio_we, .mmio_re, .mmio_addr, .mmio_wdata, .mmio_rdata, .irq,
    .start, .dir, .size_lines, .heap, .lane_done, .busy,
    .ab_wr_en, .ab_wr_id, .ab_wr_entry, .ab_clr_valid,
    .off_id, .off_rd(off_rd_lane[off_id[CORE_ID_W-1 -: 2]]));

  for (genvar g = 0; g < NUM_CH; g++) begin : g_lane
    logic [LCORE_W-1:0]  ab_idx_a, ab_idx_b;
    ab_entry_t           ab_a, ab_b;
    logic                ab_inc_en;
    logic [LUNIT_W-1:0]  ab_inc_unit;
    logic [7:0]          ab_inc_mask;
    logic                db_wr_en;
    logic [SLOT_W-1:0]   db_wr_slot, db_rd_slot;
    logic [2:0]          db_wr_idx;
    line_t               db_wr_data;
    line_t               db_tile [TILE_LINES];
    logic                pp_in_valid, pp_out_valid;
    line_t               pp_tile [TILE_LINES];

    addr_buf u_ab (
      .clk, .rst_n,
      .wr_en(ab_wr_en && ab_wr_id[CORE_ID_W-1 -: 2] == 2'(g)),
      .wr_idx(ab_wr_id[LCORE_W-1:0]), .wr_entry(ab_wr_entry), .clr_valid(ab_clr_valid),
      .rd_idx_a(ab_idx_a), .rd_entry_a(ab_a), .rd_idx_b(ab_idx_b), .rd_entry_b(ab_b),
      .clr_off(start), .inc_en(ab_inc_en), .inc_unit(ab_inc_unit), .inc_mask(ab_inc_mask),
      .off_idx(off_id[LCORE_W-1:0]), .off_rd(off_rd_lane[g]));

    data_buf u_db (
      .clk, .wr_en(db_wr_en), .wr_slot(db_wr_slot), .wr_idx(db_wr_idx), .wr_data(db_wr_data),
      .rd_slot(db_rd_slot), .rd_tile(db_tile));

    preproc u_pp (
      .clk, .rst_n, .in_valid(pp_in_valid), .dir(dir), .tile_in(db_tile),
      .out_valid(pp_out_valid), .tile_out(pp_tile));

    pim_ms #(.CH(g)) u_ms (
      .clk, .rst_n, .start, .dir, .size_lines, .heap, .pim_base, .done(lane_done[g]),
      .ab_idx_a, .ab_a, .ab_idx_b, .ab_b, .ab_inc_en, .ab_inc_unit, .ab_inc_mask,
      .db_wr_en, .db_wr_slot, .db_wr_idx, .db_wr_data, .db_rd_slot,
      .pp_in_valid, .pp_out_valid, .pp_tile,
      .rd_req_valid(rd_req_valid[g]), .rd_req_ready(rd_req_ready[g]), .rd_req(rd_req[g]),
      .rd_rsp_valid(rd_rsp_valid[g]), .rd_rsp_tag(rd_rsp_tag[g]), .rd_rsp_data(rd_rsp_data[g]),
      .wr_req_valid(wr_req_valid[g]), .wr_req_ready(wr_req_ready[g]), .wr_req(wr_req[g]),
      .stall_full(stall_full[g]), .stall_rd(stall_rd[g]));
  end
endmodule
