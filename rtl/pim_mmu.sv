// pim_mmu -- Top of the PIM memory management unit.
//
// Sits beside the host memory controller of a system whose memory bus carries
// both ordinary DRAM DIMMs and bank-level PIM DIMMs.  It holds
//   * the data copy engine (DCE), which performs whole DRAM<->PIM transfers
//     described by the driver through MMIO and interrupts when done, with its
//     per-channel PIM-MS scheduler lanes, address/data buffers and transpose
//     units;
//   * HetMap, the dual address mapping of the memory controller: every request
//     of the DCE (per lane, reads and writes) and the host's own requests are
//     mapped to device addresses, locality-centric for the PIM region and
//     MLP-centric (XOR-hashed channel) for the DRAM region.
// The memory controller's request queues, its command scheduling and the
// devices are outside: the mapped requests leave on the mc_* ports, one
// read and one write port per DCE lane.  The memory controller must return
// each read's 64 B with its tag on the lane port that issued it (mc_rsp_*).
// mc_*_pa carries the physical address alongside the device address.
// pim_base/pim_limit are the region bounds the firmware sets at boot.
// All DCE ports use valid/ready; HetMap is combinational, so a request appears
// on the mc_* port in the cycle the lane presents it.
module pim_mmu
  import pimmmu_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  pa_t                   pim_base,
  input  pa_t                   pim_limit,
  // host MMIO
  input  logic                  mmio_we,
  input  logic                  mmio_re,
  input  logic [11:0]           mmio_addr,
  input  logic [63:0]           mmio_wdata,
  output logic [63:0]           mmio_rdata,
  output logic                  irq,
  output logic                  busy,
  // host requests through HetMap
  input  pa_t                   host_pa,
  output dev_addr_t             host_map,
  // memory controller, read requests and returns
  output logic     [NUM_CH-1:0] mc_rd_valid,
  input  logic     [NUM_CH-1:0] mc_rd_ready,
  output dev_addr_t             mc_rd_addr  [NUM_CH],
  output pa_t                   mc_rd_pa    [NUM_CH],
  output logic     [TAG_W-1:0]  mc_rd_tag   [NUM_CH],
  input  logic     [NUM_CH-1:0] mc_rsp_valid,
  input  logic     [TAG_W-1:0]  mc_rsp_tag  [NUM_CH],
  input  line_t                 mc_rsp_data [NUM_CH],
  // memory controller, write requests
  output logic     [NUM_CH-1:0] mc_wr_valid,
  input  logic     [NUM_CH-1:0] mc_wr_ready,
  output dev_addr_t             mc_wr_addr  [NUM_CH],
  output pa_t                   mc_wr_pa    [NUM_CH],
  output logic     [LINE_BYTES-1:0] mc_wr_be [NUM_CH],
  output line_t                 mc_wr_data  [NUM_CH],
  // activity, for monitoring
  output logic     [NUM_CH-1:0] stall_full,
  output logic     [NUM_CH-1:0] stall_rd
);
  rd_req_t rd_req [NUM_CH];
  wr_req_t wr_req [NUM_CH];

  dce u_dce (
    .clk, .rst_n, .pim_base, .mmio_we, .mmio_re, .mmio_addr, .mmio_wdata, .mmio_rdata, .irq, .busy,
    .rd_req_valid(mc_rd_valid), .rd_req_ready(mc_rd_ready), .rd_req,
    .rd_rsp_valid(mc_rsp_valid), .rd_rsp_tag(mc_rsp_tag), .rd_rsp_data(mc_rsp_data),
    .wr_req_valid(mc_wr_valid), .wr_req_ready(mc_wr_ready), .wr_req,
    .stall_full, .stall_rd);

  for (genvar g = 0; g < NUM_CH; g++) begin : g_map
    hetmap u_map_rd (.pa(rd_req[g].pa), .pim_base, .pim_limit, .m(mc_rd_addr[g]));
    hetmap u_map_wr (.pa(wr_req[g].pa), .pim_base, .pim_limit, .m(mc_wr_addr[g]));
    assign mc_rd_pa[g]   = rd_req[g].pa;
    assign mc_rd_tag[g]  = rd_req[g].tag;
    assign mc_wr_pa[g]   = wr_req[g].pa;
    assign mc_wr_be[g]   = wr_req[g].be;
    assign mc_wr_data[g] = wr_req[g].data;
  end

  hetmap u_map_host (.pa(host_pa), .pim_base, .pim_limit, .m(host_map));
endmodule
