// tb_dce -- Self-checking test of the data copy engine (controller plus the
// four lanes) without HetMap: the behavioural memory is keyed by physical
// address.  The driver is played by MMIO: entries for all 512 PIM cores (every
// 11th left out), a 128 B DRAM->PIM transfer, then PIM->DRAM to a new region.
// Checks every byte, the Offsets, the interrupt, that each lane's requests
// stay on its own channel's PIM cores, and that all lanes ran at once.
module tb_dce;
  import pimmmu_pkg::*;
  import tb_ref_pkg::*;

  localparam pa_t BASE = 36'h8_0000_0000, LIMIT = 36'hF_FFFF_FFFF;
  localparam pa_t SRC = 36'h0_2000_0000, DST = 36'h0_3000_0000, STRIDE = 36'h0_0000_1000;
  localparam int  SIZE = 128, HEAP = 8;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic        mmio_we = 0, mmio_re = 0, irq, busy;
  logic [11:0] mmio_addr = 0;
  logic [63:0] mmio_wdata = 0, mmio_rdata;
  logic [NUM_CH-1:0] rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready, stall_full, stall_rd;
  rd_req_t rd_req [NUM_CH];
  wr_req_t wr_req [NUM_CH];
  logic [TAG_W-1:0] rd_rsp_tag [NUM_CH], rtag [NUM_CH];
  line_t rd_rsp_data [NUM_CH], wdata [NUM_CH];
  pa_t rpa [NUM_CH], wpa [NUM_CH];
  logic [LINE_BYTES-1:0] wbe [NUM_CH];
  dev_addr_t nodev [NUM_CH];

  dce dut (.clk, .rst_n, .pim_base(BASE), .mmio_we, .mmio_re, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .irq, .busy, .rd_req_valid, .rd_req_ready, .rd_req, .rd_rsp_valid, .rd_rsp_tag, .rd_rsp_data,
    .wr_req_valid, .wr_req_ready, .wr_req, .stall_full, .stall_rd);

  for (genvar g = 0; g < NUM_CH; g++) begin : g_w
    assign rpa[g] = rd_req[g].pa;  assign rtag[g] = rd_req[g].tag;
    assign wpa[g] = wr_req[g].pa;  assign wbe[g] = wr_req[g].be;  assign wdata[g] = wr_req[g].data;
    assign nodev[g] = '0;
  end

  mem_model #(.KEY_DEV(1'b0), .NL(NUM_CH), .RD_PCT(70), .WR_PCT(60)) mem (
    .clk, .rst_n, .rd_valid(rd_req_valid), .rd_ready(rd_req_ready), .rd_addr(nodev), .rd_pa(rpa), .rd_tag(rtag),
    .rsp_valid(rd_rsp_valid), .rsp_tag(rd_rsp_tag), .rsp_data(rd_rsp_data),
    .wr_valid(wr_req_valid), .wr_ready(wr_req_ready), .wr_addr(nodev), .wr_pa(wpa), .wr_be(wbe), .wr_data(wdata));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic bit in_xfer(int c);
    return (c % 11) != 3;
  endfunction

  // lane g may only touch PIM cores of channel g; count cycles where all lanes issue
  int n_wrong_ch = 0, n_all_lanes = 0;
  always @(posedge clk) begin
    for (int g = 0; g < NUM_CH; g++) begin
      if (rd_req_valid[g] && rd_req[g].pa >= BASE && 2'((rd_req[g].pa - BASE) >> 33) != 2'(g)) n_wrong_ch++;
      if (wr_req_valid[g] && wr_req[g].pa >= BASE && 2'((wr_req[g].pa - BASE) >> 33) != 2'(g)) n_wrong_ch++;
    end
    n_all_lanes += (rd_req_valid == '1);
  end

  task automatic wr(logic [11:0] a, logic [63:0] d);
    @(negedge clk); mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_we = 0;
  endtask
  task automatic rd(logic [11:0] a, output logic [63:0] d);
    @(negedge clk); mmio_re = 1; mmio_addr = a;
    @(negedge clk); mmio_re = 0; d = mmio_rdata;
  endtask

  task automatic run(bit p2d, pa_t base);
    logic [63:0] d;
    for (int c = 0; c < NUM_CORES; c++) wr(12'h400 + 12'(c), {in_xfer(c), 27'd0, base + pa_t'(c) * STRIDE});
    wr(12'h001, 64'(SIZE));
    wr(12'h002, 64'(HEAP));
    wr(12'h000, {62'd0, p2d, 1'b1});
    check(busy, "busy");
    fork
      wait (irq);
      repeat (100000) @(posedge clk);
    join_any
    disable fork;
    check(irq && !busy, "interrupt");
    wr(12'h000, 64'h8);
    for (int c = 0; c < NUM_CORES; c += 7) begin
      rd(12'h800 + 12'(c), d);
      check(d == 64'(in_xfer(c) ? SIZE / 64 : 0), $sformatf("Offset %0d", c));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1'b0, SRC);
    for (int c = 0; c < NUM_CORES; c++) if (in_xfer(c))
      for (int m = 0; m < SIZE; m++)
        check(mem.peek(ref_pim_pa(BASE, c, HEAP + m), BASE, LIMIT) == mem.peek(SRC + pa_t'(c) * STRIDE + pa_t'(m), BASE, LIMIT),
              $sformatf("D2P core %0d byte %0d", c, m));
    run(1'b1, DST);
    for (int c = 0; c < NUM_CORES; c++) if (in_xfer(c))
      for (int m = 0; m < SIZE; m++)
        check(mem.peek(DST + pa_t'(c) * STRIDE + pa_t'(m), BASE, LIMIT) == mem.peek(SRC + pa_t'(c) * STRIDE + pa_t'(m), BASE, LIMIT),
              $sformatf("P2D core %0d byte %0d", c, m));
    check(n_wrong_ch == 0, "lanes stay on their channel");
    check(n_all_lanes > 0, "all lanes issue in the same cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
