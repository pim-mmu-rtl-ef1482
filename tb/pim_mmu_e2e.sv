// pim_mmu_e2e -- End-to-end test harness of pim_mmu, shared by the top-level
// testbenches.  It plays the driver: loads the address buffer by MMIO (one
// entry per PIM core, a few cores left out), runs a DRAM->PIM transfer and
// then a PIM->DRAM transfer back to a second DRAM region, and waits for the
// interrupt each time.  The memory controller and the devices are the
// behavioural mem_model, keyed by device address so that HetMap is exercised.
// Checks, against values computed in the testbench:
//   * every byte of every participating core arrives at the right MRAM
//     address (DRAM->PIM, through the transpose) and back at the right DRAM
//     address (PIM->DRAM); cores left out keep their MRAM untouched;
//   * the Offset counters read back by MMIO; request counts; irq/busy;
//   * the host-side HetMap output against the reference maps.
// Mechanisms counted (each must happen): read-queue-full stall, data-buffer-
// full stall, out-of-order read return, byte-masked PIM write, skipped core,
// both directions, host DRAM and PIM mapping.
module pim_mmu_e2e
  import pimmmu_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter longint SIZE      = 256,      // bytes per PIM core
  parameter int     SKIP_MOD  = 37,       // cores with id % SKIP_MOD == 5 are left out
  parameter longint WATCHDOG  = 2_000_000
) ();
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  localparam pa_t PIM_BASE  = 36'h8_0000_0000;
  localparam pa_t PIM_LIMIT = 36'hF_FFFF_FFFF;
  localparam pa_t SRC_BASE  = 36'h0_BA00_0000;   // first source array, as in the paper's example
  localparam pa_t DST_BASE  = 36'h1_0000_0000;
  localparam pa_t STRIDE    = 36'h0_0008_0000;   // 512 KB per core
  localparam longint HEAP   = 64'h100;

  logic        mmio_we = 0, mmio_re = 0;
  logic [11:0] mmio_addr = 0;
  logic [63:0] mmio_wdata = 0, mmio_rdata;
  logic        irq, busy;
  pa_t         host_pa = 0;
  dev_addr_t   host_map;
  logic [NUM_CH-1:0] mc_rd_valid, mc_rd_ready, mc_rsp_valid, mc_wr_valid, mc_wr_ready, stall_full, stall_rd;
  dev_addr_t   mc_rd_addr [NUM_CH], mc_wr_addr [NUM_CH];
  pa_t         mc_rd_pa [NUM_CH], mc_wr_pa [NUM_CH];
  logic [TAG_W-1:0] mc_rd_tag [NUM_CH], mc_rsp_tag [NUM_CH];
  line_t       mc_rsp_data [NUM_CH], mc_wr_data [NUM_CH];
  logic [LINE_BYTES-1:0] mc_wr_be [NUM_CH];

  pim_mmu dut (.*, .pim_base(PIM_BASE), .pim_limit(PIM_LIMIT));

  mem_model #(.KEY_DEV(1'b1)) mem (
    .clk, .rst_n,
    .rd_valid(mc_rd_valid), .rd_ready(mc_rd_ready), .rd_addr(mc_rd_addr), .rd_pa(mc_rd_pa), .rd_tag(mc_rd_tag),
    .rsp_valid(mc_rsp_valid), .rsp_tag(mc_rsp_tag), .rsp_data(mc_rsp_data),
    .wr_valid(mc_wr_valid), .wr_ready(mc_wr_ready), .wr_addr(mc_wr_addr), .wr_pa(mc_wr_pa),
    .wr_be(mc_wr_be), .wr_data(mc_wr_data));

  int checks = 0, failures = 0;
  longint cycles = 0;
  int n_stall_full = 0, n_stall_rd = 0;
  always @(posedge clk) begin
    cycles++;
    n_stall_full += $countones(stall_full);
    n_stall_rd   += $countones(stall_rd);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic mmio_write(logic [11:0] a, logic [63:0] d);
    @(negedge clk); mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_we = 0;
  endtask

  task automatic mmio_read(logic [11:0] a, output logic [63:0] d);
    @(negedge clk); mmio_re = 1; mmio_addr = a;
    @(negedge clk); mmio_re = 0; d = mmio_rdata;
  endtask

  function automatic bit in_xfer(int c);
    return (c % SKIP_MOD) != 5;
  endfunction

  task automatic run(bit p2d, pa_t base, output longint took);
    logic [63:0] st;
    longint t0;
    for (int c = 0; c < NUM_CORES; c++)
      mmio_write(12'h400 + 12'(c), {in_xfer(c), 27'd0, base + pa_t'(c) * STRIDE});
    mmio_write(12'h001, 64'(SIZE));
    mmio_write(12'h002, 64'(HEAP));
    t0 = cycles;
    mmio_write(12'h000, {62'd0, p2d, 1'b1});
    mmio_read(12'h003, st);
    check(st[0] == 1'b1, "busy after start");
    while (!irq) begin
      @(posedge clk);
      if (cycles - t0 > WATCHDOG) break;
    end
    took = cycles - t0;
    check(irq, "interrupt raised");
    mmio_read(12'h003, st);
    check(st == 64'h2, "status idle with irq");
    mmio_write(12'h000, 64'h8);
    @(negedge clk);
    check(!irq, "irq cleared");
    for (int c = 0; c < NUM_CORES; c++) begin
      logic [63:0] o;
      mmio_read(12'h800 + 12'(c), o);
      check(o == (in_xfer(c) ? 64'(SIZE / 64) : 64'd0), $sformatf("Offset of core %0d = %0d", c, o));
    end
  endtask

  initial begin
    longint t_d2p, t_p2d;
    int rd0, wr0, n_in, units_in;
    bit untouched;
    n_in = 0; units_in = 0;
    for (int c = 0; c < NUM_CORES; c++) n_in += in_xfer(c);
    for (int u = 0; u < NUM_CORES / 8; u++) begin
      automatic bit any = 0;
      for (int c = 0; c < 8; c++) any |= in_xfer(8*u + c);
      units_in += any;
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---- DRAM -> PIM ----
    rd0 = mem.n_rd; wr0 = mem.n_wr;
    run(1'b0, SRC_BASE, t_d2p);
    check(mem.n_rd - rd0 == n_in * int'(SIZE / 64), "D2P read count");
    check(mem.n_wr - wr0 == units_in * int'(SIZE / 8), "D2P write count");
    check(mem.n_pim_wr == units_in * int'(SIZE / 8), "D2P writes go to PIM devices");
    for (int c = 0; c < NUM_CORES; c++) begin
      if (in_xfer(c)) begin
        for (longint m = 0; m < SIZE; m++) begin
          logic [7:0] exp, got;
          exp = mem.peek(SRC_BASE + pa_t'(c) * STRIDE + pa_t'(m), PIM_BASE, PIM_LIMIT);
          got = mem.peek(ref_pim_pa(PIM_BASE, c, HEAP + m), PIM_BASE, PIM_LIMIT);
          check(got == exp, $sformatf("D2P core %0d byte %0d: %h != %h", c, m, got, exp));
        end
      end else begin
        untouched = 1;
        for (longint m = 0; m < SIZE; m++) begin
          automatic pa_t a = ref_pim_pa(PIM_BASE, c, HEAP + m);
          untouched &= !mem.written(a, PIM_BASE, PIM_LIMIT) ||
                       mem.peek(a, PIM_BASE, PIM_LIMIT) ==
                       init_byte((longint'(1) << 40) | longint'(ref_dev({a[PA_W-1:6], 6'd0}, PIM_BASE, PIM_LIMIT)), int'(a[5:0]));
        end
        check(untouched, $sformatf("core %0d not in transfer keeps its MRAM", c));
      end
    end

    // ---- PIM -> DRAM ----
    rd0 = mem.n_rd; wr0 = mem.n_wr;
    run(1'b1, DST_BASE, t_p2d);
    check(mem.n_rd - rd0 == units_in * int'(SIZE / 8) + (NUM_CORES / 8 - units_in) * int'(SIZE / 8),
          "P2D read count (all bursts of every bank unit)");
    check(mem.n_wr - wr0 == n_in * int'(SIZE / 64), "P2D write count");
    for (int c = 0; c < NUM_CORES; c++) begin
      if (!in_xfer(c)) continue;
      for (longint m = 0; m < SIZE; m++) begin
        logic [7:0] exp, got;
        exp = mem.peek(SRC_BASE + pa_t'(c) * STRIDE + pa_t'(m), PIM_BASE, PIM_LIMIT);
        got = mem.peek(DST_BASE + pa_t'(c) * STRIDE + pa_t'(m), PIM_BASE, PIM_LIMIT);
        check(got == exp, $sformatf("P2D core %0d byte %0d: %h != %h", c, m, got, exp));
      end
    end

    // ---- host requests through HetMap ----
    begin
      int n_host_dram = 0, n_host_pim = 0;
      for (int i = 0; i < 200; i++) begin
        @(negedge clk);
        host_pa = pa_t'({$urandom, $urandom});
        @(posedge clk);
        check(host_map == ref_dev(host_pa, PIM_BASE, PIM_LIMIT), $sformatf("host map of %h", host_pa));
        if (host_map.is_pim) n_host_pim++; else n_host_dram++;
      end
      check(n_host_pim > 0, "host PIM mapping used");
      check(n_host_dram > 0, "host DRAM mapping used");
    end

    // ---- mechanisms ----
    $display("mechanisms: rd_queue_full_stall=%0d data_buf_full_stall=%0d out_of_order_returns=%0d masked_pim_writes=%0d skipped_cores=%0d",
             n_stall_rd, n_stall_full, mem.n_ooo, mem.n_partial_wr, NUM_CORES - n_in);
    $display("cycles: DRAM->PIM %0d, PIM->DRAM %0d for %0d bytes per core (%0d bytes in all)",
             t_d2p, t_p2d, SIZE, SIZE * NUM_CORES);
    check(n_stall_rd > 0, "read-queue-full stall happened");
    check(n_stall_full > 0, "data-buffer-full stall happened");
    check(mem.n_ooo > 0, "out-of-order read return happened");
    check(mem.n_partial_wr > 0, "byte-masked PIM write happened");
    check(NUM_CORES - n_in > 0, "cores left out of a transfer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * WATCHDOG + 200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
