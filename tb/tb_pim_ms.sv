// tb_pim_ms -- Self-checking test of one PIM-MS scheduler lane (channel 1)
// with its address-buffer bank, data-buffer bank and transpose unit, against
// a behavioural memory that always accepts reads and often refuses writes (so
// the data buffer fills and issue stalls).  Checks:
//   * the read order is the paper's loop nest (bank outer, rank, bank group
//     innermost), one bank unit of 8 cores per visit, skipped cores omitted;
//   * one read (or one skipped core) per cycle while the memory accepts and a
//     tile is free;
//   * every byte lands at the right MRAM address (DRAM->PIM) and back at the
//     right DRAM address (PIM->DRAM); Offsets; done.
module tb_pim_ms;
  import pimmmu_pkg::*;
  import tb_ref_pkg::*;

  localparam int  CH      = 1;
  localparam pa_t BASE    = 36'h8_0000_0000;
  localparam pa_t LIMIT   = 36'hF_FFFF_FFFF;
  localparam pa_t SRC     = 36'h0_4000_0000;
  localparam pa_t DST     = 36'h0_6000_0000;
  localparam pa_t STRIDE  = 36'h0_0001_0000;
  localparam int  LINES   = 3;
  localparam int  HEAP    = 64;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start = 0, done;
  dir_e dir = DIR_D2P;
  logic [6:0] ab_idx_a, ab_idx_b, wr_idx = 0, off_idx = 0;
  ab_entry_t ab_a, ab_b, wr_entry = '0;
  logic wr_en = 0, clr_off = 0, ab_inc_en;
  logic [3:0] ab_inc_unit;
  logic [7:0] ab_inc_mask;
  logic [OFF_W-1:0] off_rd;
  logic db_wr_en;
  logic [2:0] db_wr_slot, db_wr_idx, db_rd_slot;
  line_t db_wr_data, db_tile [TILE_LINES], pp_tile [TILE_LINES];
  logic pp_in_valid, pp_out_valid;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready, stall_full, stall_rd;
  rd_req_t rd_req;
  wr_req_t wr_req;
  logic [TAG_W-1:0] rd_rsp_tag;
  line_t rd_rsp_data;

  pim_ms #(.CH(CH)) dut (
    .clk, .rst_n, .start, .dir, .size_lines(OFF_W'(LINES)), .heap(HEAP_W'(HEAP)), .pim_base(BASE), .done,
    .ab_idx_a, .ab_a, .ab_idx_b, .ab_b, .ab_inc_en, .ab_inc_unit, .ab_inc_mask,
    .db_wr_en, .db_wr_slot, .db_wr_idx, .db_wr_data, .db_rd_slot,
    .pp_in_valid, .pp_out_valid, .pp_tile,
    .rd_req_valid, .rd_req_ready, .rd_req, .rd_rsp_valid, .rd_rsp_tag, .rd_rsp_data,
    .wr_req_valid, .wr_req_ready, .wr_req, .stall_full, .stall_rd);

  addr_buf u_ab (.clk, .rst_n, .wr_en, .wr_idx, .wr_entry, .clr_valid(1'b0),
    .rd_idx_a(ab_idx_a), .rd_entry_a(ab_a), .rd_idx_b(ab_idx_b), .rd_entry_b(ab_b),
    .clr_off(start), .inc_en(ab_inc_en), .inc_unit(ab_inc_unit), .inc_mask(ab_inc_mask),
    .off_idx, .off_rd);
  data_buf u_db (.clk, .wr_en(db_wr_en), .wr_slot(db_wr_slot), .wr_idx(db_wr_idx), .wr_data(db_wr_data),
    .rd_slot(db_rd_slot), .rd_tile(db_tile));
  preproc u_pp (.clk, .rst_n, .in_valid(pp_in_valid), .dir, .tile_in(db_tile), .out_valid(pp_out_valid), .tile_out(pp_tile));

  dev_addr_t nodev [1];
  assign nodev[0] = '0;
  logic [0:0] rdv, rdr, rsv, wrv, wrr;
  pa_t rpa [1], wpa [1];
  logic [TAG_W-1:0] rtag [1], stag [1];
  line_t sdata [1], wdata [1];
  logic [LINE_BYTES-1:0] wbe [1];
  assign rdv[0] = rd_req_valid; assign rd_req_ready = rdr[0]; assign rpa[0] = rd_req.pa; assign rtag[0] = rd_req.tag;
  assign rd_rsp_valid = rsv[0]; assign rd_rsp_tag = stag[0]; assign rd_rsp_data = sdata[0];
  assign wrv[0] = wr_req_valid; assign wr_req_ready = wrr[0]; assign wpa[0] = wr_req.pa; assign wbe[0] = wr_req.be; assign wdata[0] = wr_req.data;

  mem_model #(.KEY_DEV(1'b0), .NL(1), .RD_PCT(100), .WR_PCT(40)) mem (
    .clk, .rst_n, .rd_valid(rdv), .rd_ready(rdr), .rd_addr(nodev), .rd_pa(rpa), .rd_tag(rtag),
    .rsp_valid(rsv), .rsp_tag(stag), .rsp_data(sdata),
    .wr_valid(wrv), .wr_ready(wrr), .wr_addr(nodev), .wr_pa(wpa), .wr_be(wbe), .wr_data(wdata));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic bit in_xfer(int lc);
    return !(lc == 100 || lc == 101 || lc == 127);
  endfunction

  // reads accepted, in order, and the cycle of each
  longint cyc = 0;
  pa_t    rd_log [$];
  longint rd_cyc [$];
  int     n_full = 0;
  always @(posedge clk) begin
    cyc++;
    if (rd_req_valid && rd_req_ready) begin rd_log.push_back(rd_req.pa); rd_cyc.push_back(cyc); end
    n_full += stall_full;
  end

  task automatic run(dir_e d, pa_t base);
    for (int lc = 0; lc < 128; lc++) begin
      @(negedge clk); wr_en = 1; wr_idx = 7'(lc);
      wr_entry = '{valid: in_xfer(lc), dram: base + pa_t'(lc) * STRIDE};
    end
    @(negedge clk); wr_en = 0; dir = d; start = 1;
    @(negedge clk); start = 0;
    check(!done, "done low after start");
    fork
      wait (done);
      repeat (200000) @(posedge clk);
    join_any
    disable fork;
    check(done, "lane done");
    for (int lc = 0; lc < 128; lc++) begin
      off_idx = 7'(lc); #0.1;
      check(off_rd == OFF_W'(in_xfer(lc) ? LINES : 0), $sformatf("Offset %0d = %0d", lc, off_rd));
    end
  endtask

  initial begin
    int k;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---------------- DRAM -> PIM ----------------
    run(DIR_D2P, SRC);
    k = 0;
    for (int r = 0; r < LINES; r++)
      for (int bk = 0; bk < 2; bk++) for (int ra = 0; ra < 2; ra++) for (int bg = 0; bg < 4; bg++)
        for (int c = 0; c < 8; c++) begin
          automatic int lc = (ra * 8 + bg * 2 + bk) * 8 + c;
          if (!in_xfer(lc)) continue;
          check(k < rd_log.size() && rd_log[k] == SRC + pa_t'(lc) * STRIDE + pa_t'(64 * r),
                $sformatf("read %0d: expected core %0d round %0d", k, lc, r));
          k++;
        end
    check(rd_log.size() == k, "number of reads");
    // 8 visits of 8 cores; two skipped cores (100, 101 in the 7th visit) each
    // take one issue slot, so 64 reads span 66 cycles.
    check(rd_cyc[63] - rd_cyc[0] == 65, $sformatf("first 64 reads take 66 cycles (took %0d)", rd_cyc[63] - rd_cyc[0] + 1));
    check(n_full > 0, "data buffer filled and stalled issue");
    for (int lc = 0; lc < 128; lc++) if (in_xfer(lc))
      for (int m = 0; m < 64 * LINES; m++)
        check(mem.peek(ref_pim_pa(BASE, CH * 128 + lc, HEAP + m), BASE, LIMIT) ==
              mem.peek(SRC + pa_t'(lc) * STRIDE + pa_t'(m), BASE, LIMIT), $sformatf("D2P core %0d byte %0d", lc, m));
    // ---------------- PIM -> DRAM ----------------
    rd_log.delete(); rd_cyc.delete();
    run(DIR_P2D, DST);
    check(rd_log.size() == 16 * 8 * LINES, "P2D reads every burst of every bank unit");
    for (int lc = 0; lc < 128; lc++) if (in_xfer(lc))
      for (int m = 0; m < 64 * LINES; m++)
        check(mem.peek(DST + pa_t'(lc) * STRIDE + pa_t'(m), BASE, LIMIT) ==
              mem.peek(SRC + pa_t'(lc) * STRIDE + pa_t'(m), BASE, LIMIT), $sformatf("P2D core %0d byte %0d", lc, m));
    for (int m = 0; m < 64; m++)
      check(!mem.written(DST + pa_t'(127) * STRIDE + pa_t'(m), BASE, LIMIT), "skipped core gets no write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
