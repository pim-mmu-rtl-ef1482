// tb_hetmap -- Self-checking test of the HetMap address mapper: hand-worked
// addresses, the region bounds, channel spreading of a sequential DRAM stream
// versus channel locality of a sequential PIM stream, and 4000 random
// addresses against the table-driven reference map.
module tb_hetmap;
  import pimmmu_pkg::*;
  import tb_ref_pkg::*;

  localparam pa_t BASE  = 36'h8_0000_0000;
  localparam pa_t LIMIT = 36'hF_FFFF_FFFF;
  pa_t pa;
  dev_addr_t m;
  int checks = 0, failures = 0;

  hetmap dut (.pa(pa), .pim_base(BASE), .pim_limit(LIMIT), .m(m));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (pa=%h m=%p)", what, pa, m); end
  endtask

  initial begin
    int per_ch [4];
    // last bank unit of the PIM region: core 511's bank
    pa = BASE + (pa_t'(63) << 29); #1;
    check(m.is_pim && m.ch == 3 && m.ra == 1 && m.bg == 3 && m.bk == 1 && m.row == 0 && m.col == 0, "PIM unit 63");
    pa = BASE + 36'h0_0000_2040; #1;   // row 1, col 8
    check(m.is_pim && m.ch == 0 && m.row == 1 && m.col == 8, "PIM row/col");
    pa = BASE - 1; #1;  check(!m.is_pim, "below PIM base is DRAM");
    pa = LIMIT;    #1;  check(!m.is_pim, "limit is exclusive");
    pa = 36'h40;   #1;  check(!m.is_pim && m.ch == 1 && m.col == 0 && m.row == 0, "DRAM line 1 -> ch 1");
    pa = 36'h80;   #1;  check(m.ch == 2, "DRAM line 2 -> ch 2");
    pa = 36'h2_0000; #1; check(m.ch == 1 && m.row == 1, "row bit 17 flips ch[0]");
    pa = 36'h100;  #1;  check(m.bg == 1 && m.ch == 0, "bit 8 is bg[0]");
    pa = 36'h1_0000; #1; check(m.ra == 1, "bit 16 is rank");
    // a sequential DRAM stream spreads evenly over the channels
    per_ch = '{default: 0};
    for (int i = 0; i < 1024; i++) begin pa = 36'h0_BA00_0000 + pa_t'(64 * i); #1; per_ch[m.ch]++; end
    foreach (per_ch[c]) check(per_ch[c] == 256, $sformatf("DRAM stream: channel %0d got %0d of 1024", c, per_ch[c]));
    // a sequential PIM stream stays in one channel and bank
    per_ch = '{default: 0};
    for (int i = 0; i < 1024; i++) begin pa = BASE + pa_t'(64 * i); #1; per_ch[m.ch]++; end
    check(per_ch[0] == 1024, "PIM stream stays in channel 0");
    // random addresses against the reference map
    for (int i = 0; i < 4000; i++) begin
      pa = pa_t'({$urandom, $urandom}); #1;
      check(m == ref_dev(pa, BASE, LIMIT), "random address");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
