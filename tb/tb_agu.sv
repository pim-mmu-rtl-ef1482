// tb_agu -- Self-checking test of the address generation unit: hand-worked
// addresses from the paper's example layout, and random inputs against the
// reference MRAM-byte address of the first byte of each burst.
module tb_agu;
  import pimmmu_pkg::*;
  import tb_ref_pkg::*;

  localparam pa_t BASE = 36'h8_0000_0000;
  pa_t dram_base, dram_pa, pim_pa;
  logic [5:0] unit;
  logic [HEAP_W-1:0] heap;
  logic [OFF_W-1:0] off;
  logic [2:0] k;
  int checks = 0, failures = 0;

  agu dut (.pim_base(BASE), .dram_base, .unit, .heap, .off_lines(off), .k, .dram_pa, .pim_pa);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s dram_pa=%h pim_pa=%h", what, dram_pa, pim_pa); end
  endtask

  initial begin
    // core 1 of the paper's example: source 0xba080000, third line
    dram_base = 36'h0_BA08_0000; unit = 0; heap = 0; off = 2; k = 0; #1;
    check(dram_pa == 36'h0_BA08_0080, "DRAM line address");
    check(pim_pa == BASE + 36'h400, "PIM burst of line 2 (MRAM byte 128 -> 8*128)");
    // last bank unit, heap 0x100, offset 3 lines, burst 5
    dram_base = 36'h0_CA00_0000; unit = 63; heap = 26'h100; off = 3; k = 5; #1;
    check(dram_pa == 36'h0_CA00_00C0, "DRAM address, unit 63");
    check(pim_pa == 36'h8_0000_0000 + 36'h7_E000_0000 + 36'h0F40, "PIM burst, unit 63");
    for (int i = 0; i < 2000; i++) begin
      dram_base = pa_t'({$urandom, $urandom}) & ~pa_t'(63);
      unit = 6'($urandom); heap = HEAP_W'($urandom) & ~HEAP_W'(7) & 26'h1FF_FFFF;
      off = OFF_W'($urandom_range(1 << 19)); k = 3'($urandom);
      #1;
      check(dram_pa == dram_base + pa_t'(64 * longint'(off)), "random DRAM");
      // chip 7 sits on byte lane 0, so its MRAM byte is the burst's first byte
      check(pim_pa == ref_pim_pa(BASE, 8 * int'(unit) + 7, longint'(heap) + 64 * longint'(off) + 8 * longint'(k)),
            "random PIM");
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
