// tb_xfer_1mb -- Transfer-size workload: 1 MB in all (2 KB per PIM core for
// 512 cores, every 37th core left out), DRAM->PIM and back PIM->DRAM, on the
// top at its default parameters.  This is the smallest transfer size of the
// throughput sweep the design targets; larger sizes (4 MB to 256 MB) use the
// same path with a larger SIZE register value and only take longer.  All
// checks of the shared end-to-end harness apply; it also prints the cycle
// count of each direction.  The harness ends the run; the block below is an
// outer watchdog in case it never does.
module tb_xfer_1mb;
  pim_mmu_e2e #(.SIZE(2048), .WATCHDOG(400_000)) h ();

  initial begin
    repeat (3_000_000) @(posedge h.clk);
    $display("FAIL: outer watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures + 1);
    $finish;
  end
endmodule
