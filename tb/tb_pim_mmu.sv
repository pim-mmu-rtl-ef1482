// tb_pim_mmu -- End-to-end test of the PIM-MMU top: a DRAM->PIM and a
// PIM->DRAM transfer of 256 B per PIM core over all 512 cores (see
// pim_mmu_e2e for what is checked).  The top runs at its default parameters.
module tb_pim_mmu;
  pim_mmu_e2e #(.SIZE(256)) h ();
endmodule
