// tb_addr_buf -- Self-checking test of one address-buffer bank: entry writes
// and reads on both ports, valid bits and their bulk invalidation, Offset
// increments of arbitrary core subsets of a bank unit, and the Offset clear,
// all against a shadow copy kept by the testbench.
module tb_addr_buf;
  import pimmmu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic wr_en = 0, clr_valid = 0, clr_off = 0, inc_en = 0;
  logic [6:0] wr_idx = 0, rd_idx_a = 0, rd_idx_b = 0, off_idx = 0;
  ab_entry_t wr_entry = '0, rd_entry_a, rd_entry_b;
  logic [3:0] inc_unit = 0;
  logic [7:0] inc_mask = 0;
  logic [OFF_W-1:0] off_rd;

  addr_buf dut (.*);

  pa_t    sh_dram [128];
  bit     sh_vld  [128];
  longint sh_off  [128];
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic compare_all();
    for (int i = 0; i < 128; i++) begin
      rd_idx_a = 7'(i); rd_idx_b = 7'(127 - i); off_idx = 7'(i); #0.1;
      check(rd_entry_a.valid == sh_vld[i] && (!sh_vld[i] || rd_entry_a.dram == sh_dram[i]), $sformatf("port A entry %0d", i));
      check(rd_entry_b.valid == sh_vld[127-i] && (!sh_vld[127-i] || rd_entry_b.dram == sh_dram[127-i]), $sformatf("port B entry %0d", 127-i));
      check(off_rd == OFF_W'(sh_off[i]), $sformatf("Offset %0d: %0d vs %0d", i, off_rd, sh_off[i]));
    end
  endtask

  initial begin
    foreach (sh_vld[i]) begin sh_vld[i] = 0; sh_off[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare_all();
    // load every entry, about 3/4 valid
    for (int i = 0; i < 128; i++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 7'(i);
      wr_entry = '{valid: ($urandom_range(3) != 0), dram: pa_t'({$urandom, $urandom})};
      sh_vld[i] = wr_entry.valid; sh_dram[i] = wr_entry.dram;
    end
    @(negedge clk); wr_en = 0;
    compare_all();
    // random Offset increments
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      inc_en = $urandom_range(3) != 0; inc_unit = 4'($urandom); inc_mask = 8'($urandom);
      if (inc_en) for (int c = 0; c < 8; c++) if (inc_mask[c]) sh_off[8*inc_unit + c]++;
    end
    @(negedge clk); inc_en = 0;
    compare_all();
    // clear the Offsets (start of a transfer)
    @(negedge clk); clr_off = 1; @(negedge clk); clr_off = 0;
    foreach (sh_off[i]) sh_off[i] = 0;
    compare_all();
    // invalidate everything
    @(negedge clk); clr_valid = 1; @(negedge clk); clr_valid = 0;
    foreach (sh_vld[i]) sh_vld[i] = 0;
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
