// tb_data_buf -- Self-checking test of one data-buffer bank: random line
// writes into random tiles and lines, whole-tile reads compared with a shadow
// copy, including a write and a read of the same tile in one cycle (the read
// sees the old line).
module tb_data_buf;
  import pimmmu_pkg::*;

  logic clk = 0;
  always #1 clk = ~clk;

  logic wr_en = 0;
  logic [2:0] wr_slot = 0, wr_idx = 0, rd_slot = 0;
  line_t wr_data = '0;
  line_t rd_tile [TILE_LINES];

  data_buf dut (.*);

  line_t sh [8][8];
  bit    init [8][8];
  int checks = 0, failures = 0;

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    foreach (init[s, i]) init[s][i] = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // check the tile selected last cycle before changing anything
      for (int i = 0; i < 8; i++) if (init[rd_slot][i]) begin
        checks++;
        if (rd_tile[i] != sh[rd_slot][i]) begin failures++; $display("FAIL: tile %0d line %0d", rd_slot, i); end
      end
      wr_en = $urandom_range(1); wr_slot = 3'($urandom); wr_idx = 3'($urandom); wr_data = rnd_line();
      rd_slot = 3'($urandom);
      @(posedge clk);
      #0.1;
      if (wr_en) begin sh[wr_slot][wr_idx] = wr_data; init[wr_slot][wr_idx] = 1; end
    end
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
