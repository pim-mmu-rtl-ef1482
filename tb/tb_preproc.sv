// tb_preproc -- Self-checking test of the transpose unit.  First the
// "DATAWORD" example: eight words, one per chip, each spelling D,A,T,A,W,O,R,D
// from byte 0 up, must come out as bursts whose beat r holds letter r in all
// eight byte lanes.  Then random tiles in both directions against a byte-array
// reference, a DRAM->PIM->DRAM round trip, and the one-cycle latency.
module tb_preproc;
  import pimmmu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid = 0, out_valid;
  dir_e dir = DIR_D2P;
  line_t tile_in [TILE_LINES], tile_out [TILE_LINES];

  preproc dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // reference: bytes of line l, byte index b
  function automatic logic [7:0] byte_of(line_t t [TILE_LINES], int l, int b);
    return t[l][8*b +: 8];
  endfunction

  task automatic apply(dir_e d);
    @(negedge clk); dir = d; in_valid = 1;
    @(negedge clk); in_valid = 0;
    check(out_valid, "out_valid one cycle after in_valid");
    @(negedge clk);
    check(!out_valid, "out_valid is a single pulse");
  endtask

  initial begin
    line_t keep [TILE_LINES];
    byte unsigned word [8] = '{"D", "A", "T", "A", "W", "O", "R", "D"};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Fig.-3 style example: word 0 of every chip's line is DATAWORD
    for (int c = 0; c < 8; c++) begin
      tile_in[c] = '0;
      for (int r = 0; r < 8; r++) tile_in[c][8*r +: 8] = word[r];
    end
    apply(DIR_D2P);
    for (int r = 0; r < 8; r++)
      check(tile_out[0][64*r +: 64] == {8{word[r]}}, $sformatf("DATAWORD beat %0d", r));
    // random tiles, both directions
    for (int n = 0; n < 200; n++) begin
      dir_e d = dir_e'($urandom_range(1));
      for (int l = 0; l < 8; l++) for (int i = 0; i < 16; i++) tile_in[l][32*i +: 32] = $urandom;
      apply(d);
      for (int a = 0; a < 8; a++) for (int b = 0; b < 8; b++) for (int r = 0; r < 8; r++) begin
        // D2P: output line a (burst k=a), beat b, lane of chip r  <=  input line r (chip), word a, byte b
        if (d == DIR_D2P)
          check(byte_of(tile_out, a, 8*b + 7 - r) == byte_of(tile_in, r, 8*a + b), "D2P byte");
        else
          check(byte_of(tile_out, r, 8*a + b) == byte_of(tile_in, a, 8*b + 7 - r), "P2D byte");
      end
    end
    // round trip
    for (int l = 0; l < 8; l++) for (int i = 0; i < 16; i++) tile_in[l][32*i +: 32] = $urandom;
    keep = tile_in;
    apply(DIR_D2P);
    tile_in = tile_out;
    apply(DIR_P2D);
    for (int l = 0; l < 8; l++) check(tile_out[l] == keep[l], "round trip");
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
