// tb_dce_ctrl -- Self-checking test of the DCE controller's register
// interface: entry forwarding to the address buffer, SIZE/HEAP registers and
// read-back, start pulse and direction, busy, interrupt on all lanes done,
// interrupt clear, start ignored while busy, entry invalidation and Offset
// read path.  The lanes are played by the testbench.
module tb_dce_ctrl;
  import pimmmu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic        mmio_we = 0, mmio_re = 0;
  logic [11:0] mmio_addr = 0;
  logic [63:0] mmio_wdata = 0, mmio_rdata;
  logic        irq, start, busy, ab_wr_en, ab_clr_valid;
  dir_e        dir;
  logic [OFF_W-1:0]     size_lines, off_rd;
  logic [HEAP_W-1:0]    heap;
  logic [NUM_CH-1:0]    lane_done = '1;
  logic [CORE_ID_W-1:0] ab_wr_id, off_id;
  ab_entry_t            ab_wr_entry;

  dce_ctrl dut (.*);

  // Offset read path: the "address buffer" returns a function of the id.
  assign off_rd = OFF_W'(off_id) * 3 + 1;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int n_start = 0, n_abwr = 0, n_clr = 0;
  logic [CORE_ID_W-1:0] last_id;
  ab_entry_t last_entry;
  always @(posedge clk) begin
    n_start += start;
    n_clr   += ab_clr_valid;
    if (ab_wr_en) begin n_abwr++; last_id = ab_wr_id; last_entry = ab_wr_entry; end
  end

  task automatic wr(logic [11:0] a, logic [63:0] d);
    @(negedge clk); mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk); mmio_we = 0;
  endtask
  task automatic rd(logic [11:0] a, output logic [63:0] d);
    @(negedge clk); mmio_re = 1; mmio_addr = a;
    @(negedge clk); mmio_re = 0; d = mmio_rdata;
  endtask

  initial begin
    logic [63:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd(12'h003, d); check(d == 64'h0, "status idle after reset");

    // entries
    for (int i = 0; i < 40; i++) begin
      automatic logic [8:0]  id = 9'($urandom);
      automatic logic [35:0] a  = 36'({$urandom, $urandom});
      automatic bit          v  = 1'($urandom);
      wr(12'h400 + 12'(id), {v, 27'h5A5A5A5, a});
      check(n_abwr == i + 1 && last_id == id && last_entry.valid == v && last_entry.dram == a,
            $sformatf("entry %0d forwarded", id));
    end
    // registers
    wr(12'h001, 64'd4096 + 64'd13);
    wr(12'h002, 64'h120);
    check(size_lines == OFF_W'(64), "SIZE in lines");
    check(heap == HEAP_W'(64'h120), "HEAP");
    rd(12'h001, d); check(d == 64'd4096, "SIZE read back");
    rd(12'h002, d); check(d == 64'h120, "HEAP read back");
    // Offsets
    for (int i = 0; i < 20; i++) begin
      automatic logic [8:0] id = 9'($urandom);
      rd(12'h800 + 12'(id), d);
      check(d == 64'(OFF_W'(id) * 3 + 1), $sformatf("Offset %0d read", id));
    end

    // start PIM->DRAM
    lane_done = '1;
    wr(12'h000, 64'h3);
    check(n_start == 1, "one start pulse");
    check(busy && dir == DIR_P2D, "busy, direction PIM->DRAM");
    lane_done = '0;
    wr(12'h000, 64'h1);
    check(n_start == 1, "start ignored while busy");
    wr(12'h001, 64'd64);
    check(size_lines == OFF_W'(64), "SIZE not changed while busy");
    wr(12'h000, 64'h4);
    check(n_clr == 0, "no invalidation while busy");
    rd(12'h003, d); check(d == 64'h1, "status busy");
    lane_done = 4'b0111;
    repeat (5) @(negedge clk);
    check(busy && !irq, "still busy with one lane running");
    lane_done = '1;
    @(negedge clk);
    check(!busy && irq, "irq when every lane is done");
    rd(12'h003, d); check(d == 64'h2, "status irq");
    wr(12'h000, 64'h8);
    check(!irq, "irq cleared");
    // start DRAM->PIM, invalidate
    wr(12'h000, 64'h1);
    check(n_start == 2 && dir == DIR_D2P, "second start, DRAM->PIM");
    lane_done = '0; @(negedge clk); lane_done = '1; @(negedge clk);
    check(irq && !busy, "second completion");
    wr(12'h000, 64'h4);
    check(n_clr == 1 && n_start == 2, "invalidation without start");

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
