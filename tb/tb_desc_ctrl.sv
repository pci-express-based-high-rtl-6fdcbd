// tb_desc_ctrl: self-checking test of desc_ctrl.
// The test plays read_dma (pushes two free super pages), fifo_ctrl (offers filled pages
// 0..3 in turn with varying sizes) and write_dma (accepts a descriptor and reports done a
// few cycles later). It checks each descriptor's source (page * 8 kB), destination (super
// page + slot * 8 kB, moving to the second super page after 128 pages) and size, the freed
// page, the upstream status record, the table registers passed to read_dma, and that the
// controller waits (nosp_cycles) when the 257th page finds no free super page.
module tb_desc_ctrl;
  import pcie40_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [63:0] tbl_addr = 64'hABC0, rd_addr, sp_addr = 0;
  logic [31:0] tbl_count = 2, rd_count, sp_used, nosp_cycles;
  logic start = 0, rd_start, sp_valid = 0, sp_room, fp_valid = 0, fp_ready, free_valid;
  logic [2:0] fp_page = 0, free_page;
  logic [15:0] fp_beats = 0;
  logic wr_valid, wr_ready = 0, wr_done = 0, st_valid;
  dma_desc_t wr_desc;
  dma_status_t st_data;

  desc_ctrl #(.NPAGES(8)) dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam logic [63:0] SP0 = 64'h0000_0010_0000_0000, SP1 = 64'h0000_0020_0040_0000;
  int npages = 0, nfree = 0, nst = 0;

  // write_dma model
  initial forever begin
    @(negedge clk);
    if (wr_valid) begin
      int n;
      logic [63:0] exp_dst;
      n = npages;
      exp_dst = (n < 128 ? SP0 : SP1) + 64'(n % 128) * 8192;
      check(wr_desc.src == 32'((n % 8) * 8192), $sformatf("desc %0d src %h", n, wr_desc.src));
      check(wr_desc.dst == exp_dst, $sformatf("desc %0d dst %h", n, wr_desc.dst));
      check(wr_desc.size == 32'((n % 256 + 1) * 32), $sformatf("desc %0d size %0d", n, wr_desc.size));
      wr_ready = 1; @(negedge clk); wr_ready = 0;
      repeat (2) @(negedge clk);
      wr_done = 1; @(negedge clk); wr_done = 0;
      npages++;
    end
  end

  always @(posedge clk) if (!rst) begin
    if (free_valid) begin
      check(free_page == 3'(nfree % 8), $sformatf("freed page %0d", free_page));
      nfree++;
    end
    if (st_valid) begin
      check(st_data.seq == 32'(nst) && st_data.size == 32'((nst % 256 + 1) * 32), $sformatf("status %0d", nst));
      nst++;
    end
  end

  initial begin
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    start = 1;
    #1 check(rd_start && rd_addr == 64'hABC0 && rd_count == 2, "table registers passed to read_dma");
    @(negedge clk); start = 0;
    check(sp_room, "room for super pages");
    sp_valid = 1; sp_addr = SP0; @(negedge clk);
    sp_addr = SP1; @(negedge clk); sp_valid = 0;
    for (int p = 0; p < 257; p++) begin
      @(negedge clk);
      fp_valid = 1; fp_page = 3'(p % 8); fp_beats = 16'(p % 256 + 1);
      if (p == 256) break;
      while (!fp_ready) @(negedge clk);
      @(negedge clk); fp_valid = 0;
    end
    repeat (50) @(negedge clk);
    check(npages == 256, $sformatf("256 pages sent, got %0d", npages));
    check(sp_used == 2, $sformatf("two super pages used, got %0d", sp_used));
    check(nosp_cycles > 40, "waits for a free super page");
    check(nfree == 256 && nst == 256, "freed and reported every page");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
