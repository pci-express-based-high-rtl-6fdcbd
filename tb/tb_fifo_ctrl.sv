// tb_fifo_ctrl: self-checking test of fifo_ctrl with two pages.
// A queue model of the DMA FIFO offers 600 numbered beats; the last one ends an event.
// The test plays the descriptor controller: it takes full pages and frees them later.
// Checks: pages come out as (0,256), (1,256), then an early-closed (0,88) after
// FLUSH_IDLE idle cycles; each beat is written to page*256 + offset in arrival order;
// reading stops while both pages are reserved and resumes after a page is freed.
module tb_fifo_ctrl;
  import pcie40_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_valid, rd_pop, mem_we, fp_valid, fp_ready = 0, free_valid = 0;
  beat_t rd_beat;
  logic [8:0] mem_waddr;
  logic [DW-1:0] mem_wdata;
  logic [0:0] fp_page, free_page = 0;
  logic [15:0] fp_beats;
  logic [31:0] pages_closed, pages_flushed;

  fifo_ctrl #(.NPAGES(2), .FLUSH_IDLE(16)) dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // source model
  int sent = 0;
  localparam int TOTAL = 600;
  always_comb begin
    rd_valid = !rst && sent < TOTAL;
    rd_beat = '0;
    rd_beat.data = {8{32'(sent)}};
    rd_beat.eop = (sent == TOTAL - 1);
  end
  always @(posedge clk) if (rd_pop) sent <= sent + 1;

  // memory write monitor
  int wr_n = 0;
  always @(posedge clk) if (!rst && mem_we) begin
    check(mem_wdata == {8{32'(wr_n)}}, $sformatf("write %0d data", wr_n));
    // beat i goes to page 1 for i in 256..511, else page 0; offset i % 256
    check(mem_waddr == 9'({(wr_n / 256) == 1 ? 1'b1 : 1'b0, 8'(wr_n % 256)}),
          $sformatf("addr of beat %0d: %0d", wr_n, mem_waddr));
    wr_n++;
  end

  initial begin
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    // take page 0 when it is full
    wait (fp_valid); @(negedge clk);
    check(fp_page == 0 && fp_beats == 256, $sformatf("first page %0d/%0d", fp_page, fp_beats));
    fp_ready = 1; @(negedge clk); fp_ready = 0;
    wait (fp_valid); @(negedge clk);
    check(fp_page == 1 && fp_beats == 256, $sformatf("second page %0d/%0d", fp_page, fp_beats));
    fp_ready = 1; @(negedge clk); fp_ready = 0;
    // both reserved: no reading for 50 cycles
    begin
      int s0;
      s0 = sent;
      repeat (50) @(negedge clk);
      check(sent == s0, "no reading while no page is free");
      check(sent == 512, $sformatf("512 beats read, got %0d", sent));
    end
    free_valid = 1; free_page = 0; @(negedge clk); free_valid = 0;
    wait (fp_valid); @(negedge clk);
    check(fp_page == 0 && fp_beats == 88, $sformatf("flushed page %0d/%0d", fp_page, fp_beats));
    fp_ready = 1; @(negedge clk); fp_ready = 0;
    check(pages_flushed == 1, "one early close");
    @(negedge clk);
    check(pages_closed == 3, "three pages closed");
    check(wr_n == TOTAL, $sformatf("all beats written: %0d", wr_n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
