// tb_dma_fifo: self-checking test of dma_fifo at its full 32 kB size.
// Fills the FIFO until `full` (1024 beats in the array plus the output register), checks
// the level and the complete-event count, then drains it while writing more with random
// pauses on both sides, comparing every beat (data, sop, eop) with a queue model.
module tb_dma_fifo;
  import pcie40_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0, full, rd_pop = 0, rd_valid;
  beat_t wr_beat, rd_beat;
  logic [11:0] level;
  logic [15:0] events;

  dma_fifo dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  beat_t q[$];
  int wn = 0, ev_in = 0;
  beat_t e;
  function automatic beat_t mk(int i);
    beat_t b;
    b.data = {8{32'(i * 7 + 1)}};
    b.sop  = (i % 5) == 0;
    b.eop  = (i % 5) == 4;
    return b;
  endfunction

  initial begin
    wr_beat = '0;
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    // fill
    while (!full) begin
      wr_beat = mk(wn); wr_en = 1;
      @(posedge clk); q.push_back(wr_beat); if (wr_beat.eop) ev_in++; wn++;
      @(negedge clk); wr_en = 0;
    end
    @(negedge clk);
    check(wn == 1025, $sformatf("capacity %0d beats", wn));
    check(level == 12'(wn), $sformatf("level %0d", level));
    check(events == 16'(ev_in), $sformatf("events %0d exp %0d", events, ev_in));
    // drain with concurrent random writes
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      wr_en = ($urandom % 2) != 0 && wn < 2000; wr_beat = mk(wn);
      rd_pop = ($urandom % 4) != 0 && rd_valid;
      if (rd_pop) begin
        e = q.pop_front();
        check(rd_beat == e, "beat order/content");
      end
      if (wr_en && !full) begin q.push_back(wr_beat); wn++; end
      @(posedge clk); #1; rd_pop = 0; wr_en = 0;
    end
    while (rd_valid) begin
      @(negedge clk); rd_pop = 1;
      e = q.pop_front(); check(rd_beat == e, "tail beat");
      @(posedge clk); #1; rd_pop = 0;
    end
    @(negedge clk);
    check(q.size() == 0 && level == 0 && events == 0, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
