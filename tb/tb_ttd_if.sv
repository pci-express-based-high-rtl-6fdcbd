// tb_ttd_if: self-checking test of ttd_if with eight links.
// Checks: busy follows (one cycle later) an enabled link's busy, the DMA busy and the
// software busy, and ignores a masked link; triggers are counted, and those arriving while
// busy are counted separately; busy cycles are counted; sticky busy/error link vectors
// record enabled links only and are cleared by clr_sticky.
module tb_ttd_if;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic trig = 0, dma_busy = 0, sw_busy = 0, clr_sticky = 0, busy;
  logic [7:0] link_mask = 8'b0111_1111, link_busy = 0, link_err = 0, busy_links, err_links;
  logic [31:0] trig_count, busy_cycles, trig_while_busy;

  ttd_if #(.NLINKS(8)) dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    for (int i = 0; i < 5; i++) begin trig = 1; @(negedge clk); trig = 0; @(negedge clk); end
    check(trig_count == 5 && trig_while_busy == 0 && !busy, "5 triggers, not busy");
    link_busy = 8'b1000_0000; @(negedge clk); @(negedge clk);
    check(!busy, "masked link ignored");
    link_busy = 8'b0000_0100; @(negedge clk);
    check(busy, "enabled link busy -> busy after one cycle");
    trig = 1; @(negedge clk); trig = 0;
    link_busy = 0; repeat (2) @(negedge clk);
    check(!busy, "busy released");
    check(trig_while_busy == 1 && trig_count == 6, "trigger while busy counted");
    check(busy_cycles == 2, $sformatf("busy cycles %0d", busy_cycles));
    dma_busy = 1; @(negedge clk); check(busy, "DMA busy"); dma_busy = 0;
    sw_busy = 1; @(negedge clk); @(negedge clk); check(busy, "software busy"); sw_busy = 0;
    link_err = 8'b1000_0010; @(negedge clk); link_err = 0; @(negedge clk);
    check(busy_links == 8'b0000_0100, $sformatf("sticky busy links %b", busy_links));
    check(err_links == 8'b0000_0010, $sformatf("sticky error links %b", err_links));
    clr_sticky = 1; @(negedge clk); clr_sticky = 0; @(negedge clk);
    check(busy_links == 0 && err_links == 0, "sticky vectors cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
