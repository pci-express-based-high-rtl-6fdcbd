// tb_write_dma: self-checking test of write_dma with an onchip_mem of two pages.
// The memory is preloaded through its write port. Descriptor 1 copies a full 8 kB page
// (256 beats) with an always-ready host port and must finish in 257 cycles; descriptor 2
// copies 40 beats from page 1 with random host stalls. Every beat's host address, data and
// last flag are compared with the memory contents and the descriptor.
module tb_write_dma;
  import pcie40_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic desc_valid = 0, desc_ready, mem_re, hw_valid, hw_last, hw_ready = 1, done;
  dma_desc_t desc;
  logic [8:0] mem_raddr;
  logic [DW-1:0] mem_rdata, hw_data;
  logic [63:0] hw_addr;
  logic we = 0;
  logic [8:0] waddr = 0;
  logic [DW-1:0] wdata = 0;

  onchip_mem #(.NPAGES(2)) mem (.clk, .we, .waddr, .wdata, .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));
  write_dma #(.NPAGES(2)) dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [DW-1:0] pat(int a);
    return {8{32'(a * 3 + 11)}};
  endfunction

  int nb = 0, exp_n = 0, src_beat = 0, cyc = 0, t0 = 0, t1 = 0;
  logic [63:0] dst0;
  always @(posedge clk) begin
    cyc++;
    if (!rst && hw_valid && hw_ready) begin
      check(hw_addr == dst0 + 64'(nb) * 32, $sformatf("beat %0d address", nb));
      check(hw_data == pat(src_beat + nb), $sformatf("beat %0d data", nb));
      check(hw_last == (nb == exp_n - 1), $sformatf("beat %0d last", nb));
      nb++;
    end
  end

  task automatic run(int src, int n, logic [63:0] dst);
    nb = 0; exp_n = n; src_beat = src; dst0 = dst;
    @(negedge clk);
    desc_valid = 1; desc.src = 32'(src * 32); desc.dst = dst; desc.size = 32'(n * 32);
    @(posedge clk); t0 = int'($time);
    @(negedge clk); desc_valid = 0;
    wait (done); t1 = int'($time); @(negedge clk);
    check(nb == n, $sformatf("%0d beats sent", nb));
  endtask

  initial begin
    for (int a = 0; a < 512; a++) begin
      @(negedge clk); we = 1; waddr = 9'(a); wdata = pat(a);
    end
    @(negedge clk); we = 0; rst = 0;
    run(0, 256, 64'h40_0010_0000);
    check((t1 - t0) / 10 == 257, $sformatf("full page took %0d cycles, expected 257", (t1 - t0) / 10));
    fork
      run(256 + 5, 40, 64'h40_0020_2000);
      begin
        while (!done) begin @(negedge clk); hw_ready = ($urandom % 3) != 0; end
        hw_ready = 1;
      end
    join
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
